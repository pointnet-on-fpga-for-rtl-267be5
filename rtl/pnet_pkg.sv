// pnet_pkg: types and constants shared by the PointNet matrix-multiplication
// accelerator.
//
// The accelerator computes Y = act(X * W + b) for one network layer at a time,
// where X is an n x Kin feature map (one row per point), W a Kin x Kout weight
// matrix with batch normalisation folded in, and b a per-column bias. The work is
// cut into tiles: a 1 x M slice of one input row times an M x N weight tile gives
// a 1 x N block of partial sums. M = N = 32 and 8-bit data follow the paper's main
// configuration; everything else here (field widths, the descriptor layout, the
// register map) is this design's own choice.
//
// A "layer descriptor" (desc_t) is what the host writes into the register file for
// every layer; the controller walks the list of descriptors without further host
// interaction.
package pnet_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned M_DEF        = 32;    // multipliers per PE (inner-dimension unroll)
  localparam int unsigned N_DEF        = 32;    // PEs in the array (output-column unroll)
  localparam int unsigned W_DEF        = 8;     // data / weight width (INT8 build)
  localparam int unsigned ACC_W_DEF    = 32;    // partial-sum width in output buffer stage 1
  localparam int unsigned MAX_POINTS   = 4096;  // largest point cloud per frame
  localparam int unsigned IN_WORDS_DEF = 4096;  // 1 x M words per input-buffer bank
  localparam int unsigned WT_TILES_DEF = 1024;  // M x N weight tiles per weight-buffer bank
  localparam int unsigned JT_MAX_DEF   = 128;   // output-column tiles per layer (4096 / N)
  localparam int unsigned POOL_JT_DEF  = 32;    // column tiles covered by max pooling (1024 / N)
  localparam int unsigned S1_DEPTH_DEF = 4096;  // 1 x N words of partial sums in stage 1
  localparam int unsigned S2_DEPTH_DEF = 64;    // 1 x N result words queued in stage 2
  localparam int unsigned NDESC_DEF    = 32;    // layer descriptors held in the register file

  // ---------------------------------------------------------------- encodings
  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,
    ACT_RELU  = 2'd1,
    ACT_RELU6 = 2'd2
  } act_e;

  // Output pattern of the PE array (Fig. "matrix multiplication by block"):
  // ORD_ROW walks along an output row (next column tile of the same point),
  // ORD_COL walks down an output column (same column tile, next point).
  typedef enum logic {
    ORD_ROW = 1'b0,
    ORD_COL = 1'b1
  } order_e;

  typedef enum logic {
    DST_DDR   = 1'b0,   // results leave through the DMA write stream
    DST_INBUF = 1'b1    // results are written back into the input buffer
  } dest_e;

  typedef enum logic {
    SRC_DMA   = 1'b0,   // layer input is fetched by DMA
    SRC_INBUF = 1'b1    // layer input was left in the input buffer by the previous layer
  } src_e;

  typedef enum logic {
    DMA_WEIGHT = 1'b0,
    DMA_INPUT  = 1'b1
  } dma_kind_e;

  // ---------------------------------------------------------------- descriptor
  typedef struct packed {
    logic [15:0] npts;      // points in the layer input (rows of X)
    logic [15:0] chunk;     // points processed per pass (npts is cut into chunks)
    logic [7:0]  kt;        // input tiles  = ceil(Kin  / M)
    logic [7:0]  jt;        // output tiles = ceil(Kout / N)
    logic [5:0]  shift;     // arithmetic right shift from ACC_W to W bits
    logic [15:0] clip;      // upper clamp of ReLU6, in output units
    order_e      order;
    act_e        act;
    logic        pool;      // max pooling over all points of the layer
    dest_e       dest;
    src_e        src;
    logic [31:0] in_addr;   // DDR word address of X (words of M elements)
    logic [31:0] w_addr;    // DDR word address of the weight/bias block
    logic [31:0] out_addr;  // DDR word address of Y (words of N elements)
  } desc_t;

  // Register map of the GP (AXI-lite) port, byte addresses.
  localparam logic [11:0] REG_CTRL    = 12'h000;  // W: bit0 = start
  localparam logic [11:0] REG_STATUS  = 12'h004;  // R: bit0 busy, bit1 done
  localparam logic [11:0] REG_NLAYERS = 12'h008;  // RW: descriptors to run
  localparam logic [11:0] REG_CYCLES  = 12'h010;  // R: cycles spent busy
  localparam logic [11:0] REG_STALLS  = 12'h014;  // R: issue cycles lost to a full stage 2
  localparam logic [11:0] REG_WAITS   = 12'h018;  // R: cycles waiting for a buffer load
  localparam logic [11:0] REG_PASSES  = 12'h01C;  // R: passes completed
  localparam logic [11:0] REG_DESC    = 12'h400;  // descriptor d, word w at REG_DESC + 32*d + 4*w

  // Descriptor <-> register words.
  function automatic desc_t words_to_desc(input logic [5:0][31:0] wd);
    desc_t d;
    d.npts     = wd[0][15:0];
    d.chunk    = wd[0][31:16];
    d.kt       = wd[1][7:0];
    d.jt       = wd[1][15:8];
    d.shift    = wd[1][21:16];
    d.order    = order_e'(wd[1][22]);
    d.act      = act_e'(wd[1][24:23]);
    d.pool     = wd[1][25];
    d.dest     = dest_e'(wd[1][26]);
    d.src      = src_e'(wd[1][27]);
    d.clip     = wd[2][15:0];
    d.in_addr  = wd[3];
    d.w_addr   = wd[4];
    d.out_addr = wd[5];
    return d;
  endfunction

  // Sideband that travels with every issued 1 x M x N tile operation.
  typedef struct packed {
    logic        valid;
    logic [15:0] s1_addr;    // partial-sum word in stage 1
    logic [7:0]  j;          // output column tile
    logic        first_k;    // first input tile: start from the bias
    logic        last_k;     // last input tile: result is final
    logic        pool_first; // first point of a max-pooled layer
    logic        pool_emit;  // last point of a max-pooled layer
    logic [15:0] fb_addr;    // input-buffer word for a fed-back result
    logic [31:0] out_idx;    // DDR word address for a result sent out
    logic        last;       // last result of the layer
  } sb_t;

endpackage
