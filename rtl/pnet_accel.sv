// pnet_accel: PointNet matrix-multiplication accelerator (top level).
//
// Every PointNet operation is a shared-MLP layer (a 1x1 convolution, i.e. a
// matrix product of the n x Kin point features with a Kin x Kout weight matrix,
// batch normalisation folded in, then ReLU) or a max pooling over the points.
// This block runs a list of such layers, configured by the host through the
// register file, on data that the DMA streams in from DDR and out again.
//
// Data path, in pipeline order:
//   input buffer (2 banks) ---+
//                             +--> PE array (N PEs x M multipliers + adder tree)
//   weight buffer (2 banks) --+        |
//                                      v
//   output buffer stage 1 -------> adder array (partial sums across input tiles,
//        ^                             |        bias on the first tile)
//        +---- partial sums -----------+
//                                      v  (last input tile)
//                              comparator array (rescale, ReLU/ReLU6, max pool)
//                                      v
//                              output buffer stage 2 --> DMA write stream
//                                      +---------------> input buffer (next layer)
// The controller (pnet_ctrl_fsm) sequences loads and computation and swaps the
// double buffers. Blocks, their order and the two feedback paths follow the
// paper's architecture figure; the paper draws the comparators between the
// adders and stage 1, while here partial sums bypass them and only final sums
// pass through them on the way to stage 2.
//
// Interfaces (the DMA engine, DDR and host are outside this block):
//   s_axil_*   AXI4-lite register port (GP port)
//   dma_cmd_*  read requests to the DMA: kind, DDR word address, length in words
//   s_in_*     DMA read stream, one 1 x M word of W-bit elements per beat
//   m_out_*    DMA write stream, one 1 x N result word per beat, with its DDR
//              word address (m_out_idx) and a last flag at the end of a layer
// Timing: one tile operation (M x N multiply-accumulates) per cycle while
// running; issue-to-stage-2 latency is LP + 3 cycles with LP = 1 + clog2(M).
// Lint notes: the reset also gates checking assertions in sub-blocks (disable
// iff), reported by a linter as a reset used both ways; no logic comes of it. The
// comparator output sideband carries fields (stage-1 address, tile index, flags)
// that stage 2 does not need, and feedback addresses are wider than a small
// input buffer; those bits are reported unused.
module pnet_accel
  import pnet_pkg::*;
#(
  parameter int unsigned M        = M_DEF,
  parameter int unsigned N        = N_DEF,
  parameter int unsigned W        = W_DEF,
  parameter int unsigned ACC_W    = ACC_W_DEF,
  parameter int unsigned IN_WORDS = IN_WORDS_DEF,
  parameter int unsigned WT_TILES = WT_TILES_DEF,
  parameter int unsigned JT_MAX   = JT_MAX_DEF,
  parameter int unsigned POOL_JT  = POOL_JT_DEF,
  parameter int unsigned S1_DEPTH = S1_DEPTH_DEF,
  parameter int unsigned S2_DEPTH = S2_DEPTH_DEF,
  parameter int unsigned NDESC    = NDESC_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-lite configuration port
  input  logic                  s_axil_awvalid,
  output logic                  s_axil_awready,
  input  logic [11:0]           s_axil_awaddr,
  input  logic                  s_axil_wvalid,
  output logic                  s_axil_wready,
  input  logic [31:0]           s_axil_wdata,
  output logic                  s_axil_bvalid,
  input  logic                  s_axil_bready,
  output logic [1:0]            s_axil_bresp,
  input  logic                  s_axil_arvalid,
  output logic                  s_axil_arready,
  input  logic [11:0]           s_axil_araddr,
  output logic                  s_axil_rvalid,
  input  logic                  s_axil_rready,
  output logic [31:0]           s_axil_rdata,
  output logic [1:0]            s_axil_rresp,
  // DMA read command
  output logic                  dma_cmd_valid,
  input  logic                  dma_cmd_ready,
  output dma_kind_e             dma_cmd_kind,
  output logic [31:0]           dma_cmd_addr,
  output logic [31:0]           dma_cmd_beats,
  // DMA read stream
  input  logic                  s_in_valid,
  output logic                  s_in_ready,
  input  logic [M-1:0][W-1:0]   s_in_data,
  // DMA write stream
  output logic                  m_out_valid,
  input  logic                  m_out_ready,
  output logic [N-1:0][W-1:0]   m_out_data,
  output logic [31:0]           m_out_idx,
  output logic                  m_out_last,
  // status
  output logic                  busy,
  output logic                  done
);
  localparam int unsigned LP    = 1 + $clog2(M);          // PE array latency
  localparam int unsigned DRAIN = LP + 4;                 // issue to stage-2 push, plus one
  localparam int unsigned DW    = $clog2(NDESC);
  localparam int unsigned IAW   = $clog2(IN_WORDS);
  localparam int unsigned TW    = $clog2(WT_TILES);
  localparam int unsigned NW    = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned JW    = $clog2(JT_MAX);
  localparam int unsigned BPB   = (M * W) / ACC_W;
  localparam int unsigned NPART = N / BPB;
  localparam int unsigned PW    = (NPART > 1) ? $clog2(NPART) : 1;
  localparam int unsigned S1AW  = $clog2(S1_DEPTH);
  localparam int unsigned S2AW  = $clog2(S2_DEPTH);

  // ---------------------------------------------------------------- control
  logic          start;
  logic [DW:0]   nlayers;
  logic [DW-1:0] ld_idx, cp_idx;
  desc_t         ld_desc, cp_desc;
  logic [31:0]   cnt_cycles, cnt_stalls, cnt_waits, cnt_passes;

  logic          ldr_start, ldr_busy;
  dma_kind_e     ldr_kind;
  logic [31:0]   ldr_beats;
  logic [15:0]   ldr_tiles;

  logic          in_rd_bank, in_wr_bank, w_rd_bank, w_wr_bank;
  logic [IAW-1:0] in_rd_addr;
  logic [TW-1:0] w_rd_tile;
  sb_t           iss;
  logic [S2AW:0] s2_free;
  logic          s2_empty;

  pnet_regfile #(.NDESC(NDESC)) u_regs (
    .clk, .rst_n,
    .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready), .s_awaddr(s_axil_awaddr),
    .s_wvalid (s_axil_wvalid),  .s_wready (s_axil_wready),  .s_wdata (s_axil_wdata),
    .s_bvalid (s_axil_bvalid),  .s_bready (s_axil_bready),  .s_bresp (s_axil_bresp),
    .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready), .s_araddr(s_axil_araddr),
    .s_rvalid (s_axil_rvalid),  .s_rready (s_axil_rready),  .s_rdata (s_axil_rdata),
    .s_rresp  (s_axil_rresp),
    .start, .nlayers,
    .desc_idx_a(ld_idx), .desc_a(ld_desc), .desc_idx_b(cp_idx), .desc_b(cp_desc),
    .busy, .done, .cnt_cycles, .cnt_stalls, .cnt_waits, .cnt_passes
  );

  pnet_ctrl_fsm #(
    .M(M), .N(N), .W(W), .ACC_W(ACC_W), .IN_WORDS(IN_WORDS), .WT_TILES(WT_TILES),
    .S1_DEPTH(S1_DEPTH), .S2_DEPTH(S2_DEPTH), .NDESC(NDESC), .DRAIN(DRAIN)
  ) u_fsm (
    .clk, .rst_n, .start, .nlayers,
    .ld_idx, .ld_desc, .cp_idx, .cp_desc,
    .dma_cmd_valid, .dma_cmd_ready, .dma_cmd_kind, .dma_cmd_addr, .dma_cmd_beats,
    .ldr_start, .ldr_kind, .ldr_beats, .ldr_tiles, .ldr_busy,
    .in_rd_bank, .in_wr_bank, .in_rd_addr,
    .w_rd_bank, .w_wr_bank, .w_rd_tile,
    .iss, .s2_free, .s2_empty,
    .busy, .done, .cnt_cycles, .cnt_stalls, .cnt_waits, .cnt_passes
  );

  // ---------------------------------------------------------------- loading
  logic                      ld_in_we, ld_w_we, ld_b_we;
  logic [IAW-1:0]            ld_in_addr;
  logic [M-1:0][W-1:0]       ld_in_data, ld_w_data;
  logic [TW-1:0]             ld_w_tile;
  logic [NW-1:0]             ld_w_col;
  logic [JW-1:0]             ld_b_j;
  logic [PW-1:0]             ld_b_part;
  logic [BPB-1:0][ACC_W-1:0] ld_b_data;

  pnet_dma_loader #(
    .M(M), .N(N), .W(W), .ACC_W(ACC_W), .IN_WORDS(IN_WORDS), .WT_TILES(WT_TILES), .JT_MAX(JT_MAX)
  ) u_loader (
    .clk, .rst_n,
    .start(ldr_start), .kind(ldr_kind), .beats(ldr_beats), .tiles(ldr_tiles), .busy(ldr_busy),
    .s_valid(s_in_valid), .s_ready(s_in_ready), .s_data(s_in_data),
    .in_we(ld_in_we), .in_addr(ld_in_addr), .in_data(ld_in_data),
    .w_we(ld_w_we), .w_tile(ld_w_tile), .w_col(ld_w_col), .w_data(ld_w_data),
    .b_we(ld_b_we), .b_j(ld_b_j), .b_part(ld_b_part), .b_data(ld_b_data)
  );

  // ---------------------------------------------------------------- buffers
  logic                      fb_we;
  logic [15:0]               fb_addr;
  logic [N-1:0][W-1:0]       fb_data;
  logic [M-1:0][W-1:0]       in_vec;
  logic [N-1:0][M-1:0][W-1:0] w_tile;
  logic [N-1:0][ACC_W-1:0]   bias, psum, pe_sum, add_out;
  logic [M-1:0][W-1:0]       fb_word;

  // The input mux gives the feedback path priority whenever stage 2 presents a
  // word for the input buffer; the controller never loads the same bank by DMA
  // at that time (a layer barrier separates them).
  // A fed-back 1 x N result word becomes a 1 x M input word (M = N by default;
  // otherwise it is truncated or zero-extended).
  always_comb begin
    fb_word = '0;
    for (int i = 0; i < M && i < N; i++) fb_word[i] = fb_data[i];
  end

  pnet_input_buffer #(.M(M), .W(W), .DEPTH(IN_WORDS)) u_inbuf (
    .clk,
    .wr_bank(in_wr_bank), .sel_fb(fb_we),
    .dma_we(ld_in_we), .dma_addr(ld_in_addr), .dma_data(ld_in_data),
    .fb_we(fb_we), .fb_addr(fb_addr[IAW-1:0]), .fb_data(fb_word),
    .rd_bank(in_rd_bank), .rd_addr(in_rd_addr), .rd_data(in_vec)
  );

  // Sideband delay line: sbd[d] is the issue sideband d cycles later.
  localparam int unsigned NSB = LP + 4;
  sb_t sbd [NSB];
  assign sbd[0] = iss;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int d = 1; d < NSB; d++) sbd[d] <= '0;
    else        for (int d = 1; d < NSB; d++) sbd[d] <= sbd[d-1];
  end

  pnet_weight_buffer #(
    .M(M), .N(N), .W(W), .ACC_W(ACC_W), .TILES(WT_TILES), .JT_MAX(JT_MAX)
  ) u_wbuf (
    .clk,
    .w_we(ld_w_we), .w_bank(w_wr_bank), .w_tile(ld_w_tile), .w_col(ld_w_col), .w_data(ld_w_data),
    .b_we(ld_b_we), .b_bank(w_wr_bank), .b_j(ld_b_j), .b_part(ld_b_part), .b_data(ld_b_data),
    .rd_bank(w_rd_bank), .rd_tile(w_rd_tile), .rd_w(w_tile),
    .rd_b_bank(w_rd_bank), .rd_j(sbd[LP].j[JW-1:0]), .rd_b(bias)
  );

  // ---------------------------------------------------------------- compute
  pnet_pe_array #(.M(M), .N(N), .W(W), .ACC_W(ACC_W)) u_pes (
    .clk, .in_vec, .w_tile, .sums(pe_sum)
  );

  // Stage 1 is read LP cycles after issue so its word meets the PE result.
  logic s1_we;
  assign s1_we = sbd[LP+2].valid && !sbd[LP+2].last_k;

  pnet_outbuf_stage1 #(.N(N), .ACC_W(ACC_W), .DEPTH(S1_DEPTH)) u_s1 (
    .clk,
    .we(s1_we), .wr_addr(sbd[LP+2].s1_addr[S1AW-1:0]), .wr_data(add_out),
    .rd_addr(sbd[LP].s1_addr[S1AW-1:0]), .rd_data(psum)
  );

  logic add_valid;
  pnet_adder_array #(.N(N), .ACC_W(ACC_W)) u_add (
    .clk, .rst_n,
    .in_valid(sbd[LP+1].valid), .first(sbd[LP+1].first_k),
    .pe_sum, .psum, .bias,
    .out_valid(add_valid), .out(add_out)
  );

  logic                cmp_valid;
  logic [N-1:0][W-1:0] cmp_out;
  sb_t                 cmp_sb;
  pnet_comparator_array #(.N(N), .W(W), .ACC_W(ACC_W), .POOL_JT(POOL_JT)) u_cmp (
    .clk, .rst_n,
    .in_valid(add_valid && sbd[LP+2].last_k), .in_sum(add_out),
    .act(cp_desc.act), .shift(cp_desc.shift), .clip(cp_desc.clip[W-1:0]),
    .pool_en(cp_desc.pool), .pool_first(sbd[LP+2].pool_first), .pool_emit(sbd[LP+2].pool_emit),
    .j(sbd[LP+2].j), .sb_in(sbd[LP+2]),
    .out_valid(cmp_valid), .out(cmp_out), .sb_out(cmp_sb)
  );

  pnet_outbuf_stage2 #(.N(N), .W(W), .DEPTH(S2_DEPTH)) u_s2 (
    .clk, .rst_n,
    .push(cmp_valid), .push_data(cmp_out), .push_dest(cp_desc.dest),
    .push_fb_addr(cmp_sb.fb_addr), .push_out_idx(cmp_sb.out_idx), .push_last(cmp_sb.last),
    .free(s2_free), .empty(s2_empty),
    .out_valid(m_out_valid), .out_ready(m_out_ready), .out_data(m_out_data),
    .out_idx(m_out_idx), .out_last(m_out_last),
    .fb_we, .fb_addr, .fb_data
  );
endmodule
