// pnet_weight_buffer: double-buffered weight and bias memory.
//
// Each of the two banks holds up to TILES weight tiles of M x N, stored as N
// columns of M weights (column i feeds PE i), plus JT_MAX bias vectors of N
// ACC_W-bit values, one per output column tile. One bank serves the PE array
// while the other is loaded with the next layer's weights, as the paper's double
// buffering of the weight buffer allows.
//
// Loading (this design's choice): weight column i of tile t is written as one
// M x W-bit word; a bias vector arrives as N*ACC_W/(M*W) words ("parts"), each
// holding BPB = M*W/ACC_W biases.
//
// Timing: synchronous write; registered read, the whole M x N tile and the bias
// vector one cycle after the read address.
module pnet_weight_buffer #(
  parameter int unsigned M      = 32,
  parameter int unsigned N      = 32,
  parameter int unsigned W      = 8,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned TILES  = 1024,
  parameter int unsigned JT_MAX = 128,
  localparam int unsigned TW    = $clog2(TILES),
  localparam int unsigned NW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned JW    = $clog2(JT_MAX),
  localparam int unsigned BPB   = (M * W) / ACC_W,
  localparam int unsigned NPART = N / BPB,
  localparam int unsigned PW    = (NPART > 1) ? $clog2(NPART) : 1
) (
  input  logic                          clk,
  // weight write
  input  logic                          w_we,
  input  logic                          w_bank,
  input  logic [TW-1:0]                 w_tile,
  input  logic [NW-1:0]                 w_col,
  input  logic [M-1:0][W-1:0]           w_data,
  // bias write
  input  logic                          b_we,
  input  logic                          b_bank,
  input  logic [JW-1:0]                 b_j,
  input  logic [PW-1:0]                 b_part,
  input  logic [BPB-1:0][ACC_W-1:0]     b_data,
  // read
  input  logic                          rd_bank,
  input  logic [TW-1:0]                 rd_tile,
  output logic [N-1:0][M-1:0][W-1:0]    rd_w,
  input  logic                          rd_b_bank,
  input  logic [JW-1:0]                 rd_j,
  output logic [N-1:0][ACC_W-1:0]       rd_b
);
  logic [M-1:0][W-1:0]       wmem [2][TILES][N];
  logic [BPB-1:0][ACC_W-1:0] bmem [2][JT_MAX][NPART];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_bank][w_tile][w_col] <= w_data;
    if (b_we) bmem[b_bank][b_j][b_part]   <= b_data;
    for (int i = 0; i < N; i++)     rd_w[i] <= wmem[rd_bank][rd_tile][i];
    for (int p = 0; p < NPART; p++) rd_b[p*BPB +: BPB] <= bmem[rd_b_bank][rd_j][p];
  end

  initial begin
    assert ((M * W) % ACC_W == 0 && N % BPB == 0)
      else $error("pnet_weight_buffer: bias words must tile the DMA word");
  end
endmodule
