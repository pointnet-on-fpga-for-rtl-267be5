// pnet_pe_array: the array of N process elements.
//
// All N PEs see the same 1 x M input slice (read once from the input buffer) and
// each gets its own column of the M x N weight tile, so one cycle turns a 1 x M
// input slice and an M x N weight tile into a 1 x N block of partial sums. N is
// the output-column unroll (32 by default, as in the paper's main configuration);
// with M = 32 this is the paper's 1024 multipliers.
//
// Timing: fully pipelined, one tile operation per cycle, result LAT = 1 + clog2(M)
// cycles after the operands (see pnet_pe).
module pnet_pe_array #(
  parameter int unsigned M     = 32,
  parameter int unsigned N     = 32,
  parameter int unsigned W     = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                               clk,
  input  logic        [M-1:0][W-1:0]         in_vec,   // shared 1 x M input slice
  input  logic [N-1:0][M-1:0][W-1:0]         w_tile,   // w_tile[i] = weight column of PE i
  output logic [N-1:0][ACC_W-1:0]            sums      // 1 x N partial products
);
  for (genvar i = 0; i < N; i++) begin : g_pe
    pnet_pe #(.M(M), .W(W), .ACC_W(ACC_W)) u_pe (
      .clk   (clk),
      .in_vec(in_vec),
      .w_vec (w_tile[i]),
      .sum   (sums[i])
    );
  end
endmodule
