// pnet_pe: one process element of the PE array.
//
// The PE multiplies a 1 x M slice of an input row with one M x 1 column of a
// weight tile and sums the M products in a pipelined binary adder tree, giving
// one dot product. This is the multiplier array plus adder tree the paper draws
// inside each PE; M (the inner-dimension unroll) is 32 by default as in the
// paper's main configuration.
//
// Timing: the products are registered, then every tree level is registered, so
// the sum appears LAT = 1 + clog2(M) cycles after the operands, with one new dot
// product accepted every cycle. The pipeline has no enable: it always advances,
// and the caller tracks validity with its own sideband.
//
// This design's choices: M must be a power of two (shorter rows are zero-padded
// by the host); operands are signed two's complement; no reset on the data path.
module pnet_pe #(
  parameter int unsigned M     = 32,
  parameter int unsigned W     = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                           clk,
  input  logic signed [M-1:0][W-1:0]     in_vec,   // 1 x M input slice
  input  logic signed [M-1:0][W-1:0]     w_vec,    // M x 1 weight column
  output logic signed [ACC_W-1:0]        sum       // dot product, LAT cycles later
);
  localparam int unsigned L = $clog2(M);

  // lvl[0] holds the products, lvl[l] the partial sums after l tree levels.
  logic signed [ACC_W-1:0] lvl [L+1][M];

  always_ff @(posedge clk) begin
    for (int i = 0; i < M; i++) begin
      lvl[0][i] <= ACC_W'($signed(in_vec[i]) * $signed(w_vec[i]));
    end
    for (int l = 0; l < L; l++) begin
      for (int i = 0; i < (M >> (l + 1)); i++) begin
        lvl[l+1][i] <= lvl[l][2*i] + lvl[l][2*i+1];
      end
    end
  end

  assign sum = lvl[L][0];

  initial begin
    assert (M == (1 << L)) else $error("pnet_pe: M must be a power of two");
  end
endmodule
