// pnet_adder_array: the N adders that accumulate partial sums across input tiles.
//
// When an input row is longer than M, its dot products arrive as several partial
// sums, one per input tile. Each adder adds the PE output to the running partial
// sum read back from output buffer stage 1, or, on the first input tile, to the
// column's bias (batch normalisation folded into a bias is this design's reading
// of "BN is absorbed into the PE"). The selection between bias and partial sum is
// the adder array's input mux.
//
// Timing: one registered stage; out/out_valid follow the inputs by one cycle.
module pnet_adder_array #(
  parameter int unsigned N     = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        first,     // first input tile: add the bias
  input  logic [N-1:0][ACC_W-1:0]     pe_sum,    // from the PE array
  input  logic [N-1:0][ACC_W-1:0]     psum,      // from output buffer stage 1
  input  logic [N-1:0][ACC_W-1:0]     bias,      // from the weight buffer
  output logic                        out_valid,
  output logic [N-1:0][ACC_W-1:0]     out
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      out[i] <= pe_sum[i] + (first ? bias[i] : psum[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
