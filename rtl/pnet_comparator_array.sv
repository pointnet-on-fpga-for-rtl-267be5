// pnet_comparator_array: the N comparators shared by ReLU, ReLU6 and max pooling.
//
// A final (last-input-tile) sum first leaves the wide accumulator domain: it is
// shifted right arithmetically by `shift` and saturated to W signed bits (the
// shift-and-saturate rescale is this design's choice; the paper only says the
// second output stage is narrower). The comparators then apply the activation:
// ReLU compares with 0, ReLU6 additionally compares with `clip`, the quantised
// value of 6. With `pool_en` the same comparators keep, per output column, the
// largest activated value seen over all points (max pooling over each column of
// the feature matrix). The running maxima live in a small register array indexed
// by the output column tile j, so pooling can span several passes over chunks of
// the point cloud. A pooled column tile is emitted once, on its `pool_emit` point.
//
// Timing: one registered stage. out_valid rises one cycle after in_valid for a
// plain result, and one cycle after the emitting point for a pooled result.
// Lint note: the tile index input is 8 bits wide; with POOL_JT = 32 only its low
// five bits select a running-max register, the rest are reported unused.
module pnet_comparator_array
  import pnet_pkg::*;
#(
  parameter int unsigned N       = 32,
  parameter int unsigned W       = 8,
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned POOL_JT = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [N-1:0][ACC_W-1:0]     in_sum,
  input  act_e                        act,
  input  logic [5:0]                  shift,
  input  logic [W-1:0]                clip,
  input  logic                        pool_en,
  input  logic                        pool_first,  // first point: restart the maxima
  input  logic                        pool_emit,   // last point: release the maxima
  input  logic [7:0]                  j,           // output column tile
  input  sb_t                         sb_in,       // carried along to the output
  output logic                        out_valid,
  output logic [N-1:0][W-1:0]         out,
  output sb_t                         sb_out
);
  localparam int unsigned PJW = (POOL_JT > 1) ? $clog2(POOL_JT) : 1;

  logic [N-1:0][W-1:0] pool_q [POOL_JT];
  logic [N-1:0][W-1:0] act_v, pool_v;
  logic [PJW-1:0]      jj;

  assign jj = j[PJW-1:0];

  // Rescale, saturate and activate.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [ACC_W-1:0] sh;
      logic signed [W-1:0]     q;
      sh = $signed(in_sum[i]) >>> shift;
      if (sh > $signed(ACC_W'({1'b0, {(W-1){1'b1}}})))
        q = {1'b0, {(W-1){1'b1}}};
      else if (sh < -$signed(ACC_W'({1'b0, {(W-1){1'b1}}})) - 1)
        q = {1'b1, {(W-1){1'b0}}};
      else
        q = sh[W-1:0];
      unique case (act)
        ACT_RELU:  q = (q < 0) ? '0 : q;
        ACT_RELU6: q = (q < 0) ? '0 : ((q > $signed(clip)) ? $signed(clip) : q);
        default:   ;
      endcase
      act_v[i] = q;
      // Max pooling: compare with the running maximum of this column.
      if (pool_first || $signed(q) > $signed(pool_q[jj][i])) pool_v[i] = q;
      else                                                    pool_v[i] = pool_q[jj][i];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && pool_en) pool_q[jj] <= pool_v;
    out    <= pool_en ? pool_v : act_v;
    sb_out <= sb_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && (!pool_en || pool_emit);
  end
endmodule
