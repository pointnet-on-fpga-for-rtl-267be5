// pnet_outbuf_stage1: first stage of the two-stage output buffer.
//
// Holds the wide (ACC_W-bit) partial sums of one pass: one 1 x N word per (point,
// output column tile), at word p*jt + j. When the inner dimension of a layer is
// longer than M, each input tile adds its contribution to these words through the
// adder array, so no precision is lost to the partitioning; only the final sum is
// narrowed, on its way to stage 2. Keeping the partial sums here, separate from
// stage 2, lets stage 2 send earlier results to DDR while accumulation goes on.
//
// Timing: simple dual-port memory; synchronous write, registered read (data one
// cycle after rd_addr). A read and write of the same word in one cycle returns
// the old word; the controller never does that.
module pnet_outbuf_stage1 #(
  parameter int unsigned N     = 32,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [AW-1:0]             wr_addr,
  input  logic [N-1:0][ACC_W-1:0]   wr_data,
  input  logic [AW-1:0]             rd_addr,
  output logic [N-1:0][ACC_W-1:0]   rd_data
);
  logic [N-1:0][ACC_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
