// tb_pnet_pointnet_cls: the full PointNet classification network (Table II
// workload) run end to end on the accelerator at its default sizes (M = N = 32,
// INT8) with a 4096-point frame, including both transform nets. It runs the
// accelerator three times:
//  1. The input transform net.
//  2. The 3 x 3 transform of the points, the shared MLP 3-64-64 and the feature
//     transform net.
//  3. The 64 x 64 feature transform, the shared MLP 64-64-128-1024, max pooling and
//     the classifier 1024-512-256-40 (40 classes assumed).
// Between runs, the host model takes the transform net's result from DDR and lays
// it out as the next transform layer's weight block, as software on the host
// processor would. Every DDR result is compared with an integer reference model.
// Weights and points are random, so the arithmetic is tested, not the accuracy.
// The host, DDR, DMA and the reference model are in pnet_accel_harness; this
// module only instantiates the accelerator and the harness and taps three
// internal events (feedback writes, partial-sum additions, pass starts) that the
// harness counts.
module tb_pnet_pointnet_cls;
  import pnet_pkg::*;
  localparam int unsigned M = M_DEF;
  localparam int unsigned N = N_DEF;
  localparam int unsigned W = W_DEF;

  logic clk, rst_n;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready, s_axil_bvalid, s_axil_bready;
  logic s_axil_arvalid, s_axil_arready, s_axil_rvalid, s_axil_rready;
  logic [11:0] s_axil_awaddr, s_axil_araddr;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic dma_cmd_valid, dma_cmd_ready;
  dma_kind_e dma_cmd_kind;
  logic [31:0] dma_cmd_addr, dma_cmd_beats;
  logic s_in_valid, s_in_ready;
  logic [M-1:0][W-1:0] s_in_data;
  logic m_out_valid, m_out_ready, m_out_last;
  logic [N-1:0][W-1:0] m_out_data;
  logic [31:0] m_out_idx;
  logic busy, done;
  logic tb_done;

  pnet_accel  dut (.*);

  pnet_accel_harness #(.M(M_DEF), .N(N_DEF), .W(W_DEF), .ACC_W(ACC_W_DEF), .SCEN(3), .WATCHDOG(5000000)) h (
    .*,
    .ev_feedback(dut.u_s2.fb_we),
    .ev_psum    (dut.u_add.in_valid && !dut.u_add.first),
    .ev_swap    (dut.u_fsm.swap)
  );

  // The harness prints the result line and raises tb_done (also on its watchdog).
  initial begin
    wait (tb_done);
    $finish;
  end
endmodule
