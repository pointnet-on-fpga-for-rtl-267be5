// tb_pnet_accel_full: end-to-end test of the accelerator at the default sizes (M = N = 32, INT8, 4096-point frame) with a PointNet front end: 3 -> 64 per-point layer, 64 -> 128 layer with max pooling over all 4096 points fed back into the input buffer, and a 128 -> 64 ReLU6 layer on the global feature.
// The host, DDR, DMA and the reference model are in pnet_accel_harness; this
// module only instantiates the accelerator and the harness and taps three
// internal events (feedback writes, partial-sum additions, pass starts) that the
// harness counts.
module tb_pnet_accel_full;
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

  pnet_accel_harness #(.M(M_DEF), .N(N_DEF), .W(W_DEF), .ACC_W(ACC_W_DEF), .SCEN(1), .WATCHDOG(2000000)) h (
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
