// tb_pnet_accel: end-to-end test of the accelerator at reduced sizes (M = N = 8, small buffers) with a four-layer network that exercises row and column order, chunking, partial sums, ReLU, ReLU6, no activation, max pooling, feedback into the input buffer and DMA back-pressure.
// The host, DDR, DMA and the reference model are in pnet_accel_harness; this
// module only instantiates the accelerator and the harness and taps three
// internal events (feedback writes, partial-sum additions, pass starts) that the
// harness counts.
module tb_pnet_accel;
  import pnet_pkg::*;
  localparam int unsigned M = 8;
  localparam int unsigned N = 8;
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

  pnet_accel #(.M(8), .N(8), .W(8), .ACC_W(32), .IN_WORDS(256), .WT_TILES(64), .JT_MAX(16), .POOL_JT(8), .S1_DEPTH(256), .S2_DEPTH(32), .NDESC(8)) dut (.*);

  pnet_accel_harness #(.M(8), .N(8), .W(8), .ACC_W(32), .SCEN(0), .WATCHDOG(200000)) h (
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
