// tb_pnet_regfile: checks the AXI-lite register file (32 descriptors). It writes
// random descriptor words for every descriptor and the layer count, reads them
// back over AXI-lite, checks the decoded descriptors on both controller read
// ports, checks that writing the start bit gives a one-cycle start pulse (and
// none while busy), and reads the status and counter registers.
module tb_pnet_regfile;
  import pnet_pkg::*;
  localparam int unsigned NDESC = 32, DW = $clog2(NDESC);
  logic clk = 0, rst_n = 0;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready, s_arvalid, s_arready, s_rvalid, s_rready;
  logic [11:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic start, busy, done;
  logic [DW:0] nlayers;
  logic [DW-1:0] desc_idx_a, desc_idx_b;
  desc_t desc_a, desc_b;
  logic [31:0] cnt_cycles, cnt_stalls, cnt_waits, cnt_passes;
  logic [31:0] words [NDESC][6];
  int checks = 0, failures = 0, n_start = 0;

  pnet_regfile #(.NDESC(NDESC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && start) n_start++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d;
    do @(posedge clk); while (!s_awready);
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    // hold off rready for a cycle: the response must stay
    @(negedge clk);
    s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    logic [31:0] r;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0;
    busy = 0; done = 0; desc_idx_a = '0; desc_idx_b = '0;
    cnt_cycles = 32'd1234; cnt_stalls = 32'd56; cnt_waits = 32'd78; cnt_passes = 32'd9;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < NDESC; d++)
      for (int w = 0; w < 6; w++) begin
        words[d][w] = $urandom;
        wr(REG_DESC + 12'(32 * d + 4 * w), words[d][w]);
      end
    wr(REG_NLAYERS, 32'd7);
    chk(nlayers == 7, "nlayers");
    for (int d = 0; d < NDESC; d++) begin
      desc_t e;
      for (int w = 0; w < 6; w++) begin
        rd(REG_DESC + 12'(32 * d + 4 * w), r);
        chk(r == words[d][w], $sformatf("read-back desc %0d word %0d", d, w));
      end
      e = words_to_desc('{words[d][5], words[d][4], words[d][3], words[d][2], words[d][1], words[d][0]});
      desc_idx_a = DW'(d); desc_idx_b = DW'(NDESC - 1 - d);
      #1;
      chk(desc_a == e, $sformatf("decoded desc %0d", d));
      chk(desc_a.npts == words[d][0][15:0] && desc_a.jt == words[d][1][15:8] && desc_a.out_addr == words[d][5],
          "descriptor fields");
    end
    desc_idx_b = DW'(3);
    #1;
    chk(desc_b.in_addr == words[3][3] && desc_b.kt == words[3][1][7:0], "port b");
    // start pulse
    wr(REG_CTRL, 32'd1);
    chk(n_start == 1, $sformatf("one start pulse (%0d)", n_start));
    busy = 1;
    wr(REG_CTRL, 32'd1);
    chk(n_start == 1, "no start while busy");
    rd(REG_STATUS, r); chk(r[1:0] == 2'b01, "status busy");
    busy = 0; done = 1;
    rd(REG_STATUS, r); chk(r[1:0] == 2'b10, "status done");
    rd(REG_CYCLES, r); chk(r == 1234, "cycles");
    rd(REG_STALLS, r); chk(r == 56, "stalls");
    rd(REG_WAITS, r);  chk(r == 78, "waits");
    rd(REG_PASSES, r); chk(r == 9, "passes");
    rd(REG_NLAYERS, r); chk(r == 7, "nlayers read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
