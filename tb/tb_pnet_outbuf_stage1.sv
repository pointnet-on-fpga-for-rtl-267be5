// tb_pnet_outbuf_stage1: checks the partial-sum memory at the default size
// (4096 words of 32 x 32 bits). It performs read-modify-write accumulation the
// way the adder array uses it: each word is read, a random value added and the
// sum written back, over several sweeps, while a reference model does the same;
// every read is compared one cycle after its address.
module tb_pnet_outbuf_stage1;
  localparam int unsigned N = 32, ACC_W = 32, DEPTH = 4096, AW = $clog2(DEPTH), NA = 300;
  logic clk = 0;
  logic we;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [N-1:0][ACC_W-1:0] wr_data, rd_data;
  logic [N*ACC_W-1:0] ref_mem [NA];
  int checks = 0, failures = 0;

  pnet_outbuf_stage1 #(.N(N), .ACC_W(ACC_W), .DEPTH(DEPTH)) dut (.*);

  function automatic int addr_of(int i); return (i * 13) % DEPTH; endfunction

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
      #1;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    // initial fill
    for (int i = 0; i < NA; i++) begin
      logic [N*ACC_W-1:0] d;
      for (int c = 0; c < N; c++) d[c*ACC_W +: ACC_W] = ACC_W'($urandom);
      we = 1; wr_addr = AW'(addr_of(i)); wr_data = d; ref_mem[i] = d;
      @(posedge clk);
      #1;
    end
    we = 0;
    // accumulation sweeps
    for (int s = 0; s < 3; s++)
      for (int i = 0; i < NA; i++) begin
        logic [N*ACC_W-1:0] d;
        rd_addr = AW'(addr_of(i));
        @(posedge clk);
        #1;
        checks++;
        if (rd_data !== ref_mem[i]) begin failures++; if (failures < 5) $display("FAIL sweep %0d word %0d", s, i); end
        for (int c = 0; c < N; c++) d[c*ACC_W +: ACC_W] = rd_data[c] + ACC_W'($urandom % 1000);
        we = 1; wr_addr = AW'(addr_of(i)); wr_data = d; ref_mem[i] = d;
        @(posedge clk);
        #1;
        we = 0;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
