// tb_pnet_input_buffer: checks the double-buffered input memory at the default
// size (2 banks x 4096 words of 32 bytes). Random words are written to random
// addresses of both banks, alternately through the DMA port and through the
// feedback port, with the input mux selecting the active one (a write on the
// port that is not selected must be ignored). Reads of random addresses of either
// bank are compared with a reference copy one cycle later.
module tb_pnet_input_buffer;
  localparam int unsigned M = 32, W = 8, DEPTH = 4096, AW = $clog2(DEPTH);
  logic clk = 0;
  logic wr_bank, sel_fb, dma_we, fb_we, rd_bank;
  logic [AW-1:0] dma_addr, fb_addr, rd_addr;
  logic [M-1:0][W-1:0] dma_data, fb_data, rd_data;
  logic [M*W-1:0] ref_mem [2][DEPTH];
  bit             ref_ok  [2][DEPTH];
  int checks = 0, failures = 0;

  pnet_input_buffer #(.M(M), .W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
      #1;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_bank = 0; sel_fb = 0; dma_we = 0; fb_we = 0; rd_bank = 0;
    dma_addr = '0; fb_addr = '0; rd_addr = '0; dma_data = '0; fb_data = '0;
    for (int t = 0; t < 3000; t++) begin
      logic [M*W-1:0] d1, d2;
      wr_bank = $urandom % 2;
      sel_fb  = $urandom % 2;
      dma_we  = 1; fb_we = 1;
      dma_addr = AW'($urandom % 64); fb_addr = AW'($urandom % 64 + (t % 2) * (DEPTH - 64));
      for (int i = 0; i < M; i++) begin d1[i*W +: W] = W'($urandom); d2[i*W +: W] = W'($urandom); end
      dma_data = d1; fb_data = d2;
      @(posedge clk);
      #1;
      if (sel_fb) begin ref_mem[wr_bank][fb_addr] = d2; ref_ok[wr_bank][fb_addr] = 1; end
      else        begin ref_mem[wr_bank][dma_addr] = d1; ref_ok[wr_bank][dma_addr] = 1; end
    end
    dma_we = 0; fb_we = 0;
    for (int t = 0; t < 3000; t++) begin
      int b, a;
      b = $urandom % 2;
      a = (t % 2) ? int'($urandom % 64) : int'(DEPTH - 64 + $urandom % 64);
      if (!ref_ok[b][a]) continue;
      rd_bank = b[0]; rd_addr = AW'(a);
      @(posedge clk);
      #1;
      checks++;
      if (rd_data !== ref_mem[b][a]) begin
        failures++;
        if (failures < 5) $display("FAIL bank %0d addr %0d", b, a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
