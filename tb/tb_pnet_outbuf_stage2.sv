// tb_pnet_outbuf_stage2: checks the result FIFO of output stage 2 (N = 32, W = 8,
// 64 words). Random words, each marked for DDR or for feedback, are pushed in
// bursts while the DMA write side applies random back-pressure. Words for DDR
// must leave on the stream in order with their address and last flag, holding
// still while stalled; words for feedback must leave on the feedback port in
// order; `free` and `empty` must track the fill level, which is driven to full.
module tb_pnet_outbuf_stage2;
  localparam int unsigned N = 32, W = 8, DEPTH = 64, AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  logic push, push_dest, push_last, out_valid, out_ready, out_last, fb_we, empty;
  logic [N-1:0][W-1:0] push_data, out_data, fb_data;
  logic [15:0] push_fb_addr, fb_addr;
  logic [31:0] push_out_idx, out_idx;
  logic [AW:0] free;
  int checks = 0, failures = 0;

  typedef struct { logic [N*W-1:0] d; logic dest; logic [15:0] fa; logic [31:0] oi; logic last; } ent_t;
  ent_t q [$];
  int level = 0, n_ddr = 0, n_fb = 0, n_full = 0;

  pnet_outbuf_stage2 #(.N(N), .W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output side: check what leaves against the reference queue.
  always @(posedge clk) if (rst_n) begin
    if ((out_valid && out_ready) || fb_we) begin
      ent_t e;
      e = q.pop_front();
      checks++;
      if (fb_we) begin
        n_fb++;
        if (!(e.dest && fb_data == e.d && fb_addr == e.fa)) begin failures++; $display("FAIL feedback word"); end
      end else begin
        n_ddr++;
        if (!(!e.dest && out_data == e.d && out_idx == e.oi && out_last == e.last)) begin
          failures++; $display("FAIL stream word");
        end
      end
    end
  end

  initial begin
    push = 0; push_dest = 0; push_last = 0; push_data = '0; push_fb_addr = '0; push_out_idx = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      logic [N*W-1:0] d;
      @(negedge clk);
      checks++;
      if (free != (AW+1)'(DEPTH - q.size()) || empty != (q.size() == 0)) begin
        failures++; $display("FAIL free=%0d level=%0d", free, q.size());
      end
      if (free == 0) n_full++;
      // bursts of pushes, a slow consumer in the middle phase
      push = (free != 0) && (((t / 200) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0));
      out_ready = (t > 400 && t < 800) ? 1'b0 : ($urandom % 2 == 1);
      for (int i = 0; i < N; i++) d[i*W +: W] = W'($urandom);
      push_data = d; push_dest = ($urandom % 3 == 0); push_fb_addr = 16'($urandom);
      push_out_idx = $urandom; push_last = ($urandom % 10 == 0);
      if (push) q.push_back('{d, push_dest, push_fb_addr, push_out_idx, push_last});
    end
    @(negedge clk);
    push = 0; out_ready = 1;
    repeat (200) @(negedge clk);
    checks++;
    if (!(empty && q.size() == 0 && n_full > 0 && n_fb > 0 && n_ddr > 0)) begin
      failures++; $display("FAIL drain: empty=%0d left=%0d full=%0d fb=%0d ddr=%0d", empty, q.size(), n_full, n_fb, n_ddr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
