// tb_pnet_pe: checks one process element at the default size (M = 32, INT8).
// Random signed operands are applied every cycle; each dot product is computed
// independently in the testbench and compared with the PE output exactly
// LAT = 1 + clog2(M) cycles later, which also checks the one-per-cycle rate.
module tb_pnet_pe;
  localparam int unsigned M = 32, W = 8, ACC_W = 32, LAT = 1 + $clog2(M), NV = 300;
  logic clk = 0;
  logic signed [M-1:0][W-1:0] in_vec, w_vec;
  logic signed [ACC_W-1:0] sum;
  int checks = 0, failures = 0;
  int expq [$];

  pnet_pe #(.M(M), .W(W), .ACC_W(ACC_W)) dut (.clk, .in_vec, .w_vec, .sum);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < NV + LAT; t++) begin
      int e;
      e = 0;
      for (int i = 0; i < M; i++) begin
        // extremes now and then, to catch overflow of the tree
        in_vec[i] = (t % 7 == 0) ? -128 : W'($urandom);
        w_vec[i]  = (t % 7 == 0) ? -128 : W'($urandom);
        e += int'($signed(in_vec[i])) * int'($signed(w_vec[i]));
      end
      expq.push_back(e);
      @(posedge clk);
      #1;
      if (expq.size() >= LAT) begin
        int want;
        want = expq.pop_front();
        checks++;
        if (sum !== want) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d: got %0d want %0d", t, sum, want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
