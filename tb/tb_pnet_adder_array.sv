// tb_pnet_adder_array: checks the adder array (N = 32 adders). Random PE sums,
// partial sums and biases are applied; the output one cycle later must be
// pe_sum + bias on a first input tile and pe_sum + psum otherwise, and out_valid
// must follow in_valid by one cycle.
module tb_pnet_adder_array;
  localparam int unsigned N = 32, ACC_W = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid, first, out_valid;
  logic [N-1:0][ACC_W-1:0] pe_sum, psum, bias, out;
  int checks = 0, failures = 0;

  pnet_adder_array #(.N(N), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; first = 0; pe_sum = '0; psum = '0; bias = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [N-1:0][ACC_W-1:0] want;
      logic v;
      in_valid = ($urandom % 4) != 0;
      first    = $urandom % 2;
      for (int i = 0; i < N; i++) begin
        pe_sum[i] = ACC_W'($urandom); psum[i] = ACC_W'($urandom); bias[i] = ACC_W'($urandom);
        want[i]   = pe_sum[i] + (first ? bias[i] : psum[i]);
      end
      v = in_valid;
      @(posedge clk);
      #1;
      checks++;
      if (out_valid !== v) failures++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out[i] !== want[i]) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d lane %0d first=%0d", t, i, first);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
