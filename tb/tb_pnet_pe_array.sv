// tb_pnet_pe_array: checks the PE array at the default size (N = 32 PEs of
// M = 32 multipliers). Every cycle a random 1 x M input slice and M x N weight
// tile go in; the 1 x N vector of dot products is computed in the testbench and
// compared with the array output LAT = 1 + clog2(M) cycles later.
module tb_pnet_pe_array;
  localparam int unsigned M = 32, N = 32, W = 8, ACC_W = 32, LAT = 1 + $clog2(M), NV = 60;
  logic clk = 0;
  logic [M-1:0][W-1:0] in_vec;
  logic [N-1:0][M-1:0][W-1:0] w_tile;
  logic [N-1:0][ACC_W-1:0] sums;
  int checks = 0, failures = 0;
  int expv [NV + LAT][N];

  pnet_pe_array #(.M(M), .N(N), .W(W), .ACC_W(ACC_W)) dut (.clk, .in_vec, .w_tile, .sums);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < NV + LAT; t++) begin
      for (int i = 0; i < M; i++) in_vec[i] = W'($urandom);
      for (int c = 0; c < N; c++) begin
        expv[t][c] = 0;
        for (int i = 0; i < M; i++) begin
          w_tile[c][i] = W'($urandom);
          expv[t][c] += int'($signed(in_vec[i])) * int'($signed(w_tile[c][i]));
        end
      end
      @(posedge clk);
      #1;
      if (t >= LAT - 1) begin
        for (int c = 0; c < N; c++) begin
          int want;
          want = expv[t - LAT + 1][c];
          checks++;
          if ($signed(sums[c]) != want) begin
            failures++;
            if (failures < 5) $display("FAIL t=%0d pe=%0d: got %0d want %0d", t, c, $signed(sums[c]), want);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
