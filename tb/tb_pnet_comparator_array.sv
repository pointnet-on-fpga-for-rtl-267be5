// tb_pnet_comparator_array: checks the comparator array at N = 32, W = 8.
// Part 1 drives random wide sums with random shift and activation (none, ReLU,
// ReLU6 with a random clip) and compares each lane with a reference rescale,
// saturation and activation one cycle later. Part 2 runs max pooling over a
// sequence of points for several column tiles, interleaved, restarted by
// pool_first and emitted by pool_emit, and checks that one result per tile
// appears, equal to the reference maximum, and nothing on other points.
module tb_pnet_comparator_array;
  import pnet_pkg::*;
  localparam int unsigned N = 32, W = 8, ACC_W = 32, POOL_JT = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid, pool_en, pool_first, pool_emit, out_valid;
  logic [N-1:0][ACC_W-1:0] in_sum;
  act_e act;
  logic [5:0] shift;
  logic [W-1:0] clip;
  logic [7:0] j;
  logic [N-1:0][W-1:0] out;
  sb_t sb_in, sb_out;
  int checks = 0, failures = 0;

  pnet_comparator_array #(.N(N), .W(W), .ACC_W(ACC_W), .POOL_JT(POOL_JT)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_q(int s, int sh, act_e a, int c);
    longint v;
    v = longint'(s) >>> sh;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    if (a != ACT_NONE && v < 0) v = 0;
    if (a == ACT_RELU6 && v > c) v = c;
    return int'(v);
  endfunction

  int maxv [4][N];
  initial begin
    in_valid = 0; pool_en = 0; pool_first = 0; pool_emit = 0; in_sum = '0;
    act = ACT_NONE; shift = 0; clip = 8'd6; j = 0; sb_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Part 1: rescale and activation.
    for (int t = 0; t < 300; t++) begin
      int want [N];
      in_valid = 1;
      act   = act_e'($urandom % 3);
      shift = 6'($urandom % 12);
      clip  = W'(1 + $urandom % 100);
      for (int i = 0; i < N; i++) begin
        in_sum[i] = ACC_W'(int'($urandom % 200000) - 100000);
        want[i] = ref_q(int'(in_sum[i]), shift, act, clip);
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if ($signed(out[i]) != want[i]) begin
          failures++;
          if (failures < 5) $display("FAIL act t=%0d lane %0d got %0d want %0d", t, i, $signed(out[i]), want[i]);
        end
      end
    end
    // Part 2: max pooling over 50 points for 4 column tiles, tiles interleaved.
    pool_en = 1; act = ACT_RELU; shift = 2;
    for (int p = 0; p < 50; p++)
      for (int jj = 0; jj < 4; jj++) begin
        int q;
        j = 8'(jj * 5);        // sparse tile numbers
        pool_first = (p == 0);
        pool_emit  = (p == 49);
        for (int i = 0; i < N; i++) begin
          in_sum[i] = ACC_W'(int'($urandom % 2000) - 1000);
          q = ref_q(int'(in_sum[i]), shift, act, 0);
          if (p == 0 || q > maxv[jj][i]) maxv[jj][i] = q;
        end
        @(posedge clk);
        #1;
        checks++;
        if (out_valid !== (p == 49)) begin
          failures++;
          $display("FAIL pool emit at point %0d", p);
        end
        if (p == 49)
          for (int i = 0; i < N; i++) begin
            checks++;
            if ($signed(out[i]) != maxv[jj][i]) begin
              failures++;
              if (failures < 5) $display("FAIL pool tile %0d lane %0d got %0d want %0d", jj, i, $signed(out[i]), maxv[jj][i]);
            end
          end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
