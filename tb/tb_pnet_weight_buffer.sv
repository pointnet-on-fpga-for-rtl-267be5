// tb_pnet_weight_buffer: checks the double-buffered weight and bias memory at
// the default size (2 banks x 1024 tiles of 32 x 32 bytes, 128 bias vectors of
// 32 x 32 bits). Random weight columns and bias parts are written to a spread of
// tiles and tile columns in both banks; then whole tiles and bias vectors are read
// and compared with a reference copy one cycle after the address.
module tb_pnet_weight_buffer;
  localparam int unsigned M = 32, N = 32, W = 8, ACC_W = 32, TILES = 1024, JT_MAX = 128;
  localparam int unsigned TW = $clog2(TILES), NW = $clog2(N), JW = $clog2(JT_MAX);
  localparam int unsigned BPB = M * W / ACC_W, NPART = N / BPB, PW = $clog2(NPART);
  localparam int unsigned NT = 12;   // tiles written per bank
  logic clk = 0;
  logic w_we, w_bank, b_we, b_bank, rd_bank, rd_b_bank;
  logic [TW-1:0] w_tile, rd_tile;
  logic [NW-1:0] w_col;
  logic [M-1:0][W-1:0] w_data;
  logic [JW-1:0] b_j, rd_j;
  logic [PW-1:0] b_part;
  logic [BPB-1:0][ACC_W-1:0] b_data;
  logic [N-1:0][M-1:0][W-1:0] rd_w;
  logic [N-1:0][ACC_W-1:0] rd_b;
  logic [M*W-1:0]   ref_w [2][NT][N];
  logic [ACC_W-1:0] ref_b [2][NT][N];
  int checks = 0, failures = 0;

  pnet_weight_buffer #(.M(M), .N(N), .W(W), .ACC_W(ACC_W), .TILES(TILES), .JT_MAX(JT_MAX)) dut (.*);

  function automatic int tile_of(int t); return (t * 97) % TILES; endfunction
  function automatic int j_of(int t);    return (t * 11) % JT_MAX; endfunction

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
      #1;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_we = 0; b_we = 0; w_bank = 0; b_bank = 0; rd_bank = 0; rd_b_bank = 0;
    w_tile = '0; w_col = '0; w_data = '0; b_j = '0; b_part = '0; b_data = '0; rd_tile = '0; rd_j = '0;
    for (int b = 0; b < 2; b++)
      for (int t = 0; t < NT; t++) begin
        for (int c = 0; c < N; c++) begin
          logic [M*W-1:0] d;
          for (int i = 0; i < M; i++) d[i*W +: W] = W'($urandom);
          w_we = 1; w_bank = b[0]; w_tile = TW'(tile_of(t)); w_col = NW'(c); w_data = d;
          ref_w[b][t][c] = d;
          @(posedge clk);
      #1;
        end
        w_we = 0;
        for (int p = 0; p < NPART; p++) begin
          for (int q = 0; q < BPB; q++) begin
            b_data[q] = ACC_W'($urandom);
            ref_b[b][t][p * BPB + q] = b_data[q];
          end
          b_we = 1; b_bank = b[0]; b_j = JW'(j_of(t)); b_part = PW'(p);
          @(posedge clk);
      #1;
        end
        b_we = 0;
      end
    for (int r = 0; r < 4 * NT; r++) begin
      int b, t;
      b = $urandom % 2; t = $urandom % NT;
      rd_bank = b[0]; rd_tile = TW'(tile_of(t)); rd_b_bank = b[0]; rd_j = JW'(j_of(t));
      @(posedge clk);
      #1;
      for (int c = 0; c < N; c++) begin
        checks += 2;
        if (rd_w[c] !== ref_w[b][t][c]) begin failures++; if (failures < 5) $display("FAIL w bank %0d tile %0d col %0d", b, t, c); end
        if (rd_b[c] !== ref_b[b][t][c]) begin failures++; if (failures < 5) $display("FAIL b bank %0d j %0d lane %0d", b, t, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
