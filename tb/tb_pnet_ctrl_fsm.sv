// tb_pnet_ctrl_fsm: checks the controller on its own, with the default sizes.
// The register file is replaced by three fixed descriptors (a chunked row-order
// layer with two input tiles, a column-order max-pooled layer, and a layer fed
// from the input buffer); the loader, DMA and stage 2 are small models: the DMA
// accepts commands after random delays, the loader stays busy for the commanded
// number of words, and stage 2 reports little free room for random stretches.
// The testbench rebuilds independently the expected DMA commands and the
// expected sequence of tile operations (addresses, tile flags, pooling flags,
// DDR word address) and compares them one by one. It also checks that no tile
// is issued while stage 2 is short of room, that inside a k sweep one tile is
// issued per cycle when nothing stalls, that the input bank changes every pass
// and the weight bank every layer, and that the pass count and done are right.
module tb_pnet_ctrl_fsm;
  import pnet_pkg::*;
  localparam int unsigned M = 32, N = 32, W = 8, ACC_W = 32;
  localparam int unsigned IN_WORDS = 4096, WT_TILES = 1024, S1_DEPTH = 4096, S2_DEPTH = 64, NDESC = 32;
  localparam int unsigned DRAIN = 10, DW = $clog2(NDESC), IAW = $clog2(IN_WORDS), TW = $clog2(WT_TILES);
  localparam int unsigned S2AW = $clog2(S2_DEPTH), BPW = (N * ACC_W) / (M * W), NL = 3;

  logic clk = 0, rst_n = 0, start;
  logic [DW:0] nlayers;
  logic [DW-1:0] ld_idx, cp_idx;
  desc_t ld_desc, cp_desc;
  logic dma_cmd_valid, dma_cmd_ready;
  dma_kind_e dma_cmd_kind, ldr_kind;
  logic [31:0] dma_cmd_addr, dma_cmd_beats, ldr_beats;
  logic ldr_start, ldr_busy;
  logic [15:0] ldr_tiles;
  logic in_rd_bank, in_wr_bank, w_rd_bank, w_wr_bank;
  logic [IAW-1:0] in_rd_addr;
  logic [TW-1:0] w_rd_tile;
  sb_t iss;
  logic [S2AW:0] s2_free;
  logic s2_empty, busy, done;
  logic [31:0] cnt_cycles, cnt_stalls, cnt_waits, cnt_passes;

  desc_t D [NL];
  assign ld_desc = D[ld_idx];
  assign cp_desc = D[cp_idx];

  pnet_ctrl_fsm #(.M(M), .N(N), .W(W), .ACC_W(ACC_W), .IN_WORDS(IN_WORDS), .WT_TILES(WT_TILES),
                  .S1_DEPTH(S1_DEPTH), .S2_DEPTH(S2_DEPTH), .NDESC(NDESC), .DRAIN(DRAIN)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- expected traces
  typedef struct { dma_kind_e kind; int addr, beats; } cmd_t;
  typedef struct { int in_a, tile, s1, j; bit fk, lk, pf, pe, last; int oi, fb; } op_t;
  cmd_t ecmd [$];
  op_t  eop  [$];
  int   npass = 0;

  function automatic desc_t mk(int npts, int chunk, int kt, int jt, order_e o, bit pool, src_e s,
                               int ia, int wa, int oa);
    desc_t d;
    d = '0;
    d.npts = 16'(npts); d.chunk = 16'(chunk); d.kt = 8'(kt); d.jt = 8'(jt); d.order = o;
    d.act = ACT_RELU; d.pool = pool; d.dest = DST_DDR; d.src = s;
    d.in_addr = ia; d.w_addr = wa; d.out_addr = oa;
    return d;
  endfunction

  task automatic build_expected();
    for (int l = 0; l < NL; l++) begin
      int kt, jt, base;
      kt = D[l].kt; jt = D[l].jt;
      for (base = 0; base < D[l].npts; base += D[l].chunk) begin
        int P;
        bit lastc;
        P = (D[l].npts - base < D[l].chunk) ? D[l].npts - base : D[l].chunk;
        lastc = (base + P == D[l].npts);
        if (base == 0) ecmd.push_back('{DMA_WEIGHT, int'(D[l].w_addr), kt * jt * N + jt * BPW});
        if (D[l].src == SRC_DMA) ecmd.push_back('{DMA_INPUT, int'(D[l].in_addr) + base * kt, P * kt});
        npass++;
        for (int k = 0; k < kt; k++)
          for (int a = 0; a < (D[l].order == ORD_ROW ? P : jt); a++)
            for (int b = 0; b < (D[l].order == ORD_ROW ? jt : P); b++) begin
              int p, j;
              op_t o;
              p = (D[l].order == ORD_ROW) ? a : b;
              j = (D[l].order == ORD_ROW) ? b : a;
              o.in_a = p * kt + k; o.tile = j * kt + k; o.s1 = p * jt + j; o.j = j;
              o.fk = (k == 0); o.lk = (k == kt - 1);
              o.pf = (base == 0) && (p == 0); o.pe = lastc && (p == P - 1);
              o.last = lastc && (k == kt - 1) && (p == P - 1) && (j == jt - 1);
              o.oi = int'(D[l].out_addr) + (D[l].pool ? j : (base + p) * jt + j);
              o.fb = D[l].pool ? j : p * jt + j;
              eop.push_back(o);
            end
      end
    end
  endtask

  // ---- models of DMA, loader and stage 2
  int ld_left = 0, low_left = 0, quiet = 0;
  assign ldr_busy = (ld_left != 0);
  assign s2_empty = (quiet > 12);
  always @(posedge clk) begin
    if (ldr_start) ld_left <= int'(ldr_beats);
    else if (ld_left != 0 && ($urandom % 4 != 0)) ld_left <= ld_left - 1;
    dma_cmd_ready <= ($urandom % 3 == 0);
    if (low_left > 0) low_left <= low_left - 1;
    else if ($urandom % 40 == 0) low_left <= 5 + $urandom % 20;
    quiet <= iss.valid ? 0 : quiet + 1;
  end
  assign s2_free = (low_left > 0) ? (S2AW+1)'(DRAIN) : (S2AW+1)'(S2_DEPTH);

  // ---- checkers
  int nops = 0, ncmd = 0, nstall_cycles = 0, in_bank_changes = 0, w_bank_changes = 0, burst_breaks = 0;
  logic prev_in_bank, prev_w_bank, prev_valid;
  logic [7:0] prev_k_sweep;
  always @(posedge clk) if (rst_n) begin
    if (dma_cmd_valid && dma_cmd_ready) begin
      cmd_t e;
      e = ecmd.pop_front();
      chk(dma_cmd_kind == e.kind && int'(dma_cmd_addr) == e.addr && int'(dma_cmd_beats) == e.beats,
          $sformatf("DMA command %0d: kind %0d addr %0d beats %0d, expected %0d %0d %0d",
                    ncmd, dma_cmd_kind, dma_cmd_addr, dma_cmd_beats, e.kind, e.addr, e.beats));
      chk(ldr_start && ldr_beats == dma_cmd_beats && ldr_kind == dma_cmd_kind, "loader started with the command");
      ncmd++;
    end
    if (iss.valid) begin
      op_t e;
      e = eop.pop_front();
      chk(int'(in_rd_addr) == e.in_a && int'(w_rd_tile) == e.tile && int'(iss.s1_addr) == e.s1 &&
          int'(iss.j) == e.j && iss.first_k == e.fk && iss.last_k == e.lk && iss.last == e.last &&
          int'(iss.out_idx) == e.oi && int'(iss.fb_addr) == e.fb &&
          (!D[cp_idx].pool || (iss.pool_first == e.pf && iss.pool_emit == e.pe)),
          $sformatf("tile operation %0d", nops));
      nops++;
    end
    // no issue may follow a cycle in which stage 2 was short of room
    if (s2_free < (S2AW+1)'(DRAIN + 1) && dut.cs == 2'd1) nstall_cycles++;
    if (prev_in_bank !== in_rd_bank) in_bank_changes++;
    if (prev_w_bank  !== w_rd_bank)  w_bank_changes++;
    prev_in_bank <= in_rd_bank; prev_w_bank <= w_rd_bank;
  end
  // issue rate: a gap inside a k sweep is only allowed on a stall
  always @(posedge clk) if (rst_n) begin
    if (dut.cs == 2'd1 && s2_free >= (S2AW+1)'(DRAIN + 1)) begin
      @(posedge clk);
      chk(iss.valid, "one tile per cycle while running");
    end
  end
  // nothing issued while stage 2 is short of room
  always @(posedge clk) if (rst_n && s2_free < (S2AW+1)'(DRAIN + 1)) begin
    logic was_run;
    was_run = (dut.cs == 2'd1);
    // the issue registered at this same edge was decided on this room
    #1;
    if (was_run) chk(!iss.valid, "no issue on a full stage 2");
  end

  initial begin
    logic first_busy;
    D[0] = mk(10, 4, 2, 3, ORD_ROW, 0, SRC_DMA,   100, 5000, 9000);
    D[1] = mk(5, 5, 1, 2, ORD_COL, 1, SRC_DMA,    200, 6000, 9500);
    D[2] = mk(1, 1, 2, 1, ORD_ROW, 0, SRC_INBUF,  0,   7000, 9900);
    build_expected();
    start = 0; nlayers = NL;
    repeat (3) @(posedge clk);
    rst_n = 1;
    prev_in_bank = in_rd_bank; prev_w_bank = w_rd_bank;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    chk(busy, "busy after start");
    while (!done) @(posedge clk);
    #1;
    chk(!busy, "idle when done");
    chk(ecmd.size() == 0 && eop.size() == 0, $sformatf("all commands (%0d left) and operations (%0d left) seen",
                                                       ecmd.size(), eop.size()));
    chk(int'(cnt_passes) == npass, $sformatf("passes %0d, expected %0d", cnt_passes, npass));
    chk(in_bank_changes == npass, $sformatf("input bank changes %0d, expected %0d", in_bank_changes, npass));
    chk(w_bank_changes == NL, $sformatf("weight bank changes %0d, expected %0d", w_bank_changes, NL));
    chk(nstall_cycles > 0 && cnt_stalls > 0, "stalls on a full stage 2 happened");
    chk(cnt_waits > 0, "waits for loads happened");
    $display("ops %0d cmds %0d passes %0d stalls %0d waits %0d", nops, ncmd, cnt_passes, cnt_stalls, cnt_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
