// pnet_accel_harness: host, DDR and DMA model plus checker for pnet_accel.
//
// It plays the parts outside the accelerator: the host CPU (writes the layer
// descriptors over AXI-lite, starts the run, polls the status), the DDR memory
// (one array of M x W-bit words) and the DMA engine (answers read commands with
// a stream that has random gaps, accepts the write stream with random
// back-pressure). It generates a point cloud, weights and biases with $urandom,
// computes every layer of the scenario with a plain integer reference model, and
// compares the words the accelerator wrote to DDR (and the layers fed back
// through the input buffer, via the next layer's result) with it. It also counts
// how often each mechanism of the design happened and fails a check for any that
// never did.
//
// SCEN selects the layer chain:
//   0  small network for reduced sizes: 4 layers covering row/column order,
//      chunking, partial sums, bias, ReLU, ReLU6, none, max pooling, feedback.
//   1  a PointNet-sized front end at the default sizes: 4096 points, 3 -> 64
//      (ReLU), 64 -> 128 with max pooling fed back, 128 -> 64 (ReLU6).
//   2  the whole PointNet-vanilla classification network at the default sizes:
//      4096 points through the shared MLPs 3-64-64-64-128-1024, max pooling to a
//      1 x 1024 global feature (fed back), then the fully connected layers
//      1024-512-256-40 (the first result also fed back). 40 classes is an
//      assumed class count.
//   3  the whole PointNet classification network with both transform nets, at
//      the default sizes, as three runs of the accelerator. Run 0 is the input
//      transform net (3-64-128-1024, pooling, 1024-512-256-9). The host then
//      lays the 9 results out as a 3 x 3 weight block. Run 1 applies that
//      transform to the points, runs the shared MLP 3-64-64 and the feature
//      transform net (64-64-128-1024, pooling, 1024-512-256-4096). The host lays
//      those results out as a 64 x 64 weight block. Run 2 applies it and runs
//      64-64-128-1024, pooling and 1024-512-256-40. Layer addresses in DDR are
//      allocated one after another.
//   4  the PointNet segmentation network at the default sizes: the feature part
//      of scenario 3 (the pooled 1 x 1024 global feature now goes to DDR), then
//      the host builds the n x 1088 matrix of each point's 64 transformed
//      features followed by the global feature, and a fourth run computes
//      1088-512-256-128-50 per point (50 part classes assumed).
module pnet_accel_harness
  import pnet_pkg::*;
#(
  parameter int unsigned M     = 8,
  parameter int unsigned N     = 8,
  parameter int unsigned W     = 8,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned SCEN  = 0,
  parameter int unsigned WATCHDOG = 200000
) (
  output logic                  clk,
  output logic                  rst_n,
  output logic                  s_axil_awvalid,
  input  logic                  s_axil_awready,
  output logic [11:0]           s_axil_awaddr,
  output logic                  s_axil_wvalid,
  input  logic                  s_axil_wready,
  output logic [31:0]           s_axil_wdata,
  input  logic                  s_axil_bvalid,
  output logic                  s_axil_bready,
  output logic                  s_axil_arvalid,
  input  logic                  s_axil_arready,
  output logic [11:0]           s_axil_araddr,
  input  logic                  s_axil_rvalid,
  output logic                  s_axil_rready,
  input  logic [31:0]           s_axil_rdata,
  input  logic                  dma_cmd_valid,
  output logic                  dma_cmd_ready,
  input  dma_kind_e             dma_cmd_kind,
  input  logic [31:0]           dma_cmd_addr,
  input  logic [31:0]           dma_cmd_beats,
  output logic                  s_in_valid,
  input  logic                  s_in_ready,
  output logic [M-1:0][W-1:0]   s_in_data,
  input  logic                  m_out_valid,
  output logic                  m_out_ready,
  input  logic [N-1:0][W-1:0]   m_out_data,
  input  logic [31:0]           m_out_idx,
  input  logic                  m_out_last,
  input  logic                  busy,
  input  logic                  done,
  // internal events observed in the accelerator
  input  logic                  ev_feedback,   // a result word written back to the input buffer
  input  logic                  ev_psum,       // an addition onto a stage-1 partial sum
  input  logic                  ev_swap,       // a pass started (buffers swapped)
  output logic                  tb_done        // results printed; the testbench ends the simulation
);
  localparam int unsigned BPB   = (M * W) / ACC_W;
  localparam int unsigned NPART = N / BPB;
  localparam int unsigned DDRW  = (SCEN == 4) ? (1 << 19) : (SCEN == 3) ? (1 << 18) : (1 << 17);
  localparam int unsigned NL    = 24;

  // ------------------------------------------------------------ scenario
  typedef struct {
    int npts, chunk, kin, kout, shift, clip;
    order_e order; act_e act; bit pool; dest_e dest; src_e src;
    int in_addr, w_addr, out_addr;
  } layer_t;

  layer_t L [NL];
  int     nlay;
  int     nruns;
  int     run_of  [NL];  // accelerator run the layer belongs to
  int     in_from [NL];  // layer whose result is the input: -1 previous layer, -2 point cloud
  int     w_from  [NL];  // layer whose result the host lays out as weights, -1 random weights
  int     cat_a, cat_b;  // in_from = -3: the host concatenates per-point result cat_a with global result cat_b

  function automatic int ceil_div(int a, int b); return (a + b - 1) / b; endfunction

  initial begin
    nruns = 1;
    for (int l = 0; l < NL; l++) begin run_of[l] = 0; in_from[l] = -1; w_from[l] = -1; end
    if (SCEN == 0) begin
      nlay = 4;
      //        npts chunk kin kout sh clip order    act        pool dest       src        in    w      out
      L[0] = '{40, 16, 3,  16, 3, 0,  ORD_ROW, ACT_RELU,  0, DST_DDR,   SRC_DMA,   0,    20000, 30000};
      L[1] = '{40, 40, 16, 24, 4, 0,  ORD_COL, ACT_RELU,  1, DST_INBUF, SRC_DMA,   30000, 21000, 0};
      L[2] = '{1,  1,  24, 16, 4, 40, ORD_ROW, ACT_RELU6, 0, DST_DDR,   SRC_INBUF, 0,    22000, 40000};
      L[3] = '{1,  1,  16, 8,  3, 0,  ORD_COL, ACT_NONE,  0, DST_DDR,   SRC_DMA,   40000, 23000, 50000};
    end else if (SCEN == 2) begin
      nlay = 8;
      //        npts  chunk kin   kout  sh clip order    act       pool dest       src        in     w      out
      L[0] = '{4096, 2048, 3,    64,   3, 0,  ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   0,     4096,  40000};
      L[1] = '{4096, 2048, 64,   64,   5, 0,  ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   40000, 4200,  50000};
      L[2] = '{4096, 2048, 64,   64,   5, 0,  ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   50000, 4400,  60000};
      L[3] = '{4096, 1024, 64,   128,  5, 0,  ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   60000, 4600,  70000};
      L[4] = '{4096, 128,  128,  1024, 6, 0,  ORD_COL, ACT_RELU, 1, DST_INBUF, SRC_DMA,   70000, 5000,  0};
      L[5] = '{1,    1,    1024, 512,  9, 0,  ORD_ROW, ACT_RELU, 0, DST_INBUF, SRC_INBUF, 0,     10000, 0};
      L[6] = '{1,    1,    512,  256,  8, 0,  ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_INBUF, 0,     27000, 90000};
      L[7] = '{1,    1,    256,  40,   7, 0,  ORD_COL, ACT_NONE, 0, DST_DDR,   SRC_DMA,   90000, 32000, 91000};
    end else if (SCEN >= 3) begin
      int ptr;
      nlay = 22; nruns = 3;
      //         npts  chunk kin   kout  sh clip order    act       pool dest       src        (addresses below)
      // run 0: input transform net
      L[0]  = '{4096, 2048, 3,    64,   3, 0, ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[1]  = '{4096, 1024, 64,   128,  5, 0, ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[2]  = '{4096, 128,  128,  1024, 6, 0, ORD_COL, ACT_RELU, 1, DST_INBUF, SRC_DMA,   0, 0, 0};
      L[3]  = '{1,    1,    1024, 512,  9, 0, ORD_ROW, ACT_RELU, 0, DST_INBUF, SRC_INBUF, 0, 0, 0};
      L[4]  = '{1,    1,    512,  256,  8, 0, ORD_ROW, ACT_RELU, 0, DST_INBUF, SRC_INBUF, 0, 0, 0};
      L[5]  = '{1,    1,    256,  9,    6, 0, ORD_ROW, ACT_NONE, 0, DST_DDR,   SRC_INBUF, 0, 0, 0};
      // run 1: input transform, shared MLP 64-64, feature transform net
      L[6]  = '{4096, 4096, 3,    3,    5, 0, ORD_ROW, ACT_NONE, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[7]  = '{4096, 2048, 3,    64,   3, 0, ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[8]  = '{4096, 2048, 64,   64,   5, 0, ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[9]  = '{4096, 2048, 64,   64,   5, 0, ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[10] = '{4096, 1024, 64,   128,  5, 0, ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[11] = '{4096, 128,  128,  1024, 6, 0, ORD_COL, ACT_RELU, 1, DST_INBUF, SRC_DMA,   0, 0, 0};
      L[12] = '{1,    1,    1024, 512,  9, 0, ORD_ROW, ACT_RELU, 0, DST_INBUF, SRC_INBUF, 0, 0, 0};
      L[13] = '{1,    1,    512,  256,  8, 0, ORD_ROW, ACT_RELU, 0, DST_INBUF, SRC_INBUF, 0, 0, 0};
      L[14] = '{1,    1,    256,  4096, 6, 0, ORD_ROW, ACT_NONE, 0, DST_DDR,   SRC_INBUF, 0, 0, 0};
      // run 2: feature transform, shared MLP 64-64-128-1024, pooling, classifier
      L[15] = '{4096, 2048, 64,   64,   8, 0, ORD_ROW, ACT_NONE, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[16] = '{4096, 2048, 64,   64,   5, 0, ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[17] = '{4096, 1024, 64,   128,  5, 0, ORD_ROW, ACT_RELU, 0, DST_DDR,   SRC_DMA,   0, 0, 0};
      L[18] = '{4096, 128,  128,  1024, 6, 0, ORD_COL, ACT_RELU, 1, DST_INBUF, SRC_DMA,   0, 0, 0};
      L[19] = '{1,    1,    1024, 512,  9, 0, ORD_ROW, ACT_RELU, 0, DST_INBUF, SRC_INBUF, 0, 0, 0};
      L[20] = '{1,    1,    512,  256,  8, 0, ORD_ROW, ACT_RELU, 0, DST_INBUF, SRC_INBUF, 0, 0, 0};
      L[21] = '{1,    1,    256,  40,   7, 0, ORD_ROW, ACT_NONE, 0, DST_DDR,   SRC_INBUF, 0, 0, 0};
      for (int l = 6; l < 15; l++) run_of[l] = 1;
      for (int l = 15; l < 22; l++) run_of[l] = 2;
      in_from[6] = -2; w_from[6] = 5;
      in_from[15] = 8; w_from[15] = 14;
      if (SCEN == 4) begin
        // segmentation: keep the global feature in DDR, drop the classifier
        L[18].dest = DST_DDR;
        nlay = 23; nruns = 4;
        L[19] = '{4096, 120,  1088, 512,  9, 0, ORD_ROW, ACT_RELU, 0, DST_DDR, SRC_DMA, 0, 0, 0};
        L[20] = '{4096, 256,  512,  256,  8, 0, ORD_ROW, ACT_RELU, 0, DST_DDR, SRC_DMA, 0, 0, 0};
        L[21] = '{4096, 512,  256,  128,  7, 0, ORD_ROW, ACT_RELU, 0, DST_DDR, SRC_DMA, 0, 0, 0};
        L[22] = '{4096, 1024, 128,  50,   6, 0, ORD_ROW, ACT_NONE, 0, DST_DDR, SRC_DMA, 0, 0, 0};
        for (int l = 19; l < 23; l++) run_of[l] = 3;
        in_from[19] = -3; cat_a = 15; cat_b = 18;
      end
      // DDR: point cloud at 0, then each layer's weight block and output in turn.
      ptr = 4096;
      for (int l = 0; l < nlay; l++) begin
        int kt, jt, src;
        kt = ceil_div(L[l].kin, M); jt = ceil_div(L[l].kout, N);
        L[l].w_addr = ptr; ptr += kt * jt * N + jt * NPART;
        if (L[l].dest == DST_DDR) begin
          L[l].out_addr = ptr; ptr += (L[l].pool ? 1 : L[l].npts) * jt;
        end
        src = (in_from[l] >= 0) ? in_from[l] : l - 1;
        L[l].in_addr = (l == 0 || in_from[l] == -2) ? 0 : L[src].out_addr;
        if (in_from[l] == -3) begin L[l].in_addr = ptr; ptr += L[l].npts * kt; end
      end
      if (ptr > int'(DDRW)) $fatal(1, "DDR model too small");
    end else begin
      nlay = 3;
      L[0] = '{4096, 2048, 3,   64,  3, 0,  ORD_ROW, ACT_RELU,  0, DST_DDR,   SRC_DMA,   0,     40000, 50000};
      L[1] = '{4096, 1024, 64,  128, 5, 0,  ORD_COL, ACT_RELU,  1, DST_INBUF, SRC_DMA,   50000, 70000, 0};
      L[2] = '{1,    1,    128, 64,  5, 60, ORD_ROW, ACT_RELU6, 0, DST_DDR,   SRC_INBUF, 0,     90000, 100000};
      L[3] = '{0, 0, 0, 0, 0, 0, ORD_ROW, ACT_NONE, 0, DST_DDR, SRC_DMA, 0, 0, 0};
    end
  end

  // ------------------------------------------------------------ clock, reset, watchdog
  int checks = 0, failures = 0;
  longint cycles = 0;

  initial tb_done = 1'b0;
  initial clk = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles", WATCHDOG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    tb_done = 1'b1;
  end

  // ------------------------------------------------------------ DDR and DMA model
  logic [M*W-1:0] ddr [DDRW];
  bit     rd_busy = 0;
  int     rd_addr, rd_left;
  int     n_out_words = 0, n_out_stall = 0, n_in_gap = 0, n_last = 0;

  assign dma_cmd_ready = !rd_busy && rst_n;

  always @(posedge clk) begin
    if (dma_cmd_valid && dma_cmd_ready) begin
      rd_busy <= 1; rd_addr <= int'(dma_cmd_addr); rd_left <= int'(dma_cmd_beats);
    end
    if (s_in_valid && s_in_ready) begin
      rd_addr <= rd_addr + 1; rd_left <= rd_left - 1;
      if (rd_left == 1) rd_busy <= 0;
    end
    if (rd_busy && !s_in_valid) n_in_gap++;
    // random gaps on the read stream
    s_in_valid <= 0;
    if (rd_busy && !(s_in_valid && s_in_ready && rd_left == 1)) begin
      int a;
      a = (s_in_valid && s_in_ready) ? rd_addr + 1 : rd_addr;
      if (($urandom % 8) != 0 || (s_in_valid && !s_in_ready)) begin
        s_in_valid <= 1; s_in_data <= ddr[a];
      end
    end
    // write stream with random back-pressure
    if (m_out_valid && m_out_ready) begin
      ddr[m_out_idx] <= m_out_data;
      n_out_words++;
      if (m_out_last) n_last++;
    end
    if (m_out_valid && !m_out_ready) n_out_stall++;
    m_out_ready <= (SCEN == 0) ? (($urandom % 3) == 0) : (($urandom % 16) != 0);
  end

  // ------------------------------------------------------------ AXI-lite host
  task automatic axil_write(input logic [11:0] a, input logic [31:0] d);
    s_axil_awvalid <= 1; s_axil_awaddr <= a; s_axil_wvalid <= 1; s_axil_wdata <= d;
    do @(posedge clk); while (!s_axil_awready);
    s_axil_awvalid <= 0; s_axil_wvalid <= 0;
    s_axil_bready <= 1;
    do @(posedge clk); while (!s_axil_bvalid);
    s_axil_bready <= 0;
  endtask

  task automatic axil_read(input logic [11:0] a, output logic [31:0] d);
    s_axil_arvalid <= 1; s_axil_araddr <= a;
    do @(posedge clk); while (!s_axil_arready);
    s_axil_arvalid <= 0; s_axil_rready <= 1;
    do @(posedge clk); while (!s_axil_rvalid);
    d = s_axil_rdata;
    s_axil_rready <= 0;
  endtask

  // ------------------------------------------------------------ reference model
  int X0 [];     // the point cloud
  int X [];      // current layer input, npts x kin, row-major
  int Y [];      // current layer output
  int Wt [];     // weights kin x kout
  int Bs [];     // biases

  function automatic int sat(int v);
    int mx; mx = (1 << (W - 1)) - 1;
    if (v > mx) return mx;
    if (v < -mx - 1) return -mx - 1;
    return v;
  endfunction

  function automatic int rnd(int lo, int hi); return lo + int'($urandom % (hi - lo + 1)); endfunction

  function automatic logic [M*W-1:0] pack_lanes(int v []);
    logic [M*W-1:0] r;
    r = '0;
    for (int i = 0; i < M && i < v.size(); i++) r[i*W +: W] = W'(v[i]);
    return r;
  endfunction

  // Put weights and biases of layer l in DDR in the loader's layout.
  task automatic put_weights(int l);
    int kt, jt, a;
    kt = ceil_div(L[l].kin, M); jt = ceil_div(L[l].kout, N);
    a = L[l].w_addr;
    for (int j = 0; j < jt; j++)
      for (int k = 0; k < kt; k++)
        for (int i = 0; i < N; i++) begin
          logic [M*W-1:0] wd;
          wd = '0;
          for (int r = 0; r < M; r++) begin
            int row, col;
            row = k * M + r; col = j * N + i;
            if (row < L[l].kin && col < L[l].kout) wd[r*W +: W] = W'(Wt[row * L[l].kout + col]);
          end
          ddr[a + (j * kt + k) * N + i] = wd;
        end
    a = a + jt * kt * N;
    for (int j = 0; j < jt; j++)
      for (int q = 0; q < NPART; q++) begin
        logic [M*W-1:0] bd;
        bd = '0;
        for (int b = 0; b < BPB; b++) begin
          int col; col = j * N + q * BPB + b;
          if (col < L[l].kout) bd[b*ACC_W +: ACC_W] = ACC_W'(Bs[col]);
        end
        ddr[a + j * NPART + q] = bd;
      end
  endtask

  task automatic put_input(int l);
    int kt;
    kt = ceil_div(L[l].kin, M);
    for (int p = 0; p < L[l].npts; p++)
      for (int k = 0; k < kt; k++) begin
        logic [M*W-1:0] wd;
        wd = '0;
        for (int r = 0; r < M; r++)
          if (k * M + r < L[l].kin) wd[r*W +: W] = W'(X[p * L[l].kin + k * M + r]);
        ddr[L[l].in_addr + p * kt + k] = wd;
      end
  endtask

  int n_relu6_clip, n_sat, n_relu_zero;
  task automatic ref_layer(int l);
    int rows;
    rows = L[l].pool ? 1 : L[l].npts;
    Y = new[rows * L[l].kout];
    for (int o = 0; o < L[l].kout; o++) begin
      int best; best = 0;
      for (int p = 0; p < L[l].npts; p++) begin
        longint acc; int q;
        acc = Bs[o];
        for (int i = 0; i < L[l].kin; i++) acc += X[p * L[l].kin + i] * Wt[i * L[l].kout + o];
        acc = acc >>> L[l].shift;
        q = sat(int'(acc));
        if (q != acc) n_sat++;
        if (L[l].act != ACT_NONE && q < 0) begin q = 0; n_relu_zero++; end
        if (L[l].act == ACT_RELU6 && q > L[l].clip) begin q = L[l].clip; n_relu6_clip++; end
        if (L[l].pool) begin if (p == 0 || q > best) best = q; end
        else Y[p * L[l].kout + o] = q;
      end
      if (L[l].pool) Y[o] = best;
    end
  endtask

  // ------------------------------------------------------------ counters of internal events
  int n_fb = 0, n_psum = 0, n_swap = 0;
  always @(posedge clk) begin
    // counted only out of reset: before the first clock edge the flops hold
    // their random start values
    if (rst_n && ev_feedback) n_fb++;
    if (rst_n && ev_psum)     n_psum++;
    if (rst_n && ev_swap)     n_swap++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ main
  int outs [NL][];
  initial begin
    logic [31:0] rd;
    int  stalls, waits, passes, busy_cycles;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = '0; s_axil_wdata = '0; s_axil_araddr = '0;
    s_in_valid = 0; s_in_data = '0; m_out_ready = 0;
    n_relu6_clip = 0; n_sat = 0; n_relu_zero = 0;
    rst_n = 0;
    for (int i = 0; i < DDRW; i++) ddr[i] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    #1;

    // Point cloud, weights and the reference results.
    X0 = new[L[0].npts * L[0].kin];
    foreach (X0[i]) X0[i] = rnd(-40, 40);
    X = X0;
    put_input(0);
    for (int l = 0; l < nlay; l++) begin
      if (l > 0) X = (in_from[l] == -2) ? X0 : (in_from[l] >= 0) ? outs[in_from[l]] : outs[l-1];
      if (in_from[l] == -3) begin
        int ka, kb;
        ka = L[cat_a].kout; kb = L[cat_b].kout;
        X = new[L[l].npts * (ka + kb)];
        for (int p = 0; p < L[l].npts; p++) begin
          for (int c = 0; c < ka; c++) X[p * (ka + kb) + c] = outs[cat_a][p * ka + c];
          for (int c = 0; c < kb; c++) X[p * (ka + kb) + ka + c] = outs[cat_b][c];
        end
      end
      Bs = new[L[l].kout];
      if (w_from[l] >= 0) begin
        // weights made by the host from an earlier result (see the host step)
        Wt = outs[w_from[l]];
        foreach (Bs[i]) Bs[i] = 0;
      end else begin
        Wt = new[L[l].kin * L[l].kout];
        foreach (Wt[i]) Wt[i] = rnd(-8, 8);
        foreach (Bs[i]) Bs[i] = rnd(-200, 200);
        // one large bias in the first layer makes the output saturation certain
        if (SCEN < 2 && l == 0) Bs[0] = 1 << 14;
        put_weights(l);
      end
      ref_layer(l);
      outs[l] = Y;
    end

    stalls = 0; waits = 0; passes = 0; busy_cycles = 0;
    for (int r = 0; r < nruns; r++) begin
      int first, cnt;
      first = -1; cnt = 0;
      for (int l = 0; l < nlay; l++) if (run_of[l] == r) begin if (first < 0) first = l; cnt++; end

      // Host step: lay out an earlier result, as the accelerator wrote it to DDR,
      // as the weight block of a transform layer (kin x kout, row-major, no bias).
      for (int l = first; l < first + cnt; l++)
        if (w_from[l] >= 0) begin
          int q; q = w_from[l];
          Wt = new[L[l].kin * L[l].kout];
          foreach (Wt[c]) Wt[c] = $signed(ddr[L[q].out_addr + c / N][(c % N) * W +: W]);
          Bs = new[L[l].kout];
          foreach (Bs[i]) Bs[i] = 0;
          put_weights(l);
        end

      // Host step: build the concatenated local + global feature matrix in DDR
      // from the two results the accelerator wrote (both widths multiples of M).
      for (int l = first; l < first + cnt; l++)
        if (in_from[l] == -3) begin
          int kta, ktb;
          kta = ceil_div(L[cat_a].kout, N); ktb = ceil_div(L[cat_b].kout, N);
          for (int p = 0; p < L[l].npts; p++) begin
            for (int k = 0; k < kta; k++) ddr[L[l].in_addr + p * (kta + ktb) + k] = ddr[L[cat_a].out_addr + p * kta + k];
            for (int k = 0; k < ktb; k++) ddr[L[l].in_addr + p * (kta + ktb) + kta + k] = ddr[L[cat_b].out_addr + k];
          end
        end

      // Descriptors.
      for (int d = 0; d < cnt; d++) begin
        logic [11:0] b;
        int l;
        l = first + d;
        b = REG_DESC + 12'(32 * d);
        axil_write(b + 0,  {16'(L[l].chunk), 16'(L[l].npts)});
        axil_write(b + 4,  {4'd0, L[l].src, L[l].dest, L[l].pool, L[l].act, L[l].order,
                            6'(L[l].shift), 8'(ceil_div(L[l].kout, N)), 8'(ceil_div(L[l].kin, M))});
        axil_write(b + 8,  32'(L[l].clip));
        axil_write(b + 12, 32'(L[l].in_addr));
        axil_write(b + 16, 32'(L[l].w_addr));
        axil_write(b + 20, 32'(L[l].out_addr));
      end
      axil_write(REG_NLAYERS, 32'(cnt));
      axil_read(REG_DESC + 4, rd);
      check(rd[7:0] == 8'(ceil_div(L[first].kin, M)), "descriptor read-back");
      axil_write(REG_CTRL, 32'd1);
      axil_read(REG_STATUS, rd);
      check(rd[0] == 1'b1, "busy after start");

      // Poll for completion.
      do begin
        repeat (50) @(posedge clk);
        axil_read(REG_STATUS, rd);
      end while (rd[1] != 1'b1);

      // The counters restart with every run; add them up.
      axil_read(REG_CYCLES, rd); busy_cycles += int'(rd);
      axil_read(REG_STALLS, rd); stalls += int'(rd);
      axil_read(REG_WAITS,  rd); waits  += int'(rd);
      axil_read(REG_PASSES, rd); passes += int'(rd);
    end

    // Compare every layer that went to DDR.
    for (int l = 0; l < nlay; l++) begin
      int rows, jt, bad;
      if (L[l].dest != DST_DDR) continue;
      rows = L[l].pool ? 1 : L[l].npts;
      jt = ceil_div(L[l].kout, N);
      bad = 0;
      for (int p = 0; p < rows; p++)
        for (int j = 0; j < jt; j++) begin
          logic [M*W-1:0] wd;
          bit ok;
          wd = ddr[L[l].out_addr + p * jt + j];
          ok = 1;
          for (int i = 0; i < N && j * N + i < L[l].kout; i++)
            if ($signed(wd[i*W +: W]) != outs[l][p * L[l].kout + j * N + i]) begin
              ok = 0;
              if (bad < 5) $display("layer %0d point %0d col %0d: got %0d want %0d", l, p, j*N+i,
                                    $signed(wd[i*W +: W]), outs[l][p * L[l].kout + j * N + i]);
            end
          if (!ok) bad++;
          check(ok, $sformatf("layer %0d output word p=%0d j=%0d", l, p, j));
        end
    end

    // Passes: one per chunk of every layer.
    begin
      int want; want = 0;
      for (int l = 0; l < nlay; l++) want += ceil_div(L[l].npts, L[l].chunk);
      check(passes == want, $sformatf("passes %0d, expected %0d", passes, want));
      check(n_swap == want, $sformatf("buffer swaps %0d, expected %0d", n_swap, want));
    end

    // Throughput: the issue cycles alone are sum(kt * jt * npts); the run may not
    // take more than twice that plus load time (DMA words) and fixed overheads.
    begin
      longint issue, words;
      issue = 0; words = 0;
      for (int l = 0; l < nlay; l++) begin
        int kt, jt;
        kt = ceil_div(L[l].kin, M); jt = ceil_div(L[l].kout, N);
        issue += kt * jt * L[l].npts;
        words += kt * jt * N + jt * NPART + (L[l].src == SRC_DMA ? L[l].npts * kt : 0);
      end
      $display("busy cycles %0d, tile operations %0d, DMA read words %0d", busy_cycles, issue, words);
      check(busy_cycles >= issue, "at most one tile operation per cycle");
      check(busy_cycles <= 2 * issue + 2 * words + 200 * passes, "run time within bound");
    end

    // Mechanisms.
    $display("events: stalls=%0d waits=%0d feedback=%0d psum=%0d swaps=%0d out_stall=%0d in_gap=%0d relu6_clip=%0d sat=%0d relu_zero=%0d last=%0d",
             stalls, waits, n_fb, n_psum, n_swap, n_out_stall, n_in_gap, n_relu6_clip, n_sat, n_relu_zero, n_last);
    check(n_fb > 0,         "feedback into the input buffer happened");
    check(n_psum > 0,       "partial-sum accumulation happened");
    check(n_swap > 1,       "double-buffer swap happened");
    check(n_out_stall > 0,  "DMA write back-pressure happened");
    check(waits > 0,        "wait for a buffer load happened");
    check(n_relu_zero > 0,  "ReLU clamped a value");
    if (SCEN < 2) check(n_relu6_clip > 0, "ReLU6 clipped a value");
    if (SCEN < 2) check(n_sat > 0,        "saturation happened");
    check(n_last > 0,       "stream last flag seen");
    if (SCEN == 0) check(stalls > 0, "issue stall on a full stage 2 happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    tb_done = 1'b1;
  end
endmodule
