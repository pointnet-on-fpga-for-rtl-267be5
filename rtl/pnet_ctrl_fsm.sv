// pnet_ctrl_fsm: the controller (finite state machine) of the accelerator.
//
// It runs the list of layer descriptors from the register file. A layer is cut
// into passes of at most `chunk` points. Two processes cooperate:
//
//  * The load side prepares the next pass in the idle banks: for the first pass
//    of a layer it asks the DMA for the layer's weights and biases (idle weight
//    bank, overlapping the previous layer's last pass) and then waits at a layer
//    barrier until the previous layer's results have all left stage 2; then it
//    asks for the pass's input rows (idle input bank), unless the layer reads
//    the previous layer's result straight from the input buffer (src = input
//    buffer), which the feedback path has filled by then.
//  * The compute side, once a pass is loaded and the previous one finished,
//    swaps the banks (the double buffers change roles) and issues one 1 x M x N
//    tile operation per cycle. The loops run, outermost first: input tile k, then
//    either point p then output tile j (ORD_ROW, the row-oriented pattern: the
//    result of one point along its row) or output tile j then point p (ORD_COL,
//    the column-oriented pattern used for max pooling). After each k sweep it
//    waits DRAIN cycles for the pipeline to empty, so the next sweep reads back
//    finished partial sums from stage 1.
//
// Issue is held (a stall) whenever output buffer stage 2 has less room than the
// pipeline can still deliver. Addresses: input word p*kt + k, weight tile
// j*kt + k, stage-1 word p*jt + j. The loop order and addressing are this
// design's choices; the paper gives the two output patterns, the double buffering
// and the register-file-driven control.
//
// Timing: all issue outputs are registered (iss.valid marks a tile operation).
// Lint notes: the reset also gates a checking assertion (disable iff), reported by
// a linter as a reset used both ways; it creates no logic. Each side of the
// controller reads only the descriptor fields it needs, so some bits of its
// descriptor copies are reported unused.
module pnet_ctrl_fsm
  import pnet_pkg::*;
#(
  parameter int unsigned M        = 32,
  parameter int unsigned N        = 32,
  parameter int unsigned W        = 8,
  parameter int unsigned ACC_W    = 32,
  parameter int unsigned IN_WORDS = 4096,
  parameter int unsigned WT_TILES = 1024,
  parameter int unsigned S1_DEPTH = 4096,
  parameter int unsigned S2_DEPTH = 64,
  parameter int unsigned NDESC    = 32,
  parameter int unsigned DRAIN    = 10,    // issue-to-stage-2 latency + 1
  localparam int unsigned DW      = $clog2(NDESC),
  localparam int unsigned IAW     = $clog2(IN_WORDS),
  localparam int unsigned TW      = $clog2(WT_TILES),
  localparam int unsigned S2AW    = $clog2(S2_DEPTH),
  localparam int unsigned BPW     = (N * ACC_W) / (M * W)   // stream words per bias vector
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [DW:0]       nlayers,
  output logic [DW-1:0]     ld_idx,
  input  desc_t             ld_desc,
  output logic [DW-1:0]     cp_idx,
  input  desc_t             cp_desc,
  // DMA read command
  output logic              dma_cmd_valid,
  input  logic              dma_cmd_ready,
  output dma_kind_e         dma_cmd_kind,
  output logic [31:0]       dma_cmd_addr,
  output logic [31:0]       dma_cmd_beats,
  // loader
  output logic              ldr_start,
  output dma_kind_e         ldr_kind,
  output logic [31:0]       ldr_beats,
  output logic [15:0]       ldr_tiles,
  input  logic              ldr_busy,
  // buffers
  output logic              in_rd_bank,
  output logic              in_wr_bank,
  output logic [IAW-1:0]    in_rd_addr,
  output logic              w_rd_bank,
  output logic              w_wr_bank,
  output logic [TW-1:0]     w_rd_tile,
  output sb_t               iss,
  input  logic [S2AW:0]     s2_free,
  input  logic              s2_empty,
  // status
  output logic              busy,
  output logic              done,
  output logic [31:0]       cnt_cycles,
  output logic [31:0]       cnt_stalls,
  output logic [31:0]       cnt_waits,
  output logic [31:0]       cnt_passes
);
  typedef enum logic [2:0] {L_IDLE, L_PREP, L_WCMD, L_WLOAD, L_ICMD, L_ILOAD, L_BAR, L_READY} ld_state_e;
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_DRAIN} cp_state_e;

  ld_state_e   ls;
  cp_state_e   cs;
  logic        ld_end;                    // no pass left to load
  logic [15:0] ld_base, ld_P;
  logic [15:0] cp_base, cp_P;
  logic        in_cur, w_cur;
  logic [7:0]  k, j;
  logic [15:0] p;
  logic [$clog2(DRAIN+1)-1:0] drain;
  logic        swap, can_issue, sweep_end, last_chunk;
  logic [15:0] P_next;

  assign in_rd_bank = in_cur;
  assign in_wr_bank = !in_cur;
  assign w_rd_bank  = w_cur;
  assign w_wr_bank  = !w_cur;

  // Points of the pass being prepared.
  always_comb begin
    logic [15:0] rem;
    rem    = ld_desc.npts - ld_base;
    P_next = (rem < ld_desc.chunk) ? rem : ld_desc.chunk;
  end

  assign swap       = busy && cs == C_IDLE && ls == L_READY;
  assign can_issue  = cs == C_RUN && s2_free >= (S2AW+1)'(DRAIN + 1);
  assign last_chunk = (cp_base + cp_P == cp_desc.npts);
  // Both loop orders end a k sweep on the last point of the last output tile.
  assign sweep_end  = (p == cp_P - 1) && (j == cp_desc.jt - 1);

  // DMA command for the load side.
  always_comb begin
    dma_cmd_valid = (ls == L_WCMD) || (ls == L_ICMD);
    dma_cmd_kind  = (ls == L_WCMD) ? DMA_WEIGHT : DMA_INPUT;
    dma_cmd_addr  = (ls == L_WCMD) ? ld_desc.w_addr
                                   : ld_desc.in_addr + 32'(ld_base) * 32'(ld_desc.kt);
    dma_cmd_beats = (ls == L_WCMD)
                  ? 32'(ld_desc.kt) * 32'(ld_desc.jt) * 32'(N) + 32'(ld_desc.jt) * 32'(BPW)
                  : 32'(ld_P) * 32'(ld_desc.kt);
    ldr_start     = dma_cmd_valid && dma_cmd_ready;
    ldr_kind      = dma_cmd_kind;
    ldr_beats     = dma_cmd_beats;
    ldr_tiles     = 16'(ld_desc.kt) * 16'(ld_desc.jt);
  end

  // ------------------------------------------------------------ load side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls <= L_IDLE; ld_idx <= '0; ld_base <= '0; ld_P <= '0; ld_end <= 1'b1;
    end else begin
      unique case (ls)
        L_IDLE: if (start && nlayers != 0) begin
          ld_idx <= '0; ld_base <= '0; ld_end <= 1'b0; ls <= L_PREP;
        end
        L_PREP: begin
          ld_P <= P_next;
          ls <= (ld_base == 0) ? L_WCMD : L_ICMD;
        end
        L_WCMD:  if (dma_cmd_ready) ls <= L_WLOAD;
        L_WLOAD: if (!ldr_busy) ls <= L_BAR;
        // Layer barrier: the previous layer's results must have left stage 2
        // (to DDR or into the input buffer) before this layer's input is read.
        L_BAR:   if (cs == C_IDLE && s2_empty) ls <= (ld_desc.src == SRC_INBUF) ? L_READY : L_ICMD;
        L_ICMD:  if (dma_cmd_ready) ls <= L_ILOAD;
        L_ILOAD: if (!ldr_busy) ls <= L_READY;
        L_READY: if (swap) begin
          // Move on to the pass after the one just handed to the compute side.
          if (ld_base + ld_P < ld_desc.npts) begin
            ld_base <= ld_base + ld_P; ls <= L_PREP;
          end else if (32'(ld_idx) + 1 < 32'(nlayers)) begin
            ld_idx <= ld_idx + 1'b1; ld_base <= '0; ls <= L_PREP;
          end else begin
            ld_end <= 1'b1; ls <= L_IDLE;
          end
        end
        default: ls <= L_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ compute side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; cp_idx <= '0; cp_base <= '0; cp_P <= '0;
      in_cur <= 1'b0; w_cur <= 1'b0; k <= '0; j <= '0; p <= '0; drain <= '0;
      iss <= '0; in_rd_addr <= '0; w_rd_tile <= '0;
      busy <= 1'b0; done <= 1'b0;
      cnt_cycles <= '0; cnt_stalls <= '0; cnt_waits <= '0; cnt_passes <= '0;
    end else begin
      iss.valid <= 1'b0;
      if (start && !busy && nlayers != 0) begin
        busy <= 1'b1; done <= 1'b0;
        cnt_cycles <= '0; cnt_stalls <= '0; cnt_waits <= '0; cnt_passes <= '0;
      end
      if (busy) cnt_cycles <= cnt_cycles + 1;
      if (busy && cs == C_IDLE && !swap && !ld_end) cnt_waits <= cnt_waits + 1;
      if (cs == C_RUN && !can_issue) cnt_stalls <= cnt_stalls + 1;

      unique case (cs)
        C_IDLE: begin
          if (swap) begin
            in_cur  <= !in_cur;
            if (ld_base == 0) w_cur <= !w_cur;
            cp_idx  <= ld_idx;
            cp_base <= ld_base;
            cp_P    <= ld_P;
            k <= '0; j <= '0; p <= '0;
            cs <= C_RUN;
          end else if (busy && ld_end && s2_empty) begin
            busy <= 1'b0; done <= 1'b1;
          end
        end
        C_RUN: if (can_issue) begin
          logic pool;
          pool = cp_desc.pool;
          iss.valid      <= 1'b1;
          iss.s1_addr    <= p * 16'(cp_desc.jt) + 16'(j);
          iss.j          <= j;
          iss.first_k    <= (k == 0);
          iss.last_k     <= (k == cp_desc.kt - 1);
          iss.pool_first <= (cp_base == 0) && (p == 0);
          iss.pool_emit  <= last_chunk && (p == cp_P - 1);
          iss.fb_addr    <= pool ? 16'(j) : p * 16'(cp_desc.jt) + 16'(j);
          iss.out_idx    <= cp_desc.out_addr
                          + (pool ? 32'(j) : (32'(cp_base) + 32'(p)) * 32'(cp_desc.jt) + 32'(j));
          iss.last       <= last_chunk && (k == cp_desc.kt - 1) && sweep_end;
          in_rd_addr     <= IAW'(p * 16'(cp_desc.kt) + 16'(k));
          w_rd_tile      <= TW'(16'(j) * 16'(cp_desc.kt) + 16'(k));
          if (sweep_end) begin
            p <= '0; j <= '0; drain <= ($clog2(DRAIN+1))'(DRAIN); cs <= C_DRAIN;
          end else if (cp_desc.order == ORD_COL) begin
            if (p == cp_P - 1) begin p <= '0; j <= j + 1'b1; end
            else               p <= p + 1'b1;
          end else begin
            if (j == cp_desc.jt - 1) begin j <= '0; p <= p + 1'b1; end
            else                     j <= j + 1'b1;
          end
        end
        C_DRAIN: begin
          if (drain != 0) drain <= drain - 1'b1;
          else if (k == cp_desc.kt - 1) begin
            cs <= C_IDLE; cnt_passes <= cnt_passes + 1;
          end else begin
            k <= k + 1'b1; cs <= C_RUN;
          end
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  // A pass must fit the buffers.
  assert property (@(posedge clk) disable iff (!rst_n)
                   swap |-> (32'(ld_P) * 32'(ld_desc.kt) <= IN_WORDS
                          && 32'(ld_P) * 32'(ld_desc.jt) <= S1_DEPTH
                          && 32'(ld_desc.kt) * 32'(ld_desc.jt) <= WT_TILES))
    else $error("pnet_ctrl_fsm: layer %0d does not fit the buffers", ld_idx);
endmodule
