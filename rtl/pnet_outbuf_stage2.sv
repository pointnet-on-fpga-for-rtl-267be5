// pnet_outbuf_stage2: second stage of the two-stage output buffer.
//
// Holds final, narrowed (W-bit) 1 x N result words until they leave: either on
// the DMA write stream to DDR (valid/ready handshake, with the DDR word address
// and a last flag beside the data) or, for results the next layer reads, into the
// input buffer through its feedback port, which never stalls. It is a FIFO of
// DEPTH words (this design's choice of organisation); the controller only issues
// new work while `free` leaves room for everything already in the pipeline, so a
// slow DMA stalls the PE array instead of losing results.
//
// Timing: push and pop in the same cycle are allowed. The head word is presented
// combinationally; a DDR word leaves on out_valid && out_ready, a feedback word
// leaves in the cycle fb_we is high.
// Lint note: the reset is asynchronous for the flops and also gates the checking
// assertions (disable iff); a linter reports that as a net used both ways. It is
// simulation-only checking and creates no logic.
module pnet_outbuf_stage2 #(
  parameter int unsigned N     = 32,
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the comparator array
  input  logic                  push,
  input  logic [N-1:0][W-1:0]   push_data,
  input  logic                  push_dest,   // pnet_pkg::dest_e
  input  logic [15:0]           push_fb_addr,
  input  logic [31:0]           push_out_idx,
  input  logic                  push_last,
  output logic [AW:0]           free,
  output logic                  empty,
  // DMA write stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [N-1:0][W-1:0]   out_data,
  output logic [31:0]           out_idx,
  output logic                  out_last,
  // feedback into the input buffer
  output logic                  fb_we,
  output logic [15:0]           fb_addr,
  output logic [N-1:0][W-1:0]   fb_data
);
  typedef struct packed {
    logic [N-1:0][W-1:0] data;
    logic                dest;
    logic [15:0]         fb_addr;
    logic [31:0]         out_idx;
    logic                last;
  } entry_t;

  entry_t        mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;
  logic          pop;
  entry_t        head;

  assign head      = mem[rp];
  assign empty     = (count == 0);
  assign free      = (AW+1)'(DEPTH) - count;

  assign out_valid = !empty && !head.dest;
  assign out_data  = head.data;
  assign out_idx   = head.out_idx;
  assign out_last  = head.last;

  assign fb_we     = !empty && head.dest;
  assign fb_addr   = head.fb_addr;
  assign fb_data   = head.data;

  assign pop = (out_valid && out_ready) || fb_we;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= '{data: push_data, dest: push_dest, fb_addr: push_fb_addr,
                           out_idx: push_out_idx, last: push_last};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // A push into a full buffer would lose a result.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (32'(count) < DEPTH || pop))
    else $error("pnet_outbuf_stage2: overflow");
  // AXI-stream rule: data must hold while valid waits for ready.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("pnet_outbuf_stage2: stream data changed while stalled");
endmodule
