// pnet_input_buffer: double-buffered input feature-map memory.
//
// Two banks (the paper's Input Buffer 1 and 2) each hold DEPTH words of one 1 x M
// input slice. While the PE array reads one bank, the other is filled for the
// next pass, so loading and computing overlap. The write-side mux chooses the
// source of the filling bank: the DMA read stream or the results fed back from
// output buffer stage 2 (the "input buffer for the next operation" route); the
// read-side mux chooses the bank the PE array reads. Both selects come from the
// controller.
//
// Word layout (this design's choice): a chunk of P points with Kin features is
// stored row by row, input tile k of point p at word p*kt + k.
//
// Timing: synchronous write; registered read, data one cycle after rd_addr.
module pnet_input_buffer #(
  parameter int unsigned M     = 32,
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  // write side
  input  logic                  wr_bank,
  input  logic                  sel_fb,      // 0: DMA, 1: output feedback
  input  logic                  dma_we,
  input  logic [AW-1:0]         dma_addr,
  input  logic [M-1:0][W-1:0]   dma_data,
  input  logic                  fb_we,
  input  logic [AW-1:0]         fb_addr,
  input  logic [M-1:0][W-1:0]   fb_data,
  // read side
  input  logic                  rd_bank,
  input  logic [AW-1:0]         rd_addr,
  output logic [M-1:0][W-1:0]   rd_data
);
  logic [M-1:0][W-1:0] mem [2][DEPTH];

  logic                we;
  logic [AW-1:0]       waddr;
  logic [M-1:0][W-1:0] wdata;

  // Input mux (DMA or feedback).
  always_comb begin
    we    = sel_fb ? fb_we   : dma_we;
    waddr = sel_fb ? fb_addr : dma_addr;
    wdata = sel_fb ? fb_data : dma_data;
  end

  always_ff @(posedge clk) begin
    if (we) mem[wr_bank][waddr] <= wdata;
    rd_data <= mem[rd_bank][rd_addr];   // output mux (bank select)
  end
endmodule
