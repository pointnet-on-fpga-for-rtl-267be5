// pnet_dma_loader: writes the DMA read stream into the idle input or weight bank.
//
// The controller asks the DMA for a block of words and, at the same time, starts
// this loader with the kind of block, its length in stream words and the bank to
// fill. The loader accepts exactly that many words and turns each into a buffer
// write. An input block is written to consecutive input-buffer words. A weight
// block is all weight tiles of a layer, tile after tile, each as N columns of M
// weights, followed by the bias vectors, each as NPART words of BPB biases.
// (This stream layout is this design's choice.)
//
// Interface: AXI-stream style s_valid/s_ready/s_data, one 1 x M word per beat.
// Timing: one word per cycle; busy rises the cycle after start and falls after
// the last word has been written.
module pnet_dma_loader
  import pnet_pkg::*;
#(
  parameter int unsigned M        = 32,
  parameter int unsigned N        = 32,
  parameter int unsigned W        = 8,
  parameter int unsigned ACC_W    = 32,
  parameter int unsigned IN_WORDS = 4096,
  parameter int unsigned WT_TILES = 1024,
  parameter int unsigned JT_MAX   = 128,
  localparam int unsigned IAW     = $clog2(IN_WORDS),
  localparam int unsigned TW      = $clog2(WT_TILES),
  localparam int unsigned NW      = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned JW      = $clog2(JT_MAX),
  localparam int unsigned BPB     = (M * W) / ACC_W,
  localparam int unsigned NPART   = N / BPB,
  localparam int unsigned PW      = (NPART > 1) ? $clog2(NPART) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  dma_kind_e                 kind,
  input  logic [31:0]               beats,
  input  logic [15:0]               tiles,    // weight tiles before the biases
  output logic                      busy,
  // stream in
  input  logic                      s_valid,
  output logic                      s_ready,
  input  logic [M-1:0][W-1:0]       s_data,
  // input-buffer write port
  output logic                      in_we,
  output logic [IAW-1:0]            in_addr,
  output logic [M-1:0][W-1:0]       in_data,
  // weight-buffer write ports
  output logic                      w_we,
  output logic [TW-1:0]             w_tile,
  output logic [NW-1:0]             w_col,
  output logic [M-1:0][W-1:0]       w_data,
  output logic                      b_we,
  output logic [JW-1:0]             b_j,
  output logic [PW-1:0]             b_part,
  output logic [BPB-1:0][ACC_W-1:0] b_data
);
  dma_kind_e   kind_q;
  logic [31:0] left;        // words still to take
  logic [31:0] cnt;         // words taken
  logic [15:0] tiles_q;
  logic [15:0] tile;
  logic [NW:0] col;
  logic [15:0] jj;
  logic [PW:0] part;
  logic        in_bias;
  logic        fire;

  assign s_ready = busy;
  assign fire    = s_valid && s_ready;
  assign in_bias = (tile == tiles_q);

  assign in_we   = fire && kind_q == DMA_INPUT;
  assign in_addr = cnt[IAW-1:0];
  assign in_data = s_data;
  assign w_we    = fire && kind_q == DMA_WEIGHT && !in_bias;
  assign w_tile  = tile[TW-1:0];
  assign w_col   = col[NW-1:0];
  assign w_data  = s_data;
  assign b_we    = fire && kind_q == DMA_WEIGHT && in_bias;
  assign b_j     = jj[JW-1:0];
  assign b_part  = part[PW-1:0];
  assign b_data  = s_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; kind_q <= DMA_INPUT; left <= '0; cnt <= '0; tiles_q <= '0;
      tile <= '0; col <= '0; jj <= '0; part <= '0;
    end else if (start) begin
      busy    <= (beats != 0);
      kind_q  <= kind;
      left    <= beats;
      cnt     <= '0;
      tiles_q <= tiles;
      tile <= '0; col <= '0; jj <= '0; part <= '0;
    end else if (fire) begin
      left <= left - 1;
      cnt  <= cnt + 1;
      if (left == 1) busy <= 1'b0;
      if (!in_bias) begin
        if (col == (NW+1)'(N - 1)) begin col <= '0; tile <= tile + 1'b1; end
        else                           col <= col + 1'b1;
      end else begin
        if (part == (PW+1)'(NPART - 1)) begin part <= '0; jj <= jj + 1'b1; end
        else                                part <= part + 1'b1;
      end
    end
  end
endmodule
