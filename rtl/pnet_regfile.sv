// pnet_regfile: configuration register file on the GP (AXI-lite) port.
//
// Before a run the host writes one descriptor per layer (size of the point cloud,
// tile counts, output pattern, activation, pooling, where the input comes from and
// where the result goes, DDR addresses) and the number of layers, then writes the
// start bit. The controller then runs all layers without further host action; the
// host polls the status register. Performance counters from the controller are
// readable too. The register map is in pnet_pkg (this design's choice; the paper
// gives the contents of the register file, not its layout).
//
// Interface: AXI4-lite slave, 32-bit data, 12-bit byte address. A write is taken
// when both AW and W are valid; the response follows one cycle later (OKAY).
// A read answers one cycle after AR. Writes to descriptors while busy are
// accepted but take effect immediately (the host should not do that).
// start is a one-cycle pulse.
// Lint notes: the reset also gates a checking assertion (disable iff), which a
// linter reports as a reset used both synchronously and asynchronously; it creates
// no logic. The byte-offset bits [1:0] of descriptor addresses are ignored on
// purpose (word access only).
module pnet_regfile
  import pnet_pkg::*;
#(
  parameter int unsigned NDESC = 32,
  localparam int unsigned DW   = $clog2(NDESC)
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-lite slave
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [11:0]   s_awaddr,
  input  logic          s_wvalid,
  output logic          s_wready,
  input  logic [31:0]   s_wdata,
  output logic          s_bvalid,
  input  logic          s_bready,
  output logic [1:0]    s_bresp,
  input  logic          s_arvalid,
  output logic          s_arready,
  input  logic [11:0]   s_araddr,
  output logic          s_rvalid,
  input  logic          s_rready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  // to / from the controller
  output logic          start,
  output logic [DW:0]   nlayers,
  input  logic [DW-1:0] desc_idx_a,
  output desc_t         desc_a,
  input  logic [DW-1:0] desc_idx_b,
  output desc_t         desc_b,
  input  logic          busy,
  input  logic          done,
  input  logic [31:0]   cnt_cycles,
  input  logic [31:0]   cnt_stalls,
  input  logic [31:0]   cnt_waits,
  input  logic [31:0]   cnt_passes
);
  logic [5:0][31:0] dwords [NDESC];
  logic             wr_fire, rd_fire;

  assign s_awready = !s_bvalid && s_awvalid && s_wvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign s_bresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign rd_fire   = s_arvalid && s_arready;
  assign s_rresp   = 2'b00;

  assign desc_a = words_to_desc(dwords[desc_idx_a]);
  assign desc_b = words_to_desc(dwords[desc_idx_b]);

  // Descriptor storage (no reset: the host writes what it uses).
  always_ff @(posedge clk) begin
    if (wr_fire && s_awaddr >= REG_DESC) begin
      logic [11:0] off;
      off = s_awaddr - REG_DESC;
      if (32'(off[11:5]) < NDESC && off[4:2] < 6) dwords[off[5+DW-1:5]][off[4:2]] <= s_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      start    <= 1'b0;
      nlayers  <= '0;
    end else begin
      start <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr)
          REG_CTRL:    start   <= s_wdata[0] && !busy;
          REG_NLAYERS: nlayers <= s_wdata[DW:0];
          default: ;
        endcase
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        if (s_araddr >= REG_DESC) begin
          logic [11:0] off;
          off = s_araddr - REG_DESC;
          s_rdata <= (32'(off[11:5]) < NDESC && off[4:2] < 6) ? dwords[off[5+DW-1:5]][off[4:2]] : '0;
        end else begin
          unique case (s_araddr)
            REG_STATUS:  s_rdata <= {30'd0, done, busy};
            REG_NLAYERS: s_rdata <= 32'(nlayers);
            REG_CYCLES:  s_rdata <= cnt_cycles;
            REG_STALLS:  s_rdata <= cnt_stalls;
            REG_WAITS:   s_rdata <= cnt_waits;
            REG_PASSES:  s_rdata <= cnt_passes;
            default:     s_rdata <= '0;
          endcase
        end
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response holds until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata))
    else $error("pnet_regfile: read response dropped");
endmodule
