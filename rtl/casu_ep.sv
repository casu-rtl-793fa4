// casu_ep: the Executable Pointer (EP), the two words that bound the
// executable region ER = [ERmin, ERmax].
//
// EP is a fixed, memory-mapped location (4 bytes: ERmin at EP_MIN, ERmax at
// EP_MIN + 2). The CASU monitor reads its value every cycle to know where the
// authorized software lives; the trusted install routine writes it, copying
// the bounds of the freshly authenticated software from bEP.
//
// How it works: the register snoops the core's and the DMA's writes. A 16-bit
// word write to either EP address updates the matching word. A write is
// committed only when mcu_reset is low in that cycle, so a write the monitor
// flags as illegal (which raises the reset in the same cycle) never lands. If
// the core and the DMA write EP in the same cycle the core's write wins. Reads
// from the core are answered on rdata_o/hit_o, combinationally.
//
// EP lives in flash in the paper, so its content survives the resets that the
// monitor issues: this register is cleared only by the power-on reset, to the
// executable region installed at manufacture (ER_INIT_MIN/ER_INIT_MAX).
//
// What follows the paper: EP's role, its 4-byte size and that it survives
// resets (it is non-volatile). This design's choices: the addresses, the reset
// values, word-only writes (byte writes to EP are ignored; the paper uses
// 16-bit bounds) and the write gating by mcu_reset.
module casu_ep
  import casu_pkg::*;
#(
  parameter addr_t EP_MIN      = EP_MIN_DEF,
  parameter addr_t ER_INIT_MIN = ER_MIN_INIT,
  parameter addr_t ER_INIT_MAX = ER_MAX_INIT
) (
  input  logic     clk,
  input  logic     por_n,     // power-on reset, active low
  input  logic     mcu_reset, // reset from the monitor; blocks the write
  input  mcu_obs_t obs,
  output addr_t    er_min,
  output addr_t    er_max,
  output logic     hit_o,     // core data address is an EP word
  output data_t    rdata_o    // EP word at obs.daddr
);

  localparam addr_t EP_LO = EP_MIN;
  localparam addr_t EP_HI = EP_MIN + addr_t'(2);

  addr_t min_q, max_q;

  always_ff @(posedge clk or negedge por_n) begin
    if (!por_n) begin
      min_q <= ER_INIT_MIN;
      max_q <= ER_INIT_MAX;
    end else if (!mcu_reset) begin
      // DMA first so that a same-cycle core write overrides it.
      if (obs.dma_en && obs.dma_we) begin
        if (obs.dma_addr == EP_LO) min_q <= obs.dma_wdata;
        if (obs.dma_addr == EP_HI) max_q <= obs.dma_wdata;
      end
      if (obs.wen) begin
        if (obs.daddr == EP_LO) min_q <= obs.wdata;
        if (obs.daddr == EP_HI) max_q <= obs.wdata;
      end
    end
  end

  assign er_min  = min_q;
  assign er_max  = max_q;
  assign hit_o   = (obs.daddr == EP_LO) || (obs.daddr == EP_HI);
  assign rdata_o = (obs.daddr == EP_HI) ? max_q : min_q;

endmodule
