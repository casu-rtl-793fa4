// casu_top: the CASU hardware as it attaches to a low-end MCU.
//
// CASU makes the installed software immutable and the only code allowed to
// run, except for a trusted update routine in ROM (TCR) which alone may move
// the executable region to a newly authenticated software image. This top
// holds all of its hardware:
//   casu_hw    the monitor FSM enforcing immutability of ER, EP, SF, IVTR and
//              execution only from ER or TCR;
//   tcr_guard  atomicity of the trusted code (no interrupts, no DMA, single
//              entry point) and secrecy of the key;
//   casu_ep    the EP register holding ER's bounds, written by the trusted
//              code on install and read by the monitor.
// The two reset requests are ORed into the one MCU reset, which also gates the
// EP write of the same cycle.
//
// Interface: the core and DMA signals come in as plain ports (the core, DMA,
// interrupt logic and memories belong to the host MCU and stay outside). The
// MCU reset goes out on mcu_reset; the current ER bounds and the EP read port
// are brought out so the host's memory map can return EP on a read.
//
// Timing: everything is combinational from the observed signals to mcu_reset
// in the cycle of a violation (Mealy); after it mcu_reset stays high until the
// core shows PC = 0, which the core does while it is held in reset, plus one
// cycle. The core is expected to present, in the first cycle after reset is
// released, the PC of the reset-vector target (casu_entry in TCR).
//
// The split into these three blocks and the OR of the resets follow the
// architecture figure and the paper's text; the port list is this design's.
module casu_top
  import casu_pkg::*;
#(
  parameter addr_t TCR_MIN  = TCR_MIN_DEF,
  parameter addr_t TCR_MAX  = TCR_MAX_DEF,
  parameter addr_t KEY_MIN  = KEY_MIN_DEF,
  parameter addr_t KEY_MAX  = KEY_MAX_DEF,
  parameter addr_t EP_MIN   = EP_MIN_DEF,
  parameter addr_t EP_MAX   = EP_MAX_DEF,
  parameter addr_t SF_MIN   = SF_MIN_DEF,
  parameter addr_t SF_MAX   = SF_MAX_DEF,
  parameter addr_t IVTR_MIN = IVTR_MIN_DEF,
  parameter addr_t IVTR_MAX = IVTR_MAX_DEF,
  parameter addr_t ER_INIT_MIN = ER_MIN_INIT,
  parameter addr_t ER_INIT_MAX = ER_MAX_INIT
) (
  input  logic  clk,
  input  logic  por_n,       // power-on reset, active low
  // core
  input  addr_t pc,
  input  logic  wen,
  input  logic  ren,
  input  addr_t daddr,
  input  data_t wdata,
  input  logic  irq,
  // DMA
  input  logic  dma_en,
  input  logic  dma_we,
  input  addr_t dma_addr,
  input  data_t dma_wdata,
  // outputs
  output logic  mcu_reset,   // reset to the core, active high
  output addr_t er_min,      // current executable region
  output addr_t er_max,
  output logic  ep_hit,      // core data address is an EP word
  output data_t ep_rdata,    // EP word at daddr
  output logic  mon_reset,   // reset request of the monitor
  output logic  guard_reset, // reset request of the TCR guard
  output logic  mon_viol,    // monitor rule broken this cycle
  output logic  guard_viol   // guard rule broken this cycle
);

  mcu_obs_t obs;

  always_comb begin
    obs.pc        = pc;
    obs.wen       = wen;
    obs.ren       = ren;
    obs.daddr     = daddr;
    obs.wdata     = wdata;
    obs.dma_en    = dma_en;
    obs.dma_we    = dma_we;
    obs.dma_addr  = dma_addr;
    obs.dma_wdata = dma_wdata;
    obs.irq       = irq;
  end

  casu_hw #(
    .TCR_MIN (TCR_MIN),  .TCR_MAX (TCR_MAX),
    .EP_MIN  (EP_MIN),   .EP_MAX  (EP_MAX),
    .SF_MIN  (SF_MIN),   .SF_MAX  (SF_MAX),
    .IVTR_MIN(IVTR_MIN), .IVTR_MAX(IVTR_MAX)
  ) u_monitor (
    .clk, .por_n, .obs,
    .er_min, .er_max,
    .reset_o    (mon_reset),
    .violation_o(mon_viol)
  );

  tcr_guard #(
    .TCR_MIN(TCR_MIN), .TCR_MAX(TCR_MAX),
    .KEY_MIN(KEY_MIN), .KEY_MAX(KEY_MAX)
  ) u_guard (
    .clk, .por_n, .obs,
    .reset_o    (guard_reset),
    .violation_o(guard_viol)
  );

  casu_ep #(
    .EP_MIN(EP_MIN), .ER_INIT_MIN(ER_INIT_MIN), .ER_INIT_MAX(ER_INIT_MAX)
  ) u_ep (
    .clk, .por_n,
    .mcu_reset,
    .obs,
    .er_min, .er_max,
    .hit_o  (ep_hit),
    .rdata_o(ep_rdata)
  );

  assign mcu_reset = mon_reset || guard_reset;

endmodule
