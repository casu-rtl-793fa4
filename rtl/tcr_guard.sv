// tcr_guard: protects the execution of the trusted update code in TCR.
//
// The trusted code (ROM region TCR) authenticates an update with the secret
// key and installs it. Its run must be atomic and the key must stay secret, so
// this guard raises the MCU reset when, while the MCU runs:
//   - an interrupt is taken while PC is in TCR;
//   - the DMA is active while PC is in TCR;
//   - the core reads or writes the key region with PC outside TCR, or the DMA
//     touches the key region at all;
//   - PC enters TCR from outside at any address but TCR_MIN, the single legal
//     entry point casu_entry.
//
// It is built like the CASU monitor: a two-state FSM (RESET, EXEC) that leaves
// RESET when the core shows PC = 0 and returns to it on a violation; reset_o is
// high in RESET and, as a Mealy output, in the EXEC cycle of the violation. One
// extra flip-flop remembers whether the previous cycle's PC was in TCR, which
// is how a jump into TCR is told apart from sequential execution inside it.
//
// What follows the paper: the paper states that the update code is guarded
// against interrupts, DMA and key access (properties it inherits from the
// VRASED attestation hardware) and that casu_entry is the only legal entry.
// How those checks are built (the entry detection by the previous PC, the key
// range, counting a key read as a violation only from outside TCR) is this
// design's own. VRASED's further rules, such as a single legal exit point and
// protection of the trusted code's stack, are not given in the paper and are
// not built here.
module tcr_guard
  import casu_pkg::*;
#(
  parameter addr_t TCR_MIN = TCR_MIN_DEF,
  parameter addr_t TCR_MAX = TCR_MAX_DEF,
  parameter addr_t KEY_MIN = KEY_MIN_DEF,
  parameter addr_t KEY_MAX = KEY_MAX_DEF
) (
  input  logic     clk,
  input  logic     por_n,
  input  mcu_obs_t obs,
  output logic     reset_o,
  output logic     violation_o
);

  mon_state_t state_q, state_d;
  logic       prev_in_tcr_q;

  logic pc_in_tcr;
  logic v_irq, v_dma, v_key, v_entry;

  always_comb begin
    pc_in_tcr   = in_region(obs.pc, TCR_MIN, TCR_MAX);
    v_irq       = obs.irq && pc_in_tcr;
    v_dma       = obs.dma_en && pc_in_tcr;
    v_key       = ((obs.wen || obs.ren) && in_region(obs.daddr, KEY_MIN, KEY_MAX) && !pc_in_tcr)
               || (obs.dma_en && in_region(obs.dma_addr, KEY_MIN, KEY_MAX));
    v_entry     = pc_in_tcr && !prev_in_tcr_q && (obs.pc != TCR_MIN);
    violation_o = v_irq || v_dma || v_key || v_entry;
  end

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      ST_RESET: if (obs.pc == RESET_PC) state_d = ST_EXEC;
      ST_EXEC:  if (violation_o)        state_d = ST_RESET;
      default:                          state_d = ST_RESET;
    endcase
  end

  always_ff @(posedge clk or negedge por_n) begin
    if (!por_n) begin
      state_q       <= ST_RESET;
      prev_in_tcr_q <= 1'b0;
    end else begin
      state_q       <= state_d;
      prev_in_tcr_q <= pc_in_tcr;
    end
  end

  assign reset_o = (state_q == ST_RESET) || violation_o;

  a_no_irq_in_tcr: assert property (@(posedge clk) disable iff (!por_n)
    (obs.irq && pc_in_tcr) |-> reset_o);
  a_single_entry: assert property (@(posedge clk) disable iff (!por_n)
    (pc_in_tcr && !prev_in_tcr_q && obs.pc != TCR_MIN) |-> reset_o);

endmodule
