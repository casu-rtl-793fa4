// casu_hw: the CASU hardware security monitor.
//
// A two-state Mealy FSM that runs beside the MCU core and enforces two rules at
// every clock cycle:
//   Authorized software immutability:
//     [Mod_Mem(ER, EP, SF, IVTR) and PC not in TCR]  -> reset
//   Unauthorized software execution prevention:
//     [PC not in ER and PC not in TCR]               -> reset
// where Mod_Mem(M) = (Wen and Daddr in M) or (DMAen and DMAaddr in M) is true
// when the core or the DMA writes into region M. ER = [er_min, er_max] is not
// fixed: it comes from the EP register, so trusted code can move it after an
// update. TCR, SF, IVTR and the EP words themselves are fixed by parameters.
//
// States (as in the paper's FSM figure): RESET, entered at power-on and after
// any violation, holds reset_o high until the core shows PC = 0 (the value it
// shows while held in reset), then moves to EXEC. EXEC stays put while no rule
// is broken and moves back to RESET on a violation.
//
// Boot fetch: the core still shows PC = 0 in the first cycle(s) after reset is
// released, while it fetches the reset vector. Taken literally, the execution
// rule would flag PC = 0 (it is neither in ER nor in TCR) and the monitor would
// reset the core forever. A one-bit flag, boot_q, is therefore set in RESET and
// cleared by the first EXEC cycle whose PC is not 0; PC = 0 counts as legal
// only while it is set, so PC can never return to 0 without a violation.
//
// Timing: reset_o is high in every RESET cycle, and, being a Mealy output, also
// in the very EXEC cycle in which a violation is seen, so the offending access
// is reset in the same cycle ("the MCU core immediately resets"). The cycle
// after a violation the FSM is in RESET. Leaving RESET takes one cycle with
// PC = 0; reset_o is still high in that cycle and low in the next.
//
// The rules, the two states and the PC = 0 exit condition are the paper's. The
// Mealy violation term on reset_o, the inclusive region bounds, the active-low
// power-on reset and the boot-fetch flag are this design's choices. DMA
// accesses count as writes only when dma_we is set (the paper's Mod_Mem uses DMAen alone; with
// dma_we tied high the two are the same).
module casu_hw
  import casu_pkg::*;
#(
  parameter addr_t TCR_MIN  = TCR_MIN_DEF,
  parameter addr_t TCR_MAX  = TCR_MAX_DEF,
  parameter addr_t EP_MIN   = EP_MIN_DEF,
  parameter addr_t EP_MAX   = EP_MAX_DEF,
  parameter addr_t SF_MIN   = SF_MIN_DEF,
  parameter addr_t SF_MAX   = SF_MAX_DEF,
  parameter addr_t IVTR_MIN = IVTR_MIN_DEF,
  parameter addr_t IVTR_MAX = IVTR_MAX_DEF
) (
  input  logic     clk,
  input  logic     por_n,      // power-on reset, active low
  input  mcu_obs_t obs,        // observed core and DMA signals
  input  addr_t    er_min,     // current ER bounds, from EP
  input  addr_t    er_max,
  output logic     reset_o,    // MCU reset request
  output logic     violation_o // a rule is broken this cycle (state ignored)
);

  mon_state_t state_q, state_d;
  logic       boot_q;   // PC has not left RESET_PC since the FSM left RESET

  logic pc_in_tcr, pc_in_er;
  logic core_wr_prot, dma_wr_prot, mod_mem_prot;
  logic viol_write, viol_exec;

  // Is address a inside one of the protected regions ER, EP, SF, IVTR?
  function automatic logic protected_addr(addr_t a, addr_t emin, addr_t emax);
    return in_region(a, emin, emax)
        || in_region(a, EP_MIN, EP_MAX)
        || in_region(a, SF_MIN, SF_MAX)
        || in_region(a, IVTR_MIN, IVTR_MAX);
  endfunction

  always_comb begin
    pc_in_tcr    = in_region(obs.pc, TCR_MIN, TCR_MAX);
    pc_in_er     = in_region(obs.pc, er_min, er_max);
    core_wr_prot = obs.wen && protected_addr(obs.daddr, er_min, er_max);
    dma_wr_prot  = obs.dma_en && obs.dma_we && protected_addr(obs.dma_addr, er_min, er_max);
    mod_mem_prot = core_wr_prot || dma_wr_prot;
    viol_write   = mod_mem_prot && !pc_in_tcr;   // immutability rule
    viol_exec    = !pc_in_er && !pc_in_tcr       // execution rule
                && !(boot_q && obs.pc == RESET_PC);
    violation_o  = viol_write || viol_exec;
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
      state_q <= ST_RESET;
      boot_q  <= 1'b1;
    end else begin
      state_q <= state_d;
      if (state_q == ST_RESET)      boot_q <= 1'b1;
      else if (obs.pc != RESET_PC)  boot_q <= 1'b0;
    end
  end

  assign reset_o = (state_q == ST_RESET) || violation_o;

  // The two properties of the paper, checked every cycle the MCU is running.
  a_immutability: assert property (@(posedge clk) disable iff (!por_n)
    (viol_write) |-> reset_o);
  a_exec_prevention: assert property (@(posedge clk) disable iff (!por_n)
    (viol_exec) |-> reset_o);
  a_reset_follows: assert property (@(posedge clk) disable iff (!por_n)
    (state_q == ST_EXEC && violation_o) |=> (state_q == ST_RESET));

endmodule
