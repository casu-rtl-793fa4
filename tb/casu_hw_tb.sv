// casu_hw_tb: self-checking testbench for the CASU monitor FSM.
//
// Drives random core and DMA activity, biased so that most cycles are legal
// (execution from ER or TCR, writes to unprotected memory) and a few break one
// of the two rules. A reference model written here from the rules alone, with
// the default memory map typed in as numbers, predicts reset_o every cycle:
// high in RESET, high in the EXEC cycle of a violation, RESET left one cycle
// after PC = 0. Directed cases then check each protected region, the TCR
// exemption, the moving ER and the one-cycle reset latency. Each kind of
// violation must occur at least once.
module casu_hw_tb;
  import casu_pkg::*;

  logic     clk = 1'b0;
  logic     por_n = 1'b0;
  mcu_obs_t obs;
  addr_t    er_min, er_max;
  logic     reset_o, violation_o;

  int checks = 0, failures = 0;
  int n_exec_viol = 0, n_core_wr_viol = 0, n_dma_wr_viol = 0, n_tcr_write_ok = 0;
  int n_reset_exit = 0, n_boot_fetch = 0;

  casu_hw dut (.clk, .por_n, .obs, .er_min, .er_max, .reset_o, .violation_o);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  logic ref_exec;  // 1 = EXEC, 0 = RESET
  logic ref_boot;  // PC = 0 still tolerated (reset-vector fetch)

  function automatic logic in_rng(logic [15:0] a, logic [15:0] lo, logic [15:0] hi);
    return !(a < lo) && !(a > hi);
  endfunction

  function automatic logic is_prot(logic [15:0] a, logic [15:0] lo, logic [15:0] hi);
    return in_rng(a, lo, hi) || in_rng(a, 16'hFFC0, 16'hFFC3)   // ER, EP
        || (a == 16'hFFC8) || (a >= 16'hFFE0);                  // SF, IVTR
  endfunction

  function automatic logic ref_viol(mcu_obs_t o, logic [15:0] lo, logic [15:0] hi);
    logic tcr, er, w;
    tcr = in_rng(o.pc, 16'hA000, 16'hDFFF);
    er  = in_rng(o.pc, lo, hi) || (ref_boot && o.pc == 16'h0000);
    w   = (o.wen && is_prot(o.daddr, lo, hi)) || (o.dma_en && o.dma_we && is_prot(o.dma_addr, lo, hi));
    return (!tcr && !er) || (w && !tcr);
  endfunction

  // ---------------- stimulus ----------------
  function automatic logic [15:0] pick_pc(logic [15:0] lo, logic [15:0] hi);
    int r = $urandom_range(0, 99);
    if (r < 60) return lo + 16'($urandom_range(0, 32'(hi - lo)));
    if (r < 90) return 16'hA000 + 16'($urandom_range(0, 16'h3FFF));
    if (r < 95) return 16'h0000;
    return 16'($urandom);
  endfunction

  function automatic logic [15:0] pick_addr(logic [15:0] lo, logic [15:0] hi);
    int r = $urandom_range(0, 99);
    if (r < 70) return 16'h0200 + 16'($urandom_range(0, 16'h07FF));   // RAM
    if (r < 78) return lo + 16'($urandom_range(0, 32'(hi - lo)));
    if (r < 84) return 16'hFFC0 + 16'($urandom_range(0, 3));
    if (r < 88) return 16'hFFC8;
    if (r < 94) return 16'hFFE0 + 16'($urandom_range(0, 31));
    return 16'($urandom);
  endfunction

  // Is the FSM in EXEC? Between clock edges, present a harmless fetch at
  // A010 and look at reset_o (high in RESET, low in EXEC), then restore.
  task automatic expect_exec(logic want, string what);
    mcu_obs_t keep = obs;
    logic r;
    obs = '0;
    obs.pc = 16'hA010;
    #1;
    r = !reset_o;
    obs = keep;
    #1;
    check(r == want, what);
  endtask

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t: %s (pc=%h wen=%b daddr=%h dma=%b/%h er=[%h,%h] reset=%b)",
               $time, what, obs.pc, obs.wen, obs.daddr, obs.dma_en, obs.dma_addr,
               er_min, er_max, reset_o);
    end
  endtask

  // Apply obs, check reset_o against the model, clock once, advance the model.
  task automatic step(mcu_obs_t o);
    logic v, exp;
    @(negedge clk);
    obs = o;
    #1;
    v   = ref_viol(o, er_min, er_max);
    exp = !ref_exec || v;
    check(reset_o === exp, "reset_o mismatch");
    if (ref_exec && v) begin
      if (!in_rng(o.pc, 16'hA000, 16'hDFFF) && !in_rng(o.pc, er_min, er_max) &&
          !(ref_boot && o.pc == 16'h0000)) n_exec_viol++;
      else if (o.wen && is_prot(o.daddr, er_min, er_max)) n_core_wr_viol++;
      else n_dma_wr_viol++;
    end
    if (ref_exec && !v && in_rng(o.pc, 16'hA000, 16'hDFFF) &&
        ((o.wen && is_prot(o.daddr, er_min, er_max)) || (o.dma_en && o.dma_we && is_prot(o.dma_addr, er_min, er_max))))
      n_tcr_write_ok++;
    @(posedge clk);
    #1;
    if (!ref_exec) ref_boot = 1'b1;
    else if (o.pc != 16'h0000) ref_boot = 1'b0;
    if (ref_exec && o.pc == 16'h0000 && ref_boot && !v) n_boot_fetch++;
    if (!ref_exec && o.pc == 16'h0000) begin ref_exec = 1'b1; n_reset_exit++; end
    else if (ref_exec && v) ref_exec = 1'b0;
  endtask

  function automatic mcu_obs_t quiet(logic [15:0] pc);
    mcu_obs_t o = '0;
    o.pc = pc;
    return o;
  endfunction

  function automatic mcu_obs_t wr(logic [15:0] pc, logic [15:0] a, logic dma);
    mcu_obs_t o = '0;
    o.pc = pc;
    if (dma) begin o.dma_en = 1'b1; o.dma_we = 1'b1; o.dma_addr = a; end
    else begin o.wen = 1'b1; o.daddr = a; end
    return o;
  endfunction

  // Bring the FSM to EXEC: show PC = 0 once, then run from TCR.
  task automatic boot();
    step(quiet(16'h0000));
    step(quiet(16'hA000));
  endtask

  initial begin
    mcu_obs_t o;
    obs      = '0;
    obs.pc   = 16'h1234;
    er_min   = 16'hE000;
    er_max   = 16'hEFFF;
    ref_exec = 1'b0;
    ref_boot = 1'b1;
    repeat (2) @(posedge clk);
    // FSM starts in RESET: reset high while PC != 0.
    #1 check(reset_o === 1'b1, "reset high after power-on");
    @(negedge clk) por_n = 1'b1;
    step(quiet(16'h1234));
    step(quiet(16'hE010));
    expect_exec(1'b0, "stays in RESET until PC = 0");

    // ---- directed ----
    boot();
    check(reset_o === 1'b0, "EXEC: reset low one cycle after PC = 0");
    step(quiet(16'hE100));                  // run in ER
    step(wr(16'hE102, 16'h0300, 1'b0));     // write to RAM: legal
    step(wr(16'hE104, 16'hE200, 1'b0));     // self-modifying code: violation
    expect_exec(1'b0, "ER write -> RESET next cycle");
    boot();
    // each protected region, core and DMA, from ER: violation
    begin
      automatic logic [15:0] targets [5] = '{16'hE000, 16'hFFC0, 16'hFFC2, 16'hFFC8, 16'hFFFE};
      for (int k = 0; k < 5; k++) begin
        for (int d = 0; d < 2; d++) begin
          step(quiet(16'hE020));
          step(wr(16'hE022, targets[k], d[0]));
          expect_exec(1'b0, "protected write resets");
          boot();
          // same write from TCR: allowed
          step(wr(16'hA010, targets[k], d[0]));
          expect_exec(1'b1, "TCR write allowed");
        end
      end
    end
    // PC may sit at 0 right after reset (vector fetch), but never return to 0
    step(quiet(16'h0000));
    expect_exec(1'b0, "PC = 0 after running resets");
    boot();
    step(quiet(16'h0000));
    step(quiet(16'h0000));
    expect_exec(1'b1, "PC = 0 held after reset release tolerated");
    step(quiet(16'hA000));
    step(quiet(16'hE040));
    step(quiet(16'h0000));
    expect_exec(1'b0, "PC back at 0 after boot resets");
    boot();
    // bEP (0xFFC4) is not protected
    step(wr(16'hE030, 16'hFFC4, 1'b0));
    expect_exec(1'b1, "bEP write allowed");
    // execution just outside ER and in the old slot after ER moves
    step(quiet(16'hF000));
    expect_exec(1'b0, "exec outside ER resets");
    boot();
    er_min = 16'hF000; er_max = 16'hF7FF;   // ER moved by an update
    step(quiet(16'hF100));
    expect_exec(1'b1, "exec in new ER allowed");
    step(quiet(16'hE100));
    expect_exec(1'b0, "exec in old ER resets");
    boot();
    // a DMA read of ER is not a modification
    o = quiet(16'hF200); o.dma_en = 1'b1; o.dma_we = 1'b0; o.dma_addr = 16'hF300;
    step(o);
    expect_exec(1'b1, "DMA read allowed");
    er_min = 16'hE000; er_max = 16'hEFFF;
    step(quiet(16'hA000));

    // ---- random ----
    for (int n = 0; n < 20000; n++) begin
      o = '0;
      o.pc = pick_pc(er_min, er_max);
      if ($urandom_range(0, 99) < 30) begin o.wen = 1'b1; o.daddr = pick_addr(er_min, er_max); end
      else if ($urandom_range(0, 99) < 20) begin o.ren = 1'b1; o.daddr = 16'($urandom); end
      if ($urandom_range(0, 99) < 15) begin
        o.dma_en = 1'b1; o.dma_we = 1'($urandom); o.dma_addr = pick_addr(er_min, er_max);
      end
      o.wdata = 16'($urandom); o.dma_wdata = 16'($urandom); o.irq = 1'($urandom);
      if (n % 2000 == 1999) begin
        // move ER now and then, as an install would (only between cycles)
        er_min = 16'hE000 + 16'($urandom_range(0, 7)) * 16'h0200;
        er_max = er_min + 16'h01FF + 16'($urandom_range(0, 3)) * 16'h0200;
      end
      step(o);
    end

    check(n_exec_viol > 0,    "exec violation seen");
    check(n_core_wr_viol > 0, "core write violation seen");
    check(n_dma_wr_viol > 0,  "DMA write violation seen");
    check(n_tcr_write_ok > 0, "legal TCR write seen");
    check(n_reset_exit > 0,   "RESET exit seen");
    check(n_boot_fetch > 0,   "tolerated boot fetch at PC = 0 seen");
    $display("exec_viol=%0d core_wr_viol=%0d dma_wr_viol=%0d tcr_write_ok=%0d reset_exits=%0d",
             n_exec_viol, n_core_wr_viol, n_dma_wr_viol, n_tcr_write_ok, n_reset_exit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
