// tcr_guard_tb: self-checking testbench for the TCR guard.
//
// A reference model kept here, with the default map typed in as numbers (TCR
// 0xA000-0xDFFF, key 0x6A00-0x6A3F, casu_entry 0xA000), predicts reset_o every
// cycle. Directed cases cover each rule (interrupt in TCR, DMA in TCR, key
// access from outside TCR, key access by DMA, mid-TCR entry) and the legal
// cases (entry at casu_entry, key read from TCR, interrupts and DMA outside
// TCR). A random phase follows; every rule must fire at least once.
module tcr_guard_tb;
  import casu_pkg::*;

  logic     clk = 1'b0;
  logic     por_n = 1'b0;
  mcu_obs_t obs;
  logic     reset_o, violation_o;

  int checks = 0, failures = 0;
  int n_irq = 0, n_dma = 0, n_key = 0, n_entry = 0, n_legal_entry = 0;

  tcr_guard dut (.clk, .por_n, .obs, .reset_o, .violation_o);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic ref_exec, ref_prev_tcr;

  function automatic logic in_tcr(logic [15:0] a);
    return a >= 16'hA000 && a <= 16'hDFFF;
  endfunction
  function automatic logic in_key(logic [15:0] a);
    return a[15:6] == 10'(16'h6A00 >> 6);
  endfunction

  // Is the FSM in EXEC? Between clock edges, present a harmless fetch at
  // E100 and look at reset_o (high in RESET, low in EXEC), then restore.
  task automatic expect_exec(logic want, string what);
    mcu_obs_t keep = obs;
    logic r;
    obs = '0;
    obs.pc = 16'hE100;
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
      $display("FAIL @%0t: %s (pc=%h irq=%b dma=%b/%h daddr=%h reset=%b)", $time, what,
               obs.pc, obs.irq, obs.dma_en, obs.dma_addr, obs.daddr, reset_o);
    end
  endtask

  task automatic step(mcu_obs_t o);
    logic t, vi, vd, vk, ve, v;
    @(negedge clk);
    obs = o;
    #1;
    t  = in_tcr(o.pc);
    vi = o.irq && t;
    vd = o.dma_en && t;
    vk = ((o.wen || o.ren) && in_key(o.daddr) && !t) || (o.dma_en && in_key(o.dma_addr));
    ve = t && !ref_prev_tcr && o.pc != 16'hA000;
    v  = vi || vd || vk || ve;
    check(reset_o === (!ref_exec || v), "reset_o mismatch");
    if (ref_exec) begin
      if (vi) n_irq++;
      if (vd) n_dma++;
      if (vk) n_key++;
      if (ve) n_entry++;
      if (t && !ref_prev_tcr && !ve) n_legal_entry++;
    end
    @(posedge clk);
    #1;
    if (!ref_exec && o.pc == 16'h0000) ref_exec = 1'b1;
    else if (ref_exec && v) ref_exec = 1'b0;
    ref_prev_tcr = t;
  endtask

  function automatic mcu_obs_t at(logic [15:0] pc);
    mcu_obs_t o = '0;
    o.pc = pc;
    return o;
  endfunction

  task automatic boot();
    step(at(16'h0000));
    step(at(16'hA000));
    step(at(16'hA002));
    step(at(16'hE000));   // casu_exit to ER
  endtask

  initial begin
    mcu_obs_t o;
    obs = '0; obs.pc = 16'h1234; ref_exec = 1'b0; ref_prev_tcr = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) por_n = 1'b1;
    boot();
    expect_exec(1'b1, "running after boot");
    // legal call into casu_entry, key read from TCR
    step(at(16'hE010));
    step(at(16'hA000));
    o = at(16'hA004); o.ren = 1'b1; o.daddr = 16'h6A10; step(o);
    expect_exec(1'b1, "key read from TCR allowed");
    step(at(16'hE020));
    // interrupt and DMA outside TCR are fine
    o = at(16'hE022); o.irq = 1'b1; o.dma_en = 1'b1; o.dma_addr = 16'h0300; step(o);
    expect_exec(1'b1, "irq/DMA outside TCR allowed");
    // mid-TCR entry
    step(at(16'hA100));
    expect_exec(1'b0, "entry past casu_entry resets");
    boot();
    // interrupt inside TCR
    step(at(16'hA000)); o = at(16'hA002); o.irq = 1'b1; step(o);
    expect_exec(1'b0, "irq in TCR resets");
    boot();
    // DMA inside TCR
    step(at(16'hA000)); o = at(16'hA002); o.dma_en = 1'b1; o.dma_addr = 16'h0200; step(o);
    expect_exec(1'b0, "DMA in TCR resets");
    boot();
    // key read from ER
    o = at(16'hE030); o.ren = 1'b1; o.daddr = 16'h6A3F; step(o);
    expect_exec(1'b0, "key read from ER resets");
    boot();
    // key read by DMA
    o = at(16'hE030); o.dma_en = 1'b1; o.dma_addr = 16'h6A00; step(o);
    expect_exec(1'b0, "key read by DMA resets");
    boot();
    // just outside the key region
    o = at(16'hE030); o.ren = 1'b1; o.daddr = 16'h6A40; step(o);
    expect_exec(1'b1, "address after key allowed");

    for (int n = 0; n < 20000; n++) begin
      int r;
      r = $urandom_range(0, 99);
      o = '0;
      if (r < 45)      o.pc = 16'hE000 + 16'($urandom_range(0, 16'h0FFF));
      else if (r < 85) o.pc = ref_prev_tcr ? 16'hA000 + 16'($urandom_range(0, 16'h3FFF)) : 16'hA000;
      else if (r < 90) o.pc = 16'h0000;
      else             o.pc = 16'hA000 + 16'($urandom_range(0, 16'h3FFF));
      if ($urandom_range(0, 99) < 30) begin
        o.ren = 1'b1;
        o.daddr = ($urandom_range(0, 3) == 0) ? 16'h69F0 + 16'($urandom_range(0, 96)) : 16'($urandom);
      end
      o.irq = ($urandom_range(0, 99) < 3);
      if ($urandom_range(0, 99) < 3) begin
        o.dma_en = 1'b1;
        o.dma_addr = ($urandom_range(0, 3) == 0) ? 16'h69F0 + 16'($urandom_range(0, 96)) : 16'($urandom);
      end
      step(o);
    end

    check(n_irq > 0,   "irq-in-TCR violation seen");
    check(n_dma > 0,   "DMA-in-TCR violation seen");
    check(n_key > 0,   "key violation seen");
    check(n_entry > 0, "bad entry violation seen");
    check(n_legal_entry > 0, "legal entry seen");
    $display("irq=%0d dma=%0d key=%0d entry=%0d legal_entry=%0d", n_irq, n_dma, n_key, n_entry, n_legal_entry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
