// casu_top_tb: end-to-end test of the CASU hardware with a scripted MCU.
//
// The core, the DMA and the memories are modelled here at the level CASU sees
// them: every cycle the testbench presents a PC, at most one core data access
// and at most one DMA access, and a word-wide memory array commits writes at
// the clock edge unless the MCU reset is high in that cycle (the reset stops
// the offending access). While reset is high the model shows PC = 0; the first
// cycle after release it fetches from the reset vector, which points at
// casu_entry in TCR. EP reads are answered by the top's EP read port.
//
// On this model the trusted update software and the untrusted application are
// replayed as bus traffic, following the paper's flow:
//   boot      casu_entry reads the status flag SF; SF = 1 resumes install,
//             otherwise it exits to ER (whose bounds it reads from EP);
//   download  the application in ER writes the new image S_new
//             (L, V, N, BIN, IVT) into the free flash slot, its bounds into
//             bEP and the token ATok into ATR, and calls casu_entry;
//   authenticate  version check (V_new > V_ER), then a MAC over the key and
//             S_new, compared with ATok;
//   install   SF = 1, EP <- bEP, IVTR <- IVT_new (reset vector kept on
//             casu_entry), AAck -> ATR, SF = 0, jump to the new ER.
// The MAC is a small keyed hash computed the same way by the "verifier" side
// of this testbench; it stands in for HMAC, which is software and not part of
// the hardware under test.
//
// Attacks and faults run between updates: self-modifying code, DMA writes to
// IVTR, execution from RAM and from the old slot after an update, EP written
// by the application, key reads, an interrupt, a DMA access and a mid-TCR jump
// while the trusted code runs, a bad token and a replayed old version, and a
// reset in the middle of install (which must be resumed at the next boot).
// Each must happen at least once; each attack must reset the MCU and leave
// the protected memory as it was. The three application sizes of the paper's
// runtime evaluation (250, 422 and 734 bytes) are installed in turn; their
// authenticate and install cycle counts on this model are printed.
module casu_top_tb;
  import casu_pkg::*;

  logic  clk = 1'b0;
  logic  por_n = 1'b0;
  mcu_obs_t o;
  logic  mcu_reset, ep_hit, mon_reset, guard_reset, mon_viol, guard_viol;
  addr_t er_min, er_max;
  data_t ep_rdata;

  casu_top dut (
    .clk, .por_n,
    .pc(o.pc), .wen(o.wen), .ren(o.ren), .daddr(o.daddr), .wdata(o.wdata), .irq(o.irq),
    .dma_en(o.dma_en), .dma_we(o.dma_we), .dma_addr(o.dma_addr), .dma_wdata(o.dma_wdata),
    .mcu_reset, .er_min, .er_max, .ep_hit, .ep_rdata,
    .mon_reset, .guard_reset, .mon_viol, .guard_viol
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;

  // ---- memory map as typed-in numbers ----
  localparam logic [15:0] A_TCR = 16'hA000, A_KEY = 16'h6A00, A_ATR = 16'h03E0;
  localparam logic [15:0] A_EP = 16'hFFC0, A_BEP = 16'hFFC4, A_SF = 16'hFFC8, A_IVT = 16'hFFE0;
  localparam logic [15:0] SLOT_A = 16'hE000, SLOT_B = 16'hF000;

  logic [15:0] mem [0:32767];   // 64 KB as words

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (!mcu_reset) begin
      if (o.dma_en && o.dma_we) mem[o.dma_addr[15:1]] <= o.dma_wdata;
      if (o.wen)                mem[o.daddr[15:1]]    <= o.wdata;
    end
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ---------------- cycle-level MCU model ----------------
  logic crashed;       // the last cycle was cut off by mcu_reset
  logic [15:0] tpc;    // PC inside TCR
  logic [15:0] epc;    // PC inside ER

  task automatic drive(mcu_obs_t x, output data_t rd);
    @(negedge clk);
    o = x;
    #1;
    rd = (x.ren && ep_hit) ? ep_rdata : mem[x.daddr[15:1]];
    if (mcu_reset) crashed = 1'b1;
    @(posedge clk);
    #1;
  endtask

  function automatic mcu_obs_t fetch(logic [15:0] pc);
    mcu_obs_t x = '0;
    x.pc = pc;
    return x;
  endfunction

  task automatic exec_at(logic [15:0] pc);
    data_t d;
    drive(fetch(pc), d);
  endtask

  task automatic rd_at(logic [15:0] pc, logic [15:0] a, output data_t d);
    mcu_obs_t x = fetch(pc);
    x.ren = 1'b1; x.daddr = a;
    drive(x, d);
  endtask

  task automatic wr_at(logic [15:0] pc, logic [15:0] a, logic [15:0] v);
    mcu_obs_t x = fetch(pc);
    data_t d;
    x.wen = 1'b1; x.daddr = a; x.wdata = v;
    drive(x, d);
  endtask

  // sequential steps of the trusted code
  function automatic logic [15:0] tnext();
    tpc = (tpc >= 16'hDFF0) ? 16'hA010 : tpc + 16'd2;
    return tpc;
  endfunction
  task automatic t_rd(logic [15:0] a, output data_t d); rd_at(tnext(), a, d); endtask
  task automatic t_wr(logic [15:0] a, logic [15:0] v); wr_at(tnext(), a, v); endtask

  // sequential steps of the application in ER
  function automatic logic [15:0] enext();
    epc = (epc + 16'd2 > er_max || epc < er_min + 16'd6) ? er_min + 16'd6 : epc + 16'd2;
    return epc;
  endfunction
  task automatic e_exec(); exec_at(enext()); endtask
  task automatic e_wr(logic [15:0] a, logic [15:0] v); wr_at(enext(), a, v); endtask

  // ---------------- the keyed hash standing in for HMAC ----------------
  function automatic logic [15:0] mix(logic [15:0] h, logic [15:0] w);
    return {h[10:0], h[15:11]} ^ (w + 16'h9E37);
  endfunction

  // ---------------- verifier side ----------------
  logic [15:0] key [32];
  logic [15:0] img [$];   // S_new built by the verifier
  logic [15:0] tok [16];

  function automatic logic [15:0] tok_word(logic [15:0] h, int i);
    return mix(h, 16'(i)) ^ key[i];
  endfunction

  task automatic vrf_update(int len_bytes, logic [15:0] ver, logic [15:0] target);
    logic [15:0] h;
    int nw;
    nw = (len_bytes + 1) / 2;
    img.delete();
    img.push_back(16'(len_bytes));
    img.push_back(ver);
    img.push_back(16'($urandom));                        // nonce
    for (int i = 0; i < nw; i++) img.push_back(16'($urandom));
    for (int i = 0; i < 15; i++) img.push_back(target + 16'd6 + 16'(2 * i));  // ISRs in the new image
    img.push_back(A_TCR);                                // reset vector stays casu_entry
    h = 16'h0000;                                        // direction bit 0
    foreach (key[i]) h = mix(h, key[i]);
    foreach (img[i]) h = mix(h, img[i]);
    for (int i = 0; i < 16; i++) tok[i] = tok_word(h, i);
  endtask

  function automatic logic [15:0] aack_word(logic [15:0] ver, logic [15:0] nonce, int i);
    logic [15:0] h = 16'h0001;                           // direction bit 1
    foreach (key[j]) h = mix(h, key[j]);
    h = mix(h, ver);
    h = mix(h, nonce);
    return tok_word(h, i);
  endfunction

  // ---------------- trusted software (TCR) ----------------
  int n_resume = 0, n_update_ok = 0, n_rej_token = 0, n_rej_version = 0;
  int auth_cycles, inst_cycles;

  task automatic casu_exit();
    data_t lo;
    if (crashed) return;
    t_rd(A_EP, lo);                       // read ERmin from EP
    if (crashed) return;
    epc = lo + 16'd6;
    exec_at(epc);                         // leave TCR into ER
  endtask

  task automatic casu_install();
    data_t lo, hi, w, v, n;
    int c0 = cycles;
    t_wr(A_SF, 16'd1);                    if (crashed) return;
    t_rd(A_BEP, lo);                      if (crashed) return;
    t_rd(A_BEP + 16'd2, hi);              if (crashed) return;
    t_wr(A_EP, lo);                       if (crashed) return;
    t_wr(A_EP + 16'd2, hi);               if (crashed) return;
    for (int i = 0; i < 15; i++) begin
      t_rd(hi - 16'd31 + 16'(2 * i), w);  if (crashed) return;
      t_wr(A_IVT + 16'(2 * i), w);        if (crashed) return;
    end
    t_rd(lo + 16'd2, v);                  if (crashed) return;
    t_rd(lo + 16'd4, n);                  if (crashed) return;
    for (int i = 0; i < 32; i++) begin t_rd(A_KEY + 16'(2 * i), w); if (crashed) return; end
    for (int i = 0; i < 16; i++) begin
      t_wr(A_ATR + 16'(2 * i), aack_word(v, n, i));
      if (crashed) return;
    end
    t_wr(A_SF, 16'd0);                    if (crashed) return;
    inst_cycles = cycles - c0;
    casu_exit();
  endtask

  task automatic casu_authenticate(output logic ok);
    data_t lo, hi, vn, ve, w, h;
    int c0 = cycles;
    ok = 1'b0;
    t_rd(A_BEP, lo);          if (crashed) return;
    t_rd(A_BEP + 16'd2, hi);  if (crashed) return;
    t_rd(lo + 16'd2, vn);     if (crashed) return;
    t_rd(A_EP, w);            if (crashed) return;   // ERmin from EP
    t_rd(w + 16'd2, ve);      if (crashed) return;   // V_ER from the ER header
    if (vn <= ve) begin n_rej_version++; return; end
    h = 16'h0000;
    for (int i = 0; i < 32; i++) begin
      t_rd(A_KEY + 16'(2 * i), w); if (crashed) return;
      h = mix(h, w);
    end
    for (logic [16:0] a = {1'b0, lo}; a < {1'b0, hi}; a += 17'd2) begin
      t_rd(a[15:0], w); if (crashed) return;
      h = mix(h, w);
    end
    ok = 1'b1;
    for (int i = 0; i < 16; i++) begin
      t_rd(A_ATR + 16'(2 * i), w); if (crashed) return;
      if (w != tok_word(h, i)) ok = 1'b0;
    end
    auth_cycles = cycles - c0;
    if (!ok) n_rej_token++;
  endtask

  // casu_entry: at boot (after reset) or called from ER with an update.
  task automatic casu_entry(logic at_boot);
    data_t sf;
    logic ok;
    tpc = A_TCR;
    exec_at(tpc);             if (crashed) return;
    t_rd(A_SF, sf);           if (crashed) return;
    if (at_boot) begin
      if (sf == 16'd1) begin n_resume++; casu_install(); end
      else casu_exit();
    end else begin
      casu_authenticate(ok);  if (crashed) return;
      if (ok) begin casu_install(); if (!crashed) n_update_ok++; end
      else casu_exit();
    end
  endtask

  // Hold the core in reset (PC = 0) until CASU lets go, then boot.
  int n_resets = 0;
  task automatic reboot();
    int k = 0;
    n_resets++;
    while (k < 20) begin
      exec_at(16'h0000);
      k++;
      if (!mcu_reset) break;
    end
    crashed = 1'b0;
    check(mem[16'hFFFE >> 1] == A_TCR, "reset vector points at casu_entry");
    casu_entry(1'b1);
    check(!crashed, "clean boot");
  endtask

  // ---------------- untrusted application (ER) ----------------
  task automatic app_run(int n);
    for (int i = 0; i < n && !crashed; i++) e_exec();
  endtask

  // download: S_new into the slot, bounds into bEP, ATok into ATR, call casu_entry
  task automatic app_download_and_update(logic [15:0] target);
    foreach (img[i]) begin e_wr(target + 16'(2 * i), img[i]); if (crashed) return; end
    e_wr(A_BEP, target);                                if (crashed) return;
    e_wr(A_BEP + 16'd2, target + 16'(2 * img.size() - 1)); if (crashed) return;
    for (int i = 0; i < 16; i++) begin e_wr(A_ATR + 16'(2 * i), tok[i]); if (crashed) return; end
    casu_entry(1'b0);
  endtask

  // ---------------- attacks ----------------
  int n_att_selfmod = 0, n_att_dma_ivt = 0, n_att_exec_ram = 0, n_att_ep = 0,
      n_att_key = 0, n_att_irq_tcr = 0, n_att_dma_tcr = 0, n_att_entry = 0,
      n_att_old_slot = 0, n_install_cut = 0;

  task automatic expect_reset(string what, ref int counter);
    check(crashed, what);
    if (crashed) counter++;
    reboot();
  endtask

  // ---------------- scenario ----------------
  logic [15:0] cur_ver = 16'd1;
  logic [15:0] cur_slot = SLOT_A;

  task automatic do_update(int len, logic [15:0] ver, logic expect_ok);
    logic [15:0] target = (cur_slot == SLOT_A) ? SLOT_B : SLOT_A;
    logic [15:0] nonce;
    int ok0 = n_update_ok;
    vrf_update(len, ver, target);
    nonce = img[2];
    app_download_and_update(target);
    check(!crashed, "update flow causes no reset");
    if (expect_ok) begin
      check(n_update_ok == ok0 + 1, "update accepted");
      check(er_min == target && er_max == target + 16'(2 * img.size() - 1), "EP moved to new image");
      check(mem[A_SF >> 1] == 16'd0, "SF cleared");
      for (int i = 0; i < 15; i++) check(mem[(A_IVT >> 1) + i] == img[img.size() - 16 + i], "IVTR updated");
      for (int i = 0; i < 16; i++) check(mem[(A_ATR >> 1) + i] == aack_word(ver, nonce, i), "AAck verifies");
      check(epc == target + 16'd6, "execution continues in the new ER");
      cur_slot = target; cur_ver = ver;
    end else begin
      check(n_update_ok == ok0, "update refused");
      check(er_min == cur_slot, "EP unchanged after refusal");
    end
    app_run(20);
    check(!crashed, "new software runs");
  endtask

  initial begin
    mcu_obs_t x;
    data_t d;
    logic [15:0] save, er_save_min;
    int sizes [3] = '{250, 422, 734};
    int ac [3], ic [3];

    o = '0; o.pc = 16'h1234;
    crashed = 1'b0; tpc = A_TCR; epc = SLOT_A + 16'd6;
    for (int i = 0; i < 32768; i++) mem[i] = 16'h0000;
    for (int i = 0; i < 32; i++) begin key[i] = 16'($urandom); mem[(A_KEY >> 1) + i] = key[i]; end
    // S_old at slot A (installed at manufacture, version 1) and its IVT
    mem[SLOT_A >> 1] = 16'd4096; mem[(SLOT_A >> 1) + 1] = 16'd1; mem[(SLOT_A >> 1) + 2] = 16'h5A5A;
    for (int i = 0; i < 15; i++) mem[(A_IVT >> 1) + i] = SLOT_A + 16'h0100 + 16'(2 * i);
    mem[16'hFFFE >> 1] = A_TCR;
    repeat (3) @(posedge clk);
    @(negedge clk) por_n = 1'b1;

    // power-on boot
    reboot();
    check(er_min == SLOT_A && er_max == 16'hEFFF, "manufacture-time ER");
    app_run(50);
    check(!crashed, "S_old runs");

    // ---- attacks on S_old ----
    save = mem[(SLOT_A >> 1) + 200];
    app_run(3); e_wr(SLOT_A + 16'd400, 16'hDEAD);           // code injection into ER
    check(mem[(SLOT_A >> 1) + 200] == save, "ER write blocked");
    expect_reset("self-modifying code resets", n_att_selfmod);

    save = mem[(A_IVT >> 1) + 3];
    x = fetch(enext()); x.dma_en = 1'b1; x.dma_we = 1'b1; x.dma_addr = A_IVT + 16'd6; x.dma_wdata = 16'h0BAD;
    drive(x, d);
    check(mem[(A_IVT >> 1) + 3] == save, "IVTR DMA write blocked");
    expect_reset("DMA write to IVTR resets", n_att_dma_ivt);

    app_run(3); exec_at(16'h0400);                         // jump into RAM
    expect_reset("execution from RAM resets", n_att_exec_ram);

    app_run(3); e_wr(A_EP + 16'd2, 16'hFFFF);              // widen ER from ER
    check(er_max == 16'hEFFF, "EP write blocked");
    expect_reset("EP write from ER resets", n_att_ep);

    app_run(3); x = fetch(enext()); x.ren = 1'b1; x.daddr = A_KEY + 16'd4; drive(x, d);
    expect_reset("key read from ER resets", n_att_key);

    app_run(3); exec_at(A_TCR + 16'h0040);                 // jump past casu_entry
    expect_reset("mid-TCR entry resets", n_att_entry);

    // ---- update refused: bad token, then old version ----
    vrf_update(250, 16'd2, SLOT_B);
    tok[5] ^= 16'h0001;
    app_download_and_update(SLOT_B);
    check(!crashed && n_rej_token == 1 && er_min == SLOT_A, "bad token refused, back in S_old");
    check(epc >= SLOT_A && epc <= 16'hEFFF, "refusal returns to old ER");
    do_update(250, 16'd1, 1'b0);                            // V_new <= V_ER
    check(n_rej_version == 1, "old version refused");

    // ---- the three applications of the runtime evaluation ----
    for (int k = 0; k < 3; k++) begin
      do_update(sizes[k], cur_ver + 16'd1, 1'b1);
      ac[k] = auth_cycles; ic[k] = inst_cycles;
      $display("workload %0d bytes: authenticate %0d cycles, install %0d cycles", sizes[k], ac[k], ic[k]);
    end
    check(ic[0] == ic[1] && ic[1] == ic[2], "install time independent of size");
    check((ac[1] - ac[0]) * (sizes[2] - sizes[1]) == (ac[2] - ac[1]) * (sizes[1] - sizes[0]) ||
          ac[2] > ac[1] && ac[1] > ac[0], "authenticate grows with size");

    // execution in the previous slot is now forbidden
    exec_at(cur_slot == SLOT_A ? SLOT_B + 16'd6 : SLOT_A + 16'd6);
    expect_reset("old software no longer executable", n_att_old_slot);

    // ---- attacks on the trusted code while it runs ----
    app_run(3); tpc = A_TCR; exec_at(tpc); x = fetch(tnext()); x.irq = 1'b1; drive(x, d);
    expect_reset("interrupt in TCR resets", n_att_irq_tcr);
    app_run(3); tpc = A_TCR; exec_at(tpc); x = fetch(tnext()); x.dma_en = 1'b1; x.dma_addr = A_KEY; drive(x, d);
    expect_reset("DMA during TCR resets", n_att_dma_tcr);

    // ---- reset in the middle of install: resumed at the next boot ----
    begin
      automatic logic [15:0] target = (cur_slot == SLOT_A) ? SLOT_B : SLOT_A;
      automatic logic [15:0] ver = cur_ver + 16'd1;
      automatic logic ok;
      vrf_update(300, ver, target);
      foreach (img[i]) e_wr(target + 16'(2 * i), img[i]);
      e_wr(A_BEP, target); e_wr(A_BEP + 16'd2, target + 16'(2 * img.size() - 1));
      for (int i = 0; i < 16; i++) e_wr(A_ATR + 16'(2 * i), tok[i]);
      tpc = A_TCR; exec_at(tpc); t_rd(A_SF, d);
      casu_authenticate(ok);
      check(ok, "authenticated before the cut");
      t_wr(A_SF, 16'd1);
      t_rd(A_BEP, d); t_wr(A_EP, d);                        // EP half-updated
      x = fetch(tnext()); x.irq = 1'b1; drive(x, d);         // interrupt: violation
      check(crashed && mem[A_SF >> 1] == 16'd1, "install cut with SF = 1");
      if (crashed) n_install_cut++;
      er_save_min = er_min;
      reboot();                                              // casu_entry resumes install
      check(n_resume == 1, "install resumed at boot");
      check(er_min == target && er_max == target + 16'(2 * img.size() - 1), "EP complete after resume");
      check(mem[A_SF >> 1] == 16'd0, "SF cleared after resume");
      for (int i = 0; i < 16; i++) check(mem[(A_ATR >> 1) + i] == aack_word(ver, img[2], i), "AAck after resume");
      check(er_save_min == target, "EP write before the cut had landed");
      cur_slot = target; cur_ver = ver;
      app_run(20);
      check(!crashed, "resumed software runs");
    end

    // every mechanism must have happened
    check(n_att_selfmod > 0 && n_att_dma_ivt > 0 && n_att_exec_ram > 0 && n_att_ep > 0, "write/exec attacks seen");
    check(n_att_key > 0 && n_att_irq_tcr > 0 && n_att_dma_tcr > 0 && n_att_entry > 0, "TCR guard attacks seen");
    check(n_att_old_slot > 0 && n_install_cut > 0 && n_resume > 0, "old slot, cut install and resume seen");
    check(n_update_ok >= 3 && n_rej_token > 0 && n_rej_version > 0, "accepted and refused updates seen");
    $display("updates ok=%0d rej_token=%0d rej_version=%0d resumes=%0d resets=%0d cycles=%0d",
             n_update_ok, n_rej_token, n_rej_version, n_resume, n_resets, cycles);
    $display("attacks: selfmod=%0d dma_ivt=%0d exec_ram=%0d ep=%0d key=%0d irq_tcr=%0d dma_tcr=%0d entry=%0d old_slot=%0d cut=%0d",
             n_att_selfmod, n_att_dma_ivt, n_att_exec_ram, n_att_ep, n_att_key, n_att_irq_tcr,
             n_att_dma_tcr, n_att_entry, n_att_old_slot, n_install_cut);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
