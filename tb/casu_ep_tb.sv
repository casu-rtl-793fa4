// casu_ep_tb: self-checking testbench for the EP register.
//
// Checks the power-on values (the manufacture-time ER), that core and DMA word
// writes to the two EP addresses land one cycle later, that the core wins a
// same-cycle collision, that writes in a cycle with the MCU reset high are
// dropped, that the MCU reset never clears EP (it models flash), that nearby
// addresses such as bEP do not touch it, and the combinational read port.
// A random phase compares against a reference pair of registers kept here.
module casu_ep_tb;
  import casu_pkg::*;

  logic     clk = 1'b0;
  logic     por_n = 1'b0;
  logic     mcu_reset;
  mcu_obs_t obs;
  addr_t    er_min, er_max;
  logic     hit_o;
  data_t    rdata_o;

  int checks = 0, failures = 0;
  int n_core_wr = 0, n_dma_wr = 0, n_blocked = 0;

  casu_ep dut (.clk, .por_n, .mcu_reset, .obs, .er_min, .er_max, .hit_o, .rdata_o);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] ref_min, ref_max;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t: %s (er=[%h,%h] ref=[%h,%h])", $time, what, er_min, er_max, ref_min, ref_max);
    end
  endtask

  // One cycle of traffic; the reference follows the rules stated above.
  task automatic cyc(mcu_obs_t o, logic rst);
    @(negedge clk);
    obs = o; mcu_reset = rst;
    #1;
    check(hit_o === (o.daddr == 16'hFFC0 || o.daddr == 16'hFFC2), "hit_o");
    if (o.daddr == 16'hFFC0) check(rdata_o === ref_min, "read ERmin");
    if (o.daddr == 16'hFFC2) check(rdata_o === ref_max, "read ERmax");
    @(posedge clk);
    #1;
    if (!rst) begin
      if (o.dma_en && o.dma_we && o.dma_addr == 16'hFFC0) begin ref_min = o.dma_wdata; n_dma_wr++; end
      if (o.dma_en && o.dma_we && o.dma_addr == 16'hFFC2) begin ref_max = o.dma_wdata; n_dma_wr++; end
      if (o.wen && o.daddr == 16'hFFC0) begin ref_min = o.wdata; n_core_wr++; end
      if (o.wen && o.daddr == 16'hFFC2) begin ref_max = o.wdata; n_core_wr++; end
    end else if ((o.wen && (o.daddr == 16'hFFC0 || o.daddr == 16'hFFC2)) ||
                 (o.dma_en && o.dma_we && (o.dma_addr == 16'hFFC0 || o.dma_addr == 16'hFFC2)))
      n_blocked++;
    check(er_min === ref_min && er_max === ref_max, "EP contents");
  endtask

  function automatic mcu_obs_t cw(logic [15:0] a, logic [15:0] d);
    mcu_obs_t o = '0;
    o.wen = 1'b1; o.daddr = a; o.wdata = d;
    return o;
  endfunction

  function automatic mcu_obs_t dw(logic [15:0] a, logic [15:0] d);
    mcu_obs_t o = '0;
    o.dma_en = 1'b1; o.dma_we = 1'b1; o.dma_addr = a; o.dma_wdata = d;
    return o;
  endfunction

  initial begin
    mcu_obs_t o;
    obs = '0; mcu_reset = 1'b0;
    ref_min = 16'hE000; ref_max = 16'hEFFF;
    repeat (2) @(posedge clk);
    #1 check(er_min === 16'hE000 && er_max === 16'hEFFF, "power-on ER");
    @(negedge clk) por_n = 1'b1;

    cyc(cw(16'hFFC0, 16'hF000), 1'b0);
    check(er_min === 16'hF000, "core writes ERmin");
    cyc(cw(16'hFFC2, 16'hF7FF), 1'b0);
    check(er_max === 16'hF7FF, "core writes ERmax");
    cyc(cw(16'hFFC4, 16'h1111), 1'b0);       // bEP
    cyc(cw(16'hFFC1, 16'h2222), 1'b0);       // odd byte address: ignored
    check(er_min === 16'hF000 && er_max === 16'hF7FF, "bEP and odd addresses leave EP alone");
    cyc(cw(16'hFFC0, 16'h3333), 1'b1);       // write while reset: dropped
    check(er_min === 16'hF000, "write during reset dropped");
    repeat (5) cyc('0, 1'b1);                // reset held: EP survives
    check(er_min === 16'hF000 && er_max === 16'hF7FF, "EP survives MCU reset");
    cyc(dw(16'hFFC2, 16'hF1FF), 1'b0);
    check(er_max === 16'hF1FF, "DMA writes ERmax");
    o = cw(16'hFFC0, 16'hE100); o.dma_en = 1'b1; o.dma_we = 1'b1; o.dma_addr = 16'hFFC0; o.dma_wdata = 16'hE200;
    cyc(o, 1'b0);
    check(er_min === 16'hE100, "core wins collision");

    for (int n = 0; n < 5000; n++) begin
      o = '0;
      if ($urandom_range(0, 1) == 1) begin
        o.wen = 1'($urandom_range(0, 1)); o.ren = !o.wen;
        o.daddr = 16'hFFBE + 16'($urandom_range(0, 8)); o.wdata = 16'($urandom);
      end
      if ($urandom_range(0, 2) == 0) begin
        o.dma_en = 1'b1; o.dma_we = 1'($urandom_range(0, 1));
        o.dma_addr = 16'hFFBE + 16'($urandom_range(0, 8)); o.dma_wdata = 16'($urandom);
      end
      cyc(o, $urandom_range(0, 9) == 0);
    end

    // power-on reset restores the manufacture-time ER
    por_n = 1'b0;
    #1 check(er_min === 16'hE000 && er_max === 16'hEFFF, "power-on reset restores ER");

    check(n_core_wr > 0 && n_dma_wr > 0 && n_blocked > 0, "all write kinds seen");
    $display("core_wr=%0d dma_wr=%0d blocked=%0d", n_core_wr, n_dma_wr, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
