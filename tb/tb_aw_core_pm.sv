// tb_aw_core_pm: end-to-end testbench of the AgileWatts core idle-state
// subsystem at its default parameters (five zones of 256 SRPG words, 256
// ungated words, 2 KB microcode patch SRAM, 500 MHz PMA clock, 2.2 GHz core
// clock).
//
// A small cache model answers forwarded snoops two PMA cycles after taking
// them. The test fills all context storage with a pattern, then runs:
// C6A entry (8 PMA cycles), snoops served in C6A, exit by interrupt with
// the staggered zone wake-up, full context check; C6AE entry with the Pn
// request, a burst of snoops that overflows the detector queue, an interrupt
// arriving while snoops are served, and a second context check. It counts
// each mechanism and fails if one never happened. Timing checks: entry 8
// cycles, snoop wake 2 cycles, exit under 100 ns, zones released 14 ns apart.
`timescale 1ns/1ps
module tb_aw_core_pm;
  import aw_pkg::*;

  logic pma_clk = 0, core_clk = 0, rst_n = 0;
  logic mwait_req = 0, irq = 0;
  cstate_e mwait_target = CS_C6A;
  logic snp_valid = 0, snp_ready;
  logic [47:0] snp_payload = '0;
  logic l1l2_clk, l1l2_sleep;
  logic [2:0] slp_setting_cfg = 3'd5, l1l2_slp_setting;
  logic fwd_valid, fwd_ready = 1, snp_done;
  logic [47:0] fwd_payload;
  logic ufpg_clk;
  logic [2:0] ctx_sel = '0;
  logic ctx_we = 0, ctx_re = 0;
  logic [8:0] ctx_addr = '0;
  logic [31:0] ctx_wdata = '0, ctx_rdata;
  logic dvfs_pn_req;
  cstate_e cstate;
  pm_state_e pm_state;
  logic [NUM_ZONES-1:0] slp_zone, zone_pwr_good;
  logic srpg_ret, iso_en;

  aw_core_pm dut (.*);

  always #1 pma_clk = ~pma_clk;        // 500 MHz
  always #0.227 core_clk = ~core_clk;  // 2.2 GHz

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---- cache model: answers each forwarded snoop 2 cycles later ----
  int snoops_served = 0, fwd_asleep = 0;
  logic [2:0] done_pipe = '0;
  always @(posedge pma_clk) begin
    done_pipe <= {done_pipe[1:0], fwd_valid && fwd_ready};
    if (fwd_valid && fwd_ready) snoops_served++;
    if (fwd_valid && l1l2_sleep) fwd_asleep++;
  end
  assign snp_done = done_pipe[2];

  // ---- mechanism counters ----
  int n_c6a = 0, n_c6ae = 0, n_snoop_wake = 0, n_exit = 0, n_pn_req = 0;
  int n_backpressure = 0, n_irq_in_snoop = 0, n_stagger = 0;
  pm_state_e prev_state = PM_C0;
  logic [NUM_ZONES-1:0] prev_slp = '0;
  always @(posedge pma_clk) begin
    prev_state <= pm_state;
    prev_slp   <= slp_zone;
    if (pm_state == PM_IDLE && prev_state == PM_E3_CG) begin
      if (cstate == CS_C6AE) n_c6ae++; else n_c6a++;
    end
    if (pm_state == PM_SA_CG && prev_state == PM_IDLE) n_snoop_wake++;
    if (pm_state == PM_X5_PWRUP && prev_state == PM_SB_SNOOP) n_irq_in_snoop++;
    if (pm_state == PM_C0 && prev_state == PM_X6_CG) n_exit++;
    if (dvfs_pn_req && pm_state == PM_E1_CG2) n_pn_req++;
    if (snp_valid && !snp_ready) n_backpressure++;
    if ((prev_slp & ~slp_zone) != '0 && $countones(slp_zone) < NUM_ZONES - 1) n_stagger++;
  end

  // ---- context access on the UFPG clock ----
  function automatic logic [31:0] pat(input int sel, input int a, input int seed);
    return (32'(sel) << 28) ^ (32'(a) * 32'h0001_0DCB) ^ 32'(seed);
  endfunction
  function automatic int words(input int sel);
    return sel == NUM_ZONES + 1 ? 512 : 256;
  endfunction

  task automatic ctx_write(input int sel, input int a, input logic [31:0] v);
    @(negedge core_clk);
    ctx_sel = 3'(sel); ctx_addr = 9'(a); ctx_wdata = v; ctx_we = 1;
    @(posedge ufpg_clk); #0.01;
    ctx_we = 0;
  endtask

  task automatic ctx_read(input int sel, input int a, output logic [31:0] v);
    @(negedge core_clk);
    ctx_sel = 3'(sel); ctx_addr = 9'(a); ctx_re = 1;
    @(posedge ufpg_clk); #0.01;
    ctx_re = 0;
    v = ctx_rdata;
  endtask

  task automatic fill(input int seed);
    for (int s = 0; s <= NUM_ZONES + 1; s++)
      for (int a = 0; a < words(s); a++) ctx_write(s, a, pat(s, a, seed));
  endtask

  task automatic verify(input int seed, input string when);
    int bad = 0;
    logic [31:0] v;
    for (int s = 0; s <= NUM_ZONES + 1; s++)
      for (int a = 0; a < words(s); a++) begin
        ctx_read(s, a, v);
        if (v != pat(s, a, seed)) bad++;
      end
    check(bad == 0, $sformatf("%s: all 8 KB of context intact (%0d bad words)", when, bad));
  endtask

  task automatic send_snoop(input logic [47:0] p);
    @(negedge pma_clk);
    snp_valid = 1; snp_payload = p;
    @(posedge pma_clk);
    while (!snp_ready) @(posedge pma_clk);
    #0.01 snp_valid = 0;
  endtask

  int n, n_rel;
  realtime t0, t1, rel_t [NUM_ZONES];

  for (genvar z = 0; z < NUM_ZONES; z++) begin : g_rel
    always @(negedge slp_zone[z]) rel_t[z] = $realtime;
  end

  initial begin
    repeat (4) @(negedge pma_clk);
    rst_n = 1;
    repeat (20) @(negedge pma_clk);
    check(pm_state == PM_C0 && cstate == CS_C0, "reset into C0");
    fill(1);
    verify(1, "before idle");

    // ---- C6A entry ----
    @(negedge pma_clk); mwait_target = CS_C6A; mwait_req = 1;
    n = 0;
    while (pm_state != PM_IDLE && n < 100) begin @(posedge pma_clk); #0.01; n++; mwait_req = 0; end
    check(n == 8, $sformatf("C6A entry in 8 PMA cycles = 16 ns (got %0d)", n));
    check(!dvfs_pn_req, "no Pn request for C6A");
    repeat (20) @(negedge pma_clk);
    check(zone_pwr_good == '0, "all zone supplies off in C6A");
    check(srpg_ret && iso_en && l1l2_sleep && l1l2_slp_setting == 3'd5, "Ret, isolation, cache sleep at the programmed level");

    // clocks stopped in C6A
    n = 0;
    fork
      begin repeat (40) @(posedge core_clk); end
      begin forever begin @(posedge ufpg_clk or posedge l1l2_clk); n++; end end
    join_any
    disable fork;
    check(n == 0, "UFPG and L1/L2 clocks stopped in C6A");

    // ---- snoops while in C6A ----
    send_snoop(48'h1000);
    n = 0;
    while (pm_state != PM_SB_SNOOP && n < 50) begin @(posedge pma_clk); #0.01; n++; end
    check(n <= 4, $sformatf("caches awake 2 cycles after the snoop is detected (%0d cycles)", n));
    send_snoop(48'h1040);
    n = 0;
    while (pm_state != PM_IDLE && n < 50) begin @(posedge pma_clk); #0.01; n++; end
    check(pm_state == PM_IDLE && l1l2_sleep, "back to sleep after the snoops");
    check(snoops_served == 2, $sformatf("both snoops served (%0d)", snoops_served));
    check(zone_pwr_good == '0, "zones stay off during snoop service");

    // ---- exit by interrupt ----
    @(negedge pma_clk); irq = 1; t0 = $realtime;
    while (pm_state != PM_C0) @(posedge pma_clk);
    t1 = $realtime;
    irq = 0;
    check(t1 - t0 < 100.0, $sformatf("exit latency under 100 ns (got %0.1f ns)", t1 - t0));
    $display("C6A exit latency %0.1f ns", t1 - t0);
    n_rel = 0;
    for (int z = 1; z < NUM_ZONES; z++)
      if (rel_t[z] - rel_t[z-1] > 13.99 && rel_t[z] - rel_t[z-1] < 14.01) n_rel++;
    check(n_rel == NUM_ZONES - 1, "zones released one by one, 14 ns apart");
    check(zone_pwr_good == '1 && !srpg_ret && !iso_en, "zones up, Ret and isolation released");
    verify(1, "after C6A");

    // ---- C6AE, snoop burst with overflow, interrupt during service ----
    fill(2);
    @(negedge pma_clk); mwait_target = CS_C6AE; mwait_req = 1;
    @(negedge pma_clk); mwait_req = 0;
    while (pm_state != PM_IDLE) @(posedge pma_clk);
    check(cstate == CS_C6AE && dvfs_pn_req, "C6AE raises the Pn request");
    repeat (10) @(negedge pma_clk);
    fwd_ready = 0;              // caches slow to accept: queue fills
    fork
      begin for (int i = 0; i < 8; i++) send_snoop(48'h2000 + 48'(i)); end
      begin repeat (12) @(negedge pma_clk); fwd_ready = 1; end
      begin
        while (pm_state != PM_SB_SNOOP) @(posedge pma_clk);
        @(negedge pma_clk); irq = 1;
      end
    join
    while (pm_state != PM_C0) @(posedge pma_clk);
    irq = 0;
    check(!dvfs_pn_req, "Pn request dropped on exit");
    repeat (10) @(negedge pma_clk);
    check(snoops_served == 10, $sformatf("all 10 snoops served (%0d)", snoops_served));
    check(fwd_asleep == 0, "no snoop reached a sleeping cache");
    verify(2, "after C6AE");

    // ---- mechanism coverage ----
    $display("mechanisms: c6a=%0d c6ae=%0d snoop_wake=%0d exit=%0d pn_req=%0d backpressure=%0d irq_in_snoop=%0d staggered_releases=%0d",
             n_c6a, n_c6ae, n_snoop_wake, n_exit, n_pn_req, n_backpressure, n_irq_in_snoop, n_stagger);
    check(n_c6a > 0, "C6A entry happened");
    check(n_c6ae > 0, "C6AE entry happened");
    check(n_snoop_wake > 0, "snoop wake-up happened");
    check(n_exit > 1, "exits happened");
    check(n_pn_req > 0, "Pn request happened");
    check(n_backpressure > 0, "snoop queue back-pressure happened");
    check(n_irq_in_snoop > 0, "interrupt during snoop service happened");
    check(n_stagger > 0, "staggered zone release happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge pma_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
