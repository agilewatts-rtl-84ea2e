// tb_c6a_controller: self-checking testbench of the C6A/C6AE controller FSM.
//
// Drives MWAIT, snoop-pending, zone-power and interrupt inputs by hand and
// checks, against cycle counts worked out from the flow (entry 8 cycles,
// snoop wake 2 cycles before service, re-sleep 2 cycles, exit 2 + zone
// wake-up + 2 cycles), the order of the power controls: Ret rises before
// the zone power is removed and falls only after power is back, the clocks
// stay off while Ret or isolation is set, and the Pn request is raised only
// for C6AE. A zone sequencer is emulated by answering zones_all_on a fixed
// number of cycles after the request.
`timescale 1ns/1ps
module tb_c6a_controller;
  import aw_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mwait_req = 1'b0, irq = 1'b0, snp_pending = 1'b0, zones_all_on = 1'b0;
  cstate_e mwait_target = CS_C6A;
  logic ufpg_clk_en, l1l2_clk_en, l1l2_sleep, l1l2_awake, srpg_ret, iso_en;
  logic zones_pwr_req, dvfs_pn_req;
  cstate_e cstate;
  pm_state_e state;

  int checks = 0, failures = 0;
  localparam int ZONE_WAKE = 30;   // emulated staggered wake-up, cycles

  c6a_controller dut (.*);

  always #1 clk = ~clk;   // 500 MHz

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // Emulated zone power: all_on ZONE_WAKE cycles after the request rises.
  int pwr_cnt = 0;
  always @(posedge clk) begin
    if (!zones_pwr_req) begin pwr_cnt <= 0; zones_all_on <= 1'b0; end
    else if (pwr_cnt < ZONE_WAKE) pwr_cnt <= pwr_cnt + 1;
    else zones_all_on <= 1'b1;
  end

  // Continuous rule checks.
  always @(posedge clk) if (rst_n) begin
    if (!zones_pwr_req && !srpg_ret) begin failures++; $display("FAIL: power off without Ret"); end
    if (ufpg_clk_en && (srpg_ret || iso_en)) begin failures++; $display("FAIL: UFPG clock with Ret/iso"); end
    if (l1l2_awake && l1l2_sleep) begin failures++; $display("FAIL: awake while sleeping"); end
  end

  task automatic wait_state(input pm_state_e s, output int cycles);
    cycles = 0;
    while (state != s && cycles < 1000) begin
      @(posedge clk); #0.1;
      cycles++;
    end
  endtask

  int n;
  bit saw_ret_before_pg;

  task automatic enter(input cstate_e tgt);
    @(negedge clk);
    mwait_target = tgt;
    mwait_req = 1'b1;
    @(negedge clk);
    mwait_req = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(state == PM_C0 && ufpg_clk_en && !srpg_ret && zones_pwr_req, "reset state is C0, powered");

    // ---- C6A entry ----
    @(negedge clk); mwait_target = CS_C6A; mwait_req = 1'b1;
    n = 0;
    saw_ret_before_pg = 1'b0;
    while (state != PM_IDLE && n < 100) begin
      @(posedge clk); #0.1; n++;
      mwait_req = 1'b0;
      if (srpg_ret && zones_pwr_req && !ufpg_clk_en) saw_ret_before_pg = 1'b1;
    end
    check(n == 8, $sformatf("C6A entry takes 8 cycles (got %0d)", n));
    check(n < 10, "entry within the 10-cycle budget");
    check(saw_ret_before_pg, "Ret asserted while the zones were still powered");
    check(!zones_pwr_req && srpg_ret && iso_en && l1l2_sleep && !l1l2_clk_en && !ufpg_clk_en,
          "idle: zones off, Ret, isolation, L1/L2 asleep and clock-gated");
    check(cstate == CS_C6A && !dvfs_pn_req, "C6A without Pn request");

    // ---- snoop in C6A ----
    @(negedge clk); snp_pending = 1'b1;
    n = 0;
    while (!l1l2_awake && n < 100) begin @(posedge clk); #0.1; n++; end
    check(n == 3, $sformatf("caches awake 2 cycles after the snoop is seen (got %0d edges)", n));
    check(state == PM_SB_SNOOP && l1l2_clk_en && !l1l2_sleep, "serving snoops");
    repeat (5) @(negedge clk);
    check(state == PM_SB_SNOOP, "stays awake while snoops are outstanding");
    snp_pending = 1'b0;
    n = 0;
    while (state != PM_IDLE && n < 100) begin @(posedge clk); #0.1; n++; end
    check(n == 3, $sformatf("back to idle 1-3 cycles after service (got %0d edges)", n));
    check(l1l2_sleep && !l1l2_clk_en && !zones_pwr_req, "sleep restored, zones still off");

    // ---- exit ----
    @(negedge clk); irq = 1'b1;
    n = 0;
    while (state != PM_C0 && n < 200) begin
      @(posedge clk); #0.1; n++;
      if (state == PM_X5_RESTORE) check(zones_all_on && !srpg_ret, "Ret falls only after power is good");
    end
    irq = 1'b0;
    check(n == 2 + 1 + ZONE_WAKE + 2 + 2, $sformatf("exit cycles = 4 + wake-up + 3 (got %0d)", n));
    check(ufpg_clk_en && !srpg_ret && !iso_en && zones_pwr_req && l1l2_awake, "back in C0");
    check(cstate == CS_C0, "C-state reported C0");

    // ---- C6AE entry raises Pn request ----
    enter(CS_C6AE);
    wait_state(PM_IDLE, n);
    check(cstate == CS_C6AE && dvfs_pn_req, "C6AE raises the non-blocking Pn request");

    // ---- interrupt during snoop service goes straight to power-up ----
    @(negedge clk); snp_pending = 1'b1;
    wait_state(PM_SB_SNOOP, n);
    @(negedge clk); irq = 1'b1;
    @(negedge clk); snp_pending = 1'b0;
    @(posedge clk); #0.1;
    check(state == PM_X5_PWRUP, "interrupt after snoops: straight to power-up");
    check(!dvfs_pn_req, "Pn request dropped on exit");
    wait_state(PM_C0, n);
    irq = 1'b0;
    check(state == PM_C0, "exit completed");

    // ---- snoop pending during entry delays E3 ----
    @(negedge clk); snp_pending = 1'b1;
    enter(CS_C6A);
    wait_state(PM_E2_PG, n);
    repeat (4) @(negedge clk);
    check(state == PM_E2_PG && l1l2_awake, "entry waits in E2 while snoops are served");
    snp_pending = 1'b0;
    wait_state(PM_IDLE, n);
    check(n == 3, $sformatf("entry finishes 3 cycles after the snoops (got %0d)", n));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
