// tb_pg_zone_ctrl: self-checking testbench of the local power-gate
// controller of one zone.
//
// An emulated switch chain returns the acknowledgement a fixed 13.5 ns after
// slp changes. Checks that slp follows the zone sleep request one cycle
// later, that zone_off/zone_on are reported only after the synchronised
// acknowledgement (SYNC_STAGES+1 cycles after it changes), and that a request
// that flips during a transition is held until the chain has settled.
`timescale 1ns/1ps
module tb_pg_zone_ctrl;
  import aw_pkg::*;
  logic clk = 0, rst_n = 0, slp_zone = 0, slp, chain_ack, zone_on, zone_off;
  pg_state_e pg_state;
  int checks = 0, failures = 0;

  pg_zone_ctrl dut (.*);

  always #1 clk = ~clk;
  assign #13.5 chain_ack = slp;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int n;

  initial begin
    repeat (12) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(zone_on && !slp, "after reset the zone is powered");

    slp_zone = 1;
    @(negedge clk);
    check(slp && pg_state == PG_GOING_OFF && !zone_on && !zone_off, "slp asserted one cycle after request");
    @(posedge chain_ack);
    n = 0;
    while (!zone_off) begin @(posedge clk); #0.1; n++; end
    check(n >= 2 && n <= 3, $sformatf("zone_off 2-3 cycles after ack (got %0d)", n));

    // request flips back during power-up: must be held until ON
    @(negedge clk);
    slp_zone = 0;
    @(negedge clk);
    check(!slp && pg_state == PG_WAKING, "waking");
    slp_zone = 1;
    repeat (3) @(negedge clk);
    check(!slp && pg_state == PG_WAKING, "new sleep request held while the chain wakes");
    n = 0;
    while (pg_state != PG_ON && n < 50) begin @(posedge clk); #0.1; n++; end
    check(zone_on && !chain_ack, "zone_on only once the chain acknowledges");
    @(posedge clk); #0.1;
    check(slp && pg_state == PG_GOING_OFF, "held request acted upon after completion");
    @(negedge clk);
    slp_zone = 0;
    n = 0;
    while (!zone_on && n < 100) begin @(posedge clk); #0.1; n++; end
    // 13.5 ns off ripple + sync, then 1 cycle for slp, 13.5 ns on ripple + sync
    check(zone_on && n > 14 && n < 22, $sformatf("full off/on round trip (got %0d cycles)", n));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
