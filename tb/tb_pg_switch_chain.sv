// tb_pg_switch_chain: self-checking testbench of the switch-cell daisy chain.
//
// Checks that the sleep signal ripples through the cells one after another,
// that the acknowledgement (slp_out of the last cell) follows slp_in after
// N_CELLS * CELL_DELAY_PS in both directions, and that the zone supply is
// reported good only when every cell conducts.
`timescale 1ns/1ps
module tb_pg_switch_chain;
  localparam int N = 9;
  localparam int DPS = 1500;
  logic slp_in = 0, slp_out, pwr_good;
  logic [N-1:0] cell_on;
  int checks = 0, failures = 0;
  realtime t0, t1;

  pg_switch_chain #(.N_CELLS(N), .CELL_DELAY_PS(DPS)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // order of the wavefront
  int order_err = 0;
  always @(cell_on) begin
    for (int i = 1; i < N; i++)
      if ($realtime > 15.0 && cell_on[i] && !cell_on[i-1] && !slp_in) order_err++;
  end

  initial begin
    #20;
    check(pwr_good && !slp_out && cell_on == '1, "powered after settling");
    // power down
    t0 = $realtime; slp_in = 1;
    @(posedge slp_out); t1 = $realtime;
    check((t1 - t0) > 13.49 && (t1 - t0) < 13.51, $sformatf("power-down ripple 13.5 ns (got %0.2f)", t1 - t0));
    check(!pwr_good && cell_on == '0, "all cells open");
    #5;
    // power up
    t0 = $realtime; slp_in = 0;
    #(DPS * 1ps * 1.5);
    check(cell_on[0] && !cell_on[1], "first cell on, second still off");
    check(!pwr_good, "supply not yet good");
    @(negedge slp_out); t1 = $realtime;
    check((t1 - t0) > 13.49 && (t1 - t0) < 13.51, $sformatf("wake ripple 13.5 ns (got %0.2f)", t1 - t0));
    #0.01;
    check(pwr_good && cell_on == '1, "all cells conduct");
    check(order_err == 0, "cells turn on in chain order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
