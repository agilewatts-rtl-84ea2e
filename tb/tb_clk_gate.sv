// tb_clk_gate: self-checking testbench of the clock gate.
//
// A 2.2 GHz core clock and an enable changed on a 500 MHz grid. Checks that
// no gated edge appears while disabled, that the gated clock starts within
// SYNC_STAGES+1 core cycles of the enable, that every gated high pulse is a
// full half period (no glitch), and that it stops again after disabling.
`timescale 1ns/1ps
module tb_clk_gate;
  logic clk = 0, rst_n = 0, en = 0, en_sync, gclk;
  int checks = 0, failures = 0;
  localparam realtime HP = 0.227;   // half period of 2.2 GHz

  clk_gate dut (.*);

  always #(HP) clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int edges = 0, short_pulses = 0;
  realtime t_rise;
  always @(posedge gclk) begin edges++; t_rise = $realtime; end
  always @(negedge gclk) if ($realtime - t_rise < HP - 0.01) short_pulses++;

  int core_cyc = 0;
  always @(posedge clk) core_cyc++;

  int c0;
  initial begin
    #3 rst_n = 1;
    #10;
    check(edges == 0, "no gated edges while disabled");
    #0.1 en = 1; c0 = core_cyc;
    @(posedge gclk);
    check(core_cyc - c0 >= 2 && core_cyc - c0 <= 3, $sformatf("starts 2-3 core cycles after enable (got %0d)", core_cyc - c0));
    edges = 0;
    #20;
    check(edges >= 42 && edges <= 45, $sformatf("runs at the core clock (%0d edges in 20 ns)", edges));
    #0.13 en = 0;
    #2;
    edges = 0;
    #20;
    check(edges == 0, "stops after disable");
    check(short_pulses == 0, "no shortened pulses");
    repeat (5) begin
      #(1.0 + 0.05) en = ~en;
    end
    en = 0;
    #5;
    check(short_pulses == 0, "no glitches with a toggling enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
