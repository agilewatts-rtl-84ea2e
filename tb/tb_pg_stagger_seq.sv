// tb_pg_stagger_seq: self-checking testbench of the zone wake-up sequencer.
//
// Zone acknowledgements are emulated: zone k reports on a fixed 6 cycles
// after its sleep signal is released. Checks that power-down asserts every
// SlpZone_i in one cycle, that the zones are released one at a time exactly
// STAGGER_CYC (7) cycles apart, that no two zones are waking at once, and
// that all_on rises only when every zone reports on.
`timescale 1ns/1ps
module tb_pg_stagger_seq;
  localparam int NZ = 5, ST = 7, ZW = 6;
  logic clk = 0, rst_n = 0, pwr_req = 1, all_on;
  logic [NZ-1:0] zone_on, slp_zone;
  int checks = 0, failures = 0;

  pg_stagger_seq #(.NUM_ZONES(NZ), .STAGGER_CYC(ST)) dut (.*);

  always #1 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int zcnt [NZ];
  for (genvar z = 0; z < NZ; z++) begin : g_z
    always @(posedge clk) begin
      if (!rst_n) begin zcnt[z] <= ZW; zone_on[z] <= 1'b1; end
      else if (slp_zone[z]) begin zcnt[z] <= 0; zone_on[z] <= 1'b0; end
      else if (zcnt[z] < ZW) zcnt[z] <= zcnt[z] + 1;
      else zone_on[z] <= 1'b1;
    end
  end

  int cyc = 0;
  int rel [NZ];
  logic [NZ-1:0] slp_d;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    slp_d <= slp_zone;
    for (int z = 0; z < NZ; z++) if (slp_d[z] && !slp_zone[z]) rel[z] = cyc;
  end
  int overlap = 0;
  always @(posedge clk) if (rst_n && pwr_req && $countones(~slp_zone & ~zone_on) > 1) overlap++;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (12) @(negedge clk);
    check(slp_zone == '0 && all_on, "after reset all zones on");
    pwr_req = 0;
    @(negedge clk);
    check(slp_zone == '1, "power-down asserts all SlpZone_i together");
    check(!all_on, "all_on falls with the request");
    repeat (12) @(negedge clk);
    pwr_req = 1;
    while (!all_on) @(negedge clk);
    for (int z = 1; z < NZ; z++)
      check(rel[z] - rel[z-1] == ST, $sformatf("zone %0d released %0d cycles after zone %0d", z, rel[z] - rel[z-1], z - 1));
    check(cyc - rel[0] <= (NZ-1)*ST + ZW + 3, "all_on soon after the last zone");
    check(overlap == 0, "at most one zone waking at a time");
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
