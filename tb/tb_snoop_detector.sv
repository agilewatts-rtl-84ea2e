// tb_snoop_detector: self-checking testbench of the always-active snoop
// detector.
//
// With the caches asleep, snoops are queued (never forwarded), pending is
// raised, and a fifth snoop is back-pressured by the 4-entry queue. With the
// caches awake, the queued snoops come out in order, pending stays high
// until the last one has completed, and then falls.
`timescale 1ns/1ps
module tb_snoop_detector;
  localparam int PW = 48;
  logic clk = 0, rst_n = 0;
  logic snp_valid = 0, snp_ready, l1l2_awake = 0, fwd_valid, fwd_ready = 1, snp_done = 0, pending;
  logic [PW-1:0] snp_payload = '0, fwd_payload;
  int checks = 0, failures = 0;

  snoop_detector #(.DEPTH(4), .PW(PW)) dut (.*);

  always #1 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int fwd_while_asleep = 0;
  logic [PW-1:0] got [$];
  always @(posedge clk) begin
    if (fwd_valid && !l1l2_awake) fwd_while_asleep++;
    if (fwd_valid && fwd_ready) got.push_back(fwd_payload);
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!pending && snp_ready, "idle after reset");
    for (int i = 0; i < 4; i++) begin
      snp_valid = 1; snp_payload = PW'(48'hA000 + i);
      @(negedge clk);
      check(pending, "pending while snoops are queued");
    end
    snp_payload = PW'(48'hA004);
    check(!snp_ready, "queue full: back-pressure");
    @(negedge clk);
    snp_valid = 0;
    repeat (5) @(negedge clk);
    check(fwd_while_asleep == 0 && got.size() == 0, "nothing forwarded while asleep");

    l1l2_awake = 1;
    repeat (6) @(negedge clk);
    check(got.size() == 4, $sformatf("four snoops forwarded (%0d)", got.size()));
    for (int i = 0; i < 4 && i < got.size(); i++)
      check(got[i] == PW'(48'hA000 + i), "forwarded in arrival order");
    check(pending, "pending until the caches complete them");
    repeat (3) begin snp_done = 1; @(negedge clk); end
    snp_done = 0;
    check(pending, "one snoop still outstanding");
    snp_done = 1; @(negedge clk); snp_done = 0;
    check(!pending, "pending clears once all are serviced");

    // a snoop while awake is forwarded immediately
    snp_valid = 1; snp_payload = PW'(48'hBEEF);
    @(negedge clk); snp_valid = 0;
    @(negedge clk);
    check(got.size() == 5 && got[4] == PW'(48'hBEEF), "forwarded while awake");
    snp_done = 1; @(negedge clk); snp_done = 0;
    check(!pending, "done");
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
