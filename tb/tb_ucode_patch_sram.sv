// tb_ucode_patch_sram: self-checking testbench of the microcode patch SRAM.
//
// Fills all 512 words (2 KB), reads them back checking the one-cycle read
// latency, then checks that accesses are blocked while isolation is set.
`timescale 1ns/1ps
module tb_ucode_patch_sram;
  localparam int WORDS = 512, W = 32;
  logic clk = 0, iso = 0, en = 0, we = 0;
  logic [8:0] addr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  ucode_patch_sram #(.WORDS(WORDS), .W(W)) dut (.*);

  always #1 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic logic [W-1:0] pat(input int i);
    return {16'(i), 16'(~i)} ^ 32'h3C3C_C3C3;
  endfunction

  int bad;
  initial begin
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 9'(i); wdata = pat(i);
    end
    bad = 0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); en = 1; we = 0; addr = 9'(i);
      @(posedge clk); #0.1;
      if (rdata != pat(i)) bad++;
    end
    check(bad == 0, $sformatf("2 KB read back after one cycle (%0d mismatches)", bad));

    @(negedge clk); en = 1; we = 0; addr = 9'd5;
    @(negedge clk); en = 0;
    check(rdata == pat(5), "read data held");
    iso = 1;
    @(negedge clk); en = 1; we = 1; addr = 9'd5; wdata = 32'h0;
    @(negedge clk); en = 1; we = 0; addr = 9'd9;
    @(negedge clk); en = 0;
    check(rdata == pat(5), "no read started under isolation");
    iso = 0;
    @(negedge clk); en = 1; we = 0; addr = 9'd5;
    @(negedge clk); en = 0;
    check(rdata == pat(5), "no write under isolation");
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
