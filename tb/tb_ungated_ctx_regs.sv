// tb_ungated_ctx_regs: self-checking testbench of the ungated context
// registers.
//
// Writes a pattern to every word, then, with isolation set, drives random
// writes (the floating outputs of a power-gated unit) and checks that no
// word changed; finally checks normal writes after isolation is released.
`timescale 1ns/1ps
module tb_ungated_ctx_regs;
  localparam int WORDS = 256, W = 32;
  logic clk = 0, rst_n = 0, iso = 0, we = 0;
  logic [7:0] addr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  ungated_ctx_regs #(.WORDS(WORDS), .W(W)) dut (.*);

  always #1 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic logic [W-1:0] pat(input int i);
    return 32'h9E37_79B9 * (i + 1) ^ 32'h5A5A_0000;
  endfunction

  int bad;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); we = 1; addr = 8'(i); wdata = pat(i);
    end
    @(negedge clk); we = 0;
    bad = 0;
    for (int i = 0; i < WORDS; i++) begin addr = 8'(i); #0.1; if (rdata != pat(i)) bad++; end
    check(bad == 0, "all words written");

    iso = 1;
    repeat (200) begin
      @(negedge clk); we = 1; addr = 8'($urandom); wdata = $urandom;
    end
    @(negedge clk); we = 0;
    bad = 0;
    for (int i = 0; i < WORDS; i++) begin addr = 8'(i); #0.1; if (rdata != pat(i)) bad++; end
    check(bad == 0, $sformatf("isolation blocks writes from a gated unit (%0d words changed)", bad));

    iso = 0;
    @(negedge clk); we = 1; addr = 8'd17; wdata = 32'hFEED_0017;
    @(negedge clk); we = 0; #0.1;
    check(rdata == 32'hFEED_0017, "write after isolation released");
    addr = 8'd18; #0.1;
    check(rdata == pat(18), "neighbour untouched");
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
