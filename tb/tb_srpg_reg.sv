// tb_srpg_reg: self-checking testbench of the SRPG register model.
//
// Checks normal clocked writes, that a power cycle without Ret loses the
// value, and that the full sequence Ret up, power off, power on, Ret down
// restores the value saved at Ret. Also checks that writes are ignored
// while Ret is high.
`timescale 1ns/1ps
module tb_srpg_reg;
  localparam int W = 32;
  localparam logic [W-1:0] LOST = 32'hAAAA_AAAA;
  logic clk = 0, pwr = 1, ret = 0, en = 0;
  logic [W-1:0] d = '0, q;
  int checks = 0, failures = 0;

  srpg_reg #(.W(W)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic tick(); #1 clk = 1; #1 clk = 0; endtask

  task automatic write(input logic [W-1:0] v);
    d = v; en = 1; tick(); en = 0; #0.5;
  endtask

  initial begin
    #1;
    write(32'h1234_5678);
    check(q == 32'h1234_5678, "clocked write");
    tick(); #0.5;
    check(q == 32'h1234_5678, "holds without enable");

    // power cycle without retention loses the value
    pwr = 0; #1; pwr = 1; #1;
    check(q == LOST, "power loss without Ret destroys content");

    // save, gate, ungate, restore
    write(32'hCAFE_F00D);
    ret = 1; #1;
    check(q == 32'hCAFE_F00D, "Ret asserted, value still visible");
    d = 32'h0; en = 1; tick(); en = 0; #0.5;
    check(q == 32'hCAFE_F00D, "writes ignored while Ret is high");
    pwr = 0; #5;
    check(q == LOST, "main flop lost while power-gated");
    pwr = 1; #5;
    check(q == LOST, "no restore before Ret falls");
    ret = 0; #0.5;
    check(q == 32'hCAFE_F00D, "restore on Ret falling");
    tick(); #0.5;
    check(q == 32'hCAFE_F00D, "restored value kept after first clock");
    write(32'h0BAD_BEEF);
    check(q == 32'h0BAD_BEEF, "normal writes after restore");

    // second retention cycle with a different value
    ret = 1; #1; pwr = 0; #3; pwr = 1; #3; ret = 0; #0.5;
    check(q == 32'h0BAD_BEEF, "second retention cycle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
