// srpg_reg: behavioural model of a W-bit state-retention power-gated (SRPG)
// register, i.e. W retention flip-flops sharing D/Clock/Ret controls (not
// synthesizable logic: a real SRPG cell has two supplies, the gated VDD of
// its main flop and the always-on VRET of its shadow latch).
//
// Operation: with Ret low the main flop captures d on the rising clock edge
// when en is set, and the shadow latch follows it. Raising Ret closes the
// shadow latch (save context); the main flop ignores the clock. Dropping pwr
// (the switch of the zone opens) destroys the main flop, modelled by loading
// LOST_VALUE. When Ret falls again after power is back, the cell output
// switches to the shadow latch at once (restore context), and the first
// clock edge copies the value back into the main flop.
//
// The save/power-gate/power-ungate/restore sequence and the D, Clock, Ret,
// VDD, VRET pins follow the design description; the write enable, the width
// and the LOST_VALUE pattern are this model's own choices. The latch that
// lint tools report is the shadow latch of the cell and is intended.
`timescale 1ns/1ps
module srpg_reg #(
  parameter int unsigned W          = 32,
  parameter logic [W-1:0] LOST_VALUE = {(W+3)/4{4'hA}}
) (
  input  logic         clk,  // gated unit clock
  input  logic         pwr,  // gated VDD present (switches conduct)
  input  logic         ret,  // Ret: 1 = retain in the shadow latch
  input  logic         en,   // write enable of the unit logic
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] main_q;
  logic [W-1:0] shadow_q;
  logic         lost_q;    // supply lost while Ret held the value

  // Shadow latch on the always-on supply: transparent while Ret is low and
  // the main flop holds valid data; closed (retaining) while Ret is high.
  always_latch begin
    if (!ret && !lost_q) shadow_q = main_q;
  end

  // Main flop on the gated supply: loses its content when pwr drops.
  always_ff @(posedge clk or negedge pwr) begin
    if (!pwr) begin
      main_q <= LOST_VALUE;
      lost_q <= ret;       // only a retained value can be restored
    end else if (!ret) begin
      if (en)          main_q <= d;
      else if (lost_q) main_q <= shadow_q;
      lost_q <= 1'b0;
    end
  end

  // Restore: as soon as Ret falls with power back, the cell drives the
  // retained value; the first clock edge copies it into the main flop.
  assign q = (lost_q && !ret) ? shadow_q : main_q;

endmodule
