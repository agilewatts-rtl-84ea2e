// ungated_ctx_regs: context registers of the UFPG units placed in the core's
// ungated power domain.
//
// Units with a small, local context (the execution units other than AVX, the
// execution ports and the out-of-order engine) keep their registers outside
// their power gate, so the values survive while the unit itself is
// power-gated and need neither saving nor restoring. The only extra logic is
// isolation on the signals that come from the gated unit: while iso is set
// the write enable is forced low, so the floating outputs of a powered-down
// unit cannot corrupt the registers. Reads are combinational.
//
// Follows the design description: registers relocated to the ungated domain
// with isolation cells. Own choices: a word-addressed write/read port and a
// size of 256 x 32 bits (1 KB of the ~8 KB core context).
//
// Timing: writes on the rising edge of clk when we is set and iso is clear.
`timescale 1ns/1ps
module ungated_ctx_regs #(
  parameter int unsigned WORDS = 256,
  parameter int unsigned W     = 32,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,   // unit clock (gated while the unit is idle)
  input  logic          rst_n,
  input  logic          iso,   // isolation: source unit is power-gated
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] regs_q [WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WORDS; i++) regs_q[i] <= '0;
    end else if (we && !iso) begin
      regs_q[addr] <= wdata;
    end
  end

  assign rdata = regs_q[addr];

endmodule
