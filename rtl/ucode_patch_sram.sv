// ucode_patch_sram: the microcode patch and data SRAM (about 2 KB) kept on the
// core's ungated supply.
//
// The array is loaded at boot and must survive every C6A/C6AE residency;
// powering it from the ungated supply avoids the several-microsecond reload
// from the save/restore SRAM that a C6 exit needs. Requests come from the
// microcode unit, which is power-gated in C6A, so they pass isolation: while
// iso is set no access is started. The array is written as a memory so that
// synthesis maps it to an SRAM macro.
//
// Follows the design description: ~2 KB, ungated supply, isolation cells on
// its interface. Own choices: 512 words of 32 bits, one read/write port,
// one-cycle registered read, no reset of the contents.
`timescale 1ns/1ps
module ucode_patch_sram #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned W     = 32,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          iso,   // microcode unit is power-gated
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata  // valid one cycle after a read
);

  logic [W-1:0] mem [WORDS];
  logic [W-1:0] rdata_q;

  always_ff @(posedge clk) begin
    if (en && !iso) begin
      if (we) mem[addr] <= wdata;
      else    rdata_q   <= mem[addr];
    end
  end

  assign rdata = rdata_q;

endmodule
