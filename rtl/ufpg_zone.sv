// ufpg_zone: one of the five power-gate zones of the UFPG (Units' Fast
// Power-Gating) domain.
//
// A zone groups part of the core units behind its own row of switch cells.
// It holds the zone's local power-gate controller (pg_zone_ctrl), the daisy
// chain of switch cells (pg_switch_chain) and the context of its units kept
// in place in SRPG registers (srpg_reg). The units' logic itself is outside
// this model: the context is reached through a simple register port (write
// enable, word address, data), as microcode and the units would reach their
// configuration and status registers. Outputs leaving the zone pass
// isolation clamps (forced to 0 while iso is set), since a power-gated zone
// drives floating values.
//
// Follows the design description: one local controller per zone driven by
// the zone sleep signal SlpZone_i; SRPG retention with Ret; isolation cells on
// the outputs. Own choices: 256 words of 32 bits per zone (1 KB; five zones
// give 5 KB of the ~8 KB core context, the rest being the ungated registers
// and the microcode patch SRAM), and the register-port form of the context.
//
// Timing: reads are combinational; writes take effect on the rising edge of
// the gated unit clock. Power-up takes the chain delay plus the controller's
// synchroniser (see pg_zone_ctrl).
`timescale 1ns/1ps
module ufpg_zone
  import aw_pkg::*;
#(
  parameter int unsigned WORDS         = 256,
  parameter int unsigned W             = 32,
  parameter int unsigned N_CELLS       = 9,
  parameter int unsigned CELL_DELAY_PS = 1500,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          pma_clk,
  input  logic          rst_n,
  input  logic          slp_zone,  // SlpZone_i from the PMA
  output logic          zone_on,
  output logic          zone_off,
  output pg_state_e     pg_state,
  input  logic          ret,       // Ret to the SRPG cells
  input  logic          iso,       // isolation of the zone outputs
  input  logic          unit_clk,  // gated UFPG clock
  input  logic          ctx_we,
  input  logic [AW-1:0] ctx_addr,
  input  logic [W-1:0]  ctx_wdata,
  output logic [W-1:0]  ctx_rdata, // isolated
  output logic          pwr_good   // virtual supply of the zone is up
);

  logic slp, chain_ack;
  logic [N_CELLS-1:0] cell_on;

  pg_zone_ctrl u_ctrl (
    .clk      (pma_clk),
    .rst_n    (rst_n),
    .slp_zone (slp_zone),
    .slp      (slp),
    .chain_ack(chain_ack),
    .zone_on  (zone_on),
    .zone_off (zone_off),
    .pg_state (pg_state)
  );

  pg_switch_chain #(.N_CELLS(N_CELLS), .CELL_DELAY_PS(CELL_DELAY_PS)) u_chain (
    .slp_in  (slp),
    .slp_out (chain_ack),
    .cell_on (cell_on),
    .pwr_good(pwr_good)
  );

  logic [W-1:0] q [WORDS];

  for (genvar i = 0; i < WORDS; i++) begin : g_ctx
    srpg_reg #(.W(W)) u_reg (
      .clk(unit_clk),
      .pwr(pwr_good),
      .ret(ret),
      .en (ctx_we && !iso && ctx_addr == AW'(i)),
      .d  (ctx_wdata),
      .q  (q[i])
    );
  end

  assign ctx_rdata = iso ? '0 : q[ctx_addr];

endmodule
