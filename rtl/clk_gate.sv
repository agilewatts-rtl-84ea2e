// clk_gate: clock gate of a core clock domain (the UFPG units or the L1/L2
// caches and their controllers) controlled from the power-management agent.
//
// The enable comes from the PMA clock domain, so it first passes a
// SYNC_STAGES flip-flop synchroniser clocked by the core clock. The
// synchronised enable is then held in a latch that is transparent while the
// clock is low and ANDed with the clock, the usual integrated clock-gating
// structure: the gated clock stays low when disabled and never carries a
// shortened pulse. The latch that lint tools report is this intended latch.
//
// The design description only says that the flow clock-gates and
// clock-ungates these domains in 1-2 cycles and keeps the PLL running; the
// synchroniser and the latch-AND structure are this implementation's own
// choice.
//
// Timing: the gated clock starts or stops SYNC_STAGES to SYNC_STAGES+1 core
// clock cycles after en changes.
`timescale 1ns/1ps
module clk_gate #(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic clk,     // free-running core clock from the PLL
  input  logic rst_n,
  input  logic en,      // from the PMA clock domain
  output logic en_sync, // enable as seen in the core clock domain
  output logic gclk
);

  logic [SYNC_STAGES-1:0] sync_q;
  logic                   en_lat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_q <= '0;
    else        sync_q <= {sync_q[SYNC_STAGES-2:0], en};
  end
  assign en_sync = sync_q[SYNC_STAGES-1];

  always_latch begin
    if (!clk) en_lat = en_sync;
  end

  assign gclk = clk & en_lat;

endmodule
