// pg_zone_ctrl: local power-gate controller of one UFPG zone.
//
// The controller drives the sleep input of the first switch cell of the
// zone's daisy chain and takes the acknowledgement back from the sleep output
// of the last cell. When that acknowledgement has fallen, every switch cell of
// the chain conducts and the zone is reported powered ("ready"); when it has
// risen, every cell is open and the zone is reported off. The chain is
// asynchronous, so the acknowledgement passes a SYNC_STAGES flip-flop
// synchroniser into the PMA clock domain.
//
// The controller-to-chain handshake (slp into the first cell, ready from the
// last slp_out) follows the design description. Own choices: slp is active
// high (1 = switches open); a new zone sleep request is only acted upon once
// the previous transition of the chain has completed, so the chain never
// carries two opposite wavefronts; after reset the zone is powered.
//
// Timing: slp follows slp_zone one cycle after it is sampled; zone_on rises
// SYNC_STAGES+1 cycles after the chain acknowledgement falls.
`timescale 1ns/1ps
module pg_zone_ctrl
  import aw_pkg::*;
#(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic      clk,       // PMA clock
  input  logic      rst_n,
  input  logic      slp_zone,  // SlpZone_i from the PMA: 1 = power-gate
  output logic      slp,       // to slp_in of the first switch cell
  input  logic      chain_ack, // slp_out of the last switch cell (async)
  output logic      zone_on,   // all switches conduct
  output logic      zone_off,  // all switches open
  output pg_state_e pg_state
);

  logic [SYNC_STAGES-1:0] sync_q;
  logic                   ack_s;
  pg_state_e              st_q;
  logic                   slp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_q <= '0;
    else        sync_q <= {sync_q[SYNC_STAGES-2:0], chain_ack};
  end
  assign ack_s = sync_q[SYNC_STAGES-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= PG_ON;
      slp_q <= 1'b0;
    end else begin
      unique case (st_q)
        PG_ON:        if (slp_zone)  begin st_q <= PG_GOING_OFF; slp_q <= 1'b1; end
        PG_GOING_OFF: if (ack_s)           st_q <= PG_OFF;
        PG_OFF:       if (!slp_zone) begin st_q <= PG_WAKING;    slp_q <= 1'b0; end
        PG_WAKING:    if (!ack_s)          st_q <= PG_ON;
        default:                           st_q <= PG_ON;
      endcase
    end
  end

  assign slp      = slp_q;
  assign zone_on  = (st_q == PG_ON);
  assign zone_off = (st_q == PG_OFF);
  assign pg_state = st_q;

endmodule
