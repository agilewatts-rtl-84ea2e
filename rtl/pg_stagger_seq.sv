// pg_stagger_seq: the PMA's sequencer of the zone sleep signals SlpZone_i.
//
// Waking the whole UFPG domain at once would draw an in-rush current about
// 4.5 times that of the AVX units. The domain is therefore split into
// NUM_ZONES zones, and this sequencer releases their sleep signals one after
// another, STAGGER_CYC PMA cycles apart, so that only one zone's switch chain
// is turning on at any time. all_on rises once every local controller
// reports its zone powered. Power-down needs no staggering: when pwr_req
// falls, all SlpZone_i are asserted in the same cycle.
//
// Follows the design description: five zones, each with a local controller
// and a zone sleep signal driven by the PMA, woken sequentially, each within
// about 15 ns. Own choices: a fixed release interval (7 cycles = 14 ns at
// 500 MHz, longer than the 13.5 ns a zone chain takes) rather than waiting
// for each zone's acknowledgement, which would add the synchroniser delay to
// every zone; SlpZone_i is active high; after reset all zones are powered.
//
// Timing: zone 0 is released in the cycle after pwr_req is seen high, zone k
// k*STAGGER_CYC cycles later.
`timescale 1ns/1ps
module pg_stagger_seq #(
  parameter int unsigned NUM_ZONES   = 5,
  parameter int unsigned STAGGER_CYC = 7
) (
  input  logic                 clk,      // PMA clock
  input  logic                 rst_n,
  input  logic                 pwr_req,  // 1 = zones powered
  input  logic [NUM_ZONES-1:0] zone_on,  // from the local controllers
  output logic [NUM_ZONES-1:0] slp_zone, // SlpZone_i
  output logic                 all_on
);

  localparam int unsigned CW = $clog2(STAGGER_CYC + 1);
  localparam int unsigned IW = $clog2(NUM_ZONES + 1);

  logic [CW-1:0] cnt_q;
  logic [IW-1:0] idx_q;   // next zone to release
  logic [NUM_ZONES-1:0] slp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slp_q <= '0;
      idx_q <= IW'(NUM_ZONES);
      cnt_q <= '0;
    end else if (!pwr_req) begin
      slp_q <= '1;
      idx_q <= '0;
      cnt_q <= '0;
    end else if (idx_q < IW'(NUM_ZONES)) begin
      if (cnt_q == '0) begin
        slp_q[idx_q] <= 1'b0;
        idx_q        <= idx_q + 1'b1;
        cnt_q        <= CW'(STAGGER_CYC - 1);
      end else begin
        cnt_q <= cnt_q - 1'b1;
      end
    end
  end

  assign slp_zone = slp_q;
  assign all_on   = pwr_req && (slp_q == '0) && (&zone_on);

endmodule
