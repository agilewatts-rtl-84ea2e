// pg_switch_chain: behavioural model of one zone's daisy chain of
// power-gating switch cells (not synthesizable logic: the real part is a row
// of header transistors with buffered sleep pass-through).
//
// Each cell takes slp_in, switches its transistor (1 = open, 0 = conducting)
// and passes the signal on to slp_out after CELL_DELAY_PS; slp_out of cell i
// is slp_in of cell i+1, and slp_out of the last cell is the ready
// acknowledgement to the local controller. The cells therefore turn on one
// after another, which spreads the in-rush current over
// N_CELLS * CELL_DELAY_PS. pwr_good is 1 when every cell conducts, i.e. when
// the virtual supply of the zone is fully up.
//
// The daisy-chain topology and the slp_in/slp_out/ready names follow the
// design description. The defaults are derived, not given: the paper staggers
// a zone over at most 15 ns and all five zones over about 67.5 ns, i.e.
// 13.5 ns per zone, here 9 cells of 1.5 ns.
`timescale 1ns/1ps
module pg_switch_chain #(
  parameter int unsigned N_CELLS       = 9,
  parameter int unsigned CELL_DELAY_PS = 1500
) (
  input  logic               slp_in,   // from the local controller
  output logic               slp_out,  // of the last cell: the ready acknowledgement
  output logic [N_CELLS-1:0] cell_on,  // per-cell switch conducting
  output logic               pwr_good  // all cells conduct
);

  logic [N_CELLS:0] slp_chain;

  assign slp_chain[0] = slp_in;

  for (genvar i = 0; i < N_CELLS; i++) begin : g_cell
    // Buffered pass-through of the sleep signal inside the cell.
    assign #(CELL_DELAY_PS * 1ps) slp_chain[i+1] = slp_chain[i];
    assign cell_on[i] = ~slp_chain[i+1];
  end

  assign slp_out  = slp_chain[N_CELLS];
  assign pwr_good = &cell_on;

endmodule
