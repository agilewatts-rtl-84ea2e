// aw_pkg: types and constants shared by the AgileWatts core idle-state RTL.
//
// The C6A/C6AE power-management flow (entry steps 1-3, snoop sub-flow a-c,
// exit steps 4-6) is encoded as one state enum so that the controller, the
// top level and the testbenches name the same states. The zone count (five)
// and the 500 MHz power-management clock come from the design description;
// the encodings are this implementation's own choice.
`timescale 1ns/1ps
package aw_pkg;

  // Number of UFPG power-gate zones, each with its own local controller.
  localparam int unsigned NUM_ZONES = 5;

  // Idle-state target requested by MWAIT.
  typedef enum logic [1:0] {
    CS_C0   = 2'd0,
    CS_C6A  = 2'd1,   // retention at the current (P1) voltage/frequency
    CS_C6AE = 2'd2    // C6A plus a non-blocking DVFS request to Pn
  } cstate_e;

  // States of the C6A controller. The E/S/X prefixes follow the numbered
  // steps of the flow: E1..E3 entry, SA..SC snoop service, X4..X6 exit.
  typedef enum logic [4:0] {
    PM_C0,          // active
    PM_E1_CG,       // 1: clock-gate UFPG units, PLL stays on
    PM_E1_CG2,      // 1: second cycle, lets the gate settle at Pn
    PM_E2_RET,      // 2: assert Ret (save context in place)
    PM_E2_ISO,      // 2: clamp outputs of the UFPG domain
    PM_E2_PG,       // 2: deassert Pwr (SlpZone_i asserted)
    PM_E3_SLEEP,    // 3: L1/L2 data arrays into sleep mode
    PM_E3_CG,       // 3: clock-gate L1/L2
    PM_IDLE,        // resident in C6A / C6AE
    PM_SA_CG,       // a: clock-ungate L1/L2
    PM_SA_WAKE,     // a: exit sleep mode (tags accessed in parallel)
    PM_SB_SNOOP,    // b: caches serve snoops
    PM_SC_SLEEP,    // c: back into sleep mode
    PM_SC_CG,       // c: clock-gate L1/L2
    PM_X4_CG,       // 4: clock-ungate L1/L2
    PM_X4_WAKE,     // 4: exit sleep mode
    PM_X5_PWRUP,    // 5: staggered power-ungate of the zones
    PM_X5_RESTORE,  // 5: deassert Ret (restore context)
    PM_X6_CG        // 6: clock-ungate UFPG units, release isolation
  } pm_state_e;

  // State of one power-gate zone as seen by its local controller.
  typedef enum logic [1:0] {
    PG_ON       = 2'd0,
    PG_GOING_OFF = 2'd1,
    PG_OFF      = 2'd2,
    PG_WAKING   = 2'd3
  } pg_state_e;

endpackage
