// c6a_controller: the C6A / C6AE finite-state machine of the core power
// management agent (PMA).
//
// It orchestrates the transition between the active state C0 and the idle
// states C6A and C6AE, and the short wake-ups of the private caches that
// serve coherence snoops while the core stays idle. It runs on the PMA clock
// (500 MHz by default, 2 ns per state).
//
// Entry (MWAIT):  E1 clock-gate the UFPG domain for 2 cycles (PLL stays on;
//                 for C6AE a non-blocking Pn request is raised), E2 assert
//                 Ret, clamp isolation, remove the zone power (SlpZone_i), E3
//                 put the L1/L2 data arrays into sleep mode, then clock-gate
//                 L1/L2. 8 cycles from MWAIT to the idle state with no snoop
//                 traffic (budget: under 10 cycles, under 20 ns).
// Snoop in idle:  SA clock-ungate L1/L2 (cycle 1), exit sleep (cycle 2); SB
//                 serve until no snoop is outstanding; SC sleep, clock-gate.
// Exit (interrupt): X4 clock-ungate L1/L2, exit sleep (2 cycles); X5 ask the
//                 zone sequencer for power and wait until every zone is up,
//                 then deassert Ret (1 cycle); X6 clock-ungate the UFPG units
//                 and release isolation (1 cycle).
//
// The order of steps and the cycle budgets follow the design description.
// This implementation's own choices: an MWAIT request is taken only in C0; an
// interrupt arriving during entry is served once entry has completed; before
// E3 the flow waits until no snoop is outstanding; an interrupt seen while
// snoops are served goes straight to X5 since the caches are already awake;
// the Pn request is dropped when exit starts; E1 lasts the upper 2 of the
// 1-2 cycles so that the clock gate, which synchronises its enable into the
// core clock, has stopped the UFPG clock before Ret rises even at Pn
// (0.8 GHz core clock). All outputs are registered so
// that the power-control lines into the cells are glitch-free.
//
// Interface: mwait_req/mwait_target (sampled in C0), irq (level), snp_pending
// (from the snoop detector), zones_all_on (from the zone sequencer).
`timescale 1ns/1ps
module c6a_controller
  import aw_pkg::*;
(
  input  logic      clk,          // PMA clock
  input  logic      rst_n,
  input  logic      mwait_req,    // OS executes MWAIT
  input  cstate_e   mwait_target, // CS_C6A or CS_C6AE
  input  logic      irq,          // wake-up interrupt pending
  input  logic      snp_pending,  // snoop queued or outstanding
  input  logic      zones_all_on, // all UFPG zones report power good
  output logic      ufpg_clk_en,  // clock enable of the UFPG domain
  output logic      l1l2_clk_en,  // clock enable of the L1/L2 domain
  output logic      l1l2_sleep,   // data arrays in sleep mode
  output logic      l1l2_awake,   // caches clocked and data arrays awake
  output logic      srpg_ret,     // Ret to the SRPG cells
  output logic      iso_en,       // isolation of UFPG outputs
  output logic      zones_pwr_req,// 1: zones powered, 0: power-gated
  output logic      dvfs_pn_req,  // non-blocking request for Pn (C6AE)
  output cstate_e   cstate,       // architectural C-state
  output pm_state_e state         // flow state, for observation
);

  pm_state_e state_q, state_d;
  cstate_e   target_q, target_d;

  always_comb begin
    state_d  = state_q;
    target_d = target_q;
    unique case (state_q)
      PM_C0:         if (mwait_req && mwait_target != CS_C0) begin
                       state_d  = PM_E1_CG;
                       target_d = mwait_target;
                     end
      PM_E1_CG:      state_d = PM_E1_CG2;
      PM_E1_CG2:     state_d = PM_E2_RET;
      PM_E2_RET:     state_d = PM_E2_ISO;
      PM_E2_ISO:     state_d = PM_E2_PG;
      PM_E2_PG:      if (!snp_pending) state_d = PM_E3_SLEEP;
      PM_E3_SLEEP:   state_d = PM_E3_CG;
      PM_E3_CG:      state_d = PM_IDLE;
      PM_IDLE:       if (irq)              state_d = PM_X4_CG;
                     else if (snp_pending) state_d = PM_SA_CG;
      PM_SA_CG:      state_d = PM_SA_WAKE;
      PM_SA_WAKE:    state_d = PM_SB_SNOOP;
      PM_SB_SNOOP:   if (!snp_pending) state_d = irq ? PM_X5_PWRUP : PM_SC_SLEEP;
      PM_SC_SLEEP:   state_d = PM_SC_CG;
      PM_SC_CG:      state_d = PM_IDLE;
      PM_X4_CG:      state_d = PM_X4_WAKE;
      PM_X4_WAKE:    state_d = PM_X5_PWRUP;
      PM_X5_PWRUP:   if (zones_all_on) state_d = PM_X5_RESTORE;
      PM_X5_RESTORE: state_d = PM_X6_CG;
      PM_X6_CG:      begin
                       state_d  = PM_C0;
                       target_d = CS_C0;
                     end
      default:       state_d = PM_C0;
    endcase
  end

  // Output decode of the next state, registered together with it.
  typedef struct packed {
    logic ufpg_clk_en, l1l2_clk_en, l1l2_sleep, l1l2_awake;
    logic srpg_ret, iso_en, zones_pwr_req;
  } ctl_t;

  function automatic ctl_t decode(pm_state_e s);
    ctl_t c;
    c = '{ufpg_clk_en: 1'b0, l1l2_clk_en: 1'b1, l1l2_sleep: 1'b0, l1l2_awake: 1'b1,
          srpg_ret: 1'b1, iso_en: 1'b1, zones_pwr_req: 1'b0};
    unique case (s)
      PM_C0:         c = '{1'b1, 1'b1, 1'b0, 1'b1, 1'b0, 1'b0, 1'b1};
      PM_E1_CG,
      PM_E1_CG2:     c = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b0, 1'b0, 1'b1};
      PM_E2_RET:     c = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0, 1'b1};
      PM_E2_ISO:     c = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b1, 1'b1, 1'b1};
      PM_E2_PG:      c = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b1, 1'b1, 1'b0};
      PM_E3_SLEEP:   c = '{1'b0, 1'b1, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0};
      PM_E3_CG,
      PM_IDLE,
      PM_SC_CG:      c = '{1'b0, 1'b0, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0};
      PM_SA_CG,
      PM_X4_CG:      c = '{1'b0, 1'b1, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0};
      PM_SA_WAKE,
      PM_X4_WAKE:    c = '{1'b0, 1'b1, 1'b0, 1'b0, 1'b1, 1'b1, 1'b0};
      PM_SB_SNOOP:   c = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b1, 1'b1, 1'b0};
      PM_SC_SLEEP:   c = '{1'b0, 1'b1, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0};
      PM_X5_PWRUP:   c = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b1, 1'b1, 1'b1};
      PM_X5_RESTORE: c = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b0, 1'b1, 1'b1};
      PM_X6_CG:      c = '{1'b1, 1'b1, 1'b0, 1'b1, 1'b0, 1'b0, 1'b1};
      default:       ;
    endcase
    return c;
  endfunction

  ctl_t ctl_q;
  logic pn_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= PM_C0;
      target_q <= CS_C0;
      ctl_q    <= decode(PM_C0);
      pn_q     <= 1'b0;
    end else begin
      state_q  <= state_d;
      target_q <= target_d;
      ctl_q    <= decode(state_d);
      if (state_q == PM_C0 && state_d == PM_E1_CG)
        pn_q <= (mwait_target == CS_C6AE);
      else if (state_d == PM_X4_CG || state_d == PM_X5_PWRUP || state_d == PM_C0)
        pn_q <= 1'b0;
    end
  end

  assign ufpg_clk_en   = ctl_q.ufpg_clk_en;
  assign l1l2_clk_en   = ctl_q.l1l2_clk_en;
  assign l1l2_sleep    = ctl_q.l1l2_sleep;
  assign l1l2_awake    = ctl_q.l1l2_awake;
  assign srpg_ret      = ctl_q.srpg_ret;
  assign iso_en        = ctl_q.iso_en;
  assign zones_pwr_req = ctl_q.zones_pwr_req;
  assign dvfs_pn_req   = pn_q;
  assign cstate        = target_q;
  assign state         = state_q;

  // Power-sequencing rules of the SRPG cells: Ret goes high before power is
  // removed and falls only once power is back; the UFPG clock never runs
  // while Ret is asserted or the outputs are isolated.
  a_ret_before_pg: assert property (@(posedge clk) disable iff (!rst_n)
                     !zones_pwr_req |-> srpg_ret);
  a_clk_off_in_ret: assert property (@(posedge clk) disable iff (!rst_n)
                     ufpg_clk_en |-> (!srpg_ret && !iso_en));
  a_sleep_no_clk:   assert property (@(posedge clk) disable iff (!rst_n)
                     l1l2_awake |-> (l1l2_clk_en && !l1l2_sleep));

endmodule
