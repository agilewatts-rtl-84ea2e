// aw_core_pm: the AgileWatts idle-state subsystem of one CPU core.
//
// It lets a server core enter a deep idle state, C6A (or C6AE, which also
// asks for the lowest voltage/frequency point Pn), and leave it again in
// well under 100 ns, instead of the >100 us of a conventional C6. Three
// things make this possible and are modelled here:
//   * UFPG: most core units sit behind five power-gate zones (ufpg_zone).
//     Their context is kept in place, in SRPG registers inside the zones, in
//     registers moved to the ungated domain (ungated_ctx_regs) and in the
//     microcode patch SRAM on the ungated supply (ucode_patch_sram), so
//     nothing is saved or restored externally. On exit the zones are woken
//     one after another (pg_stagger_seq) to bound the in-rush current.
//   * CCSM: the L1/L2 caches are never flushed. They stay powered but are
//     clock-gated and their data arrays put into sleep mode; the always-active
//     snoop_detector wakes them only for as long as snoops need service.
//   * The PLL keeps running; only clock gates (clk_gate) stop the UFPG and
//     L1/L2 clocks.
// The c6a_controller FSM in the power-management agent runs the flow.
//
// Not modelled and brought out as ports: the core units' logic (through the
// context register port), the L1/L2 caches (snoop forward port, gated cache
// clock, sleep controls), the sleep transistors (programmed setting), the
// DVFS flow (Pn request) and the PLL (core_clk input).
//
// Context port, in the gated UFPG clock domain: ctx_sel 0..NUM_ZONES-1
// selects a zone's SRPG registers, NUM_ZONES the ungated registers,
// NUM_ZONES+1 the microcode patch SRAM; reads return data one ufpg_clk cycle
// later. The port, the address map and the sleep-setting encoding
// (0 = nominal supply, 1..7 = the seven programmable sleep levels) are this
// implementation's own choices.
//
// Latencies at the defaults (PMA clock 500 MHz): entry 8 cycles (16 ns);
// exit about 40 cycles (80 ns), most of it the staggered zone wake-up;
// snoop wake 2 cycles, back to sleep 2 cycles.
`timescale 1ns/1ps
module aw_core_pm
  import aw_pkg::*;
#(
  parameter int unsigned ZONE_WORDS    = 256,  // SRPG words per zone
  parameter int unsigned UNGATED_WORDS = 256,  // ungated context words
  parameter int unsigned UCODE_WORDS   = 512,  // 2 KB microcode patch SRAM
  parameter int unsigned N_CELLS       = 9,    // switch cells per zone
  parameter int unsigned CELL_DELAY_PS = 1500,
  parameter int unsigned STAGGER_CYC   = 7,
  parameter int unsigned SNP_DEPTH     = 4,
  parameter int unsigned SNP_PW        = 48,
  parameter int unsigned CAW           = 9     // context address width
) (
  input  logic                 pma_clk,     // power-management agent clock
  input  logic                 core_clk,    // core clock, PLL kept running
  input  logic                 rst_n,
  // OS / interrupt controller
  input  logic                 mwait_req,
  input  cstate_e              mwait_target,
  input  logic                 irq,
  // snoops from the uncore
  input  logic                 snp_valid,
  output logic                 snp_ready,
  input  logic [SNP_PW-1:0]    snp_payload,
  // private caches
  output logic                 l1l2_clk,         // gated core clock
  output logic                 l1l2_sleep,       // data arrays in sleep mode
  input  logic [2:0]           slp_setting_cfg,  // programmed level 1..7
  output logic [2:0]           l1l2_slp_setting, // to the sleep transistors
  output logic                 fwd_valid,
  input  logic                 fwd_ready,
  output logic [SNP_PW-1:0]    fwd_payload,
  input  logic                 snp_done,
  // UFPG units
  output logic                 ufpg_clk,         // gated core clock
  input  logic [2:0]           ctx_sel,
  input  logic                 ctx_we,
  input  logic                 ctx_re,
  input  logic [CAW-1:0]       ctx_addr,
  input  logic [31:0]          ctx_wdata,
  output logic [31:0]          ctx_rdata,
  // DVFS flow
  output logic                 dvfs_pn_req,
  // status
  output cstate_e              cstate,
  output pm_state_e            pm_state,
  output logic [NUM_ZONES-1:0] slp_zone,
  output logic [NUM_ZONES-1:0] zone_pwr_good,
  output logic                 srpg_ret,
  output logic                 iso_en
);

  localparam int unsigned W   = 32;
  localparam int unsigned ZAW = $clog2(ZONE_WORDS);
  localparam int unsigned GAW = $clog2(UNGATED_WORDS);
  localparam int unsigned UAW = $clog2(UCODE_WORDS);

  logic ufpg_clk_en, l1l2_clk_en, l1l2_awake, zones_pwr_req, zones_all_on;
  logic snp_pending;
  logic [NUM_ZONES-1:0] zone_on, zone_off;
  logic ufpg_en_sync, l1l2_en_sync;

  c6a_controller u_ctrl (
    .clk          (pma_clk),
    .rst_n        (rst_n),
    .mwait_req    (mwait_req),
    .mwait_target (mwait_target),
    .irq          (irq),
    .snp_pending  (snp_pending),
    .zones_all_on (zones_all_on),
    .ufpg_clk_en  (ufpg_clk_en),
    .l1l2_clk_en  (l1l2_clk_en),
    .l1l2_sleep   (l1l2_sleep),
    .l1l2_awake   (l1l2_awake),
    .srpg_ret     (srpg_ret),
    .iso_en       (iso_en),
    .zones_pwr_req(zones_pwr_req),
    .dvfs_pn_req  (dvfs_pn_req),
    .cstate       (cstate),
    .state        (pm_state)
  );

  pg_stagger_seq #(.NUM_ZONES(NUM_ZONES), .STAGGER_CYC(STAGGER_CYC)) u_seq (
    .clk     (pma_clk),
    .rst_n   (rst_n),
    .pwr_req (zones_pwr_req),
    .zone_on (zone_on),
    .slp_zone(slp_zone),
    .all_on  (zones_all_on)
  );

  snoop_detector #(.DEPTH(SNP_DEPTH), .PW(SNP_PW)) u_snoop (
    .clk        (pma_clk),
    .rst_n      (rst_n),
    .snp_valid  (snp_valid),
    .snp_ready  (snp_ready),
    .snp_payload(snp_payload),
    .l1l2_awake (l1l2_awake),
    .fwd_valid  (fwd_valid),
    .fwd_ready  (fwd_ready),
    .fwd_payload(fwd_payload),
    .snp_done   (snp_done),
    .pending    (snp_pending)
  );

  clk_gate u_cg_ufpg (
    .clk    (core_clk),
    .rst_n  (rst_n),
    .en     (ufpg_clk_en),
    .en_sync(ufpg_en_sync),
    .gclk   (ufpg_clk)
  );

  clk_gate u_cg_l1l2 (
    .clk    (core_clk),
    .rst_n  (rst_n),
    .en     (l1l2_clk_en),
    .en_sync(l1l2_en_sync),
    .gclk   (l1l2_clk)
  );

  assign l1l2_slp_setting = l1l2_sleep ? slp_setting_cfg : 3'd0;

  // ---- context storage of the UFPG units ----
  logic [W-1:0] zone_rdata [NUM_ZONES];

  for (genvar z = 0; z < NUM_ZONES; z++) begin : g_zone
    pg_state_e zst;
    ufpg_zone #(
      .WORDS(ZONE_WORDS), .W(W), .N_CELLS(N_CELLS), .CELL_DELAY_PS(CELL_DELAY_PS)
    ) u_zone (
      .pma_clk  (pma_clk),
      .rst_n    (rst_n),
      .slp_zone (slp_zone[z]),
      .zone_on  (zone_on[z]),
      .zone_off (zone_off[z]),
      .pg_state (zst),
      .ret      (srpg_ret),
      .iso      (iso_en),
      .unit_clk (ufpg_clk),
      .ctx_we   (ctx_we && ctx_sel == 3'(z)),
      .ctx_addr (ctx_addr[ZAW-1:0]),
      .ctx_wdata(ctx_wdata),
      .ctx_rdata(zone_rdata[z]),
      .pwr_good (zone_pwr_good[z])
    );
  end

  logic [W-1:0] ung_rdata, ucode_rdata;

  ungated_ctx_regs #(.WORDS(UNGATED_WORDS), .W(W)) u_ungated (
    .clk  (ufpg_clk),
    .rst_n(rst_n),
    .iso  (iso_en),
    .we   (ctx_we && ctx_sel == 3'(NUM_ZONES)),
    .addr (ctx_addr[GAW-1:0]),
    .wdata(ctx_wdata),
    .rdata(ung_rdata)
  );

  ucode_patch_sram #(.WORDS(UCODE_WORDS), .W(W)) u_ucode (
    .clk  (ufpg_clk),
    .iso  (iso_en),
    .en   ((ctx_we || ctx_re) && ctx_sel == 3'(NUM_ZONES + 1)),
    .we   (ctx_we),
    .addr (ctx_addr[UAW-1:0]),
    .wdata(ctx_wdata),
    .rdata(ucode_rdata)
  );

  // Registered read return, aligned with the SRAM's one-cycle read.
  logic [W-1:0] rdata_q;
  logic [2:0]   sel_q;
  always_ff @(posedge ufpg_clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata_q <= '0;
      sel_q   <= '0;
    end else if (ctx_re) begin
      sel_q   <= ctx_sel;
      rdata_q <= (ctx_sel < 3'(NUM_ZONES)) ? zone_rdata[ctx_sel] : ung_rdata;
    end
  end
  assign ctx_rdata = (sel_q == 3'(NUM_ZONES + 1)) ? ucode_rdata : rdata_q;

endmodule
