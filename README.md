# AgileWatts core idle-state power management (C6A / C6AE)

Server cores that run latency-critical services are idle often, but only for microseconds at a
time. A classic deep idle state (C6) saves its power by flushing the caches, saving the whole core
context to an external SRAM and switching off the core supply. That takes tens of microseconds
to enter and to leave. A shallow state (C1) wakes quickly but saves little power.

This RTL gives a deep idle state, C6A, that enters in about 16 ns and leaves in under 100 ns.
Three ideas make this possible:

* **Fast power-gating of the core units (UFPG).** The units are split into five power-gate
  zones. Their context stays in place: it is held either in state-retention (SRPG) flops or in
  registers and a small microcode-patch SRAM on the ungated supply. Nothing is copied out, so the
  cost of saving and restoring is a single Ret edge.
* **Clock-gated caches in sleep mode (CCSM).** The L1/L2 caches are not flushed. Their clock is
  stopped and their arrays drop to a retention voltage. An always-on snoop detector wakes them
  for just long enough to answer coherence snoops.
* **Staggered wake-up.** The five zones power up one after another, 14 ns apart. This limits
  the inrush current.

C6AE is C6A plus a request to the DVFS controller to move the core to its lowest voltage and
frequency point (Pn). The request does not block: entry proceeds at once.

## The power-management FSM (`c6a_controller`)

The FSM runs on the always-on 500 MHz power-management clock. Each output is registered from the
next-state decode, so an output changes on the same edge as the state.

| Step | States | Action |
|------|--------|--------|
| 1 | E1_CG, E1_CG2 | Gate the UFPG clock (the PLL stays on). Two cycles let the clock gate settle. |
| 2 | E2_RET, E2_ISO, E2_PG | Raise Ret (save), then isolation, then drop the zone supplies. Power-down waits while a snoop is pending. |
| 3 | E3_SLEEP, E3_CG | Put L1/L2 into sleep, then gate their clock. |
| idle | IDLE | C6A or C6AE. |
| a | SA_CG, SA_WAKE | On a snoop: ungate the cache clock, leave sleep (2 cycles). |
| b | SB_SNOOP | Serve the snoops. An interrupt here goes straight to step 5. |
| c | SC_SLEEP, SC_CG | Back to sleep, gate the clock, return to IDLE. |
| 4 | X4_CG, X4_WAKE | Ungate L1/L2 and leave sleep. |
| 5 | X5_PWRUP, X5_RESTORE | Staggered zone power-up, then drop isolation and Ret (restore). |
| 6 | X6_CG | Ungate the UFPG clock and return to C0. |

Assertions check three rules:

* Ret is high whenever the zones are unpowered.
* The UFPG clock is off while Ret is high.
* The caches never sleep with their clock running.

## Zones, switch chains and staggering

Each `ufpg_zone` contains three parts:

* a local controller, `pg_zone_ctrl`;
* a chain of switch cells, `pg_switch_chain`;
* 256 words of 32-bit SRPG context, `srpg_reg`.

The controller drives `slp` into the first switch cell. The signal ripples through 9 cells of
1.5 ns each, and the last cell's output returns as the ready/ack. The ack is brought onto the
PMA clock by two flops. A request that arrives mid-transition is held until the chain has
settled.

`pg_stagger_seq` turns the FSM's single power request into the five `SlpZone` signals:

* **Power-down:** all five zones drop together.
* **Power-up:** zones are released in order, one every 7 PMA cycles (14 ns).

The zone delay of 13.5 ns and the 14 ns stagger are this design's own choices. They keep each zone
under 15 ns, with the staggered total close to 4.5 zone delays.

## Context retention

* **`srpg_reg`** is a behavioural model of a retention flop. Its shadow latch follows the main
  flop while Ret is low.
  * When power drops with Ret high, the main flop reads as lost (0xAAAA_AAAA) and the shadow
    keeps the value.
  * When Ret falls after power returns, the shadow value comes back.
  * When power drops without Ret, the content is lost.
* **`ungated_ctx_regs`** holds context registers on the ungated supply. While isolation is set,
  writes coming from a gated unit are blocked.
* **`ucode_patch_sram`** is the 2 KB (512 × 32) microcode patch store. Reads are registered.
  It does nothing while isolated.

## Snoops while asleep (`snoop_detector`)

The detector queues snoops in a 4-entry FIFO. When the FIFO is full it back-pressures the sender.

* Snoops are forwarded only while the FSM reports the caches awake.
* An outstanding counter keeps `pending` high until the cache reports every forwarded snoop as
  done.
* `pending` wakes the FSM, and also holds off zone power-down during entry.

## Top level (`aw_core_pm`)

The top instantiates these blocks:

* the FSM;
* the stagger sequencer;
* five zones;
* the ungated registers;
* the microcode patch SRAM;
* the snoop detector;
* two clock gates, `clk_gate`, for the UFPG clock and the L1/L2 clock.

The core clock is an input. The caches, the core units, the PLL, the voltage regulator and the
DVFS controller are outside the design; their signals are ports.

The context port (`ctx_sel`, `ctx_addr`, `ctx_we`, `ctx_re`, `ctx_wdata`, `ctx_rdata`) runs on
the gated UFPG clock and stands in for the units' own register accesses. Reads are registered.

| `ctx_sel` | Target |
|-----------|--------|
| 0–4 | zone 0–4 SRPG context (256 words each) |
| 5 | ungated registers (256 words) |
| 6 | microcode patch SRAM (512 words) |

`l1l2_slp_setting` presents the programmed sleep level `slp_setting_cfg` while the caches sleep,
and 0 otherwise.

## Latencies and departures from the published figures

* **Entry** takes 8 PMA cycles (16 ns), inside the budget of under 10 cycles.
* **Exit**, from interrupt to C0, measures 91 ns in simulation. The target was under 80 ns
  (about 5 cycles plus under 70 ns of staggered power-up). The extra 11 ns comes from three
  sources:
  * the 2-flop synchronisers on each zone's ack;
  * the registered FSM outputs;
  * the 14 ns stagger.

  Shortening any of these brings the exit under 80 ns.
* **Switch cells and SRPG flops** are behavioural models with delays. They are not sign-off
  circuits.
* **Sizes are assumptions:** the 256-word zone context, the 4-entry snoop queue, 9 cells per
  zone and 7 cycles of stagger.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/aw_pkg.sv tb/tb_aw_core_pm.sv --top-module tb_aw_core_pm
./obj_dir/Vtb_aw_core_pm
```

`tb_aw_core_pm` runs the whole design at its default sizes and counts each mechanism:

* C6A and C6AE entry;
* snoop wake-up;
* queue back-pressure;
* an interrupt during snoop service;
* staggered release;
* two exits.

It verifies all 8 KB of context after each exit.

There is no stand-alone testbench for `ufpg_zone`; it is exercised through the top-level test.

## Files

* **Package:** `rtl/aw_pkg.sv` holds the shared types.
* **Blocks:**
  * `c6a_controller`
  * `pg_stagger_seq`
  * `pg_zone_ctrl`
  * `pg_switch_chain`
  * `srpg_reg`
  * `ufpg_zone`
  * `ungated_ctx_regs`
  * `ucode_patch_sram`
  * `snoop_detector`
  * `clk_gate`
  * `aw_core_pm` (top)
* **Testbenches:** `tb/tb_<module>.sv`.
