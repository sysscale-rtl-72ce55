# SysScale: a multi-domain DVFS controller for a mobile SoC

A mobile processor chip has three power domains. The **compute domain**
holds the CPU cores, the graphics engines and the last-level cache (LLC). The
**IO domain** holds the display controller, the camera pipeline (ISP) and the
IO interconnect. The **memory domain** holds the memory controller (MC), the
DRAM interface (DDRIO) and the DRAM. Under a fixed thermal design power (TDP),
every milliwatt the IO and memory domains burn is one the cores and graphics
cannot use.

Conventional chips scale voltage and frequency (DVFS) only in the compute
domain. They keep the IO interconnect and memory at a point sized for the
worst-case bandwidth, and most workloads never need that.

SysScale scales the IO interconnect and the whole memory subsystem together.
It moves them to a lower-performance point whenever the workload and the
attached peripherals allow it, and hands the power saved back to the compute
domain. Three difficulties make this more than "turn a clock down":

1. **Knowing when it is safe.** The controller needs to know when the lower
   point would cost performance. It combines a *static* demand with *dynamic*
   demand signals:
   - The static demand comes from the peripherals. It is known from the
     display and camera configuration.
   - The dynamic demand comes from four performance counters that expose
     bandwidth and latency pressure.
2. **Changing the memory clock without losing data or timing margin.** DRAM
   must be quiescent while its clock changes. The DRAM interface must also get
   electrical settings (MRC values) trained for the new frequency, otherwise
   it runs on margins meant for another speed.
3. **Keeping the transition short.** The flow blocks traffic, so it must be
   fast: well under 10 µs.

This RTL implements the controller in hardware:
- the counters;
- the sampling and the decision;
- the nine-step transition sequencer;
- the MRC register store and loader;
- block-and-drain gates on the two request paths into the memory controller;
- the power-budget split.

The regulators, PLLs, DRAM, memory controller and the compute-domain budget
manager are outside it. They connect through ports.

All blocks share one clock, assumed to be a 100 MHz power-management clock.
All cycle counts below are at that rate.

## Operating points

Two points are built (`sysscale_pkg::default_op`). Index 0 is always the
highest-performance point.

| point | DRAM data rate | MC clock | IO interconnect | V_SA | V_IO |
|---|---|---|---|---|---|
| 0 (high) | 1600 MHz (LPDDR3-1600) | 800 MHz | 800 MHz | 500 mV | 667 mV |
| 1 (low)  | 1066 MHz | 533 MHz | 400 MHz | 400 mV | 567 mV |

- **V_SA** is the shared "system agent" rail. It feeds the IO interconnect
  and the memory controller.
- **V_IO** feeds the digital part of the DRAM interface.
- The DRAM's own rail (VDDQ) is not scaled: the DRAM standard fixes it.

The low point scales V_SA by 0.8 and V_IO by 0.85. Both rails also swing by
about 100 mV. Absolute nominal voltages are not published, so this design
chose 500 mV and 667 mV, the values that make both statements true.

The predictor, the flow and the budget block are all written for `NUM_OP`
points. To add a point (for example LPDDR3 at 800 MHz), you need to:
- raise `NUM_OP` in the package;
- extend `default_op`;
- supply one threshold set per boundary between adjacent points.

## Predicting demand

### The four counters (`sysscale_perf_counters`)

| counter | adds per cycle | high value means |
|---|---|---|
| GFX_LLC_MISSES | graphics LLC misses (0–3) | graphics is memory-bandwidth bound |
| LLC_Occupancy_Tracer | CPU requests now waiting on the MC (0–63) | cores are memory-bandwidth bound |
| LLC_STALLS | 1 if a request stalled on a busy LLC | memory latency is the bottleneck |
| IO_RPQ | 1 if IO stalled on a full read pending queue | IO latency is the bottleneck |

The occupancy counter integrates queue depth over time: its count divided by
the window length is the average number of requests waiting.

A one-cycle `sample` pulse does three things:
- copies the four counts out;
- includes the events of that same cycle in the closing window and starts
  the next window at zero, so no event is lost or counted twice;
- raises `sample_valid` on the next cycle.

All counters saturate instead of wrapping.

### Sampling and the evaluation interval (`sysscale_eval_sampler`)

A timer pulses `sample` every `SAMPLE_CYCLES` = 100,000 cycles (1 ms). The
sampler sums a number of samples that firmware sets, 30 after reset, which
gives one 30 ms evaluation interval. It then presents the sums with an
`eval_valid` pulse, together with `n_o`, the number of samples they cover.

At the top the interval length is a register (`eval_we`, `eval_wdata`,
1–255 samples; 0 counts as 1). A new value takes effect in the running
interval. If it is shorter than the samples already summed, the interval
ends at the next sample. `n_o` always tells the truth.

The decision is meant to use the *average* of each counter. Division is
avoided: the predictor compares `sum > threshold × n_o`, which is the same
test. Because the sampler reports `n_o`, the thresholds stay valid when the
interval length changes.

### Static demand (`sysscale_static_demand`)

The bandwidth that displays and cameras need follows from their
configuration. This design encodes the configuration in 8 bits:
- number of displays (0–3) and a resolution class (HD, FHD, QHD, 4K);
- refresh rate (60 or 120 Hz);
- number of cameras (0–3) and a camera resolution class.

The 8 bits index a 256-entry table of MB/s values. Firmware writes the table.
The testbenches fill it with

    displays × width × height × refresh × 4 bytes + cameras × pixels × 30 fps × 2 bytes

Example: three 4K panels at 60 Hz need 5971 MB/s.

The lookup is registered, so it takes one cycle.

### The decision (`sysscale_demand_predictor`)

At every evaluation the predictor tests five conditions against the
thresholds of a boundary between two adjacent points:

    static_bw                 > STATIC_BW_THR
    GFX_LLC_MISSES  sum       > GFX_THR  × N
    LLC_Occupancy   sum       > Core_THR × N
    LLC_STALLS      sum       > LAT_THR  × N
    IO_RPQ          sum       > IO_THR   × N

where N is the number of samples in the sums (30 by default).

Two cases:
- **Any condition holds.** The SoC moves up one point, or stays at point 0.
  The conditions are tested against the boundary *above* the current point.
- **No condition holds.** The SoC moves down one point, or stays at the lowest.
  The conditions are tested against the boundary *below* the current point.

There is no hysteresis beyond the evaluation interval itself.

Thresholds are inputs (`thr[k]` for the boundary between points k and k+1).
They are meant to be fitted offline per boundary. The intended rule takes
the runs whose slowdown at the lower point stays within a small bound (about
1%), and sets each threshold to the mean plus one standard deviation of that
counter over those runs.

With `enable` low (SysScale off), the target is always point 0. The sampler is
kept running until point 0 is reached, then stops.

`decision_valid` pulses one cycle after `eval_valid` and carries `target_op`
and the five condition flags.

## The transition (`sysscale_pm_flow`)

This is the heart of the design and its most delicate part. A transition
runs these states (the state number equals the step number):

| # | state | action | leaves when |
|---|---|---|---|
| 1 | IDLE | wait for a decision that changes the point | new or held decision for a different point, with `dram_active` |
| 2 | V_UP | raise V_SA and V_IO to the new point (upward moves only) | `vr_ack` |
| 3 | DRAIN | block the IO→MC and LLC→MC paths | `drained` from both gates |
| 4 | SR_ENTER | put DRAM in self-refresh | `dram_sr_ack` high |
| 5 | MRC | copy the new point's MRC values into MC/DDRIO/DRAM registers | `mrc_done` |
| 6 | RELOCK | present the new DRAM, MC and interconnect frequencies; relock PLL/DLLs | `pll_ack` |
| 7 | V_DOWN | lower V_SA and V_IO (downward moves only) | `vr_ack` |
| 8 | SR_EXIT | take DRAM out of self-refresh | `dram_sr_ack` low |
| 9 | RELEASE | unblock traffic, commit the new point | next cycle |

The key ordering rule: **voltage goes up before frequency rises, and down
only after frequency has fallen.** Logic is therefore never clocked faster
than its rail supports.

The rest of the order has three guarantees:
- Nothing reaches the memory controller while DRAM is in self-refresh.
- The clocks change only while DRAM is in self-refresh.
- The MRC values are already in place when DRAM leaves self-refresh.

Two assertions hold the first two guarantees:
- `dram_sr_req` implies `block_req`;
- `pll_req` implies `dram_sr_req`.

Handshakes (this design's choice):
- **Regulators and PLL/DLLs:** request/acknowledge. `vr_req` and `pll_req`
  are held with stable targets until acknowledged.
- **Block and self-refresh:** levels. `block_req` is high in steps 3–8, and
  `dram_sr_req` is high in steps 4–7. The acknowledge follows the level.
- **MRC:** `mrc_start` is a one-cycle pulse that starts the loader, and
  `mrc_done` ends step 5.

Transitions start only while `dram_active` is high. In deep package
C-states DRAM is already in self-refresh, so SysScale acts only while it is
active (C0 and C2). A decision that arrives while DRAM sleeps is not
dropped: it is held (`held` high, `flow_held` at the top) and carried out
the moment DRAM is active again. A newer decision replaces a held one, and
a decision for the current point cancels it. This matters for workloads
like video playback, which spend most of each frame with DRAM in
self-refresh: a decision would otherwise be lost most of the time.

**Budget ordering.** `budget_op` tells the budget block which point's IO and
memory budgets apply:
- **Upward moves:** IO and memory receive their larger budget at the start.
- **Downward moves:** IO and memory give their budget back only at the end.

As a result, the three budgets never add up to more than the TDP during a
transition.

`trans_count` counts completed transitions. `last_latency` holds the length
of the last one in cycles, from leaving IDLE to returning to it.

### Latency

The contributions to a transition:

| part | cost |
|---|---|
| regulator slew | ~100 mV at 50 mV/µs ≈ 2 µs |
| drain | < 1 µs |
| self-refresh exit | < 5 µs (modelled as 4.5 µs) |
| MRC load | 66 cycles = 0.66 µs |
| sequencer | 8 cycles |

The end-to-end test measures 805–870 cycles per transition, which is
8.1–8.7 µs. It fails any transition of 10 µs or more.

## Block and drain (`sysscale_block_drain`)

One gate sits on each request path into the memory controller: one for the
IO interconnect and one for the LLC.

Each gate is a valid/ready pass-through with a counter of requests in flight:
- +1 for each request accepted downstream;
- −1 for each completion reported back;
- up to 63 requests in flight (`OUTST_W` = 6).

While `block` is high, the gate holds `dst_valid` and `src_ready` low in the
same cycle. A request that has not been accepted therefore waits at its
source. `drained` rises once nothing is in flight.

The top ANDs the two `drained` outputs. Forgetting either path lets LLC or IO
traffic hit DRAM in self-refresh. The end-to-end test checks for this with
its DRAM model.

## MRC reload (`sysscale_mrc_sram`, `sysscale_mrc_loader`)

At boot, memory training computes interface settings for every supported
frequency. The results are written into a 2 × 64 × 32-bit SRAM, which is
512 bytes. Row `op × 64 + r` holds register r of point op.

On `start` the loader reads the 64 words of the target point in a pipeline.
It writes one register per cycle on the `cr_we/cr_addr/cr_data` bus, and
`done` pulses with the last write. From `start` to `done` takes
`NUM_CR` + 2 = 66 cycles.

Which register index belongs to the MC, the DDRIO or the DRAM mode registers
is left to the receiving units.

## Power-budget redistribution (`sysscale_budget`)

    io_budget      = io_budget_tbl[budget_op]
    mem_budget     = mem_budget_tbl[budget_op]
    compute_budget = max(0, TDP − io_budget − mem_budget)

All values are in mW, with 17 bits (up to 131 W). The outputs are registered.
`changed` pulses when the compute budget moves.

The compute-domain budget manager is not part of this design. It takes
`compute_budget_mw` and divides it between cores and graphics by choosing
their P-states.

The per-point budgets are firmware values. The testbenches use a 4.5 W TDP,
with IO budgets of 600/450 mW and memory budgets of 900/650 mW.

## Where this design departs from, or adds to, the published scheme

- **Prediction in hardware.** The original scheme runs prediction and the
  decision in power-management firmware. It notes that hardware would also
  work. This design does it in hardware. Thresholds, the static table,
  budgets and the enable remain firmware-written inputs.
- **Operating-point table.** It is a package constant (`default_op`), not
  writable registers.
- **Clock frequency.** The clock, and so the 100,000-cycle sample period, is
  assumed.
- **Handshakes.** The widths, encodings and handshakes of every port are this
  design's own. This includes the counter widths, the 8-bit peripheral
  configuration encoding, the valid/ready gate protocol and the MRC register
  bus.
- **Voltages.** The absolute voltages are chosen as explained above.
- **One SRAM.** A single MRC SRAM and loader serve the MC, DDRIO and DRAM.
  The alternative would be one store per unit.
- **Decision rule.** One step per decision and the same thresholds for up and
  down moves are this design's reading of the adjacent-point rule.
- **Held decisions.** A decision made while DRAM is in self-refresh waits
  for DRAM to be active rather than being discarded.
- **Budget timing.** The ordering of the budget hand-over during a
  transition is this design's.
- **Self-refresh exit.** The DRAM leaves self-refresh after the voltages are
  lowered (steps 7 then 8). This follows the published step order.

## Verification

Each block has a self-checking testbench in `tb/`. Each testbench compares the
block with a reference model written independently in the testbench. Each
ends with a `TB_RESULT checks=… failures=…` line and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sysscale_perf_counters` | counts against a model with random events, saturation, no lost event at the sample edge |
| `tb_sysscale_eval_sampler` | sample period in cycles, sums, interval length changed between and within intervals, enable clear |
| `tb_sysscale_static_demand` | table writes and registered lookups for all 256 configurations |
| `tb_sysscale_demand_predictor` | 2000 random decisions against a model, threshold edges, random sample counts |
| `tb_sysscale_mrc_sram` | write/read of all words |
| `tb_sysscale_mrc_loader` | every register value, order, the 66-cycle latency |
| `tb_sysscale_block_drain` | random traffic: blocking, counting, `drained`, back-pressure |
| `tb_sysscale_budget` | random tables, clamping at zero, 91 W TDP |
| `tb_sysscale_pm_flow` | step order for up and down moves, handshakes, held requests, < 10 µs |
| `tb_sysscale_top` | end to end at full size (see below) |
| `tb_sysscale_workloads` | nine workload profiles through the whole controller (see below) |

**Behavioural models.** `tb_vr_model`, `tb_pll_model` and `tb_dram_sr_model`
stand in for the regulators (50 mV/µs slew), the PLL/DLLs (50-cycle lock) and
the DRAM. The DRAM model takes 20 cycles to enter self-refresh and 450 to
exit. It flags any request or completion seen while in self-refresh.

**`tb_sysscale_top`.** It runs the whole controller with default parameters,
through 13 evaluation intervals of 30 ms: about 39 million cycles, under a
minute in Verilator. It drives workload phases that make each
mechanism happen:
- a step down;
- a step up through each of the five conditions separately;
- a decision held while DRAM is inactive and carried out when it wakes;
- a return to point 0 when SysScale is switched off;
- requests stalled by the block;
- drains with requests in flight;
- MRC reloads;
- budget moves.

It fails any mechanism that never happens. It also checks each transition
for:
- the final point;
- clocks and rail targets;
- all 64 configuration registers;
- the budget arithmetic;
- traffic during self-refresh;
- latency.

**`tb_sysscale_workloads`.** It runs the whole controller through nine
workload profiles, with time scaled by 1/10 (a 10,000-cycle sample). Each
profile runs for three evaluation intervals.

| profile | DRAM active | expected point | deciding condition |
|---|---|---|---|
| compute-bound CPU | 100% | low | none |
| memory-bandwidth-bound CPU | 100% | high | LLC occupancy |
| video playback | 15% (C0 10%, C2 5%, C8 85%) | low | none |
| memory-latency-bound CPU | 100% | high | LLC stalls |
| video conferencing (display + camera) | 40% | low | none |
| 3D graphics | 100% | high | graphics misses |
| light gaming | 40% | low | none |
| docked, three 4K panels | 100% | high | static demand |
| web browsing | 30% | low | none |

DRAM is active at the end of each 30 fps frame, and no events or requests
occur while it sleeps. The event rates are illustrative and set well clear of
the thresholds, so the right point is known in advance. The test checks:
- every decision and the condition behind it;
- the final point, the MRC registers and the compute budget;
- low-point residency: at least 85% for the low profiles. About 95% is
  measured; the rest is the wait until DRAM wakes or the first interval.

At the end, firmware shortens the evaluation interval to 10 samples, and the
test checks the spacing of the next decisions.

It reports each profile's mean compute budget: 3380–3400 mW at the low point
against 3000 mW at the high point, with the example budgets above. It also
requires at least one decision held while DRAM slept, and checks that every
transition started with DRAM active.

**How far to trust it.** The control logic is checked thoroughly against the
published sequence and against reference models. The parts that would matter
on silicon are the regulator, PLL and DRAM timing and the MC's self-refresh
handshake. These are only modelled, with the published latencies. The
thresholds and budgets used in the tests are illustrative, not fitted to real
workloads.

## Simulating and changing it

Use Verilator 5. Every file in `rtl/` and `tb/` holds one module or package,
named as the file. For example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/sysscale_pkg.sv tb/tb_sysscale_top.sv --top-module tb_sysscale_top -Mdir obj
    ./obj/Vtb_sysscale_top

Replace `tb_sysscale_top` with any other testbench name. The models are found
through `-y tb`.

Things to change, and where:
- **Clock rate.** Scale `SAMPLE_CYCLES` to keep the 1 ms sample.
- **Evaluation interval.** Write `eval_wdata` at run time, or change the
  reset value `SAMPLES_PER_EVAL`.
- **Number of MRC registers.** Change `NUM_CR`.
- **Data-path widths.** Change `IO_DW` and `LLC_DW`.
- **Operating points.** Edit `default_op`, and `NUM_OP` for more points, in
  `rtl/sysscale_pkg.sv`.
