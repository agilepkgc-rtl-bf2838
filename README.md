# PC1A: a nanosecond package idle state for server SoCs — power-management RTL

Latency-critical datacenter services run servers at 5–20 % load, so all cores
are often idle at the same time. The idle periods are short, though: tens to a few
hundred microseconds. Existing deep package idle states such as PC6 need all
cores in CC6 and take more than 50 µs to enter and leave. Operators therefore
disable them. The uncore (last-level cache, mesh, IO links) and the DRAM then
stay fully powered whenever all cores sit in the shallow core state CC1.

AgilePkgC (APC, Antoniou et al.) adds one package state, **PC1A**. The package
may enter it as soon as every core is in CC1. It uses only power modes that wake
within tens of nanoseconds:

| domain              | PC0 (active) | PC1A                               | PC6 (for comparison)  |
|---------------------|--------------|------------------------------------|-----------------------|
| cores               | ≥1 in CC0    | all in CC1                          | all in CC6            |
| PCIe / DMI links    | L0           | L0s (lanes asleep)                  | L1                    |
| UPI links           | L0           | L0p (half the lanes asleep)         | L1                    |
| DRAM                | available    | CKE power-down                      | self-refresh          |
| CLM (CHA, LLC, mesh)| accessible   | clock-gated, voltage at retention   | retention             |
| PLLs                | on           | **on**                              | off                   |

Keeping the PLLs locked avoids microseconds of relock time. Every other step is
driven by dedicated wires from a small hardware state machine, the **APMU**
(agile power management unit), not by firmware. Entry followed directly by exit
takes under 200 ns. The estimated package power is 27.5 W instead of 44 W with
all cores in CC1, and DRAM power is 1.6 W instead of 5.5 W.

This repository holds SystemVerilog for the logic that makes PC1A work: the
APMU, the status aggregation, and the small hooks added to the IO controllers,
memory controllers, CLM voltage regulators and CLM clock tree. It is sized for
the reference SoC: a 10-core Skylake-SP part with 3 PCIe, 1 DMI and 2 UPI links,
two memory controllers with three DDR4 channels each, and two CLM regulators.

## Block diagram

```
 core_in_cc1[4:0] ─► status_and_tree ─┐                 ┌─► allow_l0s ─► io_pm_ctrl x6 ─► io_in_l0s[5:0]
 core_in_cc1[9:5] ─► status_and_tree ─┤                 │                  (UPI0, UPI1, PCIe0 | DMI, PCIe1, PCIe2)
                                      ├─► in_cc1_grp    │                          │
 io_in_l0s[2:0]   ─► status_and_tree ─┤                 │                          ▼
 io_in_l0s[5:3]   ─► status_and_tree ─┴─► in_l0s_grp ─► APMU ─► allow_cke_off ─► mc_cke_ctrl x2 ─► CKE x3 each
 gpmu_wakeup ────────────────────────────────────────►  (FSM) ─► ret ─────────► fivr_fcm x2 ─► VID codes
 clm_pwr_ok (AND of both regulators) ◄──────────────────      ─► clk_gate ────► clm_clk_gate ─► gclk_clm
                                                             ─► in_pc1a ─────► to the global PMU
```

`apc_top` holds all of this. Cores, the firmware global PMU (GPMU), link data
paths and PHYs, memory controller scheduling, DRAM, regulator power stages and
PLLs are outside it. Their signals are ports of `apc_top`.

## The APMU flow

The APMU is a Moore machine with five states. It runs on the 500 MHz
power-management clock that it shares with the GPMU. All its outputs come from
the state register, so they change only on a clock edge and carry no glitches.

| state   | AllowL0s | ClkGate | Allow_CKE_OFF | Ret | InPC1A | leaves when                                                   |
|---------|:--------:|:-------:|:-------------:|:---:|:------:|---------------------------------------------------------------|
| `PC0`   | 0        | 0       | 0             | 0   | 0      | all cores in CC1 → `ACC1`                                     |
| `ACC1`  | 1        | 0       | 0             | 0   | 0      | a core left CC1 → `PC0`; else all links in L0s and no WakeUp → `ENTRY` |
| `ENTRY` | 1        | 1       | 1             | 0   | 0      | next cycle: `PC1A`, or `EXIT` if a wakeup event is present    |
| `PC1A`  | 1        | 1       | 1             | 1   | 1      | wakeup event → `EXIT`                                         |
| `EXIT`  | 1        | 1       | 0             | 0   | 1      | PwrOk → `ACC1`                                                |

**Two concurrent branches.** Entering and leaving PC1A touches two independent
things. One is the CLM: its clock, then its voltage. The other is the memory
controllers. On entry the CLM clock gate and Allow_CKE_OFF are set in the same
cycle (`ENTRY`), and Ret follows one cycle later. Gating the clock before the
voltage drops means the CLM is never clocked at a voltage it cannot run at. The
APMU does not wait for the voltage to reach retention: the ramp is non-blocking.
On exit, Ret and Allow_CKE_OFF are both cleared in the first cycle. The CLM clock
is restored only after the regulators report PwrOk. The DRAM (24 ns) and the
links (64 ns at most) are back well before the voltage (150 ns), so PwrOk is the
only thing the exit waits for.

**What counts as a wakeup event.** There are three:
- the GPMU's WakeUp input (interrupt, timer, thermal event);
- any InL0s group going low, because traffic arrived on a link;
- as a safeguard, any InCC1 group going low.

A link starts waking itself at the same moment it drops InL0s. The package exit
and the link exit therefore overlap.

**Returning to PC0.** A wakeup leaves the package in ACC1, with AllowL0s still
set. If the wakeup was a core interrupt, the core leaves CC1. InCC1 falls and the
APMU goes to PC0, which clears AllowL0s and brings every link back to L0. If the
wakeup was only IO traffic or a timer, the cores are still in CC1. The package
then goes back into PC1A once the links are idle again. ACC1 does not start an
entry while WakeUp is high, so a wakeup that the GPMU is still handling cannot
bounce the package straight back into PC1A.

**Wakeup during entry or during the ramp.** A wakeup seen in `ENTRY` goes
straight to `EXIT`. Ret was never set, so PwrOk is already high and the exit
takes one cycle. A wakeup after Ret has been set but before the voltage has
reached retention reverses the regulator ramp where it stands. The exit then
costs only as many steps as the voltage had fallen.

## Timing budget (500 MHz, 2 ns per cycle)

| step                                                | cycles | ns    | source of the number                     |
|-----------------------------------------------------|-------:|------:|------------------------------------------|
| link idle → L0s (entry latency = ¼ of 64 ns exit)   | 8      | 16    | L0S_ENTRY_LAT override                    |
| last InL0s → ClkGate + Allow_CKE_OFF                | 1      | 2     | APMU                                      |
| → Ret + InPC1A                                      | 1      | 2     | APMU                                      |
| **entry, from the last link going idle**            | **10** | **20**|                                           |
| DRAM CKE low (non-blocking)                         | 5      | 10    | mc_cke_ctrl                               |
| CLM 0.8 V → 0.5 V at 2 mV/ns (non-blocking)         | 75     | 150   | fivr_fcm                                  |
| wakeup → Ret and Allow_CKE_OFF cleared              | 1      | 2     | APMU                                      |
| CLM 0.5 V → 0.8 V, PwrOk                            | 75     | 150   | fivr_fcm                                  |
| → clock ungated, InPC1A cleared, ACC1               | 1      | 2     | APMU                                      |
| **exit from full retention**                        | **~77**| **~154** |                                        |
| **entry + exit**                                    | **~87**| **~174** | budget: 200 ns                         |

The published estimate is about 18 ns for entry and at most 150 ns for exit.
This RTL spends one more cycle on entry because it sets Ret one step after the
clock gate. It spends about two more cycles on exit because it counts the APMU
cycles on top of the voltage ramp. The sum stays within the 200 ns that the
architecture budgets. In the trace simulation below, the longest measured entry
plus exit is 88 cycles (176 ns), within a cycle of the table's sum. It is
measured from the cycle in which the last link goes idle to the return to ACC1.

## The hooks in the other units

**`io_pm_ctrl` — link power management of one IO controller.** Servers normally
keep ASPM (link power management) off. AllowL0s overrides that register bit
while the cores are idle. It also forces the short L0s entry latency: a quarter
of the exit latency instead of the register's value. With the register bit at
0, this model uses half the exit latency. The link enters its low-power state
after that many idle cycles. PCIe and DMI links go to L0s and sleep all lanes.
UPI links go to L0p and keep half their lanes awake. InL0s is high only in the
low-power state. It falls in the cycle after `link_active` rises, and the link is
ready again `EXIT_CYC` cycles (64 ns, or 10 ns for L0p) after the traffic
appeared. A port with no device attached (`dev_present` low) counts as deeper
than L1. It reports InL0s all the time, so an empty slot never holds the package
out of PC1A. Only the three link states that matter here are modelled. The real
link training state machine is much larger.

**`mc_cke_ctrl` — CKE power-down of one memory controller.** Allow_CKE_OFF
overrides the controller's "CKE always on" register. A channel drops CKE 5
cycles (10 ns) after it becomes idle. It never drops CKE while a transaction is
queued or in flight. Clearing Allow_CKE_OFF, or a request to that channel, raises
CKE at once. The channel accepts commands again 12 cycles (24 ns) later. This
model gives each channel one CKE; real DDR4 has one per rank.

**`fivr_fcm` — control module of one CLM regulator.** It has an 8-bit
retention-VID register beside the operating VID. Ret selects between the two. The
VID code sent to the power stage moves one LSB per `STEP_CYC` cycles toward the
selected target. With 4 mV per LSB and one step per cycle, that is the 2 mV/ns
slew of the regulator. A new target takes effect mid-ramp (preemptive voltage
commands). PwrOk is `!ret && vid_out == VID`, meaning "back at the operating
voltage". The 4 mV VID scale is this design's choice.

**`clm_clk_gate` — the CLM clock-tree gate.** ClkGate comes from the APMU
domain. It passes a 2-flop synchroniser on the CLM clock, then an enable flop on
the falling edge that is ANDed with the clock. This is a flop-based integrated
clock gate, so the clock tree stops and restarts without a shortened pulse. The
CLM PLL keeps running throughout.

**`status_and_tree` — InCC1 and InL0s aggregation.** Every core and every IO
controller exports one status bit. Neighbours are chained through 2-input AND
gates, so each half of the die sends one wire to the APMU. There are 5 cores per
InCC1 chain and 3 IO controllers per InL0s chain.

## Parameters

| where        | parameter       | default | meaning                                           |
|--------------|-----------------|---------|---------------------------------------------------|
| `apc_pkg`    | `N_CORES`       | 10      | cores (two AND chains of `N_CORES/2`)             |
| `apc_pkg`    | `N_IO`          | 6       | IO controllers (population fixed in `apc_top`)    |
| `apc_pkg`    | `N_MC`, `N_DDR_CH` | 2, 3 | memory controllers, channels per controller       |
| `apc_pkg`    | `L0S_EXIT_CYC`, `L0P_EXIT_CYC` | 32, 5 | link exit latencies              |
| `apc_pkg`    | `CKE_ENTRY_CYC`, `CKE_EXIT_CYC` | 5, 12 | DRAM power-down latencies       |
| `apc_pkg`    | `VID_NOMINAL`, `VID_RETAIN` | 200, 125 | 0.80 V and 0.50 V at 4 mV/LSB      |
| `apmu`       | `SYNC_STAGES`   | 0       | synchroniser depth on the status inputs           |
| `io_pm_ctrl` | `KIND`, `LANES`, `EXIT_CYC` | PCIe, 16, 32 | link type and size               |
| `fivr_fcm`   | `STEP_CYC`      | 1       | cycles per 4 mV step (1 = 2 mV/ns)                |
| `clm_clk_gate` | `SYNC_STAGES` | 2       | synchroniser depth in the CLM domain              |

The lane counts are PCIe x16, DMI x4 and UPI x20. `io_lanes_awake` is
zero-extended to 20 bits, so 28 of the top's output bits are constant.

## Where this RTL departs from the published architecture

- The status inputs of the APMU are assumed to be synchronous to its clock
  (`SYNC_STAGES = 0`). Each synchroniser stage adds one cycle to every latency
  above.
- Clock-ungating and clearing InPC1A happen in one step. A wakeup in the entry
  cycle goes straight to exit. Entry waits until WakeUp is low. A core leaving
  CC1 during PC1A counts as a wakeup.
- The IO population follows the reference part: 2 UPI, 3 PCIe, 1 DMI. They are
  split into InL0s groups as {UPI0, UPI1, PCIe0} and {DMI, PCIe1, PCIe2}. That
  grouping is a choice of this design.
- The PwrOk outputs of the two CLM regulators are ANDed. The VID registers of
  both regulators share one write-data port.
- All hooks run on the 500 MHz power-management clock. In silicon they live in
  the IO and memory controllers' own clock domains.
- Not modelled: cores, the GPMU firmware, link training and data paths, PHYs,
  memory scheduling, DRAM, regulator power stages, PLLs, and the CLM logic
  itself.

## Simulation

Every testbench in `tb/` checks itself. Each prints one line,
`TB_RESULT checks=N failures=M`, and stops with a watchdog if it hangs. With
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl rtl/apc_pkg.sv tb/tb_apc_top.sv --top-module tb_apc_top
./obj_dir/Vtb_apc_top
```

Replace `tb_apc_top` with any testbench below. The testbenches carry no
`timescale` of their own; `--timescale 1ns/1ps` gives the delays their meaning
(one time unit is 1 ns).

| testbench            | what it checks                                                                       |
|----------------------|--------------------------------------------------------------------------------------|
| `tb_apmu`            | every step of the flow and its outputs; 2-cycle entry; exit waits for PwrOk; the three wakeup sources; WakeUp hold-off; wakeup during entry; 4000 random cycles against a reference model |
| `tb_status_and_tree` | all input patterns of the 5- and 3-input chains                                      |
| `tb_io_pm_ctrl`      | no L0s unless allowed; 8-cycle entry with AllowL0s; L0s vs L0p lanes; InL0s falls in 1 cycle; 32- and 5-cycle exit; the register path |
| `tb_mc_cke_ctrl`     | CKE held by the register; 5-cycle entry only on idle channels; 12-cycle exit; wake on request |
| `tb_fivr_fcm`        | 75-cycle ramps both ways; PwrOk timing; preempted ramp; register loads; slower slew  |
| `tb_clm_clk_gate`    | clock passes, stops in 1–3 cycles, restarts; no shortened pulse under random toggling |
| `tb_apc_top`         | the whole subsystem at its default size: a directed tour through every path, then 40 000 cycles of a lightly loaded server with per-cycle invariants, and counts of each mechanism |
| `tb_workload_pc1a`   | idle/busy traces shaped like the evaluated services; PC1A residency against the idle time, the latency budget and a power estimate |

`tb_apc_top` runs in a few seconds and `tb_workload_pc1a` in about half a
minute. It fails if any of these mechanisms never
happens:
- PC0→ACC1;
- a core interrupt;
- PC1A entry;
- an IO wakeup;
- a GPMU wakeup;
- a preempted ramp;
- full retention;
- ACC1 held by a busy link;
- UPI in L0p;
- DRAM in CKE power-down;
- the CLM clock stopped;
- PC1A entered while one PCIe port has no device.

It also checks that the gated CLM clock has no edge while Ret is held.

## Behaviour under service-like load

`tb_workload_pc1a` replays traces of busy periods and fully idle periods. Each
trace has twelve idle periods of 20–200 µs, the range that holds most fully idle
periods at low load. Busy periods are sized so that the fraction of time with
all cores in CC1 matches the figure reported for each service. An idle period
ends the way a request does: traffic first appears on a PCIe link, and 100 ns
later an interrupt reaches a core. Every fourth idle period also gets a timer
wakeup that leaves the cores idle.

The power column uses 49.5 W for all cores in CC1, 29.1 W for PC1A and 92 W for
busy time. Those are SoC plus DRAM figures for the reference server. 92 W is the
upper bound for an active package, so the savings shown for the loaded points
are lower bounds. The fully idle line is exact: 1 − 29.1 / 49.5 = 41 %.

| trace               | all cores idle | time in PC1A | share of idle time captured | worst entry+exit | power saved |
|---------------------|---------------:|-------------:|----------------------------:|-----------------:|------------:|
| idle server         | 100 %          | 99.8 %       | 99.8 %                      | 170 ns           | 41.1 %      |
| Memcached 4K QPS    | 77 %           | 76.9 %       | 99.9 %                      | 176 ns           | ≥ 26.5 %    |
| Memcached 50K QPS   | 20 %           | 20.0 %       | 99.9 %                      | 176 ns           | ≥ 4.9 %     |
| MySQL, 37 % idle    | 37 %           | 37.0 %       | 99.9 %                      | 176 ns           | ≥ 9.9 %     |
| MySQL, 20 % idle    | 20 %           | 20.0 %       | 99.9 %                      | 176 ns           | ≥ 4.9 %     |
| Kafka, 47 % idle    | 47 %           | 47.0 %       | 99.8 %                      | 176 ns           | ≥ 13.3 %    |
| Kafka, 15 % idle    | 15 %           | 15.0 %       | 99.8 %                      | 176 ns           | ≥ 3.6 %     |

Because the hardware enters and leaves in under 200 ns, it loses less than 0.2 %
of even the shortest idle periods in the trace. With PC6 and its 50 µs or more,
most of these periods would be lost entirely.
