# PaCRAM: partial charge restoration for RowHammer preventive refreshes

RowHammer mitigations protect DRAM by refreshing the rows next to a heavily
activated ("hammered") row before they can flip bits. Each such *preventive
refresh* opens the victim row and keeps it open for the full charge-restoration
time tRAS (33 ns in DDR4) before closing it. As chips become more vulnerable,
mitigations issue many more of these refreshes, and the time they take becomes a
large performance and energy cost.

Characterisation of real DDR4 chips shows that tRAS carries a wide guardband.
A victim row refreshed with a much shorter restoration time, tRAS(Red), is only
slightly more vulnerable afterwards: its RowHammer threshold N_RH drops a little.
There is one catch. If a row receives many *consecutive* partial restorations,
it can eventually lose data. The largest safe count, N_PCR, depends on the
module.

PaCRAM uses this in the memory controller. A preventive refresh normally uses
tRAS(Red). The first preventive refresh of a row in every *full-charge-
restoration interval* tFCRI uses the nominal tRAS. tFCRI is short enough that no
row can collect N_PCR partial restorations inside it. The mitigation mechanism
itself is left unchanged, except that it is configured with the slightly lower
N_RH measured at tRAS(Red).

This repository holds SystemVerilog RTL of PaCRAM and of the row-command part
of the scheduler around it, with self-checking testbenches.

## Row states and the full-restoration interval

Each DRAM row is in one of two states, kept as one bit per row:

| bit | state | meaning | next preventive refresh |
|-----|-------|---------|-------------------------|
| 0 | F | not fully restored in the current interval | nominal tRAS, then the row goes to P |
| 1 | P | fully restored in the current interval | tRAS(Red) |

Every row starts in F. Every row is pulled back to F once per tFCRI.

tFCRI is the shortest time in which one row can receive N_PCR preventive
refreshes. It assumes the worst case: the aggressor is activated once every tRC,
and the mitigation refreshes after N_RH activations.

    tFCRI = N_PCR * (N_RH * tRC + tRAS(Red) + tRP)

Take module S6 at tRAS(Red) = 12 ns as an example: N_RH = 3.9K and N_PCR = 2K,
so tFCRI = 374 ms. For most profiled modules, tFCRI is longer than the 64 ms
refresh window tREFW. In that case periodic refresh already restores every row
fully before a limit can be reached. PaCRAM then uses tRAS(Red) for *every*
preventive refresh and does not track states at all (`reduce_all`). The
per-row state is needed only for modules with small N_PCR (1 to 5 in the
published tables). Their tFCRI is a few hundred microseconds.

The bit vector is independent of N_RH: 64K rows per bank need 8 KB per bank.

## Hardware organisation

```
                 demand requests            preventive refresh requests (aggressor row)
                       |                         ^ (2) from the mitigation mechanism
                       v                         |
  +--------------------------------------+       |      act_* (1) to the mitigation
  | mem_sched                            |<------+      mechanism, with nrh_mitigation
  |  per-bank FSM: ACT -> (RD/WR) -> PRE |---- cmd_* (4) ----> DRAM command bus
  +--------------------------------------+      |
        ^ lat_* (3)                              | every ACT (bank, row, prev_ref)
        |                                        v
  +------------------------------------------------------------+
  | pacram                                                     |
  |  pacram_config : registers, tFCRI, reduce_all              |
  |  fcri_timer    : pulse every tFCRI - margin                |
  |  pacram_bank x32 : FR bit vector (fr_array) + lookup/sweep |
  +------------------------------------------------------------+
```

| module | role |
|--------|------|
| `pacram_pkg` | geometry, timing in cycles, register map, command encoding |
| `fr_array` | single-port SRAM, 1024 x 64 bits per bank, bit-masked write |
| `pacram_bank` | per-bank state machine: lookup, F to P write-back, clear sweep |
| `pacram_config` | configuration registers and the tFCRI multiply |
| `fcri_timer` | periodic reset-to-F pulse |
| `pacram` | the PaCRAM unit: config, timer and 32 banks |
| `mem_sched` | row commands for demand accesses and preventive refreshes |
| `pacram_mc_top` | scheduler plus PaCRAM, with mitigation and DRAM as ports |

Timing is in cycles of a 1 GHz controller clock, so 1 cycle = 1 ns:

- tRAS = 33
- tRAS(Red) = 12 after reset
- tRP = 15
- tRC = 48
- tRCD = 14
- tREFW = 64,000,000

The geometry matches a DDR5 channel: 2 ranks × 16 banks (32 banks in all),
64K rows per bank.

## A preventive refresh, cycle by cycle

The mitigation mechanism requests a refresh for an aggressor row A. The
scheduler then refreshes the victims A-2, A-1, A+1 and A+2, one at a time
(blast radius 2). Victims outside the bank are skipped. For each victim:

```
cycle   t              t+1                      t+L            t+L+tRP
bus     ACT victim     -                        PRE            ACT next victim
PaCRAM  read FR word   lat_valid, lat_tras=L    -
                       F->P write-back
```

`L` is 33 if the row was in state F and 12 if it was in state P. The SRAM
lookup happens in the ACT cycle. Its answer comes one cycle later, long before
the row may be closed, so the lookup adds no delay. A partially restoring
refresh therefore costs tRAS(Red) + tRP = 27 ns per victim, against 48 ns for a
full one. The scheduler closes a row only after the time PaCRAM answered. If it
loses the command bus it closes the row later, never earlier.

## Resetting every row to F

The published mechanism only says that all rows are reset to F periodically. A 2-Mbit SRAM
cannot be cleared in one cycle. Here each bank runs a **sweep** instead: it
writes one all-zero word per cycle whenever the SRAM port is free of lookups.
A full sweep takes 1024 cycles per bank. The banks sweep in parallel.

Three rules keep the sweep safe:

1. A lookup that hits a word the sweep has not reached yet is answered with
   nominal latency. Its write-back is dropped, because the sweep will clear
   the word anyway. The result can only be an extra full restoration, never
   a missing one.
2. The timer fires CLEAR_MARGIN = 2 × 1024 cycles before tFCRI expires. So
   even when lookups stall the sweep, the last word is back in F within tFCRI
   of the previous reset.
3. Reset, and every configuration write, also start a sweep. A new
   configuration therefore never inherits P states from an old one.

If tFCRI is shorter than the margin, the timer fires every cycle. The bank is
then always sweeping and answers every refresh with nominal latency. That is
safe but gains nothing.

## Configuration

The values come from profiling the installed module: at first boot, from data
the vendor stores in the module's SPD, or online. Write them through the
register port (`cfg_we`, `cfg_addr`, `cfg_wdata`):

| address | name | width | reset value |
|---------|------|-------|-------------|
| 0 | `CFG_ENABLE` | 1 | 1 |
| 1 | `CFG_NRH` | 17 | 10200 |
| 2 | `CFG_NPCR` | 16 | 15000 |
| 3 | `CFG_TRAS_RED` | 8 | 12 |

The reset values are module H5 at 0.36 tRAS, the best latency found for
manufacturer H. With them, tFCRI is 7.34 s, which is more than tREFW, so every
preventive refresh is partial.

Some other published settings:

| module, tRAS(Red) | N_RH | N_PCR | tRAS(Red) cycles | tFCRI | mode |
|-------------------|------|-------|------------------|-------|------|
| S6 at 0.36 | 3900 | 2000 | 12 | 374 ms | reduce_all |
| H5 at 0.27 | 9400 | 300 | 9 | 135 ms | reduce_all |
| S0 at 0.27 | 6200 | 1 | 9 | 300 µs | row states in use |
| S13 at 0.27 | 3900 | 5 | 9 | 937 µs | row states in use |
| H2 at 0.18 | 37900 | 1 | 6 | 1.82 ms | row states in use |

`nrh_mitigation` carries the N_RH register to the external mitigation
mechanism. PaCRAM goes inactive in any of these cases, and then every refresh
is full:

- `CFG_ENABLE` is 0;
- N_RH is 0;
- N_PCR is 0.

The last two mark modules where a reduced latency is not usable.

`tfcri` and `reduce_all` are valid two cycles after a write.

## What follows the source design and what does not

These parts come from the published mechanism:

- the two states F and P and their rules;
- one bit per row, kept in SRAM per bank;
- the tFCRI formula;
- the rule that uses reduced latency for all refreshes when tFCRI exceeds the
  refresh window;
- the latency of a partial refresh, tRAS(Red) + tRP;
- the blast radius of 2;
- the reduced N_RH handed to the mitigation mechanism;
- the geometry and the configuration values.

These are this design's own choices:

- the 1 GHz cycle base;
- tRP = 15 ns and tRC = 48 ns. The source gives neither, but 48 ns reproduces
  its published intervals to within 1 %.
- the 64-bit SRAM words and the one-cycle lookup on the victim's ACT;
- the sweep, its margin, and the clear on configuration change;
- the register map;
- the scheduler (see below).

Departures and open points:

- **When PaCRAM is asked.** In the published overview, PaCRAM sees every
  activated row address at the same time as the mitigation mechanism, and
  decides the latency while the mitigation decides whether to refresh. Here
  PaCRAM sees every ACT on the command bus, but it acts only on the ACTs that
  the scheduler marks as preventive refreshes. It looks up the *victim* row
  that is being refreshed, because the F/P state belongs to the row whose
  charge is restored. The answer is ready one cycle after that ACT, long
  before the row may be closed, so the refresh is no slower than if the
  latency had been decided in advance.
- **Which activations update state.** Only preventive-refresh ACTs read or
  write the FR bits. Demand activations also restore a row fully, but they do
  not move it to P. The source counts only preventive refreshes; using demand
  activations as well would be a possible optimisation.
- **Scheduler.** The scheduler is minimal:
  - closed-page demand service: ACT, RD/WR after tRCD, PRE after tRAS;
  - a preventive refresh takes priority over demand traffic to the same bank;
  - banks are served round robin;
  - no request queues and no FR-FCFS reordering;
  - no periodic REF;
  - no rank-level limits such as tRRD and tFAW.

  PaCRAM needs none of these, but a real controller has them.
- **Row addresses.** Victims are the logically adjacent rows. Real chips remap
  rows internally, so a controller needs the physical adjacency map.
- **Not included.** These parts are outside this RTL:
  - the RowHammer mitigation mechanisms themselves (PARA, RFM, PRAC, Hydra and
    Graphene were evaluated with PaCRAM), which connect through `act_*`,
    `nrh_mitigation` and `pr_*`;
  - the DRAM;
  - the profiling procedure;
  - the variant that puts PaCRAM inside the DRAM chip and passes the latency
    through a mode register;
  - the extension that also shortens periodic refreshes.

## Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_pacram_mc_top rtl/pacram_pkg.sv tb/tb_pacram_mc_top.sv
./obj_dir/Vtb_pacram_mc_top
```

| testbench | what it covers |
|-----------|----------------|
| `tb_fr_array` | masked writes against a shadow copy; read latency |
| `tb_pacram_bank` | F/P rules against a reference model; sweep length; lookups during a sweep; `reduce_all` and disable |
| `tb_pacram_config` | tFCRI against published intervals (S6, H5, S0, S13, H2); the 64 ms boundary; update timing |
| `tb_fcri_timer` | pulse period, restart, stop |
| `tb_pacram` | 4 banks with a short tFCRI: every answer against a reference model, and the reset period |
| `tb_mem_sched` | victim order and bank-edge skipping; ACT to PRE equal to the answered latency; tRP, tRCD and tRAS; priority; several banks in parallel |
| `tb_pacram_mc_top` | end to end at full size (32 banks × 64K rows) |
| `tb_pacram_workload` | worst-case hammering at full size with two published small-N_PCR modules |

`tb_pacram_mc_top` uses a PARA-like random mitigation model and a DRAM-side
monitor. It runs three configurations:

1. the reset configuration (`reduce_all`);
2. N_RH = 40 and N_PCR = 20, giving tFCRI = 38,940 cycles and a dozen resets;
3. PaCRAM disabled.

It checks that every partial refresh of a row comes within tFCRI of a full
one. It also checks that full refreshes, partial refreshes, resets, the two
special modes, bank-edge skipping, refresh-over-demand priority and lookups
during a sweep each happen at least once. It simulates about 480,000 cycles
in a few seconds.

`tb_pacram_workload` runs the published settings for S0 (N_PCR = 1) and S13
(N_PCR = 5) at tRAS(Red) = 9 ns, about two intervals each. An attacker
activates aggressor rows in four banks as fast as tRC allows: single-sided,
double-sided around a shared victim, at the last row of a bank, and in the
second rank. An ideal counter-based mitigation requests a refresh after every
N_RH activations of a row. The test checks the property the design exists for:
no row ever receives more than N_PCR partial refreshes in a row. In this run
the longest run is 1 for S0 and 4 for S13. For S13 the run is one short of
N_PCR. An interval holds at most N_PCR refreshes of a row, and the first of
them is full. The test takes about 2.9 million cycles, which is half a
minute in Verilator.
