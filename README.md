# DNN-Defender: victim-focused row swapping against targeted RowHammer bit flips

A quantized DNN stored in DRAM can be wrecked by a handful of well-chosen bit
flips. An attacker who knows the model and the physical address of its weights
can hammer the row next to the one holding a sensitive weight bit until that bit
flips. Common RowHammer defenses track *aggressor* rows with counters, or move
aggressors away. Against an attacker who follows the *victim* they do little:
the attacker just hammers whatever row now sits next to the victim.

DNN-Defender protects the victims instead. An offline search, the same
gradient-ranked bit search the attacker would run, picks the weight bits that
matter most. The rows holding them become **target rows**. At a fixed rhythm,
faster than an attacker can reach the RowHammer threshold `T_RH`, the memory
controller moves every target row to another place in its sub-array. It does
this with in-DRAM RowClone copies, so no data crosses the memory channel. The
copy refreshes the target, and the attacker's accumulated hammering on the old
neighbour is lost. The **non-target row**, the other victim of the same
aggressor, is refreshed on the way at almost no extra cost. The scheme adds no
counters, uses no SRAM or CAM tables for tracking, and leaves the DRAM array
unchanged.

This repository holds synthesizable SystemVerilog for the controller side of
that scheme, for one DRAM bank. It also holds testbenches, including one that
runs the controller against a behavioural DRAM bank with an actual RowHammer
attacker.

## The swap chain

Everything happens inside one sub-array, because RowClone only copies between
rows that share sense amplifiers. Each sub-array keeps one **reserved row**;
here it is the top row of the sub-array. A RowClone copy is `ACT src`, then
`ACT dst` with no precharge in between, then `PRE`. This sequence is called an
AAP, and it takes `T_AAP` = 90 ns.

One swap of target `T` (non-target `N`) with a random row `R`, through reserved
row `X`, takes four copies:

| step | copy     | effect                                                  |
|------|----------|---------------------------------------------------------|
| 1    | `R -> X` | park the random row's data                              |
| 2    | `T -> R` | the target now lives at `R`, freshly written            |
| 3    | `X -> T` | the random row's data fills the target's old place      |
| 4    | `N -> X` | refresh the non-target row; `X` now holds a copy of `N` |

After step 3, rows `T` and `R` have exchanged their contents.

The important trick is chaining. After step 4 of target *k*, `X` holds a copy
of `N_k`, so row `N_k` is free to be overwritten. Row `N_k` can then serve as
the random row of target *k+1*, and "step 1" of swap *k+1* has already been
done by step 4 of swap *k*. A chain of targets in one sub-array therefore looks
like this:

```
swap 1 : R -> X   T1 -> R    X -> T1   N1 -> X
swap 2 :          T2 -> N1   X -> T2   N2 -> X
swap 3 :          T3 -> N2   X -> T3   N3 -> X
```

Swap *k* > 1 exchanges `T_k` with the old place of `N_(k-1)`. `N_(k-1)` moves
into `T_k`'s old row. The last non-target of the chain stays where it is, and
a refreshed copy of it remains in `X`. A chain of *n* targets costs **3n + 1
copies**: one `T_swap = 3 x T_AAP` per target, plus one AAP. Only one random
number is drawn per chain.

Data moves, so something has to remember where it went. The swap engine
rewrites the target table as it goes. After step 3 of swap *k* it stores the
new row of `T_k` and, for *k* > 1, the new row of `N_(k-1)`. So the table
always says where the protected data lives. It also reports each exchange on
`reloc_valid / reloc_a / reloc_b` ("rows a and b swapped contents"). The rest
of the system (address translation for the host) can follow the data from that
report. Keeping that translation is outside this design.

### Choosing the random row

The random row comes from a free-running 16-bit LFSR. Its low
`log2(ROWS_PER_SA)` bits are a row index inside the sub-array. A draw is
rejected, and the next LFSR value is used, in two cases:

- it falls in the reserved region;
- it equals any target or non-target row of the same chain.

The engine finds the chain's extent (all consecutive table entries of the same
sub-array) during the same scan that checks for collisions. The scan costs one
cycle per entry, which is small next to the 90-cycle copies.

## When rounds run: the threshold window

A victim must be rewritten before its aggressor has been activated more than
`T_RH` times. With at most one activation per `T_ACT`, that leaves a window of
`T_RH x T_ACT`. The round timer starts a round when the defense is enabled.
After that it starts each round exactly `T_RH x T_ACT` cycles after the
previous one ended. The spacing between rounds is therefore
`T_n = T_ACT x T_RH + T_swap x N_s`. While a round runs, the host is stalled,
so an attacker cannot activate more than `T_RH` times between two refreshes of
a target.

The swaps themselves should also fit inside the window. A round that is still
running `T_RH x T_ACT` cycles after it started pulses `round_overrun`. The
round is not cut short; the flag only tells software that the table is too
large for this threshold.

With the defaults (T_RH = 4800, T_ACT = 45 ns, T_AAP = 90 ns, 1 ns clock), the
window is 216,000 cycles. That holds one chain of about 799 targets per bank.
The target table holds 2048 entries per bank.

What fits, assuming the worst case of one protected bit per row, 16 banks, and
one controller per bank:

| protected bits (model) | targets / bank | copies x 90 (cycles) | simulated round (cycles) | fits window |
|---|---|---|---|---|
| 1150 (ResNet-20, CIFAR-10) | 72 | 19,530 | 19,693 | yes |
| 2k / 4k / 8k (VGG-11, CIFAR-10) | 125 / 250 / 500 | 33,840 / 67,590 / 135,090 | 34,003 / 67,933 / 135,829 | yes |
| 8k (ResNet-34, ImageNet) | 500 | 135,090 | as above | yes |
| 14k (VGG-11) | 875 | 236,340 | 237,583 | no (overrun flagged) |
| 24k (VGG-11) | 1500 | 405,090 | not simulated | no |
| 16k and up (ResNet-18/34, ImageNet) | 1000 and up | > 270,000 | not simulated | no |

The "copies x 90" column counts a single chain. The simulated rounds spread the
targets 64 per sub-array, so they have one chain per 64 targets (one extra
copy each) plus the one-cycle-per-entry table scans.

Larger protected sets therefore need either a longer `T_ACT` than the assumed
45 ns or rows that each carry several protected bits. Both shrink the
per-round work.

## Sharing the command bus

Swaps are ordinary DRAM commands, so they go on the same bank command bus as
host traffic. `dd_cmd_arbiter` works as follows:

- When the engine requests the bus, the host is held off (`host_ready` low).
- If the host left a row open, the arbiter closes it with a `PRE`.
- The arbiter waits `T_RP` after the last precharge, then grants the bus.
- The engine keeps the bus until its last copy, including that copy's
  precharge time, is over.
- The host gets the bus back one cycle after the engine releases it.

## Blocks

| module | role |
|---|---|
| `dd_pkg` | command enum (`NOP/ACT/PRE/RD/WR`), swap-step enum, default geometry and timing |
| `dd_round_timer` | start pulse at enable and `T_RH x T_ACT` after each round; overrun flag; `dd_interrupt` stops new rounds |
| `dd_swap_engine` | walks the table in sub-array chains; draws and checks the random row; emits the 3n+1 copies; updates the table; reports relocations; honours `dd_interrupt` at swap boundaries |
| `dd_lfsr_rng` | 16-bit maximal-length Galois LFSR (x^16+x^14+x^13+x^11+1) |
| `dd_target_table` | `DEPTH` pairs (target row, non-target row); host write/read port and entry count; two engine write ports |
| `dd_aap_issuer` | one copy → `ACT src` (+0), `ACT dst` (+35), `PRE` (+70); the next copy starts at +90 |
| `dd_cmd_arbiter` | host / defense bus sharing as above |
| `dnn_defender` | top: all of the above for one bank; the DRAM is outside on `dram_cmd/row/col` |

Row addresses are flat bank rows: `row = sub-array x ROWS_PER_SA + local row`.
`ROWS_PER_SA` must be a power of two. Software loads the table with the entries
of each sub-array next to each other, then writes the entry count. The table
may only be written between rounds (`round_busy` low).

Using the top:

1. Load the table (`tbl_wr_*`, then `tbl_cnt_wr`).
2. Raise `dd_enable`.
3. Follow `reloc_*` or read the table back (`tbl_rd_*`) to find moved data.
4. To stop, raise `dd_interrupt`. The running round ends after the current
   swap, and `round_aborted` pulses with `round_done`.

## Parameters

| parameter | default | from the paper? |
|---|---|---|
| `T_RH` | 4800 | yes (LPDDR4 threshold) |
| `T_AAP` | 90 cycles | yes (90 ns), at an assumed 1 GHz clock |
| `T_ACT` | 45 cycles | no, assumed (tRC) |
| `T_ACT2ACT`, `T_ACT2PRE`, `T_RP` | 35, 35, 20 | no; split of `T_AAP` assumed |
| `SUBARRAYS`, `ROWS_PER_SA` | 128, 512 | no (65536 rows per bank) |
| `RESERVED` | 1 | no; one reserved row per sub-array |
| `DEPTH` | 2048 | no; chosen to hold 24k protected bits over 16 banks |
| `RNG_SEED` | 16'hACE1 | no |

## How this follows the source description, and where it departs

These follow the published description directly:

- the four steps;
- the chaining, where step 1 of the next swap overlaps step 4 of the previous
  one;
- the per-swap cost of three AAPs;
- `T_RH = 4800` and `T_AAP = 90 ns`;
- the round spacing `T_ACT x T_RH + T_swap x N_s`.

These are choices of this design:

- **Single-target chains.** The published pseudo-code stops after three copies
  when there is only one target. The prose and drawings always perform step 4.
  This design always performs it.
- **One random row per sub-array.** The source says a single random row
  serves all swaps. RowClone cannot copy between sub-arrays, so here each
  sub-array chain draws its own random row. When all targets share one
  sub-array, exactly one draw is made.
- **Interrupt.** The pseudo-code checks the interrupt only while the defense
  is not started. Here it also ends a running round, but only at a swap
  boundary, so no data is ever left only in the reserved row.
- **Other choices, not described at all in the source:**
  - the LFSR and its rejection rule;
  - the table layout and its in-place updates;
  - the relocation report;
  - the overrun flag;
  - the bus arbitration;
  - every timing split and geometry number marked "assumed" above.

Not built:

- the DRAM array itself (a behavioural model is in `tb/dram_bank_model.sv`);
- the offline profiler that picks the protected bits;
- the host-side address translation;
- the replication across banks. Instantiate one `dnn_defender` per bank.

## Simulation

The testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_dd_lfsr_rng` | sequence against an independent polynomial step; full period 65535 |
| `tb_dd_target_table` | host/engine reads and writes, count clamp |
| `tb_dd_aap_issuer` | exact cycle of every ACT/ACT/PRE; one copy per 90 cycles |
| `tb_dd_round_timer` | start at enable, gap = window, overrun, interrupt |
| `tb_dd_cmd_arbiter` | pass-through, row close, tRP before grant, stall, release |
| `tb_dd_swap_engine` | every copy against a list built from the four-step rule; random-row rejection; table and relocation updates; data checked in a shadow memory; abort at a swap boundary |
| `tb_dnn_defender` | reduced geometry (4 x 32 rows, T_RH = 1024, T_ACT = 2): an unprotected target flips; with the defense on, a white-box attacker following target 0 at full activation rate over six rounds causes no loss; 3n+1 copies per chain, 90-cycle spacing, overrun with 8 targets, abort; every mechanism counted |
| `tb_dnn_defender_full` | the same attack at default parameters (T_RH = 4800, 65536 rows), two full rounds |
| `tb_dnn_defender_workloads` | default parameters, one round each with 72, 125, 250, 500 and 875 targets: chain and copy counts, round length, overrun exactly for 875, every protected row found where the table says |

Run one with plain Verilator from the repository root, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/dd_pkg.sv tb/tb_dnn_defender.sv --top-module tb_dnn_defender
./obj_dir/Vtb_dnn_defender
```

The end-to-end tests take well under a second each. The full-size one
simulates about 650,000 cycles.
