# Mithril: a DRAM-side Row Hammer tracker driven by Refresh Management

Row Hammer is the DRAM failure in which activating one row (the aggressor)
many times flips bits in its physical neighbours (the victims) before the
normal auto-refresh restores them. A device is safe as long as no row is
activated `FlipTH/2` times (two aggressors can hit one victim) without its
victims being refreshed.

DDR5 and LPDDR5 add a command for this, **RFM (Refresh Management)**. The
memory controller counts the activations (ACTs) it sends to each bank. After
every `RFM_TH` of them it sends the bank an RFM. The RFM names no row; it just
gives the bank a guaranteed quiet time window (tRFM) to do whatever
protection work it likes.

Mithril is the DRAM-side logic that uses that window. Each bank keeps a small
table that estimates how often rows were activated. On every RFM the bank
**greedily** refreshes the neighbours of the row with the largest estimate.
It then lowers that row's estimate to the table minimum. Refreshing the worst
row at every opportunity, not just when a row crosses a threshold, is what
keeps many rows from needing a refresh at the same time. That matters because
RFMs arrive at a fixed rate and cannot be requested in a burst. The scheme
and its safety proof are from M. J. Kim, J. Park, Y. Park, W. Doh, N. Kim,
T. J. Ham, J. W. Lee and J. H. Ahn, *"Mithril: Cooperative Row Hammer
Protection on Commodity DRAM Leveraging Managed Refresh"*. This repository is
a register-transfer implementation of that scheme. It also contains the
memory-controller counter that drives it and the optional "Mithril+" hand-shake.

## 1. The tracking algorithm

Each bank keeps a table of `N_ENTRY` pairs (row address, estimated count).
Two registers point into it: **MaxPtr** at the largest count and **MinPtr**
at the smallest. The table is a Counter-based Summary (the Misra-Gries /
Space-Saving family):

* **ACT to row r, r in the table:** increment its count.
* **ACT to row r, r not in the table:** overwrite the entry at MinPtr with r and
  increment it. The newcomer inherits the minimum plus one.
* **RFM:** take the entry at MaxPtr and refresh rows `r-1` and `r+1`. Then set
  its count to the table minimum, since its true count since the refresh is
  now zero.

A row's estimated count is its counter if it is in the table, and the table
minimum if it is not. The estimate is never below the true count. It is never
above the true count plus the minimum. The first property makes the
protection safe. The second is what makes it legal to lower the refreshed
entry to the minimum.

A worked example with 4 entries, as the RTL executes it (the testbench
`tb_mithril_bank` replays exactly this):

| step | entry 0 | entry 1 | entry 2 | entry 3 | MaxPtr | MinPtr | action |
|---|---|---|---|---|---|---|---|
| start | 0xA0: 9 | 0xB0: 9 | 0xC0: 3 | 0xD0: 1 | 0xB0 | 0xD0 | |
| ACT 0xA0 | 0xA0: **10** | 0xB0: 9 | 0xC0: 3 | 0xD0: 1 | 0xA0 | 0xD0 | hit |
| ACT 0xE0 | 0xA0: 10 | 0xB0: 9 | 0xC0: 3 | **0xE0: 2** | 0xA0 | 0xE0 | miss, replaces the minimum |
| RFM | 0xA0: **2** | 0xB0: 9 | 0xC0: 3 | 0xE0: 2 | 0xB0 | 0xE0 | refresh 0x9F and 0xA1 |

The example contains two ties. At the start, 0xA0 and 0xB0 both hold 9 and
MaxPtr is on 0xB0. At the end, 0xA0 and 0xE0 both hold 2 and MinPtr stays on
0xE0. This RTL resolves every tie, for both maximum and minimum, in favour of
the **higher table index**, which reproduces both. A consequence is that,
after reset, both pointers sit on the last entry. An empty table therefore
fills from the last entry down.

### The safety bound and how the table is sized

The key result of the source is a bound on how far any row's estimated count
can grow in one refresh window tREFW. Each row is refreshed by auto-refresh
at least once per tREFW. So if the estimate cannot grow by `FlipTH/2` within
one tREFW, no row reaches the Row Hammer threshold unrefreshed. The bound is

```
M = sum_{k=1..N} RFM_TH/k  +  (RFM_TH/N) * ( W - 2 )
W = tREFW * (1 - tRFC/tREFI) / (tRC * RFM_TH + tRFM)     (RFM intervals per tREFW)
```

and the design is safe when `M < FlipTH/2`. With the DDR5-4800 timings used
for evaluation (tREFW 32 ms, tREFI = tREFW/8192, tRFC 295 ns, tRC 48.64 ns,
tRFM 97.28 ns) we get the following minimum entry counts. They are computed
here from the formula; the source quotes table sizes, not entry counts:

| FlipTH | RFM_TH | N_ENTRY needed | M |
|---|---|---|---|
| 50K | 256 | 26 | 24178 |
| 25K | 256 | 54 | 12338 |
| 12.5K | 256 | 124 | 6246 |
| **6.25K** | **128** | **256** | **3122** |
| 6.25K | 256 | 422 | 3125 |
| 3.125K | 128 | 988 | 1563 |
| 1.5K | 32 | 1130 | 750 |

The defaults of this RTL are the bold row. That is the operating point the
source highlights: about 1 KB per bank, under 0.5 % performance loss, and
protection for the recently measured thresholds of around 6K activations.

### Why 12-bit counters are enough: wrapping counters

Estimated counts only ever grow, so absolute values are unbounded. The usual
fixes are a periodic table reset or two tables used in turns. Both cost a
factor of two. Mithril needs neither, because only the *order* of the entries
matters, and that order is always within one small range:

* The table minimum never decreases. An increment raises a count. The RFM
  write sets a count to the current minimum.
* Everything is within `M` of the minimum. Apply the bound to the window that
  ends now: the maximum count now is at most the minimum at the window start
  plus `M`, and the minimum now is no smaller.

So the RTL keeps every counter modulo `2^CNT_W`, with `2^CNT_W > M`
(`CNT_W = 12` for M = 3122). It never compares two counters directly. Every
comparison is made on `count - min_val (mod 2^CNT_W)`, the distance above a
register that holds the current minimum. Those distances are exact
non-negative numbers below `2^CNT_W`, so a plain unsigned comparison orders
them correctly even after counters have wrapped past zero. `min_val` itself
wraps too, and that is harmless.

The bank testbench runs 6-bit counters through many wraps against an
unbounded-integer reference model. It checks every entry after every command.

## 2. Skipping unnecessary refreshes

**Adaptive refresh.** On an RFM the bank refreshes only if
`max - min >= AD_TH` (`AD_TH = 200`). Normal programs sweep large objects
and spread their ACTs fairly evenly. Their spread stays small, so most RFMs
become no-ops and cost no refresh energy. An attack concentrates ACTs and
opens the spread. With `AD_TH = 0` every RFM refreshes: that is plain Mithril,
and the bound above applies exactly. The source states that a non-zero
`AD_TH` worsens the bound only slightly (up to 12 % more entries). It gives
no formula for this.

**Mithril+.** Adaptive refresh saves energy, but the controller still stalls
the bank for every RFM. Mithril+ lets the controller ask first. Each bank
exposes the flag `max - min < AD_TH` in a mode register. When a bank's RAA
count reaches `RFM_TH`, the controller reads the flag with a standard MRR
(mode register read). It sends the RFM only if the flag is clear. The flag is
exactly the condition under which the bank would skip the RFM. So Mithril+
changes only which RFMs are sent, never which refreshes happen.

## 3. Hardware organisation

```
 mithril_system
 ├── rfm_logic            memory controller: RAA counter per bank, RFM / MRR insertion
 └── mithril_dram         one DRAM chip
     ├── mithril_mode_reg Mithril+ flags, answers MRR
     └── mithril_bank x NUM_BANKS
         ├── mithril_addr_cam   row address per entry + valid, parallel match
         ├── mithril_count_cam  wrapping counter per entry
         ├── mithril_find_ext   find-max tree (MaxPtr candidate)
         ├── mithril_find_ext   find-min tree (MinPtr candidate)
         └── mithril_ctrl       algorithm, MaxPtr/MinPtr/min_val/max_diff registers,
                                adaptive refresh, victim sequencer, Mithril+ flag
```

`mithril_pkg` holds the command type `ddr_cmd_t` (opcode ACT/RFM/MRR, bank,
row), `ROW_W = 16` and `BANK_W = 5`.

### Per-bank timing

The two CAMs and both comparator trees are combinational around registered
state, so a command is applied to the table in one cycle. The pointers are
reloaded from the trees on the next cycle:

| command | cycles until `ready` again | what happens |
|---|---|---|
| ACT | 2 | edge 1: hit-increment, or replace MinPtr's entry; edge 2: MaxPtr, MinPtr, min_val, max_diff reloaded |
| RFM, refresh | 1 + 2·BLAST_R | edge 1: count[MaxPtr] := min_val, aggressor latched; then one victim row per cycle on `pref_row`; pointers reloaded in the first of these cycles |
| RFM, skipped | 1 | nothing changes |

In a real device these cycles must fit in tRC (48.64 ns) for an ACT and tRFM
(97.28 ns) for an RFM. The find trees have depth log2(256) = 8 comparators of
12 bits. `ready` is low while a bank is busy. An assertion in `mithril_ctrl`
flags any command that arrives then. `mithril_dram` derives the chip's
`cmd_ready` from the addressed bank only. Other banks carry on, and an MRR
waits for its bank, so the flag it reads is current.

### Memory-controller side

`rfm_logic` sits between the scheduler and the DRAM. ACTs pass straight
through, and each one accepted increments its bank's RAA counter. The ACT
that brings a counter to `RFM_TH` sends the controller into a short sequence:
MRR, wait for the flag (only when `plus_en`), then RFM to that bank. The
counter is cleared when the RFM is sent or the flag withholds it. During the
sequence `sched_ready` is low, so the scheduler stalls. That cost is what
Mithril+ removes. The RFM is offered in the very cycle after the threshold
ACT. The testbench checks this cycle by cycle, along with exactly one RFM
decision per `RFM_TH` ACTs per bank.

## 4. Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_BANKS` | 32 | banks per chip; the evaluated DDR5 rank has 32 |
| `N_ENTRY` | 256 | table entries per bank; from the bound, for FlipTH 6.25K at RFM_TH 128 |
| `CNT_W` | 12 | counter width; needs `2^CNT_W > M` (M = 3122) |
| `RFM_TH` | 128 | ACTs per bank between RFMs |
| `AD_TH` | 200 | adaptive-refresh threshold (0 = refresh on every RFM) |
| `BLAST_R` | 1 | victims refreshed on each side of the aggressor; 3 covers aggressors up to three rows away (six victims); the bound must then satisfy `M < FlipTH/3.5` instead of `FlipTH/2` |

Changing `RFM_TH` or `N_ENTRY` changes the protected threshold. Recompute `M`
with the formula above, and keep `2^CNT_W > M` with some margin when
`AD_TH > 0`. Table storage is `N_ENTRY x (ROW_W + CNT_W)` bits: 0.875 KB per
bank at the defaults. The source reports 0.84 KB for this point without
saying how its entries are laid out.

## 5. What is modelled and what is not

Outside the RTL, and brought out as ports of `mithril_system`:

* the controller's scheduler (`sched_*`), which is any ACT source;
* the DDR5 command bus and PHY, abstracted as a valid/ready channel carrying
  `ddr_cmd_t`;
* the DRAM cell arrays, which receive the victim rows on `pref_valid[b]` /
  `pref_row[b]`;
* normal auto-refresh (REF). It resets nothing in Mithril, so the tracker does
  not need it.

Choices made here where the source is silent:

* **Highest index wins ties**, for both maximum and minimum. This rule is
  read off the worked example in section 1. The prose of the source does not
  state it.
* **There is a find-min tree.** The source draws only a find-max block, but
  MinPtr has to be found again after every ACT that changes the minimum
  entry.
* **The refresh test is `>=`.** The source says to refresh when the spread
  "exceeds" `AD_TH`. It also says the Mithril+ flag is set when the spread
  is "smaller than" `AD_TH`. The two disagree when the spread equals
  `AD_TH`. This RTL refreshes at `>=`, for two reasons: the flag then predicts
  a skip exactly, and `AD_TH = 0` gives plain Mithril, which refreshes on
  every RFM.
* **A skipped RFM leaves the table unchanged.** A refresh that did not happen
  cannot justify lowering a count.
* **Reset and row edges.** Reset empties the table: all valid bits and counts
  are zero. Victim rows outside `0 .. 2^ROW_W-1` are not emitted.
* **Mithril+ encoding.** An MRR names a bank and returns that bank's flag one
  cycle later. The real mode-register address map is not specified.
* **Cycle split.** The split of each command into cycles (section 3) belongs
  to this implementation.
* **Row width.** `ROW_W = 16` (64K rows per bank) is an assumption.

## 6. Simulation

All files are SystemVerilog-2017. Packages come first on the command line.
Every testbench is self-checking and ends with one line
`TB_RESULT checks=<n> failures=<m>`. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mithril_pkg.sv tb/mithril_ref_pkg.sv tb/tb_mithril_system.sv \
    --top-module tb_mithril_system -o sim && ./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_mithril_addr_cam` | match, priority on duplicate rows, read port, reset empties the table |
| `tb_mithril_count_cam` | increment / overwrite against modulo arithmetic, wrap |
| `tb_mithril_find_ext` | max and min, ties, counters wrapped around the base, 13 entries (non power of two) |
| `tb_mithril_bank` | the worked example above, then random traffic on two configurations against the reference model (`tb/mithril_ref_pkg.sv`), including 6-bit counters wrapping and two victims per side; every entry, pointer, event, victim row and latency |
| `tb_mithril_mode_reg` | MRR data and its one-cycle latency |
| `tb_rfm_logic` | RFM exactly every RFM_TH ACTs per bank, MRR then RFM or skip, stall, pass-through |
| `tb_mithril_dram` | steering to banks, independent banks, per-bank victim ports, MRR |
| `tb_mithril_system` | end to end at 4 banks x 8 entries: benign and hammer traffic, plain and Mithril+; counts every mechanism (hit, miss, refresh, adaptive skip, Mithril+ skip, stall, counter wrap, mode switch) |
| `tb_mithril_system_full` | the same at the default size (32 banks x 256 entries) |
| `tb_mithril_rh_attack` | one default bank through a whole refresh window (4678 RFM intervals, 599K ACTs) of multi-sided, mixed, table-thrashing and double-sided attacks; every victim must stay below both 2·M and FlipTH neighbour ACTs between its refreshes |

The reference model in `tb/mithril_ref_pkg.sv` is a direct, untimed
transcription of the algorithm in section 1. It uses 64-bit counts that never
wrap. The SPEC, SPLASH-2 and GAP traces of the original evaluation are not
reproduced. The system testbenches use random benign traffic and a
double-sided hammer instead.

In `tb_mithril_rh_attack` the worst victim sees about 650 neighbour ACTs
between refreshes. The limit it checks is 2·M, rounded up to 6246; Row
Hammer needs 6250.
In the mixed phase, the adaptive policy skips about 70 % of the RFMs.
