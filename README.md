# Svärd: per-row read disturbance thresholds for a DDR4 memory controller

DRAM rows differ widely in how many activations of a neighbouring row they
survive. Characterization of 144 DDR4 chips shows that HCfirst — the hammer
count at which a row shows its first read disturbance (RowHammer/RowPress)
bitflip — varies by an order of magnitude across the rows of one bank, and
varies irregularly: a row's address, subarray or distance to the sense
amplifiers predicts it well in only a few modules. Existing defenses (PARA,
BlockHammer, Hydra, AQUA, RRS, ...) are configured for the weakest row of the
whole chip. They therefore refresh, throttle or relocate far more often than
the stronger rows need.

Svärd fixes this without changing the defense itself. It stores a small
vulnerability class for every row. On every row activation it gives the
defense the HCfirst of the row just opened. The defense then compares its own
quantity against a threshold derived from that per-row HCfirst, and not
against a chip-wide constant. The weakest rows keep exactly the protection
they had. Stronger rows trigger fewer preventive actions.

This repository holds synthesizable SystemVerilog for the memory-controller
version of Svärd, together with self-checking testbenches.

## Where it sits

```
                 DRAM commands + addresses
  Memory   ┌───────────┐ ─────────────────────────────────────────► DRAM
  requests │  request  │        │ activated row                      rank(s)
  ───────► │ scheduler │        ├──────────────┐                        │
           └───────────┘        ▼              ▼ act_*                  │
                 ▲       ┌─────────────┐  ┌──────────────────────┐      │
                 │       │  existing   │  │ svard                │      │
   preventive    └───────│ read dist.  │◄─│  hcfirst_table x 32  │◄─────┘
   action                │  defense    │  │  meta_bin_capture    │ read data
                         └─────────────┘  │  bin_threshold_lut   │ + metadata
                          resp_* (row,    └──────────────────────┘ (rd_*)
                          bin, HCfirst)
```

The scheduler and the defense are not part of this RTL. They meet `svard` at
its ports. `act_*` is a copy of every ACT on the command bus. `resp_*` is the
answer for that ACT. `rd_*` carries the metadata bits of read data (only for
the in-DRAM profile, see below).

## The vulnerability profile

**Bins.** A row is not given an exact HCfirst. It is given a 4-bit *bin id*.
Characterization tests every row at 14 hammer counts: 1K, 2K, 4K, 8K, 12K,
16K, 24K, 32K, 40K, 48K, 56K, 64K, 96K and 128K (K = 1024). A row's HCfirst is
the smallest of these counts at which it flips, so at most 14 classes exist
and 4 bits suffice. In this RTL, bin *i* is the *i*-th count in ascending
order. Bin 0 is the weakest class. Codes 14 and 15 are spare and map to the
weakest value. A row that survives 128K is conservatively put in bin 13.

**Translation.** The bin id is turned into an HCfirst value by 16
programmable 18-bit registers (`bin_threshold_lut`). After reset they hold the
characterized counts above. Keeping the translation separate from the per-row
table has one purpose: a profile can be retargeted without rewriting 4 M
table entries.

**Scaling to other chip generations.** To study future, more vulnerable
chips, the whole profile is scaled so that its weakest row equals a target
worst-case HCfirst `T` (the value a defense without Svärd would be configured
for). Every class value becomes `HC × T / HCmin`, where `HCmin` is the
module's weakest measured row. For example, a module whose rows fail between
32K and 128K, scaled to `T = 64`, maps 32K → 64 and 128K → 256. Software
writes the 16 scaled values into the registers. Classes below `HCmin` do not
occur in that module; the testbenches program them to `T`.

**Whose vulnerability an entry describes.** A row's HCfirst is measured
with the row as the *victim*: its two physical neighbours are hammered
alternately. The lookup, however, uses the address of the row being
activated, which is the *aggressor*. The entry for row R should therefore
hold the weakest bin among the rows that activating R can disturb, that is,
its physical neighbours. Which rows those are depends on the DRAM's internal
row remapping, which only the characterization knows. This is why the mapping
is applied when the profile is written, and the hardware does a single
lookup with the activated address.

**Updates in the field.** Rows can weaken with aging: after 68 days of
hammering at 80 °C, a few rows of one module moved from 12K to 8K. The
per-row table therefore has a write port, so a row's bin can be lowered
while the system runs.

## Datapath and timing

There are two ways to obtain a row's bin. Both are built, and the static input
`cfg_use_dram_meta` chooses between them.

**Source A: table in the memory controller (`cfg_use_dram_meta = 0`).**
There is one `hcfirst_table` per bank, with `N_ROWS × 4` bits each. The
default is 2 ranks × 16 banks × 128K rows, which makes 32 tables and 16 Mbit
in total. The bank of an ACT selects the table, and the row address indexes
it.

```
cycle      t            t+1                     t+2
act_valid  ACT(r,b,row)
table                   bin = table[b][row]
lut                                             HCfirst = reg[bin]
resp_valid                                      1   (row, bin, HCfirst)
```

At 0.47 ns for an SRAM of this size, the lookup fits well inside the row
activation it overlaps with (tRCD, about 14 ns). The defense therefore has the
threshold before the row can be read or written. The unit accepts one ACT per
cycle, back to back.

**Source B: bins stored in DRAM (`cfg_use_dram_meta = 1`).** Each row stores
its own bin in four spare data integrity bits, which come back in parallel
with read data. This adds 4 bits to an 8 KB row, or 0.006 % of the array, and
no latency. The bin of a freshly activated row is known only when the first
read of that row returns. `meta_bin_capture` keeps, per bank, the open row
and a *pending* flag:

- an ACT records the row and sets *pending*;
- the first read return of that bank while *pending* is set is taken as the
  bin, and *pending* is cleared;
- later reads of the same open row are ignored.

The response (`resp_valid`) then follows two cycles after that read return.
The defense must also protect the cells that hold the metadata, as it does
for data. That is the defense's job and is not modelled here.

**Response.** `resp` is a packed struct `hc_resp_t` of `{addr (rank, bank,
row), bin, hcfirst}`. The address is returned so that a defense with its own
pipeline can match the answer to its bookkeeping.

## Reset and loading

An SRAM cannot be reset in one cycle, so after `rst_n` each table writes
bin 0 (the weakest class) into every row, one row per clock. This takes
`N_ROWS` cycles (131,072 at full size), and all tables run in parallel.
`ready` rises when all 32 tables are done. Until then:

- a lookup returns bin 0, so a defense is never handed a threshold above the
  worst case;
- profile writes are not allowed, and an assertion flags them.

After `ready`, software loads the profile with `prof_we/prof_addr/prof_bin`
(one row per cycle) and the translation with `lut_we/lut_bin/lut_hc`. Until a
row is written it behaves as the weakest class, which is exactly what a
defense without Svärd assumes for every row.

## Using the response in a defense

How a given defense turns HCfirst into its internal threshold is specific to
that defense and is not part of this RTL. Some examples of what a defense
might do:

- a counter-based defense triggers at a fraction of HCfirst;
- a probabilistic one derives its refresh probability from it;
- a throttling one derives its blacklist threshold from it.

`tb_svard` contains a minimal stand-in: per-row activation counters that take
a preventive action when a row reaches its HCfirst. It runs once with Svärd's
values and once with the fixed worst case. When a weak row (HCfirst 64) and a
strong row (HCfirst 256) are each activated 2048 times, the results are:

- the weak row gets 32 actions in both runs;
- the strong row gets 8 actions with Svärd and 32 without.

`tb_svard_hc_sweep` repeats this comparison for profiles scaled to
worst-case HCfirst values from 4K down to 64. It uses 40,000 ACTs per run,
70 % of them to eight hot rows. With the stand-in defense, the total number
of preventive actions falls by roughly 40 % at every target. For a module
whose rows fail between 32K and 128K, at HCfirst 64, the total is 270 actions
with Svärd against 436 without. The hot rows of the weakest class get
identical counts in both runs. These counts describe only the stand-in
defense and this synthetic stream, not system performance.

## Module overview

| file | contents |
|---|---|
| `rtl/svard_pkg.sv` | organization constants, hammer-count table, `row_addr_t`, `hc_resp_t` |
| `rtl/hcfirst_table.sv` | one bank's bin table: 1-cycle read, write port, reset sweep |
| `rtl/bin_threshold_lut.sv` | 16 × 18-bit bin → HCfirst registers, 1-cycle lookup |
| `rtl/meta_bin_capture.sv` | per-bank first-read capture of metadata bins |
| `rtl/svard.sv` | top: 32 tables, metadata capture, translation, mode select |

The default parameters describe the evaluated system: DDR4, one channel,
2 ranks, 4 bank groups × 4 banks, 128K rows per bank. `svard` takes `N_ROWS`
as a parameter. Ranks and banks are package constants in `svard_pkg`.

## Where this RTL goes beyond, or departs from, the description it follows

The mechanism's description gives the per-row 4-bit bin, the table's place in
the memory controller and its indexing by the activated row, the metadata
alternative, and the hand-off of HCfirst to the defense. Everything below is
this design's own choice:

- the bin encoding (ascending hammer counts, bin 0 weakest, spare codes
  mapped to the weakest value);
- the programmable bin → HCfirst registers and their 18-bit width;
- the two-cycle latency and the register stages;
- the reset sweep and the `ready` handshake;
- read-first behaviour on simultaneous read and write of one entry;
- having both profile sources present at once behind `cfg_use_dram_meta`, a
  static input that may change only while no lookup is in flight;
- returning the row address and bin along with HCfirst.

The table size follows the evaluated system, 128K rows per bank. A 64K-row
bank (the size used for the table's area estimate) is `N_ROWS = 65536`.

Not included:

- the memory request scheduler;
- the five defenses Svärd was evaluated with;
- the DRAM itself;
- Bloom-filter compression of the profile, which is only suggested as a
  possible optimization;
- a cached profile region in DRAM;
- the in-DRAM-chip placement of Svärd;
- the characterization setup that produces the profile.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself through
a watchdog if it hangs. With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_svard \
    rtl/svard_pkg.sv rtl/hcfirst_table.sv rtl/bin_threshold_lut.sv \
    rtl/meta_bin_capture.sv rtl/svard.sv tb/tb_svard.sv
./obj_dir/Vtb_svard
```

| testbench | what it covers |
|---|---|
| `tb_hcfirst_table` | sweep length = `N_ROWS`, lookups during the sweep, all rows cleared, random load and read-back against a shadow copy, read-first, 1-cycle latency (1024 rows) |
| `tb_bin_threshold_lut` | reset mapping of all 16 codes, scaled profile for `T = 64`, tag transport, read-first, 1-cycle latency |
| `tb_meta_bin_capture` | 20,000 random cycles of ACTs and reads over 32 banks against a reference model: only the first read after an ACT yields a bin; ACT/read collisions |
| `tb_svard` | end to end at 1024 rows per bank |
| `tb_svard_hc_sweep` | the worst-case HCfirst sweep: two module profiles (rows 32K–128K and 8K–40K) scaled to 4K, 2K, 1K, 512, 256, 128 and 64; 40,000 ACTs each with hot rows; prints preventive actions with and without per-row thresholds |
| `tb_svard_full` | the same flow at the default size (4 M rows, about 16 s) |

`tb_svard` and `tb_svard_full` each check every response for its value, its
address and an exact two-cycle latency. The flow is:

1. lookups during the reset sweep;
2. the power-on mapping;
3. profile load of every row, then 5000 back-to-back lookups;
4. the weak/strong hammering comparison;
5. a field update of one row;
6. a rescale of the profile;
7. a switch to metadata mode with first and repeated reads, and back.

Each of these mechanisms is counted, and a count of zero fails the test. For
the other testbenches, pass the module's file together with `svard_pkg.sv`.
The testbenches drive inputs with blocking assignments one time unit after
the clock edge, so the DUT always samples settled values.
