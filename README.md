# DIVA-DRAM memory-controller logic: profiling and shuffling for design-induced latency variation

A DRAM cell does not take the same time to access wherever it sits in the
chip. Rows far from the sense amplifiers, and columns far from the wordline
drivers, see longer wires, so they need the longest tRCD, tRAS, tRP and tWR.
This variation comes from the chip's layout, so it repeats in a fixed pattern
in every subarray of every chip of the same design. The datasheet timings are
set for the slowest cell on the slowest chip at the worst temperature. Most
DIMMs, most of the time, could run faster.

This RTL builds the controller-side logic that uses this fact. It is meant
for one 4 GB DDR3-1600 ECC DIMM: eight x8 data chips plus one ECC chip, 8
banks, 65,536 rows per bank, 128 column bursts of 64 bytes per row, and
512-row subarrays. It has two mechanisms:

* **Profiling.** Each subarray has one *latency test row*: the row that the
  layout makes slowest. Software keeps these rows empty. From time to time the
  controller writes and reads back every test row at a lowered candidate
  timing. It keeps the lowest timing at which no test row shows an error that
  ECC cannot correct. All other rows then run at that timing plus one clock
  cycle of margin. Only 1024 rows are tested (0.2% of the DIMM), so one test
  pass takes about 1.4 ms instead of most of a second.
* **Shuffling.** A codeword of the (72,64) SECDED code is one burst beat
  across the nine chips. In every chip, the bits that fail first at reduced
  timing sit at the same burst positions. With the usual mapping, one weak
  beat therefore puts an error into the same codeword from all eight chips,
  which ECC cannot correct. The shuffle rotates each chip's burst order, so
  the eight copies of a weak position land in eight different codewords, one
  bit each. SECDED corrects every one of them.

Putting both together means the profiler can lower the timing until the test
rows show *uncorrectable* errors, not merely any errors. Single-bit errors
that the shuffle has spread out are corrected on every read.

## Block structure

```
 host_req_* ──┐                                  ┌── dram_cmd/bank/row/col
              ├─ arbiter ─ diva_timing_sel ─ dram_cmd_seq
 diva_profiler┘   (round-robin)   (test or data timing)
      ▲   │ candidate / data timing
      │   └──────────────┘
      │
      │        write: 8 x secded_enc ─ diva_shuffle ────────── dram_wdata (576)
      └── rsp  read : 8 x secded_dec ─ diva_shuffle (inverse) ─ dram_rdata (576)
            (FIFO of source bits routes each read back to host or profiler)
```

| Module | Role |
|---|---|
| `diva_pkg` | widths, the `timing_t` struct {tRCD, tRAS, tRP, tWR}, standard and minimum timings, command enum, SECDED helper functions |
| `secded_enc` / `secded_dec` | extended Hamming (72,64) encoder and decoder: corrects 1 bit, flags 2 bits |
| `diva_shuffle` | codeword ↔ burst-beat permutation, write and read directions |
| `diva_timing_sel` | decides whether a row is a test row; picks test or data timing |
| `dram_cmd_seq` | ACT/RD/WR/PRE sequencer whose four timings can change with every request |
| `diva_profiler` | the profiling rounds and the timing search |
| `diva_mc_top` | wires it all together for one DIMM |

The PHY, the DIMM, the host system and the SPD EEPROM are outside the design.
The top brings their signals out as ports: the command bus, a 576-bit line
per column command in each direction, and configuration inputs for the test
row offset and the test data pattern.

## Timing sets and their units

All timings are counted in controller clock cycles at 800 MHz (tCK = 1.25 ns).
A `timing_t` holds four 6-bit fields:

| Parameter | Standard (DDR3-1600) | Lowest the search may try |
|---|---|---|
| tRCD | 13.75 ns = 11 | 4 (5 ns) |
| tRAS | 35 ns = 28 | 12 (tRCD floor + 10 ns) |
| tRP  | 13.75 ns = 11 | 4 (5 ns) |
| tWR  | 15 ns = 12 | 4 (5 ns) |

There are always three sets:

* `cur_timing` is the lowest set that has passed a round.
* `test_timing` is what the test rows run at. While a round is in progress it
  is the candidate under test.
* `data_timing` is `cur_timing` plus `MARGIN` (1) cycles on each field, capped
  at the standard values. Every non-test row runs at it.

At reset all three are the standard values.

## The profiling search (`diva_profiler`)

This is the least obvious part. The overall idea — test the slow rows, keep
the lowest timing without multi-bit errors, add a margin — is well defined.
The order in which timings are tried is a choice, and this design makes it as
follows.

**A round.** For each bank, and for each subarray in it, the profiler:

1. writes the 64-bit pattern (repeated over all eight beats) to every column
   of the test row, closing the row with the last write;
2. reads every column back, closing the row with the last read;
3. waits for all reads of that row to return.

If `inverse` is set, the same is repeated with the inverted pattern. A write
then an activate-and-read exercises all four parameters. tWR comes from the
last write before the precharge. tRP comes from the precharge before the
reads. tRCD comes from the first read after activation, and tRAS from the
precharge after the reads.

A single fail bit is set by any read that:

* comes back with an uncorrectable codeword, or
* still differs from the pattern after correction.

Corrected single-bit errors do not set it.

**Choosing the candidate.** A pointer `p` walks round-robin over tRCD, tRAS,
tRP and tWR, one step per round. There is one *floor bit* per parameter:

* If field `p` of the current set is above its minimum and its floor bit is
  clear, the candidate is the current set with field `p` lowered by one cycle.
* Otherwise the candidate is the current set itself. This is a
  *re-verification* round.

**Updating after the round.**

| Round type | Result | Action |
|---|---|---|
| lowering | pass | candidate becomes current |
| lowering | fail | current unchanged, floor bit `p` set (stop lowering `p`) |
| re-verify | pass | floor bit `p` cleared, so the next visit tries lower again |
| re-verify | fail | field `p` raised by one cycle (up to standard); floor bit stays set |

The search therefore moves one cycle at a time, one parameter at a time, and
settles where each parameter is one cycle above the first failure. Because
floored parameters are re-verified on every visit, a DIMM that gets slower
(aging, temperature) is caught: the failing field is backed off, one cycle
per visit, until it passes again. A DIMM that gets faster is also tracked:
the next passing re-verification clears the floor bit, and the parameter is
tried lower again.

A round is started every `INTERVAL` cycles while `enable` is high, or at once
by `start`. The default is 64 ms, matching the refresh period. The round that
is in progress determines `test_timing`. Data rows switch to a new
`data_timing` at the end of the round.

**Cost.** One round over the full DIMM is 1024 rows × 128 columns × (1 write
+ 1 read) per pattern. At one column command per tCCD = 4 cycles that is
1,048,576 cycles (1.31 ms) per pattern. The RTL takes 1,117,093 cycles per
pattern, 6.5% more, spent on the activate and precharge of each row phase.
Host requests keep being served during a round; the arbiter alternates
between host and profiler.

**State kept.** The minimum is a fail bit and a row address register. Here
the register is 9 bits: `test_off`, which row of each subarray is the slow
one, the same for all subarrays. The search adds:

* the three timing sets (24 bits each);
* the four floor bits and the parameter pointer;
* the round counter and the bank/subarray/column counters of the walk;
* the interval timer.

The test pattern is an input, not stored.

**Steady state.** Once a parameter has settled, its floor bit is set. The
next visit re-verifies and clears the floor bit, and the visit after that
tries one cycle lower again and fails. So a settled parameter costs one
failing round in eight. Such failures touch only the test rows: the data
region keeps running at the last passing set plus the margin.

## Data path and the shuffle (`secded_*`, `diva_shuffle`)

A 64-byte line is eight 64-bit words. Each word is encoded into a 72-bit
codeword with the layout below. Codeword `b`, byte lane `c` (lane 8 is the
ECC chip), is then sent in burst beat

```
beat = (b + ROT_STEP * c) mod 8        ROT_STEP = 1 by default
```

Codeword layout:

```
code[63:0]  data (word bit i at Hamming position i-th non-power-of-two >= 3)
code[70:64] Hamming check bits at positions 1,2,4,...,64
code[71]    parity over all 71 other bits
```

On the DRAM side, beat `k` is `[72k +: 72]` of the 576-bit line and chip `c`
is `[8c +: 8]` within it. The read direction applies the inverse rotation.

Why this works: suppose a chip's beat `k` is slow (in the DIMM model of the
testbench, beats 2, 6, 5, ... fail in order as the timing gets lower). All
eight data chips fail at beat `k`. Under the rotation, chip `c`'s beat `k`
belongs to codeword `(k - c) mod 8`. These are eight different codewords with
one bad byte each. The bench flips one bit per byte, so each codeword has a
single-bit error, which the decoder corrects. With `ROT_STEP = 0` all eight
errors fall into codeword `k` and the decoder reports them as uncorrectable.

The ECC lane rotates by `8 × ROT_STEP mod 8 = 0`: the ECC chip keeps the usual
order. The same permutation could be built into the DRAM chips or into the
DIMM's address wiring. Doing it in the controller's byte lanes gives the same
placement of bits in the DIMM for unmodified chips.

The decoder computes the 7-bit syndrome `s` and the overall parity:

| Overall parity | Syndrome | Result |
|---|---|---|
| odd | data position | that data bit is flipped back, `ce` |
| odd | 0 or a power of two | check or parity bit wrong, data fine, `ce` |
| odd | no codeword position | `ue` |
| even | nonzero | `ue` (double error) |

A response's `ce`/`ue` is the OR over its eight codewords. The data-bit
position table is computed by a function in `diva_pkg` and stored as a
constant, so synthesis does not unroll a search loop.

## Command sequencing with per-request timing (`dram_cmd_seq`)

The sequencer takes one column request at a time, in order. Each request
carries its own timing set, chosen by `diva_timing_sel` from the row address.
This is what lets test rows and data rows run at different speeds on the same
bank.

Per bank it keeps saturating counters since the last ACT, PRE, WR and RD,
plus one global counter since the last column command.

* **ACT** needs `since_pre >= tRP` of the incoming request.
* **RD/WR** needs `since_act >= tRCD` and `since_col >= tCCD` (4). tRCD is
  taken from the set latched at ACT.
* **PRE** needs all three of:
  * `since_act >= tRAS`;
  * `since_wr >= CWL + 4 + tWR`, with tWR counted from the end of the burst
    and CWL = 8;
  * `since_rd >= tRTP` (6).

  tRAS and tWR are also taken from the set latched at ACT.

Policy:

* Pages stay open, except that `req_close` leaves a pending precharge on the
  bank. The sequencer issues it as soon as it is legal and the command bus is
  free.
* A request to another row of an open bank precharges first.
* `req_ready` pulses in the cycle the READ or WRITE is issued; write data is
  taken in that cycle.
* Commands are registered, one per cycle.

Refresh, tRRD, tFAW and read/write turnaround are not modelled. A full
controller would put them around this block.

## Arbitration and responses (`diva_mc_top`)

Host and profiler requests share the sequencer through a round-robin arbiter.
The arbiter locks onto its choice until the request is accepted, so a request
never changes under the sequencer. Reads return in order. A 16-entry FIFO of
one-bit source tags sends each decoded line to the host (`host_rsp_*`, with
`ce`/`ue`) or to the profiler.

Assertions check that:

* the host never touches a test row;
* the FIFO neither overflows nor underflows;
* the sequencer never activates an open bank and never issues a column
  command to a closed one.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `diva_mc_top` | `N_BANKS` | 8 | banks per rank |
| | `ROWS_PER_BANK` | 65536 | rows per bank |
| | `SA_ROWS` | 512 | rows per subarray (one test row each) |
| | `COLS` | 128 | 64-byte column bursts per row |
| | `INTERVAL` | 51,200,000 | cycles between profiling rounds (64 ms) |
| | `MARGIN` | 1 | cycles added to the data-region timing |
| | `ROT_STEP` | 1 | shuffle rotation; 0 gives the conventional mapping |
| `dram_cmd_seq` | `TCCD`, `CWL`, `TRTP` | 4, 8, 6 | fixed DDR3-1600 timings |

## Where this design departs from or goes beyond the published mechanism

* **The search order is this design's own.** That covers one parameter per
  round, one cycle per step, floor bits and re-verification. So is the
  failure criterion, "any uncorrectable codeword or any mismatch after
  correction", although multi-bit errors are the stated criterion.
* **No idle wait in the test.** The characterisation study lets cells sit for
  a refresh interval before reading back. The online test here reads back
  right after writing; no such wait is described for the online mechanism.
* **The shuffle is a lane rotation in the controller.** The published
  mechanism puts it in the chips or in the DIMM wiring, and does not fix the
  permutation.
* **Profiling is not folded into refresh.** It runs as ordinary traffic,
  interleaved with host requests, rather than as part of refresh. Refresh
  itself is not generated.
* **The test row offset is an input.** It would come from the SPD, which
  describes where the slowest rows are; it is not discovered here. The same
  offset applies to every subarray, and the reset value is 511. The test
  pattern is also an input.
* **Storage is larger than the bare minimum.** The minimum is one fail bit
  and one row address register (about 16 bits per DIMM). The search state
  listed above comes on top of that.
* **Row repair is out of scope.** The scheme relies on vendors repairing
  faulty test-row cells by column remapping rather than row remapping, so
  that the test rows stay where the layout puts them. That is a
  manufacturing policy, not controller logic.
* **Scheduling is plain.** The sequencer is in order, with one request at a
  time. An FR-FCFS scheduler with request queues, as in the evaluated system,
  would sit in front of it.
* **Address scrambling inside chips is not modelled.** The controller assumes
  that row `r` of a bank is physical row `r`, so the test row is at a fixed
  offset within each 512-row group.

## Simulating

Each testbench is self-checking. It ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_diva_mc_top \
    -y rtl -y tb +libext+.sv rtl/diva_pkg.sv tb/tb_diva_mc_top.sv
./obj_dir/Vtb_diva_mc_top
```

The package is named first; `-y` lets Verilator find the other modules by
file name. Change the top module and the last file to run another bench.
`-Wno-fatal` keeps the remaining style warnings (unused parameters of
reduced configurations, width extensions) from stopping the build.
Pass `+verilator+rand+reset+2` to the simulation to start
unreset state at random values.

| Testbench | What it checks |
|---|---|
| `tb_secded` | encoder against an independent bit-by-bit Hamming reference |
| `tb_secded_dec` | decoding with 0, 1 and 2 injected errors at every position class |
| `tb_diva_shuffle` | the mapping formula and its inverse; that one weak beat in all chips gives at most one error per codeword (and eight errors in one codeword with the conventional mapping) |
| `tb_diva_timing_sel` | test-row detection and timing choice |
| `tb_dram_cmd_seq` | a monitor that checks every timing rule on random traffic with random timing sets; exact ACT→RD = tRCD and ACT→PRE; eight row hits in 28 cycles (one per tCCD) |
| `tb_diva_profiler` | small geometry; the bench plays controller and DIMM with a failure threshold. Checks request order, the fail bit, convergence to the threshold, data = current + 1, recovery when the part gets slower or faster, and periodic rounds |
| `tb_diva_mc_top` | the whole controller at 2 banks × 64 rows, 16-row subarrays, 8 columns, on the behavioural DIMM model `dimm_model` (see below) |
| `tb_diva_mc_full` | the top at its default (full) size: one complete round with the inverted pattern and host traffic alongside. Checks that all 524,288 test-row column commands appear, the round length (within 110% of the ideal), and the resulting timings. About 2.2 M cycles. |

In `dimm_model`, slow rows and fast rows have different cycle requirements.
Short tRCD or tRP corrupts reads at the layout's slow beats; short tRAS or tWR
leaves the row weak.

`tb_diva_mc_top` counts each mechanism and fails if one never happens:

* passing rounds, failing rounds, reductions and raises;
* ECC corrections on host reads and on profiler reads;
* host/profiler arbitration conflicts;
* corrupted DIMM reads.

It also checks that the data-region timing converges one cycle above the
slow rows' needs, that an aging step makes the profiler back off, and that
the row-conflict read latency drops from 37 to 32 cycles. The drop is checked
as equal to the saved tRP + tRCD.

## Trust and limits

* Every block has its own testbench. Each testbench has been shown to fail
  against a deliberately broken copy of its block.
* The full-size benchmark runs one complete profiling round with every
  parameter at its default.
* The DIMM model is behavioural. Its failure pattern (which beats fail, and
  in what order) is a plausible stand-in for real design-induced behaviour,
  not measured data.
* Speed-ups in real applications depend on the whole memory system. They are
  not reproduced here.
