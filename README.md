# HARP in RTL: finding the bits that on-die ECC will get wrong

Many memory chips now correct errors inside the chip before data leaves it. An
on-die single-error-correcting (SEC) code fixes any one bad bit in a word.
However, the controller cannot see how the chip maps data to the code, or how
it fixes errors. Two or more raw errors in one word are beyond the code. The
decoder then "corrects" one more bit that was fine, so that bit is miscorrected,
and the controller receives data with errors in bits that never failed. A memory
controller that wants to find every bit that can fail before the fault shows up
(error profiling, so that the bits can be repaired) therefore faces an
unknown, data-dependent mapping between failing cells and wrong bits.

HARP (Hybrid Active-Reactive Profiling), proposed by Patel, Oliveira and Mutlu
(MICRO 2021), splits the problem in two:

- **Bits that fail themselves (direct errors).** These are found *actively*, by
  reading the chip with its ECC decoder bypassed. Raw data bits are then visible,
  and each failing cell shows up as itself. No knowledge of the code is needed.
- **Bits that are wrongly flipped by the decoder (indirect errors).** These are
  left to *reactive* profiling. Once every direct-error bit is repaired, at most
  one indirect error can remain in a word at any time. A simple secondary SEC
  code in the controller can correct that one error and record where it
  happened, and the bit is repaired from then on.

The variant **HARP-A** (HARP-aware) assumes the controller knows the on-die
parity-check matrix. From the direct-error bits it can then compute which bits
could be miscorrected, and it adds those to the profile before they are ever
seen. **HARP-U** (unaware) does not use this knowledge.

This repository gives a synthesizable SystemVerilog implementation of the whole
path:
- the on-die encoder and decoder with the bypass;
- the active profiler;
- the HARP-A precompute unit;
- the secondary-ECC reactive profiler;
- a bit-granular repair mechanism;
- the memory controller that sequences them.

Self-checking testbenches use a behavioural model of an error-prone DRAM array.

## Direct and indirect errors, on one word

The on-die code is a systematic (71,64) Hamming code:
- 64 data bits are stored unchanged;
- 7 parity bits are added;
- H = [A | I₇].

When reading, the decoder computes the syndrome s = H·c′.
- If s is zero, the word is returned as is.
- If s equals the column of data bit m, bit m is flipped.
- If s equals a parity unit column, or no column at all, the data is returned
  unchanged.

Suppose cells i and j both fail. The syndrome is then hᵢ ⊕ hⱼ. If that equals
the column h_m of a third data bit m, the decoder flips m:
- i and j are the **direct** errors;
- m is the **indirect** error.

Which m appears depends on H, which the chip vendor does not publish, and on
which at-risk cells happen to fail in that read. A profiler that reads through
the decoder can therefore miss at-risk bits that need a rare combination of
failures.

## The on-die code's columns (`harp_pkg`, `sec_encoder`, `sec_decoder`)

H is built in one place: `harp_pkg::hamming_col(i, P, desc)`.
- Data column i is the i-th P-bit value with at least two ones.
- Values are taken counting down from 2^P−1 (`desc=1`, used on-die) or counting
  up (`desc=0`, used by the secondary ECC).
- Parity bit r has the unit column of row r.
- Row 0 is the column's most significant bit.

For k = 4 and the counting-down order, this gives exactly the example matrix of
the HARP paper: data columns 111, 110, 101, 011, followed by I₃.

The paper evaluates many randomly generated matrices. A chip has one, so here it
is fixed. Any systematic SEC matrix whose columns have weight ≥ 2 and are
distinct works the same way. Everything that depends on H uses the package
function:
- the encoder;
- the decoder;
- the HARP-A unit.

`sec_encoder` is combinational. Its output carries the data bits unchanged in
`c[63:0]` and the parity bits in `c[70:64]`, with `c[64+r]` being H row r.

`sec_decoder` is also combinational. Its outputs are:
- the corrected data;
- the syndrome;
- the position of the flipped bit (`corr_pos`);
- whether a parity bit was blamed (`corr_parity`);
- whether no column matched (`no_match`).

With `bypass` set, it returns the stored data bits untouched.

## Decode bypass (`ondie_ecc`)

`ondie_ecc` is the chip-side logic between the memory interface and the storage
array.
- A write encodes the 64-bit word into 71 bits.
- A normal read decodes the stored word.
- A read issued with `mem_bypass=1` returns the raw 64 data bits as stored.

The bypass flag is latched when the read is issued, so it belongs to that read
even if the command bus changes during the array's latency. Read data appears
together with the array's `st_rvalid`; the decoder adds no register stage. The
parity bits are never returned: a bypass read shows data cells only. Direct
errors in parity cells are therefore invisible to active profiling, and this
matches what a real chip's bypass would give. The array itself is not RTL: it is
an analog DRAM core. Its port (`st_*`) is brought out of the top module, and the
testbenches attach `tb/error_prone_store.sv` to it.

## Active profiling (`active_profiler`)

A profiling run is a number of **rounds**. In each round the profiler:
1. writes a pattern into every word, one word per cycle;
2. waits `prof_wait` cycles, the interval during which cells can lose their
   charge (for example a retention test with refresh paused);
3. reads every word back with the bypass set;
4. XORs the raw data with the pattern it wrote.

Every bit that differs is marked in the error profile through the repair
mechanism's mark port. The profile is the union over all rounds.

Three patterns are built:

| `prof_pattern` | data |
|---|---|
| `PAT_RANDOM` | xorshift64 words. Odd rounds write the inverse of the previous round; a new random pattern starts every two rounds. |
| `PAT_CHARGED` | all ones, every round |
| `PAT_CHECKERED` | 0xAAAA… in even rounds, inverted in odd rounds |

The generator is re-seeded at the start of each pass. The read pass therefore
regenerates the data it wrote, and no copy of the pattern is stored.

**Timing.** With D = 2^ADDR_W words and a store that answers one cycle after a
read:
- one round takes exactly 3D + W + 1 cycles, where W is `prof_wait`: D writes,
  W wait cycles, and D reads of 2 cycles each;
- R rounds finish with `done` in cycle 1 + R·(3D+W+1) after `start`.

`tb_active_profiler` checks this count.

## HARP-A: precomputing indirect errors (`harpa_precompute`)

For each word, the controller reads the word's direct-error mask from the
profile and starts the unit.
1. The unit captures the positions of the lowest MAXB = 8 set bits. If there
   are more, `overflow` is raised and the rest are ignored.
2. It walks through every subset of two or more captured bits, one subset per
   cycle.
3. For each subset it XORs the H columns of its bits. If the result equals the
   column of a data bit, that bit is added to `indirect`.

With n captured bits it finishes in cycle 2^n, or in cycle 1 for n < 2. In the
paper's evaluation a word has at most five errors, so this takes at most 32
cycles per word.

The exhaustive enumeration is this design's choice. The paper only says that the
possible miscorrections are computed from H using a method from earlier work.
Predicted bits are written into the same profile as the direct ones, and they
are repaired the same way.

## Reactive profiling with the secondary ECC (`reactive_profiler`)

The controller keeps its own SEC code over each 64-bit word. This is a second
(71,64) Hamming code with the counting-up column order, so its H differs from the
chip's. Its 7 parity bits per word sit in a controller-side array that is written
on every CPU write.

On every CPU read the profiler checks the repaired data against that parity.
- If the syndrome names a data bit, that bit is corrected. Its position is
  reported (`ev_reactive`, `ev_reactive_addr`, `ev_reactive_pos`) and marked in
  the profile, with the corrected value as the replacement bit. From then on,
  the repair mechanism fixes it before the secondary code sees it.
- A non-zero syndrome that names no data bit is counted as **unlocated**
  (`cnt_unlocated`). Either two or more errors reached the secondary code, or
  only its own parity was hit.

Words never written since the profile was cleared are not checked.

The reason for this order: after active profiling has found every direct-error
bit and those bits are repaired, a word can still suffer at most one indirect
error per read. A second miscorrected bit would need another uncorrectable
pattern at the same moment, and the on-die decoder flips only one bit per read.
One error per read is exactly what a SEC secondary code can handle. Until the
direct bits are all known, this does not hold. The "under-profiled" test below
shows what happens then.

## Bit repair (`repair_mechanism`)

This is an ideal bit-granular repair, as assumed by the paper's case study. For
each word it stores a 64-bit mask of repaired bits and 64 replacement bits.
- **Read.** The repaired data is `(raw & ~mask) | (repl & mask)`.
- **Write.** The replacement bits of the word's masked bits are refreshed from
  the new data.
- **Mark.** A profiler sets mask bits, and optionally their replacement values,
  using per-bit enables.

Lookups are registered: the address is in one cycle, and mask and replacement
appear in the next. A per-word valid flag makes `clear` (empty the whole profile)
a single-cycle operation.

## Memory controller: datapath, phases and timing (`memory_controller`, `harp_system`)

`harp_system` is the top level. It holds `memory_controller` and the chip-side
`ondie_ecc`, and exposes the CPU port, the profiling controls, the event
counters and the storage-array port.

The data paths run in the order of the HARP system diagram:

```
write: CPU -> secondary-ECC encode -> repair (refresh replacement bits) -> chip (on-die encode -> array)
read:  array -> on-die decode -> repair -> secondary-ECC check/correct (reactive profiling) -> CPU
```

The `mode` output shows the phase:

| phase | entered | what happens |
|---|---|---|
| `MODE_ACTIVE` | `prof_start` | The profile and the secondary parity are cleared, and the active profiler owns the chip for `prof_rounds` rounds. The CPU is stalled (`cpu_ready=0`). |
| `MODE_PRECOMP` | after active, only if `harp_aware` was set | Each word's mask is looked up and the HARP-A unit runs on it. The predicted bits are added to the profile. |
| `MODE_NORMAL` | otherwise | CPU reads and writes run, with repair and reactive profiling. `prof_done` pulses once on entering it. |

**CPU timing.**
- A request is accepted when `cpu_req && cpu_ready`.
- A write occupies 3 cycles: accept, profile lookup, then the chip write and the
  secondary parity update.
- A read issues to the chip in the cycle after accept. `cpu_rvalid` comes with
  the chip's read data: 2 cycles after accept with a one-cycle array.
- One request is in flight at a time.

**Counters.** The following are 32-bit counters:
- `cnt_active_obs`: bits marked by active profiling;
- `cnt_harpa_bits` and `cnt_harpa_overflow`: HARP-A additions and overflows;
- `cnt_reactive`: reactive identifications;
- `cnt_unlocated`: unlocated secondary-ECC syndromes.

The active and HARP-A counters restart with each `prof_start`.

Assertions check the handshake rules:
- `cpu_rvalid` only answers a read;
- one chip read is outstanding at a time;
- the repair array has one writer per cycle.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `K` | 64 | data bits per on-die ECC word, as in the paper's (71,64) code |
| `P` | 7 | on-die parity bits |
| `ADDR_W` | 10 | words in the memory (1024); this design's own choice |
| `MAXB` | 8 | direct bits per word that HARP-A enumerates; this design's own choice |

The (136,128) code the paper also mentions is `K=128, P=8`. The RTL elaborates
with those overrides, but they are not the default.

## Simulating

Everything runs under plain Verilator 5. For example, the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/harp_pkg.sv tb/tb_harp_system.sv --top-module tb_harp_system
./obj_dir/Vtb_harp_system
```

Replace the testbench name to run any other test. Each test prints
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

`tb/error_prone_store.sv` is the storage-array model. It is a behavioural model
and is not part of the design.
- Each word has a `risk` mask over its 71 cells, and `prob_pm` gives the per-read
  failure probability in thousandths.
- All cells are true cells: a 1 may decay to 0, and a 0 never fails.
- A failure persists until the word is rewritten.
- It counts reads and raw errors.

## What the tests show

`tb_harp_system` runs at the default size (1024 words). Each word has 2 to 5
at-risk cells at p = 0.5, and one word has 9. The test runs:

1. 8 rounds of HARP-U. It found 3026 of 3225 at-risk data bits, about 94%.
2. 128 rounds of HARP-U followed by CPU traffic: 0 wrong reads and 0 unlocated
   syndromes. 263 bits were identified reactively.
3. 128 rounds of HARP-A followed by the same traffic: 0 wrong reads and 0
   unlocated syndromes. Only 104 bits had to be identified reactively, because
   HARP-A had already predicted 2946 bits. The 9-bit word overflowed once.
4. One round of checkered pattern only (under-profiled), followed by traffic: 1162
   wrong reads and 352 unlocated syndromes. With direct errors missing, the
   secondary SEC code is overwhelmed.

Every mechanism is counted and must occur at least once:
- bypass reads;
- on-die corrections and miscorrections;
- repairs;
- reactive identifications;
- HARP-A cycles, bits and overflow;
- CPU stall cycles;
- reads where the secondary code saw more than one error.

`tb_harp_coverage` repeats the paper's coverage experiment at full size:
- n = 2, 3, 4 and 5 at-risk cells per codeword;
- p = 0.25, 0.5, 0.75 and 1.0;
- 128 rounds of random-pattern HARP-U.

Every configuration reached full direct-error coverage. It took 2 rounds at
p = 1.0, 10–16 at p = 0.75, 21–35 at p = 0.5 and 53–72 at p = 0.25. In the
following traffic, no read ever left more than one error for the secondary code,
and every read returned the written data.

Each block also has a unit testbench that compares it with an independent
reference model in the testbench. Each was also shown to fail against a
deliberately broken copy of its block.

## Departures from the paper and design choices

- **Fixed H.** The paper averages over random parity-check matrices. Here one
  systematic matrix is built. It is generated as above and reproduces the
  paper's small example.
- **Secondary ECC.** The paper asks only for a code at least as strong as the
  on-die one, correcting one error per on-die word. Here it is a (71,64) SEC
  Hamming code with a different column order, and its parity is kept in the
  controller.
- **Profiling loop.** Pattern generation, the inversion schedule, the wait
  counter, and the one-read-at-a-time read pass are implementation choices.
- **HARP-A enumeration.** HARP-A looks only at data-bit combinations, and at most
  MAXB = 8 bits per word. Parity cells are invisible through the bypass, so
  combinations that include a failing parity cell are left to reactive
  profiling.
- **Ideal repair.** Repair is an ideal per-bit mask and replacement store held in
  registers. The paper treats the repair mechanism as given and does not design
  one.
- **Not RTL.** The DRAM array, the chip's I/O and the host CPU are not RTL. The
  array port and the CPU port are brought out of the top level instead.
- **Not built.** The paper's comparison profilers (Naive and BEEP) are baselines
  and are not built.
