# FindeR: FM-Index backward search inside ReRAM memory banks

Exact pattern matching of DNA reads against a reference genome is usually done with an
FM-Index. A backward search walks the query from its last symbol to its first and keeps a
suffix-array interval `[low, high)`. Every step replaces both ends by

    LFM(s, p) = Count(s) + Occ(s, p)

where `Count(s)` is the number of symbols in the Burrows-Wheeler transform (BWT) that sort
before `s`, and `Occ(s, p)` is the number of `s` among the first `p` BWT positions. The work
is memory-bound: each step costs two random accesses into a multi-gigabyte index and
little arithmetic.

This RTL places the arithmetic next to the index, inside ReRAM banks of an NVDIMM. Each
bank has its own pipeline:

- the count of `s` inside a 128-symbol BWT bucket is found by a ReRAM crossbar that
  measures a Hamming distance as an analog current;
- an 8-bit ADC digitises that current;
- ReRAM lookup tables add the result to the bucket's stored marker.

A controller on the module schedules whole searches over the banks. The host only sends
a query and receives the final interval.

The RTL models the paper's main configuration:

| Item | Value |
|---|---|
| Banks | 8 |
| Bucket width d | 128 symbols |
| Marker width | 32 bits |
| Crossbars per pipeline | three Hamming-distance crossbars (RHUs), each 1024×1024 |
| Error-correcting pointers | six per RHU |
| Wear leveling | every 100 000 Hamming-distance operations |
| Adders | four 8-bit LUT adders |
| Pipeline | 9 stages at 100 MHz (90 ns per LFM, one LFM per cycle per bank) |

## Index format

Symbols are 2 bits: A=0, C=1, G=2, T=3. The BWT of length `n+1` (including the terminator
`$`) is cut into buckets of `d` symbols. A bucket is one memory word of `2d + 128` bits
(384 bits at d = 128):

| Bits | Contents |
|---|---|
| `[2j+1 : 2j]` | BWT symbol at position `bucket*d + j` |
| `[2d + 32s + 31 : 2d + 32s]` | marker for symbol `s`: `Count(s) + Occ(s, bucket*d) + d` |

Storing `+d` in the marker lets the datapath finish with a single subtraction.

`$` has no 2-bit code. Its slot holds any code, and its BWT position is supplied on
`dollar_pos`, one value per direction. Forward and reverse indexes share one bank array:

- address bit `FM_AW-1` selects the direction;
- the lower bits are the bucket number.

A complete search starts from `low = 0`, `high = n + 1`. The interval is empty when
`low >= high`.

## How a bucket count becomes a Hamming distance

The crossbar cannot count "symbol `s` in the first `off` positions" directly. It can only
count mismatches between the bucket on the bit lines and a pattern on the word lines. The
pipeline therefore drives this pattern (`rhu_stage`):

- positions `j < off` carry the query symbol `s`;
- every other position carries the bit-inverse of the stored symbol;
- the `$` position also carries the bit-inverse of the stored symbol.

Positions driven with the inverse always mismatch. Hence `hd = d - (number of s among
the first off positions)`, and

    marker[s] - hd = Count(s) + Occ(s, bucket*d) + d - d + Occ_in_bucket = LFM(s, p)

One current-limiting transistor is shared by the two bit lines of a symbol. A symbol that
differs in one bit and a symbol that differs in both each add exactly one LRS cell
current.

## The bank pipeline (`finder_bank`)

A request entering in cycle 0 returns its result in cycle 9:

| Cycle | Stage | Block |
|---|---|---|
| 0 | read working-RHU pointer, P_w and the six P_e of that RHU | `pointer_fetch` |
| 1 | bucket read from the FM-Index array; RESET of the chosen RHU in parallel | `fm_index_mem`, `rhu_stage` |
| 2 | SET: bucket on bit lines, pattern on word lines | `rhu_stage` / `rhu` |
| 3 | read: current summed and held | `rhu_stage` / `rhu` |
| 4 | 8-bit conversion, `hd` | `adc` |
| 5–8 | `marker - hd`, one byte per cycle with borrow chaining | `lut_adder_stage` / `lut_adder8` |
| 9 | `resp_valid`, `resp = {tag, LFM}` | |

The three RHUs take requests in turn, so a new Hamming distance is ready every cycle even
though each needs RESET, SET and read. Overlapping the RESET with the bucket read is this
design's way to meet both the three-step RHU and the 90 ns total.

Each LUT adder is a 256 × 512 × 9-bit table addressed by `{A, Cin, B}`. The testbenches
load `{borrow, A - B - Cin}`. The table comes from outside through `lut_prog_*`, which
writes all adders of all banks at once. 131 072 writes fill it.

### Wear leveling and error-correcting pointers (`wear_ctrl`)

Only one diagonal pair of cells in each 1024 × 1024 crossbar works at a time. After
`WL_PERIOD` Hamming-distance operations on an RHU, the controller:

1. lowers `req_ready`;
2. waits `DRAIN` cycles for requests in flight;
3. has that RHU break the old pair and form the pair `P_w + 2 (mod 1024)`, taking
   `BREAK_CYCLES`;
4. writes the new `P_w` back and lets requests in again.

When an RHU reports a failed cell, the controller fills the next of its six pointer slots
with the cell's position. The RHU then computes that symbol on spare cells. A seventh
failure sets `rhu_dead` and stays uncorrected.

## Search scheduling (`smc`, `smc_bank_sched`)

A host request carries:

- an id;
- up to `QMAX` symbols, with `query[len-1]` searched first;
- a start interval;
- a direction.

`smc` gives each new search to the next enabled bank (`bank_en`) that has a free context.
Finished searches come back through a round-robin arbiter in completion order.

Each bank scheduler keeps `CTX` searches and repeats one step per ready search:

1. Put the `low` request into the bank queue, then the `high` request one cycle later.
2. If `low` and `high` fall in the same bucket, mark the `low` request "keep" and the
   `high` request "from sense amplifiers". The array is then read only once. The latency
   does not change; only array reads are saved. This is *coalescing*.
3. When both results are back, drop one symbol.
4. The search ends when the interval is empty or no symbols remain.

A search of length 1 from any interval is a single LFM step in either direction. A host
can build bi-directional or k-mismatch searches from such steps.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `NB` | 8 | banks |
| `D` | 128 | symbols per bucket |
| `FM_AW` | 26 | bucket address bits: 1 direction bit + 2^25 buckets (4.29 G symbols per direction) |
| `CTX` | 16 | searches in flight per bank |
| `QMAX` | 128 | longest query per request |
| `QDEPTH` | 16 | bank queue depth |
| `ID_W` | 16 | request id width |
| `WL_PERIOD` | 100000 | HD operations between diagonal-pair changes |
| `BREAK_CYCLES` | 10000 | cycles for one break and form |

W = 1024, three RHUs and six pointers are fixed inside `finder_top`. The lower blocks
expose them as parameters.

At these defaults the index arrays are 8 × 2 × 2^25 × 384 bits, which is 25.8 GB. They
hold a bi-directional index of a 3.1 Gbp human genome in each bank, with every bank
holding its own copy. A 101-symbol read fits one request. Longer reads have to be sent
as seeds of at most 128 symbols, chaining the returned interval.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>`, and stops itself with a
watchdog if the design hangs. A typical command (here for the top level) is:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
      rtl/finder_pkg.sv tb/tb_fm_pkg.sv tb/tb_finder_top.sv \
      --top-module tb_finder_top -o sim && obj_dir/sim

`tb_fm_pkg` builds the BWT, the buckets and a reference backward search in software.
The datapath testbenches compare against it.

**Largest simulation.** The end-to-end test `tb_finder_top` runs the whole design with
these sizes:

- 2 banks, d = 16, 64 buckets per direction;
- a random 600-symbol reference;
- a 400-operation wear period.

It runs 600 searches: reads cut from the reference and random queries, in both
directions, lengths 1–30. Each result is checked against the software search. It also
requires each of these to happen at least once:

- coalesced pairs and sense-amplifier hits;
- diagonal-pair retirement and the stall it causes;
- pointer allocation after an injected cell failure;
- a full bank queue;
- a count across the `$` position;
- borrows between byte lookups;
- searches that end empty and searches that use all their symbols.

`tb_finder_bank` runs one bank at d = 16. The other block testbenches run their blocks at
the defaults where that is cheap: `lut_adder8`, `lut_adder_stage`, `adc` and `pointer_fetch`;
`rhu` and `rhu_stage` run at d = 16 with 64-wide arrays. A run at the default size was not done: the index arrays alone need
tens of gigabytes of simulator memory.

Synthesis of the full-size index arrays also needs more memory than a workstation has.
The crossbar and ADC models use `real` currents, so blocks containing them do not go
through synthesis. They are compiled and linted like the rest.

## Behavioural parts

`rhu` and `adc` are models of analog circuits, written with `real` values:

- **RHU current.** The current is `I_LRS_UA` times the number of mismatching symbols,
  with `I_LRS_UA` = 500 µA for 1 V over 2 kΩ.
- **ADC.** The ADC rounds to the nearest multiple of `I_LRS_UA` and saturates at 255.
- **Cell failures.** Cell failure is injected from outside (`wearout_*`). The RHU reports
  a failure one cycle later. The detection circuit itself is not described.

## Where this design departs from the paper or fills gaps

- **Pipeline timing.** The paper's pipeline figure spends three cycles in the RHU
  (RESET, SET, read). Its latency breakdown gives the RHU 20 ns of a 90 ns LFM. Here the
  RESET overlaps the bucket read, which keeps both the three operations and the 9-cycle
  total.
- **Termination and coalescing.** The paper's text states these rules with the
  comparisons in an order that cannot be right. Here a search ends when `low >= high` or
  the query is used up. Coalescing happens when `low` and `high` fall into the same
  bucket.
- **Bank choice.** The paper says the bank is decoded from the request address. That
  would require the index to be striped across banks, which it does not describe. Here
  every bank holds a full index and a whole search stays on one bank.
- **RHUs per pipeline.** The system figure's configuration example lists 8 RHUs. The
  text asks for three per pipeline, which is what is built.
- **`$` handling.** `dollar_pos` and the inverted-pattern trick are this design's own.
  So are the `+d` inside the markers and the subtraction table in the LUT adders. The
  paper says the table holds "A minus B" but not how the carry input is used.
- **Wear leveling.** These are this design's choices: advancing `P_w` by 2, stalling the
  whole bank while one RHU is re-formed, and the 10 000-cycle re-form time.
- **Scheduler sizes.** The queue depth, context count, maximum query length and id
  width are not given by the paper.
- **Not modelled:**
  - the split of a bank into strips and tiles;
  - the eight chips interleaved into one bank;
  - the host software that maps intervals to genome positions;
  - the k-mismatch and bi-directional search algorithms.

## Files

| File | Contents |
|---|---|
| `rtl/finder_pkg.sv` | shared widths, symbol and request types |
| `rtl/finder_top.sv` | the module: controller plus `NB` banks |
| `rtl/smc.sv`, `rtl/smc_bank_sched.sv`, `rtl/sync_fifo.sv` | search scheduling |
| `rtl/finder_bank.sv` | one bank pipeline |
| `rtl/pointer_fetch.sv`, `rtl/fm_index_mem.sv`, `rtl/rhu_stage.sv`, `rtl/rhu.sv`, `rtl/adc.sv`, `rtl/lut_adder_stage.sv`, `rtl/lut_adder8.sv`, `rtl/wear_ctrl.sv` | pipeline stages and their parts |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_fm_pkg.sv` | software FM-Index (reference model) |
| `tb/tb_bank_model.sv` | behavioural bank used by the controller tests |
