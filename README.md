# Reflex memory for Hierarchical Temporal Memory: an AFeCAM implementation

Hierarchical Temporal Memory (HTM) learns sequences. An encoder turns each input
sample into a binary pattern. A spatial pooler (SP) maps that pattern to a sparse
distributed representation (SDR) of 1024 bits. A sequence memory (SM) then
learns high-order transitions between SDRs and predicts the next one. The SM is
accurate but slow. Most of its work goes into transitions that are only first
order: "after A comes B".

A **reflex memory (RM)** handles those first-order transitions cheaply. It is a
table of triples (present SDR `R_i`, next SDR `R_i+1`, recurrence count). For
each new SDR it looks up every entry whose present state equals the SDR. It
returns the next state of the entry with the largest count. It also learns the
transition from the previous SDR to the current one.

A **control unit (CU)** scores RM and SM against what actually came next. It
decides which of the two to trust, and how each should be trained.

The RTL here is the hardware version of the RM. It holds 2048 entries in analog
ferroelectric CAM (AFeCAM) arrays, with a controller that runs the RM algorithm
as sequences of CAM operations. The CU sits beside it. Together they form the
top, `ahtm_top`. The encoder, SP and SM remain software and connect through ports.

## 1. Organisation of the memory

```
                 column decoder (present | conf | next | present+next)
 row decoder     +------------------+  +---------------+  +------------------+
 (array 0..M-1)  | present stage    |  | confidence    |  | next stage       |
  ----------->   | M AFeCAM arrays  |  | M customised  |  | M AFeCAM arrays  |
                 | P x (n*Q) bits   |  | P x Q subarr. |  | P x (n*Q) bits   |
                 +------------------+  +---------------+  +------------------+
                   match (M*P)          min/max cand.        Q'_A bits -> SIPO
```

| Parameter | Default | Meaning |
|---|---|---|
| `M` | 16 | arrays per stage (row decoder width) |
| `NSUB` (n) | 128 | subarrays per array |
| `P` | 128 | rows per subarray; entries per array |
| `Q` | 8 | columns per subarray; count width |
| `W = NSUB*Q` | 1024 | SDR width |
| `M*P` | 2048 | entries |
| `WIN` | 4 | CU window (last four anomaly scores) |
| `FRAC` | 8 | fractional bits of an anomaly score |
| `TSW` | 16 | time-stamp width |

An entry address is `{array, row}`. The present and next stages each hold `M`
arrays. Each array is made of `NSUB` subarrays of `P x Q` cells placed side by
side, so subarray `k` stores bits `[k*Q +: Q]` of an SDR. An AND tree merges
the per-subarray match vectors of one array. The confidence stage holds one
`P x Q` subarray per array, with the same row address as the entry's SDRs.
Each of the three stages has its own input buffer. Because of that, the present
and next stages can be searched together for a whole (R_i, R_i+1) pair.

A time-stamp memory (2048 x 16 bits) records when each entry was last used. A
valid bit per entry marks the rows that hold data. Entries that have been
cleared are all zeros, and the valid bit keeps them from matching.

## 2. The AFeCAM subarray and its output register

Each cell is a single FeFET. A search runs in two phases. The matchline of every
enabled row is precharged in both phases:

* **pre-search** drives only the columns whose searched bit is `0`. A cell that
  stores `1` discharges the matchline.
* **search** drives only the columns whose searched bit is `1`. A cell that
  stores `0` discharges the matchline.

A sense amplifier compares each matchline with a reference line. Its output
`sa_out` is 1 when the line stayed high (no mismatch). The output register of
each row has two flip-flops:

* FF A captures `sa_out` in the pre-search phase.
* FF B captures `~sa_out` in the search phase.

The row's miss flag is `M = Q'_A | Q_B`. A row matches exactly when `M = 0`.
The cells are not modelled electrically. They are bits, and the mismatch rule
above gives `sa_out`. The phases are one clock each. The two flip-flop clocks
are capture enables on a single clock.

**Bit-serial read.** The same register reads a stored word without a separate
read path. A pre-search of a single column `c` with searched value `0`
discharges exactly the rows that store `1` in `c`. So `Q'_A` of a row equals
its stored bit `c`. Reading columns `Q-1 .. 0` on consecutive clocks, and
shifting `Q'_A` of the addressed row into a `Q`-bit serial-in/parallel-out
register, gives the whole `Q`-bit slice after `Q` clocks. All `NSUB` subarrays
of an array do this in parallel, so a 1024-bit SDR (or an 8-bit count) reads in
`Q` pre-searches. The SIPO shift lags the pre-search by one clock, because the
flip-flop captures on the pre-search clock.

**Row exclusion.** Each row has a precharge enable. A row that is not
precharged reads as a miss. The min/max search uses this to drop rows.

## 3. Min/max search in the confidence stage

To find the most frequent successor among several matching entries, the
controller runs a **max search** over their counts, bit by bit from the MSB:

1. The candidates are the rows that matched in the present stage.
2. For bit `b`, only the candidates are precharged, and column `b` is searched
   for `1` (for `0` in a min search).
3. If at least one candidate holds the bit, the candidates that do not are
   excluded. If none holds it, nobody is excluded. A NOR over all candidate
   matchlines detects that case. Across the `M` subarrays of the stage the OR
   of their "some hit" flags decides, so exclusion is global over all 2048
   entries.
4. The search stops at bit 0, or earlier when a single candidate is left.
   Among equal maxima, the priority encoder picks the lowest address.

Each bit costs two clocks: search, then apply the exclusion.

## 4. The reflex-memory controller

`reflex_memory` accepts three requests through a valid/ready handshake. It
answers each with a one-clock `rsp_valid` pulse.

**`RM_STEP(x, dec)`** takes one time step with the new SDR `x`. `p` is the SDR
of the previous step.

1. *Decrement.* If `dec` is set, the CU found the last RM prediction wrong
   while the SM was right. The count of the entry that made that prediction is
   read bit-serially, lowered by one (it saturates at 0) and written back.
   Cost: `Q+3` clocks.
2. *Learn `p -> x`.* A pair search of `(p, x)` runs over the present and next
   stages. This takes 3 clocks.
   * If the pair is found, its count is raised by one (it saturates at
     `2^Q-1`). Cost: `Q+3`.
   * If it is not found, a new entry gets `(p, x)` with count 1. Cost: 2.
     * When `p` was itself unknown in the previous step, it was already stored
       then as the present state of a free entry. Only the next state and the
       count are written now.
     * When no entry is free, the transition is dropped and `full` is raised.
3. *Predict from `x`.* A search of the present stage takes 3 clocks. Then:
   * No match: `x` is written to a free row as a present state waiting for its
     successor (1 clock). No prediction is made.
   * One match: the next state of that entry is read bit-serially
     (`Q+2` clocks).
   * Several matches: a max search over their counts runs first (2 clocks plus
     2 per bit examined, plus 1 for an early stop), then the winner is read.
4. *Done*: 1 clock.

The entry that was used gets the current step number as its time stamp. At the
defaults, a typical hit with a reinforced transition takes about 30 clocks. A
hit that needs a full max search takes about 45 clocks.

**`RM_EVICT(R_i, R_i+1)`** is the update operation. A pair search finds the
entry. Its present and next rows are written with zeros, its count is cleared,
and it becomes free. Cost: 6 clocks. Choosing which entry to evict is left to
the host. The host reads the time stamps through `ts_raddr/ts_rdata` and
compares counts. The hardware never evicts by itself.

**`RM_RESET`** forgets `p`, so the next step learns nothing. It is used when a
new, unrelated stream begins.

The sequences are built from CAM primitives, one per clock:

| Primitive | Effect |
|---|---|
| `WRITE` | write one row of the selected stage(s) |
| `PRESRCH` | pre-search phase |
| `SEARCH` | search phase |
| `MM_LOAD` | load min/max candidates |
| `MM_STEP` | search one count bit |
| `MM_APPLY` | apply row exclusion |
| `RD_CLR` | clear the SIPOs |
| `RD_BIT` | read one column |

The controller drives these into `cam_unit`.

## 5. Control unit: selective attention

For every new SDR `a`, the CU scores the predictions that RM and SM made in the
previous step:

```
ARS = 1 - popcount(pred & a) / popcount(a)      (FRAC fractional bits, truncated)
correct = 2 * popcount(pred & a) >= popcount(a)  (at least 50 % overlap)
```

A missing prediction counts as ARS = 1 and incorrect. Each source keeps the
sum of its last four scores. RM is used unless its sum is strictly larger than
SM's. The two correctness flags select one of four training rules:

| RM | SM | RM action | SM training code (`sm_train_e`) |
|---|---|---|---|
| wrong | wrong | learns the transition as usual | `SM_UPDATE`: SM updates too |
| wrong | right | count of the used entry lowered (`rm_dec`) | `SM_NONE` |
| right | wrong | reinforced by learning | `SM_REGULAR`: regular update |
| right | right | reinforced by learning | `SM_HIGH`: higher-confidence update |

## 6. Top level (`ahtm_top`)

Ports, all plain signals:

* `in_valid/in_ready`, `in_sdr`, `in_sm_pred`/`in_sm_valid` carry one step: the
  SDR from the SP and the prediction the SM made from it. `in_restart` starts
  a new stream.
* `out_valid` pulses once per step, with these outputs:
  * `out_pred`/`out_pred_valid`: the chosen prediction of the next SDR. It is
    RM's if RM hit and the CU selected RM, otherwise SM's.
  * `out_use_sm`, `out_rm_hit`, `out_rm_correct`, `out_sm_correct`:
    the CU's choice, and what RM and SM did last step.
  * `out_sm_train`: the training code for the SM.
  * `out_rm_dec`, `out_rm_new`, `out_rm_minmax`, `out_rm_dropped`: what RM did
    this step.
* `ev_valid/ev_ready`, `ev_ri`, `ev_ri1`, `ev_done`, `ev_found` carry host
  evictions. An eviction is taken before a pending step.
* `full` and `ts_raddr/ts_rdata` serve the host's replacement policy.

A step is scored in the CU (1 clock), then passed to the RM, then its result is
registered. The first step after reset or restart has nothing to score.

## 7. Where this design goes beyond the source description

Most of the design follows the published description directly:

* the triple-stage CAM organisation and its sizes;
* the two-phase search and the two-flip-flop output register;
* SIPO-based prediction;
* MSB-first min/max with row exclusion and the all-0/1 detector;
* update by pair search and zeroing;
* the four-score CU window;
* the 50 % correctness threshold;
* the four training rules.

The following are choices made here where the description is silent:

* Sense-amplifier polarity, and FF B storing the inverted SA output so that
  `Q'_A | Q_B` flags a miss. The electrical polarity of a matchline is not
  modelled, only the match/miss function.
* All `P` rows of a subarray hold data, so `16 x 128 = 2048` entries. The
  reference row that the sense amplifiers compare against is treated as part
  of the amplifier. A physical AFeCAM subarray gives up one row for it and so
  would hold `P-1` words.
* One clock per search phase and per write. The real cells need about 20 ns
  per write.
* The bit order of the SIPO. The MSB column is read first.
* A valid bit per entry. Free entries are taken lowest address first.
* Counts saturate, and a new transition starts at 1.
* A present state that was never seen is stored at once and completed in the
  next step.
* When the memory is full, new transitions are dropped until the host evicts
  entries. The replacement policy itself (the time-stamp and count scan) is
  host software and is not in the RTL.
* Ties in max search go to the lowest address.
* The confidence stage has its own SIPO so that counts can be read for
  increment and decrement.
* Anomaly scores use 8 fractional bits with truncation.
* Time stamps are 16-bit step numbers.
* The CU window starts at zero after reset.
* The CU training rules say, for example, that SM's output is used when RM was
  wrong and SM right. That outcome is only known one step later. Here the
  source of the next prediction is chosen by the four-score sums, which
  reflect those outcomes.

The analog parts are not modelled as circuits: the FeFET cell, sense amplifier,
line drivers and pseudo-NMOS NOR. They appear only through their logic
function.

## 8. Verification

Every module has a self-checking testbench `tb/tb_<module>.sv` with a
watchdog. Each prints `TB_RESULT checks=<n> failures=<n>`.

* The RM and top testbenches compare against behavioural reference models in
  `tb/ahtm_ref_pkg.sv`. These are plain classes: `rm_ref` for the algorithm and
  `cu_ref` for the CU. The RM test also checks the latency of every request to
  the clock.
* `tb_ahtm_top` runs the design at a reduced size and counts each mechanism.
  The mechanisms are hits, misses, new entries, max searches, decrements, RM
  and SM selection, each training rule, drops when full, evictions, restarts
  and the time-stamp port.
* `tb_ahtm_full` runs the default configuration (2048 x 1024-bit entries)
  without overriding parameters. It runs about 2260 steps over 250 random
  SDRs, until the memory is full, transitions are dropped and the host evicts
  the least used entries. It builds in about a minute and simulates in about
  2.5 minutes.

* `tb_ahtm_series` runs the default configuration on a price-like series of
  842 points. That is the length of the shortest of the financial series the
  design was sized for. The prices are generated inside the testbench: a
  mean-reverting random walk with a yearly cycle, in 64 buckets. A
  scalar-encoder stand-in turns them into SDRs. A persistence forecaster
  stands in for the SM. Each step is checked against the reference models.
  The run reports how often RM answered, was used and was correct. The
  recorded market data is not included, so no accuracy figures for real
  datasets are reproduced here.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/htm_pkg.sv tb/ahtm_ref_pkg.sv tb/tb_ahtm_top.sv --top-module tb_ahtm_top
./obj_dir/Vtb_ahtm_top
```

Testbenches that do not use the reference models need only `rtl/htm_pkg.sv`
and their own file. Modules are found through `-Irtl`.

## 9. Files

| File | Content |
|---|---|
| `rtl/htm_pkg.sv` | shared constants and enums (stage, CAM primitive, RM request, SM training code) |
| `rtl/output_register.sv` | FF A / FF B / OR per row |
| `rtl/afecam_subarray.sv` | `P x Q` cells, two-phase search, row exclusion |
| `rtl/and_tree.sv` | match reduction over subarrays |
| `rtl/afecam_array.sv` | `NSUB` subarrays and an AND tree |
| `rtl/conf_subarray.sv` | confidence subarray with min/max logic |
| `rtl/sipo_register.sv` | SIPO shift register |
| `rtl/priority_encoder.sv` | priority encoder |
| `rtl/row_decoder.sv` | array select |
| `rtl/column_decoder.sv` | stage select |
| `rtl/input_buffer.sv` | line drivers per phase |
| `rtl/cam_unit.sv` | three stages executing one primitive per clock |
| `rtl/timestamp_mem.sv` | last-use times |
| `rtl/reflex_memory.sv` | RM controller |
| `rtl/anomaly_score.sv` | ARS and correct flag |
| `rtl/control_unit.sv` | selective attention and training rules |
| `rtl/ahtm_top.sv` | top |
