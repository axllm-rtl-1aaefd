# AxLLM: a vector-matrix engine that reuses products of repeated quantized weights

When the weights of a transformer (an LLM) are quantized to 8 bits, a row of a 768- to
5120-column weight matrix can hold at most 256 different values, and in practice far fewer
magnitudes. Multiplying one input element `x[i]` by row `i` of `W` therefore computes the
same product `u * x[i]` many times. This design computes each such product once, keeps it
in a small **result cache (RC)** indexed by the weight value, and serves every later
occurrence of the same value from the cache instead of the multiplier. Nothing is
precomputed and the weights are used as they are: the cache fills while the row streams
through, and it is emptied when the lane moves to the next input element.

The RTL here is a SystemVerilog implementation of the AxLLM accelerator as published by
Ahadi, Modarressi and Daneshtalab ("AxLLM: accelerator architecture for large language
models with computation reuse capability"), in the configuration that paper evaluates:
64 lanes, 256-entry weight and output buffers per lane split into four 64-entry slices,
a 128-entry result cache, a 3-cycle multiplier. Where the publication leaves a detail
open, the choice made here is stated below and in the opening comment of each file.

## 1. What is computed

One run computes `y = x * W` for an input vector `x` of `K` signed 8-bit elements and a
weight matrix `W` of `K x N` signed 8-bit weights, giving `N` 32-bit sums.
`K` and `N` may be anything from 1 to 5120 (the largest matrix the design targets,
Llama-13B's 5120 x 5120).

The order of work is **input-stationary**: element `x[i]` is held in a lane while the whole
of row `i` (or a tile of it) passes it, contributing one partial product to every output
column. This is what makes reuse possible: within one pass the multiplicand `x[i]` is
fixed, so the product depends only on the weight.

**LoRA adaptors.** A LoRA fine-tuned layer computes `x*W + (x*A)*B` with a thin matrix `A`
(`K x r`). Because `x*A` has the same multiplicand as `x*W`, `A` is simply appended to `W`
as `r` extra columns (`cfg_cols = N + r`); its weights then find their products already in
the cache. No hardware is added for this. The product `(x*A)*B` is an ordinary second run.
The same holds for the query, key and value projections of attention, which share `x`:
`[Wq | Wk | Wv]` (3 x 768 = 2304 columns for BERT-base) can run as one product, although
reuse only spans the columns of one 256-column tile.

## 2. Numbers and the result cache key

* Weights and inputs are signed 8-bit. A weight `w` and `-w` share one RC entry: the entry
  holds `|w| * x`, and the sign is applied on the way out. The RC thus needs 128 entries,
  indexed by `|w|` (0..127).
* `w = -128` has no 7-bit magnitude. It is never cached; it always goes to the multiplier
  (flag `nocache` of the key). This is a choice of this design.
* Products are 17-bit signed (`|w|` up to 128 times `x`), sums 32-bit. Widths live in
  `axllm_pkg`.

## 3. Architecture

```
 x_wr_* --> input buffer --x[g*64+i]--> lane i (i = 0..63) --+
                                            ^                 |   adder tree     output
 w_* stream (one entry per slice per lane) -+                 +-> (6 levels) --> buffer --> y_rd_*
                                                                  one column/cycle
                 controller: column tiles of 256 x input groups of 64
```

### 3.1 Lane (`axllm_lane`)

A lane holds the X register, and three buffers each cut into P = 4 slices:
W_buff (weights of its row tile), the RC (with a valid flag per entry) and Out_buff
(partial sums). Column `c` of the tile lives in slice `c / 64`, address `c % 64`, of both
W_buff and Out_buff, so weights fetched from W_buff slice `s` always produce results for
Out_buff slice `s`, and the slices never compete for an output port.

```
 W_buff slice s --fetch 1/cycle--> queue[s] of RC slice r      (r = |w| / 32)
 RC slice r  (round robin over its 4 queues, one lookup per cycle):
     valid[|w|]              -> reuse: +-RC[|w|] --> queue[r] of Out_buff slice s
     not valid, not pending  -> mark pending      --> queue[r] of the multiplier
     not valid, pending      -> stall (product still in the multiplier)
 multiplier (one per lane, round robin over 4 queues, 3-cycle pipeline):
     |w| * X --> RC[|w|] of slice r (valid := 1)  and  +-|w|*X --> queue[4] of Out_buff slice s
 Out_buff slice s (round robin over its 5 queues): Out_buff[addr] += value
```

All queues are four entries deep. Every sender keeps a credit counter per destination
queue, starting at the queue depth, spent on a push and returned when the receiver pops;
nothing is ever written into a full queue (assertions in `axllm_queue` check this).

The RC is a two-port memory per slice: the lookup reads, the multiplier writes. A lookup
only reads an entry whose flag is already valid, and the multiplier only writes entries
that are pending, so the two never touch the same entry in the same cycle (asserted).

**The stall.** The only hazard is a repeated magnitude that arrives while its first
occurrence is still being multiplied. The entry is then *pending*; the RC slice holds that
head (and, since it is in round-robin order, the slice) until the write-back sets the valid
flag. No out-of-order bypass is attempted.

**Which RC slice.** RC slice `r` owns the contiguous range `|w|` in `[32r, 32r+31]`. The
publication describes weights of "close values" meeting in one RC slice, which this
follows. Its cost: quantized weights crowd near zero, so RC slice 0 receives the largest
share of lookups and limits the lane to well below 4 results per cycle on bell-shaped
weight distributions (see section 5). Interleaving the slices by the low bits of `|w|`
would balance them; it is a change to `dst` in `axllm_wbuf_slice` and to the entry index in
`axllm_rc_slice`.

**Steps.** The lane's `start` takes `x`, clears all valid and pending flags, and begins the
pass over `n_cols` weights. `first` makes the Out_buff writes of that pass overwrite
instead of accumulate, so a new column tile starts without a clearing pass. A lane that
has no row in a step (fewer than 64 rows left) stays idle and reads back zeros. `done`
rises when every product of the pass has been added into Out_buff.

### 3.2 Tiling and the controller (`axllm_controller`)

Input-stationary order leaves every output sum incomplete until all `K` inputs have passed.
To bound that state, columns are processed in tiles of 256 (the Out_buff size): all `K`
rows are run for columns 0..255, the sums are drained, then columns 256..511, and so on.
Within a tile the `K` rows go 64 at a time (input group `g`: lane `i` gets row `g*64+i`),
and each lane accumulates its rows of the tile in Out_buff. For each group the controller:

1. **LOAD**: takes `min(64, tile width)` beats from the weight stream. Beat `k` carries, for
   every lane `i` and slice `s`, `W[g*64+i][c0 + s*64 + k]` (zero beyond the matrix),
   i.e. 64 x 4 weights, 2048 bits.
2. **START / RUN**: pulses the lanes with their `x` element and waits for all to finish.

After the last group, **DRAIN** reads one column per cycle from all 64 lanes; the adder
tree sums it (6 registered levels) into the output buffer at `c0 + column`. Load, compute
and drain do not overlap.

The cache is per lane and per pass: products are reused within one row tile of one input
element, not across tiles. Smaller tiles therefore reuse less.

### 3.3 Top (`axllm_top`)

| Port | Width | Use |
|---|---|---|
| `x_wr_en, x_wr_addr, x_wr_data` | 1, 13, 8 | write input element |
| `cfg_rows, cfg_cols, start` | 13, 13, 1 | `K`, `N`, start pulse |
| `busy, done` | 1, 1 | run in progress; end pulse |
| `w_valid, w_ready, w_data[64][4]` | 1, 1, 8 each | weight stream, taken when both are high |
| `y_rd_addr, y_rd_data` | 13, 32 | read output, one cycle latency |
| `cnt_hit, cnt_mul, cnt_stall` | 32 each | reuses, multiplications, stall cycles (summed over RC slices) since reset |
| `cnt_load_cyc, cnt_run_cyc, cnt_drain_cyc` | 32 each | cycles spent in each phase since reset |

The memory that holds `W` is not part of the design; anything that can produce the stream
in the order above can drive it.

## 4. Parameters

| Parameter | Default | Meaning | Origin |
|---|---|---|---|
| `L` | 64 | lanes | publication |
| `P` | 4 | slices per lane buffer, RC slices, queues per RC slice | publication |
| `SLICE_DEPTH` | 64 | entries per W_buff / Out_buff slice (tile = 256 columns) | publication |
| `QDEPTH` | 4 | depth of every queue (= number of slices) | publication (RC queues); others this design |
| `MUL_LAT` | 3 | multiplier pipeline stages | publication |
| `X_LEN`, `Y_LEN` | 5120 | input and output buffer sizes | this design (largest target matrix) |
| RC entries | 128 | `axllm_pkg::RC_ENTRIES`, from 8-bit weights | publication |

`P` and `SLICE_DEPTH` must be powers of two; `P <= 16`, `SLICE_DEPTH <= 1024`. The
publication also mentions 512-entry buffers as a limit; the evaluated configuration, and
the default here, is 256.

## 5. Timing and measured behaviour

* A weight is fetched from W_buff in one cycle, looked up in one (the RC read stage), and
  written into Out_buff through a queue. A first occurrence spends one cycle in the
  multiplier queue, one being issued and three in the multiplier. A lane step with a single
  weight takes 11 cycles from `start` to `done`.
* A 256-weight row whose four slices use four different RC slices and mostly reuse takes
  78 cycles (about 4 results per cycle); a row of one repeated value takes 267 cycles
  (one RC slice serves everything, with stalls), which is the unsliced rate.
* On bell-shaped 8-bit weights (sum of four uniform draws) the reuse rate is 69.9% for
  256-column tiles on every matrix size tried (1024 x 1024, and 2048 rows of 4096 and
  5120 columns), and 768 x 776 takes 10931 cycles end to end. Compute time is about 0.8
  of what one multiplier per lane without reuse would need; the contiguous RC-slice
  mapping (section 3.1) is the bottleneck for this distribution.

## 6. Files

`rtl/`

| File | Content |
|---|---|
| `axllm_pkg.sv` | widths, key and request record types, weight-to-key function |
| `axllm_queue.sv` | credit-fed FIFO |
| `axllm_rr_arb.sv` | round-robin pointer |
| `axllm_wbuf_slice.sv` | W_buff slice and fetch stage |
| `axllm_rc_slice.sv` | RC slice: valid/pending flags, lookup, stall |
| `axllm_mul_unit.sv` | the lane's multiplier and its queues |
| `axllm_outbuf_slice.sv` | Out_buff slice with P+1 queues and accumulator |
| `axllm_lane.sv` | one lane |
| `axllm_adder_tree.sv` | pipelined adder tree |
| `axllm_input_buffer.sv`, `axllm_output_buffer.sv` | vector buffers |
| `axllm_controller.sv` | tile / group sequencer |
| `axllm_top.sv` | the accelerator |

`tb/` holds one self-checking bench per module (`tb_<module>.sv`),
`tb_axllm_lane_unsliced.sv` (a lane built with one slice, `P = 1`), `tb_axllm_top.sv`
(end to end at the default size: three products including a DistilBERT-size matrix with a
LoRA adaptor, with a check that every mechanism above happened at least once), and
`tb_axllm_workloads.sv` (BERT-large 1024 x 1024, and 2048 rows of the Llama-7B and
Llama-13B 4096- and 5120-column matrices). Each prints
`TB_RESULT checks=N failures=M`.

## 7. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/axllm_pkg.sv tb/tb_axllm_top.sv \
          --top-module tb_axllm_top -o simv
obj_dir/simv
```

Any other bench works the same way with its own name. The end-to-end bench at full size
builds in about a minute and runs in seconds; the workload bench runs for under two
minutes.

## 8. Departures and open points

* The weight memory and the way weights reach the lanes are not specified by the
  publication; the wide valid/ready stream and the load-then-compute order are this
  design's. Loading takes 64 cycles per step, comparable to the compute time, and is not
  overlapped.
* The sliced lane adds queue cycles to the five-stage pipeline the publication describes
  for one unsliced lane (fetch, three multiply stages, write-back).
* `-128` is never cached (section 2).
* The publication sends a lane's partial sums to the adder tree once its input element is
  done. Here the lane adds the partial sums of all its rows of a tile into Out_buff (the
  adder in front of Out_buff in the publication's lane drawing) and the tree sees each
  column once per tile. The sums are the same; the tree is used less often.
* Inactive lanes, the `first` overwrite, the drain order (one column per cycle) and all
  widths are choices of this design.
* Multiple heads, batches and the non-matrix parts of a transformer layer are outside the
  design, as in the publication.
