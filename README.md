# A streaming matrix-vector accelerator for an LSTM language model

An LSTM language model spends most of its forward pass on matrix-vector
products. Each of the four gates of every layer multiplies the previous
hidden state `h(t-1)` by a square weight matrix, and the input word by a
second matrix. The rest of the cell is elementwise and cheap: a hard
sigmoid, tanh, and the cell-state update. This RTL implements only the
matrix-vector part, as an accelerator that a small SoC's processor feeds
over AXI-Stream. The processor keeps the nonlinearities, the softmax and
the control flow in software. It sends a vector to the accelerator and
gets back the products with a weight matrix held in on-chip block RAM.

At its default size the accelerator holds a **50 × 50** weight matrix,
which is one gate matrix of a 50-cell LSTM layer. The matrix is spread over
**5 processing elements (PEs) of 10 multiply-add lanes each**. It takes a
**50-word input vector per batch** and computes all 50 dot products in
parallel, one input word per clock. A batch therefore takes 50 cycles. At
200 MHz that is 250 ns for 2 × 2,500 operations, or 20 GOPS. The PE count,
lanes per PE, batch length, clock rate and one-word-per-cycle rate come from
the published design. The word format, the result buffering, the output
order and the way weights are loaded are this implementation's choices.
They are listed under [Departures and choices](#departures-and-choices).

## Data flow

```
              s_axis (one 32-bit word per beat, TLAST ends a batch)
                 |
        +--------+---------+---------+---------+---------+   broadcast
        |        |         |         |         |         |
      +-v-+    +-v-+     +-v-+     +-v-+     +-v-+
      |PE0|    |PE1|     |PE2|     |PE3|     |PE4|      each: 10 lanes
      +-+-+    +-+-+     +-+-+     +-+-+     +-+-+      (BRAM weight vector,
        |        |         |         |         |         multiplier, accumulator)
        +--------+----+----+---------+---------+
                      | axis_merge: PE0's 10 results, then PE1's, ... PE4's
                      v
              m_axis (50 results, TLAST on the 50th)
```

Row `r` of the weight matrix lives in PE `r / 10`, lane `r % 10`. With
input words `x[0..n-1]` of one batch, result `r` is

    y[r] = sat32( (sum_{k<n} W[r][k] * x[k]) >>> FRAC_W )

Results leave in row order, `y[0]` first. TLAST marks `y[49]`.

A word is accepted when `s_axis_tvalid` is high and every PE is ready. Each
accepted word goes to all 50 lanes in the same cycle. Each lane then does
the following:

1. A word counter (shared by the PE's lanes) addresses the lane's weight
   RAM, which holds one row of `W`. The RAM read takes one cycle, so the
   data word and its last flag are delayed one cycle to meet the weight.
2. `fx_mult` multiplies word and weight: a signed 32 × 32 multiply, two
   register stages deep by default (`MULT_LAT`).
3. `mac_lane` adds the product into a 70-bit accumulator. On the batch's
   last word it writes `accumulator + product` into its sum register and
   restarts from zero. The next batch can start in the very next cycle.

## Result storage and flow control

The part that takes the most care is getting results out of the PEs. It is
also what holds the one-batch-per-50-cycles rate. All 50 results of a batch
are finished in the same cycle. The single output stream, however, needs 50
cycles to carry them. Meanwhile the next batch is already being
accumulated.

Each PE therefore has two batches of result storage:

* **Lane sum registers.** Each lane keeps its finished sum until the next
  batch's sum replaces it.
* **A 10-word result buffer.** It holds the scaled and saturated results
  that are being sent out. The lane sums are copied into it as soon as it
  is empty.

A PE signals that it is not ready only for a batch-ending word (TLAST),
and only while an earlier batch's sums have not yet reached its result
buffer. This covers two cases: that batch's last word is still in the
multiplier pipeline (`inflight`), or its sums wait in the lane registers
because the buffer is still draining (`pending`). Every other word is
always accepted. This ensures a lane sum is never overwritten before it is
buffered. Assertions in `pe` check this. Because of this rule, `s_axis_tready` depends
combinationally on `s_axis_tlast`. AXI-Stream allows that: a master may
not wait for TREADY before it asserts TVALID, so no loop can form.

`axis_merge` serves the PEs in a fixed order. It passes PE0's stream through
until PE0's TLAST, then PE1's, and so on. The output therefore holds the 50
results of one batch as one packet. With the sink always ready, output
of batch *n* overlaps with input of batch *n+1*. The 50-cycle output phase
then keeps pace with the 50-cycle input phase, and the input never stalls.
The end-to-end test measures 20 back-to-back 50-word batches accepted in
exactly 1,000 cycles. A version with only one level of storage would need
55 cycles per batch: five cycles of pipeline latency are added on every
batch.

### Timing

| event | cycle |
|---|---|
| last word of a batch accepted | t |
| lane sums valid | t + MULT_LAT + 2 |
| first result (`y[0]`) on `m_axis`, if the buffers were empty | t + MULT_LAT + 3 (t + 5 by default) |
| last result, output always ready | t + MULT_LAT + 52 |
| sustained rate, output always ready | one 50-word batch per 50 cycles |

Back-pressure on `m_axis` stalls only the output at first. Once two batches
of results are waiting in a PE, the input stalls at the next TLAST.

## Number format

Words are 32-bit two's-complement fixed point with `FRAC_W` fraction bits.
The default is `FRAC_W = 0`, i.e. plain integers. Weights use the same
format. The 70-bit accumulator cannot overflow over 50 full-scale
products. A result is the accumulator shifted right arithmetically by
`FRAC_W`, then saturated to the 32-bit range; the shift truncates towards
minus infinity. For a Q16.16 format, for example, set `FRAC_W = 16`;
products are then Q32.32 and the shift brings them back to Q16.16.

Why 32 bits: the published design reports four DSP slices per multiplier.
That is the cost of a 32 × 32 product on DSP slices with 25 × 18
multipliers. A 32-bit stream is also the natural width of the SoC's DMA
engines.

## Loading weights

The weight-load port writes one word per cycle, with no handshake:

| signal | meaning |
|---|---|
| `w_we` | write strobe |
| `w_pe`, `w_lane` | row `r = w_pe*10 + w_lane` |
| `w_addr` | column `k`, i.e. the index of the input word it multiplies |
| `w_data` | the weight |

A full matrix takes 2,500 cycles to load. Weights may be written while the
accelerator is idle. Writing a row while a batch that reads it is in flight
gives a mixture of old and new weights. In a system, this port would be
driven through a register interface or a third DMA stream by the processor.

## Modules

| file | role |
|---|---|
| `rtl/drnn_pkg.sv` | default sizes (`NUM_PE`, `LANES`, `BATCH_LEN`, `DATA_W`, `FRAC_W`, `MULT_LAT`) and the accumulator-width function |
| `rtl/drnn_accel.sv` | top: AXI-Stream slave and master, input broadcast, weight-write decode, 5 PEs, merger |
| `rtl/pe.sv` | one PE: word counter, 10 lanes, result storage and output stream |
| `rtl/mac_lane.sv` | multiplier, accumulator and sum register of one lane |
| `rtl/fx_mult.sv` | pipelined signed multiplier |
| `rtl/weight_bram.sv` | simple dual-port weight RAM, one per lane (50 words) |
| `rtl/axis_merge.sv` | joins the five PE result streams in PE order |

Top-level ports of `drnn_accel`: `aclk`, `aresetn` (synchronous, active
low), `s_axis_tvalid/tready/tdata/tlast`, `m_axis_tvalid/tready/tdata/tlast`,
`w_we`, `w_pe`, `w_lane`, `w_addr`, `w_data`.

All sizes are parameters of `drnn_accel` and default to the package values.
`LANES` and `NUM_PE` set the matrix height (`NUM_PE*LANES` rows).
`BATCH_LEN` sets its width and the depth of each weight RAM. A batch may be
shorter than `BATCH_LEN`: TLAST ends it, and only the first weights of each
row are used. A batch longer than `BATCH_LEN` wraps round to weight 0.
`MULT_LAT` (≥ 1) trades multiplier pipelining for latency.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_fx_mult`, `tb_mac_lane`, `tb_weight_bram`, `tb_axis_merge`, `tb_pe`:
  unit tests against reference models. They cover extreme operands,
  latency, the hold rules of the streams and random back-pressure.
* `tb_drnn_accel`: end to end, at the default size with no parameter
  overrides.
  * Reference run: weights `W[r][k] = r+1`, input `1..50`. It must return
    `1275, 2550, ..., 63750`, with the first result 5 cycles after the
    last input word.
  * Rate run: 20 random batches with the output always ready. All 1,000
    words must be accepted in 1,000 cycles.
  * Stress run: input gaps, output back-pressure, short and one-word
    batches, saturating batches, weight reloads.

  It counts how often each of these happened and fails if one never did.
* `tb_workloads`: the host-side tiling of larger products onto the
  50 × 50 engine, checked against direct products:
  * the four gate products of a 50-cell layer;
  * a 4000-word vocabulary projected onto 50 cells (80 tiles; one-hot and
    dense inputs);
  * a 128-cell recurrent product (9 tiles, with partial tiles).

To run one with Verilator (from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    --top-module tb_drnn_accel -y rtl -y tb +libext+.sv -Irtl \
    rtl/drnn_pkg.sv tb/tb_drnn_accel.sv
./obj_dir/Vtb_drnn_accel
```

Each simulation finishes in under two seconds. The testbenches use two-state
simulation and initialise everything they read.

## What fits and what does not

One pass holds one 50 × 50 matrix. Sizes beyond that need the host to tile
the product and reload weights, as `tb_workloads` does:

| product | weights needed | passes | cycles (mostly weight loading) |
|---|---|---|---|
| one gate of a 50-cell layer, `W h` | 2,500 | 1 | ≈ 2,600 |
| all four gates of a 50-cell layer | 10,000 | 4 | ≈ 10,400 |
| 4000-word vocabulary into 50 cells | 200,000 | 80 | ≈ 208,000 |
| 128-cell recurrent product | 16,384 | 9 | ≈ 23,400 |

Once weights are loaded, compute time is 50 cycles per pass. Loading takes
2,500 cycles, so throughput on anything that does not fit in one matrix is
bounded by the weight-load bandwidth, not by the multipliers. For one-hot
word inputs the input product is just a column selection, which the host
can do without the accelerator.

## Departures and choices

The published description gives the structure (5 PEs × 10 multiply-add
lanes, 50-word batches, AXI-Stream in and out, weights in block RAM), the
clock rate (200 MHz) and the rate (one batch in about 50 × 5 ns). Its test
vector is also used here: input 1..50 against constant rows, giving
1275·j. Everything else was chosen here:

* **Word width and format.** 32-bit signed, `FRAC_W = 0`, saturating
  output. The source says only "fixed point".
* **Batch length 50.** The block diagram of a PE labels its vectors as 30
  long, but the text says 50 words per batch. This design follows the text.
* **What a PE computes.** The diagram labels the PE input as the product
  `U·x`. This design computes plain dot products `W·x`, which is what the
  published test exercises. Adding `U·x` for a gate means running a second
  pass, or adding the two results in software.
* **Result order.** The diagram labels a PE's output words A9 … A1 A0 but
  does not say which comes first. Here A0 (row 0 of the PE) leaves first,
  so results come out in row order, matching the published result list.
* **Result storage.** The lane sum registers plus an output buffer are
  this design's way of sustaining one batch per 50 cycles (see above).
* **Output merging.** A fixed PE0…PE4 order through a combinational
  multiplexer.
* **Weight loading.** A separate write port. The source does not say how
  the weights reach the block RAM.
* **Multiplier.** The source uses a vendor multiplier core. Here it is a
  plain registered multiply, `MULT_LAT = 2`. For 200 MHz on a device with
  25 × 18 DSP slices, a 32 × 32 multiply typically needs three or four
  pipeline stages. Raise `MULT_LAT` accordingly; the rate is unaffected,
  only the latency grows.
* **Not covered.** The processor system, the DMA engines and the memory
  system around the accelerator are standard SoC parts and are not part of
  this RTL. The testbenches drive the two streams and the weight port
  directly. No timing or resource figures have been measured for this RTL
  on an FPGA.
