# RAS: a multi-lane rANS coder with prediction-guided decoding

Learned lossless compressors pair a probability model (a neural network or a
probabilistic circuit) with an entropy coder. The model says how likely every
value of the next symbol is. The coder turns those probabilities into a bit
stream close to the entropy. Range asymmetric numeral systems (rANS) is the
coder used here. It keeps one integer state. Each symbol updates the state
with one division, one remainder and one table lookup. Renormalisation moves
whole bytes between the state and the stream.

This RTL is an rANS accelerator built after the architecture of *"RAS: A
Bit-Exact rANS Accelerator For High-Performance Neural Lossless
Compression"* (Qin, Fan, Yan). It has four main ideas:

* **One conversion per distribution.** The model's distribution arrives in
  BF16. A streaming converter turns it, once, into integer frequencies that
  sum to exactly 2^16, and into a cumulative table that all coders share.
* **A two-stage encoder update.** The quotient path and the remainder path
  of the rANS update run side by side. Their sum feeds the next symbol. The
  encoder codes one symbol per clock.
* **Prediction-guided decoding.** Decoding must find the symbol whose
  cumulative interval holds the state's low bits. That is a binary search
  over the table. Here a predictor guesses the pixel from its decoded
  neighbours, and the search runs first in a 17-symbol window around the
  guess. The result is then checked. A wrong guess falls back to the full
  search, so the output is always exact.
* **Independent lanes.** Several lanes code separate planes at the same
  time. They share the table through an arbitrated bus, and each idle lane's
  clock is gated off.

The bit stream is the standard byte-wise rANS stream. A software coder using
the same frequency table produces the same bytes, and the testbenches check
this byte for byte.

```
  probability model (outside)                      host / DRAM (outside)
          | BF16 writes                             ^ streams, states
          v                                         |
  +----------------+  one block  +-----------+  write  +-----------+
  | global memory  |------------>|    SPC    |-------->| CDF table |
  | NUM_DISTS x256 |  sel mux    | BF16->fix |         | C(0..256) |
  +----------------+             +-----------+         +-----------+
                                                             | one read/cycle
                                                     +---------------+
                                                     | bus arbiter   |
                                                     | (round robin) |
                                                     +---------------+
                        +----------------+--------------+--------------+
                        |                |              |              |
                   +---------+      +---------+    +---------+    +---------+
                   | lane 0  |      | lane 1  |    | lane 2  |    | lane 3  |
                   | enc/dec |      | enc/dec |    | enc/dec |    | enc/dec |
                   | clk gate|      |   ...   |    |   ...   |    |   ...   |
                   +---------+      +---------+    +---------+    +---------+
                     |    |
       middle-state bank  low-bit bank   (one bank of each memory per lane)
```

## Number formats and the coding rule

| quantity | width | value in this RTL |
|---|---|---|
| coder state `s` | 32 bit unsigned | kept in [L, 256·L), L = 2^23 |
| probability precision `n` | 16 | frequencies sum to 2^16 |
| alphabet | 256 symbols | 8-bit pixel values |
| frequency `f(x)` | 16 bit | 1 … 65535 |
| cumulative `C(x)` | 17 bit | C(0)=0, C(256)=65536 |
| model probabilities | BF16 | 1 sign, 8 exponent, 7 fraction bits |

Encoding symbol `x` from state `s`:

1. Renormalise. While `s >= f(x) · 2^15`, emit the low byte of `s` and shift
   `s` right by 8. Here 2^15 = (L >> n) << 8. With n = 16 this emits 0, 1 or
   2 bytes.
2. Update: `s = floor(s / f) · 2^16 + (s mod f) + C(x)`.

Decoding reverses this:

1. `slot = s mod 2^16`. Find `x` with `C(x) <= slot < C(x+1)`.
2. Update: `s = f(x) · floor(s / 2^16) + slot − C(x)`.
3. While `s < L`, take the most recently emitted byte back:
   `s = (s << 8) | byte`.

rANS is last-in, first-out. The decoder produces symbols in the reverse of
the encoder's order. For image planes the encoder therefore gets the pixels in
reverse raster order, and the decoder outputs them in raster order. That is
also the order in which the predictor's neighbours become available.

## Probability path: from BF16 to the shared table

`ras_bf16_fix` computes `f = max(1, round(p · 2^16))` with no floating-point
unit. A BF16 value is `M · 2^(e−134)`, where `M = {1, fraction}` is 8 bits
wide. Multiplying by 2^16 is therefore a shift of `M` by `e − 118`. The
converter shifts by one bit less than that, to keep a round bit. It then adds
one and drops that bit, which gives round-half-up. The total error is at most
half a unit of the last place. Other inputs:

* zero, subnormal and negative inputs count as probability 0;
* inputs of 1.0 or more, infinities and NaN saturate to 65535;
* anything that rounds to 0 is raised to 1 (`clamped`), because every symbol
  must stay decodable.

`ras_spc` (the streaming prefetch converter) works in three steps:

* **Pass 1, 257 cycles.** Stream the selected block of global memory through
  the converter, one entry per cycle. Each frequency goes into a local
  buffer, and the pass keeps the running sum and the largest frequency.
* **Correction, 1 cycle.** Rounding and clamping leave the sum a little off
  2^16. The whole difference, `corr = 2^16 − sum`, is added to the largest
  frequency. That symbol absorbs it with the smallest relative error, and no
  other frequency changes. If this would push the largest below 1, `err` is
  raised. That cannot happen for a distribution that really sums to one.
* **Pass 2, 257 cycles.** Prefix-sum the corrected frequencies, writing
  C(0) … C(256) into `ras_cdf_table`.

A full conversion takes 516 cycles from `start` to `done`. It runs once per
distribution, not once per symbol.

`ras_cdf_table` answers a read of symbol `x` with the pair (C(x), C(x+1)),
one cycle later. The encoder gets `C` and `f = C(x+1) − C(x)` from one read.
The decoder uses the same pair for a search probe (it looks only at C(x)) and
for its final check (it needs both).

## Encoder (`ras_encoder`)

```
 symbols --> [bus request, needs a credit] --table, 1 cycle--> [credit FIFO]
                                                                     |
         +---------------------------------------------------------+ |
         |  s = a1_q + a2_q        (stage 2, adder)                | |
         |  renormalise s against f·2^15, emit 0-2 bytes           |<+
         |  ras_divmod(s, f) -> q, r                               |
         |  a1_q <= q << 16 ;  a2_q <= r + C     (stage 1 regs)    |
         +---------------------------------------------------------+
```

The recurrence is cut after the divider. The registers hold the two halves
`a1`, `a2` of the new state, not the state itself. The adder forming `s` sits
at the start of the next symbol's cycle. So a symbol enters stage 1 every
cycle, and the state is ready two clock edges after the symbol left the FIFO.
Both renormalisation bytes of a symbol are emitted in the same cycle, to
keep that rate. The low-bit memory bank therefore takes up to two bytes per
write.

The table fetch runs ahead of the arithmetic. Each lane has `CREDITS` (4)
credits, one per slot of its response FIFO. A lane may request the bus only
while it holds a credit. It gets the credit back when the core takes the
entry. With 4 credits one lane runs at one symbol per cycle. The testbench
measures 1000 symbols in 1004 cycles. A lane without a symbol, or without a
credit, does not request, so its bus slots go to other lanes.

At the end of a job the encoder writes `{final state, byte pointer}` to its
middle-state entry. The bytes lie in the low-bit bank from `base` upwards.

## Decoder (`ras_decoder`): prediction-guided search

Each symbol goes through four phases:

| phase | cycles | what happens |
|---|---|---|
| PRED | 1 | `ras_predictor` forms anchor `mu` from `ras_history_mem`; bracket `[mu−8, mu+8]` clipped to 0…255 |
| SEARCH | one per probe | bisection for the largest `x` in the bracket with `C(x) <= slot` |
| VERIFY | 2 (request, answer) | read (C(x), C(x+1)); check `C(x) <= slot < C(x+1)` |
| UPDATE | 1 | new state, pop 0–2 bytes, output the pixel, write it to history |

The bracket search assumes that the symbol lies inside the bracket. If it
does not, the bisection still ends on some `x`, and the check then fails. On
failure the bracket is widened to the whole alphabet, and the search starts
again in the same cycle as the failed check. A full search always passes its
check. Nothing has been written to the state before the check passes, so
undoing a failed guess costs nothing beyond the cycles already spent.

Probes are back to back: the next probe address is computed in the cycle
when the previous answer comes back. With the bus always granted, a symbol
costs `4 + probes` cycles, plus 1 if the guess missed. The bisection takes
4–5 probes in a 17-wide bracket and 8 probes over the full alphabet.

The anchor is the mean of the eight causal neighbours in the 3×3 block whose
bottom-right corner is the current pixel. These are three pixels in each of
the two rows above (columns c−2…c) and two pixels to the left. The sum is
divided by 8 and rounded down. For the neighbours 196 211 194 / 200 214 203 /
204 189 the anchor is 201, and the true value 205 lies in [193, 209]. Where
the eight neighbours do not all exist (the first two rows and columns), the
left pixel is the anchor. For the first pixel of a row the anchor is 0.
`ras_history_mem` holds the last three rows, as a circular buffer of
`MAX_W` = 64 pixels per row.

## Lanes, bus and memories

`ras_lane` pairs an encoder and a decoder. They share the lane's bus port
and its two memory banks, and only one of them runs at a time (`mode`). The
lane's logic runs on `gclk` from `ras_clock_gate`, a latch-based gate. The
clock runs only while the lane starts, runs, or signals `done`, so an idle
lane does not toggle. The gate's latch is intended. Tools report it as a
latch.

`ras_bus_arb` grants the single table read port to one requesting lane per
cycle, in round-robin order. It flags the response to that lane one cycle
later. The table delivers one read per cycle in total, so lanes that run at
the same time share that rate. Three lanes encoding 4096 symbols each take
12 292 cycles, which is the table's rate. A lane running alone codes one
symbol per cycle.

| memory | organisation | use |
|---|---|---|
| `ras_global_mem` | NUM_DISTS blocks × 256 BF16 | model output; SPC reads the selected block |
| `ras_ms_mem` | one bank per lane, MS_DEPTH entries of {state, pointer} | encoder's final state = decoder's initial state, per job |
| `ras_lowbit_mem` | one byte bank per lane, LB_DEPTH = 8192 bytes | the byte stream; pushed upwards by the encoder, popped downwards by the decoder |

Both state memories have a host port, so a stream and its state can be read
out after encoding, or loaded before decoding. Each low-bit bank
(`ras_lowbit_bank`) is split into an even-address and an odd-address half.
The two bytes that an encoder writes in one cycle always fall in different
halves, and so do the two bytes that a decoder reads. Each half therefore
needs only one write port.

## Using `ras_top`

Typical sequence:

1. Write a distribution, 256 BF16 words, through `gm_wr_*` into one block.
2. Pulse `spc_start` with `spc_sel` set to that block. Wait for `spc_done`.
   The table is complete in the cycle after `spc_done`. `spc_corr`,
   `spc_clamps` and `spc_err` report the mass correction.
3. Encode: for each lane used, set `lane_mode = MODE_ENC`, the job (a
   middle-state entry), `lane_num_syms`, `lane_base`, and pulse
   `lane_start`. Feed `sym`/`sym_valid` (a valid/ready stream) in reverse
   raster order. `lane_busy` falls when the state is stored.
4. Decode: set `lane_mode = MODE_DEC`, the same job, `lane_num_syms` and
   `lane_width`, and pulse `lane_start`. Pixels come out on
   `pix`/`pix_valid`/`pix_ready` in raster order.

`lane_probes`, `lane_hits` and `lane_misses` count the probes, prediction
hits and misses of the last decode job. `bus_req`, `bus_gnt`,
`lane_starved` and `lane_clk_en` expose the bus and the clock gates for
observation. Parameters are in `ras_top`; the coding constants are in
`ras_pkg`.

## Measured behaviour

The end-to-end test uses synthetic gradient images with noise and 2 % random
outliers, not the paper's datasets. Results at the default parameters:

| run | encode | decode | probes / pixel | hits / misses |
|---|---|---|---|---|
| 64×64 RGB, 3 lanes | 12 292 cycles | ≈80 000 cycles | 5.34 | 10 526 / 1 762 |
| 32×32 RGB + 1 plane, 4 lanes | 4 100 cycles | ≈25 300 cycles | 5.05 | ≈3 650 / ≈440 |

The paper reports an average of 7.00 search steps without prediction and
3.15 with it, on real images. This design's bisection takes 8 probes without
prediction, and about 5.3 with it on the images above. The count is higher
because of the injected outliers, because the 17-wide bracket itself needs
4–5 probes, and because a miss pays for both searches. The paper does not say
how it counts its steps, so the two sets of numbers are not directly
comparable.

For a 32×32 RGB image (3072 symbols) the paper's prototype needs about 5k
cycles to encode and 20k to decode. Here three lanes sharing the table port
encode such an image in about 3 100 cycles. They decode it in about 19 000
cycles, limited by the shared table port.

## Where this design departs from the paper or fills gaps

The paper does not fix the following. Each item is this design's choice:

* Probability precision n = 16, lower bound L = 2^23, and byte
  renormalisation to the interval [L, 256·L). The paper writes the interval
  as [L, R·L) with R = 2^n. That reading does not match byte output, so the
  byte form is used.
* How mass correction works. Here the whole difference goes to the largest
  frequency.
* The divider is a combinational restoring array, with the encoder's stage-1
  registers after it. The paper's divider is pipelined, but a deeper
  pipeline on one state would lose the one-symbol-per-cycle rate that the
  paper also claims.
* What "verification" means. Here the guessed bracket is searched, then the
  candidate is checked. The paper's wording is "advances the rANS state as
  if the proposal were correct". The state is not advanced before the check
  here; the result is the same, with nothing to restore.
* The fallback search covers the full alphabet, not a gradually widened
  window. The paper says both that the worst case is "identical to the
  baseline" and that a fallback carries "a bounded penalty". This design
  follows the second: a miss adds the bracket probes and one check to the
  8-probe full search.
* The paper mentions "simple pattern cues" as a possible predictor input.
  Only the neighbour average and its fallbacks are built. The fallback
  order is: neighbour average, then the left pixel, then 0.
* Lane count 4 (the figure shows four memory banks), 4 distribution blocks,
  4 middle-state entries per lane, 8 KiB of stream per lane, one table read
  port, round-robin arbitration, credit FIFOs of depth 4.
* The probability model, the DRAM and the host I/O interface are outside
  this RTL. Their connections are ports of `ras_top`.

The paper's figure shows arrays of processing elements inside the encoder
and decoder. These are not reproduced element by element. Their functions,
the quotient/remainder paths and the search compare, appear as the datapaths
described above.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`. The reference models are in
`tb/tb_ras_ref_pkg.sv`. They are a software rANS coder, a real-number BF16
conversion, bisection and prediction, written from the algorithm and not
from the RTL:

* `tb_ras_bf16_fix` checks all 65 536 BF16 codes.
* `tb_ras_spc` checks four distributions entry by entry, including the
  correction, the clamp count and the 516-cycle conversion time.
* `tb_ras_encoder` compares bytes, addresses and the final state with the
  software coder. It also checks the one-symbol-per-cycle rate and exercises
  credit stalls.
* `tb_ras_decoder` checks pixels, probe, hit and miss counts, and the
  `4 + probes + misses` cycle formula.
* `tb_ras_lane` runs an encode and a decode on one lane and checks the clock
  gating.
* `tb_ras_top` runs the whole chip at its default parameters on a 64×64 RGB
  image and then on 32×32 planes. It compares the streams, read back through
  the host port, and the decoded pixels. It also checks that each mechanism
  occurs: bus contention, starvation, 1- and 2-byte renormalisation, hits,
  misses, clamping, correction, clock gating, mode switches and back-pressure.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/ras_pkg.sv tb/tb_ras_ref_pkg.sv tb/tb_ras_top.sv --top-module tb_ras_top
./obj_dir/Vtb_ras_top
```

`tb_ras_top` finishes in well under a minute.
