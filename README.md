# Helix: a processing-in-memory engine for nanopore base-calling

A nanopore base-caller turns the raw current trace of a DNA strand into bases
(A, C, G, T) in three steps:

1. A small neural network (convolution, GRU and fully-connected layers) gives
   the probability of each base, and of a "blank", at every time step.
2. A CTC (connectionist temporal classification) beam search turns those
   probabilities into a read.
3. A read vote merges the overlapping reads that cover the same stretch of
   signal into a consensus.

Helix runs all three steps in memory arrays:

- Resistive crossbars do the network's multiply-accumulates.
- Small SOT-MRAM (spin-orbit-torque MRAM) arrays replace the crossbars'
  CMOS analog-to-digital converters (ADCs).
- The same crossbars, given one extra transistor per bit-line, add up the
  probabilities of CTC beam candidates.
- A SOT-MRAM array that compares every stored row against a query at once
  finds where reads overlap.

The network is quantised to 5 bits, using a training method meant to avoid
errors that voting cannot correct. That is why a 5-bit ADC is enough.

This repository gives SystemVerilog for that datapath:
- one dot-product engine;
- the CTC step sequencer that runs on it;
- the read-vote unit with its comparator array.

The analog arrays are behavioural models. Everything else is synthesizable RTL.
"Paper" below means the published description of Helix that this RTL
implements.

## Block map

```
                 host                                          host
                  |                                              |
        +---------+-----------+                          +-------+--------+
        |   helix_top         |                          |                |
        |  +-------------+    |   engine ports (muxed)   |   read_vote    |
        |  |  ctc_ctrl   |----+--------------+           |  +----------+  |
        |  +-------------+    |              v           |  |bin_cmp_  |  |
        |             +-------+---------------------+    |  |array     |  |
        |             |        dpe_pipeline         |    |  |256 x 256 |  |
        |             | IR -> nvm_xbar -> S&H ->    |    |  +----------+  |
        |             | 4 x sot_adc_array -> 128 x  |    +----------------+
        |             | therm_encoder -> shift_add  |
        |             | -> OR                       |
        |             +-----------------------------+
        +------------------------------------------------------------------
```

| file | role | kind |
|---|---|---|
| `helix_pkg.sv` | symbol codes, sizes, comparator cell patterns | package |
| `nvm_xbar.sv` | 128x128 crossbar, 2-bit cells, 1-bit inputs, merge switches | behavioural model |
| `sot_adc_array.sv` | 32 rows x 32 cells SOT-MRAM ADC | behavioural model |
| `therm_encoder.sv` | thermometer to 5-bit code | RTL |
| `shift_add.sv` | column and bit-slice recombination | RTL |
| `dpe_pipeline.sv` | five-stage engine with input and output registers | RTL |
| `ctc_ctrl.sv` | one CTC beam step on the engine | RTL |
| `bin_cmp_array.sv` | SOT-MRAM binary comparator array | RTL (cell array and compare) |
| `read_vote.sv` | longest match, alignment, majority vote | RTL |
| `helix_top.sv` | one engine, CTC sequencer, read-vote unit | RTL |

## The ADC array: an MRAM row as a thermometer

A SOT-MRAM cell switches when the voltage on its write bit-line passes a
threshold, and that threshold drops as the voltage on its read bit-line rises.
An ADC array row ties all write bit-lines to the crossbar bit-line being
converted. A resistor ladder puts a falling series of reference voltages on
the read bit-lines. A higher input therefore switches a longer prefix of the
row, and the row reads as a thermometer code. For example, a 4-cell row reads
`1000`, `1100`, `1110` or `1111`. Cell 0 sits at the highest reference and
always switches.

A 5-bit converter uses 32 cells. One 32x32 array converts 32 bit-lines, so
four arrays serve a 128-column crossbar.

In `sot_adc_array`, cell k switches when the bit-line sum, counted in
unit-cell currents, is at least `k*LSB`. The default is `LSB = 1`, so sums
above 31 saturate. The paper does not say how bit-line current maps onto the
ADC's 32 levels. `LSB` is the parameter to change if you want a different
scale.

`therm_encoder` reports the index of the highest switched cell. For a clean
code this equals the number of switched cells minus one. A bubble below the
top does not change the result.

## The dot-product engine

`dpe_pipeline` is the paper's five-stage pipeline. Each stage takes one clock
here.

| stage | work | register after it |
|---|---|---|
| 1 fetch | read one 128-bit input slice from the input register (IR) | word-line vector |
| 2 MAC | crossbar bit-line sums (1-bit input x 2-bit cell) | sample-and-hold of 128 sums |
| 3 ADC | 4 SOT-MRAM ADC arrays | 128 thermometer codes |
| 4 encode, S&A | 128 encoders, shift-and-add | accumulators |
| 5 store | write 128 results to the output register (OR) | OR, `done` |

**Number formats.**
- Inputs and weights are 5-bit unsigned.
- An input is applied one bit per pass, least significant bit first, so a job
  is 5 consecutive IR words.
- A weight spans 3 adjacent 2-bit columns (bits `[2c+1:2c]` in column c), so
  one crossbar holds 42 weights per row.
- Output k of a job is `sum_p 2^p * sum_c 4^c * ADC(column 3k+c, pass p)`.
  With the ADC clipping at 31, the largest value is 20181, which fits the
  16-bit OR words.

**Sizes.**
- IR: 128 words x 128 bits = 2 KB.
- OR: 128 words x 16 bits = 256 B.

These are the register sizes the paper lists per crossbar engine.

**Timing.** The clock that accepts `start` is stage 1 of slice 0. A job of S
slices writes the OR and pulses `done` S+3 clocks later. The next job can
start the clock after `done`. Jobs do not overlap. The crossbar is programmed
one row per clock through `xb_we`, while no job is running. Assertions check
both rules.

**CTC mode.** With `ctc_mode` set, every column is its own output (shifted
only by the pass number), and `merge_sw` closes bit-line merge switches for
the whole job.

## CTC decoding on the crossbar

A beam step of width W multiplies each of the W kept probabilities of the
previous step with each of the W kept probabilities of the current step. It
then adds up the products of candidates that collapse to the same read.
`ctc_ctrl` lays this out on the crossbar as follows.

- **Diagonal.** Candidate `d = j*W + i` owns row d and column d. Only cell
  (d, d) is written, with `p_cur[j]`, so every current-step probability
  appears W times along the diagonal.
- **Word-lines.** Word-line d carries `p_prev[i']`, with `i' = i` for even j
  and `i' = W-1-i` for odd j. This snake order is taken from the paper's
  width-2 example: the diagonal holds A1, A1, -1, -1 and the word-lines carry
  A0, -0, -0, A0. Bit-line d then carries one product.
- **Merging.** Each bit-line has an extra transistor S_d to its neighbour.
  Closing S_d merges candidates d and d+1. The model reports the whole
  group's sum on the group's lowest bit-line and 0 on the rest.

The sequencer runs four phases:
1. Write W*W rows.
2. Write the 5 word-line bit-slices to IR words 123..127.
3. Run one CTC-mode engine job.
4. Copy OR words 0..W*W-1 to `cand_sum`.

A step takes `2*W*W + 2*Q + 6` clocks, which is 216 at W = 10. While the step
runs, `helix_top` gives the engine's ports to the sequencer.

Which switches to close is an input (`merge_sw`). The paper shows the
switches and one example, but not how a decoder decides which candidates are
the same read. Its two descriptions of that example also disagree:
- the background section merges AA, A- and -A into A (0.36);
- the hardware section closes all three switches, which also adds "--".

With the switch settings as an input, either can be run. The testbench uses
the all-closed case. Beam bookkeeping across time steps (keeping prefixes,
choosing the next W) is outside this RTL.

The width-2 example from the paper is the first test case. Probabilities are
scaled to integers: on the word-lines 0.3 -> 10 and 0.4 -> 13 (5-bit); in the
cells 0.3 -> 1 and 0.5 -> 2 (2-bit). It must give p(A) = 69 on bit-line 0.

## Read vote and the comparator array

**Cell encoding.** Symbols are 3-bit codes: T=000, A=001, C=010, G=100 and
blank=101. `bin_cmp_array` stores each bit as two cells:
- 0 as (LRS, HRS);
- 1 as (HRS, LRS);

where LRS and HRS are the low- and high-resistance states. The most
significant bit comes first, so a symbol takes 6 cells and a 256-cell row
holds 42 symbols.

**Compare.** A query drives the read bit-lines: 0 as (low, high) and 1 as
(high, low). Pairs outside the query are left undriven. Current reaches a
row's source line only where a high voltage meets an LRS cell, which happens
only where a stored bit differs from the queried one. One query therefore
tests all 256 rows at once. Unwritten pairs are (LRS, LRS), so positions past
the end of a stored sub-string never match.

`read_vote` takes reads R_0..R_{n-1} in order. For each consecutive pair it
runs three phases:

1. **Write** the suffixes of R_k into rows 0..29: row i holds `R_k[i..]`.
2. **Search** with queries `R_k+1[j .. j+l-1]`, one per clock. l grows while
   some row matches, then j advances. Only lengths longer than the best so
   far are tried, so a pair costs at most about 2 x 30 searches. The best
   match is the longest one. Among equal lengths the first j wins, and for
   that j the lowest row.
3. **Place** R_k+1 at `offset(R_k) + i - j`. A pair without a single common
   symbol is placed end to end; the `n_unmatched` counter records this.

Finally every position from the leftmost read start to the rightmost read end
is voted. Each read covering the position votes its symbol, and the most
frequent symbol wins, with ties going to A, then C, G, T. The consensus
streams out one symbol per clock.

The paper's example (ACTA, CTAG, GAGAT -> ACTAGAT) is the first test case.

**Sizes.**
- `MAX_LEN = 30` bases per read; the paper gives 10 to 30.
- Up to `MAX_READS = 8` reads per job. The paper gives no number for this.

## How far to trust it, and where it departs

**Follows the paper:**
- the pipeline stages;
- the crossbar size, cell and input precision;
- the IR and OR sizes;
- the 32x32 5-bit ADC arrays and their thermometer behaviour;
- the merge-switch idea and the diagonal layout from the CTC figure;
- the symbol codes, the two-cell bit encoding and the sensing rule of the
  comparator array;
- the three steps of the read vote.

**Own choices.** These are all places where the paper gives nothing:
- one clock per stage;
- the job interfaces;
- the LSB scale and saturation of the ADC;
- the weight-to-column mapping;
- where a merged bit-line group is sensed;
- the search order, placement rule and tie rule of the read vote;
- `MAX_READS`;
- the engine hand-over between host and CTC sequencer.

**Not built:**
- the tile around the engine: eDRAM buffer, bus, router, activation and
  max-pool units, tile output register;
- the replication to 8 crossbars per MAC unit, 12 units per tile and 168
  tiles;
- the 1024 comparator arrays.

The paper only sizes these parts and takes them from an earlier accelerator
(ISAAC). `helix_top` is therefore one engine, one comparator array and their
controllers. A whole network does not fit in one crossbar: Guppy's 0.244 M
weights need about 46 crossbars at 42 weights x 128 rows each. The engine
runs it piece by piece, reprogramming the crossbar in between.

**Other limits:**
- All arithmetic is unsigned. The paper does not say how signed weights are
  handled.
- The SOT-MRAM process-variation and reliability results are properties of
  the analog cells and are not modelled.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_helix_top \
    rtl/helix_pkg.sv tb/tb_helix_top.sv -o sim && ./obj_dir/sim
```

Verilator finds the other files through `-Irtl -Itb`.

| testbench | what it checks |
|---|---|
| `tb_therm_encoder` | all 32 levels, the 4-level example, bubbles |
| `tb_sot_adc_array` | random inputs against thresholds, saturation |
| `tb_nvm_xbar` | random cells and inputs, random merge groups |
| `tb_shift_add` | both modes against a reference sum |
| `tb_dpe_pipeline` | MAC and CTC jobs against a reference including ADC clipping, S+3 latency, saturation exercised |
| `tb_ctc_ctrl` | W=2 with the paper's example and W=10, random merges, step length |
| `tb_bin_cmp_array` | the two-row example, random rows and queries |
| `tb_read_vote` | the three-read example, a no-overlap pair, random reads with errors |
| `tb_helix_top` | default sizes end to end: MAC layer, CTC step of width 10, MAC after hand-back, read vote of 8 reads |

`tb_helix_top` runs at the top's default parameters in well under a minute.
It counts every mechanism: MAC jobs, ADC saturation, CTC steps, closed merge
switches, engine hand-over, matched and unmatched read pairs. It fails if any
of them never happened.

To change sizes, override the parameters of `helix_top`. The crossbar size
`N` must be a multiple of 32 (the ADC array height). The CTC width must
satisfy `BEAM_W*BEAM_W <= N`. The read-vote unit needs `6*MAX_LEN <= CMP_COLS`.
