# Real-time lossless compressor for MPGD waveform readout

A Micro-pattern Gas Detector (MPGD) readout system digitises thousands of channels. Each channel
delivers a waveform of up to 512 samples of 12 bits, and a data collection board merges many
front-end cards onto a single network link. The compressor in this repository sits in that board's
FPGA. It shrinks the waveforms on the fly, at one sample per clock, and loses no information.

It follows the two-step method published by Shen, Wang, Li, Feng and Liu ("Study on the Real-time
Lossless Data Compression Method Used in the Readout System for Micro-pattern Gas Detector"). This
RTL is an independent implementation of that description, not the authors' code.

1. **Prediction.** The compressor guesses each sample from what it already knows and keeps only the
   error. Detector pulses have a known shape, so these errors cluster tightly around zero.
2. **Static Huffman coding.** The errors are coded with a fixed table in which values near zero get
   short codes. A single look-up core is too slow for one symbol per clock, so several cores work in
   parallel, each on every N-th symbol.

There are two ways to predict, one for each kind of signal:

| mode (`mode` input) | signal | prediction |
|---|---|---|
| `MODE_REF_DELTA` (0) | short quasi-Gaussian pulses (micromegas) | a stored reference pulse, shifted to the frame's peak position and scaled to its peak value |
| `MODE_DIFF` (1) | long flat-topped pulses (PandaX-III, widths up to hundreds of µs) | the previous sample |

## Block diagram

```
                 MODE_REF_DELTA
 s_* ──┬──► sample_fifo ───────────────► normalizer ──┐
       │                                  ▲  ▲        │ (uses wave_subtractor)
       ├──► peak_search ──── peak ────────┘  │        │
       │    reference_wave ◄── ref_wr_* ─────┘        ├─► parallel_huffman ──► m_*
       │                                              │     rr_splitter
       │         MODE_DIFF                            │     huffman_core × N_CORES
       └──► diff_preproc (delay + wave_subtractor) ───┘     bit_packer
```

| file | role |
|---|---|
| `rtl/mpgd_pkg.sv` | widths, the item types, the static Huffman table (built at elaboration) and the encode function |
| `rtl/mpgd_compressor.sv` | top level: both chains, mode selection, shared coder |
| `rtl/sample_fifo.sv` | input FIFO, 1024 × 13 bit (sample + end-of-frame flag) |
| `rtl/peak_search.sv` | peak value and position of each frame, found as the frame is written |
| `rtl/reference_wave.sv` | 512 × 12-bit reference table with a load port; tracks the reference's own peak |
| `rtl/normalizer.sv` | per-frame gain division, header, aligned and scaled prediction, delta |
| `rtl/wave_subtractor.sv` | `sample − prediction` → symbol item (used by both chains) |
| `rtl/diff_preproc.sv` | one-sample delay and subtraction |
| `rtl/rr_splitter.sv`, `rtl/huffman_core.sv`, `rtl/bit_packer.sv`, `rtl/parallel_huffman.sv` | the parallel Huffman coder |

## The reference-wave prediction, and why it is not done literally

The published method normalises each sampled pulse to the reference: it aligns the pulse to the
reference and scales it to the reference amplitude. It then subtracts the reference. Scaling a sample
by a non-integer gain and rounding is not invertible. A decoder could never recover the original
12-bit value, so the scheme would not be lossless.

This design compares the same two shapes the other way round. The *reference* is aligned and scaled
to the *frame*. A decoder can repeat that arithmetic exactly:

* `peak_search` sees the frame go into the FIFO. It reports the peak value `V` and the peak position
  `P` (the first one if the maximum occurs twice).
* `reference_wave` holds the reference `ref[0..511]`, with its peak value `R` at position `RP`.
* `normalizer` computes the gain once per frame, with a 24-step restoring divider:
  `K = floor(V · 2^12 / R)`. K is 0 when R is 0, i.e. no reference has been loaded.
* For sample `i`, let `j = i − P + RP`. The prediction is
  `pred = (ref[j] · K + 2^11) >> 12`, capped at 4095. It is 0 when `j` falls outside 0..511.
* The coded value is `delta = sample − pred`. It is a 13-bit signed number, and it is almost always
  small.
* Each frame begins with a raw 21-bit header `{V[11:0], P[8:0]}`. A decoder that knows the reference
  table can then rebuild `pred` bit for bit.

Since `ref[j] ≤ R`, the prediction never exceeds `V`. The delta therefore always fits in 13 bits.

## The differential prediction

`diff_preproc` keeps the previous accepted sample in a register (the "one clock delay" path) and
emits `sample[n] − sample[n−1]`. On the flat top and the baseline these differences are close to
zero. The register is cleared after every frame's last sample. So the first item of a frame is the
first sample itself (usually escaped, see below), and frames decode independently.

## Symbols, the static table and the escape

The coder works on items of type `huff_item_t`. An item is either a **symbol**, a signed difference,
or a **raw literal** (`is_raw`, `nbits`), which is how the header is sent. Each item has a `last`
flag.

* Differences from −127 to +127 are 8-bit symbols, coded with one of the two tables below.
* Symbol `0x80` (−128) is the **escape**. Any difference outside −127..+127 is sent as the escape
  code followed by the 13-bit two's complement difference. The coding is lossless for every input.
* There are two static tables of the same form. `HUFF_TABLE_REF` codes the deltas against the
  reference wave. `HUFF_TABLE_DIFF` codes the sample-to-sample differences, whose distribution is
  much narrower. Each item carries a table-select field (`tbl`): `diff_preproc` tags its items
  `TBL_DIFF`, and everything else uses `TBL_REF`. The cores are identical for both.
* Each table is a canonical Huffman code. `mpgd_pkg::build_huff_table()` computes it during
  elaboration, so it synthesises to plain look-up logic. It is built from a model histogram:
  `weight(v) = 65536 · (NUM/DEN)^|v| + FLOOR` for |v| ≤ 127, plus a separate escape weight.

  | table | NUM/DEN | FLOOR | escape weight | code length of 0, ±1, ±3, ±10 | longest | escape |
  |---|---|---|---|---|---|---|
  | `REF` | 7/8 | 16 | 128 | 4, 4, 5, 6 | 16 | 13 (+13) |
  | `DIFF` | 2/3 | 64 | 512 | 2, 3, 4, 8 | 13 | 10 (+13) |

  The `REF` model falls by about *e* every 7–8 units, and the `DIFF` model is sharply peaked within
  ±5. Each imitates the shape of the measured histogram for its signal type.
* Canonical ordering: codes of each length are consecutive and are assigned in symbol-index order,
  shortest lengths first. Codes are sent MSB first.

The original table values were never published. To tune a table to real data, change the
`HUFF_*` weights, or replace the weight loop with measured counts. Keep every length at or below
`MAX_CODE_LEN`: `tb_huffman_core` checks this for both tables, together with the Kraft sum and the
prefix property.

## The parallel coder

`huffman_core` holds its item in a register. The code look-up (`huff_encode`) is purely
combinational from that register, and its result is captured `CORE_CYCLES − 1` clocks later. The
look-up is therefore a multicycle path that may run well below the system clock. A core takes a new
item every `CORE_CYCLES` clocks.

`rr_splitter` deals items strictly in rotation: item k goes to core k mod N. If the core whose turn
it is is busy, the stream waits; it never skips to another core. `bit_packer` collects the results in
the same rotation, so codes come out in input order without any tags. With the default
`N_CORES = CORE_CYCLES = 4`, the coder accepts one item per clock.

`bit_packer` appends codes to a 96-bit accumulator and sends out the oldest 32 bits whenever it holds
at least 32. When a frame's last code arrives, zeros are appended at once, up to the next 32-bit
boundary. A counter then marks the word that closes the frame, and that word carries `m_last`. The
next frame's codes may follow in the very next clock. A code is accepted only if the accumulator has
room for a 32-bit code, so a slow `m_ready` backs up through the cores, the pre-processing and
finally `s_ready`.

## Output format

The output is one stream of 32-bit words per frame, read MSB first:

```
MODE_REF_DELTA:  V[11:0] P[8:0] | code(delta_0) code(delta_1) ... code(delta_{n-1}) | 0-pad to 32
MODE_DIFF:                        code(d_0)     code(d_1)     ... code(d_{n-1})     | 0-pad to 32
code(d) = T[d]             if -127 <= d <= 127
        = T[0x80], d[12:0] otherwise
T = HUFF_TABLE_REF in MODE_REF_DELTA, HUFF_TABLE_DIFF in MODE_DIFF
```

The last word of a frame has `m_last = 1`. Frame length is not transmitted; the decoder must know it,
or read one symbol per expected sample. `tb/tb_util_pkg.sv` contains a complete bit-serial decoder
and the prediction arithmetic, which is a good starting point for the host software.

## Top-level interface and timing

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `mode` | in | 1 | `mode_e`; change it only while no frame is in flight |
| `s_valid/s_ready/s_data/s_last` | in/out | 1/1/12/1 | sample stream; `s_last` on a frame's last sample (frames of 1..512 samples) |
| `ref_wr_en/ref_wr_addr/ref_wr_data` | in | 1/9/12 | reference table load, one entry per clock, once after reset |
| `m_valid/m_ready/m_data/m_last` | out/in | 1/1/32/1 | compressed words |

Throughput is one sample per clock in both modes, as long as `m_ready` keeps up; the test bench
checks this.

In `MODE_REF_DELTA`, a frame's coding starts after its last sample has arrived and a header phase of
about 27 clocks (division plus header) has finished. Items then flow at one per clock. Because of
those extra clocks per frame, a continuous stream of back-to-back 512-sample frames slowly fills
the FIFO: 1024 words absorb about 18 such frames. After that, `s_ready` throttles the input to about
95%. Gaps between events normally drain it.

`huffman_core` and `bit_packer` contain concurrent assertions that an offered output stays stable
until it is taken.

## Parameters

| parameter | where | default | origin |
|---|---|---|---|
| `SAMPLE_W`, `NSAMP` | `mpgd_pkg` | 12, 512 | ADC resolution and analog-memory depth of the AGET front end |
| `FIFO_DEPTH` | top | 1024 | own choice: two frames |
| `N_CORES`, `CORE_CYCLES` | top | 4, 4 | own choice; the method uses "many" cores at a low speed |
| `FRAC` | `normalizer` | 12 | own choice: fraction bits of the gain |
| `MAX_CODE_LEN`, `HUFF_*` | `mpgd_pkg` | 16, models above | own choice |
| output word | `parallel_huffman.OUT_W` | 32 | own choice |

## Where this design departs from, or adds to, the published method

* Normalisation scales the reference instead of the samples, and each frame carries a header with
  the peak value and position. The published method states that it is lossless, and this is what
  losslessness requires.
* Differences outside 8 bits are escaped. The published method says only that 12-bit data become
  8-bit deltas.
* The Huffman tables come from model histograms, not from the authors' measured counts, which were
  not published. The two modes share the coder logic, as in the published method, but each mode
  has its own table, because their difference histograms differ widely.
* Both pre-processing chains sit in one top level behind a static `mode` input. The original built
  two separate FPGA configurations.
* Things the method leaves open and this design chooses: the FIFO depth, the handshakes, reset
  behaviour, the frame boundary handling of the delay register, the number of cores and their
  cycle count, and the packer's word width, bit order and padding.
* The reference table is loaded at run time through a write port, since the reference is measured
  from many recorded pulses. Load it once after reset: the peak tracking keeps the largest value
  written since reset.
* Not included, because they are outside the FPGA logic: the AGET ASIC, the ADC, the optical links
  between the front-end cards and the collection board, and the Ethernet interface. The top
  level's sample input and word output stand where these connect.

## Simulation

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. With Verilator 5,
running from the repository root:

```
verilator --binary --timing --assert -Wno-fatal rtl/mpgd_pkg.sv tb/tb_util_pkg.sv \
    -y rtl -y tb tb/tb_mpgd_compressor.sv --top-module tb_mpgd_compressor -Mdir obj
./obj/Vtb_mpgd_compressor
```

Replace the test bench name to run another one. The bench uses only two-state values and `$urandom`.

| testbench | what it shows |
|---|---|
| `tb_mpgd_compressor` | end to end at default parameters: 16 reference-mode frames and 10 differential-mode frames of 512 samples are decoded back to the exact input. It covers output backpressure, input stalls, escapes, a mode switch, reference positions outside the table, and one sample per clock with a free output. |
| `tb_workload_pandax` | differential mode on flat-top pulses 0.25–200 µs wide, sampled every 0.5 µs, each decoded back exactly; prints the compressed size per width |
| `tb_parallel_huffman` | 6000 items with both tables, literals and escapes, decoded; one item per clock |
| `tb_huffman_core` | both tables: Kraft sum = 1, prefix-free, lengths grow with \|v\|; core: codes, escapes, literals, latency `CORE_CYCLES−1`, issue interval `CORE_CYCLES` |
| `tb_bit_packer` | random code lengths and frame ends from 4 producers against a reference bit string |
| `tb_rr_splitter` | strict rotation and waiting |
| `tb_normalizer` | headers and deltas against the prediction formula, including an empty reference |
| `tb_peak_search`, `tb_reference_wave`, `tb_sample_fifo`, `tb_diff_preproc`, `tb_wave_subtractor` | the single blocks against models |

Measured on synthetic data, the output as a fraction of the raw 12-bit size is:

* Reference mode, `tb_mpgd_compressor`: about 69%. The pulses have random amplitude and ±3 LSB of
  uniform noise.
* Differential mode, `tb_workload_pandax`: 29–31% across all widths. The pulses are flat tops with
  ±2 LSB of noise.

The published results on real detector data are 43% and 30%. Compression depends entirely on the
data and on how well the table is tuned to it. The reference-mode figure here is dominated by the
test's white noise, which no predictor can remove, so these numbers are not a reproduction of the
published ones.
