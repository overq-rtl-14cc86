# OverQ layer engine: outlier-aware 4-bit activations in a weight-stationary array

Uniform low-bit quantization of activations has to choose between range and
resolution. With 4 bits, either the rare large values (outliers) are clipped,
or the many small values are quantized coarsely. Post-ReLU activation tensors,
however, are full of exact zeros. Overwrite quantization (OverQ) uses that:
an outlier may take over the slot of a nearby zero and be stored with twice the
bits, and a small value next to a zero may use that slot for extra fraction
bits. Whether this happens is decided per value, at run time. The hardware
cost is small. Each processing element (PE) gets a 2-bit state register, a
weight mux and a shifter. One unit at the array's edge decides the encoding.

This repository holds synthesizable SystemVerilog for such an engine: a
16 x 16 weight-stationary systolic array of OverQ PEs, an accumulation and
rescaling unit, and the OverQ encoder that packs the results for the next
layer. Defaults: 8-bit weights, 4-bit activations, cascade factor 4. The
technique and the PE structure follow the paper "OverQ: Opportunistic
Outlier Quantization for Neural Network Accelerators" (Zhao, Dotzel et al.).
This RTL was written independently from that description. Where the paper
gives no detail, the choices made here are listed in the last sections.

## 1. Slots and states

An activation vector runs along the input-channel dimension. Its N channels
are stored in N slots of B = 4 bits. Each slot also has a 2-bit OverQ state
(`oq_state_e` in `overq_pkg`):

| state     | slot i holds                                   | PE multiplies by   | product weight |
|-----------|------------------------------------------------|--------------------|----------------|
| `OQ_NONE` | its own channel's code                         | own weight         | 1              |
| `OQ_RO`   | upper B bits of the outlier in slot i-1        | weight of row i-1  | 2^B            |
| `OQ_PR`   | B fraction bits of the value in slot i-1       | weight of row i-1  | 2^-B           |
| `OQ_CASC` | channel i-1's code, moved down one slot        | weight of row i-1  | 1              |

The encoder (`overq_encoder`) scans the channels from 0 upwards. At every
free channel i the first rule that applies wins:

1. **Range overwrite with cascading.** Channel i is an outlier: its integer
   part needs more than B bits. Suppose the nearest zero after it is at
   i + k, with 1 <= k <= c, where c is the cascade factor. Then slot i keeps
   the outlier's low B bits, and slot i+1 gets its high B bits (`OQ_RO`).
   Channels i+1 … i+k-1 each move down one slot (`OQ_CASC`). The zero at
   i+k is overwritten. With k = 1 this is plain range overwrite. The scan
   resumes at i+k+1.
2. **Precision overwrite.** Channel i is not an outlier and channel i+1 is
   zero. Slot i keeps the integer code, and slot i+1 gets the B fraction bits
   (`OQ_PR`). The scan resumes at i+2.
3. **Otherwise** slot i gets the channel's code. An outlier that no zero
   can reach is clipped to 2^B - 1.

Three small examples with B = 2 (also in the encoder testbench):

```
range overwrite        precision overwrite     cascade, c = 3
value  slot  state     value  slot  state      value  slot  state
 11     11   none       11     11   none        111    11   none
111     11   none       11.1   11   none         11    01   RO    (MSB of 111)
 00     01   RO         00     10   PR           10    11   CASC  (11 moved)
 10     10   none       10     10   none         00    10   CASC  (10 moved)
```

With cascade factor 2 the third example has no reachable zero, so 111 is
clipped to 11.

A cascade adds nothing to the PE. Every moved slot simply uses the weight of
the row above, which is the same wire that range overwrite uses. The
encoder's cost grows with N·c. It is one combinational pass with a small
carry ("open cascade", "pending fraction") and a look-ahead of
`CASC_MAX` channels per lane, followed by one output register.

Channel 0 never gets a non-zero state, because rule 1 and rule 2 always mark
the slot *after* the value. The top row of the array therefore never needs a
weight from above.

## 2. Why the array sums to the right value

Input channels map to array rows and output channels to columns. Slots and
states enter on the left and move one PE to the right per cycle. Partial sums
move one PE down per cycle. Each PE holds one stationary weight. It can also
read the weight of the PE directly above it, because channel i-1 sits in the
row above. Take an outlier x in row i with weight w:

```
row i  :  x[B-1:0]  * w                 (normal weight)
row i+1:  x[2B-1:B] * w  << B           (RO: weight of row i, shifted left)
-----------------------------------------------------------------
column total contains x * w exactly
```

Under precision overwrite, row i+1 adds `frac * w >> B`. To keep that right
shift exact, partial sums carry B fraction bits. A normal product enters the
sum shifted left by B, an RO product by 2B, and a PR product unshifted. The
PE's shifter is thus a three-way mux with no variable shifter. The
multiplier is the same B x 8-bit signed multiplier as in a PE without OverQ.
All column results are in units of 2^-B (activation LSB x weight LSB).

## 3. Accumulation, rescaling and the next layer's encoding

The OverQ state of a layer's activations is computed where those activations
are produced. That place is the accumulation and rescaling unit at the foot of
the array, the only point where the values still have more than B bits.

`overq_rescale` keeps one accumulator per column and per output pixel, in a
memory of `DEPTH` = 64 entries. This lets a layer with K > ROWS input
channels run in K/ROWS passes (tiles). The input flags are:

* `first`: the tile starts the sum.
* `last`: the pixel is complete.

When the last tile arrives, each column c computes

```
y      = max(0, (acc * mult[c]) >>> shift[c])     ReLU, truncating
ext[c] = min(y, 2^(3B) - 1)                       12 bits: 8 integer . 4 fraction
```

`mult`/`shift` form a per-column scale, which also absorbs per-output-channel
weight scales. `ext` is exactly what the encoder consumes:

* **outlier:** integer part >= 2^B
* **zero:** integer part = 0
* **precision-overwrite bits:** the fraction

Memory access is a read-modify-write one cycle after the input. A write is
forwarded to a vector of the same address one cycle later.

## 4. Top level, protocol and timing

```
in_code/in_state -> skew (row r delayed r) -> 16x16 array -> deskew
  -> accumulate / rescale -> OverQ encoder -> out_code/out_state
```

`overq_accel` is one layer engine. It expects encoded activation vectors and
produces encoded vectors for the next layer. With ROWS = COLS, outputs can be
stored and fed back unchanged as the next layer's inputs. The end-to-end test
does this.

* **Weight load.** Hold `wl_en` high for ROWS cycles, presenting one row of
  COLS weights per cycle, last row first. Each column shifts its weights down
  one row per cycle. Loading must not overlap a vector that is still in the
  array: wait ROWS + COLS + 2 cycles after the last vector. An assertion
  flags `wl_en` together with `in_valid`.
* **Vectors.** One per cycle at most, with `in_addr` (accumulator entry),
  `in_first` and `in_last`. An idle cycle puts zero slots into the array.
* **Latency.** The encoded vector of a pixel appears ROWS + COLS + 4 = 36
  cycles after its last tile entered:
  * ROWS + COLS for array and deskew
  * 3 for the rescaling unit
  * 1 for the encoder
* **Configuration.** The inputs are static during a layer:
  * `casc`: cascade factor 0..4. 0 turns range overwrite off. 4 is the
    main configuration.
  * `pr_en`: enables precision overwrite.
  * `mult` and `shift`: the per-column scale.
* **Statistics.** Each output vector comes with counts:
  * outliers
  * outliers covered by range overwrite
  * outliers covered through a cascade longer than 1
  * precision overwrites
  * lanes clamped by ReLU
  * saturated lanes

  Outlier coverage, the fraction of outliers handled, is
  `n_covered / n_outlier`.

Not included: activation and weight buffers, the sequencer that walks tiles
and pixels, host interface, biases and zero points. Those signals are ports
of the top.

## 5. Parameters

| parameter  | default | meaning                                                 |
|------------|---------|---------------------------------------------------------|
| `ROWS`     | 16      | array rows = input channels per tile                    |
| `COLS`     | 16      | array columns = output channels                         |
| `ACT_W`    | 4       | activation slot width B                                 |
| `W_W`      | 8       | weight width (two's complement)                         |
| `CASC_MAX` | 4       | largest cascade factor the encoder supports             |
| `PSUM_W`   | 32      | partial-sum width in the array (ACT_W fraction bits)    |
| `ACC_W`    | 32      | accumulator width                                       |
| `DEPTH`    | 64      | accumulator entries (output pixels per pass)            |
| `SCALE_W`  | 16      | per-column scale multiplier width                       |
| `SHIFT_W`  | 6       | per-column scale shift width                            |

Sources of the defaults:

* Weight and activation widths are the ones of the paper's main ImageNet
  evaluation, which uses 8-bit weights and 4- or 5-bit activations.
* The cascade factor 4 is the value the paper uses.
* Array size, depth and the remaining widths are this design's choice.
* With 5-bit activations, set `ACT_W = 5`. The encoder then reads 15-bit
  values.

## 6. Files

| file | contents |
|------|----------|
| `rtl/overq_pkg.sv` | state enum, default sizes |
| `rtl/overq_pe.sv` | OverQ PE: state/activation registers, weight mux, multiplier, shifter, adder |
| `rtl/overq_array.sv` | ROWS x COLS grid of PEs with the vertical weight wires |
| `rtl/overq_skew.sv` | triangular delay line used to skew and deskew |
| `rtl/overq_encoder.sv` | OverQ state computation |
| `rtl/overq_rescale.sv` | per-column accumulators, scaling, ReLU, saturation |
| `rtl/overq_accel.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module, plus two encoder studies (coverage, quantization error) and one full ResNet-18 layer |

## 7. Simulation

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M`
and stops itself, and a watchdog ends it if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
  rtl/overq_pkg.sv tb/tb_overq_accel.sv --top-module tb_overq_accel
./obj_dir/Vtb_overq_accel
```

Replace `tb_overq_accel` with `tb_overq_pe`, `tb_overq_array`,
`tb_overq_encoder` or `tb_overq_rescale` to run the unit tests, with
`tb_overq_coverage` or `tb_overq_qerror` for the two encoder studies, or
with `tb_overq_resnet_1x1` for a full-size layer. Each
runs in a few seconds at most.

What each testbench covers:

* **`tb_overq_pe`:** all four states with random operands, the weight load,
  and one-cycle forwarding to the right.
* **`tb_overq_array`:** two random weight matrices and 200 back-to-back
  vectors with random states. Each column is checked in the exact cycle its
  timing promises.
* **`tb_overq_encoder`:** the three B = 2 examples above. Then 3000 random
  16-lane vectors under every cascade factor 0..4, with precision overwrite
  on and off, compared against a separately written sequential reference.
  It also checks that decoding the slots the way the array does reproduces
  the values the encoding claims.
* **`tb_overq_rescale`:** multi-tile pixels, both back to back (forwarding)
  and interleaved, plus ReLU, saturation and the 3-cycle latency.
* **`tb_overq_accel`:** the whole engine at default size. Layer 1 has 48
  input channels in 3 tiles, 16 outputs and 64 pixels. Layer 2 feeds layer
  1's encoded outputs back in, with new weights and another OverQ mode. The
  test checks every rescaled value, code, state, count and the latency. It
  also counts each mechanism and fails if one never occurs: input and output
  range overwrite, precision overwrite, cascades, clipped outliers, tile
  accumulation, ReLU, saturation and the mode switch.
* **`tb_overq_coverage`:** measures outlier coverage for cascade factors
  1..4, on inputs with independent zeros and 1 % outliers among the
  non-zero values. Coverage counts only outliers whose full look-ahead lies
  inside the vector. Each value must come within 3 points of
  1 - (1 - p0)^c, where p0 is the probability of a zero.
  * At p0 = 0.5 the model gives 50, 75, 87.5 and 93.75 %. A typical run
    measures about 50, 75, 87 and 93 %.
  * Three more sweeps use p0 = 0.511, 0.691 and 0.303. At each cascade
    factor, more zeros must give more coverage. At p0 = 0.303 a typical run
    reaches only about 75 % at c = 4.

* **`tb_overq_qerror`:** compares the quantization error of four encoder
  configurations on the same half-zero, bell-shaped activations:
  * no OverQ
  * range overwrite alone (c = 1)
  * range overwrite with cascading (c = 4)
  * full OverQ with precision overwrite

  It sweeps the clipping threshold from 1.5 to 3 standard deviations.
  Each channel's value is rebuilt from the slots the way the array
  combines them, and the error is summed apart for outliers and for the
  other values. At every threshold the test checks that each mode lowers
  the error it targets and that full OverQ has the lowest total. It also
  checks that, without OverQ, a higher threshold trades outlier error for
  error on the other values. At 2 standard deviations a typical run gives
  outlier errors of about 910, 490, 240 and 240. Precision overwrite cuts
  the error on the other values from about 4070 to 2280.

* **`tb_overq_resnet_1x1`:** one whole layer of realistic size. It is the
  1x1 downsampling convolution in front of ResNet-18's third stage: 128
  input channels, 256 output channels and 14 x 14 = 196 pixels. The
  testbench acts as the sequencer. It runs 16 column groups, each in 4
  pixel passes of at most 64, each pass in 8 tiles of 16 channels. The
  inputs are synthetic post-ReLU activations clipped at 2.5 standard
  deviations. Each output channel's scale factor is profiled from the
  layer so that one standard deviation maps to 6 integer steps. Every
  output is checked, as in `tb_overq_accel`. A typical run takes 53,632
  cycles for 6.4 million MACs. It covers about 84 % of the input outliers
  and 90 % of the output outliers.

## 8. Choices made here, and departures from the paper

The following come from the paper's text and figures:

* the OverQ method
* the two modes, cascading and the cascade factor
* the PE structure: state register, mux selecting the adjacent weight,
  left/right shifter
* the mapping of input channels to rows and output channels to columns
* the placement of the state computation in the rescaling unit

The following are this design's own:

* **Encoding and number formats**
  * the binary codes of the four states
  * unsigned activation codes
  * B fraction bits carried in the partial sums
* **Encoder rules**
  * the scan order and the priority of range overwrite over precision
    overwrite
  * precision overwrite only into the adjacent slot
  * clipping of an outlier that is itself moved by a cascade
  * truncation instead of rounding
* **Weight loading** by shifting down the adjacent-weight wires
* **Rescaling unit**
  * the accumulator memory with tile flags and forwarding
  * the multiply-and-shift scale format, ReLU and 12-bit saturation
* **Array size and widths:** the paper gives no size for the array. Its
  prototype, for which it reports area, covers the PE only.

The reference model used by the tests is a second implementation of the
same rules. It checks the RTL against those rules, not against the paper's
accuracy figures. It cannot show that these rules reproduce the published
outlier-coverage or accuracy numbers.

Workload fit at the default parameters, counting tiles and passes that an
external sequencer would issue:

* **8-bit weights with 4-bit activations** (ResNet-18/50, DenseNet-121,
  VGG-19) match the widths.
  * 3x3 convolutions map as matrix products with K = 9·C_in input channels.
    For example, 512 x 3 x 3 = 4608 gives 288 tiles of 16.
  * Feature maps larger than 64 pixels run in several passes.
* **5-bit activations** need `ACT_W = 5`.
* **Cascade factors 5 and 6** need `CASC_MAX >= 6`.
* **Unquantized layers.** The first and last layers, which the paper leaves
  in floating point, are outside this engine.
