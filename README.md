# LPA: a systolic accelerator for logarithmic-posit (LP) networks

Quantised DNNs lose accuracy when every layer is forced into the same uniform grid. A
logarithmic posit (LP) is a tapered, log-domain number format whose shape is set per layer by
three knobs: the word size n, the exponent size es and a scale factor sf. Its run-length regime
gives fine resolution near the centre of a layer's distribution and wide range in the tails.
Because the value is a power of two, products become additions. The accelerator here (LPA)
exploits both properties:

* weights of 2, 4 or 8 bits share one 8-bit buffer byte, so a single processing element (PE) holds one,
  two or four weights and produces that many products per activation;
* multiplication is an integer add of log values, and only accumulation returns to the linear domain.

The RTL in `rtl/` is an 8 x 8 weight-stationary systolic array. Decoders sit on its edges,
encoders at its foot, and it is surrounded by 512 kB of buffers, a post-processing unit and a
tile controller. Every block has a self-checking testbench in `tb/`, driven from an independent
reference model (`tb/lpa_ref_pkg.sv`) that uses real-valued maths and bit-by-bit field walking.

## 1. The number format

An LP word of n bits is read as sign, regime, exponent (es bits) and log-fraction:

    x = (-1)^s * 2^( k * 2^es  +  e  +  f  -  sf )

* A negative word is first two's complemented.
* The regime is the run of equal bits after the sign. A run of m zeros gives k = -m, and a run of
  m ones gives k = m - 1. The bit that ends the run is skipped.
* e is the next es bits. If the word ends early, e is zero-filled on the right.
* f is the rest, read as a binary fraction. It is a fraction of the exponent, not of the
  significand.

The decoders do not pass k, e and f separately. They pass two numbers:

* **regime** = k * 2^es - sf, a signed integer;
* **ulfx** = e.f, an unsigned fixed-point number whose integer part is the exponent and whose
  fractional part is the log fraction.

The log2 magnitude is then simply regime + ulfx.

This design has no zero and no NaR pattern in the decoders. The all-zero word decodes as the
smallest magnitude, which is how the decoder structure behaves. Partial sums do represent zero:
their magnitude is 0.

### Precision modes and lanes

| MODE (m1 m0) | weights per byte | regime lanes | ulfx lanes | PE products |
|---|---|---|---|---|
| A = 00 | four 2-bit | 4 x 4 bit | 4 x 2.2 | 4 |
| B = 01 | two 4-bit  | 2 x 8 bit | 2 x 4.4 | 2 |
| C = 10 | one 8-bit  | 1 x 16 bit | 1 x 8.8 | 1 |

A decoded weight is always 4 sign bits, 16 regime bits and 16 ulfx bits, cut into lanes as in
the table. A decoded activation is always 1 sign bit, a 4-bit regime and a 2.2 ulfx.

For the activation, exponent bits above the two that fit in ulfx are folded into the regime as
4*(e>>2). The regime then saturates to -8..7, and log-fraction bits beyond two are dropped.

Activations are 8-bit or 4-bit. A 4-bit activation is stored in the upper nibble of its byte with
the low nibble zero.

## 2. Decoding at the array edge

There is one weight decoder per column and one activation decoder per row. The PEs therefore
only ever see decoded fields. Each weight decoder works as follows:

1. A *mixed-precision two's complementer* (`lp_twos_comp`) is built from four 2-bit slices. Each
   slice XORs with its sub-word's sign and adds a carry-in. Multiplexers driven by m1/m0 pick
   the sign bit for each slice (op1, op3, op5 or op7) and decide whether the carry is that sign
   or the previous slice's carry-out.
2. Each sub-word is inverted when its first regime bit is 1. This way one leading-zero counter
   serves both run polarities.
3. A *mixed-precision leading-zero detector* (`lp_lzd`) is built from four 2-bit detectors. They
   merge pairwise into 4-bit counts and then into one 8-bit count, and all three sets of counts
   are available at once.
   - A merged count is the upper count when the upper half holds a one, and the sum of both
     counts otherwise.
   - The valid flags are ORed.
   - Before counting, a one is appended below each sub-word. A run that reaches the end of the
     word therefore counts w-1.
4. Shifting the run out of each sub-word leaves e.f. This gives ulfx = remainder << es, aligned
   to the lane's binary point. The regime is k * 2^es - sf, saturated to the lane.

Within a lane, the encoding has the same meaning in every mode. A 2-bit weight, for example,
has room only for sign and regime, so its ulfx lane is always 0.

## 3. The processing element

Each PE keeps a stationary decoded weight. It takes a decoded activation from the left and
passes it right, and takes a partial sum from above and passes it down, registered, every clock.
The weight is double-buffered: a shadow register is shifted in down the column, and `w_swap`
copies it into the active register in one clock.

### MUL stage: products as adds

The regime adds and the ulfx adds each use four 4-bit adders. Multiplexers decide whether a
carry crosses the boundary between neighbouring adders:

* MODE-A: no carry crosses a boundary (four independent 4-bit lanes);
* MODE-B: the carry crosses inside each byte only (two 8-bit lanes);
* MODE-C: the carry crosses all boundaries (one 16-bit lane).

The activation operand is copied into every lane, prepared per mode:

* its regime is sign-extended to the lane width;
* its 2.2 ulfx is moved to the lane's binary point: unchanged in A, `00 u[3:2] . u[1:0] 00` in
  B, and `u << 6` in C (8.8).

Product sign = weight sign XOR activation sign. The lane sums are not saturated; the format
ranges keep them inside the lane.

The ulfx sum is then unpacked. Its integer part becomes the exponent e_m (two bits per product),
and its fraction becomes the log fraction. A log-to-linear converter (`lp_log_lin`) turns each
log fraction f into the linear significand 1.x, where x = 2^f - 1.

### ADD stage: accumulating in the linear domain

Each lane (`lp_lane_add`, LW = 4, 8 or 16 bits) adds a product to the incoming partial sum. A
partial-sum lane is (sign, regime, exponent, lf), and lf has one integer bit.

1. Compare regime + exponent between the two operands and keep the larger. Shift the other lf
   right by the difference; bits beyond the lane are lost.
2. Add the two as signed numbers, then return to sign and magnitude.
3. If the magnitude reaches 2.0, shift it right by one and raise the regime, saturating.
4. An empty partial sum (lf = 0) takes the product unchanged. A sum that cancels exactly leaves
   magnitude 0.

The PE holds one set of lane adders per mode (4 x LW=4, 2 x LW=8 and 1 x LW=16), and the mode
selects which set drives the output. The sum is never renormalised to the left. The encoder does
that once, at the foot of the column.

## 4. Encoding the results

At the foot of each column, a de-skew register aligns the columns again. An encoder
(`lp_encoder`) then packs every lane back into an LP byte:

1. **Normalise.** Find the leading one of lf and shift it to 1.x, lowering the exponent by the
   shift.
2. **Convert.** Turn x into a log fraction (`lp_lin_log`).
3. **Split.** Form L = regime + exponent + fraction + sf_out, and split it into
   k = floor(L / 2^es_out), the exponent bits and the fraction bits.
4. **Pack.** Write the regime run, the exponent and the fraction, truncated to n_out - 1 bits.
   k saturates to the largest or smallest magnitude of the format.
5. **Sign.** Two's complement the word if the lane is negative.

A 4-bit result sits in the upper nibble of its byte.

The output format follows the per-layer rule: n_out = 8 unless the weights are 2-bit (then 4),
es_out = min(5, 2*es_w) and sf_out = sf_a + sf_w. The post-processing unit (`lp_ppu`) computes
this format. It hands the format to the encoders and reports it with every output so the next
layer can be decoded. The PPU also applies ReLU, which sets negative bytes to 0, on the words
drained from the output buffer.

## 5. Buffers, controller and timing

* `lp_sram`: one write port and one read port, with a one-clock synchronous read. It is used as
  - WB: 32768 x 64 bit, 256 kB
  - IB: 16384 x 64 bit, 128 kB
  - OB: 4096 x 256 bit, 128 kB

  That is 512 kB in all.
* A WB word holds one byte per column for one array row. An IB word holds one activation byte
  per row for one vector.
* An OB word holds four output bytes per column for one vector. Byte 4c+i is lane i of column c.
* The load port (`ld_we`, `ld_sel`, `ld_addr`, `ld_data`) and the output stream (`out_valid`,
  `out_addr`, `out_data`) stand in for the external memory.

The controller (`lpa_controller`) runs one *tile* per `start`. A tile is ROWS weight words and
`num_vec` activation vectors:

| state | clocks | action |
|---|---|---|
| LOAD | ROWS+1 | read WB rows bottom row first; decoded weights shift down the shadow chain (skipped when preloaded) |
| SWAP | 1 | shadow -> active in every PE |
| COMPUTE | num_vec | one IB vector per clock into the row decoders, skewed by row |
| FLUSH | ROWS+COLS+1 | wait for the last vector to leave the array; each encoded result is written to OB |
| DRAIN | num_vec | OB read back through the PPU to the output stream, one word per clock |
| FIN | 2 | `done` pulse |

From `start` to `done`, a tile takes (ROWS+1) + 1 + num_vec + (ROWS+COLS+1) + num_vec + 3
clocks. In the steady state the array accepts one activation vector and delivers one output
vector per clock. The array is pipelined: row r is delayed by r clocks going in, and column c by
COLS-1-c clocks coming out.

### Preloading the next tile's weights

The PE double buffer lets the array compute with one set of weights while the next set is
loaded. This matters because a layer is split into many tiles that share one weight format.

* A command with `w_pre` set gives the base address of the next tile's weights in `wb_next`.
* During its streaming phase, the controller reads those ROWS words. The weight-buffer port is
  otherwise idle then.
* The words are decoded and shifted into the shadow registers. The active weights that the
  current vectors are using do not change.
* The next command sets `w_ready`. It skips LOAD and begins with SWAP, saving ROWS + 1 clocks per
  tile.

The preloaded words are decoded with the format of the command that fetched them. A command
with `w_ready` must therefore use the same MODE, es_w and sf_w. An assertion in the controller
checks this, and also that a preload actually took place.

## 6. Where this design departs from, or goes beyond, its source description

* **MODE encoding.** The A/B/C = 00/01/10 encoding is inferred from the multiplexer inputs of the
  two's complementer. It is not stated outright.
* **PE activation operands.** The published PE drawing labels the MODE-B/C activation ulfx
  operands in a way that does not line up with the 4.4 / 8.8 fixed-point reading the text gives.
  This design follows the text, aligning the 2.2 activation ulfx to the lane's binary point.
  It also sign-extends the activation regime, where the source speaks of zero extension.
  Zero extension would give wrong results for negative regimes.
* **Lane widths in the ADD stage.** The source mentions both a 16-bit lf port with four-way
  splitting and "four 2-bit adders". This design uses lanes of 4, 8 and 16 bits, because a 2-bit
  lane cannot hold an accumulating 1.x magnitude.
* **LZD merge.** The order of the merge multiplexer inputs in the published drawing conflicts
  with its ORed valid flag. The logical function is built.
* **Regime size.** The decoders have no regime-size (rs) limit; the run may extend to the end of
  the word.
* **Rounding.** Alignment, activation decoding and encoding all truncate. Rounding and saturation
  details are not given by the source.
* **Conversion tables.** The log/linear converters are exact tables computed at elaboration from
  the formulas in `lpa_pkg`, not hand-minimised gate networks. The function is the same; the area
  will differ.
* **ADD-stage area.** Separate lane adders per mode trade area for clarity.
* **Not built.**
  - Softmax, or any non-linearity other than ReLU.
  - Carrying partial sums from one tile into the next. A tile reduces over 8 input rows only, so
    layers with more than 8 input channels need that reduction done elsewhere.
  - The external memory.
* **Configuration-dependent sizes.** A full ImageNet network does not fit the buffers, so it must
  be streamed through them tile by tile. Attention layers need activation-by-activation products
  and softmax, which the array does not provide.

## 7. Files

| file | contents |
|---|---|
| `rtl/lpa_pkg.sv` | MODE enum, decoded-field structs, tile command, conversion-table generators |
| `rtl/lp_twos_comp.sv`, `rtl/lp_lzd.sv` | mixed-precision primitives |
| `rtl/lp_weight_decoder.sv`, `rtl/lp_act_decoder.sv` | edge decoders |
| `rtl/lp_log_lin.sv`, `rtl/lp_lin_log.sv` | per-lane fraction converters |
| `rtl/lp_lane_add.sv`, `rtl/lp_pe.sv`, `rtl/lp_pe_array.sv` | accumulation lane, PE, array |
| `rtl/lp_encoder.sv`, `rtl/lp_ppu.sv` | output encoding and post-processing |
| `rtl/lp_sram.sv`, `rtl/lpa_controller.sv`, `rtl/lpa_top.sv` | buffers, sequencing, top level |
| `tb/lpa_ref_pkg.sv` | reference model (real-valued LP maths) shared by the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## 8. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself; a watchdog ends a
hung run. With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_lp_pe \
        rtl/lpa_pkg.sv tb/lpa_ref_pkg.sv rtl/*.sv tb/tb_lp_pe.sv
    ./obj_dir/Vtb_lp_pe

`tb_lpa_top` runs the full-size design (8 x 8 array, 512 kB of buffers) through a sequence of
tiles:

* MODE-A, MODE-B and MODE-C weights;
* layers split into tiles whose weights are preloaded during the previous tile;
* 4-bit and 8-bit activations;
* ReLU on and off, and random formats.

It compares every output byte with the reference model, and checks the tile latency and the
one-word-per-clock output stream. It counts how often each mechanism occurred and fails if any
count is zero: mode switches, weight swaps, preloaded tiles, ReLU clipping, renormalisation
after a carry-out, sign cancellation, and regime saturation at both ends. It takes about two
minutes to build and run.

`tb_lpa_layer_slice` runs a slice of a convolution layer:

* a 1 x 1 convolution over a 14 x 14 map, with 8 input channels and 64 output channels;
* run in each of the three modes: 2, 4 or 8 tiles, each tile's weights preloaded during the
  previous one;
* every output checked, and the layer's total clock count checked.

The array reaches 256, 128 or 64 multiply-accumulates per clock while streaming.
