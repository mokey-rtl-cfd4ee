# Mokey tile: dot products by counting exponents

Mokey runs transformer inference on 4-bit dictionary indexes without
converting them back to numbers for the bulk of the work. Every value of a
tensor is snapped to one of 16 "Gaussian" centroids that lie on an
exponential curve,

    value = theta * (a^k + b) * s + m,   k in 0..7,  a = 1.179, b = -0.977

with a sign theta, a 3-bit exponent index k, and a per-tensor scale s and
shift m. Because a^i * a^j = a^(i+j), the product of two such values needs
no multiplier: add the two 3-bit indexes, XOR the two signs, and count +1
or -1 in a small table indexed by i+j. Only after the whole dot product has
gone by are the 15 counts multiplied by their powers a^0..a^14. Three more
small tables pick up the cross terms that the scale and shift produce. The
rare values that fall outside the Gaussian range (outliers, a few percent)
have their own 16-entry dictionary. Any product involving one is done
conventionally, by looking up both centroids and multiplying.

This repository holds synthesizable SystemVerilog for one processing tile
of that accelerator. It also holds the parts around the tile that turn its
results into the compressed memory format and back:

* eight Gaussian PEs (`gpe`) with their counter register files (`crf`);
* the shared outlier/post-processing unit (`opp`);
* a sequencer (`pp_ctrl`);
* the output quantizer (`out_quant`);
* a packer and unpacker for the off-chip layout (`ot_pack`, `ot_unpack`);
* a decompression engine (`decomp_engine`), used when the format serves
  only as memory compression for another accelerator.

`mokey_top` wires them together.

## Number formats

**On-chip code (5 bits).** Defined in `mokey_pkg::code_t`:

| bit | field   | meaning                                   |
|-----|---------|-------------------------------------------|
| 4   | `is_ot` | 0 = Gaussian dictionary, 1 = outlier dictionary |
| 3   | `sign`  | 0 = positive, 1 = negative                |
| 2:0 | `idx`   | exponent index k (Gaussian) or the low 3 bits of the outlier index |

For an outlier, `{sign, idx}` together form a 4-bit index into a 16-entry
table. The hardware never needs an outlier's sign separately.

**Off-chip layout.**
* The value stream holds only the 4-bit part `{sign, idx}` of every value.
  There are 16 values per 64-bit line, value j in bits 4j+3:4j. Four lines
  make a group of 64 values.
* A second stream, the outlier pointer list, tells which values are
  outliers. For each group it carries a 6-bit count, then the 6-bit
  positions (0..63) of that group's outliers, one field per transfer.
* A group without outliers costs a single zero field.
* A group in which all 64 values are outliers cannot be encoded, because
  the count is only 6 bits. `ot_pack` asserts on it.

**Fixed point.** All centroids, bases, constants and outputs are 16-bit
two's complement with `frac` fractional bits. `frac` is a run-time input,
chosen per layer from the layer's value range.

## Why counting gives the dot product

Write each Gaussian value as A = theta_A * s_A * a^kA + mu_A, where
mu_A = theta_A * s_A * b + m_A (weights W likewise). Expanding
sum_i A_i * W_i and grouping gives

    s_A s_W   * sum  theta_A theta_W a^(kA+kW)     -> SoI  : 15 counters, line kA+kW
    s_A s_W b * sum  theta_A theta_W a^kA          -> SoA1 :  8 counters, line kA
    s_A s_W b * sum  theta_A theta_W a^kW          -> SoW1 :  8 counters, line kW
    s_A s_W b^2 * sum theta_A theta_W              -> PoM1 :  1 counter
    + terms that depend on one tensor only (SoA2, SoW2, PoM2, PoM3, PoM4)

Each of the first four sums is a histogram of signs:
* a pair with equal signs adds +1 to one line of each table;
* a pair with different signs adds -1.

All the real-valued factors are moved into a per-line *base*:

| table | base of line k        |
|-------|-----------------------|
| SoI   | s_A s_W a^k           |
| SoA1  | s_A s_W b a^k         |
| SoW1  | s_A s_W b a^k         |
| PoM1  | s_A s_W b^2           |

The bases are computed ahead of time, one set per layer. The Gaussian
part of the output is then sum(count * base) over 32 lines.

The remaining terms are constants once the layer's inputs are known.
Software computes them per output and loads them as `cnst[p]`, the
starting value of accumulator line p. Outlier pairs are left out of the
counts. The constants must therefore be summed over the Gaussian pairs
only; the testbenches compute them that way.

## The tile

### Gaussian PEs and the outlier chain

Each GPE has its own activation channel and weight channel. It takes one
pair per cycle while `gEnb` is high.

**Gaussian pair.** The GPE counts it in its four CRFs:

| CRF  | lines x bits | line written |
|------|--------------|--------------|
| SoI  | 15 x 8       | idxA+idxW    |
| SoA1 | 8 x 8        | idxA         |
| SoW1 | 8 x 8        | idxW         |
| PoM1 | 1 x 8        | the only line |

**Pair with an outlier.** The GPE does not count it. It raises
`isOtlCur` instead.

**The outlier chain.** The eight GPEs form a ripple chain from GPE0
upwards: `isOtlNxt = isOtlPrv | isOtlCur`.

* The first GPE with an outlier raises `otlSel`. It drives its two codes
  onto `otlA`/`otlW`. These buses are ANDed with `otlSel`, so every other
  GPE drives zeros, and the OPP ORs all GPEs' buses together.
* Every later GPE with an outlier raises `hldA`/`hldW`. Its source must
  present the same pair again in the next cycle.

The result:
* Gaussian pairs never stall.
* Outlier pairs are handled one per cycle, in GPE order.
* The compute phase of a lane takes (its pairs + the cycles it was held)
  cycles. The end-to-end test checks this cycle count exactly.

### Outlier/post-processing unit (OPP)

The OPP has four parts:
* a lookup table with two read ports;
* one 16x16 multiplier;
* one adder;
* an accumulator with one 16-bit line per GPE.

Every cycle it computes:

    acc[line] <= saturate16( (addSelA ? addCnst : product) + (addSelB ? 0 : acc[line]) )

It works in three modes.

**Outlier mode.** Entered whenever any `otlSel` is high; this overrides
the select inputs.
* Port 1 reads the activation's centroid and port 2 the weight's
  centroid.
* Their product is shifted right by `frac` and added to the selected
  GPE's line.

**Post-processing mode** (`ppEnb`).
* `sumSel`/`ppAddr` pick a CRF line in GPE `ppPESel`; its count arrives
  on `sData`.
* Port 1 reads that line's base from the table.
* count x base is added to line `ppPESel`, unshifted, because the count
  is an integer.

**Constant loads.** `addSelA`/`addSelB` load `addCnst` into a line.
`mulCnst` and the accumulator can also be chosen as multiplier operands.
The sequencer does not use those two paths.

The lookup table is 128 x 16, loaded through `lutWe`/`lutWAddr`/`lutWData`:

| address | content |
|---------|---------|
| 0..31   | activation centroids, indexed by the 5-bit code (16 Gaussian: 8 magnitudes x 2 signs, shifted by m; then 16 outliers) |
| 32..63  | weight centroids, same layout |
| 64..127 | bases, indexed by `{sumSel, ppAddr}` (SoI 0..14, SoA1 0..7, SoW1 0..7, PoM1 0) |

The Gaussian centroids are stored with both signs. The shift m makes the
positive and negative values differ in magnitude, so one copy per
magnitude is not enough.

### Sequencer and timing

`pp_ctrl` runs one operation, which produces eight output activations,
one per GPE:

| phase   | cycles | what happens |
|---------|--------|--------------|
| start   | 1      | |
| INIT    | 8      | load `cnst[p]` into accumulator line p; clear all CRFs |
| COMPUTE | C      | lanes stream pairs; the host raises `computeDone` with the last pairs |
| PP      | 8 x 32 | per GPE: scan SoI, SoA1, SoW1, PoM1, one CRF line per cycle |
| QUANT   | 8 x 1  | per GPE, right after its scan: send the line to the quantizer |
| DONE    | 1      | `done` pulses |

The PP and QUANT phases together take 8 x 33 cycles. The quantizer
hand-off waits if it is not ready. With no back-pressure an operation
takes 1 + 8 + C + 264 + 1 cycles. C is the longest lane's pair count plus
its hold cycles, plus one.

Post-processing is serial on purpose. It runs once per output, after
hundreds to thousands of compute cycles.

### Output quantizer

`out_quant` holds 32 centroids sorted ascending: the output tensor's 16
Gaussian centroids and 16 outlier centroids. Next to each centroid it
stores the 5-bit code that stands for it. A result appears one cycle
after `oaValid`.

1. Thirty-two comparators form `lt[i] = OA < cent[i]`. Because the table
   is sorted, this is a run of 0s followed by 1s.
2. A leading-one detector finds the first 1, at position h.
3. Two muxes select CH = cent[h] and CL = cent[h-1]. When h = 0, CL = CH.
4. The two distances CH-OA and OA-CL are compared, and the nearer
   centroid wins. Ties go to CL. If OA is not below any centroid, the
   last entry is chosen.
5. The winning position indexes the code table.

Whoever loads the table must keep it sorted.

### Packer, unpacker, decompression engine

**`ot_pack`** takes one code per cycle. It collects the 4-bit parts into
lines and records outlier positions. After every 64 values it sends the
group's pointer list, stalling its input (`inReady` low) while the list
goes out.

**`ot_unpack`** handles a group in two steps:
1. It reads the group's pointer list into a 64-bit mask.
2. It turns each of the four lines into 16 codes, taking `is_ot` from the
   mask.

All of its streams use valid/ready.

**`decomp_engine`** maps 16 codes per cycle through a 32-entry table per
lane. Each table can hold 16-bit fixed-point centroids or FP16 bit
patterns.

## Top-level use

`mokey_top` has no parameters that need changing. Its defaults are:
NUM_GPE = 8, DATA_W = 16, CNT_W = 8, QENT = 32, DEC_LANES = 16.

1. Load the OPP table (`lut*`), the quantizer table (`qd*`) and, if it is
   used, the decompression table (`decLut*`).
2. Set `frac` and `cnst[]`, then pulse `start`.
3. When `laneEn` rises, drive `laneValid[g]`/`aCode[g]`/`wCode[g]`. Advance
   a lane only in cycles where its `hldA` is low.
4. Raise `computeDone` together with the last pairs.
5. Results appear in three places:
   * `oaValid`/`oaData` carry each output before quantization;
   * `qValid`/`qCode` carry its 5-bit code, for an on-chip buffer;
   * the same codes leave in the off-chip layout on `stLine*`/`stPtr*`.
6. The load side takes the off-chip layout on `ldPtr*`/`ldLine*` and
   delivers 16 codes at a time on `ldValid`/`ldCodes`.

**Compression-only use.** Another accelerator can use the same quantizer
and memory format without the counting datapath:
* It offers 16-bit fixed-point values on `extOaValid`/`extOa`. A value
  moves in a cycle where `extOaReady` is also high.
* Its codes leave on `qValid`/`qCode` and in the off-chip layout, exactly
  like the tile's own outputs.
* On the way back, `decomp_engine` turns codes into values again
  (`decIn*` to `decOut*`).

Input is accepted at most every other cycle. The quantizer's result takes
one cycle to reach the packer, and the packer stops taking input after
the 64th value of a group, while it sends the group's pointer list. The
tile's own outputs have priority over external values.

On-chip buffers and DRAM are not part of the RTL. Their connections are
these ports.

## Where this RTL departs from, or adds to, the original description

* **Counter width.** The counters are 8 bits, as published (the PoM1
  counter is described as "a single byte"). They wrap. A summation line
  holds a net count in -128..127. PoM1 sees every Gaussian pair, so with
  random signs its net count grows like sqrt(K) for an inner-product
  length K.
  * K up to about 1024 (attention heads, 768/1024-wide projections): the
    count stays in range.
  * K = 3072 or 4096 (feed-forward layers of the base and large
    encoders): roughly 2 % and 5 % of outputs would wrap and come out
    wrong.
  * `CNT_W = 14` makes every K up to 8191 exact at a small cost. It is a
    parameter of `gpe`, `opp` and `mokey_top`.
* **One lookup table, several sections.** The original drawing shows a
  single 16x16 table. This design keeps separate 16-entry sections for
  activation and weight centroids of both dictionaries, plus 64 base
  entries.
* **Folded scales.** The tensor scales are folded into the bases, so one
  multiply per counter line suffices.
* **Fixed-point conventions.** A fixed-point x fixed-point product is
  floor-shifted by `frac`. The accumulator saturates at 16 bits. Neither
  rounding nor overflow behaviour is given in the original.
* **Sequencer.** The sequencer, its phase order, the INIT phase and all
  handshakes are this design's.
* **Lane valid.** `gEnb` doubles as the per-lane "pair valid".
* **Holds.** Both channels of a held lane are held together.
* **Decompression width.** The decompression engine width (16 lanes) is
  chosen here.
* **Where outlier flags are restored.** In the original drawing the
  decompression engine reads the value lines and the outlier pointers
  itself. Here `ot_unpack` restores the outlier flag and `decomp_engine`
  takes finished 5-bit codes. Its input is a top-level port, so codes can
  come from the unpacker or from an on-chip buffer.
* **Outlier-present signal.** The original drawing feeds the end of the
  GPE chain into the OPP as its outlier-present signal. The OPP here
  ORs the one-hot selects instead, and an assertion checks that both
  agree.
* **Not built.** The following are not in this RTL:
  * the on-chip buffers;
  * the DRAM controller;
  * the arrangement of many tiles (the evaluated accelerator has 3072
    units);
  * dictionary generation, which is offline software;
  * the computation of the per-output constants. Part of it could run
    while the previous layer's outputs are quantized, but the constants
    depend on the dataflow and on which pairs hold outliers. The tile
    takes them finished, as `cnst[]`.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench ends
by printing `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_crf` | random up/down/clear traffic against a reference array, including wrap-around |
| `tb_gpe` | counts in all four CRFs against a software histogram; leading-one chain, `otlSel`, gating and holds for every chain input |
| `tb_opp` | outlier MACs, post-processing MACs, constant loads and every select combination against a reference with shift and saturation |
| `tb_out_quant` | random activations against a brute-force nearest-centroid search, including ties and values outside the range |
| `tb_ot_pack` | the layout bit for bit, for groups with no, few and many outliers, random input gaps |
| `tb_ot_unpack` | the layout bit for bit, random outlier sets, random input gaps and output back-pressure |
| `tb_pp_ctrl` | the control sequence and the exact cycle count of an operation |
| `tb_decomp_engine` | every lane against the loaded table |
| `tb_mokey_top` | end-to-end test; see below |
| `tb_mokey_workload` | end-to-end test at transformer layer lengths; see below |

**`tb_mokey_top`** runs the whole tile at its default size. It builds
real dictionaries on the exponential curve, with fixed-point centroids,
bases and constants. It then runs eight operations of different
lengths. For each output it checks three things:
* the output is bit-exact against a model of the tile's arithmetic;
* the output is within a rounding bound of the true real-valued dot
  product (whenever nothing wrapped or saturated);
* the quantized code is the nearest centroid.

It also checks:
* the compute-phase and post-processing cycle counts;
* that the off-chip streams, looped back through the unpacker and the
  decompression engine, return the codes and centroids.

After the operations it feeds 64 outside values through `extOa` and
checks their codes along the same path.

It counts every mechanism and fails if one never occurred: outlier MAC,
hold, Gaussian count, post-processing, quantization, line packing,
outlier pointer list, unpacked outlier, decompression, external value
quantized, external input stalled.

**`tb_mokey_workload`** uses the same checks with inner-product lengths
taken from transformer layers: 64, 128, 384, 768, 1024, 3072 and 4096.
About 3 % of its codes are outliers. For each length it reports how many
outputs had a counter wrap.

To simulate with Verilator, name the package and the testbench and let
Verilator find the modules it uses in `rtl/`. For example, the end-to-end
test:

    verilator --binary --timing --assert -Wno-fatal -Irtl \
        rtl/mokey_pkg.sv tb/tb_mokey_top.sv --top-module tb_mokey_top \
        -Mdir obj -o sim
    ./obj/sim

Any other testbench is run the same way, with its own name in place of
`tb_mokey_top`. `-Wno-fatal` is needed because the testbenches' reference
models produce width warnings. Stimulus comes from `$urandom`; add
`+verilator+seed+N` to the run to vary it. Every test finishes in
seconds.
