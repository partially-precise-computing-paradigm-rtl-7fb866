# Partially-precise adders and multipliers for three image and vision datapaths

An embedded system that only runs one application never sees most of the
input values its adders and multipliers could in principle take. Some values
never occur (*natural sparsity*: in a face data set no pixel is brighter than
159, and a blending coefficient limited to 0..127 never has its top bit set).
Others can be removed on purpose by a cheap *preprocessing* step at the
primary inputs, at a controlled cost in output quality (*intentional
sparsity*). A **partially-precise computational (PPC) block** exploits this.
It is an adder or multiplier that must be exact only for the input values
that can still reach it. Every other row of its truth table is a
don't-care (DC), and a logic optimiser is free to use those DCs to shrink
the circuit.

This RTL implements that idea for three datapaths:

| datapath | PPC blocks | default sparsity |
|---|---|---|
| 3x3 Gaussian denoising filter (`gdf_filter`) | eight partially-precise adders (PPAs) | DS<sub>16</sub> on all nine pixels |
| image blending, P = αP1 + (1-α)P2 (`ib_blender`) | two partially-precise multipliers (PPMs) | natural (α range) + DS<sub>16</sub> |
| 960-40-7 face-recognition network (`frnn_net`) | 40 hidden-neuron MACs with PPMs | natural (pixels ≤ 159) + TH<sub>48</sub><sup>48</sup> + DS<sub>32</sub> |

The defaults are the configurations the method's authors single out as the
best cost/quality trade-off for each application. Every other configuration
in their result tables can be built by changing parameters (see
*Configurations* below). `ppc_top` simply places the three datapaths side by
side.

## Preprocessing: where intentional sparsity comes from

Two preprocessings are defined on an unsigned WL-bit input (`ppc_preproc`):

* **Down-sampling DS<sub>x</sub>** (x a power of two) maps i to
  i − (i mod x). In hardware this just clears the log2(x) low bits, so it
  costs no gates. It leaves 1/x of the values. Because the removed values
  are spread evenly over the range, synthesis tools exploit the resulting
  DCs well.
* **Thresholding TH<sub>x</sub><sup>y</sup>** maps every value below x to y
  (a comparator and a multiplexer). It removes a contiguous band, such as the
  dark background of a face image. x sets how much sparsity is created. y
  only moves where the DCs fall.

When both are used, this design applies TH first and DS second, so every
output stays on the DS grid. For example, TH<sub>48</sub><sup>48</sup> +
DS<sub>32</sub> on face pixels 0..159 leaves only the values
{32, 64, 96, 128}.

Sparsity also arises *inside* a datapath without any preprocessing. In the
Gaussian filter, a 1-bit left shift makes the operands of an adder even (a
DS<sub>2</sub>-like set). The sum of a 10-bit and an 11-bit word never
reaches the top of its 12-bit range. The RTL tracks such propagated sets too.

## How a PPC block is expressed in RTL

This is the part that needs the most explanation. In the original method a
PPC block is produced by a tool flow. Range analysis yields a truth table
with DCs. A two-level minimiser (Espresso) and a multi-level one (SIS)
turn it into gates. Truth-table synthesis does not scale past small
operands, so wide blocks are split into 4-bit slices. An 8x8 multiplier
becomes four 4x4 multipliers whose partial products are added. A 12-bit
adder becomes three cascaded 4-bit adders.

The RTL follows the same split and does the range analysis at elaboration:

1. **Value sets as masks** (`ppc_pkg`). A set of values 0..4095 is a 4096-bit
   parameter of type `vmask_t`, with bit v set if v can occur. Constant
   functions build and propagate these sets:
   * `pre_mask` gives the set after a natural range and a preprocessing;
   * `shl_mask` gives the set after a left shift;
   * `sum_mask` gives the set of sums of two sets.

   Each datapath computes the set at every PPC-block input as a
   `localparam`.
2. **Projection onto segments.** `nib_mask(m, s)` gives the 16-bit set of
   values that the 4-bit slice `s` takes over `m`. `carry_mask` tells whether
   a carry of 0 and/or 1 can enter slice `s` of an adder. The two operands
   are independent, so this is decided exactly from the minimum and maximum
   low parts of each set.
3. **Segments with DC rows.** `ppc_add4` and `ppc_mul4x4` compute the exact
   result when every operand (and the carry) is in its allowed set.
   Otherwise they assign `'x`:

   ```systemverilog
   if (VA[a] && VB[b] && VC[cin]) {cout, s} = a + b + cin;
   else                           {cout, s} = 'x;   // don't-care row
   ```

   `ppc_adder` ripples ceil(WO/4) such segments. `ppc_mul8x8` adds the four
   4x4 partial products with a precise adder and can keep only the upper
   `OUT_WL` product bits, so the truncated bits are output DCs as well.

Three consequences for a user:

* **The contract.** A PPC block is exact for every input in its declared
  sets, and nothing is promised outside them. The preprocessing inside each
  datapath guarantees the intentional part. The natural part is a property
  of the data. For example, feeding a face pixel above 159 to the default
  `frnn_net`, or α ≥ 128 to `ib_blender`, gives unspecified results. In a
  two-state simulator such as Verilator an `'x` shows up as some fixed
  value, often 0.
* **The set analysis is conservative.** Treating the operands of a segment
  as independent can only add exact rows. It never turns a row that can
  occur into a DC. With every mask full, each block is an ordinary precise
  adder or multiplier. The conventional design is therefore the same RTL
  with DS = 1 and no natural range.
* **Area depends on the synthesis flow.** The `'x` rows tell a synthesis
  tool what it may choose. How much logic that saves depends on the tool.
  The method's own results come from Espresso/SIS on the segment truth
  tables. A word-level flow, such as the coarse synthesis of an open-source
  tool, exploits far fewer of these DCs. The RTL is written so that the
  segments can be handed to a truth-table minimiser one by one.

## The Gaussian denoising filter (`gdf_filter`)

The 3x3 kernel is 1 2 1 / 2 4 2 / 1 2 1. The products by 2 and 4 are left
shifts, and eight adders of growing width form the sum:

| adder | operands | width |
|---|---|---|
| Adder-1 | P1 + P3 | 9 |
| Adder-2 | P7 + P9 | 9 |
| Adder-3 | P2<<1 + P4<<1 | 10 |
| Adder-4 | P6<<1 + P8<<1 | 10 |
| Adder-5 | Adder-1 + Adder-2 | 10 |
| Adder-6 | Adder-3 + Adder-4 | 11 |
| Adder-7 | Adder-5 + Adder-6 | 12 |
| Adder-8 | Adder-7 + P5<<2 | 12, the output `out` |

Each pixel first passes DS<sub>DS</sub>. Each adder is a `ppc_adder` whose
sets come from the pixel set, propagated through the shifts and the tree.
`out` is the raw weighted sum (at most 16·255 = 4080). The normalised pixel
is `out[11:4]`. With DS<sub>16</sub>, `out[3:0]` is always zero. The block
is combinational. The window buffers around it are not part of the design.

## The image blender (`ib_blender`)

Multiplier-A forms img1·coef1 and Multiplier-B forms img2·coef2. Each keeps
the upper 8 bits of its 16-bit product. A precise 8-bit adder sums the two.
The coefficients are 8-bit fractions of 256:

* coef1 = α lies in 0..127;
* coef2 = 1 − α lies in 128..255. Driving `coef2 = 255 - coef1` satisfies
  this.

These ranges are the natural sparsity: coef1 never has its MSB set, and
coef2 always has. The sum of the two truncated products is below 256, so
the adder never overflows. `NATURAL = 0` drops the range restriction.
`DS` applies down-sampling to all four inputs.

## The face-recognition network (`frnn_net`, `frnn_mac`)

Each neuron is a MAC (`frnn_mac`):

    acc <= acc + (img * w)[15:4]        12-bit accumulator, wraps modulo 4096

The product keeps 12 bits, and the adder is a precise 12-bit one. The
multiplier is a PPM. Its image operand set is the natural range 0..159 after
the image preprocessing. Its weight set is all 8-bit values after DS.

The network runs both layers in parallel, one input set per cycle:

| state | per accepted `in_valid` cycle | length |
|---|---|---|
| `S_HID` | `pixel` (preprocessed once, broadcast) and `w_hid[0..39]` (each DS-preprocessed) go to the 40 hidden MACs; `idx` = pixel number | 960 |
| `S_OUT` | the 7 output MACs add `hid_act[idx] * w_out[k]`; `idx` = hidden neuron | 40 |
| `S_DONE` | `out_acc[0..6]` hold the results; `done` = 1 until the next `start` | – |

* `start` clears all accumulators and enters `S_HID`.
* With `in_valid` held high, an image takes 1000 cycles.
* Dropping `in_valid` stalls the network without losing state.
* `idx` and `out_phase` tell the weight source what to present next.

**The sigmoid is not implemented.** The method only names it. The number
format of the 12-bit MAC result and the activation width are not defined,
so any sigmoid would be a guess. `hid_acc` therefore leaves the block, and
the activations come back on `hid_act`, combinationally, in the same
cycle. The testbenches use `hid_acc[11:4]` as a stand-in. The output-layer
MACs use precise multipliers; only the hidden layer is partially precise.
Weights enter on ports, because where they are stored is not defined.

## Configurations

| application, table row | parameters |
|---|---|
| GDF conventional / DS<sub>2,4,8,16</sub> | `gdf_filter #(.DS(1/2/4/8/16))` (default 16) |
| IB conventional | `ib_blender #(.DS(1), .NATURAL(0))` |
| IB natural / DS<sub>x</sub> / natural + DS<sub>x</sub> | `.NATURAL(1/0/1)`, `.DS(x)` (default natural + 16) |
| FRNN conventional | `frnn_net #(.NAT_HI(255), .TH_X(0), .TH_Y(0), .DS_IMG(1), .DS_W(1))` |
| FRNN natural | `.NAT_HI(159)` with TH and DS off |
| FRNN TH<sub>48</sub><sup>48</sup> | `.TH_X(48), .TH_Y(48)`, DS off |
| FRNN (natural +) DS<sub>16/32</sub> | `.DS_IMG(x), .DS_W(x)` (+ `.NAT_HI(159)`) |
| FRNN natural + TH<sub>48</sub><sup>48</sup> + DS<sub>16/32</sub> | all of the above (default: DS 32) |

## What the testbenches show

Every testbench is self-checking. It computes its expected values from the
arithmetic definitions, not from the RTL, and ends with one `TB_RESULT`
line.

* **Blocks.** `tb_ppc_preproc`, `tb_ppc_add4`, `tb_ppc_mul4x4`,
  `tb_ppc_adder`, `tb_ppc_mul8x8`, `tb_gdf_filter`, `tb_ib_blender`,
  `tb_frnn_mac` and `tb_frnn_net` cover them one by one. The network test
  uses a reduced 24-5-3 size with stalls. It checks that an image takes
  N_IN + N_HID cycles when `in_valid` is held high.
* **Whole design.** `tb_ppc_top` runs all three datapaths at full size: one
  whole 960-pixel image with random stalls, plus thousands of filter windows
  and blend pairs. It counts that down-sampling, thresholding, stalls, the
  layer switch and accumulator wrap-around all occur.
* **Range analysis.** `tb_ppc_dc_rows` checks that the value sets computed
  at elaboration equal what the preprocessing hardware produces. It also
  checks the DC-row count for DS<sub>x</sub> on both operands,
  2<sup>2WL</sup>(1 − 1/x<sup>2</sup>): 75 %, 93.75 % and 98.4 % for x = 2,
  4, 8.
* **Error probability.** `tb_ppc_error_eq` feeds all 65536 raw operand
  pairs through DS<sub>x</sub> preprocessing into an 8-bit PPA and an 8x8
  PPM, for x = 2..16. It compares each result with the precise result of the
  raw operands. The error counts must match the closed forms
  1 − 1/x<sup>2</sup> for the adder and
  1 − (1/x<sup>2</sup> + 2/2<sup>WL</sup> − 2/(x·2<sup>WL</sup>)) for the
  multiplier. A product is still right when either raw operand is 0.
* **Result tables.** `tb_gdf_table1`, `tb_ib_table2` and `tb_frnn_table3`
  build every configuration of the three result tables and check them
  against the reference. On a generated 64x64 image with a bell-shaped
  histogram, the filter's PSNR against the conventional build is 51.4,
  44.5, 37.5 and 30.9 dB for DS<sub>2..16</sub>. The published figures,
  measured on a photograph, are 51, 44, 37 and 31 dB. The blending PSNRs
  come out a few dB below the published ones, because the generated images
  and α = 127/256 differ from the published test case. The test confirms
  that natural sparsity alone changes no output bit, and that adding it to
  DS<sub>x</sub> changes nothing either. The network test checks the
  arithmetic of all nine network variants. It cannot measure recognition
  rates, because trained weights and the sigmoid are missing.

## Departures and open points

* The DCs are written as `'x` and left to the synthesis tool. The published
  flow (Espresso, SIS and then a commercial synthesiser) is a tool chain,
  not hardware, and is not reproduced. Gate counts from a word-level flow
  will not match the published ones.
* Not specified by the method, chosen here:
  * the order TH-then-DS;
  * keeping product bits [15:4] in the neuron MAC. This matches the
    published range of the adder-input histogram;
  * the wrap-around accumulator;
  * unsigned weights;
  * the schedule and handshake of `frnn_net`;
  * output-layer word lengths;
  * the use of combinational datapaths for the filter and the blender.
* The filter kernel is inferred from the shift amounts in the filter
  structure.
* The 4-bit segment DC sets treat the operands as independent (see above),
  so a few rows that can never occur still get exact values.

## Files and simulation

`rtl/`:

* `ppc_pkg.sv`: value-set types and range analysis;
* `ppc_preproc.sv`: TH and DS preprocessing;
* `ppc_add4.sv`, `ppc_adder.sv`: PPA segment and cascaded PPA;
* `ppc_mul4x4.sv`, `ppc_mul8x8.sv`: PPM segment and 8x8 PPM;
* `gdf_filter.sv`, `ib_blender.sv`: the filter and the blender;
* `frnn_mac.sv`, `frnn_net.sv`: the neuron MAC and the network;
* `ppc_top.sv`: all three datapaths.

`tb/` holds one testbench per module and the workload tests named above.
With Verilator 5, the package first and the rest found by module name:

```sh
verilator --binary --timing --assert -y rtl -y tb rtl/ppc_pkg.sv tb/tb_ppc_top.sv \
          --top-module tb_ppc_top -Mdir build -o sim
./build/sim
```

The full-size network testbenches take about 20 s to build and well under
a second to run.

To add a configuration, change the parameters. The value sets, and with
them every DC, follow automatically. To use a new datapath, compute the
operand sets with `pre_mask`, `shl_mask` and `sum_mask`, and pass them to
`ppc_adder` or `ppc_mul8x8`. Words are limited to 12 bits by the 4096-bit
masks.
