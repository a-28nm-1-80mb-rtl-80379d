# Complex-number hybrid digital/analog SRAM compute-in-memory macro

This is RTL for a compute-in-memory (CIM) macro that multiplies and accumulates
**complex** numbers inside an SRAM array. It follows the 28 nm macro described in
"A 28nm 1.80Mb/mm² Digital/Analog Hybrid SRAM-CIM Macro Using 2D-Weighted
Capacitor Array for Complex Number MAC Operations" (Konno et al.). The digital parts
are synthesizable SystemVerilog. The analog parts (pass-transistor multipliers,
capacitor array, ADC capacitor DAC and comparator) are behavioural models with the
same ports.

A complex dot product `sum_k I_k * w_k` needs four real products per element:
`Re = Ir*Wr - Ii*Wi` and `Im = Ir*Wi + Ii*Wr`. A conventional CIM array either
stores each weight twice or takes extra cycles. Here each stored weight bit feeds
a real-output lane and an imaginary-output lane at the same time, so one operation
yields both parts from a single copy of the weights.

Inside each lane the products are split by bit weight:

* the heaviest partial products are **counted digitally**; these are the ones
  where analog mismatch would hurt most;
* the middle ones are summed **as charge** on a capacitor array whose capacitors
  are weighted in two dimensions, by input bit and by weight bit, and then
  digitised by a 7-bit SAR ADC;
* the lightest ones are dropped.

## Organisation

| level | module | what it is |
|---|---|---|
| macro | `ccim_macro` | 8 channels, global phase generator, input/row registers, weight write port |
| channel | `ccim_channel` | one complex CIM unit: 8 CIM-SRAMs (64 words × 16 b) and a real and an imaginary lane |
| lane | `ccim_lane` | 16 product units → one 8-bit signed result |
| | `sign_ckgen` | per unit: product sign → SGNCLK |
| | `dcim` (`dcim_count`, `dcim_adder_tree`) | digital CIM of the top three partial products |
| | `acim_cap_array` *(model)* | PTL multipliers + 2D-weighted split capacitor array |
| | `adc_cdac_cmp` *(model)* | ADC sampling CDAC + comparator |
| | `sar_logic` | 7-bit successive-approximation register |
| | `post_adder` | D_DCIM + D_ACIM → CIMO |
| memory | `cim_sram` | double-word-line 64 × 16 b weight array |
| control | `global_ckgen` | sampling/conversion phase sequencer |
| shared | `ccim_pkg` | sizes and the SMF operand type |

Sizes: 8 channels × 8 complex elements × 64 rows × 16 bits = 64 kb of weights.
One operation selects one weight row. It computes, for all 8 channels at once,
the complex dot product of that row with the broadcast 8-element complex input
vector.

## Number format and how a product is split

Inputs and weights are 8-bit **signed-magnitude** (SMF) numbers: bit 7 is the
sign and bits 6:0 the magnitude (−127…+127). A product's sign is the XOR of the
two sign bits. Its magnitude is `sum_{i,j} I[i]·W[j]·2^(i+j)` over the 7×7
magnitude bits. With signed magnitude the sign bits never enter this 2D table of
bit weights, so the table shrinks from 8×8 to 7×7.

Each partial product `I[i]·W[j]` goes to one of three places:

```
            I6    I5    I4    I3    I2    I1    I0
   W6      D12   D11   A10   A9    A8    A7    A6
   W5      D11   A10   A9    A8    A7    A6    A5
   W4      A10   A9    A8    A7    A6    A5    A4
   W3      A9    A8    A7    A6    A5    A4    .
   W2      A8    A7    A6    A5    A4    .     .
   W1      A7    A6    A5    A4    .     .     .
   W0      A6    A5    A4    .     .     .     .
```

* `D` is digital: `I6W6` (2^12), `I6W5` and `I5W6` (2^11). These are the
  largest contributions to the result. One unit contributes
  `2·I6W6 + I6W5 + I5W6` = 0…4 counts of 2^11.
* `A` is analog: every other partial product with `i + j ≥ 4`. Each drives a
  capacitor of relative size `2^(i+j)`.
* `.` is dropped: `i + j ≤ 3`, at most 49 of the 16 129 full-scale product per unit.

The output LSB is 2^11 of the integer MAC. A lane sums 16 products, so its full
scale is 16·127·127/2048 ≈ 126, which fits an 8-bit signed result. The digital
part spans −64…+64 (16 units × 4). The analog part spans about ±62, which a 7-bit
ADC covers. All rounding and truncation together keep the result within
**one LSB** of the exact dot product divided by 2^11:
49·16 dropped + 1024 rounding < 2048. Every testbench above the leaf level
checks this bound.

## One operation, cycle by cycle

`global_ckgen` runs one sampling cycle, then seven conversion cycles:

```
cycle        A (accept)  SMP        CNV0     CNV1 ... CNV6       next SMP / idle
start        1           -          -        -        (1 = back-to-back)
inputs, row  load -----> held ---------------------------------> (reloaded)
CNVCLK       -           0          1        1        1
SGNCLK(+)    -           0          1        1        1      positive products
SGNCLK(-)    -           1          0        0        0      negative products
DCIM         -           D_NEG<=sum D_POS<=sum         D_DCIM<=D_POS-D_NEG
ACIM/SAR     -           hold q,    bit6     bit5 ... bit0 -> D_ACIM
                         code=0x40
CIMO, done   -                                             new CIMO, done=1
```

**The sign trick.** A product's sign is applied only through time.
`sign_ckgen` makes each unit's SGNCLK equal to CNVCLK for a positive product and
to its inverse for a negative one. The rest of the lane sees only magnitudes:

* *Digital side.* The counting cells count only while their SGNCLK is high. The
  adder tree therefore outputs the negative products' total during sampling
  (latched as D_NEG) and the positive products' total during conversion (D_POS).
  Their difference is the signed digital result. One counter and one adder tree
  serve both signs.
* *Analog side.* A capacitor's bottom plate is at VREFSR only while its
  partial-product bit is 1 and SGNCLK is high. From sampling to conversion, a
  positive unit's plates rise and a negative unit's plates fall. The charge
  that reaches the ADC is therefore the *signed* sum of the analog parts.
  `acim_cap_array` reports the plate charge `q`. `adc_cdac_cmp` holds the
  sampling-phase value and compares the conversion-phase change against the DAC.

The ADC samples the mid-scale code 0x40, so the SAR starts at 0x40 and the
finished code is offset binary around it: `D_ACIM = code − 64`. One ADC LSB
equals one digital count (2^11 of array charge), so the post adder can add
`D_DCIM[7:0]` and the sign-extended `D_ACIM[6:0]` directly.

Results change on the clock edge that ends the last conversion cycle, which is
8 clocks after the accepting edge. `done` is high in the cycle after that edge.
A new request can be accepted in the last conversion cycle, so back-to-back
operations complete one per 8 clocks. The published chip runs at 91 MHz. How
many clocks it spends per operation is not published; 1 + 7 is this design's
choice.

## Interface of `ccim_macro`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset of control and result registers (not of the weights) |
| `start` | in | 1 | operation request, held until `accept` |
| `row` | in | 6 | weight row to use (decoded to the one-hot read word lines) |
| `in_re`, `in_im` | in | 8 × 8 | complex input vector, SMF |
| `accept` | out | 1 | the request is taken on this clock edge; inputs and row are registered |
| `busy` | out | 1 | an operation is in progress |
| `done` | out | 1 | `cimo_*` hold a new result this cycle, and hold it until the next one |
| `wr_en`, `wr_ch`, `wr_elem`, `wr_row`, `wr_data` | in | 1,3,3,6,16 | write one complex weight `{W_im[7:0], W_re[7:0]}` at the clock edge |
| `cimo_re`, `cimo_im` | out | 8 × 8 | per channel, `≈ Re/Im(sum_k I_k·w_k) / 2^11`, two's complement |

Writes may happen at any time but must not target the row in use while `busy`;
an assertion checks this. Unwritten weight rows hold undefined data.

On the chip these signals come from test-time logic (an I2C interface, I/O SRAMs
and configuration registers). That logic is not described in enough detail to
build, so here the signals are plain ports.

## Accuracy and what the models leave out

The models are ideal. They have no capacitor mismatch, no comparator noise or
offset, and no parasitics. The ADC rounds to nearest; that half-LSB offset is a
modelling choice. Under uniformly random operands the RTL gives an RMS error of
about 0.23 % of full scale. The whole of that error comes from truncation and
quantisation. The silicon measured 0.435 % rms, the difference being analog
error. The split capacitor array (a bridge capacitor joining two sub-arrays) is
modelled by its ideal equivalent weights `2^(i+j)`.

Other departures and choices:

* The SRAM is written synchronously through WLW and read through WLR at any
  time. In silicon WLR is also raised during a write, and the write circuit is
  an inverter with a butterfly switch.
* The counting cell is written as logic with the same truth table as the
  custom transistor cell.
* `post_adder` saturates to −128…127. With SMF operands the sum never reaches
  those limits.
* Bit order in a weight word, the unit order in a lane (unit 2k takes `Ir_k`,
  2k+1 takes `Ii_k`), the handshake and the reset are this design's.

## Testbenches

Each module in `rtl/` except the package has a self-checking `tb/tb_<module>.sv`.
The reference arithmetic lives in `tb/tb_ccim_ref_pkg.sv`. It is written from the
integer definition of the number format: product magnitude, minus the digital
part, minus the dropped part. It does not reuse the RTL. Each testbench prints
`TB_RESULT checks=N failures=M`.

`tb_ccim_macro` runs the full default-size macro. It writes all 64 kb of
weights, then runs four workloads. Every result is checked on all 16 outputs,
along with the latency and the back-to-back rate:

1. random operations, with idle gaps, back-to-back issue and weight rewrites;
2. a 1024-step complex sweep with `w = −127 − j127`. The real input is a
   triangle over the full range; the imaginary input equals it (in phase) or
   is its negative (out of phase). In phase the real output is exactly 0, and
   out of phase the imaginary output is;
3. a transfer-function sweep of the input from −127 to +127, checking that the
   output is monotonic and reaches ±126;
4. uniformly random operands, reporting the RMS error.

It also counts how often each mechanism occurs and fails if one never does. The
mechanisms are issue from idle, back-to-back issue, lanes with both D_POS and
D_NEG non-zero, negative and positive ADC results, the subtracted cross term,
and a weight rewrite followed by its use.

Simulating with Verilator 5, from the folder holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/ccim_pkg.sv tb/tb_ccim_ref_pkg.sv tb/tb_ccim_macro.sv \
    --top-module tb_ccim_macro
./obj_dir/Vtb_ccim_macro
```

Replace `ccim_macro` with any other module name to run its testbench. The
full-size build takes about a minute and the run about a second.

## Changing it

* Channels, elements and rows are parameters of `ccim_macro` (`NCH`, `NE`,
  `NROWS`); their defaults are in `ccim_pkg`. A lane's width follows from its
  unit count `N` (`SW = 3 + clog2(N)` bits of digital sum).
* The split between digital, analog and dropped partial products is defined in
  one place, `in_array()` in `acim_cap_array`, together with `dcim_count`.
  Moving it changes the ADC range: keep `LSB_Q`, the ADC width and the post
  adder widths consistent.
* More sampling cycles or a slower SAR are set by `SMP_CYCLES`/`CNV_CYCLES` of
  `global_ckgen`. `CNV_CYCLES` must equal the ADC width.
* Mismatch studies can start in `acim_cap_array` (per-capacitor weights) and
  `adc_cdac_cmp` (DAC levels, comparator offset).
