# dINT4 × INT8 multiply-accumulate unit

When a large language model is quantized to 4-bit weights and 8-bit activations (W4A8), many small
weights fall inside the zero bin of an ordinary 4-bit integer grid and are rounded to zero. That
*underflow* loses more accuracy than the ordinary rounding error of the larger weights. **dINT**
("integer with denormal") is a 4-bit integer format that gives up two of its sixteen code points
to hold two special values, plus and minus half a quantization step, so that these small weights
survive. The other fourteen codes are a normal asymmetric integer grid.

This repository holds SystemVerilog for the hardware side of that idea, following the format and
the MAC unit described in *Enhancing Computation Efficiency in Large Language Models through Weight
and Activation Quantization* (Lee, Kim, Baek, Hwang, Sung, Choi, EMNLP 2023):

* a multiply-accumulate unit for one dINT4 weight and one INT8 activation per clock,
* a dINT quantizer, implementing the format's rounding rule,
* a dINT decoder, and
* a small top level that feeds the MAC either stored weight codes or Values quantized on the fly.

The quantization algorithms of that work (AQAS scaling, sequence-length-aware calibration, OPTQ
weight updates) run offline in software and have no hardware here.

## 1. The number format

A `b`-bit dINT has `P = 2^b − 3` uniform steps, so its uniform codes are the integers `0 … P`.
For `b = 4`, `P = 13`: fourteen uniform codes plus the two special codes. With step size `s` and
zero-point `z` (`0 ≤ z ≤ P`):

| code | meaning | value |
|---|---|---|
| `0 … P` | uniform | `(code − z) · s` |
| `C1 = 2^b − 2` (14 in dINT4) | positive special | `+s/2` |
| `C2 = 2^b − 1` (15 in dINT4) | negative special | `−s/2` |

Quantization of a value `x`:

```
code = C1                           if  s/4 <  x <=  3s/4
     = C2                           if -3s/4 <= x <  -s/4
     = clamp(round(x/s) + z, 0, P)  otherwise
```

So `x` near zero (`|x| ≤ s/4`) still becomes the zero code `z`. Values between a quarter and three
quarters of a step, which plain INT4 would round to 0 or ±1, become ±s/2. Note that the special
window reaches up to `3s/4`, beyond the midpoint `s/2` where INT4 would switch to `±s`. The format
itself does not fix which bit patterns carry `C1` and `C2`. This design uses the two largest codes,
so the uniform codes stay a plain binary range `0 … P`.

Example: dINT4 with `s = 1.5` and `z = 3` covers −4.5, −3, −1.5, 0, 1.5, … 15 (codes 0 … 13), and
has the specials ±0.75.

## 2. Arithmetic in half steps

All values of the format are whole multiples of `s/2`. The datapath therefore never multiplies by
`s`. It works in units of half a step, where the weight is an integer:

```
uniform:  w = 2 · (code − z)     even, |w| ≤ 2P = 26
C1:       w = +1
C2:       w = −1
```

For a dot product of dINT weights with INT8 activations `a` (activation step `s_a`):

```
Σ W·X  =  (s/2) · s_a · Σ w·a        and the hardware computes  acc = Σ w·a
```

The two scales are applied once to the final sum, outside this unit, as with any integer GEMM. The
factor of two is a one-bit shift of the uniform product. The special values need no multiplier:
their product is just `+a` or `−a`. This is the "bit-shift" property the special value was chosen
for: it is exactly half a step, a power-of-two fraction of `s`.

`dint_decoder` performs this mapping. `tb_dint_ref_pkg` holds an independent real-number model
that the testbenches compare against.

## 3. The MAC datapath (`dint_mac`)

```
 w_code ─┐                      ┌─► (code−z) ──► 5b × 8b multiplier ──► <<1 ─┐
 w_zp   ─┴─► dint_decoder ──────┤                                            ├─► mux ─► + ─► acc (32 b)
                                └─► kind (uniform / C1 / C2)                 │         ▲
 act (INT8) ────────────────────────────────────────────── +act / −act ──────┘         └── acc / 0 (clear)
```

* **Multiplier.** It only sees the 5-bit signed difference `code − z` and the 8-bit activation.
  This is why a dINT4 × INT8 MAC is much smaller than an INT8 × INT8 one. The source work reports
  synthesis in a commercial 7 nm process at 1 GHz: 44.57 µm² against 86.33 µm², and 0.0624 mW
  against 0.1595 mW. This RTL has not been through that flow, so those numbers are not reproduced
  here.
* **Special path.** It is a multiplexer and a negation.
* **Weight zero-point.** It is subtracted inside the unit. Correcting it afterwards
  (`Σ code·a − z·Σ a`) would be wrong whenever a special code is present.
* **Activations.** They enter as signed INT8. The source quantizes activations asymmetrically
  (min–max, per token). Any activation zero-point correction is left to the surrounding datapath.
* **Accumulator.** It is 32 bits wide; section 5 shows why this is enough.
* **Timing.** One pair per clock, no back-pressure. A pair sampled at a clock edge is already
  included in `acc_o` after that edge. `clear_i` makes the accumulator load the current product
  (or 0) instead of adding, which starts a new dot product without a dead cycle.
* **Checking.** An immediate assertion checks every cycle that the selected product equals the
  decoded weight times the activation. A second assertion checks that the zero-point lies on the
  grid.

## 4. Quantizer and top level

**`dint_quantizer`** is combinational. It takes `x` and `s` as integers on one shared fixed-point
scale (16 bits each by default), so only their ratio matters.

* The special windows are tested without a division: `s < 4|x| ≤ 3s`, then the sign of `x` picks
  C1 or C2.
* The uniform code uses an exact integer division: `round(|x|/s) = ⌊(2|x| + s) / 2s⌋`, with ties
  away from zero.
* `clamped_o` flags values that fell off either end of the grid.

**`dint_mac_top`** is a two-stage pipeline.

* **Stage 1** chooses the weight operand and registers it:
  * `src_sel_i = 0`: a stored dINT code, meaning an offline-quantized weight.
  * `src_sel_i = 1`: the dINT code of `v_i`, quantized with `v_step_i` and `zp_i`. This serves the
    attention Value, which the W4A8V4 scheme also holds in 4 bits but which is only produced
    during inference. The code also leaves on `q_code_o`, so that it can be written to a Value
    cache.
* **Stage 2** is `dint_mac`.

A pair sampled at edge *k* reaches `acc_o` at edge *k+1*. `out_valid_o` and `kind_o` describe that
pair. One pair is accepted every clock, whichever source it uses, and nothing stalls. Values are
quantized per channel along the dimension that is summed, so one step and one zero-point hold for
a whole dot product.

## 5. Accumulator sizing against the evaluated models

The largest product magnitude in half-step units is `2·13·128 = 3,328`. The 32-bit signed
accumulator therefore holds any dot product of up to 645,277 terms. The longest reductions in the
models that dINT4 was evaluated on are:

| reduction | length | worst-case `|acc|` |
|---|---|---|
| attention × Value at sequence length 2048 | 2,048 | 6,815,744 |
| LLaMA-7B hidden size | 4,096 | 13,631,488 |
| LLaMA-65B hidden size | 8,192 | 27,262,976 |
| LLaMA-65B feed-forward (down projection) | 22,016 | 73,269,248 |
| OPT-66B feed-forward (4 × 9216) | 36,864 | 122,683,392 |

All are far below 2³¹. The model dimensions are the published architecture sizes of OPT and LLaMA.
`tb_dint_workload` runs each length through the unit, both with the worst-case operands and with
random ones, and checks the result and the cycle count.

The 3-bit variant (dINT3, `P = 5`) used in the ablations is available by setting `WBITS = 3`; the
quantizer, decoder and MAC are tested at that width. The weight-only W4A16 and W3A16 ablations would
need 16-bit activations (`ABITS = 16`), which the default build does not provide.

## 6. What follows the source and what is this design's own

Taken from the source:

* the format (`P = 2^b − 3`, ±s/2 specials);
* the quantization and dequantization rules;
* the operand widths dINT4 × INT8;
* handling the specials with shifts rather than a multiplier;
* per-channel Value quantization.

Chosen here, because the source is silent:

* the bit patterns of C1 and C2;
* the tie rule of the rounding;
* the half-step internal unit;
* the fixed-point input format of the quantizer;
* the 32-bit accumulator;
* subtracting the weight zero-point inside the MAC;
* the signed-activation convention;
* the single accumulator stage and the stage-1 operand register;
* the `clear_i`/`in_valid_i` interface;
* synchronous active-low reset;
* joining the quantizer and the MAC in one top level.

The conditions of the quantization rule are written on a variable `n` in the source. They are
taken here to mean the value being quantized.

The source also tried smaller special magnitudes (s/4, s/8) and settled on s/2. Only s/2 is built.

The source gives no block diagram of the MAC. The structure in section 3 is the simplest one that
computes the defined function, and it should not be read as the authors' netlist.

## 7. Files

| file | contents |
|---|---|
| `rtl/dint_pkg.sv` | constants (`P`, `C1`, `C2` as functions of the width), code-kind enum, default widths |
| `rtl/dint_quantizer.sv` | value → dINT code |
| `rtl/dint_decoder.sv` | dINT code → half-step integer |
| `rtl/dint_mac.sv` | dINT × INT8 MAC with 32-bit accumulator |
| `rtl/dint_mac_top.sv` | top level: operand select, quantizer, MAC |
| `tb/tb_dint_ref_pkg.sv` | real-number reference model used by all testbenches |
| `tb/tb_dint_quantizer.sv` | directed boundary cases and 40,000 random cases, dINT4 and dINT3 |
| `tb/tb_dint_decoder.sv` | exhaustive over codes and zero-points, dINT4 and dINT3 |
| `tb/tb_dint_mac.sv` | 60,000 random cycles, dINT4 and dINT3; checks the accumulator after every edge |
| `tb/tb_dint_mac_top.sv` | end to end at default parameters, both sources; counts every mechanism |
| `tb/tb_dint_workload.sv` | the model-sized dot products of section 5 |

Each testbench prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.

## 8. Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/dint_pkg.sv tb/tb_dint_ref_pkg.sv \
    rtl/dint_quantizer.sv rtl/dint_decoder.sv rtl/dint_mac.sv rtl/dint_mac_top.sv \
    tb/tb_dint_mac_top.sv --top-module tb_dint_mac_top
./obj_dir/Vtb_dint_mac_top
```

Replace the testbench file and top name for the other benches. Each runs in well under a second.
To lint a module alone: `verilator --lint-only -Wall -Irtl rtl/dint_pkg.sv rtl/dint_mac.sv`.

To change the format width, set `WBITS` on the top (and the widths of the testbench signals).
`P`, `C1` and `C2` follow from it through `dint_pkg`. Widen `ACCW` for reductions longer than
about 645,000 terms, or when `ABITS` is raised.
