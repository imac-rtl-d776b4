# Multiply-accumulate inside a standard 6T SRAM array

This macro computes dot products of 4-bit signed inputs and 4-bit signed
weights inside an ordinary 6T SRAM array. The cells are not modified. Two
things make the multiply happen on the bitlines:

* The **input** sets the *amplitude* of the wordline. A higher wordline
  voltage lets the access transistor of a cell that stores 1 draw a larger,
  roughly constant current from its precharged bitline. In a fixed time, the
  bitline drop is then proportional to the input.
* The **weight's bit significance** sets the *time* each bitline may
  discharge. The four magnitude bits of a weight sit in four adjacent cells
  of one row, and each cell's bitline has its own precharge circuit. The
  precharges are released in turn, so bit 3 discharges for 8 time units,
  bit 2 for 4, bit 1 for 2 and bit 0 for 1. Shorting the four bitlines
  together (charge sharing) then gives a voltage whose drop from the supply
  is proportional to input × weight.

Ten such products are summed as charge on a capacitor before a single 4-bit
SAR ADC conversion, so the ADC runs once per ten multiplies rather than once
per multiply. Signs are handled digitally. The XOR of the input sign and the
weight sign steers each product to a positive or a negative accumulator.
The two ADC codes are subtracted, summed in a register and passed through
ReLU. Each 256-column row holds 51 weights, so one operation computes 51
ten-element dot products in parallel. Two 256×256 arrays share one set of
these peripherals. When no operation is running, the arrays are plain SRAM.

The repository gives synthesizable RTL for the digital parts: row decoder,
SRAM storage with its column read/write path, the sign logic, the SAR
register, the subtractor/register/ReLU, and the sequencer that generates
the timing of every operation. It also gives behavioural models of the
analog parts, written in synthesizable-style SystemVerilog, which let the
whole macro be simulated end to end: the wordline DAC and multiplexer, the
bitlines with their precharge and charge sharing, the accumulators, the
comparator and the capacitor DAC. The models carry analog node voltages as
signed 32-bit integers in microvolts (`imac_pkg::uv_t`). They use the
first-order (linear) circuit equations given below. Transistor effects such
as channel-length modulation, mismatch and comparator offset are left out.

## Data layout

A weight takes five adjacent columns of a row: one sign column and four
magnitude columns.

| column   | content             |
|----------|---------------------|
| `5g`     | weight sign (1 = negative) |
| `5g+1`   | magnitude bit w0 (LSB) |
| `5g+2`   | w1                  |
| `5g+3`   | w2                  |
| `5g+4`   | w3 (MSB)            |

Here g = 0..50 (`N_GROUP = 256 / 5`). Column 255 is ordinary memory. Column
c of a row is bit c of the 256-bit word used by the normal read/write port,
so a host writes weights as ordinary data.

An input is sign-magnitude too (`imac_pkg::smag_t`: `sign`, `mag[3:0]`).
The magnitude goes to the wordline DAC and the sign to the XOR gate.

## One multiply, tick by tick

Time is counted in ticks of the unit delay τ, one clock cycle per tick. A
multiply is `T_MAC = 10` ticks. Each signal below is high during the ticks
listed:

| signal            | ticks      | effect |
|-------------------|------------|--------|
| `wl`              | 0–7        | selected wordline at the DAC voltage |
| `vpre[3]`         | 0–8        | precharge of BLB3 off |
| `vpre[2]`         | 4–8        | precharge of BLB2 off |
| `vpre[1]`         | 6–8        | precharge of BLB1 off |
| `vpre[0]`         | 7–8        | precharge of BLB0 off |
| `ch_sh`, `en_sample` | 8       | bitlines shorted; sample switch closed |
| `en_acc`          | 9          | sample dumped onto the accumulator |

The overlap of the wordline with the released precharge is 8, 4, 2 and 1
ticks for bits 3..0. A precharge that is still on holds its bitline at V_DD
while the wordline is high. The cell is not disturbed, because both of its
bitlines stay high.

The model's equations (`imac_bitline_group`, `imac_wl_dac`):

```
V_WL          = 300 mV + Vin * 700/15 mV                  (Vin = 0..15)
dBLB per tick = 106.25 mV * (V_WL - 300 mV) / 700 mV      (cell stores 1, precharge off)
V_ch-sh       = mean(BLB3..BLB0) = V_DD - 106.25 mV * (Vin/15) * W / 4
```

106.25 mV per tick is 850 mV (1.2 V down to 350 mV, the end of the
constant-current region) spread over the 8-tick wordline. With Vin = W = 15
the shared node falls to about 0.80 V. Example: Vin = 10 and W = 12 give
V_ch-sh = 1.2 − 0.10625·(10/15)·12/4 = 0.9875 V.

In silicon the discharge is not exactly linear in time. The release times
4, 6, 7 would then be retuned so that the *voltage* drops, rather than the
durations, are 8:4:2:1. The release times are package parameters
(`T_PRE3..T_PRE0`), so this tuning needs no other change. In the linear
model the two criteria coincide.

## Accumulation, and why both accumulators always take a sample

Each accumulator (`imac_analog_acc`) is a 2.5 fF sampling capacitor behind
a transmission gate, followed by a PMOS transfer device (threshold 600 mV)
into a 40 fF accumulation capacitor. The transfer device conducts until the
sample has fallen to its threshold. Each accumulation therefore adds

```
dV_acc = 2.5 fF / 40 fF * (V_sample - 600 mV)
```

whatever charge the accumulator already holds, as long as V_acc stays below
600 mV. The `sat` output flags a violation. It never occurs with ten
samples: V_acc ≤ 375 mV.

A **larger** product leaves a **lower** V_sample and so adds **less** to
V_acc. A zero product adds 37.5 mV and a full-scale product (225) adds
12.6 mV. The accumulators therefore count down from the zero-product level.

The product sign chooses which accumulator receives V_ch-sh. The other one
samples V_DD, the bitline voltage of a zero product. Both therefore take
exactly ten samples per operation, and a single ADC range fits both. (If
only the chosen capacitor took a sample, its final voltage would depend on
how many positive and how many negative products there were.) This is a
choice of this implementation. The sign logic (`imac_sign_steer`) latches
the XOR while the wordline is high, because the sample is taken after the
wordline has fallen and the sign cell is no longer read.

## Conversion and the digital result

Each accumulator has a 4-bit SAR ADC (`imac_sar_adc`) made of three parts:

* a comparator with V_x on + and V_acc on −;
* the SAR register (`imac_sar_logic`), which tries 1000 first and keeps a
  bit when the comparator output is 0;
* a linear capacitor DAC, `V_x = V_ss + D·(V_dd − V_ss)/16`.

The DAC references are set to the two ends of the accumulator range:

```
V_dd = V_ACC_ZERO = 10 * (1.2 - 0.6) / 16           = 375.0 mV   (ten zero products)
V_ss = V_ACC_FULL = 10 * (1.2 - 0.3984 - 0.6) / 16  = 126.0 mV   (ten products of 225)
code = floor(16 * (V_acc - V_ss) / (V_dd - V_ss)), clipped to 0..15
```

One code step is 15.56 mV of V_acc, or about 140.6 units of product sum
(ten full-scale products are 2250 units). An empty sum lands exactly on the
top of the range and reads 15. Because the code falls as the product sum
rises, the signed dot product in ADC steps is

```
diff = code_neg - code_pos
```

`imac_sub_reg_relu` adds `diff` to a 16-bit saturating partial-sum
register, or loads it when the operation was started with `clear`. This
lets a dot product longer than ten elements be built from several
operations. `relu` is the register clamped at zero.

The ADC steps on a clock enable every `ADC_DIV = 10` ticks. A conversion
(one load step and four decisions) therefore takes 50 ticks, five times a
multiply. This is the ratio of the 5 ns conversion to the 1 ns multiply
that the design targets.

## Operating the macro (`imac_top`)

Normal SRAM access is allowed while `rw_ready` is high, i.e. no operation
is running:

* `rw_en` with `rw_array` and `rw_row` selects a row.
* `rdata` returns it combinationally.
* With `rw_we`, the columns set in `wmask` take `wdata` at the clock edge.

A compute operation:

1. Pulse `start` while idle, with `array_sel` (the array holding the
   weights) and `clear` (start a new partial sum).
2. Supply ten steps on the `step_valid` / `step_ready` stream. Each step is
   a row address (`step_row`) and a sign-magnitude input (`step_in`).
   `step_ready` is high while the sequencer waits and in the last tick of
   each multiply, so a steady stream runs back to back. A gap simply
   delays the next multiply; the precharge stays on meanwhile.
3. After the tenth multiply both ADCs of every group convert. In the cycle
   `done` is high, the partial-sum registers update and the accumulators
   are cleared.

For every group g, an operation computes, in ADC steps,
Σᵢ sign · step_inᵢ.mag · W[rowᵢ][g] / 140.6, added to `psum[g]`. The outputs
`code_pos`, `code_neg`, `prod_sign` and `acc_sat` are provided for
observation.

With a steady stream, `done` is high 152 cycles after `start`:

* the start cycle;
* one cycle to accept the first step;
* 10 × 10 multiply cycles;
* 5 × 10 conversion cycles.

If one tick is 0.1 ns, this is 10 × 1 ns of multiply and 5 ns of
conversion per ten products.

Reset (`rst_n`) is asynchronous and active low. It clears the sequencer,
the SAR and sign registers, and the partial sums. The accumulators clear
on clock edges while reset is low. The SRAM contents are not reset.

## Module map

```
imac_top                     sequencer + 2 banks + 51 column peripherals
├─ imac_timing_ctrl          operation FSM, multiply strobes, ADC start
├─ imac_bank  (x2)           one 256x256 array and its row/bitline circuits
│  ├─ imac_row_decoder       address -> one-hot row
│  ├─ imac_wl_dac            input magnitude -> wordline voltage    (model)
│  ├─ imac_wl_mux            full-swing or DAC level on the row     (model)
│  ├─ imac_sram_array        cells, masked row write, row read
│  └─ imac_bitline_group (x51)  precharge, 4 BLBs, charge sharing   (model)
└─ imac_column_periph (x51)  shared by both banks
   ├─ imac_sign_steer        XOR of signs, accumulator select
   ├─ imac_analog_acc (x2)   sample/hold + PMOS transfer            (model)
   ├─ imac_sar_adc (x2)      4-bit SAR ADC with clock divider
   │  ├─ imac_sense_amp      comparator                            (model)
   │  ├─ imac_sar_logic      successive-approximation register
   │  └─ imac_cap_dac        capacitor DAC                         (model)
   └─ imac_sub_reg_relu      code_neg - code_pos, partial sum, ReLU
imac_pkg                     sizes, timing, analog constants, types
```

The column peripherals take V_ch-sh and the weight signs of whichever bank
the current operation uses. The other bank keeps its precharge on.

## Parameters (`imac_pkg`)

| name | default | meaning |
|------|---------|---------|
| `N_ROW`, `N_COL` | 256, 256 | array size |
| `MAG_BITS`, `BW` | 4, 5 | magnitude bits; columns per weight |
| `N_GROUP` | 51 | weights per row |
| `N_ARRAY` | 2 | arrays sharing the peripherals |
| `R_ACC` | 10 | multiplies per conversion |
| `ADC_BITS`, `ADC_DIV` | 4, 10 | ADC resolution; ticks per SAR step |
| `PSUM_W` | 16 | partial-sum width |
| `T_WL`, `T_PRE3..0` | 8; 0, 4, 6, 7 | wordline width; precharge release ticks |
| `T_CHSH`, `T_ACCP` | 1, 1 | sharing/sampling and transfer ticks |
| `V_DD`, `V_WL_MIN`, `V_WL_SPAN`, `DV_TICK` | 1.2 V, 300 mV, 700 mV, 106.25 mV | bitline and wordline levels (µV) |
| `C_SAMPLE_AF`, `C_ACC_AF`, `V_TH_M9` | 2.5 fF, 40 fF, 600 mV | accumulator |

If you change the timing or the analog constants, `V_ACC_ZERO` and
`V_ACC_FULL` (the ADC references) follow automatically. They assume
release times that give an 8:4:2:1 overlap.

## What follows the source design and what is this implementation's own

Taken from the published circuit:

* the cell usage;
* the input-to-wordline mapping;
* the wordline and precharge timing (0, 4, 6, 7, 8 τ);
* charge sharing;
* the accumulator structure and its values;
* the SAR procedure;
* ten accumulations per conversion;
* 4-bit ADC and 4-bit operands plus sign;
* XOR sign handling with two accumulators;
* the subtract / register / ReLU chain;
* two arrays sharing the peripherals;
* the normal SRAM mode.

Chosen here, where the source leaves it open:

* Sign column placement, and the magnitude bits in ascending columns. A
  textual description puts the MSB in the rightmost cell; a drawing of the
  same circuit shows it leftmost. The text was followed, which only affects
  the column order.
* The deselected accumulator samples V_DD.
* Accumulator clear after each conversion.
* DAC reference levels, and the resulting subtraction order.
* An accumulating, saturating 16-bit partial-sum register.
* Charge-sharing and transfer pulses of one tick each.
* The ADC clock divider.
* The SAR takes five divided-clock steps per conversion: one loads the first
  trial code, four decide the bits. The source counts four cycles for four
  bits. Five steps of 10 ticks make a conversion five multiplies long, the
  ratio the source gives.
* All handshakes: start/done, step valid/ready, normal access blocked
  while busy.
* Masked row writes.
* Asynchronous reset.

Not modelled:

* discharge non-linearity and the retuned release times that correct it;
* threshold-voltage mismatch (the source reports about 13 mV σ on V_ch-sh
  and about 0.6 LSB σ on the output);
* comparator offset (`OFFSET_UV` exists but defaults to 0);
* the capacitance of the V_ch-sh node;
* static current during the precharge/wordline overlap;
* read disturb.

Because of the linear model, the lowest shared-bitline voltage is 0.80 V
(the mean of 850, 425, 212.5 and 106.25 mV drops). The source quotes a
sampled range of 750–1200 mV. The ADC references follow the model's own
range.

The analog blocks are behavioural models. They are not netlists, and they
would be replaced by custom circuits in an implementation.

## Capacity against networks

One macro holds 2 × 256 × 51 = 26,112 weights.

* VGG-style CIFAR-10 network (seven 3×3 conv layers of 64–256 channels and
  4096-wide fully connected layers): about 35 M weights.
* LeNet-5: about 61 k weights.

Neither fits at once. Weights are reloaded through the normal write port,
or several macros are used side by side. A conv output over M input
channels with a 3×3 kernel needs ⌈9M/10⌉ operations into the same partial
sum; for example, 58 operations for M = 64.

`tb_imac_layers` maps three real layer shapes onto the full-size macro,
one filter per weight group and one kernel element per row. Activations
are 0..15 and weights are random:

| layer | elements per output | operations per output | mean error |
|-------|---------------------|-----------------------|------------|
| VGG conv1, 3×3×3, 51 filters | 27 | 3 | 0.6 steps |
| LeNet-5 conv2, 5×5×6, 16 filters | 150 | 15 | 1.4 steps |
| LeNet-5 FC3, 84 inputs, 10 neurons | 84 | 9 | 1.2 steps |

The error is |psum − dot/140.625|, where dot is the exact integer dot
product. Each code is the floor of its ideal value, so the error is always
less than one ADC step per operation. It grows with the length of the dot
product. This is the quantization of the 4-bit conversion alone: circuit
variation is not modelled.

## Simulating

Every module has a self-checking testbench in `tb/`, named `tb_<module>`.
Each prints `TB_RESULT checks=N failures=M`. With plain Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/imac_pkg.sv tb/tb_imac_top.sv \
          --top-module tb_imac_top -Mdir obj_top
./obj_top/Vtb_imac_top
```

`tb_imac_top` runs the full-size macro (both arrays, all 51 groups). It
takes well under a second. It:

* fills both arrays, does masked writes and read-backs;
* runs twelve operations with random rows, inputs and stream gaps;
* checks every ADC code, partial sum and ReLU output against the equations
  above, computed in floating point (a code may be one step off only when
  the ideal value is within 1 % of a step boundary);
* checks the 152-cycle latency;
* counts that stalls, negative products, both arrays, partial-sum
  accumulation, ReLU clamping, ADC clipping at the top code, and refused
  normal accesses all occurred.

`tb_imac_layers` (see the capacity section above) runs the layer slices
on the full-size macro. It checks every code, every partial sum, and the
error bound against the exact dot product.

The unit testbenches check:

* the strobes tick by tick against the table above;
* the bitline voltage for all 256 input/weight pairs;
* the accumulator equation, clear and saturation;
* every SAR target and its latency;
* ADC clipping at both ends;
* the subtract/accumulate/saturate/ReLU chain.
