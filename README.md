# Single-ADC charge-domain CiM macro: 8b x 8b dot product + ReLU in one conversion

This design is a computing-in-memory (CiM) macro. It computes the dot product of two signed
8-bit vectors of length M = 1152, applies ReLU, and delivers the result as one 8-bit number.
All of this happens in one CiM cycle, with a single A/D conversion.

Conventional charge-domain SRAM CiM applies the activation one bit per cycle. It then needs an
accurate ADC conversion for every bit, plus a digital shift-and-add. Here, all activation bits
and all weight bits are combined in the analog domain. The macro holds nine identical copies
of the weight vector, one per activation bit, and joins their column outputs through a
two-level capacitor network. That network is the CAAT (charge-domain analog adder tree): 9
leaves and one root. Only its final voltage is digitised. Because the full result exists
before conversion, ReLU can be folded into the ADC. If the first (sign) decision says
"negative", the output is zero and the other seven decisions are skipped.

This RTL captures the digital parts of the macro as synthesizable SystemVerilog: operand
encoding, activation buffer, phase sequencing, SAR logic with ReLU early stop, and output
fine-tune. The analog parts are behavioural models with exact integer arithmetic: the 10T1C
cell array, the capacitor adder tree, and the ADC's DAC and comparator. Together they simulate
the whole macro cycle-accurately, with an ideal analog path by default.

## 1. Number format: nine digits of value +/-1

Every 8-bit operand (weight or activation) is held as nine digits n, each worth +1 or -1:

    x = n7*64 + n6*32 + n5*16 + n4*8 + n3*4 + n2*2 + n1*1 + (n0+ + n0-)/2

The two half-weight digits n0+ and n0- give the format a zero and an even/odd choice. Every
integer in [-128, 128] can be represented. With +/-1 digits, the product of two digits is +1
when they are equal. On stored 0/1 bits (1 = +1) that product is an XNOR, which is what each
memory cell evaluates.

A value has several representations. `sd_encoder` uses this one:

| code bit | digit | value |
|---|---|---|
| 8..2 | n7..n1 | `(x + 128) >> 1`, i.e. `{~x[7], x[6:1]}` |
| 1 | n0+ | `x[0]` |
| 0 | n0- | always 0 (digit -1) |

Counted in half-LSB units, the digit weights are `1, 1, 2, 4, 8, 16, 32, 64, 128` (digit index
0..8, sum 256). The same nine weights appear twice in the hardware:

* inside a bank, over the weight digits (columns), in the CAAT leaf;
* across banks, over the activation digits, in the CAAT root.

## 2. Array organisation

```
        activations A_j (8b) --> act_buffer --(digit k of every A_j)--> bank k
                                                                           |
 weights W_j (8b) --> sd_encoder --(same row, all 9 banks)--> bank 0..8    |
                                                                           v
  bank k: M x 9 cells, cell (j,i) = XNOR(digit k of A_j, digit i of W_j)
          column i -> source line ScL[k][i] = average over j
  leaf k: ScL[k][0..8] merged with weights 1,1,2,...,128
  root  : leaf[0..8]   merged with weights 1,1,2,...,128
  ADC   : one 8b SAR conversion of the root voltage, ReLU early stop
  fine-tune: y = gain*x + offset
```

Bank k is driven by digit k of every activation. Column i holds digit i of every weight. So
the 81 columns of the nine banks cover every pair (activation digit k, weight digit i). Each
column forms sum over j of digit products, a partial product that needs weight c_k*c_i. The
leaf applies c_i and the root applies c_k. The root node then holds, up to an offset and a
scale, the full signed sum over j of A_j*W_j.

### Leaf and root capacitor networks

A purely binary network would need capacitors up to 128 times the unit for 8 bits. The CAAT
is hybrid:

* The five low-weight inputs (digits n0-, n0+, n1, n2, n3) enter a C-2C ladder. It halves the
  weight at each stage and ends in a unit capacitor, which gives n0- and n0+ equal weight.
* The four high-weight inputs (n4..n7) load binary capacitors 2C, 4C, 8C and 16C. The 16C is
  built as two 8C halves.

Every source line carries an equal total load of 9C. The root repeats the structure over the
nine leaves. In the model, both levels are ideal weighted sums (section 3). Parasitic
coupling in the ladder, which bends the real transfer curve, is not modelled.

## 3. What the numbers in the model mean

The analog values are carried as exact integers, in units chosen so that nothing is rounded:

| node | integer | full scale | voltage (fraction of VDD) |
|---|---|---|---|
| ScL[k][i] (`cim_bank.scl`) | rows j with equal digits | M | scl / M |
| leaf k (`caat_leaf.leaf`) | sum_i c_i * scl[i] | 256*M | leaf / (256*M) |
| root (`caat_root.root`) | sum_k c_k * leaf[k] | 65536*M | root / (65536*M) |

With MAC = sum_j A_j*W_j, the root is `root = 2*MAC + 32768*M`. So zero MAC sits at
mid-scale, and the extremes +/-16384*M sit at the rails. The ADC compares
`root/(65536*M)` against `code/256`. The SAR code u is therefore `floor(root/(256*M))`, and
the macro output is

    adc_out = clamp(floor(MAC / (128*M)), -128, 127)      ReLU off
    adc_out = max(0, that)                                ReLU on

One output LSB is 128*M = 147456 in MAC units at the default size. The macro therefore
returns the top 8 bits of a 1152-long dot product, fixed-scaled. Vectors whose product is
small against full scale give outputs near zero. This is a property of the single-ADC
architecture (one conversion range for the whole array), not of this RTL. The only
saturating input is the single case MAC = +16384*M (every product is (-128)*(-128)), which
clips to +127.

## 4. One CiM cycle

`phase_ctrl` sequences a cycle of 45 core clocks. The core clock is nominally 1 GHz; the ADC
clock is half of it.

| phase | clocks | switches | what happens |
|---|---|---|---|
| Reset | 3 | `rst_sw` | source lines, leaves and root cleared |
| Coupling | 3 | S1 | cells couple their products onto the source lines (in-column sum) |
| CAAT-L | 10 | S2 | source lines of each bank merged in its leaf (in-bank sum) |
| CAAT-R | 2 | S3 | leaves merged in the root (in-array sum) |
| ADC | 24 | - | 12 ADC clocks: sample, up to 8 SAR decisions |
| Idle | 3 | - | tail |

The split gives each phase its share of the cycle latency in post-layout simulation of the
fabricated macro (7 / 7 / 22 / 4 / 53 / 7 %). The 45-clock total is what a throughput of 51.2 GOPS at 1 GHz
implies: 2304 operations (1152 multiplies + 1152 adds) per cycle. The published 700 MHz
operating point (35.8 GOPS, ADC at 350 MHz) gives the same 45 cycles. Both are rounded to whole
clocks here, and all six lengths are parameters of `phase_ctrl`. A start held high runs
cycles back to back, one result every 45 clocks.

Measured from the rising edge that samples `start`, `adc_valid` rises at edge 36 after a full
conversion, or at edge 22 after an early stop. `out_valid` (fine-tuned) follows one clock
later. Source lines, leaves and root hold their values outside their phases. So activations
may be rewritten once the coupling phase of a cycle has passed.

## 5. ReLU-optimised SAR conversion

`sar_relu_ctrl` runs an ordinary MSB-first successive approximation against the comparator
model. It takes one step per ADC clock (`adc_tick`, every second core clock in the ADC
phase): one step samples, and each later step makes one decision. Mid-scale code 128 is
MAC = 0, so the first decision is the sign.

* ReLU on, first decision "below mid-scale": result 0, `early_stop` = 1, one comparison
  (`n_cmp` = 1).
* Otherwise: all 8 decisions (`n_cmp` = 8), result u - 128, clamped to 0 if ReLU is on.

Cutting seven of eight comparisons on negative outputs is where the roughly halved ADC energy
comes from: about half of pre-activation values are negative. `relu_en = 0` gives the signed
result, which is needed for the calibration described next.

## 6. Output fine-tune

Capacitor mismatch and parasitics make the real transfer curve deviate from section 3, and
this deviation is fixed once the chip is made. It is corrected after the ADC with one affine
map per output:

    y = (sigma0/sigma1) * x + (mu0 - (sigma0/sigma1) * mu1)

Here mu1 and sigma1 are the mean and spread of the macro's outputs on a calibration set, and
mu0 and sigma0 those of the ideal outputs computed in software. The map gives the measured
distribution the ideal mean and spread. `finetune` implements it with signed Q8.8 gain and
offset (`ft_gain`, `ft_offset`), round half up, and saturation to 8 bits, in one register
stage. Computing the statistics is a host task. `tb/cim_conv_tb.sv` and `tb/cim_finetune_tb.sv`
show the whole procedure.

To exercise the correction, the ADC front-end model can add a linear error to the analog
result. `cim_macro` parameter `ADC_GAIN_PPM` scales the input around mid-scale by
(1 + ADC_GAIN_PPM/10^6), and `ADC_OFFSET_Q` shifts it by ADC_OFFSET_Q/16 of an output LSB.
Both default to 0, the ideal converter. `cim_finetune_tb` runs with -15% slope and -2.5 LSB
offset. The calibration then brings the output mean from -2.6 back to 0.6 and the spread
from 7.3 to 8.6; the ideal values are 0.5 and 8.5.

## 7. Modules

Synthesizable logic:

| module | role |
|---|---|
| `cim_pkg` | digit weights, sizes, `phase_t` |
| `sd_encoder` | 8b signed to nine +/-1 digits |
| `act_buffer` | M activations, one write per clock, bit planes to the banks |
| `phase_ctrl` | phase sequence, switch controls, ADC clock enable |
| `sar_relu_ctrl` | SAR logic with ReLU early stop |
| `finetune` | affine output correction |
| `cim_macro` | top level |

Behavioural models of analog parts (exact integers, ideal; written in synthesizable style
but standing for analog circuits):

| module | stands for |
|---|---|
| `cim_bank` | M x 9 array of 10T1C SRAM CiM cells with source lines; write port = SRAM write |
| `caat_leaf` | hybrid C-2C / binary capacitor network of one bank |
| `caat_root` | hybrid network across the nine leaves |
| `adc_cdac_comparator` | sample-and-hold, capacitive DAC and comparator of the ADC |

Top-level interface (`cim_macro`, parameter `M`, default 1152):

| port | dir | meaning |
|---|---|---|
| `w_wr_en`, `w_wr_addr`, `w_wr_data[7:0]` | in | write signed weight W_j into row j of all nine banks |
| `a_wr_en`, `a_wr_addr`, `a_wr_data[7:0]` | in | write signed activation A_j |
| `relu_en` | in | ReLU with early stop |
| `ft_gain[15:0]`, `ft_offset[15:0]` | in | fine-tune parameters, signed Q8.8 |
| `start` | in | start a CiM cycle (taken in standby or in the last idle clock) |
| `busy`, `phase` | out | cycle in progress, current phase |
| `adc_valid`, `adc_out[7:0]`, `early_stop`, `n_cmp[3:0]` | out | raw 8-bit result and conversion details |
| `out_valid`, `mac_out[7:0]` | out | fine-tuned result |

Reset (`rst_n`, active low, asynchronous) clears the controller, the SAR logic, the fine-tune
stage and the activation buffer (to activation 0). The weight cells have no reset.

## 8. Where this departs from, or adds to, the fabricated macro

* **Ideal analog path.** The cell array, CAAT and ADC front end compute exactly. The reported
  nonlinearity (CAAT summation accurate to about 7 bits for most samples; ADC INL up to
  1.2 LSB) is not modelled. An optional linear error (section 6) can be switched on. It
  stands for the first-order distortion that fine-tune is meant to remove, with magnitudes
  chosen for the test, not measured.
* **Digit encoding and digit order** (section 1) are a choice consistent with the number
  format. The cell's XNOR product is inferred from the format, not from a cell schematic.
* **Phase lengths** are derived from the published latency shares and throughput, not from a
  timing specification. So is the SAR step schedule (one sample step, then one decision per
  ADC clock).
* **Reset** clears all analog nodes to 0 in the model. The real reset level is not known.
* **Write interfaces** (one row per clock, weights written to all banks at once) and the
  `relu_en` switch are this design's own.
* **Fine-tune number format** (Q8.8, rounding, saturation) is this design's own. Only the
  formula is given.
* Off-chip equipment (the FPGA test board and host) is not part of the RTL. The testbenches
  take its place.

## 9. Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=F` and ends with
`$finish`. Example with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -Irtl rtl/cim_pkg.sv \
    tb/cim_macro_tb.sv --top-module cim_macro_tb -Mdir obj -o sim
./obj/sim
```

| testbench | what it checks |
|---|---|
| `sd_encoder_tb` | all 256 inputs decode back through the digit formula |
| `act_buffer_tb` | reset contents, bit planes after writes and a rewrite (M = 40) |
| `cim_bank_tb` | source-line counts against a bit-level XNOR count, hold, reset (M = 64) |
| `caat_leaf_tb`, `caat_root_tb` | weighted sums, hold, reset, full-scale inputs |
| `adc_cdac_comparator_tb` | comparisons, including inputs exactly on and just below a DAC level |
| `sar_relu_ctrl_tb` | results, early stop, comparison count and step count (2 or 9 ADC clocks) |
| `phase_ctrl_tb` | 3/3/10/2/24/3 phase lengths, switch exclusivity, 12 ADC clocks, 45-clock period |
| `finetune_tb` | rounding and saturation against floating point |
| `cim_macro_tb` | end to end at M = 16: random and full-scale vectors, ReLU on/off, early stop, clipping, fine-tune saturation, latencies 36/22, back-to-back period 45 |
| `cim_macro_full_tb` | the same at the default M = 1152 (about 10 s) |
| `cim_finetune_tb` | the same convolution with a linear analog error; checks that fine-tune moves mean and spread towards the ideal |
| `cim_conv_tb` | a 3x3 convolution with 128 input channels (fan-in 1152) over a 6x6 map at M = 1152, then fine-tune calibration and a ReLU pass (about 20 s) |

All references in the testbenches are computed from the vectors themselves, as integer dot
products scaled by 128*M. None of them reuse the model's internal charge units.

## 10. Size and scope

At M = 1152 the macro stores 9 x 1152 x 9 = 93,312 weight bits: one 1152-element weight
vector, replicated nine times. It also holds 1152 x 9 activation bits. A network layer
therefore runs one output neuron per weight load. The fan-in-1152 layers of a CIFAR-style
VGG-8 (3x3 kernels over 128 channels) map exactly. Larger fan-ins need partial results added
outside the macro, with ReLU off. For synthesis, note that the behavioural array model
expands into 81 population counts of 1152 terms. That is a simulation convenience: in
silicon this summation is done by charge sharing.
