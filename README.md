# Bayesian compute-in-memory tile with in-word Gaussian RNG

A Bayesian neural network (BNN) layer does not have fixed weights. Each weight is
a Gaussian distribution, and the layer is run many times on the same input with
a new random draw of every weight each time. The spread of the outputs measures
how uncertain the network is. In hardware this is costly: every run needs one
Gaussian random number per weight, and on a compute-in-memory (CIM) array each
sampled weight would also have to be written back into the array before it can
be used.

This design avoids both costs. It splits each weight into

    w = mu + sigma * eps,        eps ~ N(0, 1)

and stores mu and sigma in two separate CIM subarrays. The random number eps is
not stored at all. A tiny analog Gaussian RNG (GRNG) sits inside every sigma word
and gates that word's bitline current directly while the array computes. One
matrix-vector multiplication (MVM) then gives one Monte-Carlo sample of the whole
layer, for every weight at once, with no memory writes.

The RTL here describes one tile of the 65 nm prototype published by Enciso et al.
("A 65 nm Bayesian Neural Network Accelerator with 360 fJ/Sample In-Word GRNG for
AI Uncertainty Estimation"). The tile has its digital periphery in synthesizable
SystemVerilog and its analog core (GRNGs, bitlines, ADC comparators) as
behavioural models. The sizes are the prototype's. Timing, full scale, host
interface and other details the publication leaves open are this design's own
choices; they are listed in the last sections.

## Tile organisation

```
                       input_buffer (64 x 4-bit X)
                                 |
        +------------------------+------------------------+
        | same X to both subarrays, one IDAC per row      |
  sigma-eps subarray                                mu subarray
  64 rows x 8 words                                 64 rows x 8 words
  word = 4 sigma cells + 1 GRNG                     word = 8 bits x 2 cells (P, N)
  32 bit columns                                    64 bit columns
        |  differential bitline pair per column           |
  32 SAR ADCs (6 bit)   <---- sar_ctrl (shared) ---->  64 SAR ADCs (6 bit)
        |                                                 |
        +----------------> reduction <--------------------+
                 offset removal, shift-add, y = X*mu + X*sigma*eps
                                 |
                  output_buffer (8 x 16-bit words)

  tile_ctrl: precharge -> evaluate -> convert -> reduce, once per sample
  grng_cal:  GRNG offset calibration and corrected weight writes
```

Sizes (package `bnn_pkg`): 64 rows, 8 words per row, 4-bit inputs, 8-bit mu,
4-bit sigma, 6-bit ADCs. All of these are the prototype's figures. The output
word width (16 bits) is this design's choice.

**mu words.** Each bit of mu is a pair of SRAM cells. The P cell pulls current from
the column's positive bitline and the N cell from its negative bitline. So a pair
`N P = 0 1` adds +2^b, `1 0` adds -2^b, and `0 0` adds nothing. The weight is
`p - n`, read as two unsigned bytes. Host writes give a signed mu in -255..255,
and `mu_encode` stores it in sign-magnitude form.

**sigma words.** There is one cell per bit, and sigma is unsigned. The sign comes
from the GRNG: the word's current flows only while the GRNG pulse is active, and
goes to the positive or the negative bitline depending on which of the GRNG's two
capacitors discharged first.

## The in-word GRNG (`grng_model`)

This is the core idea of the design. Each GRNG has two 1 fF capacitors, Cp and Cn.
Both are held at VDD while the flip-flop output PHI is low. A rising edge on EN
clocks a 1 into that flip-flop. PHI goes high, and two transistors biased deep in
subthreshold by a voltage V_R start to leak both capacitors slowly to ground.
Each capacitor node drives a chain of three inverters. P (for Cp) and N (for Cn)
rise when their node crosses the inverter threshold.

Thermal noise makes the two crossing times differ at random. The output
E = XNOR(P, N) is high at rest, falls at the first crossing and rises at the
second. Its low time T_D has a zero-mean Gaussian distribution, and whichever of
P and N rose first gives the sample's sign. When E rises again, the flip-flop is
reset asynchronously. PHI falls, the capacitors recharge, P and N return low, and
the inverters stop drawing short-circuit current.

The model (`rtl/grng_model.sv`) reproduces this event sequence with real-valued
delays. On each EN rising edge it draws two crossing times, each with mean
`LATENCY_NS` (69 ns) and Gaussian spread `SIGMA_TD_NS/sqrt(2)`. The signed
difference `td_ns = t_N - t_P` therefore has standard deviation 1.0 ns. These are
the prototype's values at its typical 180 mV bias. `OFFSET_NS` adds a static
mismatch between the two discharge paths, which shows up as a non-zero mean eps0.
Real silicon has this mismatch and must calibrate it out (see below). `td_ns` is
an extra output, used only by the model. It stands for the charge that the
word's transmission gates let through, and the sigma-eps bitline model integrates
it.

The model does not include the bias voltage V_R or temperature. The measured
chip's pulse spread and latency depend strongly on both: a higher V_R is faster
but narrower, and a higher temperature is faster and wider. Here both are fixed
parameters.

## From bitline charge to output words

The analog read path is modelled in integer-like charge units. One mu cell with
input X = 1 that conducts for the whole evaluation window moves 1 unit.

* mu column (word j, bit b): `q = sum_i X_i (p_ijb - n_ijb)`
  (`mu_bitline_model`, linear IDACs, ideal bitlines).
* sigma-eps column: `q = GAIN_PER_NS * sum_i X_i sigma_ijb td_ij`
  (`se_bitline_model`, `GAIN_PER_NS` = 8 by default). The chip sets this ratio
  with the IDAC bias of the sigma-eps subarray.
* Each of the 96 ADCs quantises its column with LSB = 2^LSB_LOG2 = 8 units and a
  static offset `off` in LSBs:
  `code = clamp(floor(q / 8 + off + 1/2), -32, 31)`.
  The binary search is real: `sar_logic` holds the register, and
  `sar_comparator_model` provides the DAC threshold `(u - 32.5) * LSB` and the
  comparator.
* `reduction` removes each ADC's offset and rebuilds the words:
  `y_mu[j] = sum_b 2^b (code - off)` over 8 bits, `y_se[j]` likewise over 4 bits,
  and `y[j] = y_mu[j] + y_se[j]`.

So the output is `X*mu + X*sigma*eps` in ADC LSBs (1 LSB = 8 mu units), with one
rounding per bit column. Column quantisation dominates the error. A mu column
that sees only a few small products rounds to 0, as the end-to-end test shows.
The ADC full scale of +-256 units is this design's choice. The publication does
not give one.

## One sample, and reusing X*mu

`tile_ctrl` runs one MVM in these phases. The cycle counts assume a 10 ns clock;
the publication gives no clock rate.

| phase | cycles | what happens |
|---|---|---|
| PRE  | `PRE_CYCLES` = 1 | bitlines precharged, GRNG EN low |
| EVAL | `EVAL_CYCLES` = 9 | EN high: GRNGs fire, wordlines on; the last cycle holds the bitline charge (`sample`) |
| CONV | 1 + 8 | `sar_ctrl`: clear, 6 bit trials MSB first, done |
| RED  | 1 | reduction registers the words |

`y_valid` rises 21 clock edges after the edge that accepts `mvm_start`
(`PRE_CYCLES + EVAL_CYCLES + ADC_BITS + 5`). All rows and all columns are
evaluated and converted in parallel. The ADCs sit at the column pitch, so no
column multiplexing is needed. EVAL must cover the GRNG latency: 90 ns against a
69 ns mean and a 1 ns spread.

The mean part X*mu does not change between samples of the same input. With
`mvm_mu_reuse` set together with `mvm_start`, the mu subarray and its 64 ADCs
stay idle, and the reduction adds the new sigma-eps part to the y_mu it kept from
the last full sample. A typical Bayesian inference is therefore one full sample
followed by R-1 reuse samples.

## GRNG offset calibration (`grng_cal`)

Transistor mismatch gives each GRNG a fixed mean offset eps0(i,j), so
w = mu + sigma (eps + eps0). The offset is static, so it is measured once and
folded into mu:

1. One MVM with all inputs zero. Every column then carries no difference, so
   each ADC's code is its offset. The reduction stores these codes.
2. sigma = 1 is written to all 512 sigma words.
3. For each row i, 16 MVMs run with input 1 on row i only. Word j's sigma-eps
   output is then eps(i,j) in LSBs. The sum over the 16 samples is stored as
   `eps_sum(i,j)` (the mean, with 4 fraction bits).

From then on, every host write of (mu, sigma) stores

    mu' = sat255( mu - round(sigma * eps_sum * 8 / 16) )

so that the array holds mu' + sigma * eps with zero-mean eps. The host must
rewrite its weights after calibrating, because step 2 overwrote sigma.
Calibration takes 23,062 cycles at the default size. The end-to-end test
estimates all 512 offsets to within 1 ns. It also shows a word whose
uncorrected offset would add 15 LSB to the mean coming out at -0.4 LSB.

The measurement procedure and the correction formula are the published ones.
The ADC-offset step, the 16-sample average and applying the correction in the
chip's write path are this design's choices. The publication only says that
later weight changes must include the offset.

## Host interface (`bnn_tile_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `w_en, w_row[5:0], w_word[2:0], w_mu[8:0] (signed), w_sigma[3:0]` | in | write one weight; it reaches the SRAM one cycle later; ignored while calibrating |
| `x_we, x_addr[5:0], x_data[3:0]` | in | write one input |
| `cal_start` | in | run the calibration; `cal_busy` high meanwhile, then `calibrated` |
| `mvm_start`, `mvm_mu_reuse` | in | take one sample (optionally reusing X*mu); accepted when `busy` is low |
| `y_valid` | out | one-cycle pulse; the output buffer loads on the next edge |
| `rd_en, rd_addr[2:0]` -> `rd_data[15:0]` | in/out | read an output word one cycle later |
| `out_ready`, `out_overrun` | out | unread sample present; a sample was overwritten before being read |

## Files

Synthesizable: `bnn_pkg`, `input_buffer`, `cim_sram` (used for both
subarrays), `sar_logic`, `sar_ctrl`, `reduction`, `grng_cal`, `tile_ctrl`,
`output_buffer`.
Behavioural analog models, with `real` values and delays: `grng_model`,
`mu_bitline_model`, `se_bitline_model` (IDACs and precharge are inside these two)
and `sar_comparator_model`.
`bnn_tile_top` ties everything together. It instantiates the analog models, so
it simulates but is not a synthesis top as it stands. To synthesize, replace the
four `*_model` modules with the analog macros.

Each module has a testbench `tb/tb_<module>.sv` that checks the module against
values the testbench works out itself. Each prints
`TB_RESULT checks=N failures=M`. To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bnn_tile_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/bnn_pkg.sv tb/tb_bnn_tile_top.sv
./obj_dir/Vtb_bnn_tile_top +verilator+rand+reset+2
```

`tb_bnn_tile_top` runs the full-size tile (512 GRNGs, 96 ADCs) in about 10
seconds, through calibration (with its offset estimates checked), a saturating
corrected write, four deterministic MVMs checked word by word against a
reference (one of them saturating ADCs), 64 Bayesian samples (63 of them reusing
X*mu) checked statistically, and an output overrun. It counts each mechanism and
fails if one never happens. `tb_fc_workload` (below) runs a whole classifier
layer through the same tile. `tb_grng_model` checks the GRNG's mean, spread,
latency and pulse shape over 2500 draws. It also checks normality: the
correlation of the normal probability plot must reach the 0.9967 measured on
silicon, and the model gives about 0.999.

## Where this departs from the silicon

* **Analog parts are models.** The GRNG, IDACs, precharge, bitlines and the
  comparator/DAC half of each ADC follow the described behaviour, not transistor
  physics. There is no bitline nonlinearity, leakage, or noise apart from the
  GRNG's.
* **Scales are chosen, not published.** The ADC LSB (8 mu units), the sigma-eps
  gain (8 units per ns), the ADC offsets (-2..2 LSB) and the GRNG mismatch
  (-2..2 ns) given to the models are illustrative.
* **Rate.** The prototype's 5.12 GSa/s from 512 GRNGs means one sample per
  100 ns. This controller needs 21 cycles per sample, which is 210 ns at the
  assumed 10 ns clock. The published design calls its MVM single-cycle because
  pitch-matched ADCs convert every column at once, without column multiplexing.
  That holds here too: one pass of the controller gives the whole 64 x 8 result.
  But the pass spans several clock cycles of precharge, evaluation and SAR
  trials. Pipelining the conversion of one sample with the
  evaluation of the next would close most of the gap, but the publication does
  not describe such overlap.
* **Operating point.** The GRNG defaults use the typical 1.0 ns / 69 ns point.
  The published temperature measurements (28-60 C) show much wider and
  slower pulses (197-516 ns spread, 0.77-1.93 us latency) in that test setup. Either
  can be set through the parameters. Dependence on bias and temperature is not
  modelled.
* **Interfaces are this design's own:** the host ports, the output buffer's
  ready/overrun protocol, the input buffer's zero and one-hot modes, the
  controller's phase lengths and the on-chip correction of weight writes.
* **No energy figures.** The models carry no power information. The
  published 360 fJ per sample and 3.6 nJ per calibration cannot be checked here.
* **Not described, not built:** the test structures and the pad ring.

## Mapping networks onto the tile

One tile holds a 64-input x 8-output Bayesian layer. The published evaluation
places the last fully connected layers of a MobileNet person detector on the
chip; the earlier layers run conventionally. How the prototype mapped a layer
larger than the tile is not stated. A MobileNet-v1 head has 1024 features, and
person detection has 2 classes. All words of a row share that row's input, so
the layer does not pack into fewer loads: it takes 16 loads of 64 inputs, each
using 2 of the 8 words, with partial sums added outside the tile. The evaluation
also tries 2-bit sigma; that fits directly, with the unused high bits left at 0.

`tb/tb_fc_workload.sv` runs exactly this: a random 1024 x 2 layer with 2-bit
sigma, 16 loads of 32 samples each (31 of them reusing X*mu), after one
calibration. It checks every sample's X*mu and sigma-eps parts exactly against
references computed from the stored weights and the pulse widths the GRNGs
produced. It also checks the GRNG statistics over all 1024 block samples and the
mean of the final logits. Its output shows an effect of the analog headroom.
The sigma-eps columns carry the uncorrected X*sigma*eps0 mean, because the
correction is applied in mu. So even with inputs of 0..3 and 2-bit sigma, about
2 % of their conversions clip at the ADC limits, and the logit spread shrinks
accordingly. A real deployment would trim the sigma-eps IDAC bias for this, as
the chip allows.
