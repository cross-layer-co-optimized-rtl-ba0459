# A small LSTM accelerator for real-time gait-anomaly detection

A wearable gait monitor has to decide, within one step of the patient,
whether that step is normal or abnormal. The sensor is a three-axis
gyroscope sampled at 256 Hz. The gyroscope's three axes plus their
magnitude give four input channels. A window of 96 samples (about 40 % of a
step) goes through a recurrent network:

* one LSTM layer of 20 cells,
* a 20-neuron fully connected layer (FC1) with ReLU,
* a 2-neuron output layer (FC2); the larger output is the class (0 normal,
  1 abnormal).

The network has 2462 parameters. At 256 samples per second the
accelerator has plenty of time per sample. So the design has almost no
parallelism across cells or neurons. **One** wide dot-product unit, **one**
sigmoid/tanh unit and **one** cell-update unit are time-shared by all 20
cells, all four gates and both FC layers. Each cycle the unit reads one
wide parameter word from on-chip SRAM. That word holds all 25 parameters
of one gate (or all 21 of one neuron), and the unit uses them in the same
cycle. The schedule never changes, so a plain counter sequences it. There
is no instruction stream and no address arithmetic beyond the counter.
One window costs

    96 samples x 20 cells x (4 gates + 1 store) + (20 + 1) + (2 + 1) = 9624 cycles

At 10 MHz that is 0.96 ms. After the 96th sample the result follows in
124 cycles.

This RTL implements that architecture. The bit widths are parameters, and
the defaults are the configuration with the best accuracy in the original
evaluation: parameters FxP(9,7), internal operations FxP(13,9). The
architecture, memory map, cycle budget, number formats and activation
polynomials come from the published description of the accelerator. The
points where that description is silent are filled in here, and each one
is marked in this document and in the file headers.

## The network, as computed

For cell n at sample t, the four gates are computed for k in {i, f, g, o}:

    pre_k  = sum_{j=1..20} Wk[n][j] * h_{t-1}[j] + sum_{m=1..4} Uk[n][m] * x_t[m] + Bk[n]
    i, f, o = sigmoid(pre),   g = tanh(pre)
    c_t[n]  = f * c_{t-1}[n] + i * g
    h_t[n]  = o * tanh(c_t[n])

Every cell sees the whole previous hidden vector h_{t-1} (20 recurrent
weights per gate). The state starts at zero in every window. After the
96th sample the **cell states** C[1..20] go to FC1 (not h). That follows
the original description and its network diagram. The parameter
`FC_FROM_H` of `lstm_nn_block` switches FC1 to take h instead.

    FC1[j] = max(0, sum_i W1[j][i] * C[i] + B1[j])      j = 1..20
    FC2[k] =        sum_i W2[k][i] * FC1[i] + B2[k]     k = 1..2
    cls    = (FC2[2] > FC2[1])                           tie -> 0

## Number formats and arithmetic

This part takes most care when the RTL has to match a software model bit
for bit.

FxP(b,f) is a b-bit two's-complement number with f fractional bits.

| quantity | format |
|---|---|
| input samples x_t | FxP(10,8), fixed |
| parameters (weights, biases) | FxP(PB,PF), default (9,7) |
| operation values: gate outputs, c, h, FC outputs | FxP(OB,OF), default (13,9) |
| activation coefficients | FxP(18,13) |

The rules:

1. **Every multiplication** produces a result in the operation format
   FxP(OB,OF). The exact product is rounded to OF fractional bits, half
   away from zero on the magnitude, then clamped to the OB-bit range
   (`fxp_mul`, `fxp_round_sat`).
2. **Additions are not restricted.** The 25-term dot product keeps OB+6
   bits. The bias is shifted left by OF-PF to line up. Nothing is rounded
   before the activation.
3. A value is clamped to FxP(OB,OF) only when it is **stored**: c_t, the
   FC1 outputs (after ReLU) and the FC2 outputs. h_t is already a product.

Rule 1 and rule 2 are the original design's. The rounding mode and rule 3
are choices of this implementation. The quantizer formula in the original
description lacks a floor and would read as a one-LSB bias, so it was read
as round-to-nearest.

The RTL requires OF >= PF (for bias alignment) and OB-OF >= 3 (to hold
+-3). All seven configurations below meet both.

### Activation functions

Sigmoid and tanh are piecewise quadratics: four segments between constant
tails.

| | tails | segment edges |
|---|---|---|
| sigmoid | 0 for x <= -6, 1 for x > 6 | -6, -3, 0, 3, 6 |
| tanh | -1 for x <= -3, 1 for x > 3 | -3, -1, 0, 1, 3 |

The coefficients are stored as round(coef x 8192), in `lstm_pkg`
(`sig_coef`, `tanh_coef`). The segment is chosen on the full-width input.
The polynomial is then evaluated in **Horner form**, (a*x + b)*x + c, with
two multipliers that follow rule 1.

Horner form departs from the written form a*x^2 + b*x + c. On the outer
sigmoid segments x^2 reaches 36, and a product clamped to FxP(13,9) (range
+-8) would be wrong there. In Horner form the intermediate values stay
below 8. Over every input, the error against the true functions is at most
0.007 for sigmoid and 0.015 for tanh (checked in `tb_poly_act`).

One `poly_act` instance serves everything. In gate cycles it takes the
dot-product sum, using tanh for gate g and sigmoid for the others. In a
cell's store cycle it takes c_t and computes tanh.

## Parameter memory

102 words. Each word has 25 slots of PB bits; slot 1 is in the least
significant bits.

| addresses | content | slots used |
|---|---|---|
| 0..79 | gate word of cell n, gate k: address 4n + k, k = i,f,g,o = 0..3 | 1..20 W (times h_{t-1}), 21..24 U (times x_t), 25 bias |
| 80..99 | FC1 neuron j: address 80 + j | 1..20 weights (times C), 21 bias |
| 100..101 | FC2 neuron k: address 100 + k | 1..20 weights (times FC1), 21 bias |

The address ranges are the original design's. The slot order within a word
and the cell-major gate order are this design's choices. Unused slots of
FC words should be written as zero (they are not read).

The memory is two banks of equal depth and width (`param_sram` built from
two `sram_bank`). Bank 0 holds the low half of the word's bits, and bank 1
the high half, padded. At the default PB=9 the word is 225 bits, so each
bank is 102 x 113. In silicon each bank is a compiled SRAM macro.
`sram_bank` is a synchronous array with the same behaviour: one-cycle read
latency, and read data held while not enabled. The original evaluation
reports 2.704 KB of on-chip memory for PB=8, which matches two 104 x 104
macros, slightly larger than the 102 x 100 that the design needs.

Parameters are loaded once at start-up. Hold `wr_rd = 1` and write one
word per cycle with `mem_en`, `mem_addr` and `mem_wdata`. There is no
read-back port.

## Schedule and timing

`control_logic` holds a counter (phase, sample t, cell/neuron n, step s).
Each enabled cycle executes one step:

| phase | steps | what the datapath does |
|---|---|---|
| LSTM, per sample, per cell | 4 gate steps | read gate word, dot product, activation, into gate register i/f/g/o |
| | 1 store step | c_t, tanh(c_t), h_t; c_t stored in place, h_t into a second array |
| FC1 | 20 neuron steps | read neuron word, dot product with C, ReLU, store |
| | 1 store step | FC1 outputs become the operand vector of FC2 |
| FC2 | 2 neuron steps | read neuron word, dot product, store |
| | 1 store step | compare the two outputs, cls, one-cycle cls_rdy; clear state |

**Prefetch.** The SRAM answers one cycle after the address. So the
control logic presents the address of the *next* step: the next gate's
word during a gate step, and the next cell's first word during a store
step. While it waits, it presents the address of the step it waits at.
The word a step needs is therefore always on the read port when the step
runs. This is why the window costs exactly 9624 enabled cycles and not
one more per word. After reset, or after leaving write mode, one idle
cycle primes the first read.

**Operand vector and double buffering.** The dot product's 20-element
operand vector `vec` holds h_{t-1} during the LSTM phase. Each cell's new
h_t goes to a second array `nxt`. The whole array is copied into `vec` in
the store step of cell 20, so all cells of one sample see the same
h_{t-1}. After the last sample, that copy loads the cell states instead.
`nxt` is reused as the FC1/FC2 output buffer.

**Input handshake.** The counter waits at the first gate step of every
sample until `x_rdy` is high. X_t is taken from the port in that cycle and
held in a register for the remaining 79 gate steps of the sample. x_rdy is
looked at only while the accelerator waits for a sample. A sensor that
pulses x_rdy once per sample must therefore leave at least 100 cycles
between samples, and 124 cycles after the last sample of a window. At
256 Hz and 10 MHz there are 39062 cycles between samples. If x_rdy is held
high, the accelerator takes a new sample every 100 cycles. The host must
then change X_t in step with it (as `tb_lstm_accel_top` does in its first
window). The x_rdy wait and its timing are this implementation's choices:
the original design names x_rdy but gives no protocol.

**Result.** cls_rdy is high for one cycle, 9624 cycles after the first
sample when samples arrive back to back. cls holds its value until the
next result. The counter then returns to sample 0 and waits for the next
window.

**Write mode aborts.** Raising wr_rd at any time stops the schedule,
returns the counter to the first step and clears c and the operand
vector. The next window then starts clean.

## Configurations

The seven bit-width configurations that the original work synthesised are
parameter settings of `lstm_accel_top` (PB, PF, OB, OF):

| # | parameters | operations | note |
|---|---|---|---|
| 1 | (10,8) | (13,8) | |
| 2 | (10,8) | (13,9) | |
| 3 | (10,8) | (12,8) | |
| 4 | (9,7) | (13,8) | |
| 5 | (9,7) | (13,9) | default; best accuracy |
| 6 | (9,7) | (12,8) | |
| 7 | (8,6) | (13,9) | smallest area |

The window length is not a synthesis parameter but the input
`cfg_steps`, 1 to 128 samples (96 for the gait windows). It is start-up
configuration: change it only while `wr_rd` is high; assertions check
the range and that it stays put while windows run. The network
shape (20 cells, 4 inputs, 20 and 2 FC neurons) is fixed in `lstm_pkg`
because the memory map depends on it. A network with fewer cells runs by
giving zero to every parameter of the unused cells and to every weight
that reads them (recurrent weights of the other cells, FC1 weights).
Note that an unused cell's own c and h do not stay exactly zero. The tanh
polynomial gives tanh(0) = 0.0031, which rounds to 2 LSB, so they settle
at a few LSBs. They still contribute nothing, because every weight that
reads them is zero. The testbench `tb_fewer_cells` runs a 12-cell
network this way and shows that random data in the unused cells' own
words does not change the result.

## Top-level ports (`lstm_accel_top`)

| port | dir | width | meaning |
|---|---|---|---|
| clk | in | 1 | clock; 10 MHz meets the real-time budget with a wide margin |
| rst | in | 1 | synchronous, active high |
| mem_en | in | 1 | MEM port: write strobe (with wr_rd = 1) |
| mem_addr | in | 7 | MEM port: word address 0..101 |
| mem_wdata | in | 25*PB | MEM port: parameter word |
| wr_rd | in | 1 | 1 = load parameters, 0 = run |
| x_t | in | 4 x 10 | sample, channel 0 in bits [9:0], FxP(10,8) each |
| x_rdy | in | 1 | sample valid |
| cfg_steps | in | 8 | samples per window, 1..128; hold while wr_rd = 0 |
| cls | out | 1 | class of the last window (1 = abnormal) |
| cls_rdy | out | 1 | one-cycle pulse with a new cls |

## Files

| file | content |
|---|---|
| `rtl/lstm_pkg.sv` | sizes, memory map, coefficient tables, control types (`ctl_t`, `step_e`) |
| `rtl/lstm_accel_top.sv` | top: memory, control, datapath |
| `rtl/control_logic.sv` | counter schedule, SRAM port mux, x_rdy wait, prefetch |
| `rtl/lstm_nn_block.sv` | datapath registers and step decoding, ReLU, MAX |
| `rtl/dot_product.sv` | 24 multipliers + adder tree, LSTM and FC modes |
| `rtl/poly_act.sv` | sigmoid / tanh |
| `rtl/cell_update.sv` | c_t and h_t |
| `rtl/param_sram.sv`, `rtl/sram_bank.sv` | two-bank parameter memory |
| `rtl/fxp_mul.sv`, `rtl/fxp_round_sat.sv` | rounding, clamping multiplier |
| `tb/lstm_ref_pkg.sv` | bit-accurate reference model (64-bit integers) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_configs` and `tb_fewer_cells` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops on a
watchdog if the design hangs. With Verilator 5, from the top of this tree:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/lstm_pkg.sv tb/lstm_ref_pkg.sv tb/tb_lstm_accel_top.sv \
        --top-module tb_lstm_accel_top
    ./obj_dir/Vtb_lstm_accel_top

To run another testbench, put its name in place of `tb_lstm_accel_top`.
What they cover:

* `tb_lstm_accel_top`: the full-size design at its defaults. It loads
  parameters and runs five windows: back to back, with a cycle-exact check
  of 9624; with sensor-like gaps; aborted by a parameter reload; one
  with a cell driven into saturation; and one of 40 samples after
  changing `cfg_steps`. It compares cls and both output neurons with the
  reference model. It also counts that parameter writes, the step-count
  change, x_rdy waits, restarts, the abort, ReLU clipping, activation
  tails and cell-state clamping all happened.
* `tb_configs`: one window in each of the seven configurations.
* `tb_fewer_cells`: a 12-cell network on the 20-cell hardware, run twice
  with different contents in the unused cells' words; both runs must
  match the reference and each other.
* `tb_lstm_nn_block`: drives the datapath step by step. It compares all c
  and h after every sample.
* `tb_control_logic`: checks the order of the schedule, the prefetch of
  every word, the step count, the x_rdy wait and the write-mode handover.
* Unit tests of the multiplier, the activation unit (exhaustive over
  -10..10), the dot product, the cell update and both memories.

The reference model in `tb/lstm_ref_pkg.sv` is a second implementation of
the same arithmetic. It rounds on the magnitude where the RTL uses a
two's-complement shortcut. It derives the coefficients from the real
numbers, and it uses plain integer loops. Random parameters stand in for
trained networks, whose weights are not available. Agreement with the
model shows that the RTL computes the stated arithmetic. It does not show
the classification accuracy of a trained network.

## What is not here

* **Start-up configuration from an external EEPROM.** The original
  description mentions that channel count and step count can be read from
  an EEPROM at start-up, but gives no interface. Here the step count is
  the `cfg_steps` input, for such a loader or the host to drive. The
  channel count is fixed at four; a channel can be switched off by zero
  weights.
* **Sensor pre-processing** (normalization and filter coefficients). It is
  mentioned but not specified. Samples enter already in FxP(10,8).
* **The SRAM macros themselves.** `sram_bank` models their behaviour. A
  physical implementation would replace it with the foundry macro.

## Choices made here that a user may want to change

* The slot order inside a word and the gate order in memory. Change
  `lstm_pkg` (slot constants), `control_logic.addr_of` and the loader
  together.
* Round-half-away-from-zero rounding and clamping when values are stored.
  This matters for bit-exactness with a given software model.
* FC1 fed with cell states C (`FC_FROM_H = 0`). Most LSTM software feeds
  h; set `FC_FROM_H = 1` on `lstm_nn_block` for that.
* MAX ties go to class 0.
* wr_rd = 1 means write.
