# A reusable neural-network training engine for FPGA

This RTL trains and runs a small fully connected neural network entirely in
programmable logic. It follows the architecture of Y. Hao, "A General Neural
Network Hardware Architecture on FPGA" (Xilinx ZU9CG SoC). That architecture
has four main ideas:

* one **mult-add bank** (a row of parallel multiply-accumulate units) computes
  a whole layer's matrix-vector product, and the same bank is used again for
  every hidden layer;
* the activation function is a **loadable look-up table**, so tanh, sigmoid
  or ReLU is chosen by the table's contents and needs no new hardware;
* the **softmax** also uses tables. It looks up e^z, adds the values up, and
  then scales every output by the ratio of a fixed limit (1024) to that sum.
  Each output is therefore a probability in units of 1/1024;
* training applies the **output-layer gradient**
  `gamma * sum_i (y^_i - y_i) (x) S2_i`. That is an outer product of the output
  error with the hidden-layer outputs S2, summed over a batch, then scaled by
  the learning rate.

The source gives a block diagram and describes each block's function. It
gives no bit widths, sizes, memory layouts or timing. Everything of that kind
below was chosen for this implementation. The section "Where this design
departs from the source" lists each of those choices.

## Dataflow

```
 host port ──► buffer0 (inputs X) ─┐
           ──► buffer1 (W1, WH)   ─┼─► mult-add bank 1 ─► S1 RAM ─► tanh bank ─► Tanh(S1) RAM ─┐
                                   └──────────────(hidden outputs, for layer 2)◄────────────────┤
 host port ──► hidden-to-output weight buffer (W2) ─► mult-add bank 2 ◄────────────────────────┘
                                                          │ z
                                                          ▼
                                softmax: exp LUTs ─► adder ─► gain control ─► pred_* (1/1024 units)
                                                          │ y^
 host port ──► label buffer (Y) ───────────────► (Y^ - Y) RAM
                                                          │ error
                      Tanh(S1) = S2 ─► mult (outer product) ─► accu (sum over batch,
                                                               W2 <- W2 - gamma*G) ─► W2 buffer
 gnn_control sequences every step.
```

A run starts with a pulse on `start`. The run's inputs are `train` (update the
weights or only predict), `batch` (m samples, 1..MAX_BATCH), `layers` (1 or 2
hidden layers) and `gamma` (the learning rate). Samples are processed one
after another. For each sample:

1. **L1.** Mult-add bank 1 has L1 units. Each unit owns one hidden neuron. In
   every cycle one input element x_k is sent to all units, along with one
   buffer1 word that holds those neurons' weights for that element. After
   N_IN elements, one more cycle feeds the constant 1.0 against the bias
   column. The L1 sums are rescaled and saturated to 16 bits and written as
   one word of the S1 RAM. This repeats for each group of L1 neurons.
2. **ACT.** Each S1 word goes through the tanh bank: L1 copies of the same
   table, one clock. The result is written to the Tanh(S1) RAM.
3. If `layers = 2`, L1 and ACT run again. This time the inputs are the first
   layer's outputs, read one element at a time from the Tanh(S1) RAM, and the
   weights are the second block of buffer1. The same bank, table and RAMs are
   reused. This is the source's method for deeper networks.
4. **L2.** Mult-add bank 2 has L2 units, one per output class. It forms the
   output sums z in the same way, with W2 plus its bias column.
5. **Softmax.** See below. Its outputs appear on `pred_*`. Each output word
   is paired with the matching label word, and the difference y^ - y (in
   Q8.8) is written to the error RAM.
6. **BWD** (training only). The mult bank multiplies one error word by one
   hidden output s_k (or by 1.0 for the bias) per cycle. That gives one word
   of the outer-product matrix, in the same layout as a W2 word. The accu
   block adds the word into its gradient store. The first sample of a batch
   overwrites the store instead of adding to it.

After the last sample of a training run, the **UPD** phase reads each W2
word, lets the accu block compute `W2 - gamma*G`, and writes the result back.
`done` then pulses.

## The softmax with a fixed limit

A true softmax divides every e^{z_j} by the sum of all of them. The source
avoids one divider per output. It fixes a maximum value for the result (1024)
and scales the outputs by the ratio of that limit to the sum. Here that
works as follows:

* Each lane looks up e^z in a 256-entry table. The table covers z from -8.0
  to +7.94 in steps of 1/16. Inputs outside that range use the end entries.
  Entries are unsigned 24-bit Q16.8 numbers and should be at least 1, so the
  sum can never be zero.
* An adder sums every exponential of the sample, across all words.
* `gain_divider` computes `gain = floor(2^(10+32) / sum)`, which is 1024/sum
  with 32 fraction bits. It is a restoring divider that produces one bit per
  clock, so it takes 44 cycles.
* The unit then emits one word per clock. Each element is
  `y_j = floor(e_j * gain / 2^32)`, an 11-bit value in units of 1/1024. The
  values of a sample add up to between 1024 - N_OUT and 1024. A testbench
  checks that each output lies within 0.01 of the exact softmax of the
  quantised inputs.

From the last logit word to the first probability word takes
LIMIT_LOG2 + GF + 5 = 47 cycles. For the error, y_j is shifted right by 2
into Q8.8 (1.0 = 256), then the label is subtracted.

## The backward pass

The weights trained are the hidden-to-output weights W2. The error
y^ - y is the derivative of the cross-entropy loss with respect to the
softmax inputs. Its outer product with the hidden outputs S2 is therefore
the gradient of W2. The accu block holds one 40-bit Q16.16 sum per weight.
After the batch it computes

    W2_new = saturate16( W2 - floor(gamma * G / 2^24) )

`gamma` is an unsigned Q0.16 number: 65536 would be 1.0, and 3277 is about
0.05. This is plain batch gradient descent. The source gives only this one
formula. The weights of the hidden layers (buffer1) are not trained. They
are loaded from the host, for example after training elsewhere.

## Number formats

| quantity | format |
|---|---|
| inputs, weights, S1, hidden outputs, z, labels, errors | signed 16-bit Q8.8 (1.0 = 256) |
| products | signed 32-bit Q16.16 |
| mult-add and gradient accumulators | signed 40 bits |
| mult-add result | accumulator >>> 8, saturated to 16 bits |
| exp table entries | unsigned 24-bit Q16.8 |
| probabilities | unsigned 11 bits, units of 1/1024 |
| learning rate gamma | unsigned Q0.16 |

## Host port and memory layouts

The SoC would move data over AXI between its DDR memory and the buffers.
Here a plain word port takes the place of AXI. Writes happen only while
`busy` is low; writes during a run are ignored. `host_sel` chooses the
target memory (`gnn_pkg::host_sel_e`):

| `host_sel` | memory | word at `host_addr` |
|---|---|---|
| `SEL_X` | buffer0 | `X[s][k]` at `s*N_IN + k` (16 bits) |
| `SEL_W1` | buffer1 | layer 1: at `g*(N_IN+1) + k`, lane p = `W1[g*L1+p][k]`; k = N_IN is the bias. Layer 2: at `G1*(N_IN+1) + g*(N_HID+1) + k`, in the same lane layout |
| `SEL_W2` | hidden-to-output weight buffer | at `g*(N_HID+1) + k`, lane p = `W2[g*L2+p][k]`; k = N_HID is the bias |
| `SEL_LABEL` | label buffer | at `s*G2 + g`, lane p = `Y[s][g*L2+p]` (Q8.8, one-hot 256) |
| `SEL_TANH` | every activation table | entry `i` is f((i-128)/32), Q8.8 |
| `SEL_EXP` | every exponential table | entry `i` is e^((i-128)/16), Q16.8, at least 1 |

Here G1 = N_HID/L1 and G2 = N_OUT/L2, and lane p is bits `[16p+15:16p]`.
Pulsing `host_re` with `host_rsel` set to `SEL_W1` or `SEL_W2` reads a word
back; it appears on `host_rdata` one cycle later.

## Schedule and throughput

The phases do not overlap. Each memory read is issued one cycle and used
the next, and every phase ends with 3 idle cycles. So a run lasts exactly

    per sample:  G1*(N_IN+1) + G1 + 6                      (L1, ACT)
               + (layers-1) * (G1*(N_HID+1) + G1 + 6)      (further hidden layers)
               + G2*(N_HID+1) + 3 + 46 + G2                (L2, softmax, error)
               + train * (G2*(N_HID+1) + 3)                (BWD)
    per run:     train * (G2*(N_HID+1) + 3) + 1            (UPD)

The run length is counted from the start cycle to the `done` cycle. At the
default sizes an inference sample takes 109 cycles and a training sample
129; the update at the end of a batch adds 20. The end-to-end testbench
checks this formula for every run. The schedule is simple rather than fast.
Layers and samples could be overlapped, but the source describes no pipeline
to copy.

## Parameters

`gnn_top` parameters (all defaults are choices of this design; the source
gives no sizes):

| name | default | meaning |
|---|---|---|
| `N_IN` | 16 | input vector length T |
| `N_HID` | 16 | neurons per hidden layer (multiple of `L1`) |
| `N_OUT` | 4 | classes (multiple of `L2`) |
| `L1` | 8 | units in mult-add bank 1 and in the tanh bank |
| `L2` | 4 | units in mult-add bank 2, exp tables and mult bank |
| `MAX_BATCH` | 8 | samples the input and label buffers hold |
| `MAX_HL` | 2 | hidden layers buffer1 has room for |

The softmax limit of 1024 (`LIMIT_LOG2 = 10`) is the source's example value.

## Where this design departs from the source

* **Interfaces left out.** The processing system, its DDR memory and the
  AXI links are not part of the RTL. The host port above stands in for them.
* **Buffer roles.** buffer0 holds the inputs and buffer1 the first-layer
  weights. The source says only that X and W are loaded from the two.
* **Where the update is written.** The source's diagram draws the accu
  output going back to the input-side buffer. Its formula, however, uses S2
  (the input of the output layer), which gives the gradient of the
  hidden-to-output weights. The update is written to the hidden-to-output
  weight buffer, following the formula.
* **Bias.** The bias of the neuron model f(Σ w·x + b) is stored as an extra
  weight column and multiplied by a constant 1.0.
* **Hidden-layer widths.** Both hidden layers have N_HID neurons. The source
  allows the widths H1 and H2 to differ.
* **Schedule.** The phases run one after another with no overlap.
* **Own choices everywhere else.** The number formats, table sizes and
  ranges, the divider used for the softmax gain, and all widths.

## Files

* `rtl/gnn_pkg.sv`: formats, the host selector and helper functions.
* `rtl/gnn_top.sv`: the whole engine.
* `rtl/gnn_control.sv`: the sequencer.
* `rtl/mult_add_bank.sv`: used for both mult-add banks.
* `rtl/act_lut.sv`: one loadable table.
* `rtl/tanh_bank.sv`: the activation bank.
* `rtl/softmax_unit.sv`: the softmax.
* `rtl/gain_divider.sv`: the gain divider inside the softmax.
* `rtl/outer_mult_bank.sv`: the mult block.
* `rtl/grad_accu.sv`: the accu block.
* `rtl/gnn_ram.sv`: the RAM behind every buffer.
* `tb/tb_<module>.sv`: a self-checking testbench for each module. Each one
  ends by printing `TB_RESULT checks=N failures=M`.
* `tb/gnn_ref_pkg.sv`: table generators and reference arithmetic shared by
  the testbenches.

`tb/tb_gnn_top.sv` runs the engine at its default sizes. It loads random
weights and one-hot labels, then runs these batches: inference, training
with 5 samples, training with 1 sample, training and inference with two
hidden layers, and training after the tanh table is replaced by ReLU. It
compares every prediction and every weight word after each run with an
integer model of the same arithmetic, written independently in the
testbench. It also checks the cycle count of each run. Finally it checks
that each mechanism occurred at least once: summing over a batch, a weight
update, the second hidden layer, the table switch, a table-range clamp, and
a host write ignored while busy.

`tb/tb_gnn_top_wide.sv` repeats the same test at other sizes: 10 inputs,
12 hidden neurons in three groups of 4, and 8 classes in two output words.
This exercises the softmax, label and error paths with several words per
sample.

`tb/tb_gnn_train.sv` shows that the arithmetic is good enough to learn. The
task has four classes, and each class is a noisy copy of a random
prototype. The first-layer weights are random and stay fixed, and W2 starts
at zero. Each epoch trains on a fresh batch of 8 samples with
gamma = 0.25. After 10 epochs the fixed test batch is classified 8/8
correct. The mean probability given to the true class rises from 0.25 at
the start to about 0.98 after 60 epochs. The test requires at least 7/8
correct and a mean probability above 0.6.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/gnn_pkg.sv tb/gnn_ref_pkg.sv tb/tb_gnn_top.sv --top-module tb_gnn_top
./obj_dir/Vtb_gnn_top
```

Replace `tb_gnn_top` with any other testbench name. Everything runs in well
under a second.
