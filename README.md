# A shared-unit CNN-LSTM time-series classifier

Biomedical signals such as ECG, heart sounds and surface EMG change slowly.
They are sampled at a few hundred to a few thousand hertz. A classifier for
them, running on a 100 MHz clock, has tens of thousands of cycles per input
window. This design uses that slack to save area. It does not build a wide
array of multipliers. Instead, one small set of shared units is used over and
over by a controller that works through the network one state at a time:

* 32 multiply-accumulate lanes,
* four look-up-table non-linearity lanes,
* weight banks and internal memories.

Weights are ternary (-1, 0, +1, two bits each) wherever possible, so a 64-bit
memory read feeds all 32 lanes in the same cycle.

The network is a small CNN followed by an LSTM:

```
for each of q windows x (M channels x omega_s samples):
    r1 = ReLU(conv1d(x,  W1))          ternary, f1 filters of length k1   (optional)
    r2 = ReLU(conv1d(r1, W2))          ternary, f2 filters of length k2   (optional)
    P  = W_fc^T r2                     12-bit weights, length M*omega_s   (optional)
    xx = [h, x + P]                    residual sum (just [h, x] without the CNN)
    f, i, o = sigma(W_{f,i,o}^T xx)    ternary
    g       = tanh(W_c^T xx)           ternary
    c = f*c + g*i
    h = o*tanh(c)
after the q-th window:
    y = W_y^T h                        12-bit weights, N_y classes
    label = argmax(y)
```

All biases are zero. The LSTM's state h and c carries over from window to
window. It is cleared when a new sequence of q windows starts. The sizes are
run-time settings (`cfg_t`): N_h, omega_s, q, N_y, M, the filter counts and
the kernel lengths. They are bounded by the memory depths, which are
parameters.

## Number format

Every activation, feature-map value, gate value, state value and
full-precision weight is a 12-bit two's-complement number with 8 fraction
bits, so the range is [-8, 8) in steps of 1/256. Sums are kept in 32-bit
accumulators. They return to 12 bits with saturation:

* ternary products already have 8 fraction bits and are not shifted;
* 12 x 12-bit products have 16 fraction bits and are shifted right
  arithmetically by 8 (a floor, no rounding).

The same rule holds for the element-wise products hf*c + hc*hi and
ho*tanh(c): the two products are added first, then shifted by 8 and
saturated.

Ternary weight codes are `2'b01` = +1, `2'b11` = -1 and `2'b00` = 0.
`2'b10` also reads as 0.

## The non-linearities

Sigmoid and tanh are 64-entry tables of 10-bit words. The table address is

    U = floor((u - u_min) / du),   du = (u_max - u_min) / 64

with [u_min, u_max) = [-8, 8) for sigmoid and [-4, 4) for tanh. The bounds are
powers of two, so the address is an addition and a bit slice:

* sigmoid: `(u + 2048) >> 6`;
* tanh: `(u + 1024) >> 5`, held at 0 or 63 outside [-4, 4).

Entry i holds `round(256 * f(u_min + (i + 0.5) * du))`, the function at the
centre of its bin, in the same 8-fraction-bit format
(`rtl/tsc_nf_sigmoid.hex`, `rtl/tsc_nf_tanh.hex`). ReLU and pass-through use
the same lanes. The look-up is combinational. A value read from memory goes
through it and is written back at the next clock edge.

## Units and the bus

| module | role |
|---|---|
| `tsc_mc` | master controller: the state machine, all addresses, the enables `en_macs`, `en_nfs`, `en_ims`, `en_wbs` |
| `tsc_wb` | weight banks: `WB_CNN` (ternary conv weights), `WB_FC` (4 x 12-bit per word), `WB_LSTM` (4 gates x 8 ternary weights per 64-bit word), `WB_Y` (one 12-bit weight per word) |
| `tsc_im` | internal memories: input window X, feature maps FM1 and FM2, LSTM input XIN = x + P, H, C, four gate banks G0..G3, scores Y |
| `tsc_mac_array` | 32 MAC lanes; lanes 0 and 1 double as the two element-wise multipliers |
| `tsc_nf` | four sigmoid / tanh / ReLU lanes |
| `tsc_top` | wiring and the 96-bit bus |

The bus (`bus_t` in `tsc_top`) has two fields:

* a 64-bit data field, which carries either a weight word or four 12-bit
  values from the gate banks;
* a 32-bit side field, whose low 12 bits carry the one activation broadcast to
  all MAC lanes.

Results go back to the internal memories over a separate write-back path.
Each unit is enabled only in the states that use it.

### Memory timing

The memories behave like FPGA block RAM read on the falling edge:

1. The controller registers an address at a rising edge.
2. The memory reads it at the following falling edge.
3. The consumer acts at the next rising edge.

That consumer is either a MAC accumulate or an internal-memory write. It uses
the same registered control word as the read, so every unit runs at one item
per clock with no stalls. The enables are registered with the rest of that
control word, so an enable covers the cycle in which its unit acts.

## The schedule

One state is active at a time. States S1 to S8 follow the original state
machine. IDLE, INIT and WAIT are added for the host interface.

| state | work | lanes | cycles per window |
|---|---|---|---|
| INIT | clear h and c (once per sequence) | - | 2 N_h |
| WAIT | host loads the window, pulses `win_valid` | - | - |
| S1 | conv layer 1, then layer 2, ReLU on write-back | one lane per filter | n1 (G1 M k1 + f1) + n2 (G2 f1 k2 + f2) |
| S2 | P = W_fc^T r2, write-back adds x | 4 | ceil(L/4) (f2 n2 + 4) |
| S3 | the four gate sums W^T xx | 4 gates x 8 neurons | ceil(N_h/8) (N_h + L + 32) |
| S4 | sigma, sigma, sigma, tanh | 4 NF | N_h |
| S5 | c = f c + g i | 2 multipliers | N_h |
| S6 | tanh(c) into G3 | 1 NF | N_h |
| S7 | h = o tanh(c) | 1 multiplier | N_h |
| S8 | last window only: y = W_y^T h, arg-max; otherwise 1 cycle | 1 | N_y (N_h + 1) |

In the table, n1 = omega_s - k1 + 1, n2 = n1 - k2 + 1 (convolutions without
padding), and L = M omega_s is the LSTM input length. G1 and G2 are the
filter groups of each layer: 1 for up to 32 filters, 2 for 33 to 63. S1 and S2 are skipped
when `cfg.cnn_en` is 0.

S1, S2, S3 and S8 share one matrix-vector sequencer. Each pass has two
phases:

1. **Accumulate.** K inputs enter the lanes, one per clock. Each input is
   broadcast to all lanes together with one 64-bit weight word.
2. **Write back.** The lanes' results go to memory, one per clock. ReLU
   applies in S1, and the residual x is added in S2.

In S1 a pass is one output position. Every filter works on it at once, and the
same weight words are read again for every position. There is one lane per
filter, so a layer with more than 32 filters is done in two rounds. The first
round runs all positions for filters 0 to 31, and the second round runs them
again for the remaining filters, with their own weight words. In S3 a pass is eight
neurons of each of the four gates.

Timing of `out_valid`: it pulses one cycle after the last score is written,
and `label` holds the class with the largest score. When several classes tie,
the lowest index wins. The scores can be read back through `y_rd_addr` /
`y_rd_data`.

### Weight layout for loading

Weights are loaded through `wb_wr_*`, one word per write. The word order
follows the sequencer:

| bank | word address | contents |
|---|---|---|
| `WB_CNN` layer 1 | (g*M + ch)*k1 + a | bits [2o+1:2o] = W1[32g+o][ch][a] |
| `WB_CNN` layer 2 | G1*M*k1 + (g*f1 + ch)*k2 + a | bits [2o+1:2o] = W2[32g+o][ch][a] |
| `WB_FC` | p*K + k, K = f2*n2 | bits [12l+11:12l] = W_fc[4p+l][k] |
| `WB_LSTM` | p*(N_h+L) + k | bits [16g+2e+1:16g+2e] = W_g[8p+e][k], g = f, i, o, c |
| `WB_Y` | p*N_h + k | bits [11:0] = W_y[p][k] |

Here g is the filter group, 0 for layers of up to 32 filters.
Input index k of the FC layer runs over the flattened feature map r2[o*n2 + i].
Input index k of the LSTM is h[k] for k < N_h and (x + P)[k - N_h] after that.
The input window is written channel-major: x[ch*omega_s + t].

## Host interface

1. Load the weights and set `cfg`.
2. Pulse `start`. The controller clears h and c, then raises `win_ready`.
3. For each of the q windows, write the samples through `x_wr_*` while
   `win_ready` is high, then pulse `win_valid`. The next `win_ready` means the
   window has been absorbed.
4. After the q-th window, `out_valid` pulses with `label`.

`busy`, `state` and `step` show progress. The enables are outputs too, for
clock or power gating outside the design.

## Sizes

The parameter defaults are sized for the largest networks of the original
study:

* **LSTM input.** `X_DEPTH = 1280` holds 128 EMG channels x a 10-sample window.
* **Hidden size.** `NH_MAX = 350`.
* **Classes.** `NY_MAX = 12`.
* **Gate weights.** `LSTM_DEPTH = 71720` = ceil(350/8) x (350 + 1280) words,
  4.6 Mbit.
* **Feature maps.** `FM_DEPTH = 2500` holds 50 filters x a 50-sample
  window.
* **FC weights.** `FC_DEPTH = 32500` = ceil(50/4) x 2500 words, for the same
  map.
* **Filters per layer.** Up to 63, in groups of 32 lanes; the 6-bit
  configuration fields set the limit.

| workload | fits | cycles per window (100 MHz) |
|---|---|---|
| sEMG 8 gestures: no CNN, 128 ch x 5, N_h 250, 30 windows, 8 classes | yes | about 30.5 k (305 us) against a 5 ms window |
| sEMG 12 gestures: no CNN, 128 ch x 10, N_h 350, 15 windows, 12 classes | yes | about 74.5 k (745 us) against a 10 ms window |
| ECG200 / ECG5000: CNN, window 20, N_h 350, 2 / 5 classes | yes | about 22 k |
| PhysioNet 2016 / 2017: CNN, window 50, N_h 350, 2 / 4 classes | yes | about 41 k |
| chaotic-series CNN-LSTM: 20 and 50 filters (kernels 5 and 3 assumed), window 50, N_h 350 | yes | about 58 k |
| chaotic-series LSTM: no CNN, window 50, N_h 350 | yes | about 20 k |

The original study quotes 35 us and 90 us for the two sEMG networks. Those
figures count one operation per weight of one gate at 64 operations per
cycle. The schedule above does all four gates, one MAC per weight, 32 per
cycle, so it is 4 to 8 times slower than those figures. It still comfortably
meets every window period.

## Where this RTL departs from, or adds to, the original description

These are this design's own choices:

* **Number format.** The position of the binary point, the accumulator width,
  the floor rescale and the saturation.
* **Look-up tables.** Mid-bin table values, and holding the tanh address at
  its ends.
* **Bus and memory layout.** The field layout of the bus, the split of the
  internal memories into buffers, and every weight-word layout.
* **Host interface.** The handshake and the arg-max tie rule.
* **Filter groups.** Layers of more than 32 filters run as two groups of
  lanes. The original cycle count for the convolution state divides the
  filter count by 32, which suggests this, but the description does not
  spell it out.

These resolve conflicts in the original description:

* **Convolutions without padding.** The description says it uses zero
  padding, but its cycle formula uses the output length omega_s - m + 1. This
  design follows the formula.
* **Four FC lanes in S2.** The description says 32 MACs work in parallel on
  the FC layer, but the weight banks read at most 64 bits per clock. That is
  four 12-bit weights, so S2 uses four lanes.
* **Wider reads in S2 and S5.** The internal memories read four 12-bit values
  at a time (48 bits), plus one scalar port. So in S2 and S5 they deliver
  60 bits per clock, more than the stated 48.

These are missing:

* The FC layer of S2 is read as a plain fully-connected layer from the
  flattened last feature map to a vector as long as the window. The original
  equation sums over filters and positions without saying what the output
  index means.
* Only the two-layer CNN is supported. A third layer, or a layer with more
  than 63 filters, would need extra sequencing.
* There is no pipelined variant with several active states.
* Training is not part of the design: no weight quantisation and no
  straight-through estimator.
* Reset clears only the control state. The memories keep their contents.

## Verification

Every unit has a self-checking testbench:

| testbench | what it checks |
|---|---|
| `tb_tsc_nf` | all 4096 inputs through each function against real-valued sigmoid and tanh |
| `tb_tsc_mac_array` | random ternary and full-precision sums, saturation, the element-wise products, enable behaviour |
| `tb_tsc_wb`, `tb_tsc_im` | random write and read-back with the falling-edge timing |
| `tb_tsc_mc` | every accumulate and write-back address the controller issues, the cycles per state, the arg-max and the enables, against lists built from the schedule above |
| `tb_tsc_top` | three whole classifications at small sizes: with the CNN, without it, and with layers of more than 32 filters |
| `tb_tsc_top_full` | two classifications at the default sizes: the 12-gesture sEMG network, and a PhysioNet-sized CNN-LSTM |
| `tb_tsc_top_workloads` | the other evaluated networks at default hardware size: 8-gesture sEMG, ECG200, ECG5000, PhysioNet 2016, and the chaotic-series LSTM and CNN-LSTM (50-filter layer) |

The three `tb_tsc_top*` testbenches share their checking environment,
`tsc_top_harness`. It contains a bit-exact reference model of the arithmetic.
The model computes its tables from `exp`, not from the hex files. After every
window it compares h and c, and at the end of a sequence the scores and the
label. It also checks the cycles per state, and it counts failures for any
mechanism that never occurred: CNN on and off, ReLU clipping, saturation, the
tanh range clamp, windows without output, and units switched off. The small
and workload runs also require a layer with two filter groups. The
full-size run takes about 2.6 M cycles and the workload run about 5.1 M,
each a few seconds in Verilator.

To run a testbench from the directory that holds `rtl/` and `tb/` (the NF
tables are read by the path `rtl/...`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/tsc_pkg.sv tb/tb_tsc_top.sv --top-module tb_tsc_top -Mdir obj -o sim
./obj/sim
```

Each testbench ends with `TB_RESULT checks=N failures=M`.

## Files

* `rtl/tsc_pkg.sv`: the shared types (configuration, enums) and constants.
* `rtl/tsc_*.sv`: one module per file.
* `rtl/*.hex`: the two 64-entry tables.
* `tb/`: the testbenches and `tsc_top_harness`.
