# Real-time qubit state discrimination with a tiny neural network in FPGA logic

A superconducting qubit is read by sending a microwave tone through its
readout resonator and looking at how the returned tone is shifted in phase
and amplitude. Usually the digitised signal is shipped to a host computer,
which decides whether the qubit was in |0> or |1>. That takes milliseconds,
far longer than the qubit lives, so the answer cannot be used inside a
running circuit.

This design makes the decision in the FPGA fabric, next to the ADC. For each
qubit it:

1. mixes the ADC samples down with a digital local oscillator (DLO) whose
   amplitude follows a trained **weighting envelope**, so samples that carry
   more state information count more;
2. sums the mixed samples of the readout window into one complex point
   I + jQ (one *shot*);
3. scales that point into [0, 1) with shifts only; and
4. feeds it through a 2-8-4-1 fully connected network with ReLU hidden
   layers and a sigmoid output implemented as a 4096-entry table.

The network returns a probability and a state bit **27 clocks (54 ns at
500 MHz)** after the shot enters it. That is fast enough for mid-circuit
measurement: the sequencer can branch on the outcome, e.g. to apply a
conditional gate. Eight qubits share one ADC stream by frequency
multiplexing; each qubit has its own channel with its own DLO frequency,
weights and network parameters.

```
           shared ADC stream (SPC samples per clock)
                         |
     +-------------------+-------------------  ... 8 channels
     v
 weighted DLO mixer <-- NCO (cos/sin)  <-- envelope weights W_I, W_Q
     |
 accumulator  (one I+jQ per readout window) ---> shot stream to host
     |
 shot buffer (16 shots)
     |
 data scaling -> layer 1 -> ReLU -> layer 2 -> ReLU -> layer 3 -> sigmoid LUT
     ^                ^                 ^                 ^           |
     +---------- model parameters (per-qubit RAM, loaded into registers)
                                                                      v
                                              state / probability -> sequencer
                                                                   -> result memory
```

## Number formats

Everything after the accumulator is fixed point sized for 27 x 18 DSP
multipliers:

| Quantity | Width | Format |
|---|---|---|
| network data (inputs, layer outputs) and biases | 27 | signed Q10.17 |
| weights | 18 | signed Q6.12 |
| raw product | 45 | Q16.29; bits [38:12] are kept, i.e. back to Q10.17 |
| accumulated I and Q | 32 | signed integer |
| probability | 17 | unsigned fraction (0.17) |

Products are truncated, not rounded, and sums wrap in 27 bits. The ten
integer bits leave headroom for hidden-layer values larger than 1. Values
beyond about +/-512 wrap around.

## Readout window and weighted DLO

`dlo_nco` is a 32-bit phase accumulator advanced by `SPC x fword` each clock.
It gives every lane k of a clock its phase `acc + k*fword + phase0`. The top
10 bits address a 1024-entry cosine table, computed at elaboration, and the
sine is read from the same table a quarter period back.

`dlo_weight_mem` holds one `{W_Q, W_I}` pair (unsigned Q1.15) per sample of
the window. There are `WROWS` = 1024 rows of `SPC` = 4 samples, which is
4096 samples or 2.048 µs at 2 GS/s. The host writes them per sample index.

`weighted_dlo_mixer` forms `W_I*cos` and `-W_Q*sin`, multiplies each by the
real ADC sample and adds the four lanes, taking 3 clocks. The weights are
applied per component, to I and to Q separately. Each product is truncated
back by 15 bits.

The sequencer opens a window with `rdo_start` and a length `rdo_len` in clocks.
Window row r reads weight row r, so the envelope is aligned to the start of
the window, not to absolute time. The NCO never resets: its phase runs freely
from the moment the frequency word is written, and `phase0` is what lines it
up with the tone.

## Shot accumulation and buffering

`accumulator` sums the mixer output from the first to the last row of a
window. The shot appears one clock after the last row, 5 clocks after the
window's last clock at the channel pins. Each shot does two things:

- It is driven out on `acc_valid/acc_i/acc_q`, so the host can collect
  training data.
- It is pushed into `acc_buff`, a 16-entry FIFO.

The network takes one shot per clock from that buffer whenever its parameters
are loaded. Shots measured while a model is (re)loading simply wait. A shot
arriving at a full buffer is dropped and sets a sticky `buf_overflow` flag.

## Data scaling

The network was trained on data normalised to [0, 1) with the min-max rule.
The FPGA version avoids division by requiring the training set's range to be
symmetric about its mean and rounded to a power of two (max - min = 2^(n+1)):

```
norm = ((x + 2^n - mu) << 17) >> (n + 1)
```

Here `mu` is the training mean and `n` is per component. The `<< 17` puts the
result straight into the 17 fraction bits. For example x = 48, mu = 0, n = 22
gives 65536 = 0.5. `data_scaling` does this in 4 pipeline stages. Points
outside the training range give values outside [0, 1), including negative
ones, and the network still handles them.

## The network pipeline

`dense_layer` is one layer: a grid of `fixed_mult` (2 clocks each), then a
binary adder tree. Each tree level is one clock and adds at most three
operands, since the bias joins at the last level. Optional registers at the
end pad the layer to its nominal latency. `fnn_pipeline` chains the stages:

| Stage | Clocks |
|---|---|
| data scaling | 4 |
| register | 1 |
| layer 1 (2 inputs, 8 nodes) | 3 |
| ReLU | 1 |
| register | 1 |
| layer 2 (8 inputs, 4 nodes) | 6 (5 of arithmetic, 1 pad) |
| ReLU | 1 |
| register | 1 |
| layer 3 (4 inputs, 1 node) | 5 (4 of arithmetic, 1 pad) |
| register | 1 |
| sigmoid address | 2 |
| table read | 1 |
| **total** | **27** |

The per-stage counts for normalization, layers and sigmoid are the published
ones. The three plain registers make the total come out at the published
27 clocks. The padding in layers 2 and 3 is needed because a tree of 8 or 4
inputs needs one clock less than the published layer latency. The pipeline
accepts a new shot every clock. An assertion in `fnn_pipeline` checks that
every input produces an output exactly 27 clocks later.

### Sigmoid table

`sigmoid_lut` maps the layer-3 output x to the table address in two clocks:

- first it compares x with -8 and +8;
- then it takes the saturated address, or the bits of x at a 1/256 step
  offset by +8.

Entry a holds `sigma(-8 + (a + 0.5)/256)` as a 17-bit fraction, computed at
elaboration with `$exp`. The state bit is the address MSB, which equals
`x >= 0` and so `probability >= 0.5`. The 4096 entries, addresses 000..FFF,
are the published size. The input range, step and midpoint sampling are this
design's choice.

## Model parameters

Each channel has a 128-word parameter RAM written by the host (`param_mem`),
one value per 32-bit word, sign-extended:

| Word | Content |
|---|---|
| 0-15 | W1[node][input] (8 x 2, Q6.12) |
| 16-23 | B1 (Q10.17) |
| 24-55 | W2[node][input] (4 x 8) |
| 56-59 | B2 |
| 60-63 | W3 (1 x 4) |
| 64 | B3 |
| 65, 66 | n for I, n for Q (5 bits) |
| 67, 68 | mu for I, mu for Q (32 bits) |

A load command copies the RAM into the registers that feed the network, one
word per clock. `params_ready` drops for the load and rises again 71 clocks
after the command. The network is held while it is low, so a model can be
replaced at run time without mixing old and new parameters in one decision.

## Results and the host interface

A decision appears on `state_valid/state/prob` for the sequencer. It is also
written to a 1024-entry result memory (`state_buffer`) as
`{14'b0, state, prob[16:0]}`. The memory stops at full (`res_full`) until a
clear command.

In `qubicml_top`, `cfg_qubit` selects the channel that a configuration write
(`cfg_we/cfg_addr/cfg_wdata`) goes to. The address map, set by `cfg_addr[15:14]`:

| Region | Content |
|---|---|
| 0 | control: word 0 frequency word, word 1 phase offset, word 2 command (bit 0 load model, bit 1 clear results) |
| 1 | parameter RAM |
| 2, 3 | envelope weights by sample index |

`rd_qubit/rd_addr` read a channel's result memory; the data arrives on
`rd_data` two clocks later.

## What is and is not modelled

- ADC, DAC, readout pulse generation, the pulse sequencer and the training
  software are outside this RTL. The top brings out the ADC samples, the
  readout-window controls, the decisions and the shot stream instead.
- This design's own choices, none of them published:
  - the sample rate of 4 samples per clock;
  - the NCO construction and the weight format;
  - the buffer depths and the overflow policy (the newest shot is dropped);
  - the parameter word map, the load sequence and the host register map;
  - the sigmoid input range.
- The envelope weights are applied per component (W_I to I, W_Q to Q). Each
  weight is the absolute difference between the mean |0> and |1> trajectories
  of its component at that sample. The weights are therefore real and
  non-negative, and need no complex multiply.
- Each channel's network uses 52 multipliers (8x2 + 4x8 + 1x4), one per
  weight, which matches the published 52 DSP slices per qubit. The pipeline
  registers are more numerous than the published flip-flop count, because
  every stage here is registered in full.
- Arithmetic is truncating everywhere. A trained model must be quantised with
  the same rules (the testbench reference functions show them) to reproduce
  the hardware bit for bit.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against an
independent model in `tb/qubicml_ref_pkg.sv` (fixed-point multiply, scaling,
ReLU, sigmoid address and table entry, and the whole network). Each checks
the latencies given above, ends with
`TB_RESULT checks=<n> failures=<n>`, and has a watchdog.

`tb_qubicml_top` runs the full 8-qubit design at its default sizes. It
synthesises eight readout tones, each with noise and a phase that depends on
the prepared state, and uses a simple threshold model for the network.
Readout windows of 500 ns, 600 ns, 1 µs, 1.5 µs and 2 µs are all used (250
to 1000 clocks). The feed-forward rounds use 500 ns windows, so the state bit
is ready about 283 clocks (about 566 ns) after the window opens. It
checks every decision bit-exactly and exercises, and counts:

- shots that wait for a model load;
- buffer overflow;
- all eight qubits measured at once;
- conditional feed-forward (a bit-flip protocol in which one qubit's result
  decides what is prepared next on another);
- a run-time model reload that inverts one qubit's rule;
- shot-to-decision latency (28 clocks through an empty buffer);
- result-memory readback.

It fails if any of these never happened.

Simulate any testbench with plain Verilator, listing the package first:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_qubicml_top \
    rtl/qubicml_pkg.sv rtl/*.sv tb/qubicml_ref_pkg.sv tb/tb_qubicml_top.sv
./obj_dir/Vtb_qubicml_top
```

The 4096-entry sigmoid table is evaluated with real arithmetic at
elaboration. Lint and elaboration therefore need a few GB of memory.
