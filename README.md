# TsetlinWiSARD: a WiSARD classifier that trains itself on chip

A WiSARD weightless neural network classifies a Boolean feature vector without any
multiplication. Each class has a *discriminator* made of many small lookup tables (LUTs). Every
LUT is addressed by a fixed handful of features. The class whose LUTs output 1 most often wins.
Classic WiSARD training writes 1 into every LUT entry a training sample touches. On large data
sets this saturates the tables.

TsetlinWiSARD learns the LUT contents instead. Every LUT entry gets a Tsetlin automaton (TA): a
saturating counter with 2N states. The lower half of the states means "this entry is 0" and the
upper half means "1". Training is driven by mistakes only. When a training sample is
misclassified:

- the addressed TAs of the true class are incremented;
- the addressed TAs of the predicted (wrong) class are decremented;
- each LUT takes part with probability about 0.5, decided by one LFSR bit per LUT.

Inference reads only the top bit of each TA state. After training, the learnt model is an
ordinary WiSARD.

This repository holds synthesizable SystemVerilog for the on-chip training core of the
TsetlinWiSARD architecture (Duan, Sartori, Shafik, Yakovlev, DAC 2026), in its main
configuration, *TsetlinWiSARD-150*:

- 10 classes;
- 150 six-input LUTs per class;
- 32 TA states;
- 784 Boolean input features (a thresholded 28x28 image).

The RTL is an independent implementation written from the published description. It is not the
authors' code.

## Data path of one sample

```
 AXI4-Stream ──► sample_rx ──features──► feature_map ──150 x 6-bit addresses──┐
 (32-bit beats)  (one buffer)            (fixed scatter)                       │
                                                                               ▼
                 ┌──────────── discriminator 0 .. 9 (same addresses) ─────────────┐
                 │  150 x ta_team ──votes──► popcount ──sum──►                    │
                 │  5 x lfsr (32 stages) ──gate bit per LUT──► ta_team           │
                 └───────────────────────────────────────────────────────────────┘
                                        │ 10 sums
                                        ▼
                train_ctrl: register sums ► argmax ► feedback(y: +1, y_hat: -1) ► result
```

| file | role |
|---|---|
| `rtl/tw_pkg.sv` | sizes, feature-scatter function, LFSR seeds and taps, result struct |
| `rtl/lutram64x1.sv` | 64x1 distributed RAM: asynchronous read, synchronous write |
| `rtl/full_adder.sv` | one-bit full adder |
| `rtl/ta_team.sv` | one LUT and its 64 TAs (5 LUTRAMs + 5 full adders) |
| `rtl/lfsr.sv` | Fibonacci LFSR, one random bit per stage |
| `rtl/popcount.sv` | vote count of a discriminator |
| `rtl/argmax.sv` | predicted class; a tie goes to the lowest index |
| `rtl/feature_map.sv` | fixed wiring of features to LUT address bits |
| `rtl/discriminator.sv` | 150 TA teams, the LFSR bank and the popcount of one class |
| `rtl/train_ctrl.sv` | TA initialisation, evaluation schedule, feedback rule |
| `rtl/sample_rx.sv` | AXI4-Stream frame receiver and sample buffer |
| `rtl/tsetlin_wisard_top.sv` | the core |

## The TA team: a LUT whose contents are counters

This is the part of the design that is least obvious.

A 6-input LUT has 64 entries, so it needs 64 TAs. Only one entry is addressed per sample, so
only one TA per LUT can change in a cycle. The 64 TA states are therefore stored *bit-sliced*:

- 2N = 32 states need log2(N)+1 = 5 bits;
- a 64x1 LUTRAM holds bit *b* of all 64 states;
- five LUTRAMs, all addressed by the LUT's 6 features, hold the whole team.

The read is asynchronous. The addressed state `state_rd[4:0]` is therefore available as soon
as the features are.

State *s* (1..32) is stored as *s*−1 (0..31). So:

- `state_rd[4]` is 1 exactly for states N+1..2N (17..32);
- that bit *is* the LUT output used for voting;
- no comparator is needed.

Each LUTRAM bit is paired with a full adder. The five adders form a ripple-carry chain that
computes `state_rd ± 1`:

- increment: operand 0, carry-in 1;
- decrement: operand all ones, carry-in 0.

The chain's carry out shows when a step would leave the state range:

- incrementing from the top state (31) produces carry out 1;
- decrementing from the bottom state (0) is the only decrement with carry out 0.

The write enable is `feedback_en & (dir ? ~cout : cout)`. A TA at state 1 or 2N therefore
stays there. The new value is written back into the same LUTRAM entry on the clock edge.

For initialisation, the controller walks all 64 addresses. On the same LUTRAM write port,
every TA of every LUT is written with:

- state N (stored 15, output 0) or state N+1 (stored 16, output 1);
- the choice is made by the same LFSR bit that later gates that LUT's feedback.

This puts every TA next to the decision boundary, as the algorithm requires.

## Randomness: one LFSR stage per LUT

Each discriminator has ceil(150/32) = 5 LFSRs of 32 stages. That makes 160 bits, of which 150
are used. Stage *i* of the bank gates LUT *i*:

- in a feedback step, LUT *i* of that discriminator updates only if the bit is 1;
- the bank then shifts once.

A bank shifts only when its own discriminator gets feedback or during initialisation. The
behaviour is therefore deterministic, and a testbench can reproduce it exactly.

Every LFSR has its own non-zero seed. The seed is `tw_pkg::lfsr_seed(class, index)`, a
multiplicative hash. The feedback polynomial is x^32 + x^22 + x^2 + x + 1.

Each stage is 1 about half of the time, so the feedback probability is P ≈ 0.5. The algorithm
works with other values of P, but the hardware fixes it at 0.5.

Nearby stages of one LFSR are strongly correlated from step to step. This is a known
limitation of the bitwise-LFSR approach. The original authors also attribute a loss of accuracy
on chip, compared with software training, to short-period imbalances of the LFSR bits.

## Training rule and schedule

`train_ctrl` handles one buffered sample in three clock cycles:

| cycle | action |
|---|---|
| 0 | the 10 vote sums (combinational from the buffered features through the LUTRAMs) are registered |
| 1 | argmax of the registered sums is registered as the prediction ŷ |
| 2 | feedback is applied if needed; `res_valid` pulses; the sample buffer is released |

Feedback is applied only for a training sample with ŷ ≠ y:

- discriminator y gets `feedback=1`, `feedback_dir=1`;
- discriminator ŷ gets `feedback=1`, `feedback_dir=0`.

The TA writes happen on the clock edge that ends cycle 2. A correct prediction or a
classify-only sample changes nothing. Other discriminators never change.

The result `res` is a `tw_pkg::result_t` with four fields:

- `train`: the sample was a training sample;
- `mistake`: ŷ ≠ y;
- `label`: the true class y;
- `pred`: the predicted class ŷ.

After reset the core spends 2^6 = 64 cycles initialising the TAs. `init_done` is low during
that time. Frames still arrive, but the first one waits in the buffer.

## Sample stream format

A sample is one AXI4-Stream frame of 1 + ceil(784/32) = 26 beats of 32 bits.

| beat | content |
|---|---|
| 0 | `[7:0]` class label, `[8]` 1 = train on this sample, 0 = classify only |
| 1..25 | features 32(k−1) .. 32(k−1)+31, lowest feature in bit 0; the last 16 bits are padding |

`tlast` marks beat 25. The receiver has one buffer:

- once a frame is complete, `tready` stays low until the controller has finished with it, so
  the stream sees 3 cycles of back-pressure per sample;
- a frame that ends early (`tlast` before beat 25) is dropped and `frame_err` pulses;
- a final beat without `tlast` is kept, but `frame_err` still pulses.

At one beat per cycle, a sample therefore costs 29 cycles: 26 beats plus 3 cycles of
processing. Smaller data sets (for example 560 or 180 features) can be sent zero-padded to 784.
The padding features are then constants in some LUT addresses, so a core built with
`N_FEATURES` set to the real size is the better choice.

## Feature map

Input bit *b* of LUT *l* is global input *p* = 6*l* + *b*. It is driven by feature

    (263·(p mod 784) + 97·(p div 784) + 11) mod 784

This is a permutation of all features for the first 784 inputs. The remaining 116 inputs make a
second pass in a different order, so 116 features feed two LUTs.

All discriminators share the mapping, as WiSARD requires. In the original work the mapping is a
random shuffle drawn at initialisation. Here it is fixed at elaboration time, which costs no
logic. To use another shuffle, change `tw_pkg::feature_index`. `MAP_A` must stay coprime with
`N_FEATURES`.

## Parameters

Top-level parameters of `tsetlin_wisard_top`. The defaults are in `tw_pkg`.

| parameter | default | origin |
|---|---|---|
| `N_CLASSES` | 10 | paper (TsetlinWiSARD-150) |
| `N_LUTS` | 150 | paper |
| `LUT_INPUTS` | 6 | paper (6-input LUTs, 64x1 LUTRAMs) |
| `STATE_BITS` | 5 | paper: 32 states = log2(16)+1 bits |
| `N_FEATURES` | 784 | paper (MNIST, Fashion-MNIST, Kuzushiji-MNIST) |
| `LFSR_W` | 32 | this design; `tw_pkg::lfsr_taps` also knows 8, 16 and 24 |

The algorithm was also studied in software with other settings:

- 300, 450 or 600 LUTs per class;
- 3- or 9-input LUTs;
- 64 to 256 TA states.

These are re-elaborations of the same RTL. The paper's TsetlinWiSARD-300 is `N_LUTS=300`.
`LUT_INPUTS` other than 6 no longer maps onto a 64x1 LUTRAM, but the RAM module is parameterised
and still works.

## What follows the published architecture, and what is this design's own

Taken from the published description:

- WiSARD structure: a shared feature shuffle, one discriminator per class, vote count and argmax;
- one TA per LUT entry, with states 1..2N and the output given by the upper half;
- start state N or N+1;
- TA states held in log2(N)+1 64x1 LUTRAMs per LUT, each paired with a full adder in a
  ripple-carry chain;
- `feedback` and `feedback_dir` per discriminator, and a per-LUT write enable;
- one LFSR stage per LUT and a distinct seed per LFSR;
- the training rule (increment y, decrement ŷ, only on a mistake);
- samples delivered over AXI by the host processor.

Choices of this design, where the description is silent:

- saturation at the end states through the adder's carry out;
- the initialisation walk and its reuse of the LFSR bits;
- LFSR width, taps and seeds, and when an LFSR shifts;
- the feature scatter formula;
- tie-breaking toward the lower class index;
- the 3-cycle schedule;
- the stream frame format, the single buffer and the error handling;
- the result port.

Departures and limits:

- The on-chip system of the original work also contains the processor, its AXI interconnect
  and the thresholding that turns raw data into Boolean features. Thresholding is done off
  chip. Here the core stops at an AXI4-Stream slave and a result port.
- The published latency is 6.4 µs per sample, data transfer included. This RTL takes 29 cycles
  per sample once the stream is at full rate. No clock frequency is given in the source, so the
  two cannot be compared directly.
- Resource figures (33,596 LUTs and 25,927 FFs on an XC7Z020) were not reproduced. This RTL
  keeps the 150-bit sample path and the sums in flip-flops, and lets synthesis map the TA teams
  to LUTRAMs.
- The vote sum is computed combinationally from the LUTRAM outputs through a 150-input popcount
  in one cycle. At high clock rates a pipeline register may be wanted there.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of cycles if it hangs.
With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/tw_pkg.sv tb/tb_ta_team.sv \
          --top-module tb_ta_team -Mdir obj_ta_team -o sim && obj_ta_team/sim
```

Replace `ta_team` with any block name. The block testbenches are:

| testbench | what it checks |
|---|---|
| `tb_lutram64x1` | asynchronous read and synchronous write against a reference array |
| `tb_ta_team` | every TA against a reference array, the flip exactly at N/N+1, saturation at both ends |
| `tb_lfsr` | against an independent model of the polynomial, the share of ones per stage, period 255 for 8 stages |
| `tb_popcount`, `tb_argmax` | against reference counts and a first-maximum scan, ties included |
| `tb_feature_map` | the scatter formula, and that each feature is used once in the first pass |
| `tb_discriminator` | vote sums against a model of the LFSR bank and all TA states; that about half the LUTs update per step |
| `tb_train_ctrl` | the 64-cycle initialisation walk, the 2-cycle result timing, the feedback pattern for mistakes, correct samples and classify-only samples |
| `tb_sample_rx` | frame assembly with random gaps, back-pressure, dropped short frames, missing `tlast` |

Two end-to-end benches share `tb/tw_e2e_bench.sv`:

- `tb_tsetlin_wisard_top` runs the core with 30 LUTs per class;
- `tb_tsetlin_wisard_full` runs it at the default size, with no parameter overrides.

Both keep a reference model of the whole algorithm and require every prediction to match it
exactly. The task is synthetic: 10 random prototypes with 8% of the bits flipped per sample. The
benches first classify 30 random vectors with the untrained core, then train 4 epochs of 120
samples, and then classify 80 held-out samples.

The benches check:

- that each result arrives 3 cycles after the last beat of its frame;
- the test accuracy: above 85% for the reduced size, 90% for the full size;
- that each of these actually happens: TA initialisation, back-pressure, feedback steps,
  correct training samples, classify-only samples, argmax ties and a dropped frame.

TA saturation is counted but not required here, because on this easy task no TA gets 16 net
steps from its start state. `tb_ta_team` and `tb_discriminator` drive TAs into both end states.

Typically training mistakes fall from about 30 in the first epoch to none by the third. The
full-size bench compiles 7,500 LUTRAM instances. Verilator's C++ build of it takes several
minutes; the simulation itself takes about a second.

`tb_tsetlin_wisard_shapes` elaborates the core for two smaller input shapes, with 50 LUTs
per class in both:

- 560 features and 6 classes;
- 180 features and 5 classes.

It runs the same bench on both side by side. This shows that `N_FEATURES`, `N_CLASSES` and
`N_LUTS` can be changed without touching the RTL.

The tests do not cover real data sets. The RTL has not been taken through FPGA synthesis or
timing closure.
