# OS-ELM Q-Network core: Q-learning on an FPGA without backpropagation

This is synthesizable SystemVerilog for the programmable-logic half of an
on-device reinforcement learner. The learner approximates the Q-function
with a network that has a single hidden layer and is trained by OS-ELM
(Online Sequential Extreme Learning Machine). The input weights are random
and never change. Only the output weights are learned, by recursive least
squares, one experience at a time. Training therefore needs no gradient
descent, no backpropagation and no experience-replay buffer. With a batch
size of 1, the only division in a training step is one scalar reciprocal.

The design follows the architecture published by H. Watanabe, M. Tsukada
and H. Matsutani in "An FPGA-Based On-Device Reinforcement Learning Approach
using Online Sequential Learning". Their core ran at 100 MHz in a Zynq
XC7Z020 (PYNQ-Z1 board) next to the Cortex-A9 host processor. This RTL is
an independent implementation of that description. The publication gives
the algorithm, the number format, the memory contents and the rule of one
shared set of arithmetic units. It gives no cycle-level design, so the
schedules, interfaces and timing here are this implementation's own.

## 1. The learning algorithm the core serves

The network sees an input vector `x` of `N_IN = N_STATE + 1` values: the
environment state plus one number that encodes the action. The core's
defaults are the cart-pole task: 4 state values and 2 actions, encoded as
-0.5 and +0.5. This is the "simplified output model". Its single output is
`Q(s, a)`, so the Q-learning target `r + (1-d)·γ·max_a Q(s', a)` can be
used directly as the training label. The forward pass is

    h = ReLU(x·α + b)          (1 × N_HID)
    Q = h·β                    (scalar)

Each hidden node applies ReLU to its input weights `α` (N_IN × N_HID) and
bias `b`. The output weights are `β` (N_HID × 1). Training on one
experience with label `t` is the OS-ELM update for batch size 1:

    P ← P − P hᵀ (1 + h P hᵀ)⁻¹ h P
    β ← β + P hᵀ (t − h β)                 (P on the right is the new one)

`P` (N_HID × N_HID) is the inverse of the regularised correlation matrix of
all the hidden rows seen so far.

These techniques keep the learning stable:

| technique | what it does | where it lives |
|---|---|---|
| fixed target network | two networks, θ1 (trained) and θ2 (frozen, copied from θ1 every `UPDATE_STEP` = 2 episodes); they share `α` and `b` and differ only in `β` | two β memories in the core; `OP_SYNC` copies β1 to β2 |
| Q-value clipping | label `t = clip(r + (1-d)·γ·maxQ, −1, 1)` | inside `OP_TRAIN` |
| random update | each step is trained only with probability ε2 = 0.5, to weaken the correlation between successive samples | host decides whether to issue `OP_TRAIN` |
| spectral normalisation of α | α is divided by its largest singular value once, offline | host, before loading |
| L2 regularisation of β | initial training uses `P0 = (H0ᵀH0 + δI)⁻¹`, δ = 0.5 | host, initial training |
| ε-greedy actions | greedy with probability ε1 = 0.7, random otherwise | host |

### Division of work

| step | done by |
|---|---|
| random α, b, β; spectral normalisation of α | host |
| first N_HID steps: predict in software, act, observe | host |
| initial training (β0, P0) with L2 regularisation | host |
| load α, b, β(θ1), β(θ2) and P0 | host → core (load port) |
| **choose an action: Q(s_t, a) for every a with θ1** | **core, `OP_PREDICT` bank 0** |
| act, observe (s_t+1, r_t, d_t) | host / environment |
| **max_a Q(s_t+1, a) with θ2** | **core, `OP_PREDICT` bank 1**; the host takes the max |
| **label, clipping and OS-ELM update of β(θ1) and P** | **core, `OP_TRAIN`** |
| θ2 ← θ1 every second episode | host issues **`OP_SYNC`** |

## 2. Number format and arithmetic

Every value is a 32-bit two's-complement fixed-point word with 20 fraction
bits (Q20). The range is about ±2048 and the step is 2⁻²⁰ ≈ 9.5·10⁻⁷.
The core has exactly one adder/subtractor (`fx_add`), one multiplier
(`fx_mul`) and one divider (`fx_div`). The predict and training sequencers
share them, and at most one sequencer runs at a time.

* `fx_add` is combinational and saturates on overflow.
* `fx_mul` gives its result one cycle after its operands. It takes the
  64-bit product, shifts it right arithmetically by 20 (which truncates
  toward −∞) and saturates it. A 32×32 product uses four DSP slices on a
  7-series device.
* `fx_div` is a restoring divider that makes one quotient bit per cycle.
  It takes 54 cycles from `start` to `done`. It truncates the quotient's
  magnitude and saturates. Dividing by 0 returns the saturated value with
  the sign of the dividend. The core uses it once per training step.

The rounding and saturation rules are this implementation's own. The
source only fixes the format.

## 3. The training step, as scheduled

`oselm_seq_train` computes the update above with two exact algebraic
shortcuts. Each saves a full N_HID² pass:

* `h P` is taken as `(P hᵀ)ᵀ`, because `P` is symmetric. The update keeps
  the stored words exactly symmetric: element (i, j) subtracts `w_i·u_j`
  and element (j, i) subtracts `w_j·u_i`, which come from the same rounded
  factors. The host must therefore load a symmetric `P0`.
* The new `P hᵀ` equals `u / s`, where `u = P_old hᵀ` and
  `s = 1 + h P_old hᵀ`. This identity holds exactly in real arithmetic.

The step runs in six phases, each a sequence of single multiply-adds:

| phase | work | cycles |
|---|---|---|
| label | `t = clip(r + (1−d)·γ·maxQ)` | 3 |
| hidden | for each j: `h_j = ReLU(b_j + Σ_i x_i α_ij)` → H buffer; `y = Σ h_j β_j`; then `e = t − y` | N·(3·N_IN+5) + 1 |
| u | for each i: `u_i = Σ_j P_ij h_j` → U buffer; `s = 1 + Σ h_i u_i` | N·(3N+3) |
| reciprocal | `1/s` on the divider | 55 |
| update | for each i: `w_i = u_i·(1/s)`; `β_i += w_i·e`; for each j: `P_ij −= w_i·u_j` | N·(3N+5) |

Every multiply-add costs 3 cycles: RAM read, multiply, then add and write.
The sequencer has no pipelining. A step takes about 6·N_HID² cycles:
26,428 cycles from `start` to `done` at N_HID = 64, or 264 µs at 100 MHz.
The testbench compares the result, within 10⁻³, with a floating-point
evaluation of the textbook update without the shortcuts. It also compares
it bit for bit with a fixed-point model.

## 4. Prediction

`oselm_predict` evaluates `Q(s, a_k)` for every action in turn. It
recomputes the hidden layer for each action, because the action is an
input. No hidden-row buffer is needed: each `h_j` is used as soon as it
is computed. The sequencer costs 3·N_IN + 5 = 20 cycles per hidden node
and per action, i.e. N_ACT·N_HID·20 + 1 = 2561 cycles from `start` to
`done` at the defaults. The core connects the sequencer's β port to
β(θ1) or β(θ2) according to `cmd_bank`.

## 5. Memories

All memories are single-port synchronous RAMs (`oselm_bram`). Reads have
one cycle of latency and are read-before-write. Contents start at zero.

| memory | words | address | written by |
|---|---|---|---|
| α | N_IN·N_HID | i·N_HID + j | host |
| b | N_HID | j | host |
| β(θ1) | N_HID | j | host, `OP_TRAIN` |
| β(θ2) | N_HID | j | host, `OP_SYNC` |
| P | N_HID² | i·N_HID + j | host, `OP_TRAIN` |
| H, U | N_HID each | i or j | `OP_TRAIN` (scratch) |

In total that is N_HID² + 10·N_HID words:

| N_HID | words | bits |
|---|---|---|
| 32 | 1,344 | 43 k |
| 64 (default) | 4,736 | 152 k |
| 128 | 17,664 | 565 k |
| 192 | 38,784 | 1.24 M |
| 256 | 68,096 | 2.18 M |

The P matrix dominates the total. The original implementation reports
much higher block-RAM utilisation: 91 % of the XC7Z020 at 192 nodes, and
no fit at 256. It evidently kept more N×N intermediates than this design,
which holds only P.

## 6. Core interface (`oselm_qnet_core`)

Parameters: `N_STATE` = 4, `N_ACT` = 2, `N_HID` = 64. N_HID must be at
least 2. The source evaluates N_HID = 32 … 256.

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of all control state |
| `cfg_gamma` | in | discount rate γ (Q20); the source gives no value, and the testbenches use 0.99 |
| `ld_en`, `ld_we`, `ld_sel`, `ld_addr`, `ld_wdata` | in | load port: write (`ld_we`=1) or read a word of α, b, β1, β2 or P (`mem_sel_e`) |
| `ld_rdata` | out | read data, one cycle after `ld_en` |
| `cmd_valid` / `cmd_ready` | in/out | command handshake; ready while idle and the load port is quiet |
| `cmd_op` | in | `OP_PREDICT`, `OP_TRAIN`, `OP_SYNC` |
| `cmd_bank` | in | `OP_PREDICT`: 0 = θ1, 1 = θ2 |
| `cmd_state`, `cmd_action`, `cmd_reward`, `cmd_ep_done`, `cmd_maxq` | in | operands, sampled at the handshake (`OP_TRAIN` uses all of them, `OP_PREDICT` only the state) |
| `rsp_valid` | out | one-cycle pulse when the command is finished |
| `rsp_q[N_ACT]` | out | Q-values of the last `OP_PREDICT` |
| `rsp_target` | out | clipped label of the last `OP_TRAIN` |
| `busy` | out | a command is running |

Latencies, counted from the handshake cycle to the cycle in which
`rsp_valid` is high:

| command | cycles | N_HID = 64 |
|---|---|---|
| `OP_PREDICT` | N_ACT·N_HID·(3·N_IN+5) + 3 | 2,563 |
| `OP_TRAIN` | N·(3·N_IN+5) + N·(3N+3) + N·(3N+5) + 62 | 26,430 |
| `OP_SYNC` | 2·N_HID + 1 | 129 |

The load port may be used only while `busy` is low; an assertion checks
this. In the original system this traffic ran over AXI with DMA, which the
source says was not fully built. Here a plain word-wide port stands in for
it, and an AXI wrapper would sit outside the core. One learning step at
N_HID = 64 issues two predictions and, half the time, one training step:
about 18,000 cycles, or 0.18 ms at 100 MHz. The host's own work is not
counted.

## 7. Files

| file | content |
|---|---|
| `rtl/oselm_pkg.sv` | Q20 type and constants, saturation, ReLU, clipping, action encoding, memory and command enums |
| `rtl/oselm_ram_if.sv` | one RAM port (addr/we/wdata/rdata) |
| `rtl/oselm_arith_if.sv` | operand/result wires of the shared arithmetic set |
| `rtl/fx_add.sv`, `rtl/fx_mul.sv`, `rtl/fx_div.sv` | the three arithmetic units |
| `rtl/oselm_bram.sv` | single-port RAM |
| `rtl/oselm_predict.sv` | forward-pass sequencer |
| `rtl/oselm_seq_train.sv` | OS-ELM training sequencer |
| `rtl/oselm_qnet_core.sv` | top: memories, arithmetic set, routing, controller, sync, load port |
| `tb/tb_oselm_ref_pkg.sv` | bit-exact fixed-point reference model of prediction and training |
| `tb/tb_fx_add.sv`, `tb_fx_mul.sv`, `tb_fx_div.sv`, `tb_oselm_bram.sv` | unit tests |
| `tb/tb_oselm_predict.sv`, `tb/tb_oselm_seq_train.sv` | sequencer tests with the real arithmetic units; check latency and compare with floating point |
| `tb/tb_oselm_rl_host.sv` | behavioural host: cart-pole environment, spectral normalisation, L2 initial training, ε-greedy, random update, sync |
| `tb/tb_oselm_qnet_core.sv` | end-to-end test at the default size (600 learning steps) |
| `tb/tb_oselm_workloads.sv` | the same loop at N_HID = 32, 128 and 192 |

## 8. Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. A watchdog fails the run if it hangs. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/oselm_pkg.sv tb/tb_oselm_ref_pkg.sv tb/tb_oselm_qnet_core.sv \
        --top-module tb_oselm_qnet_core
    ./obj_dir/Vtb_oselm_qnet_core

Change the testbench name to run another test. The end-to-end test takes
about 10 s. Apart from the end-to-end tests, the testbenches use small
sizes (N_HID = 12 or 16). The end-to-end test plays the host's role in
full:

* It normalises α by power iteration.
* It collects the first 64 experiences from a cart-pole model, using the
  classic equations, ±12° and ±2.4 limits and at most 200 steps.
* It solves `P0 = (H0ᵀH0 + 0.5 I)⁻¹` by Gauss-Jordan elimination and loads
  the core.
* It then learns on the core. Every Q-value and label is checked bit for
  bit, and so are all of β1, β2 and P at the end. Each mechanism must occur
  at least once: both banks, training, terminal training, clipping at +1
  and −1, skipped updates, greedy and random actions, sync, load and
  read-back.

Episodes end on failure or after 200 steps. Terminal transitions are
trained with r = −1 and d = 1; every other step gives r = +1. This is the
testbench's choice. The published algorithm listing leaves the loop before
storing a terminal transition, which would leave the `(1−d)` term unused.

## 9. How far to trust it, and where it departs from the source

Verified by simulation:

* Every unit, and both sequencers, match an independent bit-exact model.
* The training step matches floating-point OS-ELM within 10⁻³ on small
  sizes.
* The whole core matches the model through hundreds of learning steps at
  N_HID = 32, 64, 128 and 192.
* All files pass Verilator lint and elaborate in Yosys/slang.

Not verified:

* The network was not run long enough to learn to balance the pole. That
  needs thousands of episodes.
* Q20 precision over long runs was not studied. The source reports that it
  was not significant.
* No FPGA timing closure was attempted. The 52-bit divider and the
  constant multiplies that form addresses are the likely long paths at
  100 MHz.

Choices of this implementation:

* The load port and command handshake stand in for AXI/DMA.
* P0 and b are loaded together with α and β. The training update needs
  them, and the host produces them.
* The two algebraic shortcuts in the training step (section 3).
* The label and clipping are computed in the core. The host supplies
  `max_a Q(s', a)`.
* γ is a run-time input.
* The saturating and truncating Q20 arithmetic.
* All schedules and latencies. The source gives only end-to-end run times,
  and they include the host's work.
* For more than two actions, the action codes are spread evenly over
  [−0.5, 0.5]. The source gives the codes for two actions only.

Left to software, as in the source: spectral normalisation (it needs an
SVD), the initial training, action selection, the random-update draw, the
sync schedule and the environment.

Known warning: Verilator reports `SYNCASYNCNET` on `rst_n`. The reset is
asynchronous in the logic and also appears in the assertions'
`disable iff`. This is intended.
