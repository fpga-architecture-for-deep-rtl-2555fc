# Q-learning with neural networks in hardware: a single-neuron and an MLP accelerator

A planetary rover that learns in the field has to run reinforcement learning on a
small, low-power, radiation-tolerant processor. This RTL implements the approach of
*FPGA Architecture for Deep Learning and its application to Planetary Robotics*
(Gankidi and Thangavelautham): Q-learning where a small neural network stands in for
the Q-table and is trained on line, with every neuron's multiplications done in
parallel and all arithmetic in fixed point. Two cores are provided and sit side by
side in the top module `qlearn_fpga_top`:

* `qlearn_perceptron`: the Q-function is a single sigmoid neuron. One Q-value
  update takes **7A+1** clock cycles, A being the number of actions per state.
* `qlearn_mlp`: the Q-function is a two-layer perceptron (N_IN inputs, H = 4 hidden
  neurons, one output neuron). One update takes **15A+7** cycles.

At 150 MHz these counts give 2.34 M, 534 k, 1.06 M and 247 k updates per second for
the four configurations the paper evaluates. The paper reports 2340, 530, 1060 and
247 kQ/s. The single-neuron count 7A+1 is stated in the paper. The MLP count is this
design's own schedule. It was chosen because it reproduces the paper's MLP throughput
table at both sizes.

The RTL is written from the paper's text, equations and block diagrams. The paper
gives no fixed-point format, table size, handshake or pipeline detail. Every such
choice made here is listed under "Departures and choices" below.

## What one Q-value update computes

The network takes a state vector *s* followed by an action vector *act(a)* and
returns Q(s, a) in (0, 1). To value all A actions of a state, the network is
evaluated A times, once per action vector. One update of the weights works like this:

1. Evaluate Q(s_t, a) for a = 0..A-1. Store the values in the **present-state
   buffer**.
2. Choose an action a_t. By default this is the arg-max, and the host may override
   it to explore. The host applies a_t to the environment and returns the state
   s_t+1 it reached.
3. Evaluate Q(s_t+1, a) for every a. Store the values in the **next-state buffer**.
4. Read both buffers out together. This gives max_a Q(s_t+1, a), Q(s_t, a_t) and the
   reward r of s_t+1 from the reward table. From them, form the temporal-difference
   error

       Q_err = alpha * (r + gamma * max_a Q(s_t+1, a) - Q(s_t, a_t))

5. Back-propagate Q_err and write the weights back:

       output neuron:  delta_o = f'(net_o) * Q_err
       hidden neuron:  delta_h = f'(net_h) * delta_o * W2[h]
       every weight:   W += C * delta(of the neuron it feeds) * (value it multiplied)
       every bias:     b += C * delta

   The single neuron uses only the first line. Its weights are the input weights.

alpha is the Q-learning rate, gamma the discount factor and C the network's learning
factor. All three are run-time inputs (`cfg`), together with A (`cfg.num_actions`,
from 1 to A_MAX).

## Number format and activation tables

* All values are **Q7.8**: 16-bit two's complement with 8 fraction bits, covering
  -128 .. +127.996 in steps of 1/256. Sums and differences saturate. Products are
  truncated toward minus infinity and then saturated. The helpers are `fx_add`,
  `fx_sub` and `fx_mul` in `ql_pkg`.
* A neuron's accumulator is 32 bits: net = floor(sum(x_i * w_i) / 256) + bias. The
  products are summed at full precision before the single shift.
* **Address translation** (`addr_translate`) maps a net to one of 256 table entries:
  floor(net / 16), clamped to [-128, 127], plus 128. The tables therefore cover
  net in [-8, 8) in bins of 1/16. A net outside that range uses the first or last
  entry. There the sigmoid is within 1/256 of 0 or 1. Such nets raise the
  `lut_clip` status output.
* `sigmoid_rom` holds round(256 * f(c)) and `sigmoid_deriv_rom` holds
  round(256 * f(c) * (1 - f(c))), where f(c) = 1 / (1 + e^-c) and c is the bin
  centre ((i - 128) + 0.5) / 16. Both tables are computed by constant functions at
  elaboration. Their reads are combinational (distributed-ROM style).

The derivative is looked up from the net, not computed from the output. Each core
therefore saves the nets it will need during the forward passes.

## Single-neuron core (`qlearn_perceptron`)

The datapath has one `neuron` with N_IN = S_LEN + AV_LEN parallel multipliers, its
`weight_buffer`, the two `q_fifo` buffers, `action_select`, `error_gen`, `reward_rom`,
one `delta_gen` and one `dw_gen`. `ql_ctrl` sequences them with FF_STAGES = 3 and
BP_STAGES = 1.

| phase | cycles | work |
|---|---|---|
| FF_CUR | 3 per action | stage 0: multiply; stage 1: accumulate with bias; stage 2: table look-up; push {net, Q} into the present-state buffer; update the running arg-max |
| WAIT | host-paced | `action_valid` high, `action` = a_t; ends when `next_valid` is sampled |
| FF_NEXT | 3 per action | same for s_t+1; push Q into the next-state buffer |
| SCAN | A | pop both buffers together: running max of the next-state Q; capture Q and net of a_t |
| BP | 1 | Q_err, delta, C*delta, dW_i = C*delta*x_i for all inputs, write all weights |

That makes 3A + 3A + A + 1 = **7A+1** busy cycles. The last cycle is one long
combinational path: the derivative table, then the multiplications by gamma, alpha,
f', C and x_i. At 150 MHz this path may need retiming on a real device. It is kept in
one cycle because the paper states the cycle count. The MLP core shows the pipelined
alternative.

## MLP core (`qlearn_mlp`)

**Feed-forward** (`mlp_ff`). H hidden neurons of N_IN multipliers each evaluate in
parallel. Their outputs feed a layer buffer, which feeds an output neuron with H
multipliers. One action takes 7 cycles:

| stage | 0 | 1 | 2 | 3 | 4 | 5 | 6 |
|---|---|---|---|---|---|---|---|
| | L1 multiply | L1 accumulate | L1 table | layer buffer write | L2 multiply | L2 accumulate | L2 table, push |

**What the present-state buffer keeps.** Back-propagation needs the hidden outputs,
the hidden nets and the output net of (s_t, a_t). a_t is only known after all
actions have been valued. The present-state buffer therefore stores a 160-bit
context per action: {hidden outputs, hidden nets, output net, Q}. During SCAN the
context of a_t is captured. No forward pass is repeated.

**Back-propagation**. Seven registered steps, each a separate resource per neuron:

| step | computes |
|---|---|
| BP0 | Q_err from `error_gen` |
| BP1 | delta_o = f'(net_o) * Q_err (`delta_gen`) |
| BP2 | e_h = delta_o * W2[h], all h in parallel |
| BP3 | delta_h = f'(net_h) * e_h (H `delta_gen`s) |
| BP4 | g_o = C * delta_o, g_h = C * delta_h |
| BP5 | dW2[h] = g_o * O_h, dW1[h][i] = g_h * x_i, bias changes = g (H+1 `dw_gen`s) |
| BP6 | every weight and bias += its change (one adder per weight in `weight_buffer`) |

All steps read the weights as they were before the update. Busy time per update is
7A + 7A + A + 7 = **15A+7** cycles.

## Host interface and timing

Both cores have the same handshake. In `qlearn_fpga_top` the signals carry the
prefixes `sn_` and `mlp_`. All signals are synchronous to `clk`. `rst_n` is an
asynchronous active-low reset.

1. **Set-up.** Load the weights:
   * single neuron: `ww_en`, `ww_idx`, `ww_data`, where index N_IN is the bias;
   * MLP: the same, plus `ww_neuron`, where 0..H-1 are the hidden neurons and H is
     the output neuron.

   Load the rewards through `rw_*`, indexed by state id. Set `cfg` and `action_tab`,
   which holds one AV_LEN-element vector per action. Weights reset to zero. The
   reward table is not reset.
2. **Start.** Pulse `start` for one cycle with `state_vec` valid. The core latches
   s_t and A.
3. **Action.** After 3A (MLP: 7A) busy cycles, `action_valid` rises and `action`
   shows a_t. `explore_en` and `explore_action` act combinationally on `action`.
   They are latched together with the next state.
4. **Next state.** While `action_valid` is high, the host asserts `next_valid` for
   one cycle, with `next_vec` and `next_id` (the id of s_t+1, which addresses the
   reward table). The host may wait any number of cycles first.
5. **Done.** After 4A+1 (MLP: 8A+7) further busy cycles, `done` pulses for one
   cycle. The weights are then updated. `q_err`, `max_next` and `q_sa` hold the
   values used, until the next update.

`busy` is high during the four computing phases only. The cores do not share state.
They can run at the same time, but they share `cfg` and `action_tab`.

## Sizing

| parameter | default | meaning |
|---|---|---|
| S_LEN | 16 | state values in the network input |
| AV_LEN | 4 | action-vector values in the network input |
| A_MAX | 40 | buffer depth, the largest A |
| H | 4 | hidden neurons of the MLP |
| NUM_STATES | 1800 | entries of the reward table |

The defaults hold the paper's larger ("complex") environment: 20 inputs, 40 actions
per state, 1800 states, and a 20-4-1 MLP of 25 neurons. The split of the 20 inputs
into 16 state and 4 action values is an assumption. The smaller ("simple")
environment has a 4-value state, a 2-value action vector, 9 actions and a 6-4-1 MLP.
It runs on the same hardware with `cfg.num_actions = 9` and the unused inputs held
at zero. A zero input adds nothing to a net, and its weight never changes, because
dW = C * delta * 0.

## Departures and choices

Taken from the paper:
* the update state flow;
* the Q-error equation;
* the output and hidden delta equations;
* the weight-change and weight-update equations;
* table look-up for f and f';
* two A-deep Q buffers read out in parallel for the max;
* a reward table addressed by state;
* parallel multipliers per neuron with an accumulator;
* separate delta and dW generators;
* the 7A+1 single-neuron cycle count;
* the network sizes.

This design's own choices:
* **Q7.8 fixed point**, and the 256-entry tables over [-8, 8).
* **Which O multiplies delta in the weight change.** The paper writes dW = C·O·δ for
  the single neuron. In its layered form, O_i is the output of the neuron that feeds
  the weight. Here the value that fed the weight is used: for first-layer weights,
  that is the input x_i.
* **Bias changes** are C·δ (a weight on a constant input of 1). The paper updates
  biases but gives no formula.
* **Hidden-layer equation.** The paper's hidden delta equation is printed with
  "for all i in the output layer". It is read as the hidden neuron i, with the sum
  over the output layer.
* **Action policy.** Greedy arg-max, where ties go to the lowest index, plus an
  external override. The paper leaves the policy open.
* **Reward table.** Loaded by the host. The paper calls it a ROM but gives no
  contents.
* **Weight store.** Weights are kept in register arrays read all at once, not in
  shifting FIFOs.
* **State vector store.** s_t and s_t+1 are held in two registers for the length of
  an update. The paper draws a FIFO at the state-vector input.
* **Pipeline.** The MLP's 7-stage forward pass (with a layer-buffer stage) and its
  7-step back-propagation. The paper gives no MLP schedule. This one matches its MLP
  throughput figures.
* **Saved context.** The present-state buffer also holds the nets (and, for the MLP,
  the hidden values) of every action.
* **Handshake.** The start / action_valid / next_valid / done handshake.
* **Top-level arrangement.** The two cores sit side by side and share configuration.

Not built:
* **Floating-point versions.** The paper uses them only for comparison.
* **Power.** The paper's power figures come from the vendor tools and are not
  modelled.
* **Pipelining of successive actions.** The paper suggests it as future work.

## Files

Everything in `rtl/` is one module or package per file:

```
qlearn_fpga_top          both cores
├─ qlearn_perceptron     single-neuron core
│   ├─ ql_ctrl           sequencer (3 FF stages, 1 BP stage)
│   ├─ neuron            multipliers, accumulator, addr_translate, sigmoid_rom
│   ├─ weight_buffer, q_fifo x2, action_select, error_gen, reward_rom
│   └─ delta_gen (addr_translate, sigmoid_deriv_rom), dw_gen
└─ qlearn_mlp            MLP core
    ├─ ql_ctrl           sequencer (7 FF stages, 7 BP stages)
    ├─ mlp_ff            H hidden neurons, layer buffer, output neuron
    ├─ weight_buffer x(H+1), q_fifo x2, action_select, error_gen, reward_rom
    └─ delta_gen x(H+1), dw_gen x(H+1)
ql_pkg                   Q7.8 types and helpers, phase enum, cfg struct
```

## Simulation

Each block has a self-checking testbench, `tb/tb_<module>.sv`. Every testbench
compares the block with the reference arithmetic in `tb/ql_ref_pkg.sv`. That package
is written independently: it uses explicit floor division rather than shifts, and it
computes its tables itself. Each testbench prints one line
`TB_RESULT checks=N failures=M`.

From the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ql_pkg.sv tb/ql_ref_pkg.sv tb/tb_qlearn_fpga_top.sv \
    --top-module tb_qlearn_fpga_top --Mdir obj_top
./obj_top/Vtb_qlearn_fpga_top
```

`tb_qlearn_fpga_top` runs the top at its default parameters.

* **Simple environment.** Both cores learn at the same time on a 30 x 60 grid world:
  9 moves, goal and hazard rewards, epsilon-greedy exploration.
* **Complex-sized run.** 40 actions, all 20 inputs, and larger weights that drive
  nets past the table range.

For every update it checks:
* the action;
* Q(s_t, a_t), max Q(s_t+1, .) and Q_err;
* every weight;
* the cycle counts 7A+1 and 15A+7.

It also counts greedy and exploring selections, waits for the environment, cycles
with both cores busy, weight changes and table clipping. It fails if any of these
never happened.

`tb_workloads` runs the four evaluated configurations on the top at its defaults.
It checks every update against the model. It also turns the busy cycles into
throughput at 150 MHz and checks it against the published figures:

| configuration | A | cycles / update | kQ/s at 150 MHz | published | us / update | published |
|---|---|---|---|---|---|---|
| single neuron, simple (4+2 inputs) | 9 | 64 | 2344 | 2340 | 0.43 | 0.4 |
| single neuron, complex (20 inputs) | 40 | 281 | 534 | 530 | 1.87 | 1.8 |
| MLP 6-4-1, simple | 9 | 142 | 1056 | 1060 | 0.95 | 0.9 |
| MLP 20-4-1, complex | 40 | 607 | 247 | 247 | 4.05 | 4 |

The per-core testbenches `tb_qlearn_perceptron` and `tb_qlearn_mlp` run 30 updates
each, with A = 9, 40, 1 and random values. The remaining testbenches exercise one
block each.
