# FireFly-P RTL: a spiking controller that keeps learning on chip

This is a two-layer spiking neural network (SNN) controller. It runs
inference and online synaptic plasticity in the same hardware, every time
step. The rule that changes the weights is not trained on the chip. It is a
fixed, per-synapse four-term rule whose coefficients were found offline. The
hardware only has to apply that rule to every synapse, fast enough to keep up
with a control loop.

Each time step, the design does three things:

1. It takes one real-valued observation vector.
2. It runs both layers of leaky integrate-and-fire (LIF) neurons to produce
   output spikes.
3. It updates every weight of both layers from the neurons' spike traces.

The main idea is in the hardware organisation. Each layer has two engines:

- a **forward engine** that does inference;
- a **plasticity engine** that does weight updates.

Both engines work on the same single-copy memories. A small **scheduler**
overlaps them across the two layers, for example layer 1's update with layer 2's
inference. A **write-priority arbiter** with a **valid-data check** makes the
overlap safe without double-buffering any memory.

Everything is SystemVerilog 2017 in `rtl/`, one module or package per file.
Every module has a self-checking testbench in `tb/`.

## 1. Arithmetic: FP16 everywhere

All values use IEEE binary16: weights, inputs, currents, potentials, traces
and plasticity coefficients. The format is 1 sign bit, 5 exponent bits with
bias 15, and 10 fraction bits. Weight changes are often tiny, which is why a
floating-point format is used rather than a fixed-point one.

- `fp16_add` and `fp16_mul` are combinational.
- Both round once, to nearest-even.
- Subnormal inputs and results are flushed to zero.
- Overflow gives infinity.
- The adder works in a 24-bit window, which makes the sum exact before rounding.
  When the exponents differ by 13 or more, the adder returns the larger operand.
  This is the correctly rounded result in that case.
- The shared rounding, and small helpers such as `fp16_half` and the ordered
  compare `fp16_gt`, live in `fp16_pkg`.

Flush-to-zero is a choice made in this design. A simpler and faster FPGA
implementation would make the same trade.

## 2. The neuron, the traces and the learning rule

**LIF neuron** (`lif_unit`, one lane per neuron in a tile):

    V(t) = V(t-1) + (I(t) - V(t-1)) / 2

- The time constant is 2, so the division is an exponent decrement. The lane
  needs two adders and no multiplier.
- A spike is emitted when `V(t) > v_th` (strictly greater).
- The potential is then reset to zero.
- The reset rule is an assumption of this design.

**Spike trace** (`trace_unit`). Each neuron keeps an exponentially decaying
record of its activity:

    S(t) = lambda * S(t-1) + s(t)

- For a layer-1 input, `s` is the real input value.
- For a spiking neuron, `s` is 1.0 or 0.
- `lambda` is one FP16 constant for the whole network.

**Plasticity rule** (`plasticity_pe`). For the synapse from presynaptic
neuron j to postsynaptic neuron i:

    dw = alpha*Sj*Si + beta*Sj + gamma*Si + delta
    w  = w + dw

- The rule has four terms: a Hebbian term (alpha), a presynaptic term (beta),
  a postsynaptic term (gamma) and a bias (delta).
- Every synapse has its own four coefficients.
- The four coefficients are stored packed in one 64-bit word, `prm_t`, so
  one memory access fetches all of them.

The PE is a 3-stage pipeline:

| Stage  | Work |
|--------|------|
| 1      | Sj*Si, beta*Sj, gamma*Si (three multipliers in parallel) |
| 2      | alpha*(Sj*Si); beta-term + gamma-term |
| 3      | alpha-term + delta |
| output | dw = stage-3 sum + (beta+gamma sum); w_new = w + dw |

- A new synapse can enter every cycle.
- Results appear 3 cycles after their inputs.

## 3. Tiling and the memory map

Each layer has N_POST neurons. They are processed in **tiles of P = 16
neurons**, one neuron per processing element (PE). The number of tiles is
NT = ceil(N_POST / P).

Weights are stored so that one memory word feeds all PEs at once:

    weight word address = tile * N_PRE + j      (j = presynaptic index)
    lane l of that word = weight from input j to neuron tile*P + l

Each layer owns five memories (`layer_unit`). All are `dp_ram` dual-port RAMs
with read-first behaviour, one-cycle read latency and per-lane write enables.

| Memory          | Words      | Word                    | Port A                                      | Port B |
|-----------------|------------|-------------------------|---------------------------------------------|--------|
| weights         | NT*N_PRE   | P x FP16                | plasticity write (priority) / forward read  | plasticity read |
| parameters      | NT*N_PRE   | P x {alpha,beta,gamma,delta} | host write                            | plasticity read |
| post-traces     | NT         | P x FP16                | forward write (priority) / plasticity read  | forward read |
| pre-traces      | N_PRE      | 1 x FP16                | forward write (priority) / plasticity read  | forward read |
| membrane        | NT         | P x FP16                | forward write                               | forward read |

A `clear` sweep zeroes the weights, traces and potentials, so every run
starts from the zero state. The host loads the coefficients beforehand,
through the `prm_*` port of the top.

Layer 2 keeps its own copy of its pre-traces. In principle these equal layer
1's post-traces. The design does not share one memory across the layers
because a separate copy keeps each layer self-contained. It costs N_HID
extra FP16 words.

## 4. The engines

### Forward engine (`forward_engine`)

The forward engine processes one tile at a time:

1. **Accumulate (N_PRE cycles).** Each cycle, one weight word is read. Every
   `psum_pe` adds w*x into its own register. This is an output-stationary
   ("psum-stationary") dataflow: no partial sum returns to memory. When x is
   zero the PE skips the operation and reports it as gated. In layer 2 the
   inputs are spikes (`SPIKE_INPUT = 1`), so the PE adds the weight directly
   and no multiplier is built.
2. **Drain.** The tile's potentials and post-traces are read.
3. **LIF and trace (one cycle).** P LIF lanes and P trace lanes compute the new
   values. These are written back together, and the spikes enter the layer's
   spike vector.

While the **last** tile streams its inputs, the pre-traces are updated, one
per input.

Without holds, a pass takes NT*(N_PRE+2)+1 cycles.

### Plasticity engine (`plasticity_engine`)

The plasticity engine walks the weight words in the same order as the forward
engine:

1. At the start of each tile it loads the tile's post-traces.
2. Then, each cycle, it reads a pre-trace, a weight word and a parameter word.
3. It feeds these to P plasticity PEs.
4. Three cycles later it writes the new word back.

The engine also exports `wr_cnt`, the number of words written so far in the
pass. Because writes happen in address order, every address below `wr_cnt`
is already up to date.

Without holds, a pass takes NT*(N_PRE+2)+6 cycles.

## 5. Sharing memories without double buffering

The layer runs its update for step t and its forward pass for step t+1 at the
same time. Both touch the same weights and traces. Two mechanisms keep the
result identical to running them strictly one after the other.

**Write priority** (`wp_arbiter`, one per shared port):

- When both engines want the same port in the same cycle, the write wins.
- The read is held and retries the same address.
- Assertions check two rules: a granted read never overlaps a write, and a
  held read keeps its address.

**Valid-data check** on the weight RAM:

- While an update pass is running, a forward read of weight word `a` is
  allowed only if `a < wr_cnt`, that is, once that word already holds its
  new value.
- The forward pass therefore always sees the newest weights. It trails the
  update pass word by word.

**Traces need no check.** This follows from the ordering:

- The forward engine writes a tile's post-traces only after it has read all
  of that tile's weights. Those weights were written by the update, which by
  then has read the tile's post-traces.
- The forward engine writes the pre-traces only in its last tile.

So the update has always consumed a trace before the forward pass replaces
it.

In every schedule this design produces, the trace arbiters never actually
hold a read. Their testbench checks them in isolation. They are kept as a
safeguard in case the schedule changes. The layer counts the events it sees:
weight holds, trace holds, gated MACs, and forward passes started while an
update was running.

## 6. Scheduling the two layers (`scheduler`)

A run of T time steps has four kinds of work item: L1F(t), L1U(t), L2F(t) and
L2U(t). F is a forward pass and U is an update.

The scheduler keeps a started count and a finished count for each engine. It
starts an item as soon as its engine is free and its inputs are ready:

| Item   | Starts when |
|--------|-------------|
| L1F(t) | input t is valid, L2F(t-1) has finished (layer-1 spikes consumed), and L1U(t-1) has finished (with `OVERLAP = 1`: started) |
| L1U(t) | L1F(t) has finished |
| L2F(t) | L1F(t) has finished, and L2U(t-1) has finished (with `OVERLAP = 1`: started) |
| L2U(t) | L2F(t) has finished |

With `OVERLAP = 0`, this gives the classic three-part schedule:

- **prologue:** L1F(0) alone;
- **main loop**, in two phases:
  - phase A: L1U(t) beside L2F(t), which hides layer 1's update behind
    layer 2's inference;
  - phase B: L2U(t) beside L1F(t+1);
- **epilogue:** the final L2U(T-1).

With `OVERLAP = 1` (the default), a forward pass may also begin while its own
layer's update is still running. The valid-data check keeps the numbers
exact.

The `phase` output reports which of these phases the run is in. The top also
exposes counters for weight holds, trace holds, gated MACs and overlaps.

## 7. Top level and timing (`fireflyp_top`)

Default sizes:

| Parameter | Default |
|-----------|---------|
| N_IN      | 32      |
| N_HID     | 128     |
| N_OUT     | 8       |
| P         | 16      |

The top's interface:

- **Run control.** `start` with `num_steps` clears the network and runs that
  many steps.
- **Inputs.** Each step takes an `in_data` vector with a valid/ready
  handshake.
- **Outputs.** `out_valid` and `out_spikes` carry the step's output spikes.
- **Coefficients.** The `prm_*` port writes coefficients before `start`.
- **Constants.** `v_th` and `lambda_` are constant FP16 inputs.

At the defaults, the passes take these times, without holds:

| Pass            | Cycles |
|-----------------|--------|
| layer-1 forward | 273    |
| layer-1 update  | 278    |
| layer-2 forward | 131    |
| layer-2 update  | 136    |

A steady-state step measures 542 cycles, which is 2.7 us at 200 MHz. The
reference implementation reports 8 us per step, on a network whose input and
output sizes are not stated.

## 8. What follows the reference design and what does not

These parts follow the reference design:

- FP16 arithmetic;
- LIF with tau = 2, done without a multiplier;
- the trace rule and the four-term rule;
- per-synapse coefficients packed into one wide word;
- parallel products plus a pipelined adder tree;
- psum-stationary PEs with zero gating;
- 16 PEs and 128 hidden neurons;
- dual-port memories with write priority instead of double buffering;
- the prologue / two-phase main loop / epilogue schedule, with extra
  within-layer overlap when dependencies allow.

These are choices made in this design:

- N_IN = 32 and N_OUT = 8;
- reset to zero after a spike;
- the strict `>` threshold compare;
- flush-to-zero and round-to-nearest-even;
- the word layout and tiling order;
- the pipeline depths;
- the valid-data check based on a write counter;
- a separate pre-trace copy per layer;
- the clear sweep;
- the host load port and the counter outputs.

These parts are not included:

- the offline evolutionary optimisation of the coefficients;
- board clocking and I/O;
- mapping onto vendor DSP primitives. The multipliers are generic logic that
  synthesis may map to DSPs.

The MNIST configuration of the reference work (784-1024-10) needs other
parameter values. At those sizes, its weights far exceed the block RAM of a
small FPGA.

## 9. Simulating

The only tool needed is plain Verilator 5. Compile the packages first:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_fireflyp_top \
      -y rtl -y tb +libext+.sv \
      rtl/fp16_pkg.sv rtl/sched_pkg.sv tb/ref_pkg.sv tb/tb_fireflyp_top.sv
    ./obj_dir/Vtb_fireflyp_top

`tb/ref_pkg.sv` holds the independent reference model used by the
testbenches:

- FP16 conversion with real numbers, plus add, multiply, LIF, trace and the
  plasticity rule;
- a `layer_ref` class that runs a layer sequentially.

Each testbench prints `TB_RESULT checks=N failures=M`.

| Testbench | What it covers |
|-----------|----------------|
| `tb_<module>` | that module against the reference |
| `tb_layer_unit` | a whole layer, with forward passes overlapping updates at varying offsets |
| `tb_scheduler` | the phase order and the dependency rules |
| `tb_fireflyp_top` | the whole network at reduced size |
| `tb_fireflyp_full` | the whole network at default parameters (a few steps, well under a minute) |

`tb_fireflyp_top` and `tb_fireflyp_full` check four things:

- every step's output spikes;
- all final weights of both layers;
- that every mechanism occurred: weight holds, zero gating, overlap, input
  back-pressure and every phase;
- the step time, against a bound of 1600 cycles (8 us at 200 MHz).
