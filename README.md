# GRU forward-pass accelerator for model recovery at the edge

Model recovery means learning the governing differential equations of a
physical system from its measured trajectories: given traces of the states
`Y(t)` and the inputs `U(t)`, find the few coefficients `Theta` of a sparse
polynomial ODE `dY/dt = h(Y, U, Theta)` that reproduce the data. Neural
approaches to this problem put a neural-ODE layer in front of a sparse
regression. The neural-ODE layer is expensive on small hardware, because
every forward pass runs an iterative ODE solver inside every cell.

The architecture implemented here removes that solver. A layer of GRU cells
followed by a dense layer stands in for the neural-ODE layer: the GRU
recurrence `a = a_prev + z o (cc - a_prev)` is itself a discretised flow, and
the dense layer plays the part of the inverse map to the candidate model
coefficients. The recurrence has no inner solver loop, so it suits a
pipelined FPGA datapath. The coefficients still go through a sparsity-based
selection and a Runge-Kutta simulation, whose error trains the network. Those
steps run in software on the host processor. This RTL is the part that runs in
the fabric: the GRU layer and the dense layer, fed by a DMA stream of samples.

For every time step `t`, with `x_t = [Y(t) ; U(t)]`, the block computes:

```
concat     = [a_prev ; x_t]
r          = sigma(Wr * concat + br)                 reset gate
z          = sigma(Wz * concat + bz)                 update gate
mod_concat = [r o a_prev ; x_t]
cc         = tanh(Wa * mod_concat + ba)              candidate state
a          = z o cc + (1 - z) o a_prev               new hidden state (a_prev <- a)
y          = Wy * a + by                             dense layer
out        = ReLU(y)  or  softmax(y)                 selectable per step
```

The sizes are `H` hidden units, `I` input features and `O` outputs. The
defaults are `H = 32`, `I = 8` and `O = 64`.

## Block diagram

```
 s_axis ──> sync_fifo ──> vector assembly ──> gru_cell ──────────> dense_layer ──┬──────────────> serializer ──> m_axis
 (1 feature   (16 deep)    (I beats -> x_t)   ┌──────────────┐     O lanes,      │ ReLU path         (O beats
  per beat)                                  │ gru_ctrl     │     Wy rows in    │                    per step)
                                             │ H x gru_lane │     weight_ram    └─> softmax_unit ──┘
 cfg_* ──────────────────────────────────────│ a_prev regs  │──── cfg_* ─┘
 (weight writes)                             │ modc_buf     │
                                             └──────────────┘
```

Each arrow is a valid/ready hand-off that carries one whole vector. The stages
therefore overlap: the dense layer, the softmax and the serializer work on
step `t` while the GRU layer computes step `t+1`. When any stage is full, the
stages before it wait.

## One GRU step, cycle by cycle

This part needs the most care to read. The index `i` (the hidden unit) is
spread over space: there are `H` copies of `gru_lane`, one per hidden unit,
and each lane holds its own rows `Wr[i]`, `Wz[i]` and `Wa[i]` in private RAMs.
The index `j` (the column of a weight matrix) is spread over time: `gru_ctrl`
sweeps `j` from 0 to `N-1` with `N = H + I`. In each cycle the operand
`concat[j]` or `mod_concat[j]` goes to every lane at once, and every lane
multiplies it with its own `W[i][j]`.

The order of the phases comes from the data dependencies. The gates need all
of `concat`. `mod_concat` needs `r`. The candidate needs all of `mod_concat`.
The update needs `z`, `cc` and `a_prev`.

| cycle (0 = x_t accepted) | state | what happens |
|---|---|---|
| 0 | IDLE | `clr`: all three accumulators load their bias (`br`, `bz`, `ba`) |
| 1 .. N | G_SWP | column `j = cycle-1` is read from the Wr/Wz RAMs; `concat[j]` is registered beside it |
| 2 .. N+1 | (en_gate) | `sum_r += Wr[i][j]*concat[j]`, `sum_z += Wz[i][j]*concat[j]` |
| N+2 | G_ACT | `r = sigma(sum_r)` and `z = sigma(sum_z)` are latched |
| N+3 | M_WR | `modc_buf` takes `[r o a_prev ; x_t]` in one write |
| N+4 .. 2N+3 | C_SWP | column `j` is read from the Wa RAM and from `modc_buf` |
| N+5 .. 2N+4 | (en_cand) | `sum += Wa[i][j]*mod_concat[j]` |
| 2N+5 | C_ACT | `cc = tanh(sum)` is latched |
| 2N+6 | UPD | `a_prev <= a_prev + z*(cc - a_prev)` |
| 2N+7 | | `h_valid`: `a[t]` is offered to the dense layer; the next step can start in this same cycle |

A step therefore takes **2(H+I)+7 cycles**. At the defaults that is 87 cycles,
or 0.5 µs at 173 MHz. The next step can start in the cycle where the dense
layer takes `a[t]`, so with a steady input stream the layers settle to one
step every 87 cycles.

Each lane has exactly five multipliers:

- the `Wr` MAC
- the `Wz` MAC
- the `Wa` MAC
- `r * a_prev`, for `mod_concat`
- `z * (cc - a_prev)`, for the update

The update is written with one product instead of the textbook
`z*cc + (1-z)*a_prev`. Both forms give the same value.

The hidden state `a_prev` is held in `H` separate registers. Each lane reads
its own entry, and the column sweep reads entry `j`. `concat` is never stored:
it is `a_prev` followed by the input register. `mod_concat` is stored, because
it is read column by column during the second sweep.

## Number format and nonlinear functions

All data is 16-bit signed fixed point with 12 fraction bits (Q3.12, range
±8, resolution 1/4096). The format is set in `merinda_pkg`.

- **Accumulators.** Products are summed at full precision in 40 bits (Q.24).
  The bias is loaded shifted up by 12 bits.
- **Rounding.** A sum or product is brought back to Q3.12 by rounding half up
  and saturating (`acc_to_fx`, `fx_mul`).
- **sigma.** A four-segment piecewise-linear curve with power-of-two slopes:
  `0.5+|x|/4` below 1, `0.625+|x|/8` below 2.375, `0.84375+|x|/32` below 5,
  and 1 beyond. Negative arguments use `sigma(-x) = 1 - sigma(x)`. Its largest
  error against the true logistic function is under 0.02.
- **tanh.** Computed as `2*sigma(2x) - 1`. Its largest error is under 0.04.
- **softmax** (`softmax_unit`) works through the elements one per cycle:
  1. Find the maximum `m`.
  2. Form `e_k = 2^((y_k - m)*log2 e)`. The integer part of the exponent is a
     right shift, and `2^f` is approximated by `1+f`.
  3. Sum the `e_k` and take one reciprocal of the sum with a 25-step
     restoring divider.
  4. Multiply every `e_k` by that reciprocal.

  The result stays within 0.005 of the exact softmax in the tests. It takes
  3·O+26 cycles from input to output, and 3·O+27 cycles between vectors.

## Outputs: ReLU or softmax

The two descriptions of the output layer disagree. The network description
puts a ReLU on the dense outputs, which are the model-coefficient estimates.
The pseudo-code of the accelerator kernel ends in a softmax. Both are built.
`out_softmax` is sampled when the dense layer accepts a step, and the choice
travels with that step's vector:

- **`out_softmax = 0`.** Each output is `max(0, y)`. The vector goes straight
  to the serializer.
- **`out_softmax = 1`.** The raw `y` goes through `softmax_unit`.

With `O = 64`, the softmax needs 219 cycles per step, which is more than the
GRU's 87. In softmax mode, the softmax therefore sets the rate and stalls the
stages before it. A ReLU vector never overtakes a softmax vector still in
flight, so outputs always leave in step order.

## Streams, sequences and configuration

| port | meaning |
|---|---|
| `s_axis_tdata/tvalid/tready/tlast` | Input features in Q3.12, one per beat, `I` beats per time step. `tlast` marks the last beat of the last step of a sequence. |
| `m_axis_tdata/tvalid/tready/tlast` | Outputs in Q3.12, `O` beats per time step. `tlast` marks the last beat of the last step of a sequence. |
| `cfg_we, cfg_sel, cfg_row, cfg_col, cfg_wdata` | One weight or bias write per cycle. |
| `out_softmax` | Output mode, see above. |
| `stat_steps` | Number of time steps completed. |
| `busy` | High while anything is still inside the pipeline. |

**Sequences.** The hidden state starts at zero after reset, and again after
every step whose vector carried `tlast`. Several traces can therefore be sent
back to back. A `tlast` that arrives before the `I`-th beat closes the vector
early, and the missing features become zero. A trace is streamed and never
stored, so its length is unlimited.

**Weight map.** `cfg_sel` takes the values of `merinda_pkg::wsel_e`:

| cfg_sel | array | row | col |
|---|---|---|---|
| 0 `SEL_WR` | Wr | hidden unit i < H | j < H+I (j < H: hidden part, j >= H: input j-H) |
| 1 `SEL_WZ` | Wz | i | j |
| 2 `SEL_WA` | Wa | i | j |
| 3 `SEL_BR` / 4 `SEL_BZ` / 5 `SEL_BA` | br / bz / ba | i | ignored |
| 6 `SEL_WY` | Wy | output o < O | j < H |
| 7 `SEL_BY` | by | o | ignored |

All weights live on chip. At the defaults that is 94,480 bits of RAM:

- 3·32·40 GRU weights
- 64·32 dense weights
- the input FIFO

## Sizes and the benchmark systems

`H = 32` is the largest hidden size at which one five-multiplier lane per
hidden unit fits the 220 DSP slices of the Zynq-7020 (PYNQ-Z2) targeted by the
original work. It uses 160 DSPs, and the reported resource figures show
exactly 160 DSPs (72.7 %) for the 32-unit network. `I = 8` and `O = 64` are
this design's choices. They are sized for the largest benchmark, a
pathogenic-attack model with 5 states, one input and a third-order library.

| system | states + inputs (of I = 8) | library terms C(M+n, n) (+ input shifts, of O = 64) | fits |
|---|---|---|---|
| insulin delivery (Bergman model), 200 samples | 3 + 1 | 10 (+1) | yes |
| Lotka-Volterra | 2 + 0 | 6 | yes |
| Lorenz | 3 + 0 | 10 | yes |
| F8 cruiser | 3 + 1 | 20 (+1) | yes |
| pathogenic attack | 5 + 1 | 56 (+1) | yes |
| 16 hidden units | spare lanes get zero weights | | yes |
| 64 or 128 hidden units | `H = 64/128` elaborates, but needs 320/640 multipliers | | not on that device |

The input counts of the benchmark systems come from their usual textbook
forms, not from the source.

## Where this design departs from its source

- **Initiation interval.** The source reports an initiation interval of one
  cycle per time step, with all loops fully unrolled. A recurrent step cannot
  start before the previous hidden state exists. A full unroll also needs far
  more multipliers than the target device has. Here the hidden-unit loops are
  unrolled and the column loops are sequential, so the step interval is
  2(H+I)+7 cycles. This choice matches the DSP counts the source reports.
- **mod_concat buffer.** The source places it in block RAM. Here it is
  written in one cycle through `H+I` write ports, which amounts to a register
  file. A two-port block RAM would add about `H` cycles per step.
- **concat.** The source keeps `concat` in registers. Here it is not
  copied: the hidden-state registers and the input register already hold
  its two halves, and a multiplexer selects column `j`.
- **Output layer.** ReLU and softmax are both offered, as described above.
  The dense layer has a single layer, because the source calls it a
  multi-layer perceptron without giving a depth.
- **Left to this design.** The number format, the activation approximations,
  the stream framing, the configuration port, the zero initial state and the
  FIFO depth are all this design's choices. The source does not state them.
- **Update gate.** The source's theory section writes the GRU update with the
  reset gate as the mixing factor. Its accelerator kernel uses the update gate
  `z`. The kernel's form is the one built here.

## Not in this RTL

These parts run on the host, or are standard parts the source uses as they
are:

- the sparsity-based dropout that picks `|Theta|` of the outputs
- the Runge-Kutta simulation of the recovered model and the loss
- back-propagation and the ADAM weight update
- the AXI DMA engine
- the ARM processing system and its DRAM

The top level exposes the AXI-Stream ports where the DMA would connect.

## Files

| file | contents |
|---|---|
| `rtl/merinda_pkg.sv` | Q3.12 types, rounding/saturation helpers, configuration select codes |
| `rtl/sigmoid_pwl.sv`, `rtl/tanh_pwl.sv` | activation functions |
| `rtl/mac_unit.sv` | bias-loaded multiply-accumulate |
| `rtl/weight_ram.sv` | one weight row, registered read |
| `rtl/modc_buf.sv` | `mod_concat` buffer |
| `rtl/gru_ctrl.sv` | step sequencer (table above) |
| `rtl/gru_lane.sv` | one hidden unit |
| `rtl/gru_cell.sv` | the GRU layer: lanes, controller, hidden state, buffers |
| `rtl/dense_layer.sv` | dense layer with optional ReLU |
| `rtl/softmax_unit.sv` | softmax |
| `rtl/sync_fifo.sv` | input stream FIFO |
| `rtl/merinda_top.sv` | top level |
| `tb/merinda_ref_pkg.sv` | integer reference arithmetic for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_workloads.sv` |

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Each module's testbench compares the module
bit for bit with an integer model written separately in `merinda_ref_pkg`.
Where a module has a latency, its testbench checks the cycle count as well.

`tb_merinda_top` runs the whole design at its default sizes:

- a 200-step trace with no gaps, which checks the 87-cycle step rate
- sequences with random input gaps and output back-pressure
- mode switches while data is in flight
- a short final vector
- a softmax-only sequence

It checks every output beat and `tlast`. It also counts input back-pressure,
output back-pressure, softmax stalls, GRU/dense overlap, sequence restarts,
both output modes and mode switches, and fails if any of them never happens.

`tb_workloads` streams traces shaped like the five benchmark systems:

- Lotka-Volterra, Lorenz and the insulin model, integrated in the testbench
  with RK4
- F8 and the pathogenic model, as synthetic signals with the right channel
  counts
- the Lorenz trace again, with a 16-unit network loaded into the 32 lanes

Every output is checked against the reference model. The measured rate is 88
cycles per sample, because this testbench leaves the input idle for one cycle
after each step.

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/merinda_pkg.sv tb/merinda_ref_pkg.sv tb/tb_merinda_top.sv \
    --top-module tb_merinda_top -o sim
./obj_dir/sim
```

Replace `tb_merinda_top` with any other testbench name. Each of them runs in
seconds. The testbenches use `$urandom` only, with no constraint solver.

To change the sizes, override `H`, `I` and `O` on `merinda_top`. `cfg_row`
and `cfg_col` are 8 bits wide, which caps `H + I` and `O` at 256. The
testbenches write their sizes as local parameters at the top of each file.
