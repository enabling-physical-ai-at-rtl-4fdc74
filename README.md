# A GRU-based forward-pass accelerator for recovering ODE models

Model recovery takes a measured multivariate trace `Y(t)` and an input trace `u(t)` and looks for a
*sparse* polynomial ODE `dx/dt = Theta · phi(x, u)` that reproduces the trace. Neural-ODE methods
hide an iterative ODE solver inside the network. That solver is hard to parallelise in hardware.
This design removes it from the network. A GRU layer reads the trace as a discretised flow. A dense
layer maps the GRU's final hidden state straight to candidate ODE coefficients. A dropout stage then
zeroes the insignificant ones. Only after that is the candidate model integrated, once, with a
fourth-order Runge-Kutta solver. The reconstruction error (the "ODE loss") is what training
minimises.

The RTL covers the whole forward pass for one sequence:

```
 samples [Y;u] ──► FIFO ──┬──► GRU layer ──► dense layer ──► sparsity dropout ──┐
                          │   (1 sample/clk)   (+ReLU)        (Theta_est, mask)  │
                          └──► trace buffer A/B ◄── RK4 solver ◄─────────────────┘
                                                      │
                                 Y_est stream ◄── FIFO┴──► ODE loss (MSE) ──► result
```

Training is not included. Nothing here computes gradients or updates weights: the host loads the
weights through a configuration port and reads back the coefficients, the reconstruction and the
loss.

## Number format

Every datapath value is a signed Q16.16 number (`merinda_pkg::fx_t`: 32 bits, 16 of them
fractional). A product is formed at 64 bits and shifted right arithmetically, so it truncates toward
minus infinity. Sums wrap; they do not saturate. The only saturating result is the MSE. The
resolution is 1.5e-5, small enough for the 0.001 dropout threshold used for Lotka-Volterra data. The
range is ±32768, wide enough for raw population counts.

Gate nonlinearities are piecewise linear, so they need only shifts and adds. The sigmoid has four
segments (|x|/4+0.5, |x|/8+0.625, |x|/32+0.84375, and 1 for |x| ≥ 5), mirrored for negative x. Its
error is below 0.02. tanh is computed as `2·sigmoid(2x) − 1`. The GRU testbench compares the whole
cell with a floating-point GRU; the largest deviation it allows is 0.15.

## The GRU layer: one time step per clock

`gru_cell` is purely combinational. It computes the standard GRU step for all `V` hidden units at
once:

```
z = σ(Wz·x + Uz·h + bz)        update gate     (gate index 0)
r = σ(Wr·x + Ur·h + br)        reset gate      (gate index 1)
n = tanh(Wn·x + Un·(r∘h) + bn) candidate       (gate index 2)
h' = (1 − z)∘n + z∘h
```

Every dot product is its own unrolled multiply-accumulate chain. `gru_layer` keeps `h` in `V`
separate registers, so the hidden-state buffer is fully partitioned. The recurrence therefore closes
in one clock, and the layer takes **one sample per cycle (initiation interval 1)**.

The price is a long combinational path and a lot of multipliers. At `V = 16` and `N_X = 3` the cell
holds 3·16·(3+16) + 48 = 960 32-bit multipliers. A small FPGA cannot hold that many DSPs. Lowering
the clock, or time-multiplexing the MACs, is the trade an implementation on such a part would have
to make. It would raise the II.

The hidden state restarts from zero at the first sample of every sequence. `in_last` marks the final
sample. `h_T` is registered on the edge that takes that sample and is offered on `out_h` until
`out_ready`. A `k`-sample sequence occupies the layer for `k` cycles.

GRU weight write addresses (`cfg_addr[15:12] = 0`), gate index slowest:

| range | content |
|---|---|
| `(g·V + j)·N_X + i` | `w_x[g][j][i]` |
| `3·V·N_X + (g·V + j)·V + i` | `w_h[g][j][i]` |
| `3·V·N_X + 3·V·V + g·V + j` | `bias[g][j]` |

## From hidden state to a sparse model

**Dense layer** (`dense_layer`, `cfg_addr[15:12] = 1`, address `o·V + j` for weights, then
`N_OUT·V + o` for biases). It has `N_COEF + 1` outputs. The first `N_COEF = n·C(n+2, 2)` outputs are
ODE coefficients and pass through a ReLU. The last output is an input shift. It stays linear, and
the solver adds it to `u`. The layer takes one vector per cycle and its result is registered.

The ReLU deserves a caution. The architecture puts ReLU on the coefficient outputs, yet real models
(Lotka-Volterra among them) need negative coefficients. `RELU_EN` (default 1) removes the ReLU for
anyone who wants signed coefficients.

**Coefficient layout.** Equation `i` owns coefficients `i·NT … i·NT+NT−1`, with `NT = C(n+2, 2)`.
The library, in order, is `u, x1…xn, x1²…xn², x1x2, x1x3, …, x(n−1)xn`. The input takes the place of
the constant term. For `n = 2` the twelve coefficients read

```
dx1 = c0·u + c1·x1 + c2·x2 + c3·x1² + c4·x2² + c5·x1x2
dx2 = c6·u + c7·x1 + c8·x2 + c9·x1² + c10·x2² + c11·x1x2
```

**Sparsity dropout** (`sparsity_dropout`) has two run-time rules:

* `mode = 0`: keep `c` when `|c| ≥ threshold`. A threshold of 0.001 turns
  `[0.0006 0.55 0.06 0.0003 0.005 −0.09 0.8 0.003 −0.7 0.04 0.06 0.00005]` into
  `[0 0.55 0.06 0 0.005 −0.09 0.8 0.003 −0.7 0.04 0.06 0]`. The testbench checks exactly this
  vector.
* `mode = 1`: keep exactly the `keep_k` largest magnitudes, i.e. a fixed number of model terms. Each
  coefficient's rank is the count of coefficients that beat it (larger magnitude, or equal magnitude
  at a lower index). All N·(N−1) comparisons run in parallel.

The result (`theta`, keep mask, non-zero count) is registered.

## Solving the recovered model

`rk4_solver` integrates from the measured `Y(0)` with one classical RK4 step per sample. The step
size is `dt`. The input is held over each step as `u[t] + shift`:

```
k1 = f(x)   k2 = f(x + dt/2·k1)   k3 = f(x + dt/2·k2)   k4 = f(x + dt·k3)
x ← x + dt · ((k1 + 2k2 + 2k3 + k4) · 1/6)      (1/6 = 10922 / 2^16)
```

A single `ode_rhs` unit evaluates the right-hand side. It is shared by the four stages. The schedule
per sample is READ → CAPT → EMIT → K1 → K2 → K3 → K4, and the state is updated at the end of K4. A
`k`-sample sequence takes **7k − 4 cycles** when the output is never stalled (1396 cycles for 200
samples). `Y_est[0]` is `Y(0)` itself. Each emitted estimate carries the measured `Y[t]` that was
read with it, so the loss needs no second read port.

`ode_loss` forms each error with a guard bit and squares it at full width. It accumulates in 64 bits.
After the last pair, a restoring divider produces the mean over `n·k` terms in 64 cycles. The
divider's quotient saturates to the largest Q16.16 value.

## Overlap between sequences

The solver for sequence *s* runs about seven times longer than the GRU takes to read sequence *s+1*.
The top (`merinda_top`) keeps two trace buffers (`trace_buffer`, one write and one registered read
port, block-RAM shaped) and uses them in ping-pong:

* A bank is *busy* from its first written sample until the loss of the sequence in it is done.
* The loader writes the bank `wb`. It pulls a sample from the input FIFO only when the GRU is ready.
  For the first sample of a sequence, `wb` must also be free.
* The dropout result waits in its output register while a solve is active. That stops the dense
  layer, which holds `h_T` in the GRU, which stops the loader.
* A solve starts when a dropout result is waiting and no solve is active. It snapshots `theta`,
  mask, count and shift into the `res_*` registers. `res_valid` pulses when its loss is ready.

In steady state the input is therefore throttled to one sequence per solve, about 7k cycles.
`s_ready` falls once the four-entry input FIFO fills. A slow consumer on `m_*` fills the output FIFO
and stalls the solver in EMIT.

## Top-level interface (`merinda_top`)

| signal | dir | meaning |
|---|---|---|
| `cfg_we, cfg_addr[15:0], cfg_data` | in | weight writes; `cfg_addr[15:12]` 0 = GRU, 1 = dense |
| `dt` | in | solver step (Q16.16), sampled when a solve starts |
| `seq_len` | in | samples per sequence, 1…`MAX_SEQ` |
| `drop_mode, drop_thr, drop_k` | in | dropout rule, sampled when the dropout stage fires |
| `s_valid, s_ready, s_y[n], s_u` | in/out | sample stream (valid/ready) |
| `m_valid, m_ready, m_est[n], m_meas[n], m_idx, m_last` | out/in | reconstruction stream |
| `res_valid, res_theta[P], res_mask, res_nnz, res_shift, res_mse, res_sse` | out | per-sequence result |

Parameters: `N_STATE = 2`, `HIDDEN = 16`, `MAX_SEQ = 200`, `FIFO_DEP = 4`. The input is fixed at one
(`m = 1`) and the polynomial order at two. Reset is asynchronous and active low. The weight registers
are not reset, so load them before streaming.

## Which sizes fit

| workload | fits the default build? |
|---|---|
| Lotka-Volterra (2 states, 1 input, order 2, 12 coefficients) | yes |
| Lorenz (3 states, quadratic) | with `N_STATE = 3` (30 coefficients) |
| F8 Crusader (cubic terms) | no: the library is second order only |
| hidden sizes 32/64/128 | with `HIDDEN` set accordingly |
| sequences of 50/100/200 samples | yes (`seq_len`) |

## How closely this follows the original architecture

These parts follow the original architecture:

* The chain GRU → dense (ReLU on coefficients, plus input shifts) → threshold dropout → Runge-Kutta →
  MSE loss.
* Hidden size 16 and sequences of 200 samples.
* The GRU decomposed into element-wise gate operations with fully unrolled MACs, a fully partitioned
  hidden state, and II = 1 over time.
* FIFOs between concurrent stages, and larger data held in block RAM.
* The twelve-term second-order library and its term order.

These are choices made here, and should be judged as such:

* The number format and the activation approximations.
* Which RK order is used and how `u` is held.
* The two dropout rules side by side. The source describes both a "keep |Θ| terms" rate and a 0.001
  threshold.
* Using the shift output as an offset on `u`.
* A single-layer dense stage.
* Zero initial hidden state.
* The ping-pong banks and all handshakes and addresses.

Two further points are open. The original places the dropout and the ODE solver outside the part it
accelerates; here they are logic. And the resource figures reported for the original FPGA build
(about 80 DSPs at hidden size 16) are far below what a fully unrolled single-cycle GRU needs. The
original therefore shares multipliers in ways it does not describe.

## What the testbenches establish

Each block is checked against expected values computed outside the block:

* `gru_cell`: bit-exact against the reference step, and within 0.15 of a floating-point GRU with
  exact activations.
* `gru_layer`: `h_T` over sequences of 1 to 200 samples; 200 samples taken in 200 consecutive
  cycles.
* `dense_layer`: all outputs, ReLU on coefficients only, one vector per cycle.
* `sparsity_dropout`: the 0.001-threshold example above, plus random vectors in both modes with
  ties.
* `ode_rhs`: a worked two-state ODE, checked in floating point.
* `rk4_solver`: a linear system against its closed form; the 7k − 4 cycle count.
* `ode_loss`: SSE, MSE and saturation against 64-bit integer arithmetic.
* `stream_fifo` and `trace_buffer`: against behavioural models.

The end-to-end test runs the top at its default parameters. It fails unless each of the following
happens at least once:

* II = 1 loading
* loading overlapped with solving
* bank stalls
* input back-pressure
* output back-pressure
* ReLU clipping
* threshold drops
* top-K drops

A second end-to-end test builds the three-state configuration and feeds it a Lorenz trajectory.

Not verified: timing closure, or any implementation on an FPGA. The GRU weights and data in the tests
are random or synthetic. No trained weights were used, so nothing here shows that the recovered
coefficients match a real system's.

## Simulating

Every block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M`.
`tb/merinda_ref_pkg.sv` is a direct software model of each step. It is reused by the testbenches
for expected values. Example, the end-to-end run at the default size: six 200-sample sequences, both
dropout modes, back-pressure, and every mechanism above counted:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/merinda_pkg.sv tb/merinda_ref_pkg.sv tb/merinda_top_tb.sv \
  --top-module merinda_top_tb -Mdir obj && ./obj/Vmerinda_top_tb
```

Verilator finds the modules each testbench uses in `rtl/` and `tb/` by name. The other
testbenches (`tb/<block>_tb.sv`) build the same way, with their own top module. A test of the
three-state configuration uses `N_STATE = 3` on the top and the reference package unchanged.
