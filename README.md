# MERINDA model-recovery kernel in SystemVerilog

Model recovery takes a measured multivariate trace `Y(t)` of a physical system, with its
input `U(t)`, and recovers a sparse polynomial ODE `dY/dt = Theta * phi(Y, U)`. The recovered
model then works as a digital twin: it can be simulated forward and compared with what the
system actually does. Methods such as EMILY or PINN+SR put a neural-ODE layer in the middle of
an autoencoder. That layer needs an iterative, adaptive ODE solve in every cell, which maps badly
onto an FPGA.

MERINDA ("Fast Online Digital Twinning on FPGA for Mission Critical Applications", B. Xu,
A. Banerjee, S. K. S. Gupta) replaces the neural-ODE layer with a neural-flow equivalent that
has no iteration inside the network:

```
 Y, U ──► GRU flow layer ──► dense layer ──► sparsity dropout ──► RK4 solver ──► Y_est ──► loss
 (trace)   (V hidden units)   (analytical     (keep |Theta|        (fixed step,     ▲
                              inverse, ReLU)   coefficients)        from Y(0), U) ──┘ compared with Y
```

A GRU summarises the trace. A dense layer maps the GRU's final state to one candidate
coefficient per (state, polynomial term) pair. A sparsity-guided dropout keeps only the strongest
candidates. A fixed-step Runge-Kutta solver then replays the recovered model from `Y(0)`, and the
mean square error against the measured trace is the "ODE loss" used for training. Every stage is
a fixed number of multiply-accumulates, so each can be unrolled and pipelined.

This RTL implements one inference pass of that pipeline: GRU → dense → dropout → RK4 → loss. It
sits behind an AXI4-Lite slave, as the kernel does on a Zynq UltraScale+ device. The training
stages the paper puts in the same kernel, back-propagation and the AdamW update, are **not**
included (see *What is not here*).

## Files

| file | what it is |
|---|---|
| `rtl/merinda_pkg.sv` | Q16.16 type, saturating arithmetic, sigmoid/tanh, polynomial term enumeration |
| `rtl/mac_unit.sv` | one multiply-accumulate lane; every stage is built from these |
| `rtl/activation.sv` | sigmoid / tanh / ReLU / pass-through |
| `rtl/gru_cell.sv` | one GRU time step, all hidden units in parallel |
| `rtl/dense_layer.sv` | hidden state → coefficient estimates (ReLU) and input shifts |
| `rtl/sparsity_dropout.sv` | keeps the KEEP largest-magnitude coefficients |
| `rtl/rk4_solver.sv` | 4th-order Runge-Kutta over the polynomial model |
| `rtl/loss_unit.sv` | sum and mean of squared errors |
| `rtl/axi_lite_regs.sv` | AXI4-Lite slave, register file and all on-chip arrays |
| `rtl/merinda_top.sv` | the kernel: run sequencer wiring the above |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_workloads.sv` | Lotka-Volterra, Lorenz and F8 Crusader replayed through the solver and loss unit |

## Numbers

All datapath values are signed **Q16.16** in 32 bits (`merinda_pkg::fx_t`). A product keeps all
64 bits, is shifted right by 16 (truncation toward minus infinity) and saturates. Every sum
saturates. The range is ±32768 and the resolution 1.5e-5. The paper does not state a number
format; this one is wide enough that a cubic term of states of order 10 does not overflow.

Sigmoid is the four-segment piecewise-linear "PLAN" approximation:

| \|x\| | sigmoid(\|x\|) |
|---|---|
| ≥ 5 | 1 |
| 2.375 … 5 | \|x\|/32 + 0.84375 |
| 1 … 2.375 | \|x\|/8 + 0.625 |
| 0 … 1 | \|x\|/4 + 0.5 |

For negative x, sigmoid(x) = 1 − sigmoid(|x|). tanh(x) is 2·sigmoid(2x) − 1. Only shifts and adds
are needed. The error is below 0.02 for sigmoid and 0.04 for tanh. The curve has a step of about
0.004 at |x| = 2.375, so it is monotonic only to within that step.

## The GRU step (`gru_cell`)

This is the part of the kernel the paper describes in most detail: three operations, given as
loops. `HID` is the number of hidden units, V in the paper's text. `IN = NSTATE + NINPUT` is the
width of one sample. With `concat = {x[0..IN-1], h_prev[0..HID-1]}` (inputs first):

```
Op 1  z[i] = sigmoid(bz[i] + Σ_j Wz[i][j]·concat[j])        update gate
      r[i] = sigmoid(br[i] + Σ_j Wr[i][j]·concat[j])        reset gate
Op 2  rz[i] = r[i] · h_prev[i]
Op 3  c[i] = tanh(ba[i] + Σ_j Wa[i][j]·{x, rz}[j])          candidate
      h[i] = h_prev[i] + z[i]·(c[i] − h_prev[i])             = (1−z)·h_prev + z·c
```

The `i` loops are fully unrolled: `HID` lanes, each with three `mac_unit`s (z, r, candidate) and
its own weight rows. This is what complete array partitioning gives in HLS. The `j` loops are
pipelined at one term per cycle, so every lane consumes column `j` of its weight rows in the same
cycle. Cycle by cycle, counted from the cycle in which `start` is seen:

| cycles | state | work |
|---|---|---|
| 0 | IDLE | capture x and h_prev; z/r accumulators load their biases |
| 1 … CL | GATES | z and r accumulate `W[i][j]·concat[j]`, j = 0 … CL−1 (CL = IN+HID) |
| CL+1 | ZR_ACT | z, r ← sigmoid; candidate accumulators load `ba` |
| CL+2 | RESET | rz ← r·h_prev (Op 2) |
| CL+3 … 2CL+2 | CAND | candidate accumulates `Wa[i][j]·{x, rz}[j]` |
| 2CL+3 | C_ACT | c ← tanh |
| 2CL+4 | UPDATE | h_new ← h_prev + z·(c − h_prev) |
| 2CL+5 | | `done` pulses, h_new valid |

This gives 73 cycles per step with the defaults (HID = 30, IN = 4). Choices of this design, not
the paper's:
- the order of inputs and hidden values inside `concat`;
- computing r alongside z (the paper's Op 1 title names both gates, but its code shows only z);
- the final update equation (the paper stops at Op 3);
- reading the `{x, rz}` operand of Op 3 as the paper's `rz_concat`.

The paper's pipelining figure shows iteration n+1's Op 1 overlapping iteration n's Op 2. Successive
time steps of one trace cannot overlap here because step n+1 needs h from step n. Overlap would
need several independent traces in flight. This design does not do that.

## Coefficient layout and the polynomial library

The model has `NSTATE` states and `NINPUT` inputs, so `NVAR = NSTATE + NINPUT` variables. The
library `phi` is every monomial of degree ≤ `ORDER` in those variables. That is
`NTERM = C(ORDER+NVAR, NVAR)` terms, 35 with the defaults (3 states, 1 input, cubic).

Each term is written as a product of exactly `ORDER` factors taken from
`{v_0 … v_(NVAR-1), 1}`, with the constant 1 as index `NVAR`. The factor indices form a
non-decreasing tuple `a ≤ b ≤ c`. Terms are numbered in lexicographic order of that tuple:

```
t =  0: (0,0,0) = x0^3      t =  1: (0,0,1) = x0^2 x1    ...   t =  4: (0,0,4) = x0^2
t =  5: (0,1,1) = x0 x1^2   ...                              t = 14: (0,4,4) = x0
t = 15: (1,1,1) = x1^3      ...                              t = 24: (1,4,4) = x1
t = 25: (2,2,2) = x2^3      ...                              t = 30: (2,4,4) = x2
t = 31: (3,3,3) = u^3       t = 32: (3,3,4) = u^2        t = 33: (3,4,4) = u    t = 34: (4,4,4) = 1
```

(shown for the defaults, NVAR = 4 with variables x0, x1, x2, u). `merinda_pkg::term_factor(nvar,
order, t, f)` returns factor `f` of term `t`; it is the one definition of the order. The
testbenches rebuild it independently with three nested loops `for a, for b >= a, for c >= b`.

The dense layer produces `NCOEF = NSTATE·NTERM` coefficients (105) followed by `NINPUT` input
shifts. Coefficient `s·NTERM + t` multiplies term t in the equation for state s. The same index is
used for the `theta` read window.

## Sparsity-guided dropout (`sparsity_dropout`)

The paper asks that exactly |Theta| of the coefficient outputs stay non-zero. It does not say how
they are chosen. Here the `KEEP` coefficients with the largest magnitude survive and the rest
become 0. Ties go to the lower index, so exactly `KEEP` survive. The unit ranks one coefficient per
cycle. N comparators count how many others beat it, and it is kept when that count is below
`KEEP`. Latency N+1 = 106 cycles.

The paper puts a ReLU on the coefficient outputs of the dense layer, and this RTL does the same
(`COEF_RELU = 1`). As a result every recovered coefficient is ≥ 0. Real models, the F8 Crusader
among them, have negative coefficients. That follows from the paper's description, not from an
error in the RTL. Clear `COEF_RELU` to allow signed coefficients.

## RK4 replay (`rk4_solver`)

Starting from `Y[0]`, the solver takes `NSAMP − 1` steps of size `dt` (the DT register) and emits
`Y_est[0..NSAMP-1]`, with `Y_est[0] = Y[0]`. During step n the input is held at
`U[n] + shift`, where `shift` is the dense layer's input-shift output. Each evaluation of
`f(x,u) = Theta·phi(x,u)` takes NTERM + 3 cycles:
1. form the evaluation point `x + c·dt·k` (c = 0, ½, ½, 1);
2. form all NTERM monomials in parallel (ORDER−1 multipliers per term);
3. accumulate `Theta[s][t]·phi[t]` over t, one term per cycle, one lane per state;
4. store `k`.

With the four evaluations and the update `x += dt/6·(k1 + 2k2 + 2k3 + k4)`, a step takes
4·NTERM + 13 = 153 cycles.
The increment is formed at full width, `dt·(k1 + 2k2 + 2k3 + k4)` as a 64-bit product, and
divided by 6 before it is rounded to Q16.16. A Q16.16 constant `dt/6` would keep only a few
significant bits for small steps (0.01/6 is off by 0.15 %), which shows up as visible drift on
fast systems such as Lorenz.

## One run (`merinda_top`)

A write of 1 to CTRL starts a run, and the stages run one after another:

| stage | cycles (defaults) |
|---|---|
| GRU, NSAMP steps of {Y[n], U[n]}, h starts at 0 | NSAMP·(2·CL+6) = 2368 |
| dense layer | HID+3 = 33 |
| dropout | NCOEF+2 = 107 |
| RK4 + loss (loss runs in the solver's shadow) | (NSAMP−1)·(4·NTERM+13)+4 = 4747 |

That is **7255 cycles** in total:
`NSAMP·(2·(IN+HID)+6) + HID + NCOEF + (NSAMP−1)·(4·NTERM+13) + 9`. The count of the last run can
be read from CYCLES. At the end, `run_done` pulses and STATUS.done / `irq` are set.

### Register map (AXI4-Lite, 24-bit byte address, 32-bit data)

The region is `addr[23:20]` and the word index is `addr[19:2]`.

| region | name | access | index |
|---|---|---|---|
| 0 | CTRL (idx 0) | W | bit 0 = start (ignored while busy) |
| 0 | STATUS (idx 1) | R | bit 0 busy, bit 1 done (sticky; cleared by start) |
| 0 | DT (idx 2) | RW | RK4 step, Q16.16 (reset value 1/64) |
| 0 | CYCLES / MSE / SSE (idx 3/4/5) | R | last run |
| 1 | Y | W | n·NSTATE + s |
| 2 | U | W | n·NINPUT + m |
| 3 / 4 / 5 | Wz / Wr / Wa | W | i·(IN+HID) + j |
| 6 / 7 / 8 | bz / br / ba | W | i |
| 9 | dense W | W | o·HID + j, o < NCOEF+NINPUT |
| 10 | dense b | W | o |
| 11 | Theta (after dropout) | R | s·NTERM + t |
| 12 | input shift | R | m |
| 13 | Y_est | R | n·NSTATE + s |
| 14 | final hidden state | R | i |

The slave accepts a write when AWVALID and WVALID are both high. BVALID follows one cycle later,
and RVALID follows one cycle after an accepted read. The following are answered with SLVERR and
change nothing:
- writes to arrays while a run is in progress;
- writes to read-only or unmapped addresses;
- reads of write-only or unmapped addresses.

WSTRB is honoured. Every array element is its own register, so all of them are visible to the
datapath at once. This stands in for the HLS complete array partitioning. Assertions in the slave
check that BVALID and RVALID hold, with stable data, until they are taken.

A typical host sequence:
1. write Y, U, the GRU weights, the dense weights and DT;
2. write CTRL = 1;
3. wait for `irq` or poll STATUS.done;
4. read Theta, the shifts, Y_est and MSE.

For training, compute new weights from these results, write them back and start again.

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| HID | 30 | GRU hidden units V, the "model dimension" | the paper's reference dimension (evaluated 20 … 150) |
| NSTATE | 3 | states | F8 Crusader (angle of attack, pitch angle, pitch rate) |
| NINPUT | 1 | inputs | F8 Crusader tail deflection |
| ORDER | 3 | polynomial order | F8 Crusader model is cubic |
| NSAMP | 32 | samples per trace | chosen here |
| KEEP | 20 | non-zero coefficients kept | chosen here (about the size of the F8 model) |
| AW | 24 | AXI address width | chosen here |

Only HID has a number from the paper. The F8 sizes come from the published F8 Crusader model
that the paper cites but does not print. The paper evaluates model dimensions 20 to 150. Any
dimension up to HID runs on a build with that HID, because unused hidden units with zero weights
and biases stay at zero. Dimensions above 30 need `HID` raised.

## What is not here, and other departures

- **Back-propagation and AdamW.** The paper's kernel trains the network on the FPGA: forward
  pass, back-propagation and AdamW update, each pipelined. It names these stages but does not
  describe them: which weights are trained, how the ODE loss is differentiated through the solver
  and the dropout, what the "network loss" added to the ODE loss is, and the optimiser settings.
  They are therefore left out. The kernel brings out everything such a stage would read (loss, Y_est,
  Theta, final hidden state) and accepts updated weights over AXI4-Lite. `busy`, `run_done` and
  `loss_mse` are also pins.
- **The shared MUL + ADD resource.** The paper draws a single multiply-add block feeding all
  stages. Here each stage has its own `mac_unit` lanes, because the stages never run at the same
  time. Sharing one pool would save multipliers at the cost of multiplexers.
- **Stage order.** The paper's kernel figure runs the ODE solver after the optimiser. Its
  architecture figures run it right after the dropout, which is what this RTL does.
- **GRU input.** The paper's network input is drawn as `[Y; U + U_ex]`. The shift `U_ex` is an
  output of the same pass, so the GRU here sees `[Y; U]` and the shift is applied in the solver.
- **Dense layer size.** The paper gives both `C(M+|X|, |X|)` outputs (text) and `|Theta| + q`
  (figure). Here there is one coefficient per state per term, with the input in the library, plus
  one shift per input.
- **One trace per run.** Batches of S_B traces are processed by starting S_B runs.
- **Resource and time figures** from the paper (LUT, DSP, BRAM counts and seconds per dimension)
  are for HLS builds that include training. They are not comparable with this RTL's cycle count.

## Verification

Each testbench checks its module against values it computes itself, and each ends by printing
`TB_RESULT checks=N failures=M`. Wherever a latency is documented above, the testbench checks it
too.

| testbench | what it checks |
|---|---|
| `tb_mac_unit` | accumulation against a real-valued sum; clr priority; saturation; hold |
| `tb_activation` | sigmoid / tanh against the exact functions over [−8, 8]; symmetry; ReLU |
| `tb_gru_cell` | 6 chained steps at 30 × 4 against a real-valued GRU (tolerance 2e-3); 73-cycle latency |
| `tb_dense_layer` | 106 outputs against a real affine layer + ReLU; clipping; latency |
| `tb_sparsity_dropout` | mask and outputs against repeated maximum search, with ties; latency |
| `tb_rk4_solver` | 32 samples of a nonlinear 3-state model against a real RK4 (tolerance 1e-3); latency |
| `tb_loss_unit` | SSE and MSE against real sums |
| `tb_workloads` | Lotka-Volterra, Lorenz and F8 Crusader loaded with their true coefficients into the solver and loss unit at the default size: 32 samples of each against a real RK4 written from the equations (tolerance 2e-3 + 1e-3·\|y\|); MSE 0 against the reference and 0.0625 against the reference offset by 0.25; latency |
| `tb_axi_lite_regs` | every window, strobes, start pulse, busy refusals, SLVERR, read-back |
| `tb_merinda_top` | a full run at the default parameters through AXI4-Lite. It checks hidden state, Theta (values and dropout rule), Y_est, MSE and the 7255-cycle count against real-valued models. It also counts each mechanism (GRU steps, ReLU clipping, dropout, RK4 samples, loss, start and weight writes refused while busy, interrupt) and fails if any never happened |

The references are real-valued, so they are independent of the fixed-point code. The tolerances
reflect Q16.16 truncation. A test fails on a wrong operand order, a wrong gate equation or a wrong
Runge-Kutta stage, but not on rounding details.

To simulate a block with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/merinda_pkg.sv rtl/mac_unit.sv \
    rtl/activation.sv rtl/gru_cell.sv tb/tb_gru_cell.sv --top-module tb_gru_cell -o sim
./obj_dir/sim
```

For the whole design, list `rtl/merinda_pkg.sv` first, then the other `rtl/*.sv` files, then
`tb/tb_merinda_top.sv` with `--top-module tb_merinda_top`. The full run simulates in about a
second.

### How far to trust it

The GRU equations, the dataflow and the AXI4-Lite boundary follow the paper. The number format,
the activation approximations, the library ordering, the dropout selection rule, the RK4 order
and hold, and the whole schedule are this design's choices. Each is checked against an
independent model, but none can be checked against the authors' HLS code. The design has not
been synthesised for a device. Its multiplier count grows as 3·HID + NCOEF + NSTATE lanes plus
the monomial multipliers of the solver, about 230 32×32 multipliers at the defaults.
