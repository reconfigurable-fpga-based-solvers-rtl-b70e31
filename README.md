# A fixed-point proximal-gradient solver for sparse satellite attitude MPC

A relay satellite's attitude controller has to solve a small optimisation problem at every
sample. Model predictive control (MPC) picks the next ten samples of the four actuator
voltages: three thrusters (tau_1, tau_2, tau_3) and one reaction wheel (tau_w). It chooses them
so that the predicted attitude (roll, pitch, yaw, three body rates and the wheel rate) tracks a
target, and it adds an l1 penalty so that most actuator commands are exactly zero. Only the
first of the ten moves is applied. The problem is then solved again from the newly measured
state.

This RTL is an FPGA core that solves that problem. It iterates a proximal-gradient method in
two's-complement fixed point. The word length is a synthesis parameter, because on an FPGA the
word length is what trades solution accuracy against fabric power. Three word lengths were
studied for this controller: 28, 34 and 64 bits. At 28 bits the closed loop began to
oscillate about its equilibrium. At 34 bits it stayed stable and used little more power than at
28, so 34 is the default here.

## The iteration

With the horizon stacked into one vector u of N = 4 x 10 = 40 values, the tracking cost is a
quadratic. Write Phi for the prediction matrix, F for the free-response matrix, Q for the output
weight, x for the measured state and R_s for the stacked reference. Then

    0.5 (Phi u + F x - R_s)' Q (Phi u + F x - R_s)  =  0.5 u' H u - b' u + const
    H = Phi' Q Phi          (N x N, symmetric, fixed for a given plant and horizon)
    b = -Phi' Q (F x - R_s) (length N, changes with every new state x)

The problem solved is `min 0.5 u'Hu - b'u + sigma*||u||_1`. The core runs the approximate
proximal-gradient iteration (AxPGD):

    u_{k+1} = S_tau( u_k - s * (H u_k - b) ),   s = 0.0002,  sigma = 1.5,  tau = sigma * s

Here S_tau is soft thresholding:

    S_tau(v) = v - tau  if v >= tau,   v + tau  if v <= -tau,   0 otherwise

The soft threshold is where the sparsity comes from. Any coordinate whose gradient step lands
within tau of zero is set to exactly zero. The iteration is exact apart from the rounding of
the fixed-point arithmetic. That rounding is the "approximate" part: it acts as an error in the
gradient, and its size is set by the word length.

The core does not form H or b. The host builds them from the plant model, loads H once, and
loads a new b for every sample. It then reads back u and applies the first four words.

## Number format, and what the word length changes

Every stored word (H, b, u, s and tau) is a W-bit signed number with `FRAC = W - 16` fraction
bits. That leaves 16 integer bits including the sign, so the range is about +-32768. The range
has to cover the Hessian. With s = 0.0002 the iteration tolerates eigenvalues of H up to
10,000, so its entries can be in the thousands, as in the test problems. For the
default W = 34 this is Q16.18, with a resolution of 3.8e-6.

The arithmetic inside one update is:

| quantity | width | fraction bits | how it is reduced |
|---|---|---|---|
| `H_ij * u_j` | 2W | 2*FRAC | kept exactly |
| `(H u)_i` accumulator | 2W + clog2(N) + 1 | 2*FRAC | cannot overflow |
| `g = (H u)_i - b_i` | W | FRAC | shift right by FRAC (truncates toward minus infinity), then saturate |
| `v = u_i - s*g` | W | FRAC | product shifted right by FRAC, then saturate |
| `S_tau(v)` | W | FRAC | exact (tau >= 0, cannot overflow) |

Truncation and saturation are this design's choices; the original implementation is not
described at that level. Any saturation raises the sticky `overflow` output for that solve.

Word length also changes the constants. The host passes s and tau as `step_q = round(s * 2^FRAC)`
and `tau_q = round(sigma * s * 2^FRAC)`; `axpgd_pkg::to_fixed` does the conversion. At W = 34
these are 52 and 79. At W = 28 (Q16.12) they are 1 and 1, so the effective step becomes
0.000244 instead of 0.0002, and the threshold becomes 0.000244 instead of 0.0003. So 28 bits
changes the algorithm, not only the precision of its result. Running one 40-variable problem
for 100 iterations at the three word lengths gives these errors against an unquantised
double-precision run:

| W | max error of u | resolution |
|---|---|---|
| 28 | 4.2e-4 | 2.4e-4 |
| 34 | 1.8e-5 | 3.8e-6 |
| 64 | 5.7e-15 | 3.6e-15 |

With u around 5e-3, the 28-bit solution is wrong in its second digit.

Convergence needs `0 < s * lambda(H) < 2`, that is eigenvalues of H below 10,000 for s = 0.0002.
Scale H to meet this.

## Datapath and schedule

One multiplier computes one term `H_ij * u_j` per clock. An iteration therefore takes exactly
N*N = 1600 cycles, which is 16 us at 100 MHz. Consecutive iterations follow each other without
idle cycles.

```
             axpgd_ctrl  (iteration, row i, column j; one term per cycle)
                 |  i,j          |  j, bank k%2        |  i
                 v               v                     v
            +---------+    +------------+         +---------+
   host --> | H  RAM  |    | u ping-pong| <-host  |  b RAM  | <-- host
            | N*N x W |    | 2 x N x W  |         |  N x W  |
            +----+----+    +-----+------+         +----+----+
   cycle 1       | H_ij          | u_j                 | b_i
                 +------+--------+----(j==i: keep u_i)-+--> hold u_i, b_i at row end
                        v
   cycle 2        product register           (fxp_mac)
   cycle 3        accumulator = (H u)_i
                        |
                        v
                  prox_update: g, v, S_tau   (combinational)
                        |
                        +--> written to u bank (k+1)%2, address i, at the end of cycle 3
```

The points that need care are these.

**Two banks for u.** Every coordinate of u_{k+1} must be computed from the whole of u_k. So
u_{k+1} is written into the other half of a 2N-word RAM (`axpgd_ubuf`), and the banks swap
roles each iteration. The bank read in an iteration is the iteration's parity. Every issued
term carries it as a tag, and the row's result goes to the opposite bank. After n_iter
iterations the result sits in bank `n_iter mod 2`. The core points the host read port there by
itself.

**Why no gap is needed between iterations.** The last row of iteration k is written 3 cycles
after its final term is issued. Iteration k+1 reads coordinate j in its (j+1)-th cycle, so
coordinate N-1 is read N cycles after the boundary. Earlier rows were written long before. The
schedule is therefore safe whenever N > 3, and an assertion in `axpgd_ctrl` checks this. After
the final iteration the controller waits 3 cycles for the pipeline to drain before it raises
`done`.

**Getting u_i without a second read port.** The update of row i needs u_i next to (H u)_i. The
operand stream of row i already passes u_j for every j. The datapath keeps the word that goes
by when j == i. At the row's last term it latches that word, or the current word if the
diagonal is itself the last term, together with b_i, which was read with the row.

**Latency.** If `start` is sampled in cycle t, the first term is issued in cycle t+1 and `done`
is high in cycle t + n_iter*N*N + 4. With n_iter = 0, `done` comes in cycle t+1, and the
result is the warm start unchanged.

## Using the core

Ports of `axpgd_core` (parameters `W = 34`, `FRAC = W-16`, `N = 40`, `ITER_W = 16`):

| port | dir | meaning |
|---|---|---|
| `host_we, host_region[1:0], host_addr, host_wdata` | in | load port, honoured only while `busy` is low. Region 0 is H, at address i*N+j. Region 1 is b, at address i. Region 2 is the warm start u0, at address i. |
| `host_raddr`, `host_rdata` | in/out | result read port while idle. Data follows one cycle after the address. |
| `start`, `n_iter` | in | start a solve of n_iter iterations. Ignored while busy. |
| `step_q`, `tau_q` | in | s and sigma*s in the word format. Hold them stable during a solve. |
| `busy`, `done` | out | busy during a solve; `done` is a one-cycle pulse. |
| `overflow` | out | sticky: some value saturated during the last solve. |
| `nnz` | out | number of non-zero coordinates in the last iterate written. |

Per control sample: write the new b (40 words). Optionally write a warm start, such as the
previous solution shifted by one sample. Pulse `start`, wait for `done`, read u[0..3] and apply
them. The bank the warm start goes into is always bank 0. The RAMs are not reset, so load H, b
and u0 before the first solve.

The source gives no iteration count or stopping test. Here the count is a run-time input and
there is no early exit. 100 iterations (160,004 cycles, 1.6 ms at 100 MHz) converge the test
problems to within a few resolution steps.

## Files

| file | contents |
|---|---|
| `rtl/axpgd_pkg.sv` | problem sizes, word format, s and sigma, host regions, `to_fixed` |
| `rtl/axpgd_core.sv` | top level: memories, pipeline registers, write-back, status flags |
| `rtl/axpgd_ctrl.sv` | sequencer: (iteration, row, column) sweep, bank tags, drain, `done` |
| `rtl/fxp_mac.sv` | two-stage multiply-accumulate for one row |
| `rtl/prox_update.sv` | gradient, step, saturation and soft threshold of one coordinate |
| `rtl/soft_threshold.sv` | S_tau |
| `rtl/axpgd_ubuf.sv` | two-bank iterate store |
| `rtl/fxp_ram.sv` | simple dual-port RAM with registered read (used for H and b) |
| `tb/axpgd_ref_pkg.sv` | bit-exact reference of the arithmetic on 256-bit integers |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the word-length study |
| `tb/axpgd_wl_harness.sv` | one core plus its checker, instantiated per word length |
| `tb/axpgd_mpc_harness.sv` | one core in a closed attitude loop, instantiated per word length |

## Verification

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog.

- `tb_soft_threshold`, `tb_fxp_ram`, `tb_fxp_mac`, `tb_axpgd_ubuf`, `tb_prox_update` and
  `tb_axpgd_ctrl` test their modules against independent models. The models use floor division
  where the RTL shifts, magnitude and sign where the RTL compares, and 64-bit or 256-bit sums.
  The tests also check exact cycle timing and that every case class occurs: saturation of the
  gradient, saturation of the update, and the threshold dead zone.
- `tb_axpgd_core` runs the core at its default size (W = 34, N = 40) on a random problem. H is
  diagonally dominant with eigenvalues inside the convergence range; a third of b is small, so
  the solution is sparse. Each returned word must match the bit-exact model, and the cycle count
  must match the formula above. The 100-iteration answer must also lie within 32 resolution
  steps of the same iteration in double precision. The test makes each mechanism happen at
  least once: coordinates zeroed by the threshold, saturation with the `overflow` flag, results
  in the even and in the odd bank, a warm start, a zero-iteration solve, and a host write during
  a solve being ignored.
- `tb_axpgd_mpc_loop` closes a control loop around 28-, 34- and 64-bit cores side by side, for
  40 samples of 0.1 s. The loop itself is in `axpgd_mpc_harness`. The plant is an illustrative
  seven-state, four-input attitude model: three double-integrator body axes driven by thrusters,
  and a reaction wheel whose torque also acts on yaw. It is not a published satellite model. The
  harness builds Phi, F and H = Phi'QPhi, and chooses Q so that the largest eigenvalue of H is
  5000. At each sample it loads a new b, warm-starts from the previous plan shifted by one move,
  runs 100 iterations and applies the first move. Every solve must match the model bit for bit.
  The 34- and 64-bit loops must bring the attitude and rate error below a fifth of its start
  value, and they take it from 0.46 to 0.033. Plans must be sparse; about 9 of 40 entries are
  zero. On this benign plant the 28-bit loop also settles, to 0.033, although its plans differ
  from the 64-bit ones in the second digit. The oscillation seen at 28 bits on the real
  satellite is therefore not reproduced here.
- `tb_axpgd_wordlength` runs one problem on 28-, 34- and 64-bit cores side by side. Each must
  match the model bit for bit, and the error against unquantised arithmetic must not grow with
  the word length (the table above).

To run one with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/axpgd_pkg.sv tb/axpgd_ref_pkg.sv tb/tb_axpgd_core.sv --top-module tb_axpgd_core
./obj_dir/Vtb_axpgd_core
```

The full-size end-to-end test builds in about 20 s and simulates in under a second.

## How far this follows the original design, and where it departs

Taken from the source:
- the AxPGD iteration with soft thresholding;
- s = 0.0002 and sigma = 1.5;
- 4 inputs, 7 states and a 10-sample horizon, so 40 variables;
- the fixed-point word length as a free parameter, with 28, 34 and 64 bits as the studied
  points and 34 as the recommended one.

The original core was produced by high-level synthesis, and its micro-architecture is not
published. Everything about the hardware structure is therefore this design's own:
- one multiplier and the N*N-cycle schedule;
- the bank scheme and the diagonal capture;
- the 16-integer-bit split;
- truncation and saturation;
- the host port in place of the HLS-generated bus;
- the run-time iteration count;
- the `overflow` and `nnz` status outputs.

The error figures in this document come from this RTL, not from the original hardware.
Neither clock frequency nor power is claimed. One row update ends in a path of subtract,
saturate, W x W multiply, subtract, saturate and threshold feeding the RAM. At W = 64, or at a
high clock rate, that path would need a pipeline register.

Not included:
- the constrained form of the problem (projection of u onto input and output bounds);
- the l0 / hard-threshold variant of the same framework;
- floating-point versions (32-bit float and double, which served as the baseline);
- the host that simulates the satellite and builds H and b;
- the board's processor system and its PL supply regulation and power monitoring.
