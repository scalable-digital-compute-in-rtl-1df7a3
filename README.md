# An SRAM compute-in-memory Ising annealer with noise taken from the memory itself

This is synthesizable SystemVerilog, plus one behavioural memory model, for a
digital compute-in-memory (DCIM) annealer that minimises a quadratic
unconstrained binary optimisation (QUBO) objective

    H(q) = q^T Q q,   q in {0,1}^n.

The architecture comes from the paper *Scalable Digital Compute-in-Memory
Ising Machines for Robustness Verification of Binary Neural Networks*. There
the QUBO encodes a search for an adversarial input perturbation of a binary
neural network. Low-energy states, even ones that break some penalty
constraints, often contain a perturbation that flips the network's output.
The chip neither builds the QUBO nor checks the network. It takes a
coefficient matrix and returns a low-energy binary vector.

The design has two main ideas:

* **The coupling matrix stays in SRAM, and the arithmetic happens next to the
  bitcells.** Every bitcell has a NOR gate and a small multiplexer. With them,
  the array computes the local field of one variable, one bit-slice per clock,
  and no weight ever leaves the macro.
* **No random-number generator.** The randomness that simulated annealing
  needs comes from *pseudo-reads* at a lowered memory supply VDDM. Such a read
  upsets some stored magnitude bits, with different rates for stored 0s and
  stored 1s. Raising VDDM over the run fades this noise out, so the VDDM
  schedule plays the part of a temperature schedule. The nominal weights are
  rewritten at intervals to clear the accumulated upsets.

## 1. The update rule and the pinned-one embedding

Take a symmetric Q. Flipping the single variable q_i (q_i <- 1 - q_i) changes
the energy by

    dE_i = (1 - 2 q_i) (Q_ii + 2 sum_{j != i} Q_ij q_j).

A multiply-accumulate over the matrix gives the sum. It cannot give the
separate diagonal term Q_ii. The host therefore adds one extra variable q_p,
which is held at 1. It then builds an embedded matrix Qt:

    Qt_ij = Q_ij      for i != j (problem variables)
    Qt_ii = 0
    Qt_ip = Qt_pi = Q_ii / 2

Since q_p = 1, the row sum

    s_i = sum_j Qt_ij q_j = sum_{j != i} Q_ij q_j + Q_ii / 2

gives

    dE_i = 2 (1 - 2 q_i) s_i.

The sign of dE_i is all the hardware needs, so no multiplier is required:

| q_i | flip when | new q_i |
|-----|-----------|---------|
| 0   | s_i < 0   | 1       |
| 1   | s_i > 0   | 0       |

When dE_i = 0 the variable keeps its value. Variables are visited one after
another in a fixed order, and each decision takes effect at once, so the next
variable already sees it. This is a sequential greedy (zero-temperature)
scan. All the exploration comes from the noisy weights.

In this RTL the pinned variable is the **last index, PIN = N-1**. At the
default size, N = 1067: 1066 problem variables and the pinned one. The matrix
is 1067 x 1067 words of 8 bits, 9,112,712 bits in all.

## 2. How one local field is computed (`dcim_array`, `signed_adder_tree`)

Row i of the array holds the words Qt[i][0..N-1], in two's complement. The
spin q_i drives all cells of row i. Each cell's NOR gate takes the
complemented stored bit and the active-low spin, so its output is
`bit AND q_i`. The cell multiplexers connect one cell per row to the row's
output line: the cell of the selected column j and the selected bit-slice b.
The array therefore delivers, for every row i at once,

    prod[i] = Qt[i][j]<b> AND q_i.

Qt is symmetric. Reducing over the rows (the column j) thus gives the row sum
s_j that the update of variable j needs.

`signed_adder_tree` counts the ones in `prod` with a balanced adder tree,
ceil(log2 N) levels deep and combinational. A shift-accumulator then applies
the two's-complement weights, taking the most significant slice first:

    slice 7 (sign): acc = -count
    slices 6..0:    acc = 2*acc + count

After the eighth slice, `acc` is exactly s_j. The sum with the current slice
included is also available combinationally (`s_next`), so the sign check and
the spin write happen on the clock of the last slice.

**Timing.** An update takes BITS = 8 clocks, plus one more when a pseudo-read
comes before it. A sweep over the 1066 free variables takes 8,528 clocks
without pseudo-reads.

## 3. Noise: pseudo-read, VDDM schedule, refresh

### Pseudo-read (`dcim_array`, behavioural)

A one-clock `pr_en` pulse disturbs every stored **magnitude** bit (bits 6..0)
at the present VDDM code. The sign bit is never disturbed: the noise changes
the size of a coupling but never its polarity. Upsets persist in the cells
until the row is rewritten. The model flips each bit independently, using
these rates (in %):

| VDDM (V)            | 0.30 | 0.35 | 0.40 | 0.45 | 0.50 | 0.55 | 0.60 | 0.65 | 0.70 | >= 0.75 |
|---------------------|------|------|------|------|------|------|------|------|------|---------|
| stored 0 -> 1       | 35.0 | 34.0 | 31.5 | 28.0 | 25.0 | 22.5 | 18.5 | 12.0 | 2.0  | 0       |
| stored 1 -> 0       | 58.5 | 57.5 | 55.5 | 53.5 | 51.0 | 49.5 | 46.0 | 38.5 | 11.0 | 0       |

These numbers were read by eye from measured curves of a 28 nm DCIM
prototype and are approximate. They are the weakest part of the model: change
`P0`/`P1` in `rtl/dcim_array.sv` to match a characterised process. This noise
is the only non-synthesizable behaviour in the design. In silicon it is a
property of the bitcells, not of any logic.

### VDDM schedule (`vddm_sched`)

The memory supply is requested as a 4-bit code: VDDM = 0.30 V + 50 mV * code,
so codes 0..12 cover 0.30..0.90 V. A run starts at `vddm_start`. After every
`vddm_hold` sweeps the code goes up by one, until it reaches `vddm_end`. Low
codes explore; codes of 9 and above (0.75 V and up) make the array exact, and
the final sweeps then settle into a local minimum. The code leaves the design
on `vddm_code`, for a regulator outside it.

### Refresh (`weight_loader`)

After every `refresh_sweeps` sweeps (never after the last one), the
controller reloads the whole matrix from the host. The chip keeps no second
copy of the matrix. A refresh is the same row stream as the first load, and
`w_refresh` tells the two apart.

## 4. Control flow and configuration (`anneal_ctrl`)

```
IDLE --start--> LOAD --(N rows)--> [PREAD] -> UPDATE (8 clocks) -> next index ...
                                      ^                               |
                                      |            end of sweep: sweep_done,
                                      +-- REFRESH <-- refresh due? -- last sweep? --> DONE
```

`start` latches an `anneal_cfg_t` (see `rtl/dcim_pkg.sv`) and the initial
state `init_q`. The pinned entry is forced to 1.

| field            | meaning |
|------------------|---------|
| `n_sweeps`       | number of sweeps (iterations); the run then stops and `q` holds the result |
| `pr_interval`    | a pseudo-read comes before every `pr_interval`-th update (1 = before each update; N-1 = once per sweep; 0 = never) |
| `refresh_sweeps` | reload the weights after every k-th sweep; 0 = never |
| `vddm_start`, `vddm_end`, `vddm_hold` | VDDM staircase |

The scan order is 0, 1, ..., N-2; PIN is skipped. The result is the
**terminal** state: no best-so-far state is kept. `done` stays high until the
next `start`, which may come straight from DONE.

## 5. Host interface and problem mapping

The host streams rows (`dcim_ising_top` ports):

* `w_req` is high while the chip wants rows, and `w_row` names the row it
  wants next. Rows go in order 0..N-1.
* The host drives `w_valid` with the N words of that row on `w_data` (word j
  is column j). The row is written in each clock in which `w_valid` and
  `w_ready` are both high. The host may insert wait states.

The host must:

1. quantise Q to 8-bit two's complement with even diagonal entries, or
   quantise Q_ii/2 directly;
2. build Qt as in section 1, with column/row PIN holding Q_ii/2;
3. send Qt again whenever `w_refresh` requests a refresh.

A problem with n < N-1 variables goes in rows/columns 0..n-1, with zeros
elsewhere (except its entries in column PIN). The unused variables then always
see a zero field. Start them at 0 and they stay at 0. The scan still visits
them, so a sweep always costs (N-1) x 8 clocks.

Sizes the default array can hold (matrix order = variables + 1 pinned):

| problem (variables) | matrix order | bits needed | fits in 1067^2 x 8 |
|---------------------|--------------|-------------|--------------------|
| 183                 | 184          | 270,848     | yes |
| 319                 | 320          | 819,200     | yes |
| 1066                | 1067         | 9,112,712   | yes, exactly |

A problem whose coefficients need more than 8 bits needs a larger `BITS`.
The RTL is parameterised for this, but the error-rate model assumes a single
sign bit at the top of the word.

## 6. Files

| file | contents |
|------|----------|
| `rtl/dcim_pkg.sv` | defaults (N = 1067, BITS = 8), VDDM code, `anneal_cfg_t`, controller states |
| `rtl/dcim_ising_top.sv` | top level: wires the six blocks |
| `rtl/anneal_ctrl.sv` | state machine, scan, slice sequencing, cadences |
| `rtl/weight_loader.sv` | row stream from the host, for load and refresh |
| `rtl/dcim_array.sv` | **behavioural** SRAM macro: storage, per-cell NOR/MUX compute, pseudo-read upsets |
| `rtl/signed_adder_tree.sv` | popcount tree and signed slice accumulator |
| `rtl/spin_update.sv` | spin register, pinned bit, sign check |
| `rtl/vddm_sched.sv` | VDDM staircase |

Every module except `dcim_array` is synthesizable. A real chip would replace
`dcim_array` with a custom macro that has the same ports.

## 7. Simulating

All testbenches check themselves and end with a line
`TB_RESULT checks=<n> failures=<m>`. Build any of them with Verilator 5, for
example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/dcim_pkg.sv \
        tb/tb_dcim_ising_top.sv --top-module tb_dcim_ising_top -Mdir obj && obj/Vtb_dcim_ising_top

`-y rtl` lets Verilator find the submodules by file name. The full-size and
workload testbenches build the 9.1 Mb array and run in under a minute.

| testbench | what it shows |
|-----------|---------------|
| `tb_dcim_array` | compute port bit-exact; no upsets at 0.90 V; upset rates at 0.30 V and 0.70 V within tolerance; sign bits untouched; rewrite restores |
| `tb_signed_adder_tree` | per-slice counts and signed sums at N = 1067 against integer arithmetic, including the extreme words; 8 clocks per field |
| `tb_spin_update` | flip rule, tie rule, pinned bit, against a reference |
| `tb_weight_loader` | row order, data, one write per row, done pulse, N clocks at full rate, host wait states |
| `tb_vddm_sched` | staircase, clamping, restart, hold = 0 |
| `tb_anneal_ctrl` | event trace (load, pseudo-read, commits, sweeps, refresh, done) against the flow rules for four configurations; slice order |
| `tb_dcim_ising_top` | 12-variable end to end: noise-free run matches a reference greedy scan; an annealed run from 0.30 V ends in a local minimum with sign bits intact; restart; dE = 0 ties; each mechanism counted |
| `tb_dcim_ising_top_full` | default size (1067 x 1067 x 8): a noisy sweep at 0.70 V, then two exact sweeps that must match a reference scan started from the hardware's state |
| `tb_workloads` | random QUBOs with 183, 319 and 1066 variables on the default array, embedded as in section 5, annealed over 30 sweeps; the end state must be a local minimum of the *original* QUBO, the padding must stay 0, and the energy must fall |

The testbench QUBOs are random. The matrices of the neural-network study are
not reproduced, so the solution-quality numbers reported for it (counts of
near-optimal states and of successful attacks) cannot be checked with this
RTL.

## 8. What follows the published architecture and what was chosen here

From the published architecture:

* 8-bit signed couplings in SRAM, and the 1067 x 1067 size.
* A NOR gate and a multiplexer in each cell, and bit-slices time-multiplexed
  through the multiplexer.
* A signed adder tree and a sign check.
* The pinned-one embedding and the flip rule.
* A sequential, deterministic scan with immediate commit.
* Pseudo-read noise on the magnitude bits only, with asymmetric rates.
* VDDM swept from low to high.
* Periodic refresh at a programmable cadence.
* The terminal state as the result.

Chosen here, where the architecture leaves things open:

* Two's-complement words. The architecture speaks of a signed word whose
  MSB is the sign and whose other bits are "magnitude bits", which would also
  fit sign-magnitude. Holding the MSB keeps the sign in both formats.
* The polarity of the NOR input (active-low spin).
* Column select with reduction over rows, which is equivalent because Qt is
  symmetric.
* MSB-first slice order and the popcount-plus-accumulator form of the signed
  tree.
* A pseudo-read that disturbs the whole array in one clock.
* The pseudo-read cadence as a register. The architecture describes both one
  pseudo-read per update and one per iteration.
* One iteration = one sweep.
* The position of the pinned variable.
* The VDDM code format and its staircase.
* Refresh as a reload from the host.
* Row-wide writes with a valid/ready handshake.
* The configuration struct, counter widths and asynchronous active-low reset.

Not built:

* The regulator that turns the VDDM code into a supply.
* The host software: QUBO construction, embedding, quantisation, and the
  check of the network on the perturbed input.
* A randomised scan permutation, which the architecture mentions as an
  alternative to the fixed order.

The power, area and time-to-solution projections of the published work are
estimates scaled from another chip. They cannot be checked against this RTL.
For reference, at 8 clocks per update, 1000 sweeps over 1066 variables take
about 8.5 million clocks, or 9.6 million with a pseudo-read before every
update. The published time-to-solution projection is 113.85 ms. If it
refers to the same 1000-sweep run as the software baseline it is compared
with, it implies a clock of roughly 75-85 MHz. The clock frequency itself is not
stated.
