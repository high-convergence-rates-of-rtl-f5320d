# Three-body invertible logic in stochastic CMOS: an invertible adder

Invertible logic runs a circuit in both directions. Give an adder `A` and
`B` and it settles on `Y = A + B`. Give it only `Y` and it settles on some
pair `A`, `B` whose sum is `Y`. The circuit is a network of probabilistic
bits ("spins") whose energy function (Hamiltonian) is lowest exactly in the
states that satisfy the logic function. Random noise and a slowly tightening
"pseudo inverse temperature" `I0` drive the network into one of those
minimum-energy states. Fixing some spins to constants chooses the direction.

Conventional designs only use two-body terms `J_ij m_i m_j`, and the energy
landscapes they give have several levels and local minima. This RTL uses
**three-body** terms `c_ijk m_i m_j m_k` as well, following the ISCAS 2021
paper "High Convergence Rates of CMOS Invertible Logic Circuits Based on
Many-Body Hamiltonians" (Onizawa and Hanyu). The extra term lets every gate
have exactly two energy levels: -2 for valid states and +2 for invalid ones.
In hardware the extra cost is one XNOR gate per three-body term.

The code is SystemVerilog (IEEE 1800-2017) and synthesizable. It contains the
spin gate, the annealing controller, a convergence checker and an N-bit
invertible ripple-carry adder built from them. The testbenches are
self-checking.

## Spins and gate Hamiltonians

A spin `m` in {-1,+1} is stored as a bit `s = (1+m)/2`. The Hamiltonian of
one gate with spins `A`, `B` (inputs) and `Y` (output) is

    H = -(c_A m_A + c_B m_B + c_Y m_Y + c_AB m_A m_B + c_AY m_A m_Y
          + c_BY m_B m_Y + c_ABY m_A m_B m_Y)

The coefficients used (`cil_pkg::gate_coef`):

| gate | c_A | c_B | c_Y | c_AB | c_AY | c_BY | c_ABY | origin |
|------|-----|-----|-----|------|------|------|-------|--------|
| AND  | 0 | 0 | -1 | 0 | 1 | 1 | 1  | the paper's table (found by linear programming) |
| OR   | 0 | 0 | +1 | 0 | 1 | 1 | -1 | derived here: AND with every spin inverted |
| XOR  | 0 | 0 | 0  | 0 | 0 | 0 | -2 | derived here: valid XOR states have m_A m_B m_Y = -1 |
| XNOR | 0 | 0 | 0  | 0 | 0 | 0 | +2 | derived here, the mirror of XOR; the adder does not use it |

For all four gates, valid states have energy -2 and invalid states +2. This
matches the energies the paper lists for three-body AND, OR, XOR and XNOR
(`E_min = -2`, energy gap 4, two energy levels). The paper prints
coefficients only for AND. The OR, XOR and XNOR rows are the simplest sets that
match its energy table, so other coefficient sets may exist that also do.

A network's Hamiltonian is the sum of its gates' Hamiltonians. A net shared
by two gates is one spin, and its coefficients add up.

## The spin gate (`spin_gate`)

Each spin updates once per clock from the previous state of all the spins:

    I_i   = c_i + sum_j c_ij m_j + sum_(j,k) c_ijk m_j m_k + w_rnd * (rnd ? +1 : -1)
    m_i  <= sgn(tanh(I_i * I0))

The gate computes this with integral stochastic computing:

* **Two-body product** (`two_body_mult`): a multiplexer selected by `s_j`. It
  passes `c_ij` when `s_j = 1` and `-c_ij` when `s_j = 0`.
* **Three-body product** (`three_body_mult`): `m_j m_k` is `+1` when the two
  bits agree, so `XNOR(s_j, s_k)` drives the select of the same kind of
  multiplexer. This XNOR is the only logic that three-body terms add.
* **Sum**: one signed adder combines `c_i`, all the products and the noise
  term `±w_rnd`. Each spin gets one random bit per cycle.
* **Stanh** (`stanh_counter`): a saturating up/down counter with `2*I0`
  states. Each cycle it adds the whole integer `I_i`. The spin bit is 1 while
  the counter is in its upper half. With a larger `I0`, a spin needs more
  consistent evidence before it flips, so `I0` acts as an inverse
  temperature.

The counter is encoded as a signed value in `-I0 .. I0-1`, and the spin bit
is its sign. This is a choice made here, not in the paper. Centring the
states on zero matters because `I0` switches between 2 and 4 during
annealing. With this encoding the switch never flips a spin. If `I0` drops,
a counter that is out of range is pulled back into range at its next update.

A clamped spin outputs its fixed value at once. Its counter is also held at
the saturated state for that value, so it starts from there when released.
The paper does not say how fixed spins are held.

`spin_gate` has `N2` two-body inputs and `N3` three-body inputs. A term that
is not used gets a zero coefficient, and synthesis removes it. Its only
flip-flops are the counter's `$clog2(2*I0_MAX)` bits (3 at the defaults).
The random source is a separate block.

## The invertible adder (`inv_adder`)

The paper builds its adders from a gate-level ripple-carry adder. This design
uses the following gate decomposition (the decomposition is its own choice):

* bit 0 is a half adder: `Y0 = A0 ^ B0` and `C1 = A0 & B0`;
* each bit `i >= 1` is a full adder: `P = A^B`, `G = A&B`, `Yi = P^C`,
  `Q = P&C` and `C(i+1) = G|Q`;
* the carry out of the top bit is the extra sum bit `Y[N]`, so `Y` has
  `N+1` bits.

This gives `7N-3` spins and `5N-3` gates: 25 spins for 4 bits, 39 for 6 bits
and 53 for 8 bits. Spins are numbered `A[0..N-1]`, `B[0..N-1]`, `Y[0..N]`,
then four internal spins per bit `i >= 1` (`C_i, P_i, G_i, Q_i`). The index
functions are in `cil_pkg`.

No spin belongs to more than three gates. Each spin is therefore one
`spin_gate` with 6 two-body and 3 three-body inputs. While the design
elaborates, `inv_adder` walks the gate list in `cil_pkg` and works out each
spin's wiring: for every gate the spin belongs to, its partners are that
gate's other two spins. It also works out the coefficients for each role
(the spin as A, B or Y) and the summed one-body coefficient `c_i`. No table
is stored anywhere. To build a different invertible circuit from the same
gates, change `adder_gate`, `n_spins` and `n_gates`.

All the spins update in parallel (τ = 1 clock).

## Annealing and convergence (`i0_ctrl`, `energy_eval`, `cil_adder_top`)

A **shot** lasts `2T` cycles. For the first `T` cycles `I0 = I0min`, and the
noise can move spins out of local minima. For the next `T` cycles
`I0 = I0max`, and the spins settle. The paper's values are `I0min = 2`,
`I0max = 4`, `T = 100` and `w_rnd = 3`, and these are the defaults.

Shots repeat until the network is at its minimum energy, or until
`max_shots` (the paper's `N_shot`) shots have run. The paper does not say
when convergence is tested. Here it is tested once per shot, in the last
cycle of the `I0max` phase, by `energy_eval`. That block adds up the gate
energies with the same coefficients and flags `E == -2 * gates`. Because
every gate has energy -2 or +2, this flag means every gate is consistent.

The top-level handshake (`cil_adder_top`) is this design's own:

* A one-cycle `start` latches `mode`, `a_in`, `b_in`, `y_in`, `max_shots`
  and `seed`. It also loads the random generator and puts every counter in
  its state -1.
* `MODE_FORWARD` clamps A and B. `MODE_BACKWARD` clamps Y.
* `busy` is high for exactly `shots_used * 2T` cycles. `done` pulses in the
  next cycle, together with:
  * `converged`;
  * `shots_used`;
  * `a_out`, `b_out` and `y_out`, the spin values at the final test.
* `energy` and `at_emin` show the state as it is now.
* A new `start` may follow at any time.

Random bits come from `rng_xorshift`. It has `ceil(spins/32)` xorshift32
lanes, and each spin uses one state bit of one lane. The paper names LFSRs
and xorshift as possible sources and does not specify one.

## Measured behaviour

The testbenches reproduce the trend the paper reports: in backward mode,
almost every run converges within a few to a few tens of shots. The table
below is one run of `tb_adder_workloads` with the paper's schedule. Each
entry is the fraction of runs not yet at minimum energy after `N_shot` shots.

The 4-bit adder is run 4 times for every Y from 0 to 30 (124 runs). The 6-
and 8-bit adders are run 4 times for each of 32 Y values spread across their
range (128 runs each). Other seeds move the numbers by a few points.

| N_shot | 4-bit | 6-bit | 8-bit |
|-------:|------|------|------|
| 1   | 0.68 | 0.76 | 0.93 |
| 2   | 0.51 | 0.63 | 0.80 |
| 4   | 0.22 | 0.43 | 0.62 |
| 8   | 0.10 | 0.27 | 0.43 |
| 16  | 0.02 | 0.11 | 0.16 |
| 32  |      | 0.02 | 0.09 |
| 128 |      |      | 0.02 |

The paper's curves fall faster. For 4 bits it reports almost every case
converged after 4 shots. For 6 and 8 bits it reports a mean non-convergence
rate of about 1e-1 at roughly 4 and 8 shots. Behaviour this
implementation fixes but the paper leaves open may explain the gap:

* the counter encoding;
* how spins are clamped;
* testing only at shot ends;
* the OR and XOR coefficients;
* the single-bit noise term of exactly `±w_rnd` per cycle.

Treat the absolute rates as this implementation's, not the paper's.

A lone three-body AND gate, run backward with `Y = 0` (`tb_inv_and_backward`),
spends about a third of its time in each of the valid input pairs 00, 01 and
10 and about 6 % in the invalid pair 11.

## Departures and open points

* The paper prints three-body coefficients only for AND. OR, XOR and XNOR
  are derived (see the table above).
* The paper's FPGA figures (11 flip-flops per spin gate and LUT counts for 2,
  6 and 10 inputs) are not reproduced. This spin gate holds 3 flip-flops, and
  the paper does not say what its 11 hold.
* `energy_eval` and the start/done control are additions. The paper measures
  convergence in a software model.
* The paper also compares conventional two-body gates. They are not part of
  this design, but `spin_gate` with `N3 = 0` is one.
* The coefficient width is 8 bits, signed (`cil_pkg::CW`), and the local
  field has 12 bits. Both are far wider than the adder needs.

## Files

| file | contents |
|------|----------|
| `rtl/cil_pkg.sv` | constants, enums, gate coefficients, adder netlist and index functions |
| `rtl/two_body_mult.sv`, `rtl/three_body_mult.sv` | stochastic products |
| `rtl/stanh_counter.sv` | saturating counter with 2*I0 states |
| `rtl/spin_gate.sv` | one spin |
| `rtl/rng_xorshift.sv` | noise bits |
| `rtl/inv_adder.sv` | the spin network of an N-bit adder |
| `rtl/energy_eval.sv` | Hamiltonian and E_min flag |
| `rtl/i0_ctrl.sv` | shot schedule and stop condition |
| `rtl/cil_adder_top.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_adder_workloads.sv`, `tb/adder_workload_runner.sv` | 4-, 6- and 8-bit convergence runs |
| `tb/tb_gate_hamiltonians.sv` | energy levels of the AND/OR/XOR/XNOR Hamiltonians |
| `tb/tb_inv_and_backward.sv` | one invertible AND gate sampled in backward mode |

Top-level parameters: `WIDTH` (4), `T_CYCLES` (100), `I0_MIN` (2),
`I0_MAX` (4), `W_RND` (3) and `SHOT_W` (8, so up to 255 shots).
`tb_cil_adder_top` runs the top at exactly these defaults.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and finishes. Build
and run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/cil_pkg.sv tb/tb_cil_adder_top.sv --top-module tb_cil_adder_top -o sim
    ./obj_dir/sim

Substitute any `tb_*` name. Each testbench finishes in a few seconds or less.
The convergence statistics depend on the seed. Pass
`+verilator+seed+<n>` to the simulator to change it.
