# A probabilistic Ising machine for invertible-logic factorization

This is synthesizable SystemVerilog for the digital core of a probabilistic
computer that factors integers. The core holds 1143 *probabilistic bits*
(p-bits). Each p-bit is a one-bit register that flips at random. Its random
behaviour is biased by the states of the p-bits it is coupled to. The
couplings are chosen so that the lowest-energy states of the network are the
rows of a multiplier's truth table. Clamp the product p-bits of such a
"invertible multiplier" to a number, let the other p-bits evolve while the
temperature is slowly lowered, and the factor p-bits settle on a pair of
factors. Clamp the two factors instead and the product appears. Clamp the
product and one factor and you get division.

The chip this follows takes its randomness from outside the core: from
voltage-controlled magnetic tunnel junctions (V-MTJs). In a V-MTJ a short
voltage pulse removes the energy barrier between the two magnetic states.
When the pulse ends, the device falls into either state at random. A host
processor gathers these bits and hands 27 of them to the core for every
iteration. The V-MTJ, its access board and the host processor are not digital
logic designed here. A behavioural stand-in for the V-MTJ board is in
`tb/vmtj_trng_model.sv`, and the testbench of the top level plays the host.

## The update rule, and how the hardware evaluates it

The spins are m_i ∈ {−1, +1}, stored as bits 0/1. The Ising energy is
E = −(Σ h_i m_i + Σ_{i<j} J_ij m_i m_j). The input of p-bit i is

    I_i = h_i + Σ_j J_ij m_j

and a p-bit update is

    m_i ← sgn( tanh(I_i / T) + r ),   r uniform on (−1, 1).

The hardware does not compute tanh. It uses the equivalent form

    m_i ← [ I_i > T · atanh(u) ],   u uniform on (−1, 1),

which has the same probability (1 + tanh(I_i/T))/2 of giving +1. The sample
T·atanh(u) does not depend on the p-bit. It is therefore produced once, by
the **probabilistic logic unit** (`plu`). Every p-bit receives it as the
7-bit signed value `wrng`. Each p-bit then needs only a comparator.

In the PLU:

* `rng[14:0]` addresses the **half-atanh table** (`atanh_lut`). Entry k holds
  round(atanh((k + 0.5)/2^15) · 2^7): the magnitude in Q3.7, 11 bits, largest
  value 755. The 32768 entries are computed at elaboration from this formula,
  so there is no data file.
* `rng[15]` picks the sign. A 1 passes the entry and a 0 passes its negation.
* The signed sample is multiplied by T, an unsigned Q8.8 value. The product is
  floored to an integer in units of J and saturated to [−64, 63]. Flooring
  loses nothing: for an integer I, the test I > floor(x) is the same as I > x.
* The result is registered. `wrng` is valid one clock after `rng`.

A **p-bit** (`pbit`) stores `set` when `init` is high. When `select` is high it
stores the compare `I > wrng`. Otherwise it holds its value. The 6-bit I and
7-bit wrng are compared as signed numbers.

## Invertible gates and the multiplier network

Three invertible gates carry all the couplings. Each gate's ground states are
exactly its truth table (spin order as listed):

| gate | terminals | J | h |
|---|---|---|---|
| AND | A, B, C | [[0,−1,2],[−1,0,2],[2,2,0]] | [1,1,−2] |
| half adder | A, B, S, Co | [[0,−1,1,2],[−1,0,1,2],[1,1,0,−2],[2,2,−2,0]] | [1,1,−1,−2] |
| full adder | A, B, Ci, S, Co | [[0,−1,−1,1,2],[−1,0,−1,1,2],[−1,−1,0,1,2],[1,1,1,0,−2],[2,2,2,−2,0]] | 0 |

The half adder is the full adder with Ci held at 0. Each gate module
(`inv_and`, `inv_half_adder`, `inv_full_adder`) outputs its share
h_t + Σ_u J_tu m_u for each of its terminals. A p-bit that belongs to several
gates adds their shares. The J matrix and h vector of a whole circuit are the
sums of its gates' matrices and vectors. Adding shares gate by gate therefore
gives each p-bit exactly h_i + Σ_j J_ij m_j, the same as a flat row of
(m_j ? +J_ij : −J_ij) terms. The couplings are wired in and never change. The
same circuit factors any number that fits.

`factorizer #(N)` is an N × N array multiplier built from these gates:

* It has N² AND gates, one for each partial product A[k]·B[r].
* Row r (1 … N−1) has N adders. They add the partial products A[k]·B[r] to
  the previous row's result, shifted by one place. For row 1, the previous
  result is the partial products A[k+1]·B[0].
* Carries ripple from column k−1 to column k.
* Adders with three inputs are full adders. The adder in column 0 and the last
  adder of row 1 have only two inputs, so they are half adders.
* The product bits are: S0 = A0·B0, S_r = the column-0 sum of row r, then the
  remaining sums of the last row, and finally its last carry.

The circuit has 3N² p-bits: 2N factor bits, N² partial products, and a sum and
a carry for each of the N(N−1) adders. N = 3 gives 27 p-bits. The p-bit
numbering is defined by functions in `pim_pkg` (`node_a`, `node_b`, `node_pp`,
`node_sum`, `node_carry`, `node_prod`).

I_i is saturated to 6 bits (−32 … 31). A factor bit of the 10 × 10 design
touches ten AND gates, so its input can reach ±40.

## The PIM area (`pim_design_area`, the top level)

The area holds one factorizer for each N in `pim_pkg::DES_N` = {1, 3, 4, …, 10}.
N = 3 … 10 are the 6- to 20-bit factorizers (1140 p-bits). N = 1 is a single
AND gate (3 p-bits), which brings the total to 1143. The p-bits are numbered
design after design, from 0 to 1142.

| design (`des_sel`) | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 |
|---|---|---|---|---|---|---|---|---|---|
| product bits | 2 | 6 | 8 | 10 | 12 | 14 | 16 | 18 | 20 |
| p-bits | 3 | 27 | 48 | 75 | 108 | 147 | 192 | 243 | 300 |
| first p-bit | 0 | 3 | 30 | 78 | 153 | 261 | 408 | 600 | 843 |
| index bits used | 2 | 5 | 6 | 7 | 7 | 8 | 8 | 8 | 9 |

All designs share one PLU. One p-bit is updated per clock.

**Host protocol.**

1. Set `des_sel`, `t_start`, `t_end` and `t_step`, the `set` vector (initial
   states) and the `fixed` vector (clamped p-bits).
2. Pulse `init` for one cycle. This loads every p-bit from `set` and the
   temperature from `t_start`.
3. For each iteration, hold `step` high for one cycle with 27 fresh random bits
   on `rng`. Iterations may come back to back.
4. Read the result one p-bit at a time: put a p-bit number on `rd_index` and
   read `rd_state` (combinational).

**One iteration.**

* `rng[15:0]` go to the PLU.
* `update_select` takes as many low bits of `rng[26:16]` as the chosen design
  needs (last row of the table).
* If that local index is below the design's size and the p-bit is not fixed,
  the p-bit's `select` is raised in the next cycle. At that point the PLU's
  registered sample for the same iteration is on `wrng`.
* Otherwise nothing is updated. `skip_range` or `skip_fixed` reports why.
* Either way, `anneal` lowers T by `t_step` and stops at `t_end`.
  - Its accumulator has 16 more fraction bits than T, so sweeps much slower
    than one LSB of T per iteration are possible.
  - Example: 1.375 → 0.8 over 8192 iterations is `t_step` = 1176 (147 LSB of T, times 2^16, divided by 8192).
  - `at_end` signals that T has reached `t_end`.

Clamping uses the fixed mask: a fixed p-bit keeps the value `init` gave it.
Designs that are not selected keep their states.

**Throughput and latency.** One iteration per clock. A p-bit's new state is
visible one clock after its iteration was presented.

## How far it can be trusted

Every module has a self-checking testbench in `tb/`. Each one fails on a
deliberately broken copy of its module.

* `tb_atanh_lut`: table entries are checked against tanh, and the table is
  checked to be monotonic.
* `tb_plu`: exact `wrng` values, computed in real arithmetic, and the one-cycle
  latency.
* `tb_pbit`: checked against a reference model, including the I = wrng ties.
* `tb_inv_*`: every state of each gate, with its ground states equal to the
  truth table.
* `tb_factorizer`: for every 3 × 3 product, the correct state is stable at
  zero temperature, and any single flipped p-bit is corrected.
* `tb_anneal`: the 8192-step sweep and the clamp.
* `tb_update_select`: all designs and the skip cases.

`tb_pim_design_area` runs the full 1143-p-bit top level with default
parameters. Random bits come from the V-MTJ model. With the sweep
1.375 → 0.8 over 8192 iterations on the 6-bit design, one run gave:

* factorizing 35 found (5,7) or (7,5) in 11 of 12 trials;
* multiplying 7 × 5 gave 35 in 3 of 6 trials (the most common result);
* dividing 35 by 5 gave 7 in 6 of 6 trials.

`tb_factor20` runs a 20-bit problem on the 10 × 10 design: 894,479, with the
temperature swept 20 → 4 over 2^18 iterations. Annealing roughly halves the
number of gates whose terminals break their truth table. No trial reached
883 × 1013 within that budget. Problems of this size were reported solved
only with the revised mapping, which is not built here (see below).

The run also drives the AND-gate and 20-bit designs. It checks that every
mechanism occurs: init, updates, both kinds of skip, reaching `t_end`, design
switching and read-out. The pass thresholds are deliberately loose because
the outcome is statistical.

Where this RTL goes beyond what is documented for the chip, the choices are
its own:

* the fixed-point formats (Q3.7 atanh sample, Q8.8 temperature, integer I and
  wrng), with flooring and saturation;
* the centred table address k + 0.5;
* the fixed mask used for clamping;
* masking the random index to the design's width and skipping indices past
  the end of the design;
* the one-cycle alignment register for `select`, and asynchronous active-low
  resets;
* the p-bit numbering;
* the 3-p-bit AND-gate design that completes the count of 1143;
* the port-level host interface. On the chip the host is a small RISC-V
  processor whose bus interface is not documented.

Known departures:

* The chip's selection logic is described as using up to 11 random bits. Here
  at most 9 of the 11-bit field are used, because the largest design has 300
  p-bits.
* A revised mapping is not built. It uses odd factors only, needs 275 p-bits
  for 20 bits, and stops the run when a forward multiplier confirms a
  solution.
* The parallel-update and advanced-node variants are not built either.

## Simulating and changing it

Everything is plain SystemVerilog-2017. The package `rtl/pim_pkg.sv` must be
read first. For example:

    verilator --binary --timing -Wno-fatal --top-module tb_pim_design_area \
        -y rtl -y tb +libext+.sv -Irtl -Itb rtl/pim_pkg.sv tb/tb_pim_design_area.sv
    ./obj_dir/Vtb_pim_design_area

Every testbench prints one line, `TB_RESULT checks=N failures=M`.

To change the set of designs, edit `DES_N`/`NDES` in `pim_pkg`. The p-bit
count, bases and index widths follow from it. `IDX_W` must stay large enough
for the total. The widths of the table, temperature, sample and p-bit input are
also in `pim_pkg`. Changing `LUT_FRAC` or `T_FRAC` changes the scale of the
sample, so keep LUT_FRAC + T_FRAC equal to the shift used in `plu`, which it
computes from them.
