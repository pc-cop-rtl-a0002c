# pc-COP: a 2048 p-bit probabilistic computer for max-cut, in SystemVerilog

A probabilistic bit (p-bit) is a binary unit that keeps flipping between
-1 and +1 at random. How likely it is to be +1 depends on a weighted sum of
the other p-bits. Couple many of them through a symmetric weight matrix
**J**, update them one at a time (Gibbs sampling) and slowly make them less
random. The network then settles into low values of the Ising energy

    E(m) = - sum_{i<j} J_ij m_i m_j .

Many combinatorial problems can be written as such an energy. Max-cut is
the one this design targets: give every vertex a p-bit and set
J_ij = -w_ij. The two sides of the cut are then the p-bits at +1 and at -1,
and a low energy means a large cut.

This RTL implements such a machine with 2048 fully connected p-bits, 2-bit
weights (-1, 0, +1) and a geometric annealing schedule. It reaches four
times the speed of the plain one-p-bit-per-clock loop by updating four
p-bits per clock. The four results are exactly those of four successive
sequential updates. A design that updates four p-bits at once without this
care would not give them.

## 1. What one run computes

    load J, the initial state m, the LFSR seeds and the beta schedule
    beta = beta_initial
    repeat N_s times                               (one "sample")
        for i = 1 .. N_m, in order
            I_i = beta * sum_{j<N_m} J_ij m_j
            m_i = +1 if act(I_i) > rand  else -1   (rand uniform in [-1,1))
        beta = beta * beta_anneal_rate

`act` is a piecewise-linear stand-in for tanh: -1 below -1, +1 above +1,
and the identity in between. The comparison gives +1 with probability
(1 + act)/2, which is what sgn(rand + tanh(I)) gives. There is no bias term
h_i. Max-cut does not need one, and the datapath has no place for it.

Number formats:

| quantity | bits | format |
|---|---|---|
| p-bit | 1 | 0 = -1, 1 = +1 |
| J_ij | 2 | 11 = -1, 00 = 0, 01 = +1 (10 reads as 0) |
| row sum | 13 | signed integer, [-2048, 2048] |
| beta, anneal rate | 24 | unsigned Q4.20 |
| I = beta * sum | 38 (39 in the core) | signed, 20 fraction bits, full precision |
| act(I) | 22 | signed Q2.20 in [-1, +1] |
| rand | 21 | LFSR state read as signed Q1.20 |

A typical schedule is beta_initial = 0.01 with rate 1.005 for N_s = 1000,
or rate 1.05 for N_s = 100. In Q4.20 these are 10485, 1053818 and 1101004.

## 2. Four updates per clock: speculate and select

Sequential order matters. The update of p-bit i+1 must see the *new*
value of p-bit i. So the four p-bits i..i+3 handled in one clock cannot
simply be updated side by side. The core (`pbit_update_core`) works like a
carry-select adder: every answer that might be needed is computed, and
the right one is picked once the earlier bits are known.

Lane r (0..3) handles p-bit i+r and owns one adder tree. The tree gives
T_r = sum_j J[i+r][j] m_j over the *old* state. Lane r depends on the r
p-bits before it, so it has 2^r speculative paths. Path c assumes those
bits take the new values in c (bit q of c is the guess for p-bit i+q).
Only the r terms J[i+r][i+q] m_{i+q} differ between paths, so each path
gets its sum from the tree output by a small correction:

    base_r = T_r - sum_{q<r} J[i+r][i+q] * (m_{i+q} + 1)   (every guess = -1)
    S_r(c) = base_r + sum_{q<r, c_q = +1} 2 * J[i+r][i+q]

Each path then runs its own beta multiply, activation, LFSR and comparator
(`pbit_path`). That is 1 + 2 + 4 + 8 = 15 paths and 4 adder trees for
K = 4, or in general K trees and 2^K - 1 paths. The selection is a chain
of multiplexers. Lane 0's result picks lane 1's path, lanes 0..1 pick lane
2's, lanes 0..2 pick lane 3's. All of it is combinational within the
clock.

Randomness is the one subtle point. A sequential machine would use one
random number per update. Here each path has its own LFSR, and every LFSR
steps once per clock whether or not its path is chosen. Path
n = 2^r - 1 + c takes seed bits [21n+20 : 21n] of the 512-bit seed input
(315 bits are used for K = 4). The reference model in the testbenches
follows the same rule: update i+r draws from the LFSR of the path that
ends up selected. With that rule the hardware matches the sequential
algorithm bit for bit.

The parameter K also builds the 1-way (K = 1) and 2-way (K = 2) versions.
The core's testbench checks K = 2 and K = 4.

## 3. The per-path units

* `jm_mult`: the 2-bit by 1-bit product, one per column and tree (a truth
  table, no multiplier).
* `adder_tree`: a balanced binary tree of log2(2048) = 11 adder levels.
  Level l is l+2 bits wide. It is combinational, with no pipeline
  registers.
* `beta_multiplier`: 24-bit unsigned beta times the signed sum, at full
  width.
* `activation`: clamps at +-T and divides by T with a shift. T = 1 is the
  default (`T_LOG2 = 0`); T = 2 and 4 are available through the parameter.
* `lfsr`: a 21-bit Fibonacci LFSR. The XOR of bits 20, 19, 18 and 15 is
  shifted into bit 0. Its period is the maximal 2^21 - 1, which the
  testbench measures. A zero seed is replaced by 1.
* `comparator`: act > rand, signed, with the LFSR value sign-extended to 22
  bits so that act = +1 always wins. A tie gives -1.

## 4. J memory and the 18-bit write address

J takes 2048 x 2048 x 2 bits = 8 Mb. `j_mem` splits it into K banks of
2048/K rows of 4096 bits. Row r lives in bank r mod K at bank row r / K,
so rows i..i+K-1 of a group come out of K different banks in the same
clock. A read is synchronous: `rd_addr = g` returns rows gK..gK+K-1 on the
next clock. That one clock of latency is the "+1" in the cycle count
below.

The host writes J 32 bits (16 coefficients) at a time. `j_addr_decoder`
reads J_addr as

    J_addr[17:7] = row (0..2047)     J_addr[6:0] = word in the row (0..127)

Coefficient J[r][16w + e] sits at bits [2e+1 : 2e] of word w of row r.
The memory has no reset. Every word of the rows and columns in use must be
written, including zeros. Columns beyond N_m need not be cleared. When a
run starts, `ctrl_regs` builds a 2048-bit column mask with ones below N_m.
The top forces every J entry outside the mask to 00 before the adder trees
see it, so the field is the sum over j < N_m, as the algorithm defines it.

## 5. Control, instruction and timing

Top-level ports (`pc_cop_top`):

| port | width | direction | use |
|---|---|---|---|
| clk, rst | 1 | in | rising edge; rst is synchronous, active high |
| J_data_in | 32 | in | J write data |
| J_addr | 18 | in | J write address |
| m_initial | 2048 | in | initial state |
| seed | 512 | in | LFSR seeds |
| beta_initial, beta_anneal_rate | 24 | in | annealing schedule, Q4.20 |
| instruction | 32 | in | see below |
| m_final | 2048 | out | result |
| config_mode | 1 | out | configuration mode is active |
| done | 1 | out | the run has finished |

Instruction word (registered in `instr_reg`, so it acts one clock late):

| bits | 31:28 | 27 | 26 | 25:13 | 12:0 |
|---|---|---|---|---|---|
| field | start | config | debug | N_m | N_s |

`pcircuit_fsm` has five states: IDLE, CONFIG, FETCH, UPDATE and DONE.

* **Configuration.** Set config = 1 and start = 0. While `config_mode` is
  high, every clock writes J_data_in to J_addr. The same clock loads
  m_initial into the state register, the seeds into the LFSRs and the two
  beta inputs into `ctrl_regs`. Clear config to leave.
* **Run.** Set config = 0, a non-zero start, N_m (1..2048; larger values
  are clamped to 2048) and N_s. `ctrl_regs` latches N_m, N_s and debug, and
  beta is loaded with beta_initial. Each sample is one FETCH clock (read
  group 0) and then ceil(N_m/K) UPDATE clocks. UPDATE clock g writes group g
  into `m_reg` while it reads group g+1. The last UPDATE of a sample also
  multiplies beta by the rate (`anneal_unit`: truncated to Q4.20,
  saturating). Lanes whose p-bit index is N_m or more are masked, so their
  p-bits do not change.
* **Done.** `done` rises after 2 + (ceil(N_m/K) + 1) * N_s clocks, counted
  from the clock edge at which the instruction is applied. For N_m = 800 and
  N_s = 1000 that is 201 002 clocks, about 2.01 ms at 100 MHz. `m_final`
  shows the result from the same clock on. It keeps showing it during the
  next run, until that run is done. With debug = 1, `m_final` instead
  follows the state register live.
* A start field that is held does not start a second run. start must read
  zero for at least one clock between runs. N_m = 0 or N_s = 0 completes at
  once.

## 6. Hierarchy

    pc_cop_top
    ├── instr_reg          32-bit instruction register
    ├── ctrl_regs          beta_initial, rate, N_m, N_s, debug, column mask
    ├── pcircuit_fsm       sequencing, group and sample counters, lane mask
    ├── j_mem              K banks, 32-bit writes, full-row reads
    │   └── j_addr_decoder
    ├── m_reg              2048-bit state
    ├── anneal_unit        beta register and anneal multiplier
    └── pbit_update_core   K x adder_tree (jm_mult leaves), 2^K-1 x pbit_path
                           (beta_multiplier, activation, lfsr, comparator)

Shared widths, the instruction struct and the state enum are in
`rtl/pccop_pkg.sv`. At the default size, a generic synthesis gives about
6.6 k flip-flops (2048 state, 2048 output copy, 2048 column mask, 315
LFSR bits, beta, counters) and 8 Mb of memory. The core has about 29 k
word-level cells, most of them the 4 x 2047 tree adders.

## 7. Simulation

Every module except the small `pbit_path` wrapper has a self-checking
testbench `tb/tb_<module>.sv`; `pbit_path` is covered by the core's test. Each one
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb/pccop_ref_pkg.sv` holds a plain sequential software model of the
algorithm above. It has the same number formats and the same
LFSR-per-update rule, but no trees and no speculation. The core and
top-level testbenches compare against it bit for bit.

* `tb_pbit_update_core`: 600 random groups at N = 64 for K = 4 and K = 2,
  checked against four (or two) successive sequential updates. It counts
  how often a speculative path other than "all -1" was selected.
* `tb_pc_cop_top` (N = 64): configuration through the 32-bit port, then
  four runs. They cover full groups, a partial last group, debug mode and
  N_s = 0. The test checks exact cycle counts, bit-exact final states,
  untouched p-bits beyond N_m, a held start and the beta steps. In the
  N_m = 30 run the J columns beyond 30 are not zero, so the column mask
  is exercised.
* `tb_pc_cop_full`: the default 2048-p-bit design. It writes all 2^18 J
  words, then runs an 800-node toroidal graph with random +-1 weights
  (the shape of the G11-G13 benchmarks) for N_s = 100 at beta 0.01 and
  rate 1.05. The run must take 20 102 clocks, match the model, and reach
  an energy of -900 or below. With the seeds in the testbench the cut
  rises from 24 to 570, and the energy ends at -1090.
* `tb_maxcut_workloads`: also at the default size, three more graph
  families with N_s = 100:
  * a random 800-node graph with 6 % edge density and unit weights, like
    G1-G10;
  * a planar 800-node graph (a 20 x 40 grid with a random diagonal in each
    cell), standing in for the planar G14-G21;
  * a fully connected 2000-node graph with +-1 weights, like K2000.

  Each run is checked for its clock count (20 102 or 50 102) and bit-exact
  agreement with the model. It must also meet a quality bound. With the
  seeds in the testbench:
  * The random graph's cut reaches 60.2 % of its 19 304 edges. The best
    known cuts of G1-G10 are about 60.5 %.
  * The planar graph's cut reaches 1531 of 2281 edges. Its triangles cap
    any cut at 1540.
  * The dense graph reaches an energy of -65 212, against about -68 000
    expected for its ground state.

  The whole test takes about a minute.

To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
      --top-module tb_pc_cop_full -y rtl -y tb +libext+.sv -Irtl \
      rtl/pccop_pkg.sv tb/pccop_ref_pkg.sv tb/tb_pc_cop_full.sv
    ./obj_dir/Vtb_pc_cop_full

The full-size test builds in about half a minute and runs in about ten
seconds.

## 8. What is the published design and what is not

Taken from the published design: 2048 p-bits, the 2-bit J encoding and
its product table, the 0/1 state encoding, the 8 Mb J memory read one row
per bank per clock, the 18-bit J address and 32-bit data, the 512-bit seed
and 24-bit Q4.20 beta inputs, the instruction fields and their widths, the
logarithmic adder tree, the beta multiplier, the geometric annealing
schedule, the A1 piecewise-linear activation, the 21-bit LFSR with its
tap positions, the signed comparator, the 4-way speculate-and-select core
with 4 trees and 15 paths, and the cycle count (N_m/K + 1) N_s.

Choices made here, where the published description is silent:

* The bit positions of the instruction fields (packed MSB first in the
  order start, config, debug, N_m, N_s). What start, config and debug do:
  start is a non-zero level, config is a configuration mode with one write
  per clock, debug makes the output live.
* The FSM states and the protocol on the ports. There is no separate
  write strobe. Configuration writes every clock.
* The J_addr split into row and word, and the row-to-bank interleave.
* Full-precision I, truncating and saturating beta updates, a strict
  comparison, zero-seed protection, masking of lanes beyond N_m, and the
  column mask that makes the sum stop at N_m.
* The numbering of the 15 LFSRs and the seed slices they take.
* The comparator is 22 bits wide, where the published figure labels it
  21-bit. The 22-bit activation output (+1 must be representable) was
  followed instead.

Not included: the lookup-table tanh and sigmoid activations and the 1-way
and 2-way variants, which the published work only uses for comparison
(K = 1 and K = 2 can still be built through the parameter). Also not
included: the processor-side test framework (ARM host, AXI/GPIO, input
and output BRAMs, and the 2048-bit and 512-bit LFSRs that produce
m_initial and the seed); the top simply exposes those inputs. The memory
is a plain array. Its mapping onto block RAMs, and all FPGA timing and
resource results, are left to synthesis.
