# A discrete simulated bifurcation Ising machine in SystemVerilog

This design searches for low-energy states of an Ising problem,
H(s) = -1/2 * sum_ij J_ij s_i s_j, with s_i = +-1. Max-cut, knapsack and
other combinatorial optimization problems can be written in this form.
Each spin is modelled as a bifurcating oscillator with a position x_i and a
momentum y_i. A pump amplitude a is ramped slowly from 0 to a0. As it grows,
every oscillator settles on one side of zero, and the sign of x_i is the
spin. The variant built here is *discrete* simulated bifurcation (dSB). In
dSB the coupling force of spin i uses only the signs of the other positions:

    f_i  = sum_j J_ij * sgn(x_j)
    y~   = y_i + ( -(a0 - a) * x_i + c0 * f_i ) * dt
    x~   = x_i + a0 * y~ * dt
    if |x~| > 1 :  x_i = sgn(x~),  y_i = 0      (inelastic wall)
    else        :  x_i = x~,       y_i = y~
    if heat     :  y_i += gamma * y_i(old) * dt  (optional heating)
    after all spins: a += delta_a

Because the product J*sgn(x) only ever multiplies by +-1, the machine needs
no multipliers for the dominant O(n^2) work. A row of J is summed by a
multiplexer and an adder tree. This is what makes high parallelism cheap.

The RTL follows the FPGA architecture of Orlando et al., "High-Parallel
FPGA-Based Discrete Simulated Bifurcation for Large-Scale Optimization". It
uses that paper's block structure and memory organization, and its main
configuration: 256 spins, Pr = Pc = 16, Pb = 4 and 8-bit couplings. Number
formats, handshakes, the exact cycle schedule and the host interface are not
in the paper, and were chosen here. The "Departures and open points" section
lists each difference.

## Three degrees of parallelism

The matrix-vector product J*sgn(x) is unrolled three ways:

* **Pc: columns.** A MAC unit consumes Pc coefficients of one row in each
  cycle. A row of n_spin coefficients therefore takes NW = n_spin/Pc cycles.
* **Pr: rows.** One MM block holds Pr MAC units. They work on Pr different
  rows at the same time, and all read the same word of signs.
* **Pb: blocks.** Pb identical MMTE units (Matrix-vector Multiplication plus
  Time Evolution) each own a 1/Pb share of the rows. Each unit has its own
  time-evolution datapath.

Spin i is written as i = g*Pb*Pr + b*Pr + r. It belongs to MAC r of MMTE b,
in row group g. Each MMTE works through G = n_spin/(Pb*Pr) row groups per
step. With the defaults, NW = 16 and G = 4.

## Memory organization

| memory | count | word | depth | contents of word `k` |
|---|---|---|---|---|
| J memory (`jmem`) | Pb*Pr = 64 | Pc*8 = 128 bits | G*NW = 64 | `k = g*NW + w`: J[g*Pb*Pr + b*Pr + r][w*Pc + c] at bits `c*8` |
| XMEM, YMEM (`xymem`) | 1 each | Pb*16 = 64 bits | n_spin/Pb = 64 | `k = g*Pr + r`: lane b holds x (or y) of spin g*Pb*Pr + b*Pr + r |
| SGNXMEM1/2 (`sgnxmem`) | 2 banks | Pc = 16 bits | NW = 16 | word w: sgn(x[w*Pc + c]) at bit c, 1 = negative |

In total there are 512 Kbit of J, 8 Kbit of x and y, and 512 sign bits.
Every MAC has its own J memory, so the 64 memories supply 64*16 = 1024
coefficients per cycle. One sign word is broadcast to all MACs of all MMTEs.

The two sign banks work as a ping-pong pair. During a step, every MAC reads
the signs from the start of the step out of one bank. The time evolution
writes the new signs into the other bank, and the next step reads them
from there. Step k of a run reads bank base^(k mod 2), where base is the
bank the run starts from. Keeping the banks apart makes the update
synchronous: all row sums of a step see the same sign vector, as the
algorithm requires. This holds even while two steps are in flight (see
below).

## The MAC unit and its adder trees

`addsub` reduces Pc products J_c * sgn(x_c) in one combinational step:

1. A multiplexer per lane passes J_c when x_c >= 0, and the one's complement
   ~J_c when x_c < 0.
2. *Tree1*, a balanced binary adder tree, adds the Pc multiplexer outputs.
3. *Tree2*, in parallel, counts the lanes whose sign bit is 1.
4. A final adder adds that count. Since -J = ~J + 1, this turns every one's
   complement into an exact negation.

`mac` adds that partial sum into an accumulator. On the first word of a row
the feedback multiplexer selects 0 instead of the accumulator. On the last
word, the finished row sum is also copied into a hold register. The
accumulator is J_BITS + log2(n_spin) + 1 = 17 bits wide. The extra bit is
needed because 256 * (-(-128)) = 32768.

## Overlapping MM and TE: the step schedule

This is the least obvious part of the design. The MM block produces Pr row
sums every NW cycles. The time-evolution datapath (`te_dp`) updates one
(x, y) pair per cycle, so it needs Pr cycles for those sums. If Pr <= NW, it
can work on group g while MM already accumulates group g+1. The hold
registers in the MACs make this possible. `mm` asserts this condition.

`sb_ctrl` runs one step in LEN = G*NW + Pr + 2 cycles. Cycle numbers below
count from the start of the step:

| cycle | action |
|---|---|
| c in [0, G*NW) | MM issue: every J memory reads word c; the sign bank reads word c mod NW |
| c + 1 | J data and sign word meet in the MACs; on the last word of a group the row sums move to the hold registers |
| NW+1 + g*NW + r, r < Pr | TE issue for row r of group g: XMEM/YMEM read address g*Pr + r; the output multiplexer selects row r and the MMTE registers it |
| one cycle later | `te_dp` computes the new x, y and sign; they are written to XMEM, YMEM and the other sign bank |
| LEN-1 | last write-back of the step; a += delta_a |

Here LEN = G*NW + Pr + 2. For the defaults a step lasts 64 + 16 + 2 = 82
cycles, and TE overlaps MM for 47 of them.

### Chaining steps

A step does not wait for the previous one to finish. Step k+1 reads the
signs that step k writes, but it reads them one word at a time, in word
order. So it can start as soon as each word will be complete by the cycle
it is read. Word w is read at cycle w of the new step. It is complete one
cycle after the write-back of the last of its Pc spins. The start distance
PERIOD is therefore the largest value, over all spins j, of

    (write-back cycle of j) + 1 - (j / Pc)

It is also bounded below by G*NW, because the MM of the two steps must not
overlap. Another lower bound is (G-1)*NW + Pr: the new step's first row
sums, TE reads and the a update must all come after the old step's last
ones. `sb_ctrl` computes PERIOD from the parameters at elaboration.

For the defaults PERIOD = **70 cycles**. The last write-back of step k
completes word 12, which step k+1 reads at its cycle 12. A run of n steps
takes (n-1)*70 + 82 cycles, so 128 steps take 8972 cycles. In the 32-spin
test configuration, PERIOD = G*NW = 32: the MACs never idle.

While two steps are in flight, the older one only does TE and write-back,
and the newer one only MM. The controller keeps two step slots that take
turns, and each slot carries its own cycle counter and its own bank parity.
The MM issue uses the bank parity of one slot; the write-back uses that of
the other.

## Number formats

| quantity | format |
|---|---|
| J_ij | 8-bit two's complement integer |
| row sum f_i | 17-bit integer |
| x, y | 16-bit two's complement, 13 fraction bits (range [-4, 4)) |
| a, a0, delta_a, dt, c0, gamma | 24-bit two's complement, 20 fraction bits (range [-8, 8)) |

`te_dp` computes each product at full width. It then scales the result back
with an arithmetic right shift, which rounds towards minus infinity. The
momentum saturates at the 16-bit range. The position needs no saturation,
because the wall clips it to +-1 (+-8192). The paper does not fix these
formats. It says only that the fraction width should follow from the
smallest increment of a and the integer width from the largest f_i. To
change them, edit `X_BITS`, `Y_BITS`, `XY_FRAC`, `P_BITS` and `P_FRAC` in
`dsb_pkg`.

## Using the machine

`dsb_top` has plain ports. Host accesses are accepted only while `busy` is
low, and an assertion flags any access made while a run is in progress.

1. **Load J.** Write each coefficient word with `j_we`, `j_mem = b*Pr + r`,
   `j_addr = g*NW + w` and `j_data`, using the J memory layout in the table
   above. J must be symmetric with a zero diagonal.
2. **Fold h into J** if the problem has a field h. Add one ancillary spin
   s_a, then set J[i][a] = J[a][i] = h_i. Load x = +1 (8192) and y = 0 for
   it, and set `anc_en = 1` and `anc_idx = a` for the run. The write-back
   then holds that spin at x = +1, y = 0 whatever its update gives. Since
   dSB uses only signs, this makes s_a the constant +1 the field needs.
3. **Load x and y.** Write one spin per cycle with `xy_we`, `xy_idx`,
   `x_wdata` and `y_wdata`. Use small random values that are not zero. The
   same write also stores sgn(x) in the sign bank that the next run reads.
4. **Run.** Set `coef` (a0, dt, c0, gamma, heat), `delta_a = a0/n_steps` and
   `n_steps`, then pulse `start` for one cycle. `busy` goes high, and `done`
   pulses (n_steps-1)*PERIOD + LEN cycles later. A run of 0 steps ends at
   once.
5. **Read the result.** Raise `rd_en` with `rd_idx`. `rd_x` and `rd_y` are
   valid one cycle later, when `rd_valid` is high. The spin is the sign of
   x.

To restart with a new initial state, reload only x and y. The J memories
keep their contents. A usual choice is c0 = 1/(2*sigma*sqrt(n_spin)), where
sigma is the standard deviation of the J entries.

## Files

Each `rtl/` module starts with a header comment that gives its function,
timing, and what comes from the paper.

| file | block |
|---|---|
| `rtl/dsb_pkg.sv` | sizes, number formats, the `te_coef_t` coefficient struct |
| `rtl/addsub.sv` | Add/Sub: sign multiplexers, Tree1, Tree2 |
| `rtl/mac.sv` | MAC unit: Add/Sub, accumulator, hold register |
| `rtl/jmem.sv` | J memory of one MAC |
| `rtl/mm.sv` | MM block: Pr J memories, Pr MACs, output multiplexer |
| `rtl/te_dp.sv` | time-evolution datapath (walls, heating) |
| `rtl/mmte.sv` | MMTE unit: MM + register + TE datapath |
| `rtl/xymem.sv` | XMEM / YMEM |
| `rtl/sgnxmem.sv` | SGNXMEM1/2 and their read multiplexer |
| `rtl/a_updater.sv` | pump amplitude ramp |
| `rtl/sb_ctrl.sv` | step sequencer |
| `rtl/dsb_top.sv` | the whole machine |

## Simulation

Each testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. Build and run one with Verilator 5, for
example:

    verilator --binary --timing --assert --top-module tb_dsb_full \
        -y rtl -y tb +libext+.sv rtl/dsb_pkg.sv tb/dsb_ref_pkg.sv tb/tb_dsb_full.sv
    ./obj_dir/Vtb_dsb_full

`tb/dsb_ref_pkg.sv` restates the update in plain 64-bit integer arithmetic.
The system-level testbenches compare the machine against it **bit for bit**.

| testbench | what it shows |
|---|---|
| `tb_addsub`, `tb_mac` | exact signed row sums, including the 32768 extreme; accumulator restart; hold register stays stable |
| `tb_jmem`, `tb_xymem`, `tb_sgnxmem` | layout, per-lane and per-bank writes, one-cycle read latency |
| `tb_a_updater` | linear ramp, clear, saturation |
| `tb_te_dp` | 20,000 random updates against the reference, with walls and heating |
| `tb_mm`, `tb_mmte` | every row sum and TE result inside its overlap window, at the default sizes |
| `tb_sb_ctrl` | schedule: counts per step, each XMEM word written once per step, write-back timing, every sign word complete before it is read, bank parity per step, 70/82-cycle period and step length |
| `tb_dsb_top` | 32 spins (Pr = Pc = 4, Pb = 2): plain, heated, zero-step, long and ancillary-spin runs, bit-exact; counts wall clips, bank swaps, MM/TE overlap, overlap of consecutive steps, J reuse and ancillary holds |
| `tb_dsb_full` | default 256-spin machine: a random max-cut with J in [-128, 0], heated dSB for 128 steps, then a reuse run; bit-exact, 8972 cycles for 128 steps |
| `tb_dsb_configs` | 256 spins in the five other parallelism settings, (Pr, Pc, Pb) = (64, 4, 4), (8, 16, 4), (4, 64, 4), (16, 16, 8) and (16, 16, 16). Each runs a heated, a zero-step and a reuse run, checked bit-exact and cycle-exact (helper `dsb_cfg_check`) |
| `tb_dsb_knapsack` | default machine on a random 20-object 0/1 knapsack. Slack spins turn the capacity limit into an equality, and h goes into J with an ancillary spin. Three heated 128-step runs are checked bit-exact, and the chosen set is reported next to the optimum found by dynamic programming |

The full-size test runs in a few seconds. On the dense random max-cut
instance it gives only a small cut improvement with the parameters used
(dt = 0.25, c0 = 1/(2 sigma sqrt(n))). The uniform negative mean of J
produces a strong collective mode that these coefficients do not damp. The
testbench checks exactness against the algorithm, not solution quality.
Tuning dt, c0 and gamma per problem is left to the user.

## Departures and open points

* **Cycles per step.** The paper's estimate for 256 spins with
  Pr = Pc = 16 and Pb = 4 is 68 cycles per step. This RTL starts a step
  every 70 cycles. The paper does not describe how steps are joined, so
  the chaining rule above is this design's own. For the other parallelism
  settings the paper lists, (Pr, Pc, Pb) = (64, 4, 4), (8, 16, 4) and
  (4, 64, 4), it gives 115, 128 and 67 cycles, against estimates of 80, 132
  and 65. With more MMTE units, (16, 16, 8) and (16, 16, 16), it gives 42
  and 34 cycles. The measured 254 ns per step reported for the FPGA is about 51
  cycles at 200 MHz, which matches none of these figures.
* **Knapsack quality.** With 8-bit J, the penalty couplings of the slack
  spins dominate the scaled matrix. The small costs and the couplings
  between objects then round to few levels. The test instance yields
  feasible sets, but they are well below the optimum. How the paper scaled
  its knapsack instances is not stated.
* **a0.** The architecture figure shows no a0 input to the datapath, but the
  text calls a0 an external parameter. Here a0 is a run-time input.
* **Accumulator width.** One bit wider than the J_bits + log2(n_spin)
  drawn in the figure, so that no overflow is possible.
* **XMEM shape.** The architecture figure labels XMEM as n_spin/Pc deep and
  Pc variables wide. The text and the memory layout figure give Pb
  variables per word and n_spin/Pb words, and that is what is built.
* **Host side.** The loading ports, start/done handshake, readout, the
  ancillary-spin hold inputs and the random initial values are all this
  design's own. The paper does not describe the processor-side logic. On
  the FPGA, that logic caused the 0.39 ms of loading overhead.
* **Reset.** Control registers use a synchronous active-low reset. The
  memories are not reset, and the host must load them.
* **Parameter limits.** N_SPIN must be a multiple of Pb*Pr and of Pc. Pc
  must be a power of two. Pr <= N_SPIN/Pc must hold. Simulated sizes: the
  defaults, the 32-spin test configuration and the five 256-spin settings
  of `tb_dsb_configs`.
