# Stair-matrix iterative MIMO detector for eight users

In the uplink of a massive MIMO base station, linear MMSE detection comes down
to solving one small linear system per subcarrier:

    G x = x_MF,    G = H^H H + s^2 I  (U x U, Hermitian),   x_MF = H^H y

where H is the B x U channel (B antennas, U single-antenna users), y the
received vector and x the users' symbols. Inverting G exactly is costly, but
with many more antennas than users G is close to diagonal, so iterative
solvers that only invert an easy part of G converge in one or two steps.

This design uses a *stair matrix* as that easy part. S keeps the diagonal of
G plus the two neighbours of every second row; for U = 8 (rows and columns
counted from 1):

    row 1: d1                        S^-1 is known in closed form:
    row 2: G21 d2 G23                  S^-1(i,i) = 1 / G(i,i)
    row 3:        d3                   S^-1(i,j) = -G(i,j) S^-1(i,i) S^-1(j,j)
    row 4:     G43 d4 G45                for the 7 positions (2,1) (2,3) (4,3)
    ...                                  (4,5) (6,5) (6,7) (8,7)
    row 8:             G87 d8

The odd rows of S are diagonal, so each even row of S^-1 only depends on its
own row and the two neighbouring diagonal entries. The detector then runs

    x_0 = S^-1 x_MF
    x_t = S^-1 ((S - G) x_{t-1} + x_MF),   t = 1, 2

Compared with a diagonal (Jacobi-like) split, S captures part of the
off-diagonal coupling at almost no extra cost: 8 reciprocals and 14
multiplications to build S^-1.

The RTL implements the detector architecture published by Shahabuddin et al.
("FPGA Implementation of Stair Matrix based Massive MIMO Detection"): a
time-shared array of eight complex multipliers with an adder tree, a
Newton-Raphson divider and a set of small memories, configured for 8 users,
two iterations and the published word lengths. The internal pipeline,
operand formats, handshakes and reset behaviour are this implementation's own
choices; they are marked as such below and at the top of every source file.

## Blocks

| Module | Role |
|---|---|
| `stair_detector` | top level: instantiates and wires everything below |
| `sg_loader` | collects S-G, written one element per cycle, into 208-bit rows |
| `sg_memory` | 8 words x (8 complex x 26 bit), one row of S-G per word |
| `mf_memory` | register array, 8 matched-filter values |
| `diag_regs` | register array, the 8 (real) diagonal entries of G |
| `nr_divider` | 18-bit Newton-Raphson reciprocal unit, 1/G(i,i) |
| `invdiag_memory` | register array, the 8 reciprocals |
| `nondiag_regs` | register arrays: the 7 stair off-diagonals of G and of S^-1 |
| `operand_mux` | routes stored values to the multiplier lanes for each operation |
| `cmult_array` (+ `cmult`) | 8 pipelined complex multipliers |
| `adder_tree` | sums the 8 products: one matrix row per cycle |
| `adder_array` | 8 complex adders: (S-G)x_{t-1} + x_MF |
| `results_regs` | results array: bank `t` = (S-G)x rows, bank `x` = estimate / output |
| `controller` | the fixed schedule of one detection |
| `smd_pkg` | widths, fixed-point types, operation codes, rounding helpers |

Data flows in a loop: the memories feed `operand_mux`, which feeds the
multiplier array; single products go back into `nondiag_regs` (building
S^-1), row sums from the adder tree go into `results_regs`, whose contents are
fed back (directly, or through the adder array) into the multipliers.

## One multiplier array, five operations

Everything that multiplies goes through the same eight complex multipliers.
The controller issues one *operation* per cycle, tagged with a row number; the
tag travels with the data through the pipeline and tells the write-back where
the result goes. `smd_pkg::op_t` lists them:

| Operation | Lanes compute | Result goes to |
|---|---|---|
| `OP_ND1` | lane k: S^-1(i,i) * S^-1(j,j) for the k-th stair position | `nondiag_regs.si_nd[k]` (temporary) |
| `OP_ND2` | lane k: -G(i,j) * (that product) | `nondiag_regs.si_nd[k]` = S^-1(i,j) |
| `OP_X0` | lane j: S^-1(r,j) * x_MF(j), summed by the tree | `results_regs.x[r]` |
| `OP_SGX` | lane j: (S-G)(r,j) * x_{t-1}(j), summed | `results_regs.t[r]` |
| `OP_SINVB` | lane j: S^-1(r,j) * (t(j) + x_MF(j)), summed | `results_regs.x[r]` |

Row r of S^-1 is not stored as a row: `operand_mux` rebuilds it from the
reciprocal at column r and, for odd r (counted from 0), the two stored
off-diagonals at columns r-1 and r+1. The other five lanes get zero. This
wastes multiplier lanes on the S^-1 products but keeps the datapath uniform:
every row, of any matrix, takes one cycle.

The results array has two banks because of the pipeline: while the first rows
of (S-G)x_{t-1} come back, x_{t-1} is still being read for the last rows.

## Timing of one detection

The pipeline from issue to write-back is 5 cycles: S-G memory read (1),
multiplier operand and product registers (2), adder tree (2); rounding and
the write into the results array happen at the end of the fifth. Operations
that do not read the S-G memory go through the same registered issue stage,
so every operation has the same 5-cycle loop (`OP_ND1/2` write back after 3,
straight from the multipliers).

With S-G written in 64 consecutive cycles starting in the `start` cycle
(cycle 0):

| Cycles | What happens |
|---|---|
| 0-63 | host writes S-G; a full row goes to the S-G memory one cycle after its column 7 |
| 1-41 | divider computes the 8 reciprocals (5 cycles each) |
| 42, 45 | `OP_ND1`, `OP_ND2`: the 7 off-diagonals of S^-1 |
| 48-55 | `OP_X0` rows 0..7; the last x_0 row is written in cycle 60 |
| 60-64 | stall: wait for the last S-G row (enters the memory in cycle 64) |
| 65-89 | iteration 1: `OP_SGX` rows in cycles 0-7 of the iteration, `OP_SINVB` rows in cycles 12-19, last row written in cycle 24 |
| 90-114 | iteration 2 |
| 115 | `done` high for one cycle; `x_hat` holds x_2 |

That is 116 cycles including the start and done cycles, and 25 per iteration,
the figures reported for the published FPGA implementation. With 8 users of
256-QAM (8 bits each), one detection carries 64 bits, so at the published
258 MHz this is 64 / 116 x 258 MHz = 142.3 Mbit/s. Clock frequency has not
been measured for this RTL. If S-G arrives more slowly, the stall simply
lasts longer; if the divider were slower than the load, the iterations would
start when x_0 is ready.

The 25-cycle iteration comes straight from the pipeline: 8 row issues, the
second phase starting in the cycle the last (S-G)x row is written (it needs
all of them, because the even rows of S^-1 reach their neighbours), 8 more
issues and 5 cycles to drain: 8 + 4 + 8 + 5 = 25.

## Number formats

Two's complement, "W/F" = total bits / fraction bits, per real and
imaginary part.

| Quantity | Format | Origin |
|---|---|---|
| G, S-G, off-diagonals of G | 13/9 | published |
| matched filter | 15/10 | published |
| S^-1 entries | 17/13 | width published, fraction chosen here |
| (S-G) x rows | 20/16 | published |
| estimate x | 12/8 | published |
| divider words | 18/16 (unsigned) | width published |
| multiplier operand a / b | 18/13, 22/16 | chosen here |
| products / tree sums | 40/29, 43/29 (full precision) | chosen here |

Operands are aligned by left shifts into the common a/b formats, so the
multipliers and the adder tree are exact. Only write-back loses precision:
fraction bits are rounded (add half, truncate) and integer bits wrap, which
is how the published fixed-point model quantises. The source paper gives G as
12/8 in its word-length study and 13/9 in the architecture; this RTL uses
13/9. With G normalised so that its diagonal is near 1, 17/13 covers
reciprocals up to 8 (a diagonal entry down to 1/8).

## Newton-Raphson reciprocal

`nr_divider` computes 1/d for d = G(i,i) > 0 given as a 13/9 number
(integer D = d * 2^9):

1. Normalise: shift D left until its leading one (at bit p) reaches bit 11.
   That gives m = d * 2^(9-p) in [1, 2), so 1/m lies in (1/2, 1].
2. Seed: the three bits below the leading one select
   x0 = 1/(1 + (i + 0.5)/8), i.e. round(2^20 / (17 + 2i)) with 16 fraction
   bits. Its relative error is below 1/17.
3. Two iterations of x <- x (2 - m x), 18-bit words with 16 fraction bits.
   The error squares each time: below 2^-16 after two.
4. Denormalise: 1/d = x * 2^(9-p), rounded to 17/13. Values of 8 or more,
   and d <= 0 (which a Gramian with noise regularisation never has),
   saturate to the largest 17-bit value.

One 18 x 18 multiplier does both multiplications of an iteration in turn,
giving 5 cycles per entry and 41 cycles for all 8. This runs while S-G is
being loaded, so it costs no detection time. The 8-entry table and two
iterations are this implementation's choice. The source fixes only the
method, a table seed, the range shift and the 18-bit width.

## Driving the detector

1. Write the 8 matched-filter values (`mf_we/addr/wdata`), the 8 real
   diagonal entries of G (`diag_*`) and the 7 stair off-diagonals G(i,j)
   (`nd_*`, entry k in the order (2,1) (2,3) (4,3) (4,5) (6,5) (6,7) (8,7),
   counted from 1). These ports are independent and can be written in the
   same cycles.
2. Pulse `start` for one cycle while `busy` is low.
3. From the `start` cycle on, write the 64 elements of S-G, one per cycle:
   `sg_cs = sg_we = 1`, `sg_addr = {row, column}`, `sg_wdata` = {real, imag}.
   Write the columns of a row in any order but finish each row with column 7.
   S-G is zero on the stair positions (diagonal and the 7 off-diagonals) and
   -G(i,j) elsewhere, so no subtraction is needed. Only rows written after
   `start` are counted.
4. Wait for `done`; `x_hat[0..7]` (12/8) holds the estimate and keeps it
   until the next detection writes over it.

The controller asserts (SVA) that `start` does not arrive while busy.
`ITERS` (top-level parameter, default 2) sets the number of iterations. The
user count U = 8 is fixed in `smd_pkg`: the stair pattern, the
8-lane multiplier array and the S-G word all follow from it.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The end-to-end test `tb_stair_detector`
runs the top at its default parameters. It uses 24 random 128-antenna,
8-user Rayleigh channels with 256-QAM symbols at 30 dB SNR. G and x_MF are
computed in floating point and quantised. It checks:

- each reciprocal is within 2 LSB of the exact value;
- `x_hat` matches, bit for bit, an integer model of the algorithm written
  independently in the testbench;
- `done` comes in cycle 116. Trials with gaps in the S-G writes check that
  the detector waits for the load;
- hard decisions on `x_hat` match the transmitted symbols. About 2.6 % of
  them do not, and the test fails at 5 %. A floating-point model of the same
  two-iteration stair detector gives about 1.4 % at this SNR, and exact MMSE
  about 0.2 %, so the remaining errors come from only two iterations.

`tb_workload_mimo128x8` runs the same configuration over an SNR sweep
(15, 20, 25 and 30 dB, 300 detections each). It compares the bit error rate
of the fixed-point hardware, with Gray-mapped 256-QAM, against a
floating-point version of the same algorithm. The two agree to within a few
bit errors at every point, for example 1.82e-3 against 1.82e-3 at 30 dB, so
the chosen word lengths cost no detection performance. It also checks every
detection bit for bit and runs in about 20 s. Here SNR means symbol energy
over noise variance, with channel columns of unit mean squared norm.

`tb_stair_detector` also counts how often each mechanism ran (reciprocal writes, S^-1
off-diagonal write-backs, x_0 rows, stall cycles, iteration rows, S-G rows)
and fails if any count is zero.

To run a testbench with Verilator 5:

    verilator --binary --timing -Wno-fatal -y rtl -Irtl rtl/smd_pkg.sv \
        tb/tb_stair_detector.sv --top-module tb_stair_detector -Mdir obj
    ./obj/Vtb_stair_detector

Replace the testbench name to run any other. `tb_controller` also runs a
3-iteration instance. `tb_nr_divider` sweeps the whole positive input range,
powers of two and non-positive inputs.

## Limits and departures

- Gramian and matched-filter computation (the pre-processing that produces
  G and x_MF from H and y) is outside this design, as in the published one.
- Only U = 8 is supported. The stair layout (off-diagonals on the even rows)
  and the lane assignment assume it.
- The handshake (`start`/`busy`/`done`), the requirement to write the
  matched filter and G's diagonal/off-diagonals before `start`, the
  {row, column} address of S-G and the reset values are this
  implementation's choices.
- The S-G loader does not check that a row was written completely. A row
  whose column 7 arrives before its other columns takes stale values.
- The pipeline split (1 memory, 2 multiplier, 2 adder-tree stages) was
  chosen to reproduce the published 25-cycle iteration and 116-cycle
  detection. Timing closure at 258 MHz has not been checked.
- DSP, LUT and flip-flop counts have not been compared with the published
  FPGA figures. The multipliers here are 18 x 22 bits, wider than needed for
  most operations.
