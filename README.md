# SPH force pipelines for a four-FPGA accelerator board

Smoothed-particle hydrodynamics (SPH) represents a fluid as particles. Each
particle carries a position, velocity, smoothing length h and mass. Every
physical quantity is a sum of pair interactions weighted by a kernel
W(r, h) that vanishes beyond 2h. Almost all of a simulation step goes into
these sums, which makes them a good fit for a hardware pipeline. This RTL
describes such a machine: a PCI board with one interface FPGA and four
processor FPGAs on a shared 64-bit local bus. Its layout follows the
PROGRAPE-3 / Bioler-3 system described in *SPH Simulations with
Reconfigurable Hardware Accelerator*.

The work is divided as follows:

- **The host** builds neighbour lists, evaluates the equation of state and
  integrates the equations of motion.
- **The board** receives a set of *j-particles*, the particles whose influence
  is summed. It also receives one *i-particle* per pipeline, and
  sums the interaction of every i with every j at one pair per clock per
  pipeline.
- **The host** then reads back the sums (*f-data*).

The work is split into two passes, each with its own pipeline type:

| stage | i-data (words) | j-data | results (f-registers) |
|---|---|---|---|
| 1 | x y z vx vy vz h (7) | + m (8) | rho, rho div v, rho rot v (3), neighbour count |
| 2 | x y z vx vy vz h rho c P/rho^2 f (11) | + m (12) | dv/dt (3), du/dt |

Between the two stages the host computes the pressure and the shear-limiter
factor f = \|div v\| / (\|div v\| + \|rot v\| + 1e-4 c/h), using the results of stage 1.

By default, chips 0 and 1 carry stage-1 pipelines and chips 2 and 3 carry
stage-2 pipelines. Each chip has two pipelines, so four i-particles per stage
are processed per pass.

## The equations each pipeline sums

Notation: r_ij = r_i - r_j, v_ij = v_i - v_j, and symmetrised values
h_ij = (h_i + h_j)/2. The same averaging is used for rho, c and f. The kernel
argument is q = \|r_ij\| / h_ij.

Kernel (cubic spline), with W = w(q) / (pi h^3):

    w(q) = 1 - 3/2 q^2 + 3/4 q^3      0 <= q < 1
         = 1/4 (2 - q)^3              1 <= q < 2
         = 0                          q >= 2

The gradient is written as grad W = g(q) / (pi h^5) · r_ij with g = (dw/dq)/q.
This form never divides by r, so a particle's interaction with itself
(r = 0) is harmless.

Stage 1 (`sph_pipe1`):

    rho_i            += m_j W
    rho_i (div v)_i  += m_j (v_j - v_i) . grad W
    rho_i (rot v)_i  += m_j (v_j - v_i) x grad W
    n_i              += 1   if q < 2

Stage 2 (`sph_pipe2`), with A = P/rho^2:

    mu_ij  = h_ij (v_ij . r_ij) / (r_ij^2 + 0.01 h_ij^2)
    Pi_ij  = f_ij (-alpha c_ij mu_ij + beta mu_ij^2) / rho_ij   if v_ij . r_ij <= 0, else 0
    dv_i/dt += -m_j (A_i + A_j + Pi_ij) grad W
    du_i/dt +=  m_j (A_i + Pi_ij/2) v_ij . grad W

alpha and beta are run-time registers on each stage-2 chip. They reset to 1
and 2.

## Arithmetic: three number systems in one pipeline

The hardware cost of a floating-point multiplier grows roughly with the
square of the fraction width. For that reason the pipelines do not use IEEE
single precision. All package-level formats are in `rtl/sph_pkg.sv`.

- **FP25 floating point** is used for every operator outside the kernel and
  the sums.
  - Layout: 1 sign bit, 8-bit exponent (bias 127) and a 16-bit fraction with
    a hidden one.
  - An exponent of 0 means zero. There are no denormals, infinities or NaNs.
  - Every operation truncates toward zero and saturates on overflow.
  - Operators: `fp_add`/`fp_sub` (three guard bits, then
    leading-zero normalisation), `fp_mul`, `fp_div`, `fp_half`, and the
    fixed-point conversions. All are combinational functions placed between
    register ranks.
  - A 16-bit fraction gives about 1.5e-5 relative error per operation. The
    published accuracy study (1-D Sod shock tube) found results
    indistinguishable from double precision at 12 and 16 bits.
- **Fixed-point kernel**: `sph_kernel` works on q^2 with 22 fraction bits.
  - q^2 is saturated on entry, and anything at or above 4 is out of range.
  - q is found with an unrolled 23-bit integer square root.
  - w(q) and g(q) are signed 32-bit values with 22 fraction bits.
  - Only the outer branch of g divides, by q >= 1, so it can never divide
    by zero.
- **Fixed-point sums**: each f-register (`f_accum`) is a 64-bit two's-complement
  register with its binary point at 2^-32.
  - The range is ±2^31 with a resolution of 2.3e-10.
  - Terms are converted from FP25 and added exactly, so the sum does not
    depend on the order of the j-particles.
  - The sum wraps on overflow. Choose units so that sums stay well below 2^31.

## The pipelines

Both pipelines take one j-particle per clock with no back-pressure. The
j-particle enters with `j_valid`. The pipeline then holds nothing but its
i-register and eight f-registers. Registers 6–7 (stage 1) and 4–7
(stage 2) always read zero. `acc_clear` zeroes all eight registers.

Stage-1 ranks (latency `P1_LAT` = 9 clock edges from j_valid to f-register):

1. r_ij, v_j − v_i, h_i + h_j
2. squares, dot and cross products, h_ij
3. r^2, v·r, 1/h, cross differences
4. q^2, 1/h^2, 1/h^3
5. kernel cycle 1 (range check, square root), m/(pi h^3), m/(pi h^5)
6. kernel cycle 2 (polynomials)
7. m W and the gradient factor
8. the six terms
9. the f-registers

Stage 2 has the same shape, with `P2_LAT` = 11 edges. Two extra ranks build
mu, Pi_ij and the two coefficients A_i + A_j + Pi_ij and A_i + Pi_ij/2. The
viscosity is selected by the sign of v_ij · r_ij, evaluated in FP25.

For scale, after a coarse yosys synthesis (word-level cells, where an
adder or a multiplier counts as one cell):

| module | cells | flip-flop bits |
|---|---|---|
| stage-1 pipeline | 13,421 | 2,237 |
| stage-2 pipeline | 15,924 | 3,222 |

A chip adds its j-memory: 6 banks × 8,192 × 50 bits, or 2.46 Mbit for
stage 2.

## One processor chip (`proc_fpga`)

The `STAGE` parameter chooses the pipeline type. The chip holds three units:

- **Memory unit (`jmem`)**:
  - `JDEPTH` = 8,192 j-particles, stored in banks of two FP25 words, so each
    64-bit bus write fills one word pair.
  - Reads are registered (block RAM), so data arrive one clock after the
    index.
- **Control unit (`ctrl_unit`)** runs one pass, triggered by a START write:
  - It pulses `acc_clear` for one clock.
  - It puts j-indexes 0 … nj−1 on the memory, one per clock. nj is clipped
    to `JDEPTH`.
  - It waits `LAT + 1` clocks for the pipelines to drain, then drops `busy`
    and raises `done`.
  - A pass therefore takes 2 + nj + LAT + 1 clocks from the START edge:
    nj + 12 for stage 1 and nj + 14 for stage 2.
- **Pipeline unit**: `NPIPE` = 2 pipelines. All of them receive the same
  j-particle every clock; they differ only in their i-registers.

Local-bus slave map (20-bit word address, 64-bit data, two FP25 words per
transfer in bits [24:0] and [56:32]):

| [19:18] | region | fields |
|---|---|---|
| 00 | control | [3:0]: 0 NJ (r/w), 1 START (w), 2 STATUS {busy, done} (r), 3 ALPHA, 4 BETA, 5 FSEL |
| 01 | j-data (w) | [16:13] word pair, [12:0] j index |
| 10 | i-data (w) | [7:4] pipeline, [3:0] word pair |
| 11 | f-data (r) | [7:4] pipeline; [8]=1 read register FSEL, else register [2:0] |

Bus timing and rules:

- A write takes effect at the clock edge where `lb_cs` and `lb_we` are high.
- A read returns `lb_rdata` and `lb_rvalid` one clock later.
- An idle chip drives zeros, so the board simply ORs the read data.
- Loading j- or i-data while the chip is busy is an error, and an assertion
  checks for it.

## The interface chip and the board (`iface_unit`, `progrape3_board`)

The host port is a plain word port, standing in for the PCI target: `host_we`,
`host_re`, a 24-bit address and 64-bit data.

- **Chip mask**: address bits [23:20] select chips. A write with several
  mask bits set is broadcast. This is how identical j-data and the START
  command reach several chips in one bus cycle. A read must name exactly
  one chip, and it answers two clocks after the request.
- **Interface registers** (mask 0):
  - 0: COLLECT (write).
  - 1: STATUS (read), giving {collect busy, chip busy bits}.
  - [19]=1: the f-buffer (read), entry `global_pipeline * 8 + register`.
    Global pipeline = chip · NPIPE + local pipeline.
  - These reads answer one clock after the request.
- **host_done** is high when no chip is busy.

**f-data collection** is the one piece of control that the timing model of
the original system constrains. Reading back the results of n_pipe pipelines
is modelled as n_freg · (2 + n_pipe) local-bus clocks. Here the 2 are
spent as follows, for each register k:

- one clock broadcasts FSEL = k to all chips;
- one turnaround clock follows;
- then each of the 8 pipelines is read in turn, one per clock, with the
  "use FSEL" address. Each return is stored in the f-buffer under the tag of
  its read.

The whole set takes 8 · (2 + 8) = 80 bus clocks. `host_busy` stays high for
three clocks more: the COLLECT write itself, plus the two-clock return of the
last read. The host must not touch the chips during a collection, and an
assertion checks this.

**One complete step**, as the end-to-end testbench drives it:

1. Broadcast stage-1 j-data with mask 0011 and stage-2 j-data with mask 1100.
   Broadcast NJ with mask 1111.
2. Write one i-particle into each of the 8 pipelines.
3. Broadcast START with mask 1111. Wait for `host_done`, which comes
   3 + nj + 12 clocks after the START write (the stage-2 chips finish last).
4. Write COLLECT, wait for `host_busy` to fall, then read the 64 f-buffer
   words.
5. Repeat steps 2–4 for the next four i-particles per stage.

To use all four chips for stage 1, set `STAGE2_CHIPS = 4'b0000`. This is the
configuration the original system used for direct summation.

## Capacity against the published workloads

- **Direct summation** needs every particle in j-memory: N ≤ 8,192.
  - This matches the original limit.
  - At the default split, each pass handles 4 i-particles, so one stage-1
    sweep over N = 8,192 is 2,048 passes of 8,204 clocks, about 16.8 M
    clocks. That is 0.13 s at 133 MHz.
- **Neighbour algorithm** (cold-collapse runs, N = 25,000 to 500,000): only
  one bunch's neighbour list is in memory at a time.
  - The published mean list lengths are 256 to 829 j-particles, far below
    8,192.
  - A bunch of n_group i-particles takes ⌈n_group / 4⌉ passes per stage.
  - Larger N are therefore a host-side matter.
- **Larger direct sums** (N > 8,192 in one pass) do not fit.
- **Precision study**: the fraction width is fixed at 16 bits, so the
  published study over 8–53 bits cannot be repeated in this RTL.

## Departures from the original design, and assumptions

- **Kernel outer branch.** The published equation prints 1/4 (2 − q)^2 for
  1 ≤ q ≤ 2, but cites Monaghan's cubic spline, which has (2 − q)^3. Only the
  cube is continuous with the inner branch at q = 1. The RTL uses the cube.
- **Neighbour estimate.** The original uses a modified kernel from the
  literature (Thacker et al. 2000) that it does not define. Here it is a
  plain count of j-particles with q < 2. The pair with itself is included.
- **Internal formats and depths.** These are not published and are chosen
  here:
  - the kernel's 22-bit fixed point;
  - the accumulator scaling of 2^-32;
  - truncation rather than rounding;
  - the pipeline depths.

  The original pipelines were generated by a pipeline compiler from about
  80 (stage 1) and 70 (stage 2) operations; the depths here come from this
  hand-written version.
- **j-data packing.** Stage-2 j-data is kept as 12 FP25 words, 48 bytes on
  the bus. The published timing model assumed 40 bytes, from a packing it
  does not describe.
- **Collection.** The published model charges n_freg · (2 + n_pipe) per
  stage, with n_pipe = 4 per stage. This design gathers both stages in one
  sweep of 8 pipelines: 80 clocks instead of 2 × 48.
- **One clock.** The original ran the pipelines at up to 133.3 MHz and the
  local bus at 66.6 MHz. Here one clock drives everything, as in the
  original's 66.6 MHz runs.
- **Not built:**
  - the PCI interface: its signals are the host port;
  - the host computer: the testbenches play it;
  - FPGA configuration: the `STAGE` / `STAGE2_CHIPS` parameters replace
    loading a different bitstream;
  - the gravity pipelines mentioned alongside the SPH work.
- **Reset** is synchronous and active low (`rst_n`) throughout.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints one
`TB_RESULT checks=N failures=M` line and stops itself through a watchdog.
The reference model is `tb/sph_ref_pkg.sv`, written in double-precision
`real` and independent of the RTL operators.

Tolerances:

- A pipeline sum must match the model within 1e-3 of the sum of the terms'
  magnitude bounds (each bound is the product of the magnitudes of the
  term's factors).
- Neighbour counts must match exactly, except for pairs within 0.05 % of
  q = 2.

| testbench | what it establishes |
|---|---|
| `tb_fp_arith` | the FP25 operators of `sph_pkg` against `real` arithmetic over many binades: error bounds, exact cancellation, zero, saturation, underflow, fixed-point conversions |
| `tb_sph_kernel` | w, g and the range flag over a sweep and random q^2, against the real-valued spline; latency 2 |
| `tb_f_accum` | exact fixed-point sums of random FP25 terms, clear with a simultaneous term |
| `tb_jmem` | every bank and address through the pair-write port, registered read |
| `tb_ctrl_unit` | index sequence, clear pulse, busy/done timing for nj = 0, 1, 7, 100 and nj above the depth |
| `tb_sph_pipe1`, `tb_sph_pipe2` | latency, all f-registers against the model for random particle clouds, both viscosity branches, alpha = beta = 0 |
| `tb_proc_fpga` | both chip types on a shared bus: map, NJ/STATUS/ALPHA/BETA, FSEL reads, busy time, results |
| `tb_iface_unit` | broadcast masks, read latency, collection contents and its 80 + 3 clock time, STATUS, host_done |
| `tb_progrape3_board` | one full step at the default parameters: 64 particles, 2 batches, both stages, every f-register of every pipeline, pass and collection timing |

The board testbench also counts each mechanism it relies on, and fails if
any never happened:

- broadcast writes and collections;
- runs of both stages;
- pairs in the inner, outer and outside kernel branches;
- viscous and non-viscous pairs;
- self-interactions.

Each testbench has also been run against a copy of its module with one
deliberate bug, and it fails. Examples are a flipped sign in rot v, a dropped
last j-index, and collected data stored under the wrong pipeline.

To run one with plain Verilator (5.x):

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/sph_pkg.sv tb/sph_ref_pkg.sv tb/tb_progrape3_board.sv \
        --top-module tb_progrape3_board -o sim
    obj_dir/sim

The board testbench runs in seconds.

## Files

`rtl/` holds the package `sph_pkg` (formats, operators, address maps) and
one module per file:

- `sph_kernel`, `f_accum`, `sph_pipe1`, `sph_pipe2`: the arithmetic;
- `jmem`, `ctrl_unit`, `proc_fpga`: one processor chip;
- `iface_unit`, `progrape3_board`: the board.

The top is `progrape3_board`. `tb/` holds the testbenches and the reference
package.
