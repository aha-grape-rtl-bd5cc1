# AHA-GRAPE SPH density pipeline in SystemVerilog

AHA-GRAPE is a hybrid machine for astrophysical particle simulations that
combine gravity with gas dynamics (smoothed particle hydrodynamics, SPH).
The work is split by how it scales with the particle count N:

* the host workstation does the O(N) bookkeeping and time integration;
* a GRAPE cluster (special-purpose gravity ASICs) does the O(N^2) forces;
* an FPGA processor does the O(N x Nn) neighbour sums of SPH, where each
  particle interacts with only Nn ~ 50 neighbours.

Each neighbour sum is a fixed chain of floating-point operations applied to
every particle pair. The FPGA processor therefore does not run a program. It
lays the chain out as a pipeline of arithmetic units that takes one new pair
every clock. This RTL implements that pipeline for the SPH density sum, with
two copies per computing board. It also contains every arithmetic unit the
pipeline is built from: adders, squares, multipliers, and table-driven root,
reciprocal, cube and kernel units.

The host, the GRAPE cluster, the PCI link, the board memory and the board's
I/O and backplane buses are not part of this RTL. Their data streams appear
as plain ports of the top module, `aha_sph_board`.

## 1. The computation

For every particle i and each of its neighbours j the pipeline evaluates

    r_ij   = | r_i - r_j |                 (3-D distance)
    h_ij   = (h_i + h_j) / 2               (mean smoothing length)
    X      = r_ij / h_ij
    rho_i += m_j * W(X) / h_ij^3

Here r is a position, h a smoothing length, m a mass and W the SPH smoothing
kernel. The pipeline returns rho_i once the last neighbour of i has been
added. The neighbour list is not built here: whatever feeds the pipeline
sends the (i, j) pairs.

W is the standard 3-D cubic spline (Monaghan & Lattanzio), without its
1/h^3 factor:

    W(q) = (1/pi) (1 - 1.5 q^2 + 0.75 q^3)     0 <= q < 1
    W(q) = (1/pi) 0.25 (2 - q)^3               1 <= q < 2
    W(q) = 0                                   q >= 2

The source publication says only that W comes from a look-up table. The
choice of this particular kernel is this design's.

## 2. Number format

Every value is a 28-bit float: 1 sign bit, 7 exponent bits and 20 mantissa
bits (`aha_pkg::f28_t`, fields in that order). The 1/7/20 split is the one
published for the FPGA implementation. The remaining details are this
design's choices:

* There is a hidden leading one, and the exponent bias is 63. The value is
  `(-1)^s * 2^(e-63) * 1.m`.
* An exponent of 0 means zero; the mantissa bits are then ignored.
* There are no infinities, NaNs or subnormals.
* A result that overflows saturates to the largest magnitude (about
  3.7e19). A result that underflows (below 2^-62) is flushed to zero.
* All rounding is by truncation.

The adder keeps 3 guard bits during alignment. The combinational cores
(`f28_align`/`f28_addnorm`, `f28_uadd`, `f28_mul_s1`/`f28_mul_s2`) live in
`aha_pkg`. The units split these cores over their register stages.

## 3. The pipeline (`sph_density_pipe`)

The units and their order follow the published mapping of the loop onto an
array of FPGAs, where one FPGA holds roughly one node:

    x_i,x_j -> [x_i-x_j] -> [sq] --+
    z_i,z_j -> [z_i-z_j] -> [sq] --+-> [ +u ] --+
    y_i,y_j -> [y_i-y_j] -> [sq] -----(delay)---+-> [ +u ] -> [sqrt] -+
                                                                     |
    h_i,h_j -> [h_i+h_j] -> /2 -> [1/h] --(delay)------------------> [ * ] -> X
                                    |                                      |
                                    +-> [ (.)^3 ] --(delay)--+          [W(X)]
                                                             |             |
    m_j ------------------------(delay)----------------------|--------> [ * ]
                                                             +------> [ * ]
                                                                       |
                          rho0, first, last, tag --(delay)------> [ +rho_i ] -> rho_i

`[sq]` is `fp_square`, `[+u]` is `fp_uadd`, `[sqrt]` is `fp_sqrt_lut`,
`[1/h]` is `fp_recip_lut`, `[(.)^3]` is `fp_rcube_lut`, `[W(X)]` is
`sph_kernel_lut` and `[+rho_i]` is `rho_accum`. The three coordinate
differences and h_i + h_j use `fp_addsub`. Halving h_i + h_j only decrements
the exponent.

Every unit has two register stages, and the accumulator has one. This gives
the fixed schedule below: the clock, counted from the clock a pair enters, at
which each value is ready. These numbers are `T_*` constants in `aha_pkg`.

| clock | value                                   |
|------:|-----------------------------------------|
| 2     | dx, dy, dz, h_i + h_j                   |
| 4     | dx^2, dy^2, dz^2; 1/h_ij                |
| 6     | dx^2 + dz^2; 1/h_ij^3                   |
| 8     | r_ij^2 = dx^2 + dz^2 + dy^2             |
| 10    | r_ij                                    |
| 12    | X = r_ij * (1/h_ij)                     |
| 14    | W(X)                                    |
| 16    | m_j W(X)                                |
| 18    | contribution m_j W(X) / h_ij^3 (`T_C`)  |
| 19    | rho_i, after the last pair (`PIPE_LAT`) |

Some values skip units or arrive early: dy^2, 1/h_ij, 1/h_ij^3 and m_j. The
pipeline holds each of them in a `delay_line` until its partner operand
arrives. The framing bits and rho0 travel in a delay line of their own, 18
clocks long. If a unit's latency changes, change its `LAT_*` constant in
`aha_pkg`; the schedule and every delay line follow from it.

The pipeline does not stall and has no back-pressure. The caller may leave
`in_valid` low in any clock, and the bubble simply flows through. One
contribution comes out for every valid pair, exactly `T_C` clocks after the
pair went in.

### Framing: first, last, rho0, tag

Each `sph_pair_t` carries both particles' data, plus `first`, `last`, a
26-bit `tag` for particle i and the starting density `rho0`.

* The pair marked `first` starts the sum at rho0. This is usually zero, or
  a partial density from an earlier pass.
* Each later pair adds to the running sum.
* On the pair marked `last`, `out_valid` rises one clock later (`PIPE_LAT`
  clocks after that pair entered), with `out_rho` and `out_tag`.

A particle with a single neighbour sets both flags on the same pair.
Densities come out in the order their particles went in.

The accumulation is the one place where a result feeds straight back into
the next operation. `rho_accum` therefore does its add (the
non-negative-operand add of `aha_pkg`) in a single clock. That keeps the
rate at one pair per clock with no interleaving. rho0 and all contributions
must be non-negative, which holds for densities.

The pipe also outputs each raw contribution (`c_valid`, `c_value`) and
whether the kernel cut it off (`c_cutoff`, meaning X >= 2). These outputs
are meant for observation and testing.

## 4. Table-driven units

Four of the units replace an expensive function with a table. In each one,
logic handles the exponent and only the mantissa is tabulated. The tables
are built during elaboration, by constant functions in exact integer
arithmetic, so no data files are needed. Each entry samples the function at
the midpoint of its mantissa interval. The source names these units but gives
no table sizes or contents, so all the details below are this design's.

| unit             | input -> output      | table                                                     | address                                  | max. rel. error  |
|------------------|----------------------|-----------------------------------------------------------|------------------------------------------|------------------|
| `fp_recip_lut`   | h -> 1/h             | 1024 x 20 bit: mantissa of 2/1.m                          | top 10 mantissa bits                     | about 2^-11      |
| `fp_sqrt_lut`    | s -> sqrt(s)         | 2048 x 20 bit: sqrt(1.m) and sqrt(2 * 1.m)                 | exponent parity + top 10 mantissa bits   | about 2^-12      |
| `fp_rcube_lut`   | 1/h -> 1/h^3         | 1024 x 22 bit: mantissa of (1.m)^3 and its exponent offset | top 10 mantissa bits                     | about 3 x 2^-11  |
| `sph_kernel_lut` | X -> W(X)            | 1024 x 28 bit: W at q = (2k+1)/1024                        | floor(X * 512); W = 0 when X >= 2        | abs. about 3e-4  |

How each table is filled and how the exponent is handled:

* **Reciprocal.** Entry k is `floor(2^32 / (2^11 + 2k + 1))` less the hidden
  one. The result exponent field is `125 - exp`, where `exp` is
  the input's biased exponent field. Since 2/1.m lies in (1, 2], no
  renormalisation is needed.
* **Square root.** Entry (p, k) is `isqrt((2^11 + 2k + 1) * 2^(29 + p))`.
  Here p is the parity of the unbiased exponent. The result exponent is the
  unbiased exponent shifted right by one, plus 63.
* **Cube.** (1.m)^3 lies in [1, 8). Each entry stores its 20-bit mantissa
  and a 2-bit exponent offset, and the unit adds the offset to 3e. This unit
  takes 1/h_ij, the reciprocal unit's output, as its input.
* **Kernel.** With S = 1024 and Q = 2k + 1, the value
  `pi * W * 4 S^3` is `4S^3 - 6Q^2 S + 3Q^3` when Q < S, and `(2S - Q)^3`
  otherwise. This is multiplied by `round(2^32/pi)` and converted to the
  28-bit format. The address is the mantissa `{1, m}` shifted right by
  `74 - exp` bits, where `exp` is the biased exponent field.

The table address width is set by `LUT_BITS` (reciprocal, root, cube) and
`KER_BITS` (kernel), both 10 by default. Each extra bit halves the table
error and doubles the table size. With 10-bit tables a density comes out
within about 1% of double-precision arithmetic. Whether that is accurate
enough for a real simulation is the open word-length question. This design
does not answer it.

## 5. The board (`aha_sph_board`)

The top module holds `NUM_PIPES = 2` independent density pipelines, the two
copies planned per computing board. Each port is an unpacked array with one
element per pipe. The pipes share only the clock and reset. The logic that
feeds them decides how particles are split between the two pipes.

At the 50 MHz board clock the source assumes, two pipes do 2 x ~16
floating-point operations per clock. That is about 1.6 Gflops, against the
expected 1.5 Gflops per board. Whether this RTL reaches 50 MHz on a given
FPGA has not been checked.

Particle ids are 26 bits wide, for up to 6.7 x 10^7 particles (the target is
"a few 10^7" in SPH). One density pass over N particles with 50 neighbours
each takes N x 50 / 2 clocks per board. For N = 10^7 at 50 MHz that is 5 s.

Each pipe reads one 308-bit pair per clock. At 50 MHz two pipes therefore
need 3.85 GB/s. The board memory was specified at 4 GB/s, so this fits, but
only just. The data of particle i make up more than half of every pair and
stay the same for all its neighbours. If a variant held them in registers,
loaded once per particle, the pipes would need only 1.75 GB/s.

## 6. Where this RTL departs from or adds to the published design

The published design fixes:

* the 1/7/20 number format;
* the set of units and how they chain;
* one result per clock;
* a kernel table;
* two copies per board.

Everything else is this design's choice:

* **Kernel and tables.** The kernel function (cubic spline), all table sizes
  and contents, and the rounding and special-value rules are chosen here.
* **Unit latency.** Each unit has 2 register stages, and the whole chain
  takes 19 clocks. The source states a maximum pipeline depth of 6 stages.
  This design reads that as a limit per unit, because the published chain of
  units is itself longer than six.
* **Smoothing length.** The published array diagram labels the
  smoothing-length node "(Hi - hj)/2", while the published loop says
  (h_i + h_j)/2. The mean, (h_i + h_j)/2, is used.
* **Particle i data.** The data of particle i arrive with every pair. They
  are not held in registers loaded once per particle.
* **Framing.** The first/last/tag/rho0 framing, the reset, the observation
  outputs and the `delay_line` balancing registers are additions.
* **Unbuilt legend entry.** The diagram's legend lists a "square with
  look-up table" unit that no node uses, so it is not built. The 16th FPGA
  of the array is unused, and so is not built either.

## 7. Not included

The FPGA processor was also meant to take over further O(N x Nn) work:

* the neighbour forces of the Ahmad-Cohen N-body scheme;
* the other SPH sums (kernel derivatives, pressure, viscosity, energy);
* regularised binary integration;
* self-consistent-field forces.

These are named as candidate tasks, but their equations and hardware are
not given, so they are not built here. Neither are the host, the GRAPE
cluster, PCI, the board memory, the backplane and I/O board, or the
neighbour search that produces the pair stream.

## 8. Files

| file                   | contents                                               |
|------------------------|--------------------------------------------------------|
| `rtl/aha_pkg.sv`       | format, latencies, schedule, pair type, arithmetic cores |
| `rtl/fp_addsub.sv`     | signed add/subtract                                    |
| `rtl/fp_uadd.sv`       | add of non-negative operands                           |
| `rtl/fp_square.sv`     | square (multiplier based)                              |
| `rtl/fp_mul.sv`        | multiply                                               |
| `rtl/fp_sqrt_lut.sv`   | table square root                                      |
| `rtl/fp_recip_lut.sv`  | table reciprocal                                       |
| `rtl/fp_rcube_lut.sv`  | table cube of the reciprocal                           |
| `rtl/sph_kernel_lut.sv`| kernel table W(X)                                      |
| `rtl/rho_accum.sv`     | density accumulator                                    |
| `rtl/delay_line.sv`    | balancing shift register                               |
| `rtl/sph_density_pipe.sv` | one density pipeline                                |
| `rtl/aha_sph_board.sv` | top: two pipelines                                     |
| `tb/tb_f28_pkg.sv`     | real-arithmetic reference, random pairs, tolerances    |
| `tb/tb_<unit>.sv`      | one self-checking testbench per module                 |
| `tb/tb_density_pass.sv`| full density pass on a particle lattice                |

## 9. Verification

Each testbench drives its module and computes the expected values
independently, in double-precision real arithmetic (`tb_f28_pkg`), not with
the RTL's own functions. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* **Arithmetic units.** Several thousand random operands each, plus directed
  cases: zeros, cancellation, overflow and underflow, exponent parity, and
  the kernel branch point and cut-off. Every result is checked exactly
  `LAT` clocks after its operand went in, which also checks the rate of one
  result per clock. Tolerances are 2^-19 relative for the exact units, 2^-10
  for the root and reciprocal tables, 2^-8 for the cube, and 5e-4 absolute
  for the kernel.
* **`tb_rho_accum`.** 300 particles with 1 to 60 contributions each,
  including single-contribution particles and idle clocks. Each finished sum
  is checked, along with its tag and its arrival exactly one clock after the
  last contribution.
* **`tb_sph_density_pipe`.** 60 particles with random neighbour lists. It
  checks every contribution against the model at exactly `T_C`, and every
  density at exactly `PIPE_LAT`. It counts kernel cut-offs, idle clocks,
  single-neighbour particles, non-zero rho0 and back-to-back particles, and
  fails if any of them never happens.
* **`tb_aha_sph_board`.** The top at its default parameters: both pipes, 40
  particles each, mostly 50 neighbours. It makes the same checks and also
  requires both pipes to finish a density in the same clock at least once.

* **`tb_density_pass`.** A complete density pass of the board on a physical
  test case. The particles sit on a cubic lattice with spacing d, mass m and
  h = 1.3 d, so the true density of the medium is m/d^3. The test runs 32
  particles against 343 neighbour candidates each, on both pipes with no
  idle clock. Every density must match the model, and must also come within
  3% of m/d^3; the result is 0.998. The whole pass must take exactly
  (pairs per pipe) - 1 + `PIPE_LAT` clocks.

Each testbench also fails against a deliberately broken copy of its module,
such as a wrong exponent offset, a mis-wired delay or an ignored flag.

To simulate one testbench with Verilator 5 (run from the project root):

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/aha_pkg.sv tb/tb_f28_pkg.sv tb/tb_aha_sph_board.sv \
        --top-module tb_aha_sph_board
    ./obj_dir/Vtb_aha_sph_board

Replace the testbench name for the others. `-Irtl` lets Verilator find each
module in the file of the same name. To lint the top module:

    verilator --lint-only -Wall -Irtl rtl/aha_pkg.sv rtl/aha_sph_board.sv

The remaining lint warnings are about unused bits: sign bits that a unit
ignores on purpose, and unused package constants.
