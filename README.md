# C3PO: a 3-bit constant-modulus precoder for the massive MU-MIMO downlink

A base station with B antennas serves U single-antenna users at once. To keep
the radio hardware cheap, every antenna has a constant-modulus (CM)
transmitter: in each symbol period it can only send one of eight phases,
`exp(j*2*pi*p/8)`, p = 0..7, all with the same amplitude. The precoder's job
is to pick, for every antenna, the phase that makes the signals arriving at
the U users look as much as possible like the symbols `s` meant for them.
Finding the best phases is a hard discrete problem. C3PO ("constant-modulus
3-bit precoding") solves a relaxed version with a few iterations of
forward-backward splitting and rounds the result to the eight phases.

This repository holds synthesizable SystemVerilog for the C3PO array
architecture: a grid of processing elements that computes the two
matrix-vector products of each iteration with Cannon's algorithm, pipelined
adder trees, an octagon projection unit in every element, and a controller.
The default build is U = 16 users and B = 256 antennas; one iteration takes
2U + log2(B/U) + 9 = 45 clock cycles.

## The algorithm as the hardware runs it

With channel matrix `H` (U x B) and symbol vector `s`, define

    v       = H^H s / ||s||                       (normalized MRT vector)
    Hbar    = [ H ; v^H ]      ((U+1) x B)
    Hbar~   = [ H^H , -v ]     (B x (U+1))

so that `Hbar~ * Hbar = H^H H - v v^H = A^H A`, where `A = (I - s s^H/||s||^2) H`
measures the part of the received signal that is not a scaled copy of `s`.
Starting from `x(1) = H^H s`, each iteration computes

    w      = Hbar (tau x)                 U+1 values
    z      = x - Hbar~ w                  B values
    x_new  = proj_octagon( z / (1 - tau*delta) )   entry by entry

`tau` is the step size and `delta > 0` the weight of a concave term that
pushes the entries onto the octagon's boundary (`tau*delta < 1`). The
projection maps each complex entry onto the regular octagon spanned by the
eight CM points (the convex hull of the alphabet). After `tmax` iterations
every entry is quantized to the nearest of the eight phases.

The RTL does not compute `x(1)`, `v` or `Hbar`; they are written in by the
host, together with `tau` and the constant `scale = 1/(1 - tau*delta)`.

## Architecture

    x_init[B] --+--> array 0   : PE0 PE1 ... PE(U-1) PE(U) ---psum[0][0..U]---+
                +--> array 1   : PE0 PE1 ... PE(U-1) PE(U) ---psum[1][0..U]---+
                ...                                                           |
                +--> array B/U-1                           ---psum[..][..]----+
                                                                              v
                          U+1 adder trees, tree u sums psum[k][u] over k, log2(B/U) levels
                                                                              |
                 w[0..U]  <---------------------------------------------------+
                 (w[u] is broadcast to PE u of every array)

* **Linear array** (`linear_array`): U+1 PEs holding a (U+1) x U block of
  `Hbar`, namely the columns of its U antennas. PE u (u < U) owns antenna u of
  the array and row u of the block; PE U owns the row `v^H` and has no antenna.
* **PE** (`pe`): an `h_memory` with its row (U entries), a complex MAC
  (`cmac`), the operand register `b`, an accumulator `acc`, and, for the U
  antenna PEs, the entry `x`, a `projection_unit` and a `cm_quantizer`.
* **Adder trees** (`adder_tree`): one per row of `Hbar`, adding the B/U
  partial results of that row, one register per level.
* **Controller** (`controller`): a cycle counter that issues one control
  word to all PEs.

## One iteration, cycle by cycle

Both products are done without moving the matrix: each PE reads its own row,
and the vector (first product) or the partial sums (second product) rotate
around the array. All cycles below are relative to the iteration's first
cycle; `L = log2(B/U)`.

**Phase 1, `w = Hbar (tau x)`.** Each antenna PE starts with `b = tau*x` of its
own antenna. Every cycle, `b` moves one PE to the left (PE u takes PE u+1's
value, PE U-1 takes PE 0's), so in cycle c PE u holds `tau*x` of antenna
(u + c) mod U and reads column (u + c) mod U of its row. PE U has no `tau*x`
of its own: it is loaded with PE U-1's value and then takes PE 0's, so it sees
the same sequence one cycle late and reads column (c - 1) mod U. After U
cycles of issue and the 2-cycle MAC latency, `acc` of PE u in array k holds
the partial sum of row u over array k's columns.

**Tree.** The partial sums of row u from the B/U arrays pass the tree of row
u (L cycles) and the result `w_u` is written into `b` of PE u of every array.

**Phase 2, `z = x - Hbar~ w`.** Now `b` stays fixed and the sums move. Each
antenna PE preloads `acc` with its `x` (PE U with 0). There are U sums but
U+1 PEs, so the rotation uses a ring of all U+1 PEs with one empty slot:
every cycle PE q passes `acc - conj(h_q[col]) * w_q` to its left neighbour
(PE U passes `acc + conj(h)*w`, because the last column of `Hbar~` is `-v`)
and PE U takes PE 0's result. The sum that sits in PE q in step c belongs to
antenna (q + c) mod (U+1); when that is U it is the empty slot and the
product is forced to zero. After U+1 steps every sum has visited every PE
once and is back home: `acc` of PE u holds `z` of antenna u.

**Projection.** `z` is scaled, classified and projected in three pipeline
stages; the result is written to `x` and `tau*x` is loaded into `b`, which is
exactly the starting state of the next iteration.

| cycle            | what happens                                             |
|------------------|----------------------------------------------------------|
| 0 .. U-1         | phase 1: read `h`, rotate `b`                            |
| 2 .. U+1         | phase-1 products accumulate (first one overwrites `acc`) |
| U+2 .. U+1+L     | partial sums in the adder trees                          |
| U+2+L            | `b <- w`                                                 |
| U+3+L            | `acc <- x` (11 fraction bits); phase-2 reads start       |
| U+3+L .. 2U+3+L  | phase 2: U+1 reads of `h`, products with `w`             |
| U+5+L .. 2U+5+L  | phase 2: sums rotate through the U+1 PEs                 |
| 2U+6+L .. 2U+7+L | projection stages 1 and 2 (scale; fold and classify)     |
| 2U+8+L           | projection stage 3; `x`, `tau*x`, phase index written    |

The total, 2U + L + 9 cycles, is the count of the original architecture;
how it splits into these steps is this implementation's own. With `tmax`
iterations a precoded vector therefore costs `tmax*(2U+L+9)` cycles plus
one, and the throughput is `U * f_clk / (tmax*(2U+L+9))` symbols per second.

## The octagon projection

The entry is folded into the first quadrant (`r = |Re z|`, `i = |Im z|`), where
six lines split the plane (c = sqrt(2) - 1, k = 1/c):

    l1: i = 1 - c r      l2: r = 1 - c i         the two octagon edges
    l3: i = k r + 1      l4: i = k r - 1         perpendicular to l1 at its ends
    l6: r = k i + 1      l5: r = k i - 1         perpendicular to l2 at its ends

| region | condition                         | result                     |
|--------|-----------------------------------|----------------------------|
| A      | inside l1 and l2                  | unchanged                  |
| B      | above l3                          | (0, 1)                     |
| D      | right of l6                       | (1, 0)                     |
| E      | outside l1, between l3 and l4     | closest point on l1        |
| F      | outside l2, between l5 and l6     | closest point on l2        |
| C      | the rest, beyond the corner       | (1/sqrt2, 1/sqrt2)         |

Then the signs are restored. No multipliers are used: with 7 fraction bits,
c = 7/16, k = 5/2, the edge-projection factor 1/(1+c^2) = 7/8 and
1/sqrt2 = 91/128 are all shifts and adds. The closest point on l1 is
`s = (r + c(1 - i)) * 7/8`, clamped to [0, 91/128], giving `(s, 1 - c s)`;
l2 is the mirror image. Because the constants are rounded, the "octagon" is
slightly irregular (its diagonal corner lies at (0.711, 0.695) on l1); the
testbench checks that results stay within about 7 % of the true octagon.

The final quantizer uses the same fold and the rays at 22.5 and 67.5 degrees
(again `c = 7/16`) to pick the phase index p.

## Number formats

| quantity                     | bits | fraction bits | source              |
|------------------------------|------|---------------|---------------------|
| `Hbar` entries               | 11   | 8             | original design     |
| `x`                          | 14   | 8             | original design     |
| `tau*x`                      | 14   | 13            | original design     |
| MAC accumulator, phase 1     | 18   | 15            | original design     |
| MAC accumulator, phase 2     | 18   | 11            | original design     |
| adder tree, `w`              | 21   | 15            | original design     |
| projection datapath          | 15 in, 20 inside | 7 | 7 fraction bits original; widths here |
| `tau`                        | 14 unsigned | 13     | this implementation |
| `scale = 1/(1-tau*delta)`    | 10 unsigned | 8      | this implementation |

All narrowing truncates towards minus infinity and saturates. Every value is
complex with separate real and imaginary fields (`c3po_pkg`).

## Using the top level

`c3po_top #(.U(16), .B(256))`; B must be U times a power of two.

1. Write `Hbar` one entry per cycle: `h_we`, `h_arr` = column / U,
   `h_row` = row (0..U, row U is `v^H`, i.e. the conjugate of v),
   `h_col` = column mod U, `h_wdata`. (17 x 256 = 4352 writes at the default.)
2. Set `tau`, `scale`, `tmax` and present `x_init[0..B-1]` = `H^H s`; pulse
   `start` for one cycle while `busy` is low. `x_init` is sampled only then.
3. `iter_done` pulses at the end of each iteration, `done` one cycle after the
   last. Then `x_out` holds `x(tmax+1)` and `xq_out[j]` the phase index p of
   antenna j; both stay until the next `start`. `tmax = 0` just quantizes
   `x_init`.

`Hbar` stays in the memories across runs; a new symbol vector needs new
`v^H` (row U) and `x_init`. All registers other than the memories have a
synchronous active-low reset.

## Where this RTL goes beyond what its source describes

The published architecture description gives the block structure, the number
formats, the projection geometry and the cycle count, and refers elsewhere
for the MAC and memory details. The following are choices made here:

* the host interface (write port for `Hbar`, `start`/`done`, `tmax` input);
* the wiring of the two rings around the (U+1)-th PE and the empty slot in
  the phase-2 ring;
* forming `tau*x` inside each PE with a small multiplier, and applying the
  `1/(1 - tau*delta)` scaling as the first projection stage. The original
  FPGA build uses four DSP multipliers per PE, i.e. only the complex MAC;
  these two extra run-time-constant multipliers per antenna PE are not in
  its resource count, and could be removed by folding `tau` and the scale
  into the host-supplied values if `tau` is a power of two;
* the regularizer weight is called `delta` throughout; the original text
  also writes the scale as `1/(1 - tau*gamma)`, which is the same constant;
* the split of the 2U + log2(B/U) + 9 cycles into MAC, tree and projection
  pipeline stages;
* the projection constants (7/16, 5/2, 7/8, 91/128), the clamp of the edge
  projection, 20-bit internal width in the projection (the original quotes
  14-15 bits and 30 adders per unit), truncation and saturation everywhere;
* the final quantizer;
* 21-bit `b` register so that `w` reaches the multiplier unrounded.

Not included: computing `H^H s`, `v` and `||s||`, the symbol mapper, and the
CM DACs and RF chains that receive the phase indices.

## Verification

Every module has a self-checking testbench in `tb/`. A reference model,
`tb/c3po_ref_pkg.sv`, re-implements the arithmetic with plain integers
(floor division, explicit saturation, same accumulation order) and is used as
the expected value everywhere.

| testbench              | what it shows                                                      |
|------------------------|--------------------------------------------------------------------|
| `tb_h_memory`          | random writes and reads, 1-cycle read latency                      |
| `tb_cmac`              | both product formats, conjugation, zero/first/neg, saturation      |
| `tb_projection_unit`   | bit-exact results, all six regions, result inside the octagon and no farther from z than the nearest corner |
| `tb_cm_quantizer`      | bit-exact index, nearest phase away from the boundaries, all 8 phases |
| `tb_adder_tree`        | pipelined sums with saturation, latency log2(N)                    |
| `tb_controller`        | every control signal in every cycle, period 2U+L+9, start-to-done  |
| `tb_pe`                | one PE with emulated neighbours, antenna and v-row variants        |
| `tb_linear_array`      | one array closed into a B = U precoder, 5 iterations bit-exact     |
| `tb_c3po_top`          | U = 4, B = 16: four runs (tmax 4, 6, 0, 3) from random channels, every iteration bit-exact, period and latency, all regions and phases occur |
| `tb_c3po_full`         | default U = 16, B = 256, tmax = 9 on a random Rayleigh channel, bit-exact; the residual norm of `A x` for the output is checked to be below that of quantized MRT; all eight phases and all six projection regions must occur |
| `tb_c3po_b32`           | U = 16, B = 32 (the smallest configuration of the original results), t_max = 9: a BPSK and a 16-QAM run, bit-exact, 42-cycle period, residual below quantized MRT, all phases and regions |

The intermediate sizes B = 64 and B = 128 differ only in the `B` parameter
and were not simulated separately.

In the full-size run the residual drops from about 85 (quantized MRT) to
about 7.5 after nine iterations.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/c3po_pkg.sv tb/c3po_ref_pkg.sv tb/tb_c3po_top.sv --top-module tb_c3po_top
    ./obj_dir/Vtb_c3po_top

The full-size testbench takes under a minute to build and a fraction of a
second to run.

## Files

`rtl/c3po_pkg.sv` (formats, control word), `rtl/h_memory.sv`, `rtl/cmac.sv`,
`rtl/projection_unit.sv`, `rtl/cm_quantizer.sv`, `rtl/pe.sv`,
`rtl/linear_array.sv`, `rtl/adder_tree.sv`, `rtl/controller.sv`,
`rtl/c3po_top.sv`; testbenches `tb/tb_<module>.sv`, `tb/tb_c3po_full.sv`, `tb/tb_c3po_b32.sv` and the
reference model `tb/c3po_ref_pkg.sv`.
