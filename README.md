# A digital emulated oscillator Ising/Potts machine

A network of coupled oscillators can solve combinatorial optimisation problems.
It needs couplings that pull connected oscillators into or out of phase, and a
second-harmonic (or third-harmonic) injection that forces every phase into one
of two (or three) discrete values. The phases then settle into a low-energy
state of an Ising model (two values: max-cut) or a 3-state Potts model (three
values: 3-colouring). This RTL does not build physical oscillators. It
*emulates* them: every oscillator is a small digital processing element (PE)
that integrates a simplified Kuramoto phase equation in 8-bit fixed point, one
Forward Euler step per clock cycle. All PEs step at the same time, and each
reads its neighbours' phases over dedicated wires.

The design follows the paper "An ASIC Emulated Oscillator
Ising/Potts Machine Solving Combinatorial Optimization Problems" (Gonul and
Taskin, Drexel University). It is an independent RTL rendering of that paper, not the authors'
code. The paper's prototype is a 20 x 20 grid of PEs connected as a king's
graph: every PE is linked to its 8 surrounding PEs. It runs at 200 MHz in 65 nm
CMOS. 1000 iterations take 5 us. All sizes here default to that prototype.

## The equation each PE integrates

For oscillator *i* with phase φᵢ in [0, 1):

    φᵢ ← φᵢ − h · ( Σ_j J_ij · Fc(φᵢ − φⱼ)  +  Fs-term(φᵢ) )

* **Fc** is the sign of the phase difference taken modulo 1. It is +1 if
  (φᵢ − φⱼ) mod 1 < 1/2, else −1. With positive J this pulls the oscillators
  together; with negative J it pushes them apart.
* **Fs** is a piecewise ±1 function with N equally spaced stable points. It is
  applied only after a programmable settling period (`sync_enable`).
* **h = 2^-k**, so the multiplication by h is an arithmetic right shift.

The sum runs over the PE's up to 8 king's-graph neighbours. Missing neighbours
at the edges and corners contribute nothing.

## Number formats (read this before programming weights)

Every value in the datapath is 8 bits wide.

| quantity | format |
|---|---|
| phase | unsigned, binary point ahead of the MSB: code p means p/256 of a cycle. The modulo-1 wrap is free. |
| weight J | 8-bit two's complement integer, in phase LSBs before the step h is applied |
| coupling term, Fs term, coupling sum | 8-bit two's complement, same unit |
| Fs unit `fs_mag` | 8-bit signed; the size of "±1" of Fs in weight LSBs |
| step | `h_shift` = k in 0..7, h = 2^-k |

Because of this format, Fc and Fs need no arithmetic:

* Fc is the MSB of the 8-bit difference φᵢ − φⱼ.
* Fs for N = 2 is bit 6 of the phase.
* Fs for N = 3 is a lookup on the top three bits.

The coupling sum is built by **8-bit adders that wrap**, as in the paper's PE.
Scale the weights so that Σ|J| + `fs_mag` < 128 for every PE. Otherwise the
sum silently wraps around and the dynamics become wrong. For an interior node
with 8 equal weights this means |J| ≤ 14 when `fs_mag` equals |J|. The
largest step per iteration is then 127 >> k phase LSBs.

The shift rounds toward minus infinity, like any arithmetic shift. A small
negative sum therefore still moves the phase by one LSB, while a small positive
sum does not move it. This bias is part of the hardware's behaviour and is
reproduced exactly by the reference model in the testbenches.

## The synchronization function, and where it departs from the paper

**Ising mode (N = 2).** The paper's table gives Fs = −1 where φ mod ½ is
below ¼, and +1 elsewhere. The paper also states that the stable points are
0 and ½, and its unit-circle figure draws the phases flowing into 0 and ½.
But putting its table into its update equation (which *subtracts* h·Fs) makes
¼ and ¾ stable instead. The sinusoid sin(2πNφ) that the table approximates
has the opposite sign to the table. **This design keeps the stated stable
points.** The term added to the coupling sum is −Fs(table)·`fs_mag`. Phases
just above 0 or ½ are pushed down, and phases just below are pushed up.

**Potts mode (N = 3).** The ideal boundaries lie at multiples of 1/6. These
cannot be resolved from the top three bits that the paper says are inspected.
Each eighth of the cycle gets the value the ideal table has at the centre of
that eighth:

| eighth (φ[7:5]) | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| Fs (table) | −1 | +1 | +1 | −1 | +1 | −1 | −1 | +1 |

As a result, the stable points are 0, 3/8 and 5/8 (codes 0, 96 and 160), not
0, 1/3 and 2/3. The paper names this 3-bit quantization as the reason its
colouring accuracy is lower than its max-cut accuracy. The exact comparator
thresholds are this design's reconstruction.

The size of one Fs unit relative to a weight LSB is not given in the paper. It
is the programmable `fs_mag`.

## The PE datapath (`oim_pe`)

One PE is a single-cycle datapath around an 8-bit phase register:

    8 x  oim_coupling_unit   8-bit subtractor -> Fc (MSB) -> sgn mux (+J / -J)
         oim_adder_tree      4 + 2 + 1 adders over the 8 terms, + 1 adder for Fs
         oim_sync_unit       Fs term, zero while sync_enable is low
         oim_barrel_shifter  >>> k
         phase update        phi - (sum >>> k)

That makes 8 subtractors and 9 adders, the paper's count of 17 8-bit
adder/subtractors. The only registers are the phase and four weights. A new
phase is written at the clock edge that ends every cycle with `run` high.

**Weight sharing.** Each edge of the symmetric coupling matrix is stored once.
A PE owns the weights of its E, SW, S and SE edges. It reads the other four
from the neighbours that own them:

* the NW neighbour's SE weight
* the N neighbour's S weight
* the NE neighbour's SW weight
* the W neighbour's E weight

Neighbour bundles are always ordered NW, N, NE, W, E, SW, S, SE (`nbr_e` in
`oim_pkg`). An `nbr_valid` mask zeroes the weights of neighbours that lie
outside the grid. The weights an edge PE stores for such edges are therefore
ignored.

## The array (`oim_pe_array`)

`ROWS x COLS` PEs (default 20 x 20) are wired as a king's graph without
wrap-around. Missing links carry phase 0 and are masked as described above.
The PEs are also threaded on the programming chain in row-major order.

## Run control (`oim_ctrl`)

A `start` pulse launches a run. `run` (= `busy`) is then high for exactly
`total_iters` cycles, beginning the cycle after `start`. `sync_enable` is high
from iteration `settle_iters` on, counting iterations from 0. `done` rises when
the run ends and stays high until the next `start` or shift. Other rules:

* A `start` during a run is ignored.
* Raising `shift_en` aborts a run.
* A run of 0 iterations finishes at once.

Assertions check that a run never exceeds its iteration count and that
`start` is not raised while the chain shifts.

## Programming and readout (`oim_cfg_shiftreg`, `oim_chip`)

The whole chip is programmed through one serial chain. The chain has
CFG_W + 40·ROWS·COLS bits: 44 + 16000 = 16044 at the default size. Its layout:

    scan_in -> [config word, 44 bits] -> PE(0,0) -> PE(0,1) -> ... -> PE(R-1,C-1) -> scan_out

* Config word, MSB first: `total_iters`[16], `settle_iters`[16], `fs_mag`[8],
  `h_shift`[3], `mode`[1] (0 = Ising, 1 = Potts).
* Each PE, MSB first: `phase`[8], `j_e`[8], `j_sw`[8], `j_s`[8], `j_se`[8].

While `shift_en` is high, one bit moves per cycle. To load the chain, send the
PE images from PE(R−1,C−1) down to PE(0,0), then the config word. Shifting the
chain again brings the final state out at `scan_out` in the same order. The
new problem is loaded at the same time, so readout is free between runs. If
you shift the same image back in, the state is unchanged. Initial phases are
whatever the host loads: for independent runs, load fresh random phases.

After reset, the configuration is:

| field | value | origin |
|---|---|---|
| `total_iters` | 1000 | paper's run length |
| `h_shift` | 6 | the paper's example h = 2⁻⁶ |
| mode | Ising | this design's choice |
| `settle_iters` | 500 | this design's choice |
| `fs_mag` | 8 | this design's choice |

The phases and weights reset to 0.

A session:

1. Assert `rst_n` low for one cycle.
2. Shift in 16044 bits.
3. Pulse `start`.
4. Wait until `done` is high. This takes `total_iters` + 1 cycles.
5. Shift out 16044 bits. Meanwhile, load the next problem.

## Mapping problems

* **Max-cut (Ising mode).** Set J = −w·JU for an edge of weight w. Read the
  spins from the final phases: a phase nearer 0 is one side of the cut, and a
  phase nearer ½ is the other.
* **3-colouring (Potts mode).** Set J = −JU on every edge. A node's colour is
  the stable point (0, 3/8 or 5/8) nearest to its final phase.
* Only problems whose graph is a subgraph of the 20 x 20 king's graph fit.
  That means at most 400 nodes, each connected only to its 8 grid neighbours.

A PE that maps no problem node simply gets zero weights.

The workload testbench runs 100 runs of each problem type from fresh random
initial phases, at the default size. Settings: `k = 3`, `settle_iters = 500`,
1000 iterations per run. Every run matched the reference model bit for bit.

| problem (400 nodes) | mean | std | min | max |
|---|---|---|---|---|
| unweighted max-cut, full king's graph, JU = 12 | 97.94% | 1.14% | 95.46% | 100% |
| weighted max-cut, weights 1..14 | 97.93% | 0.84% | 95.46% | 100% |
| 3-colouring, random 3-colourable subgraph | 91.27% | 0.87% | 89.57% | 93.91% |

How the columns are measured:

* Max-cut accuracy is the cut weight divided by the best cut known. For the
  unweighted graph that is the column-stripe cut of 1102 edges out of 1482.
  For the weighted graph it is the best cut seen over the 100 runs. Neither
  reference is proven optimal.
* Colouring accuracy is the fraction of edges whose two ends get different
  colours.

These results are close to the paper's post-layout figures: 98.43% mean
max-cut accuracy and 92.02% mean colouring accuracy. The problem instances are
generated here and are not the paper's.

## Files

| file | contents |
|---|---|
| `rtl/oim_pkg.sv` | widths, `pe_regs_t`, `cfg_t`, mode and neighbour enums, reset config |
| `rtl/oim_coupling_unit.sv` | subtractor, Fc and sgn mux of one neighbour |
| `rtl/oim_sync_unit.sv` | Fs for N = 2 and N = 3 |
| `rtl/oim_adder_tree.sv` | coupling-sum tree |
| `rtl/oim_barrel_shifter.sv` | multiplication by h |
| `rtl/oim_pe.sv` | one PE: registers, datapath, chain segment |
| `rtl/oim_pe_array.sv` | king's-graph grid |
| `rtl/oim_cfg_shiftreg.sv` | configuration segment of the chain |
| `rtl/oim_ctrl.sv` | run controller |
| `rtl/oim_chip.sv` | top level |
| `tb/tb_oim_ref_pkg.sv` | reference model: Fc and Fs from their interval definitions, grid model, chain images |
| `tb/tb_oim_*.sv` | one self-checking testbench per module |
| `tb/tb_oim_chip_full.sv` | full 20 x 20 machine on three 400-node problems, one run each |
| `tb/tb_oim_workloads.sv` | 100 runs of each of the three problems, with accuracy statistics (about 2 minutes) |

## Verification and simulation

Every module has a self-checking testbench. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

The expected values come from `tb_oim_ref_pkg`. This package does not reuse
the RTL's bit tests:

* Fc comes from the difference taken modulo one cycle and compared with one
  half.
* Fs comes from real-valued interval tables.

It also models the grid: every weight is looked up from the PE that owns it,
and edge neighbours are treated as absent.

* The leaf blocks are tested exhaustively or with thousands of random
  vectors.
* The PE, array and chip tests compare every phase with the model, cycle by
  cycle or after whole runs.
* The array and chip tests also compare the chain readout bit for bit.
* The chip test also counts the mechanisms it exercised: chain load and
  readout, both modes, a mode switch, the sync switch-on, a wrapped coupling
  sum, a continued run, an aborted run, and k = 0.

Example (verilator 5):

    verilator --binary --timing --assert -Wno-fatal \
        rtl/oim_pkg.sv tb/tb_oim_ref_pkg.sv rtl/oim_coupling_unit.sv \
        rtl/oim_sync_unit.sv rtl/oim_adder_tree.sv rtl/oim_barrel_shifter.sv \
        rtl/oim_pe.sv rtl/oim_pe_array.sv rtl/oim_cfg_shiftreg.sv \
        rtl/oim_ctrl.sv rtl/oim_chip.sv tb/tb_oim_chip_full.sv \
        --top-module tb_oim_chip_full -o sim
    ./obj_dir/sim

The full-size test runs at the default parameters. It takes about 20 seconds
to build and run. The smaller testbenches override `ROWS`/`COLS` only where
they check every PE every cycle.

## What is this design's own, and what is not here

These points follow the paper:

* the equation and the simplified Fc and Fs;
* the 8-bit phase and weight precision;
* the single-cycle PE with 17 adder/subtractors and a barrel shifter for h;
* the four owned and four fetched weights;
* the king's-graph 20 x 20 grid;
* a settling period before `sync_enable`;
* one iteration per cycle;
* a shift-register programming interface.

These are choices the paper leaves open:

* the sign of the Fs term (see above) and the 3-bit Potts thresholds;
* the programmable Fs unit and the range of k;
* wrapping rather than saturating adders (the paper specifies 8-bit adders
  and no overflow handling);
* the chain layout and bit order;
* the configuration fields and their widths;
* the start/busy/done protocol and abort-on-shift;
* reset values and the zero-weight masking of edge PEs.

The paper's physical implementation is not part of the RTL: the 65 nm layout,
the roughly 58 µm x 58 µm PEs, the 1.96 mm² core and the 95 mW power. Nor is
any host-side software that generates problems or random initial phases.
