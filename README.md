# Red-black SOR solver in SystemVerilog

This is a hardware solver for the two-dimensional Poisson equation
∇²φ = −ρ on a square mesh with fixed boundary values. It uses successive
over-relaxation (SOR), an iterative method. Each mesh value is replaced by a
weighted mix of its old value and the average of its four neighbours:

    φ_new(i,j) = (1 − ω)·φ_old(i,j) + ω·( φ(i−1,j) + φ(i+1,j) + φ(i,j−1) + φ(i,j+1) + h²·ρ(i,j) ) / 4

Here ω is the relaxation factor and h the mesh spacing. ω = 1 is plain
Gauss-Seidel. Values of ω between 1 and 2 speed convergence up, and ω = 1.5
is the setting used for the measurements this design is based on.

The design follows a published FPGA implementation of SOR, written in
Handel-C and evaluated on meshes from 8×8 to 2048×2048. That description gives
the per-site operation sequence and the red-black, row-parallel structure as
flowcharts. It gives no widths, latencies, interfaces or storage
organisation. Everything here that goes beyond those flowcharts is a choice
of this RTL and is marked as one below and in the file headers.

## How the mesh is swept

The mesh sites are coloured like a chessboard. A site (i,j) is *odd* when
(i+j) is odd and *even* otherwise. Every neighbour of an odd site is even, and
the other way round. One SOR iteration has two half-sweeps:

1. Update every odd site. The update reads only even sites, which do not
   change during this half-sweep.
2. Update every even site. The update reads the odd sites, which now hold
   their new values.

Two facts follow from this ordering, and the whole parallel structure rests
on them:

* Within a half-sweep, the updates do not depend on each other, so any number
  of them can run at once, in any order, and the result is the same bit for
  bit.
* The second half-sweep uses values from the first, so the sweep really is
  SOR (Gauss-Seidel-like) and not a Jacobi step. This needs a single phi
  array that is updated in place. The source flowcharts read from an array
  `a` and write to an array `b`, but taken literally that would be a Jacobi
  step. This design keeps one array.

The work is split across `NP` identical **row processes**. Process p owns
rows p+1, p+1+NP, p+1+2·NP, … of the interior. On each half-sweep every
process walks its rows from left to right. It spends one cycle passing over
each site of the wrong colour, and it updates each site of the right colour.
No two processes ever write the same row. No process reads a word that
another process writes in the same half-sweep. So the shared mesh memory
needs no arbitration. The source shows these processes as "replicated
instances" of one flowchart, with three labelled (i=1, i=2, i=3), and gives
no count. `NP = 3` is this design's default.

The controller (`sor_ctrl`) starts all processes on the odd colour. It waits
until none is busy, starts them on the even colour, and repeats this for
`num_iter` iterations. The source gives no convergence test, so the run
length is a fixed iteration count chosen by the host.

## One site update

A row process has two floating-point adders, one multiplier and a small
state machine. Each step of the update is one state. The names are those of
the source flowchart:

| step | operation | unit |
|---|---|---|
| op1, op2 | `op1 = φ[i−1][j] + φ[i+1][j]`, `op2 = φ[i][j−1] + φ[i][j+1]` | both adders, same step |
| oRes, sq_h | `oRes = op1 + op2`, `sq_h = h·h` | adder and multiplier, same step |
| tmp1 | `tmp1 = sq_h · ρ[i][j]` | multiplier |
| tmp2 | `tmp2 = oRes + tmp1` | adder |
| op3 | `op3 = 1 − ω` | adder |
| op4 | `op4 = op3 · φ[i][j]` | multiplier |
| op5 | `op5 = ω · tmp2` | multiplier |
| op6 | `op6 = op5 / 4` | integer: exponent − 2 |
| write | `φ[i][j] = op4 + op6` | adder, then memory write |

A step that uses a floating-point unit presents the operands for one cycle.
A down-counter is loaded with the unit's latency, and the step takes the
result when the counter runs out. The source flowchart draws this wait for
tmp2 as an explicit loop (`ACycles = FPAddCycles`, `addCycles--`). Here
every floating-point step uses it. Assertions check that the unit's
`out_valid` is high whenever a result is taken. op6 divides by four by
subtracting 2 from the exponent field. This is integer arithmetic on the
unpacked float, which the source also uses in place of some floating-point
operations. Results that would underflow become zero.

**Departure from the flowchart.** The flowchart's last three boxes read
`op5 = op4 + w`, `op6 = op5/4` and `b[i][j] = tmp2·op6`. That is not the SOR
step of the source's own equation, x⁽ᵏ⁾ = (D − ωL)⁻¹[ωU + (1−ω)D]x⁽ᵏ⁻¹⁾ +
ω(D − ωL)⁻¹b. This design follows the equation and computes `op5 = ω·tmp2`,
`op6 = op5/4` and `φ = op4 + op6` instead. It uses the same units and the
same number of steps. Every earlier step is the flowchart's.

## Numbers

All values are IEEE-754 single precision (`fp32_t`). The source used a
vendor's pipelined floating-point library and gives no width. `fp_add` and
`fp_mul` are this design's own units. Each works out its result in one
combinational stage and rounds to nearest even. The result then passes
through `LAT` registers (default 3 for both, `ADD_LAT`/`MUL_LAT` at the top),
so a retiming synthesis tool can balance the stages. Simplifications:

* Subnormal inputs count as zero, and subnormal results are flushed to
  signed zero.
* Overflow gives infinity.
* NaN and infinity inputs get no special treatment.

With ordinary data both units give exactly the correctly rounded IEEE result.

## Timing

With adder latency A and multiplier latency M, a row process takes:

* 1 cycle to start a row, then 1 cycle per site of the other colour;
* per updated site, `1 + (A+1) + (max(A,M)+1) + (M+1) + 3·(A+1) + 2·(M+1) + 1 + 1`
  cycles, which is 35 cycles with A = M = 3;
* 1 cycle at the end of each row, and 1 final cycle when no row is left.

A half-sweep lasts as long as its slowest process (B cycles), plus 3
controller cycles. One iteration adds 1 more cycle, and a run adds 1 at the
end. `cycles` reports exactly this count. The testbenches check it against
the formula. Cycles for one iteration with the defaults (NP = 3, A = M = 3),
at the mesh sizes the source evaluates:

| mesh | cycles per iteration |
|---|---|
| 8×8 | 885 |
| 16×16 | 3 489 |
| 32×32 | 12 725 |
| 64×64 | 50 785 |
| 128×128 | 198 325 |
| 256×256 | 792 929 |
| 512×512 | 3 152 565 |
| 1024×1024 | 12 608 865 |
| 2048×2048 | 50 358 965 |

The source reports only wall-clock times and speed-ups against software. It
gives no cycle counts, so these figures cannot be compared with it directly.

## Mesh memory and host port

`mesh_mem` holds two arrays of (L+2)×(L+2) words. `phi` holds the interior
plus the fixed boundary ring (rows and columns 0 and L+1), and `rho` holds
the source term. Word (i,j) is at address i·(L+2)+j. Each row process has a
read port that returns, combinationally, the four neighbours, the old centre
value and ρ of one site. It also has one write port. A host port loads
either array and reads it back.

Using the solver (`sor_top`):

1. With `busy` low, write the initial guess and the boundary ring into phi
   (`host_sel_rho = 0`), and ρ into rho (`host_sel_rho = 1`). Each word is
   one cycle of `host_we` with `host_row`, `host_col` and `host_wdata`.
   Boundary words are never written by the solver.
2. Set `n` (the interior size in use, 1…L), `omega`, `h` and `num_iter`, and
   pulse `start` for one cycle.
3. Wait for the one-cycle `done` pulse. `iter` and `cycles` then hold the
   iteration count and the run length.
4. Read phi back: set `host_row`/`host_col` with `host_sel_rho = 0`.
   `host_rdata` is combinational.

`ev_update`, `ev_pass`, `sweep_start` and `phase_odd` are monitoring outputs.
They show, per process, when a site is written or passed over, and when a
half-sweep begins and which colour it has.

The default `L = 2048` is the largest mesh size evaluated, so one build runs
every evaluated size through the run-time input `n`. At that size each array
holds 4 202 500 words (134.5 Mbit). That is far more than the on-chip RAM of
the FPGAs the source targeted. The source does not say where its mesh was
stored, and a practical FPGA build at that size would put `mesh_mem` in
external memory. The asynchronous, many-ported array here describes the
storage behaviour, not a particular RAM macro.

## Files

| file | contents |
|---|---|
| `rtl/sor_pkg.sv` | `fp32_t`, constants, the `phase_e` colour type |
| `rtl/fp_add.sv`, `rtl/fp_mul.sv` | pipelined single-precision adder and multiplier |
| `rtl/mesh_mem.sv` | phi and rho storage with process and host ports |
| `rtl/sor_row_proc.sv` | one row process: row walk, colour test, site update |
| `rtl/sor_ctrl.sv` | iteration and half-sweep sequencer, cycle counter |
| `rtl/sor_top.sv` | the solver: controller, `NP` row processes, memory |
| `tb/tb_fp_pkg.sv` | reference float arithmetic and reference site update |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_sor_full` |

The source also draws a sequential version of the algorithm. Structurally
that is this design with `NP = 1`.

## Verification

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. The reference values come from
`tb_fp_pkg`. It does each floating-point operation in the simulator's double
precision and rounds the result once to single precision. For single-precision
sums and products this gives the correctly rounded result, so the RTL is
checked bit for bit.

* `tb_fp_add`, `tb_fp_mul`: directed corner cases (ties, cancellation, large
  exponent gaps) and 3000 random pairs, plus the latency.
* `tb_mesh_mem`: host readback, all neighbourhood outputs, simultaneous
  process writes, host-write priority.
* `tb_sor_row_proc`: three half-sweeps of one process against a behavioural
  mesh. It checks every mesh word, the busy-cycle count and the
  update/pass counts.
* `tb_sor_ctrl`: half-sweep order, start count, no start while busy, `done`,
  cycle count.
* `tb_sor_top`: the whole solver at L = 8 with three processes. One run at
  n = 7 with ω = 1.5 for three iterations, and one at n = 8 with ω = 1 for
  two. It checks every word and the cycle count. It also counts odd and even
  half-sweeps, updates, passes, half-sweeps with several processes active,
  and n < L.
* `tb_sor_workloads`: Laplace's equation with one boundary side held at 1,
  solved at the smaller evaluated mesh sizes (8×8, 16×16 and 32×32) on one
  build with L = 32 and ω = 1.5. It checks every word bit for bit, checks the
  cycle count, and checks that the largest change per iteration falls by more
  than a factor of ten over the run.
* `tb_sor_full`: the solver with all parameters at their defaults. One full
  iteration over a 2048×2048 mesh, with every one of the 4.2 million words
  checked. It takes about 50 million cycles, roughly 1.5 minutes in
  Verilator.

To run one, for example the end-to-end test:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/sor_pkg.sv tb/tb_sor_top.sv --top-module tb_sor_top -o sim
    ./obj_dir/sim

Not verified: behaviour with NaN, infinity or subnormal data; convergence to
a tolerance (the design has no convergence test); synthesis timing on a real
FPGA.

## Summary of what is this design's own

* IEEE single precision, and the adder and multiplier insides and latencies.
* The last three steps of the update, which follow the SOR equation rather
  than the flowchart as printed.
* One in-place phi array with a fixed boundary ring, asynchronous read
  ports, and the host port.
* Odd and even half-sweeps run one after the other. The flowchart draws the
  two branches side by side without saying whether they overlap.
* `NP = 3` row processes with interleaved rows.
* A site of the other colour is passed over in one cycle.
* A fixed iteration count instead of a convergence test.
* Run-time `n`, `omega` and `h`.
* Asynchronous active-low reset of all control state.
