# A streaming Wilson-Dirac stencil engine in SystemVerilog

Lattice QCD spends most of its time solving linear systems with the
Wilson-Dirac operator. The solver is conjugate gradient, and the costly step
in each iteration is one application of the operator to a vector:

    (D psi)(x) = psi(x) - kappa * sum_mu [ (1 - gamma_mu) U_mu(x)          psi(x+mu)
                                         + (1 + gamma_mu) U_mu(x-mu)^dag   psi(x-mu) ]

Here `psi` is a field of Dirac spinors: 4 spin x 3 colour complex numbers per
site of a 4-D periodic lattice. `U_mu(x)` are 3x3 complex link matrices,
`gamma_mu` are the 4x4 Dirac matrices and `kappa` is the hopping parameter.
This RTL implements that matrix-vector product as an accelerator kernel.
The conjugate-gradient loop, the vectors and the stopping test stay on a host
processor. The kernel receives the field and the links as streams, computes
one lattice site per initiation interval, and streams the results back while
input is still arriving.

The design follows a published FPGA implementation of mixed-precision
conjugate gradient (G. Korcyl and P. Korcyl, "Optimized implementation of the
conjugate gradient algorithm for FPGA-based platforms using the Dirac-Wilson
operator as an example"). That work was written in C++/OpenCL for a
high-level synthesis flow. This is an independent register-transfer
rendering of the structure it describes. Where that description is silent,
the choices are this design's own; they are listed under "Departures and own
choices" below.

## The stencil pipeline (`dw_stencil`)

Each output site needs 9 spinors (its own and those of its 8 neighbours) and
8 links. The computation splits into four stages, the split used by the
original kernel:

| stage | work | hardware | real ops | latency (cycles) |
|---|---|---|---|---|
| 1 | load all inputs of a site in one cycle | input registers | 0 | 1 |
| 2 | spin projection, 8 hops | 8 x `spin_project` | 96 | 14 |
| 3 | colour product: 4 x U*h and 4 x U^dag*h | 8 x `su3_mult` | 1056 (1152 as the original counts) | 70 |
| 4 | spin reconstruction, 8-way sum, kappa scaling, subtraction | `spin_accumulate` | 216 | 57 |

The whole pipeline has no stall. A site can enter every cycle, and its result
leaves exactly 142 cycles later.

**Why projection comes first.** `(1 -+ gamma_mu)` has rank two. Its lower
two spin rows are fixed multiples, by phases in {+-1, +-i}, of its upper two
rows. So stage 2 keeps only a *half spinor* (2 x 3 complex numbers). That
costs 12 real additions per hop, because multiplying by a phase is only a
swap of real and imaginary parts plus sign flips. Stage 3 then multiplies
6 complex numbers by U instead of 12. Stage 4 rebuilds rows 2 and 3 with
wiring alone, using `row_k = phase(k) * h[col(k)]`.

The gamma matrices use the DeGrand-Rossi (chiral) basis. In that basis every
row of every gamma matrix has a single non-zero entry. `dw_pkg` holds that
entry's column and phase (`gamma_col`, `gamma_ph`, `proj_ph`). To change the
basis, change those three functions and the testbench's explicit matrices
(`tb_fp_pkg::gamma_el`).

**Hop numbering.** Hop `d = 2*mu + b` is `x+mu` for `b = 0` (forward: uses
`1 - gamma`, multiplies by `U_mu(x)`) and `x-mu` for `b = 1` (backward: uses
`1 + gamma`, multiplies by `U_mu(x-mu)^dag`). The backward link comes in
unconjugated. `su3_mult #(.DAGGER(1))` forms the conjugate transpose by
re-indexing and flipping sign bits.

**Latency padding.** The float arithmetic needs only 2, 8 and 10 cycles in
stages 2, 3 and 4. Each stage is padded with registers (`delay_line`) up to
`S2_LAT`/`S3_LAT`/`S4_LAT` (defaults 14/70/57). The original reports those
stage latencies for its double-precision build. Keeping them makes the
pipeline timing match the published kernel. Setting the parameters to the
arithmetic minimum (2/8/10) gives a 21-cycle pipeline. The links bypass
stage 2, and the centre spinor and kappa bypass stages 2 and 3, through
delay lines of the matching length.

## Arithmetic (`fp_add`, `fp_mul`)

The data type is IEEE-754 binary32 by default, the type of the benchmarked
configuration. `FP_EW`/`FP_MW` in `dw_pkg` select the format; 11/52 gives
binary64, but that has not been simulated. Both units are two-stage
pipelines with round-to-nearest-even:

* `fp_add` aligns in cycle 1, keeping guard, round and sticky bits. In cycle
  2 it adds, normalises with a leading-zero count and rounds.
* `fp_mul` forms the full significand product in cycle 1. In cycle 2 it
  normalises by at most one bit and rounds.

Subnormals are flushed to zero. Infinities propagate; NaN results are the
canonical quiet NaN. Both units are bit-exact against a double-precision
reference rounded to binary32 (tested on 20,000 random operand pairs each).
The stencil sums in a different order from a textbook loop, so results differ
from a sequential float computation in the last bits.

## Feeding the pipeline: the cyclic buffer (`cyclic_buffer`)

Each spinor is a neighbour of 8 sites. Fetching 9 spinors per site from
memory would need 9 times the bandwidth. Instead the field is streamed
**once**, in lexicographic order (x fastest, then y, z, t), into an on-chip
cyclic window, and the sites are processed in the same order. All
neighbours of site `i` then lie within `V3 = LX*LY*LZ` stream positions of
it. A window of `D = 2*V3 + 2` spinors is enough: `2*V3+1` hold the current
neighbourhood, and one more slot is refilled while the current site is read.

* Periodicity in x, y and z is handled inside the window: the offset to a
  wrapped neighbour stays within one time slice.
* Periodicity in t is handled by the sender: the stream is
  `(LT+2)*V3` spinors long, with a copy of slice `LT-1` before slice 0 and a
  copy of slice 0 after slice `LT-1`.
* A beat is accepted only if the slot it overwrites is no longer needed.
  A site is offered (`win_valid`) only once its `t+1` neighbour has arrived.
* The 9 reads are combinational array reads. The stencil's stage-1 register
  loads them, so the 9 spinors and 8 links of a site enter in a single cycle.

The window grows with `LX*LY*LZ`, not with `LT`. At the default 8^4 it holds
1026 spinors of 768 bits per unit.

## One compute unit (`dw_compute_unit`) and the top (`dw_top`)

A compute unit connects four valid/ready streams. Each beat carries one whole
element:

| stream | content | beats per sweep |
|---|---|---|
| `in1` | spinors, lexicographic, with halo slices | `(LT+2)*V3` |
| `in2` | the 4 forward links `U_mu(x)` of a site | `LT*V3` |
| `in3` | the 4 backward links `U_mu(x-mu)` of a site | `LT*V3` |
| `out` | `(D psi)(x)`, lexicographic | `LT*V3` |

A site issues when all four of these hold:

1. its window is complete;
2. both link streams offer a beat (both are consumed on issue);
3. output credit is available;
4. `II` cycles have passed since the last issue.

The credit counter adds the sites in the pipeline to the words in the output
FIFO. It never lets that sum exceed `OUT_DEPTH` (default 256). This makes
back-pressure on `out` safe even though the stencil cannot stall. Full rate
needs `OUT_DEPTH >= 143/II`.

Results start leaving after the first 142 cycles, while `in1` is still
streaming. Transfer and computation therefore overlap for the whole sweep.
`start` re-arms the unit for the next operator application. `done` rises once
all results have been taken.

`dw_top` instantiates `N_CU = 3` independent units: three kernel instances
fit the target card in the benchmarked configuration. The units share `clk`,
`rst_n`, `start` and `kappa`; each has its own streams. Each unit's streams
would be served by its own memory channels. The memory controllers, bus
masters, host DMA and the conjugate-gradient host code are not part of this
RTL. The stream side is what the top exposes as ports.

**Throughput.** With `II = 2` (the benchmarked setting), each unit finishes a
sweep in about `2*N + 2*V3 + 142` cycles. At 300 MHz, three units doing
1464 operations per site (the original's count) give a peak of
3 x 150 M x 1464 = 659 GFLOP/s. The original reports 607 GFLOP/s sustained
for this configuration. `II = 1` is also supported: the datapath is fully
parallel, and `II` only spaces the issues. A design targeting `II = 2` for
area would share each operator over two cycles instead; this RTL does not
do that.

## Departures and own choices

* **Data type and latencies.** Float arithmetic, but padded to the stage
  latencies that were published for double precision (see above).
* **II.** The original's description says II = 1; its benchmark used II = 2
  to fit three instances. Here II is a parameter, default 2, and implemented
  as issue throttling, not as operator sharing.
* **Operation count in stage 3.** Each complex dot product here is 12
  multiplications and 10 additions. The original counts 9 complex
  multiply-accumulates of 8 operations. The arithmetic is the same; the count
  differs only by the first accumulation into zero.
* **Centre spinor into stage 4.** The subtraction `psi - kappa*sum` needs the
  centre spinor. It is carried alongside stages 2 and 3.
* **Stream contents, handshake, halo slices, window depth, credit flow
  control, FP exception handling, reset (asynchronous, active low, clears
  only control state)** are all this design's own choices.
* **Mixed precision.** The original's solver runs most iterations in low
  precision with occasional high-precision corrections. That logic lives in
  the host code and is not part of this RTL; the kernel has one precision
  per build.

## Files

| file | contents |
|---|---|
| `rtl/dw_pkg.sv` | number format, complex/spinor/link types, gamma tables, phase helpers |
| `rtl/fp_add.sv`, `rtl/fp_mul.sv` | floating-point units |
| `rtl/fp_sum6.sv`, `rtl/delay_line.sv`, `rtl/sync_fifo.sv` | helpers |
| `rtl/spin_project.sv`, `rtl/su3_mult.sv`, `rtl/spin_accumulate.sv` | stages 2, 3, 4 |
| `rtl/dw_stencil.sv` | the four-stage pipeline |
| `rtl/cyclic_buffer.sv` | neighbour window |
| `rtl/dw_compute_unit.sv` | one kernel instance with its streams |
| `rtl/dw_top.sv` | three instances |
| `tb/tb_fp_pkg.sv` | reference arithmetic in `real`, explicit gamma matrices, reference operator |
| `tb/*_tb.sv` | one self-checking testbench per module |

## Verification

Each testbench computes its expected values in double precision,
independently of the RTL. It prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* `fp_add_tb`, `fp_mul_tb`: bit-exact against rounded double results, plus
  special values.
* `spin_project_tb`: against the explicit `(1 -+ gamma)` matrices.
* `su3_mult_tb`: against the matrix products.
* `spin_accumulate_tb`: feeds projected random spinors and checks the
  reconstruction against all four rows computed with the explicit matrices.
* `dw_stencil_tb`: full operator per site, exact 142-cycle latency, and
  back-to-back input.
* `cyclic_buffer_tb`: on a 4x3x2x3 lattice, checks that every site reads
  exactly its 9 periodic neighbours, under random flow control, over two
  sweeps.
* `dw_compute_unit_tb` and `dw_top_tb`: end to end against the operator
  applied to a whole random field. The backward links are consistent with the
  forward ones. Each run counts every mechanism and fails if any never
  occurs: waiting for the window, waiting for links, output-credit stalls,
  the II throttle, output overlapping input, and issues exactly II apart at
  full rate.

`dw_top_tb` runs one unit on a 4x4x4x8 lattice. The default configuration
(3 units, 8^4) has been simulated for one full sweep, and all 12,288 results
were correct. Building it with Verilator takes about 12 minutes, because the
three units hold about 4,100 floating-point operators. To run it, set
`N_CU`, `LX`..`LT` in `dw_top_tb` to the defaults.

To simulate a testbench with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
      --top-module dw_stencil_tb -y rtl -y tb rtl/dw_pkg.sv tb/tb_fp_pkg.sv \
      tb/dw_stencil_tb.sv -Mdir obj
    ./obj/Vdw_stencil_tb

Not verified: binary64 builds, `II = 1` at unit level (the stencil itself is
tested at one site per cycle), and synthesis results on an FPGA.
