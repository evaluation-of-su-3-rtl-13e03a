# APE link smearing as a streaming SU(3) pipeline

This RTL smears the gauge field of a four-dimensional lattice QCD configuration.
The links arrive from off-chip memory as a stream, one lattice site after another.
A chain of kernels transforms them, and the results stream back to memory.
Each kernel performs one complete APE smearing iteration, so two chained kernels do two
iterations in one pass over memory.

The design follows the architecture described in S. Calì, G. Korcyl and P. Korcyl,
*Evaluation of SU(3) smearing on FPGA accelerator cards*. That study targets a Xilinx
Alveo U280 card with high-bandwidth memory (HBM) and builds its kernels with a high-level
synthesis (HLS) tool. It describes these parts:

- six staple units working in parallel;
- a small on-chip cyclic buffer of links per kernel;
- one kernel per iteration, kernels joined by streams;
- 512-bit HBM ports, 8 per chip region.

It does not give the internals of most of these parts. Everything this RTL adds is named
as its own below.

## The computation

Every site `x` of an `LX x LY x LZ x LT` periodic lattice (a 4-D torus) holds four links
`U_mu(x)`, one per direction `mu = x, y, z, t`. Each link is a 3x3 complex matrix in SU(3).
One smearing iteration replaces every link by

    V       = U_mu(x) + coef * sum over nu != mu of ( S_+nu(x) + S_-nu(x) )
    U'_mu(x) = Proj_SU(3)( V )

The two staples in direction `nu` are products of three links around a unit square:

    S_+nu(x) = U_nu(x+mu)    * U_mu(x+nu)^dag * U_nu(x)^dag        (forward)
    S_-nu(x) = U_nu(x+mu-nu)^dag * U_mu(x-nu)^dag * U_nu(x-nu)     (backward)

With `coef = 1.0` this is the unweighted update `U + sum S` that the study uses. It sets all
smearing coefficients to one because they do not change the cost. `coef` is a run-time
input, so the usual weighted APE update can also be run.

The study names its multiply stage `multiply_by_staple` and says it forms "the product of
the current link and the sum of the six staples". Its smearing formula, however, is a sum.
This design follows the formula and computes `U + coef * sum S`.

**Projection.** The study uses a cited iterative method with four iterations. That method
is not reproduced here. This design uses Gram-Schmidt reunitarisation instead:

1. Normalise row 1.
2. Remove the row-1 component from row 2, then normalise row 2.
3. Set row 3 to the complex conjugate of the cross product (row 1 x row 2).

The result is unitary with determinant +1. Each `1/sqrt` starts from a bit-level seed and
is refined by four Newton-Raphson steps, `y <- y (3/2 - n/2 y^2)`. That is enough for full
double precision.

## Number format and data layout

Reals are IEEE-754 words, binary64 (double) by default. `su3_pkg` sets the format with
`EXP_W` / `MAN_W` (11/52 for double, 8/23 for float, 5/10 for half). The arithmetic is
written from scratch as synthesizable functions in `su3_pkg`:

- multiply and add round to nearest even;
- subnormals are flushed to zero;
- overflow gives infinity;
- NaN is not handled.

A link is `su3_t`, a packed `[row][column]` array of complex numbers, each `{re, im}`.
A site record is `site_t`, four links indexed by `mu`. In double precision a site is
`4 x 9 x 2 x 64 = 4608` bits, exactly nine 512-bit HBM words. Word `w` of site `i` holds
bits `[512w +: 512]` and lives at word address `9 i + w`. Sites are numbered x-fastest:
`i = x + LX (y + LY (z + LZ t))`.

## Streaming over a torus (ape_kernel, link_buffer)

This is the least obvious part of the design.

A kernel sees each site exactly once, in memory order, and must still find all neighbours of
a link. Smearing links in time slice `p` needs slices `p-1`, `p` and `p+1`. The kernel
therefore keeps a window of whole time slices (`V3 = LX*LY*LZ` sites each) in
`link_buffer`, a RAM with one write port and 11 synchronous read ports.

The torus makes this harder. The last slice needs slice 0 as its `+t` neighbour, and slice 0
needs the last slice as its `-t` neighbour. This design solves it as follows:

- The buffer has six slice slots. Slots 0 and 1 keep slices 0 and 1 for the whole pass.
  Slots 2 to 5 form a rolling window: slice `t >= 2` goes to slot `2 + (t-2) mod 4`.
- Slices are smeared in the order 1, 2, ..., LT-1, 0. Processing index `k` handles slice
  `p = (k+1) mod LT`.
- Index `k` may start once `min(k+3, LT)` slices have arrived.
- Slice `w` may be written only while `w <= k+3`. That slot is free, because the slice it
  held is no longer needed. So the next slice loads while the current one is computed.
- When the last link of a pass has been issued, both counters restart. The next lattice
  can follow at once.

Because slice 0 comes out last, a kernel's output stream is the lattice rotated by one time
slice. The next kernel does not need to know this. A rotated torus is still a torus, so it
simply treats slice 1 as its slice 0. After `NKERNEL` kernels, `hbm_writer` undoes the total
rotation of `NKERNEL` slices in the write address. The data returns to HBM in the layout it
was read from, ready for another pass.

For each link (site `x`, direction `mu`) the kernel reads 11 sites in one cycle:

- `x` and `x+mu`;
- for each of the three `nu != mu`: `x+nu`, `x-nu` and `x+mu-nu`.

These supply the 18 staple links and `U_mu(x)`. Links are issued one per cycle, with `mu`
running fastest, so a site takes four cycles.

The study also describes the buffer as a cyclic FIFO of links. Its figure shows three
slices: the one being smeared and its two neighbours. The slot layout, the handling of the
time boundary and the processing order are this design's own.

## Datapath and timing

Each SU(3) operation is one fully parallel pipeline stage. A 3x3 complex product is 108 real
multiplies. Every stage accepts a new operand each cycle.

| stage | unit | work |
|---|---|---|
| read | `link_buffer` | 11 sites, 1 cycle after issue |
| 1-2 | 3 x `compute_staple_forward`, 3 x `compute_staple_backward` | six staples, two chained `su3_mult` each (daggers folded into the multiplier) |
| 3 | 3 x `add_two` | `S_+nu + S_-nu` |
| 4-5 | 2 x `add_two` | sum of the three pairs |
| 6 | `su3_scale` | times `coef` |
| 7 | `add_two` | plus `U_mu(x)` (delayed by `su3_delay`) |
| 8-11 | `su3_projection` | norms, Newton steps, Gram-Schmidt, cross product |

A collector packs four consecutive results into a `site_t` and pushes it into a
`stream_fifo`. Every stage is enabled by one signal, `en`, which is "the output queue can
accept". Back-pressure therefore freezes the whole kernel and no data is lost. A link
reaches the queue 12 cycles after issue.

The six parallel staple units and the three pairwise adders mirror the composition the
study reports for its HLS function. The rest of the adder tree is this design's own.

The study's latencies are much longer because its HLS stages are deep: 39 cycles per
staple and about 1000 cycles per kernel. Its initiation interval (II) is 8 cycles per link
in double precision, forced by FPGA resources. This RTL does not pipeline the floating-point
operators inside a stage. As written, a stage is far too deep for the study's 300 MHz clock.
Reaching that clock would need retiming or pipelined arithmetic units, which are not done
here.

The HBM ports limit the rate. `hbm_reader` collects up to `PORTS` words per cycle, and a
beat never spans two sites. A site therefore takes `ceil(9/PORTS)` cycles: 2 with the
default 8 ports, 9 with one port. This is the 2 to 9 cycles the study derives.
`hbm_writer` writes at the same rate. The kernel takes 4 cycles per site, so with 8 ports
it, not memory, sets the rate.

## Top level (ape_smearing_top)

    rd_valid, rd_cnt, rd_data[PORTS][512] -> rd_ready     read beats, site order
    hbm_reader -> ape_kernel x NKERNEL -> hbm_writer
    wr_valid[PORTS], wr_addr[PORTS], wr_data[PORTS] <- wr_ready   write beats
    coef (fp_t), done (1-cycle pulse after the last word of a pass)

All streams use valid/ready handshakes. `rd_cnt` gives how many of the low lanes carry
words. The reader expects sites in order, each site's words in order. The writer emits each
word with its own address.

The HBM stack and the host that fills it are outside the design. The testbenches model the
HBM as an array.

Defaults:

| parameter | default |
|---|---|
| lattice | `4x4x4x8` |
| `NKERNEL` | 2 (the two chained iterations the study illustrates) |
| `PORTS` | 8 |
| link buffer | 384 sites = 1.77 Mbit per kernel |

The study gives no lattice size for the accelerator. Its CPU comparison uses a 32^3 x 64
lattice with 50 iterations. In this design that lattice would need 6 x 32^3 sites
(906 Mbit) of buffer per kernel, more than the on-chip RAM of the U280. The study's estimate
of three kernels in three chip regions would be three copies of this top level. They are
not built.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The reference model, `tb/tb_su3_pkg.sv`, uses the
simulator's native `real` (double) arithmetic. It compares results to a relative tolerance:
1e-12 for the units and 1e-9 after whole iterations.

- **Unit tests** (`tb_su3_mult`, `tb_add_two`, `tb_su3_scale`, `tb_compute_staple_*`,
  `tb_multiply_by_staple`, `tb_su3_projection`): random matrices, random gaps and random
  stalls. Each test also checks the exact latency.
- **`tb_link_buffer`, `tb_stream_fifo`, `tb_hbm_reader`, `tb_hbm_writer`**: check the
  handshakes and the read-during-write behaviour. The reader and writer tests also check
  the 2-cycles-per-site rate with 8 ports and the write addresses after rotation.
- **`tb_ape_kernel`**: two lattices (2x3x2x7) back to back against one reference iteration.
  Without stalls the kernel must issue 4V links in 4V consecutive cycles. The test also
  requires input back-pressure, issue waits, output stalls, the torus wrap and a
  back-to-back restart each to have occurred.
- **`tb_ape_smearing_top`** (2x2x3x6) and **`tb_ape_smearing_top_full`** (all defaults):
  a random lattice goes from the HBM model through two kernels and back. The result must
  match two reference iterations at every site. The test counts read stalls, window-full
  stalls, issue waits, output stalls, kernel-to-kernel transfers, multi-beat writes and one
  torus wrap per kernel, and fails if any of them never happened. The full-size run takes
  about two minutes, mostly compilation.

To run one test with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_ape_kernel \
        -y rtl -y tb +libext+.sv rtl/su3_pkg.sv tb/tb_su3_pkg.sv tb/tb_ape_kernel.sv
    ./obj_dir/Vtb_ape_kernel

## Changing the design

- **Lattice size:** `LX`..`LT` on `ape_smearing_top`. `LT` must be at least 3. The buffer
  grows as `6 * LX*LY*LZ` sites.
- **Iterations per pass:** `NKERNEL`. The writer's rotation follows it automatically.
- **Precision:** `EXP_W`/`MAN_W` in `su3_pkg`. The site record then shrinks, and
  `WORDS_PER_SITE` follows. Set the seed constant for the new width (`RSQRT_MAGIC`; values
  for 64, 32 and 16 bits are included). The testbenches convert through `real` and assume
  binary64.
- **Known limits:** no NaN or subnormal handling; the single-stage arithmetic needs
  pipelining before it could meet a realistic clock; the HBM side is a simple beat
  interface, not AXI.
