# A streaming accelerator for the Nekbone AX kernel

Nekbone is a small stand-in for the spectral-element fluid code Nek5000. In
its conjugate-gradient solver most of the time goes to one kernel, AX. AX
applies the Poisson operator to every element of the mesh. An element is a
cube of N x N x N grid points (N = 16, so 4096 points). On a CPU the kernel
is a sequence of small 16 x 16 matrix products. Each product walks the
element's data in a different order, so the caches miss often and the code
is limited by memory.

This RTL computes the same kernel as a dataflow pipeline. Every stage
handles one grid point per clock cycle. The stages work on different elements
at the same time, so that data is read from memory once, in address order,
while the arithmetic units stay busy. It follows the FPGA design described in
"Exploring the acceleration of Nekbone on reconfigurable architectures"
(N. Brown). That design was written in HLS. This is an independent RTL
rendering of its architecture. Where that description stops, the choices made
here are listed in the last sections.

## 1. The operator

For one element, with input field `u`, the 16 x 16 derivative matrix `D`
(`dxm1`), its transpose `Dt` (`dxtm1`) and six geometric factors `g1..g6`
per point, AX computes `w` in three steps. Point (x, y, z) has linear index
`x + N*y + N*N*z`, with x running fastest.

1. **Gradient** (`local_grad3`): three derivatives, each a matrix applied
   along one direction:

       ur(x,y,z) = sum_l dxm1(x,l)  * u(l,y,z)      (along x, matrix on the left)
       us(x,y,z) = sum_l u(x,l,z)   * dxtm1(l,y)    (along y, matrix on the right)
       ut(x,y,z) = sum_l u(x,y,l)   * dxtm1(l,z)    (along z, matrix on the right)

2. **Local accumulation**, at each point on its own:

       wr = g1*ur + g2*us + g3*ut
       ws = g2*ur + g4*us + g5*ut
       wt = g3*ur + g5*us + g6*ut

3. **Transposed gradient** (`local_grad3_t`) and sum:

       w(x,y,z) = ( sum_l dxtm1(x,l)*wr(l,y,z) + sum_l ws(x,l,z)*dxm1(l,y) )
                  + sum_l wt(x,y,l)*dxm1(l,z)

Each point costs 6 x (16 multiplies + 15 adds) + 9 multiplies + 6 adds + 2
adds = 203 floating-point operations. All arithmetic is IEEE-754 binary64.

## 2. Dataflow organisation

```
             compute unit 1                  CU 2                 compute unit 3
  HBM u ──► read u ─┬─► buffer(x) ─► mxm ─ur─┐                 ┌─wr─► buffer(x) ─► mxm(dxtm1) ─┐
                    ├─► buffer(y) ─► mxm ─us─┼─► local accum ──┼─ws─► buffer(y) ─► mxm(dxm1)  ─┴► add ─┐
                    └─► buffer(z) ─► mxm ─ut─┘       ▲         └─wt─► buffer(z) ─► mxm(dxm1)  ──────► add ─► write w ─► HBM w
  HBM dxm1 ─► mxm(x)      HBM dxtm1 ─► mxm(y), mxm(z)  HBM g                 HBM dxtm1, dxm1
```

The kernel (`ax_kernel`) is split into three compute units. Six streams join
them: ur, us, ut and wr, ws, wt. Each stream is a 16-deep FIFO.

* `cu1_grad` reads `u` and the two matrices. It holds three reorder buffers
  and three matrix units.
* `cu2_accum` reads `g` and does the local accumulation.
* `cu3_grad_t` has three more reorder buffers and matrix units, the two add
  stages and the write-back.

Inside the units the stages are joined by valid/ready handshakes: a value
moves when valid and ready are both high at a rising edge. A stage that
joins several inputs takes a point only when all of them are valid. A stage
that forks to several outputs gives a point only when all of them are ready.

The top level (`nekbone_ax_top`) holds `NUM_KERNELS = 4` independent
kernels. Elements are independent of each other. So a job of `nelt` elements
is cut into contiguous runs of `ceil(nelt/4)` elements, one run per kernel.
The base addresses of each kernel's `u`, `g` and `w` are moved forward to the
start of its run. The kernels share nothing: each has its own seven memory
ports, which are meant to go to separate HBM banks.

## 3. Reorder buffers: the central mechanism

The three matrix units of a group need the same element in three different
orders. The x unit wants lines along x, the y unit lines along y, and the z
unit lines along z. Memory, however, is read in address order. The
accumulation also produces wr, ws and wt in point order. The answer is to
buffer each element once in full, then serve it in whatever order is needed.

**Ping-pong.** Each `reorder_buffer` holds two elements. One half is
filled with element e+1 while the other half serves element e. When both
halves are done they swap. An element is served only once it is completely
in the buffer. So the three phases of the kernel overlap on three elements:

* reading element e+1 into the CU 1 buffers;
* computing the gradient and accumulation of element e;
* the transposed gradient and write-back of element e-1.

Without this overlap each element would pay for filling the buffers (512
cycles for u at eight points per word) and for emptying the first group
before the second could start.

**Banking.** A matrix unit needs a whole line of 16 values every cycle.
Each half of the buffer is therefore split over 16 banks. Point (x, y, z) is
stored in bank `(x+y+z) mod 16`, at address `z*16 + y`. Along any line only
one coordinate changes, so a line along x, y or z touches every bank exactly
once. All 16 banks are read in one cycle, each at its own address. The
values are then rotated back into line order by `(sum of the two fixed
coordinates) mod 16`. On the write side, eight consecutive x positions from
one 512-bit word also land in eight different banks. The same holds for a
single point per cycle from the accumulation.

**Output order.** For every output point, in natural order, the buffer gives
the line through that point along its direction. It also gives `out_r`, the
point's own coordinate along that direction. The matrix unit uses `out_r` to
select the row or column of the matrix. The three units of a group therefore
produce ur, us and ut for the same point in the same cycle. That is what the
accumulation needs.

Timing: banks are read on the edge that issues a beat. A whole element (4096
lines) leaves in 4096 cycles if downstream never stalls. `in_ready` falls
only when both halves hold elements not yet served.

## 4. Matrix units

`mxm_unit` computes one output point per cycle: the dot product of a
16-value line with one row (`LEFT = 1`, `C = M*X`) or one column
(`LEFT = 0`, `C = X*M`) of its matrix. That is 16 multipliers and a balanced
tree of 15 adders, so 31 operations per cycle. The products are summed in
pairs: `((p0+p1)+(p2+p3)) + ...`. The matrix is loaded once per run, as 32
words in column-major order (`M(r,c)` at index `r + 16c`). It is kept until
the next `start`. The pipeline has five register stages: the multiply, then
four adder levels. A result is valid four edges after the edge that accepted
its line. The whole pipeline freezes while its output is valid and not taken.

## 5. Floating point

`fp64_mul` and `fp64_add` are binary64 cores with one register stage each.
They are built on the functions `fp64_mul_f` and `fp64_add_f` in `nek_pkg`.

* Rounding is to nearest even.
* Subnormal operands and results are flushed to zero. For the data of this
  kernel they do not occur.
* Infinities follow IEEE rules, and invalid operations give the canonical
  quiet NaN.

For normal numbers the results are bit-identical to C `double` arithmetic. The
testbenches use this: they compute the expected `w` in the simulator's own
double precision, with the same summation order, and compare every bit.

## 6. Memory interface and data layout

All memory words are 512 bits wide, holding eight doubles. The first double
(lowest address) sits in bits 63:0. Addresses are word addresses.

| array | layout | words per element |
|---|---|---|
| u, w | points in natural order | N^3/8 = 512 |
| g | six doubles per point (g1..g6), points in natural order | 6*N^3/8 = 3072 |
| dxm1, dxtm1 | one N x N matrix, column major, shared by all elements | N^2/8 = 32 per run |

Because `g` has six values per point, four points arrive in three words.
`read_g` regroups the words into one six-value record per cycle, using a
14-entry register.

**Read port** (`mem_reader`). There are two channels:

* a request channel: `req_valid`/`req_ready`/`req_addr`, one word per request;
* an in-order response channel: `rsp_valid`/`rsp_ready`/`rsp_data`.

The reader keeps at most `MAX_OUT = 32` words requested but not yet passed
on. Its response queue therefore never overflows, and `rsp_ready` is high
whenever a response can arrive. With up to about 30 cycles of memory latency
it reads one word per cycle.

**Write port** (`write_w`). One channel: `wr_valid`/`wr_ready`/`wr_addr`/`wr_data`.

These channels stand in for the AXI4 master ports of the original. Bursts,
IDs and write responses are not modelled.

Read ports of a kernel (index into `rd_*[k][p]`):

| p | 0 | 1 | 2 | 3 | 4 | 5 |
|---|---|---|---|---|---|---|
| array | u | dxm1 (CU 1) | dxtm1 (CU 1) | g | dxtm1 (CU 3) | dxm1 (CU 3) |

## 7. Control and timing

To start a job, pulse `start` for one cycle while `busy` is low. At that
moment `nelt` and the five base addresses must be valid. `done` pulses once,
when the last word of the last kernel has been accepted. All resets are
synchronous and active low (`rst_n`).

In steady state each kernel finishes one element every N^3 = 4096 cycles.
That is one point per cycle, or 203 operations per cycle. For one kernel the
first results leave after about 2 x 4096 + 512 cycles: one element fill,
then one element through each group. With an always-ready memory, the
testbenches measure:

| configuration | elements per kernel | cycles |
|---|---|---|
| N = 16, 4 kernels | 3 | 16,929 (3 x 4096 = 12,288 plus fill) |
| N = 8, 4 kernels | 4 | 2,655 (4 x 512 plus fill) |

The original design ran at 400 MHz. At that clock one kernel would deliver
81 GFLOP/s. The evaluated job is 800 elements of order 16 on four kernels,
which is 200 elements per kernel: about 0.83 million cycles, or 2.1 ms at
400 MHz. The pipeline here is far shorter than a 400 MHz floating-point
pipeline: a full binary64 multiply or add sits in one cycle. So this RTL
reproduces the schedule and the throughput per cycle, not the clock rate.
The largest job simulated is 12 elements of order 16 on four kernels. The
full 800-element job would take some 1.6 million simulated cycles over two
runs, which is too slow for routine simulation. It differs from the smaller
job only in the element count.

## 8. What follows the source design and what does not

Taken from the source design:

* the dataflow structure and its stages;
* the three-unit split of each kernel and the four kernels;
* 512-bit memory ports, one port per kernel argument;
* stream FIFOs of depth 16;
* ping-pong reorder buffers, one per matrix multiplication;
* the fully unrolled matrix product that yields one result per cycle;
* binary64 arithmetic, N = 16, and 203 operations per point.

Choices made here, where the source says nothing:

* the bank layout of the reorder buffers;
* all handshakes, the start/done control and the simple memory channels;
* the summation order inside a dot product (a pairwise tree);
* the floating-point cores, with round to nearest even and flush to zero,
  and their one-cycle latency;
* the packing of `g` and its regrouping;
* loading each matrix once per run instead of once per element;
* splitting the job across kernels in hardware. The original left this to
  the host software.

Left out:

* the host, the PCIe shell and the HBM itself;
* the mapping of buffers to particular RAM types. The original put stream
  FIFOs and reorder arrays in LUT RAM and the matrix storage in UltraRAM.
  Here they are plain arrays.

## 9. Files

`rtl/` (synthesizable):

| file | content |
|---|---|
| `nek_pkg.sv` | types, constants, binary64 multiply/add functions |
| `fp64_mul.sv`, `fp64_add.sv` | registered floating-point cores |
| `stream_fifo.sv` | valid/ready FIFO, default depth 16 |
| `mem_reader.sv` | HBM read port: requests, response queue, credits |
| `read_g.sv` | reads `g` and regroups it into six-value records |
| `reorder_buffer.sv` | banked ping-pong reorder buffer |
| `mxm_unit.sv` | 16-wide dot-product pipeline |
| `local_accum.sv` | local accumulation with g |
| `add_stage.sv` | element-wise add of two streams |
| `write_w.sv` | packs results and writes them to HBM |
| `cu1_grad.sv`, `cu2_accum.sv`, `cu3_grad_t.sv` | the three compute units |
| `ax_kernel.sv` | one kernel |
| `nekbone_ax_top.sv` | four kernels, top level |

`tb/` holds the testbenches:

* one self-checking testbench per module, `tb_<module>.sv`;
* `tb_nekbone_ax_top.sv`: the whole design at N = 8;
* `tb_nekbone_ax_full.sv`: the whole design at its default size;
* `hbm_rd_model.sv`: a behavioural memory read port;
* `nek_ref.svh`: shared reference helpers;
* `ax_top_tb_body.svh`: the body shared by the end-to-end tests.

The end-to-end tests run a job twice:

1. against a memory that stalls at random and has long write outages;
2. against an always-ready memory, where the cycle count is checked.

They count every mechanism (buffer overlap, three elements in flight,
memory stalls, full buffers, g regrouping, write stalls, several kernels
active) and fail if one never occurs. Each testbench prints
`TB_RESULT checks=<n> failures=<m>`.

## 10. Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -j 4 \
    --top-module tb_nekbone_ax_top -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/nek_pkg.sv tb/tb_nekbone_ax_top.sv
obj_dir/Vtb_nekbone_ax_top
```

Replace the top module name to run any other testbench. Approximate run
times, including the build:

* unit tests: seconds;
* `tb_nekbone_ax_top` (N = 8): under a minute;
* `tb_nekbone_ax_full` (N = 16, four kernels, 12 elements): about 3.5
  minutes.

## 11. Changing it

Parameters:

* `N` (power of two, at least 8) on every level;
* `NUM_KERNELS` on the top;
* `ADDR_W`, the word-address width;
* `MAX_OUT` on the reader, which sets how much memory latency it can hide;
* `DEPTH` on the FIFOs.

`N` must be a multiple of 8 so that a 512-bit word holds whole parts of a
line. Changing `N` changes the buffer sizes (2 x N^3 doubles each, six per
kernel) and the width of the matrix units (N multipliers, N-1 adders).

To fit a faster clock, pipeline the floating-point cores: add stages to
`fp64_mul`/`fp64_add` and widen the `vld` shift registers in `mxm_unit`,
`local_accum` and `add_stage` to match. Nothing else depends on those
latencies, because all stages are joined by handshakes.
