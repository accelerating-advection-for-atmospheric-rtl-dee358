# A streaming PW advection kernel: one grid cell per clock

Advection, the transport of the wind fields by the wind itself, is the most
expensive single step of a large-eddy atmospheric model (around 40% of the
run time of MONC, the Met Office / NERC cloud model). The Piacsek-Williams
(PW) scheme computes, for every cell of a 3D grid, three *source terms*
`su`, `sv`, `sw` from the three wind components `u`, `v`, `w` at the cell
and its neighbours: 21 double precision operations per field, 63 per cell.

This RTL implements that computation as a dataflow machine. Each stage runs
concurrently and hands its output to the next through a valid/ready
handshake. Once the pipeline is full, one cell completes every clock cycle.
Each grid value is read from memory once, and a **3D shift buffer** turns
that single stream of values into a stream of complete 27-point stencils.
At 300 MHz with 64-level columns, one cell per clock is
(63·63 + 55)/64 × 300 MHz ≈ 18.9 GFLOPS per kernel. The paper reports 77–83%
of this figure on its FPGA builds.

The design follows the dataflow design in N. Brown's paper "Accelerating
advection for atmospheric modelling on Xilinx and Intel FPGAs". That paper
implements the design in vendor HLS and OpenCL. This RTL is an independent
register-transfer implementation of the same design. The paper does not
specify every detail, and the sections below say where this RTL makes its
own choices.

## The dataflow machine

```
                      external memory (3 read ports, 512 bit)
                         |u          |v          |w
                    +----------------------------------+
                    |            read_data             |   chunk-by-chunk walk, unpack 8 doubles/word
                    +----------------------------------+
                         |           |           |        one value per field per cycle
                 shift_buffer_3d shift_buffer_3d shift_buffer_3d   27-point stencils
                         |           |           |
                     replicate   replicate   replicate     each stencil to all three stages
                        / | \       / | \       / | \
                   advect(U)     advect(V)     advect(W)   21 FP64 ops each, II = 1
                         |su         |sv         |sw
                    +----------------------------------+
                    |            write_data            |   pack 8 results/word
                    +----------------------------------+
                      external memory (3 write ports, 512 bit)
```

| Module | File | Role |
|---|---|---|
| `advection_kernel` | `rtl/advection_kernel.sv` | top: wires the stages, start/busy/done |
| `read_data`, `field_reader` | `rtl/read_data.sv`, `rtl/field_reader.sv` | memory reads, one lane per field |
| `shift_buffer_3d` | `rtl/shift_buffer_3d.sv` | values → stencils |
| `replicate` | `rtl/replicate.sv` | fork of a stencil stream to three consumers |
| `advect` | `rtl/advect.sv` | source term of one field (parameter `FIELD`) |
| `write_data`, `field_writer` | `rtl/write_data.sv`, `rtl/field_writer.sv` | memory writes, one lane per field |
| `adv_pkg` | `rtl/adv_pkg.sv` | message types, configuration record |
| `face_walker_pkg` | `rtl/face_walker_pkg.sv` | the loop order and address formula shared by read and write |
| `fp64_pkg` | `rtl/fp64_pkg.sv` | IEEE 754 double add / subtract / multiply |

Every stage handshake is plain valid/ready, and a transfer happens when both
are high. No stage drops or duplicates data when any consumer stalls. A
stall propagates back to the memory read ports.

## What is computed

Indices are `(x, y, z)` = Fortran `(i, j, k)`, and `U(a,b,c)` means
`u(k+c, j+b, i+a)`. For every interior cell (column levels `k = 1..nz-1`,
counted from 0):

```
su = tcx*(U(-1,0,0)*(U(0,0,0)+U(-1,0,0)) - U(1,0,0)*(U(0,0,0)+U(1,0,0)))
su = su + tcy*(U(0,-1,0)*(V(0,-1,0)+V(1,-1,0)) - U(0,1,0)*(V(0,0,0)+V(1,0,0)))
su = su + tzc1(k)*U(0,0,-1)*(W(0,0,-1)+W(1,0,-1)) - tzc2(k)*U(0,0,1)*(W(0,0,0)+W(1,0,0))
```

This is the scheme as the paper lists it for `u`. The hardware evaluates it
in exactly this order, left to right, with one rounding per operation. The
results are therefore bit-identical to a straightforward double precision
software evaluation. `sv` and `sw` have the same shape, three flux
differences, with their own operands. `advect` has one datapath for all
three fields and selects the operands by the `FIELD` parameter. The `sw`
term uses the coefficients `tzd1`, `tzd2` where `su` and `sv` use `tzc1`,
`tzc2`.

The paper prints only the `u` formula. The `v` and `w` operands here follow
the PW scheme as MONC implements it; they are not taken from the paper.
`tb/tb_ref_pkg.sv` lists all three in readable form.

Two levels of each column are special:

* **Column top** (`k = nz-1`). There is no level above, so `su` and `sv` drop
  the `tzc2` term, as in the paper's listing. This design sets `sw` to zero
  there, treating the model top as a rigid lid.
* **Ground** (`k = 0`). The scheme starts at the second level, so all three
  source terms are zero here. The kernel still produces and writes them, so
  every column yields `nz` results and every memory word is whole.

The advection pipeline is seven stages deep, one floating point operation
per stage:

1. the six pair sums and `c1·aZ`, `c2·bZ`
2. the six products
3. the x and y differences
4. the multiplications by `tcx` and `tcy`
5. x + y
6. + the `c1` term
7. − the `c2` term, or the top/ground special case

The latency is 7 cycles and a new cell can enter every cycle.

The arithmetic (`fp64_pkg`) is IEEE 754 binary64 with round-to-nearest-even.
Subnormal inputs are treated as zero and subnormal results are flushed to
zero, which is the usual FPGA floating point convention. Infinities and NaNs
propagate. The operations are written as combinational functions, each
followed by a pipeline register. To reach a high clock rate, a
synthesis flow would retime these registers or replace the functions with
vendor floating point cores.

## The 3D shift buffer

This is the heart of the design and the least obvious part.

Values arrive in walk order: one x plane after another, within a plane one
y column after another, each column from bottom to top. A cell's stencil
needs its neighbours in three planes, three columns and three levels. So
when value `(x, y, z)` arrives, the buffer can complete the stencil centred
on `(x-1, y-1, z-1)`, provided it still holds everything seen in the last
two planes. The buffer keeps that history at three levels, each shifting
along one dimension:

1. **X-slices** (`slice_a`, `slice_b`, each `CHUNK_Y × MAX_NZ` doubles).
   Position `(y, z)` of the slices holds the values of the two previous
   planes. The incoming value is written into the newest slice, and the value
   it displaces moves into the older one. Reading both slices at `(y, z)`
   together with the incoming value gives the column triple for planes
   `x, x-1, x-2`.
2. **Y-lines** (`line0`, `line1`, three of each, one per plane, each
   `MAX_NZ` deep). For each plane, position `z` holds the values of the two
   previous columns. The triple from step 1 enters `line0` and the old
   `line0` value moves to `line1`. This gives, for each plane, the values of
   columns `y, y-1, y-2` at level `z`.
3. **3×3 windows** (registers, three of them). The nine values from step 2
   form the new top row of the windows, and the rows shift down. The windows
   then hold levels `z, z-1, z-2`: the 27-point stencil, indexed
   `[dx][dy][dz]` with 1 as the centre.

The paper describes each store with three slices or lines. In such a store,
the newest one always equals the value arriving in that cycle, and the
oldest is written but never read again. This RTL therefore stores two and
forwards the incoming value. The stencils are the same, and the memory is
two thirds the size.

Each slice and line is a simple dual-port memory: one read at the incoming
address and one write at the previous value's address. This matches the
paper's remark that no array needs more than two accesses per cycle. Reads
are registered, as in block RAM. The same address is touched again only
`nz` cycles later (lines) or one face later (slices), so no forwarding is
needed, provided `nz ≥ 2`.

**Which value completes which stencil.** A value at level `z ≥ 1` completes
the stencil centred on level `z-1` of the column before it. A value at
`z = 0` starts a new column and completes no new interior stencil. Its
cycle is used to emit the *top* cell of the previous column instead. That
stencil's upper row is then already stale, but the column top does not use
its upper row. As a result, every input value yields at most one stencil,
and every column yields its `nz` stencils in order, bottom to top. The only
extra cycle in a whole run is a single **flush** cycle after the value
tagged `last`, which emits the final column top.

The buffer emits a stencil only when the value's tag says the centre is an
interior cell (`xy_ok`: at least two planes and two columns seen in this
chunk). The ground stencil (`k = 0`) is emitted as well, flagged `bottom`,
and its lower row is stale.

Timing: a value accepted in cycle *t* is in the window in cycle *t+1*, and
its stencil is in the output register from cycle *t+2*. The buffer accepts
one value per cycle while its output is taken.

## Chunking and the memory layout

Each array (`u, v, w, su, sv, sw`) is stored with a one-cell halo in x and
y. The value `(x, y, z)`, with `x ∈ 0..nx+1`, `y ∈ 0..ny+1` and
`z ∈ 0..nz-1`, is double number `(x·(ny+2) + y)·nz + z` from the array's
base. Memory is addressed in 512-bit words of eight doubles, so `nz` must be
a multiple of 8, and each base is a word address.

Only the y and z extents of the shift buffer are fixed in hardware. The
grid is therefore cut in y into **chunks** of `chunk_w` interior columns
(at most `CHUNK_Y - 2`; the last chunk may be narrower). One chunk is
processed completely before the next:

```
for each chunk (left halo column ylo = c*chunk_w)
  for x in 0 .. nx+1                       # planes, halos included
    for y in ylo .. min(ylo+chunk_w+1, ny+1)   # chunk face with both halos
      for z in 0 .. nz-1                   # contiguous in memory
```

Neighbouring chunks share two columns: one serves as the right halo of the
left chunk and the other as the left halo of the right chunk. Every chunk
face is one contiguous stretch of memory. The write stage walks the same
order restricted to interior cells, so `su`, `sv` and `sw` come back in
exactly the order they are produced. `face_walker_pkg` holds this loop
order and the address formula for both stages. The halo positions of the
result arrays are never written.

Cost of the halo: each chunk reads `(nx+2)·(chunk_w+2)·nz` values to produce
`nx·chunk_w·nz` results. For a 128×128×64 grid in chunks of 100 and 28
columns, the kernel takes 1,098,259 cycles for 1,048,576 cells, about 95%
of the one-cell-per-cycle ideal.

Every memory port is its own lane. `field_reader` keeps up to `FIFO_D`
words in flight and unpacks them eight doubles at a time. `field_writer`
packs eight results and presents a word while it fills the next. A lane
needs one memory word every eight cycles to keep pace.

## Interface and operation

`advection_kernel` parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `CHUNK_Y` | 256 | y positions the shift buffers hold, halos included |
| `MAX_NZ` | 64 | largest column height (64 is MONC's default) |
| `FIFO_D` | 8 | read words in flight per field |

Configuration (`cfg_t`, stable from `start` to `done`): `nx`, `ny`, `nz`,
`chunk_w`, and six word base addresses. The constants are `tcx` and `tcy`
(ports), plus one table of two coefficients per level for each advection
stage. The tables are written before the run through
`coef_we / coef_field / coef_sel / coef_k / coef_data`: field U or V gets
`tzc1` (`coef_sel = 0`) and `tzc2` (`coef_sel = 1`), and field W gets
`tzd1` and `tzd2`.

To run the kernel, pulse `start` while `busy` is low. `busy` stays high until
the final result word has been accepted, and `done` pulses in the following
cycle.

Memory ports:

* Read ports (`rd_req_*` and `rd_rsp_*`, one per field):
  * requests use valid/ready;
  * responses return in request order, any number of cycles later, with no
    ready signal;
  * the kernel never has more requests outstanding than it has room for.
* Write ports (`wr_*`, one per result) use valid/ready.

Reset (`rst_n`, active low, asynchronous) clears all control state. The
large memories are not reset, because every location is written before it
is read.

## Where this RTL goes beyond or departs from the paper

* **Taken from the paper:**
  * the stage structure;
  * the three-level shift buffer;
  * the replicate stages;
  * y-chunking with a two-column overlap;
  * 512-bit memory words;
  * double precision;
  * the `u` formula;
  * the 64-level default column;
  * initiation interval one.
* **Chosen here, not given by the paper:**
  * the `v` and `w` formulas (MONC's PW scheme);
  * `sw = 0` at the column top and zero source terms on the ground level;
  * the memory layout with halos;
  * one read port and one write port per field;
  * all handshakes and the start/busy/done control;
  * the coefficient tables;
  * the seven-stage FP pipeline and flush-to-zero of subnormals;
  * how column tops are emitted (next column's first cycle, plus one flush
    cycle per run);
  * storing two slices and two lines instead of three.
* **`CHUNK_Y = 256`** is this design's default. The only chunk size the
  paper's source mentions is Y = 256, in a resource table that does not
  appear in the published text.
* **Operation count at the column top.** The paper counts 55 operations
  there. This design performs 17 + 17 + 0, because `sw` is zero at the top.
* **Not part of the RTL:**
  * the host side: the PCIe transfers, the chunking in x that overlaps
    transfer with compute, and the distribution of work over several kernels
    (six on an Alveo U280, five on a Stratix 10 in the paper);
  * the board memory itself.

  A multi-kernel system instantiates `advection_kernel` several times, each
  copy with its own memory ports. The host then launches the copies on
  different x ranges.

## Sizes the design handles

The grids the paper evaluates have 1M, 4M, 16M, 67M, 268M and 536M points.
With 64-level columns, every one of them fits this kernel unchanged:

* `nz = 64 = MAX_NZ`;
* `nx` and `ny` up to 65,533 (16-bit indices);
* any `ny`, because of chunking;
* 32-bit word addresses cover 256 GiB, and the largest case needs 25.8 GB
  for its six arrays.

Whether those arrays fit in the board's memory is a property of the board,
not of this RTL.

## Verification

All testbenches are self-checking. Floating point results are compared bit
for bit with `real` arithmetic in the reference model `tb/tb_ref_pkg.sv`.

| Testbench | What it exercises |
|---|---|
| `tb_advect` | U, V, W stages on random stencils, coefficients and special levels; latency 7, one result per cycle, random output stalls |
| `tb_shift_buffer_3d` | every value of every stencil of two chunk faces (full and narrow); one stencil per input; random gaps and stalls |
| `tb_replicate` | three independently stalling consumers see every message once, in order; one message per cycle unstalled |
| `tb_read_data` | values and tags of all three lanes in walk order; memory refusals and lane stalls; one value per cycle unstalled |
| `tb_write_data` | every interior word correct, halo words untouched, under write refusals |
| `tb_advection_kernel` | whole kernel at `CHUNK_Y = 8`, `MAX_NZ = 16`: three grids, multi-chunk with a narrow last chunk, heavy memory back-pressure; counts chunk changes, flush cycles, column tops, ground cells, buffer stalls, replicate waits, refused reads and writes, and fails if any never happened |
| `tb_advection_kernel_full` | whole kernel at default sizes, 2 × 300 × 64 grid in chunks of 254 and 46 |
| `tb_workload_1m` | whole kernel at default sizes on the paper's smallest grid (128 × 128 × 64, about 1M points); ≈22 s of simulation |

`tb/mem_model.sv` is a behavioural memory: in-order reads with a fixed
latency, random refusals, and sparse storage. `tb/tb_kernel_body.svh` holds
the code the three whole-kernel testbenches share.

To build and run any testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Itb \
  rtl/adv_pkg.sv rtl/fp64_pkg.sv rtl/face_walker_pkg.sv tb/tb_ref_pkg.sv \
  tb/tb_advection_kernel.sv --top-module tb_advection_kernel
./obj_dir/Vtb_advection_kernel
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`.
