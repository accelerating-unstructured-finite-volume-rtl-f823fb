# A streaming finite volume processor for unstructured triangle meshes

An explicit finite volume solver on an unstructured mesh spends most of its
time waiting for memory: the neighbours of a cell are scattered over the
node array, so a processor that fetches them on demand makes random
off-chip accesses. This design avoids that. The host numbers the mesh so
that every neighbour of cell *i* lies close to *i* in the numbering. That
distance bound is the mesh's *serial bandwidth*. The hardware then reads
three arrays strictly in order:

- the cell (node) states;
- the connectivity and face descriptors;
- the results, which it writes in order.

It keeps a sliding window of recently read cells in on-chip memory, and
every neighbour a cell needs is found in that window. Off-chip traffic is
purely sequential, and the arithmetic unit gets a complete stencil every
clock cycle.

The RTL implements this architecture for the 2D Euler equations of gas
dynamics:

- a cell-centred scheme on triangles;
- a Lax-Friedrichs flux;
- a forward-Euler step;
- IEEE-754 double precision.

It is the main configuration of the architecture published by Nagy, Nemes,
Hiba, Csík, Kiss, Ruszinkó and Szolgay in "Accelerating unstructured finite
volume computations on field-programmable gate arrays". It gives RTL for
the datapath and the control that the architecture describes. It was not
written by those authors.

Each processor updates one triangle every three clock cycles. The top level
holds three processors side by side.

## Data the processor consumes

A time step is three streams per processor, all valid/ready handshakes.

**Node stream** (`node_in_t`, 321 bits). One entry per cell in the host's
order. Each entry has:

- `ex`: update this cell (1), or only hold it as a neighbour (0);
- the conserved state `rho, rho*u, rho*v, E`;
- the cell `area`.

All values are 64-bit IEEE doubles.

**Face stream** (`face_desc_t`, 217 bits). Three entries for each cell with
`ex = 1`, in cell order. Each entry has:

- `last`, the "next node" bit, set on the third entry of a cell;
- `idx`, the 24-bit stream position of the neighbour across the face;
- the outward unit normal `nx, ny`;
- the face length `len`.

Face geometry is precomputed by the host. That raises memory traffic but
keeps the arithmetic simple.

**Result stream** (`state_t`, 256 bits). The new `rho, rho*u, rho*v, E` of
each updated cell, in stream order.

Cells with `ex = 0` serve two purposes:

- ghost cells that impose boundary conditions (inflow, outflow, wall);
- cells that appear in the stream more than once, when a mesh whose serial
  bandwidth is too large is cut into parts that overlap. Only one copy is
  updated; the others are loaded again as neighbours.

They get no face descriptors and produce no result.

The host must number the mesh so that a neighbour is never more than
`REACH = DEPTH/2 - 2` stream positions from the cell being updated.
`REACH` is 19,454 at the default size. The processor checks this: a
violation sets the sticky `miss_err` flag. A cell whose three descriptors do
not end with the `last` bit sets `row_err`.

## The processing element (`fv_processor`)

```
 node stream ─► FIFO ─► prim_unit ─► FIFO ─┐ (write address)
                      (p, c)               ▼
                                  ┌──────────────────┐ DOA  ┌──────────────┐
                    port A  ─────►│   Memory unit    ├─────►│ Current node │──┐
            (node address A)      │ DEPTH x 448 bit  │      │   register   │  │
                                  │ circular buffer  │ DOB  └──────────────┘  ▼
 face stream ─► FIFO ─► Local ───►│     port B       ├───┐              ┌────────────┐
                       address    └──────────────────┘   └─► Neighbour ─►│ arith_unit │─► FIFO ─► results
                       generator         geometry ─────────►  memory     └────────────┘
                                                             (64 entries)
```

### The window

The Memory unit holds `DEPTH` node records of 448 bits each:

- the four state words;
- the area;
- the pressure `p` and speed of sound `c`.

`prim_unit` computes `p` and `c` once per cell as the cell enters. Stream
position *k* always lives at address *k* mod `DEPTH`, so the buffer is
circular. The local address generator turns a neighbour index into an
address without a lookup table: it adds the index difference to the current
cell's address and wraps the result.

Three counters move through the stream:

| counter | meaning | rule |
|---|---|---|
| `loaded` | next cell to be written | writes only while `loaded < ip + DEPTH - REACH` |
| `lp` | next cell whose neighbours are fetched | waits until `loaded > lp + REACH` (or the stream is complete) |
| `ip` | next cell sent to the arithmetic unit | waits for `lp > ip` and three neighbours ready |

Together these rules guarantee the following for a cell *i* being updated:

- every cell from *i* − `REACH` to *i* + `REACH` is on chip;
- no record still needed has been overwritten.

At start, the writer fills the buffer until just over half of it is valid
(the prefill). The first result appears after roughly `DEPTH/2` cycles.
From then on, the writer is paced by the issue stage, one cell per three
cycles. The loader runs up to three cells ahead of the issue stage. It
stores neighbour records and face geometry in the 64-entry neighbourhood
memory, a distributed-RAM FIFO with one write port and one read port.

### Sharing port A

Port A serves two purposes:

- reading the current cell into the current-node register;
- writing new cells.

The read has priority. In steady state port A is free in two of every three
cycles, so the writer keeps up. When a write has to wait, it waits one
cycle.

### Stall freedom

None of the pipelines stall. Each one is started only when its output
already has room:

- `prim_unit` is started only when its output FIFO has room;
- a neighbour fetch starts only when the neighbourhood memory has room;
- a cell is issued only when the result FIFO has room for its result
  (`OUT_FIFO` credits).

Back-pressure on the result stream therefore holds the issue stage, and
eventually the loader and the writer. It never stops a pipeline midway.

### Timing

With all streams supplied and results taken, one face enters the arithmetic
unit every cycle. One triangle is updated every three cycles. Every ghost
cell between two updated cells costs one extra cycle at the issue stage.

## The arithmetic unit (`arith_unit`)

For each face, with L the triangle being updated and R the neighbour:

1. Rotate both velocities into the face frame:
   `un = u*nx + v*ny` and `ut = -u*ny + v*nx`.
2. Form the Lax-Friedrichs flux
   `F = (F(U_L) + F(U_R))/2 - a*(U_R - U_L)/2`, where:
   - `a = |un_L + un_R|/2 + (c_L + c_R)/2`;
   - `F(U) = [rho*un, rho*un^2 + p, rho*un*ut, (E+p)*un]`.
3. Rotate the momentum components back.
4. Scale by the face length.

After the third face the unit forms `U - dt/area * (F0 + F1 + F2)`.

The flux is a levelled data-flow graph: 12 register levels, each one
operator deep. Values that skip levels travel in delay registers. Four more
levels accumulate and update. The latency is 16 cycles from the third face
of a triangle to its result. The unit accepts a face every cycle, and gaps
are allowed.

The published description writes the dissipation term of the flux with a
minus sign in the compact equation and with a plus sign in the expanded
component equations. This design uses the minus sign, which is the stable
upwind form.

## Floating point

`fp_pkg` implements double-precision add, subtract, multiply, divide, square
root, halving and absolute value as synthesizable functions:

- rounding is to nearest, ties to even;
- subnormals are flushed to zero;
- overflow gives infinity;
- NaNs are not produced.

`fp_unit` wraps one operator in a pipeline of `LAT` registers.

The original design uses vendor floating-point cores with deep pipelines
and reaches 390 MHz. Here every operator takes one register stage. The
cycle counts are exact, but a real implementation would need to pipeline
the operators (and lengthen the delay lines) to reach such a clock. The
arithmetic is bit-exact against the IEEE results of a simulator's `real`
type for normal numbers.

## Top level (`fv_top`)

`NUM_PE = 3` independent processors share the clock, reset, `start` and
`dt`. Each processor has its own three streams, its own `num_nodes` and its
own status flags, all as arrays indexed by processor. In a board, each
processor would be fed by its own off-chip memory channel.

The original design also mentions chaining processors, with one processor's
results feeding the next. That can be done outside by connecting the
streams. This design builds the parallel form.

## Capacity

At the default `DEPTH = 38,912`, a mesh fits if its serial bandwidth is at
most 19,454. The mesh itself can be much larger than the buffer: stream
positions are 24 bits, so up to 16.7 million entries. The 2D step meshes
used to evaluate the original design have bandwidths of 122 to 1,809 for
7,063 to 930,071 triangles after renumbering, and all of them fit.

Tetrahedral meshes do not run. They need four faces per cell and a 3D flux,
which this arithmetic unit does not have.

Each Memory unit is 17.4 Mbit, so the three processors need 52 Mbit of
block RAM.

## What is not here

- **Host-side preparation.** Renumbering the mesh for small serial
  bandwidth, cutting meshes of too large a bandwidth into overlapping parts,
  and setting the `ex` flags are done on the host.
- **Off-chip memory and its controller.** The DRAM and controller are
  outside; their streams are the ports.
- **Clustered arithmetic unit.** The original arithmetic unit is generated
  automatically from the equations, partitioned into clusters with local
  control, and joined by FIFOs for a higher clock. Here it is one
  hand-written pipeline that computes the same equations.
- **Single precision.** The single-precision variant is not built.

## Using and checking the RTL

Files in `rtl/`:

| file | contents |
|---|---|
| `fp_pkg.sv`, `fv_pkg.sv` | number format, operators, record types |
| `fp_unit.sv`, `delay_line.sv`, `sync_fifo.sv` | building blocks |
| `memory_unit.sv`, `neighborhood_mem.sv`, `local_addr_gen.sv` | the window |
| `prim_unit.sv`, `arith_unit.sv` | arithmetic |
| `fv_processor.sv`, `fv_top.sv` | processing element and top level |

Each `tb/tb_<module>.sv` is a self-checking testbench. It prints
`TB_RESULT checks=N failures=M`.

The reference model is `tb/fv_ref_pkg.sv`, which uses `real` arithmetic.
`tb/fv_mesh_pkg.sv` builds structured triangle meshes with a ghost ring,
numbered row by row, together with the expected result of one step.

What the system-level testbenches cover:

- `tb_fv_top` runs three processors on small buffers (`DEPTH = 256`):
  - random states with input gaps and heavy output back-pressure;
  - a uniform flow, which must stay unchanged, at the full rate;
  - a deliberately broken descriptor row, which must raise both error
    flags.

  It also counts each mechanism (prefill, deferred port-A write, window
  hold, wrap-around, ghost skip, descriptor wait, credit hold, result
  back-pressure, node starvation) and fails if one never occurs.
- `tb_fv_top_full` runs the top level at its default size. Each processor
  gets a 51,200-triangle mesh, which wraps the 38,912-entry buffer, and
  every result is checked.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fp_pkg.sv rtl/fv_pkg.sv tb/fv_ref_pkg.sv tb/fv_mesh_pkg.sv \
    tb/tb_fv_top.sv --top-module tb_fv_top -o sim && ./obj_dir/sim
```

Add `-Wno-fatal` to keep lint warnings from stopping the build.

The results agree with the `real`-arithmetic reference to a relative
1e-9. The three-cycle rate and the 16-cycle latency are checked by cycle
count.

What has not been checked:

- timing closure or resource use on an FPGA;
- behaviour with non-normal floating-point inputs.
