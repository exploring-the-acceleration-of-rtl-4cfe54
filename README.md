# A streaming FPGA accelerator for Piacsek–Williams advection

The Piacsek–Williams (PW) advection scheme is one of the most expensive steps of
a cloud-resolving atmospheric model. At every point of a three-dimensional grid
it combines the three wind components u, v and w with those of the neighbouring
points. The results are three *source terms*, su, sv and sw, which say how
quickly each wind component changes because the flow carries it along.

Every point needs about fifty double precision operations and reads only from a
3×3×3 neighbourhood. Points do not depend on each other. This makes the scheme
a good fit for a deep floating point pipeline that takes in one grid point every
clock cycle.

This repository holds synthesizable SystemVerilog for such an accelerator. It
targets a PCIe card with a large FPGA and two separate 8 GB DDR4 banks. The
host works in three steps:

1. It copies the fields to the card over four DMA channels.
2. It starts twelve identical kernels, six per memory bank, by writing their
   control registers.
3. It copies the source terms back when the kernels raise their interrupts.

The RTL covers everything on the FPGA between the PCIe interface block and the
two DDR4 memory controllers. Those two vendor blocks, and the clock generator,
remain outside as ports of the top module, `monc_pw_system`.

## 1. The arithmetic

The grid is staggered: u, v and w live on the faces of the cells. For u, the
source term at level k, row j, column i is

```
su = tcx * ( u(i-1)*(u + u(i-1))           - u(i+1)*(u + u(i+1)) )
   + tcy * ( u(j-1)*(v(j-1) + v(j-1,i+1))  - u(j+1)*(v + v(i+1)) )
   + tzc1(k) * u(k-1)*(w(k-1) + w(k-1,i+1))
   - tzc2(k) * u(k+1)*(w + w(i+1))
```

- An omitted index means "at (k, j, i)".
- tcx and tcy are scalars.
- tzc1/tzc2 (for u and v) and tzd1/tzd2 (for w) are per-level columns of
  coefficients.

The v and w terms have the same shape, with the roles of the directions
exchanged. They are written here by that symmetry, and w uses tzd1/tzd2. The
formulas for sv and sw are this design's reading, not printed ones.

**Boundary levels:**

- **k = 0:** all three results are zero. This level is not computed by the scheme.
- **Top level (k = size_z-1):** the k+1 terms are dropped and sw is zero.

`pw_field_pipe` computes one field's term as six layers of floating point units.
Every layer accepts a new operand set every cycle:

| layer | operation | latency |
|---|---|---|
| 1 | six face sums, and `tz1*u(k-1)`, `tz2*u(k+1)` | max(LAT_ADD, LAT_MUL) = 14 |
| 2 | six face products | 14 |
| 3 | three differences | 8 |
| 4 | × tcx, × tcy | 14 |
| 5 | x-term + y-term | 8 |
| 6 | + z-term | 8 |

The pipeline is therefore 66 cycles deep. `pw_datapath` runs three of these
side by side (su, sv, sw) and carries a tag and the boundary flags alongside.
Per grid point it uses 33 adders and 30 multipliers.

`fp64_mul` and `fp64_add` are IEEE-754 binary64 units:

- They round to nearest even.
- Subnormal inputs and outputs are treated as zero.
- Every NaN result is the quiet NaN 0x7FF8000000000000.
- Each is a combinational core followed by a LATENCY-deep register chain. This
  leaves a synthesis tool free to retime it into a real pipeline. The
  multiplier's latency of 14 is the value quoted for the vendor core this design
  stands in for. The adder's latency of 8 is an assumption.

## 2. Data in memory

Each field is one array in DDR with Z fastest, then Y, then X, and a one-point
halo on every side in X and Y. The word of point (i, j, k) lives at

```
base + ((i*(size_y+2) + j) * size_z + k) * 8,   i in 0..size_x+1, j in 0..size_y+1
```

The source terms use the same layout. Only the interior (i in 1..size_x,
j in 1..size_y, every k) is written; the halo is left untouched. The four
coefficient columns are plain arrays of size_z words.

A kernel can reach only the memory bank it is attached to. The host therefore
splits a large grid in X between the kernels of both banks, with a halo plane at
each cut.

## 3. Inside one kernel (`pw_advection`)

The problem is bandwidth into the pipeline. The datapath needs 81 operands per
cycle (27 per field), but DDR delivers one 64-bit word per beat. A block RAM
gives at most two accesses per cycle.

The kernel solves this with local buffers and reuse on three levels.

**Y batches.** Columns are handled in batches of up to `Y_BATCH_SIZE` (64)
neighbours in Y. Within a batch, the kernel walks along X.

**Three X planes in a ring.** For the current X position i, the kernel holds:

- the planes i-1, i and i+1 of the batch,
- each including the halo columns j-1 and j+1,
- for u, v and w.

When it moves to i+1, only plane i+2 is new. It is loaded into the slot that
held i-1, and the slot roles are renamed. Nothing is copied between buffers.

**Three copies of every plane buffer.** Each slot is held in three identical
`pw_column_ram` instances, read at the same level in columns j-1, j and j+1.
That gives 3 planes × 3 copies × 3 fields = 27 RAMs. Together they deliver the
27 values of level k+1 each cycle.

The values of levels k and k-1 do not need to be read again. They sit in two
register windows that shift down each cycle as the kernel walks up the column.
In the steady state, each cycle reads one new level and completes one point.

**Schedule per X step.** The phases of one X step run one after another:

1. **Load** plane i+1 (i+2 after the first step): three fields × (batch + 2)
   columns × size_z words. It is issued as bursts of up to 256 beats, up to 8
   in flight, and never across a 4 KiB boundary.
2. **Compute** plane i: exactly batch × size_z cycles, one point per cycle. The
   top point of each column leaves the window while the next column starts, so
   the columns follow each other without bubbles.
3. **Drain** the 66-cycle pipeline into three result buffers.

   With 64 columns of 64 levels, steps 2 and 3 together take 4096 + 69 =
   4165 cycles, and the pipeline is full for 98% of them. The original kernel
   was reported at 4167 cycles and 97%.
4. **Store** su, sv and sw of the plane as bursts, with the same limits as the
   loads.

The coefficient columns are read once per run, before the first batch.

**Control.** The host sets addresses, coefficients and sizes in `pw_ctrl_regs`
and writes `ap_start`. When the last plane is stored, the kernel sets
`ap_done` and raises `interrupt` (if enabled).

**Limits.** size_z must be between 2 and `MAX_VERTICAL_SIZE` (64). size_x and
size_y can be anything from 1 up to 32-bit values.

### Control registers (byte offsets in a kernel's window)

| offset | register |
|---|---|
| 0x00 | AP_CTRL: bit 0 start (write 1), bit 1 done (cleared on read), bit 2 idle, bit 3 ready |
| 0x04 | GIE, global interrupt enable |
| 0x08 | IER: bit 0 done, bit 1 ready |
| 0x0C | ISR, the same bits; write 1 to toggle a bit clear |
| 0x10 .. 0x38 | byte addresses of u, v, w, su, sv, sw (64 bit, low word first) |
| 0x40 .. 0x58 | byte addresses of tzc1, tzc2, tzd1, tzd2 |
| 0x60, 0x68 | tcx, tcy (IEEE-754 binary64) |
| 0x70, 0x74, 0x78 | size_x, size_y, size_z |

Kernel n owns the 64 KiB window starting at `n << 16` on the direct slave port.
An access above the last window gets a DECERR response.

## 4. The board fabric (`monc_pw_system`)

```
              ds_axi ──► axil_clock_converter ──► axil_ctrl_interconnect ──► 12 × s_axi_ctrl
                          (PCIe clk → kernel clk)

 bank b (b = 0, 1):
   kernel 6b..6b+5 ─► axi_register_slice ─► axi_mem_interconnect(6) ─► axi_clock_converter ─┐
                                                                          (kernel → DDR clk) ├─► axi_mem_interconnect(2) ─► ddr_axi[b]
   dma_axi[2b], [2b+1] ─► axi_register_slice ─► axi_mem_interconnect(2) ─► axi_clock_converter ┘
                                                                          (PCIe → DDR clk)
```

**The two banks never meet.** Each has:

- its own kernel group,
- its own pair of DMA channels,
- its own junction in front of its memory controller.

Keeping them apart avoids congestion. Putting both controllers into one address
space was measured to be slightly slower.

**`axi_mem_interconnect`** is an N-to-1 AXI4 interconnect:

- Round-robin arbitration on AR and AW.
- The winning port number is appended to the low end of the AXI ID. Read data
  and write responses are sent back by those bits, so any number of bursts from
  different masters can be in flight.
- Write data follows the order of granted write addresses.

**`axi_register_slice`** registers all five channels through two-entry skid
buffers (`axi_skid`). It costs one cycle and no bandwidth.

**The clock converters** use one Gray-pointer asynchronous FIFO (`async_fifo`)
per channel.

**Clocks:**

- PCIe clock: 250 MHz.
- Kernel clock: 310 MHz, made from the 250 MHz reference by a PLL outside this
  RTL.
- DDR4 controller clocks: one per bank.

All four are treated as unrelated.

**Resets:**

- The kernel domain is reset by `reset_sync`. It asserts at once and releases
  16 cycles after the PCIe reset and the PLL lock are both good.
- Each DDR domain uses its controller's user reset, inverted.

## 5. Parameters

| parameter | default | meaning |
|---|---|---|
| `N_KERNELS` | 12 | kernels, split evenly over the two banks |
| `MAX_VERTICAL_SIZE` | 64 | largest size_z; sets the depth of the column buffers |
| `Y_BATCH_SIZE` | 64 | columns per Y batch |
| `MAX_BURST` | 256 | beats per AXI burst |
| `MAX_OUTSTANDING` | 8 | read bursts in flight per kernel |
| `LAT_MUL` / `LAT_ADD` | 14 / 8 | floating point unit latencies |
| `CTRL_ADDR_SHIFT` | 16 | log2 of a kernel's control window |

Shared types are in `monc_pkg`:

- AXI4 request and response structs (34-bit address, 64-bit data, 8-bit ID),
  and their AXI4-Lite counterparts.
- The `stencil_t` neighbourhood type.
- The register offsets.

## 6. Where this design departs from the original accelerator

The design reproduces an accelerator built with high-level synthesis, whose
published description gives the algorithmic structure but not the hardware.
The differences known are:

- **Operation count and pipeline depth.** The original inner loop had 53 double
  precision operations and a 72-stage pipeline. This datapath uses 63
  operations (33 add/sub, 30 mul) and 66 stages. The sv and sw formulas are
  reconstructed by symmetry, and the operation tree is this design's own.
- **Multiplier core.** The twelve-kernel build of the original used a smaller
  ("medium DSP") multiplier core to fit the device, with a latency that was not
  published. 14 cycles is kept.
- **Floating point details.** Flush-to-zero and the NaN encoding are this
  design's choices. A vendor core may differ in the last bit for subnormal
  results.
- **Plane ring.** The planes are renamed rather than copied.
- **Sequential phases.** Load, compute and store of a plane follow each other,
  as a plain (non-dataflow) HLS loop nest would run them. They do not overlap.
- **Halo columns.** The batch buffers also hold the halo columns, so they are
  (Y_BATCH_SIZE + 2) × MAX_VERTICAL_SIZE words deep.
- **Values chosen here.** The register map, memory layout, control address
  windows, kernel-to-bank split (first half to bank 0), interconnect
  arbitration, FIFO depths and reset hold time are all this design's own.
- **Blocks outside the RTL.** The PCIe block, the DDR4 controllers, the clock
  generator and a debug analyser of the original board design are not part of
  this RTL.

## 7. Problem sizes

All the grids the accelerator was evaluated on have 64 levels, which matches
`MAX_VERTICAL_SIZE`:

- 512 × 512 × 64 (16.7 M points), on one kernel.
- 1012 × 1024 × 64 (67 M points), on 1 to 12 kernels.
- A scaling series of 1 M, 4 M, 16 M, 67 M and 268 M points on twelve kernels.

At 268 M points, the three fields and three source terms take 6 × 8 B × 268 M ≈
12.9 GB. Split over both banks, that is about 6.4 GB per 8 GB bank, so all sizes
fit. Sizes are runtime registers, so nothing needs rebuilding for a different
grid.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

**Reference model.** `pw_ref_pkg` computes the expected source terms in
SystemVerilog `real` arithmetic, using the same operation order as the datapath.
Results are compared bit for bit.

**Memory model.** `axi_mem_model` is a behavioural DDR bank behind an AXI4
port. It has sparse storage, random stalls on every channel and unlimited read
bursts in flight.

| testbench | what it shows |
|---|---|
| `tb_fp64_mul`, `tb_fp64_add` | special cases and 2000 random operands against `real` arithmetic, latency |
| `tb_pw_datapath` | 400 random points with idle gaps, bit-exact su/sv/sw, 66-cycle latency, tags |
| `tb_pw_advection` | a small kernel (reduced buffers) on a 3×6×5 grid with two Y batches: every result word, untouched halo, exactly size_x·size_y·size_z compute cycles, several reads in flight, done bit and interrupt |
| `tb_pw_column_ram`, `tb_pw_ctrl_regs`, `tb_reset_sync` | read-first RAM timing, register semantics, reset timing |
| `tb_axi_register_slice`, `tb_axi_clock_converter`, `tb_axil_clock_converter` | random traffic on all five channels: order, integrity, buffer depth, full rate through the slice |
| `tb_axi_mem_interconnect`, `tb_axil_ctrl_interconnect` | several masters on one memory, ID restoration, pipelined reads; address decoding and DECERR |
| `tb_pw_workload` | one kernel with every default parameter (64 levels, 64-column batches, 256-beat bursts, 8 in flight) on a 2×130×64 slice of the 512×512×64 grid: about 50,000 result words, and each batch plane computed in one unbroken run of 64·64 cycles |
| `tb_monc_pw_system` | the whole design at its default parameters, end to end (below) |

**End-to-end test.** `tb_monc_pw_system` runs the unmodified top with twelve
kernels, 64-level buffers and 64-column batches. It plays the host with all four
clocks at unrelated rates:

1. It uploads twelve different grids over the four DMA channels at once.
2. It starts all kernels. While they start and run, it reads one input grid
   back over DMA. Then it waits for the twelve interrupts.
3. It reads everything back by DMA and compares about 25,000 words.

The grids include:

- one 66 columns wide in Y (two batches),
- one with the full 64 levels,
- two with only 2 levels.

The test counts each of these mechanisms and fails if any never happened:

- bursts split at 4 KiB,
- kernels contending in a group interconnect,
- DMA channels contending in a crossbar,
- kernel and DMA traffic active in a bank interconnect at once,
- register slices absorbing back-pressure,
- several reads in flight per bank,
- a refused control access.

It takes a few seconds of simulation.

**Running a testbench** with Verilator 5, from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_monc_pw_system \
          rtl/monc_pkg.sv tb/pw_ref_pkg.sv tb/tb_monc_pw_system.sv
./obj_dir/Vtb_monc_pw_system
```

Other testbenches build the same way. Name the testbench as the top module and
file, and list `tb/pw_ref_pkg.sv` where the testbench imports it. Verilator
finds the other modules in `rtl/` and `tb/` by file name.
