# NERO: a near-HBM stencil accelerator in SystemVerilog

Weather models such as COSMO spend much of their time in *compound stencils*.
These are kernels that update every point of a 3D grid from a neighbourhood of
points, through several dependent steps. They do little arithmetic per byte
moved, so on a CPU they are limited by memory bandwidth. NERO moves these kernels
onto an FPGA that has high-bandwidth memory (HBM2) in its package.

The accelerator is an array of identical processing elements (PEs). Each PE owns
one 256-bit HBM pseudo-channel. The bandwidth each PE sees therefore stays the
same as PEs are added, and the array scales with the number of channels. The host
is an IBM POWER9 connected over the cache-coherent CAPI2 link. It writes its grid
into the FPGA's HBM, starts a job through memory-mapped registers, and collects
the results.

This repository holds the RTL of the accelerator functional unit (AFU): the part
of the FPGA design between the host link and the HBM ports. It also holds the
testbenches that check it. The PSL/SNAP host-link logic, the HBM controllers, and
the HBM itself are vendor or framework IP. They are not included, and their
signals are top-level ports of `nero_afu`.

Two kernels are supported. Each build uses one of them, chosen by the `KERNEL`
parameter:

* **vadvc** (vertical advection). For every vertical column it solves a
  tridiagonal linear system along z with the Thomas algorithm. Each column is a
  sequential chain, so the parallelism comes from the many columns.
* **hdiff** (horizontal diffusion). On every z plane it applies a 2D stencil
  made of a Laplacian followed by fluxes. Each result depends on a 5x5 diamond of
  source points.

The default parameters give the main configuration: vadvc with 14 PEs, windows of
64 x 2 x 64 points, and float32 arithmetic. The hdiff configuration uses 16 PEs
and windows of 16 x 64 x 8 points.

## Windows: how a grid is cut up

The grid is far too large for on-chip memory. The host therefore cuts it into
**windows** (tiles) of `TX x TY x TZ` points, and a PE processes one window at a
time out of its block RAM.

Window size is the main design parameter, because it trades throughput against
on-chip memory:

* vadvc: `64 x 2 x 64`, i.e. 128 whole columns of depth 64. The kernel works
  within a column, so windows do not overlap.
* hdiff: `16 x 64 x 8`. The stencil reaches two points in each horizontal
  direction, so only the interior `(TX-4) x (TY-4)` points of each plane are
  produced. The host makes neighbouring windows overlap by 4 points.

Every window is sent as a stream of 512-bit beats, each holding 16 float32 words.
Word `k` of a beat sits in bits `32k+31 : 32k`.

A kernel may need several input arrays ("fields"):

* vadvc needs four fields, `a`, `b`, `c` and `d`.
* hdiff needs one field, `src`.

When there are several fields, the host interleaves them beat by beat: beat `i`
of a window belongs to field `i mod F`. Inside a field, the words are in this
order:

| kernel | word index of point (x, y, z) |
|---|---|
| vadvc  | `(y*TX + x)*TZ + z` (z fastest: one column is contiguous) |
| hdiff  | `(z*TY + y)*TX + x` (x fastest: one plane is contiguous) |

A window of one field is `TX*TY*TZ/16` beats. For vadvc, one window is 2048 input
beats (four fields) and 512 result beats. For hdiff it is 512 input beats and 360
result beats.

## Inside a processing element

```
          HBM pseudo-channel (256-bit AXI3)
                     |
             hbm_port_master          bursts of 16 beats, reads and writes
                     |
             stream_converter         256 <-> 512 bit
                     |
 host_in ---> bypass_switch ---> host_out
                |         ^
                v         |
          field_splitter  |           one 512-bit stream per field
                |         |
        window_buffer x F |           16 banks, two window slots each
                |         |
     vadvc_engine / hdiff_engine      one point per cycle
                |         |
            degridder ----+           32-bit words -> 512-bit beats
```

**HBM port master.** This block is an AXI3 master for the PE's own
pseudo-channel. It issues every read and write address of a transfer ahead of
the data, in incrementing bursts of up to 16 beats. The beats of the read stream
pass through in order. The write data is framed into bursts with WLAST.

**Stream converter.** The HBM port is 256 bits wide and the rest of the PE is
512. The converter pairs 256-bit beats into 512-bit beats on the way in (first
beat low), and splits 512-bit beats on the way out.

**Bypass switch.** This is a four-way router controlled by the PE's phase (see
next section). It decides where the host stream, the HBM stream and the result
stream go.

**Field splitter.** It deals the interleaved beats out to one stream per field.

**Window buffers.** There is one per field. Each is split into 16 banks, one per
lane of a beat, so a whole beat is written in one cycle while the engine reads
single words by address. Each buffer has two window slots used as a ping-pong
pair: the next window is written while the engine computes on the current one.
The engine releases a slot when it has finished the window.

**vadvc engine.** It works one column at a time.

* The forward sweep runs down the column, one point per cycle:

  ```
  den = b - a*c'
  c'  = c/den
  d'  = (d - a*d')/den
  ```

  It stores `c'` and `d'` in two intermediate memories.
* The backward sweep reads those memories in reverse (last in, first out) and
  forms `x = d' - c'*x_next` into an output buffer.
* The column is then streamed out in ascending z.

A column takes `3*TZ+1` cycles, so a 64 x 2 x 64 window takes 24 705 cycles.

**hdiff engine.** It reads its window in storage order, one word per cycle, into
a shift register of `4*TX+5` words that acts as a line buffer. When the centre of
the 13-point diamond reaches an interior point, the stencil is evaluated in that
cycle:

```
lap(p)  = 4*src(p) - src(x+1,y) - src(x-1,y) - src(x,y+1) - src(x,y-1)
flux_C  = lap(x,y+1) - lap(x,y)     flux_Cm = lap(x,y) - lap(x,y-1)
flux_R  = lap(x+1,y) - lap(x,y)     flux_Rm = lap(x,y) - lap(x-1,y)
dest    = src - c1 * ((flux_C - flux_Cm) + (flux_R - flux_Rm))
```

A window takes `TX*TY*TZ + 3` cycles, and every cycle that holds an interior
point produces one result. `c1` is a float32 coefficient that the host writes to
a register.

**Degridder.** It packs result words 16 to a beat. It pads the last beat of a
window with zeros.

Every stage-to-stage connection uses a valid/ready handshake. Back-pressure from
the host or from HBM travels back through the whole chain, and nothing is dropped.

## Running a job

### Phases

In **HBM mode**, a PE runs a job in three phases. The bypass switch is set
differently in each:

| phase | host_in goes to | HBM read goes to | results go to |
|---|---|---|---|
| LOAD    | HBM (at `IN_BASE`)   | -                  | -                    |
| COMPUTE | -                    | the pipeline       | HBM (at `OUT_BASE`)  |
| UNLOAD  | -                    | host_out           | -                    |
| BYPASS  | the pipeline         | -                  | host_out             |

The **BYPASS** row is the other mode. The pipeline is fed straight from the host
and HBM is not used. This suits grids small enough to be streamed through
on-chip memory.

Within COMPUTE, HBM reads, the splitter, the window buffers, the engine and HBM
writes all run at the same time. Because the window buffers are double-buffered,
loading window `i+1` overlaps computing window `i`.

### The AFU around the PEs

The AFU surrounds the PEs with three things:

* **`mmio_regs`**: an AXI4-Lite register block.
* **`cacheline_buffer`**: a 64-entry FIFO of 1024-bit POWER9 cache lines. It
  absorbs bursts from the host link.
* **Host stream dispatch.** The host's input stream is dealt to the PEs one after
  another. PE 0 gets the first `NUM_WIN` windows' worth of beats, then PE 1, and
  so on. Results come back in the same order. `host_out_last` marks the final
  beat of the job.

### HBM addressing

PE `p` addresses only its own pseudo-channel. Its byte addresses are
`p * 2^28 + IN_BASE` and `p * 2^28 + OUT_BASE`, i.e. 256 MiB per channel in an
8 GiB, 32-channel device. The bases must be multiples of 512 bytes, so that no
burst crosses a 4 KiB boundary.

### Registers (32 bit, byte addresses)

| addr | name | meaning |
|---|---|---|
| 0x00 | CTRL     | bit 0 START (write 1), bit 1 BYPASS, bit 2 IRQ_EN |
| 0x04 | STATUS   | bit 0 BUSY, bit 1 DONE (sticky, write 1 to clear) |
| 0x08 | IN_BASE  | input offset inside each PE's region |
| 0x0C | OUT_BASE | result offset inside each PE's region |
| 0x10 | NUM_WIN  | windows per PE in the job (16 bits) |
| 0x14 | C1       | hdiff coefficient, float32 |
| 0x18 | CYCLES   | clock cycles of the last job |
| 0x1C | INFO     | bits 7:0 number of PEs, bit 8 kernel (0 vadvc, 1 hdiff) |

The interrupt `irq` is high while both DONE and IRQ_EN are set. A host driver
sets the base registers, NUM_WIN and C1. It then writes CTRL, streams the input,
and reads back `NUM_PE * NUM_WIN` windows of results. Finally it waits for the
interrupt and clears DONE. Jobs can be queued behind interrupts in this way.

## Arithmetic

`fp32_pkg` provides combinational float32 add, subtract, multiply and divide.
They round to nearest-even as IEEE-754 does, with two simplifications:

* Subnormal numbers are flushed to zero.
* NaN is never produced.

The divider in the vadvc forward sweep is a single-cycle integer division of the
mantissas. It is the longest path in the design. A build meant for a real clock
would pipeline the engines; the streams are already built to tolerate that.

## How closely this follows the paper

These parts follow the published design:

* the PE structure: one HBM pseudo-channel per PE, stream converter, field
  splitter, gridding into partitioned on-chip memory, kernel engine and a single
  512-bit output stream;
* the HBM bypass switch;
* the 64-line cache-line buffer;
* AXI-Lite control with completion notification;
* the two-sweep vadvc engine with its intermediate buffer;
* the Laplacian/flux hdiff stencil;
* the PE counts and window sizes.

These are this design's own choices, because the published description does not
settle them:

* the stream formats and word orders;
* the register map;
* the phase sequencing;
* the sequential dispatch of host data to PEs;
* the HBM address map;
* the one-point-per-cycle schedules of the engines;
* the handling of subnormals and NaN.

Where it departs or stops short:

* **vadvc coefficients.** The COSMO vertical advection builds its tridiagonal
  coefficients from the wind field and several stage arrays. That step is not
  published. Here the engine takes `a`, `b`, `c`, `d` directly as four fields,
  so the host (or a front-end stage) must form them.
* **hdiff pseudo-code.** The published pseudo-code has two apparent misprints:
  * the row flux `flux_Rm` repeats the column Laplacian, which would leave the
    left-neighbour Laplacian unused;
  * the bracketing of the final line applies `c1` to only one flux difference.

  The engine uses the symmetric form shown above. `laplaceCalculate` is not
  defined there either; the standard 5-point Laplacian is used.
* **Half precision.** The published design also reports 16-bit results: vadvc
  with 32 x 16 x 64 windows and hdiff with 64 x 8 x 64. Only float32 is built.
* **Host link and throughput.** The dispatcher feeds one PE at a time from one
  host stream, so in bypass mode the PEs in effect take turns. HBM mode is the
  parallel path: the loads are short, and then all PEs compute at once.

## Sizes that fit

At the defaults, a PE holds one vadvc window per slot: four fields, each of
8192 words x 2 slots x 32 bit = 512 Kbit.

A 256 x 256 x 64 grid divides into 512 vadvc windows. That is 37 windows per PE
across 14 PEs, with the last 6 slots padded. Per PE this is about 4.6 MiB of
input and 1.2 MiB of results in its 256 MiB region.

The hdiff configuration needs the parameters
`KERNEL=K_HDIFF, NUM_PE=16, TX=16, TY=64, TZ=8`.

## Files

| file | contents |
|---|---|
| `rtl/nero_pkg.sv` | widths, kernel and phase enums, AXI3 channel structs |
| `rtl/fp32_pkg.sv` | float32 operators |
| `rtl/nero_afu.sv` | top level: registers, cache-line buffer, PE array, dispatch |
| `rtl/nero_pe.sv` | one PE and its phase control |
| `rtl/mmio_regs.sv` | AXI4-Lite registers and interrupt |
| `rtl/cacheline_buffer.sv` | 64-line host FIFO |
| `rtl/hbm_port_master.sv` | AXI3 burst master |
| `rtl/stream_converter.sv` | 256/512-bit conversion |
| `rtl/bypass_switch.sv` | phase-controlled stream router |
| `rtl/field_splitter.sv` | per-field demultiplexer |
| `rtl/window_buffer.sv` | banked, double-buffered window store |
| `rtl/vadvc_engine.sv` | Thomas-algorithm engine |
| `rtl/hdiff_engine.sv` | Laplacian/flux engine |
| `rtl/degridder.sv` | word-to-beat packer |
| `tb/hbm_model.sv` | behavioural HBM pseudo-channel (latency, random stalls) |
| `tb/afu_driver.sv` | host model: registers, streams, reference kernels, HBM models |
| `tb/tb_fp_pkg.sv` | float32 <-> real helpers for the references |
| `tb/tb_*.sv` | one self-checking testbench per block, plus end-to-end tests |

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/nero_pkg.sv rtl/fp32_pkg.sv tb/tb_fp_pkg.sv tb/tb_nero_afu.sv \
    --top-module tb_nero_afu -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_nero_afu` with any other testbench name.

The block testbenches compare against references computed in double precision
inside the testbench. Where the engines' cycle counts are stated above, the
testbenches check them.

The end-to-end tests are:

* `tb_nero_pe`: a one-PE AFU for each kernel (vadvc 4x2x16, hdiff 16x8x2). It
  runs 4 windows in HBM mode, then 4 in bypass mode. It checks every result and
  that all four phases and double buffering occurred.
* `tb_nero_afu`: a 3-PE vadvc AFU and a 2-PE hdiff AFU side by side, each doing
  both modes. It applies random host and HBM back-pressure and long host stalls.
  It counts each mechanism and fails if one never happens:
  * HBM and bypass jobs;
  * interrupts;
  * HBM bursts;
  * every phase;
  * double-buffered windows;
  * a full cache-line buffer;
  * input and output stalls;
  * engine stalls.
* `tb_nero_afu_full`: the top at its default parameters (vadvc, 14 PEs,
  64x2x64 windows). It runs one window per PE in HBM mode and then in bypass
  mode, and checks all 14 x 8192 results of each job. It also checks that all 14
  PEs compute at the same time.

  The bypass job takes about 378 000 cycles. Most of that is the PEs taking
  turns on the single host stream. In HBM mode the 14 PEs compute their windows
  in parallel, about 25 000 cycles each.

Results are compared against the references with a relative tolerance of 1e-5
in the engine testbenches and 1e-4 in the end-to-end tests, since float32
rounding accumulates along a 64-point column.
