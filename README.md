# A dataflow FPGA kernel for Piacsek-Williams advection

Advection in an atmospheric model such as MONC is a 3D stencil. Each grid cell's
source terms SU, SV, SW depend on the wind fields U, V, W at the cell and its
neighbours. There are about 60 double precision operations per cell and every
input value is touched many times. On an FPGA the arithmetic is easy to
pipeline at one cell per clock. What limits the speed is moving the data: from
the host to card memory, from card memory into the kernel, and back.

This RTL is an advection accelerator built around that observation:

* **A pipeline of pipelines.** Each kernel is four concurrent stages joined by
  short FIFOs: read, prepare stencil, compute, write. Loads and stores overlap
  with computation, instead of alternating with it slice by slice.
* **Stream a whole block through.** The kernel keeps two y-z slices on chip and
  streams a complete block of `nx` slices through the pipeline in one pass, so
  the pipeline never drains between slices.
* **Wide memory access.** Every field has its own 256-bit memory port. Each
  memory word holds four doubles and is fanned out into four parallel streams,
  so the memory side runs up to four times faster than the one-cell-per-clock
  core.
* **Many kernels.** Eight such kernels sit side by side and work on independent
  chunks of the domain. Each has a small profiler that times its code blocks
  against a hardware timer.

The design follows the structure of an HLS kernel described in the literature.
This is an RTL rendering of it. The paper describes most blocks only by what
they do, so the insides here are this design's own. Where the design departs
from the described one, or had to guess, it is said below and in each file's
opening comment.

## The computation

The domain is stored as a sequence of x slices. Each slice is `NY` × `NZ` doubles
(64 × 64 by default). Slices are contiguous in memory, z fastest, then y:

```
address(x, y, z) = base + x*slice_stride + (y*NZ + z)*8
```

A kernel gets a block of `nx` consecutive slices. It produces results for the
inner slices x = 1 … nx−2, so a decomposition into blocks overlaps by two
slices. Each output slice is written in full. Cells on the y boundary (y = 0,
y = NY−1) and at z = 0 are halo cells and receive 0. At the top level
(z = NZ−1) the upper vertical flux is absent.

All three results share one shape:

```
s = ( tcx*(Pa*(a1+a2) - Pb*(a3+a4)) + tcy*(Qa*(b1+b2) - Qb*(b3+b4)) )
    + ( (c1*Ra)*(e1+e2) - (c2*Rb)*(e3+e4) )
```

* The first term is the x flux difference, the second the y flux difference and
  the third the z flux difference.
* `tcx` and `tcy` are horizontal grid constants.
* `c1` and `c2` come from per-level tables: `tzc1`/`tzc2` for SU and SV, and
  `tzd1`/`tzd2` for SW.

The operand choice follows MONC's `pw_advection`, which the paper names but does
not print. It is listed in full at the top of `rtl/compute_results.sv`.

There are three differences at the top level:
* SU and SV drop the `c2` term.
* SW is zero.
* Invalid cells give zero for all three.

Counting every add, subtract and multiply gives 63 operations per cell (33
add/sub, 30 mul). The paper states 53 (21 add/sub, 32 mul). The exact operation
count of the original could not be reproduced. The results agree with a
real-arithmetic evaluation of the formula above, which is what the testbenches
check.

## Kernel structure (`pw_advection`)

```
           3 x AXI4 read, 256 bit                      3 x AXI4 write, 256 bit
                 |                                              ^
           +-----------+  4 streams  +-----------------+  1  +-----------------+  4 streams  +---------------+
 U,V,W --> | read      | ==per field=> | prepare       | --> | compute         | ==per field=> | write         | --> SU,SV,SW
           | _fields   |  (depth 16) | _stencil        |     | _results        |  (depth 16) | _results      |
           +-----------+             +-----------------+     +-----------------+             +---------------+
                                       3 slice buffers        21 fp64 units per field
                                       + 9 windows            6 levels, 1 cell/clock
```

Every arrow is a `stream_fifo` of depth 16 with a valid/ready handshake. That is
12 FIFOs of doubles (64 bits) into stage 2, 3 FIFOs of stencil structs between
stages 2 and 3, and 12 FIFOs of doubles out of stage 3. The stages know nothing
of each other's timing. Any stage can stall, for example when memory withholds
data or refuses writes. The FIFOs absorb short stalls, and longer ones propagate
back as back-pressure.

### Stage 1: `read_fields`

For each field and each slice the stage issues AXI4 bursts covering the slice.
The slice is contiguous, so these are 4 bursts of 256 beats at 64 × 64. Requests
go out as fast as the port accepts them, ahead of the data, so the memory's
request latency is paid per burst rather than per value.

Each returning 256-bit beat is split into four doubles, lane l taking bits
64l+63:64l. The four values go into the field's four streams in the same clock.
A beat is accepted only when all four streams have room.

The three fields use separate ports, so one clock can deliver 12 doubles. The
next stage consumes 3 per clock, so the reader spends most of its time waiting
on full FIFOs rather than on memory. That is the slack that lets eight kernels
share the memory.

### Stage 2: `prepare_stencil`

This stage builds, for every cell, the 3 × 3 × 3 neighbourhood in each field. It
is the subtle part of the design.

**Slice buffers.** Values of the newest slice (call it i+1) arrive in z-fastest
order, one per field per step, taken round-robin from the four streams. Slices i
and i−1 are held in three on-chip buffers per field, used in rotation. While
slice i+1 arrives at position q, it is written over the buffer that held slice
i−2, also at position q. The other two buffers are read at q. The
"shift the slices down by one in x" of the original kernel therefore costs
nothing: the roles of the buffers rotate at each slice boundary and no data is
copied.

**Windows.** The three values at position q (x = i−1, i, i+1) each feed a
`stencil_window`. A window is a pair of NZ-deep line buffers plus six registers.
It turns a z-fastest stream into a 3 × 3 (y, z) neighbourhood of the element
NZ+1 places behind its newest input. Nine windows (3 fields × 3 x-positions)
together give the full 3 × 3 × 3 cube of the cell whose x index is i.

**Schedule.** Steps are counted from the first input of the block. There are
nx·NY·NZ input steps followed by NZ+2 flush steps. Let S = NY·NZ. The first
valid centre (x = 1) appears at step 2S + NZ + 2. From then on the stage emits
one stencil struct per field per step, (nx−2)·S in total. Each struct carries
the cube, the cell's z index, a *valid* flag (not a halo cell) and a *top*
flag (z = NZ−1).

A step happens only when every stream it needs holds a value and all three
output FIFOs have room. The stage therefore runs at one cell per clock unless a
neighbour stalls it.

### Stage 3: `compute_results`

The formula is laid out in space: 21 `fp64_unit` instances per field, in six
register levels:
1. pair sums;
2. products;
3. differences and z products;
4. scaling and the z difference;
5. x + y;
6. the final sum.

A cell enters every clock and leaves six clocks later. The whole pipeline holds
while its outputs cannot be written. Halo cells are forced to zero at the
output. Results are written round-robin into four streams per field, matching
the writer's 256-bit words.

`fp64_unit` is a one-cycle IEEE-754 binary64 adder, subtractor and multiplier:
* round to nearest even;
* infinities and NaN handled, with a canonical quiet NaN;
* subnormal inputs and outputs flushed to zero.

On the real part the floating point cores would be vendor IP, pipelined over
many stages to reach around 300 MHz. This unit is written for clarity and
correctness, not for that clock rate.

### Stage 4: `write_results`

The stage takes the heads of a field's four result streams as one 256-bit beat.
For each output slice it issues write requests at base + x·stride. A data beat
goes out only once its burst's request has been accepted. The stage finishes
only when every burst has its write response, since only then is the block
safely in memory.

## Profiling (`profiler`)

Each kernel carries a profiler. This matters because the point of the design is
to find out where time goes. The kernel sends 32-bit commands on a stream:
* INIT clears the totals.
* START n and END n bracket one execution of code block n.
* REPORT returns all totals.

The word is `{op[1:0], 22'b0, block[7:0]}`.

On START or END the profiler does four things:
1. It pulses `capture` to a free-running 64-bit timer in capture mode.
2. It reads the captured value back over AXI4-Lite: the low word at `CAP_LO`
   (0x04), then the high word at `CAP_HI` (0x14).
3. On START it keeps the value as the start time.
4. On END it adds end − start to the block's total.

Commands arriving during a read wait in the stream.

The kernel times four blocks:

| Block | What it times |
|---|---|
| 0 | the whole run |
| 1 | load: stage 1 |
| 2 | prepare stencil and compute: stages 2 and 3 |
| 3 | write: stage 4 |

An END is sent when its stage reports done. After the whole-run END the kernel
sends REPORT and stores the four totals. Only then does it raise `done` and
`interrupt`.

A START or END is stamped a few cycles after its event, because the kernel
queues events and sends them one per clock. The timer itself (a vendor AXI
timer) is outside the RTL. So is the AXI4-to-AXI4-Lite converter that
would sit between them; the profiler speaks AXI4-Lite directly.

## The accelerator (`pw_advection_system`)

The top instantiates `NUM_KERNELS` (8) copies of the kernel-plus-profiler
pair. Everything outside those pairs is brought out as ports, indexed by
kernel:
* the kernel control ports and interrupts;
* the six AXI4 memory ports per kernel, which would go to a crossbar and the
  card's DDR4 controllers;
* the timer capture and read ports.

The host side is software on the real system and is not RTL:
* **PCIe DMA.** Moves chunks of the domain to and from the card.
* **Chunk scheduler.** Transfers the domain in chunks with non-blocking DMA,
  starts an idle kernel as soon as its chunk has arrived, and queues the chunk if
  all kernels are busy. When a kernel finishes it copies the results back and
  returns the kernel to the pool.

The end-to-end testbenches model both.

### Programming a kernel

A kernel's registers are 64-bit words on a simple write/read port (`ctrl_we`,
`ctrl_addr`, `ctrl_wdata`, `ctrl_rdata`). This port stands in for the AXI4-Lite
slave an HLS tool would generate.

| Address | Register |
|---|---|
| 0x00 | write 1: start. Read: bit 0 busy, bit 1 done |
| 0x08 | `nx`, the number of slices in the block (16 bits) |
| 0x10, 0x18, 0x20 | byte base of U, V, W |
| 0x28, 0x30, 0x38 | byte base of SU, SV, SW |
| 0x40 | slice stride in bytes (NY·NZ·8 for packed slices) |
| 0x48, 0x50 | `tcx`, `tcy` (IEEE doubles) |
| 0x80 + 8n | profiled cycles of code block n, valid after done |
| 0x8000 \| sel<<13 \| k<<3 | level-k entry of table sel: 0 tzc1, 1 tzc2, 2 tzd1, 3 tzd2 |

Bases and the stride must be 32-byte aligned, and NY·NZ must be a multiple of 4.
The block needs nx ≥ 3. The coefficients persist across runs.

To run a block:
1. Write the addresses and `nx`.
2. Write 1 to 0x00.
3. Wait for `interrupt`.

## Timing

All figures below are from simulation with an ideal memory (25-cycle request
latency).

* **Steady state.** One cell per clock per kernel. This matches the figure
  reported for the HLS kernel this design follows: 53.88 ms of stencil and
  compute time for 16.7 million cells at 310 MHz is 1.00 cell per clock.
  Stage 2 is the pacing stage and its stalls are the only ones that cost
  throughput.
* **One block.** About nx·NY·NZ + NZ + pipeline latencies. The memory ports
  need only one beat in four to keep up.
* **Read side.** 1536 beats in 1562 clocks without stalls.
* **Write side.** 1024 beats in 1033 clocks.
* **Eight kernels at full size.** Sixteen chunks of 18 slices (two per kernel,
  about 1.2 million cells) took 161 868 clocks with 5 % memory stalls. The
  ideal is 2 × 18 × 4096 = 147 456 clocks per kernel; the rest is register
  programming and staggered chunk arrivals.
* **Kernel with random memory stalls.** An 8 × 8 × 5 block ran in 400 clocks
  against 398 with no stalls: the FIFOs and the read side's fourfold bandwidth
  absorb the stalls.

## Departures from the described design, and guesses

* **Formula.** The formula is MONC's as understood here. It has 63 rather than
  53 operations per cell (see above).
* **Floating point.** Single-cycle units instead of deep vendor cores, so no
  clock rate is claimed. Subnormals flush to zero.
* **Interfaces.** The memory interface is reduced to the AR/R and AW/W/B fields
  used: address, length, data and last. There are no IDs, sizes, strobes or
  error responses.
* **Control port.** A plain register port replaces the generated AXI4-Lite
  control bus. The register map is this design's own.
* **Boundaries and memory layout.** Halo handling (zeros written) and the memory
  layout are this design's choices. The description only says that a slice is
  contiguous in y and z.
* **Profiler.** The command encoding, the report format and the timer register
  offsets are this design's own.
* **Reset.** An asynchronous active-low `rst_n` clears control state. Datapath
  registers are not reset.
* **Eight kernels.** The 8 is the number said to fit the FPGA. Nothing in the
  RTL depends on it.

## Capacity

The default kernel holds three 64 × 64 slices per field on chip: 288 KiB of
buffers, plus about 2 KiB of line buffers per window. It places no limit on the
domain, because the domain is decomposed into columns of 64 × 64 (y, z) and
blocks of slices. The evaluated domains all fit the 16 GB of card memory:

| Domain | Cells | Memory for the six fields |
|---|---|---|
| 512 × 512 × 64 | 16.7 M | 0.8 GB |
| 1024 × 1024 × 64 | 67 M | 3.2 GB |
| 268 M cells | 268 M | 12.9 GB |

The `nx` register is 16 bits wide.

## Verification

Every block has a self-checking testbench in `tb/`. Each one:
* prints `TB_RESULT checks=N failures=M`;
* has a watchdog;
* compares results with values computed independently, in real arithmetic.

| Testbench | What it checks |
|---|---|
| `tb_fp64_unit` | random and directed cases: rounding ties, cancellation, overflow, NaN, infinities |
| `tb_stream_fifo` | against a queue model, with random push and pop |
| `tb_stencil_window` | every tap on a numbered stream |
| `tb_read_fields` | lane mapping, addresses, beat rate, and behaviour under stalls and back-pressure |
| `tb_prepare_stencil` | every stencil of a small block, with its flags |
| `tb_compute_results` | results bit for bit against the reference, the six-clock latency, and holding under back-pressure |
| `tb_write_results` | packing, addresses, responses and rate |
| `tb_profiler` | totals of nested and repeated blocks against a timer that crosses a 32-bit boundary |
| `tb_pw_advection` | one kernel end to end, including a cycle bound, with and without memory stalls |
| `tb_pw_advection_system` | 4 kernels of 8 × 8 slices working through 6 chunks that arrive over time |
| `tb_full_size` | the top at its defaults (8 kernels, 64 × 64) on 8 chunks of 3 slices: 98 304 results checked bit for bit |
| `tb_workload_chunks` | the top at its defaults on 16 of the 256 chunks (64 × 64 × 18 slices each) of a 512 × 512 × 64 domain: chunks queue, kernels are reused, 3.1 million results checked |

The last three run through the harness `tb/host_model.sv`. It plays the host
scheduler, the card memory (`tb/axi_mem_model.sv`, which stalls at random) and
the timers (`tb/axi_timer_model.sv`). It counts the design's mechanisms and fails
if any of them never happened:
* chunks waiting for a kernel;
* kernels reused;
* several kernels busy at once;
* transfer overlapping computation;
* memory stalls;
* stream back-pressure on the read channel;
* a kernel loading and storing within the same 8 clocks;
* timer captures.

The reference model is in `tb/pw_ref_pkg.sv`. Field data is generated by a
hash, so no data files are needed.

To simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/pw_pkg.sv tb/pw_ref_pkg.sv \
    tb/tb_pw_advection_system.sv --top-module tb_pw_advection_system -o sim
obj_dir/sim +verilator+rand+reset+2
```

Files are found by module name through `-I`. The testbenches start with random
values in all uninitialised state, so they also check that reset covers
everything that is read.
