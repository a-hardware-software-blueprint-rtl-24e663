# VTA: a decoupled tensor accelerator in SystemVerilog

VTA (Versatile Tensor Accelerator) is a programmable deep-learning accelerator
built around one fixed tensor intrinsic: a small matrix multiply with
accumulate. A compiler maps convolutions, fully-connected layers,
grouped convolutions and transposed convolutions onto that intrinsic. It does so
through two levels of programming:

* **Task instructions** (128 bits) describe coarse jobs: move a 2D tile between
  DRAM and an on-chip buffer (`LOAD`, `STORE`), or run a micro-coded kernel
  (`GEMM`, `ALU`).
* **Micro-ops** (32 bits) are the kernel bodies. A micro-op is just three buffer
  indices. A `GEMM` or `ALU` instruction repeats a range of micro-ops inside a
  two-level loop and shifts the indices by an affine function of the loop
  counters. So a kernel needs no branches, and the runtime can generate kernels
  on the fly.

The hardware is split into four engines: fetch, load, compute and store. They
talk through queues and shared SRAMs, so memory transfers for one tile overlap
the arithmetic for another. This is access-execute decoupling. Software makes it
safe with *dependency tokens* carried in every instruction.

This repository is a register-transfer implementation of that architecture.
It is built in the (2,16)x(16,16) W8A8 configuration: BATCH 2, BLOCK_IN 16,
BLOCK_OUT 16, 8-bit inputs and weights, 32-bit accumulators. The published
design space exploration evaluates this shape. It is parameterised by the shape,
the data widths, the buffer depths and the number of tensor-ALU units.

## Block diagram

```
                              DRAM (external)
     |rd0            |rd1                |rd2                       ^wr
     v               |                   |                          |
  +-------+   LOAD CMD Q   COMPUTE CMD Q   STORE CMD Q              |
  | fetch |--->[====]--------->[====]--------->[====]               |
  +-------+      |               |               |                  |
                 v               v               v                  |
           +-----------+ LD->CMP Q +-------------------+ CMP->ST Q +---------+
           |   load    |---------->|     compute       |---------->|  store  |
           |  (DMA)    |<----------| uop cache, reg.   |<----------|  (DMA)  |
           +-----------+ CMP->LD Q | file, GEMM core,  | ST->CMP Q +---------+
              |     |              | tensor ALU, DMA   |                ^
              v     v              +-------------------+                |
        INPUT BUF  WEIGHT BUF ------->  ^  ^     |----> OUTPUT BUF -----+
              |--------------------------|  |
```

| Module | File | Role |
|---|---|---|
| `vta_top` | `rtl/vta_top.sv` | wires everything; start/done control |
| `vta_fetch` | `rtl/vta_fetch.sv` | reads instructions, dispatches by type |
| `vta_fifo` | `rtl/vta_fifo.sv` | the 3 command queues and 4 dependency queues |
| `vta_load` | `rtl/vta_load.sv` | LOADs into the input and weight buffers |
| `vta_compute` | `rtl/vta_compute.sv` | micro-op / bias LOADs, GEMM and ALU kernels |
| `vta_store` | `rtl/vta_store.sv` | STOREs from the output buffer |
| `vta_dma_rd` | `rtl/vta_dma_rd.sv` | 2D strided DRAM-to-SRAM copy with zero padding |
| `vta_gemm_core` | `rtl/vta_gemm_core.sv` | the matrix-multiply intrinsic |
| `vta_tensor_alu` | `rtl/vta_tensor_alu.sv` | element-wise MIN/MAX/ADD/SHR |
| `vta_sram` | `rtl/vta_sram.sv` | every on-chip buffer |
| `vta_pkg` | `rtl/vta_pkg.sv` | sizes, encodings, instruction structs |

## The task pipeline and dependency tokens

Load, compute and store each execute their own instruction stream in order.
Nothing in hardware stops load from overwriting an input tile that compute is
still reading, or compute from overwriting an output tile before store has
written it out. Ordering comes entirely from tokens that the program asks for:

| Queue | Pushed by | Popped by | Meaning of a token |
|---|---|---|---|
| LD->CMP | load (`push_next`) | compute (`pop_prev`) | input/weight data is in the buffer (RAW) |
| CMP->LD | compute (`push_prev`) | load (`pop_next`) | compute is done reading a buffer region (WAR) |
| CMP->ST | compute (`push_next`) | store (`pop_prev`) | results are in the output buffer (RAW) |
| ST->CMP | store (`push_prev`) | compute (`pop_next`) | output region has been written to DRAM (WAR) |

Every instruction has four flag bits (bits 6:3): `pop_prev`, `pop_next`,
`push_prev`, `push_next`. "prev" and "next" are relative to the module that
executes the instruction, in the chain load -> compute -> store. Load has no
"prev" and store has no "next", so those flags are ignored there. An engine:

1. takes the instruction from its command queue;
2. waits until every queue named by a `pop_*` flag holds a token, then removes
   those tokens in one cycle;
3. executes the task;
4. waits until every queue named by a `push_*` flag has room, then pushes.

Tokens carry no data; only their count matters. A program must balance its
pushes and pops on each queue. The queues are 32 deep, and a push to a full
queue blocks the pushing engine.

**Double buffering**, as the end-to-end test does it, with buffer regions
A and B used by even and odd tiles:

```
load    : LOAD WGT; for t: LOAD INP->region(t)   [pop_next if t>=2] [push_next]
compute : LOAD UOP; for t: LOAD ACC->region(t)   [pop_next if t>=2]
                           GEMM                  [pop_prev]
                           ALU SHR, ALU MAX      [push_prev if t<T-2] [push_next]
store   : for t: STORE region(t)                 [pop_prev] [push_prev if t<T-2]
```

Load may therefore run two tiles ahead of compute, and compute one tile ahead of
store. The fetch engine dispatches in program order into the three command
queues. Fetch stops when the queue it needs is full, so it can run well ahead of
the slowest engine but never reorders.

Where an instruction goes: `LOAD` into the input or weight buffer goes to load.
`LOAD` into the micro-op cache or the register file goes to compute, because
compute owns those memories. `GEMM` and `ALU` go to compute, and `STORE` to
store.

## Task instruction formats

All fields are little-endian bit ranges of the 128-bit word. Word 0 is at
the lowest DRAM address.

**LOAD / STORE** (`mem_insn_t`)

| Bits | Field | Notes |
|---|---|---|
| 2:0 | opcode | LOAD = 0, STORE = 1 |
| 6:3 | dependency flags | see above |
| 9:7 | buffer id | UOP 0, WGT 1, INP 2, ACC 3, OUT 4 |
| 25:10 | sram_base | first buffer entry |
| 57:26 | dram_base | DRAM address in units of one entry of that buffer |
| 79:64 | y_size | rows |
| 95:80 | x_size | entries per row |
| 111:96 | x_stride | DRAM row pitch, in entries |
| 115:112, 119:116 | y_pad_0, y_pad_1 | zero rows above / below (LOAD only) |
| 123:120, 127:124 | x_pad_0, x_pad_1 | zero entries left / right (LOAD only) |

A LOAD writes a (y_pad_0 + y_size + y_pad_1) by (x_pad_0 + x_size + x_pad_1)
block, row after row, starting at `sram_base`. The inner entry (y, x) comes
from DRAM entry `dram_base + y*x_stride + x`. A STORE writes the
`y_size x x_size` entries starting at `sram_base` to the same DRAM pattern.

**GEMM** (`gemm_insn_t`) and **ALU** (`alu_insn_t`)

| Bits | GEMM | ALU |
|---|---|---|
| 2:0 | opcode 2 | opcode 4 |
| 6:3 | dependency flags | dependency flags |
| 7 | reset | reset |
| 20:8, 33:21 | uop_bgn, uop_end | uop_bgn, uop_end |
| 47:34, 61:48 | end0, end1 (loop extents) | end0, end1 |
| 73:64, 83:74 | x0, x1: accumulator index factors | x0, x1: destination factors |
| 93:84, 103:94 | y0, y1: input index factors | y0, y1: source factors |
| 113:104, 123:114 | z0, z1: weight index factors | 105:104 op, 106 use_imm, 122:107 imm |

**Micro-op** (`uop_t`): bits 9:0 accumulator index, 19:10 input index,
29:20 weight index. In an ALU micro-op, the first field is the destination and
the second the source, both register-file indices.

## Micro-coded kernels

A `GEMM` or `ALU` instruction runs

```
for i0 in 0 .. end0-1:
  for i1 in 0 .. end1-1:
    for u in uop_bgn .. uop_end-1:
      x = i0*x0 + i1*x1 + uop[u].acc ;  y = i0*y0 + i1*y1 + uop[u].inp ;  z = i0*z0 + i1*z1 + uop[u].wgt
      GEMM: reg[x] = reset ? 0 : reg[x] + inp[y] * wgt[z]^T
      ALU : reg[x] = reset ? 0 : OP(reg[x], use_imm ? sext(imm) : reg[y])
      out[x] = low 8 bits of each lane of reg[x]
```

Indices wrap at the buffer depth. Each result goes to the register file and
also, narrowed, to the output buffer at the same index, ready for a STORE.

Inside `vta_compute` the loop is a four-step pipeline:

| Step | Work |
|---|---|
| S0 | loop counters step; micro-op cache read |
| S1 | affine indices; reads of register file (2 ports), input and weight buffers |
| S2 | operands go into the GEMM core (1 cycle) or the tensor ALU (N/LANES cycles) |
| write-back | register file and output buffer written |

A micro-op in S1 may read a register-file entry that an older micro-op (in S2,
or inside a unit) has not yet written. If so, S0 and S1 hold (`hazard_stall`)
until the write is done. A GEMM kernel whose consecutive micro-ops write
different entries therefore issues one micro-op per cycle. 64 micro-ops take
about 72 cycles, including instruction overheads. A kernel that accumulates into
the same entry back to back runs at one micro-op per three cycles. Results are
always those of the sequential loop above. Schedules that rotate accumulator
indices in the innermost loop avoid the stall.

## GEMM core and tensor ALU

The GEMM core multiplies a BATCH x BLOCK_IN input tile by a
BLOCK_OUT x BLOCK_IN weight tile. The weights are stored transposed, so row o
holds output o. It adds the product to a BATCH x BLOCK_OUT accumulator tile.
That is 512 8x8-bit products per cycle. Each of the BATCH*BLOCK_OUT dot products
is a binary adder tree over BLOCK_IN products. There is one register stage, and
a new operation is accepted every cycle. Sums wrap at 32 bits.

The tensor ALU applies MIN, MAX, ADD or SHR lane by lane to the 32 lanes of an
accumulator tensor. SHR shifts right arithmetically by a non-negative operand
and left by a negative one. With these, ReLU is `MAX imm 0`, requantisation is
`SHR imm k`, a bias or residual add is `ADD`, and max pooling is `MAX` between
tensors. `ALU_LANES` (default 32) sets how many lanes are computed per cycle. At
16, one tensor takes two cycles.

## Memories

| Buffer | Entry | Entries | Size | Written by | Read by |
|---|---|---|---|---|---|
| micro-op cache | 32 b | 8192 | 32 KiB | compute DMA | compute |
| input buffer | 2x16 x 8 b | 1024 | 32 KiB | load | GEMM |
| weight buffer | 16x16 x 8 b | 1024 | 256 KiB | load | GEMM |
| register file | 2x16 x 32 b | 1024 | 128 KiB | compute DMA, GEMM, ALU | GEMM, ALU (2 ports) |
| output buffer | 2x16 x 8 b | 1024 | 32 KiB | GEMM, ALU | store |

All of them are `vta_sram`: one write port, registered reads, and old data on
a read that collides with a write. Contents are not reset. On an FPGA or ASIC
each would map to block RAM or an SRAM macro.

## DRAM ports, start and done

There are four independent DRAM ports: reads for fetch, load and compute,
and writes for store. Addresses are byte addresses and data moves in 32-bit
beats. A read is a `req_valid`/`req_ready` handshake carrying `req_addr`,
answered later by one `rsp_valid` beat. Each master keeps one request
outstanding. A write is a `valid`/`ready` handshake with address and data. The
address must stay stable while `valid` waits. An entry of E bytes is E/4
beats, lowest word first. The DMA engines fetch entries beat by beat, so their
bandwidth is far below what the buffers can absorb. Replace them with burst
transfers for performance work.

To run a program, write the instructions to DRAM, set `insn_base` and
`insn_count`, and pulse `start`. `done` rises when fetch has dispatched every
instruction, all command queues are empty and all engines are idle. It stays
high until the next `start`. `rst_n` is an asynchronous active-low reset.

## Configuration

Shapes, widths, depths and field widths are in `rtl/vta_pkg.sv`. If you change
`BATCH`, `BLOCK_IN` or `BLOCK_OUT`, also check that each half of the instruction
formats still adds up to 64 bits. `BLOCK_IN` must be a power of two, and every
entry must be a multiple of 32 bits. Queue depths and `ALU_LANES` are parameters
of `vta_top`. Other shapes the exploration considers include (8,8)x(8,8),
(1,32)x(32,32) and (4,16)x(16,16).

## What follows the published design and what is this implementation's own

These follow the published description:
* the four engines, three command queues, four dependency queues, and the
  buffers with their owners;
* the LOAD/STORE/GEMM/ALU field sets and their order;
* the micro-op fields, the loop nest and the affine index function;
* the one-per-cycle GEMM rate and the dot-product reduction trees;
* the tensor-ALU unit count as a knob;
* the example shape and data widths.

These are this implementation's choices, because the description does not fix
them:
* all numeric field widths except the 4-bit dependency flags, the opcode and
  buffer-id encodings, and the order of the flag bits;
* the pad-field width (4 bits). The published format figure labels the pad group
  with a DRAM-address-sized width that cannot fit in 64 bits;
* all buffer depths and queue depths;
* the ALU operation set and SHR semantics, and RESET meaning "write zero";
* narrowing by truncation into the output buffer;
* routing of micro-op and bias loads to compute. The text says load fetches bias
  tiles, but the block diagram draws DRAM feeding the register file through
  compute, and that was followed;
* zero as the padding value, and STORE ignoring the padding fields;
* the DRAM protocol and port split, start/done, and the compute pipeline with
  its interlock.

These are not included:
* the PLL and FPGA pipelining knobs, such as an 11-20 stage GEMM core. The GEMM
  core here has one stage;
* the host CPU and its JIT runtime. They are software; the testbenches play
  their part by writing programs into a DRAM model;
* there is no FINISH instruction or interrupt. Completion is the `done` signal.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_vta_fifo` | order, occupancy, full/empty, latency against a reference queue |
| `tb_vta_sram` | two read ports, read-before-write, hold |
| `tb_vta_gemm_core` | 64 back-to-back random GEMMs against loop arithmetic, 1-cycle rate, reset |
| `tb_vta_tensor_alu` | all ops with tensor/immediate operands at 32 and 16 lanes, latency |
| `tb_vta_dma_rd` | padded and unpadded 2D strided transfers, pad count |
| `tb_vta_fetch` | dispatch of 40 random instructions under back-pressure |
| `tb_vta_load`, `tb_vta_store` | transfers and token handshakes |
| `tb_vta_compute` | micro-op and bias loads, GEMM and ALU kernels against a reference of the loop nest, GEMM rate, interlock, tokens |
| `tb_vta_top` | whole design at default parameters (see below) |
| `tb_vta_conv2d` | whole design running three convolution layers (see below) |

`tb_vta_top` runs a tiled fully-connected layer, 16 tiles and 98 instructions,
computing `relu((bias + inp x wgt^T) >>> 2)`. It checks all 2048 output bytes in
DRAM against values computed in the testbench. It also requires that each
mechanism happened at least once:
* dependency waits in all three engines;
* interlock stalls;
* input padding;
* fetch stalling on a full command queue;
* load running at the same time as compute.

It finishes in about 11,000 cycles, well under a second of simulation.

`tb_vta_conv2d` shows how a convolution is mapped onto the intrinsic. It
runs three layers back to back through the whole design at default
parameters:
* a 3x3 stride-1 layer;
* a 3x3 stride-2 layer;
* a 1x1 stride-2 downsampling layer.

Each layer has 32 input and 32 output channels and an 8x8 input map, with
one-pixel zero padding on the 3x3 layers. Each input-channel block is
loaded with the DMA's padding, so the input buffer holds the padded image.
A single GEMM instruction covers the whole layer:
* its two loops walk output rows and columns (`x0 = OW`, `x1 = 1`,
  `y0 = S*(W+2P)`, `y1 = S`);
* its micro-ops list the kernel taps, with the output-channel block innermost.

After that, ALU `SHR`, `MAX 0` and `MIN 127` requantise the results. Layers
reuse the same buffer addresses, and all four token queues order them. The
6144 output bytes are checked against a direct convolution. The whole
program takes about 46,000 cycles. Most of that time is the beat-by-beat DMA.

`tb/vta_dram_model.sv` is a behavioural (non-synthesizable) DRAM with random
acceptance delays, used by the testbenches.

To run any testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/vta_pkg.sv tb/tb_vta_top.sv --top-module tb_vta_top -Mdir obj -o sim
./obj/sim
```

## Capacity against typical workloads

The hardware only has to hold one tile at a time, and the compiler picks tile
sizes. Take a 3x3 convolution with 256 input and 256 output channels on a 14x14
map. Its weights are 576 KiB, so it runs as three or more output-channel tiles
of the 256 KiB weight buffer. Its input is 98 KiB at batch 2, so it runs as
row bands of the 32 KiB input buffer. Larger ResNet layers (512x512x3x3 weights,
2.3 MB) tile the same way. Loop extents are 14 bits and buffer indices 10 bits,
and those bound the size of a single tile, not of a layer. The convolution
test above runs this mapping at a smaller spatial size and channel count.
The full 14x14x256 layer has not been simulated. Grouped
convolutions and transposed convolutions need only different micro-kernels.
