# MoNDE device RTL: a CXL memory expander that runs cold MoE experts near the data

In a Mixture-of-Experts (MoE) Transformer most of the parameters sit in the
experts, and most experts see only a few tokens per batch. For those "cold"
experts, moving the parameters to a GPU costs far more than moving the few
tokens' activations to the memory that already holds the parameters. This
design is the memory side of that scheme. A CXL-attached memory device
(512 GB, 8 LPDDR channels, about 512 GB/s) holds the expert weights. Next to
the memory sits a small matrix engine that multiplies the routed activations
by an expert's weight matrix at memory speed. The host decides which experts
run here and which run on the GPU, sends one instruction per expert GEMM, and
polls a done register.

The RTL covers the four parts of the device:
1. a CXL controller (simplified to the transaction level),
2. the NDP controller (NDP = near-data processing),
3. the NDP core,
4. the memory controller front end for the eight channels.

The DRAM itself, the host, its driver and the GPU/CPU load-balancing policy are
not part of the RTL.

## Shape of the computation

An expert computes `C = A x B`:
- `A` is M x K bf16: M routed tokens by K input features.
- `B` is K x N bf16: the expert weights.
- `C` is M x N bf16.

For a cold expert M is small (1 to a few tens of tokens). K and N are the model
widths (d_model, d_ff), which are large multiples of 256. The core is therefore
built to be short and very wide. It has **64 units, each a 4 x 4 output-stationary
systolic array**, all driven in lockstep by one SIMD controller.

Together the 64 arrays compute a **4 x 256 tile** of C:
- 4 token rows by 256 output columns.
- Unit `u` owns columns `4u .. 4u+3`.
- At each step k, all units get the same 4 activations `A[r][k]`.
- Each unit gets its own 4 weights `B[k][4u..4u+3]`.

One step uses one 256-element row of B: 512 bytes, which is exactly what the
8 channels deliver in one 1 GHz cycle (8 x 64 B). The arithmetic is balanced
with the memory:
- 512 B/cycle of weights is 256 weights per cycle.
- Each weight is used by 4 tokens, so 1024 MACs per cycle.
- That matches 64 units x 16 PEs.

A tile of depth K therefore takes K cycles of weight streaming. Weights are
streamed once per 4 tokens, and never reused on chip.

Arithmetic:
- Each PE multiplies bf16 x bf16 exactly into fp32 and accumulates in fp32,
  rounding to nearest even (subnormals are flushed to zero).
- When the tile is done, the accumulators are rounded to bf16 and, for the
  `gemm+relu` kernel, passed through ReLU.

## The data path of one tile

```
            weight beat (256 bf16 = B[k][nt*256 +: 256]) from memory, 1 per cycle
                                   |
 scratchpad (A rows)  ->  SIMD controller  ->  64 x NDP unit  ->  output rows -> memory
   {half, seg, row}       broadcast A[r][k]      act buf / exp buf (8-deep FIFOs)
                          slice B to units        skew unit (lane i delayed i cycles)
                                                  4x4 MAC array (output-stationary)
                                                  vec unit (fp32 -> bf16, ReLU)
```

- **Scratchpad (256 KB).** It has 512 entries of 512 B. An entry is one
  256-element slice of one activation row, addressed `{half, segment, row}`:
  - `segment` selects which 256-wide piece of K the slice covers. There are
    up to 64 segments, so **K is at most 16384**.
  - `row` selects the token within the 4-token tile.
  - `half` alternates between consecutive token tiles, so the next tile's
    activations can load while the current tile computes.
- **Operand buffers (8 KB).** Each NDP unit has an 8-entry activation buffer
  and an 8-entry expert (weight) buffer. Together with the scratchpad they make
  the 264 KB of on-chip buffering.
- **SIMD controller.** It runs one tile request. For each segment it:
  - waits for the first weight beat,
  - reads the 4 activation rows of that segment from the scratchpad (4 cycles,
    plus 2 cycles of turnaround),
  - then issues 256 steps, one per accepted weight beat.

  Rows beyond the tile's token count are fed as zeros and never written back.
  When every unit holds its result, it writes the valid output rows, one
  512-byte row per cycle at `c_addr + row * N * 2`, and pulses `tile_done`.
- **NDP unit.** A step leaves the two operand buffers only when both hold one.
  The skew unit delays lane i by i cycles, which gives the diagonal wavefront a
  systolic array needs. `first` restarts the accumulators, so consecutive tiles
  need no clear cycle. `last` marks the step that completes the tile.
  - The result is valid K + 8 cycles after the first step enters the unit.
  - After a tile's last step, the unit stops popping until its result has been
    taken.

Per tile, the cost is K cycles of streaming plus about 6 cycles per segment,
plus array fill and drain and the row writes. The end-to-end test measures
about 2500 cycles for 2304 streaming steps over 5 tiles, including host polling,
so the weight stream runs close to one beat per cycle.

## Controlling it: instructions, sequencing and memory

### Host interface and instructions

The host talks to the device with CXL.mem-style requests:
- `MemRd` (read 64 B),
- `MemWr` (write 64 B, "request with data").

A write that carries the **NDP flag** (a bit in the reserved part of the flit,
the `m2s_ndp` input here) is not a memory write. It is a 64-byte **NDP
instruction**:

| bits | field |
|---|---|
| 511:508 | opcode: 0 NOP, 1 `gemm`, 2 `gemm+relu`, others reserved |
| 507:380 | input activation A: 64-bit address, 64-bit size in bytes |
| 379:252 | expert weights B: address, size |
| 251:124 | output activation C: address, size |
| 123 | `isNDP` |
| 122:75 | M, K, N (16 bits each) |
| 74:0 | reserved |

Matrices are row-major bf16 in device memory.

The decoder rejects an instruction (it is counted in the ERRORS register)
unless all of these hold:
- the opcode is `gemm` or `gemm+relu`, and `isNDP` is set;
- M, K and N are non-zero;
- K and N are multiples of 256, and K ≤ 16384;
- all three addresses are 512-byte aligned and inside the 512 GB device;
- each size is at least its matrix footprint.

### Registers

Accesses at or above device address `0x80_0000_0000` go to the registers:

| offset | register | |
|---|---|---|
| 0x00 | DONE | bit 0 is set when a kernel finishes; a write of 0 clears it |
| 0x08 | STATUS | `{instruction buffer count[15:8], busy[0]}` |
| 0x10 | COMPLETED | kernels finished |
| 0x18 | ERRORS | instructions rejected |

All other addresses are plain memory, so the host loads activations and reads
results with ordinary line accesses.

### NDP controller

Instructions wait in a 16-entry instruction buffer. The sequencer takes one at
a time and walks its tiles, token tiles outer and column tiles inner:

1. For token tile `mt`, it queues one memory read per (row, segment) of A. The
   read data is written into scratchpad half `mt mod 2`.
2. For each column tile `nt`, it queues one tile request for the core, then K
   weight reads. Weight read `k` fetches the 512 B at
   `b_addr + (k*N + nt*256)*2`, and the data goes straight to the core.
3. The kernel is done when the core has reported every tile. DONE is then set
   and the next instruction starts.

One memory port serves three sources, with fixed priority:
1. output-row writes from the core,
2. host accesses (through a small "regular DRAM" buffer),
3. the sequencer's loads.

Read data comes back in request order. A tag queue sends each beat to the host
(one 64-byte line of it), to the scratchpad, or to the core's weight input.

Two properties keep this safe without any handshake between loads and compute:
- Because memory returns reads in order, and all of a tile's A reads are
  issued before its B reads, a segment's activation rows are in the scratchpad
  before its first weight beat arrives. The SIMD controller reads the
  scratchpad only then.
- The two scratchpad halves let tile `mt+1` load while tile `mt` computes.
  Tile `mt+2` reuses `mt`'s half only after tile `mt+1`'s weight loads have
  been issued. With K ≥ 256, the queues between the sequencer and the core are
  far shallower than that, so tile `mt` has finished by then.

### Memory controller and address map

Device byte addresses are interleaved in the order ro-ba-bg-ra-co-ch (row,
bank, bank group, rank, column, channel), from the high bits down:

| bits | 38:23 | 22:21 | 20:19 | 18:16 | 15:6 | 5:3 | 2:0 |
|---|---|---|---|---|---|---|---|
| field | row | bank | bank group | rank | column | channel | byte in 8-B word |

- Each 8-byte word lands on one channel in turn.
- A 512-byte beat is 8 consecutive column words in each of the 8 channels. The
  memory controller sends each beat to all channels at once as 64-byte bursts,
  with a per-column write mask, and reassembles read data from per-channel
  response FIFOs.
- A credit counter limits outstanding reads to the FIFO depth (32). That is
  enough for one beat per cycle with about 20 cycles of memory latency.
- The paper's driver places weights in even banks and activations in odd
  banks. With this map, that is address bit 21 = 0 for weights and 1 for
  activations.

## Where this design follows the paper and where it fills gaps

**Taken from the paper:**
- the four-part device structure;
- 64 units of 4 x 4 systolic arrays under a SIMD controller;
- 4 x 256 output-stationary tiles;
- bf16 data;
- 264 KB of buffers at 1 GHz;
- 8 channels and 512 GB at about 512 GB/s;
- the ro-ba-bg-ra-co-ch map and the even/odd bank split;
- the 64-byte instruction with a 4-bit opcode, three (address, size) pairs and
  an `isNDP` flag;
- the NDP flag carried in reserved flit bits;
- the `gemm` and `gemm+relu` kernels;
- the memory-mapped done register;
- the named queues: instruction buffer, NDP request queue, memory request
  queue, regular DRAM buffer, activation and expert buffers.

**Chosen here (the paper does not specify them):**
- the bit layout of the instruction and the opcode values;
- the register offsets and the extra registers;
- the division of the 264 KB into a 256 KB scratchpad and 8 KB of operand
  buffers;
- all queue depths;
- fp32 accumulation and the rounding rules;
- tile order and arbitration priority;
- the legality checks (including the K ≤ 16384 limit);
- the address-field widths;
- the handshakes between blocks.

**Not built:**
- **GeLU.** The paper allows ReLU or GeLU after the GEMM. Only ReLU is here,
  because the paper gives no GeLU approximation.
- **Real DRAM control.** The memory controller has no DRAM command scheduling,
  bank timing or refresh. The channel ports are simple in-order burst
  interfaces, and a real LPDDR controller would sit behind each one.
- **CXL link, flit and physical layers.** The CXL controller handles one
  request/response pair at a time at the transaction level.
- **Host-side software.** The host-side load balancer (which experts go to the
  GPU and which to the device) and the driver are software.
- **Bandwidth scaling.** The paper's 0.5x and 2x bandwidth studies would need
  a different number of units or channels. `NUM_UNITS` and `NCH` are constants
  of the package, so they can be changed there, but only the 1x point is tested.

Workload fit at the default size:
- Switch-Large-128: d_model 1024, d_ff 4096, 51.5 GB of experts.
- NLLB-MoE: d_model 2048, d_ff 8192, 103.1 GB.
- Switch variants with d_model 768.

All of these fit in 512 GB. All of their expert GEMMs meet K ≤ 16384 and the
multiple-of-256 rule.

## Files

`rtl/`, one module per file:

| file | part |
|---|---|
| `monde_pkg.sv` | sizes, types, encodings and the register map |
| `monde_device.sv` | top: CXL controller, NDP controller, NDP core, memory controller; brings out the 8 channel ports |
| `cxl_controller.sv` | host request routing: instruction, registers or memory; NDR/DRS responses |
| `ndp_controller.sv` | instruction buffer, decoder, sequencer, request queues, arbitration, tag routing, registers |
| `inst_decoder.sv`, `mmap_regs.sv` | instruction decode and checks; DONE/STATUS/COMPLETED/ERRORS |
| `ndp_core.sv` | scratchpad, SIMD controller and the 64 NDP units |
| `simd_ctrl.sv`, `scratchpad.sv` | tile execution; 512 x 4096-bit SRAM |
| `ndp_unit.sv` | operand buffers, skew unit, MAC array, vector unit |
| `skew_unit.sv`, `mac_array.sv`, `mac_pe.sv`, `vec_unit.sv` | the unit's parts |
| `bf16_mul.sv`, `fp32_add.sv` | exact bf16 product; fp32 adder with round-to-nearest-even |
| `sync_fifo.sv` | the one FIFO every queue is built from |
| `mem_ctrl.sv` | address map, beat split over channels, read reassembly |

`tb/`:
- `tb_<module>.sv`: one self-checking testbench per module.
- `lpddr_channel_model.sv`: a behavioural channel memory (sparse storage, fixed
  latency, optional random stalls).
- `tb_fp_pkg.sv`: reference float conversions.

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.
The reference values are computed independently:
- Integer-valued bf16 operands keep the GEMM references exact, and the results
  are rounded to bf16 the same way the hardware rounds.
- The controller tests use address-derived memory contents.

`tb_monde_device` is the end-to-end test at the default size: 64 units and
8 channels. It runs three kernels, in this order:
- a 5 x 512 x 512 gemm: two token tiles, one of them partial, two segments
  and two column tiles;
- an illegal instruction;
- a 2 x 256 x 256 gemm+relu.

It then checks every output element, the registers and the kernel time. It also
counts, and requires, each mechanism:
- NDP-flagged instructions and register accesses;
- host reads and writes;
- a rejected instruction and partial tiles;
- both scratchpad halves and multi-segment tiles;
- ReLU clamping;
- weight-stream backpressure;
- core-write priority over queued loads.

### Simulating

Verilator 5 with `--timing` runs every testbench. From the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -y rtl -y tb rtl/monde_pkg.sv tb/tb_fp_pkg.sv tb/tb_monde_device.sv \
  --top-module tb_monde_device -Mdir obj_tb_monde_device -j 8
./obj_tb_monde_device/Vtb_monde_device
```

To run another testbench, replace the testbench file and top name. The
simulator is two-state. Everything that is read is reset or initialised, and
the testbenches draw random values with `$urandom` only.

The full-size device takes about a minute to build and a second to simulate.
The unit, core and SIMD-controller testbenches use fewer units (for example
`ndp_core #(.N_UNITS(4))`) to keep their runs short.

### Lint notes

- Verilator reports `SYNCASYNCNET` on the reset. The flops use an asynchronous
  active-low reset, and the handshake assertions use the same signal in
  `disable iff`. This is intended.
- Some bits are reported as unused. The top bits of the 64-bit host address are
  above the 512 GB space, the FIFO occupancy counts are unused in some
  instances, and the top bit of the 17-bit rounding sum in `vec_unit` can
  never be set: rounding a finite value carries at most into the exponent,
  never past the sign bit.
- `core_busy` at the top is left unconnected on purpose. The NDP controller
  tracks completion through `tile_done`.
