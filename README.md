# An RV32IM core with custom neural-network instructions

This design offloads a CNN's heavy kernels from a small RISC-V processor
without giving up its programmability. The processor keeps all of the
control flow. Each heavy kernel is issued as a single custom instruction:
a whole convolution, a matrix multiply, an activation pass, a batch
normalisation or a depthwise convolution. The instruction names the buffers in memory and a packed
configuration word. Fixed-function hardware then reads the operands straight
from on-chip memory, computes on a systolic array or a row of activation
lanes, and writes the result back. The core waits for it to finish.

The RTL covers the processor with its caches, the on-chip memory and bus, and
the four accelerators. All of it is written in synthesizable SystemVerilog with
self-checking testbenches. The sizes follow a published Zynq-7020 prototype of
this architecture:
- a 5-stage RV32IM pipeline;
- 4 KB direct-mapped instruction and data caches with 32-byte lines;
- 64 KB of block RAM on a 32-bit AXI4 bus;
- an AXI4-Lite register window at 0xA000_0000;
- a 4×4 convolution array, an 8×8 weight-stationary GEMM array and a 16-lane
  activation unit;
- 16-bit fixed-point data: Q8.8 activations and Q12.4 weights.

The source leaves many points open. The choices made here to fill them are
marked as this design's own below and in the file headers.

## System organisation

```
                +-------------------------- fpga_riscv_soc ---------------------------+
                |                                                                      |
  rv_core --imem--> icache (4 KB) ----------------.                                    |
     |    --dmem--> dcache (4 KB, write-through) --+--> axi_arbiter --> axi_bram 64 KB |
     |          \-> axil_master --AXI4-Lite--> accel_csr      ^   (round robin,        |
     |                                                         |    3 masters)         |
     +--acc cmd--> accel_dispatch --------------- dma_engine --'                       |
                      | vconv_unit  (4x4 output-stationary systolic_os)               |
                      | gemm_unit   (8x8 weight-stationary systolic_ws)               |
                      | relu_unit   (16 x act_lane)                                   |
                      | custom_unit (batch norm, depthwise convolution)               |
                +----------------------------------------------------------------------+
```

| Address range | What | Path |
|---|---|---|
| `0x0000_0000`–`0x0000_FFFF` | program and data BRAM (mirrored every 64 KB) | caches → AXI4 |
| `0xA000_0000`–`0xA000_FFFF` | accelerator register block | uncached, AXI4-Lite |

The prototype's two 50 MHz clocks come from one MMCM and are frequency-locked.
This RTL therefore runs on a single clock, `clk`, with an active-low
asynchronous reset, `rst_n`.

These parts surround the design but are not part of the RTL:
- the clock generator;
- the Zynq's hard ARM cores, which host the board;
- the DDR3 memory.

The core starts at address 0. The top's only outputs are `halted`, `retired`
and `accel_busy`. `halted` is set when an EBREAK retires, and test programs use
it to signal their end.

## The FPGA.* instructions

All four instructions use the RISC-V *custom-0* major opcode `0001011`.
funct3 selects the unit:

| funct3 | Mnemonic | Operands |
|---|---|---|
| `000` | `fpga.vconv rd, rs1, rs2, rs3` | rd = output map, rs1 = input map, rs2 = kernel, rs3 = configuration |
| `001` | `fpga.gemm rd, rs1, rs2, rs3`  | rd = C, rs1 = A, rs2 = B, rs3 = {K[29:20], N[19:10], M[9:0]} |
| `010` | `fpga.relu rd, rs1, rs2`       | rd = output, rs1 = input, rs2 = element count; funct7[1:0] = function |
| `111` | `fpga.custom rd, rs1, rs2`     | rd = output, rs1 = input, rs2 = parameter block; funct7 = operation |

The bit layout of the two three-source instructions is the standard R4
format. A normal assembler can emit them as `.insn r4 0x0B, f3, 0, rd, rs1,
rs2, rs3`:

```
 31      27 26 25 24    20 19    15 14  12 11     7 6       0
 |  rs3    | 00  |  rs2   |  rs1   |funct3|   rd   | 0001011 |   VCONV, GEMM
 |      funct7   |  rs2   |  rs1   |funct3|   rd   | 0001011 |   RELU, CUSTOM
```

The source material draws the fields differently: funct7 at 31:25, then
"rs3" at 24:20 and "rs2" at 19:15. That drawing conflicts with its own
inline-assembly example, which uses the R4 form. This design follows the
R4 form.

Every register is an input operand, rd included. rd is read as the output
address, and no register is written back. The decoder (`fpga_insn_decoder`)
therefore gives the core four register reads per instruction: rd, rs1, rs2
and rs3.

### How an instruction executes

1. The instruction reaches Execute with all four operand values forwarded.
2. The core raises `acc_valid` with an `acc_cmd_t` holding the operation,
   funct7 and the four values.
3. `accel_dispatch` accepts the command while it is idle. It latches the
   operands, starts the selected unit and connects that unit to the shared
   DMA.
4. The instruction stays in Execute. Everything behind it stalls, and a bubble
   goes down the pipe, until the unit finishes.
5. The dispatcher then pulses `acc_done` and the instruction retires.
6. In the same cycle, the dispatcher pulses `dcache_inval`. The data cache is
   write-through and never holds dirty data, so after an accelerator has
   written memory, dropping all its lines is enough to make later loads see
   the results.
7. The dispatcher counts completed instructions per unit, busy cycles, array
   streaming cycles and rejected commands. Software reads these counters
   through the register block.

Only one unit runs at a time, and an assertion checks this. The instruction is
blocking. Overlapping CPU work with accelerator work is not modelled.

## Numbers and memory layout

- **Formats.** Activations are Q8.8 and weights Q12.4, both 16-bit two's
  complement.
- **Accumulation.** The product of the two formats is Q20.12. Accumulators are
  48 bits wide, the width of a DSP48 accumulator, so no sum overflows.
- **Result.** Each output is shifted right arithmetically by 4 and saturated to
  16 bits (`soc_pkg::sat_q88`). It is Q8.8 again.
- **Memory layout.** Tensors are packed two elements per 32-bit word. Element
  `2i` is in bits 15:0 and element `2i+1` in bits 31:16, so a tensor in memory
  is simply a little-endian `int16_t` array.

## The shared DMA

`dma_engine` moves streams of 16-bit elements between memory and whichever
unit is running. A command carries a direction, a byte address and an element
count.

- **Reads.** Reads are issued as AXI4 INCR bursts of up to 16 beats. Each word
  is split into two elements, which are handed out one per cycle.
- **Writes.** Writes collect two elements per word and send bursts of up to 16
  beats. An odd final element goes out with strobe `0011`, so the neighbouring
  element is not overwritten.
- **Completion.** `done` pulses once the last read beat has been consumed, or
  once the last write response has arrived.

The units are written as simple sequences of DMA commands: load, compute,
store. The exception is VCONV, which computes while its input is still
arriving.

## FPGA.VCONV: 4×4 output-stationary convolution

The unit computes the textbook loop nest with stride and zero padding:

```
out[h][w][co] = Σ_{kh,kw,ci} in[h·S+kh−P][w·S+kw−P][ci] · ker[kh][kw][ci][co]
```

- The input is stored H×W×C (HWC), the kernel as [kh][kw][ci][co] and the
  output as HWC.
- The configuration word rs3 is packed as:
  `[5:0] H, [11:6] W, [17:12] C_in, [23:18] C_out, [26:24] K, [28:27] S (0 means 1), [31:29] P`.
- The output size is `H_out = (H + 2P − K)/S + 1`, and `W_out` is computed the
  same way.

**Schedule.** The unit has local buffers of 8192 input, 4096 kernel and 8192
output elements.
1. It reads the whole kernel through the DMA.
2. It starts the input transfer and immediately begins computing. The output
   is walked in tiles of 4 consecutive output pixels × 4 output channels.

Each tile goes through these phases:

- **Clear (1 cycle).** The 16 accumulators (`systolic_os`) are cleared, and the
  four pixels' coordinates are worked out.
- **Wait (0 or more cycles).** The tile reads input rows up to
  `oh_last·S + K − P`, where `oh_last` is the output row of its last pixel. It
  waits until those rows have arrived. Early tiles therefore compute while the
  rest of the image is still being transferred.
- **Stream (R + 7 cycles, R = K·K·C_in).** Each cycle takes the next (kh, kw, ci)
  step.
  - Array row *i* receives the input value of pixel *i*, or zero where that
    pixel's window falls in the padding.
  - Array column *j* receives the kernel value for output channel `co0 + j`.
  - Skew registers delay row *i* by *i* cycles and column *j* by *j* cycles, so
    matching operands meet in PE (i, j).
  - The last products arrive 6 cycles after the last step.
- **Drain (4 cycles).** One array row, which is one output pixel, is rounded to
  Q8.8 and written to the output buffer each cycle.

When the last tile is done and the input transfer has finished, the output
buffer is written back in one DMA command.

While streaming, the array does 16 MACs per cycle. At 50 MHz that is the
0.8 GMAC/s peak quoted for the prototype. The `mac_cycles` counter counts the
stream cycles: `tiles × (K·K·C_in + 7)`, with
`tiles = ⌈H_out·W_out/4⌉ · ⌈C_out/4⌉`.

If a configuration does not fit the buffers, or is degenerate (K = 0, no
channels, or a kernel larger than the padded image), the unit raises `error`
and writes nothing.

**Partly built.** The prototype overlaps DMA with computation by triple
buffering. Here only the input transfer overlaps with computation. The
kernel load and the write-back stay serial, because the one shared DMA
carries one transfer at a time.

## FPGA.GEMM: 8×8 weight-stationary matrix multiply

The unit computes `C[M][N] = A[M][K] · B[K][N]`. All three matrices are
row-major. A holds activations (Q8.8), B holds weights (Q12.4), and C is
written as Q8.8.

**Banked buffers.** A and B are loaded whole into on-chip buffers of 4096
elements each. Each buffer is split into 8 banks so that every array row and
column has a bank of its own:
- bank *b* of A holds the columns `k ≡ b (mod 8)`;
- bank *b* of B holds the columns `n ≡ b (mod 8)`;
- the 48-bit accumulator buffer C is banked by `n mod 8` in the same way.

**Tile loop.** For every 8-column tile *nt* of B and every 8-row tile *kt* of
K, the unit runs these phases:

- **WLOAD (8 cycles).** One row of the 8×8 weight tile `B[kt·8+i][nt·8+j]` is
  written into the PEs (`systolic_ws`) per cycle.
- **STREAM (M + 15 cycles).** Array row *i* receives `A[m][kt·8+i]` in cycle
  `m + i`. Activations move right, and partial sums move down.
  - Column *j* delivers the finished dot product for row *m* in cycle
    `m + 8 + j`.
  - The result is written into `C[m][nt·8+j]` on the first K tile and added to
    it on later tiles.
  - Each bank of C has one write port, which is what lets all eight columns
    retire a result in the same cycle.

**Output.** Finally C is rounded to Q8.8 and streamed out through the DMA.

**Timing.**
- The array streams for `⌈N/8⌉ · ⌈K/8⌉ · (M + 15)` cycles.
- In the steady state it performs 64 MACs per cycle.
- Partial tiles are padded with zeros.

**Limits.** Sizes whose M·K, K·N or M·N exceed 4096 are rejected with `error`.

## FPGA.RELU: 16-lane activation

The unit processes the vector in chunks of 16 elements. For each chunk it runs
one DMA read, evaluates the 16 elements in 16 `act_lane` instances in one
cycle, and runs one DMA write. funct7[1:0] selects the function:

| Code | Function | Rule (Q8.8) |
|---|---|---|
| 0 | ReLU | `max(x, 0)` |
| 1 | ReLU6 | `min(max(x, 0), 0x0600)` |
| 2 | LeakyReLU | `x < 0 ? x >>> 3 : x` (slope 1/8) |
| 3 | GELU | 256-entry table on [−4, 4); `x` above, `0` below |

The GELU table is sampled every 1/32. Entry `i` is `round(256 · g · Φ(g))` with
`g = −4 + i/32`, where Φ is the standard normal distribution function. The
table is indexed by `(x + 1024) >> 3`. It is stored in `rtl/gelu_lut.hex`, which
every lane reads with `$readmemh`. Simulations must therefore be started from
the directory that contains `rtl/`.

## FPGA.CUSTOM: function-coded escape

funct7 selects one of up to 128 operations. Two are built. Both are operations
a MobileNet-style network needs between its matrix layers. Every other code
finishes at once and raises `error`, which the ERRORS register counts.

**Code 0: batch normalisation** in inference form:

```
y = sat16(((x · γ) >>> 8) + β)         x, γ, β in Q8.8
```

rs2 points to a two-word parameter block:
- word 0 is the element count;
- word 1 holds γ in bits 15:0 and β in bits 31:16.

The vector is processed in chunks of 16 elements. Each chunk is read, each
element is transformed as it arrives, and the chunk is written back. Running
it in place (rd = rs1) is safe.

**Code 1: depthwise convolution.** This is the spatial half of a depthwise
separable convolution. Every channel is filtered with its own K×K kernel:

```
out[h][w][c] = Σ_{kh,kw} in[h·S+kh−P][w·S+kw−P][c] · ker[kh][kw][c]
```

The pointwise half of the separable convolution is a 1×1 convolution, so it
runs as an FPGA.GEMM with one row per pixel.

The depthwise operation works as follows:
- **Parameter block.** rs2 points to it:
  - word 0 is a configuration word laid out like the VCONV one, with C in the
    C_in field and the C_out field unused;
  - the K·K·C kernel elements follow from the next word, ordered [kh][kw][c],
    in Q12.4.
- **Loading.** The unit reads the kernel into a 1024-element buffer and the
  whole input into a 4096-element buffer.
- **Computing.** A single multiply-accumulator computes the outputs in HWC
  order, K·K cycles each. Each result is rounded like VCONV's (>>> 4,
  saturate) and handed straight to one DMA write covering the whole output.
- **Cost.** This is a sequential engine, about K·K cycles per output element.
  Depthwise layers have few operations, and a systolic array could not use
  them well anyway: each product pairs one input channel with its own kernel,
  so they are not an outer product.

## The processor

`rv_core` is a classic 5-stage in-order RV32IM pipeline.

- **Forwarding.** Execute takes operands from the Memory stage (for non-loads)
  and from Writeback. The register file also writes through to Decode.
- **Load-use.** A load followed by a dependent instruction costs one bubble.
  The check covers all four source registers of an FPGA.* instruction.
- **Branches and jumps.** They resolve in Execute. A taken one flushes the two
  younger instructions. There is no prediction.
- **MUL/DIV.** They complete in one cycle in Execute. The RISC-V rules for
  division by zero and for overflow are followed.
- **Stalls.**
  - *Memory stall:* the stage in Memory waits for `dmem_ready` and sends
    bubbles to Writeback.
  - *Accelerator stall:* the FPGA.* instruction waits in Execute and sends
    bubbles to Memory.
  - While Execute is held, forwarded operand values are captured, because their
    producers keep moving.
- **Not modelled.** FENCE, ECALL and CSR instructions are no-ops, and there are
  no traps.

The pipeline registers are packed structs (`ifid_t`, `idex_t`, …), and the
hazard signals have short names (`load_use`, `mem_stall`, `acc_stall`,
`redirect`). This makes the core easy to follow in a waveform viewer.

## Memory system

- **icache.** 128 lines of 8 words. The arrays are read combinationally, so a
  hit returns in the cycle of the request. A miss fetches the line with one
  8-beat burst.
- **dcache.** Same geometry as the icache. Loads hit in the request cycle.
  - A load miss refills the line.
  - Stores are write-through and no-write-allocate: one single-beat AXI4 write
    with byte strobes, completed by its B response. A store also updates the
    line if it hits.
  - `inval` clears all valid bits.
- **axi_arbiter.** Connects three masters (I-cache, D-cache, DMA) to one
  slave. It grants whole transactions in round-robin order, one at a time, and
  adds one idle cycle per grant.
- **axi_bram.** A 64 KB AXI4 slave. It handles one burst at a time, giving
  reads priority, and transfers one beat per cycle. Reads are registered.
- **axil_master / accel_csr.** An uncached access to the 0xA000_0000 window
  becomes one AXI4-Lite transaction. The register block answers one cycle after
  the request is accepted.

| Offset | Register | |
|---|---|---|
| 0x00 | ID | `0x4E4E4131` |
| 0x04 | STATUS | bit 0 = overlay busy |
| 0x08–0x14 | VCONV / GEMM / RELU / CUSTOM counts | instructions completed |
| 0x18 | BUSY_CYCLES | cycles the overlay was busy |
| 0x1C | MAC_CYCLES | cycles the arrays spent streaming |
| 0x20 | ERRORS | rejected commands |
| 0x24 | SCRATCH | read/write, byte strobes honoured |

## Where this design departs from the prototype

- **Triple buffering in VCONV** is only approximated. The input transfer
  overlaps with the tiles, but the kernel load and the write-back are serial.
  This costs throughput, not correctness.
- **FPGA.CUSTOM** has batch normalisation and depthwise convolution. The
  source names these two and non-maximum suppression as examples, but
  describes none of them. Their operand layouts and function codes are this
  design's own. Non-maximum suppression is not built: nothing says what its
  boxes, scores or thresholds look like.
- **Instruction fields.** The standard R4 register layout is used in place of
  the drawn field table (see above). FPGA.CUSTOM has funct7 but no rs3.
- **Tile size.** The source quotes about 512 KB of input and 128 KB of weights
  per convolution tile. That cannot be held in 64 KB of on-chip memory. Here a
  tile is bounded by the unit buffers, and software must split larger layers.
- **Bus bandwidth.** The data bus is 32 bits at one beat per cycle: 200 MB/s at
  50 MHz. The prototype reports a higher figure measured on its DDR path, which
  is not modelled here.
- **GEMM array.** The array has 64 multiply-accumulate PEs. The source's
  resource table lists fewer DSP slices for it (48), so the prototype probably
  shares some multipliers. That is not reproduced.
- **Choices not specified by the source.** These are all this design's own:
  - the operand packing (configuration words, matrix layouts, RELU function
    codes, the batch-norm parameter block);
  - the cache write policy;
  - the register map;
  - the arbitration scheme;
  - the buffer depths (8192/4096/8192 for VCONV, 4096 per matrix for GEMM,
    4096 input and 1024 kernel elements for depthwise convolution).

## Capacity against the evaluated networks

The prototype was evaluated on four networks. Their parameter counts and
weight sizes at 16 bits are:

| Network | Parameters | Weights at 16 bits |
|---|---|---|
| MobileNet V2 | 3.5 M | 7 MB |
| ResNet-18 | 11.7 M | 23 MB |
| EfficientNet Lite | 4.3 M | 8.6 MB |
| YOLO Tiny | 8.9 M | 18 MB |

None of these fits in the 64 KB on-chip memory. Their usual input sizes
(224×224×3, or 416×416×3 for YOLO) also exceed the 63-pixel fields of the VCONV
configuration and its 8192-element input buffer.

With this RTL, such a network is executed layer by layer and tile by tile. The
software copies each tile into the BRAM and issues one FPGA.* instruction per
tile. The DDR3 memory that would hold the full model, and the path that would
feed it, lie outside the RTL.

## Verification

Each block has a self-checking testbench in `tb/`. It compares the block with a
reference model written in the testbench and ends by printing
`TB_RESULT checks=N failures=M`. A watchdog ends any run that hangs.

| Testbench | What it establishes |
|---|---|
| `tb_fpga_riscv_soc` | See the detailed description after this table. |
| `tb_soc_bottleneck` | A reduced MobileNet-V2 stem and inverted-residual block on an 8×8 map, run by the core: 3×3 stem convolution 4→8 (VCONV), 1×1 expand 8→16 (GEMM), batch norm, ReLU6, 3×3 depthwise (CUSTOM), ReLU6, 1×1 projection 16→8 (GEMM), and a residual add in a scalar loop. Every stage is checked bit-exactly, and the streaming-cycle counter is checked against the formulas. |
| `tb_soc_basic_block` | A reduced ResNet-style basic block on an 8×8×8 map, run by the core: two 3×3 VCONVs, each followed by batch norm, with ReLU after the first, then the shortcut add on the core, then a LeakyReLU as in YOLO-style detectors. Every stage is checked bit-exactly, and so is the streaming-cycle count. |
| `tb_rv_core` | Every ALU and M operation and their corner cases, forwarding, load-use, byte and half accesses, loops, JAL/JALR/AUIPC, and FPGA.* operand delivery, all under random memory wait states |
| `tb_fpga_insn_decoder` | Exhaustive funct3 coverage and random field checks |
| `tb_icache`, `tb_dcache` | Random traffic over 4× the cache size against a shadow memory; hit in zero wait cycles; one 8-beat burst per miss; no allocate on store; invalidate |
| `tb_axi_bram`, `tb_axi_arbiter` | Random bursts with strobes; one beat per cycle; RLAST; round-robin fairness under contention |
| `tb_axil_master`, `tb_accel_csr` | Random-latency AXI4-Lite slave; every register; AW/W ordering; read-only protection |
| `tb_dma_engine` | Burst splitting, odd tails, write guard words |
| `tb_vconv_unit`, `tb_gemm_unit` | Bit-exact results against a loop-nest reference for several shapes (padding, stride, partial tiles, saturation); array streaming cycles equal the formulas above; VCONV computes while its input is still arriving; oversize rejection |
| `tb_relu_unit`, `tb_custom_unit`, `tb_accel_dispatch` | All four activation functions (GELU within 1 LSB of the tanh form); batch norm; depthwise convolution over kernel sizes 1/3/5, strides 1–3 and paddings 0–2, plus rejected configurations; dispatcher handshake and counters |

`tb_fpga_riscv_soc` runs the full system at its default sizes:
- It runs a program from BRAM: a scalar loop, then GEMM 8×8×8, RELU, a
  4×4×4 VCONV with a 3×3 kernel and padding, batch norm, and register-block
  accesses.
- It checks every result bit-exactly.
- It requires each mechanism to occur: I-cache and D-cache refills,
  write-through stores, invalidation, load-use bubbles, branch flushes, memory
  and accelerator stalls, DMA read and write bursts, AXI4-Lite transfers and
  arbitration waits.

Run any testbench with Verilator 5 from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fpga_riscv_soc \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/soc_pkg.sv tb/rv_asm_pkg.sv tb/tb_fpga_riscv_soc.sv
./obj_dir/Vtb_fpga_riscv_soc
```

`tb/rv_asm_pkg.sv` is a small assembler written as SystemVerilog functions. It
is used to write test programs directly in the testbenches. To try a new
program, edit the `emit(...)` sequence in `tb_fpga_riscv_soc`. Memory contents
can be set and inspected through `dut.u_mem.mem[]`.
