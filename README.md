# J3DAI digital system: a 768-MAC DNN accelerator for a 3D-stacked image sensor

An image sensor built as three stacked dies (pixels on top, mixed-signal readout in the
middle, logic at the bottom) can run a small neural network next to the pixels. Then only
results leave the chip. This RTL models the digital part of such a sensor:

- a DNN accelerator of **6 neural clusters × 16 computing blocks × 8 processing elements
  = 768 MACs per cycle** (200 MHz target);
- a 5 MB global (L2) memory, split between the bottom die (3 MB) and the middle die (2 MB);
- a row-wide data mover (the DMPA) that moves 1024 bits per cycle between the L2 and the
  cluster memories;
- the host-side system around them: a 64-bit system bus, instruction and data SRAMs,
  system registers and a simple DMA.

The main idea is **SIMD at two levels with wide vertical data movement**. All 128 PEs of a
cluster execute the same instruction, each on its own bytes. Memory is organised in
*columns*: each computing block has its own local memory, and L2 is tiled in 16 columns of
64 bits that line up with the 16 computing blocks. A transfer therefore moves one row of all
16 columns at once. The same row can be multicast into several clusters in one cycle.

The host RISC-V CPU, the pixel array, the analog readout, the ISP and the camera link are
not modelled. The CPU's bus is a top-level port, and the ISP's pixel stream is a
valid/ready port.

## Hierarchy

```
j3dai_top
├── sys_interconnect      2 masters (CPU port, DMA) -> 6 slaves, one request per cycle
├── sram_bus  u_isram     256 KB instruction SRAM
├── sram_bus  u_dsram     256 KB data SRAM
├── l2_memory             16 columns × (24576 bottom + 16384 middle rows) × 64 bit
│   └── cconnect ×16, mem_bank ×32
├── dnn_accelerator
│   ├── local_interconnect   host window -> 6 clusters, DMPA, broadcast window
│   ├── dmpa                 row mover L2 / clusters / ISP stream
│   └── neural_cluster ×6
│       ├── cluster_ctrl     fetch/decode, imem (1024 × 64 bit), aiu, agu ×3
│       ├── cluster_router + multicast_reg
│       └── ncb ×16          computing block
│           ├── cconnect, mem_bank ×4 (4 × 1024 × 64 bit = 32 KB)
│           ├── local_router
│           └── pe ×8        (each with an nlu)
├── sys_regs
└── dma
```

`j3dai_pkg` holds the sizes, the bus structs, the address map, the instruction fields and
the control structs that the control unit broadcasts to the blocks.

## The processing element and the computing block

A PE multiplies two 8-bit operands. Each operand can be signed or unsigned, so each is
widened to 9 bits and the multiplier is 9 × 9 bits. The PE has a 32-bit accumulator and an
ALU that can do MAC, MUL, ADD, MAX, MIN, CLR, load A, load accumulator from the neighbour,
and add the neighbour's accumulator. When `clr` is set (on the first iteration of a loop),
MAC and ADD start from zero instead of the accumulator, so a new dot product needs no extra
cycle.

The non-linear unit (`nlu`) turns the accumulator into an 8-bit result:

1. activation: linear, ReLU, leaky ReLU (slope 1/8), or hard tanh (clamped to ±2^shift,
   output in Q1.7);
2. an arithmetic right shift with rounding (half up);
3. saturation to uint8 or int8.

This piecewise-linear set is the function approximation used here.

A computing block (`ncb`) has four 8 KB banks. One 64-bit word holds one byte for each of
the 8 PEs. The `local_router` picks each PE's operands:

- **Operand A:** the block's own read word, shifted one byte left or right, or the same byte
  broadcast to all 8 PEs, or padding with 0x00 or 0xFF. At a shift, the byte that moves in
  comes from the neighbouring block or is padding.
- **Operand B:** one byte of the cluster multicast word (the weight) for all PEs, or the
  PE's own lane of that word, or the block's own word.

The 32-bit accumulators form a second link. PE *i* sees the accumulator of PE *i+1*, and
PE 7 sees PE 0 of the next block. Together, the blocks of a cluster make a daisy chain for
8-bit neighbour bytes and for 32-bit partial sums, for reductions and shifts across the
whole cluster.

## The cluster: one controller, 16 blocks

`cluster_ctrl` fetches 64-bit instructions from its own 8 KB instruction memory. A fetch and
decode takes two cycles. Configuration instructions take effect then. A data instruction
runs a hardware loop: the **AIU** (automatic index unit) counts a three-level index
(n0 × n1 × n2 iterations) at one iteration per cycle. Three **AGUs** turn the index into
addresses: `base + i0·s0 + i1·s1 + i2·s2` (mod 4096). AGU A gives the operand read address,
AGU M the multicast source, and AGU W the store address. Loop counts return to 1 after each
data instruction.

Instruction format: opcode in bits [63:58].

| opcode | name  | fields |
|---|---|---|
| 0 | NOP   | |
| 1 | HALT  | sets STATUS.done and the interrupt |
| 2 | SETAGU| [57:56] agu (0 A, 1 M, 2 W), [47:36] base, [35:24] s0, [23:12] s1, [11:0] s2 |
| 3 | SETLP | [11:0] n0, [23:12] n1, [35:24] n2 (0 means 1) |
| 4 | SETNL | [2:0] mode (0 linear, 1 ReLU, 2 leaky, 3 hard tanh), [8:4] shift, [12] signed output |
| 5 | COMP  | [18:0] lane control (op, operand A/B source, fill, bytes, signedness); [19] operand-B byte = AIU index 0; [20] clear on first iteration |
| 6 | MCAST | [3:0] source block a, [7:4] source block b, [15:8] byte mask (1 = take b), [16] source a = AIU index 0 |
| 7 | STORE | write each PE's NLU output to AGU W's address in every block |

The data path has two stages:

1. **Issue:** every block reads its bank at the operand address.
2. **Execute:** the router feeds the PEs (COMP), or the cluster router builds the 64-bit
   multicast word from one or two blocks' words and loads the multicast register (MCAST),
   or the PE results are written back (STORE).

A local address is 12 bits: [11:10] bank, [9:0] word.

Host registers of a cluster (per-cluster window, offset 0x0):

| offset | register | |
|---|---|---|
| 0x00 | CTRL | bit0 start (at START_PC), bit1 interrupt enable |
| 0x08 | STATUS | bit0 busy, bit1 done (write 1 to clear) |
| 0x10 | START_PC | |
| 0x18 | CYCLES | cycles of the last run |
| 0x20 | STALLS | cycles the last run was stalled |
| 0x28 | PC | |

The instruction memory is at offset 0x10000 and the L1 at offset 0x80000. In the L1 window,
the block number is in bits [18:15], the bank in [14:13] and the word in [12:3]. The host
can reach both only while the cluster is idle.

## Sharing a column: CCONNECT

Each computing block, and each L2 column, has a CCONNECT. It shares the column's banks
between two requests per cycle: the one local request and the vertical (DMPA) request.
Requests to different banks proceed in parallel. On a bank conflict the rule is:

1. a **STORE write-back** of the running program wins over vertical traffic; the DMPA
   waits;
2. **vertical traffic** wins over all other local requests (operand reads, host access);
   the program stalls.

So there are two stall mechanisms:

- **Cluster stall:** the issue read is refused. The whole cluster holds that iteration.
  STALLS counts it, and CYCLES grows by the same amount.
- **DMPA write stall:** a destination block is storing to the same bank. The DMPA holds its
  row in a one-row buffer and stops reading until every destination is free.

The refusal signals never depend on the other side's request. Without that rule, the host
bus, the block's local request mux, the DMPA and the vertical request would form a
combinational loop through the whole chip. For the same reason, the bank of the high-priority
request comes to CCONNECT on its own port (`hi_bank`). An assertion checks that no bank is
ever granted twice.

Programs can avoid both stalls by placing DMPA traffic and their own traffic in different
banks. The end-to-end test triggers both on purpose.

## DMPA: moving rows

One DMPA row is the same local address in all 16 blocks of a cluster, or one row of the 16
L2 columns: 1024 bits. The source is the L2, one cluster, or the ISP stream. The destination
is any set of L2 and clusters, so one transfer can multicast weights into all six clusters.

Reads have one cycle of latency and are pipelined, so **N rows take N+1 cycles** when nothing
stalls (8 rows take 9 cycles; the tests check this). An ISP row is 16 beats of 64 bits.

Registers (DMPA window):

| offset | register | |
|---|---|---|
| 0x00 | CTRL | bit0 start, bit1 interrupt enable, [7:4] source (0 L2, c+1 cluster c, 15 ISP), [23:8] destination mask (bit0 L2, bit c+1 cluster c) |
| 0x08 / 0x10 | SRC_ROW / DST_ROW | |
| 0x18 | NROWS | |
| 0x20 | STATUS | bit0 busy, bit1 done |
| 0x28 / 0x30 | CYCLES / STALLS | |

At 1024 bits per cycle, 1 MB takes 8192 cycles (41 µs at 200 MHz).

## L2 across two dies

L2 rows 0–24575 are on the bottom die and rows 24576–40959 on the middle die. Each column
has one bank per die, joined by the column's CCONNECT. In hardware the two dies are joined by
the 2048 data TSVs; here that is a bank select. Vertical traffic can use one partition while
the host uses the other. If both want the same partition, the DMPA wins and the host bus
waits.

On the bus side, 64-bit word *w* of L2 is column *w* mod 16, row *w* / 16. This makes a DMPA
row 16 consecutive bus words.

## System side

All bus slaves use one simple protocol (`bus_req_t`, `bus_rsp_t`):

- A request is held until `ready`.
- Every accepted request gets `rvalid` (with read data) exactly one cycle later.
- `ready` never depends on `valid`.

`sys_interconnect` gives the CPU port priority over the DMA. Unmapped addresses read as zero.

| base | slave |
|---|---|
| 0x0000_0000 | instruction SRAM (256 KB) |
| 0x0004_0000 | data SRAM (256 KB) |
| 0x0100_0000 | L2 (5 MB) |
| 0x0200_0000 | DNN accelerator: cluster c at + c·1 MB, DMPA at + 7 MB, broadcast at + 15 MB |
| 0x0300_0000 | system registers: ID "J3DA", SCRATCH, IRQ_STATUS, IRQ_MASK |
| 0x0300_1000 | DMA: SRC, DST, LEN (in words), CTRL, STATUS |

A write to the broadcast window goes to all six clusters. It loads one program into all of
them, or starts them all together. Issue a broadcast start only while every cluster is idle.
Broadcast reads come from cluster 0. `irq` is the OR of the unmasked sources: six cluster
done signals, the DMPA, and the DMA.

## How far this follows the source design

Taken from the source design:

- the 6 × 16 × 8 organisation and the 768 MAC/cycle;
- the 9-bit multiplier and 32-bit accumulator, with an ALU and a non-linear unit per PE;
- four memory banks per computing block and 512 KB of L1 per cluster;
- the local router's functions: neighbour access, multicast, shift, 0/1 padding, 8- and
  32-bit daisy chains;
- the cluster router with its multicast register;
- the AIU hardware loops and the AGUs;
- one control unit per cluster;
- the DMPA controlling the CCONNECTs at 1024 bits per cycle;
- the 16 × 64-bit L2 columns and the 3 MB + 2 MB split;
- the 64-bit system bus and the 256 KB + 256 KB host SRAMs.

This design's own choices:

- the instruction set and its encoding;
- the two-stage pipeline and the two-cycle fetch;
- the arbitration priorities;
- the non-linear function set;
- the bus protocol, the register maps and the address map;
- the DMA;
- the sizes of the instruction memory (8 KB per cluster) and the one-row DMPA buffer.

Known differences:

- The source quotes "1 MB in 1000 cycles" for the DMPA. That does not match its own
  1024-bit width; this design follows the width.
- The host CPU is not included; its bus is a port.
- The ISP is reduced to a 64-bit valid/ready stream.
- The memories are plain arrays, not SRAM macros.
- The host reaches a cluster's L1 and instruction memory only while that cluster is idle.
  The source design exposes all memories to the system. Its own arbitration (host requests
  rank last) would allow access during a run, but this design does not use that.

## Workloads

The source design reports MobileNetV1 and V2 (256×192 input, 557 and 289 MMAC) and an FPN
segmentation network (512×384, 877 MMAC). At 768 MAC/cycle and 200 MHz, the ideal times are
3.6 ms, 1.9 ms and 5.7 ms. The reported latencies (4.96, 4.04 and 7.43 ms) correspond to about
73 %, 47 % and 77 % of peak. The weights (a few MB at 8 bits) fit in the 5 MB L2. The largest
feature-map pairs (around 1–1.4 MB) fit in the 3 MB of L1. No compiled network is included:
the networks would need a compiler for the instruction set above.

`tb/tb_dwconv3x3.sv` runs the layer type that dominates MobileNet on one full cluster. It is a
depthwise 3×3 convolution over a 128-column feature map, with one column per PE. It works as
follows:

- Each output row takes three MAC loops of three iterations, one loop per kernel column.
- Each loop uses the operand shifted right, unshifted, or shifted left.
- At a block boundary the shifted-in byte comes over the daisy chain.
- At the image edges the chain ends supply the zero padding.
- The AIU selects the weight byte from the multicast register.

The test compares all 1024 outputs with a reference model. The pointwise (1×1) layers
are dot products like those in `tb_neural_cluster` and `tb_j3dai_top`.

## Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv`. The top-level testbench is
`tb/tb_j3dai_top.sv`. `tb/j3dai_asm_pkg.sv` has functions that encode instructions. Every
testbench prints `TB_RESULT checks=N failures=M` and stops itself through a watchdog.

With plain Verilator, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/j3dai_pkg.sv tb/j3dai_asm_pkg.sv \
          tb/tb_j3dai_top.sv --top-module tb_j3dai_top -Mdir obj && obj/Vtb_j3dai_top
```

`tb_j3dai_top` runs the chip at full size, with no parameter overrides. It does the
following:

1. fills L2 through the bus;
2. moves activations into each cluster and multicasts a weight row to all six;
3. loads and starts one program in all clusters through the broadcast window;
4. streams ISP rows into cluster 0 during its MAC loop (cluster stall);
5. multicasts 64 rows into a bank the STORE loop is writing (DMPA stall);
6. waits for the interrupt;
7. moves the results into the middle-die L2 and copies them to the data SRAM by DMA;
8. checks every byte against a reference model.

It counts each of these mechanisms and fails if one never happened. It also checks that the
MAC count is 6·16·8·32, that some cycles ran all 768 MACs, and that CYCLES equals 458 plus
STALLS for each cluster. The full run takes about 10 s of compile and well under a second of
simulation.
