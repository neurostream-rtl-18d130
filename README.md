# NeuroCluster: streaming FP32 convolution engines next to DRAM

Deep convolutional networks spend nearly all their time in multiply-accumulate
loops over small 3D windows, and modern ones carry hundreds of megabytes of
coefficients and activations. NeuroCluster puts the compute where that data
lives: on the logic die of a 3D-stacked memory cube, behind the same
interconnect that serves the DRAM vaults. Instead of wide SIMD units with deep
caches, it uses many small, simple streaming coprocessors ("NeuroStreams",
NSTs). Each NST walks a 3-level nested loop in hardware, fetches two FP32
operands per cycle from a local scratchpad, and does one multiply-accumulate
per cycle. General-purpose RISC-V cores only set up the loops and move tiles
between DRAM and the scratchpads with DMA.

This repository holds synthesizable SystemVerilog for the NeuroCluster logic.
The default configuration is:

| item | default |
|---|---|
| clusters | 16 |
| NSTs per cluster | 8 (128 in total, 2 FLOP/cycle each: 256 GFLOPS at 1 GHz) |
| PE ports per cluster | 4 (the cores themselves are outside the RTL) |
| scratchpad (SPM) per cluster | 128 kB, 32 word-interleaved banks of 1024 x 32 bit |
| cluster interconnect | 28 masters x 32 banks, single-cycle, round-robin per bank |
| DMA per cluster | up to 32 AXI transactions in flight, 8-beat bursts of 256 bit |
| global interconnect | 16 cluster masters onto 3 AXI ports of 256 bit (32 GB/s each at 1 GHz) |

## How a layer runs

A layer is cut into 4D tiles (a block of rows x columns x input channels, plus
the filters for some output channels) small enough to fit a cluster's SPM.
For each tile, one core of the cluster:

1. programs the DMA to copy the input tile and the filters from DRAM into the SPM;
2. hands output pixels to the eight NSTs: for each pixel it loads a start
   address into each of the two address generators and issues `STREAM_MAC`.
   The NST runs the whole KY x KX x C window and writes the sum back into the
   SPM on its own;
3. issues `STREAM_MAX` with constant 0 over the output tile (ReLU), then
   `STREAM_MAXPL` per pooling window;
4. programs the DMA to write the result tile back to DRAM.

No synchronisation between clusters is needed: every cluster works on its own
tiles, and the only shared resources are the AXI ports and the DRAM.

## The NeuroStream coprocessor

`neurostream` is built from four parts:

* **main controller** (`nst_ctrl`): register interface, command FIFO and
  command state machine;
* **hardware loops** (`nst_hwl`): three nested counters;
* **two address generators** (`nst_agu`): AGU0 drives SPM port 0, AGU1 drives port 1;
* **streaming FPU** (`nst_fpu`): operand FIFOs, one FP32 multiplier, adder
  and comparator (`fp32_mul`, `fp32_add`, `fp32_cmp`), and the single
  accumulator ACC.

### Registers and commands

Each NST has four 32-bit registers. NST *n* sits at `0x1020_4800 + 16*n`:

| offset | name | access |
|---|---|---|
| 0x0 | CMD | write `{opcode[31:24], arg0[23:0]}`: pushes `{opcode, arg0, CFG}` into the command FIFO |
| 0x4 | CFG | holds arg1 of the next command |
| 0x8 | ACC | reads the accumulator |
| 0xC | Status | bit 0 busy, bits 15:8 commands queued |

A store to CMD while the 4-entry command FIFO is full is not granted. The
core therefore stalls until there is room. This is how a core can queue
work ahead of the NSTs without polling.

| opcode | command | effect |
|---|---|---|
| 0x01 | `MEM_LDC` | configuration register `arg0` <= `arg1` (see below) |
| 0x02 | `MEM_LDA` | ACC <= SPM[arg1] |
| 0x03 | `MEM_STA` | SPM[arg1] <= ACC |
| 0x10 | `STREAM_MAC` | ACC += SPM[AGU0] * SPM[AGU1] over the loop nest |
| 0x11 | `STREAM_SUM` | ACC += SPM[AGU0] |
| 0x12 | `STREAM_MAX` | SPM[AGU1] <= max(SPM[AGU0], arg1), element by element (ReLU with arg1 = 0) |
| 0x13 | `STREAM_MIN` | SPM[AGU1] <= min(SPM[AGU0], arg1) |
| 0x14 | `STREAM_SCALE` | SPM[AGU1] <= SPM[AGU0] * arg1 |
| 0x15 | `STREAM_SHIFT` | SPM[AGU1] <= SPM[AGU0] + arg1 |
| 0x16 | `STREAM_MAXPL` | ACC = max of SPM[AGU0] over the loop nest (max pooling) |
| 0x20 | `SINGLE_ADD` | ACC <= ACC + arg1 |
| 0x21 | `SINGLE_MUL` | ACC <= ACC * arg1 |

`arg1` is an FP32 constant for element-wise streams. The reductions (MAC,
SUM, MAXPL) start from ACC = 0 (or -inf for MAXPL). Two arg0 flags change
this:

* bit 1 (`KEEP`) continues from the current ACC, so a sum can span several
  commands;
* bit 0 (`WB`) stores the final ACC to SPM word `arg1`.

SPM addresses seen by the NST are word indices into the cluster SPM.

The configuration registers written by `MEM_LDC` are:

* indices 0..3: AGU0 A, S0, S1, S2;
* indices 4..7: the same for AGU1;
* indices 8..10: the loop bounds E0, E1, E2.

### Loops and address generation

The hardware loop counts i (0..E0-1) inside j (0..E1-1) inside k (0..E2-1).
Every iteration raises EN1. EN2 is also raised when i wraps, and EN3 when
both i and j wrap. Each AGU adds the enabled steps to its address at once:

    A <= A + (EN1 ? S0 : 0) + (EN2 ? S1 : 0) + (EN3 ? S2 : 0)

Because the steps add up, S1 and S2 are "correction" strides: they are added
on top of the inner step. Take a convolution window of KX x KY pixels with C
channels, on an input tile of width W (pixels stored row-major, channels
innermost). With E0 = C, E1 = KX and E2 = KY, the steps are:

    S0 = 1,  S1 = C*(sx - 1),  S2 = C*(W*sy - sx*KX)

Here sx and sy are the strides (1 for a dense convolution). The filter side
uses S0 = 1 and S1 = S2 = 0. For 2x2 pooling over an output plane of width
Wo: E0 = E1 = 2, S0 = 1, S1 = Wo - 2.

### Data flow inside an NST

The controller and the FPU are decoupled by FIFOs, so SPM latency and bank
conflicts become back-pressure rather than errors:

* For every loop iteration, the controller issues the SPM reads the command
  needs. That is two reads for MAC, one for the others, on the two ports in
  parallel. It pushes one token into the FPU's command FIFO.
* A read is only issued if its operand FIFO has room for it, counting reads
  still in flight. A refused read (bank conflict) is simply retried; the
  other port is tracked separately.
* The FPU fires a token when its operands are at the FIFO heads. A MAC
  completes in the cycle it fires. The multiply and the add are rounded
  separately, as with two separate IEEE units. A chain of MACs therefore
  runs at one per cycle.
* Element results go through an output FIFO. They are written back on
  port 1, to the address that AGU1 produced for the same iteration (kept in
  a write-address FIFO). Write-backs have priority over new reads on port 1.
* A command is complete only when all its reads have returned and all its
  results are written. Only then does the next command start, so a command
  can safely read what the previous one wrote.

With no conflicts, a `STREAM_MAC` of N iterations takes about N + 8 cycles
from issue to write-back.

### Floating point

`fp32_add` and `fp32_mul` are single-cycle IEEE-754 binary32 units with
round-to-nearest-even. Subnormal inputs and results are flushed to zero, and
any NaN input gives the quiet NaN `0x7FC00000`. `fp32_cmp` orders values
through an order-preserving integer key, with -0 < +0.

## The cluster

`nc_cluster` connects the following to the SPM banks through
`cluster_interconnect`:

* eight NSTs, with two master ports each;
* the data ports of four PEs;
* the DMA engine, with eight 32-bit ports so that one 256-bit AXI beat per
  cycle can enter or leave the SPM.

### Scratchpad and interconnect

Consecutive 32-bit words go to consecutive banks: bank = word mod 32, row =
word / 32. With 32 banks for 16 NST ports (a banking factor of 2), streams
that walk memory with unit stride rarely collide. Each bank has its own
round-robin arbiter. A request is granted in the cycle it is made, and read
data follows one cycle later. A refused master keeps its request up and is
served within at most 27 cycles. The cluster reports the number of refused
requests per cycle (`spm_conflict_o`).

### Memory map seen by a PE

| address | target |
|---|---|
| `0x1000_0000` .. `+128 kB` | SPM, through the PE's own interconnect port |
| `0x1020_0400` | DMA: external address, SPM address, length (bytes), command/status |
| `0x1020_4800 + 16*n` | NST n registers |

All peripheral registers sit on one bus shared round-robin by the four PEs
(`pe_xbar`). Reads of unmapped peripheral addresses return 0.

### DMA

A store to the DMA command register starts a transfer:

* bit 0 = 0: DRAM to SPM;
* bit 0 = 1: SPM to DRAM.

Reading the command register returns the status: bit 0 busy, bits 13:8
transactions in flight. The DMA rules are:

* **Read transfers.** The transfer is split into 8-beat bursts. Each burst
  has its own ID (up to 32 in flight), and an ID table remembers where its
  data goes in the SPM. A beat is accepted only when all eight of its words
  have won their banks, so SPM conflicts throttle the AXI read channel.
* **Write transfers.** These gather one beat at a time from the SPM. Up to
  32 write responses can be outstanding.
* **Limits.** External addresses must be 32-byte aligned. SPM addresses and
  lengths must be word multiples. Addresses are physical.

## Global interconnect and top level

`global_interconnect` attaches cluster *c* to AXI port *c* mod 3. On each
port, read and write address requests are arbitrated round-robin. The write
data channel stays with the cluster that won the write address until its
last beat. The cluster number travels in the upper four bits of the 9-bit
AXI ID, and read data and write responses are routed back by it. The bits
are removed again on the cluster side.

`neurocluster` is the top. It instantiates 16 clusters and the global
interconnect. Its ports are:

* the data ports of the 64 PEs (`pe_req_i` / `pe_rsp_o`, indexed
  [cluster][PE]);
* the three AXI ports toward the memory cube's main interconnect
  (`smc_req_o` / `smc_rsp_i`);
* status outputs: NST busy, DMA busy, DMA transactions in flight, and SPM
  conflicts per cluster.

The request/response bundles (`mem_req_t`, `mem_rsp_t`, `axi_req_t`,
`axi_rsp_t`) are defined in `nc_pkg`. The AXI subset has only the address,
ID, length, data, strobe and last fields, with incrementing bursts of 32-byte
beats.

## What is not in the RTL

The following parts are outside the RTL:

* The RISC-V cores, with their instruction caches, MMU/TLB and
  synchronisation hardware. Their data ports are top-level ports.
* The memory cube's main interconnect, vault controllers, DRAM, serial links
  and TSVs. The AXI ports are top-level ports.

The testbenches play both sides: the cores through bus tasks, and the memory
through a behavioural AXI memory model (`tb/dram_model.sv`, 20-cycle
latency).

Several parts of this RTL are its own choices rather than parts of the
original architecture:

* the command encoding and opcodes;
* the write-back and keep flags;
* the configuration register numbering;
* the DMA register map;
* the PE peripheral bus;
* the static port mapping of the global interconnect;
* all FIFO depths (4).

The original NST has more commands than the twelve implemented here,
including support for weight updates in training. Those are not built.

There is a point where the published convolution example and its loop
pseudo-code disagree:

* With the cumulative AGU rule above, the outermost step that walks a window
  is `C*(W*sy - sx*KX)`. The published step table has an extra `+1` in it.
* The same example loads the kernel address into the AGU whose steps walk
  the input.

The RTL keeps the cumulative rule. The test programs use AGU0 for the input,
AGU1 for the filters, and the step without the `+1`.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. The floating-point reference functions
used by the testbenches are in `tb/fp_ref_pkg.sv`. For example:

    verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
      rtl/nc_pkg.sv tb/fp_ref_pkg.sv tb/dram_model.sv \
      $(ls rtl/*.sv | grep -v nc_pkg) tb/tb_neurocluster.sv \
      --top tb_neurocluster -o sim -j 8
    ./obj_dir/sim

| testbench | what it exercises |
|---|---|
| `tb_fp32_add`, `tb_fp32_mul`, `tb_fp32_cmp` | 20k random and corner-case operands against a reference model |
| `tb_nst_fifo`, `tb_nst_hwl`, `tb_nst_agu` | building blocks against software models; includes a 3x3x4 convolution window walk |
| `tb_nst_fpu` | 3000 random tokens with random operand gaps and back-pressure; 64 back-to-back MACs in 65 cycles |
| `tb_neurostream` | every command, a strided convolution, ReLU and pooling through the register interface, with injected SPM conflicts; MAC rate check |
| `tb_spm_bank`, `tb_cluster_interconnect` | bank model; 28 masters on 32 banks with routing, conflict and starvation checks |
| `tb_dma_engine` | random transfers both ways with SPM conflicts; 8 kB in 282 cycles with 31 bursts in flight |
| `tb_global_interconnect` | 16 AXI masters on 3 ports: routing, IDs, write locking, contention |
| `tb_nc_cluster` | one cluster running a convolution + ReLU + pooling tile from DRAM and back |
| `tb_neurocluster` | the full 16-cluster design at default size, each cluster on its own tile in parallel |

The full-size test, `tb_neurocluster`, simulates in about a second after a
build of a few minutes. It checks the DRAM result of every cluster against a
reference. It also requires that each of these happened at least once:

* SPM bank conflicts;
* a core stalled on a full NST command FIFO;
* several DMA bursts in flight;
* clusters waiting for a shared AXI port;
* one write burst per cluster.

In that test, the 1152 MACs of one cluster's tile take about 430 cycles on
its eight NSTs, including command issue by the cores.

The full top synthesizes slowly because of its size (16 x 128 kB of SPM
arrays and 128 NSTs). Every block also synthesizes on its own. Verilator
reports "circular logic" on the struct arrays of the cluster. This is
explained in `nc_cluster.sv`: no bit depends on itself.
