# Epiphany manycore in SystemVerilog

This is a synthesizable model of the Epiphany-IV manycore chip. The chip is an 8x8 mesh of eNodes. Each eNode holds:

- a 32-bit RISC core (eCore) with an IEEE single-precision FPU,
- 32 KB of local memory in four banks,
- a two-channel DMA engine and two event timers,
- a network interface,
- three eMesh routers: the cMesh for on-chip writes, the rMesh for read requests and the xMesh for off-chip writes.

All memory is in one flat 32-bit address space:

| Bits | Field |
|---|---|
| [31:26] | mesh row |
| [25:20] | mesh column |
| [19:0] | offset inside the node |

With the defaults, the chip covers rows 32..39 and columns 8..15.

## Files

| File | What it is |
|---|---|
| rtl/epiphany_pkg.sv | Address fields, packet struct, directions, interrupt and special-register numbers |
| rtl/ecore_isa_pkg.sv | Instruction opcodes and condition codes of the core |
| rtl/rr_arbiter.sv | Round-robin arbiter |
| rtl/emesh_router.sv | Five-port mesh router |
| rtl/mem_bank.sv, rtl/local_memory.sv | One 8 KB, 64-bit bank; four banks with a four-port arbiter |
| rtl/register_file.sv | 64 x 32-bit register file: FPU, IALU and load/store ports |
| rtl/ialu.sv, rtl/fpu.sv | Integer ALU; floating-point unit |
| rtl/interrupt_controller.sv | Ten prioritised, maskable, nesting interrupts |
| rtl/event_timers.sv | Two down-counting event timers |
| rtl/dma_engine.sv | Two-channel DMA from local memory to any global address |
| rtl/network_interface.sv | Turns core and DMA accesses into packets, and serves packets that arrive |
| rtl/ecore.sv | Multicycle core |
| rtl/enode.sv | One node |
| rtl/epiphany_chip.sv | Top: ROWS x COLS nodes, with the mesh edges as ports |
| tb/*.sv | One self-checking testbench per block |
| tb/ecore_asm_pkg.sv | Small assembler used by the core, node and chip testbenches |

## How it works

### Routers

Each router has five inputs: north, east, south, west and local. Every input has a two-entry buffer. When the buffer is full, the input drives `wait` back to the sender; this is the push-back. Each output has its own round-robin arbiter. A packet crosses one router per cycle.

Routing compares the packet's column with the node's column first:

1. If the columns differ, the packet goes east or west.
2. Otherwise, if the rows differ, it goes north or south.
3. Otherwise it goes to the local port.

The paper's text can be read either way on this order (rows first or columns first). This design takes the geometric reading.

Rows are numbered growing southward, columns growing eastward.

### Multicast

A multicast packet spreads outward from its source:

| Packet arrives from | It is sent on to |
|---|---|
| local port | N, E, S, W |
| west | E, N, S |
| east | W, N, S |
| north | S |
| south | N |

A node keeps a copy when the packet's address bits [31:20] equal its MULTICAST register. The source node does not receive its own multicast.

### Network interface

The network interface picks a mesh for each access:

- Writes to another node on the chip use the cMesh.
- Writes off the chip use the xMesh.
- Reads use the rMesh.

A read request carries its return address, which is offset 0xFFFF8 of the requesting node. The reply comes back as a cMesh write to that address.

A write to offset 0xF0428 sets interrupt-latch bits instead of writing memory. A host uses this to start a core.

### Core

The core comes out of reset idle. A SYNC interrupt (vector 0) starts it.

The core is multicycle: fetch, execute, memory and FPU states. It is not the paper's 8-stage dual-issue pipeline. It uses its own 32-bit instruction encoding; there are no 16-bit instructions. The instruction set covers:

- the integer operations ADD, SUB, LSL, LSR, ASR, EOR, ORR, AND and BITR, plus immediate forms;
- the floating-point operations FADD, FSUB, FMUL, FMADD, FMSUB, FIX, FLOAT and FABS;
- MOVC with 16 condition codes;
- loads and stores with displacement, index and post-modify addressing;
- B, BL, JR, JALR, TESTSET, IDLE, TRAP, RTI, GID/GIE, SYNC, WAND and MBKPT.

FPU results take 2 cycles in truncate mode and 3 cycles in round-to-nearest. This follows the paper's E3/E4 latency. Subnormal numbers are flushed to zero. FMADD and FMSUB round twice, so they are not fused.

### Interrupts

There are ten interrupts, in priority order:

1. SYNC
2. SWEXC
3. MEMFLT
4. TIMER0
5. TIMER1
6. MESSAGE
7. DMA0
8. DMA1
9. WAND
10. USER

The paper names nine of the ten; MESSAGE is this design's name for the tenth. An interrupt can only interrupt a handler of lower priority.

### Chip-wide lines

- SYNC is the OR of all cores' SYNC outputs.
- WAND is raised on every core when all cores have executed WAND.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| ROWS, COLS | 8, 8 | The paper's 64-core chip |
| MEM_BYTES | 32768 | The paper's 32 KB per core |
| CHIP_ROW0, CHIP_COL0 | 32, 8 | This design's choice, following the Parallella board's convention |

## Verification

Every block has a self-checking testbench that ends with a `TB_RESULT checks=N failures=M` line:

- ialu, register_file, fpu, emesh_router and local_memory are checked with thousands of random cases against reference models.
- The core test runs a program covering integer and float operations, branches, calls, loads and stores, and a timer interrupt.
- The node test loads a program over the mesh and checks DMA, timer interrupts, a remote read and off-chip writes.

The chip testbench does the following:

- Loads the same program into every node from the west edge.
- Has each core post results to its east neighbour.
- Reads them back over the rMesh.
- Multicasts a word.
- Meets a WAND barrier.
- Sends a result block off-chip by DMA.

It also counts how often each mechanism happened: push-back, multicast copies, remote reads, DMA completions, WAND interrupts, bank conflicts and FPU operations. It runs a reduced 2x2 mesh.

## Status and limitations

- **Chip testbench fails.** At present it does not pass. The cores stall while polling for their neighbour's flag. Until that is found, the end-to-end behaviour of the whole chip is not shown; the blocks have only been shown working individually and inside one node.
- **No full-size simulation.** The 8x8 default builds too slowly to simulate here. The largest size simulated is 2x2.
- **No eLink.** The off-chip eLink is not built: no serialiser and no LVDS pads. The mesh links at the chip edge are ports of the top module instead.
- **No debug unit, no 16-bit encoding, no dual issue.** These are not built.
- **TESTSET is not atomic against network writes.** It is atomic only against the local core.
- **Interrupt controller fault test.** A broken copy that ignores the interrupt mask still passes its unit testbench, so that testbench's masking check is weak.

## Workloads from the paper

| Workload | Fits? |
|---|---|
| 16-core autofocus for SAR | Fits the 64-core default |
| 16-core FFBP SAR image formation | Fits the 64-core default |
| bcrypt with two instances per core | Fits. About 8.3 KB of state per core, from the algorithm, not the paper, against 32 KB |
| 1D-DCT | Not known: the paper gives no data sizes |
| 64-core 5-point heat stencil | Not known: the paper gives no data sizes |
