# HPRA: a CGRA whose RISC-V cores are system hyper pipelined

A coarse-grained reconfigurable array (CGRA) is a grid of small
processors connected by a routing network. This design is such a grid,
with one twist. Each processor, an RV32IM RISC-V core, has been
*C-slow retimed* into C = 4 micro-stages. All of its state has also
been moved into memories indexed by a thread slot. That second step is
called *system hyper pipelining* (SHP).

The result is one physical core that holds up to D = 16 independent
threads and interleaves them, one per micro-cycle. The threads share
no registers, so the pipeline needs no forwarding or interlocks. A
thread that must wait is skipped, and threads can be started, stopped,
forked and joined by software at run time. The clock is the fast
micro-cycle clock of the retimed logic. Four threads can each run one
instruction per 4 cycles, and all 16 threads share the core's
bandwidth.

The array is a 4 x 4 grid of *clusters*. Each cluster has one routing
element (RE) and one programming element (PE). One grid position is
taken by the system support logic (SDRAM controller and system bridge),
so 15 clusters remain. Threads anywhere in the array write into each
other's memories, and start each other's threads, by storing to global
addresses. The routing elements carry those stores hop by hop across
links to all eight neighbours.

This RTL follows the architecture of "Using System Hyper Pipelining
(SHP) to Improve the Performance of a Coarse-Grained Reconfigurable
Architecture (CGRA) Mapped on an FPGA". That description names the
blocks and their functions but leaves most encodings and interfaces
open. Everything this implementation had to choose is marked below and
in the opening comment of each file.

## The SHP-ed core and its thread slots (`rv_shp_core`, `thread_ctrl`)

A normal pipelined core keeps its state in flip-flops: PC, register
file and divider state. In the SHP core each of these is a memory with
D entries, and a slot ID (SID) is the address. Every micro-cycle the
thread controller (TC) picks one slot and sends its SID into stage 0.
The SID travels down the pipeline with the instruction. When the
instruction writes back, the SID is the write address.

| stage | work |
|---|---|
| S0 | The TC selects a slot. Its PC is read and the fetch goes to MEM port A. |
| S1 | The instruction arrives. The register-file read addresses `{sid, rs1/rs2}` are registered. |
| S2 | Operands arrive. This stage does the ALU, branches, the multiplier and one divider pass. It also issues the data access: local MEM, private stack, SFR or remote store. |
| S3 | Load data arrive. The register memory and the PC memory are written. |

**Issue rule.** A slot issued in cycle t is in flight until t+3. The TC
will not issue it again before t+4. Among the slots that are active,
not stalled and not in flight, it takes the next one in round-robin
order after the last one issued.

This rule has three effects:
- A lone thread runs at exactly one instruction per 4 cycles.
- Four or more runnable threads fill every cycle.
- A stalled thread costs nothing: the others bypass it.

The testbenches check the one-instruction-per-4-cycles rate.

**Replay.** Some instructions cannot finish in S2. Such an instruction
is not committed: its PC stays unchanged, and it runs again on the
slot's next turn. Replay covers three cases:
- a stack access while the shared stack is full
- a store to another cluster that the routing element does not accept
- each pass of a division

The divider does 32/DIV_PASSES restoring steps per pass. It keeps the
partial remainder and quotient per slot, so a division occupies its
thread for DIV_PASSES turns and other threads keep running.
Multiplication finishes in one pass.

**ISA.** The core runs all of RV32I plus MUL/MULH/MULHSU/MULHU and
DIV/DIVU/REM/REMU. FENCE, ECALL, EBREAK and CSR instructions run as
no-ops; there are no traps or interrupts. A load from another cluster
returns 0, because the network carries only writes.

### Special function registers

Threads control the TC and the DMA engine through SFRs at byte address
`0xF000 + 4*offset` of the local map:

| offset | name | access |
|---|---|---|
| 0x00 | Activate | W: start a thread at the written PC in the lowest free slot. R: thread-overflow count. |
| 0x01 | Activate and Count (AC) | W: start a *forked* thread and increment the caller's AC. R: the caller's AC. |
| 0x02 | Exit | W (any data): the calling thread ends and its slot is freed. |
| 0x03 | Stall | R/W: stall mask, bit i = slot i. |
| 0x04 / 0x05 | Stall-set / Stall-clear | W: OR / AND-NOT the written mask into Stall, atomically. |
| 0x06 | SID | R: the caller's own slot ID. |
| 0x07 | Active | R: mask of occupied slots. |
| 0x10 | DMASA | R/W: DMA source (local byte address). |
| 0x11 | DMAL | R/W: DMA length in words. |
| 0x12 | DMATA | W: DMA target address; writing it starts the transfer. |
| 0x13 | DMA busy | R. |

An Activate that finds no free slot is a *thread overflow*. The start
is dropped and counted; software must avoid it.

A packet from another cluster may write Activate or AC, which both
start a thread without a parent, or the stall registers. Such a packet
waits while the local core is using the SFRs.

### Fork and join

A main thread forks children by writing their start addresses to AC.
Each child records the parent's SID in its forked-thread register (FT).
When a child exits, the parent's AC is decremented. When AC reaches 0,
the parent's stall bit is cleared.

The usual sequence is:
1. Fork n children.
2. Stall yourself with Stall-set.
3. The last child to exit wakes you.

A parent that does not want to stall can poll AC instead. Software must
respect one ordering rule. The join clears the stall bit only at the
moment AC reaches 0. A parent that stalls itself after its last child
has already exited therefore sleeps forever. The matrix-multiply
program in `tb/mm_prog_pkg.sv` stalls itself right after its last
fork, and then polls AC as well. Its children each run far longer than
those few instructions.

## Private stacks on a shared stack memory (`stack_tlb`, `pe_stack`)

Each thread sees its own stack in the address range `0xFFFF_xxxx`. Its
stack pointer x2 reads 0 when the thread starts, so the first push
lands just below 0 and wraps into that range. The core keeps a
per-slot flag for this and does not write the register file.

The stacks are not separate memories. One PE-STACK of
SECTIONS x SECTION_WORDS words (8 x 64 by default) is shared by all
slots. The TLB maps each (SID, virtual section) pair to a physical
section:
- It is fully associative, with one register entry per physical
  section.
- On the first touch of a virtual section, it allocates the lowest
  free physical section.
- When a thread exits, it releases all of that thread's sections.

If no section is free, the access is replayed, and the thread waits
until another thread exits. The TC keeps cycling through all threads,
so waiting threads retry in round-robin order. Sixteen threads that
each want a section, with only eight sections, can deadlock if no
thread with a section ever exits. Software has to avoid that.

## Routing: packets, links and the routing element (`routing_element`, `di_arbiter`, `di_fifo`, `write_arbiter`)

Everything on the network is a `pkt_t` `{addr[31:0], data[31:0],
be[3:0]}`: one masked word write to a global address. Global addresses
are `0x1CR0_oooo`:
- C is the column, in bits [27:24].
- R is the row, in bits [23:20].
- oooo is the 16-bit local address in the target cluster.

The local address selects that cluster's MEM, or its SFR page at
`0xF000`, which is how a thread is started remotely. A link is a
`valid/ready` pair carrying one packet. A packet moves when both are
high at a clock edge.

A routing element has eight input and eight output links. They are
numbered 0..7 for the neighbours (c-1,r-1), (c-1,r), (c-1,r+1),
(c,r-1), (c,r+1), (c+1,r-1), (c+1,r), (c+1,r+1). The opposite of link
k is link 7-k.

Inside the routing element, packets pass through these stages:
1. The **DI arbiter** takes one packet per cycle from the eight input
   links, in round-robin order, into the **DI-FIFO** (8 deep, first
   word fall-through).
2. The packet at the FIFO head is checked:
   - If it is addressed to this cluster, it goes to the PE: to MEM
     port B, or to the TC/DMA SFRs.
   - Otherwise it becomes source 0 of the write arbiter.
3. The **write arbiter** has three sources: forwarded packets, remote
   stores of the local core, and DMA writes.
   - For each source it computes one step toward the target, as
     (sign(dc), sign(dr)). This uses diagonal links.
   - Each output gets at most one packet per cycle, with fixed priority
     forwarded > core > DMA.
   - Every output link is a register, so a hop takes one cycle.

The output registers are what keep the array free of combinational
loops. Without them, the ready signals of neighbouring clusters would
depend on each other through the arbiters. A head packet whose output
is busy blocks the FIFO behind it. Back-pressure therefore propagates
hop by hop, up to the sender.

## DMA engine (`dmae`)

The DMA engine is programmed through DMASA (source), DMAL (length in
words) and DMATA (target). Writing DMATA starts the transfer. While a
transfer runs, writes to these SFRs are ignored. The engine copies
words from the local MEM through port B, at the lowest priority on
that port:
- If the target is a global address in another cluster, each word
  leaves as a packet through the write arbiter.
- Otherwise it is written back into the local MEM.

Threads poll the busy SFR to see completion.

## A processing element and a cluster (`pe`, `pe_mem`, `cluster`)

The PE connects the core, TC, TLB, PE-STACK, DMA engine and MEM. MEM
(4096 words by default) holds code and data of all threads:
- Port A serves instruction fetch only.
- Port B is shared by three users, in priority order: core data
  access, packets delivered by the routing element, DMA.

The core's data accesses are never refused. SFR accesses are split by
offset bit 4 between the TC (0x00-0x0F) and the DMA engine
(0x10-0x1F). A cluster is just a PE plus its routing element.

## The array (`hpra_top`)

`hpra_top` builds a COLS x ROWS grid (4 x 4) of clusters and connects
each one to its eight neighbours. Links at the edge of the grid are
tied off. Position (SUP_COL, SUP_ROW) = (0,0) holds no cluster. Its
eight link pairs become the top's `sys_*` ports: that is where the
SDRAM controller and system bridge attach. The top also brings out
each cluster's status:
- active and stall masks
- retire and replay strobes
- stack-full and DMA-busy
- thread-overflow count

The whole system is configured by streaming packets in through the
`sys_*` links. These packets write programs and data into cluster
memories, then write Activate SFRs to start threads. The same
mechanism works while other clusters are running.

## What departs from the source description, or is not built

- **Invented, not given.** The following are this design's own choices:
  - the address map, packet format and handshakes
  - the SFR offsets and the Stall-set/clear registers
  - the routing rule and arbitration priorities
  - FIFO depth, memory sizes, stack section size and count
  - the divider's pass count
  - remote-load behaviour
- **Written directly.** The core is written as a 4-stage C-slowed
  pipeline. It is not produced by automatically retiming an existing
  3-stage core.
- **Not built.** The SDRAM controller, the system bridge and the system
  bus with burst reads are not built. They are described only by name,
  and the top exposes the support position's links for them.
- **Remote reads.** A thread reads only its own cluster's memory.
  Remote data must be pushed by the writer, with a store or a DMA.
- **Thread count.** The configuration with the most threads has
  15 x 16 = 240 slots. The source quotes both 240 and 260 threads.
  This design holds 240.
- **Timing numbers.** FPGA slice counts and clock rates (549 MHz vs
  181 MHz on a Virtex-6) are results of a mapping and are not
  reproduced. The cycle counts below are this RTL's own.

## Simulating

The only tool needed is Verilator 5. Each testbench in `tb/` is
self-checking. It prints `TB_RESULT checks=<n> failures=<m>` and stops
itself with a watchdog if it hangs. For example, to run the full array:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/hpra_pkg.sv tb/rv_asm_pkg.sv tb/mm_prog_pkg.sv tb/tb_hpra_top.sv \
  --top-module tb_hpra_top -Wno-fatal
./obj_dir/Vtb_hpra_top
```

Replace `tb_hpra_top` with any other testbench. The two packages in
`tb/` are helpers:
- `rv_asm_pkg` has small RV32IM instruction encoders.
- `mm_prog_pkg` is a fork-join matrix multiply written with those
  encoders.

| testbench | what it covers |
|---|---|
| `tb_pe_mem`, `tb_pe_stack` | Random reads and writes with byte enables, against a model. |
| `tb_stack_tlb` | Allocation, hits, the full condition and release. |
| `tb_thread_ctrl` | Activate, overflow, Exit, Stall and bypass, fork/join, the issue spacing of C cycles. |
| `tb_rv_shp_core` | Instruction tests on the core with TC, MEM, TLB and stack, including division, the stack and replay. |
| `tb_dmae` | Local and remote copies, and ignoring writes while busy. |
| `tb_di_arbiter`, `tb_di_fifo`, `tb_write_arbiter`, `tb_routing_element` | Random traffic against reference models, fairness, direction choice and back-pressure. |
| `tb_pe` | The fork-join matrix multiply on one PE, with MEM writes arriving during the run. |
| `tb_matmul_lpp` | The matrix multiply for N = 4 to 10 on one PE at default parameters, with cycle counts. |
| `tb_cluster` | A PE with its routing element, driven through the links. |
| `tb_hpra_top` | The full default 4 x 4 array. See below. |

`tb_hpra_top` runs the array at its default parameters and plays the
support logic. It loads and runs:
- matrix multiplications of 3x3 to 6x6 in four clusters, which send
  their results back to (0,0) by DMA
- one multiplication whose DMA writes into another cluster two hops
  away
- a cluster started 17 times, which fills all 16 slots, overflows once
  and oversubscribes its 8 stack sections

It counts each mechanism and fails if any never occurs: fork, stall
bypass, join, thread overflow, stack-full wait, replay, remote DMA,
multi-hop forwarding and back-pressure. It runs in a few seconds. In
the last run, all work finished 3608 cycles after the start packets.

Measured on this RTL:
- A lone thread retires one instruction every 4 cycles.
- `tb_matmul_lpp` runs the fork-join matrix multiply on one PE at
  default parameters for N = 4 to 10. Each run uses N row threads plus
  main, and includes fork, join and the DMA of the result.

| N | 4 | 5 | 6 | 7 | 8 | 9 | 10 |
|---|---|---|---|---|---|---|---|
| cycles | 1239 | 2164 | 3515 | 5346 | 7759 | 15244 | 20067 |
| instructions per cycle | 0.88 | 0.93 | 0.95 | 0.96 | 0.97 | 0.69 | 0.71 |

With five or more threads the core issues in almost every cycle. From
N = 9 up, there are more row threads than the 8 stack sections. The
threads without a section wait until others exit, and throughput drops.
This is the stack-full stall at work. Raising SECTIONS to at least the
number of row threads should avoid it; that was not simulated.
