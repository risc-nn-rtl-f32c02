# RISC-NN: a neural-network accelerator built from very simple RISC cores

Most neural-network accelerators have a CISC-style instruction set, with whole
operators such as "convolve" or "matrix multiply" as single instructions. That is
fast for the operators the designers foresaw, and awkward for everything else.
RISC-NN goes the other way. It is a mesh of 64 small processing elements (PEs).
Each PE executes only eleven instructions: load, store, five SIMD arithmetic ops,
multiply-add, two operand pre-reads, and a copy to another PE.

A program is a dataflow graph of *ExeBlocks*. An ExeBlock is a short straight-line
run of instructions. It loads its inputs from DRAM, computes on them, copies some
results to other PEs, activates its successor ExeBlocks, and stores its outputs.
There are no branches and no program counter that jumps. Control comes from
activation counting: an ExeBlock fires once all of its predecessors have
signalled it. Sparse weights are handled by skipping instructions, using a
per-instruction "sparse PC increment".

This repository holds synthesizable SystemVerilog for the whole chip, apart from
the DRAM and the host link. Every module has a self-checking testbench, and one
end-to-end testbench runs the full 64-PE configuration.

## Configuration

| Item | Value | Where it is set |
|---|---|---|
| PEs | 64, as an 8 x 8 mesh | `risc_nn_top` `MX`, `MY` |
| Datapath | SIMD-8 x 16-bit lanes (one operand = 128 bits) | `rnn_pkg` |
| Instruction RAM per PE | 8 single-port banks x 512 x 64 bit | `instr_ram` |
| Operand RAM per PE | 16 banks x 128 x 128 bit, one write and one read port each | `operand_ram` |
| ExeBlocks per PE | 32 | `rnn_pkg::NUM_EB` |
| Tasks | 8 (each has its own LD and ST base addresses) | `rnn_pkg::NUM_TASK` |
| Control network | tree, 85-bit messages | `ctrl_noc` |
| Memory and inter-PE networks | two 2-D meshes, 128-bit payload | `mesh_noc` |
| Cache | 1 MB in 8 slices; each slice is 512 sets x 4 ways x 64-byte lines, write-back | `cache_slice` |
| Lookup tables | 15 tables in DRAM, indexed by 16-bit value | `table_loader` |

The 8 x 8 arrangement of the 64 PEs, and the 8 tasks, are this design's choices.
The other numbers follow the published configuration.

## Instruction set

Every instruction is 64 bits wide:

```
 63   60 59      44 43      28 27      12 11           4 3      0
| OP    | F0       | F1       | F2       | SparsePcInc  | Lookup |
```

| OP | code | Meaning (OPM = this PE's Operand RAM) | Executed by |
|---|---|---|---|
| LD | 0 | OPM[F0] = DRAM[LD_base + {F1,F2}] | LD unit |
| ADD, SUB, MUL, MAX, MIN | 1-5 | OPM[F2] = op(OPM[F0], OPM[F1]), per 16-bit lane | CAL unit |
| MADD | 6 | OPM[F2] = OPM[F0] * OPM[F1] + OPM[F2] | CAL unit |
| PREREAD0 / PREREAD1 | 7 / 8 | latch OPM[F0] / OPM[F1] into a pre-read register | CAL unit |
| COPY | 9 | PE[F2].OPM[F1] = OPM[F0] | FLOW unit |
| ST | 10 | DRAM[ST_base + {F1,F2}] = lookup(OPM[F0]) | ST unit |

The field order and opcode numbers are this design's choices. Arithmetic is
two's-complement and wraps to 16 bits. MAX and MIN are signed. DRAM addresses
count 128-bit words.

## ExeBlocks and their four stages

An ExeBlock's instructions sit contiguously in Instruction RAM, grouped by the
unit that runs them. Four PC ranges describe it: LD, CAL, FLOW (COPY) and ST.
Each range is half-open, `[start, end)`. An empty range means the stage is
absent, but it is still dispatched and finishes at once.

The life of one ExeBlock in the Control Unit (`control_unit`) is:

1. **Initialization.** The host sends four control messages, EB0 to EB3. They carry:
   - the priority, task, predecessor count and sparse flag;
   - the DRAM address of the instruction image;
   - the four PC ranges;
   - up to three successors, each given as a (PE, ExeBlock) pair.

   The Instruction Loader then fetches the instructions (see below).
2. **LD stage.** This starts once the block's task has been enabled.
3. **CAL stage.** This starts after LD, and only once the activation count has
   reached the predecessor count. Activations that arrive early are counted and
   kept.
4. **FLOW stage.** All COPYs go out first. Then one activation message goes to
   each successor. The FLOW stage always runs, even when it has no COPY
   instructions, so that the activations are still sent.
5. **ST stage.**
6. **Reset step.** The enable flag, stage and count are cleared. The
   instructions stay loaded, so re-enabling the task runs the block again
   (ExeBlock reuse). The PE also reports the completion up the control tree.

Each of the four units (LD, CAL, FLOW, ST) runs one ExeBlock stage at a time. When
several ExeBlocks are ready for the same unit, the one with the lowest priority
number wins, and ties go to the lowest ExeBlock index. So the stages of different
ExeBlocks overlap: while one block computes, the next block's loads are already
going.

## The CAL pipeline

`cal_unit` is a four-stage pipeline: FETCH, READ, EXE, WB. It never stalls once an
instruction has been fetched. To make that possible, the Instruction RAM and the
Operand RAM always serve CAL first.

Two hazards are handled without stalling:

- **Read-after-write.** The write-back result and its address stay in a Result
  Data register. An operand whose address matches is taken from that register
  instead of from the RAM. The Operand RAM also writes through: a read of the
  address being written in the same cycle returns the new value. Together these
  two cover every distance between a write and a later read.
- **Bank conflicts.** An instruction may read two or three operands from the same
  Operand RAM bank, and a bank has only one read port. Such an instruction is
  preceded by PREREAD0 and/or PREREAD1, which load the operand into a pre-read
  register. The pre-read register is used once and then invalidated; it is also
  cleared when a new CAL stage starts. A conflict
  that was not resolved this way is a program error, and an assertion flags it.

The EXE stage picks each operand in this order: the bypass value first, then the
pre-read register, then the RAM.

Sparse execution: when an ExeBlock is marked sparse, the next PC is
`PC + SparsePcInc` instead of `PC + 1`. This skips instructions whose weights are
zero.

Throughput is one CAL instruction per cycle, after a three-cycle fill.

## Instruction Loader and sparse vectors

`instr_loader` copies an ExeBlock's instructions from DRAM into Instruction RAM,
using read requests over the memory mesh. DRAM word k of the image holds
instructions `lo+2k` (in bits 127:64) and `lo+2k+1`. Blocks are loaded in priority
order.

A sparse ExeBlock also receives its sparse vector in 64-bit chunks. The vector
has one bit per CAL instruction, and a 1 means "keep". The loader scans the
vector forward and finds each kept instruction. Each kept instruction gets the
distance to the next kept one; the last gets the distance to the end of the
range. These distances are written into the 8-bit SparsePcInc fields with a
bit-masked write. The CAL start PC is moved to the first kept instruction.

## Networks

- **Memory mesh and inter-PE mesh** (`mesh_noc`, `mesh_router`)
  - Each is a 2-D mesh of 5-port routers: north, east, south, west and local.
  - Routing is XY, so a packet travels along X first, then along Y.
  - Each input has a 2-entry FIFO, and each output has a round-robin arbiter.
  - Every packet is a single flit: a header plus 128 bits of data.
  - On the memory mesh, packets for the memory side leave through the north
    edge of row 0. Cache slice s hangs on column s.
  - On the inter-PE mesh the edges are closed. It carries COPY data and
    activations. Because routing is XY, an activation always arrives behind the
    COPY data that precedes it.
- **Control tree** (`ctrl_noc`)
  - A fan-out-4 tree with one register stage per level.
  - Host messages are broadcast to every PE, and each PE keeps those addressed
    to it.
  - Completion reports from the PEs are merged back up to the root.
- **Control interface** (`control_interface`)
  - Feeds host messages into the tree.
  - Counts ExeBlock completions per task, so the host can tell when a task is
    done.

## Memory system

`mem_controller` contains eight `cache_slice`s and an arbiter that shares the
single DRAM word port among them.

- Word address bits [4:2] choose the slice, so consecutive 64-byte lines
  interleave across the slices.
- Each slice is blocking: it handles one request at a time.
- Each slice is 4-way with round-robin replacement, and write-back and
  write-allocate for LD and ST.
- Instruction fetches bypass the cache.
- Host DMA reads return a cached line if there is one. Host DMA writes go to DRAM
  and also update a cached line. Only one DMA request is in flight at a time.

In front of each slice sits a `table_loader`. It handles ST instructions with a
non-zero lookup type, which is how the design computes non-linear activations.
For each of the 8 lanes with value v, it reads the 16-bit entry of table t:

```
table word = 0x0F00_0000 + (t-1)*8192 + v[15:3],   lane = v[2:0]
```

The 8 results replace the stored data before the store goes to the cache. The
table reads go straight to DRAM. The table base address and layout are this
design's choices.

## Top level

`risc_nn_top` wires everything together:

- the 64 `pe`s;
- the two meshes;
- the control tree and the control interface;
- the memory controller.

Its ports are plain signals, with `rnn_pkg` struct types:

| Port group | Meaning |
|---|---|
| `host_msg_*` | 85-bit control messages (`ctrl_msg_t`) from the host, valid/ready |
| `host_evt_*`, `done_count` | ExeBlock completions, and the per-task completion counters |
| `dma_req_*`, `dma_rsp_*` | host DMA, used to place instruction images and data |
| `dram_req_*`, `dram_rsp_*` | 128-bit word port to a DRAM controller, one request outstanding |
| `ev_*` | one-cycle event strobes for the testbenches: cache hit, miss, writeback, table lookup; per-PE RAW bypass, pre-read hit, fetch stall, incoming COPY |

A PE's number is `y*8 + x`.

Inside a `pe`, the LD unit, the ST unit and the Instruction Loader share the PE's
one memory-mesh port through a round-robin merge. Incoming COPY data is written
through a third Operand RAM write port; it has the lowest write priority, after
CAL write-back and LD.

## Using the host interface

To run a task, the host does the following:

1. Write the instruction images and input data into DRAM using DMA.
2. For each ExeBlock, send EB0, EB1, EB2, EB3 to its PE. For a sparse block, also
   send the SPARSE chunks.
3. Broadcast TASK with the task id and its LD and ST base addresses.
4. Wait until `done_count[task]` reaches the number of ExeBlocks.
5. Read the results using DMA. To rerun the task, send TASK again.

The message payloads are defined in `rnn_pkg.sv`:
- EB0: `{prio[69:66], task[65:63], npred[62:59], sparse[58], inst_addr[31:0]}`
- EB1 and EB2: PC ranges. Bits [47:36] and [35:24] are the LD or FLOW start and
  end; bits [23:12] and [11:0] are the CAL or ST start and end.
- EB3: three `succ_t` entries.
- TASK: `{task[66:64], ld_base[63:32], st_base[31:0]}`
- SPARSE: `{chunk[69:64], bits[63:0]}`

## Simulation

Each testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. `tb/dram_model.sv` is a
behavioural DRAM with a fixed latency; the top-level and memory testbenches use
it. An unwritten DRAM word reads as `{a^32'hA5A50000, a+3, a*7, a}`.

To build and run one testbench with plain verilator, for example:

```
verilator --binary --timing -Wno-fatal -y rtl rtl/rnn_pkg.sv tb/dram_model.sv tb/tb_risc_nn_top.sv --top-module tb_risc_nn_top
./obj_dir/Vtb_risc_nn_top
```

- **`tb_risc_nn_top`**: the whole chip at its default size, with no parameter
  overrides.
  - It runs a two-PE dataflow program. The program uses loads, SIMD arithmetic,
    MADD, pre-reads, COPY, activations, a sparse ExeBlock, a table-lookup store,
    and a rerun of the same task.
  - It checks the DRAM results and the completion counts.
  - It counts how often each mechanism happened, and counts a failure for any
    that never did: cache hits, misses and writebacks, table lookups, RAW
    bypasses, pre-read hits, fetch stalls and inter-PE copies.
  - Building it takes about 3 minutes; the run takes about 1200 cycles.
- **Unit testbenches**: there is one per module. `tb_cache_slice` and
  `tb_mem_controller` use 4 sets instead of 512 to keep them short; the
  full-size cache runs in the top-level test.
- **Timing checks**: where a latency is defined, it is checked:
  - a cache hit answers in 3 cycles;
  - a mesh packet crosses `MX+MY` hops in `MX+MY` cycles;
  - CAL sustains one instruction per cycle.

## Where this design departs from the published description, or fills gaps

- **COPY operand order.** The instruction table gives `PE[F2].OPM[F1] = OPM[F0]`.
  A worked example elsewhere reads as if F1 were the PE and F2 the address. This
  design follows the table.
- **Parts not described in enough detail.** These are all this design's own
  choices:
  - bank mapping: Instruction RAM bank = PC[11:9], Operand RAM bank = address[3:0];
  - port priorities;
  - the opcode encoding;
  - the control-message layouts;
  - the NoC flit format, FIFO depth and XY routing;
  - the tree fan-out;
  - the cache replacement policy and its blocking behaviour;
  - the DMA coherence scheme;
  - the lookup-table placement in DRAM;
  - completion reporting to the host.
- **Cache slice placement.** The slices all sit on the north edge of the memory
  mesh, one per column. The published block diagram draws memory controllers on
  two sides.
- **Store acknowledgements.** Stores are acknowledged, so that "ExeBlock
  finished" means its data has reached the memory system.
- **Not built:**
  - the DDR4 controller and PHY: the top brings out a word-level DRAM port instead;
  - the PCIe host link: replaced by plain message and DMA ports;
  - the compiler that maps ExeBlocks onto PEs.

  Programs in the testbenches are written by hand.
- **Workload capacity.** The benchmark layers evaluated for this architecture
  (GoogLeNet, VGG16, AlexNet, ResNet, Transformer, sentiment CNNs, LSTM) are far
  larger than the on-chip storage. The chip holds 262,144 instruction slots,
  131,072 operand entries and 2,048 ExeBlock slots. These layers must run as
  sequences of tasks that are reloaded from DRAM. The published per-operator
  programs fit easily: the 64x64 matrix operators need 13-20 k instructions and
  at most 255 ExeBlocks. So do eight instances of the AlexNet CONV2 mappings.
  None of these full workloads is simulated here.

## Known lint notes

- Verilator reports `SYNCASYNCNET` on `rst_n`. The reset is synchronous in the
  logic, but it is also used in assertion `disable iff` clauses.
- Verilator also reports some width-extension and unused-bit warnings on packed
  message fields.

None of these is a circuit problem. No latch, combinational loop or multiply
driven net is reported.
