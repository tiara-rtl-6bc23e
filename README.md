# Tiara execution engine: RTL for a programmable remote-memory NIC

One-sided RDMA can only fetch an address that the client already knows. Many
remote-memory workloads have to read remote data before they know the next
address. Examples are following pointers through a graph, walking a
multi-level page table, looking up a block table before fetching KV-cache
blocks, and taking a lock before replicating state. Each dependent step
costs a full network round trip.

Tiara moves those dependent steps onto the NIC next to the memory. A client
sends one message that names a **pre-registered operator** and carries up
to eight 64-bit arguments. The NIC runs the operator against host memory
over PCIe and sends back one response. The dependent reads then cost a
PCIe access each (about 0.75 µs) instead of a network round trip each.
Operators use a small instruction set: `Load`, `Store`, `CAS`, `CAA`,
`Memcpy`, `Jump`, `Loop`, `Wait`, `Ret` and `ComputeOp`. Jumps go forward
only and every loop has a fixed bound. Because of those two rules, every
operator provably terminates and can be checked before it is registered.

This repository holds synthesizable SystemVerilog for the NIC-side
execution engine. It contains the dispatcher, eight memory processors and
the routing around them. It also has a testbench for every block and an
end-to-end testbench that runs the evaluated workloads.

## Architecture

```
               task_* (op_id, caller tag, 8 params)        rsp_out_* (caller tag, status, value)
                      |                                          ^
                      v                                          |
   cfg_op_* --> tiara_dispatcher                           tiara_resp_arb (round-robin, 9 inputs)
               96-slot task FIFO                                 ^        ^
               256-entry op_id -> start_pc table                 |        | rejections
               round-robin pick of an idle MP ------------------ | -------+
                      |  mp_task (start pc, tag, params)         |
                      v                                          | Ret
   cfg_imem_* --> 8 x tiara_mp  ------------------------------------+
                  tiara_istore     1024 x 64-bit instructions (block RAM)
                  tiara_regfile    16 x 64-bit registers
                  tiara_alu        ComputeOp and Jump conditions
                  tiara_loop_stack depth 8
                  tiara_async_tracker 32 in-flight Memcpy, timeouts
                      |  mem_req_t / mem_rsp_t
                      v
               tiara_mem_router (round-robin over MPs, route by host_id)
                 |                                  |
                 v  host_id == LOCAL_HOST_ID        v  any other host
               dma_*  (PCIe DMA engine,           rdma_* (RDMA engine:
                       host DRAM)                         remote Load/Store/atomics,
                                                          RDMA Read/Write for Memcpy)
```

`tiara_top` is the whole engine. Its ports are plain structs with
valid/ready handshakes; the types are in `rtl/tiara_pkg.sv`. Four ports
lead outside the engine:

- `task_*` and `rsp_out_*` connect to the RDMA transport that receives
  invocations and sends responses.
- `dma_*` connects to a PCIe DMA engine. Behind it, host memory must
  perform loads, stores, CAS/CAA and local copies.
- `rdma_*` carries accesses to other hosts.
- `cfg_*` is the registration path, through which the host writes
  operators in.

None of the parts behind those ports is in this RTL. The testbenches
replace all of them with one behavioural model, `tb/tiara_mem_model.sv`.
That model gives local accesses a 150-cycle latency and remote accesses a
500-cycle round trip. Everything runs on one clock (200 MHz in the
reference prototype) with an active-low asynchronous reset.

## The instruction word

The instruction set is defined only by its operations. The encoding below is
this implementation's own: one 64-bit word, `tiara_pkg::instr_t`.

| bits    | field     | use |
|---------|-----------|-----|
| 63:60   | `opcode`  | `opcode_e` |
| 59:56   | `rd`      | destination register |
| 55:52   | `rs1`     | first source / base address |
| 51:48   | `rs2`     | second source |
| 47:44   | `rs3`     | third source (CAS/CAA new value, Memcpy length) |
| 43:40   | `func`    | `alu_op_e` for ComputeOp, `jcond_e` for Jump |
| 39      | `use_imm` | take the immediate instead of a register |
| 38:32   | `aux`     | Loop body length N, Ret status |
| 31:0    | `imm`     | immediate / offset |

| opcode | operation |
|--------|-----------|
| `LOAD` | `rd = mem[rs1 + sext(imm)]` (sync) |
| `STORE` | `mem[rs1 + sext(imm)] = rs2` (sync, waits for the write acknowledgement) |
| `CAS` | `rd = old = mem[rs1+imm]; if old == rs2: mem = rs3` |
| `CAA` | `rd = old; if old == rs2: mem = old + rs3` (compare-and-add) |
| `MEMCPY` | async copy of `use_imm ? imm : rs3` bytes from address `rs2` to address `rs1` |
| `JUMP` | `if cond(rs1, use_imm ? sext(imm[15:0]) : rs2)` then skip `imm[31:16]` instructions. The offset is unsigned, so the target is always forward. `JC_ERR`/`JC_NOERR` test the task's async error flag. |
| `LOOP` | run the next `aux` instructions `use_imm ? imm : rs1` times (0 times skips the body) |
| `WAIT` | stall until the in-flight Memcpy count is `<= (use_imm ? imm : rs1)` |
| `RET` | respond with status `aux` and value `use_imm ? sext(imm) : rs1` |
| `COMPUTE` | `rd = alu(func, rs1, use_imm ? sext(imm) : rs2)`: ADD SUB AND OR XOR SHL SHR SRA SLT SLTU MOV MOVHI |

Addresses are unified 64-bit values `{host_id[63:56], region_id[55:48],
offset[47:0]}`. A single address can therefore name memory on any host.
There is no address-space register: the operator builds addresses with
ComputeOp (for example `MOVHI`) or gets them as parameters.

The distributed-lock operator, as the end-to-end test registers it, shows
the style. The arguments are r0 = latch, r1 = state, r2 = increment, and
r3/r4 = the replica addresses:

```
 40 COMPUTE MOV r8, #1
 41 COMPUTE MOV r9, #0
 42 LOOP    #200, 2          ; bounded CAS retry
 43   CAS   r10, [r0], r9, r8
 44   JUMP  EQ r10, #0, +1   ; acquired -> 46 (also leaves the loop)
 45 RET     status 1         ; FAIL
 46 LOAD    r11, [r1]
 47 COMPUTE ADD r12, r11, r2
 48 STORE   [r1], r12
 49 MEMCPY  r3 <- r1, 8      ; replica 1, async
 50 MEMCPY  r4 <- r1, 8      ; replica 2, async
 51 WAIT    #0
 52 JUMP    ERR, +2          ; a replica timed out
 53 STORE   [r0], r9         ; release
 54 RET     r11
 55 STORE   [r0], r9
 56 RET     r11, status 2
```

## How a memory processor runs a task

`tiara_mp` is a sequential core. It has no cache, no prediction and no
overlap between instructions. Its control is an 11-state FSM:

```
IDLE -> FETCH -> DECODE -> EXEC -+-> FETCH                      Compute, Jump, Loop, Nop
                                 +-> MEM_REQ -> MEM_WAIT -> WB -> FETCH    Load, Store, CAS, CAA
                                 +-> ASYNC -> FETCH             Memcpy (stalls while 32 in flight)
                                 +-> WAIT  -> FETCH             Wait
                                 +-> RET -> DRAIN -> IDLE
```

- **Task start.** When the dispatcher hands over a task, the eight
  parameters go into r0..r7 and r8..r15 are cleared, all in one cycle. The
  same edge clears the loop stack and the async error flag.
- **Register-chained loads.** FETCH waits until the previous instruction
  has written back, so a loaded value can be the next Load's address with
  no forwarding or interlock logic. One dependent Load costs the memory
  latency plus 5 cycles: fetch, decode, execute, request and write-back. At
  150 cycles of PCIe latency that is 155 cycles, or 0.775 µs at 200 MHz;
  the published prototype reports 0.79 µs per hop. A ComputeOp, Jump or
  Loop costs 3 cycles.
- **Loops.** `tiara_loop_stack` holds the first PC, last PC and remaining
  count of each active loop. After an instruction at a loop's last PC, the
  stack either sends the PC back to the body start or pops the loop.
  Nested loops that end on the same instruction are all resolved in one
  cycle.
- **Leaving a loop early.** A taken Jump pops every loop whose body ends
  before the jump target. This is how the lock operator leaves its retry
  loop.
- **Loop-stack overflow.** A ninth nested Loop does not run. The task ends
  with status `ST_LOOP_OVF`.
- **Async copies.** A Memcpy takes a slot in `tiara_async_tracker` and
  execution continues. Completions carry the slot tag and free the slot.
  Wait compares the number of busy slots with its threshold. Threshold 0
  waits for all copies. A larger threshold gives quorum-style waiting.
- **Failed hosts.** Every slot counts cycles while it is busy. A copy with
  no completion after `ASYNC_TIMEOUT` cycles is dropped and sets the sticky error flag, which `JUMP ERR` tests.
  A completion that reports an error sets the flag too.
  The default is 2^20 cycles, 5.2 ms at 200 MHz. A shorter limit, such
  as a few round trips, would cut off healthy copies. For example, 8 MB of
  copies queued behind a 12 GB/s link take about 140k cycles to drain.
- **Late completions.** Tags carry a generation bit, so a completion that
  arrives after its slot timed out and was reused is ignored.
- **End of a task.** After `Ret` the MP stays in DRAIN until its copies
  have completed or timed out. A late completion therefore never lands in
  the next task.
- **Running off the store.** If the PC would run past the last
  instruction-store entry, the task ends with status `ST_RUNAWAY`.

The registration-time verifier is what rules out unbounded or out-of-region
programs. The hardware checks no regions. The two status codes above only
make a program that was never verified end in a defined way.

## Dispatch and responses

`tiara_dispatcher` queues up to 96 invocations. The head of the queue is
looked up in the operator table, which takes one cycle. The task then goes
to an idle MP, picked round-robin. A task reaches an idle MP two cycles
after it is accepted, and one task can leave per cycle. An unregistered
`op_id` is answered at once with status `ST_NO_OP` and never occupies an
MP. `tiara_resp_arb` merges the MPs' Ret responses and these rejections
round-robin. The 16-bit caller tag is opaque to the engine; the transport
uses it to find the requester.

The memory router grants one MP request per cycle, round-robin, and picks
the path from the address's `host_id`:

- Load, Store, CAS and CAA go to the DMA engine when their address is on
  this host.
- Memcpy goes to the DMA engine only when both its ends are on this host.
  Otherwise it is an RDMA Read (remote source) or Write (remote
  destination).
- Everything else goes to the RDMA engine.

Responses name the issuing MP. When both engines answer in the same cycle,
the DMA engine goes first.

## Registering an operator

1. Write the instruction words through `cfg_imem_we/addr/data`. Each word
   is written into all eight instruction stores at once.
2. Bind the operator id with `cfg_op_we/id/pc/valid`. `valid=0`
   unregisters it.

Writing an operator's words while an MP runs that operator is not
supported.

## Measured behaviour

These are the results of `tb_tiara_top` at the default size, with 150-cycle
local and 500-cycle remote memory. The times cover the engine only; the
client's network round trip is extra.

| workload | result |
|----------|--------|
| graph traversal, depth d | 165 + 155·d cycles (d=10: 1715 cycles, 8.6 µs). The test operator does one extra Load for the node id. |
| graph traversal d=3, 200 concurrent queries | 2.5 Mops (8 tasks in flight, one per MP) |
| 3-level page walk + 64 B copy to the client | 1019 cycles (5.1 µs) |
| distributed lock, uncontended, 2 remote replicas | 1154 cycles (5.8 µs) |
| 16 contending lock clients | all acquire; state and both replicas count 16 |
| PagedAttention, 40 blocks of 8 KB | 7105 cycles, about 0.89 µs per block |
| MoE gather, 32 experts of 8 KB | 10937 cycles |

### Parameter sweeps

`tb_tiara_workloads` runs the same operators over the ranges the published
evaluation uses, on the default-size top with the same memory latencies.

| sweep | result |
|-------|--------|
| graph traversal, depth 1 to 10, pointer chase only | 10 + 155·d cycles: 165 at d=1, 475 at d=3, 1560 at d=10 (7.8 µs) |
| PagedAttention, 8 MB per layer, block 1 KB to 256 KB, 12 GB/s link | 1 KB: 1.24 GB/s; 4 KB: 4.96 GB/s; 8 KB: 9.89 GB/s; 16 KB and up: 11.9 GB/s (line rate) |
| MoE gather, k = 1 to 32 experts | 968 (k=1), 3250 (k=8), 11074 (k=32) cycles; about 326 cycles per expert |
| distributed lock, 1 to 16 clients | mean 1152 (1 client), 2811 (4), 8782 (16) cycles; contending clients retry the CAS |

For these runs the memory model passes copy data at 60 bytes per cycle on
each port, which is 12 GB/s at 200 MHz. Each block costs one dependent
Load of about 165 cycles before its copy can start. So small blocks are
limited by that resolution time, and blocks from 16 KB up keep the link
full. The published design reaches line rate from 8 KB blocks, where
resolving a block is hidden behind moving the previous one. Here an 8 KB
block moves in 137 cycles, slightly less than the 165-cycle resolution, so
8 KB falls just short.

## Where this RTL differs from the published design

- **Throughput.** The published throughput figures (29.5 Mops for graph
  depth 3, about 25 Mops for page walks) are derived by assuming 12
  outstanding tasks on each of the 8 MPs. The MP described is a single
  sequential core with one register file, and that is what is built here.
  So 8 tasks run at once, the other 88 wait in the 96-slot queue, and
  throughput is about ten times lower: 2.5 Mops measured at depth 3.
- **Load-to-load timing.** The published MP uses a loaded value as the next
  Load's address "the very next cycle". Here the value is usable the cycle
  after write-back, but the next Load still passes through fetch, decode
  and execute. Its request therefore leaves 4 cycles after the write-back.
  The hop cost of 155 cycles is within 3 cycles of the published 0.79 µs.
- **Own choices.** The published description gives no instruction
  encoding, address field widths, status codes, async timeout, Store
  acknowledgement rule, drain-after-Ret rule, or arbitration order. All of
  those are this implementation's choices.
- **Inline data.** A request's "optional inline data" is carried only in
  the eight parameter registers. There is no separate inline-data buffer.
- **Per-tenant scheduling.** Weighted per-tenant scheduling is described as
  future work and is not built. The dispatcher is work-conserving
  round-robin.
- **Testbench memory timing.** The memory model has a fixed latency per
  port and an optional bytes-per-cycle limit on copies. It does not model
  PCIe or network congestion, or a limit on reads by the remote NIC.

## Simulating

Every testbench is self-checking. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. To run the end-to-end
test with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/tiara_pkg.sv tb/tiara_tb_pkg.sv tb/tb_tiara_top.sv --top-module tb_tiara_top
./obj_dir/Vtb_tiara_top
```

Replace `tb_tiara_top` with any other `tb/tb_*.sv` to test a single block.
`tb/tiara_tb_pkg.sv` has small assembler functions (`i_load`, `i_loopr`,
`i_memcpy`, ...) for writing operators in a testbench.
`tb/tiara_mem_model.sv` is the stand-in for host memory, the DMA engine,
the RDMA engine and remote hosts. Its `DEAD_HOST` parameter makes one host
swallow requests, so timeouts can be tested. Its `LINK_BPC` parameter limits
copy data to that many bytes per cycle on each port (0, the default, means
no limit). `tb/tb_tiara_workloads.sv` runs the workload sweeps above in
about ten seconds.

## Sizes

All sizes are in `tiara_pkg`:

| parameter | default | origin |
|-----------|---------|--------|
| `NUM_MP` | 8 | published |
| `NREGS` × `XLEN` | 16 × 64 | published |
| `IMEM_DEPTH` | 1024 | published |
| `NUM_OPS` | 256 | published |
| `LOOP_DEPTH` | 8 | published |
| `ASYNC_SLOTS` | 32 | published |
| `DISP_SLOTS` | 96 | published |
| `NPARAMS` | 8 | published |
| `ASYNC_TIMEOUT` | 2^20 cycles | this implementation's choice |
| `CTAG_W` | 16 | this implementation's choice |
| address fields | 8/8/48 bits | this implementation's choice |

`tiara_top` also takes `NMP` and `LOCAL_HOST_ID` as parameters.
