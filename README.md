# Hardware loops and streaming lanes for a RISC-V SIMT core

A data-parallel kernel such as `C[i] = A[i] + B[i]` compiles, on a SIMT
(GPGPU-style) RISC-V core, into a loop of a dozen instructions of which one does
the work. The rest is overhead:

- pointer increments;
- loads and stores;
- a counter, a compare and a branch;
- thread-mask instructions that switch off threads that have already run out
  of iterations.

This RTL removes that overhead with two extensions, both programmed through
control and status registers (CSRs) before the loop starts.

- **Control Flow Manager (CFM)**, in the fetch stage. The CFM has two parts:
  - Hardware loops recognise the end of a loop body by its PC, count
    iterations and redirect fetch to the start of the body.
  - A *loop predication stack* (LPS) keeps, per warp and nesting level, the
    set of threads still inside each loop. It hands decode a thread mask in
    which finished threads are already off.
- **Decoupled Memory Streaming Lanes (DMSLs)**, in the issue stage. A DMSL is
  bound to one register operand. It has one streaming lane per thread, and
  each lane has a small FIFO and an address pointer for every warp.
  - A read stream prefetches ahead of use. When the instruction issues, its
    operand comes out of the FIFO instead of the register file.
  - A write stream takes the result at writeback and stores it, so the
    register file is not written.
  - Requests reach a multi-port L1 data cache and the shared memory through
    priority arbiters. The load/store unit (LSU) keeps priority on port 0.

With both extensions the loop of the example above is the single instruction
`fadd f16, f14, f15`. It is fetched again and again with start PC = end PC,
and `f14`, `f15` and `f16` are bound to three streams.

The default configuration is:

| Setting | Value |
|---|---|
| Warps | 8 |
| Threads per warp | 16 |
| Nesting depth | up to 4 loops |
| DMSLs | 3 |
| Credits per FIFO (per warp and thread) | 16 |
| Data-cache ports | 3 |

## Block structure

```
vx_ext_top
├── cfm                       fetch stage
│   ├── hwloop_ctrl           start/end PC, bounds, counters, next-PC override
│   └── lps                   per-warp stack of thread masks
├── dmsl_unit                 issue stage: operand mapping, ready, bypass, redirect
│   └── dmsl  ×NUM_DMSL       config/stride registers, warp choice, request/tag
│       └── dmsl_lane ×NUM_THREADS   address walk, element extraction
│           └── dmsl_fifo ×NUM_WARPS credit FIFO (reserve / fill / pop)
├── mem_arbiter (data cache)  NUM_DPORTS ports, LSU first on port 0
└── mem_arbiter (shared mem)  1 port, LSU first
```

`ext_pkg` holds:

- the CSR address fields and register numbers;
- the DMSL configuration word (`dmsl_cfg_t`);
- the precision and direction encodings.

The following stay outside and connect through ports of `vx_ext_top`:

- the core pipeline: warp scheduler, divergence stack, decode, scoreboard,
  register files, execution units, LSU and CSR unit;
- the data cache;
- the shared memory.

## Hardware loops

Each warp has `NUM_LOOPS` loop levels. Level 0 is the outermost. A level holds:

- a start PC and an end PC;
- a bound for each thread;
- a tail thread mask;
- an enable flag;
- the iteration counter (the "loop state").

All of this happens in the fetch cycle of the warp picked by the scheduler:

1. **Loop start.** Let `d` be the number of loops currently running for the
   warp. If the fetched PC equals the start PC of level `d` and that level is
   enabled, loop `d` starts. Its counter is 0, and the LPS pushes a mask for it.
2. **Loop end.** The fetched PC is checked only against the end PC of the
   innermost running loop. At that PC, the loop jumps back if some thread of
   the loop still has `bound > counter + 1`:
   - `next_pc_o` becomes the start PC;
   - the counter increments;
   - `loop_jump_o` is set.

   Otherwise the loop falls through:
   - the counter returns to 0;
   - the LPS pops;
   - the next loop outwards becomes the innermost.
3. **Thread condition.** A thread is live in the current iteration while its
   own bound is greater than the counter. On the last iteration the tail mask
   is also ANDed in. This lets software switch off lanes for a partial final
   iteration without per-thread bounds.

A loop body may be a single instruction (start PC = end PC). In that case the
push and the pop of its last fetch happen in the same cycle and cancel out.

The enable flag stays set when a loop completes, so an inner loop starts again
on every iteration of the outer loop.

Two nested loops must not end on the same PC: only the innermost end PC is
compared. Give the outer loop at least one instruction after the inner loop's
end.

## Loop predication stack

The thread mask handed to decode is:

```
hw_active ? (top & cond & fetch_tmask) : fetch_tmask
```

- `top` is the stacked mask of the innermost loop.
- `cond` is its per-thread condition.
- `fetch_tmask` is the mask the core's divergence stack produced.

Divergence inside a loop body therefore still works, provided the
reconvergence point lies before the loop's end PC.

When the first loop starts, the fetch mask is pushed. When a nested loop
starts, the value pushed is the enclosing loop's stacked mask ANDed with the
enclosing loop's condition and the fetch mask. A thread that has finished the
outer loop therefore never enters the inner one.

## Streaming lanes

### Address walk

A DMSL does not look at what the fetch stage is doing: fetch runs ahead of
the data. Instead, every lane walks the loop nest itself, from the loop
enables and the bounds of its own thread:

- The enabled levels 0 .. n−1 form the nest.
- After each element, the innermost level that can still count up is
  incremented, and every level inside it restarts at 0.
- The pointer then moves by the stride of the level that was incremented.

Strides are therefore increments: the change of address when that level
advances and all inner levels wrap. Two examples:

- **Row-major matrix, inner level `j` over `J` columns.** Inner stride +4 and
  outer stride +4: the two levels together walk the matrix contiguously.
- **Vector re-read on every row.** Inner stride +4 and outer stride
  −4·(J−1), which jumps back to `x[0]`.

A stream consumed once per outer iteration also works, provided its addresses
are consecutive. In the matrix-vector test the result stream writes one
element per row. It advances one stride step per element it actually
receives, not per iteration of the nest.

When every level has wrapped for a thread, that thread's lane stops
requesting: prefetch never reads past the end of the data. With no loop
enabled the stream is unbounded and advances by the level-0 stride.

### Read stream

1. A lane asks for a request while its FIFO has a free credit.
2. The DMSL picks one warp, round robin among warps with requesting lanes. It
   sends one request that carries the address of every lane of that warp
   which is asking.
3. When the arbiter grants the request, each lane reserves a FIFO slot.
4. The response fills that slot. The slot index travels in the tag, so
   responses may return in any order and on any port.
5. Issue pops the head.

16- and 8-bit elements are taken from the addressed bytes of the word:

- integer elements are sign-extended;
- floating-point elements are zero-extended.

### Write stream

1. Issue reserves a slot in each active lane.
2. The result fills the slots in order at writeback.
3. A store is requested while a head slot holds data.
4. The grant pops the slot.

### Issue check

For the instruction about to issue, `dmsl_unit` compares each source and
destination register (`{fp, index}`) with the register bound to each DMSL that
has redirect enabled for that warp. `iss_ready_o` is low unless both hold:

- every bound read stream has data for **all** active threads;
- every bound write stream has room in all active threads.

The core's issue stage should then try another warp. This is the same
back-pressure as a register hazard.

On `iss_fire_i`:

- read streams pop, and their values are on `iss_src_data_o` with
  `iss_src_bypass_o` set;
- write streams reserve.

At writeback, `wb_redirect_o` tells the register file to drop a result that
has gone to a stream.

### Arbitration

The multi-port arbiter grants each port to at most one request per cycle, in
this order:

1. The LSU always takes port 0 when it has a request.
2. The DMSLs then take the remaining ports in order of need:
   - a read stream's need is its number of free credits;
   - a write stream's need is its number of filled credits.
3. Ties go to the lower-numbered DMSL.

A request goes to the shared memory when the address of its first active
thread lies in `[SMEM_BASE, SMEM_BASE + SMEM_SIZE)`. The default window is
`0xFF000000`, 16 KiB. The shared memory has its own one-port arbiter with the
same rules.

Tags are built as follows:

- Outgoing tags are `{source, warp, per-lane {slot, byte offset}}`.
- The source field steers each response back. `NUM_DMSL` denotes the LSU.
- Both memories must return the tag they were given. They may answer in any
  order.

## Configuration registers

The CSR address has 8 bits:

| Bits | Field |
|---|---|
| 7 | unit: 0 = CFM, 1 = DMSL |
| 6:4 | unit ID: loop level for the CFM, DMSL index for a DMSL |
| 3:0 | register |

A CSR write carries one 32-bit word per thread (`csr_wdata_i`) and a thread
mask:

- Loop bounds and DMSL base addresses take each thread's own value.
- All other registers take the value of the lowest active thread.

A CSR read (`csr_raddr_i`, `csr_rwid_i`) returns one word per thread from
`csr_rdata_o`, for the CFM and the DMSL registers alike. A read of a DMSL base
register returns that thread's current stream pointer.

| Unit | Reg | Bits | Contents |
|---|---|---|---|
| CFM | 0 | 31:0 | loop start PC |
| CFM | 1 | 31:0 | loop end PC |
| CFM | 2 | 31:0 | tail thread mask (last iteration) |
| CFM | 3 | 30:0 / 31 | bound (iterations) / enable |
| CFM | 4 | 31:0 | iteration counter (readable) |
| DMSL | 0 | 31:0 | base address (restarts the stream, empties the FIFO) |
| DMSL | 1 | 4:0 | bound register index |
| DMSL | 1 | 6:5 | FP/INT (bit 5 = floating point, FP register file) |
| DMSL | 1 | 9:7 | precision: 0 = 32, 1 = 16, 2 = 8 bit |
| DMSL | 1 | 10 | prefetch (memory requests) enable |
| DMSL | 1 | 11 | redirect (operand mapping) enable |
| DMSL | 1 | 13:12 | direction: 0 = read, 1 = write |
| DMSL | 5+l | 31:0 | address stride of loop level l |

Program the registers in this order:

1. Loop registers, with the enable bit written last for each level.
2. DMSL strides.
3. DMSL configuration word.
4. DMSL base address.

The base-address write starts the stream. If it comes before the loops are
set up, the lane would walk a nest that is not yet complete.

For example, to set up vecadd for one warp and three streams:

```
CFM[0].start = CFM[0].end = PC of "fadd f16, f14, f15"
CFM[0].bound = 0x8000_0000 | n_t            (per thread)
DMSL[k].stride[0] = 4
DMSL[0].cfg = 0x0C2E   (read,  redirect+prefetch, fp, f14)
DMSL[1].cfg = 0x0C2F   (read,  ..., f15)
DMSL[2].cfg = 0x1C30   (write, ..., f16)
DMSL[k].base = &X[thread's first element]   (per thread)
```

## Interface timing of `vx_ext_top`

Combinational from the inputs of the same cycle:

- **Fetch side:** `next_pc_o`, `dec_tmask_o`, `loop_*_o`.
- **Issue side:** `iss_ready_o`, `iss_src_*`, `iss_rd_redirect_o`, and
  `wb_redirect_o` from `wb_*`.
- **Memory request side:** arbitration happens in the cycle the request is
  presented. `dc_valid_o` is raised only when the port's `dc_ready_i` is
  high, and the DMSL state updates at that clock edge.

At the clock edge:

- loop and stack state update when `fetch_valid_i` is high;
- FIFOs update on `iss_fire_i`, `wb_valid_i` and responses;
- CSR writes take effect.

Reset is asynchronous and active low. After reset:

- every loop is disabled;
- every stack is empty;
- every stream is idle.

## Where this departs from the original description

- **Read-write mode is not built.** The original design also lets a DMSL run
  in read-write mode, for an operand that is read and written back, such as
  an accumulator. How such a stream orders its read and its write-back is not
  specified, so only read and write modes exist here. An accumulator kept in
  a register works, as the matrix-vector test shows.
- **Lanes walk the nest themselves.** The original block diagram shows the
  address generator choosing its stride from the fetch stage's innermost
  active loop. Here each lane follows the loop nest itself, for the reason
  given under "Address walk".
- **Assumed encodings and rules.** These are the design's own choices:
  - the split of the CSR address into unit, ID and register;
  - the direction field and the precision codes;
  - a stride register for each loop level;
  - the shared-memory address window;
  - the tag layout;
  - the round-robin warp choice inside a DMSL;
  - how sub-word elements are extended;
  - the rule that nested loops do not share an end PC.
- **Fixed nesting depth.** The nesting depth of 4 is a choice; the original
  leaves it as a design-time parameter.
- **Not included:** the multi-port data cache, the shared memory, the
  baseline pipeline and SRAM macros. The FIFOs are register arrays.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_hwloop_ctrl` | one loop with per-thread bounds: next-PC override, push/pop, per-thread predicate, tail mask, loop-state CSR, an unconfigured warp left untouched, a one-instruction body |
| `tb_lps` | random push/pop/condition sequences against a reference stack |
| `tb_cfm` | two-level nests with per-thread bounds on two interleaved warps, checked against a reference model: every fetched PC and decode mask, divergence and tail masks, instruction count |
| `tb_dmsl_fifo` | random reserve/fill/pop/flush against a queue model |
| `tb_dmsl_lane` | an 8-bit read stream over a two-level nest (out-of-order responses, stop after the last element, credit limit, sign extension); a 16-bit write stream (store order, byte placement); pointer readback |
| `tb_dmsl` | a read stream with per-thread bounds and a write stream on two warps over two ports; reported need; readback of configuration, stride and pointer |
| `tb_dmsl_unit` | vecadd through three DMSLs and the arbiter: operand mapping, ready/hold, bypass data, redirect, final memory contents, register readback |
| `tb_mem_arbiter` | random requests against a reference allocation; LSU priority; response steering |
| `tb_vx_ext_top` | end-to-end test at 2 warps × 4 threads (see below) |
| `tb_workloads` | saxpy, knn, sgemm and a 2-channel 3×3 conv2d run end to end at 2 × 4 (conv2d uses all four loop levels); every result and the issued-instruction count of each warp are checked |
| `tb_vx_ext_top_full` | the same test with every parameter at its default (8 × 16, 4 loops, 3 DMSLs, 3 ports, 16 credits); about 380 cycles |

The end-to-end test has these parts:

- **Pipeline model.** A small behavioural model of fetch, issue and
  writeback (in the testbench) drives the top. Behavioural multi-port
  memories (`tb/mem_model.sv`) answer for the data cache and the shared
  memory.
- **LSU traffic.** An LSU model issues loads throughout.
- **Vecadd.** Runs with per-thread bounds and a diverged thread. One stream
  is placed in shared memory.
- **Matrix-vector product.** Uses two nested loops.
- **Checks.** Every result in memory, that nothing is written past a
  thread's bound, and the number of instructions each warp issued.
- **Mechanism counters.** The test counts each mechanism and fails if any
  never occurs: loop start, jump back, loop end, nesting, per-thread
  masking, divergence masking, issue held for stream data, credits
  exhausted, several data-cache ports busy in one cycle, LSU priority on
  port 0, shared-memory traffic, and routing of each request to the right
  memory.

To simulate with Verilator 5 (add `-Wno-fatal` if your version treats
warnings as errors):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/ext_pkg.sv rtl/*.sv tb/mem_model.sv tb/tb_vx_ext_top.sv \
    --top-module tb_vx_ext_top -Mdir obj_top
./obj_top/Vtb_vx_ext_top
```

Block testbenches need only the RTL (`rtl/ext_pkg.sv` first) plus their own
file. `tb_dmsl_lane`, `tb_dmsl`, `tb_dmsl_unit` and the top tests also need
`tb/mem_model.sv`. The design's assertions cover:

- FIFO overflow and underflow;
- stack discipline;
- grants without a request;
- issue while not ready.

`--assert` turns them on.

`tb/tb_vx_ext_top_full.sv` is derived from `tb/tb_vx_ext_top.sv`. Only the
header, the module name, the size constants and the parameter list of the top
differ, so edit both together.
