# Asynchronous Memory Access Unit (AMU)

Far memory reached over a fabric such as CXL answers in hundreds of
nanoseconds to several microseconds. A core running at 3 GHz needs well over
a hundred requests in flight to keep busy at that latency. An out-of-order
core cannot hold that many loads: every load occupies a load-queue entry, a
ROB entry and a miss-handling register until its data arrives.

The AMU takes long-latency accesses out of the pipeline altogether.

- **Starting a transfer.** Software starts a transfer with `aload` (far memory
  to scratchpad) or `astore` (scratchpad to far memory). The instruction
  returns at once with a small integer, the *request ID*, and retires like a
  store.
- **The scratchpad (SPM).** The transfer runs in the background between far
  memory and a scratchpad carved out of the L2 cache.
- **Collecting completions.** Later, `getfin` returns the ID of some completed
  transfer. Software then uses the data in the SPM with ordinary loads and
  stores.

A lightweight-thread or coroutine runtime suits this model. Each task issues
its `aload` and suspends. The scheduler loop calls `getfin` and resumes the
task that owns the returned ID. The number of outstanding requests is then
limited by how many IDs and how much SPM there are, not by pipeline queues.

The unit has two halves:

| half | where it sits | what it does |
|---|---|---|
| **ALSU** (asynchronous load/store unit) | an execution unit in the core | executes the new instructions, including under speculation |
| **ASMC** (asynchronous scratchpad memory controller) | extends the L2 controller | owns the SPM, keeps all per-request state in the SPM, talks to far memory |

The two halves exchange request IDs in batches, to keep the traffic between
core and L2 low.

This repository holds synthesizable SystemVerilog for both halves and for the
SPM. It also holds self-checking testbenches for every module.

## Instructions seen by software

| instruction | effect |
|---|---|
| `aload rd, rs1, rs2` | Copy `granularity` bytes from memory address `rs2` to SPM address `rs1`. `rd` receives the request ID, or 0 when no ID is free. |
| `astore rd, rs1, rs2` | Copy `granularity` bytes from SPM address `rs1` to memory address `rs2`. `rd` as for `aload`. |
| `getfin rd` | `rd` receives the ID of a completed request, or 0 when none has completed since the last `getfin`. |
| `cfgrw rs1, reg` | Write a configuration register. |
| `cfgrr rd, reg` | Read a configuration register. |

There are three configuration registers:

- **`granularity`**: the size in bytes of each later `aload`/`astore`.
  - Reset value 8. Range 1 to 4096.
  - Sizes below 64 bytes must be a power of two and aligned at both addresses.
  - Sizes of 64 bytes or more must be whole lines, line-aligned at both
    addresses.
- **`queue_base`**: SPM byte address of the metadata area, rounded down to a
  64-byte line.
- **`queue_length`**: how many request IDs exist (IDs 1..`queue_length`).
  - At most 512; larger values are clamped.
  - Writing it rebuilds the ID lists. All IDs become free, and any completions
    not yet collected are forgotten. Software writes it once, before use.

ID 0 never names a request; it is the failure value of `aload`, `astore` and
`getfin`. An ID handed out by `getfin` becomes free again: the ALSU returns it
to the free list when the `getfin` commits. Software must therefore be done
with the SPM buffer of a request before it allocates more, or it must manage
buffers by ID.

Addresses are physical. Address translation for far-memory addresses is the
core's normal TLB path, which is not part of this RTL.

## The SPM and its metadata area

`l2_spm` is a 64 KB array of 64-byte lines with one port and a byte write
mask. Read data appears one cycle after the read. In a real chip this is a
set of L2 ways given over to scratchpad; here it is a separate array.

The SPM holds two kinds of data:

- program data, reached through the core's load/store port (`spm_*` on
  `amu_top`);
- the metadata area, which only the ASMC touches.

The metadata area starts at `queue_base` and has three parts, in this order:

1. **Request table (AMART, asynchronous memory access request table).** One
   16-byte entry per ID, four per line, indexed by ID. An entry holds:
   - state (IDLE / PENDING / DONE);
   - SPM address and memory address;
   - tags: direction, size, and the number of line sub-requests still
     outstanding.

   It takes ⌊(queue_length+4)/4⌋ lines.
2. **Free list.** ⌈queue_length/31⌉+1 lines.
3. **Finished list.** Same size as the free list.

At the maximum of 512 IDs the area is 165 lines (10.3 KB). That leaves about
53 KB for data buffers.

## Request IDs and list vectors

Every ID is either:

- on the free list;
- held by the ALSU ready to hand out;
- owned by software (an in-flight or completed request);
- on the finished list; or
- held by the ALSU ready to be returned by `getfin`.

IDs move between the ASMC and the ALSU in **list vectors** of 512 bits: a
16-bit `POS` field and 31 16-bit IDs (`lvr_t` in `amu_pkg`). `POS` counts the
unused IDs; the next one to hand out is `ids[POS-1]`. A batch from the ASMC
may be partly filled, or empty (`POS` = 0).

### ASMC side: `asmc_id_list`

Each list (free and finished) is one instance of `asmc_id_list`:

- An on-chip buffer of one list vector collects single pushed IDs. These are
  completions for the finished list, and returned IDs for the free list.
- When the buffer holds 31 IDs, it is written as one line to a circular FIFO
  of lines in the SPM.
- A *get* returns the oldest FIFO line if there is one. Otherwise it returns
  the buffer, however full, and empties it.

Most pushes and gets therefore cost at most one SPM access. The list's lines
can never overflow: the list holds at most `queue_length` IDs, and it has one
line more than those IDs need.

### ALSU side: `alsu_id_exec`

Each list has an `alsu_id_exec` instance. It holds the *list vector register*,
the current batch.

- **AllocFree** (for `aload`/`astore`) and **Getfin** take one ID from the
  register, one cycle after the request.
- When the register is empty, the instance asks the ASMC for a batch
  (GET_FREE or GET_FIN). It then hands out the first ID of the batch.

## Speculation: the hardest part

The core executes ahead of branches and may squash instructions. Sending an
`aload` early would start a transfer that cannot be taken back. So the
request micro-ops (**ALoadExec**, **AStoreExec**) only record the request.
The request goes into a small committed-request buffer when the micro-op
commits, and from there to the ASMC, in program order, like a store.

ID handling is different: it runs speculatively, so that `aload` can return
its ID at once. There are two cases.

- **The register still has IDs.** Taking one is a register-to-register move.
  - The ALSU saves the list vector register (as a checkpoint) for every
    window slot when the micro-op enters.
  - A squash restores the register to the checkpoint of the first squashed
    slot. The IDs the squashed micro-ops took are back.
- **The register is empty, so a batch must come from the ASMC.** The ASMC has
  then removed IDs from its list, and the ASMC never rolls back. The
  *uncommitted ID register* closes this gap:
  - The batch fetched by a speculative micro-op is also kept in the
    uncommitted ID register, marked with the slot that fetched it.
  - When that micro-op commits, the register is released.
  - If the micro-op is squashed instead, the register keeps the batch. The
    next micro-op that needs a batch takes it from there, without asking the
    ASMC (`ev_unc_reuse`). No ID is lost.
  - Only one batch can be uncommitted at a time. A second fetch, while the
    owner of the first is still speculative, waits until it commits or is
    squashed (`ev_unc_stall`). The stall is rare because a batch lasts 31
    allocations.

Batch fetches go to the ASMC as soon as they are needed. They can overtake
older committed `aload`/`astore` requests still in the buffer.

`getfin` hands IDs to software, and those IDs must go back to the free list.
The ALSU collects them, as the `getfin`s commit, in a *return register*. This
register has the list-vector format and lives in `alsu`. It is sent to the
ASMC as one PUT_FREE request in three cases:

- when it is full;
- just before the ALSU asks for free IDs, so that an empty free list really
  means all IDs are in use;
- before a config read.

### Configuration commands

Configuration accesses are ordered against everything else.

- **A config write** is sent at commit, through the same buffer as requests.
  No younger micro-op enters until the write has left. A committed
  `queue_length` write also empties both list vector registers and the
  return register, because the ASMC rebuilds its lists.
- **A config read** waits until it is the oldest micro-op, the buffer is
  empty and the return register has been flushed. If a config read is
  squashed while its answer is on the way, the answer is dropped.

### The micro-op window

The window in `alsu` has 16 slots, and micro-ops run in order, one at a time.

- A micro-op enters with `uop_valid`/`uop_ready` and receives a slot number,
  `uop_tag`.
- It reports completion on `wb_*`. Its result is the ID, 0, or a config
  value.
- The core commits the oldest completed slot with
  `commit_valid`/`commit_ready`.
- The core squashes a suffix of the window with `squash_valid` and
  `squash_tag` (the first squashed slot).

`ami_decoder` splits each instruction into micro-ops:

| instruction | micro-ops |
|---|---|
| `aload` | AllocFree + ALoadExec |
| `astore` | AllocFree + AStoreExec |
| `getfin` | Getfin |
| `cfgrr` / `cfgrw` | one config micro-op |

AllocFree passes its ID to the following exec micro-op inside the ALSU. An
exec micro-op whose allocation failed (ID 0) sends nothing.

## The ASMC

`asmc` takes one command at a time from the ALSU:

| command | action |
|---|---|
| ALOAD / ASTORE | Into the request engine's 32-entry pending queue. `granularity` is read at this point. |
| GET_FREE / GET_FIN | A batch from the list, answered on `rsp_*`. |
| PUT_FREE | Each ID of the vector is pushed onto the free list. |
| CFG_WR / CFG_RD | `asmc_cfg_regs`. A `queue_length` write re-initialises both lists: the free list gets 1..N and the finished list is emptied. |

### `asmc_req_engine`

The request engine is a state machine. For each request it:

1. writes the request's table entry (PENDING) with a byte-masked line write;
2. splits the transfer into line sub-requests, up to 64 for 4 KB;
3. for `astore`, reads each chunk from the SPM and shifts it to the memory
   byte offset;
4. sends one line request per chunk to far memory, tagged {ID, chunk}.

### `asmc_rsp_engine`

The response engine takes far-memory responses, in any order, into its own
32-entry queue. For each response it:

1. reads the table entry of the tag's ID;
2. for `aload`, writes the returned bytes into the SPM;
3. counts down the outstanding sub-requests;
4. after the last one, marks the entry DONE and pushes the ID onto the
   finished list.

### SPM arbitration

All SPM users share the single SPM port through a fixed-priority arbiter:

1. core loads and stores;
2. response engine;
3. request engine;
4. finished list;
5. free list.

`inflight` counts requests accepted and not yet finished.

## Top level: `amu_top`

`amu_top` connects `ami_decoder`, `alsu`, `asmc` and `l2_spm`. Its ports:

- **Pipeline side:**
  - `inst_*`: decoded instruction and its source-register values;
  - `uop_fire` and `uop_tag`;
  - `wb_*`;
  - `commit_*`;
  - `squash_valid`, `squash_tag`;
  - `flush`.
- **Core SPM port** (`spm_*`): one line per access, with byte mask; data one
  cycle after the grant.
- **Far-memory port** (`mem_req_*`, `mem_rsp_*`): valid/ready, whole 64-byte
  lines, tagged; responses in any order.
- **Event pulses** (`ev_*`): allocation failure, empty `getfin`, batch fetch,
  uncommitted-register reuse, uncommitted-register stall, PUT_FREE, squash,
  list rebuild, request split. Use them for performance counters.

Reset is asynchronous, active low, and clears all control state. SPM contents
are not reset. The metadata area becomes valid when `queue_length` is
written.

### Parameters

Every default is the design's main configuration.

| parameter | default | origin |
|---|---|---|
| `ID_W`, `LVR_BITS`, `IDS_PER_VEC` | 16, 512, 31 | from the paper |
| `SPM_BYTES` | 65536 | from the paper |
| `PEND_DEPTH` (each engine) | 32 | from the paper |
| `MAX_QLEN` | 512 | own choice: "several hundred" outstanding requests |
| `WIN` (ALSU window) | 16 | own choice |
| `CQ_DEPTH` (committed requests) | 8 | own choice |
| `LINE_BYTES` | 64 | own choice |
| `MEM_AW` | 48 | own choice |
| `MAX_GRAN` | 4096 | own choice: "up to KBs" |

After synthesis, the default configuration is about 2100 cells and 6.8 kbit
of flops, plus the 512 kbit SPM array.

## What fits

- **Outstanding requests.** At 512 IDs the unit holds over 130 outstanding
  requests, which is what a random-update (GUPS-like) loop needs at 5 µs
  latency. The same holds for 256 coroutines with small accesses (binary
  search, hash tables, linked lists, BFS, hash join, key-value stores) or
  128 skip-list walkers.
- **Large transfers.** Streaming kernels use transfers of 512 B or more. The
  64 KB SPM limits these to about 100 buffers of 512 B in flight, or about
  13 of 4 KB.
- **Object sizes.** Objects whose size is not a power of two below 64 B must
  be padded to one: 24-byte list nodes use 32 B, and 48-byte nodes use 64 B.

## Where this RTL departs from the paper's design

1. **No L1 cache between ALSU and ASMC.** The ALSU talks to the ASMC over a
   direct in-order channel. In the paper, requests travel through the L1 as
   new cache commands.
2. **The SPM is a separate 64 KB array.** It is not ways of a working
   256 KB L2. The normal caching function of the L2 is not built.
3. **Squash recovery uses a checkpoint per window slot.** The list vector
   registers are not renamed general-purpose vector registers. The observable
   behaviour is the same: the register returns to its value before the
   squashed micro-ops.
4. **The ALSU runs its micro-ops in order, one at a time.** It has no separate
   ID and request execution units running in parallel, and it does not use the
   core's LSQ or store buffer. It has its own committed-request buffer.
5. **Who frees an ID, and when, is this design's choice.** An ID returns to
   the free list when its `getfin` commits, batched in PUT_FREE. The paper
   does not say how IDs are freed.
6. **Own formats.** The request-table entry format, the layout of the lists
   in the SPM, the command encodings and the SPM arbitration are this
   design's own.
7. **Size rules for requests.** Sub-line requests must be a power of two and
   aligned. Larger ones must be whole lines. The paper does not restrict
   sizes.
8. **Latency is not modelled.** Only one cycle of SPM latency is modelled,
   not the 10-cycle L2. Address translation is not modelled.
9. **Not built:**
   - the out-of-order core;
   - its LSU, L1 and L2 controller;
   - the local and remote memory controllers;
   - the software parts: the coroutine runtime and the hash-set based
     disambiguation of conflicting asynchronous requests.

## Verification

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each
one prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it covers |
|---|---|
| `tb_ami_decoder` | Micro-op sequences for every instruction under back-pressure and flush. |
| `tb_alsu_id_exec` | Register hits, batch fetch, squash restore, uncommitted-register reuse and stall, killed fetch, clear, empty batch. |
| `tb_alsu` | A model ASMC and a core model that squashes at random. Checks that requests leave in commit order, that every ID is accounted for, PUT_FREE, config fences and reads, and that all IDs can be reallocated. |
| `tb_asmc_cfg_regs` | Register reads and writes, clamping, and the metadata layout. |
| `tb_asmc_id_list` | Against a reference queue: 512 IDs, FIFO wrap, random push/get, out-of-area writes. |
| `tb_asmc_req_engine` | 300 random jobs: table entries, split counts, line requests and store data, pending-queue back-pressure. |
| `tb_asmc_rsp_engine` | 120 requests with shuffled responses: every byte written, each request finished once, entries DONE. |
| `tb_l2_spm` | Random masked reads and writes against a reference array. |
| `tb_asmc` | With a far-memory model: list rebuild, 100 in flight, PUT_FREE, `astore`/`aload` round trip, 512 B and 4 B requests. |
| `tb_amu_top` | The full unit at its default parameters. |

`tb_amu_top` works like this:

- It plays an out-of-order core and a small task runtime.
- It runs a GUPS-like update of 120 words through `aload` → `getfin` → SPM
  load/modify/store → `astore` → `getfin`, and reads every word back.
- It then runs a 512-byte transfer and a speculation phase that forces both
  uncommitted-register reuse and the stall.
- It counts every mechanism, and fails if any count stays zero.

`tb/far_mem_model.sv` is a behavioural far memory with random latency and
out-of-order answers.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_amu_top \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/amu_pkg.sv tb/tb_amu_pkg.sv tb/tb_amu_top.sv
./obj_dir/Vtb_amu_top
```

Replace `tb_amu_top` with any other testbench name. All of them finish in
seconds. `--timescale` covers the packages and RTL files, which carry no
timescale of their own. `-Wno-fatal` keeps the linter notes below from
stopping the build.

### Linter notes

The linter reports three kinds of expected notes:

- an ascending range: the ID array is ordered like the ID0..ID30 picture of a
  list vector;
- `rst_n` used as both asynchronous reset and assertion disable;
- a few debug outputs that are left unread.

Each module's opening comment explains the ones it has.
