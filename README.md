# Near-cache tensor units for a multi-core CPU

A server CPU running int8 DNN inference spends most of its power not on
arithmetic but on moving every instruction of a heavily repetitive loop nest
through fetch, decode, renaming and out-of-order dispatch, and it moves every
operand up to the 32 KB L1 even though the 1 MB L2 and the L3 slice could
deliver far more combined bandwidth. The design here removes both costs at
once. It places a small, in-order **Tensor Functional Unit (TFU)** beside each
cache level of a core: one near the L1, one near the L2 and one near the
core's L3 slice. The core sends a TFU a compact description of a loop nest
once. The TFU then unrolls it by itself, reading and writing its own cache.

The work goes through four steps:

1. The core decodes the kernel's body, a handful of instructions tagged with a
   *PSX* bit, together with a few meta-instructions that give the loop counts
   and the address and register strides.
2. It collects them in per-thread **code registers**.
3. On `TFULoopEnd` it ships them to the TFU bound to that hardware thread.
4. The TFU expands the loop nest into loads, stores and 64-byte int8 MAC
   operations, executes them near the data, and raises DONE.

Software chooses the cache level a primitive runs at by choosing the SMT
thread it runs on:

| Thread | TFU used |
|---|---|
| SMT0 and SMT3 | near-L1 |
| SMT1 | near-L2 |
| SMT2 | near-L3 |

The RTL covers the additions to one core. The core pipeline, caches, TLB and
memory stay outside and connect through ports.

## Block map

```
 decoded instrs ──► psx_dispatch ── non-PSX ──► other_* (core FUs)
                        │  "Is PSX?", fence
                        ▼ PSX
          psx_frontend ×4 (one per SMT thread: 32 code registers)
            │T0      │T3        │T1          │T2
            └─offload_arb─┐     │            │
                          ▼     ▼            ▼
                     tfu (L1)  tfu (L2)    tfu (L3)
                        │         │            │
                        │    coh_tracker   mem port ──► coh_tracker
                        │    (L1-owns bit)  (L3 TFU sharer bit; snoops core requests)
                        ▼         ▼            ▼
                  mem_req/rsp[0] [1]          [2]     ──► caches (outside)
       TC misses of all three ──► xlat_arb ──► tlb_req/rsp (core TLB, outside)
```

Inside each `tfu`:

```
 offload beats ─► tfu_code_rf ─► tfu_unroller ─┬─► tfu_issue_queue (loads/stores, 8)
                                               └─► tfu_issue_queue (compute, 8)
   load/store head ─► tfu_agu ─► tfu_tc ─► cache port      compute heads ─► tfu_mac ×NMAC
                         loads return in order ─► tfu_data_rf (48 × 64 B) ◄── results
```

| File | Role |
|---|---|
| `rtl/psx_pkg.sv` | constants, opcodes, code-register and micro-op formats |
| `rtl/psx_dispatch.sv` | steers decoded instructions; hardware fence |
| `rtl/psx_frontend.sv` | per-thread code registers; offload to the TFU |
| `rtl/offload_arb.sv` | SMT0 and SMT3 share the near-L1 TFU |
| `rtl/tfu.sv` | one TFU (built from the next six files) |
| `rtl/tfu_code_rf.sv` | TFU side of the offload: header and 32 code entries |
| `rtl/tfu_unroller.sv` | the unroll scheduler |
| `rtl/tfu_issue_queue.sv` | 8-entry in-order queue with several push/pop slots |
| `rtl/tfu_agu.sv` | address generation |
| `rtl/tfu_tc.sv` | 6-entry translation cache |
| `rtl/tfu_data_rf.sv` | 48-entry, 64-byte data register file |
| `rtl/tfu_mac.sv` | one 64-MAC int8 compute unit |
| `rtl/coh_tracker.sv` | one bit per cache line plus the snoop it forces |
| `rtl/xlat_arb.sv` | shares the core TLB among the three TCs |
| `rtl/proximus_core.sv` | top: one core's additions |

## Programming model: what the code registers hold

A kernel is a loop nest of up to **four loops**, with loop 0 innermost, and up
to **32 code registers**. A code register is one instruction of the loop body,
stored in `code_entry_t` (250 bits). It holds:

- an opcode: `LOAD`, `STORE`, `MAC`, `ZERO`, `RELU`, `MAX` or `NOP`;
- a destination register and two source registers;
- a 48-bit base virtual address;
- one signed 32-bit address stride per loop;
- one signed 4-bit register-id stride per loop and per operand;
- a 4-bit loop-enable mask and a *tail* bit.

The PSX instructions fill these fields:

| Instruction | Effect |
|---|---|
| `TFULoopStart` | clears the thread's code registers |
| PSX-tagged instruction | allocated into the next code register, all loops enabled |
| `TFULoopCount` | number of loops |
| `TFULoopIteration` | iteration count of one loop |
| `TFULoopDisable` | takes a code register out of some loops |
| `TFUBaseAddres` | base address |
| `TFUStride` | address stride of one loop |
| `TFURegStride` | register stride of one operand in one loop |
| `TFULoopEnd` | offloads the kernel and fences the thread |

In the RTL, a decoded instruction arrives as `dec_instr_t`:
`{psx, thread, kind, creg, loop, opnd, value}`. For a tagged instruction,
`value` packs `{src2, src1, dst, tail, op}` into bits 21:0.

At a point `idx[0..3]` of the iteration space, an enabled code register
executes with:

```
va  = base + Σ_l idx[l] · astride[l]
reg = reg  + Σ_l idx[l] · rstride[operand][l]      (mod 64)
```

A code register whose loop-enable bit for loop *l* is clear sits outside loop
*l*. It executes only at that loop's first iteration, or, if its tail bit is
set, only at its last. This is how a 1×1-convolution-like kernel is written:

| Code register | Enabled loops | Tail | Runs |
|---|---|---|---|
| `ZERO r0+i` | loop 0 only | first | once per output |
| `LOAD r40 ← W[k]` | loop 1 only | | once per k |
| `LOAD r20 ← X[i][k]` | both | | |
| `MAC r0+i += r20·r40` | both | | |
| `RELU r0+i` | loop 0 only | last | after the last k |
| `STORE r0+i` | loop 0 only | last | after the last k |

In this example loop 0 runs over the outputs i and loop 1 over the
input-channel blocks k. The unroller visits code registers in program order
at every iteration point.

A kernel with more than 32 instructions does not fit. The extra instructions
are dropped and `code_overflow[thread]` is raised until the next
`TFULoopStart`. Software must split such a kernel.

### Offload

`TFULoopEnd` streams the kernel over the 64-bit offload bus:

- beat 0: the four 16-bit iteration counts;
- beat 1: `{num_insts, num_loops}`;
- then 4 beats per code register, least significant first.

A kernel of N instructions takes 2 + 4N cycles, so the 6-instruction example
takes 26 cycles. This costs more than an 8-byte-per-register estimate would.
The fields listed above simply do not fit in 8 bytes. The cost is still small
next to the hundreds of cycles the TFU then runs unattended.

## Inside a TFU: unrolling, two in-order queues, and load hoisting

This is the part that most needs care.

### Unroll scheduler

`tfu_unroller` walks (code register, iteration point) pairs. It examines up to
W = 4 pairs per cycle. It skips inactive ones and pushes active micro-ops, in
order, into one of two queues:

- the **load/store queue**, 8 entries;
- the **compute queue**, 8 entries.

It stops at the first micro-op whose queue is full, so nothing is reordered
within a queue and nothing is lost. Every micro-op carries a 6-bit wrapping
age tag, and "older" is decided by comparing tags modulo 64. That is correct
while the queued micro-ops span fewer than 32 tags. The span can only grow
past the 16 queue slots when the load/store side keeps issuing while a
compute head waits, so the span is bounded by that wait. With very slow
caches and a kernel of more than about 30 memory operations between two
compute operations it could be exceeded. The unroller does not guard against
this. A wider tag, or a stall when the span reaches 32, would remove the
limit.

### Issue and hazards

Each queue issues strictly in order from its head. The two heads are
independent, which is what lets loads **hoist above compute** and hide cache
latency. There is no register renaming, so every hazard is checked against
the *older* entries still queued in the other queue:

| Queue head | Waits while |
|---|---|
| compute | an older queued load/store writes a register it touches (RAW/WAW), or reads its destination (WAR) |
| compute | a load in flight writes a register it touches |
| load | older queued compute reads or writes its destination (WAR/WAW) |
| store | older compute writes its source |
| store | a load in flight writes its source |

Loads and stores stay in order among themselves, so memory ordering inside
the TFU is trivially kept.

### Execution

- **Compute.** Up to `NMAC` compute ops issue per cycle. They must be
  consecutive, and each must be independent of the others. Each `tfu_mac`
  computes 16 int32 lanes:
  `lane_j += Σ_{k<4} u8(src1[4j+k]) · s8(src2[4j+k])`.
  That is 64 MACs per operation.
- **Other ops.** `RELU` clamps int32 lanes. `MAX` is a per-byte signed max,
  for pooling. `ZERO` clears a register.
- **Memory.** One memory operation issues per cycle. Load data returns in
  order and is written back through a small FIFO of destination ids, with up
  to 8 loads in flight. Stores are posted.
- **DONE.** DONE pulses once the unroller has finished and both queues and
  the load FIFO have drained.

### Translation cache

The TFU works on virtual addresses. `tfu_tc` holds 6 page translations (4 KiB
pages) and is fully associative:

- a miss stalls the load/store head and sends the page number to the core's
  TLB, one miss at a time; `xlat_arb` shares the TLB port round-robin among
  the three TFUs;
- a fill uses the lowest invalid entry, otherwise a round-robin victim;
- `inval_all` (TLB shootdown, page swap, context switch) clears every entry
  in all three TCs; a translation still in flight is discarded when it
  returns.

## Coherence

The TFUs access their caches directly, so two ownership bits keep them
coherent with the core. Both use `coh_tracker`: one bit per cache line,
indexed by the line address. An access to a line whose bit is clear passes at
once. An access to a line whose bit is set first raises a snoop, waits for
its acknowledge, then clears the bit and proceeds.

- **At the L2.** The bit means "the L1 owns this line". It is set by L1 fills
  and cleared by L1 evictions. A near-L2 TFU access to an owned line snoops the
  L1 first. This is done for loads as well as stores, because the L1 may hold
  a dirty copy.
- **At the L3 slice.** The bit means "the near-L3 TFU's reserved ways hold
  this line". It is set on each near-L3 TFU access. A core-side request to such
  a line snoops those ways first. The reserved ways themselves belong to the
  slice and are outside this design (cache-way partitioning, as in CAT).

## Thread sharing and the fence

`psx_dispatch` looks at one decoded instruction per cycle:

- PSX instructions go to the thread's `psx_frontend`;
- other instructions go to `other_*`;
- an instruction from a thread whose TFU is busy (from `TFULoopEnd` until
  DONE) is held, which is the **hardware fence**.

The fence guarantees that a thread never mixes TFU and core execution. The
held instruction blocks the single dispatch slot, which is simple and
conservative.

SMT0 and SMT3 share the near-L1 TFU through `offload_arb`. SMT0 wins a
simultaneous request. The winner keeps the bus until its DONE, and DONE is
returned only to it.

## Configuration

`proximus_core` defaults to the P256 configuration: 256 MACs/cycle per core.

| Parameter | Default | Meaning |
|---|---|---|
| `NMAC_L1` | 2 | 64-MAC units near L1 (128 MAC/cycle) |
| `NMAC_L2` | 1 | units near L2 (64 MAC/cycle) |
| `NMAC_L3` | 1 | units near L3 (64 MAC/cycle) |
| `L2_LINES` | 16384 | 1 MB L2 / 64 B |
| `L3_LINES` | 32768 | 1.375 MB slice = 22528 lines, rounded up to a power of two |

The larger P640 configuration (256/256/128 MACs) is `NMAC_L1=4, NMAC_L2=4,
NMAC_L3=2`. The package fixes the remaining sizes:

- 32 code registers;
- 48 data registers of 64 bytes;
- 8-entry queues;
- a 6-entry TC;
- 4 loops;
- an 8-byte offload bus.

## Where this departs from the description it follows

- **Code registers.** There are 32 per thread. One sentence of the source
  says 16, but its TFU figure and its ISA discussion say 32.
- **Offload length.** A code register is 250 bits, sent in 4 beats, instead
  of an estimated 8 bytes in 1 beat. The offload therefore takes 2 + 4N
  cycles rather than about 16.
- **Loop semantics.** The tail rule (first or last iteration) and
  register-id arithmetic modulo 64 are this design's own definition of the
  loop meta-data. So are the decoded-instruction encoding, the offload beat
  layout, the 4-slot unroller, and one memory access per TFU per cycle.
- **Compute operations.** Only MAC, ZERO, RELU and MAX exist. Average pooling
  and MobileNet-style depthwise convolution would need more element-wise
  operations.
- **L2 snoops.** The L2 bit snoops on loads as well as stores.
- **Bit arrays.** Both are flat arrays indexed by line address. In a real
  cache they would be a field of the tag array. Together they total 6 KB,
  which is more than a 2 KB per-core estimate could hold at one bit per line.
- **Copy throughput.** Loads and stores share one strictly ordered queue. A
  store therefore waits at its head for its own load's data, and everything
  behind it waits too. Pure copies such as concat run at about one line per
  cache latency, unlike kernels with compute between the load and the store.
  The ordering follows the description; its cost for data-movement layers is
  a consequence of it.
- **Not built.** TFU exceptions, saving and restoring the code and data
  registers on a context switch, the caches, the TLB and page walker, the core
  pipeline, the L3 way partitioning and the interconnect.

## Verification

Every block has a self-checking bench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

- **Datapath blocks** are checked against independent models: random vectors
  for the MAC, AGU, register file and queues, and random kernels for the
  unroller.
- **`tb_tfu`** runs a convolution-like and a pooling kernel on a TFU with
  two MAC units. It checks every output line against an instruction-level
  reference model (`tb/tfu_tb_pkg.sv`) that executes the loop nest one
  instruction at a time.
- **`tb_proximus_core`** runs the top at its default parameters. It programs
  kernels through PSX instructions on all four threads and checks every
  output. It also counts each mechanism and fails if any never occurs:
  - fence stalls and non-PSX pass-through;
  - code-register overflow;
  - sharing of the near-L1 TFU;
  - load hoisting, hazard stalls and queue back-pressure;
  - dual compute issue;
  - TC misses reaching the TLB, and TC invalidation;
  - L1 snoops from the L2 TFU;
  - reserved-way snoops for core requests.

  It then re-runs the near-L2 kernel after invalidating the TCs and checks
  that its pages are translated again. The whole run takes about 1300
  cycles.
- **`tb_tfu_workloads`** runs two layer types on a near-L2 TFU (one MAC
  unit). Each result is checked against integer arithmetic done directly in
  the bench:
  - a batch-1 fully connected layer (192 neurons × 64 inputs, VNNI layout,
    with ReLU), taking about 690 cycles for 220 cache accesses;
  - a two-tensor concat (33 lines), which runs at about one line per cache
    latency (see below).
- **Behavioural models.** The memories behind the caches (`tb/cache_model.sv`,
  with random back-pressure and fixed latency) and the TLB (`tb/tlb_model.sv`)
  are behavioural models for the benches only.

To simulate a bench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/psx_pkg.sv tb/tfu_tb_pkg.sv \
    tb/tb_proximus_core.sv --top-module tb_proximus_core -Mdir obj
./obj/Vtb_proximus_core +verilator+rand+reset+2
```

Replace the bench name to run another. The `+verilator+rand+reset+2` option
randomises every flop before reset. The design resets everything it reads.

Tool notes:

- Verilator notes that the reset of the two large bit arrays replicates a
  zero more than 8192 times. This is intended.
- It also notes that `rst_n` is used both as an asynchronous reset and in
  assertion `disable iff` clauses. This is harmless.
- Synthesis of `tfu` and `proximus_core` is slow: the register files, code
  registers and bit arrays are all flops with reset.
