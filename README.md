# DARE: a matrix unit that tolerates sparse, irregular workloads

Matrix extensions such as Intel AMX give a CPU a small set of tile registers
and a systolic array. They are fast on dense GEMM. Sparse DNN kernels
(SpMM, SDDMM) are a poor fit for them, for two reasons:

* **Computation.** A sparse tile leaves most processing elements idle.
* **Memory.** Irregular addresses miss in the last-level cache (LLC). A
  classic runahead prefetcher either cannot follow the address chain through
  the matrix registers, or it floods the LLC with prefetches for data that
  is already cached.

DARE attacks each problem with one idea:

1. **A densifying ISA (GSA, gather/scatter access).** Two new instructions,
   `mgather` and `mscatter`, take one base address *per row* from a matrix
   register. Software can pack the non-zero rows of several blocks into one
   dense 16-row tile before it multiplies.
2. **Filtered runahead execution (FRE).** Instructions waiting in the issue
   queue are cut into row-sized prefetch uops. Gathers get their address
   vectors computed early. A filter lets an instruction prefetch all its rows
   only if its first row turned out to be an LLC miss.

This repository is a synthesizable SystemVerilog model of the unit. It
covers the instruction decoder, the matrix register file, the runahead issue
queue with its dependency unit and filter, the vector matrix register, the
load/store unit and a 16×16 systolic array. The host CPU, the LLC and DRAM
are not part of it: they connect through ports.

---

## 1. Architectural state and instructions

| State | Size |
|---|---|
| Matrix registers `m0`–`m7` | 8 × (16 rows × 64 bytes) = 8 KB |
| `matrixM` | rows of a tile, 1–16 (reset 16) |
| `matrixK` | bytes per row, up to 64 (reset 64) |
| `matrixN` | columns of an `mma` result, 1–16 (reset 16) |

| Instruction | Meaning |
|---|---|
| `mcfg rs1, rs2` | CSR number `rs1` ← value of `rs2` (0 = M, 1 = K, 2 = N) |
| `mld md, (rs1), rs2` | load M rows of K bytes from `rs1 + r·rs2` |
| `mst ms3, (rs1), rs2` | store M rows of K bytes to `rs1 + r·rs2` |
| `mma md, ms1, ms2` | `md[i][j] += Σk ms1[i][k] · ms2[j][k]` |
| `mgather md, (ms1)` | load row r from the address in the low 48 bits of `ms1` row r |
| `mscatter ms2, (ms1)` | store row r of `ms2` to the address in `ms1` row r |

`mma` works on 32-bit elements. `ms1` is M×K, `ms2` is N×K (B already
transposed), and `md` is M×N. Each row holds K/4 elements.

**Encoding.** The encoding is this implementation's own:
* RISC-V custom-0 major opcode (`0001011`);
* `funct3` selects the operation (mcfg 0, mld 1, mst 2, mma 3, mgather 4,
  mscatter 5);
* matrix registers sit in the low three bits of `rd`/`rs1`/`rs2`.

Handling of source operands:
* `mst` names its data register in `rd`.
* `mscatter` names the address register in `rs1` and the data register in
  `rs2`.
* The host sends the 64-bit values of its integer `rs1` and `rs2` with
  every instruction.

`mcfg` is executed in the decoder and never enters the queue. Values written
to a CSR are clamped to the register size. Unknown encodings are dropped and
pulse `illegal`.

## 2. Pipeline

```
host ──► decoder ──► RIQ (32 entries, circular) ──head──► LSU ──► LLC port
         (CSRs)       │  ├─ DMU  (chain walker)             ▲  │
                      │  └─ RFU  (arbiter + filter,         │  ▼
                      │          timestamps, classifier) ───┘  VMR (16×16×48 b)
                      │                                         + free list
                      └──head──► mma unit (16×16 systolic array)
                                    ▲▼
                               matrix register file
```

Every decoded instruction enters the **runahead issue queue (RIQ)**. Two
things happen there at the same time.

* **Architectural issue.** The head leaves the queue, in order, once it has
  no read-after-write, write-after-write or write-after-read conflict with
  an instruction still executing. The busy masks are collected from the LSU
  and the mma unit. Memory instructions go to the LSU and `mma` to the mma
  unit. The two run in parallel, so instructions complete out of order.
  There is no renaming. At most one instruction leaves the head per cycle.
* **Runahead.** Every memory instruction still waiting in the queue is a
  source of *prefetch uops*, one per row, counted by a per-entry decompose
  counter. The filter unit picks one uop per cycle, oldest first, and the
  LSU sends it to the LLC when the port is not needed by demand traffic.
  Prefetches are only there to warm the cache (and, see below, the VMR).
  The real load is issued later from the head.

## 3. Chasing gather addresses: DMU and VMR

A gather's addresses live in a matrix register. That register is normally
written by an `mld` still waiting further back in the queue. Without help,
runahead could not prefetch the gather's rows until that `mld` had really
executed.

**Dependency management unit (`dmu`).** It handles one gather at a time,
starting with the oldest gather not yet looked at:

1. It walks the queue backwards, one entry per cycle, to find the youngest
   older instruction that writes the gather's address register.
2. If that writer is an `mld`, the chain is complete. If it is itself an
   `mgather`, the walk continues from that gather's own address register,
   up to `MAX_CHAIN` = 4 producers.
3. The chain fails if:
   * there is no writer in the queue;
   * the writer is an `mma`;
   * the writer has already been woken;
   * the free list cannot supply one VMR entry per producer.
4. On success, every producer is *woken*:
   * it gets a VMR entry as its runahead destination;
   * its filter flag `granted` is set, so all its rows may be prefetched;
   * its row counter restarts, so that every row lands in the VMR entry.

   Each gather in the chain is told which VMR entry holds its addresses.

If a chain member leaves the queue or its slot is reused while the walk is
in progress, the attempt is abandoned. The slot check uses an 8-bit sequence
tag.

**Vector matrix register (`vmr`, `vmr_freelist`).**
* A VMR entry is a shadow of one matrix register holding only the low 48 bits
  of each of its 16 rows: exactly a 48-bit virtual address per row.
* There are 16 entries. A free list, itself a circular queue, hands them out
  and takes them back.
* When a producer's prefetch answers arrive, the LSU writes the first
  48 bits of each row into the entry.
* Once all M rows are in, the entry is *ready*. The consuming gather may
  then generate its own prefetch uops, reading its per-row addresses from
  the VMR instead of the (not yet written) architectural register.

Each entry counts rows in three ways: rows *expected* (the producer's M),
rows *sent* and rows *filled*. An entry is released to the free list when
all of the following hold:

* every row sent has come back;
* the consumer has finished with it, meaning it read its last row or left
  the queue;
* the entry is full, or it was aborted because the producer left the queue
  first.

An aborted entry is *dead*. Its consumer stops prefetching from it.

## 4. Filtering prefetches: tentative uops and the latency classifier

Prefetching every row of every waiting instruction wastes LLC bandwidth and
energy when the data is already cached. The **runahead filter unit (`rfu`)**
keeps two flags per queue slot:

* `TentativeSent`: the instruction has sent a prefetch uop.
* `granted`: the instruction may send all its uops.

A uop is held back while `!granted && TentativeSent`. So each instruction
first sends a single *tentative* uop. It is granted the rest when:
* the tentative uop is judged an LLC miss, or
* the DMU wakes it because it must fill a VMR entry.

The unit cannot ask the LLC whether a request hit, so it infers hit or miss
from latency:

* **Timestamp array (`timestamp_array`).** Each load-queue entry (48) stores
  a 16-bit cycle count when its request leaves. On the answer, latency = now
  − stamp, modulo 2¹⁶.
* **Classifier (`latency_classifier`).** It works on a sliding window of the
  last 32 latencies from *all* loads, demand and prefetch.
  * Latencies go into bins of 8 cycles: 32 bins, and the last bin takes
    everything from 248 up.
  * The histogram is updated incrementally as one latency enters and the
    oldest leaves.
  * A bin holding more than 20 % of the window is a peak. Only the lowest
    and the highest peak count.
  * If those two are more than 4 bins apart, the threshold becomes the lower
    edge of the emptiest bin between them (lowest bin on a tie) plus 32
    cycles of slack.
  * The new threshold is registered one cycle after the sample.
  * Before the first update the threshold is 64 cycles.
  * A tentative uop whose latency is *greater* than the threshold is a miss.

The effect is that the threshold settles in the gap between the LLC-hit and
DRAM latency clusters. It follows them when memory conditions change. In the
end-to-end test the model LLC answers hits in 20 cycles and misses in
110 cycles. The threshold moves from 64 to 56: valley bin 3 gives 24 + 32.

A returning prefetch is classified only if it is the tentative uop of an
instruction that is still not granted, and its sequence tag still matches
the slot. A slot reused in the meantime is ignored.

## 5. Load/store unit (`lsu`)

**Port.** One 64-byte request per cycle goes to the LLC. Loads carry a tag
(their load-queue index) and may be answered in any order. Stores are posted
and get no answer.

**Queues.**
* Load queue: 48 entries. The lowest free index is used.
* Store queue: 48 entries, in FIFO order.

**Demand instructions.** One demand memory instruction is handled at a time:
* `mld`/`mgather` send M row loads. Each answer is written into its register
  row, with the bytes beyond K cleared.
* `mst`/`mscatter` push M rows, with a byte mask of K bytes, into the store
  queue.

**Port priority.** Store-queue head first, then the demand load, then a
prefetch uop.

**Ordering.** The only ordering rule is coarse: a demand load does not start
until the store queue is empty. The unit reports that wait as the `sq_wait`
event.

**Prefetch answers.**
* They are reported to the filter unit, with latency and uop.
* If the uop belongs to a VMR producer, the low 48 bits of the row go to its
  VMR entry.
* They never touch the architectural registers.

## 6. MMA datapath (`mma_unit`, `systolic_array`, `pe`)

**Array.** A 16×16 output-stationary systolic array of 32-bit
multiply-accumulate PEs. Arithmetic is integer and wraps modulo 2³². Each
PE:
* holds one element of C;
* multiplies the A value coming from its left with the B value coming from
  above, and adds the product;
* passes both values on after one register.

Row i of A enters the left edge delayed by i cycles. Column j of B enters the
top edge delayed by j cycles.

**Control.** For `mma md, ms1, ms2`, the unit reads all three registers
whole, preloads `md` into the accumulators, and runs K/4 + M + N − 2 enable
cycles. It then writes the whole register back. Rows ≥ M and columns ≥ N
keep their old value, because a zero A/B operand adds nothing.

**Latency.** From start to write-back it takes K/4 + M + N cycles. For a
full tile that is 16 + 16 + 16 = 48 cycles. Only one `mma` is in flight at a
time.

## 7. Top level (`dare_mpu`)

| Port | Direction | Meaning |
|---|---|---|
| `in_valid/in_ready/in_instr/in_rs1/in_rs2` | in/out | host dispatch, one instruction per handshake |
| `mem_req_valid/mem_req_ready/mem_req` | out/in | LLC requests (`we`, 48-bit address, 512-bit data, 64-bit byte mask, 6-bit tag) |
| `mem_rsp_valid/mem_rsp` | in | load answers (tag, 512-bit data), no back-pressure |
| `idle` | out | queue empty, LSU, store queue and mma unit quiet |
| `illegal` | out | an unknown encoding was dropped |
| `threshold` | out | current classifier threshold (cycles) |
| `ev` | out | one-cycle event pulses (struct `dare_events_t`) |

The event pulses are:
* `hazard_stall`, `riq_full`
* `pf_sent`, `pf_suppressed`
* `pred_miss`, `pred_hit`, `th_update`
* `chain_wake`, `chain_fail`
* `vmr_write`, `vmr_release`
* `sq_wait`, `lq_full`
* `mma_done`, `mem_done`

All sizes are parameters of the sub-modules, and their defaults are the
published configuration:
* RIQ 32 entries;
* VMR 16 × 16 × 48 bit;
* LQ and SQ 48 entries each;
* 16×16 array of 32-bit PEs;
* classifier window 32, 8-cycle bins, 20 % peaks, 4-bin margin, 32-cycle
  slack.

The shared constants live in `dare_pkg`. The following are this
implementation's choices: the chain depth of 4, 32 histogram bins, the
initial threshold of 64, 16-bit timestamps, 8-bit sequence tags and the port
formats.

Storage added for runahead, in this implementation:
* VMR: 12,288 bits (1.5 KB).
* Timestamps: 48 × 16 bits.
* Classifier window: 32 × 5 bits.
* Per-slot flags and counters in the RIQ.

The published design's total overhead is about 3 KB, which is consistent
with these numbers.

## 8. Where this model departs from the published design

* **Issue width.** One instruction leaves the queue head per cycle. The
  published unit is 2-way issue.
* **Memory ordering.** Ordering is enforced by draining the store queue
  before any demand load. There is no address comparison, and only one
  demand memory instruction runs at a time.
* **Decomposition into uops.** Memory instructions are split into row
  uops, as published. `mma` runs as one whole-tile operation, not as uops.
* **Chain wake-up.** The DMU marks all producers of a chain at once. A
  consumer gather still starts prefetching only when its producer's VMR
  entry is full. The effect matches "each completed instruction wakes its
  consumer", but it is done by a readiness check rather than a wake message.
* **LLC port.** The LLC port is a single request channel shared by loads
  and stores. The published LLC has one read port and one write port.
* **`mscatter` and prefetching.** `mscatter` generates no prefetch uops. A
  gather generates its uops only once its VMR addresses are ready.
* **DMU choices not specified by the design.** One chain at a time, a
  one-entry-per-cycle walk, at most 4 producers, and the failure rules of
  section 3.
* **PE data type.** The published design gives only "32-bit datapath".
  Integer arithmetic was chosen here.
* **Encoding, CSR reset values and clamping, and port formats.** All are
  this implementation's own.
* **Not built.** The host CPU, the LLC (2 MB, 16-way, 20-cycle hit) and DRAM
  (45 ns, 50 GiB/s) are outside the design. The testbenches use a
  behavioural LLC model (`tb/llc_model.sv`) with a 64 KB backing store, a
  per-line presence bit, and 20-cycle hits and 110-cycle misses.
* **Not part of the design.** The static-threshold filter and the NVR
  prefetcher that the published work compares against are not built.

## 9. Workloads

The published evaluation runs SpMM and SDDMM on:
* subgraphs of PubMed, OGBL-collab and OGBN-proteins;
* a GPT-2 attention map pruned to 90 %.

Each is blockified into B×B blocks with B = 1, 8 and 16.

All of these run on the unit at its default size. It holds only tiles: B = 1
uses gathers of 16 single rows, B = 8 packs two 8×8 blocks per tile, and
B = 16 is one full tile per block. The matrices stay in memory behind the
48-bit address port. The sweeps over RIQ and VMR size need the
corresponding parameters changed; only the default point has been
simulated.

## 10. Simulating

Every file has one module, package or interface, and the files are
self-contained. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/dare_pkg.sv tb/tb_dare_mpu.sv --top-module tb_dare_mpu -Mdir obj
./obj/Vtb_dare_mpu
```

Replace `tb_dare_mpu` by any testbench below. Each one checks itself, has a
watchdog, and ends with `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_dare_mpu` | Whole unit at default sizes, against the LLC model, in five phases (below). |
| `tb_riq` | Queue, head issue and hazards, uop generation, wake-up. Uses the real VMR and free list. |
| `tb_dmu` | Chain walk, multi-level chains, failure cases, abort on dequeue. |
| `tb_rfu` | Tentative/granted suppression, miss/hit grant, tag matching. |
| `tb_latency_classifier` | Random bimodal latencies against a software model of the threshold rule. |
| `tb_timestamp_array` | Latencies, including wrap-around. |
| `tb_vmr`, `tb_vmr_freelist` | Readiness, release and abort rules; free-list order against a queue model. |
| `tb_lsu` | K-masked loads, gathers, stores, scatters, load after store, prefetch to VMR, tag bookkeeping. |
| `tb_mma_unit`, `tb_systolic_array` | Random tiles and shapes against a reference product, and the latency. |
| `tb_mreg_file`, `tb_dare_decoder` | Ports; encodings, CSRs, illegal codes. |

The phases of `tb_dare_mpu` are:
* **A.** Dense tile: `C + A·Bᵀ`.
* **B.** Cold `mld` → address-vector `mld` → `mgather` → `mma` → `mst`.
* **C.** Cold `mld`, an `mgather` with no producer, `mscatter`, then a load
  after the stores.
* **D.** Forty warm loads, then a narrow shape (M = 8, K = 32, N = 4).
* **E.** A two-level gather chain.

It compares every stored byte with a software model and counts each
mechanism. A typical run takes about 3,500 cycles and sees:
* 793 hazard-stall cycles;
* 214 prefetches sent and 2,151 suppressed;
* 11 predicted misses and 39 predicted hits;
* 3 chain wakes and 1 chain failure;
* 45 VMR row writes and 3 VMR releases;
* 9 store-queue waits.

A mechanism that never happens counts as a failure. At the end, all VMR
entries must be back on the free list.

## 11. How far to trust it

* Every block has a directed or random self-checking testbench. Each
  testbench has been shown to fail against a deliberately broken copy of
  its block.
* Verilator lint and a SystemVerilog elaborator accept all RTL files. Lint
  leaves two kinds of warning:
  * unused bits, such as the upper half of a PE product and unused fields of
    structs;
  * assertions that are disabled under the asynchronous reset.
* Not verified:
  * cycle-level performance against the published speed-ups (that needs the
    host, cache and workloads);
  * timing closure and area;
  * behaviour under many overlapping chains, beyond the five end-to-end
    phases and the unit tests.
