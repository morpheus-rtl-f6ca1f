# Morpheus: an LLC extended into idle GPU cores

Many memory-bound GPU programs stop getting faster well before all SMs are in
use: extra cores only add pressure on a last-level cache (LLC) that is already
too small. Morpheus switches some SMs into *cache mode*. There they run a
small "extended LLC kernel" that keeps cache blocks in the SM's register file.
In each LLC partition, a hardware controller decides which requests belong to
this extended LLC. It predicts whether they hit, and hands them to the kernel
warps through memory-mapped tables.

This repository holds synthesizable SystemVerilog for the hardware parts:

* one **Morpheus controller** per LLC partition;
* the **Indirect-MOV** register path: an operand collector that can read a
  register whose number is held in another register, together with a banked
  register file.

The kernel software, the conventional LLC, DRAM and the interconnect are not
part of the RTL. They meet the design at ports. Behavioural models of the
kernel and of DRAM are provided for simulation.

## Organisation and default sizes

All sizes live in `rtl/morpheus_pkg.sv` and follow an RTX 3080-class GPU:

| quantity | value |
|---|---|
| SMs / LLC partitions | 68 / 10 |
| warps per cache-mode SM (= extended sets it serves) | 48 |
| block size | 128 B (one 1024-bit warp register) |
| extended sets per partition (warp status table rows) | 256 |
| extended set associativity | 32 |
| Bloom filter | 256 bits (32 B), two per set |
| read / write data buffer | 16 entries each |
| register file | 2048 warp registers (256 KB), 4 banks, 42 registers per kernel warp |

The following are this design's own choices; the source gives no values for them:

* the address format: 34 bits = 18-bit tag, 9-bit partition-local set, 7-bit offset;
* 4 hash functions per Bloom filter;
* a 4-entry request queue.

## Request routing (`morpheus_controller`, `address_separator`)

Each partition's controller sends every incoming request one of three ways:

1. **Bypass.** The source SM is in cache mode, so the request goes straight to DRAM.
   Cache-mode SMs must not pollute the LLC with their own traffic.
2. **Extended LLC.** The set number lies in
   `[ext_set_base, ext_set_base + ext_set_count)`.
3. **Conventional LLC.** Everything else goes to the `conv_*` port.

An extended request first queries the set's **hit/miss predictor**:

* A **read predicted to miss** goes to DRAM in the same cycle. It never waits for the
  kernel, so a miss costs no more than it would without Morpheus.
* A **read predicted to hit**, and **every write** (write-allocate), enters the request queue.
* The kernel reports each request's result. A hit returns the block from the read data buffer
  to the SM in the cycle the kernel finishes. A miss means a false positive of the
  predictor: the controller then reads DRAM.
* Every DRAM read made for the extended LLC is answered to the SM and also queued
  again as a **FILL** request, so the kernel inserts the block.
* Writes produce no response.

Arbitration is fixed:

* On the DRAM port, a kernel-reported miss wins over a new request.
* On the queue, a fill wins over a new request.
* On the response port, a hit wins over DRAM data.
* DRAM data for a fill is offered to the SM only when the fill can enter the queue
  in the same cycle. The response and the insertion are therefore never separated.

The DRAM port carries a small tag `{src_sm, fill, set}` that the memory side
must echo with the response.

**Departure from one reading of the source.** The prose says the kernel warp
fetches a missing block from memory itself. The timing diagram has the
controller access DRAM. This design follows the diagram.

## The hit/miss predictor (`hit_miss_predictor`)

A single Bloom filter would fill up as blocks are replaced, and blocks cannot be
removed from it. Instead, each set has two filters, BF1 and BF2:

* Lookups use BF1 only.
* Every extended access inserts the block into both filters.
* The set counts insertions of blocks not yet in BF2. After as many as the
  associativity (32), BF1 is cleared and the two swap roles.

At that point, the new BF1 (the old BF2) holds at least every block inserted
since the last swap. That is at least the 32 most recently used blocks, which
are exactly the set's possible contents under LRU. A block in the set is
therefore always reported as present: **false negatives are impossible**.
False positives cost only the DRAM read that follows.

* Each hash is an H3-style parity hash of the 18-bit tag. The masks come from a
  fixed xorshift sequence.
* `predict_hit` is combinational.
* Updates and swaps take effect at the clock edge.
* `bf_clear` clears all filters, which is needed when the cache-mode configuration changes.

## Talking to the kernel (`ext_llc_query_unit`)

The query unit holds four parts:

* **Request queue:** a collapsing queue. The oldest entry whose set is idle may leave,
  so a busy set does not block the others.
* **Warp status table:** one row per extended set, holding tag, requesting SM, busy,
  op, result and data pointer.
* **Write data buffer:** holds the payload of WRITE and FILL requests.
* **Read data buffer:** the kernel puts the block of a read hit here.

A request leaves the queue when three things hold:

* its set is not busy;
* a buffer entry is free;
* the notification register is empty.

Its row is then written and a notification `{sm, warp, set}` is sent to the
kernel warp that owns the set.

Extended sets are spread over partitions and packed 48 to a cache-mode SM. Set `s` of
partition `p` belongs to global slot `g = 10*s + p`, which is served by:

* SM `cache_sm_base + g/48`;
* warp `g % 48`.

The kernel warp works through memory-mapped loads and stores on the `mm` port.
The regions are WST = 0, WDB = 1 and RDB = 2.

1. Load its WST row.
2. For a WRITE or FILL, load the write data buffer entry.
3. For a read hit, store the block into the read data buffer entry.
4. Store to its WST row with bit 0 of the data giving hit (1) or miss (0).
   This store ends the request: the row becomes idle, the buffer entry is freed,
   and the result goes back to the controller.

The one-request-per-warp rule is enforced by the busy bit.
Load data returns one cycle after the load is accepted.

## The Indirect-MOV path (`operand_collector`, `register_file`)

The kernel keeps 32 blocks of a set in registers. Once it has found the way
that holds a tag, it must read the register whose *number* it has just computed.
The collector supports this directly.

Its register-number multiplexer selects:

* the instruction's source register while operand slot 0 is not ready;
* the low 8 bits of the value read into slot 0 once it is ready.

So `IMOV dst, src` reads `R[src]`, then `R[R[src][7:0]]`, and writes it to `dst`.
A plain MOV reads one register.

* The register file returns read data one cycle after the request.
* `wb_valid`/`done` rise 2 clock edges after a MOV is accepted and 4 after an IMOV.
* An indirect number of 42 or more (outside the warp) gives `done` with `err`
  and no write.
* Register `r` of warp `w` is physical register `p = 42*w + r`, kept in bank
  `p mod 4`. Consecutive registers therefore fall into different banks.

## Top level (`morpheus_gpu`)

`morpheus_gpu` has one controller per partition and one collector plus register
file per SM. Its ports are arrays indexed by partition or SM:

* `core_req`/`core_resp`: interconnect side;
* `conv_*`: conventional LLC;
* `dram_*`: DRAM channel;
* `notify`/`mm`: kernel side;
* `events`: one-cycle pulses for counters;
* `ins_*`: MOV/IMOV issue;
* `rfw_*`: the other register file writes.

The configuration inputs must stay constant while requests are in flight:

* `cache_mode` (one bit per SM);
* `ext_set_base`, `ext_set_count`;
* `cache_sm_base`: the cache-mode SMs must be the contiguous range starting there.

All handshakes are valid/ready, and a transfer happens on a clock edge where both are high.
Resets are asynchronous and active low.

## Known limitations

* **Write-back ordering.** A dirty victim that the kernel writes back reaches DRAM
  as an ordinary request. It is not ordered against a DRAM read of the same block
  that is already in flight, or issued just after it. Such a read can return stale data.
  A related case: a FILL for an old read can overwrite a newer write to the same block
  if that write was inserted and evicted meanwhile. A real implementation needs an
  address check between outstanding DRAM reads and write-backs. The testbenches
  keep written and read addresses apart.
* The kernel itself is software and is only modelled:
  * tag lookup by ballot and find-first-set;
  * a 12-bit LRU counter per way;
  * invalid-way-first victim choice.
* Compression of extended blocks, atomics in the extended LLC and the choice of
  how many SMs enter cache mode are also kernel or runtime software. They are not built.
* The conventional LLC, DRAM, the interconnect and the rest of the SM are outside the design.

## Testbenches

Each block has a self-checking testbench in `tb/`. Each compares outputs with an
independent reference and ends with a `TB_RESULT checks=… failures=…` line.
Models used by the testbenches:

* `tb/ext_llc_kernel_model.sv`: the extended LLC kernel;
* `tb/dram_model.sv`: fixed-latency DRAM with in-order responses. A block that was never
  written reads as a pattern derived from its address.

| testbench | what it covers |
|---|---|
| `tb_address_separator` | routing against a reference for random configurations |
| `tb_hit_miss_predictor` | predictions against an exact LRU set model; no false negatives; swap timing (8 sets, 8-way) |
| `tb_request_queue`, `tb_warp_status_table`, `tb_data_buffer` | storage blocks against reference models |
| `tb_register_file` | read latency, port priority, bank mapping, range errors (8 warps) |
| `tb_operand_collector` | MOV / IMOV results, 2- and 4-edge latency, range errors |
| `tb_morpheus_controller` | one partition with kernel and DRAM models, 4-way sets; random extended, conventional and bypass traffic; read data against a reference memory; every routing mechanism must occur |
| `tb_morpheus_gpu` | the whole design at default size; partition 0 loaded, MOV/IMOV on SMs 0 and 67; 14 mechanisms counted, each must occur |

To run one with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/morpheus_pkg.sv rtl/*.sv \
  tb/ext_llc_kernel_model.sv tb/dram_model.sv tb/tb_morpheus_gpu.sv \
  --top-module tb_morpheus_gpu -Mdir obj && obj/Vtb_morpheus_gpu
```

The full-size top test takes about 1.5 minutes to build and under a second to run.
