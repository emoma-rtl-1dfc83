# EMOMA: an exact-match lookup core with one external memory access per search

An exact-match table maps a key (here 64 bits) to a value (64 bits). This is the
structure behind MAC tables, flow tables and connection trackers. Big tables sit in
external DRAM, and there each random access costs a lot of time and bandwidth. So the
number of DRAM accesses per lookup is what limits the rate.

A cuckoo hash table packs DRAM well: with two candidate buckets per key and four cells
per bucket it can be filled to about 95 %. But a lookup may have to read both
candidate buckets, so it costs one or two DRAM reads.

EMOMA keeps the cuckoo table and adds two small on-chip structures so that every lookup
reads **exactly one** bucket:

* a **counting block Bloom filter (CBBF)**. It records which elements were placed in
  their *second* bucket. A lookup asks the filter and then reads only the bucket it
  names: h2(x) on a positive answer, h1(x) on a negative one.
* a small **stash**, a content-addressable memory (CAM). It holds the few elements that
  are in transit during an insertion. It is searched in parallel with the filter, and a
  stash hit needs no DRAM access at all.

A Bloom filter can give false positives, which would send a lookup to the wrong bucket.
EMOMA makes the filter exact for every stored element by two rules on the insertion side:

1. **The filter's block-select hash is the table's first hash h1.** If adding x to the
   filter would make some stored element y a false positive, then y shares x's filter
   block, so y sits in bucket h1(x). The candidates are therefore all in one bucket, and
   the insertion code can find them and move them.
2. **An element that already tests positive is always placed in its second bucket**, and
   it is added to the filter anyway. Its positive becomes a true positive, and it stays
   true whatever else is removed later. Such an element is *locked*: it can no longer
   move to h1.

Lookups are done entirely in hardware (this RTL). Insertion and removal are rare and
involved, and run as software on a host processor. The host keeps the filter's counters
and a copy of the table, and writes every change into the core through an AXI4-Lite
port.

## Default configuration

| Quantity | Default | Parameter |
|---|---|---|
| key / value | 64 / 64 bits | `emoma_pkg::KEY_W`, `VAL_W` |
| cells per bucket | 4 (one 512-bit bucket = one DRAM burst) | `emoma_pkg::CELLS` |
| buckets | 2^19 = 524,288 (256 Mbit external), 2M elements | `BUCKET_AW = 19` |
| CBBF | 2^19 blocks x 16 bits = 8 Mbit on chip, 4 bits per element | `BLOCK_W = 16` |
| bits tested per key | k = 4 | `K = 4` |
| stash | 64 entries | `STASH_ENTRIES = 64` |
| lookups in flight | 32 | `QDEPTH = 32` (own choice) |

At 95 % load the default build holds about 1.99M elements. The stash size follows the
sizing argument behind the design: simulated insertions leave at most about 16 elements
in the stash for an 8M-element table at 95 % load, and 64 entries leave a very large
margin.

## The lookup pipeline (`emoma_lookup`)

```
 req_key ──► hash (h1, h2, g1..g4) ──► [stage 1 regs]
                                         │
                     ┌───────────────────┴───────────────────┐
                     ▼                                       ▼
            stash CAM (64 x key)                 CBBF word h1, test bits g1..g4
                     └───────────────────┬───────────────────┘
                                  [stage 2 regs]
                     stash hit ──► result queue (value ready)
                     else      ──► one DRAM read: positive ? h2 : h1
                                   ──► result queue (wait for bucket)
 bucket returns ──► compare 4 cells with key ──► rsp_* (in request order)
```

Timing:

* One lookup can be accepted per cycle. `req_valid`/`req_ready` is the handshake.
* Cycle 0 hashes the key. Cycle 1 reads the stash and the CBBF in parallel. In cycle 2
  the lookup either finishes from the stash or issues its single bucket read.
* A stash hit answers 3 cycles after acceptance. Any other lookup answers 3 cycles plus
  the memory latency after acceptance.
* Results leave on `rsp_*` strictly in request order.
  - Each result says hit or miss, the value and the key.
  - `rsp_src` says where the answer came from: stash, bucket h1 or bucket h2.
  - A miss reports the bucket it read.
* A queue of `QDEPTH` entries keeps the order. A matching data FIFO of the same depth
  means that returning buckets are never refused.
* The pipeline stalls only when the memory refuses a read, or when `QDEPTH` lookups are
  already outstanding.
* `rsp_*` has no back-pressure.
* `req_ready` stays low after reset until the CBBF has been cleared (2^19 cycles, one
  word per cycle).

A lookup that misses the stash makes exactly one memory read. A stash hit makes none.
The testbenches count this.

## Hashing (`emoma_hash`)

* Each key goes through a 64-bit splitmix64-style mixer twice, with two different
  seeds.
* From the first mix:
  - h1 is the low `BUCKET_AW` bits.
  - The four 4-bit bit-selects g1..g4 come from the top 16 bits.
  - An elaboration-time assertion checks that these two fields do not overlap.
* h2 is the low `BUCKET_AW` bits of the second mix.

The hash functions themselves are this design's own choice: the scheme only needs
independent, well-mixed hashes. Software must use exactly the same functions; they are
written out in `tb/emoma_tb_pkg.sv` as a reference.

## Storage formats

* **Bucket**: 512 bits holding four cells. Cell c is bits `[128c+127 : 128c]`; the key
  is in the low 64 bits and the value in the high 64.
* **Empty cells**: there is no room for a valid bit, so **key 0 is reserved to mean
  "empty"** and can never be stored. The host must map key 0 to another key, or keep it
  elsewhere.
* **CBBF block**: 16 bits. Bit j is set when its counter (kept by the host) is non-zero.
  A key tests positive when bits g1..g4 of block h1 are all set.

## The host side: keeping the filter exact

The host's insertion procedure:

1. Put x in a free stash slot.
2. **Choose a bucket.**

   | Case | Situation | Bucket |
   |---|---|---|
   | 1 | x already tests positive | h2 |
   | 2 | x is negative and h1 has room | h1 |
   | 3 | h1 is full, h2 has room, and adding x to the filter makes no stored element of bucket h1(x) a false positive | h2 |
   | 4 | h1 is full and adding x would create such false positives | h1 |
   | 5 | both buckets are full and no false positives would be created | either, chosen at random |

3. **Choose a cell.**
   - If the bucket has an empty cell, use it.
   - Otherwise choose among the elements that are not locked. With probability P = 0.99,
     take one whose move creates the fewest locked elements. Otherwise take one at
     random.
4. **Place x.**
   - Move the evicted element to the stash. If it was in its h2, remove it from the
     filter.
   - If x goes to h2, add it to the filter.
   - Write x into its cell and free its stash slot.
5. **Loop.** While the stash is not empty and fewer than t = 100 rounds have run, take a
   random stash element and go back to step 2. Elements still in the stash after that
   simply stay there: lookups find them in the CAM.

Removal frees the element's stash slot or clears its cell. If the element was in h2, it
also decrements its filter counters, and each counter that reaches zero clears its
filter bit.

**Ordering against live lookups.** Lookups keep running during updates. The host keeps
every element findable with this order of writes:

* An element is written into the stash **before** its cell is overwritten.
* Filter bits are changed while the affected elements sit in the stash.
* A stash slot is freed only **after** the bucket that now holds the element has been
  written.
* The core helps in two ways:
  - A pending bucket write takes the memory port ahead of lookup reads.
  - Its AXI write response is held until the memory has accepted the write, so the next
    host command cannot overtake it.

The end-to-end test checks that lookups racing an insertion always find already-inserted
keys.

The procedure may also move elements of bucket h1(x) that a new h2 placement would turn
into false positives. With the five cases above this never arises: x goes to h2 only when
it is already positive (it sets no new bits) or when no false positives would be created.
The model keeps that step as a guard, and the end-to-end test checks that it never fires.

## Host register map (`emoma_axil_ctrl`, AXI4-Lite, 32-bit)

| Offset | Register | |
|---|---|---|
| 0x00 | STATUS (ro) | bit0 CBBF cleared, bit1 bucket write pending, bits 15:8 stash occupancy |
| 0x04 | INDEX | CBBF block / stash slot / bucket number for CMD |
| 0x08 | CBBF_DATA | 16-bit block value |
| 0x0C | CMD (wo) | bit0 write CBBF block, bit1 store KEY/VALUE in a stash slot, bit2 free a stash slot, bit3 write BUCKET to external memory |
| 0x10 / 0x14 | KEY low / high | |
| 0x18 / 0x1C | VALUE low / high | |
| 0x40–0x7C | BUCKET words 0..15 | word i = bucket bits [32i+31:32i] |

Byte strobes are ignored. Responses are always OKAY. The host writes whole buckets; it
knows their contents from its copy of the table.

## Modules

| File | Role |
|---|---|
| `rtl/emoma_pkg.sv` | sizes, bucket/cell types, the mixer, result-source enum |
| `rtl/emoma_hash.sv` | h1, h2, g1..gk (combinational) |
| `rtl/emoma_stash.sv` | 64-entry key/value CAM. Write port for the host; registered query |
| `rtl/emoma_cbbf.sv` | on-chip filter RAM. Clears itself after reset; write port for the host; registered query with the k-bit test |
| `rtl/emoma_bucket_match.sv` | compares a key with the four cells of a bucket |
| `rtl/emoma_lookup.sv` | the search pipeline and in-order result queue |
| `rtl/emoma_axil_ctrl.sv` | host register port |
| `rtl/emoma_top.sv` | wires the above together and arbitrates the one memory port |

Outside the core, and not part of the RTL:

* the DRAM and its controller. The core's `mem_req_*`/`mem_rsp_*` port expects in-order
  read data, one bucket per access.
* the host processor and its software.
* the filter counters, which live in host memory.

The testbenches model all three.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself through a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/emoma_pkg.sv tb/emoma_tb_pkg.sv tb/tb_emoma_top.sv --top-module tb_emoma_top
./obj_dir/Vtb_emoma_top
```

| Testbench | What it checks |
|---|---|
| `tb_emoma_hash` | known mixer vectors, and h1/h2/g against a reference model |
| `tb_emoma_stash` | random stores, frees and queries against a shadow copy; freed keys must miss; one-cycle latency; occupancy |
| `tb_emoma_cbbf` | clearing sweep length, write/query against a model, one-cycle latency |
| `tb_emoma_bucket_match` | hit, value and cell; near-miss keys; key 0 never matches |
| `tb_emoma_lookup` | pipeline with a stash/CBBF/memory model; results in order; one read per non-stash lookup; throughput |
| `tb_emoma_axil_ctrl` | register map, command pulses, B response held for bucket writes |
| `tb_emoma_top` | small table (64 buckets, 64 x 16-bit filter, still 4 bits per element), filled to 95 % through the AXI port by the host model while lookups run, then 150 remove-and-insert replacements at full load |
| `tb_emoma_workload_32k` | 2^13-bucket (32K-element) table filled through the AXI port within a cycle budget, then every key looked up |
| `tb_emoma_top_full` | the core with every default (2^19 buckets); waits for the 2^19-cycle clearing, inserts 300 keys, looks them up along with absent keys |

`tb_emoma_top` also checks:

* that all five insertion cases occurred,
* evictions, locked elements and filter bits cleared by removal,
* stash, h1, h2 and miss lookups,
* memory back-pressure,
* host writes taking the port from a waiting lookup read,
* that every element sits where the filter sends its lookup.

The memory model (`tb/emoma_mem_model.sv`) has a fixed latency, refuses requests at
random and stores buckets sparsely, so the full 2^19-bucket table costs nothing until it
is written.

## Where this RTL departs from, or adds to, the scheme

* **Fixed to one table.** Both hashes index one shared table. A variant with two
  half-size sub-tables (one per hash) exists but fills worse and needs a larger stash.
  It is not built.
* **k = 4.** Studies of the single-table variant also used k = 3. The FPGA-style
  configuration modelled here (16-bit blocks, 4 bits per element) uses k = 4, and so does
  this RTL. k is a parameter.
* **Own choices:**
  - the hash functions;
  - key 0 as the empty marker;
  - the cell layout;
  - the register map and the AXI4-Lite framing;
  - the pipeline depths and `QDEPTH`;
  - host writes taking priority over lookups;
  - the self-clearing filter after reset;
  - in-order results.
* **Not in hardware:** insertion, removal, the filter counters and the DRAM. Insertion
  is software by design; the testbench host model implements the procedure above and
  can serve as a reference for that software.
* **Sizes not simulated at scale.** The default build holds 2M elements. Tables of 8M
  elements need `BUCKET_AW = 21`. The full default configuration is simulated only
  lightly (300 keys). Filling and dynamic behaviour at 95 % load are exercised on the
  64-bucket table.
* **Known limit of the host model.** `tb_emoma_workload_32k` fills a 32K-element table
  (2^13 buckets) within a fixed cycle budget. It reaches only about 53 % load, not 95 %.
  - At about 40–50 % load one element starts to linger in the stash.
  - From then on every insertion runs all t = 100 rounds.
  - Nearly all of those rounds are case 4: the element goes back to its full h1 bucket
    and displaces a neighbour, which then pushes it out again.
  - This is a weakness of the model's insertion software, which looks like a
    ping-pong between two elements. The lookup hardware is not involved: every key
    inserted is still found, with one bucket read.
  - Published simulations of the procedure reach 95 % with at most 9 stash entries at
    this size, so real insertion software should break such cycles. One way is to never
    evict the element that was just placed.
