# HMT: a hybrid-update Bonsai Merkle tree controller in SystemVerilog

Encrypted memory is only safe if an attacker cannot replay old ciphertext, and
that comes down to protecting the encryption counters. A Bonsai Merkle tree
(BMT) does this. Each 64-byte counter block is hashed into a slot of a parent
node, each parent into a grandparent, and so on up to a single root. The root
is held in an on-chip register that the attacker cannot touch. Checking a
counter means rehashing the path from it to the first node that is already
trusted. Writing a counter means changing every hash on that path.

Existing controllers update the tree either eagerly or lazily:
- **Eager:** every write walks all the way to the root and fetches every node
  on the way.
- **Lazy:** a write changes only cached nodes. Their parents are fixed later,
  on eviction. This needs write-back caches, and one eviction can trigger
  further evictions.

HMT (hybrid Merkle tree) is a middle way that suits a pipeline:

- **Verification (read)** climbs from the counter until the first level where
  the node is on chip: in the BMT cache of that level or in its speculative
  buffer (SB). Everything below it is fetched, kept in the SB and checked.
- **Update (write)** also climbs only until the first on-chip node, where the
  new hash is absorbed and the node becomes dirty. The nodes it passes on the
  way are *not* brought on chip. Each one is read from memory, given its
  child's new hash, written back to memory and hashed, and that hash goes up
  one level. No fetch for verification, no cache fill, no eviction cascade.
- **Eviction** of a dirty node is handled by a per-level write-back engine.
  It writes the node to memory and hashes it, and that hash travels up exactly
  like an update.

Every level of the tree has its own stage, cache, SB and write-back engine.
The stages form a dataflow pipeline: many reads and writes are in flight at
once, one per stage. A shared verification unit checks each read's chain with
one hash unit per level, so a chain of any length costs the time of a single
hash.

## Tree layout and hashing

| item | value |
|---|---|
| node size | 64 bytes = 8 slots of 64 bits; slot `k` is bits `[64k+63:64k]` |
| arity | 8 |
| level 0 | counter blocks, one per 4 KB data page; block `c` is counter number `c` |
| parent of a node | node `i` of level `l` lives in slot `i % 8` of node `i / 8` of level `l+1` |
| hash | SHA-1 of the 64-byte node (two compression rounds: node, then padding), truncated to its most significant 64 bits |
| root | truncated hash of the single node of level `N_LEVELS`, in an on-chip register |

With 5 levels the tree covers 8^5 = 32768 counter blocks, i.e. 128 MB of
data. This is the default size.

## Structure

```
 client ──► ctr_cache ──► hmt_top ─────────────────────────────────────────────┐
 (counter   (32 KB,       ctr_stage ─► mt_stage 1 ─► … ─► mt_stage N ─► root_stage
  requests)  WT / WB)        │  ID table  │ cache,SB,WBE     │               │ root register
                             └────────────┴──── pv_unit ────┴───────────────┘
                                   (one hash unit per level, verdict broadcast)
```

| module | role |
|---|---|
| `hmt_system` | top: counter cache plus tree subsystem |
| `ctr_cache` | direct-mapped cache of verified counter blocks; write-through or write-back toward the tree |
| `hmt_top` | tree subsystem: counter stage, `N_LEVELS` MT stages, root stage, verification unit |
| `ctr_stage` | reads or writes the counter block, keeps pending requests in a FIFO ID table, starts chains, answers reads |
| `mt_stage` | one tree level: cache, SB, write-back engine, node hash, relaxed update logic |
| `root_stage` | root register: supplies the trusted top of chains, applies updates, issues write responses |
| `pv_unit` | collects the chain messages of one read from every level, hashes untrusted nodes in parallel, compares with parent slots |
| `spec_buffer` | nodes fetched for verification, waiting for their verdict |
| `bmt_cache` | write-back node cache, direct-mapped or set-associative, with victim read-out |
| `wb_engine` | writes a dirty victim to memory and hashes it at the same time |
| `node_hash`, `sha1_core` | truncated SHA-1 of a node; one SHA-1 round per cycle |
| `hmt_fifo` | valid/ready FIFO used for every queue |
| `hmt_pkg` | shared types: node, hash, message formats, memory request, event strobes |

## Messages between stages

Each stage sends one message per request to the stage above (`up_msg_t`):

- `kind`: request, or write-back from a lower-level eviction
- `op`: read or write
- `hit`: the chain already ended below; pass the message straight through
- `tag`: identifies the request for the verification unit and for write
  responses
- `idx`, `off`: the node this level must touch and the slot within it
- `upd`: the child's new hash (writes and write-backs)

A read that is still open also sends its node to the verification unit
(`pv_msg_t`):
- `tag`
- `hit`: the node is trusted
- `off`: the slot that covers the child
- `data`: the 64-byte node

The counter stage sends the counter block. A stage whose lookup hits sends its
on-chip node marked trusted. The root stage sends the root register.

Because every stage serves its input queue in order, the heads of the
verification unit's per-level queues always belong to the same, oldest
request. The unit pops them bottom-up until the trusted one. Each untrusted
node starts hashing in that level's own hash unit as soon as it is popped.
The unit then checks, for every level below the trusted one, that the node's
hash equals slot `off` of the node above. The verdict `(tag, ok)` goes to the
ID table and to every SB in the same cycle:
- **Passed:** the SB entries move into the cache.
- **Failed:** the SB entries are dropped, and the counter stage answers
  `ok = 0`.

## Ordering and hazards

These rules keep the pipeline correct when reads, writes and write-backs to
the same nodes overlap:

- **One queue per stage.** Requests and write-back messages share one
  in-order input queue. If write-backs could overtake requests, an update could
  reach a node before an older read did.
- **Own work first.** Before it takes the next message, a stage:
  1. forwards a finished write-back hash from its own engine, then
  2. moves verified SB entries into the cache.

  Dirty victims come out of step 2. This is where write-back gets its priority
  over the normal flow.
- **Write-back hazard.** A request for the node the write-back engine is
  currently writing waits until the memory write has been accepted.
- **SB full.** A read waits while the SB is full. Updates never allocate SB
  entries; an update that finds its node in the SB changes it there.
- **Write responses.** They come from the root stage. A write whose chain
  ended early travels on as a `hit` token, so responses stay in request order.
- **Read responses.** They come from the head of the ID table, also in order.

## Counter cache

`ctr_cache` sits in front of the tree and handles one request at a time. It
has two modes, selected by the `wb_mode` pin:

- **Write-through (`wb_mode = 0`):** every counter write is also sent to the
  tree.
- **Write-back (`wb_mode = 1`):** a write only changes the cached block. The
  dirty block is sent to the tree as an update when a later read evicts it.

In both modes:
- A read miss is fetched and verified through the tree.
- A block that fails verification is returned with `ok = 0` and is not
  cached.
- A write that misses is sent to the tree without allocating a line.

## Parameters and their defaults

| parameter | default | meaning |
|---|---|---|
| `N_LEVELS` | 5 | tree levels above the counters (32768 counter blocks) |
| `CC_LINES` | 512 | counter cache lines (32 KB) |
| `CACHE_LINES` | `'{512,64,64,2,2,…}` | BMT cache lines of levels 1..N: 32 KB, 4 KB, 4 KB, 128 B, 128 B (40.3 KB) |
| `CACHE_WAYS` | `'{1,1,1,1,1,…}` | associativity of each level's cache (1 = direct-mapped) |
| `SB_DEPTH` | 4 | speculative buffer entries per level |
| `ID_DEPTH` | 8 | ID table entries (reads in flight) |
| `Q_DEPTH` | 4 | depth of every queue |

`CACHE_LINES` and `CACHE_WAYS` are always 8-entry arrays; only the first
`N_LEVELS` entries are used. A set-associative cache picks its victim as the
lowest invalid way, or otherwise with a round-robin pointer per set.

## Interfaces and timing

- **Memory ports.** All use valid/ready requests (`mem_req_t`: write enable,
  index, 64-byte data). Reads answer with one `rsp_valid` pulse, in order.
  A write takes effect when it is accepted.
- **Which ports exist.**
  - one port for counter blocks, indexed by counter number;
  - one port per tree level, indexed by node number within the level;
  - one write-only port per level for the write-back engines.
- **Layout in memory.** Left to the memory side.
- **Root register.** It must be loaded (`root_ld`) with the root of the tree
  image in memory before the first request.

Latencies:
- `sha1_core`: 81 cycles per block.
- `node_hash`: 163 cycles per node.
- Cache or SB hit in a stage: 3 cycles from the head of its queue to the next
  stage.
- A read that misses at every level: the memory reads plus about one hash time.
  With 3 levels and 4 to 15 cycles of memory latency it measures about 220
  cycles. Verifying the same chain one node at a time would take `N × 163`.
- An update that misses at a level costs that level a memory read, a memory
  write and one hash.
- Throughput: the counter stage hashes every counter block with one hash
  unit, so the tree accepts about one request per hash time. The strided test
  below measures about 165 cycles per request, for reads and writes and at
  every stride. The MT stages work in parallel behind it, one request each.

## Where this design departs from the paper it is based on

- **Root SB.** The root stage has no speculative buffer of its own. The root
  register is sent directly as the trusted top of every chain that reaches it.
- **Eviction messages.** They travel as their own message kind on the normal
  queue. They are not extra fields of the request message.
- **Counter write-back to memory.** It is done by the counter stage as part of
  the update. It is not a separate path from the counter cache to DRAM.
- **Two corrections to the algorithm listing, both read as misprints:**
  - A counter write is forwarded with `op = write`.
  - An update that misses at a level is forwarded with `hit = 0`, so that the
    chain continues.
- **Cache organisation.** The main configuration is direct-mapped. The
  stand-alone 3-level evaluation used 4-way caches of 1 KB + 448 B + 64 B.
  448 B is 7 lines and cannot be split into 4-way sets, so its test uses
  512 B. The single 64 B line of level 3 is necessarily direct-mapped.
- **Verification concurrency.** The verification unit checks one chain at a
  time. Chains of different requests overlap in the stages, but their hashes
  do not overlap with each other.
- **Sizes.** SB, ID table and queue depths are not given and were chosen here.
- **Outside this design.**
  - the AES engine, the HMAC unit, the host processor and DRAM;
  - the lazy and eager baselines used for comparison.

## Verification

Each module has a self-checking testbench in `tb/`. The tests use independent
reference models, including a SHA-1 reference function in `hmt_tb_pkg`. They
do not reuse the RTL's own hash.

| testbench | what it covers |
|---|---|
| `tb_sha1_core`, `tb_node_hash` | SHA-1 "abc" vector and random blocks against the reference; exact latency |
| `tb_bmt_cache` (direct-mapped and 2-way), `tb_spec_buffer`, `tb_wb_engine`, `tb_hmt_fifo` | random and directed tests against behavioural models |
| `tb_mt_stage`, `tb_ctr_stage`, `tb_root_stage`, `tb_pv_unit` | scripted scenarios; `tb_pv_unit` forges nodes at every level |
| `tb_ctr_cache` | both modes against a reference cache and a behavioural tree; counts tree reads and writes per access |
| `tb_hmt_top` | 3-level tree end to end: all-miss latency, tampering, 400 random pipelined operations, read-back |
| `tb_hmt_top_full` | the same test with `hmt_top` at its default size |
| `tb_hmt_system` | top level at its default size: write-through, then write-back with dirty evictions, then read-back |
| `tb_hmt_workloads` | write-then-read sweep over every counter with 2 KB + 128 B + 128 B caches |
| `tb_hmt_subsystem` | 3-level tree with 4-way caches: sequential traversals at strides of 2^6 to 2^12 bytes, cycles per request |

How the end-to-end tests work:
- They model untrusted memory with random latency, and start it as the tree of
  all-zero counters.
- They tamper with tree nodes and counter blocks and expect those reads to be
  rejected.
- They count every mechanism:
  - hits in cache and in SB;
  - in-memory updates;
  - commits from SB to cache;
  - dirty evictions;
  - write-back hashes;
  - root updates;
  - SB-full stalls;
  - failed verifications;
  - several reads in flight.

  A mechanism that never happens counts as a failure.

Simulating with Verilator, for example the top-level test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/hmt_pkg.sv tb/hmt_tb_pkg.sv tb/tb_hmt_system.sv --top-module tb_hmt_system
./obj_dir/Vtb_hmt_system
```

Each testbench ends with a line `TB_RESULT checks=<n> failures=<m>`. To
exercise a different configuration, change the parameter list where
`tb_hmt_top` instantiates `hmt_top`.
