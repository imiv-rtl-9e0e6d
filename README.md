# In-memory integrity verification for a secure NVDIMM

Encrypted non-volatile memory needs three kinds of security metadata for every
line: a counter for counter-mode encryption, a MAC over the ciphertext (the
SMAC), and an integrity tree over the counters so that a stale counter cannot
be replayed. When the memory controller owns the tree, every write must fetch,
hash and write back a whole leaf-to-root path across the memory bus, and the
tree nodes must also be persisted, or the memory cannot be checked after a
crash.

This design moves the tree into the memory module. The memory controller keeps
only encryption and the SMAC (the **encryption engine**, EE). The NVDIMM
controller gets an **integrity verification engine** (IVE) that owns a
Bonsai Merkle tree (BMT) over all counter blocks of its DIMM. The IVE verifies
counters before it lets them leave the DIMM, updates the tree for every write
in a pipeline, and persists the lower tree levels together with the data. Tree
nodes never cross the bus. Counters do cross it, and a bus attacker could
replay an old one, so a counter that the EE cannot check locally is fetched
with a fresh nonce and comes back encrypted under that nonce.

The RTL is SystemVerilog (IEEE 1800-2017). It simulates with Verilator 5 and
elaborates with the slang front end of Yosys.

## Geometry

All sizes come from `rtl/imiv_pkg.sv` and the module parameters. They describe
one 512 GB DIMM.

| item | size |
|---|---|
| data line | 64 B; 2^33 lines (`laddr_t`, 33 bits) |
| counter block | 64 B covering one 4 KB page: 64-bit major counter + 64 x 7-bit minor counters; 2^27 blocks |
| SMAC | 64 bits; eight per 64 B SMAC block |
| BMT | eight-ary; each node is eight 64-bit digests (64 B); levels 1..8 hashed above the counter blocks (level 0), then a 64 B root register |
| upper buffer | levels 8 and 7: 8 + 64 = 72 nodes (4.5 KB), never replaced |
| lower cache | levels 1..6: 32 KB, 8-way, 64 sets |
| counter and SMAC caches (EE) | 32 KB, 8-way each |
| PWRQ / PRRQ | 64 / 16 entries |
| WPQ / RPQ (EE) | 12 / 12 entries |
| BMT tracking table | 9 entries |
| hash units | 9 in the update pipeline, 3 in the PWRQ hash tree, plus one each for verification in the IVE and for SMACs in the EE |

The hash is a keyed, SipHash-style ARX compression of one 64-byte block with a
64-bit chaining value down to 64 bits (`hash64`). It stands in for a hash the
design does not fix, and is not claimed to be a vetted MAC. Tree digests use
key 0. SMACs use the shared MAC key:

    SMAC = H(k, H(k, 0, ciphertext), {address, major, minor})

A node that was never written holds the digest of an all-zero subtree
(`zero_digest`), so the tree of an empty DIMM is well defined without any
initialisation pass.

## Encryption engine (memory controller side)

`imiv_ee` serves one CPU request at a time. It looks up the line's counter
block and SMAC block in its two write-through caches, and the outcome decides
what crosses the bus:

* **Case A**, both hit. A read fetches only the ciphertext. A write uses the
  cached counter.
* **Case B**, one misses. The missing block is fetched in plain. A counter
  block that arrives this way is vouched for by the IVE. A SMAC block is
  covered by the counter, because the SMAC check binds the counter.
* **Case C**, both miss. The counter request carries a nonce from the on-chip
  generator (`nonce_gen`, a 64-bit xorshift). The IVE returns the counter block
  XORed with `AES(k_nonce, {nonce, chunk})` for each 16-byte chunk. Replaying an
  older response then decrypts to garbage, and the SMAC check fails.

Encryption is AES-128 in counter mode. The pad for chunk `j` of line `a` is
`AES(k_aes, {a, j, minor, major})`. A write increments the line's minor
counter, encrypts, computes the SMAC, updates both caches and queues
`{address, ciphertext, SMAC}` in the WPQ. A read decrypts and checks the SMAC.
A mismatch is reported as `cpu_rsp_err`. The RPQ is served only when the WPQ is
empty.

When a minor counter wraps, the major counter is advanced and every minor is
cleared. `reenc_req` is raised at that point, but re-encrypting the page is not
built. It takes 128 writes to one line to get there.

## Integrity verification engine (NVDIMM side)

`imiv_ive` sits between the bus and the media port. Every write is queued in
the **PWRQ** and processed oldest first in these steps:

1. **Counter.** If a processed PWRQ entry of the same page is still waiting to
   be drained, its counter block is newer than the media copy and is taken
   from there (forwarding). Otherwise the block is read from the media.
2. **Path.** The tree path is read upward from the lower cache (levels 1..6),
   the upper buffer (7..8) and the root register. A missing node is fetched from
   the media. This is allowed only while no processed write waits to be drained,
   because only then is the media copy current.
3. **Verify.** Every link that came from the media is checked by hashing the
   child and comparing with its slot in the parent. Checking stops at the first
   node that was already trusted (cached, buffered or the root). Verified nodes
   are filled into the caches.
4. **Increment and check the SMAC.** The IVE increments the line's minor
   counter exactly as the EE did, recomputes the SMAC from the ciphertext,
   address and new counter, and compares it with the SMAC that came over the
   bus. If either check fails, the write is dropped.
5. **Launch.** The write enters the BMT update pipeline, together with a
   snapshot of its path, and takes a BMT tracking table (BTT) entry.

Reads wait in the **PRRQ** and are served only when no write is pending.
Ciphertext and SMAC blocks are returned as stored. A counter block is first
verified through the tree as in steps 2 and 3. It is then nonce-encrypted if
the request asks for it.

### Pipelined tree update

This is the least obvious part. `bmt_update_pipe` has one stage per hashed
level (nine) and one hash unit per stage, so up to nine updates are in flight,
each one level further up. The pipeline moves in **beats** of
`2 + HASH_LAT + LEVELS` cycles (15 at the defaults):

* **shift** (1 cycle): every update moves up one stage, and a new update may
  enter stage 0.
* **start** (1 cycle): every occupied stage starts hashing its current node.
* **hash** (`HASH_LAT` cycles).
* **commit** (one cycle per level, from the bottom up): the stage writes its
  digest into its slot of the parent node and emits the parent on `out_*`.
  Nodes of levels 1..6 go to the lower cache and into the write's PWRQ entry.
  Nodes of levels 7..8 go to the upper buffer, and the level-9 node becomes the
  root.

An update's path snapshot is read when its counter is verified. By the time
the update reaches level `l`, older updates that share that ancestor may have
committed to it, so the snapshot's siblings may be stale. Each stage therefore
keeps its last `LEVELS` commits (level, index, node). When it builds a parent,
it uses the newest matching commit in place of the snapshot. A `LEVELS`-deep
history suffices, because an update launched `k` beats after another reaches
each level exactly `k` beats later. All updates pass every stage in launch
order, so every node sees its updates in the order the writes arrived.

The BTT records the PWRQ pointer of each in-flight update and retires updates
strictly in launch order. A retired entry becomes complete: ciphertext, SMAC,
new counter block and six lower-level nodes. The PWRQ drains complete entries
to the media oldest first, so the media always holds a consistent prefix of
the write stream with a verifiable tree. Levels 7 and 8 are written to the
media only at power down.

### Power down and recovery

`power_down` is the ADR signal. The EE stops taking CPU requests but finishes
the write it is working on, and its WPQ keeps draining into the PWRQ. Once the
EE reports its write path empty (`wr_flushed`, which drives the IVE's
`pd_wpq_empty`), the IVE stops intake and stops processing new writes.
In-flight updates finish and drain, and then the following happens:

* The **PWRQ hash tree** (`pht_unit`) hashes the unprocessed entries. It has
  64 leaves, eight level-1 nodes and a root, on three hash units. Each leaf is
  `H(k, H(k, 0, ct), {valid, SMAC, address})`, so the root also fixes which
  slots were occupied.
* The unprocessed entries are saved to a media save area, two blocks each.
* The upper buffer is flushed.
* `pd_done` is raised. `pht_root`, `n_saved` and `bmt_root` must then be kept
  in trusted storage.

After power returns, `recover` starts recovery with those three values:

1. The save area is read back into the PWRQ.
2. The PHT root is recomputed and compared with the trusted copy.
3. If they match, processing resumes (`rec_done`). If not, the engine raises
   `rec_fail` and halts.

## Interfaces and timing

* **CPU side of `imiv_top`.** Valid/ready request `{write, addr, data}`. Exactly
  one response comes back per request, with `cpu_rsp_err` for an integrity
  failure.
* **Bus.** `bus_req_t` (read kind, nonce, or ciphertext + SMAC) and `bus_rsp_t`
  (kind, enc, err, data), each a valid/ready channel. The top has two taps,
  `atk_req_*` and `atk_rsp_*`, that replace the data field in flight, and a
  response snoop. They exist so that a testbench can act as the bus attacker.
* **Media.** `media_req_t` (write, kind, tree level, index, byte mask, data)
  with valid/ready. Read data returns in order on `m_rsp_valid`, with any
  latency.
* **Latencies.** The hash latency is `HASH_LAT` cycles (default 4). AES is
  iterative, one round per cycle (11 cycles per block). A case-A write in the EE
  takes about 60 cycles. The tree update of a write completes nine beats after
  it is launched. The published figures are in nanoseconds: 40 ns hash, 80 ns
  AES at a 1333 MHz clock. Set `HASH_LAT` to about 53 to model them.
* **Events.** Both engines pulse event outputs (EE case, counter forwarding,
  media node fetch, verification failure, SMAC failure, nonce encryption, launch,
  drain) for monitoring.

## Files

| file | content |
|---|---|
| `rtl/imiv_pkg.sv` | types, sizes, hash, counter and tree-index functions |
| `rtl/imiv_top.sv` | EE + bus + IVE |
| `rtl/imiv_ee.sv` | encryption engine |
| `rtl/imiv_ive.sv` | integrity verification engine |
| `rtl/bmt_update_pipe.sv` | nine-stage tree update pipeline with forwarding |
| `rtl/bmt_tracking_table.sv` | in-order retirement of tree updates |
| `rtl/pwrq.sv` | pending write queue with forwarding, node storage and drain |
| `rtl/pht_unit.sv` | PWRQ hash tree |
| `rtl/bmt_upper_buffer.sv` | levels 7..8 buffer with power-down flush |
| `rtl/meta_cache.sv` | set-associative write-through cache (counter, SMAC, lower BMT) |
| `rtl/sync_fifo.sv` | RPQ, WPQ, PRRQ |
| `rtl/aes128_enc.sv`, `rtl/hash_unit.sv`, `rtl/nonce_gen.sv` | primitives |
| `tb/nvm_media.sv` | behavioural media model (sparse memory, untouched blocks read as an empty DIMM) |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
Run one with plain Verilator, giving the package first:

    verilator --binary --timing --assert -Irtl rtl/imiv_pkg.sv \
      $(ls rtl/*.sv | grep -v imiv_pkg) tb/nvm_media.sv tb/tb_imiv_top.sv \
      --top-module tb_imiv_top && obj_dir/Vtb_imiv_top

`tb_imiv_top` runs the whole system at its default sizes, which are the full
512 GB geometry. It makes the following happen:

* EE cases A, B and C for reads and writes;
* nonce-encrypted counter fetches;
* counter forwarding;
* tree nodes fetched from the media;
* overlapping updates in the pipeline;
* drains;
* a replayed counter response, which is detected;
* a tampered ciphertext on the bus, which is dropped, and the later read of
  that line fails its check;
* a tampered counter block on the media, which is refused;
* a power down raised while a write is still being encrypted: the write is
  flushed to the DIMM (ADR), saved under the PHT, and completed by the recovery.

The test counts each of these and fails any that never happened. It also
rebuilds the tree from the counter blocks on the media and compares every lower
node on the media, and the root, with it.

The unit testbenches compare each module with an independent model:

* **AES:** FIPS-197 vectors.
* **Hash:** vectors from a separate reference.
* **Queues, caches, buffer and BTT:** behavioural models.
* **Update pipeline:** a software tree, with snapshots deliberately stale so that
  forwarding is needed.
* **PHT:** a software tree.
* **EE:** SMACs predicted from the testbench's own counters.
* **IVE:** driven from the bus with testbench-signed writes, a corrupted save
  area, and a clean recovery.

## Where this RTL departs from, or goes beyond, the published design

* **Invented here.** The hash function, the digest width (64 bits, eight per
  node), the counter format, the AES seed layout, the bus and media message
  formats, and the save-area layout are not fixed by the published design.
* **PHT.** The PHT root is computed over all 64 slots when it is needed (power
  down, recovery). It is not kept up to date during normal operation.
* **One write at a time.** The IVE verifies one write at a time. Only the tree
  updates overlap. Reads are served only when no write is pending.
* **Conflicting descriptions.** The upper buffer is taken as the second and
  third levels below the root, 72 nodes. The published text calls it "the top
  three levels" in one place and the second and third highest levels (4.5 KB) in
  another. The IVE checks the SMAC over the ciphertext, as defined for the EE.
  One passage mentions the plaintext instead.
* **Not built.** Page re-encryption on a minor-counter wrap is not built. Nor
  are the optional multiple root copies.
* **Locating corruption.** Every lower tree node is persisted, so a corrupted
  node can be located by checking one level against the next. No hardware
  performs that search; the IVE only reports that a check failed.
* **PHT root width.** The PHT root kept in trusted storage is the 64-bit digest
  of the 64-byte top PHT node. The published design budgets 64 bytes for it.
* **Outside the RTL.** The media, the DIMM's read-modify-write and
  address-indirection buffers, the host caches and the supercapacitor that powers
  the flush are outside the RTL. Their signals are ports, and a behavioural media
  model is used in simulation.
* **Synthesis.** The PWRQ holds 64 entries of about 4.2 kbit in flip-flops, and
  each hash unit is a single-cycle combinational hash held for `HASH_LAT` cycles.
  Synthesis of the complete top is therefore large and slow. A real
  implementation would use SRAM macros for the PWRQ and the caches, and
  multi-cycle hash cores.
