# Rainbow coherence fabric in SystemVerilog

A server built from several multicore chips (CMPs) must keep every core's
caches coherent across chips, but off-chip bandwidth and latency are costly.
Rainbow handles this with two ideas:

* **Colored token counting.** Each memory block has a fixed set of tokens,
  which gives single-writer/multiple-reader safety by construction: one token
  lets a cache read, and all of them let it write. The tokens come in three
  colours, and the colours say who answers whom, so that a read is served
  inside a chip whenever the chip holds the block.
* **Directory|Filter pairs.** Each chip's LLC bank has a small D|F-LLC and
  each memory controller has a D|F-MEM. Each pair is a small sparse directory
  (D) and a d-left counting Bloom filter (F).
  * The directory tracks only the most actively shared blocks. It may forget
    an entry at any time without invalidating anybody.
  * The filter answers "might anyone below me have a copy?". A "no" avoids a
    broadcast. A "yes" for a block the directory forgot triggers a broadcast,
    and the directory entry is rebuilt from the answers.

This repository holds synthesizable RTL of the coherence controllers: the
directory, the filter, the token rule, the LLC-bank controller, the home
controller, and a top level that wires two chips together. The cores, private
caches, LLC data arrays, networks and DRAM are not part of the RTL. They
connect through the top level's ports, and the testbenches model them.

## 1. Tokens and their colours

For every block there are:

| colour | count | role |
|---|---|---|
| gold | 1 | its holder answers reads that come from *other chips* |
| silver | one per chip (2) | its holder is the chip's *deliverer*: it answers reads from cores of its own chip |
| bronze | one per core (8) | plain token counting: one to read, all to write |

Tokens are never created or destroyed.
* When memory holds a block, it holds all of its tokens; a read from DRAM
  hands out the whole set.
* A write has finished collecting once the requester counts every token. No
  acknowledgement protocol is needed.
* A read that finds no token anywhere in a chip proves that the filter gave a
  false positive.

`token_grant` is the combinational rule a holder applies when asked:

* **remote read** (from another chip): only the gold holder answers. It gives
  one silver token, but keeps its last one so it stays its own chip's
  deliverer. It also gives as many bronze tokens as the requesting chip has
  cores, or fewer if it has fewer. The requesting chip thereby gets its own
  deliverer.
* **local read**: a deliverer (silver or gold holder) gives one bronze token.
  It keeps its coloured token, so it can still read.
  * An LLC bank gives one bronze token from whatever it holds.
* **collect** (write, invalidation, eviction): everything.

A core that holds only bronze tokens never answers a read.

## 2. The directory (`sparse_dir`)

This is a set-associative table. An entry holds:
* a valid bit;
* the tag;
* one presence bit per *sharer*, where a sharer is a core for a D-LLC and a
  chip for a D-MEM;
* an *owner* field, which names the silver core (D-LLC) or the gold chip
  (D-MEM).

Each set is a single memory word that holds all of its ways plus a
round-robin victim pointer, so one access is one read and one write.

Operations:

| op | effect |
|---|---|
| `LOOKUP` | reports hit, sharers, owner |
| `WRITE` | allocates or overwrites the entry with the given sharers/owner |
| `ADD` | allocates if needed, ORs sharers in, sets the owner |
| `REMOVE` | clears sharer bits; the entry is freed once no sharer is left |
| `INVAL` | frees the entry |

When an allocation finds its set full, it overwrites the victim way and raises
`rsp_evicted`, and that is all. Nobody is invalidated: this is the "loosely
inclusive" property. The lost information is rebuilt the next time the filter
says the block may be present.

Timing:
* An op is accepted when `op_ready` is high, and the set is read in that
  cycle.
* In the next cycle the set is compared and written back, and `rsp_*` is
  valid. `rsp_*` shows the entry as it was before the op.
* After reset, the table is cleared at one set per cycle. `init_done` rises
  when the sweep ends.

## 3. The filter (`dlcbf`)

The filter is a d-left counting Bloom filter with D subtables (two by
default). Each subtable has BUCKETS buckets of CELLS cells, and each cell
holds an FP_W-bit fingerprint and a CNT_W-bit counter.

How a block maps to a cell:
* The block address is hashed once to H = log2(BUCKETS) + FP_W bits:
  `H = (addr * 0x9E3779B1)[31 -: H_W]`.
* Subtable *i* applies its own bijection to H:
  `P_i(H) = (H * k_i) xor c_i mod 2^H_W`, where `k_i` is odd.
  * The high bits of P_i(H) select the bucket.
  * The low bits are the fingerprint.
* Because P_i is invertible, a (bucket, fingerprint) pair in a subtable stands
  for exactly one hash value. This is what makes deletion safe in a d-left
  filter.

| op | effect |
|---|---|
| query | hit if any candidate bucket holds the fingerprint |
| insert | increment the matching cell; otherwise take a free cell in the least loaded candidate bucket (leftmost on a tie) |
| delete | decrement the matching cell |

Two things go wrong in a filter, and this design handles them as follows.
* **Saturated counters.** A counter that reaches its maximum is never
  decremented again. It can therefore cause later false positives, but never
  a false negative.
* **Full buckets.** An insert that finds every candidate bucket full is
  flagged on `rsp_overflow`. It also sets a sticky *overflow bit* in each
  candidate bucket, and any later query that reaches such a bucket reports a
  hit.

This matters most for the F-MEM, because the home trusts its misses: an F-MEM
miss sends the request to DRAM, which hands out a complete token set. A false
negative there would therefore duplicate tokens. The filter is allowed to err
towards a "maybe", never towards a "no". At the default sizes the buckets run
about 60 % full, and random traffic causes no overflow.

Timing is the same as the directory: two cycles per op, and a reset sweep of
one bucket index per cycle (BUCKETS cycles).

Where the counts change:
* The F-LLC counts a block while at least one private cache in the chip holds
  it.
* The F-MEM counts, for each block of its home, the chips that hold a copy.

## 4. The LLC-bank controller (`dfllc_ctrl`)

There is one controller per LLC bank. It owns a D-LLC (a `sparse_dir` with the
chip's cores as sharers) and an F-LLC (a `dlcbf`). It also uses a
`token_grant` instance, which applies the token rule to the LLC line.

When a request comes in, the controller looks up the D-LLC, the F-LLC and the
LLC array in parallel. Then:

**Read miss**

1. D-LLC hit → snoop only the owner (silver) core. If that core no longer has
   tokens, take one from the LLC line if it has one; otherwise go to the home.
2. LLC line with a bronze token → the LLC answers.
3. F-LLC hit → snoop all the other cores.
   * Any token → the read is served, and a D-LLC entry is *reconstructed*
     from the cores that report a copy.
   * No token and nobody with a copy → false positive → go to the home.
4. Otherwise → read request to the block's home.

**Write miss**

1. D-LLC hit → collect from the sharers (and the owner).
2. The LLC line alone completes the set → done, with no broadcast.
3. F-LLC hit → collect from all cores.
4. If tokens are still missing → write request to the home, carrying what was
   gathered. The home's reply adds the rest.

**Evictions**

* **Private eviction:** the core's tokens go to the LLC line, and the core is
  removed from the D-LLC. On the last private copy in the chip, the F-LLC is
  decremented.
* **LLC eviction:** every token in the chip is collected (private copies are
  invalidated) and handed to the home. The D-LLC entry and the F-LLC count are
  dropped.

**Snoops from a home**

These are treated like local requests: LLC line, then D-LLC, then F-LLC.
* For a remote read, the gold holder answers.
* For a collection, everything in the chip is gathered.

A snoop can be served while the bank's own request is waiting for its home.
This is what lets two chips each ask the other's home without deadlock.

The F-LLC is incremented when a block reaches a private cache of a chip that
had no private copy. It is decremented on the last private eviction, and when
a collection empties the chip.

Each bank handles one local transaction at a time. The first request takes
three cycles plus the LLC latency for the lookups, then one snoop round or one
home round trip, then two cycles per table update.

Ports: `lreq_*`/`lrsp_*` (cores), `llc_*` (LLC array), `snp_*` (private-cache
snoops), `hreq_*`/`hrsp_*` (to the home), `xsnp_*`/`xrsp_*` (from homes), and
`ev`, which flags one mechanism per cycle for observation.

## 5. The home controller (`dfmem_ctrl`)

There is one home controller per memory controller. Its D-MEM has the chips as
sharers, and its owner field names the gold chip. Its F-MEM counts the chips
that hold each block of this home.

**Read**
* D-MEM hit → snoop the gold chip. If that chip gives nothing, fall back to a
  broadcast.
* F-MEM hit → snoop every other chip.
  * A copy is found → a D-MEM entry is created. The block has become shared
    between chips.
  * No copy → false positive → DRAM.
* F-MEM miss → DRAM. The requester receives every token, and the F-MEM is
  incremented.

**Write**
* D-MEM hit → collect from the sharer chips. If tokens are still missing,
  collect from the chips not yet asked.
* F-MEM hit → collect from every other chip.
* F-MEM miss → DRAM with every token.

**LLC eviction**
* The gold token and every silver token came back with the chip → a *clean*
  eviction. Memory takes the tokens.
* Otherwise, every other chip is collected as well (an *invalidating*
  eviction) before memory takes the whole set.

Bookkeeping: the F-MEM is decremented for every chip that lost its copy, and
the D-MEM entry is freed or rewritten.

Memory always holds all of a block's tokens or none of them. The testbench
checks this on every DRAM read.

## 6. The fabric (`rainbow_top`)

The default system is 2 chips, each with 4 cores, 4 LLC banks and one memory
controller.

Address mapping:
* Blocks are interleaved over the banks by their low address bits.
* Blocks are assigned to a home by their top address bit.

Routing between the controllers:
* **Home requests:** each home takes one bank's request at a time, chosen
  round robin over all requesting banks of all chips. The reply goes back to
  the bank (chip, `bank_of(addr)`).
* **Home snoops:** a home snoops, in each target chip, only the bank that owns
  the address. If two homes target one bank, the lower-numbered home goes
  first. The bank's reply is returned to the home it accepted.

The module adds no latency of its own: the on-chip and off-chip networks,
with their delays, sit outside the ports.

All per-bank ports are unpacked arrays indexed `[chip][bank]`, with `[core]`
added for snoop replies. Memory ports are indexed `[chip]`.

## 7. Sizes

| parameter | default | origin |
|---|---|---|
| chips, cores per chip, banks | 2, 4, 4 | the dual-chip evaluation system |
| block address | 26 bits | 4 GB of memory in 64-byte blocks |
| D-LLC | 512 entries, 8-way, per bank | the 1 MB-per-chip configuration; the associativity is this design's |
| D-MEM | 4096 entries, 8-way | same |
| F-LLC | 2 × 512 buckets × 4 cells, 8-bit fingerprint, 2-bit counter | this design's, sized for < 5 % false positives |
| F-MEM | 2 × 8192 buckets × 8 cells, same cells | same |
| LLC bank / DRAM latency (testbench models) | 5 / 300 cycles | the evaluated system |

The filter sizing is based on the blocks each filter must track:

* **F-LLC:** each bank tracks up to 2560 private blocks
  (4 cores × 160 KB / 64 B / 4 banks), giving 62 % cell load.
* **F-MEM:** each home tracks about 76 k blocks, giving 58 % load.
* **False positives:** random traffic at the F-LLC load gives 1.7 % in
  simulation.
* **Storage:** about 200 KB per chip in total. This is less than the 1 MB
  budget the evaluated configuration allows, because the filters reach the
  target rate with fewer cells.

A larger configuration (8k-entry D-LLC, 32k-entry D-MEM) and a smaller one
(128 / 1k) only need different parameter values. A 4-chip system needs
`N_CHIPS = 4` in `rainbow_pkg`: the token fields and the D-MEM sharer vector
widen automatically.

## 8. Where this design goes beyond or departs from the published protocol

* **Racing requests to one block are not ordered.** Each controller serialises
  its own transactions. But two chips asking for the *same* block at the same
  time can leave tokens in flight inside a controller, where the other chip's
  collection does not see them. The full protocol resolves this with transient
  states that are not reproduced here. The system-level testbenches therefore
  keep requests to any one block serialised, while requests to different
  blocks run concurrently.
* **Fallbacks the published flow charts do not show:**
  * a D-LLC owner without tokens is followed by the LLC line, then the home;
  * a D-MEM owner without tokens is followed by a broadcast;
  * a D-MEM multicast that does not finish a write is followed by a broadcast
    to the remaining chips.
* **Home snoops always consult the F-LLC first.** The published read timeline
  broadcasts inside the gold chip when its D-LLC misses. The outcome is the
  same because the filter never misses a present block; only the snoop
  traffic differs.
* **The exact number of tokens given** when a holder is short of them is this
  design's choice (section 1).
* **Filters:** the hash and permutation functions, saturating counters and
  the per-bucket overflow bit for inserts that find no room are this design's
  choices.
* **Observation outputs:** the `ev` outputs exist for observation and
  performance counting. They are not part of the protocol.
* **SYNCASYNCNET lint warning:** Verilator reports it on `rst_n`. The
  asynchronous reset also disables the handshake assertions, which sample on
  the clock. This is intended.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_token_grant` | hand-worked grants for each colour case; 300 random holdings checked for conservation, for never giving what is not held, and for a reader keeping a token |
| `tb_sparse_dir` | reset-sweep length, two-cycle latency, every op, silent round-robin eviction, random ops against a reference model |
| `tb_dlcbf` | 2560 random blocks (no false negatives, no overflow), false-positive rate below 5 % and above 0, delete-all against a model of saturated counters |
| `tb_dfllc_ctrl` | one bank with private-cache, LLC and home models: every read/write/eviction branch, home snoops, a false positive, token conservation |
| `tb_dfmem_ctrl` | one home with chip models and a 300-cycle DRAM (latency checked): DRAM reads, broadcast with reconstruction, D-MEM unicast, write collection, clean and invalidating evictions, an F-MEM false positive |
| `tb_rainbow_top` | the whole fabric with shrunken tables and 3-bit fingerprints, so directory evictions and filter false positives are frequent. Eight concurrent request threads (one per chip and bank) issue about 2800 requests. After each request it checks that the block's tokens add up to exactly one set, that a read got a token and that a write got all of them. It requires every mechanism to occur: D-LLC hit, LLC hit, F-LLC broadcast, reconstruction, false positive, silent eviction, home snoop (also while the bank waits for its home), D-MEM hit, F-MEM broadcast, DRAM read, clean and invalidating LLC eviction |
| `tb_rainbow_full` | the same environment with every parameter at its default size (8192-cycle reset sweep), about 1400 requests |

The models shared by the two system testbenches are in `tb/rainbow_env.svh`.

To simulate with plain Verilator (the top-level testbenches need `-Itb` for
the include):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/rainbow_pkg.sv rtl/sparse_dir.sv rtl/dlcbf.sv rtl/token_grant.sv \
  rtl/dfllc_ctrl.sv rtl/dfmem_ctrl.sv rtl/rainbow_top.sv \
  tb/tb_rainbow_top.sv --top-module tb_rainbow_top -o sim
./obj_dir/sim
```

For a unit testbench, swap in its file and module name; only the package and
the modules it uses are needed. Every testbench finishes in well under a
second of simulation time.

## 10. Files

| file | content |
|---|---|
| `rtl/rainbow_pkg.sv` | system constants, token and message types, address mapping |
| `rtl/token_grant.sv` | colour-token reply rule |
| `rtl/sparse_dir.sv` | D-LLC / D-MEM |
| `rtl/dlcbf.sv` | F-LLC / F-MEM |
| `rtl/dfllc_ctrl.sv` | LLC-bank coherence controller |
| `rtl/dfmem_ctrl.sv` | home coherence controller |
| `rtl/rainbow_top.sv` | two-chip fabric |
| `tb/*` | testbenches and shared system models |
