# IRO datapath: integrity and reliability for a Ring ORAM controller

An ORAM controller hides which memory locations a program touches by keeping
data in a tree of buckets and rereading and rewriting whole paths of that
tree. Ring ORAM makes this cheaper: each bucket has a metadata block that
tells the controller where the real blocks are, so only one block per bucket
has to be read on a normal access. Two things are missing from plain Ring
ORAM. First, an attacker who can write memory can tamper with or replay
blocks. Second, each access touches many DRAM cells, so a failed chip,
channel or cell costs both data and obliviousness.

IRO adds both protections while keeping Ring ORAM's memory traffic small and
without extra storage:

* a **MAC tree over the metadata blocks** (the RIT): each metadata block
  holds the MACs of its two child metadata blocks, and the top of the tree
  is held on chip;
* a **separate small tree for the per-bucket counters** that change on every
  access (the MUST), so the big metadata blocks need not be rewritten each
  time;
* **replicas of real blocks in the dummy slots** of their own bucket, always
  in the *other* memory channel, so that a whole channel can be lost;
* a **split copy of the encryption counter** in the spare ECC bits of the
  data slots, so a damaged metadata block can still be decrypted;
* **error correction pointers (ECPs)** stored in the unused bits of the
  metadata block. They patch permanently faulty cells anywhere in the
  bucket, including cells of the ECPs themselves.

This repository is the synthesizable datapath that does this per-block work.
It sits between the Ring ORAM protocol logic (position map, stash, eviction
order) and the two memory channels. The protocol logic, the AES-GCM cores and
the DRAM are outside it; the top module brings their interfaces out as ports.

## Sizes

The defaults are those of the evaluated system:

| quantity | value |
|---|---|
| ORAM tree | 23 levels, top 7 cached on chip, 16 in DRAM |
| bucket | 1 metadata block + 12 data slots (Z = 5 real, S = 7 dummy) |
| block | 576 bits = 512 data + 64 ECC-chip bits |
| bucket cell space | 13 x 576 = 7488 bits, addressed by 13-bit ECP addresses |
| channels | 2; data slot d is in channel d mod 2, the metadata block in channel 1 |
| MUST | forest of 64 trees, 5 levels of 8-ary nodes, top 2 levels (576 nodes, 40.5 KB) on chip |
| AES-GCM | 4 units, 80 cycles per block |
| remap table | 1084 buckets |

The original text quotes a "7588-bit" bucket. That does not match thirteen
72-byte blocks, so this RTL uses 7488. Thirteen address bits cover either
value.

## Block layouts (`iro_pkg`)

All structures are exactly one 576-bit block. In every layout the first field
listed below is at the least significant bits. Because a packed struct names
its most significant field first, the structs in `iro_pkg.sv` are written in
reverse order.

**Metadata block** (`meta_t`):

| field | bits |
|---|---|
| FBit | 1 |
| ROffset | 3 |
| 5 ECPs x {13-bit address, 1-bit value} | 70 |
| 5 real-block addresses x 32 | 160 |
| 5 path labels x 30 | 150 |
| 6 offsets x 4 | 24 |
| EncCtr | 60 |
| 2 child MACs x 54 | 108 |

The six offsets are the five real blocks' slots followed by the slot of the
metadata replica.

**Metadata replica** (`meta_rep_t`): the same fields without the
metadata-replica offset and without EncCtr. A 54-bit MAC and a 10-bit partial
EncCtr are added, so a replica looks like any other data slot.

**Data slot** (`slot_blk_t`): 512 data bits, a 10-bit partial EncCtr and a
54-bit MAC.

**Non-leaf MUST node** (`must_nl_t`):

| field | bits |
|---|---|
| 7 VBits+ReadCtr sets x 15 | 105 |
| FBit | 1 |
| ROffset | 2 |
| 3 ECPs x 12 | 36 |
| 8 child MACs x 54 | 432 |

**Leaf MUST node** (`must_lf_t`):

| field | bits |
|---|---|
| 31 sets x 15 | 465 |
| FBit | 1 |
| ROffset | 3 |
| 7 ECPs x 12 | 84 |
| 4 IPOffsets x 3 | 12 |
| padding | rest |

A MUST ECP holds an 11-bit cell address and a 1-bit value.

ECP cell addresses count bits within the bucket (or within the node) as
`block_position * 576 + bit`. The metadata block is at position 0 and data
slot d at position d + 1.

## Error correction pointers: the part to read carefully

An ECP names one cell and the value that cell should hold. The difficulty is
that the ECPs live in the same faulty memory as the cells they fix. Two rules
keep this sound.

1. **A faulty ECP is only repaired by an ECP in front of it.** ECPs are used
   in logical order 0, 1, 2, .... Logical ECP k is read only after ECPs
   0..k-1 have patched the ECP region. So no two ECPs can point at each
   other.
2. **Rotation.** Logical ECP 0 has nothing in front of it, so it must sit on
   good cells. The stored ECP array is rotated left by ROffset ECP widths:
   logical ECP k is kept in physical slot (k - ROffset) mod N. Choosing
   ROffset moves ECP 0 off a bad slot.

Reading, in `ecp_chain`:

* If FBit is clear, no ECP is used.
* Otherwise the rotation is undone and the ECPs are walked in logical order.
* Each used ECP that points into the ECP region patches that bit before the
  next ECP is read.
* An address of CELLS or more marks an unused ECP. Unused ECPs are written
  with the all-ones address.

`ecp_apply` then forces every used ECP's cell within one block: the metadata
block, any data slot, or a MUST node.

Writing, in `ecp_alloc`, takes the list of known faulty cells and searches
ROffset = 0, 1, ... for the first rotation that works. For a given rotation:

* A faulty cell inside the ECP region has a deadline: the logical index of
  the ECP it sits in. It must be served by an earlier ECP. Other faulty cells
  have no deadline.
* Faults are given ECPs 0, 1, 2, ... earliest deadline first. This finds an
  assignment whenever one exists.
* Values are filled in from the last ECP back to the first. The value for a
  fault inside the region is the bit its host ECP must contain, and that
  host's contents are already final.

The bucket can therefore take up to five faults anywhere, at most four of
them inside the ECP region. If the allocator fails (`ok = 0`), the top enters
the bucket into the remap table.

For the mirrored MUST, a node and its mirror share one ECP list and one
ROffset. The faulty cells of both copies are passed to the allocator as one
list, and both copies are corrected with the same list (block base 0).

All of these units are combinational. Every write to a bit vector uses a
constant index, with each target bit selecting its source, so synthesis
infers no latches and no loops.

## Replicas and the split counter

`replica_placer` recomputes replica positions from the metadata alone. So
only the metadata replica's slot has to be stored.

1. The metadata replica goes first, into the leftmost free slot of channel
   0. That slot must also have no faulty cell under the ECP region
   (`meta_bad`), so that the replica's own ECP copy can be trusted.
2. Then each valid real block, in metadata order, gets the leftmost free slot
   of the channel other than its own.

The metadata order must be the blocks' address order. The caller keeps the
metadata sorted that way.

With real blocks in slots D=0, B=1, E=2, C=3 and A=10, the replicas are
m=4, a=5, b=6, c=8, d=7 and e=9. The top flags `meta_rep_mismatch` when the
recorded replica offset disagrees with this rule.

`partial_encctr` cuts the 60-bit counter into six 10-bit parts. Part k is
written into the ECC word of slot 2k + channel, so each channel holds one
whole copy. After a channel is lost, the counter is rebuilt from the other
channel (`use_ch`).

## Integrity tree (`rit_chain`)

The MAC of a metadata block of DRAM level i is checked against the child MAC
held by the metadata block of level i-1 on the path. At level 0 it is checked
against one of 128 anchors held on chip, one for each node of the first DRAM
level.

The side taken below ORAM level t is label bit (LW-1-t), with 1 meaning
right.

Per path access, the sequence is:

1. `start` with the label.
2. One `mb_valid` per metadata block read. The block's two child MACs come
   from the corrected metadata.
3. One `mac_*` per computed MAC. It produces a `chk_pass` or `chk_fail`
   pulse one cycle later, and `err_level` names the failing level.

On write-back, new MACs are given leaf to root with `upd_*`. Each one lands
in its parent's child-MAC field, or in the anchor, and `rd_child_mac` returns
the values to write into each metadata block. Because the anchor changes, a
replay of the old path fails at the first DRAM level.

An assertion checks that a level's MAC is never checked before its parent
block has been read.

## MUST (`must_path`, `must_node_rw`, `must_top_cache`)

The 15-bit VBits+ReadCtr sets of all buckets form a binary tree. It is cut
into one-block subtrees:

* non-leaf nodes hold 3 binary levels (7 sets) and have 8 children;
* leaf nodes hold 5 binary levels (31 sets).

With 64 roots this gives 3+3+3+3+5 = 17 binary levels and a 22-bit leaf
label: 64 x 4681 nodes x 72 B = 20.57 MiB.

`must_path` reads the label MSB first:

* 6 bits pick the tree;
* each non-leaf node then uses 2 bits for its internal leaf (heap index
  3..6, which is also the IPOffset stored in the leaf node) plus 1 more bit
  to pick its child;
* the leaf node uses the last 4 bits (heap index 15..30).

Nodes are numbered breadth-first, so level j starts at 64(8^j - 1)/7.
Levels 0 and 1 are cached.

`must_node_rw` returns the sets from the subtree root down to the internal
leaf, and writes updated sets back without touching the other fields.
`must_top_cache` is a 576 x 576-bit single-port memory with a registered read
port; its read data holds while `en` is low or during a write.

## MAC units and remapping

`mac_pool`:

* queues requests (depth 8, ready/valid in and out) and starts the
  lowest-numbered free AES-GCM unit;
* returns results lowest unit first;
* counts in `n_stall` each cycle in which a queued request finds every unit
  busy. This is the congestion that dominates IRO's slowdown.

With 4 units of 80 cycles, 16 back-to-back MACs take about 4 x 80 cycles.

`mac_verify`:

* checks a block against the MAC stored with it. That is the data block's
  MAC in its ECC word, or, for a block tried as the metadata replica, the
  child MAC in the parent metadata block;
* takes the stored MAC with the request (`req_verify`, `req_expect`) and
  parks it in a 16-entry table indexed by the low tag bits;
* compares it with the computed MAC when the result with that tag returns,
  pulsing `v_pass` or `v_fail` and counting both;
* assumes a tag is not reused while its result is outstanding. An assertion
  checks this.

`bucket_remap`:

* is a fully associative table that maps a bucket index to a redundant
  bucket number;
* fills entries in order and never frees them;
* ignores an insert of a bucket that is already present;
* is looked up combinationally on every access.

## Top module (`iro_top`)

`iro_top` wires the units into one path. Everything is combinational from
its block inputs except the RIT state, the MAC queue, the MUST cache and the
remap table. All reset is synchronous and active high.

* **Bucket repair:** `meta_raw` goes through the ECP chain and apply to give
  `meta_fixed`. The same ECP list repairs the data slot given by `data_slot`
  and `data_raw`.
* **Replicas and counter:** the corrected metadata feeds replica placement
  and the partial-counter split.
* **Allocation:** `f_*` supplies the faulty cells to the bucket allocator.
  `alloc_commit` with a failed allocation remaps `bkt_idx`. `mf_*` feeds the
  MUST allocator.
* **MUST access:** `must_label` and `must_level` select the MUST node. Cached
  levels come from the on-chip cache, one cycle after `must_cache_en`; other
  levels come from `must_node_raw`. Nodes are ECP-repaired with the leaf or
  non-leaf layout, then read or updated.
* **MACs:** `mreq_*` feeds the pool, and `u_*` connects to the external
  AES-GCM units. A request with `mreq_verify` set carries its stored MAC in
  `mreq_expect`. Its result is checked by `mac_verify`, and the outcome is
  reported on `dv_*`.
* **RIT routing:** a MAC result whose tag has bit 7 set is the MAC of the
  metadata block of DRAM level `tag[3:0]` and goes to the RIT check. The
  child MACs for the RIT come from `meta_fixed`.

## Where this departs from or goes beyond the original description

These are this design's own choices:

* the bit order of fields inside a block and the bucket cell numbering;
* the unused-ECP encoding;
* the ROffset search and assignment order of the allocator;
* which counter part goes to which slot;
* the label bit order and node numbering of the MUST;
* the reading of the 5-level MUST as 64 trees;
* the RIT anchor arrangement (128 child MACs of the last cached level);
* the MAC tag encoding, queue depth and unit arbitration;
* the organisation of the remap table.

Also:

* The FBit and ROffset cells are not protected by the ECPs.
* The 7588-bit bucket size is taken as 7488.
* One drawing of the mirrored-MUST repair shows ROffset = 1 next to an
  unrotated ECP order. The rotation rule was followed.
* The replication rule is built for two channels only. Four- and
  eight-channel systems would need a different slot-to-channel rule.
* Not built: the Ring ORAM protocol logic, the AES-GCM cipher (a
  latency-accurate stand-in with a toy keyed hash is in
  `tb/gcm_unit_model.sv`), the cached top of the ORAM tree, and the DRAM.
  The fault-detection loop (write, read back, decide the fault is permanent,
  trigger an Early Reshuffle) belongs to the controller; this datapath gives
  it the allocator and the repair.

## Simulating

Each unit has a self-checking testbench `tb/tb_<unit>.sv` that prints
`TB_RESULT checks=... failures=...`. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/iro_pkg.sv rtl/ecp_alloc.sv \
    tb/tb_ecp_alloc.sv --top-module tb_ecp_alloc && obj_dir/Vtb_ecp_alloc
```

`tb_mac_pool` and `tb_iro_top` also need `tb/tb_gcm_pkg.sv` and
`tb/gcm_unit_model.sv`. `tb_iro_top` needs every file in `rtl/`.

`tb_iro_top` runs the whole datapath at the default sizes in under a
second. It plays controller and memory:

* random permanent-fault sets are allocated, injected and repaired exactly;
* unrepairable buckets go to the remap table and are found again;
* the replica example and a faulty-slot case are checked;
* each channel in turn is lost and the counter rebuilt;
* MUST nodes are read from the cache and from memory, repaired and updated;
* full 16-level paths are MAC-checked through four unit models;
* tampering and replay are caught.

It counts each of these mechanisms, and it fails if any of them never
happened. That includes rotation, ECP self-repair, queue backpressure and
unit-busy stalls.

The unit testbenches reproduce the worked examples of the original
description:

* the replica placement above;
* the ECP cases with ROffset = 1 and ROffset = 4;
* the MUST path example, with path label 36 giving internal path 8-17-36 and
  IPOffset 3, using a small `must_path` instance.
