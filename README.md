# Touché: a compressed last-level cache without extra tags

A compressed cache can fit two, three or four 64-byte blocks in one physical
line. Each of those blocks needs its own tag, though. The usual fixes both cost
something:

- Adding tag entries costs area.
- Limiting a line to neighbouring addresses (a "superblock") loses much of the
  gain.

Touché keeps the tag array exactly as in an uncompressed cache. For a line that
holds compressed blocks, it puts three things in the space of the line's one
tag entry:

- a flag saying the line is compressed,
- three short *signatures* of the blocks' tags,
- or, for a superblock, a *marker*.

The full tags go into the data line itself, next to the compressed data.
A signature match only means "probably here". The full tag read from the data
line decides.

This repository is synthesizable SystemVerilog for such a controller. It is
built for the Touché paper's main configuration:

- a 4 MB, 8-way shared LLC with 64-byte lines (8192 sets, 48-bit physical
  address, 29-bit tag);
- a 5-cycle tag access and a 30-cycle data access;
- compression switched on only when the average memory latency exceeds
  140 cycles.

The paper describes the mechanisms, not RTL. Every encoding, bit position and
handshake below that the paper does not fix is this design's choice. Each one
is flagged as such.

## 1. The tag entry and how a compressed line is recognised

Every way has a 34-bit tag entry: `{tag[28:0], dirty, valid, repl[2:0]}`
(`tag_entry_t` in `touche_pkg`).

An uncompressed line never has `valid = 0, dirty = 1`. Touché uses that unused
state to mean "this line holds compressed blocks". The tag field then stops
being a tag:

| valid | dirty | meaning | tag field |
|---|---|---|---|
| 0 | 0 | invalid | unused |
| 1 | 0/1 | uncompressed line, clean/dirty | 29-bit tag |
| 0 | 1 | compressed line | `tag[28]` = some block valid, `tag[27]` = some block dirty, `tag[26:0]` = signatures or marker |

A compressed line whose `tag[28]` is 0 counts as free.

For an **arbitrary** compressed line, `tag[26:0]` holds three 9-bit signature
slots: slot *i* is `tag[9i+8:9i]`.

For a **superblock** line, the field is `{marker[15:0], 2'b00, sbsig[8:0]}`:

- the marker is at `tag[26:11]`;
- the superblock signature is at `tag[8:0]`, which is also slot 0.

The placement of the marker and of the slots is this design's choice. The paper
gives only the field sizes.

`tag_manager` decodes a whole set in one combinational step. For each way it
gives:

- the line kind: invalid, uncompressed, arbitrary or superblock;
- whether an uncompressed way hits on the full tag;
- whether a compressed way is a *candidate* that must be probed.

A way is a candidate if any of its three slots equals the request's signature.
A way whose marker matches is also a candidate if slot 0 equals the request's
superblock signature.

Checking the slots of a marker-matching way as well is a departure from the
paper's flowchart. The paper only checks the superblock signature there. An
arbitrary line can match the marker by chance (the paper puts this at 0.012 %
per access). Without the extra check, that chance match would hide the blocks
the line really holds.

## 2. Signatures (SIGN)

`sign_engine` turns a 29-bit tag into a 9-bit signature in three steps:

1. XOR the three 9-bit pieces of `tag[26:0]` into 9 bits.
2. Look up the low 4 bits in a 16-entry table and the high 5 bits in a
   32-entry table.
3. Join the two results, 5 bits above 4.

The paper asks for tables filled at boot with unique numbers. That makes the
9-bit map a permutation, so two tags share a signature exactly when their XOR
folds are equal.

Here each table is an affine permutation `(a*i + b) mod N`, with `a` odd. The
values of `a` and `b` come from the `seed` input when `boot` is pulsed. Before
boot, the tables are the identity.

In superblock mode, `tag[1:0]` is cleared before the fold. All four neighbours
of a superblock then share one signature.

The engine has `NPORTS` signature ports on one pair of tables. The controller
uses five of them:

- the request tag;
- its superblock form;
- the three tags left in a line after an eviction, whose signatures must be
  rewritten into the tag entry.

## 3. Line formats (TADA)

*Tag Appended Data* (TADA) stores each block's full tag and state inside the
data line. `tada` is combinational. It parses a line and produces its modified
version.

**Arbitrary line.** Up to three blocks, in 16-byte units from bit 0. A 32-byte
block takes two units starting at its slot, so a line holds:

- three 16-byte blocks, or
- one 32-byte block and one 16-byte block.

The top 102 bits hold three 34-bit records, one per slot, from bit 410:

```
 511          444 443          410
 | rec2 | rec1 | rec0 | ... slot 2 unit | slot 1 unit | slot 0 unit |
 rec = {valid, dirty, code[2:0], tag[28:0]}   (34 bits)
```

**Superblock line.** Four 15-byte blocks of one aligned group, in position
order (block *j* at bits `120j+119 : 120j`). The line also holds:

- the first block's 29-bit tag at bits 508:480;
- the format code `3'b010` at bits 511:509.

That code cannot appear in bits 511:509 of an arbitrary line, so a line says
which format it is. The valid/dirty summary of a superblock lives in its tag
entry (`tag[28:27]`).

The parse side returns:

- the full-tag hit, with its slot, code, dirty bit and payload;
- the first free 16-byte and 32-byte places;
- whether the line holds exactly the other three neighbours of the request,
  each a 15-byte BDI or all-zero block. Such a line is a *superblock
  candidate*.

The modify side (`op`) can:

- insert a block;
- remove a block;
- build a superblock from the line plus the new block;
- split a superblock. One block is dropped and the other three are rewritten as
  an arbitrary line with their own records.

## 4. The superblock marker (SMARK)

`smark` draws one 16-bit marker at boot and keeps it until reset:

1. The `seed` input seeds a Galois LFSR (`x^16+x^14+x^13+x^11+1`).
2. The LFSR steps `BOOT_STEPS` times.
3. The value is latched as the marker and `ready` rises.

One 16-bit comparator per way flags the ways whose `tag[26:11]` equals the
marker.

The paper asks only for "a random 16-bit marker at boot". The LFSR is this
design's source of randomness. A real chip would feed `seed` from an entropy
source.

## 5. Compression

`compress_engine` runs two compressors on the block in parallel. It keeps the
result with the smaller size class; on a tie it keeps BDI.

**BDI** (`bdi_compressor`) tries several Base-Delta encodings at once. The base
is the block's first element, so its zero delta is not stored. Only the
smallest encoding that fits is kept:

| code | encoding | payload | size class |
|---|---|---|---|
| 1 | all zero | 0 B | 16 |
| 2 | 8 B base, 1 B deltas | 15 B | 16 |
| 3 | 4 B base, 1 B deltas | 19 B | 32 |
| 4 | 8 B base, 2 B deltas | 22 B | 32 |
| – | 2 B/1 B, 4 B/2 B, 8 B/4 B | 33–36 B | 48 (size reported only) |

**FPC** (`fpc_compressor`) codes each 32-bit word separately, with a 3-bit
prefix:

| prefix | pattern | data bits |
|---|---|---|
| 000 | zero word | 0 |
| 001 | 4-bit value, sign-extended | 4 |
| 010 | 8-bit value, sign-extended | 8 |
| 110 | one byte repeated four times | 8 |
| 011 | 16-bit value, sign-extended | 16 |
| 100 | low halfword zero | 16 |
| 101 | two sign-extended bytes | 16 |
| 111 | uncompressed word | 32 |

An FPC payload has two parts:

- the sixteen prefixes first (48 bits);
- then the data fields, in word order.

An FPC result gets one of two codes:

- code 5 (FPC16) for up to 120 bits;
- code 6 (FPC32) for up to 256 bits.

Zero words are coded one at a time. FPC's zero runs are not used.

The 3-bit code is the record's "compressibility" field. `decompress_engine`
uses it to pick the BDI or FPC decoder (`bdi_decompressor`,
`fpc_decompressor`).

Only the 16- and 32-byte classes are stored compressed. A 48-byte block cannot
share a line with anything once a 34-bit record is added. Such a block is
reported as 48-byte class, keeps code 0 and is installed uncompressed.

Superblock lines keep no per-block code, so only two kinds of block may join a
superblock:

- 15-byte BDI blocks (code 2);
- all-zero blocks.

A superblock member is always read back as code 2.

## 6. Lookup

A request is accepted when `req_valid && req_ready`. The steps are:

1. The set's tag row is read. Waiting `TAG_LAT` cycles in total, the tag
   manager decodes it.
2. An uncompressed hit reads that way.
3. Otherwise the candidate ways are read from the data array, one by one in way
   order. TADA checks the full tag of each.
4. A candidate that does not hold the block is a signature (or marker)
   collision. It costs one more access.

Each access costs `TAG_LAT + DATA_LAT` cycles. A read therefore answers after:

| probes | cycles after accept |
|---|---|
| 1 | 35 |
| 2 | 70 |
| 3 | 105 |

These are the latencies of the paper's collision table. A compressed hit is
decompressed on the way out. A hit also updates the LRU ages of its way.

A read miss goes to memory on the `mem_rd_*` port, answers the L2 side when the
line returns, then installs it.

A write from L2 is a full-line write-back. Its handling depends on where the
line is:

- A write that hits an uncompressed way overwrites the line.
- A write that hits a compressed block removes the old copy and installs the
  new data as dirty.
- A write that misses installs the data without reading memory.

## 7. Install and eviction

When compression is on, the block's class decides what happens.

**Class 16 or 32.** Four steps:

1. Every compressed line of the set is read in turn. Each read costs the data
   latency.
2. If one is a superblock candidate and the new block is 15-byte BDI or zero, that
   line is rebuilt as a superblock. Its tag entry gets the marker and the
   superblock signature.
3. Otherwise the first line with room takes the block. Its record is added and
   its signature is written to the matching slot.
4. Otherwise a free way starts a new compressed line.

**No room anywhere.** The LRU way is the victim:

- An uncompressed victim is evicted whole, and written back if dirty.
- A compressed victim loses one block at random, chosen by an LFSR. The paper
  does the same: it keeps no per-block replacement state. A dirty block is
  decompressed and written back. If the victim was a superblock, the other
  three blocks become an arbitrary line.
- This repeats until the new block fits.

**Compression off, or class 48 or 64.** The block goes into a free or victim
way uncompressed.

Replacement (`lru_repl`) keeps true LRU in the three replacement bits of each
entry. Each way stores its age, 0 to 7. Boot sets the age of each way to its
index.

## 8. Dynamic Touché

Compression adds latency: collisions cost extra data accesses. The paper turns
it on only when memory latency is high enough to repay that cost.

`latency_monitor` averages the latency of completed reads, from accept to
response, over windows of `2^WINDOW_LOG2` reads (1024 by default). At the end
of each window it sets `compress_en = mean > 140`.

Switching off only stops new compressed installs. Compressed lines already in
the cache are still found and served.

The window length and starting enabled are this design's choices.

## 9. Interfaces and boot

| group | signals | protocol |
|---|---|---|
| L2 side | `req_valid/ready`, `req_op`, `req_addr`, `req_wdata`; `resp_valid`, `resp_op`, `resp_hit`, `resp_data` | valid/ready request; one `resp_valid` pulse per request |
| memory read | `mem_rd_valid/ready`, `mem_rd_addr`; `mem_rd_resp_valid`, `mem_rd_resp_data` | valid/ready request, data pulse |
| memory write | `mem_wr_valid/ready`, `mem_wr_addr`, `mem_wr_data` | valid/ready write-back |
| status | `boot_done`, `compress_en`, `marker`, `stats` | `stats` holds 15 event counters (hits by kind, misses, collisions, superblocks formed and split, write-backs, mode switches, …) |

Assertions check that a memory request holds its address while it waits for
ready.

One request is in flight at a time.

After reset, the controller:

- clears the tag array, one set per cycle (8192 cycles at full size);
- loads the signature tables;
- draws the marker;
- then raises `boot_done`.

Address split: this design's choice, so that a superblock's four neighbours
fall in one set. The paper says only that the tag is 29 bits.

- tag = `{A[47:21], A[7:6]}`
- set = `A[20:8]`
- offset = `A[5:0]`

## 10. Where this departs from the paper

- The BDI and FPC variants are simplified. BDI uses the first element as base.
  FPC has no zero runs. Their payload layouts are this design's own
  (section 5).
- 48-byte-class blocks are stored uncompressed (section 5).
- Marker-matching ways are also checked on their signature slots (section 1).
- The superblock split, and the write-hit rule for compressed blocks (remove,
  then re-install), are not described in the paper.
- The address mapping, every bit position in the tag field and the line, the
  compressibility code values and the table and marker generators are this
  design's own.
- The cores, the L1/L2 caches and DRAM are outside the design. The LLC's
  request and memory ports are brought out. The testbenches model memory
  behaviourally.
- Only LRU replacement is built. The paper also evaluates DIP and DRRIP.
- The cache size is fixed by `SET_BITS` and the package's `TAG_W = 29`. Other
  cache sizes need both changed together.

## 11. Files

| file | block |
|---|---|
| `rtl/touche_pkg.sv` | widths, layout constants, types, size classes |
| `rtl/touche_llc.sv` | top: controller FSM and the wiring of all blocks |
| `rtl/tag_array.sv`, `rtl/data_array.sv` | the two arrays, single-cycle, standing for SRAM macros |
| `rtl/sign_engine.sv` | signature generator (SIGN) |
| `rtl/smark.sv` | marker generator and per-way compare (SMARK) |
| `rtl/tag_manager.sv` | tag-entry decode and candidate selection |
| `rtl/tada.sv` | line formats: parse, insert, remove, build and split (TADA) |
| `rtl/compress_engine.sv`, `rtl/decompress_engine.sv` | compression-decompression engine: BDI and FPC side by side |
| `rtl/bdi_compressor.sv`, `rtl/bdi_decompressor.sv` | BDI |
| `rtl/fpc_compressor.sv`, `rtl/fpc_decompressor.sv` | FPC |
| `rtl/lru_repl.sv` | LRU ages and victim |
| `rtl/latency_monitor.sv` | Dynamic Touché switch |

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`.

`tb/tb_touche_llc.sv` runs the whole controller with 4 sets and 16-read
latency windows. It covers:

- uncompressed, compressed (BDI and FPC) and superblock hits, with their
  cycle counts;
- signature collisions (70-cycle reads);
- superblock formation and split;
- block eviction and write-backs;
- both mode switches;
- 600 random operations against a reference memory.

It fails if any of these never happened.

`tb/tb_touche_llc_full.sv` runs the same kinds of operation on the top with
every parameter at its default: 8192 sets, 35/70-cycle latencies, a superblock
in the last set.

## 12. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/touche_pkg.sv \
    $(ls rtl/*.sv | grep -v touche_pkg) tb/tb_touche_llc.sv \
    --top-module tb_touche_llc -o sim
./obj_dir/sim
```

Replace the testbench and top-module name to run another test. The full-size
run takes a few seconds.

The testbenches drive and sample at the falling clock edge. They need no
four-state simulation.

To try another geometry, override `SET_BITS`, `TAG_LAT`, `DATA_LAT`,
`WINDOW_LOG2` or `THRESHOLD` on `touche_llc`. Keep `TAG_LAT >= 3` and
`DATA_LAT >= 2`.
