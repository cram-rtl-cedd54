# CRAM: compressed memory for bandwidth, without metadata lookups

Main memory is read in 64-byte lines. If two or four neighbouring lines
compress well enough to share one 64-byte location, one memory access brings
all of them to the cache, and the memory channel carries more useful data per
access. Capacity is not the goal here. Every line keeps its own location, and
compression only changes *where* some lines are currently kept and *how many*
come back per read.

This raises a problem. The memory controller has to know, for every line,
whether it is compressed and therefore where it lives. Conventional designs
keep that status in a metadata table in memory. They then pay an extra access
whenever the on-chip metadata cache misses. CRAM keeps no such table. The
stored data describes itself, and a small predictor guesses the location. The
result is one access per miss in the common case. Nothing changes in the DRAM,
the bus protocol or the operating system.

This repository holds synthesizable SystemVerilog for the CRAM logic in the
memory controller. It also has a self-checking testbench for every block and
one end-to-end testbench that plays the last-level cache (LLC).

## Where a line can live

Lines are grouped in aligned groups of four, called A, B, C and D. They are
told apart by line-address bits [1:0]. A group is kept in one of three forms:

| form       | A location    | B location | C location    | D location |
|------------|---------------|------------|---------------|------------|
| uncompressed | A           | B          | C             | D          |
| 2-to-1     | A + B packed  | (invalid)  | C + D packed  | (invalid)  |
| 4-to-1     | A+B+C+D packed| (invalid)  | (invalid)     | (invalid)  |

The two halves of a group are independent in 2-to-1 form. One pair may be
packed while the other pair is stored uncompressed. A is always in its own
location. B can be in its own location or in A's. C can be in its own or in
A's. D can be in its own, in C's or in A's. So a line has at most three
possible locations, and the controller never needs more than three reads to
find it (`cram_pkg::level_loc`).

## How a line read from memory tells what it is

**Markers.** A packed line holds its compressed data in the first 60 bytes.
The last 4 bytes hold a *marker*: one value for 2-to-1 and another for 4-to-1.
An uncompressed line is stored exactly as it is. When a line comes back from
memory, the controller compares its last 4 bytes with the two markers and so
learns the form of what it got (`cram_line_classifier`).

**Per-line markers.** The two global markers are drawn at reset from an
external random source (`cram_marker_regs`). Each memory location gets its own
markers. The controller XORs the global ones with a keyed scramble of the line
address. The scramble is a 4-round Feistel network on the 30-bit address
(`cram_line_marker`). So a program that writes the same 4 bytes everywhere
collides with the markers of at most a few locations, not all of them. The
4-to-1 marker is redrawn if it equals the 2-to-1 marker or its complement. The
inversion scheme below relies on that.

**Invalid-line marker.** When a group is packed, the locations it vacates
would still hold stale copies of old data. A stale copy must never be taken
for a live uncompressed line. The controller therefore overwrites each vacated
location with a random 64-byte value, the invalid-line marker (Marker-IL).
Like the other markers, it is made unique per location. If a read returns
Marker-IL, the line is elsewhere.

**Collisions and the Line Inversion Table (LIT).** Sometimes an uncompressed
line happens to end in one of its location's markers, or to equal its
Marker-IL. Such a line is written *inverted* (all bits flipped), and its
address goes into the LIT (`cram_lit`, 16 entries). The inverted line now ends
in the complement of a marker. When a read returns a line whose last 4 bytes
equal a complemented marker, or whose data equals the complemented Marker-IL,
the controller looks the address up in the LIT:
- If the address is listed, the line is flipped back.
- If it is not listed, the data really does end in that value and is returned
  as is.

Any later write to a listed location that no longer collides removes the entry.
**LIT overflow.** A 17th concurrent collision would have nowhere to go.
The controller handles it by drawing new markers and re-encoding memory:
1. The colliding write is held back, and the insert raises `lit_overflow`.
2. The controller copies the current markers and key into a second register
   set. It then reloads `cram_marker_regs` with 20 new random words from the
   `rng_*` port, and clears the overflow flag.
3. It sweeps all `MEM_LINES` locations (2^28 for 16 GB) in address order.
   Each location is read, classified with the old markers and old LIT
   entries, and written back encoded with the new markers:
   - a packed line gets the new marker in its last 4 bytes;
   - Marker-IL becomes the new Marker-IL;
   - an uncompressed line is flipped back if the LIT lists it, checked for a
     collision with the new markers, and written inverted and listed, or
     plain and unlisted.
4. The held eviction resumes at the line it stopped on, now under the new
   markers.

While this runs (`rekey_active`), no request is accepted. A sweep costs about
two memory accesses per location. The paper expects overflows to be
extremely rare, so this cost does not matter.

## Finding a line: the Line Location Predictor

Reading the wrong location costs a second access. Neighbouring lines of a page
tend to compress alike. The Line Location Predictor (`cram_llp`) therefore
keeps a 512-entry table of 2-bit levels. The table is indexed by a 9-bit
XOR-fold of the page number, with pages assumed to be 4 KB (64 lines). The
entry gives the predicted level, and `level_loc` turns the level into a
location. Line A needs no prediction.

On a read the controller (`cram_top`) works as follows:
1. It reads the predicted location.
2. It classifies the line it gets.
3. If that line is Marker-IL, or is packed but does not contain the requested
   line, it reads the next possible location it has not yet tried. The order
   is: own location, then the pair's first location, then A.
4. It returns the 1, 2 or 4 lines it obtained, together with the level found,
   and writes that level into the predictor entry.

The LLC keeps the returned level in a 2-bit tag per line. It hands the level
back on eviction, because the eviction logic needs to know what is currently in
memory.

## Writing a group back

The LLC evicts all four lines of a group together (ganged eviction). This means
a packed line is never half-updated, and no read-modify-write is ever needed.
For each line the LLC sends:
- present and dirty bits,
- the level the line was read at,
- its data.

The controller then plans the writes (`cram_top`, state `S_WR_PLAN`):

- If compression is allowed for the group and all four lines fit 15 bytes
  each, the group is packed **4-to-1**.
- Otherwise, each pair whose two lines are present and fit 30 bytes is packed
  **2-to-1**.
- Otherwise, each line is written **uncompressed** to its own location.

Clean lines are compressed and written too. This is where the bandwidth cost
of compression comes from. A packed line is not rewritten if the group was
already packed in that same form and nothing is dirty. Locations that held live
data before and are vacated by the new packing are overwritten with Marker-IL.
A clean line that used to be packed but now goes back to its own location is
written there ("relocation").

The four locations are then written in order A to D, one per cycle, subject to
memory back-pressure.

## Turning compression off when it does not pay: Dynamic-CRAM

Some workloads touch neighbouring lines rarely. For them, the extra writes of
clean compressed lines, the invalidates and the mispredicted reads cost more
than the free neighbours save. `cram_dyn` decides this per core, by sampling:

- One group position in every 100 within the LLC set index always compresses.
  With 8192 sets, that position is group index `addr[12:2] % 100 == 0`.
- Only events on those sampled groups are counted. Each core has a 12-bit
  saturating counter.
- The counter goes up by one for each *useful prefetch*. The LLC reports one
  (`upf_*`) when a line that arrived packed with another is later used.
- The counter goes down by one for each cost event: a compressed write of
  clean lines, an invalidate, or a mispredicted read.
- The counter's top bit enables compression for that core's groups in all
  other sets.

Counters start at 2048, the midpoint, with compression on. A single net cost
event from reset therefore turns compression off until benefits come in.

## The compressor

Every line is compressed twice, by Base-Delta-Immediate (BDI,
`cram_bdi_comp`) and by Frequent Pattern Compression (FPC, `cram_fpc_comp`).
The controller keeps whichever result fits the smaller space, and BDI wins a
tie. Each line gets a fixed slot: 30 bytes when packed 2-to-1 and 15 bytes
when packed 4-to-1. Byte 0 of a slot names the encoding, so the decompressors
(`cram_bdi_decomp`, `cram_fpc_decomp`) can be selected per slot.

BDI stores a base and small differences from it:

| id | encoding | size |
|----|----------|------|
| 0 | all zero | 1 B |
| 1 | one 8-byte word repeated | 9 B |
| 2 | 8-byte base, eight signed 1-byte deltas | 17 B |
| 3 | 4-byte base, sixteen signed 1-byte deltas | 21 B |
| 4 | 8-byte base, eight signed 2-byte deltas | 25 B |

The base is the line's first word, and the smallest encoding that fits is used.

FPC (id 5) handles lines whose words are individually small. Each 32-bit word
becomes a 3-bit prefix plus only the bits it needs. The codes are packed
LSB-first from bit 8 of the slot:

| prefix | word pattern | data bits |
|--------|--------------|-----------|
| 000 | run of 1 to 8 zero words (data = run length - 1) | 3 |
| 001 | 4-bit value, sign-extended | 4 |
| 010 | 8-bit value, sign-extended | 8 |
| 011 | 16-bit value, sign-extended | 16 |
| 100 | upper halfword, lower halfword zero | 16 |
| 101 | two halfwords, each an 8-bit value sign-extended | 16 |
| 110 | one byte repeated four times | 8 |
| 111 | anything else | 32 |

For example, sixteen words in -8..7 take 8 + 16 x 7 = 120 bits and fit the
15-byte 4-to-1 slot, which no BDI encoding reaches. The FPC decompressor is a
combinational chain of sixteen decode steps, each finding the next code from
the lengths of the earlier ones.

The layout of packed lines is:
- 4-to-1: `{marker4, slotD[119:0], slotC[119:0], slotB[119:0], slotA[119:0]}`
- 2-to-1: `{marker2, slot_odd, slot_even}`

## Blocks

| module | what it is | storage |
|--------|-----------|---------|
| `cram_pkg` | widths, line/marker/address types, level encoding (00 uncompressed, 01 2-to-1, 10 4-to-1), placement function | – |
| `cram_marker_regs` | loads 20 random 32-bit words after reset: 2-to-1 marker, 4-to-1 marker, 16 words of Marker-IL, 64-bit key | 80 B |
| `cram_line_marker` | per-location markers from global markers, key and address (combinational) | – |
| `cram_line_classifier` | uncompressed / 2-to-1 / 4-to-1 / invalid / inversion candidate (combinational) | – |
| `cram_lit` | 16-entry fully associative table of inverted locations | 16 × 31 b |
| `cram_llp` | 512 × 2-bit last-level table, page-hash indexed | 128 B |
| `cram_bdi_comp`, `cram_bdi_decomp` | one-line BDI compressor and decompressor (combinational) | – |
| `cram_fpc_comp`, `cram_fpc_decomp` | one-line FPC compressor and decompressor (combinational) | – |
| `cram_dyn` | set sampling and per-core utility counters | 8 × 12 b |
| `cram_top` | read, eviction and re-key state machine tying the blocks together | group buffer, old marker set (80 B) |

The top instantiates four BDI and four FPC compressors, and four of each
decompressor, one per line of a group. The added state (markers and key, LIT, predictor table, counters)
comes to about 282 bytes, plus 80 bytes for the old marker set kept during
a re-key sweep.

## Interface and timing of `cram_top`

All handshakes are valid/ready, except where noted.

- **Reset and boot.** `rst_n` is asynchronous and active low. After reset the
  controller takes 20 words on `rng_valid/rng_data/rng_ready`. `init_done`
  rises when it has them. No request is accepted before that. The same port
  is asked for 20 more words after every LIT overflow.
- **Read.** Inputs are `rd_valid/rd_ready/rd_addr/rd_core`, where `rd_addr` is
  a 30-bit line address. The response is a one-cycle `rsp_valid` pulse that
  carries:
  - `rsp_addr`, `rsp_core`;
  - `rsp_mask`, saying which of the four group lines are valid;
  - `rsp_lines[4]`, indexed by offset in the group;
  - `rsp_level`;
  - `rsp_reads` (1 to 3).
- **Eviction.** Inputs are `ev_valid/ev_ready`, `ev_group` (line address
  without its two low bits), `ev_present`, `ev_dirty`, `ev_prior[4]`,
  `ev_lines[4]` and `ev_core`.
- **Useful prefetch.** `upf_valid/upf_addr/upf_core` is a single-cycle event
  with no handshake.
- **Memory.** Requests use `mem_req_valid/ready/write/addr/data`. Read data
  comes back in order on `mem_rsp_valid/mem_rsp_data`, one response per read.
- **Status.** `lit_overflow`, `rekey_active`, `lit_used`, `comp_enable[8]`, plus one-cycle
  event pulses for misprediction, compressed write, invalidate, inverted write,
  inverted read and relocation.

The controller serves one request at a time, and reads win over evictions.

**Read timing.** A read costs L + 3 cycles per memory access, where L is the
memory latency: one cycle to issue, L cycles in memory, one to capture and one
to classify. One more cycle produces the response. A read found at the first
location therefore responds L + 4 cycles after the edge that accepted it.

**Eviction timing.** An eviction takes one planning cycle, then one cycle per
location, plus any memory stalls. An eviction that overflows the LIT also
waits for the whole re-encoding sweep.

## Simulating

Any testbench builds with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/cram_pkg.sv tb/tb_cram_top.sv --top-module tb_cram_top
./obj_dir/Vtb_cram_top +verilator+seed+7
```

Replace `tb_cram_top` by any `tb/tb_cram_*.sv` to test a single block. Every
testbench ends with a line `TB_RESULT checks=N failures=M`.

`tb_cram_top` runs the controller at its full default sizes against
`tb/cram_mem_model.sv`, a sparse behavioural DRAM with 6-cycle latency and
optional random back-pressure. The testbench works like this:
- It acts as the LLC and keeps a golden copy of all lines.
- It recomputes the per-location markers itself, so it can plant marker
  collisions.
- Directed phases force each mechanism:
  - 4-to-1 and 2-to-1 packing, invalidates;
  - mispredictions, including the 3-read case;
  - relocation;
  - inversion and restore through the LIT, an unlisted complemented marker,
    and a full LIT;
  - a group that only FPC packs 4-to-1;
  - Dynamic-CRAM switching a core off and on.
- A random phase follows, with memory stalls.
- Last, a 17th collision overflows the LIT. The test checks that the write is
  held, new words are requested and taken, and the sweep starts at line 0.
  A full 16 GB sweep is too long to simulate.

`tb_cram_top_rekey` runs the whole recovery on a controller built with
`MEM_LINES` = 8192:
- It fills memory with packed, uncompressed and invalidated locations.
- It plants a line that collides only with the *next* marker set.
- It overflows the LIT and feeds a second word set.
- After the sweep it checks that:
  - no location still carries an old marker;
  - formerly listed lines are stored plainly;
  - the planted line is now inverted and is the only LIT entry;
  - the held line was written;
  - every line reads back right.

Every returned line is compared with the golden copy. The cycle count of every
read without stalls is checked, and each mechanism must occur at least once.
The block testbenches use random and corner-case stimulus and check each block
against a reference model written in the testbench.

## Where this implementation departs from the design it follows

- **Packing.** The lines of a pair or group may share the 60 bytes in any
  split. Here each line gets a fixed equal slot of 30 or 15 bytes. An uneven
  pair, such as 20 + 38 bytes, is stored uncompressed, so fewer lines are
  packed than with a variable layout.
- **Marker hash.** The scramble is a 4-round Feistel network with a 64-bit
  key. It is cheap and keyed, but it is not a cryptographically strong hash,
  which would be needed to resist an attacker who provokes LIT overflows.
- **LIT overflow.** Recovery uses the paper's second option: new markers
  and keys, then re-encoding memory. The first option, a memory-mapped
  inversion bit per line, is not built. Holding the colliding write and the
  sweep order are this design's choices. The sweep itself does not handle
  the table filling up again: a 17th line colliding with the fresh markers
  within one sweep would be stored inverted without an entry. With random
  32-bit markers this is far less likely than the first overflow.
- **Predictor update.** The predictor entry is rewritten after every read with
  the level found. An update on mispredictions only would leave the same table
  contents.
- **Address width.** The line address is 30 bits (64 GiB of lines), which
  matches the LIT entry width. A 16 GB memory would need only 28 bits.
- **Utility counter.** The counter is 12 bits wide (0..4095). A maximum of
  4096 is not representable in 12 bits.
- **Cache side.** The LLC side of the design is outside this RTL. This covers
  ganged eviction, the 2-bit level tag, the core-id bits and the detection of
  useful prefetches. Their signals are ports of `cram_top`.
- **Own choices.** These points were not specified and were chosen here:
  - page size (4 KB);
  - predictor hash and the level encoding;
  - marker load order, and reset values (predictor "uncompressed", counters
    at midpoint);
  - the order in which locations are retried;
  - slot formats: encoding id byte, BDI base choice, FPC zero runs of at most
    8 words, LSB-first packing, and BDI winning a tie;
  - the single-outstanding-request controller.

## Sizes

Defaults follow the evaluated system: 8 cores, 8 MB 16-way LLC (8192 sets), a
16-entry LIT, a 512-entry predictor and 12-bit counters. The controller keeps
no per-line state of its own, so any memory footprint up to the 30-bit line
address space works with these sizes.
