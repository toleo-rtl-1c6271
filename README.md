# Toleo version storage: freshness for tera-scale memory

A trusted execution environment encrypts and MACs data it keeps in untrusted
DRAM. That alone does not stop a *replay*: an attacker who records an old
ciphertext and its MAC can put both back later, and they still verify. The
usual defence gives every 64-byte block a version number that is mixed into
the encryption and the MAC, and protects the versions with a Merkle tree. A
Merkle tree over tens of terabytes is deep and slow.

This design replaces the tree with a small **trusted memory device** that
holds the versions. It sits inside the trust boundary, so whatever it returns
is current by construction. The device is shared by all compute nodes of a
rack over CXL links. The RTL here contains:

* the device's logic: request decoding, link arbitration, the request handler,
  the compressed version store and its allocator;
* the version caches on each host: a TLB extension, an overflow buffer and a
  MAC cache;
* a rack-level top that joins four hosts to one device.

To make one device enough for a rack, three ideas keep the versions small:

1. **Stealth versions.** Each block's 64-bit version is split in two. The
   upper 37 bits (the *UV*) are shared by a page and stored next to the MACs in
   ordinary memory. Only the lower 27 bits (the *stealth version*) live in the
   trusted device. Each stealth version starts at a random value. On every
   increment of a page's highest version, it is re-randomised with probability
   2^-20. Every such *stealth reset* increments the page's UV, so the full
   64-bit version never repeats (in practice). An attacker who does not see
   the stealth version can only guess it: 1 chance in 2^27.
2. **Trip compression.** The 64 stealth versions of a 4 KB page are stored in
   one of three formats (flat, uneven, full). The format depends on how far
   apart the page's versions have drifted.
3. **Caching on the host.** Most version reads are answered on the host chip.
   Only misses and writes travel to the device.

## The Trip formats

Every page has a 12-byte **flat entry** at a fixed place in the device.
Its 96 bits are laid out as follows:

| bits    | field                                                                  |
|---------|------------------------------------------------------------------------|
| 95:93   | reserved                                                               |
| 92:91   | format: 0 flat, 1 uneven, 2 full                                       |
| 90:64   | 27-bit base                                                            |
| 63:0    | 64-bit vector; in uneven/full pages: [63:57] MAX, [56:50] MIN, [47:0] pointer |

**Flat.** Block *i* has version `base + bv[i]`. Writing block *i* sets its
bit. When all 64 bits are set, the base goes up by one and the vector clears.
This covers pages that are read-only, written once, or written in sweeps.

**Uneven.** A flat page becomes uneven when a block whose bit is already set
is written again: it would get two ahead of an unwritten block. The device
then allocates one 56-byte block of 64 seven-bit offsets. Block *i* has
version `base + off[i]`. The flat entry keeps the base and the pointer, plus
the MAX and MIN of the offsets. When an offset would reach 128, the page is
*normalised*: MIN is subtracted from every offset and added to the base. If
MIN is already 0, the spread really is above 127. The page then becomes full.

**Full.** Four 56-byte blocks hold 16 explicit 27-bit versions each. The flat
entry's base tracks the page's highest version.

**The leading block and stealth resets.** A reset is drawn only when the
block holding the page's highest version is written. Which block that is
depends on the format:

* flat: the first block written after the base moved (the vector was empty);
* uneven: a block whose offset equals MAX;
* full: a block whose version equals the base.

A reset returns the page to flat, with a new random base and an empty vector.
It frees any uneven or full entry and tells the host to increment the page's
UV. The host must then re-encrypt the page. An OS **RESET** (page downgrade
after free or remap) does the same, without the random draw. The OS
increments the UV itself.

All of this arithmetic is in `trip_engine`, as one combinational function of:
flat entry, extension blocks, block index, operation and one 64-bit random
word. Its new base comes from `rnd[63:37]`. Its reset draw succeeds when
`rnd[19:0]` is zero. Stealth versions wrap modulo 2^27. The engine returns
the new version on an UPDATE.

## The device

```
 link0..3 ─► toleo_req_decoder ×4 ─► toleo_port_arbiter ─► toleo_ctrl ◄─► toleo_version_store
 (plaintext side of the CXL IDE ports)        ▲                 │  ▲
 responses ◄──────────────────────────────────┘                 │  └── range_trng
                                                           trip_engine
```

**Request encoding.** Each link carries CXL.mem-style requests, decoded as
follows:

* A MemRd of block address `{page, block, 6'b0}` (page = addr[63:12], block =
  addr[11:6]) is a READ.
* A MemWr of a block address is an UPDATE.
* A MemWr of the reset register (`MMR_ADDR`) is a RESET. The page number is
  in the write data.

Malformed requests are consumed and flagged on `m2s_bad_o`, and get no
response. They are a MemRd of the register, or a page beyond `NUM_PAGES`.

**Arbitration.** The four links share one handler. Grants go round robin, so
a waiting link is served within four requests. The response carries the
link's number back.

**Request handler (`toleo_ctrl`).** It takes one request at a time, one
state per cycle:

1. **IDLE:** take the request; read the flat entry.
2. **FLAT:** read the four region blocks the pointer names.
3. **POOL:** the blocks arrive.
4. **EXEC:** run the Trip engine; allocate, write back, free.
5. **RSP:** respond.

A READ answers 4 cycles after it was taken. An UPDATE also waits, in EXEC,
for a random word. An UPDATE that needs a new uneven or full entry when none
fits is answered `ST_REJECT` and changes nothing. After reset the handler
sweeps the flat array at one page per cycle, giving each page a random base.
Only then does it raise `init_done_o` and accept requests.

**Store and allocator (`toleo_version_store`).** The store has two parts:

* a flat-entry array indexed by page number;
* a region of 56-byte blocks, where uneven entries (1 block) grow up from
  block 0 and full entries (4 blocks) grow down from the top.

Freed entries go on a free stack per kind and are reused first. When the
last live entry of a kind is freed, that list shrinks back to its end. Its
space then becomes usable by the other kind. The device is full when an
allocation fits neither a stack nor the gap between the lists. It then stays
full until the OS downgrades pages with RESET. `used_blks_o` reports the
occupancy so the host can decide when. Reads take one cycle; the DRAM's own
latency is not modelled.

**Random source (`range_trng`).** This is a behavioural stand-in for a
DRAM-based true random number generator: xorshift64 behind a valid/take
handshake. The real generator harvests analog DRAM behaviour and cannot be
written as RTL. It must be replaced for any real use, since xorshift is
predictable.

## The host side

Each node has a `host_version_unit` and a `mac_cache`.

* **TLB stealth extension** (`tlb_stealth_ext`, 256 entries, fully
  associative). Each TLB entry also holds the page's 12-byte flat entry. For
  a flat page, that is all that is needed to compute any block's version.
  Replacement: first free entry, else round robin. An OS downgrade drops the
  flat entry but keeps the translation.
* **Overflow buffer** (`stealth_ovf_buf`, 512 × 56 B = 28 KB, 16-way, true
  LRU). It holds the device's 56-byte uneven and full blocks, tagged by
  `{VPN, offset}`:
  * an uneven page uses offset 0;
  * block *i* of a full page lives at offset `i[5:4]`.

  A page's four blocks share a set, so dropping a page needs one set.
* **Version unit.** On a READ, both caches are looked up in the same cycle.
  If the flat entry is present and either the page is flat or its block is
  buffered, the answer comes 2 cycles after the request, without using the
  link. Otherwise the READ goes to the device. UPDATE and RESET always go to
  the device, so the device is the only place a version is ever incremented.
  Every response refreshes both caches:
  * the TLB gets the new flat entry;
  * the buffer drops the page if its format changed, it was reset, or it was
    downgraded;
  * the buffer stores the returned block for uneven and full pages.

  The caches therefore never return a stale version. A stealth reset is
  passed on as a one-cycle `uv_update_o` strobe with the page number.
* **MAC cache** (`mac_cache`, 1 MB, 16-way LRU). It caches 64-byte MAC blocks:
  eight 56-bit MACs (bits [447:0]) and the page's 37-bit UV (bits [484:448]).
  Writes change a present line in place.

Both caches use the helper `sa_lru_cache`, a set-associative store whose
per-set age counters give exact LRU order.

## The rack top

`toleo_rack` instantiates `NODES` (4) host units and MAC caches and one
device. The links are wired straight through. Its ports are the interfaces of
the parts that are not built:

* the protection engine's version requests and responses (`eng_*`);
* UV-update strobes (`uv_update_o`, `uv_ppn_o`);
* the MAC cache (`mac_*`), which memory fills and the engine writes;
* device status (`dev_used_blks_o`, event strobes, `link_bad_o`).

Nodes are assumed to work on disjoint pages. Nothing keeps one node's cached
versions coherent with another node's writes to the same page.

## Sizes

| parameter | default | design point | note |
|---|---|---|---|
| stealth / UV width | 27 / 37 bits | 27 / 37 | |
| reset probability | 2^-20 (`RESET_BITS`=20) | 2^-20 | |
| device links | 4 | 4 × x8 | |
| flat entries (`NUM_PAGES`) | 2^24 (64 GB of data) | 24.8 TB of data, 74.6 GB of entries | scaled |
| dynamic blocks (`POOL_BLKS`) | 2^22 (224 MB) | 93.4 GB | scaled |
| TLB extension | 256 | 256 | |
| overflow buffer | 512 × 56 B, 16-way | same | |
| MAC cache | 16384 lines, 16-way | 1 MB, 16-way | |

The device's store is the only scaled part. At full size it is 168 GB, which
no simulator can hold. The defaults keep roughly the intended ratio of
dynamic space to flat entries. The store is sized by two parameters, and
nothing else in the RTL depends on them.

At the defaults the device protects 64 GB, which holds each of the evaluated
applications with room to spare. Their resident sets are 7 to 26 GB, at most
6.6 M pages against 16.8 M flat entries. At the worst measured peak of
7.6 GB of version space per TB of data, their dynamic space needs are at most
about 120 MB against 224 MB built. A full rack (24.8 TB of data) needs the
store at its full size.

## Where this RTL departs from the full design

* The device's handler is a fixed state machine. The original uses a small
  programmable in-order core.
* These parts are not built: CXL IDE link encryption and attestation, the
  DRAM controller and its timing, the attestation key, the AES-XTS/MAC
  engine, and host re-encryption on a UV update. Their signals are ports.
* Undecided details were chosen here:
  * the bit placement of MAX, MIN and pointer;
  * the uneven→full rule when MIN is 0;
  * the random-bit slices;
  * the allocator's free stacks and list-shrink rule;
  * the address map and reset-register address;
  * round-robin arbitration;
  * all handshakes and latencies;
  * the TLB replacement policy;
  * the overflow buffer's set index.
* The host unit serves one request at a time. It adds no MSHRs and no
  request reordering.
* The stored pointer is a block index into the region, not a byte address.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/toleo_pkg.sv tb/tb_toleo_rack.sv --top-module tb_toleo_rack
./obj_dir/Vtb_toleo_rack +verilator+rand+reset+2
```

**Block testbenches.**

* `tb_trip_engine` checks the engine against unwrapped per-block counters,
  including wrap-around at 2^27.
* The cache testbenches compare against LRU reference models.
* `tb_toleo_ctrl`, `tb_toleo_device` and `tb_host_version_unit` run real
  traffic against a per-block reference model. They check the READ latency
  of 4 cycles, the hit latency of 2 cycles and the start-up sweep of one
  cycle per page.

**`tb_toleo_rack`** is the end-to-end test, on a small configuration: 64
pages and 32 region blocks. Four nodes run at once, and every version is
checked. It counts each mechanism and fails if one never happens:

* TLB hits and overflow-buffer hits;
* device reads;
* upgrades to uneven and to full;
* normalisation;
* stealth resets with UV updates;
* device-full rejections;
* OS resets;
* contention between links;
* MAC-cache hits and evictions.

**`tb_toleo_rack_full`** runs the rack at its defaults. It runs the
16.8 M-cycle start-up sweep, then mixed traffic on pages spread over the
whole range. It takes about two minutes.

Parameters that make the behaviour visible in short tests: `RESET_BITS`
(e.g. 8 makes stealth resets frequent) and `POOL_BLKS` (small values make
the device fill up).
