# IceClave controller hardware in SystemVerilog

An SSD that runs user programs next to its flash ("in-storage computing")
has a security problem that a host CPU does not: the programs share one
small controller with the flash translation layer (FTL) and with each other,
the FTL's mapping table tells anyone who can read it where every tenant's data
sits in flash, and the data travels over an on-board bus and sits in an
on-board DRAM that a person with the drive in hand can probe. IceClave's
answer is a trusted execution environment (TEE) per offloaded program, built
from four pieces of hardware around an ARM TrustZone controller:

1. **Three memory regions instead of two.** TrustZone gives a secure world
   (FTL, TEE runtime) and a normal world (the TEEs). A third, *protected*
   region is readable but not writable from the normal world. The FTL's
   cached mapping table lives there, so a TEE can translate addresses without
   a costly switch to the secure world but cannot change the table.
2. **TEE IDs in the mapping table.** Each mapping entry carries the 4-bit ID
   of the TEE allowed to use it, so a TEE cannot probe the physical location
   of other tenants' data.
3. **A stream cipher on the flash-to-DRAM path.** Pages are encrypted with
   Trivium next to the flash controller and decrypted next to DRAM, so the
   internal bus only ever carries ciphertext.
4. **A memory encryption engine (MEE) on DRAM.** Every 64-byte line a TEE
   keeps in DRAM is encrypted in counter mode and authenticated, and the
   counters are protected by integrity trees whose roots stay on chip. Since
   in-storage programs mostly read, read-only pages use a cheaper counter form
   than writable pages ("hybrid counters").

This repository gives synthesizable RTL for all four, a top level that joins
them, and a self-checking testbench for every block. The processor cores, the
firmware (FTL, runtime, monitor), the flash controller and chips, the DRAM and
the host link are not hardware described here; their signals are ports of the
top level.

## Block map

```
             secure-world configuration (keys, PRNG seed, region bases)
                 |               |                  |
 flash page      v               |                  |
 stream  --> encryption_engine --+--> internal bus --> decryption lane
 (PPA,        iv_generator       |    (IV + ciphertext,  (cipher_lane)
  beats)      prng, cipher_lane  |     exported)            |
                                 |                   line packer (8 beats)
                                 |                          |
 CPU request --> pte_perm_check --> tzasc_filter --> arbiter --> mee --> DRAM port
 (world, page descriptor, op)                                  aes128_enc
                                                               mee_aes_seq
                                                               counter_cache
 TEE translation, FTL fill, runtime SetIDBits --> mapping_guard
```

| File | Role |
|---|---|
| `rtl/iceclave_pkg.sv` | widths, descriptor bit positions, region/world/op types |
| `rtl/pte_perm_check.sv` | page-descriptor region decode and permission check |
| `rtl/tzasc_filter.sv` | address-range region filter with secure-only boundary registers |
| `rtl/mapping_guard.sv` | cached mapping table with TEE-ID check |
| `rtl/trivium64.sv` | Trivium, 64 keystream bits per cycle |
| `rtl/prng.sv`, `rtl/iv_generator.sv` | per-page IV = {48-bit random base, 32-bit PPA} |
| `rtl/stream_buffer.sv` | keystream FIFO |
| `rtl/cipher_lane.sv` | key register + Trivium + buffer + XOR (the decryption engine) |
| `rtl/encryption_engine.sv` | IV generator + cipher lane |
| `rtl/stream_cipher_engine.sv` | encryption engine, bus, decryption engine |
| `rtl/aes128_enc.sv` | AES-128, one round per cycle |
| `rtl/mee_aes_seq.sv` | runs the AES core as CBC-MAC or as a 512-bit pad generator |
| `rtl/counter_cache.sv` | on-chip cache of level-0 counter blocks |
| `rtl/mee.sv` | the memory encryption engine |
| `rtl/iceclave_top.sv` | everything above, wired together |

## Memory regions: descriptor bits and address ranges

Two checks guard every CPU access, one on the page descriptor the MMU found,
one on the physical address at the memory controller.

**Descriptor check (`pte_perm_check`, combinational).** Three bits of a
64-bit ARMv8 stage-1 descriptor select the region: NS (bit 5), AP[2:1]
(bits 7:6) and ES, a bit taken from the software-ignored upper field
(bit 55).

| {ES, AP[2:1], NS} | region | normal world | secure world |
|---|---|---|---|
| 1, 01, 1 | normal | read/write | read/write |
| 1, 11, 1 | normal, read-only page | read | read/write |
| 0, 01, 1 | protected | read | read/write |
| 0, 00, 0 | secure | none | read/write |
| anything else | invalid | none | read/write |

The second row is this design's addition. The MEE needs to know whether a
page is read-only (it picks the counter tree from that), and the three-row
scheme has no way to say so for a normal page; AP[2]=1 is ARM's own
"read-only" encoding, so it is reused. `page_ro` is that bit.

**Address check (`tzasc_filter`, one-cycle registered).** Two boundary
registers split the physical space: addresses at or above `sec_base` are
secure, those at or above `prot_base` protected, the rest normal. The rules
are those of the table. The boundaries reset to 2 GB and 3 GB of the 4 GB
DRAM and can only be rewritten by a secure-world configuration write; a
normal-world attempt raises `cfg_err` and changes nothing. The order of the
regions (secure on top, normal at the bottom) follows the published memory
map; the reset values are this design's choice.

## Mapping-table guard

`mapping_guard` is the checker in front of the part of the FTL mapping table
cached in protected memory. An entry is 64 bits: valid, a 4-bit TEE ID, a
27-bit tag and a 32-bit physical page address (PPA). The 4-bit ID in an
8-byte entry is the 6.25 % storage cost the scheme accepts.

* A **lookup** from a TEE (LPA and its ID) answers one cycle later with
  `XLATE_HIT` and the PPA, `XLATE_MISS` when the LPA is not cached (firmware
  then switches to the secure world so the FTL can load the entry), or
  `XLATE_VIOLATION` with PPA 0 when the entry belongs to another TEE
  (firmware then aborts the TEE).
* A **fill** (the FTL) writes an entry; **SetIDBits** (the runtime, at TEE
  creation) rewrites the ID of a cached entry. Both are secure-world only;
  from the normal world they set `wr_err` and do nothing.

The cache is direct mapped on the low LPA bits with `ENTRIES = 1024`; the
organisation and size are this design's choice.

## Flash-to-DRAM stream cipher

A page read from flash is a stream of 64-bit beats. The encryption engine at
the flash controller XORs each beat with Trivium keystream; the decryption
engine next to DRAM regenerates the same keystream and XORs it off. Both
hold the same 80-bit key, written only from the secure world.

**Trivium at 64 bits per cycle (`trivium64`).** Trivium's 288-bit state is
three shift registers (93, 84, 111 bits). No tap lies within 64 positions of
its register's input, so 64 steps can be unrolled into one clock with no
dependency problems: one 64-bit keystream word per cycle. Key and IV loading
is followed by 1152 silent steps, which is 18 cycles. Bit convention: key bit
i-1 is Trivium's K_i, IV bit i-1 is IV_i, keystream bit j of a word is the
j-th output of that word's 64 steps. This convention has not been checked
against published test vectors; the testbench compares against an
independent bit-serial model written from the specification.

**The IV (`prng`, `iv_generator`).** Reusing a key/IV pair would let an
observer XOR two ciphertexts and cancel the keystream. The IV is therefore
`{IV0, PPA}`: 48 bits from a PRNG, drawn fresh for every page (unique in
time), above the page's 32-bit physical address (unique in space). The PRNG
is a 48-bit Fibonacci LFSR, polynomial x^48+x^47+x^21+x^20+1, clocked 48 times
per draw and seedable from the secure world. An LFSR is predictable, which is
acceptable here because the IV is public anyway; only its uniqueness matters.

**Keeping pages apart (`cipher_lane`, `encryption_engine`).** Each engine is
a lane: key register, Trivium, an 8-word `stream_buffer`, and the XOR. A new
page (`start` with the IV) flushes the buffer and reloads Trivium. The subtle
point is the handover between pages: without care, a beat presented in the
cycle of `page_start` or of the IV would be XORed with a word left over from
the previous page's keystream, which both leaks and decrypts wrongly. Both
levels therefore hold beats off until the new keystream is there: the
encryption engine from `page_start` through the IV cycle, the lane during
`start`.

**Timing.** The IV appears one cycle after `page_start`; the decryption
lane starts from the IV seen on the bus, so both engines run in lockstep. The
first plain beat reaches the DRAM side about 20 cycles after `page_start`,
after which a 4 KB page (512 beats) takes 512 cycles when nothing stalls. The
bus (`bus_iv*`, `bus_valid`, `bus_data`) is exported so the ciphertext can be
observed.

## The memory encryption engine

This is the largest and least obvious part. `mee` sits between the
controller and DRAM and covers `PAGES` 4 KB pages (default 4096 = 16 MB, the
runtime's default allocation for one TEE).

### What is stored

DRAM is organised in 576-bit words: 512 bits of payload and a 64-bit MAC.
The word address has `log2(PAGES)+7` bits; its top bit separates data from
metadata.

* **Data line** `{0, page, line}`: 512 bits of ciphertext and the line's MAC.
* **Counter block** `{1, tree, level, index}`: 512 bits of counters and the
  block's MAC.

Storing a 64-bit MAC next to every word (instead of packing MACs into their
own lines) is this design's choice; it keeps one memory access per item.

### Counters

Counter-mode encryption XORs a line with a one-time pad made by AES from the
line's address and a counter, and the counter must change on every write so
no pad is reused. The counters come in two forms:

* **Writable pages: split counters.** One block per page holds a 64-bit
  major counter (bits 511:448) and 64 six-bit minor counters, one per line
  (bits 383:0; 447:384 unused). A line's counter is {major, its minor}. A
  write increments the line's minor; when that minor would wrap past 63, the
  major is incremented, all minors are cleared and the other 63 lines of the
  page are re-encrypted under the new major.
* **Read-only pages: major counters.** Nothing is ever written, so a page
  needs only one 64-bit counter; eight pages share a block (bits 64s+63:64s
  for slot s). This is the point of the hybrid scheme: 8 pages per fetched
  block instead of 1.

Each block is drawn in the published scheme as its counters followed by a
64-bit MAC, and that is the layout used here. Note that eight 64-bit majors
already fill a 64-byte line, so a read-only block with its MAC is 72 bytes,
not one cache line.

### Integrity trees

A MAC over a line proves the ciphertext belongs with that address and
counter, but an attacker who replays an old line *together with* its old
counter would pass. So the counters are protected by a tree in which each
block's MAC is keyed by a counter held by its parent (a Bonsai Merkle tree:
the tree covers counters, not data). The top block's MAC is compared with a
root register on chip, which an attacker cannot roll back. There are two
trees and two root registers:

| tree | level 0 | upper levels | levels for 4096 pages |
|---|---|---|---|
| major-counter (read-only pages) | 512 blocks, 8 pages each | 8-ary, blocks of 8 major counters | 4 (512, 64, 8, 1) |
| split-counter (writable pages) | 4096 blocks, one per page | 64-ary, split-counter blocks | 3 (4096, 64, 1) |

The MAC of a block at index i of level k is
`CBC-MAC(block payload, {tag, block address, counter its parent holds for slot i})`;
for the top block the parent counter is zero and the result is the root.
Writing a child increments its slot in the parent, which changes the parent's
payload, so the parent's MAC changes, and so on up to the root. In the
split-counter tree an upper-level slot is again a minor; when it wraps, the
parent's major moves and all 63 other children's MACs (keyed by the old
counters) must be recomputed: the engine re-MACs those siblings. They are
not re-verified first, a shortcut this design takes.

### Cryptography

One AES-128 core (`aes128_enc`, ten rounds in ten cycles, S-box generated at
elaboration) is shared by everything, sequenced by `mee_aes_seq`:

* **pad:** `AES(seed ^ j)` for j = 0..3 gives four 128-bit pads for one line,
  where the seed is `{tag, line address, major, mode, minor}`. About 44 cycles.
* **MAC:** CBC-MAC over five 128-bit chunks (four payload chunks and the tail
  `{tag, address, counter}`), truncated to 64 bits. About 55 cycles.

Distinct tags for pads, data MACs and block MACs keep the three uses apart.
AES for the pad is the scheme's standard choice; the MAC construction is this
design's.

### Operations

Every request first walks the counter path of its page from the top of the
relevant tree down, fetching each block and checking its MAC against the
parent's counter (or the root). A failed check anywhere ends the request
with `resp_err`; firmware is expected to abort the TEE.

The one shortcut is the **counter cache** (`counter_cache`, 2048 entries,
which is 128 KB of counters). It is direct mapped and holds level-0 counter
blocks, keyed by {tree, block index}. An entry is on chip, where an attacker
cannot reach it, so it is trusted just as the root registers are. The cache
is filled in two ways:

* every level-0 block the engine writes to DRAM is also written to the cache
  (write-allocate), so a cached copy is never stale;
* a block that has just passed verification is copied in.

A **read** looks its level-0 block up first (two cycles). On a hit it skips
the walk and goes straight to the line, whose MAC is still checked; `cc_hit`
pulses. Writes and permission changes always fetch and verify the whole path,
because they re-MAC every block on it. Tampering with a cached counter block
in DRAM therefore goes unnoticed until the block is evicted and fetched
again. By then the tree check catches it, so no wrong data is ever returned.

| `req_op` | tree | action |
|---|---|---|
| `MEE_READ` | chosen by `req_writable` | fetch the line, check its MAC, remove the pad, return the plain line |
| `MEE_WRITE` | split only (a read-only page is refused) | bump the minor (or major on wrap with re-encryption of the page), encrypt and MAC the line, re-MAC every block on the path, update the root |
| `MEE_TO_RW` | both | read the page's major from the read-only tree, store major+1 in a fresh split block with zero minors, re-encrypt all 64 lines under it, update both paths |
| `MEE_TO_RO` | both | copy the split major+1 back into the page's slot of the read-only tree, re-encrypt all 64 lines, update both paths |

`resp_reenc` reports that a whole page was re-encrypted. Reading a page
through the wrong tree fails verification: the permission bit in the
descriptor must match the page's real state. `init_start` writes every
counter block of both trees with zero counters and valid MACs and sets both
roots; after it, every page is writable and every line unwritten (reading an
unwritten line fails its MAC).

### Timing

One request at a time. A read of a writable page at the default size costs
3 block fetches and 3 MACs (about 55 cycles each), one line fetch, one MAC
and one pad: roughly 300-400 cycles plus DRAM latency. With the level-0
block cached, a read takes one line fetch, one MAC and one pad, about 120
cycles. A write adds the MACs
on the way back up. A permission change or a minor wrap re-encrypts 64 lines
(a MAC check, two pads and a new MAC each), on the order of
15,000 cycles. The published averages
(about 100 ns per encryption and 150 ns per verification) are not met by
this sequential engine. A pipelined AES would be needed.

## Top level

`iceclave_top` joins the blocks as follows.

* **CPU requests** (one at a time) carry the op, a byte address, the world
  and the page descriptor. Cycle 1 latches the request, cycle 2 runs the
  descriptor check and asks the TZASC, cycle 3 combines the answers. A
  request also needs a secure world for `MEE_TO_RO`/`MEE_TO_RW` and an
  address inside the MEE's 16 MB span. A refused request answers with
  `cpu_resp_fault` four cycles after it was accepted. An allowed one goes to
  the MEE with `req_writable = !page_ro`, and its result comes back with
  `cpu_resp_integrity` and `cpu_resp_reenc`.
* **Flash pages** run through the stream cipher. A packer gathers eight plain
  64-bit beats (beat 0 in the low bits) into a line and writes it through the
  MEE to line n of `fl_dest_page`. While the MEE is busy the packer stays
  full and the flash stream stalls (`fl_ready` low). A full line wins over a
  waiting CPU request. `fl_line_done` pulses per line stored.
* **Translations, fills and SetIDBits** go straight to `mapping_guard`.
* **DRAM** is the MEE's memory port (`mem_*`), a valid/ready request with
  read data returned on `mem_rvalid`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `PAGES` (top, `mee`) | 4096 | 4 KB pages under encryption (16 MB) |
| `MAP_ENTRIES` / `ENTRIES` | 1024 | cached mapping entries |
| `BUF_DEPTH` / `DEPTH` | 8 | keystream buffer words |
| `CC_ENTRIES` (top, `mee`) / `ENTRIES` | 2048 | counter-cache blocks (0 in `mee` removes the cache) |
| `ADDR_W` (`tzasc_filter`) | 32 | physical byte address (4 GB DRAM) |
| `W`, `SEED` (`prng`) | 48, 48'hACE15EED0001 | IV base width and reset seed |

Fixed widths (key 80, IV 80, keystream 64, PPA 32, ID 4, line 512, counter
64/6, MAC 64) are in `iceclave_pkg`. `PAGES` should be a power of two; 512
and 4096 are the simulated sizes. Memory footprint at the default: 262,144
data words plus 4,746 counter blocks (585 read-only, 4,161 split).

## Verification

Each block has a testbench in `tb/` that checks itself and ends with
`TB_RESULT checks=N failures=M`. Highlights:

* `tb_trivium64`: against a bit-serial Trivium model; warm-up is 18 cycles,
  then one word per cycle.
* `tb_stream_cipher_engine`: full pages end to end. Every bus beat must be
  the data XOR the reference keystream for the IV on the bus, and every DRAM
  beat the original data. It also checks the rate: first beat within 20
  cycles, then 512 beats in 512 cycles. Pages are also run under random
  back-pressure.
* `tb_aes128_enc`: FIPS-197 vectors and a 10-cycle latency.
* `tb_mee` (at `PAGES = 512` for speed), with a DRAM model that stalls
  randomly:
  * stores and readback;
  * both permission changes;
  * 64 stores to one line, with re-encryption only on the 64th;
  * a sibling page surviving an upper-level wrap;
  * five attacks, each detected: a flipped data bit, a flipped counter bit,
    a line and counter block replayed together, a whole-memory rollback, and
    a tampered read-only tree.
* `tb_counter_cache` (16 entries): random writes, lookups and clears against
  a model, checking hits, tags, eviction, and a lookup in the same cycle as a
  write.
* `tb_iceclave_top`, at the default parameters: keys and region setup, two
  flash pages loaded into TEE memory under back-pressure, readback, the
  permission and address rules, both mode switches, a minor-counter wrap,
  DRAM tampering, and mapping hit/miss/violation/SetIDBits. It counts each
  mechanism (stalls, re-encryptions, mode switches, descriptor faults, TZASC
  refusals, integrity failures, mapping outcomes) and fails if one never
  happened. It runs in a few seconds.
* `tb_workloads`, also at the default parameters, runs the eleven evaluated
  in-storage workloads as the controller sees them. As far as this hardware
  is concerned, those workloads differ mainly in their share of memory
  writes, which ranges from about 1e-6 (TPC-H Q19) to 0.46 (Wordcount). For
  each workload the testbench:
  * fills mapping entries under the workload's own TEE ID and translates
    them;
  * checks that another ID is refused;
  * streams two input pages from flash and makes them read-only;
  * makes 128 verified accesses with writes spread evenly at the workload's
    ratio;
  * stores a result line and reads back every line it wrote.

  It prints the average latency of reads and writes. With the DRAM model
  stalling one cycle in four, a read-only line read takes about 130 cycles
  (its counter block is nearly always cached) and a store about 600 to 670.
  Without the cache, a read takes about 400 cycles.

To simulate one, with Verilator 5, list the package first, then the files it
uses:

```
verilator --binary --timing --assert rtl/iceclave_pkg.sv tb/tb_trivium_ref_pkg.sv \
  rtl/pte_perm_check.sv rtl/tzasc_filter.sv rtl/mapping_guard.sv rtl/trivium64.sv \
  rtl/prng.sv rtl/iv_generator.sv rtl/stream_buffer.sv rtl/cipher_lane.sv \
  rtl/encryption_engine.sv rtl/stream_cipher_engine.sv rtl/aes128_enc.sv \
  rtl/mee_aes_seq.sv rtl/counter_cache.sv rtl/mee.sv rtl/iceclave_top.sv \
  tb/tb_iceclave_top.sv \
  --top-module tb_iceclave_top -o sim && ./obj_dir/sim
```

## Where this departs from the published design, and limits

* **Read-only descriptor encoding.** AP[2:1] = 11 is added (see above).
* **Counter-block size.** The read-only block of eight majors is 576 bits
  with its MAC, not one 64-byte line as the prose claims. The tree sizes therefore differ from
  the published 0.5 MB and 4 MB for a 4 GB DRAM.
* **Coverage.** The MEE protects one 16 MB span, the default size of one
  TEE's memory. Several concurrent TEEs, or all 4 GB of DRAM, need a larger
  `PAGES` (for example 16384 for four TEEs). The rest of DRAM has no path in
  this top.
* **Counter cache organisation.** The published design gives only the
  cache's size. Here it is direct mapped, holds level-0 blocks only, and
  only reads use it. Updates walk the full path, so their latency is several
  hundred cycles, well above the published averages.
* **Choices the published design leaves open:**
  * the MAC (AES CBC-MAC, 64 bits);
  * the pad seed;
  * the memory map;
  * the PRNG;
  * the region order and reset boundaries;
  * the mapping-cache organisation;
  * the Trivium bit order;
  * buffer depths;
  * all handshakes.
* **Sibling re-MAC without re-verification** after an upper-level counter
  wrap in the split tree.
* **Permission changes are secure-world requests.** Programs ask the runtime
  to change a page's permission rather than doing it directly.
* **Not built:** processor cores, FTL, runtime and monitor firmware,
  interconnect, PCIe/NVMe, flash controller and flash, DRAM. Their
  interfaces are ports of `iceclave_top`.
