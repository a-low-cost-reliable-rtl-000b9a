# Reliable racetrack last-level cache with compression-funded strong ECC

Racetrack (domain-wall) memory is dense enough to replace SRAM in a last-level
cache. It is also error-prone. Shifting the domains to the access ports can
stop one position off or stop between positions. Its MTJ cells also suffer
write failures, read disturbance and retention failures. Together these produce
multi-bit errors that a per-word SEC-DED code cannot correct. A code strong
enough to correct them needs far more check bits than a cache can afford to add.

This design gets the strong code for free where it matters. Most dirty blocks
hold values that are close to each other, so Base-Delta-Immediate (BDI)
compression shrinks them well below 64 bytes. The space this frees in the line
holds the check bits of a code that corrects three errors and detects four
(TEC-QED). Clean blocks do not need the strong code: a copy of them sits in
main memory, so an uncorrectable error is handled by dropping the block and
fetching it again. Every block also keeps a conventional SEC-DED code in a small
side store, so the few dirty blocks that do not compress still have basic
protection. One extra tag bit, `comp`, records which way each block is stored.

The RTL here is a complete cache at the evaluated size: 2 MB, 16 ways, 64-byte
blocks, 2048 sets. It contains the compressor and decompressor, both codecs,
the write and decode datapaths, the tag and data arrays, and a controller for
L1 write-backs, reads, misses, evictions and clean-block recovery.

## How a line is stored

Each of the 32768 entries is 576 bits: a 512-bit line plus a 64-bit SEC-DED
field.

| Block | `comp` | 512-bit line | 64-bit side field | Read check |
|---|---|---|---|---|
| clean, from memory | 0 | raw data | 8 x (72,64) SEC-DED check bytes | SEC-DED, 1 cycle |
| dirty, not compressible | 0 | raw data | 8 x (72,64) SEC-DED check bytes | SEC-DED, 1 cycle |
| dirty, compressible | 1 | TEC-QED codeword of the BDI payload | zero, unused | TEC-QED 3 + decompress 1 cycles |

Only blocks that L1 writes back are offered to the compressor. A block that
arrives from memory on a miss is clean and is stored raw, with SEC-DED.

### The compressed line: an extended BCH codeword

The strong code is the binary BCH code of length 511 with t = 3 over GF(2^9).
The primitive polynomial is p(x) = x^9 + x^4 + 1. The code is extended with one
overall-parity bit, which gives minimum distance 8: it corrects 3 errors and
detects 4. It has 27 + 1 = 28 check bits and exactly fills a 64-byte line:

```
bit 511      overall parity of bits [510:0]
bits 510:27  484-bit message = BDI payload
bits 26:0    remainder of m(x) * x^27 divided by g(x)
```

The generator g(x) = m1(x) m3(x) m5(x) is the product of the minimal
polynomials of alpha, alpha^3 and alpha^5. Its value is `28'hD612B79`, with bit
i holding the coefficient of x^i. A block is therefore compressible when BDI
encodes it in at most 512 - 28 = 484 bits. Every BDI form used here needs at
most 332 bits, so in practice "compressible" means "BDI finds an encoding".
The size check is still made in hardware, as the scheme requires.

The encoder is an LFSR division unrolled over the message. It is split into
three pipeline stages of 161, 161 and 162 message bits.

The decoder is where most of the logic sits. It also has three stages:

1. **Syndromes.** S1, S3 and S5 of bits [510:0], where S_j is the XOR of
   alpha^(i*j) over all set bits i. The stage also takes the parity of all
   512 bits.
2. **Error locator.** sigma(x) = 1 + s1 x + s2 x^2 + s3 x^3, from Peterson's
   closed form for binary codes. Let D = S1^3 + S3. If D != 0: s1 = S1,
   s2 = (S1^2 S3 + S5) / D and s3 = D + S1 s2. If D = 0 and S1 != 0, there is
   one error, at sigma = 1 + S1 x. This holds only if S5 = S1^5; otherwise the
   block is uncorrectable. If S1 = S3 = 0 and S5 != 0, the block is
   uncorrectable. The inverse is a^510, formed by repeated squaring.
3. **Chien search and correction.** Bit i is wrong when sigma(alpha^-i) = 0.
   The block is declared uncorrectable in two cases:
   - the number of roots differs from the degree of sigma;
   - the error count exceeds three. This count includes the parity bit itself
     when the overall parity disagrees with the number of roots found. This
     rule is what turns a four-bit error into a detection instead of a
     miscorrection.

### The BDI payload

BDI splits the block into 64/B words of B bytes. It stores one B-byte base
(the first word) and one D-byte signed delta per word. Alternatively, a word
can be a D-byte signed immediate, that is, a delta from zero; one mask bit per
word selects this. The compressor tries these forms in parallel and keeps the
smallest that works:

| code | form | size (bits) |
|---|---|---|
| 0 | all zero | 4 |
| 1 | one 8-byte value repeated | 68 |
| 2 | B=8, D=1 | 140 |
| 3 | B=4, D=1 | 180 |
| 4 | B=8, D=2 | 204 |
| 5 | B=2, D=1 | 308 |
| 6 | B=4, D=2 | 308 |
| 7 | B=8, D=4 | 332 |
| 15 | not compressible | - |

Sizes count 4 encoding bits + base + one mask bit per word + deltas. The
payload has fixed fields:

- `[3:0]` encoding
- `[67:4]` base
- `[99:68]` mask
- `[355:100]` deltas, word i at i*8*D

The rest is zero. Fixed fields cost nothing here, because the message is 484
bits whatever the encoding.

## Request flows and timing

The controller (`rtm_llc_top`) serves one request at a time. Cycle counts run
from the edge that accepts the request to the edge that raises `resp_valid`.

- **Read, clean or uncompressed hit:**
  - tag read (1 cycle);
  - compare, with the data read issued for the matching way (1 cycle);
  - SEC-DED decode (1 cycle);
  - response.
- **Read, compressed hit:** the same, but the decode is TEC-QED (3 cycles) +
  decompress (1 cycle). This is exactly 3 cycles more than a plain hit. It is
  the only case in which the scheme adds latency to the path the cores see.
- **Read miss:**
  1. The controller picks a victim: the first invalid way, else the set's
     round-robin way.
  2. A dirty victim is read and decoded on the memory-side decode path. A
     compressed victim is decompressed there. The original block is written
     to memory.
  3. A clean victim is simply dropped.
  4. The requested block is fetched from memory and SEC-DED encoded by the
     fill encoder (1 cycle).
  5. The block is stored clean with `comp` = 0 and returned.
- **Write-back from L1:** the hit way or a victim is chosen as above, with the
  same eviction. Write-backs allocate on a miss without a fetch, because the
  whole block is written. The write path takes 5 cycles for every block:
  compress (2) then TEC-QED encode (3). SEC-DED runs in parallel and is
  delayed to match. The line is then stored dirty, with `comp` set when the
  block compressed.
- **Error handling on reads:**
  - SEC-DED corrects one error per 64-bit word and detects two.
  - TEC-QED corrects three errors per block and detects four.
  - An uncorrectable error in a **clean** block invalidates the block and
    refetches it from memory. The core still gets correct data, only later.
  - In a **dirty** block the data is lost. It is returned with `resp_err` = 1.
  - A dirty victim that fails decoding during eviction is still written to
    memory. The `ev.uncorrectable` pulse reports it.
  - Corrected data is returned but not written back into the array.

Each mechanism raises one bit of the `ev` output for one cycle. The bits are:

- `wb_compressed`, `wb_uncompressed`
- `rd_hit_comp`, `rd_hit_plain`, `rd_miss`
- `evict_dirty_comp`, `evict_dirty_plain`, `evict_clean`
- `clean_refetch`, `secded_corrected`, `tecqed_corrected`, `uncorrectable`

## Module map

```
rtm_llc_top                 controller FSM, request registers, wiring
 |- llc_tag_array           tag, valid, dirty, comp per block; round-robin pointers; reset sweep
 |- rtm_data_array          32768 x 576-bit line store, error-injection port
 |- llc_write_path          L1 write-back -> stored line
 |   |- bdi_compressor      2 cycles, Compressible? decision
 |   |- tecqed_encoder      3 cycles, enabled only for compressible blocks
 |   |- secded_encoder      1 cycle
 |- llc_decode_path (x2)    L1-side read path and memory-side eviction path
 |   |- secded_decoder      1 cycle, used when comp = 0
 |   |- tecqed_decoder      3 cycles, used when comp = 1
 |   |- bdi_decompressor    1 cycle, after the TEC-QED decoder
 |- secded_encoder          fill encoder for blocks from memory
rtm_llc_pkg                 sizes, GF(2^9) arithmetic, BCH constants, BDI encodings, event struct
```

The two decode paths are separate copies, as the architecture draws them: one
between the cache and the cores, one between the cache and memory. Only one
of them is busy at a time.

## Top-level interface

All ports are synchronous to `clk`. `rst_n` is asynchronous and active low.

| Group | Signals | Meaning |
|---|---|---|
| L1 request | `req_valid`, `req_ready`, `req_op`, `req_laddr[25:0]`, `req_wdata[511:0]` | Taken on a rising edge with both valid and ready high. `req_op` is `OP_READ` or `OP_WB`. The address is a line address: a 32-bit byte address without its 6 offset bits. |
| L1 response | `resp_valid`, `resp_op`, `resp_data`, `resp_err` | One-cycle pulse per request. |
| Memory request | `mem_req_valid`, `mem_req_ready`, `mem_req_we`, `mem_req_laddr`, `mem_req_wdata` | Held until `mem_req_ready`. An assertion checks this. |
| Memory response | `mem_rsp_valid`, `mem_rsp_data` | Read data, any number of cycles later. |
| Error injection | `inj_en`, `inj_set`, `inj_way`, `inj_mask[575:0]` | XOR a mask into a stored entry. This emulates racetrack errors; a write in the same cycle wins. |
| Events | `ev` (`llc_events_t`) | Event pulses, listed above. |

After reset the tag array clears one set per cycle. `req_ready` stays low for
the first `SETS` + 1 cycles (2049 at the default size).

Parameters of the top are `SETS` (default 2048) and `WAYS` (default 16). Line
size, SEC-DED word size and the BCH code are fixed in `rtm_llc_pkg`.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. `tb/tb_ref_pkg.sv` holds reference models
written separately from the RTL:

- GF(2^9) arithmetic, with syndromes computed bit by bit;
- BCH encoding by polynomial long division;
- (72,64) check bytes built from the full 72-bit Hamming codeword;
- a BDI classifier and packer that works on signed integers.

| Testbench | What it checks |
|---|---|
| `tb_tecqed_encoder` | zero syndromes, even parity, agreement with long division, 3-cycle latency, pipelining |
| `tb_tecqed_decoder` | 0–3 random errors anywhere in the line corrected, 4 detected, 3-cycle latency |
| `tb_secded_encoder`, `tb_secded_decoder` | check bytes; 1 error per word corrected, 2 detected; 1-cycle latency |
| `tb_bdi_compressor`, `tb_bdi_decompressor` | chosen encoding, size, payload and round trip for every class; 2- and 1-cycle latency |
| `tb_llc_write_path`, `tb_llc_decode_path` | stored line and side field per class; 5-cycle write latency; 1- and 4-cycle read latency with errors |
| `tb_llc_tag_array`, `tb_rtm_data_array` | reset sweep, read/write, round-robin pointer, injection |
| `tb_rtm_llc_top` | end to end at 16 sets x 4 ways (see below) |
| `tb_rtm_llc_full` | the same environment at the default 2048 x 16 |
| `tb_rtm_llc_mixes` | the occupancy of each evaluated workload mix (see below), at 32 x 16 |

The end-to-end environment, `tb/llc_env.sv`, plays the L1 caches and main
memory. Memory has random ready and random response delay. The environment
keeps a golden copy of every block and checks every read response and every
block written to memory against it. It injects errors at locations found from
the tag array. A directed part forces each mechanism at least once, including
the +3-cycle compressed-hit latency. A random phase of write-backs, reads and
single-bit injections follows. Each `ev` bit is counted, and one that never
fired counts as a failure.

The source design was evaluated on fifteen mixes of memory-intensive SPEC
CPU2017 programs on a quad-core system. What the cache sees of each mix is the
share of its blocks that are clean, dirty and compressible, or dirty and
incompressible. The share of clean blocks runs from about 72 % to 93 %, and of
dirty incompressible ones from 0.2 % to 5 %. The instruction traces cannot be
replayed in RTL. Instead, `tb_rtm_llc_mixes` resets the cache and fills it to
capacity, drawing each block's class from one mix's published shares:

- a clean block is an L1 read miss;
- a compressible dirty block is a write-back of BDI-friendly data;
- an incompressible dirty block is a write-back of random data.

It then checks, for each of the fifteen mixes:

- the `valid`/`dirty`/`comp` tag bits hold the expected count of each class;
- the event counts agree;
- every block reads back correctly;
- every compressed hit costs exactly 3 cycles more than a plain hit.

The package files come first. Run from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    --top-module tb_rtm_llc_top rtl/rtm_llc_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_rtm_llc_top.sv -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

Swap the top module for any other testbench. The full-size test builds in
about 20 s and runs in about a second.

## What follows the source design and what is chosen here

The following are taken from the source design:

- The architecture: which units exist, and that the compressed tag bit steers
  the decoders and multiplexers.
- Compression and the strong code apply only to dirty blocks; blocks from
  memory are not compressed.
- Clean blocks are recovered by invalidation and refetch.
- SEC-DED protects every block through side storage (the preferred of the two
  configurations).
- Compression happens only when the check bits fit in the freed space.
- The latencies: SEC-DED 1, TEC-QED 3, BDI compress 2, BDI decompress 1.
- The geometry: 2 MB, 16 ways, 64-byte blocks.

Chosen here, because the source leaves them open:

- TEC-QED is realised as extended BCH(511,484). The source names only "TEC-QED".
- SEC-DED is (72,64) extended Hamming per 64-bit word.
- BDI details: the base is the first word, plus an implicit zero base; the set
  of encodings and the payload layout are fixed here.
- Compressed lines leave the SEC-DED side field unused. The architecture drawing
  multiplexes between the two encoders. One sentence of the description could
  also be read as SEC-DED over compressed blocks as well.
- Replacement is round-robin per set, with invalid ways used first.
- Addresses are 32-bit.
- The controller handles one outstanding request, with valid/ready handshakes.
- A write-back miss allocates the block without fetching it.
- Reads do not scrub: corrected data is not written back into the array.
- The write path has a fixed 5-cycle latency.
- The reset sweep of the tag array.
- The error-injection port.

Not modelled:

- The racetrack device: nanowires, access ports, shift drivers. Shift-dependent
  access delay is also left out; the data array is a one-cycle synchronous
  memory.
- The cores, their L1 caches and the bus that joins them to the cache.
- Main memory. The testbench has a behavioural model of it.

One detail of the drawing is overridden: the memory-side strong-code decoder
is labelled "TEC-DED" there, against "TEC-QED" everywhere else. It is built
as TEC-QED.

## Size notes

The data array holds 32768 x 576 bits, about 2.25 MiB: 2 MiB of data plus
256 KiB of SEC-DED side storage. The tag array holds 32768 x 18 bits.

The largest logic is the TEC-QED decoder. Its Chien search evaluates a cubic
over GF(2^9) at 511 points in one cycle. The design has two such decoders, one
in each decode path. Splitting the search over more cycles would shrink it,
but would lengthen the compressed-read latency beyond the three cycles
assumed here.
