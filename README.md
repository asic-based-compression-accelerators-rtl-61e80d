# DPZip compression engine (RTL)

This is a SystemVerilog model of DPZip, the compression engine that sits
inside an SSD controller. It compresses and decompresses single 4 KB flash
pages. Compression runs LZ77 dictionary matching and then dynamic canonical
Huffman coding of the literal bytes. Decompression reverses the two steps.
The engine is written as synthesizable RTL. Every block has a
self-checking testbench.

The published design places this engine in a PCIe 5.0 SSD controller,
beside ARM cores, a queue manager, a shared buffer SRAM, the flash
controller and the DDR controller. Only the engine is modelled here. The
SoC around it is not part of this code (see "Not built").

## Block overview

```
             compression path                          decompression path
 page in  +--------------+ literals +---------------+   Huffman words +----------------+
 8 B/clk->| lz77_encoder |--------->|huffman_encoder|->  ------------->|huffman_decoder |
          +--------------+          | +-----------+ |                 +----------------+
                 |                  | |huff_len_  | |                        | 1 literal/clk
                 | sequences        | |limit      | |                        v
                 v                  | +-----------+ |   sequences     +----------------+
            <LL,ML,Off> out         +---------------+  ------------->|  lz77_decoder  |-> page out
                                                                      +----------------+   8 B/clk
```

| File | Contents |
|------|----------|
| `rtl/dpzip_pkg.sv` | page size, 11-bit code ceiling, the sequence type `seq_t` |
| `rtl/lz77_encoder.sv` | hash-table LZ77 matcher for one page |
| `rtl/huffman_encoder.sv` | histogram, tree build, code assignment and stream writer |
| `rtl/huff_len_limit.sv` | caps code lengths at 11 bits in a fixed schedule |
| `rtl/huffman_decoder.sv` | rebuilds the code from the lengths and decodes literals |
| `rtl/lz77_decoder.sv` | replays sequences into the page |
| `rtl/dpzip_top.sv` | the engine: both paths and their flow control |

## Data formats

**Sequence** (`seq_t`, 40 bits): `{last, ll[12:0], ml[12:0], off[12:0]}`.
It means: copy `ll` literal bytes, then copy `ml` bytes starting `off`
bytes back in the page. Matches are at least 4 bytes long. The final
sequence of a page has `last = 1` and `ml = 0`. It only carries the
trailing literals. Over a page, the `ll` and `ml` values add up to 4096.
Sequences leave the engine uncoded.

**Huffman stream** (32-bit words, first bit in bit 31):

1. A header word. Bits 31:16 hold the number of literals in the page.
2. 32 words holding the code lengths of the 256 byte values, 4 bits each,
   symbol 0 in the top nibble of the first word. A length of 0 means the
   byte value does not occur.
3. The codes of the literals in page order, packed MSB first. The last
   word is padded with zeros and flagged with `last`.

A page with no literals has a header, 32 zero-length words and no code
words.

## LZ77 encoder (`lz77_encoder`)

A page is loaded at 8 bytes per clock into a page buffer (512 clocks).
The encoder then walks the page in groups of four byte positions. For the
group at position `p` it computes two 1-byte hashes:

- Hash0 of the 4-byte word at `p`,
- Hash1 of the word at `p+1`.

The hash is the XOR of the four bytes, each rotated left by its byte
number. Each hash indexes a 256-entry table. An entry holds the last four
positions that hashed there (`WAYS = 4`). A write pointer per entry turns
the four slots into a circular FIFO, so the oldest position drops out
without any list handling.

Matching has two levels. A hash hit only names a candidate position. The
full 4-byte word at that position is then compared with the current word.
Candidates are tried newest first, Hash0's entry before Hash1's. The first
candidate that passes is taken (first fit). There is no search for a
longer match and no backtracking.

- **Match found:** the match is extended 8 bytes per clock until a byte
  differs or the page ends. The encoder then emits `<LL, ML, Off>` and
  carries on at the first byte after the match.
- **No match:** the four bytes become literals and the encoder moves on
  by 4 bytes (partial-lazy matching).

In both cases the two looked-up positions are written into the table.

Literals leave 1 to 4 per clock on the literal port. Sequences leave on
the sequence port. Neither port has backpressure.

Timing per page:

- load: 512 clocks,
- each group with no match: 1 clock,
- each match: 1 clock to find it, plus 1 clock per 8 bytes of extension,
- a few clocks to flush the end of the page.

An all-zero page therefore takes about 512 + 512 clocks. A page with no
repeats takes 512 + 1024 clocks.

## Huffman encoder (`huffman_encoder`)

The encoder builds a new code for each page from that page's literals.
Its phases run one after another:

1. **Collect:** literals are stored in a page-sized buffer and counted in
   a 256-bin histogram.
2. **Merge:** a standard Huffman tree build. Each clock merges the two
   lightest live nodes. Ties go to the lower node number.
3. **Depth:** one clock per node, walking from the root down, gives every
   leaf its depth.
4. **Limit:** the depths are streamed through `huff_len_limit`, which
   returns lengths of at most 11 bits.
5. **Codes:** canonical code assignment, one symbol per clock, in the
   Deflate style. Codes of one length are consecutive numbers in symbol
   order. Each length starts where the length before it ended.
6. **Header:** the header word and the 32 length words are written.
7. **Emit:** the literals are coded, one per clock, into a 64-bit
   accumulator, and full 32-bit words are written out.

A page with a single distinct literal gets a 1-bit code.

## Length limiter (`huff_len_limit`)

The limiter is the most involved part of the entropy coder. It never
rebuilds the tree. It works only on the number of leaves at each level,
and counts cost in units of 2^-11 of the code space (a leaf at level `L`
costs `2^(11-L)` units).

1. **Scan and cap** (256 clocks, one symbol per clock). Leaves deeper than
   11 are counted at level 11. The code space used is summed. The excess
   over `2^11` is the deficit `k`.
2. **Redistribution** (10 clocks, levels 10 down to 1). Pushing one leaf
   from level `L` down to `L+1` frees `2^(10-L)` units. At each level the
   FSM moves just enough leaves to cover the deficit, `ceil(k / 2^(10-L))`
   of them, or every leaf at that level if there are not enough. Only
   shifts, adds and a minimum are needed. Afterwards `k <= 0`.
3. **Hole repair** (up to 10 clocks). Any unused code space `h = -k` is
   filled by pulling leaves up one level, always from the deepest
   occupied level. That level's unit is the smallest unit in use, so it
   divides `h` exactly. Each clock either fills the hole or empties that
   level, so the loop ends within one clock per level.

The per-level counts are then given back to the symbols. Symbols are
ranked by their original depth (depths above 24 share one bucket), with
ties broken by symbol number. The shortest lengths go to the best-ranked
symbols. A symbol that was shallower in the tree never gets a longer code
than a deeper one. With two or more symbols the result always fills the
code space exactly (Kraft sum 1). A tree that already fits in 11 levels
comes back unchanged.

The time from the first depth to the first length is 268-269 clocks in
the tests. The published bound is 274. The worst case here is
256 + 10 + 10 + a few clocks. The hole repair walks levels rather than
halving the hole, so it can need two more clocks than the published
8-step repair.

## Huffman decoder (`huffman_decoder`)

The decoder reads the header and the 32 length words. It counts the codes
of each length. From these counts it derives, for every length `l`:

- the first canonical code of that length, `first[l]`,
- the index `base[l]` of that length's first symbol in a table sorted by
  (length, symbol).

The sorted table is filled in 256 clocks. Decoding does not walk a tree.
The top 11 bits of a 64-bit bit buffer are compared with `first[l]` and
the code counts for all eleven lengths at once. The shortest length that
fits selects the entry `base[l] + (code - first[l])` of the sorted table.
One literal is decoded per clock. Stream words are taken whenever the
buffer has room for 32 bits. After the last literal, the remaining
padding words are consumed up to `last`.

## LZ77 decoder (`lz77_decoder`)

The decoder has two buffers:

- **Literal buffer:** filled from the literal input, up to 8 bytes per
  clock.
- **History buffer:** a copy of every output byte, used for
  long-distance copies.

A small FSM runs two pipelines. For each sequence it spends:

- one clock to take the sequence,
- `ceil(LL/8)` clocks in the literal pipeline,
- `ceil(ML/8)` clocks in the match pipeline.

Each clock outputs up to 8 bytes. If literals have not arrived yet, the
literal pipeline waits.

Copies take their bytes from one of two sources:

- **Offsets up to 256:** from a 256-byte register buffer holding the most
  recent output. It has no read latency. When a copy overlaps itself
  (offset below 8), lane `i` of the 8-byte output takes the byte of lane
  `i mod Off`. Bytes written in the same clock are forwarded this way
  instead of being read back.
- **Longer offsets:** from the history buffer. It is modelled as a memory
  with a one-clock read that returns a 16-byte window. The window for the
  first chunk of a match is fetched one clock early: when the sequence is
  taken (if LL = 0), or in the last literal clock. Each match clock then
  fetches the window for the next chunk. The match pipeline therefore
  never waits for the memory.

The decoder outputs three event flags: short copy, long copy and
literal wait. These appear on the top level as statistics.

## Top level (`dpzip_top`)

The compression and decompression paths are independent and can run at
the same time.

**Compression path:**

- `c_in_*` takes 8 page bytes per beat with valid/ready.
- `c_in_ready` stays low until the Huffman encoder has finished the
  previous page.
- Sequences leave on `c_seq_*` and Huffman words on `c_huf_*`. Neither
  has backpressure.
- `c_done` pulses with the final Huffman word.

**Decompression path:**

- Huffman words enter on `d_huf_*` and sequences on `d_seq_*`, both with
  valid/ready.
- The rebuilt page leaves on `d_out_*`, up to 8 bytes per beat, with no
  backpressure. `d_done` marks the end of the page.
- The literal buffer holds one page. A counter of pages decoded by the
  Huffman decoder but not yet finished by the LZ77 decoder keeps
  `d_huf_ready` low, so the next page's stream waits until the page
  before is complete.

**Statistics:**

- `st_short_copy`, `st_long_copy`, `st_lit_stall`: one-clock events from
  the LZ77 decoder.
- `st_huf_clipped`, `st_huf_repaired`: reports from the length limiter
  for the last page.

Reset is asynchronous and active low throughout. Memories are register
arrays inside the modules. A real chip would use SRAM macros for the page,
literal and history buffers and for the hash table.

## Where this design departs from the published one

- **Throughput.** The published engine moves 8 bytes per clock at 1 GHz.
  Here:
  - page load and page output run at 8 bytes per clock,
  - match extension and copies run at 8 bytes per clock,
  - LZ77 literal-only groups run at 4 bytes per clock,
  - Huffman coding and decoding handle one literal per clock.

  Measured from the first input beat to the last Huffman word, a 4 KB
  page takes about 2,100 clocks (all zeros), 4,000-4,400 clocks (text-like
  data) and 7,200 clocks (random data). Decompression takes about 810 to
  4,400 clocks. The Huffman phases run one after another. Nothing is
  overlapped across pages.
- **No FSE coders.** The published engine can code the sequence fields
  with Zstd-compatible FSE (tANS). This is not built. Sequences leave as
  40-bit records, which makes compression ratios noticeably worse than a
  real Zstd-style frame.
- **Own choices.** These points are not given in the published design:
  - the stream formats, the hash function and `WAYS = 4`,
  - the 4-byte minimum match and the whole page as the match window,
  - the exact redistribution and repair rules of the length limiter,
  - the symbol ranking used to hand lengths back,
  - the 16-byte window used for history prefetch.
- **Hole repair** can take up to 10 clocks instead of 8 (see above).
- **Interfaces** are plain valid/ready signals rather than the
  controller's on-chip bus.

## Not built

These parts of the SSD controller appear in the published design by name
or role only. They are outside this RTL:

- PCIe 5.0 controller
- ARM Cortex-A55 cores
- NVMe queue manager
- shared buffer SRAM
- on-chip bus
- flash controller and NAND
- DDR controller
- the block labelled DACC in the floorplan
- SRAM macros
- FTL firmware that packs compressed pages into flash pages and keeps the
  mapping table

The FSE encoder and decoder are also not built.

## Verification

Each block has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` at the end. A watchdog ends it if it
hangs.

| Testbench | What it checks |
|-----------|----------------|
| `tb_lz77_encoder` | The output is decoded in software and compared with the page. Sequence rules are checked. A page with no repeats takes exactly one clock per 4 bytes. An all-zero page gives one match extended 8 bytes per clock. |
| `tb_lz77_decoder` | Random sequence lists with overlapping, short and long offsets. Byte-exact output. Clock count of one per sequence plus `ceil(LL/8) + ceil(ML/8)`. A slow-literal case exercises the literal wait. |
| `tb_huff_len_limit` | Trees from random, Fibonacci and geometric frequencies. Checks lengths 1..11, an exact Kraft sum, preserved length order, unchanged trees that already fit, and the clock bound. It also requires that clipping and repair both happen. |
| `tb_huffman_encoder` | Parses the stream and decodes it canonically. Checks that the code matches an optimal Huffman cost whenever no clipping was needed. Covers single-symbol and empty pages. |
| `tb_huffman_decoder` | Streams built in the testbench, including sparse alphabets, a single symbol and empty pages. |
| `tb_dpzip_top` | End to end at full size (4 KB pages, default parameters). 24 pages are compressed and decompressed, with each decompression running while the next page is compressed. Pages are rebuilt exactly, and load and decompression clock bounds are checked. Every mechanism must occur: matches, literal runs, overlapping copies, short and long copies, literal waits, clipping, hole repair, and both paths busy together. |

To run one testbench with Verilator 5:

```
verilator --binary --timing --top-module tb_dpzip_top \
    rtl/dpzip_pkg.sv rtl/lz77_encoder.sv rtl/lz77_decoder.sv \
    rtl/huff_len_limit.sv rtl/huffman_encoder.sv rtl/huffman_decoder.sv \
    rtl/dpzip_top.sv tb/tb_dpzip_top.sv
./obj_dir/Vtb_dpzip_top
```

The testbenches use only two-state-safe code and `$urandom`. They read no
files.
