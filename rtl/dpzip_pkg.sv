// dpzip_pkg: constants and types shared by the DPZip compression engine.
//
// The engine works on one flash page at a time (4 KB, the compression
// granularity of the drive). Huffman code lengths are capped at 11 bits.
// These two numbers follow the paper; the
// rest (token field widths, the layout of a sequence) are this design's own.
package dpzip_pkg;

  // Page size in bytes (fixed 4 KB compression granularity).
  localparam int unsigned PAGE_BYTES = 4096;
  // Width of lengths and offsets inside a page (0..4096 must fit).
  localparam int unsigned LEN_W = 13;
  // Huffman code length ceiling.
  localparam int unsigned HUF_MAX_BITS = 11;
  // Shortest match the LZ77 encoder emits.
  localparam int unsigned MIN_MATCH = 4;

  // One LZ77 sequence: LL literals, then a copy of ML bytes from OFF bytes
  // back. The last sequence of a page carries ML = 0 and last = 1 and only
  // flushes the trailing literals.
  typedef struct packed {
    logic             last;
    logic [LEN_W-1:0] ll;
    logic [LEN_W-1:0] ml;
    logic [LEN_W-1:0] off;
  } seq_t;

endpackage
