// lz77_encoder: hash-based LZ77 dictionary encoder for one flash page.
//
// A page of PAGE_BYTES bytes is written in 8 bytes per clock. Encoding then
// starts on its own. The encoder walks the page in groups of four positions.
// For each group it forms two 1-byte hashes: Hash0 of the 4-byte word at the
// current position p and Hash1 of the word at p+1. Each hash indexes a small
// table whose entries hold WAYS earlier positions, kept as a circular FIFO so
// that the oldest position is overwritten without any list management.
// Level one of the match check is the hash hit. Level two compares the full
// 4-byte word with the stored position. The first candidate that passes is
// taken (first fit, newest entry of Hash0 first, then Hash1), with no
// backtracking. The match is then extended 8 bytes per clock. When no
// candidate passes, the four bytes become literals and the encoder skips
// ahead 4 bytes (partial-lazy matching). Both looked-up positions are
// written into the table every group, whether a match was found or not.
//
// Output: literal bytes leave on lit_* (1..4 per clock). Each match leaves as
// one sequence <LL, ML, Off> on seq_*. A final sequence with ML = 0 and
// last = 1 carries the trailing literal count. Neither output has
// backpressure: the consumer must take every beat.
//
// Timing: loading takes PAGE_BYTES/8 clocks. A group with no match takes one
// clock (4 bytes). A match takes one clock to find plus one clock per 8
// bytes of extension. done pulses one clock after the last sequence.
//
// From the paper: 4KB pages, groups of four positions, two 1-byte hashes per
// word, a bounded multi-slot hash table with circular FIFO replacement, the
// two-level (hash, then byte compare) check, first-fit matching without
// backtracking, skipping 4 bytes on a miss, the <LL,ML,Off> token. This
// design's own choices: the hash function, WAYS = 4, Hash1 taken at p+1,
// a 4-byte minimum match, the whole page as the window, register arrays
// with same-clock reads for the page buffer and the hash table, and
// 4 bytes per clock on literal runs (the paper quotes 8 bytes per clock for
// the engine as a whole).
//
// Tool note: the assertion at the end is switched off during reset with
// "disable iff (!rst_n)"; the linter therefore sees rst_n used both as an
// asynchronous reset and as a sampled signal. Only the checker samples it.
module lz77_encoder
  import dpzip_pkg::seq_t, dpzip_pkg::LEN_W, dpzip_pkg::MIN_MATCH;
#(
  parameter int unsigned PAGE_BYTES = dpzip_pkg::PAGE_BYTES,
  parameter int unsigned HT_ENTRIES = 256,  // indexed by a 1-byte hash
  parameter int unsigned WAYS       = 4     // candidate positions per entry
) (
  input  logic               clk,
  input  logic               rst_n,
  // page input, 8 bytes per beat, byte 0 in bits 7:0
  input  logic               in_valid,
  input  logic [63:0]        in_data,
  output logic               in_ready,
  // literal bytes, lit_cnt of them in the low bytes of lit_data
  output logic               lit_valid,
  output logic [31:0]        lit_data,
  output logic [2:0]         lit_cnt,
  // sequences
  output logic               seq_valid,
  output seq_t               seq,
  output logic               busy,
  output logic               done
);

  localparam int unsigned PW    = $clog2(PAGE_BYTES + 1);
  localparam int unsigned BEATS = PAGE_BYTES / 8;
  localparam int unsigned WW    = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned HW    = $clog2(HT_ENTRIES);

  typedef enum logic [2:0] {S_LOAD, S_SCAN, S_EXTEND, S_FLUSH, S_LAST} state_t;
  state_t state;

  logic [7:0]       page_mem [PAGE_BYTES];
  logic [PW-1:0]    ht_pos   [HT_ENTRIES][WAYS];
  logic [WAYS-1:0]  ht_vld   [HT_ENTRIES];
  logic [WW-1:0]    ht_wp    [HT_ENTRIES];

  logic [PW-1:0]    load_beat;
  logic [PW-1:0]    p;        // current position
  logic [PW-1:0]    anchor;   // first byte not yet covered by a sequence
  logic [PW-1:0]    m_start;  // match start
  logic [PW-1:0]    m_off;    // match offset
  logic [PW-1:0]    q;        // next byte of the match to compare

  function automatic logic [7:0] pb(input logic [PW-1:0] i);
    return (32'(i) < PAGE_BYTES) ? page_mem[i[$clog2(PAGE_BYTES)-1:0]] : 8'h00;
  endfunction

  function automatic logic [31:0] word_at(input logic [PW-1:0] i);
    return {pb(i + PW'(3)), pb(i + PW'(2)), pb(i + PW'(1)), pb(i)};
  endfunction

  // 1-byte hash of a 4-byte word: XOR of the bytes, each rotated left by
  // its lane number.
  function automatic logic [HW-1:0] hash8(input logic [31:0] w);
    logic [7:0] h;
    h = w[7:0] ^ {w[14:8], w[15]} ^ {w[21:16], w[23:22]} ^ {w[28:24], w[31:29]};
    return HW'(h);
  endfunction

  // ---------------------------------------------------------------------
  // Group lookup (combinational)
  // ---------------------------------------------------------------------
  logic [PW-1:0]  p1;
  logic [HW-1:0]  h0, h1;
  logic [31:0]    w0, w1;
  logic           can_search;
  logic           hit;
  logic           hit_at1;    // match starts at p+1
  logic [PW-1:0]  hit_cand;

  assign p1 = p + PW'(1);
  assign w0 = word_at(p);
  assign w1 = word_at(p1);
  assign h0 = hash8(w0);
  assign h1 = hash8(w1);
  // Hash1 covers p+1..p+4, so the group needs 5 bytes left in the page.
  assign can_search = (32'(p) + MIN_MATCH + 1) <= PAGE_BYTES;

  always_comb begin
    logic [WW-1:0] slot;
    logic [PW-1:0] c;
    hit      = 1'b0;
    hit_at1  = 1'b0;
    hit_cand = '0;
    // Hash0 entry, newest first
    for (int w = 0; w < WAYS; w++) begin
      slot = ht_wp[h0] - WW'(w + 1);
      c    = ht_pos[h0][slot];
      if (!hit && ht_vld[h0][slot] && (c < p) && (word_at(c) == w0)) begin
        hit      = 1'b1;
        hit_cand = c;
      end
    end
    // Hash1 entry, newest first
    for (int w = 0; w < WAYS; w++) begin
      slot = ht_wp[h1] - WW'(w + 1);
      c    = ht_pos[h1][slot];
      if (!hit && ht_vld[h1][slot] && (c < p1) && (word_at(c) == w1)) begin
        hit      = 1'b1;
        hit_at1  = 1'b1;
        hit_cand = c;
      end
    end
  end

  // ---------------------------------------------------------------------
  // Match extension, 8 bytes per clock (combinational)
  // ---------------------------------------------------------------------
  logic [3:0]    ext_n;     // equal leading bytes this clock (0..8)
  logic          ext_stop;  // mismatch or end of page reached
  always_comb begin
    logic run;
    logic [PW-1:0] src;
    run   = 1'b1;
    ext_n = '0;
    src   = q - m_off;
    for (int i = 0; i < 8; i++) begin
      if (run && (32'(q) + i < PAGE_BYTES) && (pb(src + PW'(i)) == pb(q + PW'(i))))
        ext_n = ext_n + 4'd1;
      else
        run = 1'b0;
    end
    ext_stop = (ext_n != 4'd8) || (32'(q) + 8 >= PAGE_BYTES);
  end

  // Trailing literals in FLUSH
  logic [PW-1:0] remain;
  logic [2:0]    flush_n;
  assign remain  = PW'(PAGE_BYTES) - p;
  assign flush_n = (remain >= PW'(4)) ? 3'd4 : remain[2:0];

  assign in_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD);

  // ---------------------------------------------------------------------
  // Sequential part
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      load_beat <= '0;
      p         <= '0;
      anchor    <= '0;
      m_start   <= '0;
      m_off     <= '0;
      q         <= '0;
      lit_valid <= 1'b0;
      lit_data  <= '0;
      lit_cnt   <= '0;
      seq_valid <= 1'b0;
      seq       <= '0;
      done      <= 1'b0;
      for (int e = 0; e < HT_ENTRIES; e++) begin
        ht_vld[e] <= '0;
        ht_wp[e]  <= '0;
      end
    end else begin
      lit_valid <= 1'b0;
      seq_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_LOAD: begin
          if (in_valid) begin
            for (int b = 0; b < 8; b++)
              page_mem[32'(load_beat) * 8 + b] <= in_data[8*b +: 8];
            if (load_beat == '0) begin
              // new page: forget all positions of the previous one
              for (int e = 0; e < HT_ENTRIES; e++) begin
                ht_vld[e] <= '0;
                ht_wp[e]  <= '0;
              end
            end
            if (32'(load_beat) == BEATS - 1) begin
              load_beat <= '0;
              p         <= '0;
              anchor    <= '0;
              state     <= S_SCAN;
            end else begin
              load_beat <= load_beat + PW'(1);
            end
          end
        end

        S_SCAN: begin
          if (!can_search) begin
            state <= S_FLUSH;
          end else begin
            // table update: p under Hash0, p+1 under Hash1
            if (h0 == h1) begin
              ht_pos[h0][ht_wp[h0]]          <= p;
              ht_pos[h0][ht_wp[h0] + WW'(1)] <= p1;
              ht_vld[h0][ht_wp[h0]]          <= 1'b1;
              ht_vld[h0][ht_wp[h0] + WW'(1)] <= 1'b1;
              ht_wp[h0]                      <= ht_wp[h0] + WW'(2);
            end else begin
              ht_pos[h0][ht_wp[h0]] <= p;
              ht_vld[h0][ht_wp[h0]] <= 1'b1;
              ht_wp[h0]             <= ht_wp[h0] + WW'(1);
              ht_pos[h1][ht_wp[h1]] <= p1;
              ht_vld[h1][ht_wp[h1]] <= 1'b1;
              ht_wp[h1]             <= ht_wp[h1] + WW'(1);
            end
            if (hit) begin
              m_start <= hit_at1 ? p1 : p;
              m_off   <= (hit_at1 ? p1 : p) - hit_cand;
              q       <= (hit_at1 ? p1 : p) + PW'(MIN_MATCH);
              if (hit_at1) begin
                lit_valid <= 1'b1;
                lit_data  <= {24'h0, pb(p)};
                lit_cnt   <= 3'd1;
              end
              state <= S_EXTEND;
            end else begin
              lit_valid <= 1'b1;
              lit_data  <= w0;
              lit_cnt   <= 3'd4;
              p         <= p + PW'(4);
            end
          end
        end

        S_EXTEND: begin
          q <= q + PW'(ext_n);
          if (ext_stop) begin
            seq_valid <= 1'b1;
            seq.last  <= 1'b0;
            seq.ll    <= LEN_W'(m_start - anchor);
            seq.ml    <= LEN_W'(q + PW'(ext_n) - m_start);
            seq.off   <= LEN_W'(m_off);
            p         <= q + PW'(ext_n);
            anchor    <= q + PW'(ext_n);
            state     <= S_SCAN;
          end
        end

        S_FLUSH: begin
          if (p == PW'(PAGE_BYTES)) begin
            state <= S_LAST;
          end else begin
            lit_valid <= 1'b1;
            lit_cnt   <= flush_n;
            for (int b = 0; b < 4; b++)
              lit_data[8*b +: 8] <= (3'(b) < flush_n) ? pb(p + PW'(b)) : 8'h00;
            p <= p + PW'(flush_n);
          end
        end

        S_LAST: begin
          seq_valid <= 1'b1;
          seq.last  <= 1'b1;
          seq.ll    <= LEN_W'(PW'(PAGE_BYTES) - anchor);
          seq.ml    <= '0;
          seq.off   <= '0;
          done      <= 1'b1;
          state     <= S_LOAD;
        end

        default: state <= S_LOAD;
      endcase
    end
  end

  // A match never reaches back before the page or to itself.
  a_seq_ok: assert property (@(posedge clk) disable iff (!rst_n)
    (seq_valid && !seq.last) |-> (seq.off != '0 && seq.ml >= LEN_W'(MIN_MATCH)))
    else $error("lz77_encoder: bad sequence off=%0d ml=%0d", seq.off, seq.ml);

endmodule
