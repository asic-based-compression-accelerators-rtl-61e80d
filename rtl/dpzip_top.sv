// dpzip_top: the DPZip compression engine (the "CPE" block of the SSD
// controller), with its compression path and its decompression path.
//
// Compression: a 4 KB page enters 8 bytes per clock. The LZ77 encoder turns
// it into literal bytes and <LL, ML, Off> sequences. The literals go on to
// the Huffman encoder, which codes them with a canonical Huffman code built
// for this page and limited to 11 bits. The page leaves as two streams: the
// sequences (c_seq_*) and the Huffman-coded literals (c_huf_*, 32-bit words).
//
// Decompression: the two streams come back. The Huffman decoder rebuilds the
// literals one per clock and feeds them to the LZ77 decoder, which replays
// the sequences and delivers the page 8 bytes per clock (d_out_*).
//
// Flow control: c_in_ready is high only while both compression units can
// take a new page. The compression outputs and d_out_* have no
// backpressure. A Huffman stream for a new page is held back (d_huf_ready
// low) until the LZ77 decoder has finished the page before, so that the
// literal buffer holds one page at a time. The two paths are independent
// and may run at the same time.
//
// From the paper: an LZ77 stage followed by entropy coding, dynamic
// canonical Huffman with 11-bit codes, 4 KB pages, 8-byte datapaths, and
// separate encoder and decoder units. The paper also places FSE coders
// beside the Huffman coders for the sequence fields; they are not part of
// this design, so sequences leave and return uncoded. Stream formats, flow
// control and the statistic outputs are this design's own.
//
// Tool note: the sub-blocks switch their assertions off during reset with
// "disable iff (!rst_n)", so the linter reports rst_n as used both as an
// asynchronous reset and as a sampled signal. Only the checkers sample it.
module dpzip_top
  import dpzip_pkg::seq_t;
#(
  parameter int unsigned PAGE_BYTES = dpzip_pkg::PAGE_BYTES
) (
  input  logic        clk,
  input  logic        rst_n,
  // ---- compression
  input  logic        c_in_valid,
  input  logic [63:0] c_in_data,
  output logic        c_in_ready,
  output logic        c_seq_valid,
  output seq_t        c_seq,
  output logic        c_huf_valid,
  output logic [31:0] c_huf_word,
  output logic        c_huf_last,
  output logic        c_done,
  output logic        c_busy,
  // ---- decompression
  input  logic        d_huf_valid,
  input  logic [31:0] d_huf_word,
  input  logic        d_huf_last,
  output logic        d_huf_ready,
  input  logic        d_seq_valid,
  input  seq_t        d_seq,
  output logic        d_seq_ready,
  output logic        d_out_valid,
  output logic [63:0] d_out_data,
  output logic [3:0]  d_out_cnt,
  output logic        d_out_last,
  output logic        d_done,
  // ---- statistics, one clock per event (or per page for the Huffman ones)
  output logic        st_short_copy,
  output logic        st_long_copy,
  output logic        st_lit_stall,
  output logic [8:0]  st_huf_clipped,
  output logic        st_huf_repaired
);

  // =====================================================================
  // Compression path
  // =====================================================================
  logic        enc_in_ready, enc_busy, enc_done;
  logic        enc_lit_valid;
  logic [31:0] enc_lit_data;
  logic [2:0]  enc_lit_cnt;
  logic        henc_busy;

  lz77_encoder #(.PAGE_BYTES(PAGE_BYTES)) u_lz77_enc (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (c_in_valid && c_in_ready),
    .in_data   (c_in_data),
    .in_ready  (enc_in_ready),
    .lit_valid (enc_lit_valid),
    .lit_data  (enc_lit_data),
    .lit_cnt   (enc_lit_cnt),
    .seq_valid (c_seq_valid),
    .seq       (c_seq),
    .busy      (enc_busy),
    .done      (enc_done)
  );

  // a new page may start only when the Huffman encoder has finished the
  // literals of the page before
  assign c_in_ready = enc_in_ready && !henc_busy && !enc_done;
  assign c_busy     = enc_busy || henc_busy;

  huffman_encoder #(.PAGE_BYTES(PAGE_BYTES)) u_huf_enc (
    .clk       (clk),
    .rst_n     (rst_n),
    .lit_valid (enc_lit_valid),
    .lit_data  (enc_lit_data),
    .lit_cnt   (enc_lit_cnt),
    .lit_end   (enc_done),
    .out_valid (c_huf_valid),
    .out_word  (c_huf_word),
    .out_last  (c_huf_last),
    .done      (c_done),
    .busy      (henc_busy),
    .n_clipped (st_huf_clipped),
    .repaired  (st_huf_repaired)
  );

  // =====================================================================
  // Decompression path
  // =====================================================================
  logic       hdec_in_ready, hdec_out_valid, hdec_done;
  logic [7:0] hdec_out_byte;
  logic       ldec_done;
  logic signed [2:0] pages_ahead;  // pages of literals decoded minus pages rebuilt
  logic       hold;

  assign hold        = (pages_ahead > 0);
  assign d_huf_ready = hdec_in_ready && !hold;

  huffman_decoder u_huf_dec (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (d_huf_valid && !hold),
    .in_word   (d_huf_word),
    .in_last   (d_huf_last),
    .in_ready  (hdec_in_ready),
    .out_valid (hdec_out_valid),
    .out_byte  (hdec_out_byte),
    .done      (hdec_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pages_ahead <= '0;
    else        pages_ahead <= pages_ahead + 3'(hdec_done) - 3'(ldec_done);
  end

  lz77_decoder #(.PAGE_BYTES(PAGE_BYTES)) u_lz77_dec (
    .clk           (clk),
    .rst_n         (rst_n),
    .lit_valid     (hdec_out_valid),
    .lit_data      ({56'h0, hdec_out_byte}),
    .lit_cnt       (4'd1),
    .seq_valid     (d_seq_valid),
    .seq           (d_seq),
    .seq_ready     (d_seq_ready),
    .out_valid     (d_out_valid),
    .out_data      (d_out_data),
    .out_cnt       (d_out_cnt),
    .out_last      (d_out_last),
    .done          (ldec_done),
    .ev_short_copy (st_short_copy),
    .ev_long_copy  (st_long_copy),
    .ev_lit_stall  (st_lit_stall)
  );

  assign d_done = ldec_done;

endmodule
