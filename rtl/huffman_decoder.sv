// huffman_decoder: canonical Huffman decoder for the literals of a page.
//
// It reads the stream written by huffman_encoder: a header word holding the
// literal count in its top 16 bits, 32 words of 4-bit code lengths (symbol 0
// in the top nibble of the first), then the codes, MSB first. Because the
// code is canonical, the lengths alone rebuild it: per length l the decoder
// keeps the number of codes count[l], the first code first[l] and the index
// base[l] of that length's first symbol in a symbol table sorted by
// (length, symbol). The table is filled one symbol per clock (256 clocks).
// Decoding then looks at the next 11 bits of the stream, compares the top l
// bits with first[l] and count[l] for all l at once, takes the shortest
// length that fits and reads the symbol straight from the sorted table: a
// direct table look-up with no tree walk, one literal per clock.
//
// Interface: 32-bit words on in_* with valid/ready; in_last marks the final
// word of the page. Literals leave one per clock on out_* (no
// backpressure); done pulses after the last literal (or after the header
// when the page has none).
//
// From the paper: canonical codes rebuilt from code lengths, table look-up
// instead of tree traversal, 11-bit maximum code length. This design's own:
// the stream format, the sorted-table method and one literal per clock.
//
// Tool note: the clocked block works with block-local temporaries written
// by blocking assignments. The synthesis front end warns that they have no
// value under asynchronous reset. They hold no state (each is written
// before it is read in the same clock), so the warning does not affect the
// circuit.
module huffman_decoder (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_word,
  input  logic        in_last,
  output logic        in_ready,
  output logic        out_valid,
  output logic [7:0]  out_byte,
  output logic        done
);

  localparam int unsigned NSYM = 256;
  localparam int unsigned MAXB = 11;

  typedef enum logic [2:0] {S_HDR, S_LENS, S_TABLE, S_DECODE} state_t;
  state_t state;

  logic [15:0]  nlits, nleft;
  logic [5:0]   wi;
  logic [3:0]   len    [NSYM];
  logic [8:0]   count  [MAXB+1];
  logic [8:0]   seen   [MAXB+1];
  logic [7:0]   sorted [NSYM];
  logic [8:0]   si;
  logic [63:0]  buf_q;    // bit buffer, next bit at bit 63
  logic [6:0]   buf_n;
  logic         ended;    // last word taken

  // first code and table base of each length
  logic [11:0]  first [MAXB+1];
  logic [8:0]   base  [MAXB+1];
  always_comb begin
    logic [11:0] c;
    logic [8:0]  b;
    c = '0;
    b = '0;
    first[0] = '0;
    base[0]  = '0;
    for (int l = 1; l <= MAXB; l++) begin
      c = (c + ((l == 1) ? 12'd0 : 12'(count[l-1]))) << 1;
      first[l] = c;
      b = b + ((l == 1) ? 9'd0 : count[l-1]);
      base[l]  = b;
    end
  end

  // decode of the symbol at the head of the bit buffer
  logic        d_hit;
  logic [3:0]  d_len;
  logic [7:0]  d_idx;
  always_comb begin
    logic [11:0] cl;
    logic [11:0] rel;
    d_hit = 1'b0;
    d_len = '0;
    d_idx = '0;
    for (int l = 1; l <= MAXB; l++) begin
      cl  = 12'(buf_q[63 -: 12] >> (12 - l));
      rel = cl - first[l];
      if (!d_hit && cl >= first[l] && rel < 12'(count[l])) begin
        d_hit = 1'b1;
        d_len = 4'(l);
        d_idx = 8'(base[l] + 9'(rel));
      end
    end
  end

  logic can_decode;
  assign can_decode = (buf_n >= 7'(MAXB)) || (ended && d_hit && 7'(d_len) <= buf_n);

  assign in_ready = (state == S_HDR) || (state == S_LENS) ||
                    ((state == S_DECODE) && !ended && buf_n <= 7'd32);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_HDR;
      nlits     <= '0;
      nleft     <= '0;
      wi        <= '0;
      si        <= '0;
      buf_q     <= '0;
      buf_n     <= '0;
      ended     <= 1'b0;
      out_valid <= 1'b0;
      out_byte  <= '0;
      done      <= 1'b0;
      for (int l = 0; l <= MAXB; l++) begin
        count[l] <= '0;
        seen[l]  <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_HDR: begin
          if (in_valid) begin
            nlits <= in_word[31:16];
            wi    <= '0;
            for (int l = 0; l <= MAXB; l++) begin
              count[l] <= '0;
              seen[l]  <= '0;
            end
            state <= S_LENS;
          end
        end

        S_LENS: begin
          if (in_valid) begin
            logic [8:0] add [MAXB+1];
            for (int l = 0; l <= MAXB; l++) add[l] = '0;
            for (int j = 0; j < 8; j++) begin
              logic [3:0] lj;
              lj = in_word[28 - 4*j +: 4];
              len[8 * 32'(wi) + j] <= lj;
              if (lj != '0 && 32'(lj) <= MAXB) add[lj] = add[lj] + 9'd1;
            end
            for (int l = 1; l <= MAXB; l++) count[l] <= count[l] + add[l];
            if (wi == 6'd31) begin
              si    <= '0;
              state <= S_TABLE;
            end
            wi <= wi + 6'd1;
          end
        end

        S_TABLE: begin
          logic [3:0] l;
          l = len[si[7:0]];
          if (l != '0) begin
            sorted[8'(base[l] + seen[l])] <= si[7:0];
            seen[l] <= seen[l] + 9'd1;
          end
          if (si == 9'(NSYM - 1)) begin
            nleft <= nlits;
            buf_n <= '0;
            buf_q <= '0;
            ended <= 1'b0;
            state <= S_DECODE;
          end
          si <= si + 9'd1;
        end

        S_DECODE: begin
          logic [63:0] q;
          logic [6:0]  n;
          q = buf_q;
          n = buf_n;
          if (nleft == '0) begin
            // drain the padding words of this page, then finish
            if (ended || (in_valid && in_last)) begin
              done  <= 1'b1;
              state <= S_HDR;
            end
          end else begin
            if (can_decode) begin
              out_valid <= 1'b1;
              out_byte  <= sorted[d_idx];
              q = q << d_len;
              n = n - 7'(d_len);
              nleft <= nleft - 16'd1;
            end
            if (in_valid && in_ready) begin
              q = q | ({in_word, 32'h0} >> n);
              n = n + 7'd32;
              if (in_last) ended <= 1'b1;
            end
          end
          buf_q <= q;
          buf_n <= n;
        end

        default: state <= S_HDR;
      endcase
    end
  end

endmodule
