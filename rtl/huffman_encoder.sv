// huffman_encoder: dynamic canonical Huffman coder for the literals of a page.
//
// The encoder builds a fresh code for every page from that page's own
// literal statistics (a dynamic Huffman code) and sends the code as a table
// of code lengths ahead of the coded literals (a canonical code needs only
// the lengths). Phases, one after another:
//   COLLECT  literals arrive 1..4 per clock; they are kept in a page-sized
//            literal buffer and counted in a 256-bin histogram. lit_end
//            closes the page.
//   MERGE    Huffman tree build: each clock merges the two lightest live
//            nodes (ties go to the lower node number) into a new node;
//            at most 255 clocks.
//   DEPTH    walks the nodes from the root down, one per clock, giving each
//            node its parent's depth + 1.
//   LIMIT    streams the leaf depths through huff_len_limit, which caps
//            them at 11 bits, and stores the lengths it returns.
//   CODES    canonical code assignment, one symbol per clock: codes of one
//            length are consecutive numbers in symbol order, and the first
//            code of each length follows on from the last of the length
//            before (as in Deflate).
//   EMIT     writes the stream: one header word {literal count, 16'h0},
//            32 words holding the 256 4-bit code lengths (symbol 0 in the
//            top nibble of the first word), then the literal codes packed
//            MSB first, one literal per clock, zero-padded to a word.
//
// Interface: literals on lit_* (no backpressure); lit_end pulses once after
// the last literal of the page. The coded stream leaves as 32-bit words on
// out_* (no backpressure); out_last marks the final word and done pulses
// with it. Only one page is processed at a time; lit_* must stay idle from
// lit_end until done.
//
// From the paper: canonical Huffman codes described by code lengths only,
// a dynamic code per block, code lengths capped at 11 bits by the
// three-stage procedure. This design's own: the tree-build method, the
// stream format, the phase schedule and one literal per clock when
// emitting (so this unit does not reach the 8 bytes per clock the paper
// quotes for the engine).
//
// Tool note: the clocked block works with block-local temporaries written
// by blocking assignments. The synthesis front end warns that they have no
// value under asynchronous reset. They hold no state (each is written
// before it is read in the same clock), so the warning does not affect the
// circuit.
//
// Tool note: the assertion at the end is switched off during reset with
// "disable iff (!rst_n)"; the linter therefore sees rst_n used both as an
// asynchronous reset and as a sampled signal. Only the checker samples it.
module huffman_encoder #(
  parameter int unsigned PAGE_BYTES = dpzip_pkg::PAGE_BYTES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        lit_valid,
  input  logic [31:0] lit_data,
  input  logic [2:0]  lit_cnt,
  input  logic        lit_end,
  output logic        out_valid,
  output logic [31:0] out_word,
  output logic        out_last,
  output logic        done,
  output logic        busy,
  // statistics of the last page
  output logic [8:0]  n_clipped,
  output logic        repaired
);

  localparam int unsigned NSYM  = 256;
  localparam int unsigned NNODE = 2 * NSYM - 1;
  localparam int unsigned AW    = $clog2(PAGE_BYTES);
  localparam int unsigned PW    = AW + 1;
  localparam int unsigned WW    = PW;                  // node weight width
  localparam int unsigned NW    = $clog2(NNODE);       // node index width

  typedef enum logic [3:0] {
    S_COLLECT, S_INIT, S_MERGE, S_DEPTH, S_LIMIT, S_CODES, S_HDR, S_EMIT, S_FLUSH
  } state_t;
  state_t state;

  logic [7:0]     lit_mem [PAGE_BYTES];
  logic [PW-1:0]  nlits;
  logic [WW-1:0]  w      [NNODE];
  logic           act    [NNODE];
  logic [NW-1:0]  parent [NNODE];
  logic [7:0]     depth  [NNODE];
  logic [NW-1:0]  nn;         // next free node
  logic [8:0]     nact;       // live nodes
  logic [NW-1:0]  di;         // depth walk index
  logic [8:0]     si;         // symbol index
  logic [3:0]     len    [NSYM];
  logic [10:0]    code   [NSYM];
  logic [8:0]     bl_count [12];
  logic [11:0]    next_code [12];   // first code of each length
  logic [11:0]    ncode     [12];   // running code of each length
  logic [PW-1:0]  ei;         // emit index
  logic [5:0]     hi;         // header word index
  logic [63:0]    acc;        // bit accumulator, MSB-first, valid bits at top
  logic [6:0]     acc_n;

  // ---------------------------------------------------------------------
  // Histogram: literals are counted on arrival straight into the leaf
  // weights w[0..255]
  // ---------------------------------------------------------------------
  logic [2:0] lane_hits [NSYM];
  always_comb begin
    for (int s = 0; s < NSYM; s++) begin
      lane_hits[s] = '0;
      for (int l = 0; l < 4; l++)
        if (3'(l) < lit_cnt && lit_data[8*l +: 8] == 8'(s))
          lane_hits[s] = lane_hits[s] + 3'd1;
    end
  end

  // ---------------------------------------------------------------------
  // Two lightest live nodes
  // ---------------------------------------------------------------------
  logic [NW-1:0] m0, m1;
  always_comb begin
    logic f0, f1;
    logic [WW-1:0] w0, w1;   // weights of m0 and m1
    f0 = 1'b0; f1 = 1'b0;
    m0 = '0;   m1 = '0;
    w0 = '0;   w1 = '0;
    for (int i = 0; i < NNODE; i++) begin
      if (act[i] && 32'(i) < 32'(nn)) begin
        if (!f0 || w[i] < w0) begin
          m1 = m0; w1 = w0; f1 = f0;
          m0 = NW'(i); w0 = w[i]; f0 = 1'b1;
        end else if (!f1 || w[i] < w1) begin
          m1 = NW'(i); w1 = w[i]; f1 = 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------------------
  // Length limiter
  // ---------------------------------------------------------------------
  logic       ll_in_valid, ll_in_ready;
  logic [7:0] ll_in_depth;
  logic       ll_out_valid, ll_out_last;
  logic [7:0] ll_out_sym;
  logic [3:0] ll_out_len;

  assign ll_in_valid = (state == S_LIMIT) && (si < 9'(NSYM));
  assign ll_in_depth = depth[NW'(si[7:0])];

  huff_len_limit #(.NSYM(NSYM), .MAX_BITS(dpzip_pkg::HUF_MAX_BITS)) u_limit (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (ll_in_valid),
    .in_depth  (ll_in_depth),
    .in_ready  (ll_in_ready),
    .out_valid (ll_out_valid),
    .out_sym   (ll_out_sym),
    .out_len   (ll_out_len),
    .out_last  (ll_out_last),
    .n_clipped (n_clipped),
    .repaired  (repaired)
  );

  // canonical first codes from the length counts
  always_comb begin
    logic [11:0] c;
    c = '0;
    next_code[0] = '0;
    for (int b = 1; b < 12; b++) begin
      c = (c + ((b == 1) ? 12'd0 : 12'(bl_count[b-1]))) << 1;
      next_code[b] = c;
    end
  end

  assign busy = (state != S_COLLECT);

  // current literal's code, left-aligned in 11 bits
  logic [7:0]  e_sym;
  logic [3:0]  e_len;
  logic [63:0] e_bits;
  assign e_sym  = lit_mem[AW'(ei)];
  assign e_len  = len[e_sym];
  assign e_bits = {code[e_sym], 53'h0} << (4'd11 - e_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_COLLECT;
      nlits     <= '0;
      nn        <= '0;
      nact      <= '0;
      di        <= '0;
      si        <= '0;
      ei        <= '0;
      hi        <= '0;
      acc       <= '0;
      acc_n     <= '0;
      out_valid <= 1'b0;
      out_word  <= '0;
      out_last  <= 1'b0;
      done      <= 1'b0;
      for (int i = 0; i < NNODE; i++) begin
        w[i]      <= '0;
        act[i]    <= 1'b0;
        parent[i] <= '0;
        depth[i]  <= '0;
      end
      for (int b = 0; b < 12; b++) begin
        bl_count[b] <= '0;
        ncode[b]    <= '0;
      end
      for (int s = 0; s < NSYM; s++) begin
        len[s]  <= '0;
        code[s] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_COLLECT: begin
          if (lit_valid) begin
            for (int l = 0; l < 4; l++)
              if (3'(l) < lit_cnt && 32'(nlits) + l < PAGE_BYTES)
                lit_mem[AW'(nlits + PW'(l))] <= lit_data[8*l +: 8];
            nlits <= nlits + PW'(lit_cnt);
            for (int s = 0; s < NSYM; s++) w[s] <= w[s] + WW'(lane_hits[s]);
          end
          if (lit_end) state <= S_INIT;
        end

        S_INIT: begin
          logic [8:0] n;
          n = '0;
          for (int s = 0; s < NSYM; s++) begin
            act[s]    <= (w[s] != '0);
            parent[s] <= '0;
            depth[s]  <= '0;
            n = n + 9'(w[s] != '0);
          end
          for (int i = NSYM; i < NNODE; i++) act[i] <= 1'b0;
          nact  <= n;
          nn    <= NW'(NSYM);
          state <= S_MERGE;
        end

        S_MERGE: begin
          if (nact <= 9'd1) begin
            di    <= nn - NW'(1);
            state <= S_DEPTH;
          end else begin
            w[nn]      <= w[m0] + w[m1];
            act[nn]    <= 1'b1;
            act[m0]    <= 1'b0;
            act[m1]    <= 1'b0;
            parent[m0] <= nn;
            parent[m1] <= nn;
            nn         <= nn + NW'(1);
            nact       <= nact - 9'd1;
          end
        end

        // parents always have higher numbers, so walking down from the
        // root sees every parent before its children
        S_DEPTH: begin
          if (32'(di) >= NSYM) begin
            if (di == nn - NW'(1)) depth[di] <= '0;   // root
            else                   depth[di] <= depth[parent[di]] + 8'd1;
          end else if (w[di] != '0) begin
            // a lone symbol still needs a 1-bit code
            depth[di] <= (nn == NW'(NSYM)) ? 8'd1 : depth[parent[di]] + 8'd1;
          end else begin
            depth[di] <= '0;
          end
          if (di == '0) begin
            si    <= '0;
            state <= S_LIMIT;
          end else begin
            di <= di - NW'(1);
          end
        end

        S_LIMIT: begin
          if (si < 9'(NSYM) && ll_in_ready) si <= si + 9'd1;
          if (ll_out_valid) begin
            len[ll_out_sym]            <= ll_out_len;
            bl_count[ll_out_len]       <= bl_count[ll_out_len] + 9'd1;
            if (ll_out_last) begin
              si    <= '0;
              state <= S_CODES;
            end
          end
        end

        S_CODES: begin
          // bl_count[0] counts absent symbols and is not used for codes
          logic [3:0] l;
          l = len[si[7:0]];
          if (si == '0) begin
            // counts are final: start every length at its first code
            for (int b = 0; b < 12; b++) ncode[b] <= next_code[b];
            if (l != '0) begin
              code[0]  <= 11'(next_code[l]);
              ncode[l] <= next_code[l] + 12'd1;
            end
          end else if (l != '0) begin
            code[si[7:0]] <= 11'(ncode[l]);
            ncode[l]      <= ncode[l] + 12'd1;
          end
          if (si == 9'(NSYM - 1)) begin
            hi    <= '0;
            state <= S_HDR;
          end
          si <= si + 9'd1;
        end

        S_HDR: begin
          out_valid <= 1'b1;
          if (hi == '0) begin
            out_word <= {16'(nlits), 16'h0};
          end else begin
            for (int j = 0; j < 8; j++)
              out_word[28 - 4*j +: 4] <= len[8 * (32'(hi) - 1) + j];
          end
          if (hi == 6'd32) begin
            ei    <= '0;
            acc   <= '0;
            acc_n <= '0;
            state <= (nlits == '0) ? S_FLUSH : S_EMIT;
          end
          hi <= hi + 6'd1;
        end

        S_EMIT: begin
          logic [63:0] a;
          logic [6:0]  an;
          a  = acc | (e_bits >> acc_n);
          an = acc_n + 7'(e_len);
          if (an >= 7'd32) begin
            out_valid <= 1'b1;
            out_word  <= a[63:32];
            a  = a << 32;
            an = an - 7'd32;
          end
          acc   <= a;
          acc_n <= an;
          if (ei == nlits - PW'(1)) state <= S_FLUSH;
          ei <= ei + PW'(1);
        end

        S_FLUSH: begin
          // the final word carries the remaining bits (or only padding)
          out_valid <= 1'b1;
          out_word  <= acc[63:32];
          out_last  <= 1'b1;
          done      <= 1'b1;
          nlits     <= '0;
          for (int s = 0; s < NSYM; s++) w[s] <= '0;
          for (int b = 0; b < 12; b++) bl_count[b] <= '0;
          state     <= S_COLLECT;
        end

        default: state <= S_COLLECT;
      endcase
    end
  end

  // every limited length found its code slot
  a_len_ok: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_EMIT) |-> (e_len != '0));

endmodule
