// huff_len_limit: caps Huffman code lengths at MAX_BITS (11) in a fixed,
// short schedule.
//
// Input: the depth of every symbol in an unbounded Huffman tree, streamed
// one symbol per clock in symbol order (0 = symbol absent). Output: the
// limited code length of every symbol, streamed in symbol order after the
// limit has been worked out. The lengths always form a complete prefix code
// (Kraft sum exactly 1) when two or more symbols are present.
//
// All work is done on the per-level leaf counts, with cost measured in
// units of 2^-MAX_BITS of code space (a leaf at level L costs 2^(MAX_BITS-L)):
//   1. Leaf scan and cap (one clock per symbol). Leaves deeper than MAX_BITS
//      are clipped to MAX_BITS while the leaves per level and the code space
//      used are counted. The excess over 2^MAX_BITS is the deficit k.
//   2. Redistribution (one clock per level, levels MAX_BITS-1 down to 1).
//      Moving a leaf from level L to L+1 frees 2^(MAX_BITS-1-L) units; at
//      each level just enough leaves, ceil(k / unit), are moved (or all of
//      them). Only shifts, adds and a minimum are used. k ends at or below 0.
//   3. Hole repair. Any code space left unused (h = -k) is filled by
//      promoting leaves one level up, always from the deepest occupied
//      level, whose unit always divides h; each clock either closes the
//      hole or empties that level, so the repair moves up one level per
//      clock.
// Symbols are then ranked by (original depth, symbol index; depths past 24
// share one rank bucket), and the leaf
// counts are handed out in that order, so a symbol that was shallower never
// gets a longer code than one that was deeper.
//
// Timing: stage 1 takes NSYM clocks, stage 2 MAX_BITS-1 clocks, stage 3 at
// most MAX_BITS-1 clocks, then NSYM clocks of output. The paper bounds the
// first three stages at 256 + 10 + 8 = 274 clocks; this design's repair can
// take up to 10 clocks (+1 to see that it is finished), since its loop walks
// levels instead of halving the deficit directly.
//
// From the paper: the three stages, the 11-bit ceiling, clipping during a
// single forward scan, counting leaves and deficit, a level walk 10 -> 1
// using shifts and increments, and an upward repair of the residual. This
// design's own: the exact rule for how many leaves move per level, the
// repair rule, the ranking used to give lengths back to symbols, and the
// streaming interface.
//
// Tool note: the assertion at the end is switched off during reset with
// "disable iff (!rst_n)"; the linter therefore sees rst_n used both as an
// asynchronous reset and as a sampled signal. Only the checker samples it.
module huff_len_limit #(
  parameter int unsigned NSYM     = 256,
  parameter int unsigned MAX_BITS = dpzip_pkg::HUF_MAX_BITS
) (
  input  logic        clk,
  input  logic        rst_n,
  // depths, one symbol per clock in symbol order; the first beat starts a run
  input  logic        in_valid,
  input  logic [7:0]  in_depth,
  output logic        in_ready,
  // limited lengths, one symbol per clock in symbol order
  output logic        out_valid,
  output logic [7:0]  out_sym,
  output logic [3:0]  out_len,
  output logic        out_last,
  // statistics
  output logic [8:0]  n_clipped,   // leaves that were deeper than MAX_BITS
  output logic        repaired     // stage 3 had holes to fill
);

  localparam int unsigned SW  = $clog2(NSYM);
  localparam int unsigned CW  = SW + 1;               // leaf count width
  localparam int unsigned KW  = CW + MAX_BITS + 2;    // signed cost width
  // Original depths are kept up to DB for ranking; deeper ones share the
  // last bucket. A 4 KB page cannot give a Huffman tree deeper than 17.
  localparam int unsigned DB  = 24;

  typedef enum logic [2:0] {S_SCAN, S_REDIST, S_REPAIR, S_OUT} state_t;
  state_t state;

  logic [4:0]           dmem   [NSYM];        // original depth, capped at DB
  logic [CW-1:0]        cnt    [MAX_BITS+1];  // leaves per level after limiting
  logic [CW-1:0]        ohist  [DB+1];        // leaves per original (capped) depth
  logic [CW-1:0]        seen   [DB+1];
  logic signed [KW-1:0] k;                    // code space used minus 2^MAX_BITS
  logic [SW:0]          idx;
  logic [3:0]           lvl;

  assign in_ready = (state == S_SCAN);

  // ---------------------------------------------------------------------
  // Stage 2: leaves to move at level lvl
  // ---------------------------------------------------------------------
  logic [KW-1:0] r_need;
  logic [CW-1:0] r_n;
  always_comb begin
    logic [3:0] sh;
    sh     = 4'(MAX_BITS - 1) - lvl;
    r_need = (KW'(k) + (KW'(1) << sh) - KW'(1)) >> sh;   // ceil(k / 2^sh)
    if (k <= 0)                         r_n = '0;
    else if (r_need > KW'(cnt[lvl]))    r_n = cnt[lvl];
    else                                r_n = CW'(r_need);
  end

  // ---------------------------------------------------------------------
  // Stage 3: deepest occupied level and leaves to promote from it
  // ---------------------------------------------------------------------
  logic [3:0]    p_lvl;
  logic [CW-1:0] p_n;
  logic [KW-1:0] h;
  always_comb begin
    logic [KW-1:0] q;
    logic [3:0]    sh;
    p_lvl = '0;
    for (int l = 1; l <= MAX_BITS; l++)
      if (cnt[l] != '0) p_lvl = 4'(l);
    h  = KW'(-k);
    sh = 4'(MAX_BITS) - p_lvl;
    q  = h >> sh;
    p_n = (q > KW'(cnt[p_lvl])) ? cnt[p_lvl] : CW'(q);
  end

  // ---------------------------------------------------------------------
  // Output ranking
  // ---------------------------------------------------------------------
  logic [4:0]    o_d;
  logic [CW-1:0] o_rank;
  logic [3:0]    o_len;
  always_comb begin
    logic [CW-1:0] base, cum;
    o_d  = dmem[SW'(idx)];
    base = '0;
    for (int d = 1; d <= DB; d++)
      if (5'(d) < o_d) base = base + ohist[d];
    o_rank = base + seen[o_d];
    o_len  = '0;
    cum    = '0;
    for (int l = 1; l <= MAX_BITS; l++) begin
      if (o_len == '0 && o_rank < cum + cnt[l]) o_len = 4'(l);
      cum = cum + cnt[l];
    end
    if (o_d == '0) o_len = '0;
  end

  // scan-stage temporaries, kept outside the clocked block
  logic [4:0] dc;
  logic [3:0] lc;
  always_comb begin
    dc = (in_depth > 8'(DB)) ? 5'(DB) : in_depth[4:0];
    lc = (in_depth > 8'(MAX_BITS)) ? 4'(MAX_BITS) : in_depth[3:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_SCAN;
      idx       <= '0;
      lvl       <= '0;
      k         <= '0;
      out_valid <= 1'b0;
      out_sym   <= '0;
      out_len   <= '0;
      out_last  <= 1'b0;
      n_clipped <= '0;
      repaired  <= 1'b0;
      for (int l = 0; l <= MAX_BITS; l++) cnt[l] <= '0;
      for (int d = 0; d <= DB; d++) begin
        ohist[d] <= '0;
        seen[d]  <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        // ---- stage 1: leaf scan and cap
        S_SCAN: begin
          if (in_valid) begin
            if (idx == '0) begin
              // first symbol of a new run: clear the counters
              for (int l = 0; l <= MAX_BITS; l++) cnt[l] <= '0;
              for (int d = 0; d <= DB; d++) begin
                ohist[d] <= '0;
                seen[d]  <= '0;
              end
              n_clipped <= '0;
              repaired  <= 1'b0;
              k         <= -(KW'(1) << MAX_BITS);
              if (in_depth != '0) begin
                cnt[lc]   <= CW'(1);
                ohist[dc] <= CW'(1);
                k         <= (KW'(1) << (4'(MAX_BITS) - lc)) - (KW'(1) << MAX_BITS);
                n_clipped <= (in_depth > 8'(MAX_BITS)) ? 9'd1 : 9'd0;
              end
            end else if (in_depth != '0) begin
              cnt[lc]   <= cnt[lc] + CW'(1);
              ohist[dc] <= ohist[dc] + CW'(1);
              k         <= k + (KW'(1) << (4'(MAX_BITS) - lc));
              if (in_depth > 8'(MAX_BITS)) n_clipped <= n_clipped + 9'd1;
            end
            if (32'(idx) == NSYM - 1) begin
              idx   <= '0;
              lvl   <= 4'(MAX_BITS - 1);
              state <= S_REDIST;
            end else begin
              idx <= idx + 1'b1;
            end
          end
        end

        // ---- stage 2: deterministic redistribution, levels 10 -> 1
        S_REDIST: begin
          if (r_n != '0) begin
            cnt[lvl]         <= cnt[lvl] - r_n;
            cnt[lvl + 4'd1]  <= cnt[lvl + 4'd1] + r_n;
            k                <= k - $signed(KW'(r_n) << (4'(MAX_BITS - 1) - lvl));
          end
          if (lvl == 4'd1) state <= S_REPAIR;
          else             lvl   <= lvl - 4'd1;
        end

        // ---- stage 3: hole repair from the deepest level upward
        S_REPAIR: begin
          if (k >= 0 || p_lvl <= 4'd1) begin
            state <= S_OUT;
          end else begin
            repaired            <= 1'b1;
            cnt[p_lvl]          <= cnt[p_lvl] - p_n;
            cnt[p_lvl - 4'd1]   <= cnt[p_lvl - 4'd1] + p_n;
            k                   <= k + $signed(KW'(p_n) << (4'(MAX_BITS) - p_lvl));
          end
        end

        // ---- hand lengths back to symbols in rank order
        S_OUT: begin
          out_valid <= 1'b1;
          out_sym   <= 8'(idx);
          out_len   <= o_len;
          if (o_d != '0) seen[o_d] <= seen[o_d] + CW'(1);
          if (32'(idx) == NSYM - 1) begin
            out_last <= 1'b1;
            idx      <= '0;
            state    <= S_SCAN;
          end else begin
            idx <= idx + 1'b1;
          end
        end

        default: state <= S_SCAN;
      endcase
    end
  end

  // depth memory write during the scan
  always_ff @(posedge clk) begin
    if (state == S_SCAN && in_valid)
      dmem[SW'(idx)] <= dc;
  end

  // no code may be longer than the ceiling
  a_len_cap: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> (32'(out_len) <= MAX_BITS));

endmodule
