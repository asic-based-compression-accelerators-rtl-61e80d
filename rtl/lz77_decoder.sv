// lz77_decoder: rebuilds a page from literal bytes and <LL, ML, Off> sequences.
//
// Two buffers sit inside: a literal buffer that collects the literal bytes of
// the page as they arrive, and a history buffer that holds every byte
// already produced. A small FSM takes one sequence at a time and runs two
// copy pipelines in turn. The literal pipeline moves LL bytes from the
// literal buffer to the output, up to 8 per clock. The match pipeline copies
// ML bytes from Off bytes back in the output, up to 8 per clock.
//
// Matches are served from one of two places. Short offsets (Off <= RECENT)
// read a register-backed recent-data buffer holding the last RECENT output
// bytes; it is read in the same clock, so even an overlapping copy (Off < 8,
// where the bytes being written are also the source) runs at 8 bytes per
// clock: lane i takes the byte of lane (i mod Off), which is the bypass of
// this clock's own writes. Long offsets read the history buffer, which is
// modelled as an SRAM with a one-clock read: a 16-byte window is prefetched
// one clock ahead (for the first chunk, in the last clock of the literal run
// or when the sequence is taken), so long copies also keep 8 bytes per clock.
//
// Interface: literals arrive on lit_* (lit_cnt bytes per beat, always
// accepted, at most one page ahead). Sequences arrive on seq_* with a
// valid/ready handshake. Output bytes leave on out_* with no backpressure;
// out_last marks the final beat of the page and done pulses with it.
//
// Timing: one clock to take a sequence, then ceil(LL/8) literal clocks and
// ceil(ML/8) match clocks, plus clocks spent waiting for literals that have
// not arrived yet.
//
// From the paper: separate literal and history buffers, dual-port history
// memory, a register-backed recent-data buffer of typically 256 bytes for
// short offsets, literal and match pipelines under an FSM, prefetch for long
// offsets and bypass for recent writes. This design's own choices: the
// buffer sizes equal to one page, the prefetch schedule, the one-clock read
// model of the history SRAM and all interface details.
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
module lz77_decoder
  import dpzip_pkg::seq_t, dpzip_pkg::LEN_W;
#(
  parameter int unsigned PAGE_BYTES = dpzip_pkg::PAGE_BYTES,
  parameter int unsigned RECENT     = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  // literal bytes
  input  logic         lit_valid,
  input  logic [63:0]  lit_data,
  input  logic [3:0]   lit_cnt,
  // sequences
  input  logic         seq_valid,
  input  seq_t         seq,
  output logic         seq_ready,
  // reconstructed page
  output logic         out_valid,
  output logic [63:0]  out_data,
  output logic [3:0]   out_cnt,
  output logic         out_last,
  output logic         done,
  // event flags, one clock each (for statistics)
  output logic         ev_short_copy,
  output logic         ev_long_copy,
  output logic         ev_lit_stall
);

  localparam int unsigned AW = $clog2(PAGE_BYTES);
  localparam int unsigned PW = AW + 1;
  localparam int unsigned RW = $clog2(RECENT);

  typedef enum logic [1:0] {S_IDLE, S_LIT, S_MATCH} state_t;
  state_t state;

  logic [7:0]       lit_mem  [PAGE_BYTES];
  logic [7:0]       hist_mem [PAGE_BYTES];
  logic [7:0]       recent   [RECENT];

  logic [PW-1:0]    lit_wp, lit_rp;
  logic [PW-1:0]    o;          // output position
  logic [LEN_W-1:0] ll_rem, ml_rem, off_q;
  logic             last_q;
  logic [PW-1:0]    src;        // source position of the next match chunk
  logic             long_q;     // current match uses the history SRAM

  // History SRAM read port: 16 bytes from an 8-byte aligned address.
  logic             hrd_en;
  logic [PW-1:0]    hrd_pos;
  logic [7:0]       hrd_win  [16];
  logic [2:0]       hrd_sel;

  function automatic logic [7:0] hist_rd(input logic [PW-1:0] a);
    return (32'(a) < PAGE_BYTES) ? hist_mem[a[AW-1:0]] : 8'h00;
  endfunction

  always_ff @(posedge clk) begin
    if (hrd_en) begin
      for (int i = 0; i < 16; i++)
        hrd_win[i] <= hist_rd({hrd_pos[PW-1:3], 3'b000} + PW'(i));
      hrd_sel <= hrd_pos[2:0];
    end
  end

  // ---------------------------------------------------------------------
  // Chunk sizes for this clock
  // ---------------------------------------------------------------------
  logic [PW-1:0] lit_avail;
  logic [3:0]    n_lit, n_match;
  assign lit_avail = lit_wp - lit_rp;

  always_comb begin
    logic [LEN_W-1:0] m;
    m = ll_rem;
    if (m > LEN_W'(8)) m = LEN_W'(8);
    if (PW'(m) > lit_avail) m = LEN_W'(lit_avail);
    n_lit = 4'(m);
    n_match = (ml_rem > LEN_W'(8)) ? 4'd8 : 4'(ml_rem);
  end

  // ---------------------------------------------------------------------
  // Data of this clock
  // ---------------------------------------------------------------------
  logic [7:0] lit_bytes   [8];
  logic [7:0] short_bytes [8];
  logic [7:0] long_bytes  [8];

  always_comb begin
    logic [3:0]    k;
    logic [PW-1:0] a;
    for (int i = 0; i < 8; i++) begin
      a = lit_rp + PW'(i);
      lit_bytes[i] = (32'(a) < PAGE_BYTES) ? lit_mem[a[AW-1:0]] : 8'h00;
      // lane i copies lane (i mod Off) when the copy overlaps itself
      k = 4'(i);
      for (int r = 0; r < 8; r++)
        if (LEN_W'(k) >= off_q) k = k - 4'(off_q);
      short_bytes[i] = recent[RW'(o - PW'(off_q) + PW'(k))];
      long_bytes[i]  = hrd_win[4'(hrd_sel) + 4'(i)];
    end
  end

  assign seq_ready = (state == S_IDLE);

  // ---------------------------------------------------------------------
  // FSM and buffers
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      lit_wp        <= '0;
      lit_rp        <= '0;
      o             <= '0;
      ll_rem        <= '0;
      ml_rem        <= '0;
      off_q         <= '0;
      last_q        <= 1'b0;
      src           <= '0;
      long_q        <= 1'b0;
      out_valid     <= 1'b0;
      out_data      <= '0;
      out_cnt       <= '0;
      out_last      <= 1'b0;
      done          <= 1'b0;
      ev_short_copy <= 1'b0;
      ev_long_copy  <= 1'b0;
      ev_lit_stall  <= 1'b0;
    end else begin
      logic          emit;
      logic [3:0]    n;
      logic [7:0]    b [8];
      logic          fin;
      emit = 1'b0;
      n    = '0;
      fin  = 1'b0;
      for (int i = 0; i < 8; i++) b[i] = 8'h00;

      out_valid     <= 1'b0;
      out_last      <= 1'b0;
      done          <= 1'b0;
      ev_short_copy <= 1'b0;
      ev_long_copy  <= 1'b0;
      ev_lit_stall  <= 1'b0;

      // literal input
      if (lit_valid) begin
        for (int i = 0; i < 8; i++)
          if (4'(i) < lit_cnt && 32'(lit_wp) + i < PAGE_BYTES)
            lit_mem[AW'(lit_wp + PW'(i))] <= lit_data[8*i +: 8];
      end

      unique case (state)
        S_IDLE: begin
          if (seq_valid) begin
            ll_rem <= seq.ll;
            ml_rem <= seq.ml;
            off_q  <= seq.off;
            last_q <= seq.last;
            long_q <= (seq.off > LEN_W'(RECENT));
            src    <= o + PW'(seq.ll) - PW'(seq.off);
            if (seq.ll != '0)       state <= S_LIT;
            else if (seq.ml != '0)  state <= S_MATCH;
            else if (seq.last)      fin = 1'b1;
          end
        end

        S_LIT: begin
          if (n_lit == '0) begin
            ev_lit_stall <= 1'b1;
          end else begin
            emit = 1'b1;
            n    = n_lit;
            for (int i = 0; i < 8; i++) b[i] = lit_bytes[i];
            lit_rp <= lit_rp + PW'(n_lit);
            ll_rem <= ll_rem - LEN_W'(n_lit);
            if (LEN_W'(n_lit) == ll_rem) begin
              if (ml_rem != '0)  state <= S_MATCH;
              else begin
                state <= S_IDLE;
                fin   = last_q;
              end
            end
          end
        end

        S_MATCH: begin
          emit = 1'b1;
          n    = n_match;
          for (int i = 0; i < 8; i++) b[i] = long_q ? long_bytes[i] : short_bytes[i];
          ev_short_copy <= !long_q;
          ev_long_copy  <= long_q;
          src    <= src + PW'(n_match);
          ml_rem <= ml_rem - LEN_W'(n_match);
          if (LEN_W'(n_match) == ml_rem) begin
            state <= S_IDLE;
            fin   = last_q;
          end
        end

        default: state <= S_IDLE;
      endcase

      if (emit) begin
        for (int i = 0; i < 8; i++) begin
          if (4'(i) < n) begin
            if (32'(o) + i < PAGE_BYTES) hist_mem[AW'(o + PW'(i))] <= b[i];
            recent[RW'(o + PW'(i))] <= b[i];
          end
          out_data[8*i +: 8] <= (4'(i) < n) ? b[i] : 8'h00;
        end
        out_valid <= 1'b1;
        out_cnt   <= n;
        o         <= o + PW'(n);
      end

      if (fin) begin
        out_last <= 1'b1;
        done     <= 1'b1;
        o        <= '0;
        lit_rp   <= '0;
        // literals of the next page may already be arriving this clock
        lit_wp   <= lit_valid ? PW'(lit_cnt) : '0;
        if (lit_valid) begin
          for (int i = 0; i < 8; i++)
            if (4'(i) < lit_cnt) lit_mem[AW'(i)] <= lit_data[8*i +: 8];
        end
      end else if (lit_valid) begin
        lit_wp <= lit_wp + PW'(lit_cnt);
      end
    end
  end

  // History read scheduling: fetch the window of the next long chunk.
  always_comb begin
    hrd_en  = 1'b0;
    hrd_pos = src;
    unique case (state)
      S_IDLE: begin
        hrd_en  = seq_valid && (seq.ll == '0);
        hrd_pos = o - PW'(seq.off);
      end
      S_LIT: begin
        hrd_en  = (n_lit != '0) && (LEN_W'(n_lit) == ll_rem);
        hrd_pos = src;
      end
      S_MATCH: begin
        hrd_en  = 1'b1;
        hrd_pos = src + PW'(n_match);
      end
      default: ;
    endcase
  end

  a_off_in_page: assert property (@(posedge clk) disable iff (!rst_n)
    (seq_valid && seq_ready && seq.ml != '0) |-> (seq.off != '0 && PW'(seq.off) <= o + PW'(seq.ll)))
    else $error("lz77_decoder: offset %0d reaches before the page", seq.off);

endmodule
