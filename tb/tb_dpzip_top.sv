// tb_dpzip_top: end-to-end, full-size test of the DPZip engine at its
// default parameters (4 KB pages).
//
// Each test page is compressed; the sequences and the Huffman word stream
// that come out are stored, then fed back to the decompression path, and
// the rebuilt page is compared byte for byte with the original. The
// decompression of one page runs at the same time as the compression of the
// next, so both paths are busy together.
//
// Pages: text-like (copies of earlier pieces), random bytes, all zeros,
// short repeating patterns mixed with random bytes (overlapping copies),
// a page whose second half repeats its first half (long offsets), and a
// few pages with no repeated 4-byte word whose literal bytes follow
// Fibonacci-like skews of different depths (the Huffman tree grows deeper than 11 levels). A run
// of 12 text-like pages stands in for a 64 KB block cut into 4 KB pages.
//
// Checks: every page comes back unchanged; each sequence has ML = 0 or
// ML >= 4 and an offset inside the page; LL + ML adds up to the page size;
// the page enters in PAGE/8 clocks (8 bytes per clock); the decompression
// time stays within the sum of its parts (header, code table, one literal
// per clock, one clock per sequence plus one per 8 copied bytes). At the end
// every mechanism must have been seen at least once: matches, literal runs,
// overlapping copies, short and long offset copies, waits for literals,
// length clipping, hole repair, and both paths busy together.
module tb_dpzip_top;
  import dpzip_pkg::*;

  localparam int unsigned N  = PAGE_BYTES;
  localparam int          NP = 24;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge before the first clock
  always #5 clk = ~clk;

  logic        c_in_valid;
  logic [63:0] c_in_data;
  logic        c_in_ready;
  logic        c_seq_valid;
  seq_t        c_seq;
  logic        c_huf_valid;
  logic [31:0] c_huf_word;
  logic        c_huf_last;
  logic        c_done, c_busy;
  logic        d_huf_valid;
  logic [31:0] d_huf_word;
  logic        d_huf_last;
  logic        d_huf_ready;
  logic        d_seq_valid;
  seq_t        d_seq;
  logic        d_seq_ready;
  logic        d_out_valid;
  logic [63:0] d_out_data;
  logic [3:0]  d_out_cnt;
  logic        d_out_last;
  logic        d_done;
  logic        st_short_copy, st_long_copy, st_lit_stall;
  logic [8:0]  st_huf_clipped;
  logic        st_huf_repaired;

  dpzip_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  byte unsigned pages [NP][N];
  string        pname [NP];
  seq_t         cseqs  [NP][$];
  logic [32:0]  cwords [NP][$];
  byte unsigned dgot [N];
  int  ngot, cpage = 0, dpage = 0;
  int  n_match = 0, n_litrun = 0, n_overlap = 0, n_short = 0, n_long = 0;
  int  n_stall = 0, n_clip = 0, n_repair = 0, n_both = 0;
  bit  d_active = 0;
  longint tot_in = 0, tot_out_bits = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (c_seq_valid && cpage < NP) cseqs[cpage].push_back(c_seq);
    if (c_huf_valid && cpage < NP) cwords[cpage].push_back({c_huf_last, c_huf_word});
    if (c_done) begin
      if (st_huf_clipped != '0) n_clip++;
      if (st_huf_repaired) n_repair++;
      cpage++;
    end
    if (d_out_valid)
      for (int i = 0; i < int'(d_out_cnt); i++) begin
        if (ngot < N) dgot[ngot] = d_out_data[8*i +: 8];
        ngot++;
      end
    n_short += int'(st_short_copy);
    n_long  += int'(st_long_copy);
    n_stall += int'(st_lit_stall);
    if (c_busy && d_active) n_both++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------------- pages
  task automatic make_page(input int p, input int kind);
    int o;
    case (kind)
      0: begin  // text-like: words from a vocabulary, copies of earlier pieces
        pname[p] = "text";
        o = 0;
        while (o < N) begin
          int r;
          r = $urandom_range(9);
          if (o > 64 && r < 4) begin
            int back, len;
            back = $urandom_range((o < 2000) ? o : 2000, 1);
            len  = $urandom_range(30, 4);
            for (int i = 0; i < len && o < N; i++) begin pages[p][o] = pages[p][o - back]; o++; end
          end else begin
            int wl;
            wl = $urandom_range(7, 2);
            for (int i = 0; i < wl && o < N; i++) begin
              pages[p][o] = 8'(97 + $urandom_range(25)); o++;
            end
            if (o < N) begin pages[p][o] = 8'd32; o++; end
          end
        end
      end
      1: begin
        pname[p] = "random";
        for (int i = 0; i < N; i++) pages[p][i] = 8'($urandom);
      end
      2: begin
        pname[p] = "zeros";
        for (int i = 0; i < N; i++) pages[p][i] = 8'h00;
      end
      3: begin  // short periods 1..7 between random bytes
        pname[p] = "periodic";
        o = 0;
        while (o < N) begin
          int per, len;
          for (int i = 0; i < 5 && o < N; i++) begin pages[p][o] = 8'($urandom); o++; end
          per = $urandom_range(7, 1);
          len = $urandom_range(60, 8);
          for (int i = 0; i < len && o < N; i++) begin
            pages[p][o] = (i < per || o < per) ? 8'($urandom) : pages[p][o - per];
            o++;
          end
        end
      end
      4: begin  // second half repeats the first with a few changed bytes
        pname[p] = "long_repeat";
        for (int i = 0; i < N / 2; i++) pages[p][i] = 8'($urandom);
        for (int i = N / 2; i < N; i++)
          pages[p][i] = ($urandom_range(99) == 0) ? 8'($urandom) : pages[p][i - N / 2];
      end
      default: begin
        // No 4-byte word repeats: every 4-byte group is {s, x, y, z}, where
        // x, y, z carry the group number in three disjoint byte ranges and s
        // is drawn from a Fibonacci-like skewed alphabet in 0..63.
        int fib [20];
        int tot, nf;
        pname[p] = "skewed_literals";
        fib[0] = 1; fib[1] = 1;
        for (int i = 2; i < 20; i++) fib[i] = fib[i-1] + fib[i-2];
        tot = 0;
        nf = 12 + (p % 7);
        for (int i = 0; i < nf; i++) tot += fib[i];
        for (int k = 0; k < N / 4; k++) begin
          int r, s, acc;
          r = $urandom_range(tot - 1);
          s = 0; acc = 0;
          for (int i = 0; i < nf; i++) begin
            if (r >= acc && r < acc + fib[i]) s = i;
            acc += fib[i];
          end
          pages[p][4*k]     = 8'(s);
          pages[p][4*k + 1] = 8'(8'h40 | (k & 63));
          pages[p][4*k + 2] = 8'(8'h80 | ((k >> 6) & 63));
          pages[p][4*k + 3] = 8'(8'hC0 | (k & 63));
        end
      end
    endcase
  endtask

  // ------------------------------------------------------------ compress
  task automatic compress(input int p);
    int t0, t1;
    int b;
    b = 0;
    @(negedge clk);
    while (!c_in_ready) @(negedge clk);
    t0 = cycle;
    while (b < int'(N / 8)) begin
      c_in_valid = 1;
      for (int k = 0; k < 8; k++) c_in_data[8*k +: 8] = pages[p][8*b + k];
      @(posedge clk);
      if (c_in_ready) b++;
      @(negedge clk);
    end
    t1 = cycle;
    c_in_valid = 0;
    check(t1 - t0 == int'(N / 8), $sformatf("page %0d: loaded in %0d clocks", p, t1 - t0));
    while (cpage <= p) @(negedge clk);
    $display("page %0d compressed in %0d clocks from the first beat", p, cycle - t0);
  endtask

  // ---------------------------------------------------------- decompress
  task automatic decompress(input int p);
    int t0, t1, bound, nl, sum;
    bit ok_seq;
    ngot = 0;
    d_active = 1;
    nl = 0; sum = 0; ok_seq = 1;
    foreach (cseqs[p][i]) begin
      nl  += int'(cseqs[p][i].ll);
      sum += int'(cseqs[p][i].ll) + int'(cseqs[p][i].ml);
      if (cseqs[p][i].ml != '0) begin
        n_match++;
        if (cseqs[p][i].ml < LEN_W'(MIN_MATCH) || cseqs[p][i].off == '0) ok_seq = 0;
        if (cseqs[p][i].off < cseqs[p][i].ml) n_overlap++;
      end
      if (cseqs[p][i].ll >= 4) n_litrun++;
    end
    check(sum == int'(N), $sformatf("page %0d: LL+ML sum %0d", p, sum));
    check(ok_seq, $sformatf("page %0d: every match has ML >= 4 and an offset", p));
    check(cseqs[p].size() > 0 && cseqs[p][cseqs[p].size() - 1].last,
          $sformatf("page %0d: sequence list ends with last", p));
    bound = 1 + 32 + 256 + nl + 16;
    foreach (cseqs[p][i]) bound += 1 + (int'(cseqs[p][i].ml) + 7) / 8 + 2;
    @(negedge clk);
    t0 = cycle;
    fork
      begin
        foreach (cwords[p][i]) begin
          d_huf_valid = 1;
          d_huf_word  = cwords[p][i][31:0];
          d_huf_last  = cwords[p][i][32];
          @(posedge clk);
          while (!d_huf_ready) @(posedge clk);
          @(negedge clk);
        end
        d_huf_valid = 0;
        d_huf_last  = 0;
      end
      begin
        foreach (cseqs[p][i]) begin
          d_seq_valid = 1;
          d_seq       = cseqs[p][i];
          @(posedge clk);
          while (!d_seq_ready) @(posedge clk);
          @(negedge clk);
        end
        d_seq_valid = 0;
      end
    join
    while (dpage <= p) @(negedge clk);
    t1 = cycle;
    begin
      bit ok = 1;
      for (int i = 0; i < int'(N); i++) if (dgot[i] != pages[p][i]) ok = 0;
      check(ngot == int'(N), $sformatf("page %0d: %0d bytes rebuilt", p, ngot));
      check(ok, $sformatf("page %0d (%s): rebuilt page equals original", p, pname[p]));
    end
    check(t1 - t0 <= bound, $sformatf("page %0d: decompression %0d clocks, bound %0d", p, t1 - t0, bound));
    tot_in += N;
    tot_out_bits += 40 * cseqs[p].size() + 32 * cwords[p].size();
    $display("page %0d %-15s seqs=%0d literals=%0d huff_words=%0d  size %0d -> %0d bytes (seqs at 40 bits), decomp %0d clocks",
             p, pname[p], cseqs[p].size(), nl, cwords[p].size(), N,
             (40 * cseqs[p].size() + 32 * cwords[p].size()) / 8, t1 - t0);
    d_active = 0;
  endtask

  always @(posedge clk) if (d_done) dpage <= dpage + 1;

  initial begin
    c_in_valid = 0; c_in_data = 0;
    d_huf_valid = 0; d_huf_word = 0; d_huf_last = 0;
    d_seq_valid = 0; d_seq = '0;
    for (int p = 0; p < NP; p++) make_page(p, (p < 6) ? p : (p < 12) ? 5 : 0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    compress(0);
    for (int p = 1; p <= NP; p++) begin
      fork
        if (p < NP) compress(p);
        decompress(p - 1);
      join
    end
    check(n_match   > 0, "matches found");
    check(n_litrun  > 0, "literal runs (skip on miss)");
    check(n_overlap > 0, "overlapping copies");
    check(n_short   > 0, "short-offset copies from the recent buffer");
    check(n_long    > 0, "long-offset copies from the history buffer");
    check(n_stall   > 0, "copy waited for literals");
    check(n_clip    > 0, "Huffman lengths clipped at 11 bits");
    check(n_repair  > 0, "length hole repair");
    check(n_both    > 0, "compression and decompression busy together");
    $display("mechanisms: match=%0d litrun=%0d overlap=%0d short=%0d long=%0d lit_stall=%0d clip_pages=%0d repair_pages=%0d both_busy_clocks=%0d",
             n_match, n_litrun, n_overlap, n_short, n_long, n_stall, n_clip, n_repair, n_both);
    $display("overall: %0d bytes in, %0d bytes out", tot_in, tot_out_bits / 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
