// tb_huffman_encoder: self-checking test of the dynamic Huffman encoder.
//
// Literal sets of several shapes (uniform, skewed, Fibonacci-like so that
// the tree is deeper than 11 levels, a single symbol, no literals at all)
// are sent in 1..4 bytes per clock. The words that come out are parsed here
// with procedural code written from the stream format alone: the header
// count must match; every code length must be 0..11, non-zero exactly for
// the symbols that occur, and complete (Kraft sum 2^11); the canonical codes
// rebuilt from the lengths must decode the body back to the literals. When
// the true Huffman tree is within 11 levels, the coded size must equal the
// optimal Huffman size computed here independently.
module tb_huffman_encoder;

  localparam int N = 4096;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge before the first clock
  always #5 clk = ~clk;

  logic        lit_valid;
  logic [31:0] lit_data;
  logic [2:0]  lit_cnt;
  logic        lit_end;
  logic        out_valid;
  logic [31:0] out_word;
  logic        out_last;
  logic        done;
  logic        busy;
  logic [8:0]  n_clipped;
  logic        repaired;

  huffman_encoder dut (.*);

  int checks = 0, failures = 0;
  int n_clip_pages = 0;
  byte unsigned lits [N];
  int nl;
  logic [31:0] words [$];

  always @(posedge clk) if (out_valid) words.push_back(out_word);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // optimal Huffman cost in bits and maximum depth, by plain merging
  task automatic huff_cost(output longint cost, output int maxd);
    longint w [512];
    int par [512];
    bit act [512];
    int nn = 256, nact = 0;
    int freq [256];
    foreach (freq[i]) freq[i] = 0;
    for (int i = 0; i < nl; i++) freq[lits[i]]++;
    for (int i = 0; i < 512; i++) begin act[i] = 0; par[i] = -1; end
    for (int i = 0; i < 256; i++) begin w[i] = freq[i]; act[i] = freq[i] > 0; nact += int'(act[i]); end
    cost = 0; maxd = 0;
    if (nact <= 1) begin cost = nl; maxd = (nact == 1); return; end
    while (nact > 1) begin
      int a = -1, b = -1;
      for (int i = 0; i < nn; i++) if (act[i]) begin
        if (a < 0 || w[i] < w[a]) begin b = a; a = i; end
        else if (b < 0 || w[i] < w[b]) b = i;
      end
      w[nn] = w[a] + w[b]; act[nn] = 1; act[a] = 0; act[b] = 0;
      par[a] = nn; par[b] = nn; nn++; nact--;
    end
    for (int i = 0; i < 256; i++) if (freq[i] > 0) begin
      int d = 0, n = i;
      while (par[n] >= 0) begin d++; n = par[n]; end
      cost += longint'(d) * freq[i];
      if (d > maxd) maxd = d;
    end
  endtask

  task automatic run_page(input string name);
    int len [256];
    int cnt [12];
    int first [12];
    int kraft = 0, present_ok = 1, len_ok = 1;
    longint opt_cost, body_bits = 0;
    int maxd;
    bit dec_ok = 1;
    int freq [256];
    words.delete();
    foreach (freq[i]) freq[i] = 0;
    for (int i = 0; i < nl; i++) freq[lits[i]]++;
    // send
    begin
      int i = 0;
      while (i < nl) begin
        int c = $urandom_range(4, 1);
        if (c > nl - i) c = nl - i;
        @(negedge clk);
        lit_valid = 1; lit_cnt = 3'(c);
        for (int k = 0; k < 4; k++) lit_data[8*k +: 8] = (k < c) ? lits[i + k] : 8'h00;
        i += c;
      end
      @(negedge clk);
      lit_valid = 0; lit_end = 1;
      @(negedge clk);
      lit_end = 0;
    end
    wait (done);
    @(posedge clk); @(negedge clk);
    // parse
    check(words.size() >= 34, $sformatf("%s: %0d words", name, words.size()));
    check(int'(words[0][31:16]) == nl, $sformatf("%s: header count %0d vs %0d", name, words[0][31:16], nl));
    foreach (cnt[l]) cnt[l] = 0;
    for (int s = 0; s < 256; s++) begin
      len[s] = int'(words[1 + s / 8][28 - 4 * (s % 8) +: 4]);
      if (len[s] > 11) len_ok = 0;
      if ((len[s] != 0) != (freq[s] != 0)) present_ok = 0;
      if (len[s] != 0) begin cnt[len[s]]++; kraft += 1 << (11 - len[s]); end
    end
    check(len_ok, {name, ": lengths at most 11"});
    check(present_ok, {name, ": lengths given exactly for the symbols used"});
    huff_cost(opt_cost, maxd);
    begin
      int npresent = 0;
      foreach (freq[s]) if (freq[s] > 0) npresent++;
      if (npresent >= 2) check(kraft == 2048, $sformatf("%s: Kraft sum %0d", name, kraft));
    end
    // canonical codes
    begin
      int c = 0;
      first[0] = 0;
      for (int l = 1; l < 12; l++) begin
        c = (c + (l == 1 ? 0 : cnt[l - 1])) << 1;
        first[l] = c;
      end
    end
    // decode body bit by bit
    begin
      int bitpos = 0;
      int nbody = words.size() - 33;
      for (int i = 0; i < nl; i++) begin
        int code = 0, found = -1;
        for (int l = 1; l <= 11 && found < 0; l++) begin
          int wbit = bitpos + l - 1;
          int bitv = (wbit / 32 < nbody) ? int'(words[33 + wbit / 32][31 - wbit % 32]) : 0;
          code = (code << 1) | bitv;
          // symbol with this length and code: the (code-first)th symbol of length l
          if (code >= first[l] && code - first[l] < cnt[l]) begin
            int k = code - first[l];
            for (int s = 0; s < 256 && found < 0; s++)
              if (len[s] == l) begin
                if (k == 0) found = s;
                k--;
              end
            bitpos += l;
            body_bits += l;
          end
        end
        if (found != int'(lits[i])) dec_ok = 0;
      end
      check(dec_ok, {name, ": body decodes to the literals"});
      check(nbody == (bitpos + 31) / 32 + ((bitpos % 32 == 0) ? 1 : 0) || nbody == (bitpos + 31) / 32,
            $sformatf("%s: body words %0d for %0d bits", name, nbody, bitpos));
    end
    if (maxd <= 11)
      check(body_bits == opt_cost, $sformatf("%s: %0d bits, optimal %0d", name, body_bits, opt_cost));
    else
      check(body_bits >= opt_cost, $sformatf("%s: %0d bits below optimal %0d", name, body_bits, opt_cost));
    if (n_clipped != 0) n_clip_pages++;
    $display("%s: %0d literals, %0d bits (optimal %0d), max depth %0d, clipped %0d",
             name, nl, body_bits, opt_cost, maxd, n_clipped);
  endtask

  initial begin
    lit_valid = 0; lit_data = 0; lit_cnt = 0; lit_end = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // uniform bytes
    nl = 3000;
    for (int i = 0; i < nl; i++) lits[i] = 8'($urandom);
    run_page("uniform");
    // text-like skew
    nl = 4096;
    for (int i = 0; i < nl; i++) lits[i] = 8'(97 + ($urandom_range(25) * $urandom_range(25)) / 25);
    run_page("skew");
    // Fibonacci-like: deep tree
    begin
      int a, b, t, k;
      a = 1; b = 1; k = 0;
      for (int s = 0; s < 18 && k < N; s++) begin
        for (int r = 0; r < a && k < N; r++) begin lits[k] = 8'(s * 5); k++; end
        t = a + b; a = b; b = t;
      end
      nl = k;
      for (int i = nl - 1; i > 0; i--) begin
        int j;
        byte unsigned x;
        j = $urandom_range(i);
        x = lits[i]; lits[i] = lits[j]; lits[j] = x;
      end
    end
    run_page("fib");
    // one symbol, few literals
    nl = 7;
    for (int i = 0; i < nl; i++) lits[i] = 8'h41;
    run_page("single");
    // no literals
    nl = 0;
    run_page("empty");
    check(n_clip_pages > 0, "length limiting happened");
    $display("mechanisms: clipped_pages=%0d", n_clip_pages);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
