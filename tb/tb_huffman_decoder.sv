// tb_huffman_decoder: self-checking test of the canonical Huffman decoder.
//
// The test writes streams itself, in plain procedural code: it draws
// literals, gives them code lengths from a Huffman tree it builds (kept
// within 11 levels), forms the canonical codes (Deflate rule), packs header,
// length table and codes MSB first into 32-bit words, and feeds them to the
// decoder, sometimes with gaps. Every decoded literal is compared, and with
// no gaps the decode time must be one literal per clock plus a fixed
// overhead (header, 32 length words, 256-clock table build).
module tb_huffman_decoder;

  localparam int N = 4096;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge before the first clock
  always #5 clk = ~clk;

  logic        in_valid;
  logic [31:0] in_word;
  logic        in_last;
  logic        in_ready;
  logic        out_valid;
  logic [7:0]  out_byte;
  logic        done;

  huffman_decoder dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  byte unsigned lits [N];
  byte unsigned got [$];
  int nl;
  logic [31:0] words [$];
  int t0, t1;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (out_valid) got.push_back(out_byte);
    if (done) t1 = cycle;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic make_stream(output int maxd);
    longint w [512];
    int par [512];
    bit act [512];
    int freq [256];
    int len [256];
    int cnt [12];
    int nextc [12];
    int code [256];
    int nn, nact;
    logic [31:0] cur;
    int nbits;
    nn = 256; nact = 0; maxd = 0;
    foreach (freq[i]) freq[i] = 0;
    for (int i = 0; i < nl; i++) freq[lits[i]]++;
    for (int i = 0; i < 512; i++) begin act[i] = 0; par[i] = -1; end
    for (int i = 0; i < 256; i++) begin w[i] = freq[i]; act[i] = freq[i] > 0; nact += int'(act[i]); end
    foreach (len[i]) len[i] = 0;
    if (nact == 1) begin
      foreach (freq[i]) if (freq[i] > 0) len[i] = 1;
      maxd = 1;
    end else if (nact > 1) begin
      while (nact > 1) begin
        int a, b;
        a = -1; b = -1;
        for (int i = 0; i < nn; i++) if (act[i]) begin
          if (a < 0 || w[i] < w[a]) begin b = a; a = i; end
          else if (b < 0 || w[i] < w[b]) b = i;
        end
        w[nn] = w[a] + w[b]; act[nn] = 1; act[a] = 0; act[b] = 0;
        par[a] = nn; par[b] = nn; nn++; nact--;
      end
      for (int i = 0; i < 256; i++) if (freq[i] > 0) begin
        int n;
        n = i;
        while (par[n] >= 0) begin len[i]++; n = par[n]; end
        if (len[i] > maxd) maxd = len[i];
      end
    end
    foreach (cnt[l]) cnt[l] = 0;
    foreach (len[s]) if (len[s] > 0) cnt[len[s]]++;
    begin
      int c;
      c = 0;
      for (int l = 1; l < 12; l++) begin
        c = (c + (l == 1 ? 0 : cnt[l - 1])) << 1;
        nextc[l] = c;
      end
    end
    for (int s = 0; s < 256; s++) if (len[s] > 0) begin code[s] = nextc[len[s]]; nextc[len[s]]++; end
    words.delete();
    words.push_back({16'(nl), 16'h0});
    for (int k = 0; k < 32; k++) begin
      logic [31:0] x;
      for (int j = 0; j < 8; j++) x[28 - 4*j +: 4] = 4'(len[8*k + j]);
      words.push_back(x);
    end
    cur = 0; nbits = 0;
    for (int i = 0; i < nl; i++) begin
      for (int b = len[lits[i]] - 1; b >= 0; b--) begin
        cur[31 - nbits] = 1'(code[lits[i]] >> b);
        nbits++;
        if (nbits == 32) begin words.push_back(cur); cur = 0; nbits = 0; end
      end
    end
    words.push_back(cur);   // remaining bits, or a padding word
  endtask

  task automatic run(input string name, input bit gaps);
    int maxd;
    bit ok;
    make_stream(maxd);
    if (maxd > 11) begin
      $display("%s: skipped, tree depth %0d", name, maxd);
      return;
    end
    got.delete();
    @(negedge clk);
    t0 = cycle;
    foreach (words[i]) begin
      if (gaps && $urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_word = words[i]; in_last = (i == words.size() - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    wait (done);
    @(posedge clk); @(negedge clk);
    ok = (got.size() == nl);
    for (int i = 0; i < nl && ok; i++) if (got[i] != lits[i]) ok = 0;
    check(ok, $sformatf("%s: %0d of %0d literals decoded correctly", name, got.size(), nl));
    if (!gaps)
      check(t1 - t0 <= nl + 1 + 32 + 256 + 8,
            $sformatf("%s: %0d clocks for %0d literals", name, t1 - t0, nl));
    $display("%s: %0d literals, max length %0d, %0d clocks", name, nl, maxd, t1 - t0);
  endtask

  initial begin
    in_valid = 0; in_word = 0; in_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    nl = 4096;
    for (int i = 0; i < nl; i++) lits[i] = 8'($urandom);
    run("uniform", 0);
    for (int i = 0; i < nl; i++) lits[i] = 8'(97 + ($urandom_range(25) * $urandom_range(25)) / 25);
    run("skew", 0);
    nl = 1000;
    for (int i = 0; i < nl; i++) lits[i] = 8'(($urandom_range(7) == 0) ? $urandom : 8'h20);
    run("sparse_gaps", 1);
    nl = 5;
    for (int i = 0; i < nl; i++) lits[i] = 8'h7e;
    run("single", 0);
    nl = 0;
    run("empty", 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
