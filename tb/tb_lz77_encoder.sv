// tb_lz77_encoder: self-checking test of the LZ77 page encoder.
//
// Each test page is loaded, and the literal bytes and sequences that come
// out are decoded again here in plain procedural code (an LZ77 decode is a
// few lines) and compared byte for byte with the page. Further checks:
// every sequence has an offset inside the page and a match of at least 4
// bytes; the sum of LL and ML over all sequences is the page size; a page
// with no repeated 4-byte word gives no match and takes one clock per four
// bytes; an all-zero page gives one long match that is extended 8 bytes per
// clock. The pages: a no-repeat page, an all-zero page, random bytes from a
// small alphabet, and text-like pages built from copies of earlier pieces.
module tb_lz77_encoder;
  import dpzip_pkg::*;

  localparam int unsigned N = 4096;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge before the first clock
  always #5 clk = ~clk;

  logic        in_valid;
  logic [63:0] in_data;
  logic        in_ready;
  logic        lit_valid;
  logic [31:0] lit_data;
  logic [2:0]  lit_cnt;
  logic        seq_valid;
  seq_t        seq;
  logic        busy, done;

  lz77_encoder dut (.*);

  int checks = 0, failures = 0;
  byte unsigned page [N];
  byte unsigned lits [N];
  int  nlits;
  seq_t seqs [$];
  int  cyc_start, cyc_done, cycle = 0;
  int  n_match_total = 0, n_lazy_skip_pages = 0;

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (lit_valid) begin
      for (int i = 0; i < int'(lit_cnt); i++) begin
        lits[nlits] = lit_data[8*i +: 8];
        nlits++;
      end
    end
    if (seq_valid) seqs.push_back(seq);
    if (done) cyc_done = cycle;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic run_page();
    nlits = 0;
    seqs.delete();
    @(negedge clk);
    for (int b = 0; b < N / 8; b++) begin
      in_valid = 1'b1;
      for (int k = 0; k < 8; k++) in_data[8*k +: 8] = page[8*b + k];
      @(negedge clk);
    end
    in_valid = 1'b0;
    cyc_start = cycle;
    wait (done);
    @(posedge clk);
    @(negedge clk);
  endtask

  // Rebuild the page from the outputs and compare.
  task automatic verify(input string name);
    byte unsigned out [N];
    int o = 0, li = 0, total = 0;
    bit ok = 1, seq_ok = 1, last_ok;
    foreach (seqs[s]) begin
      for (int i = 0; i < int'(seqs[s].ll); i++) begin
        if (o < N && li < nlits) out[o] = lits[li];
        o++; li++;
      end
      if (!seqs[s].last) begin
        if (seqs[s].off == 0 || int'(seqs[s].off) > o || seqs[s].ml < MIN_MATCH) seq_ok = 0;
        for (int i = 0; i < int'(seqs[s].ml); i++) begin
          if (o < N && int'(seqs[s].off) <= o) out[o] = out[o - int'(seqs[s].off)];
          o++;
        end
      end
      total += int'(seqs[s].ll) + int'(seqs[s].ml);
    end
    last_ok = (seqs.size() > 0) && seqs[$].last;
    check(last_ok, {name, ": last sequence flagged"});
    check(seq_ok, {name, ": sequence fields legal"});
    check(total == N, $sformatf("%s: LL+ML sum %0d", name, total));
    check(li == nlits, $sformatf("%s: literal count %0d vs %0d", name, li, nlits));
    for (int i = 0; i < N; i++) if (out[i] != page[i]) ok = 0;
    check(ok, {name, ": decoded page equals input"});
    n_match_total += seqs.size() - 1;
  endtask

  initial begin
    int unsigned expected;
    in_valid = 0;
    in_data  = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. No 4-byte word repeats: only literals, 4 bytes per clock.
    for (int j = 0; j < N / 2; j++) begin
      page[2*j]     = {1'b0, 7'(j)};
      page[2*j + 1] = {1'b1, 7'(j >> 7)};
    end
    run_page();
    verify("norepeat");
    check(seqs.size() == 1 && nlits == N, "norepeat: no match found");
    // groups while p+5 <= N, one clock each; then 1 clock to leave SCAN,
    // ceil(rest/4) flush clocks, 1 clock to see the end, 1 for the last sequence
    expected = (N - 5) / 4 + 1;
    expected = expected + 1 + (N - 4 * expected + 3) / 4 + 1 + 1;
    check(cyc_done - cyc_start == int'(expected),
          $sformatf("norepeat: %0d clocks, expected %0d", cyc_done - cyc_start, expected));
    n_lazy_skip_pages++;

    // 2. All zero: one match over the page, extended 8 bytes per clock.
    for (int i = 0; i < N; i++) page[i] = 8'h00;
    run_page();
    verify("zeros");
    check(seqs.size() == 2 && seqs[0].ll == 4 && seqs[0].ml == N - 4 && seqs[0].off == 3,
          $sformatf("zeros: one match ll=%0d ml=%0d off=%0d", seqs[0].ll, seqs[0].ml, seqs[0].off));
    check(cyc_done - cyc_start <= int'(N / 8 + 8),
          $sformatf("zeros: %0d clocks for %0d bytes", cyc_done - cyc_start, N));

    // 3. Random bytes over small alphabets.
    for (int r = 0; r < 4; r++) begin
      int unsigned alpha = (r == 0) ? 2 : (r == 1) ? 4 : (r == 2) ? 16 : 256;
      for (int i = 0; i < N; i++) page[i] = 8'($urandom_range(alpha - 1));
      run_page();
      verify($sformatf("random%0d", alpha));
    end

    // 4. Text-like: random runs copied from earlier in the page.
    for (int r = 0; r < 4; r++) begin
      int i = 0;
      while (i < N) begin
        if (i > 64 && $urandom_range(1) == 1) begin
          int src = $urandom_range(i - 1);
          int len = $urandom_range(40, 3);
          for (int k = 0; k < len && i < N; k++) begin page[i] = page[src + k]; i++; end
        end else begin
          int len = $urandom_range(12, 1);
          for (int k = 0; k < len && i < N; k++) begin page[i] = 8'($urandom_range(97, 122)); i++; end
        end
      end
      run_page();
      verify($sformatf("text%0d", r));
    end

    check(n_match_total > 100, $sformatf("matches found overall: %0d", n_match_total));
    $display("mechanisms: matches=%0d literal-only pages=%0d", n_match_total, n_lazy_skip_pages);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
