// tb_huff_len_limit: self-checking test of the 11-bit Huffman length limiter.
//
// For each case the test builds a true (unbounded) Huffman tree from a
// frequency table in plain procedural code, streams the leaf depths in and
// checks the lengths that come back: every present symbol gets a length of
// 1..11 and every absent one 0; the code is complete (Kraft sum exactly
// 2^11 in 2^-11 units) when two or more symbols are present; a symbol that
// was shallower never gets a longer code than a deeper one; a tree already
// within 11 levels comes back unchanged; and the scan-to-output time stays
// within 256 + 10 + 11 clocks. Frequency tables include Fibonacci-like ones
// that force depths well past 11, so that clipping, redistribution and
// hole repair all run.
module tb_huff_len_limit;

  localparam int NSYM = 256;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge before the first clock
  always #5 clk = ~clk;

  logic       in_valid;
  logic [7:0] in_depth;
  logic       in_ready;
  logic       out_valid;
  logic [7:0] out_sym;
  logic [3:0] out_len;
  logic       out_last;
  logic [8:0] n_clipped;
  logic       repaired;

  huff_len_limit dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int n_clip_cases = 0, n_repair_cases = 0;
  int freq [NSYM];
  int depth [NSYM];
  int got [NSYM];
  int t_first_out, t_in_start;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Plain Huffman tree: repeatedly merge the two lightest nodes.
  task automatic build_tree();
    longint w [2*NSYM];
    int par [2*NSYM];
    bit act [2*NSYM];
    int nn = NSYM, nact = 0;
    for (int i = 0; i < 2*NSYM; i++) begin act[i] = 0; par[i] = -1; end
    for (int i = 0; i < NSYM; i++) begin
      w[i] = freq[i]; act[i] = (freq[i] > 0); nact += int'(act[i]);
    end
    if (nact == 1) begin
      for (int i = 0; i < NSYM; i++) depth[i] = (freq[i] > 0) ? 1 : 0;
      return;
    end
    while (nact > 1) begin
      int a = -1, b = -1;
      for (int i = 0; i < nn; i++) if (act[i]) begin
        if (a < 0 || w[i] < w[a]) begin b = a; a = i; end
        else if (b < 0 || w[i] < w[b]) b = i;
      end
      w[nn] = w[a] + w[b]; act[nn] = 1; act[a] = 0; act[b] = 0;
      par[a] = nn; par[b] = nn; nn++; nact--;
    end
    for (int i = 0; i < NSYM; i++) begin
      depth[i] = 0;
      if (freq[i] > 0) begin
        int n = i;
        while (par[n] >= 0) begin depth[i]++; n = par[n]; end
      end
    end
  endtask

  task automatic run_case(input string name);
    int maxd = 0, present = 0, kraft = 0;
    bit ok_len = 1, ok_mono = 1, same = 1;
    build_tree();
    foreach (depth[i]) if (depth[i] > maxd) maxd = depth[i];
    @(negedge clk);
    t_in_start = cycle;
    for (int i = 0; i < NSYM; i++) begin
      in_valid = 1; in_depth = 8'(depth[i]);
      @(negedge clk);
    end
    in_valid = 0;
    t_first_out = -1;
    for (int i = 0; i < NSYM; i++) begin
      @(posedge clk);
      while (!out_valid) @(posedge clk);
      if (t_first_out < 0) t_first_out = cycle;
      got[out_sym] = int'(out_len);
    end
    @(negedge clk);
    for (int i = 0; i < NSYM; i++) begin
      if (depth[i] == 0 && got[i] != 0) ok_len = 0;
      if (depth[i] != 0 && (got[i] < 1 || got[i] > 11)) ok_len = 0;
      if (depth[i] != 0) begin present++; kraft += 1 << (11 - got[i]); end
      if (got[i] != depth[i]) same = 0;
      for (int j = 0; j < NSYM; j++)
        if (depth[i] != 0 && depth[j] != 0 && (depth[i] < 24 ? depth[i] : 24) < (depth[j] < 24 ? depth[j] : 24)
            && got[i] > got[j]) ok_mono = 0;
    end
    check(ok_len, {name, ": lengths within 1..11, absent symbols 0"});
    if (present >= 2) check(kraft == 2048, $sformatf("%s: Kraft sum %0d", name, kraft));
    check(ok_mono, {name, ": order of lengths kept"});
    if (maxd <= 11) check(same, {name, ": tree within 11 levels unchanged"});
    // clocks from the first depth beat to the first output beat
    check(t_first_out - t_in_start <= 256 + 10 + 11 + 2,
          $sformatf("%s: %0d clocks to first output", name, t_first_out - t_in_start));
    if (maxd > 11) check(int'(n_clipped) > 0, {name, ": clipping reported"});
    if (maxd > 11) n_clip_cases++;
    if (repaired) n_repair_cases++;
    $display("%s: max depth %0d, clipped %0d, repaired %0d, %0d clocks", name, maxd,
             n_clipped, repaired, t_first_out - t_in_start);
  endtask

  initial begin
    in_valid = 0; in_depth = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // uniform random
    for (int r = 0; r < 3; r++) begin
      foreach (freq[i]) freq[i] = $urandom_range(100);
      run_case($sformatf("uniform%0d", r));
    end
    // Fibonacci-like skews over various numbers of symbols
    for (int r = 0; r < 10; r++) begin
      int ns;
      ns = 14 + 20 * r;
      if (ns > NSYM) ns = NSYM;
      foreach (freq[i]) freq[i] = 0;
      begin
        int a, b, t, s;
        a = 1; b = 1;
        for (int i = 0; i < ns; i++) begin
          s = (i * 37 + r) % NSYM;
          freq[s] = (i < 30) ? a : $urandom_range(3, 1);
          if (i < 30) begin t = a + b; a = b; b = t; end
        end
      end
      run_case($sformatf("skew%0d", r));
    end
    // geometric with random extras
    for (int r = 0; r < 6; r++) begin
      foreach (freq[i]) freq[i] = 0;
      for (int i = 0; i < 24; i++) freq[$urandom_range(NSYM - 1)] = 1 << ($urandom_range(20));
      for (int i = 0; i < 40 * r; i++) freq[$urandom_range(NSYM - 1)] = $urandom_range(4, 1);
      run_case($sformatf("geo%0d", r));
    end
    // one and two symbols
    foreach (freq[i]) freq[i] = 0;
    freq[65] = 10;
    run_case("single");
    freq[66] = 3;
    run_case("pair");

    check(n_clip_cases > 0, "depth clipping happened");
    check(n_repair_cases > 0, "hole repair happened");
    $display("mechanisms: clip_cases=%0d repair_cases=%0d", n_clip_cases, n_repair_cases);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
