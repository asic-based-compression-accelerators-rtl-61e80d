// tb_lz77_decoder: self-checking test of the LZ77 page decoder.
//
// The test draws random sequence lists for a page (short overlapping
// offsets below 8, offsets up to 256 served by the recent-data buffer, and
// long offsets served by the history SRAM), works out the expected page in
// plain procedural code, feeds literals and sequences to the decoder and
// compares every output byte. With all literals loaded up front it also
// checks the clock count: one clock per sequence plus ceil(LL/8) + ceil(ML/8).
// One page feeds the literals one byte every fourth clock so that the
// literal pipeline has to wait. Event counts show that every path ran.
module tb_lz77_decoder;
  import dpzip_pkg::*;

  localparam int unsigned N = 4096;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // reset edge before the first clock
  always #5 clk = ~clk;

  logic        lit_valid;
  logic [63:0] lit_data;
  logic [3:0]  lit_cnt;
  logic        seq_valid;
  seq_t        seq;
  logic        seq_ready;
  logic        out_valid;
  logic [63:0] out_data;
  logic [3:0]  out_cnt;
  logic        out_last;
  logic        done;
  logic        ev_short_copy, ev_long_copy, ev_lit_stall;

  lz77_decoder dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int n_short = 0, n_long = 0, n_stall = 0, n_overlap = 0;
  byte unsigned exp_page [N];
  byte unsigned got_page [N];
  byte unsigned lits [N];
  int nlits, ngot;
  seq_t seqs [$];
  int cyc_start, cyc_done;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (out_valid) begin
      for (int i = 0; i < int'(out_cnt); i++) begin
        if (ngot < N) got_page[ngot] = out_data[8*i +: 8];
        ngot++;
      end
    end
    if (done) cyc_done = cycle;
    n_short += int'(ev_short_copy);
    n_long  += int'(ev_long_copy);
    n_stall += int'(ev_lit_stall);
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Random sequence list covering exactly N bytes.
  task automatic make_page(input int mode);
    int o = 0;
    seq_t s;
    nlits = 0;
    seqs.delete();
    while (o < N) begin
      int ll = $urandom_range(20);
      int ml, off;
      if (o == 0 && ll == 0) ll = 1;
      if (o + ll > N) ll = N - o;
      for (int i = 0; i < ll; i++) begin
        lits[nlits] = 8'($urandom);
        exp_page[o] = lits[nlits];
        nlits++; o++;
      end
      if (o >= N) begin
        s.last = 1; s.ll = LEN_W'(ll); s.ml = 0; s.off = 0;
        seqs.push_back(s);
        break;
      end
      ml = $urandom_range(40, 4);
      if (o + ml > N) ml = N - o;
      case ($urandom_range(2))
        0: off = $urandom_range(7, 1);
        1: off = $urandom_range(256, 8);
        default: off = $urandom_range(4095, 257);
      endcase
      if (mode == 1) off = $urandom_range(7, 1);
      if (off > o) off = o;
      if (off < 8) n_overlap++;
      for (int i = 0; i < ml; i++) begin exp_page[o] = exp_page[o - off]; o++; end
      s.last = (o >= N); s.ll = LEN_W'(ll); s.ml = LEN_W'(ml); s.off = LEN_W'(off);
      seqs.push_back(s);
    end
  endtask

  task automatic run_page(input bit slow_lits);
    int expect_cyc = 0;
    ngot = 0;
    foreach (seqs[i]) expect_cyc += 1 + (int'(seqs[i].ll) + 7) / 8 + (int'(seqs[i].ml) + 7) / 8;
    fork
      begin
        int i = 0;
        while (i < nlits) begin
          @(negedge clk);
          if (slow_lits) begin
            lit_valid = 1; lit_cnt = 1; lit_data = {56'h0, lits[i]}; i++;
            @(negedge clk); lit_valid = 0;
            repeat (2) @(negedge clk);
          end else begin
            int c = (nlits - i > 8) ? 8 : nlits - i;
            lit_valid = 1; lit_cnt = 4'(c);
            for (int k = 0; k < 8; k++) lit_data[8*k +: 8] = (k < c) ? lits[i + k] : 8'h00;
            i += c;
          end
        end
        @(negedge clk); lit_valid = 0;
      end
      begin
        if (!slow_lits) begin
          // all literals are in before the first sequence
          repeat (nlits / 8 + 3) @(negedge clk);
        end
        cyc_start = cycle;
        foreach (seqs[i]) begin
          seq_valid = 1; seq = seqs[i];
          @(posedge clk);
          while (!seq_ready) @(posedge clk);
          @(negedge clk);
          seq_valid = 0;
        end
      end
    join
    wait (done);
    @(posedge clk); @(negedge clk);
    begin
      bit ok = 1;
      for (int i = 0; i < N; i++) if (got_page[i] != exp_page[i]) ok = 0;
      check(ngot == N, $sformatf("output byte count %0d", ngot));
      check(ok, "output page equals expected page");
      if (!slow_lits)
        check(cyc_done - cyc_start <= expect_cyc + 1,
              $sformatf("clocks %0d, expected at most %0d", cyc_done - cyc_start, expect_cyc + 1));
    end
  endtask

  initial begin
    lit_valid = 0; lit_data = 0; lit_cnt = 0; seq_valid = 0; seq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 6; p++) begin
      make_page(p == 1 ? 1 : 0);
      run_page(1'b0);
    end
    make_page(0);
    run_page(1'b1);
    check(n_short > 0, "short-offset copies ran");
    check(n_long > 0, "long-offset copies ran");
    check(n_stall > 0, "literal pipeline waited for literals");
    check(n_overlap > 0, "overlapping copies ran");
    $display("mechanisms: short=%0d long=%0d lit_stall=%0d overlap=%0d", n_short, n_long, n_stall, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
