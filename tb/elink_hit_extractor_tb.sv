// elink_hit_extractor_tb -- self-checking test of ToA/ToT extraction.
//
// Builds a random sample stream of discriminator pulses (gaps of 1 to 120
// samples, widths of 1 to 320 samples, so that pulses share words, cross
// word boundaries, end exactly on a boundary and overflow the ToT counter),
// cuts it into 32-sample BX words and feeds one word per cycle.  A
// reference model working on the sample list itself (not on words) gives,
// for every word, the expected hit and fine ToA (first leading edge of the
// word) and the ToT of each timed pulse in the word where it ends.  Also
// checks the one-cycle output latency.
module elink_hit_extractor_tb;
  import fbcm_pkg::*;
  localparam int NW = 3000;
  localparam int NS = NW * SAMPLES_PER_BX;

  logic clk = 0, rst_n = 0;
  logic [SAMPLES_PER_BX-1:0] data = '0;
  hit_t hit;
  tot_t tot_a, tot_b;

  bit   s [NS];
  bit   exp_hit [NW];
  int   exp_toa [NW];
  int   exp_tot_a [NW];   // -1: none
  int   exp_tot_b [NW];
  int   checks = 0, failures = 0, n_hits = 0, n_a = 0, n_b = 0, n_sat = 0;

  elink_hit_extractor dut (.clk, .rst_n, .data_i(data), .hit_o(hit), .tot_a_o(tot_a), .tot_b_o(tot_b));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #(10 * (NW + 100));
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p;
    // stream
    p = 0;
    while (p < NS) begin
      int gap, w;
      gap = ($urandom_range(3) == 0) ? $urandom_range(1, 8) : $urandom_range(1, 120);
      w   = ($urandom_range(9) == 0) ? $urandom_range(200, 320) : $urandom_range(1, 40);
      p += gap;
      for (int i = 0; i < w && p < NS; i++) s[p++] = 1'b1;
    end
    // reference model
    for (int w = 0; w < NW; w++) begin exp_hit[w] = 0; exp_toa[w] = 0; exp_tot_a[w] = -1; exp_tot_b[w] = -1; end
    for (int i = 0; i < NS; i++) begin
      bit prev;
      prev = (i == 0) ? 1'b0 : s[i-1];
      if (s[i] && !prev) begin
        int w, e;
        w = i / SAMPLES_PER_BX;
        if (!exp_hit[w]) begin
          exp_hit[w] = 1;
          exp_toa[w] = i % SAMPLES_PER_BX;
          e = i;
          while (e < NS && s[e]) e++;
          if (e < NS) begin
            int tot;
            tot = (e - i > 255) ? 255 : e - i;
            if (e / SAMPLES_PER_BX == w) exp_tot_b[w] = tot;
            else                         exp_tot_a[e / SAMPLES_PER_BX] = tot;
          end
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w <= NW; w++) begin
      @(negedge clk);
      if (w > 0) begin
        int v;
        v = w - 1;
        check(hit.valid == exp_hit[v], $sformatf("word %0d: hit %0d expected %0d", v, hit.valid, exp_hit[v]));
        if (exp_hit[v]) begin
          check(int'(hit.toa) == exp_toa[v], $sformatf("word %0d: toa %0d expected %0d", v, hit.toa, exp_toa[v]));
          n_hits++;
        end
        check(tot_a.valid == (exp_tot_a[v] >= 0), $sformatf("word %0d: tot_a valid %0d", v, tot_a.valid));
        if (exp_tot_a[v] >= 0) begin
          check(int'(tot_a.tot) == exp_tot_a[v], $sformatf("word %0d: tot_a %0d expected %0d", v, tot_a.tot, exp_tot_a[v]));
          n_a++;
          if (exp_tot_a[v] == 255) n_sat++;
        end
        check(tot_b.valid == (exp_tot_b[v] >= 0), $sformatf("word %0d: tot_b valid %0d", v, tot_b.valid));
        if (exp_tot_b[v] >= 0) begin
          check(int'(tot_b.tot) == exp_tot_b[v], $sformatf("word %0d: tot_b %0d expected %0d", v, tot_b.tot, exp_tot_b[v]));
          n_b++;
        end
      end
      if (w < NW) for (int i = 0; i < SAMPLES_PER_BX; i++) data[i] = s[w * SAMPLES_PER_BX + i];
      else data = '0;
    end
    $display("hits %0d, ToT across words %0d (saturated %0d), ToT inside a word %0d", n_hits, n_a, n_sat, n_b);
    check(n_hits > 100 && n_a > 50 && n_b > 50 && n_sat > 5, "stream did not exercise all cases");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
