// fbcm_stream_ref.svh -- random discriminator streams and the histograms
// they must produce, shared by the back-end and quadrant testbenches.
//
// Expects in the including module: localparams NCH, NBX, NORB, NW (words
// per channel), NLWC (lumi words to check); arrays
//   bit s [NCH][NW*32];  int exp_bx [NLWC][NCH][NBX];
//   int exp_toa [NLWC][NCH][32];  int exp_tot [NLWC][NCH][64];
// and counters n_cross, n_double, n_overflow.
// The expected histograms are computed from the sample stream with the
// rules of the design: the first leading edge in each 32-sample word is the
// hit of that BX and its sample index the ToA; the width of that pulse in
// samples, saturated at 255, is its ToT, counted in the lumi word of the
// word where the pulse ends, in ToT bin min(ToT, 63).

task automatic gen_streams(input int busy_lw_words, input int quiet_from_word);
  for (int c = 0; c < NCH; c++) begin
    int p;
    p = $urandom_range(0, 60);
    while (p < quiet_from_word * 32) begin
      int gap, w;
      gap = ($urandom_range(3) == 0) ? $urandom_range(1, 8) : $urandom_range(1, 160);
      w   = ($urandom_range(15) == 0) ? $urandom_range(200, 300) : $urandom_range(1, 45);
      for (int i = 0; i < w && p < quiet_from_word * 32; i++) s[c][p++] = 1'b1;
      p += gap;
    end
  end
endtask

function automatic int tot_bin(input int t);
  return (t > 63) ? 63 : t;
endfunction

task automatic compute_expected();
  for (int l = 0; l < NLWC; l++)
    for (int c = 0; c < NCH; c++) begin
      for (int b = 0; b < NBX; b++) exp_bx[l][c][b] = 0;
      for (int b = 0; b < 32; b++)  exp_toa[l][c][b] = 0;
      for (int b = 0; b < 64; b++)  exp_tot[l][c][b] = 0;
    end
  for (int c = 0; c < NCH; c++) begin
    int last_timed_word;
    last_timed_word = -1;
    for (int i = 0; i < NW * 32; i++) begin
      bit prev;
      prev = (i == 0) ? 1'b0 : s[c][i-1];
      if (s[c][i] && !prev) begin
        int w, e, l;
        w = i / 32;
        if (w != last_timed_word) begin
          last_timed_word = w;
          l = w / (NBX * NORB);
          if (l < NLWC) begin
            exp_bx[l][c][w % NBX]++;
            exp_toa[l][c][i % 32]++;
          end
          e = i;
          while (e < NW * 32 && s[c][e]) e++;
          if (e < NW * 32) begin
            int t, le;
            t  = (e - i > 255) ? 255 : e - i;
            le = (e / 32) / (NBX * NORB);
            if (le < NLWC) exp_tot[le][c][tot_bin(t)]++;
            if (e / 32 != w) n_cross++;
            if (t > 63) n_overflow++;
          end
        end else n_double++;
      end
    end
  end
endtask
