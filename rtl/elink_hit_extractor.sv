// elink_hit_extractor -- time-of-arrival and time-over-threshold of the
// discriminator pulses on one eLink.
//
// The FBCM23 output is a rectangular pulse, asynchronous to the LHC clock,
// that is high while the amplified sensor signal is above threshold.  The
// lpGBT samples it every 0.78125 ns, i.e. 32 samples per 25 ns bunch
// crossing, and the back end receives those samples as one 32-bit word per
// BX clock cycle, bit 0 being the earliest sample.  This block works on one
// word per cycle:
//   * a leading edge is a 0->1 step between consecutive samples (the last
//     sample of the previous word counts as the predecessor of bit 0);
//   * the first leading edge in the word is "the hit" of that BX: hit_o
//     carries valid and its sample index, the fine ToA (0..31, one unit =
//     0.78 ns after the start of the BX);
//   * the pulse of that hit is followed until its trailing edge, across
//     word boundaries if needed, and its width in samples is reported as
//     ToT, saturating at 2**TOT_W-1.  A pulse that ends in the word where
//     it started is reported on tot_b_o; one that started in an earlier
//     word is reported on tot_a_o in the word where it ends, so both can be
//     valid in the same cycle.
// Further pulses that begin in a word after its first one are neither
// timed nor measured (they lie within the same 25 ns and the luminosity
// histogram counts at most one hit per BX and channel).
//
// Timing: all outputs are registered and refer to the word presented one
// cycle earlier.  Extraction of ToA and ToT in the back end is the paper's;
// the bit order, the one-hit-per-BX rule and the ToT saturation are this
// design's choices.
module elink_hit_extractor
  import fbcm_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [SAMPLES_PER_BX-1:0] data_i,
  output hit_t                      hit_o,
  output tot_t                      tot_a_o,
  output tot_t                      tot_b_o
);

  localparam int unsigned N      = SAMPLES_PER_BX;
  localparam int unsigned TOT_MAX = (1 << TOT_W) - 1;

  logic             last_q;     // last sample of the previous word
  logic             track_q;    // the pulse open at the end of the previous word is being measured
  logic [TOT_W-1:0] acc_q;      // samples counted so far of that pulse

  logic [N-1:0]     rising, falling;
  logic             has_r, has_f, has_g, last_rise_first;
  logic [TOA_W-1:0] r, f, g;
  logic [TOT_W+1:0] sum_a;

  function automatic logic [TOT_W-1:0] sat(input logic [TOT_W+1:0] v);
    return (v > (TOT_W+2)'(TOT_MAX)) ? TOT_W'(TOT_MAX) : v[TOT_W-1:0];
  endfunction

  // index of the lowest set bit of v (0 when v is zero)
  function automatic logic [TOA_W-1:0] first_one(input logic [N-1:0] v);
    logic [N-1:0] low;
    low = v & (~v + 1'b1);               // isolate the lowest set bit
    first_one = '0;
    for (int k = 0; k < TOA_W; k++)      // binary encode the one-hot value
      for (int i = 0; i < N; i++)
        if (((i >> k) & 1) != 0) first_one[k] = first_one[k] | low[i];
  endfunction

  logic [N-1:0] prev_s, after_r;

  always_comb begin
    // predecessor of every sample; bit 0's is the previous word's last sample
    prev_s  = {data_i[N-2:0], last_q};
    rising  =  data_i & ~prev_s;
    falling = ~data_i &  prev_s;
    has_r   = |rising;
    has_f   = |falling;
    r       = first_one(rising);
    f       = first_one(falling);
    // trailing edge of the first pulse that starts in this word
    after_r = falling & ({N{1'b1}} << r) & ~(N'(1) << r);
    has_g   = has_r && (|after_r);
    g       = first_one(after_r);
    // the pulse still open at the end of the word is the first one of this word
    last_rise_first = has_r && !has_g;
    sum_a = (TOT_W+2)'(acc_q) + (has_f ? (TOT_W+2)'(f) : (TOT_W+2)'(N));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q  <= 1'b0;
      track_q <= 1'b0;
      acc_q   <= '0;
      hit_o   <= '0;
      tot_a_o <= '0;
      tot_b_o <= '0;
    end else begin
      last_q <= data_i[N-1];

      hit_o.valid <= has_r;
      hit_o.toa   <= r;

      // pulse carried over from the previous word
      tot_a_o.valid <= last_q && track_q && has_f;
      tot_a_o.tot   <= sat(sum_a);

      // first pulse of this word, complete inside the word
      tot_b_o.valid <= has_r && has_g;
      tot_b_o.tot   <= TOT_W'(g - r);

      // a pulse that does not end in this word leaves no room for a new one
      if (last_q && !has_f) assert (!has_r);

      if (last_q && !has_f) begin
        // the carried pulse spans the whole word
        acc_q   <= sat(sum_a);
      end else if (data_i[N-1]) begin
        // a new pulse is open at the end of this word
        track_q <= last_rise_first;
        acc_q   <= TOT_W'(N) - TOT_W'(r);
      end else begin
        track_q <= 1'b0;
      end
    end
  end


endmodule
