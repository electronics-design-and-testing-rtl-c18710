// fine_histogram -- small per-channel histogram of ToA or ToT values.
//
// NBINS counters, each CNT_W bits wide, integrated over one lumi word.  Up
// to two entries per cycle can be added (port a and port b, as the ToT
// extractor can finish two pulses in one BX); two entries in the same bin
// add two.  Counters saturate at their maximum.  At lw_last_i the
// accumulated counts, including that cycle's entries, are copied into a
// frozen set of counters for readout and the accumulating set restarts
// from zero.
//
// Readout: rd_data_o shows frozen bin rd_addr_i one cycle after rd_addr_i.
// The frozen set is valid from the cycle after lw_last_i until the next
// lumi word ends.
//
// The paper says the back end builds ToA and ToT histograms; the bin count,
// counter width, two entry ports and saturation are this design's choices.
module fine_histogram #(
  parameter int unsigned NBINS = 32,
  parameter int unsigned CNT_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     a_valid_i,
  input  logic [$clog2(NBINS)-1:0] a_bin_i,
  input  logic                     b_valid_i,
  input  logic [$clog2(NBINS)-1:0] b_bin_i,
  input  logic                     lw_last_i,
  input  logic [$clog2(NBINS)-1:0] rd_addr_i,
  output logic [CNT_W-1:0]         rd_data_o
);

  logic [CNT_W-1:0] acc    [NBINS];
  logic [CNT_W-1:0] frozen [NBINS];

  function automatic logic [CNT_W-1:0] add_sat(input logic [CNT_W-1:0] v, input logic [1:0] inc);
    logic [CNT_W:0] s;
    s = {1'b0, v} + (CNT_W+1)'(inc);
    return s[CNT_W] ? '1 : s[CNT_W-1:0];
  endfunction

  // entries per bin this cycle
  logic [NBINS-1:0]      hit_a, hit_b;
  logic [NBINS-1:0][1:0] inc;
  logic [CNT_W-1:0]      upd [NBINS];

  always_comb begin
    hit_a = a_valid_i ? (NBINS'(1) << a_bin_i) : '0;
    hit_b = b_valid_i ? (NBINS'(1) << b_bin_i) : '0;
    for (int i = 0; i < NBINS; i++) begin
      inc[i] = 2'(hit_a[i]) + 2'(hit_b[i]);
      upd[i] = add_sat(acc[i], inc[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NBINS; i++) acc[i] <= '0;
    end else begin
      for (int i = 0; i < NBINS; i++) acc[i] <= lw_last_i ? '0 : upd[i];
    end
  end

  always_ff @(posedge clk) begin
    if (lw_last_i) frozen <= upd;
    rd_data_o <= frozen[rd_addr_i];
  end

endmodule
