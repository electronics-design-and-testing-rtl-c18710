// fbcm_backend -- back-end histogramming firmware for one service quadrant.
//
// Input: the 18 eLink streams of a quadrant (three FBCM23 ASICs, six
// channels each) after the optical link has been decoded, one 32-sample
// word per eLink per 40 MHz BX clock cycle, bit 0 the earliest 0.78 ns
// sample.  For every channel the block
//   1. extracts the first leading edge of each BX word (hit, fine ToA) and
//      the width of its pulse (ToT)            -- elink_hit_extractor;
//   2. counts the hits per BX identifier over a lumi word
//                                              -- bx_histogram;
//   3. histograms the fine ToA (32 bins of 0.78 ns) and the ToT (64 bins of
//      one sample, last bin = overflow) over the same lumi word
//                                              -- fine_histogram (two).
// A single bx_counter supplies the BX identifier and the lumi-word timing
// to all channels.
//
// Timing: the word on elink_i in a cycle belongs to the BX shown by that
// cycle's bx_counter (bx_o is also brought out).  Three cycles after the
// last BX of a lumi word, lw_done_o pulses and lw_num_o gives the number of
// that lumi word; from then on, and until the next lw_done_o, every
// histogram of that lumi word can be read: rd_data_o shows bin rd_addr_i of
// histogram rd_kind_i of channel rd_ch_i one cycle after they are applied.
//
// The per-BX, ToA and ToT histograms and the lumi word follow the paper;
// the pipeline, the readout port and the histogram sizes of the ToA/ToT
// histograms are this design's choices.
module fbcm_backend
  import fbcm_pkg::*;
#(
  parameter int unsigned N_CH          = ELINKS_PER_QUADRANT,
  parameter int unsigned NUM_BX        = ORBIT_BX,
  parameter int unsigned ORBITS_PER_LW = LW_ORBITS
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 bc0_i,
  input  logic [N_CH-1:0][SAMPLES_PER_BX-1:0]  elink_i,
  output logic [$clog2(NUM_BX)-1:0]            bx_o,
  output logic                                 lw_done_o,
  output logic [31:0]                          lw_num_o,
  input  logic [$clog2(N_CH)-1:0]              rd_ch_i,
  input  hist_kind_e                           rd_kind_i,
  input  logic [$clog2(NUM_BX)-1:0]            rd_addr_i,
  output logic [31:0]                          rd_data_o
);

  localparam int unsigned BXW    = $clog2(NUM_BX);
  localparam int unsigned BCNT_W = $clog2(ORBITS_PER_LW + 1);

  logic [BXW-1:0] bx, bx_d1;
  logic           first_orbit, first_d1;
  logic           lw_last, lw_last_d1, lw_last_d2, lw_last_d3;
  logic [31:0]    lw_num;

  bx_counter #(.NUM_BX(NUM_BX), .ORBITS_PER_LW(ORBITS_PER_LW)) u_bx (
    .clk, .rst_n, .bc0_i,
    .bx_o(bx), .orbit_o(), .first_orbit_o(first_orbit),
    .lw_last_o(lw_last), .lw_num_o(lw_num)
  );

  assign bx_o = bx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bx_d1      <= '0;
      first_d1   <= 1'b0;
      lw_last_d1 <= 1'b0;
      lw_last_d2 <= 1'b0;
      lw_last_d3 <= 1'b0;
      lw_num_o   <= '0;
    end else begin
      bx_d1      <= bx;
      first_d1   <= first_orbit;
      lw_last_d1 <= lw_last;
      lw_last_d2 <= lw_last_d1;
      lw_last_d3 <= lw_last_d2;
      if (lw_last) lw_num_o <= lw_num;
    end
  end

  assign lw_done_o = lw_last_d3;

  logic [N_CH-1:0][BCNT_W-1:0] bx_rd;
  logic [N_CH-1:0][31:0]       toa_rd, tot_rd;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    hit_t hit;
    tot_t tot_a, tot_b;

    elink_hit_extractor u_ext (
      .clk, .rst_n, .data_i(elink_i[c]),
      .hit_o(hit), .tot_a_o(tot_a), .tot_b_o(tot_b)
    );

    bx_histogram #(.NUM_BX(NUM_BX), .CNT_W(BCNT_W)) u_bxh (
      .clk, .rst_n,
      .bx_i(bx_d1), .hit_i(hit.valid), .first_orbit_i(first_d1),
      .lw_last_i(lw_last_d1),
      .rd_addr_i(rd_addr_i), .rd_data_o(bx_rd[c])
    );

    fine_histogram #(.NBINS(SAMPLES_PER_BX), .CNT_W(32)) u_toah (
      .clk, .rst_n,
      .a_valid_i(hit.valid), .a_bin_i(hit.toa),
      .b_valid_i(1'b0),      .b_bin_i('0),
      .lw_last_i(lw_last_d1),
      .rd_addr_i(rd_addr_i[TOA_W-1:0]), .rd_data_o(toa_rd[c])
    );

    fine_histogram #(.NBINS(TOT_BINS), .CNT_W(32)) u_toth (
      .clk, .rst_n,
      .a_valid_i(tot_a.valid), .a_bin_i(tot_bin(tot_a.tot)),
      .b_valid_i(tot_b.valid), .b_bin_i(tot_bin(tot_b.tot)),
      .lw_last_i(lw_last_d1),
      .rd_addr_i(rd_addr_i[$clog2(TOT_BINS)-1:0]), .rd_data_o(tot_rd[c])
    );
  end

  function automatic logic [$clog2(TOT_BINS)-1:0] tot_bin(input logic [TOT_W-1:0] t);
    return (t >= TOT_W'(TOT_BINS - 1)) ? ($clog2(TOT_BINS))'(TOT_BINS - 1)
                                       : t[$clog2(TOT_BINS)-1:0];
  endfunction

  // readout multiplexer
  logic [$clog2(N_CH)-1:0] rd_ch_q;
  hist_kind_e              rd_kind_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ch_q   <= '0;
      rd_kind_q <= HIST_BX;
    end else begin
      rd_ch_q   <= rd_ch_i;
      rd_kind_q <= rd_kind_i;
    end
  end

  always_comb begin
    unique case (rd_kind_q)
      HIST_BX:  rd_data_o = 32'(bx_rd[rd_ch_q]);
      HIST_TOA: rd_data_o = toa_rd[rd_ch_q];
      HIST_TOT: rd_data_o = tot_rd[rd_ch_q];
      default:  rd_data_o = '0;
    endcase
  end

endmodule
