// fbcm_quadrant -- digital logic of one FBCM service quadrant, end to end.
//
// A service quadrant reads three front-end modules.  Each carries one
// FBCM23 ASIC whose six channels amplify and discriminate the signals of
// six silicon-pad sensors and drive one eLink each; three lpGBT
// transceivers sample the 18 eLinks every 0.78 ns and send them over
// optical links to an FPGA back-end board, which extracts the ToA and ToT
// of every pulse and histograms them bunch by bunch.
//
// This module holds the logic parts of that chain:
//   * three fbcm23_ctrl blocks, the I2C slow control and triple-redundant
//     registers of the ASICs (clock ctrl_clk), each on its own I2C bus;
//   * one fbcm_backend, the histogramming firmware for the 18 channels
//     (clock bx_clk, the 40 MHz LHC bunch clock).
// Between them lie parts that are not logic: the analog front end
// (threshold DAC, preamplifier, discriminator), the lpGBT samplers and the
// optical link.  Their boundary appears as ports: the analog settings go
// out on thr_code_o / cal_en_o, and the lpGBT-sampled discriminator
// outputs come in on disc_i as one 32-sample word per channel per BX.
// The ASIC's channel output enable acts on the discriminator output before
// it leaves the chip; as the sampling lies in between, it is applied here
// to the sampled words (channel c of ASIC a is eLink 6*a + c).  The enable
// is a static setting, so crossing from ctrl_clk into bx_clk through a
// two-flop synchroniser is sufficient.  The synchroniser resets to
// "disabled", so the first two words after bx_rst_n is released are
// dropped on every channel.
//
// Readout timing is that of fbcm_backend.  The chain layout (3 ASICs x 6
// channels, 18 eLinks per quadrant) follows the paper; the clocking, the
// I2C bus arrangement and the enable gating are this design's choices.
module fbcm_quadrant
  import fbcm_pkg::*;
#(
  parameter int unsigned NUM_BX        = ORBIT_BX,
  parameter int unsigned ORBITS_PER_LW = LW_ORBITS
) (
  // ASIC slow control
  input  logic                                          ctrl_clk,
  input  logic                                          ctrl_rst_n,
  input  logic [ASICS_PER_QUADRANT-1:0]                 scl_i,
  input  logic [ASICS_PER_QUADRANT-1:0]                 sda_i,
  output logic [ASICS_PER_QUADRANT-1:0]                 sda_oe,
  output logic [ASICS_PER_QUADRANT-1:0][CH_PER_ASIC-1:0][REG_W-1:0] thr_code_o,
  output logic [ASICS_PER_QUADRANT-1:0][CH_PER_ASIC-1:0] cal_en_o,
  output logic [ASICS_PER_QUADRANT-1:0]                 seu_corrected_o,
  input  logic [ASICS_PER_QUADRANT-1:0]                 seu_en_i,
  input  logic [1:0]                                    seu_copy_i,
  input  logic [$clog2(NREGS)-1:0]                      seu_reg_i,
  input  logic [$clog2(REG_W)-1:0]                      seu_bit_i,
  // sampled discriminator outputs and back end
  input  logic                                          bx_clk,
  input  logic                                          bx_rst_n,
  input  logic                                          bc0_i,
  input  logic [ELINKS_PER_QUADRANT-1:0][SAMPLES_PER_BX-1:0] disc_i,
  output logic [$clog2(NUM_BX)-1:0]                     bx_o,
  output logic                                          lw_done_o,
  output logic [31:0]                                   lw_num_o,
  input  logic [$clog2(ELINKS_PER_QUADRANT)-1:0]        rd_ch_i,
  input  hist_kind_e                                    rd_kind_i,
  input  logic [$clog2(NUM_BX)-1:0]                     rd_addr_i,
  output logic [31:0]                                   rd_data_o
);

  logic [ASICS_PER_QUADRANT-1:0][CH_PER_ASIC-1:0] ch_en;

  for (genvar a = 0; a < ASICS_PER_QUADRANT; a++) begin : g_asic
    fbcm23_ctrl u_ctrl (
      .clk(ctrl_clk), .rst_n(ctrl_rst_n),
      .scl_i(scl_i[a]), .sda_i(sda_i[a]), .sda_oe(sda_oe[a]),
      .thr_code_o(thr_code_o[a]), .ch_en_o(ch_en[a]), .cal_en_o(cal_en_o[a]),
      .seu_corrected_o(seu_corrected_o[a]),
      .seu_en_i(seu_en_i[a]), .seu_copy_i, .seu_reg_i, .seu_bit_i
    );
  end

  // channel enables into the BX clock domain
  logic [ELINKS_PER_QUADRANT-1:0] en_s1, en_s2;
  logic [ELINKS_PER_QUADRANT-1:0][SAMPLES_PER_BX-1:0] elink;

  always_ff @(posedge bx_clk or negedge bx_rst_n) begin
    if (!bx_rst_n) begin
      en_s1 <= '0;
      en_s2 <= '0;
    end else begin
      en_s1 <= ch_en;
      en_s2 <= en_s1;
    end
  end

  always_comb begin
    for (int e = 0; e < ELINKS_PER_QUADRANT; e++)
      elink[e] = en_s2[e] ? disc_i[e] : '0;
  end

  fbcm_backend #(.N_CH(ELINKS_PER_QUADRANT), .NUM_BX(NUM_BX), .ORBITS_PER_LW(ORBITS_PER_LW)) u_be (
    .clk(bx_clk), .rst_n(bx_rst_n), .bc0_i,
    .elink_i(elink), .bx_o, .lw_done_o, .lw_num_o,
    .rd_ch_i, .rd_kind_i, .rd_addr_i, .rd_data_o
  );

endmodule
