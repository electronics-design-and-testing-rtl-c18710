// bx_counter -- bunch-crossing and lumi-word timing of the back end.
//
// Runs on the 40 MHz BX clock.  bx_o is the bunch-crossing identifier of
// the current cycle inside the LHC orbit (0..NUM_BX-1), orbit_o the orbit
// number inside the current lumi word (0..ORBITS_PER_LW-1).  first_orbit_o
// is high during the first orbit of a lumi word (the histograms overwrite
// instead of adding then), lw_last_o during the very last BX of a lumi
// word, after which the histogram banks swap.  lw_num_o counts completed
// lumi words.
//
// bc0_i is the orbit marker of the LHC timing system: when it is high the
// next cycle is BX 0 of an orbit, which keeps the counter aligned with the
// machine; without it the counter free-runs.  Reset starts BX 0 of orbit 0
// of lumi word 0.
//
// The BX-identifier histogram binning and the roughly one-second lumi word
// are the paper's; the orbit marker input and the reset behaviour are this
// design's choices.
module bx_counter #(
  parameter int unsigned NUM_BX        = 3564,
  parameter int unsigned ORBITS_PER_LW = 11245
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             bc0_i,
  output logic [$clog2(NUM_BX)-1:0]        bx_o,
  output logic [$clog2(ORBITS_PER_LW)-1:0] orbit_o,
  output logic                             first_orbit_o,
  output logic                             lw_last_o,
  output logic [31:0]                      lw_num_o
);

  logic last_bx, last_orbit;

  assign last_bx       = (bx_o == ($clog2(NUM_BX))'(NUM_BX - 1));
  assign last_orbit    = (orbit_o == ($clog2(ORBITS_PER_LW))'(ORBITS_PER_LW - 1));
  assign first_orbit_o = (orbit_o == '0);
  assign lw_last_o     = last_bx && last_orbit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bx_o     <= '0;
      orbit_o  <= '0;
      lw_num_o <= '0;
    end else if (last_bx || bc0_i) begin
      bx_o <= '0;
      if (last_orbit) begin
        orbit_o  <= '0;
        lw_num_o <= lw_num_o + 32'd1;
      end else begin
        orbit_o <= orbit_o + 1'b1;
      end
    end else begin
      bx_o <= bx_o + 1'b1;
    end
  end

endmodule
