// fbcm_pkg -- constants and types shared by the FBCM readout RTL.
//
// One service quadrant of the Fast Beam Condition Monitor holds three
// front-end modules, each with one FBCM23 ASIC of six channels; every
// channel output goes to its own lpGBT eLink input, so a quadrant delivers
// 18 binary streams to the back end.  The lpGBT samples each stream with a
// 0.78 ns bin, i.e. 32 samples per 25 ns bunch crossing (BX).  The back end
// histograms hits per BX of the LHC orbit over a "lumi word" of about one
// second.
//
// The channel counts and the 0.78 ns sampling follow the paper.  The orbit
// length (3564 BX) and the lumi word length (11245 orbits = 1.0 s at the LHC
// revolution frequency of 11.245 kHz) are standard LHC figures; the paper
// only says "about 1 second".  Counter and code widths are this design's
// own choices.
package fbcm_pkg;

  localparam int unsigned CH_PER_ASIC        = 6;
  localparam int unsigned ASICS_PER_QUADRANT = 3;
  localparam int unsigned ELINKS_PER_QUADRANT = CH_PER_ASIC * ASICS_PER_QUADRANT;  // 18

  localparam int unsigned SAMPLES_PER_BX = 32;     // 25 ns / 0.78125 ns
  localparam int unsigned TOA_W          = $clog2(SAMPLES_PER_BX);  // 5
  localparam int unsigned TOT_W          = 8;      // ToT in samples, saturating at 255

  localparam int unsigned ORBIT_BX       = 3564;   // bunch crossings per LHC orbit
  localparam int unsigned LW_ORBITS      = 11245;  // orbits per lumi word (~1 s)

  localparam int unsigned TOT_BINS       = 64;     // ToT histogram, 1 sample per bin, last bin = overflow

  // Control register map of the FBCM23 slow-control block (this design's own).
  localparam int unsigned NREGS          = 16;
  localparam int unsigned REG_W          = 8;
  localparam int unsigned REG_THR0       = 0;      // 0..5: threshold DAC code, channel 0..5
  localparam int unsigned REG_CH_EN      = 6;      // bit i: channel i output enabled
  localparam int unsigned REG_CAL_EN     = 7;      // bit i: calibration strobe routed to channel i

  // Histogram kinds selectable on the back-end readout port.
  typedef enum logic [1:0] {
    HIST_BX  = 2'd0,
    HIST_TOA = 2'd1,
    HIST_TOT = 2'd2
  } hist_kind_e;

  // One timed pulse leading edge: the BX word it was found in and its fine
  // time inside that word.
  typedef struct packed {
    logic             valid;
    logic [TOA_W-1:0] toa;
  } hit_t;

  // One completed pulse width.
  typedef struct packed {
    logic             valid;
    logic [TOT_W-1:0] tot;
  } tot_t;

endpackage
