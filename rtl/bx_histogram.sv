// bx_histogram -- per-bunch-crossing hit histogram of one channel.
//
// One counter per BX identifier of the LHC orbit counts the orbits in which
// the channel had a hit in that BX, integrated over one lumi word.  This is
// the histogram luminosity is computed from, bunch by bunch.
//
// Two banks of NUM_BX counters are used alternately: while one accumulates,
// the other holds the previous lumi word's result for readout.  The banks
// swap after the cycle with lw_last_i.  Each bank is a simple dual-port
// memory (one synchronous read port, one write port).  Accumulation is a
// two-stage read-modify-write: the counter of bx_i is read in the cycle the
// hit arrives and written back one cycle later; as the BX identifier
// advances every cycle, no two consecutive accesses touch the same counter.
// During the first orbit of a lumi word (first_orbit_i) the old content is
// ignored and the counter is written with the hit alone, which clears the
// bank without spending extra cycles.  CNT_W must hold ORBITS_PER_LW.
//
// Readout: rd_data_o shows the counter rd_addr_i of the frozen bank one
// cycle after rd_addr_i is applied.  The frozen bank is complete two cycles
// after lw_last_i and stays valid until the next swap.
//
// The paper gives the binning (one bin per BX identifier) and the
// integration over a lumi word; the double buffering and the
// write-on-first-orbit clearing are this design's choices.
module bx_histogram #(
  parameter int unsigned NUM_BX = 3564,
  parameter int unsigned CNT_W  = 14
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(NUM_BX)-1:0] bx_i,
  input  logic                      hit_i,
  input  logic                      first_orbit_i,
  input  logic                      lw_last_i,
  input  logic [$clog2(NUM_BX)-1:0] rd_addr_i,
  output logic [CNT_W-1:0]          rd_data_o
);

  localparam int unsigned AW = $clog2(NUM_BX);

  logic [CNT_W-1:0] mem0 [NUM_BX];
  logic [CNT_W-1:0] mem1 [NUM_BX];
  logic [CNT_W-1:0] q0, q1;

  logic          acc_bank;                 // bank being accumulated
  logic [AW-1:0] addr0, addr1;
  // write-back stage
  logic          s1_valid, s1_bank, s1_hit, s1_first;
  logic [AW-1:0] s1_bx;
  logic [CNT_W-1:0] s1_old, s1_new;
  logic          rd_bank_q;

  assign addr0 = (acc_bank == 1'b0) ? bx_i : rd_addr_i;
  assign addr1 = (acc_bank == 1'b1) ? bx_i : rd_addr_i;

  always_ff @(posedge clk) begin
    q0 <= mem0[addr0];
    q1 <= mem1[addr1];
    if (s1_valid && s1_bank == 1'b0) mem0[s1_bx] <= s1_new;
    if (s1_valid && s1_bank == 1'b1) mem1[s1_bx] <= s1_new;
  end

  assign s1_old = s1_bank ? q1 : q0;
  assign s1_new = (s1_first ? '0 : s1_old) + CNT_W'(s1_hit);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_bank  <= 1'b0;
      s1_valid  <= 1'b0;
      s1_bank   <= 1'b0;
      s1_hit    <= 1'b0;
      s1_first  <= 1'b0;
      s1_bx     <= '0;
      rd_bank_q <= 1'b1;
    end else begin
      s1_valid  <= 1'b1;
      s1_bank   <= acc_bank;
      s1_hit    <= hit_i;
      s1_first  <= first_orbit_i;
      s1_bx     <= bx_i;
      rd_bank_q <= ~acc_bank;
      if (lw_last_i) acc_bank <= ~acc_bank;
    end
  end

  assign rd_data_o = rd_bank_q ? q1 : q0;

endmodule
