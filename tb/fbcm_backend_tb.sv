// fbcm_backend_tb -- self-checking test of the quadrant back-end firmware.
//
// Four channels, a 40-BX orbit and 16-orbit lumi words.  Random pulse
// streams (see fbcm_stream_ref.svh) are cut into words and fed one word per
// BX cycle.  After each lumi_word the testbench waits for lw_done_o, checks
// lw_num_o, and during the next lumi word reads every bin of the BX, ToA and
// ToT histogram of every channel through the readout port, comparing with
// histograms computed from the sample stream.  It also checks that the
// BX identifier advances in step with the words and that lw_done_o comes
// exactly 3 cycles after the last BX of a lumi word.
module fbcm_backend_tb;
  import fbcm_pkg::*;
  localparam int NCH = 4, NBX = 40, NORB = 16, NLWC = 3;
  localparam int NW  = (NLWC + 1) * NBX * NORB;
  localparam int NREAD = NCH * (NBX + 32 + 64);

  logic clk = 0, rst_n = 0, bc0 = 0;
  logic [NCH-1:0][31:0] elink = '0;
  logic [5:0] bx, rd_addr = 0;
  logic lw_done;
  logic [31:0] lw_num, rd_data;
  logic [1:0] rd_ch = 0;
  hist_kind_e rd_kind = HIST_BX;

  bit s [NCH][NW*32];
  int exp_bx [NLWC][NCH][NBX];
  int exp_toa [NLWC][NCH][32];
  int exp_tot [NLWC][NCH][64];
  int n_cross = 0, n_double = 0, n_overflow = 0;
  int checks = 0, failures = 0, reads = 0, lw_seen = 0;

  fbcm_backend #(.N_CH(NCH), .NUM_BX(NBX), .ORBITS_PER_LW(NORB)) dut (
    .clk, .rst_n, .bc0_i(bc0), .elink_i(elink), .bx_o(bx),
    .lw_done_o(lw_done), .lw_num_o(lw_num),
    .rd_ch_i(rd_ch), .rd_kind_i(rd_kind), .rd_addr_i(rd_addr), .rd_data_o(rd_data)
  );

  always #5 clk = ~clk;

  `include "fbcm_stream_ref.svh"

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #(10 * (NW + 200));
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // readout item r of lumi word l: channel, kind, bin
  function automatic void item(input int r, output int c, output hist_kind_e k, output int b);
    c = r / (NBX + 96);
    b = r % (NBX + 96);
    if (b < NBX)           k = HIST_BX;
    else if (b < NBX + 32) begin k = HIST_TOA; b -= NBX; end
    else                   begin k = HIST_TOT; b -= NBX + 32; end
  endfunction

  function automatic int expected(input int l, input int c, input hist_kind_e k, input int b);
    case (k)
      HIST_BX:  return exp_bx[l][c][b];
      HIST_TOA: return exp_toa[l][c][b];
      default:  return exp_tot[l][c][b];
    endcase
  endfunction

  initial begin
    int r, l, last_end;
    gen_streams(0, NLWC * NBX * NORB - 20);
    compute_expected();
    repeat (2) @(negedge clk);
    rst_n = 1;
    r = -1; l = -1; last_end = -100;
    for (int w = 0; w < NW; w++) begin
      check(int'(bx) == w % NBX, $sformatf("word %0d: bx %0d", w, bx));
      for (int c = 0; c < NCH; c++)
        for (int i = 0; i < 32; i++) elink[c][i] = s[c][w * 32 + i];
      if (w % (NBX * NORB) == NBX * NORB - 1) last_end = w;
      // readout in progress
      if (r >= 0) begin
        int c, b;
        hist_kind_e k;
        if (r > 0) begin
          item(r - 1, c, k, b);
          check(int'(rd_data) == expected(l, c, k, b),
                $sformatf("lw %0d ch %0d kind %0d bin %0d: %0d expected %0d", l, c, k, b, rd_data, expected(l, c, k, b)));
          reads++;
        end
        if (r < NREAD) begin
          item(r, c, k, b);
          rd_ch = 2'(c); rd_kind = k; rd_addr = 6'(b);
          r++;
        end else r = -1;
      end
      @(negedge clk);
      if (lw_done) begin
        check(w + 1 == last_end + 3, $sformatf("lw_done in cycle %0d, lumi word ended at %0d", w + 1, last_end));
        check(int'(lw_num) == lw_seen, $sformatf("lw_num %0d expected %0d", lw_num, lw_seen));
        if (lw_seen < NLWC) begin l = lw_seen; r = 0; end
        lw_seen++;
      end
    end
    check(reads == NLWC * NREAD, $sformatf("%0d bins read, expected %0d", reads, NLWC * NREAD));
    check(n_cross > 20 && n_double > 20 && n_overflow > 5, "streams did not exercise all cases");
    $display("pulses across words %0d, extra edges in a word %0d, ToT overflow %0d, bins read %0d",
             n_cross, n_double, n_overflow, reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
