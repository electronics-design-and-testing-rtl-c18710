// fbcm_quadrant_tb -- end-to-end test of one service quadrant.
//
// Reduced orbit (40 BX) and lumi word (64 orbits); everything else at the
// design's sizes: 3 ASICs, 18 eLinks, 32 samples per BX.
//   1. Over each ASIC's I2C bus, writes random threshold codes, a channel
//      enable mask (two channels of the quadrant disabled) and a
//      calibration-strobe mask, checks the analog settings on the ports and
//      reads one ASIC's registers back.
//   2. Injects single-event upsets into the register copies of every ASIC
//      and checks that no setting changes and each repair is reported.
//   3. Feeds random discriminator pulse streams on all 18 channels for four
//      lumi words (the last one quiet), with orbit markers, and after every
//      lumi word reads all BX, ToA and ToT histograms of all channels,
//      comparing them with histograms computed from the streams; disabled
//      channels must stay empty.
// Each mechanism is counted and a failure is counted for any that never
// happened: I2C writes and reads, upset repairs, gated channels, orbit
// markers, bank swaps with reuse of a bank, pulses crossing a BX boundary,
// extra edges inside one BX, ToT overflow.
module fbcm_quadrant_tb;
  import fbcm_pkg::*;
  localparam int NCH = ELINKS_PER_QUADRANT, NBX = 40, NORB = 64, NLWC = 3;
  localparam int NW  = (NLWC + 1) * NBX * NORB;
  localparam int NREAD = NCH * (NBX + 32 + 64);
  localparam int QUARTER = 100;
  localparam logic [6:0] ADDR = 7'h40;
  localparam int DIS0 = 5, DIS1 = 12;    // eLinks disabled through I2C

  logic ctrl_clk = 0, ctrl_rst_n = 0, bx_clk = 0, bx_rst_n = 0, bc0 = 0;
  logic [2:0] scl = '1, sda_m = '1, sda_oe, sda_bus;
  logic [2:0][5:0][7:0] thr;
  logic [2:0][5:0] cal_en;
  logic [2:0] corrected;
  logic [2:0] seu_en = '0;
  logic [1:0] seu_copy = 0;
  logic [3:0] seu_reg = 0;
  logic [2:0] seu_bit = 0;
  logic [NCH-1:0][31:0] disc = '0;
  logic [5:0] bx, rd_addr = 0;
  logic lw_done;
  logic [31:0] lw_num, rd_data;
  logic [4:0] rd_ch = 0;
  hist_kind_e rd_kind = HIST_BX;

  bit s [NCH][NW*32];
  int exp_bx [NLWC][NCH][NBX];
  int exp_toa [NLWC][NCH][32];
  int exp_tot [NLWC][NCH][64];
  int n_cross = 0, n_double = 0, n_overflow = 0;
  int checks = 0, failures = 0;
  int n_i2c_wr = 0, n_i2c_rd = 0, n_repair = 0, n_gated = 0, n_bc0 = 0, n_swap = 0, reads = 0;
  logic [7:0] model [3][8];

  assign sda_bus = sda_m & ~sda_oe;

  fbcm_quadrant #(.NUM_BX(NBX), .ORBITS_PER_LW(NORB)) dut (
    .ctrl_clk, .ctrl_rst_n, .scl_i(scl), .sda_i(sda_bus), .sda_oe,
    .thr_code_o(thr), .cal_en_o(cal_en), .seu_corrected_o(corrected),
    .seu_en_i(seu_en), .seu_copy_i(seu_copy), .seu_reg_i(seu_reg), .seu_bit_i(seu_bit),
    .bx_clk, .bx_rst_n, .bc0_i(bc0), .disc_i(disc), .bx_o(bx),
    .lw_done_o(lw_done), .lw_num_o(lw_num),
    .rd_ch_i(rd_ch), .rd_kind_i(rd_kind), .rd_addr_i(rd_addr), .rd_data_o(rd_data)
  );

  always #5    ctrl_clk = ~ctrl_clk;
  always #12.5 bx_clk   = ~bx_clk;
  always @(posedge ctrl_clk) n_repair += $countones(corrected);

  // bit-level I2C master on bus "cur"
  int cur = 0;
  logic scl_m = 1, sda_mm = 1;
  logic sda_cur;
  always_comb begin
    scl = '1; sda_m = '1;
    scl[cur] = scl_m; sda_m[cur] = sda_mm;
    sda_cur = sda_bus[cur];
  end
  `define sda_m sda_mm
  `define sda_bus sda_cur
  task automatic i2c_start();  sda_mm = 1; scl_m = 1; #(QUARTER); sda_mm = 0; #(QUARTER); scl_m = 0; #(QUARTER); endtask
  task automatic i2c_rstart(); sda_mm = 1; #(QUARTER); scl_m = 1; #(QUARTER); sda_mm = 0; #(QUARTER); scl_m = 0; #(QUARTER); endtask
  task automatic i2c_stop();   sda_mm = 0; #(QUARTER); scl_m = 1; #(QUARTER); sda_mm = 1; #(2*QUARTER); endtask
  task automatic i2c_bit_out(input logic b); sda_mm = b; #(QUARTER); scl_m = 1; #(2*QUARTER); scl_m = 0; #(QUARTER); endtask
  task automatic i2c_bit_in(output logic b); sda_mm = 1; #(QUARTER); scl_m = 1; #(QUARTER); b = sda_cur; #(QUARTER); scl_m = 0; #(QUARTER); endtask
  task automatic i2c_write_byte(input logic [7:0] d, output logic ack);
    logic b;
    for (int i = 7; i >= 0; i--) i2c_bit_out(d[i]);
    i2c_bit_in(b); ack = ~b;
  endtask
  task automatic i2c_read_byte(output logic [7:0] d, input logic ack);
    logic b;
    for (int i = 7; i >= 0; i--) begin i2c_bit_in(b); d[i] = b; end
    i2c_bit_out(~ack);
  endtask

  `include "fbcm_stream_ref.svh"

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #(25 * (NW + 500) + 2_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void item(input int r, output int c, output hist_kind_e k, output int b);
    c = r / (NBX + 96);
    b = r % (NBX + 96);
    if (b < NBX)           k = HIST_BX;
    else if (b < NBX + 32) begin k = HIST_TOA; b -= NBX; end
    else                   begin k = HIST_TOT; b -= NBX + 32; end
  endfunction

  function automatic int expected(input int l, input int c, input hist_kind_e k, input int b);
    if (c == DIS0 || c == DIS1) return 0;
    case (k)
      HIST_BX:  return exp_bx[l][c][b];
      HIST_TOA: return exp_toa[l][c][b];
      default:  return exp_tot[l][c][b];
    endcase
  endfunction

  initial begin
    logic ack;
    logic [7:0] d;
    int r, l, lw_seen;
    // ---- 1. slow control
    #100 ctrl_rst_n = 1;
    #200;
    for (int a = 0; a < 3; a++) begin
      for (int i = 0; i < 6; i++) model[a][i] = 8'($urandom);
      model[a][6] = 8'h3F;
      if (a == DIS0 / 6) model[a][6][DIS0 % 6] = 1'b0;
      if (a == DIS1 / 6) model[a][6][DIS1 % 6] = 1'b0;
      model[a][7] = 8'($urandom) & 8'h3F;
      cur = a;
      i2c_start();
      i2c_write_byte({ADDR, 1'b0}, ack); check(ack, "address ACK");
      i2c_write_byte(8'd0, ack);         check(ack, "pointer ACK");
      for (int i = 0; i < 8; i++) begin
        i2c_write_byte(model[a][i], ack); check(ack, "data ACK");
        n_i2c_wr++;
      end
      i2c_stop();
    end
    #100;
    for (int a = 0; a < 3; a++) begin
      for (int i = 0; i < 6; i++) check(thr[a][i] == model[a][i], $sformatf("ASIC %0d threshold %0d", a, i));
      check(cal_en[a] == model[a][7][5:0], $sformatf("ASIC %0d cal_en", a));
    end
    cur = 1;
    i2c_start();
    i2c_write_byte({ADDR, 1'b0}, ack);
    i2c_write_byte(8'd0, ack);
    i2c_rstart();
    i2c_write_byte({ADDR, 1'b1}, ack); check(ack, "read address ACK");
    for (int i = 0; i < 8; i++) begin
      i2c_read_byte(d, i != 7);
      check(d == model[1][i], $sformatf("read back reg %0d = %h expected %h", i, d, model[1][i]));
      n_i2c_rd++;
    end
    i2c_stop();
    // ---- 2. upsets
    for (int k = 0; k < 30; k++) begin
      @(negedge ctrl_clk);
      seu_en = 3'b1 << (k % 3); seu_copy = 2'($urandom_range(2));
      seu_reg = 4'($urandom_range(7)); seu_bit = 3'($urandom);
      @(negedge ctrl_clk);
      seu_en = '0;
      for (int a = 0; a < 3; a++)
        for (int i = 0; i < 6; i++) check(thr[a][i] == model[a][i], "threshold changed by an upset");
      @(negedge ctrl_clk);
    end
    @(negedge ctrl_clk);
    check(n_repair == 30, $sformatf("%0d repairs for 30 upsets", n_repair));
    // ---- 3. data path
    gen_streams(0, NLWC * NBX * NORB - 20);
    // the channel enables reach the BX domain through a two-flop
    // synchroniser that starts cleared: keep the first words quiet
    for (int c = 0; c < NCH; c++) for (int i = 0; i < 4 * 32; i++) s[c][i] = 1'b0;
    for (int c = 0; c < NCH; c++) if (c == DIS0 || c == DIS1)
      for (int i = 0; i < NW * 32; i++) if (s[c][i] && (i == 0 || !s[c][i-1])) n_gated++;
    compute_expected();
    @(negedge bx_clk);
    bx_rst_n = 1;
    r = -1; l = -1; lw_seen = 0;
    for (int w = 0; w < NW; w++) begin
      check(int'(bx) == w % NBX, $sformatf("word %0d: bx %0d", w, bx));
      for (int c = 0; c < NCH; c++)
        for (int i = 0; i < 32; i++) disc[c][i] = s[c][w * 32 + i];
      // orbit marker in the last BX of every 8th orbit: in step, no slip
      bc0 = (w % NBX == NBX - 1) && ((w / NBX) % 8 == 3);
      if (bc0) n_bc0++;
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
          rd_ch = 5'(c); rd_kind = k; rd_addr = 6'(b);
          r++;
        end else r = -1;
      end
      @(negedge bx_clk);
      if (lw_done) begin
        check(int'(lw_num) == lw_seen, $sformatf("lw_num %0d expected %0d", lw_num, lw_seen));
        n_swap++;
        if (lw_seen < NLWC) begin l = lw_seen; r = 0; end
        lw_seen++;
      end
    end
    $display("I2C writes %0d, I2C reads %0d, upset repairs %0d, gated pulses %0d, orbit markers %0d",
             n_i2c_wr, n_i2c_rd, n_repair, n_gated, n_bc0);
    $display("bank swaps %0d, bins read %0d, pulses across BX %0d, extra edges in a BX %0d, ToT overflow %0d",
             n_swap, reads, n_cross, n_double, n_overflow);
    check(n_i2c_wr > 0, "no I2C write");
    check(n_i2c_rd > 0, "no I2C read");
    check(n_repair > 0, "no upset repair");
    check(n_gated > 0, "no pulse on a disabled channel");
    check(n_bc0 > 0, "no orbit marker");
    check(n_swap >= 3, "banks not reused");
    check(n_cross > 0, "no pulse across a BX boundary");
    check(n_double > 0, "no second edge inside a BX");
    check(n_overflow > 0, "no ToT overflow");
    check(reads == NLWC * NREAD, $sformatf("%0d bins read, expected %0d", reads, NLWC * NREAD));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
