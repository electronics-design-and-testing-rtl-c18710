// fbcm_quadrant_full_tb -- one complete lumi word of a quadrant at full size.
//
// The quadrant runs with its default parameters: 18 eLinks, 3564 BX per
// orbit and 11245 orbits (about one second of beam, 40 million BX cycles)
// per lumi word.  The testbench
//   1. configures the three ASICs over I2C (all channels enabled except
//      eLink 7) and checks the threshold settings;
//   2. stops the slow-control clock and, in every orbit, puts one pulse on
//      each channel at a BX, start sample and width that depend on channel
//      and orbit (widths 1..90 samples, so pulses cross BX boundaries and
//      overflow the ToT range), keeping the expected BX, ToA and ToT
//      histograms as it goes;
//   3. waits for the end of the lumi word, checks lw_done_o and lw_num_o
//      and reads every bin of every histogram of every channel back.
// Pulses stay clear of the last BXs of the orbit, so none ends in the next
// lumi word, and of the first four, which pass before the channel enables
// have crossed the synchroniser into the BX clock domain.
module fbcm_quadrant_full_tb;
  import fbcm_pkg::*;
  localparam int NCH = ELINKS_PER_QUADRANT, NBX = ORBIT_BX, NORB = LW_ORBITS;
  localparam int QUARTER = 100;
  localparam logic [6:0] ADDR = 7'h40;
  localparam int DIS = 7;

  logic ctrl_clk = 0, ctrl_rst_n = 0, bx_clk = 0, bx_rst_n = 0;
  bit   ctrl_run = 1;
  logic [2:0] scl = '1, sda_m = '1, sda_oe, sda_bus;
  logic [2:0][5:0][7:0] thr;
  logic [2:0][5:0] cal_en;
  logic [2:0] corrected;
  logic [NCH-1:0][31:0] disc = '0;
  logic [11:0] bx, rd_addr = 0;
  logic lw_done;
  logic [31:0] lw_num, rd_data;
  logic [4:0] rd_ch = 0;
  hist_kind_e rd_kind = HIST_BX;

  int exp_bx [NCH][NBX];
  int exp_toa [NCH][32];
  int exp_tot [NCH][64];
  int pstart [NCH], pend [NCH];       // pulse of the current orbit, in samples from the orbit start
  int checks = 0, failures = 0, reads = 0;
  logic [7:0] thr_model [3][6];

  assign sda_bus = sda_m & ~sda_oe;

  fbcm_quadrant dut (
    .ctrl_clk, .ctrl_rst_n, .scl_i(scl), .sda_i(sda_bus), .sda_oe,
    .thr_code_o(thr), .cal_en_o(cal_en), .seu_corrected_o(corrected),
    .seu_en_i(3'b000), .seu_copy_i(2'd0), .seu_reg_i(4'd0), .seu_bit_i(3'd0),
    .bx_clk, .bx_rst_n, .bc0_i(1'b0), .disc_i(disc), .bx_o(bx),
    .lw_done_o(lw_done), .lw_num_o(lw_num),
    .rd_ch_i(rd_ch), .rd_kind_i(rd_kind), .rd_addr_i(rd_addr), .rd_data_o(rd_data)
  );

  initial while (ctrl_run) #5 ctrl_clk = ~ctrl_clk;
  always #12.5 bx_clk = ~bx_clk;

  int cur = 0;
  logic scl_m = 1, sda_mm = 1, sda_cur;
  always_comb begin
    scl = '1; sda_m = '1;
    scl[cur] = scl_m; sda_m[cur] = sda_mm;
    sda_cur = sda_bus[cur];
  end
  task automatic i2c_start(); sda_mm = 1; scl_m = 1; #(QUARTER); sda_mm = 0; #(QUARTER); scl_m = 0; #(QUARTER); endtask
  task automatic i2c_stop();  sda_mm = 0; #(QUARTER); scl_m = 1; #(QUARTER); sda_mm = 1; #(2*QUARTER); endtask
  task automatic i2c_bit_out(input logic b); sda_mm = b; #(QUARTER); scl_m = 1; #(2*QUARTER); scl_m = 0; #(QUARTER); endtask
  task automatic i2c_bit_in(output logic b); sda_mm = 1; #(QUARTER); scl_m = 1; #(QUARTER); b = sda_cur; #(QUARTER); scl_m = 0; #(QUARTER); endtask
  task automatic i2c_write_byte(input logic [7:0] d, output logic ack);
    logic b;
    for (int i = 7; i >= 0; i--) i2c_bit_out(d[i]);
    i2c_bit_in(b); ack = ~b;
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #(25.0 * (real'(NBX) * NORB + 200000) + 2_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse of channel c in orbit o
  function automatic void plan(input int c, input int o);
    int b, t, w;
    b = 4 + (c * 191 + (o % 7) * 13 + o % 3000) % (NBX - 12);
    t = (c * 3 + o) % 32;
    w = 1 + (c * 5 + o * 11) % 90;
    pstart[c] = b * 32 + t;
    pend[c]   = pstart[c] + w;
    if (c != DIS) begin
      exp_bx[c][b]++;
      exp_toa[c][t]++;
      exp_tot[c][(w > 63) ? 63 : w]++;
    end
  endfunction

  function automatic int expected(input int c, input hist_kind_e k, input int b);
    case (k)
      HIST_BX:  return exp_bx[c][b];
      HIST_TOA: return exp_toa[c][b];
      default:  return exp_tot[c][b];
    endcase
  endfunction

  initial begin
    logic ack;
    for (int c = 0; c < NCH; c++) begin
      for (int b = 0; b < NBX; b++) exp_bx[c][b] = 0;
      for (int b = 0; b < 32; b++) exp_toa[c][b] = 0;
      for (int b = 0; b < 64; b++) exp_tot[c][b] = 0;
    end
    // ---- configuration
    #100 ctrl_rst_n = 1;
    #200;
    for (int a = 0; a < 3; a++) begin
      logic [7:0] en;
      cur = a;
      en = (a == DIS / 6) ? 8'h3F & ~(8'd1 << (DIS % 6)) : 8'h3F;
      i2c_start();
      i2c_write_byte({ADDR, 1'b0}, ack); check(ack, "address ACK");
      i2c_write_byte(8'd0, ack);         check(ack, "pointer ACK");
      for (int i = 0; i < 6; i++) begin
        thr_model[a][i] = 8'(40 + 3 * (6 * a + i));
        i2c_write_byte(thr_model[a][i], ack); check(ack, "threshold ACK");
      end
      i2c_write_byte(en, ack); check(ack, "enable ACK");
      i2c_stop();
    end
    #100;
    for (int a = 0; a < 3; a++)
      for (int i = 0; i < 6; i++) check(thr[a][i] == thr_model[a][i], "threshold setting");
    ctrl_run = 0;
    // ---- one lumi word of pulses
    @(negedge bx_clk);
    bx_rst_n = 1;
    for (int o = 0; o < NORB; o++) begin
      for (int c = 0; c < NCH; c++) plan(c, o);
      for (int b = 0; b < NBX; b++) begin
        for (int c = 0; c < NCH; c++) begin
          if (pend[c] > b * 32 && pstart[c] < b * 32 + 32) begin
            for (int i = 0; i < 32; i++)
              disc[c][i] = (b * 32 + i >= pstart[c]) && (b * 32 + i < pend[c]);
          end else disc[c] = '0;
        end
        @(negedge bx_clk);
      end
      if (o % 1000 == 999) $display("orbit %0d", o + 1);
    end
    disc = '0;
    // ---- end of lumi word and readout
    repeat (2) @(negedge bx_clk);
    check(lw_done == 1'b1, "lw_done not 3 cycles after the lumi word");
    check(lw_num == 0, "lw_num");
    for (int c = 0; c < NCH; c++)
      for (int kk = 0; kk < 3; kk++) begin
        hist_kind_e k;
        int n;
        k = hist_kind_e'(kk);
        n = (k == HIST_BX) ? NBX : (k == HIST_TOA) ? 32 : 64;
        for (int b = 0; b < n; b++) begin
          rd_ch = 5'(c); rd_kind = k; rd_addr = 12'(b);
          @(negedge bx_clk);
          check(int'(rd_data) == expected(c, k, b),
                $sformatf("ch %0d kind %0d bin %0d: %0d expected %0d", c, kk, b, rd_data, expected(c, k, b)));
          reads++;
        end
      end
    $display("bins read %0d", reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
