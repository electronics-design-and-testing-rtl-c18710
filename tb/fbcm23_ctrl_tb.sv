// fbcm23_ctrl_tb -- self-checking test of the FBCM23 slow-control block.
//
// Over I2C, writes a random threshold code to each of the six channels and
// random channel and calibration-strobe enable masks, then checks the
// decoded analog settings against the values written and reads every
// register back.  Upsets are injected into single register copies while
// the outputs are watched: no setting may change, and seu_corrected_o must
// report each repair.
module fbcm23_ctrl_tb;
  import fbcm_pkg::*;
  localparam int QUARTER = 100;
  localparam logic [6:0] ADDR = 7'h40;

  logic clk = 0, rst_n = 0;
  logic scl_m = 1, sda_m = 1, sda_oe, sda_bus;
  logic [CH_PER_ASIC-1:0][REG_W-1:0] thr;
  logic [CH_PER_ASIC-1:0] ch_en, cal_en;
  logic corrected;
  logic seu_en = 0;
  logic [1:0] seu_copy = 0;
  logic [3:0] seu_reg = 0;
  logic [2:0] seu_bit = 0;
  logic [7:0] model [NREGS];
  int checks = 0, failures = 0, repairs = 0;

  assign sda_bus = sda_m & ~sda_oe;

  fbcm23_ctrl #(.DEV_ADDR(ADDR)) dut (
    .clk, .rst_n, .scl_i(scl_m), .sda_i(sda_bus), .sda_oe,
    .thr_code_o(thr), .ch_en_o(ch_en), .cal_en_o(cal_en),
    .seu_corrected_o(corrected),
    .seu_en_i(seu_en), .seu_copy_i(seu_copy), .seu_reg_i(seu_reg), .seu_bit_i(seu_bit)
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (corrected) repairs++;

  `include "i2c_master_bfm.svh"

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_outputs(input string what);
    for (int c = 0; c < CH_PER_ASIC; c++)
      check(thr[c] == model[REG_THR0 + c], $sformatf("%s: thr[%0d]=%h expected %h", what, c, thr[c], model[REG_THR0 + c]));
    check(ch_en  == model[REG_CH_EN][CH_PER_ASIC-1:0],  $sformatf("%s: ch_en", what));
    check(cal_en == model[REG_CAL_EN][CH_PER_ASIC-1:0], $sformatf("%s: cal_en", what));
  endtask

  initial begin
    #(6_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic ack;
    logic [7:0] d;
    for (int i = 0; i < NREGS; i++) model[i] = '0;
    #100 rst_n = 1;
    #200;
    check_outputs("after reset");
    for (int t = 0; t < 4; t++) begin
      i2c_start();
      i2c_write_byte({ADDR, 1'b0}, ack); check(ack, "address ACK");
      i2c_write_byte(8'd0, ack);         check(ack, "pointer ACK");
      for (int r = 0; r < 8; r++) begin
        d = 8'($urandom);
        i2c_write_byte(d, ack); check(ack, "data ACK");
        model[r] = d;
      end
      i2c_stop();
      #100 check_outputs("after configuration");
      i2c_start();
      i2c_write_byte({ADDR, 1'b0}, ack);
      i2c_write_byte(8'd0, ack);
      i2c_rstart();
      i2c_write_byte({ADDR, 1'b1}, ack); check(ack, "read address ACK");
      for (int r = 0; r < 8; r++) begin
        i2c_read_byte(d, r != 7);
        check(d == model[r], $sformatf("read back reg %0d = %h expected %h", r, d, model[r]));
      end
      i2c_stop();
    end
    // single-event upsets in the configuration registers
    for (int k = 0; k < 50; k++) begin
      int rep0;
      rep0 = repairs;
      @(negedge clk);
      seu_en = 1; seu_copy = 2'($urandom_range(2)); seu_reg = 4'($urandom_range(7));
      seu_bit = 3'($urandom);
      @(negedge clk);
      seu_en = 0;
      check_outputs("during upset");
      @(negedge clk);
      @(negedge clk);
      check(repairs == rep0 + 1, "upset not reported as repaired");
      check_outputs("after repair");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
