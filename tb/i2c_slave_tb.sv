// i2c_slave_tb -- self-checking test of the FBCM23 I2C slave.
//
// A bit-level master writes random bursts to random register pointers and
// reads them back with repeated-start reads of random length; a register
// array in the testbench plays the register file.  Checked: every ACK and
// NACK, the written data and addresses (also through the testbench's
// reference model), the bytes read back, that a foreign device address is
// not acknowledged and writes nothing, and that the pointer wraps.
module i2c_slave_tb;
  localparam int QUARTER = 100;        // ns, SCL period 400 ns
  localparam logic [6:0] ADDR = 7'h40;

  logic clk = 0, rst_n = 0;
  logic scl_m = 1, sda_m = 1;
  logic sda_oe;
  logic sda_bus;
  logic wr_en;
  logic [3:0] wr_addr, rd_addr;
  logic [7:0] wr_data;
  logic [7:0] regs [16];
  logic [7:0] model [16];
  int checks = 0, failures = 0, writes_seen = 0;

  assign sda_bus = sda_m & ~sda_oe;

  i2c_slave #(.DEV_ADDR(ADDR), .NREGS(16)) dut (
    .clk, .rst_n, .scl_i(scl_m), .sda_i(sda_bus), .sda_oe,
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data(regs[rd_addr])
  );

  always #5 clk = ~clk;     // 100 MHz, 40 samples per SCL period

  always_ff @(posedge clk) if (wr_en) begin
    regs[wr_addr] <= wr_data;
    writes_seen++;
  end

  `include "i2c_master_bfm.svh"

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #(4_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic ack;
    logic [7:0] d;
    for (int i = 0; i < 16; i++) begin regs[i] = 8'(i * 17); model[i] = 8'(i * 17); end
    #100 rst_n = 1;
    #200;
    for (int t = 0; t < 40; t++) begin
      int ptr, n, w0;
      ptr = $urandom_range(15);
      n   = $urandom_range(1, 5);
      w0  = writes_seen;
      i2c_start();
      i2c_write_byte({ADDR, 1'b0}, ack); check(ack, "address ACK (write)");
      i2c_write_byte(8'(ptr), ack);      check(ack, "pointer ACK");
      for (int k = 0; k < n; k++) begin
        d = 8'($urandom);
        i2c_write_byte(d, ack); check(ack, "data ACK");
        model[(ptr + k) % 16] = d;
      end
      i2c_stop();
      check(writes_seen - w0 == n, $sformatf("%0d writes, expected %0d", writes_seen - w0, n));
      for (int i = 0; i < 16; i++) check(regs[i] == model[i], $sformatf("reg %0d = %h, expected %h", i, regs[i], model[i]));
      // read back from a random pointer
      ptr = $urandom_range(15);
      n   = $urandom_range(1, 17);
      i2c_start();
      i2c_write_byte({ADDR, 1'b0}, ack); check(ack, "address ACK (pointer)");
      i2c_write_byte(8'(ptr), ack);      check(ack, "pointer ACK (read)");
      i2c_rstart();
      i2c_write_byte({ADDR, 1'b1}, ack); check(ack, "address ACK (read)");
      for (int k = 0; k < n; k++) begin
        i2c_read_byte(d, k != n - 1);
        check(d == model[(ptr + k) % 16], $sformatf("read reg %0d = %h, expected %h", (ptr + k) % 16, d, model[(ptr + k) % 16]));
      end
      i2c_stop();
    end
    // foreign device address: no ACK, no write
    begin
      int w0;
      w0 = writes_seen;
      i2c_start();
      i2c_write_byte({7'h41, 1'b0}, ack); check(!ack, "foreign address must not be acknowledged");
      i2c_write_byte(8'h02, ack);         check(!ack, "foreign transfer: pointer NACK");
      i2c_write_byte(8'h5A, ack);         check(!ack, "foreign transfer: data NACK");
      i2c_stop();
      check(writes_seen == w0, "foreign transfer wrote a register");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
