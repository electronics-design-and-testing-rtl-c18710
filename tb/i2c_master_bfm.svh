// i2c_master_bfm.svh -- bit-level I2C master tasks shared by testbenches.
//
// Expects in the including module: logic scl_m, sda_m (master drives the
// line low when 0), a wire-AND bus value "sda_bus", and an int QUARTER
// giving a quarter SCL period in time units.  Standard-mode timing is not
// needed; only the order of edges matters to the slave.

task automatic i2c_start();
  sda_m = 1; scl_m = 1; #(QUARTER);
  sda_m = 0; #(QUARTER);
  scl_m = 0; #(QUARTER);
endtask

task automatic i2c_rstart();
  sda_m = 1; #(QUARTER);
  scl_m = 1; #(QUARTER);
  sda_m = 0; #(QUARTER);
  scl_m = 0; #(QUARTER);
endtask

task automatic i2c_stop();
  sda_m = 0; #(QUARTER);
  scl_m = 1; #(QUARTER);
  sda_m = 1; #(2*QUARTER);
endtask

task automatic i2c_bit_out(input logic b);
  sda_m = b; #(QUARTER);
  scl_m = 1; #(2*QUARTER);
  scl_m = 0; #(QUARTER);
endtask

task automatic i2c_bit_in(output logic b);
  sda_m = 1; #(QUARTER);
  scl_m = 1; #(QUARTER);
  b = sda_bus; #(QUARTER);
  scl_m = 0; #(QUARTER);
endtask

// sends a byte, returns 1 when the slave acknowledged
task automatic i2c_write_byte(input logic [7:0] d, output logic ack);
  logic b;
  for (int i = 7; i >= 0; i--) i2c_bit_out(d[i]);
  i2c_bit_in(b);
  ack = ~b;
endtask

// reads a byte and sends ACK (ack=1) or NACK (ack=0)
task automatic i2c_read_byte(output logic [7:0] d, input logic ack);
  logic b;
  for (int i = 7; i >= 0; i--) begin i2c_bit_in(b); d[i] = b; end
  i2c_bit_out(~ack);
endtask
