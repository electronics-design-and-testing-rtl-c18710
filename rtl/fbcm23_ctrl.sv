// fbcm23_ctrl -- digital slow-control block of one FBCM23 ASIC.
//
// Joins the I2C slave to the triple-redundant control register file and
// decodes the voted registers into the settings of the six analog channels:
// an 8-bit threshold DAC code per channel (the "selectable threshold level"
// of the leading-edge discriminator), a channel output enable and a
// calibration-strobe enable per channel.  These settings leave the chip's
// digital part here and drive the analog front end, which is not logic and
// is not modelled.
//
// Register map (this design's own; the paper gives none):
//   0..5  threshold DAC code of channel 0..5   (reset 0x00)
//   6     channel output enable, bit i = ch i  (reset 0x00)
//   7     calibration strobe enable, bit i     (reset 0x00)
//   8..15 spare, read/write
// Following the paper, the bus logic is protected by triple modular
// redundancy as well: three copies of the I2C slave run side by side and
// their outputs (SDA pull-down, register write strobe, address and data)
// are majority-voted, so an upset in one copy's state cannot corrupt a
// transfer.  Each copy returns to a known state at the next START.
// A register write by I2C reaches the outputs one clk cycle after the
// slave's wr_en pulse.  The seu_* inputs pass to the register file's upset
// injection and are tied low in use.
module fbcm23_ctrl
  import fbcm_pkg::*;
#(
  parameter logic [6:0] DEV_ADDR = 7'h40
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               scl_i,
  input  logic                               sda_i,
  output logic                               sda_oe,
  output logic [CH_PER_ASIC-1:0][REG_W-1:0]  thr_code_o,
  output logic [CH_PER_ASIC-1:0]             ch_en_o,
  output logic [CH_PER_ASIC-1:0]             cal_en_o,
  output logic                               seu_corrected_o,
  input  logic                               seu_en_i,
  input  logic [1:0]                         seu_copy_i,
  input  logic [$clog2(NREGS)-1:0]           seu_reg_i,
  input  logic [$clog2(REG_W)-1:0]           seu_bit_i
);

  logic                        wr_en;
  logic [$clog2(NREGS)-1:0]    wr_addr;
  logic [REG_W-1:0]            wr_data;
  logic [NREGS-1:0][REG_W-1:0] regs;

  // three copies of the I2C bus logic, outputs voted bit by bit
  logic [2:0]                          t_sda_oe, t_wr_en;
  logic [2:0][$clog2(NREGS)-1:0]       t_wr_addr, t_rd_addr;
  logic [2:0][REG_W-1:0]               t_wr_data;

  for (genvar k = 0; k < 3; k++) begin : g_bus
    i2c_slave #(.DEV_ADDR(DEV_ADDR), .NREGS(NREGS)) u_i2c (
      .clk, .rst_n, .scl_i, .sda_i, .sda_oe(t_sda_oe[k]),
      .wr_en(t_wr_en[k]), .wr_addr(t_wr_addr[k]), .wr_data(t_wr_data[k]),
      .rd_addr(t_rd_addr[k]), .rd_data(regs[t_rd_addr[k]])
    );
  end

  function automatic logic [REG_W-1:0] maj(input logic [REG_W-1:0] a, b, c);
    return (a & b) | (b & c) | (a & c);
  endfunction

  assign sda_oe  = (t_sda_oe[0] & t_sda_oe[1]) | (t_sda_oe[1] & t_sda_oe[2]) | (t_sda_oe[0] & t_sda_oe[2]);
  assign wr_en   = (t_wr_en[0]  & t_wr_en[1])  | (t_wr_en[1]  & t_wr_en[2])  | (t_wr_en[0]  & t_wr_en[2]);
  assign wr_addr = $clog2(NREGS)'(maj(REG_W'(t_wr_addr[0]), REG_W'(t_wr_addr[1]), REG_W'(t_wr_addr[2])));
  assign wr_data = maj(t_wr_data[0], t_wr_data[1], t_wr_data[2]);

  tmr_regfile #(.NREGS(NREGS), .DW(REG_W)) u_regs (
    .clk, .rst_n,
    .we(wr_en), .waddr(wr_addr), .wdata(wr_data),
    .regs_o(regs), .corrected_o(seu_corrected_o),
    .seu_en_i, .seu_copy_i, .seu_reg_i, .seu_bit_i
  );

  always_comb begin
    for (int c = 0; c < CH_PER_ASIC; c++) thr_code_o[c] = regs[REG_THR0 + c];
    ch_en_o  = regs[REG_CH_EN][CH_PER_ASIC-1:0];
    cal_en_o = regs[REG_CAL_EN][CH_PER_ASIC-1:0];
  end

endmodule
