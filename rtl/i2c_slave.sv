// i2c_slave -- slow-control I2C slave of the FBCM23 ASIC.
//
// An external master (a lab PC adapter in the test system, an lpGBT I2C
// master in the final system) reads and writes the ASIC control registers
// through this block.  It is a register-pointer slave:
//   write:  S | DEV_ADDR+W | A | ptr | A | data | A | data | A ... | P
//   read:   S | DEV_ADDR+W | A | ptr | A | Sr | DEV_ADDR+R | A | data | A ... | P
// A write transaction's first data byte sets the register pointer; every
// later byte is written to the register it points at and advances the
// pointer.  A read returns the register at the pointer and advances it while
// the master acknowledges.  The pointer wraps at NREGS.
//
// SCL and SDA are oversampled with the local clock clk, which must run at
// least about 8 times faster than SCL, through two-flop synchronisers;
// start and stop are recognised on SDA edges while SCL is high, data are
// sampled on SCL rising edges and SDA is changed after SCL falling edges.
// sda_oe high means "pull SDA low" (open drain); SDA is released otherwise.
// wr_en is a one-cycle pulse with wr_addr/wr_data; rd_addr selects the
// register whose value rd_data must show combinationally.
//
// The paper says only that the ASIC has an I2C slave interface at 1.2 V for
// slow control; the device address, the register-pointer protocol and the
// oversampling are this design's choices.
module i2c_slave #(
  parameter logic [6:0]  DEV_ADDR = 7'h40,
  parameter int unsigned NREGS    = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     scl_i,
  input  logic                     sda_i,
  output logic                     sda_oe,
  output logic                     wr_en,
  output logic [$clog2(NREGS)-1:0] wr_addr,
  output logic [7:0]               wr_data,
  output logic [$clog2(NREGS)-1:0] rd_addr,
  input  logic [7:0]               rd_data
);

  localparam int unsigned AW = $clog2(NREGS);

  typedef enum logic [2:0] {
    S_IDLE, S_ADDR, S_ACK, S_WR, S_RD, S_RD_ACK
  } state_e;

  logic [2:0] scl_sync, sda_sync;
  logic       scl, sda, scl_d, sda_d;
  logic       scl_rise, scl_fall, start_c, stop_c;

  state_e     state;
  logic [3:0] bit_cnt;
  logic [7:0] shreg;
  logic       rw;            // 1 = read transaction
  logic       ptr_loaded;    // pointer byte already received in this write
  logic       ack_driven;    // in S_ACK: ACK already put on the bus
  logic       more;          // master acknowledged the last read byte
  logic [AW-1:0] ptr;
  logic [7:0] txbyte;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scl_sync <= '1;
      sda_sync <= '1;
    end else begin
      scl_sync <= {scl_sync[1:0], scl_i};
      sda_sync <= {sda_sync[1:0], sda_i};
    end
  end

  assign scl      = scl_sync[1];
  assign sda      = sda_sync[1];
  assign scl_d    = scl_sync[2];
  assign sda_d    = sda_sync[2];
  assign scl_rise =  scl & ~scl_d;
  assign scl_fall = ~scl &  scl_d;
  assign start_c  =  scl & scl_d & sda_d & ~sda;
  assign stop_c   =  scl & scl_d & ~sda_d & sda;

  assign rd_addr  = ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      bit_cnt    <= '0;
      shreg      <= '0;
      rw         <= 1'b0;
      ptr_loaded <= 1'b0;
      ack_driven <= 1'b0;
      more       <= 1'b0;
      ptr        <= '0;
      txbyte     <= '0;
      sda_oe     <= 1'b0;
      wr_en      <= 1'b0;
      wr_addr    <= '0;
      wr_data    <= '0;
    end else begin
      wr_en <= 1'b0;
      if (start_c) begin
        state      <= S_ADDR;
        bit_cnt    <= '0;
        sda_oe     <= 1'b0;
        ptr_loaded <= 1'b0;
      end else if (stop_c) begin
        state  <= S_IDLE;
        sda_oe <= 1'b0;
      end else begin
        unique case (state)
          S_IDLE: sda_oe <= 1'b0;

          S_ADDR, S_WR: if (scl_rise) begin
            shreg   <= {shreg[6:0], sda};
            bit_cnt <= bit_cnt + 4'd1;
            if (bit_cnt == 4'd7) begin
              ack_driven <= 1'b0;
              if (state == S_ADDR) begin
                rw    <= sda;
                state <= (shreg[6:0] == DEV_ADDR) ? S_ACK : S_IDLE;
              end else begin
                state <= S_ACK;
                if (!ptr_loaded) begin
                  ptr        <= {shreg[AW-2:0], sda};
                  ptr_loaded <= 1'b1;
                end else begin
                  wr_en   <= 1'b1;
                  wr_addr <= ptr;
                  wr_data <= {shreg[6:0], sda};
                  ptr     <= ptr + 1'b1;
                end
              end
            end
          end

          S_ACK: if (scl_fall) begin
            if (!ack_driven) begin
              sda_oe     <= 1'b1;
              ack_driven <= 1'b1;
            end else begin
              bit_cnt <= '0;
              if (rw) begin
                txbyte <= rd_data;
                sda_oe <= ~rd_data[7];
                state  <= S_RD;
              end else begin
                sda_oe <= 1'b0;
                state  <= S_WR;
              end
            end
          end

          S_RD: begin
            if (scl_rise) bit_cnt <= bit_cnt + 4'd1;
            if (scl_fall) begin
              if (bit_cnt == 4'd8) begin
                sda_oe <= 1'b0;
                state  <= S_RD_ACK;
              end else begin
                sda_oe <= ~txbyte[3'd7 - bit_cnt[2:0]];
              end
            end
          end

          S_RD_ACK: begin
            if (scl_rise) begin
              more <= ~sda;
              ptr  <= ptr + 1'b1;
            end
            if (scl_fall) begin
              if (more) begin
                bit_cnt <= '0;
                txbyte  <= rd_data;
                sda_oe  <= ~rd_data[7];
                state   <= S_RD;
              end else begin
                state <= S_IDLE;
              end
            end
          end

          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
