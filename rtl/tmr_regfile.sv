// tmr_regfile -- triple-modular-redundant control register file.
//
// The FBCM23 keeps its control registers in three copies.  Every output bit
// is the majority of the three copies, so a single-event upset in any one
// copy never reaches the analog settings.  Each clock cycle all three copies
// are reloaded with the voted value (continuous scrubbing), so an upset is
// removed one cycle after it happens and cannot pile up with a later upset
// of the same bit in another copy.  A register write loads all three copies.
//
// Interface: a single write port (we/waddr/wdata, applied on the rising
// edge of clk) and the voted register contents on regs_o, available
// combinationally from the copies.  corrected_o is high for one cycle
// whenever the copies disagreed, i.e. when the scrubber repaired a bit.
// The seu_* inputs flip one bit of one copy on the next edge; they exist to
// exercise the voter in test and are tied low in use.
//
// The paper states only that the control registers and bus logic are
// protected with triple modular redundancy; the voting, the scrubbing every
// cycle, the reset value (all zero) and the upset-injection port are this
// design's choices.
module tmr_regfile #(
  parameter int unsigned NREGS = 16,
  parameter int unsigned DW    = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  logic [DW-1:0]            wdata,
  output logic [NREGS-1:0][DW-1:0] regs_o,
  output logic                     corrected_o,
  // upset injection (test only)
  input  logic                     seu_en_i,
  input  logic [1:0]               seu_copy_i,
  input  logic [$clog2(NREGS)-1:0] seu_reg_i,
  input  logic [$clog2(DW)-1:0]    seu_bit_i
);

  logic [2:0][NREGS-1:0][DW-1:0] copy_q;
  logic [NREGS-1:0][DW-1:0]      voted;
  logic                          mismatch;

  always_comb begin
    for (int r = 0; r < NREGS; r++) begin
      voted[r] = (copy_q[0][r] & copy_q[1][r]) |
                 (copy_q[1][r] & copy_q[2][r]) |
                 (copy_q[0][r] & copy_q[2][r]);
    end
    mismatch = (copy_q[0] != copy_q[1]) || (copy_q[1] != copy_q[2]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      copy_q      <= '0;
      corrected_o <= 1'b0;
    end else begin
      for (int c = 0; c < 3; c++) begin
        for (int r = 0; r < NREGS; r++) begin
          if (we && waddr == r[$clog2(NREGS)-1:0]) copy_q[c][r] <= wdata;
          else                                     copy_q[c][r] <= voted[r];
          if (seu_en_i && seu_copy_i == c[1:0] && seu_reg_i == r[$clog2(NREGS)-1:0])
            copy_q[c][r][seu_bit_i] <= ~voted[r][seu_bit_i];
        end
      end
      corrected_o <= mismatch;
    end
  end

  assign regs_o = voted;

endmodule
