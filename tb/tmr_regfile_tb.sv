// tmr_regfile_tb -- self-checking test of the triple-redundant register file.
//
// Writes random values to every register and checks them back through the
// voted outputs against a reference copy.  Then injects single upsets into
// random copies and bits: the voted value must not change, corrected_o must
// pulse one cycle later, and after scrubbing a second upset of the same bit
// in another copy must still be outvoted.  A final write checks that the
// register file still accepts writes after the upsets.
module tmr_regfile_tb;
  localparam int NREGS = 16, DW = 8;

  logic clk = 0, rst_n = 0;
  logic we = 0;
  logic [3:0] waddr = 0;
  logic [DW-1:0] wdata = 0;
  logic [NREGS-1:0][DW-1:0] regs;
  logic corrected;
  logic seu_en = 0;
  logic [1:0] seu_copy = 0;
  logic [3:0] seu_reg = 0;
  logic [2:0] seu_bit = 0;

  int checks = 0, failures = 0;
  logic [DW-1:0] ref_q [NREGS];

  tmr_regfile #(.NREGS(NREGS), .DW(DW)) dut (
    .clk, .rst_n, .we, .waddr, .wdata, .regs_o(regs), .corrected_o(corrected),
    .seu_en_i(seu_en), .seu_copy_i(seu_copy), .seu_reg_i(seu_reg), .seu_bit_i(seu_bit)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all(input string what);
    for (int r = 0; r < NREGS; r++)
      check(regs[r] == ref_q[r], $sformatf("%s reg %0d = %h, expected %h", what, r, regs[r], ref_q[r]));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NREGS; r++) ref_q[r] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check_all("after reset");
    // writes
    for (int k = 0; k < 64; k++) begin
      int r; r = $urandom_range(NREGS - 1);
      we <= 1; waddr <= 4'(r); wdata <= 8'($urandom);
      @(posedge clk);
      ref_q[r] = wdata;
      we <= 0;
      #1 check_all("after write");
    end
    // single upsets
    for (int k = 0; k < 200; k++) begin
      seu_en <= 1; seu_copy <= 2'($urandom_range(2)); seu_reg <= 4'($urandom);
      seu_bit <= 3'($urandom);
      @(posedge clk);
      seu_en <= 0;
      #1 check_all("single upset");
      check(corrected == 1'b0, "corrected_o too early");
      @(posedge clk);
      #1 check(corrected == 1'b1, "corrected_o missing after upset");
      check_all("after scrub");
      // same bit again, another copy: must be outvoted (copy was scrubbed)
      seu_en <= 1; seu_copy <= 2'((seu_copy + 1) % 3);
      @(posedge clk);
      seu_en <= 0;
      #1 check_all("second upset after scrub");
      @(posedge clk);
    end
    // upsets of the same bit in two copies, in consecutive cycles: the
    // first is scrubbed before the second lands, so neither is seen
    @(posedge clk);
    #1 check(corrected == 1'b0, "corrected_o without upset");
    seu_en <= 1; seu_copy <= 0; seu_reg <= 4'd3; seu_bit <= 3'd5;
    @(posedge clk);
    seu_copy <= 1;
    @(posedge clk);
    seu_en <= 0;
    #1 check(regs[3] == ref_q[3], "upsets in consecutive cycles must be outvoted");
    we <= 1; waddr <= 4'd3; wdata <= 8'hA5;
    @(posedge clk);
    we <= 0; ref_q[3] = 8'hA5;
    #1 check_all("rewrite");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
