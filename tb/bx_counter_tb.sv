// bx_counter_tb -- self-checking test of the BX / lumi-word counter.
//
// Runs a short orbit (NUM_BX=37) and lumi word (ORBITS_PER_LW=5) for many
// lumi words and compares every cycle with a reference count kept in the
// testbench: BX identifier, orbit number, first-orbit flag, last-BX-of-
// lumi-word flag (exactly once per NUM_BX*ORBITS_PER_LW cycles) and the
// lumi-word number.  Orbit markers (bc0_i) arrive at random BX to check
// that the next cycle is BX 0 of the next orbit.
module bx_counter_tb;
  localparam int NBX = 37, NORB = 5;

  logic clk = 0, rst_n = 0, bc0 = 0;
  logic [5:0] bx;
  logic [2:0] orbit;
  logic first, lw_last;
  logic [31:0] lw_num;
  int checks = 0, failures = 0, resyncs = 0, lw_ends = 0;

  bx_counter #(.NUM_BX(NBX), .ORBITS_PER_LW(NORB)) dut (
    .clk, .rst_n, .bc0_i(bc0), .bx_o(bx), .orbit_o(orbit),
    .first_orbit_o(first), .lw_last_o(lw_last), .lw_num_o(lw_num)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #(10 * 20000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rbx, rorb, rlw, since_lw;
    rbx = 0; rorb = 0; rlw = 0; since_lw = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 15000; t++) begin
      check(int'(bx) == rbx, $sformatf("cycle %0d: bx %0d expected %0d", t, bx, rbx));
      check(int'(orbit) == rorb, $sformatf("cycle %0d: orbit %0d expected %0d", t, orbit, rorb));
      check(first == (rorb == 0), "first_orbit");
      check(lw_last == (rbx == NBX - 1 && rorb == NORB - 1), $sformatf("cycle %0d: lw_last", t));
      check(int'(lw_num) == rlw, "lw_num");
      // stimulus for the next edge: an occasional orbit marker in the second half
      bc0 = (t > 7000) && ($urandom_range(60) == 0);
      if (bc0) resyncs++;
      if (lw_last) lw_ends++;
      // reference for the next cycle
      if (rbx == NBX - 1 || bc0) begin
        rbx = 0;
        if (rorb == NORB - 1) begin rorb = 0; rlw++; end
        else rorb++;
      end else rbx++;
      @(negedge clk);
    end
    check(resyncs > 10 && lw_ends > 20, "orbit markers or lumi-word ends not exercised");
    // full lumi words before the markers: exact length check
    check(7000 / (NBX * NORB) <= lw_ends, "too few lumi words");
    $display("lumi words %0d, orbit markers %0d", lw_ends, resyncs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
