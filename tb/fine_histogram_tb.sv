// fine_histogram_tb -- self-checking test of the ToA/ToT histogram.
//
// Feeds random entries on both ports (often into the same bin in the same
// cycle) into an 8-bin histogram with 6-bit counters, ends lumi words of
// random length, and after each end reads all frozen bins back through the
// readout port (one-cycle latency), comparing with a reference histogram
// kept in the testbench.  One long, dense lumi word drives counters into
// saturation.
module fine_histogram_tb;
  localparam int NB = 8, CW = 6, NLW = 12;

  logic clk = 0, rst_n = 0;
  logic av = 0, bv = 0, lw_last = 0;
  logic [2:0] ab = 0, bb = 0, rd_addr = 0;
  logic [CW-1:0] rd_data;
  int ref_h [NB], frozen [NB];
  int checks = 0, failures = 0, saturated = 0, doubles = 0;

  fine_histogram #(.NBINS(NB), .CNT_W(CW)) dut (
    .clk, .rst_n, .a_valid_i(av), .a_bin_i(ab), .b_valid_i(bv), .b_bin_i(bb),
    .lw_last_i(lw_last), .rd_addr_i(rd_addr), .rd_data_o(rd_data)
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
    for (int i = 0; i < NB; i++) ref_h[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int lw = 0; lw < NLW; lw++) begin
      int len;
      len = (lw == 5) ? 400 : $urandom_range(5, 60);
      for (int t = 0; t < len; t++) begin
        av = ($urandom_range(2) != 0);
        bv = ($urandom_range(2) == 0);
        ab = 3'($urandom_range(lw == 5 ? 1 : NB - 1));
        bb = ($urandom_range(1) == 0) ? ab : 3'($urandom);
        lw_last = (t == len - 1);
        if (av) ref_h[ab]++;
        if (bv) ref_h[bb]++;
        if (av && bv && ab == bb) doubles++;
        @(negedge clk);
      end
      av = 0; bv = 0; lw_last = 0;
      for (int i = 0; i < NB; i++) begin
        frozen[i] = (ref_h[i] > (1 << CW) - 1) ? (1 << CW) - 1 : ref_h[i];
        if (ref_h[i] > (1 << CW) - 1) saturated++;
        ref_h[i] = 0;
      end
      // read all bins of the frozen set; entries of the new lumi word
      // are accumulated meanwhile and must not disturb it
      for (int i = 0; i <= NB; i++) begin
        if (i > 0) check(int'(rd_data) == frozen[i - 1],
                         $sformatf("lw %0d bin %0d = %0d expected %0d", lw, i - 1, rd_data, frozen[i - 1]));
        if (i < NB) rd_addr = 3'(i);
        av = 1; ab = 3'($urandom); ref_h[ab]++;
        @(negedge clk);
      end
      av = 0;
    end
    check(saturated > 0 && doubles > 20, "saturation or double entries not exercised");
    $display("saturated bins %0d, same-bin double entries %0d", saturated, doubles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
