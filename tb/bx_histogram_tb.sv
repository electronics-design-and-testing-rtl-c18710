// bx_histogram_tb -- self-checking test of the per-BX hit histogram.
//
// Drives a short orbit (NUM_BX=50) and lumi word (ORBITS_PER_LW=7) from the
// testbench: BX identifier, first-orbit flag and lumi-word end, with random
// hits whose probability depends on the BX (so the bins differ).  A
// reference count per BX is kept for every lumi word.  During each
// following lumi word the whole frozen bank is read back through the
// readout port (one-cycle latency) and compared, starting with the bin
// written last, two cycles after the lumi word ended.  Several lumi words are
// run, so both banks are accumulated and cleared more than once.
module bx_histogram_tb;
  localparam int NBX = 50, NORB = 7, CW = 4, NLW = 6;

  logic clk = 0, rst_n = 0;
  logic [5:0] bx = 0, rd_addr = 0;
  logic hit = 0, first = 0, lw_last = 0;
  logic [CW-1:0] rd_data;
  int ref_cnt [NBX], frozen [NBX];
  int checks = 0, failures = 0, reads = 0;
  bit have_frozen = 0;

  bx_histogram #(.NUM_BX(NBX), .CNT_W(CW)) dut (
    .clk, .rst_n, .bx_i(bx), .hit_i(hit), .first_orbit_i(first), .lw_last_i(lw_last),
    .rd_addr_i(rd_addr), .rd_data_o(rd_data)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #(10 * (NBX * NORB * (NLW + 2) + 100));
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // readout order of the frozen bank: the last BX first, as it is the last
  // one written before the swap
  function automatic int bin_of(input int j);
    return (j + NBX - 1) % NBX;
  endfunction

  initial begin
    for (int b = 0; b < NBX; b++) ref_cnt[b] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int lw = 0; lw < NLW; lw++) begin
      for (int o = 0; o < NORB; o++) begin
        for (int b = 0; b < NBX; b++) begin
          bx      = 6'(b);
          first   = (o == 0);
          lw_last = (o == NORB - 1) && (b == NBX - 1);
          hit     = ($urandom_range(NBX - 1) < b);
          if (o == 0) ref_cnt[b] = 0;
          if (hit) ref_cnt[b]++;
          // readout of the previous lumi word: the address is applied from
          // cycle k=1 (two cycles after that word's lw_last), data checked
          // one cycle later
          if (have_frozen) begin
            int k;
            k = o * NBX + b;
            if (k >= 2 && k - 2 < NBX) begin
              check(int'(rd_data) == frozen[bin_of(k - 2)],
                    $sformatf("lw %0d bin %0d = %0d expected %0d", lw - 1, bin_of(k - 2), rd_data, frozen[bin_of(k - 2)]));
              reads++;
            end
            if (k >= 1 && k - 1 < NBX) rd_addr = 6'(bin_of(k - 1));
          end
          @(negedge clk);
          if (o == NORB - 1 && b == NBX - 1) begin
            frozen = ref_cnt;
            have_frozen = 1;
          end
        end
      end
    end
    check(reads >= (NLW - 1) * NBX, $sformatf("only %0d bins read", reads));
    $display("bins read back %0d", reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
