// tb_ptw_tracker -- self-checking test of the PTW-tracking counters.
// Random PTEs, DRAM-access counts and thresholds; the expected PTE and
// migrate flag are computed here from the bit positions directly.
module tb_ptw_tracker;
  import utopia_pkg::*;
  int checks = 0, failures = 0;
  logic [63:0] pte_in, pte_out;
  logic [2:0]  dram_accesses;
  logic [3:0]  thr_freq;
  logic [4:0]  thr_cost;
  logic        migrate;

  ptw_tracker dut (.*);

  initial begin
    int nmig = 0;
    for (int i = 0; i < 2000; i++) begin
      int f, c, ef, ec; logic [63:0] exp; logic em;
      pte_in        = {$urandom, $urandom};
      dram_accesses = 3'($urandom_range(0, 4));
      thr_freq      = 4'($urandom);
      thr_cost      = 5'($urandom);
      #1;
      f  = pte_in[55:52];
      c  = pte_in[58:56] * 4 + pte_in[10:9];
      ef = (f == 15) ? 15 : f + 1;
      ec = (c + dram_accesses > 31) ? 31 : c + dram_accesses;
      exp = pte_in;
      exp[55:52] = 4'(ef);
      exp[58:56] = 3'(ec / 4);
      exp[10:9]  = 2'(ec % 4);
      em = (ef > thr_freq) && (ec > thr_cost);
      nmig += em;
      checks++;
      if (pte_out !== exp || migrate !== em) begin
        failures++;
        if (failures < 10) $display("FAIL pte %h dram %0d thr %0d/%0d: got %h %b exp %h %b",
                                    pte_in, dram_accesses, thr_freq, thr_cost, pte_out, migrate, exp, em);
      end
    end
    // a page walked repeatedly crosses the thresholds exactly when expected
    pte_in = 64'h8000_0000_1234_5007; thr_freq = 4'd3; thr_cost = 5'd5; dram_accesses = 3'd2;
    for (int n = 1; n <= 6; n++) begin
      #1;
      checks++;
      if (migrate !== (n > 3 && 2 * n > 5)) begin failures++; $display("FAIL walk %0d", n); end
      pte_in = pte_out;
    end
    checks++;
    if (nmig == 0) begin failures++; $display("FAIL: migrate never raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
