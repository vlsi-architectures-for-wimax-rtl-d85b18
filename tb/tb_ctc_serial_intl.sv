// tb_ctc_serial_intl: for all 17 frame sizes, steps through j = 0..N-1 and
// compares i with (P0*j + P + 1) mod N computed by multiplication from the
// standard's P0..P3, checks the swap flag (i odd) and that the addresses
// form a permutation.  One address per cycle.
module tb_ctc_serial_intl;
  import wimax_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, step = 0;
  size_idx_t size;
  logic [NW-1:0] i_addr, j_cnt;
  logic swap;
  int checks = 0, failures = 0;

  ctc_serial_intl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    size = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NUM_SIZES; s++) begin
      int n, p0, pp[4], bad;
      bit seen [2400];
      n = n_of(5'(s));
      p0 = ctc_p_of(5'(s), 0);
      pp[0] = 0; pp[1] = n / 2 + ctc_p_of(5'(s), 1); pp[2] = ctc_p_of(5'(s), 2); pp[3] = n / 2 + ctc_p_of(5'(s), 3);
      foreach (seen[x]) seen[x] = 0;
      size = 5'(s);
      @(negedge clk); start = 1; @(negedge clk); start = 0; step = 1;
      bad = 0;
      for (int j = 0; j < n; j++) begin
        int e;
        e = (p0 * j + pp[j % 4] + 1) % n;
        if (int'(i_addr) != e || swap != e[0] || int'(j_cnt) != j) bad++;
        seen[i_addr] = 1;
        @(negedge clk);
      end
      step = 0;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL N=%0d mismatches=%0d", n, bad); end
      checks++;
      for (int x = 0; x < n; x++) if (!seen[x]) bad++;
      if (bad != 0) begin failures++; $display("FAIL N=%0d not a permutation", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
