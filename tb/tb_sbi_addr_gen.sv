// tb_sbi_addr_gen: for all 17 frame sizes, compares the valid addresses
// with Algorithm-1 computed in the testbench (integer arithmetic, bit
// reversal by loop), checks that they form a permutation of 0..N-1, that the
// number of tentative addresses equals the reference N_M and that N_M <= 4N/3
// (191 for N = 144).
module tb_sbi_addr_gen;
  import wimax_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  size_idx_t size;
  logic active, valid, done;
  logic [NW-1:0] t_k;
  int checks = 0, failures = 0;

  sbi_addr_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bro(int v, int m);
    int r = 0;
    for (int b = 0; b < m; b++) if (v & (1 << b)) r |= 1 << (m - 1 - b);
    return r;
  endfunction

  initial begin
    size = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NUM_SIZES; s++) begin
      int n, m, J, k, i, nm, tent, bad;
      int ref_t [$];
      bit seen [2400];
      n = n_of(5'(s)); m = sbi_m_of(5'(s)); J = sbi_j_of(5'(s));
      ref_t = {};
      k = 0; i = 0;
      while (i < n) begin
        int t;
        t = (1 << m) * (k % J) + bro(k / J, m);
        if (t < n) begin ref_t.push_back(t); i++; end
        k++;
      end
      nm = k;
      foreach (seen[x]) seen[x] = 0;
      size = 5'(s);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      tent = 0; i = 0; bad = 0;
      while (active) begin
        tent++;
        if (valid) begin
          if (i >= n || int'(t_k) != ref_t[i]) bad++;
          else seen[t_k] = 1;
          i++;
        end
        @(negedge clk);
      end
      checks++;
      if (bad != 0 || i != n) begin failures++; $display("FAIL N=%0d bad=%0d count=%0d", n, bad, i); end
      checks++;
      for (int x = 0; x < n; x++) if (!seen[x]) bad++;
      if (bad != 0) begin failures++; $display("FAIL N=%0d not a permutation", n); end
      checks++;
      if (tent != nm || 3 * tent > 4 * n) begin
        failures++; $display("FAIL N=%0d tentative %0d ref %0d", n, tent, nm);
      end
      if (n == 144) begin
        checks++;
        if (tent != 191) begin failures++; $display("FAIL N_M(144)=%0d", tent); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
