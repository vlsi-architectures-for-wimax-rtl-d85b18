// tb_subblock_deint: models the symbol-deselection buffer as an array of
// random LLRs, runs the deinterleaver for several frame sizes and checks
// every written couple against the reference permutation of Algorithm 1,
// that all N addresses are written once, and the cycle count N_M <= 4N/3.
module tb_subblock_deint;
  import wimax_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  size_idx_t size;
  logic busy, done, wr_en;
  logic [NW-1:0] sd_rd_i, wr_addr;
  chan_t sd_rd_data, wr_data;
  int checks = 0, failures = 0;
  llr_c_t buf6 [6*2400];
  int n;

  subblock_deint dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb begin
    int i;
    i = int'(sd_rd_i);
    sd_rd_data.a  = buf6[i];
    sd_rd_data.b  = buf6[n + i];
    sd_rd_data.y1 = buf6[2*n + 2*i];
    sd_rd_data.y2 = buf6[2*n + 2*i + 1];
    sd_rd_data.w1 = buf6[4*n + 2*i];
    sd_rd_data.w2 = buf6[4*n + 2*i + 1];
  end

  function automatic int bro(int v, int m);
    int r = 0;
    for (int b = 0; b < m; b++) if (v & (1 << b)) r |= 1 << (m - 1 - b);
    return r;
  endfunction

  initial begin
    int sizes [5] = '{0, 7, 11, 12, 16};
    n = 24; size = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (sizes[si]) begin
      int s, m, J, k, i, cyc, bad, writes;
      int pos_of [2400];   // natural address -> received position
      s = sizes[si];
      n = n_of(5'(s)); m = sbi_m_of(5'(s)); J = sbi_j_of(5'(s));
      for (int x = 0; x < 6 * n; x++) buf6[x] = llr_c_t'($urandom);
      k = 0; i = 0;
      while (i < n) begin
        int t;
        t = (1 << m) * (k % J) + bro(k / J, m);
        if (t < n) begin pos_of[t] = i; i++; end
        k++;
      end
      size = 5'(s);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0; bad = 0; writes = 0;
      while (busy) begin
        cyc++;
        if (wr_en) begin
          int p;
          writes++;
          p = pos_of[wr_addr];
          if (wr_data.a != buf6[p] || wr_data.b != buf6[n + p] ||
              wr_data.y1 != buf6[2*n + 2*p] || wr_data.y2 != buf6[2*n + 2*p + 1] ||
              wr_data.w1 != buf6[4*n + 2*p] || wr_data.w2 != buf6[4*n + 2*p + 1]) bad++;
        end
        @(negedge clk);
      end
      checks++;
      if (bad != 0 || writes != n) begin failures++; $display("FAIL N=%0d bad=%0d writes=%0d", n, bad, writes); end
      checks++;
      if (cyc != k || 3 * cyc > 4 * n) begin failures++; $display("FAIL N=%0d cycles %0d (ref %0d)", n, cyc, k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
