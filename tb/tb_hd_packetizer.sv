// tb_hd_packetizer: for several frame sizes, writes a frame of random
// decided couples the way the decoder does: at each step every active SISO
// k supplies a couple for word adx of bank bank[k] (a random permutation of
// the active banks), with a random swap flag meaning the couple is stored
// with A and B exchanged.  The frame is then read back on the natural-order
// port; the couple of address i must be found at bank i / (N/P), word
// i mod (N/P), with the swap undone.
module tb_hd_packetizer;
  import wimax_pkg::*;
  logic clk = 0;
  size_idx_t size;
  logic we, swap;
  logic [1:0] bank [P_MAX];
  logic [9:0] adx;
  logic [1:0] u_hat [P_MAX];
  logic [P_MAX-1:0] active;
  logic [NW-1:0] rd_i;
  logic [1:0] rd_bits;
  int checks = 0, failures = 0;

  hd_packetizer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes [4] = '{0, 9, 11, 16};
    logic [1:0] expect_bits [N_MAX];
    we = 0; swap = 0; adx = '0; active = '0; rd_i = '0; size = '0;
    foreach (bank[k]) begin bank[k] = '0; u_hat[k] = '0; end
    foreach (sizes[si]) begin
      int n, p, seg;
      size = 5'(sizes[si]);
      n = n_of(size); p = 1 << logp_of(size); seg = n / p;
      active = 4'((1 << p) - 1);
      for (int a = 0; a < seg; a++) begin
        int perm [4];
        perm = '{0, 1, 2, 3};
        for (int k = p - 1; k > 0; k--) begin
          int j, tmp;
          j = int'($urandom % (k + 1)); tmp = perm[k]; perm[k] = perm[j]; perm[j] = tmp;
        end
        @(negedge clk);
        we = 1; adx = 10'(a); swap = 1'($urandom);
        for (int k = 0; k < P_MAX; k++) begin
          bank[k] = 2'(perm[k]); u_hat[k] = 2'($urandom);
          if (k < p) expect_bits[perm[k] * seg + a] = swap ? {u_hat[k][0], u_hat[k][1]} : u_hat[k];
        end
      end
      @(negedge clk);
      we = 0;
      for (int i = 0; i < n; i++) begin
        rd_i = NW'(i);
        #1;
        checks++;
        if (rd_bits != expect_bits[i]) begin
          failures++;
          if (failures < 5) $display("FAIL N=%0d i=%0d got %b exp %b", n, i, rd_bits, expect_bits[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
