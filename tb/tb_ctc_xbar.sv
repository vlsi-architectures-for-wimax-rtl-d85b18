// tb_ctc_xbar: drives the crossbar in both modes (gather, scatter) for
// P = 4 and P = 2 with random data and random permutations as select, and
// checks out[k] = in[sel[k]] (gather) and out[sel[k]] = in[k] (scatter).
// Purely combinational; values are checked 1 time unit after each change.
module tb_ctc_xbar;
  int checks = 0, failures = 0;
  logic [7:0] din4 [4], g4 [4], s4 [4];
  logic [1:0] sel4 [4];
  logic [7:0] din2 [2], g2 [2], s2 [2];
  logic       sel2 [2];

  ctc_xbar #(.P(4), .DW(8), .GATHER(1'b1)) u_g4 (.din(din4), .sel(sel4), .dout(g4));
  ctc_xbar #(.P(4), .DW(8), .GATHER(1'b0)) u_s4 (.din(din4), .sel(sel4), .dout(s4));
  ctc_xbar #(.P(2), .DW(8), .GATHER(1'b1)) u_g2 (.din(din2), .sel(sel2), .dout(g2));
  ctc_xbar #(.P(2), .DW(8), .GATHER(1'b0)) u_s2 (.din(din2), .sel(sel2), .dout(s2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int perm [4];
      int r;
      perm = '{0, 1, 2, 3};
      for (int k = 3; k > 0; k--) begin
        int j, tmp;
        j = int'($urandom % (k + 1)); tmp = perm[k]; perm[k] = perm[j]; perm[j] = tmp;
      end
      r = int'($urandom % 2);
      for (int k = 0; k < 4; k++) begin din4[k] = 8'($urandom); sel4[k] = 2'(perm[k]); end
      for (int k = 0; k < 2; k++) begin din2[k] = 8'($urandom); sel2[k] = 1'(k ^ r); end
      #1;
      for (int k = 0; k < 4; k++) begin
        checks += 2;
        if (g4[k] != din4[perm[k]]) failures++;
        if (s4[perm[k]] != din4[k]) failures++;
      end
      for (int k = 0; k < 2; k++) begin
        checks += 2;
        if (g2[k] != din2[k ^ r]) failures++;
        if (s2[k ^ r] != din2[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
