// tb_ctc_par_addr: for every frame size and every step t of a segment,
// computes by brute force the natural addresses Pi(k*N/P + t) needed by the
// P SISOs and checks that ctc_par_addr, fed with SISO 0's address, returns
// the common word adx and each SISO's bank idx^k; also checks that the P
// banks are distinct (no collision).
module tb_ctc_par_addr;
  import wimax_pkg::*;
  size_idx_t size;
  logic [NW-1:0] i_addr;
  logic [SEGW-1:0] adx;
  logic [1:0] idx [P_MAX];
  int checks = 0, failures = 0;

  ctc_par_addr dut (.*);

  function automatic int pi(int s, int j);
    int n, pp;
    n = n_of(5'(s));
    case (j % 4)
      0: pp = 0;
      1: pp = n / 2 + ctc_p_of(5'(s), 1);
      2: pp = ctc_p_of(5'(s), 2);
      default: pp = n / 2 + ctc_p_of(5'(s), 3);
    endcase
    return (ctc_p_of(5'(s), 0) * j + pp + 1) % n;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NUM_SIZES; s++) begin
      int n, p, seg, bad, coll;
      n = n_of(5'(s)); p = 1 << logp_of(5'(s)); seg = n / p;
      size = 5'(s);
      bad = 0; coll = 0;
      for (int t = 0; t < seg; t++) begin
        int used;
        used = 0;
        i_addr = NW'(pi(s, t));
        #1;
        for (int k = 0; k < p; k++) begin
          int a;
          a = pi(s, k * seg + t);
          if (a / seg != int'(idx[k]) || a % seg != int'(adx)) bad++;
          if (used & (1 << idx[k])) coll++;
          used |= 1 << idx[k];
        end
      end
      checks++;
      if (bad != 0) begin failures++; $display("FAIL N=%0d P=%0d mismatches=%0d", n, p, bad); end
      checks++;
      if (coll != 0) begin failures++; $display("FAIL N=%0d collisions=%0d", n, coll); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
