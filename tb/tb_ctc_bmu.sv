// tb_ctc_bmu: random LLRs; each of the 16 branch metrics is compared with
// the sum of the LLRs of the bits set in its index {A,B,Y,W} plus the
// a-priori term of its couple.
module tb_ctc_bmu;
  import wimax_pkg::*;
  llr_c_t la, lb, ly, lw;
  ext_t apri;
  logic signed [9:0] gamma [16];
  int checks = 0, failures = 0;

  ctc_bmu dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int ap [4];
      la = llr_c_t'($urandom); lb = llr_c_t'($urandom); ly = llr_c_t'($urandom); lw = llr_c_t'($urandom);
      apri.e01 = llr_e_t'($urandom); apri.e10 = llr_e_t'($urandom); apri.e11 = llr_e_t'($urandom);
      ap[0] = 0; ap[1] = apri.e01; ap[2] = apri.e10; ap[3] = apri.e11;
      #1;
      for (int g = 0; g < 16; g++) begin
        int e;
        e = ap[g / 4] + (g[3] ? int'(la) : 0) + (g[2] ? int'(lb) : 0) + (g[1] ? int'(ly) : 0) + (g[0] ? int'(lw) : 0);
        checks++;
        if (int'(gamma[g]) != e) begin
          failures++;
          if (failures < 5) $display("FAIL g=%0d got %0d exp %0d", g, gamma[g], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
