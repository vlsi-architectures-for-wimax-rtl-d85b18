// tb_ctc_lo_proc: output processor against an integer reference of
// lambda_T(u) = max b(e) over u - max b(e) over 00, the hard decision and the
// saturated extrinsic outputs, with wrapped (offset) state metrics.
module tb_ctc_lo_proc;
  import wimax_pkg::*;
  import tb_ref_pkg::*;
  sm_t alpha [8], beta [8];
  logic signed [9:0] gamma [16];
  ext_t apri, ext;
  llr_c_t la, lb;
  logic [1:0] u_hat;
  int checks = 0, failures = 0;

  ctc_lo_proc dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v);
    return v > 127 ? 127 : (v < -127 ? -127 : v);
  endfunction

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int ai [8], bi [8], m [4], lt [4], ap [4], oa, ob, best, e;
      oa = int'($urandom % 4096); ob = int'($urandom % 4096);
      for (int s = 0; s < 8; s++) begin
        ai[s] = int'($urandom % 500); bi[s] = int'($urandom % 500);
        alpha[s] = sm_t'(ai[s] + oa); beta[s] = sm_t'(bi[s] + ob);
      end
      for (int g = 0; g < 16; g++) gamma[g] = 10'(int'($urandom % 400) - 200);
      la = llr_c_t'($urandom); lb = llr_c_t'($urandom);
      apri.e01 = llr_e_t'($urandom); apri.e10 = llr_e_t'($urandom); apri.e11 = llr_e_t'($urandom);
      ap[0] = 0; ap[1] = apri.e01; ap[2] = apri.e10; ap[3] = apri.e11;
      for (int u = 0; u < 4; u++) m[u] = -1000000;
      for (int s = 0; s < 8; s++)
        for (int u = 0; u < 4; u++) begin
          logic [4:0] r;
          int v;
          r = enc_step(3'(s), u[1], u[0]);
          v = (ai[s] - ai[0]) + int'(gamma[u * 4 + int'(r[1:0])]) + (bi[r[4:2]] - bi[0]);
          if (v > m[u]) m[u] = v;
        end
      best = 0;
      for (int u = 0; u < 4; u++) begin lt[u] = m[u] - m[0]; if (lt[u] > lt[best]) best = u; end
      #1;
      checks++;
      if (int'(u_hat) != best) begin failures++; if (failures < 5) $display("FAIL u_hat %0d exp %0d", u_hat, best); end
      e = sat(lt[1] - ap[1] - lb);
      checks++; if (int'(ext.e01) != e) begin failures++; if (failures < 5) $display("FAIL e01 %0d exp %0d", ext.e01, e); end
      e = sat(lt[2] - ap[2] - la);
      checks++; if (int'(ext.e10) != e) begin failures++; if (failures < 5) $display("FAIL e10 %0d exp %0d", ext.e10, e); end
      e = sat(lt[3] - ap[3] - la - lb);
      checks++; if (int'(ext.e11) != e) begin failures++; if (failures < 5) $display("FAIL e11 %0d exp %0d", ext.e11, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
