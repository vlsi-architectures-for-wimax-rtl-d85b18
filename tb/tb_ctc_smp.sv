// tb_ctc_smp: forward and backward state metric processors against an
// integer max-log reference built on the independent encoder model, with
// random metrics around a random offset so that the 12-bit metrics wrap.
module tb_ctc_smp;
  import wimax_pkg::*;
  import tb_ref_pkg::*;
  sm_t a_in [8], a_out [8], b_in [8], b_out [8];
  logic signed [9:0] gamma [16];
  int checks = 0, failures = 0;

  ctc_smp #(.BACKWARD(1'b0)) u_f (.sm_in(a_in), .gamma, .sm_out(a_out));
  ctc_smp #(.BACKWARD(1'b1)) u_b (.sm_in(b_in), .gamma, .sm_out(b_out));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int ai [8], bi [8], af [8], bb [8], off;
      off = int'($urandom % 4096);
      for (int s = 0; s < 8; s++) begin
        ai[s] = off + int'($urandom % 600);
        bi[s] = off + int'($urandom % 600);
        a_in[s] = sm_t'(ai[s]); b_in[s] = sm_t'(bi[s]);
        af[s] = -1000000; bb[s] = -1000000;
      end
      for (int g = 0; g < 16; g++) gamma[g] = 10'(int'($urandom % 400) - 200);
      for (int s = 0; s < 8; s++)
        for (int u = 0; u < 4; u++) begin
          logic [4:0] r;
          int v;
          r = enc_step(3'(s), u[1], u[0]);
          v = ai[s] + int'(gamma[u * 4 + int'(r[1:0])]);
          if (v > af[r[4:2]]) af[r[4:2]] = v;
          v = bi[r[4:2]] + int'(gamma[u * 4 + int'(r[1:0])]);
          if (v > bb[s]) bb[s] = v;
        end
      #1;
      for (int s = 0; s < 8; s++) begin
        checks += 2;
        if (a_out[s] != sm_t'(af[s])) begin failures++; if (failures < 5) $display("FAIL alpha s=%0d", s); end
        if (b_out[s] != sm_t'(bb[s])) begin failures++; if (failures < 5) $display("FAIL beta s=%0d", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
