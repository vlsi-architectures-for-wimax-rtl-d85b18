// tb_ctc_siso: one SISO decodes tail-biting codewords of the constituent
// code (independent encoder model) in which one in ten systematic LLRs
// has the wrong sign, so that only a decoder that follows the trellis
// recovers them.  The SISO is run for three passes over the segment with its
// own border metrics fed back (tail-biting, P = 1); after the third pass all
// hard decisions must be right.  Also checks the output order (reverse within
// each window), the one-window latency and that each output position
// appears exactly once.  The first pass (all inherited metrics zero) is
// compared decision by decision with an integer windowed max-log-MAP model.
module tb_ctc_siso;
  import wimax_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, half = 0, first = 0;
  logic [SEGW-1:0] seg_len;
  logic [5:0] win;
  llr_c_t la, lb, ly, lw;
  ext_t apri;
  sm_t alpha_ext [8], beta_ext [8];
  logic busy, fwd_act, out_valid;
  logic [SEGW-1:0] out_t;
  ext_t ext;
  logic [1:0] u_hat;
  int checks = 0, failures = 0;

  ctc_siso dut (.clk, .rst_n, .start, .seg_len, .win, .half, .first, .la, .lb, .ly, .lw, .apri,
                .alpha_in(alpha_ext), .beta_in(beta_ext), .alpha_ext, .beta_ext,
                .busy, .fwd_act, .out_valid, .out_t, .ext, .u_hat);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit a[], b[], y[], w[];
  int lla[], llb[], lly[], llw[];

  // integer reference of the first pass: alpha from zero over the segment,
  // beta from zero at every window end; returns hard decisions
  function automatic void ref_pass0(input int n, input int wv, output int uref[]);
    int al [][8];
    al = new[n + 1];
    uref = new[n];
    for (int s = 0; s < 8; s++) al[0][s] = 0;
    for (int t = 0; t < n; t++) begin
      for (int s = 0; s < 8; s++) al[t+1][s] = -1000000;
      for (int s = 0; s < 8; s++)
        for (int u = 0; u < 4; u++) begin
          logic [4:0] r; int g;
          r = enc_step(3'(s), u[1], u[0]);
          g = (u[1] ? lla[t] : 0) + (u[0] ? llb[t] : 0) + (r[1] ? lly[t] : 0) + (r[0] ? llw[t] : 0);
          if (al[t][s] + g > al[t+1][r[4:2]]) al[t+1][r[4:2]] = al[t][s] + g;
        end
    end
    for (int w0 = 0; w0 < n; w0 += wv) begin
      int be [8], bn [8];
      for (int s = 0; s < 8; s++) be[s] = 0;
      for (int t = w0 + wv - 1; t >= w0; t--) begin
        int m [4], best;
        for (int u = 0; u < 4; u++) m[u] = -1000000;
        for (int s = 0; s < 8; s++) bn[s] = -1000000;
        for (int s = 0; s < 8; s++)
          for (int u = 0; u < 4; u++) begin
            logic [4:0] r; int g;
            r = enc_step(3'(s), u[1], u[0]);
            g = (u[1] ? lla[t] : 0) + (u[0] ? llb[t] : 0) + (r[1] ? lly[t] : 0) + (r[0] ? llw[t] : 0);
            if (al[t][s] + g + be[r[4:2]] > m[u]) m[u] = al[t][s] + g + be[r[4:2]];
            if (g + be[r[4:2]] > bn[s]) bn[s] = g + be[r[4:2]];
          end
        best = 0;
        for (int u = 1; u < 4; u++) if (m[u] - m[0] > m[best] - m[0]) best = u;
        uref[t] = best;
        be = bn;
      end
    end
  endfunction

  task automatic run_frame(input int n, input int wv);
    int nerr_last, order_bad, lat_bad, cnt, ref_bad;
    int uref[];
    bit seen[];
    a = new[n]; b = new[n];
    foreach (a[k]) begin a[k] = $urandom; b[k] = $urandom; end
    rsc_encode(a, b, y, w);
    lla = new[n]; llb = new[n]; lly = new[n]; llw = new[n];
    foreach (a[k]) begin
      lla[k] = a[k] ? 6 : -6; llb[k] = b[k] ? 6 : -6;
      if ($urandom % 10 == 0) lla[k] = -lla[k] / 2;
      if ($urandom % 10 == 0) llb[k] = -llb[k] / 2;
      lly[k] = y[k] ? 12 : -12; llw[k] = w[k] ? 12 : -12;
    end
    seg_len = SEGW'(n); win = 6'(wv);
    ref_pass0(n, wv, uref);
    for (int pass = 0; pass < 3; pass++) begin
      int c, exp_t;
      seen = new[n];
      first = (pass == 0);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      c = 0; ref_bad = 0; nerr_last = 0; order_bad = 0; lat_bad = 0; cnt = 0;
      while (busy) begin
        if (c < n) begin
          la = llr_c_t'(lla[c]); lb = llr_c_t'(llb[c]); ly = llr_c_t'(lly[c]); lw = llr_c_t'(llw[c]);
        end
        apri = '0;
        #1;
        if (out_valid) begin
          int wi, off;
          wi = (c - wv) / wv; off = (c - wv) % wv;
          exp_t = wi * wv + (wv - 1 - off);
          if (int'(out_t) != exp_t) order_bad++;
          if (c < wv) lat_bad++;
          if (pass == 0 && out_t < n && int'(u_hat) != uref[out_t]) ref_bad++;
          if (out_t < n) begin
            if (seen[out_t]) order_bad++;
            seen[out_t] = 1;
            if (u_hat != {a[out_t], b[out_t]}) nerr_last++;
          end
          cnt++;
        end
        @(negedge clk);
        c++;
      end
      checks++;
      if (order_bad != 0 || lat_bad != 0 || cnt != n || c != n + wv) begin
        failures++;
        $display("FAIL n=%0d W=%0d pass=%0d order_bad=%0d lat_bad=%0d cnt=%0d cycles=%0d", n, wv, pass, order_bad, lat_bad, cnt, c);
      end
      if (pass == 0) begin
        checks++;
        if (ref_bad != 0) begin failures++; $display("FAIL n=%0d W=%0d first pass differs from reference at %0d steps", n, wv, ref_bad); end
      end
      if (pass == 2) begin
        checks++;
        if (nerr_last != 0) begin failures++; $display("FAIL n=%0d W=%0d errors=%0d", n, wv, nerr_last); end
      end
      $display("n=%0d W=%0d pass=%0d decision errors=%0d", n, wv, pass, nerr_last);
    end
  endtask

  initial begin
    la = '0; lb = '0; ly = '0; lw = '0; apri = '0; seg_len = 24; win = 24;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(48, 16);
    run_frame(24, 24);
    run_frame(96, 32);
    run_frame(180, 30);
    run_frame(600, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
