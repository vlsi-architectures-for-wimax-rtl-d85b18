// tb_wimax_ctc_rx: end-to-end test of the receiver.  For each frame the
// testbench turbo-encodes random couples, subblock-interleaves them into the
// 6N circular buffer, sends the L_k LLRs of one HARQ subpacket starting at
// F_k (noisy 6-bit LLRs, four per cycle) and compares the decoded couples
// with the information bits.  Frames are sent back to back, so that symbol
// deselection and deinterleaving of one frame overlap the decoding of the
// previous one.  The mechanisms exercised are counted and each must occur:
// puncturing (L < 6N), repetition (L > 6N), a subpacket wrapping round the
// buffer end, decoder parallelism P = 1, 2 and 4, and overlap of the front
// end with decoding, and the A/B swap of odd interleaved addresses.
// Frames are chosen so that systematic LLRs are present (a SPID-3 subpacket
// of a punctured frame carries parity only and is meant for HARQ
// combining, which this receiver does not do).  Runs at the default
// parameters (8 iterations).
module tb_wimax_ctc_rx;
  import wimax_pkg::*;
  import tb_ref_pkg::*;
  localparam int NF = 4;
  logic clk = 0, rst_n = 0, start = 0;
  size_idx_t size;
  logic [8:0] nsch;
  logic [2:0] mod_order;
  logic [1:0] spid;
  logic ready, in_valid = 0, in_ready, dec_busy, dec_done;
  llr_c_t in_llr [4];
  size_idx_t dec_size;
  logic [NW-1:0] hd_rd_i;
  logic [1:0] hd_rd_bits;
  int checks = 0, failures = 0;
  int n_swap = 0, n_punct = 0, n_rep = 0, n_wrap = 0, n_p1 = 0, n_p2 = 0, n_p4 = 0, n_overlap = 0, frames_ok = 0;

  wimax_ctc_rx dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame list: size index, modulation, N_SCH, SPID, noise amplitude
  int f_s [NF]  = '{0, 11, 12, 7};
  int f_m [NF]  = '{2, 4, 6, 2};
  int f_ns [NF] = '{2, 6, 12, 5};
  int f_sp [NF] = '{0, 1, 2, 0};
  int f_nz [NF] = '{10, 4, 10, 4};
  bit fa [NF][], fb [NF][];

  function automatic llr_c_t llr_of(bit v, int noise);
    int x;
    x = (v ? 8 : -8) + int'($urandom % (2 * noise + 1)) - noise;
    return llr_c_t'(x);
  endfunction

  task automatic send(input int f);
    int n, L, F;
    bit cbuf[];
    int rx[];
    n = n_of(5'(f_s[f]));
    fa[f] = new[n]; fb[f] = new[n];
    foreach (fa[f][k]) begin fa[f][k] = $urandom; fb[f][k] = $urandom; end
    tx_buffer(f_s[f], fa[f], fb[f], cbuf);
    L = 48 * f_m[f] * f_ns[f];
    F = (f_sp[f] * L) % (6 * n);
    if (L < 6 * n) n_punct++;
    if (L > 6 * n) n_rep++;
    if (F + L > 6 * n) n_wrap++;
    rx = new[L];
    foreach (rx[r]) rx[r] = int'(llr_of(cbuf[(F + r) % (6 * n)], f_nz[f]));
    while (!ready) @(negedge clk);
    size = 5'(f_s[f]); mod_order = 3'(f_m[f]); nsch = 9'(f_ns[f]); spid = 2'(f_sp[f]);
    start = 1; @(negedge clk); start = 0;
    for (int w = 0; w < L / 4; w++) begin
      for (int j = 0; j < 4; j++) in_llr[j] = llr_c_t'(rx[4 * w + j]);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  task automatic receive(input int f);
    int n, errs, p;
    while (!dec_done) @(negedge clk);
    n = n_of(5'(f_s[f])); p = 1 << logp_of(5'(f_s[f]));
    if (p == 1) n_p1++; else if (p == 2) n_p2++; else n_p4++;
    checks++;
    if (dec_size != 5'(f_s[f])) begin failures++; $display("FAIL frame %0d size %0d", f, dec_size); end
    errs = 0;
    for (int k = 0; k < n; k++) begin
      hd_rd_i = NW'(k); #1;
      if (hd_rd_bits != {fa[f][k], fb[f][k]}) errs++;
    end
    checks++;
    if (errs != 0) begin failures++; $display("FAIL frame %0d N=%0d: %0d couples wrong", f, n, errs); end
    else frames_ok++;
    $display("frame %0d N=%0d P=%0d decoded, errors=%0d", f, n, p, errs);
    @(negedge clk);
  endtask

  always @(posedge clk) if (dut.u_dec.u_hd.we && dut.u_dec.u_hd.swap) n_swap++;
  always @(posedge clk) if (dec_busy && (dut.sd_busy || dut.di_busy)) n_overlap++;

  initial begin
    size = 0; nsch = 1; mod_order = 2; spid = 0; hd_rd_i = 0;
    foreach (in_llr[j]) in_llr[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      for (int f = 0; f < NF; f++) send(f);
      for (int f = 0; f < NF; f++) receive(f);
    join
    checks += 8;
    if (n_swap == 0)    begin failures++; $display("FAIL A/B swap never exercised"); end
    if (n_punct == 0)   begin failures++; $display("FAIL puncturing never exercised"); end
    if (n_rep == 0)     begin failures++; $display("FAIL repetition never exercised"); end
    if (n_wrap == 0)    begin failures++; $display("FAIL no subpacket wrapped"); end
    if (n_p1 == 0)      begin failures++; $display("FAIL P=1 never used"); end
    if (n_p2 == 0)      begin failures++; $display("FAIL P=2 never used"); end
    if (n_p4 == 0)      begin failures++; $display("FAIL P=4 never used"); end
    if (n_overlap == 0) begin failures++; $display("FAIL front end never overlapped decoding"); end
    $display("mechanisms: swapped_writes=%0d punctured=%0d repeated=%0d wrapped=%0d P1=%0d P2=%0d P4=%0d overlap_cycles=%0d",
             n_swap, n_punct, n_rep, n_wrap, n_p1, n_p2, n_p4, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
