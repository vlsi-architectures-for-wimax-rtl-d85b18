// tb_ctc_decoder: end-to-end test of the parallel CTC decoder.
// Random frames are turbo-encoded by the independent reference encoder,
// mapped to 6-bit LLRs (+-8 plus uniform noise that flips some of them) and
// written into the input buffer; the decoded couples are compared with the
// information bits.  Frame sizes cover P = 1, 2 and 4; the second frame is
// written while the first is being decoded (double buffering).  The decode
// time must equal 2*ITER*(N/P + W + 1) cycles.
module tb_ctc_decoder;
  import wimax_pkg::*;
  import tb_ref_pkg::*;
  localparam int ITER = 8;
  logic clk = 0, rst_n = 0;
  size_idx_t in_size;
  logic in_we = 0, in_frame_done = 0, in_ready, busy, dec_done;
  logic [NW-1:0] in_addr, hd_rd_i;
  chan_t in_data;
  size_idx_t dec_size;
  logic [1:0] hd_rd_bits;
  int checks = 0, failures = 0;
  int overlap_seen = 0;

  ctc_decoder #(.ITER(ITER)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit fa [2][], fb [2][];

  function automatic llr_c_t chan_llr(bit v, int noise);
    int x;
    x = (v ? 8 : -8) + int'($urandom % (2 * noise + 1)) - noise;
    if (x > 31) x = 31;
    if (x < -31) x = -31;
    return llr_c_t'(x);
  endfunction

  task automatic send_frame(input int slot, input int s, input int noise);
    int n;
    bit y1[], w1[], y2[], w2[];
    n = n_of(5'(s));
    fa[slot] = new[n]; fb[slot] = new[n];
    foreach (fa[slot][k]) begin fa[slot][k] = $urandom; fb[slot][k] = $urandom; end
    ctc_encode(s, fa[slot], fb[slot], y1, w1, y2, w2);
    while (!in_ready) @(negedge clk);
    in_size = 5'(s);
    for (int k = 0; k < n; k++) begin
      in_we = 1; in_addr = NW'(k);
      in_data.a = chan_llr(fa[slot][k], noise); in_data.b = chan_llr(fb[slot][k], noise);
      in_data.y1 = chan_llr(y1[k], noise); in_data.w1 = chan_llr(w1[k], noise);
      in_data.y2 = chan_llr(y2[k], noise); in_data.w2 = chan_llr(w2[k], noise);
      if (busy) overlap_seen++;
      @(negedge clk);
    end
    in_we = 0;
    in_frame_done = 1; @(negedge clk); in_frame_done = 0;
  endtask

  task automatic check_frame(input int slot, input int s);
    int n, errs, t0, exp_cyc, p;
    n = n_of(5'(s)); p = 1 << logp_of(5'(s));
    t0 = 0;
    while (!busy) @(negedge clk);
    while (!dec_done) begin @(negedge clk); t0++; end
    exp_cyc = 2 * ITER * (n / p + win_of(5'(s)) + 1);
    checks++;
    if (t0 < exp_cyc - 2 || t0 > exp_cyc + 2) begin failures++; $display("FAIL N=%0d cycles %0d expected %0d", n, t0, exp_cyc); end
    errs = 0;
    for (int k = 0; k < n; k++) begin
      hd_rd_i = NW'(k); #1;
      if (hd_rd_bits != {fa[slot][k], fb[slot][k]}) errs++;
    end
    checks++;
    if (errs != 0) begin failures++; $display("FAIL N=%0d P=%0d decoded couples wrong: %0d", n, p, errs); end
    $display("N=%0d P=%0d W=%0d cycles=%0d errors=%0d", n, p, win_of(5'(s)), t0, errs);
  endtask

  initial begin
    in_size = 0; in_addr = 0; in_data = '0; hd_rd_i = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    send_frame(0, 0, 10);     // N=24,  P=1
    fork
      check_frame(0, 0);
      send_frame(1, 11, 10);  // N=240, P=2, written during the decoding of frame 0
    join
    check_frame(1, 11);
    send_frame(0, 12, 10);    // N=480, P=4
    check_frame(0, 12);
    send_frame(1, 5, 10);     // N=108, P=1
    check_frame(1, 5);
    send_frame(0, 9, 10);     // N=192, P=2
    check_frame(0, 9);
    checks++;
    if (overlap_seen == 0) begin failures++; $display("FAIL no frame was written during decoding"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
