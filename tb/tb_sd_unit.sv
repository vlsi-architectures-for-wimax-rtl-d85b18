// tb_sd_unit: sends random subpackets (punctured, exact, repeated up to and
// beyond four copies, all SPIDs) and compares the rebuilt 6N buffer, read
// through the subblock port, with a reference that places LLR r at
// (F+r) mod 6N, sums copies 0..3 and saturates to +-31.  Checks that the
// combining phase takes min(L,6N)/4 cycles.
module tb_sd_unit;
  import wimax_pkg::*;
  localparam int PL = 4;
  logic clk = 0, rst_n = 0, start = 0;
  size_idx_t size;
  logic [8:0] nsch;
  logic [2:0] mod_order;
  logic [1:0] spid;
  logic in_valid = 0, in_ready;
  llr_c_t in_llr [PL];
  logic busy, done;
  logic [NW-1:0] rd_i;
  chan_t rd_data;
  int checks = 0, failures = 0;

  sd_unit #(.P_LLR(PL), .NMAX(240)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_buf [6*240];
  int rx [];

  task automatic run(input int s, input int m, input int ns, input int sp);
    int n, L, F, c, t0, comb;
    n = n_of(5'(s));
    L = 48 * m * ns;
    F = (sp * L) % (6 * n);
    rx = new[L];
    foreach (rx[r]) rx[r] = int'($urandom % 41) - 20;
    for (int p = 0; p < 6 * n; p++) ref_buf[p] = 0;
    for (int r = 0; r < L; r++)
      if (F + r < 4 * 6 * n) ref_buf[(F + r) % (6 * n)] += rx[r];
    for (int p = 0; p < 6 * n; p++)
      ref_buf[p] = ref_buf[p] > 31 ? 31 : (ref_buf[p] < -31 ? -31 : ref_buf[p]);
    size = 5'(s); mod_order = 3'(m); nsch = 9'(ns); spid = 2'(sp);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int w = 0; w < L / PL; w++) begin
      for (int j = 0; j < PL; j++) in_llr[j] = llr_c_t'(rx[w * PL + j]);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    t0 = 0;
    while (!done) begin @(posedge clk); t0++; end
    comb = (L < 6 * n ? L : 6 * n) / PL;
    checks++;
    if (t0 > comb + 2) begin failures++; $display("FAIL comb cycles %0d > %0d", t0, comb + 2); end
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      rd_i = NW'(i);
      #1;
      checks++;
      if (int'(rd_data.a) != ref_buf[i] || int'(rd_data.b) != ref_buf[n + i] ||
          int'(rd_data.y1) != ref_buf[2*n + 2*i] || int'(rd_data.y2) != ref_buf[2*n + 2*i + 1] ||
          int'(rd_data.w1) != ref_buf[4*n + 2*i] || int'(rd_data.w2) != ref_buf[4*n + 2*i + 1]) begin
        failures++;
        if (failures < 10) $display("FAIL s=%0d L=%0d F=%0d i=%0d a=%0d/%0d y1=%0d/%0d", s, L, F, i,
                                    rd_data.a, ref_buf[i], rd_data.y1, ref_buf[2*n+2*i]);
      end
    end
  endtask

  initial begin
    size = 0; nsch = 1; mod_order = 2; spid = 0; rd_i = 0;
    foreach (in_llr[j]) in_llr[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 2, 1, 0);   // N=24: L=96 < 144, punctured
    run(0, 2, 1, 1);   // wraps around the buffer end
    run(0, 6, 2, 3);   // L=576 = 4 copies
    run(0, 6, 3, 2);   // L=864: copies beyond four dropped
    run(1, 4, 1, 3);   // N=36
    run(3, 2, 5, 1);   // N=72, L=480 repeated
    run(11, 4, 4, 2);  // N=240
    run(11, 2, 1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
