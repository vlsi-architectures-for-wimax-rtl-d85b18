// tb_sd_lf_gen: checks subpacket length L_k and start F_k against
// L = 48*m*Nsch and F = (SPID*L) mod 6N computed with plain multiplication
// and modulo, over all frame sizes, modulations, SPIDs and random N_SCH.
// Also checks that F_k is ready within 1 + ceil(SPID*L/6N) + 1 cycles.
module tb_sd_lf_gen;
  import wimax_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  size_idx_t size;
  logic [8:0] nsch;
  logic [2:0] mod_order;
  logic [1:0] spid;
  logic [17:0] l_k;
  logic [13:0] f_k;
  logic busy, done;
  int checks = 0, failures = 0;

  sd_lf_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int s, input int m, input int ns, input int sp);
    int exp_l, exp_f, cyc, bound;
    size = 5'(s); mod_order = 3'(m); nsch = 9'(ns); spid = 2'(sp);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    exp_l = 48 * m * ns;
    exp_f = (sp * exp_l) % (6 * n_of(5'(s)));
    bound = (sp * exp_l) / (6 * n_of(5'(s))) + 3;
    cyc = 0;
    while (!done && cyc < 5000) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (l_k !== 18'(exp_l) || f_k !== 14'(exp_f)) begin
      failures++;
      $display("FAIL s=%0d m=%0d nsch=%0d spid=%0d L=%0d/%0d F=%0d/%0d", s, m, ns, sp, l_k, exp_l, f_k, exp_f);
    end
    checks++;
    if (cyc > bound) begin failures++; $display("FAIL latency %0d > %0d", cyc, bound); end
  endtask

  initial begin
    size = 0; nsch = 1; mod_order = 2; spid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NUM_SIZES; s++)
      for (int mi = 0; mi < 3; mi++)
        for (int sp = 0; sp < 4; sp++) begin
          int ns;
          ns = 1 + ($urandom % 480);
          run(s, 2 + 2 * mi, ns, sp);
        end
    run(16, 6, 480, 3);
    run(0, 2, 1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
