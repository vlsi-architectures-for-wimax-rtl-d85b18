// tb_ctc_in_buf: writes frames of random channel LLRs in natural order into
// one half of the double buffer while the other half, holding the previous
// frame, is read through both read ports.  Address i of a frame must be
// found in bank i / (N/P), word i mod (N/P), where N/P is the segment
// length of the frame size; the read half must be unaffected by writes to
// the other half.
module tb_ctc_in_buf;
  import wimax_pkg::*;
  logic clk = 0;
  logic wsel, rsel, we;
  size_idx_t wsize;
  logic [NW-1:0] waddr;
  chan_t wdata;
  logic [9:0] rs_addr [P_MAX], rp_addr [P_MAX];
  chan_t rs_data [P_MAX], rp_data [P_MAX];
  int checks = 0, failures = 0;
  chan_t frame [2][N_MAX];
  int    fsz [2];

  ctc_in_buf dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // read back the frame held in half `h` and compare
  task automatic check_half(input int h);
    int n, p, seg;
    n = n_of(5'(fsz[h])); p = 1 << logp_of(5'(fsz[h])); seg = n / p;
    rsel = 1'(h);
    for (int a = 0; a < seg; a++) begin
      int b;
      b = int'($urandom % p);
      for (int k = 0; k < P_MAX; k++) begin rs_addr[k] = 10'(a); rp_addr[k] = 10'(seg - 1 - a); end
      #1;
      for (int k = 0; k < p; k++) begin
        checks += 2;
        if (rs_data[k] != frame[h][k * seg + a]) failures++;
        if (rp_data[k] != frame[h][k * seg + seg - 1 - a]) failures++;
      end
      #1;
    end
  endtask

  initial begin
    int sizes [5] = '{0, 10, 12, 16, 3};
    we = 0; wsel = 0; rsel = 1; wsize = '0; waddr = '0; wdata = '0;
    foreach (rs_addr[k]) begin rs_addr[k] = '0; rp_addr[k] = '0; end
    fsz = '{0, 0};
    foreach (sizes[si]) begin
      int n, h;
      h = si % 2;
      n = n_of(5'(sizes[si]));
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        we = 1; wsel = 1'(h); wsize = 5'(sizes[si]); waddr = NW'(i); wdata = chan_t'({$urandom, $urandom});
        frame[h][i] = wdata;
        // meanwhile the other half is read at random
        if (si > 0) begin
          int seg, k, a;
          seg = n_of(5'(fsz[1 - h])) >> logp_of(5'(fsz[1 - h]));
          rsel = 1'(1 - h);
          a = int'($urandom % seg);
          k = int'($urandom % (1 << logp_of(5'(fsz[1 - h]))));
          rs_addr[k] = 10'(a);
          #1;
          checks++;
          if (rs_data[k] != frame[1 - h][k * seg + a]) failures++;
        end
      end
      @(negedge clk);
      we = 0;
      fsz[h] = sizes[si];
      check_half(h);
      if (si > 0) check_half(1 - h);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
