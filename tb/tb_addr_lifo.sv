// tb_addr_lifo: pushes windows of random length (1..DEPTH) and random data,
// asserting flip with the last push of each window, while the previous
// window is popped at the same time, as the SISO does.  A queue model per
// window checks that each window comes out in reverse order, that empty is
// raised exactly when a window is used up, and that clear empties the LIFO.
// Windows of one run all have the same length, as in the decoder.
module tb_addr_lifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, flip = 0, pop = 0;
  logic [11:0] din = '0, dout;
  logic empty;
  int checks = 0, failures = 0;
  logic [11:0] popq [$];   // window being popped (top at the back)

  addr_lifo #(.DW(12), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [11:0] pushq [$];
    int lens [5] = '{1, 3, DEPTH, 5, 2};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (!empty) failures++;
    foreach (lens[li]) begin
      // windows of equal length, pushed back to back while the previous
      // window is popped one entry per cycle
      for (int w = 0; w < 20; w++) begin
        pushq = {};
        for (int t = 0; t < lens[li]; t++) begin
          push = 1'b1;
          flip = (t == lens[li] - 1);
          din  = 12'($urandom);
          pop  = (popq.size() > 0);
          checks++;
          if (empty != (popq.size() == 0)) failures++;
          if (pop) begin
            checks++;
            if (dout != popq[$]) failures++;
          end
          @(posedge clk);
          if (pop) void'(popq.pop_back());
          pushq.push_back(din);
          @(negedge clk);
          if (flip) popq = pushq;
        end
      end
      push = 0; flip = 0;
      // drain the last window
      while (popq.size() > 0) begin
        pop = 1'b1;
        checks++; if (dout != popq[$] || empty) failures++;
        @(posedge clk); void'(popq.pop_back()); @(negedge clk);
      end
      pop = 0;
      checks++; if (!empty) failures++;
    end
    // clear drops a half-filled window
    push = 1; din = 12'h123; @(negedge clk); flip = 1; @(negedge clk); push = 0; flip = 0;
    checks++; if (empty) failures++;
    clear = 1; @(negedge clk); clear = 0;
    checks++; if (!empty) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
