// tb_ei_mem: random writes (each bank independently enabled, random word
// and extrinsic triple) and random reads on all banks of the extrinsic
// memory, checked against an array model.  Reads are asynchronous, so the
// read data are compared in the same cycle; writes take effect at the edge.
module tb_ei_mem;
  import wimax_pkg::*;
  localparam int P = 4, DEPTH = 20;
  logic clk = 0;
  logic [$clog2(DEPTH)-1:0] rd_addr [P], wr_addr [P];
  ext_t rd_data [P], wr_data [P];
  logic we [P];
  ext_t model [P][DEPTH];
  int checks = 0, failures = 0;

  ei_mem #(.P(P), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word first so that every read is of a written value
    for (int a = 0; a < DEPTH; a++) begin
      for (int b = 0; b < P; b++) begin
        we[b] = 1'b1; wr_addr[b] = 5'(a); wr_data[b] = ext_t'($urandom);
        model[b][a] = wr_data[b]; rd_addr[b] = '0;
      end
      @(negedge clk);
    end
    for (int t = 0; t < 2000; t++) begin
      for (int b = 0; b < P; b++) begin
        we[b] = 1'($urandom); wr_addr[b] = 5'($urandom % DEPTH); wr_data[b] = ext_t'($urandom);
        rd_addr[b] = 5'($urandom % DEPTH);
      end
      #1;
      for (int b = 0; b < P; b++) begin
        checks++;
        if (rd_data[b] != model[b][rd_addr[b]]) failures++;
      end
      @(posedge clk);
      for (int b = 0; b < P; b++) if (we[b]) model[b][wr_addr[b]] = wr_data[b];
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
