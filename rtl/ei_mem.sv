// ei_mem: extrinsic information memory (EI-MEM) of the parallel decoder.
//
// P banks of DEPTH words; a word holds the three 8-bit extrinsic LLRs of a
// couple (u = 01, 10, 11).  Each bank has one asynchronous read port and one
// synchronous write port, so in every cycle each SISO can read the a-priori
// word of its forward step and write the extrinsic word of its backward step
// at another address.  Bank b holds the natural addresses
// [b N/P, (b+1) N/P).  The banking follows the architecture; the port types
// are this design's choice.
module ei_mem
  import wimax_pkg::*;
#(
  parameter int unsigned P     = P_MAX,
  parameter int unsigned DEPTH = SEG_MAX
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] rd_addr [P],
  output ext_t                     rd_data [P],
  input  logic                     we      [P],
  input  logic [$clog2(DEPTH)-1:0] wr_addr [P],
  input  ext_t                     wr_data [P]
);
  for (genvar b = 0; b < P; b++) begin : g_bank
    ext_t mem [DEPTH];
    always_ff @(posedge clk)
      if (we[b]) mem[wr_addr[b]] <= wr_data[b];
    assign rd_data[b] = mem[rd_addr[b]];
  end
endmodule
