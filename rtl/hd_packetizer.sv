// hd_packetizer: collects the decoded couples and stores them in the hard
// decision memory.
//
// In the last half-iteration every SISO delivers one decided couple u_k =
// (A,B) per cycle, together with the bank/word address it was read from.
// For a couple at an odd natural address, read in interleaved order, A and B
// were exchanged by the interleaver; the packetizer undoes the exchange and
// writes the P couples into the P banks of the hard decision memory (one
// write per bank per cycle, collision free like EI-MEM).  The host reads
// the decoded frame in natural order through rd_i: a ctc_par_addr instance
// splits i into bank and word, and {A, B} of couple i is returned
// combinationally.  Only the name and position of this block are given by
// the architecture; this organisation is this design's own.
module hd_packetizer
  import wimax_pkg::*;
#(
  parameter int unsigned P     = P_MAX,
  parameter int unsigned DEPTH = SEG_MAX
) (
  input  logic                     clk,
  input  size_idx_t                size,
  input  logic                     we,
  input  logic                     swap,
  input  logic [$clog2(P)-1:0]     bank  [P],
  input  logic [$clog2(DEPTH)-1:0] adx,
  input  logic [1:0]               u_hat [P],
  input  logic [P-1:0]             active,
  // host read port, natural order
  input  logic [NW-1:0]            rd_i,
  output logic [1:0]               rd_bits
);
  logic [1:0]               wdata [P];
  logic [1:0]               bdata [P];
  logic [1:0]               rdata [P];
  logic                     bwe   [P];
  logic [SEGW-1:0]          r_adx;
  logic [1:0]               r_idx [P_MAX];

  always_comb begin
    for (int b = 0; b < P; b++) begin
      bdata[b] = '0;
      bwe[b]   = 1'b0;
    end
    for (int k = 0; k < P; k++) begin
      wdata[k] = swap ? {u_hat[k][0], u_hat[k][1]} : u_hat[k];
      if (active[k]) begin
        bdata[bank[k]] = wdata[k];
        bwe[bank[k]]   = we;
      end
    end
  end

  for (genvar b = 0; b < P; b++) begin : g_bank
    logic [1:0] mem [DEPTH];
    always_ff @(posedge clk)
      if (bwe[b]) mem[adx] <= bdata[b];
    assign rdata[b] = mem[$clog2(DEPTH)'(r_adx)];
  end

  ctc_par_addr u_rd_split (.size, .i_addr(rd_i), .adx(r_adx), .idx(r_idx));
  assign rd_bits = rdata[$clog2(P)'(r_idx[0])];
endmodule
