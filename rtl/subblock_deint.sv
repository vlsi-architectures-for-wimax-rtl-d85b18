// subblock_deint: WiMAX subblock deinterleaver.
//
// The six subblocks A, B, Y1, W1, Y2, W2 (N LLRs each) were permuted by the
// same subblock interleaver, and Y1/Y2 and W1/W2 were sent as symbol-by-
// symbol multiplexed "macro-subblocks" of 2N LLRs.  A single address
// generator (sbi_addr_gen) therefore serves all six subblocks: when the i-th
// valid address T_i appears, the six LLRs of received position i
// (A[i], B[i], Y[2i], Y[2i+1], W[2i], W[2i+1]) are read from the symbol-
// deselection buffer and written as one couple word at natural address T_i
// of the decoder input buffer.  Six LLRs are moved per valid address, so a
// frame takes N_M <= 4N/3 cycles (4.5 LLRs per clock on average).
// The single shared generator and the six-LLR-per-cycle transfer follow the
// architecture; the port protocol is this design's own.
//
// Timing: `start` pulse; reads and writes are combinational from the
// generator state, one per cycle; `done` pulses with the last write.
module subblock_deint
  import wimax_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  size_idx_t     size,
  output logic          busy,
  output logic          done,
  // symbol-deselection output buffer read port
  output logic [NW-1:0] sd_rd_i,
  input  chan_t         sd_rd_data,
  // decoder input buffer write port
  output logic          wr_en,
  output logic [NW-1:0] wr_addr,
  output chan_t         wr_data
);
  logic          active, valid;
  logic [NW-1:0] t_k;
  logic [NW-1:0] i_cnt;

  sbi_addr_gen u_ag (
    .clk, .rst_n, .start, .size, .active, .t_k, .valid, .done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      i_cnt <= '0;
    else if (start)  i_cnt <= '0;
    else if (valid)  i_cnt <= i_cnt + 1'b1;
  end

  assign busy    = active;
  assign sd_rd_i = i_cnt;
  assign wr_en   = valid;
  assign wr_addr = t_k;
  assign wr_data = sd_rd_data;
endmodule
