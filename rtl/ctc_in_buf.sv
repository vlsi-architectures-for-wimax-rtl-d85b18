// ctc_in_buf: decoder input buffer between the subblock deinterleaver and
// the decoding loop.
//
// Holds the six channel LLRs (A, B, Y1, W1, Y2, W2) of every couple of a
// frame, in two frame buffers used alternately, so that the deinterleaver
// can fill one frame while the decoder iterates on the previous one.  Each
// buffer is split into P_MAX banks like the extrinsic memory: the couple at
// natural address i sits in bank i div (N/P), word i mod (N/P) (found with a
// ctc_par_addr instance).  Every bank has two asynchronous read ports: the
// systematic port (A, B, read through the data crossbar at interleaved
// addresses) and the parity port (read in order).  The double buffering
// follows the architecture; the banking and ports are this design's choice.
module ctc_in_buf
  import wimax_pkg::*;
#(
  parameter int unsigned DEPTH = SEG_MAX
) (
  input  logic                     clk,
  // write side (deinterleaver)
  input  logic                     wsel,
  input  size_idx_t                wsize,
  input  logic                     we,
  input  logic [NW-1:0]            waddr,
  input  chan_t                    wdata,
  // read side (decoder)
  input  logic                     rsel,
  input  logic [$clog2(DEPTH)-1:0] rs_addr [P_MAX],
  output chan_t                    rs_data [P_MAX],
  input  logic [$clog2(DEPTH)-1:0] rp_addr [P_MAX],
  output chan_t                    rp_data [P_MAX]
);
  logic [SEGW-1:0] w_adx;
  logic [1:0]      w_idx [P_MAX];

  ctc_par_addr u_wsplit (.size(wsize), .i_addr(waddr), .adx(w_adx), .idx(w_idx));

  localparam int unsigned AW = $clog2(2*DEPTH);

  function automatic logic [AW-1:0] loc(input logic sel, input logic [AW-1:0] a);
    return sel ? a + AW'(DEPTH) : a;
  endfunction

  for (genvar b = 0; b < P_MAX; b++) begin : g_bank
    chan_t mem [2*DEPTH];
    always_ff @(posedge clk)
      if (we && w_idx[0] == 2'(b)) mem[loc(wsel, AW'(w_adx))] <= wdata;
    assign rs_data[b] = mem[loc(rsel, AW'(rs_addr[b]))];
    assign rp_data[b] = mem[loc(rsel, AW'(rp_addr[b]))];
  end
endmodule
