// wimax_ctc_rx: complete WiMAX convolutional-turbo-code receiver back end.
//
// Three stages in a chain, linked by buffers:
//   1. symbol deselection (sd_unit): combines repeated LLRs and zero-fills
//      punctured ones, rebuilding the 6N-LLR circular buffer of the frame
//      from one HARQ subpacket (N_SCH slots, modulation order m, SPID);
//   2. subblock deinterleaver (subblock_deint): undoes the subblock
//      interleaving of A, B, Y1/Y2 and W1/W2 and writes the couples, six
//      LLRs per cycle, into the decoder's input buffer;
//   3. CTC decoder (ctc_decoder): 8-iteration parallel double-binary turbo
//      decoder with 1, 2 or 4 SISOs depending on N.
// The decoder input buffer is double buffered, so stages 1-2 prepare frame
// n+1 while the decoder iterates on frame n.  The chain and the buffering
// follow the architecture; the control handshake is this design's own.
//
// Use: when `ready`, pulse `start` with the subpacket parameters, then
// stream L_k = 48*m*N_SCH LLRs, four per cycle, on in_llr/in_valid/
// in_ready.  After `dec_done` the decoded couples {A,B} of frame dec_size
// can be read in natural order on hd_rd_i/hd_rd_bits.
// rst_n is reported by lint as both an asynchronous and a synchronous
// signal; the synchronous use is only the `disable iff` of the assertions
// at the end of this file.  All flip-flops reset asynchronously.
module wimax_ctc_rx
  import wimax_pkg::*;
#(
  parameter int unsigned ITER  = 8,   // turbo iterations
  parameter int unsigned P_LLR = 4    // LLRs per symbol-deselection word
) (
  input  logic          clk,
  input  logic          rst_n,
  // subpacket
  input  logic          start,
  input  size_idx_t     size,
  input  logic [8:0]    nsch,
  input  logic [2:0]    mod_order,
  input  logic [1:0]    spid,
  output logic          ready,
  // received LLRs
  input  logic          in_valid,
  output logic          in_ready,
  input  llr_c_t        in_llr [P_LLR],
  // decoded frame
  output logic          dec_busy,
  output logic          dec_done,
  output size_idx_t     dec_size,
  input  logic [NW-1:0] hd_rd_i,
  output logic [1:0]    hd_rd_bits
);
  typedef enum logic [1:0] {T_IDLE, T_SD, T_WAIT, T_DEINT} tstate_t;
  tstate_t   tstate;
  size_idx_t cur_size;

  logic          sd_busy, sd_done;
  logic [NW-1:0] sd_rd_i;
  chan_t         sd_rd_data;
  logic          di_start, di_busy, di_done, di_we;
  logic [NW-1:0] di_addr;
  chan_t         di_data;
  logic          buf_ready, frame_done;

  sd_unit #(.P_LLR(P_LLR)) u_sd (
    .clk, .rst_n, .start(start && ready), .size, .nsch, .mod_order, .spid,
    .in_valid, .in_ready, .in_llr, .busy(sd_busy), .done(sd_done),
    .rd_i(sd_rd_i), .rd_data(sd_rd_data)
  );

  subblock_deint u_deint (
    .clk, .rst_n, .start(di_start), .size(cur_size), .busy(di_busy), .done(di_done),
    .sd_rd_i, .sd_rd_data, .wr_en(di_we), .wr_addr(di_addr), .wr_data(di_data)
  );

  ctc_decoder #(.ITER(ITER)) u_dec (
    .clk, .rst_n, .in_size(cur_size), .in_we(di_we), .in_addr(di_addr), .in_data(di_data),
    .in_frame_done(frame_done), .in_ready(buf_ready),
    .busy(dec_busy), .dec_done, .dec_size, .hd_rd_i, .hd_rd_bits
  );

  assign ready    = (tstate == T_IDLE);
  assign di_start = (tstate == T_WAIT) && buf_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate     <= T_IDLE;
      cur_size   <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      case (tstate)
        T_IDLE:  if (start) begin
          cur_size <= size;
          tstate   <= T_SD;
        end
        T_SD:    if (sd_done) tstate <= T_WAIT;
        T_WAIT:  if (buf_ready) tstate <= T_DEINT;
        T_DEINT: if (di_done) begin
          frame_done <= 1'b1;
          tstate     <= T_IDLE;
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  a_sd_idle_on_start: assert property (@(posedge clk) disable iff (!rst_n) (start && ready) |-> !sd_busy);
  a_deint_only_with_buffer: assert property (@(posedge clk) disable iff (!rst_n) di_we |-> buf_ready);
endmodule
