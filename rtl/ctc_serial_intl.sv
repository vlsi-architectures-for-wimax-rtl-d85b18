// ctc_serial_intl: serial WiMAX CTC interleaver address generator.
//
// The WiMAX CTC interleaver maps couple j of the interleaved order to the
// natural address i = (P0*j + P'_j) mod N, with P'_j = 1, 1+N/2+P1, 1+P2,
// 1+N/2+P3 for j mod 4 = 0..3; the couple at an odd natural address also
// has A and B exchanged.  Without a multiplier:
//   * a look-up table indexed by the frame size holds P0 mod N and the three
//     non-trivial P'_j mod N (the fourth, 1, is a constant input of the mux);
//   * an accumulator adds P0 mod N each step and reduces mod N, so it holds
//     (P0*j) mod N;
//   * the two LSBs of the j counter select P'_j mod N, which is added and
//     reduced mod N again.
// Every operand lies in [0, 2N-1], so each mod N is one subtracter and a
// multiplexer.  This follows the architecture.  The table here holds
// 6+3x12 = 42 bits per entry, not the 37 of the original figure, whose
// field packing is not given.
//
// Timing: `start` loads j = 0; `i`/`swap` are valid combinationally for the
// current j; `step` advances to j+1 at the next edge.
module ctc_serial_intl
  import wimax_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          step,
  input  size_idx_t     size,
  output logic [NW-1:0] i_addr,   // natural address of interleaved couple j
  output logic          swap,     // exchange A and B for this couple
  output logic [NW-1:0] j_cnt
);
  logic [11:0] n_val;
  logic [5:0]  p0_mod;
  logic [11:0] pj_lut [3];
  logic [12:0] acc_sum, out_sum;
  logic [11:0] acc, acc_next, pj_sel;

  // look-up table contents: P0 mod N and P'_j mod N (j mod 4 = 1,2,3)
  always_comb begin
    int unsigned n, p0, p1, p2, p3;
    n  = n_of(size);
    p0 = ctc_p_of(size, 0); p1 = ctc_p_of(size, 1);
    p2 = ctc_p_of(size, 2); p3 = ctc_p_of(size, 3);
    n_val     = 12'(n);
    p0_mod    = 6'(p0 % n);
    pj_lut[0] = 12'((1 + n / 2 + p1) % n);
    pj_lut[1] = 12'((1 + p2) % n);
    pj_lut[2] = 12'((1 + n / 2 + p3) % n);
  end

  always_comb begin
    // accumulator mod N: subtract and select
    acc_sum  = {1'b0, acc} + 13'(p0_mod);
    acc_next = (acc_sum >= {1'b0, n_val}) ? 12'(acc_sum - {1'b0, n_val}) : acc_sum[11:0];
    case (j_cnt[1:0])
      2'd0:    pj_sel = 12'd1;
      2'd1:    pj_sel = pj_lut[0];
      2'd2:    pj_sel = pj_lut[1];
      default: pj_sel = pj_lut[2];
    endcase
    out_sum = {1'b0, acc} + {1'b0, pj_sel};
    i_addr  = (out_sum >= {1'b0, n_val}) ? NW'(out_sum - {1'b0, n_val}) : NW'(out_sum);
    swap    = i_addr[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      j_cnt <= '0;
    end else if (start) begin
      acc   <= '0;
      j_cnt <= '0;
    end else if (step) begin
      acc   <= acc_next;
      j_cnt <= j_cnt + 1'b1;
    end
  end
endmodule
