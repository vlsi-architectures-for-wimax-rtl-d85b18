// ctc_par_addr: second stage of the parallel CTC interleaver.
//
// With P SISOs, SISO k decodes the k-th segment of N/P couples and the
// extrinsic memory is split into P banks of N/P words, bank b holding natural
// addresses [b N/P, (b+1) N/P).  For the WiMAX frame sizes where P is used
// (P=1 for N<=180, P=2 for 192..240, P=4 for N>=480) the interleaver is
// collision free: when SISO 0 needs natural address i = adx + idx0*N/P, every
// SISO k needs the same word adx, in bank idx^k = (idx0 +- k) mod P.
// This block derives adx and the idx^k from i:
//   * N/4, N/2 and 3N/4 come from shifts of N and one adder (P a power of 2);
//   * i - N/4, i - N/2, i - 3N/4 are subtracted in parallel; their signs
//     select adx (a 4-way multiplexer) and form idx0;
//   * P-1 adders modulo P (plain 2-bit adders) give idx^1..idx^3.
// The sign of +-k follows P0 mod 4 (P0*N/P mod N = (P0 mod P) N/P): +k when
// P0 mod 4 = 1, -k when P0 mod 4 = 3.  The shifts, subtracters, sign-driven
// selection and modulo-P adders follow the architecture; making the +- choice
// explicit from P0 is this design's reading of it.
// Purely combinational.
module ctc_par_addr
  import wimax_pkg::*;
(
  input  size_idx_t       size,
  input  logic [NW-1:0]   i_addr,
  output logic [SEGW-1:0] adx,
  output logic [1:0]      idx [P_MAX]
);
  logic [11:0] n_val, q1, q2, q3;
  logic [1:0]  logp;
  logic signed [NW:0] d1, d2, d3;
  logic [1:0]  idx0;
  logic        minus;

  always_comb begin
    n_val = 12'(n_of(size));
    logp  = 2'(logp_of(size));
    minus = (ctc_p_of(size, 0) % 4) == 3;
    q1 = n_val >> 2;
    q2 = n_val >> 1;
    q3 = q1 + q2;
    d1 = $signed({1'b0, i_addr}) - $signed({1'b0, q1});
    d2 = $signed({1'b0, i_addr}) - $signed({1'b0, q2});
    d3 = $signed({1'b0, i_addr}) - $signed({1'b0, q3});
    case (logp)
      2'd2: begin
        if (!d3[NW])      begin idx0 = 2'd3; adx = SEGW'(d3); end
        else if (!d2[NW]) begin idx0 = 2'd2; adx = SEGW'(d2); end
        else if (!d1[NW]) begin idx0 = 2'd1; adx = SEGW'(d1); end
        else              begin idx0 = 2'd0; adx = SEGW'(i_addr); end
      end
      2'd1: begin
        if (!d2[NW])      begin idx0 = 2'd1; adx = SEGW'(d2); end
        else              begin idx0 = 2'd0; adx = SEGW'(i_addr); end
      end
      default: begin idx0 = 2'd0; adx = SEGW'(i_addr); end
    endcase
    for (int k = 0; k < P_MAX; k++) begin
      logic [1:0] sum;
      sum = minus ? idx0 - 2'(k) : idx0 + 2'(k);
      idx[k] = sum & ((2'd1 << logp) - 2'd1);
    end
  end
endmodule
