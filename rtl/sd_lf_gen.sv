// sd_lf_gen: length and start position of a HARQ subpacket for symbol
// deselection.
//
// For subpacket k the transmitter sent L_k = 48 * m_k * N_SCHk coded LLRs
// taken from a circular buffer of 6N coded bits, starting at
// F_k = (SPID_k * L_k) mod 6N.  No multiplier is used:
//   * L_k: N_SCHk is added to N_SCHk<<1 (m_k = 2, 4) or N_SCHk<<3 (m_k = 6),
//     and the sum is shifted left by 5 (m_k = 2, 6) or 6 (m_k = 4);
//   * SPID_k selects 0, L_k, 2L_k or 3L_k (= 2L_k + L_k);
//   * the modulo 6N is done by repeated subtraction: a register, loaded with
//     the selected multiple, is decremented by 6N each cycle while the
//     difference stays non-negative (subtracter + multiplexer loop).
// The shift/add structure and the subtract loop follow the architecture;
// the one-subtraction-per-cycle control is this design's choice.
//
// Interface: pulse `start` with the subpacket parameters; `l_k` is valid
// from the cycle after start, `f_k` when `done` pulses (1 + ceil(SPID*L/6N)
// cycles after start, at most 30).  mod_order is 2, 4 or 6.
module sd_lf_gen
  import wimax_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  size_idx_t   size,
  input  logic [8:0]  nsch,       // N_SCHk, 1..480 slots
  input  logic [2:0]  mod_order,  // m_k: 2 (QPSK), 4 (16QAM), 6 (64QAM)
  input  logic [1:0]  spid,       // SPID_k
  output logic [17:0] l_k,
  output logic [13:0] f_k,
  output logic        busy,
  output logic        done
);
  logic [13:0] six_n;
  logic [11:0] n_val;
  logic [12:0] nsch_sh;
  logic [12:0] nsch_sum;
  logic [17:0] l_comb;
  logic [19:0] spid_mult;
  logic [19:0] acc;
  logic signed [20:0] diff;

  always_comb begin
    n_val    = 12'(n_of(size));
    six_n    = 14'(({2'b0, n_val} + {1'b0, n_val, 1'b0}) << 1);   // (N + 2N) * 2
    nsch_sh  = (mod_order == 3'd6) ? {1'b0, nsch, 3'b0} : {3'b0, nsch, 1'b0};
    nsch_sum = nsch_sh + {4'b0, nsch};
    l_comb   = (mod_order == 3'd4) ? {nsch_sum[11:0], 6'b0} : {nsch_sum[12:0], 5'b0};
    case (spid)
      2'd0:    spid_mult = '0;
      2'd1:    spid_mult = {2'b0, l_comb};
      2'd2:    spid_mult = {1'b0, l_comb, 1'b0};
      default: spid_mult = {1'b0, l_comb, 1'b0} + {2'b0, l_comb};
    endcase
    diff = $signed({1'b0, acc}) - $signed({7'b0, six_n});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      l_k  <= '0;
      f_k  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        acc  <= spid_mult;
        l_k  <= l_comb;
        busy <= 1'b1;
      end else if (busy) begin
        if (diff >= 0) begin
          acc <= diff[19:0];
        end else begin
          f_k  <= acc[13:0];
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
