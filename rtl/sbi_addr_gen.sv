// sbi_addr_gen: tentative-address generator of the WiMAX subblock
// (de)interleaver.
//
// For a subblock of N LLRs the standard defines the permutation
//   T_k = 2^m (k mod J) + BRO_m(floor(k/J)),  k = 0, 1, 2, ...
// keeping only T_k < N; m and J depend on N and come from an m-J table
// (wimax_pkg).  One tentative address is produced per cycle:
//   * an up-counter with a mod-J wrap gives k mod J; each wrap increments a
//     second counter, which therefore holds floor(k/J);
//   * 2^m (k mod J) is a programmable left shift by m-3 (0..7) followed by a
//     fixed shift by 3;
//   * BRO_m is one of eight hard-wired bit-reversal networks (m = 3..10)
//     picked by a multiplexer;
//   * an adder forms T_k and a comparator with N flags it valid.
// Generation stops after the N-th valid address; at most about 4N/3
// tentative addresses are needed (191 for N = 144, the worst case).
// This structure follows the architecture; only the start/done handshake is
// this design's own.
//
// Timing: after the `start` pulse, one (t_k, valid) pair per cycle while
// `active`; `done` pulses in the cycle of the last valid address.
module sbi_addr_gen
  import wimax_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  size_idx_t     size,
  output logic          active,
  output logic [NW-1:0] t_k,
  output logic          valid,
  output logic          done
);
  logic [3:0]    m_val;
  logic [2:0]    j_val;
  logic [11:0]   n_val;
  logic [2:0]    kmod;      // k mod J
  logic [9:0]    kdiv;      // floor(k/J)
  logic [NW-1:0] nvalid;    // valid addresses so far
  logic [12:0]   shifted;
  logic [9:0]    bro;
  logic [9:0]    bro_net [8];   // hard-wired reversal networks, m = 3..10
  logic [12:0]   t_full;

  always_comb begin
    m_val = 4'(sbi_m_of(size));
    j_val = 3'(sbi_j_of(size));
    n_val = 12'(n_of(size));
    // programmable shifter (m-3 = 0..7) then fixed <<3
    shifted = ({10'b0, kmod} << (m_val - 4'd3)) << 3;
    // eight hard-wired bit-reversal networks
    for (int mm = 3; mm <= 10; mm++) begin
      bro_net[mm-3] = '0;
      for (int b = 0; b < mm; b++) bro_net[mm-3][mm-1-b] = kdiv[b];
    end
    bro = bro_net[3'(m_val - 4'd3)];
    t_full = shifted + {3'b0, bro};
    t_k    = t_full[NW-1:0];
    valid  = active && (t_full < {1'b0, n_val});
    done   = valid && (nvalid == n_val - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      kmod   <= '0;
      kdiv   <= '0;
      nvalid <= '0;
    end else if (start) begin
      active <= 1'b1;
      kmod   <= '0;
      kdiv   <= '0;
      nvalid <= '0;
    end else if (active) begin
      if (kmod == j_val - 1'b1) begin
        kmod <= '0;
        kdiv <= kdiv + 1'b1;
      end else begin
        kmod <= kmod + 1'b1;
      end
      if (valid) nvalid <= nvalid + 1'b1;
      if (done) active <= 1'b0;
    end
  end
endmodule
