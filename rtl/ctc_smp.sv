// ctc_smp: state metric processor (alpha or beta recursion) of the WiMAX
// double-binary 8-state SISO.
//
// Eight processing elements, one per state, each add four branch metrics to
// four state metrics and keep the largest (max-log-MAP, no correction term):
//   forward : alpha_{k+1}[s] = max over u of alpha_k[s'] + gamma_k(s'->s)
//   backward: beta_k[s]      = max over u of beta_{k+1}[s''] + gamma_k(s->s'')
// The four-input max is a two-level tree of 2-input max blocks.  State
// metrics are SMW = 12-bit two's-complement numbers that are allowed to wrap
// (modulo representation): a 2-input max compares the sign of the wrapped
// difference, so no normalisation stage is needed in the recursion.  The
// trellis connections come from wimax_pkg and are fixed at elaboration.
// Structure follows the architecture; the wrap-around compare is the
// modulo-metric technique the architecture adopts.  Purely combinational.
module ctc_smp
  import wimax_pkg::*;
#(
  parameter bit          BACKWARD = 1'b0,
  parameter int unsigned GW       = 10
) (
  input  sm_t                  sm_in  [8],
  input  logic signed [GW-1:0] gamma  [16],
  output sm_t                  sm_out [8]
);
  function automatic sm_t mmax(input sm_t a, input sm_t b);
    sm_t d;
    d = a - b;
    return d[SMW-1] ? b : a;
  endfunction

  always_comb begin
    for (int s = 0; s < 8; s++) begin
      sm_t cand [4];
      for (int u = 0; u < 4; u++) begin
        logic [2:0] other;
        logic [2:0] from;
        logic [1:0] yw;
        if (BACKWARD) begin
          other = trellis_next(3'(s), u[1], u[0]);
          from  = 3'(s);
        end else begin
          other = trellis_prev(3'(s), u[1], u[0]);
          from  = other;
        end
        yw = trellis_par(from, u[1], u[0]);
        cand[u] = sm_in[other] + SMW'(gamma[u * 4 + int'(yw)]);
      end
      sm_out[s] = mmax(mmax(cand[0], cand[1]), mmax(cand[2], cand[3]));
    end
  end
endmodule
