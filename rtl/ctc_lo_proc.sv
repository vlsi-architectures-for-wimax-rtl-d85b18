// ctc_lo_proc: output (lambda-O) processor of the WiMAX double-binary SISO.
//
// For trellis step k it combines the forward metrics alpha_k of the start
// states, the branch metrics gamma_k and the backward metrics beta_{k+1} of
// the end states:
//   1. normalisation: alpha and beta are made relative to state 0 (wrapped
//      difference read as a signed number), undoing the modulo metric
//      representation;
//   2. b(e) = alpha[s_start] + gamma[e] + beta[s_end] for the 32 transitions;
//   3. one max tree of 8 per couple u gives M(u); the total LLRs are
//      lambda_T(u) = M(u) - M(00) for u = 01, 10, 11;
//   4. the hard decision u_k is the couple of largest lambda_T (00 scores 0);
//   5. extrinsic output lambda(u;O) = lambda_T(u) - lambda(u;I) - pi(c^u),
//      pi(c^u) being the systematic part (A*lA + B*lB), saturated to 8 bits.
// This follows the architecture; saturation and tie-breaking (lower u wins)
// are this design's choices.  Purely combinational.
module ctc_lo_proc
  import wimax_pkg::*;
#(
  parameter int unsigned GW = 10
) (
  input  sm_t                  alpha [8],
  input  sm_t                  beta  [8],
  input  logic signed [GW-1:0] gamma [16],
  input  ext_t                 apri,
  input  llr_c_t               la,
  input  llr_c_t               lb,
  output ext_t                 ext,
  output logic [1:0]           u_hat       // {A, B}
);
  localparam int unsigned BW = SMW + 2;
  logic signed [BW-1:0] mu [4];
  logic signed [BW-1:0] lt [4];

  always_comb begin
    sm_t an [8], bn [8];
    for (int s = 0; s < 8; s++) begin
      an[s] = alpha[s] - alpha[0];
      bn[s] = beta[s] - beta[0];
    end
    for (int u = 0; u < 4; u++) begin
      mu[u] = {1'b1, {(BW-1){1'b0}}};
      for (int s = 0; s < 8; s++) begin
        logic [2:0] e;
        logic [1:0] yw;
        logic signed [BW-1:0] bm;
        e  = trellis_next(3'(s), u[1], u[0]);
        yw = trellis_par(3'(s), u[1], u[0]);
        bm = BW'(an[s]) + BW'(gamma[u * 4 + int'(yw)]) + BW'(bn[e]);
        if (bm > mu[u]) mu[u] = bm;
      end
    end
    u_hat = 2'd0;
    lt[0] = '0;
    for (int u = 1; u < 4; u++) begin
      lt[u] = mu[u] - mu[0];
      if (lt[u] > lt[int'(u_hat)]) u_hat = 2'(u);
    end
    ext.e01 = sat_e(16'(lt[1]) - 16'(apri.e01) - 16'(lb));
    ext.e10 = sat_e(16'(lt[2]) - 16'(apri.e10) - 16'(la));
    ext.e11 = sat_e(16'(lt[3]) - 16'(apri.e11) - 16'(la) - 16'(lb));
  end
endmodule
