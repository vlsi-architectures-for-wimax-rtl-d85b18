// ctc_bmu: branch metric unit of the WiMAX double-binary SISO.
//
// Each trellis transition carries the uncoded couple u = (A,B) and the coded
// bits (A,B,Y,W).  Its branch metric is
//   gamma = pi(u;I) + A*lA + B*lB + Y*lY + W*lW,
// where lA..lW are the channel LLRs lambda[c;I] (positive favours a 1) and
// pi(u;I) is the a-priori LLR of u: 0 for u=00, e01, e10, e11 otherwise.
// Only the 16 combinations of (A,B,Y,W) are distinct, so the unit outputs 16
// metrics, gamma[{A,B,Y,W}], gamma[0] = 0; they are built by sharing partial
// sums (A+B, the a-priori terms, Y, W, Y+W) as in the architecture's adder
// network.  The index order {A,B,Y,W} is this design's choice.
// Purely combinational; outputs are GW = 10-bit signed.
module ctc_bmu
  import wimax_pkg::*;
#(
  parameter int unsigned GW = 10
) (
  input  llr_c_t               la,
  input  llr_c_t               lb,
  input  llr_c_t               ly,
  input  llr_c_t               lw,
  input  ext_t                 apri,
  output logic signed [GW-1:0] gamma [16]
);
  logic signed [GW-1:0] u_part [4];   // pi(u;I) + systematic part, u = {A,B}
  logic signed [GW-1:0] p_part [4];   // parity part, {Y,W}

  always_comb begin
    u_part[0] = '0;
    u_part[1] = GW'(apri.e01) + GW'(lb);
    u_part[2] = GW'(apri.e10) + GW'(la);
    u_part[3] = GW'(apri.e11) + GW'(la) + GW'(lb);
    p_part[0] = '0;
    p_part[1] = GW'(lw);
    p_part[2] = GW'(ly);
    p_part[3] = GW'(ly) + GW'(lw);
    for (int u = 0; u < 4; u++)
      for (int p = 0; p < 4; p++)
        gamma[u * 4 + p] = u_part[u] + p_part[p];
  end
endmodule
