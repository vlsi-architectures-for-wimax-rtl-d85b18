// wimax_pkg: constants, frame-size tables and trellis helpers shared by the
// WiMAX convolutional-turbo-code (CTC) receiver.
//
// The receiver supports the 17 frame sizes of the WiMAX CTC, given as N, the
// number of double-binary couples (A,B) per frame.  A frame size is selected
// everywhere by its index 0..16 into N_TABLE.  Per size the standard fixes:
//   * m and J of the subblock interleaver (T_k = 2^m (k mod J) + BRO_m(k/J)),
//   * P0..P3 of the CTC interleaver (i = (P0 j + P'_j + 1) mod N),
// and this design adds the decoder parallelism P (1, 2 or 4 SISOs) and the
// sliding-window width W chosen so that W divides N/P.
// P follows the rule of the architecture (P=1 for N<=180, P=2 for
// 192<=N<=240, P=4 for N>=480).  W is the largest divisor of N/P not above
// 32 (the architecture's nominal window) and is this design's own choice.
//
// Bit widths follow the architecture: 6-bit channel LLRs lambda[c;I], 8-bit
// extrinsic/a-priori LLRs lambda[u;I], 12-bit wrapping state metrics.
package wimax_pkg;

  localparam int NUM_SIZES = 17;
  localparam int N_MAX     = 2400;          // couples
  localparam int NW        = 12;            // bits for a couple index 0..N_MAX-1
  localparam int P_MAX     = 4;             // SISOs
  localparam int W_MAX     = 32;            // window width
  localparam int SEG_MAX   = N_MAX / P_MAX; // 600 couples per memory bank
  localparam int SEGW      = 10;            // bits for 0..SEG_MAX-1

  localparam int CW  = 6;   // channel LLR width  lambda[c;I]
  localparam int EW  = 8;   // extrinsic LLR width lambda[u;I]
  localparam int SMW = 12;  // state metric width (modulo arithmetic)

  typedef logic signed [CW-1:0]  llr_c_t;
  typedef logic signed [EW-1:0]  llr_e_t;
  typedef logic signed [SMW-1:0] sm_t;

  // three extrinsic LLRs of a couple, for u = (A,B) = 01, 10, 11 (00 is the reference)
  typedef struct packed {
    llr_e_t e11;
    llr_e_t e10;
    llr_e_t e01;
  } ext_t;

  // the six received LLRs of a couple after subblock deinterleaving
  typedef struct packed {
    llr_c_t w2;
    llr_c_t y2;
    llr_c_t w1;
    llr_c_t y1;
    llr_c_t b;
    llr_c_t a;
  } chan_t;

  typedef logic [4:0] size_idx_t;

  function automatic int unsigned n_of(input size_idx_t s);
    case (s)
      5'd0:  return 24;   5'd1:  return 36;   5'd2:  return 48;   5'd3:  return 72;
      5'd4:  return 96;   5'd5:  return 108;  5'd6:  return 120;  5'd7:  return 144;
      5'd8:  return 180;  5'd9:  return 192;  5'd10: return 216;  5'd11: return 240;
      5'd12: return 480;  5'd13: return 960;  5'd14: return 1440; 5'd15: return 1920;
      default: return 2400;
    endcase
  endfunction

  // subblock interleaver parameter m
  function automatic int unsigned sbi_m_of(input size_idx_t s);
    case (s)
      5'd0: return 3;  5'd1: return 4;  5'd2: return 4;  5'd3: return 5;
      5'd4: return 5;  5'd5: return 5;  5'd6: return 6;  5'd7: return 6;
      5'd8: return 6;  5'd9: return 6;  5'd10: return 6; 5'd11: return 7;
      5'd12: return 8; 5'd13: return 9; 5'd14: return 9; 5'd15: return 10;
      default: return 10;
    endcase
  endfunction

  // subblock interleaver parameter J
  function automatic int unsigned sbi_j_of(input size_idx_t s);
    case (s)
      5'd0: return 3;  5'd1: return 3;  5'd2: return 3;  5'd3: return 3;
      5'd4: return 3;  5'd5: return 4;  5'd6: return 2;  5'd7: return 3;
      5'd8: return 3;  5'd9: return 3;  5'd10: return 4; 5'd11: return 2;
      5'd12: return 2; 5'd13: return 2; 5'd14: return 3; 5'd15: return 2;
      default: return 3;
    endcase
  endfunction

  // CTC interleaver parameters {P0, P1, P2, P3}
  function automatic int unsigned ctc_p_of(input size_idx_t s, input int unsigned which);
    int unsigned t[4];
    case (s)
      5'd0:  t = '{5, 0, 0, 0};
      5'd1:  t = '{11, 18, 0, 18};
      5'd2:  t = '{13, 24, 0, 24};
      5'd3:  t = '{11, 6, 0, 6};
      5'd4:  t = '{7, 48, 24, 72};
      5'd5:  t = '{11, 54, 56, 2};
      5'd6:  t = '{13, 60, 0, 60};
      5'd7:  t = '{17, 74, 72, 2};
      5'd8:  t = '{11, 90, 0, 90};
      5'd9:  t = '{11, 96, 48, 144};
      5'd10: t = '{13, 108, 0, 108};
      5'd11: t = '{13, 120, 60, 180};
      5'd12: t = '{53, 62, 12, 2};
      5'd13: t = '{43, 64, 300, 824};
      5'd14: t = '{43, 720, 360, 540};
      5'd15: t = '{31, 8, 24, 16};
      default: t = '{53, 66, 24, 2};
    endcase
    return t[which];
  endfunction

  // log2 of the decoder parallelism P for frame size s
  function automatic int unsigned logp_of(input size_idx_t s);
    int unsigned n = n_of(s);
    if (n <= 180) return 0;
    else if (n <= 240) return 1;
    else return 2;
  endfunction

  // sliding-window width: largest divisor of N/P that is <= W_MAX
  function automatic int unsigned win_of(input size_idx_t s);
    int unsigned seg = n_of(s) >> logp_of(s);
    for (int unsigned w = W_MAX; w >= 1; w--)
      if (seg % w == 0) return w;
    return 1;
  endfunction

  // ---- double-binary 8-state constituent code (circular recursive systematic) ----
  // state = {s1,s2,s3}; s1 is the register fed by the first adder.
  function automatic logic [2:0] trellis_next(input logic [2:0] st, input logic a, input logic b);
    logic s1, s2, s3, x;
    {s1, s2, s3} = st;
    x = a ^ b ^ s1 ^ s3;
    return {x, s1 ^ b, s2 ^ b};
  endfunction

  // parity pair {Y, W} produced by the transition from st with input (a,b)
  function automatic logic [1:0] trellis_par(input logic [2:0] st, input logic a, input logic b);
    logic s1, s2, s3, x;
    {s1, s2, s3} = st;
    x = a ^ b ^ s1 ^ s3;
    return {x ^ s2 ^ s3, x ^ s3};
  endfunction

  // start state of the transition that ends in state st with input (a,b)
  function automatic logic [2:0] trellis_prev(input logic [2:0] st, input logic a, input logic b);
    for (int p = 0; p < 8; p++)
      if (trellis_next(3'(p), a, b) == st) return 3'(p);
    return 3'd0;
  endfunction

  // saturate a wide signed value to EW bits
  function automatic llr_e_t sat_e(input logic signed [15:0] v);
    if (v > 16'sd127) return 8'sd127;
    else if (v < -16'sd127) return -8'sd127;
    else return v[EW-1:0];
  endfunction

endpackage
