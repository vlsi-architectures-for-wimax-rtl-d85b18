// tb_ref_pkg: independent reference models used by the testbenches:
// the WiMAX constituent encoder (written from the encoder structure, not from
// the RTL package), the CTC interleaver by multiplication, and a CTC frame
// encoder with circulation-state tail-biting.
package tb_ref_pkg;
  import wimax_pkg::n_of, wimax_pkg::ctc_p_of, wimax_pkg::sbi_m_of, wimax_pkg::sbi_j_of;

  // one encoder step: s = {s1,s2,s3}; returns {next[2:0], y, w}
  function automatic logic [4:0] enc_step(input logic [2:0] s, input logic a, input logic b);
    logic fb, n1, n2, n3, y, w;
    fb = a ^ b ^ s[2] ^ s[0];        // first adder: A, B, feedback S1 + S3
    n1 = fb;
    n2 = s[2] ^ b;                   // B enters the second adder
    n3 = s[1] ^ b;                   // and the third
    y  = fb ^ s[1] ^ s[0];           // 1 + D^2 + D^3
    w  = fb ^ s[0];                  // 1 + D^3
    return {n1, n2, n3, y, w};
  endfunction

  function automatic int pi(int s, int j);
    int n, pp;
    n = n_of(5'(s));
    case (j % 4)
      0: pp = 0;
      1: pp = n / 2 + ctc_p_of(5'(s), 1);
      2: pp = ctc_p_of(5'(s), 2);
      default: pp = n / 2 + ctc_p_of(5'(s), 3);
    endcase
    return (ctc_p_of(5'(s), 0) * j + pp + 1) % n;
  endfunction

  // encode a couple sequence with circular (tail-biting) termination:
  // run once from state 0, find the circulation state from the end state,
  // run again from it.  Returns parity bits y[], w[].
  function automatic void rsc_encode(input bit a[], input bit b[], output bit y[], output bit w[]);
    logic [2:0] s;
    logic [4:0] r;
    int n;
    logic [2:0] sc;
    int tab [6][8] = '{'{0,6,4,2,7,1,3,5}, '{0,3,7,4,5,6,2,1}, '{0,5,3,6,2,7,1,4},
                       '{0,4,1,5,6,2,7,3}, '{0,2,5,7,1,3,4,6}, '{0,7,6,1,3,4,5,2}};
    n = a.size();
    y = new[n]; w = new[n];
    s = 0;
    for (int k = 0; k < n; k++) begin r = enc_step(s, a[k], b[k]); s = r[4:2]; end
    sc = 3'(tab[(n % 7) - 1][s]);
    s = sc;
    for (int k = 0; k < n; k++) begin
      r = enc_step(s, a[k], b[k]);
      y[k] = r[1]; w[k] = r[0];
      s = r[4:2];
    end
  endfunction

  // full CTC encoder: systematic a,b; parities of the natural (1) and
  // interleaved (2) constituent codes
  function automatic void ctc_encode(input int size, input bit a[], input bit b[],
                                     output bit y1[], output bit w1[], output bit y2[], output bit w2[]);
    bit ai[], bi[];
    int n;
    n = a.size();
    ai = new[n]; bi = new[n];
    for (int j = 0; j < n; j++) begin
      int i;
      i = pi(size, j);
      if (i % 2 == 1) begin ai[j] = b[i]; bi[j] = a[i]; end
      else            begin ai[j] = a[i]; bi[j] = b[i]; end
    end
    rsc_encode(a, b, y1, w1);
    rsc_encode(ai, bi, y2, w2);
  endfunction
  // subblock interleaver permutation T_0..T_{N-1} (Algorithm 1 of the standard)
  function automatic void sbi_perm(input int size, output int t[]);
    int n, m, J, k, i;
    n = n_of(5'(size)); m = sbi_m_of(5'(size)); J = sbi_j_of(5'(size));
    t = new[n];
    k = 0; i = 0;
    while (i < n) begin
      int v, r;
      r = 0;
      for (int b = 0; b < m; b++) if (((k / J) >> b) & 1) r |= 1 << (m - 1 - b);
      v = (1 << m) * (k % J) + r;
      if (v < n) begin t[i] = v; i++; end
      k++;
    end
  endfunction

  // transmitter: CTC-encode a frame and build the 6N-bit circular buffer
  // A', B', Y1'/Y2' multiplexed, W1'/W2' multiplexed ( ' = subblock interleaved)
  function automatic void tx_buffer(input int size, input bit a[], input bit b[], output bit cbuf[]);
    bit y1[], w1[], y2[], w2[];
    int t[];
    int n;
    n = a.size();
    ctc_encode(size, a, b, y1, w1, y2, w2);
    sbi_perm(size, t);
    cbuf = new[6 * n];
    for (int i = 0; i < n; i++) begin
      cbuf[i]             = a[t[i]];
      cbuf[n + i]         = b[t[i]];
      cbuf[2*n + 2*i]     = y1[t[i]];
      cbuf[2*n + 2*i + 1] = y2[t[i]];
      cbuf[4*n + 2*i]     = w1[t[i]];
      cbuf[4*n + 2*i + 1] = w2[t[i]];
    end
  endfunction
endpackage
