// ctc_siso: sliding-window max-log-MAP SISO for the WiMAX double-binary
// 8-state code, one trellis step per clock (sending period SP = 1).
//
// A SISO decodes a segment of `seg_len` couples split into windows of `win`
// couples (win divides seg_len).  Two recursions run concurrently, one
// window apart:
//   * forward: in cycle c < seg_len the couple t = c arrives (channel LLRs
//     and a-priori LLRs); the alpha-BMU forms its 16 branch metrics, the
//     alpha processor advances alpha_t -> alpha_{t+1}; alpha_t and the input
//     are stored in alpha-MEM and BMU-MEM (two window-sized banks used in
//     ping-pong);
//   * backward: one window later the same window is read back in reverse;
//     the beta-BMU recomputes the branch metrics, the lambda-O processor
//     produces the extrinsic LLRs and the hard decision of step t from
//     alpha_t, gamma_t and beta_{t+1}, and the beta processor moves to beta_t.
// Outputs therefore appear one window after the inputs, in reverse order
// inside each window: the latency is one window, as in the architecture.
//
// Border metric inheritance replaces training and circulation-state
// estimation:
//   * beta at the end of window w starts from beta-LOC-MEM[w+1], the beta
//     found at the start of window w+1 in the previous iteration;
//   * beta at the end of the segment starts from beta_in (the neighbouring
//     SISO's beta-EXT-MEM, or this SISO's own for P = 1: tail-biting);
//   * alpha at the start of the segment starts from alpha_in (the previous
//     SISO's alpha-EXT-MEM, or its own);
//   * alpha-EXT-MEM / beta-EXT-MEM record alpha_{seg_len} and beta_0.
// Each border memory keeps one set per half-iteration type (`half`: 0 =
// natural order, 1 = interleaved), since the two constituent decodings have
// different trellis paths.  `first` at start marks the first iteration of a
// frame: all inherited metrics are then taken as zero (equiprobable).
// The schedule, the two BMUs and the memory set follow the architecture;
// the ping-pong banking, the per-half border sets and the valid bits are
// this design's choices.
//
// Interface: pulse `start` with seg_len, win, half, first.  For cycles
// c = 0 .. seg_len-1 after start (c = 0 is the cycle after start) present
// the couple's inputs; `out_valid` marks the seg_len output cycles, with
// out_t the segment position of the output.  `busy` covers c < seg_len+win.
// rst_n is reported by lint as both an asynchronous and a synchronous
// signal; the synchronous use is only the `disable iff` of the assertions
// at the end of this file.  All flip-flops reset asynchronously.
module ctc_siso
  import wimax_pkg::*;
#(
  parameter int unsigned WMAX    = W_MAX,
  parameter int unsigned NWINMAX = 32,
  parameter int unsigned GW      = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [SEGW-1:0] seg_len,
  input  logic [5:0]      win,
  input  logic            half,
  input  logic            first,
  // forward input, one couple per cycle
  input  llr_c_t          la,
  input  llr_c_t          lb,
  input  llr_c_t          ly,
  input  llr_c_t          lw,
  input  ext_t            apri,
  // border metrics exchanged with the neighbours
  input  sm_t             alpha_in  [8],
  input  sm_t             beta_in   [8],
  output sm_t             alpha_ext [8],   // alpha-EXT-MEM[half]
  output sm_t             beta_ext  [8],   // beta-EXT-MEM[half]
  // backward output
  output logic            busy,
  output logic            fwd_act,
  output logic            out_valid,
  output logic [SEGW-1:0] out_t,
  output ext_t            ext,
  output logic [1:0]      u_hat
);
  localparam int unsigned WBW = $clog2(WMAX);
  localparam int unsigned NBW = $clog2(NWINMAX);

  typedef struct packed {
    llr_c_t la, lb, ly, lw;
    ext_t   apri;
  } bmu_in_t;

  // memories
  bmu_in_t bmu_mem   [2][WMAX];
  sm_t     alpha_mem [2][WMAX][8];
  sm_t     bloc_mem  [2][NWINMAX][8];
  logic    bloc_vld  [2][NWINMAX];
  sm_t     aext_mem  [2][8];
  sm_t     bext_mem  [2][8];
  logic    aext_vld  [2];
  logic    bext_vld  [2];

  // control
  logic            running, cur_half, cur_first;
  logic [SEGW-1:0] L;
  logic [5:0]      W;
  logic [SEGW:0]   c;
  logic [WBW:0]    fw_off, bw_off;
  logic [NBW:0]    fw_win, bw_win;
  logic [NBW:0]    nwin;
  logic            bwd_act;

  sm_t alpha_reg [8], alpha_cur [8], alpha_nxt [8], alpha_rd [8];
  sm_t beta_reg  [8], beta_cur  [8], beta_nxt  [8];
  logic signed [GW-1:0] gam_f [16], gam_b [16];
  bmu_in_t fin, bin;
  logic [WBW-1:0] rd_off;
  logic           rd_bank;

  assign fwd_act = running && (c < {1'b0, L});
  assign bwd_act = running && (c >= (SEGW+1)'(W)) && (c < {1'b0, L} + (SEGW+1)'(W));
  assign busy    = running;

  always_comb begin
    fin = '{la: la, lb: lb, ly: ly, lw: lw, apri: apri};
    rd_off  = WBW'(W - 6'd1 - 6'(bw_off));
    rd_bank = bw_win[0];
    bin     = bmu_mem[rd_bank][rd_off];
    alpha_rd = alpha_mem[rd_bank][rd_off];
    for (int s = 0; s < 8; s++) begin
      if (c == 0) alpha_cur[s] = cur_first ? '0 : alpha_in[s];
      else        alpha_cur[s] = alpha_reg[s];
      if (bw_off == 0) begin
        if (bw_win == nwin - 1'b1)
          beta_cur[s] = cur_first ? '0 : beta_in[s];
        else
          beta_cur[s] = (cur_first || !bloc_vld[cur_half][NBW'(bw_win + 1'b1)]) ? '0
                        : bloc_mem[cur_half][NBW'(bw_win + 1'b1)][s];
      end else begin
        beta_cur[s] = beta_reg[s];
      end
      alpha_ext[s] = aext_vld[half] ? aext_mem[half][s] : '0;
      beta_ext[s]  = bext_vld[half] ? bext_mem[half][s] : '0;
    end
    out_valid = bwd_act;
    out_t     = SEGW'(bw_win) * SEGW'(W) + SEGW'(rd_off);
  end

  ctc_bmu #(.GW(GW)) u_bmu_a (.la(fin.la), .lb(fin.lb), .ly(fin.ly), .lw(fin.lw), .apri(fin.apri), .gamma(gam_f));
  ctc_bmu #(.GW(GW)) u_bmu_b (.la(bin.la), .lb(bin.lb), .ly(bin.ly), .lw(bin.lw), .apri(bin.apri), .gamma(gam_b));
  ctc_smp #(.BACKWARD(1'b0), .GW(GW)) u_alpha (.sm_in(alpha_cur), .gamma(gam_f), .sm_out(alpha_nxt));
  ctc_smp #(.BACKWARD(1'b1), .GW(GW)) u_beta  (.sm_in(beta_cur),  .gamma(gam_b), .sm_out(beta_nxt));
  ctc_lo_proc #(.GW(GW)) u_lo (
    .alpha(alpha_rd), .beta(beta_cur), .gamma(gam_b),
    .apri(bin.apri), .la(bin.la), .lb(bin.lb), .ext, .u_hat
  );

  // control and state registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      cur_half  <= 1'b0;
      cur_first <= 1'b0;
      L         <= '0;
      W         <= 6'd1;
      c         <= '0;
      fw_off    <= '0;
      fw_win    <= '0;
      bw_off    <= '0;
      bw_win    <= '0;
      nwin      <= '0;
      aext_vld  <= '{default: 1'b0};
      bext_vld  <= '{default: 1'b0};
      bloc_vld  <= '{default: 1'b0};
    end else if (start) begin
      running   <= 1'b1;
      cur_half  <= half;
      cur_first <= first;
      L         <= seg_len;
      W         <= win;
      nwin      <= (NBW+1)'(seg_len / SEGW'(win));
      c         <= '0;
      fw_off    <= '0;
      fw_win    <= '0;
      bw_off    <= '0;
      bw_win    <= '0;
      if (first) begin
        aext_vld <= '{default: 1'b0};
        bext_vld <= '{default: 1'b0};
        bloc_vld <= '{default: 1'b0};
      end
    end else if (running) begin
      c <= c + 1'b1;
      if (fwd_act) begin
        if (fw_off == (WBW+1)'(W - 6'd1)) begin
          fw_off <= '0;
          fw_win <= fw_win + 1'b1;
        end else begin
          fw_off <= fw_off + 1'b1;
        end
        if (c == {1'b0, L} - 1'b1) aext_vld[cur_half] <= 1'b1;
      end
      if (bwd_act) begin
        if (bw_off == (WBW+1)'(W - 6'd1)) begin
          bw_off <= '0;
          bw_win <= bw_win + 1'b1;
          bloc_vld[cur_half][NBW'(bw_win)] <= 1'b1;
          if (bw_win == 0) bext_vld[cur_half] <= 1'b1;
        end else begin
          bw_off <= bw_off + 1'b1;
        end
      end
      if (c == {1'b0, L} + (SEGW+1)'(W) - 1'b1) running <= 1'b0;
    end
  end

  // datapath registers and memories (no reset: written before read)
  always_ff @(posedge clk) begin
    if (fwd_act) begin
      alpha_reg <= alpha_nxt;
      bmu_mem[fw_win[0]][WBW'(fw_off)] <= fin;
      alpha_mem[fw_win[0]][WBW'(fw_off)] <= alpha_cur;
      if (c == {1'b0, L} - 1'b1) aext_mem[cur_half] <= alpha_nxt;
    end
    if (bwd_act) begin
      beta_reg <= beta_nxt;
      if (bw_off == (WBW+1)'(W - 6'd1)) begin
        bloc_mem[cur_half][NBW'(bw_win)] <= beta_nxt;
        if (bw_win == 0) bext_mem[cur_half] <= beta_nxt;
      end
    end
  end

  a_win_divides: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (win != 0) && (win <= 6'(WMAX)) && (seg_len % SEGW'(win) == 0));
endmodule
