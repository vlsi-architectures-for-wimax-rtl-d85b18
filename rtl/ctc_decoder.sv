// ctc_decoder: parallel WiMAX double-binary turbo (CTC) decoder.
//
// P_MAX = 4 SISOs (ctc_siso) work concurrently on P consecutive segments of
// N/P couples.  P is chosen from the frame size so that the interleaver is
// collision free and the throughput grows with N: P = 1 for N <= 180,
// P = 2 for 192 <= N <= 240, P = 4 for N >= 480.  A frame is decoded in
// 2*ITER half-iterations, alternately in natural order (constituent code 1,
// parities Y1/W1) and in interleaved order (code 2, parities Y2/W2).
//
// Memories: the double-buffered input buffer (ctc_in_buf), the extrinsic
// memory EI-MEM (ei_mem) and the hard decision memory (hd_packetizer), all
// split into P_MAX banks; bank b holds natural addresses [b N/P, (b+1) N/P).
//
// One half-iteration (seg = N/P, W = window width):
//   * cycle 0: the SISOs, the serial interleaver and the LIFO are started;
//   * cycles 1..seg: forward step t.  Natural order: SISO k reads word t of
//     bank k.  Interleaved order: the serial interleaver gives SISO 0's
//     natural address i of interleaved couple t, ctc_par_addr splits it into
//     the common word adx and the banks idx^k; the address switch (radx)
//     sends adx to the banks and the read data switch (rdata) returns bank
//     idx^k to SISO k.  A and B, and the a-priori LLRs of u = 01 and 10, are
//     exchanged for odd natural addresses.  Parities are always read in order
//     from the SISO's own bank.  {adx, idx^k, swap} is pushed on the LIFO.
//   * one window later the SISOs deliver extrinsic LLRs in reverse window
//     order; the LIFO returns the matching address, the write data switch
//     (wdata) sends SISO k's word to bank idx^k; in the last half-iteration
//     the hard decisions go to the packetizer as well.
// A half-iteration lasts seg + W + 1 cycles, so a frame takes
// 2*ITER*(N/P + W + 1) cycles: throughput 2N f_clk / (2 ITER (N/P + W + 1)),
// the architecture's parallel-decoder formula with one cycle of overhead.
// Border metrics move on a ring closed at the last active SISO (last_SISO):
// SISO k takes alpha from SISO k-1 and beta from SISO k+1, modulo P.
// In the first iteration the a-priori input is zero.
// All of the above follows the architecture, except the one-cycle gap
// between half-iterations, the frame handshake and the choice of W, which
// are this design's.
//
// Frame handshake: the writer fills buffer `in_wsel` while `in_ready`,
// then pulses in_frame_done with the frame size.  `dec_done` pulses when a
// frame is decoded; its couples can then be read in natural order on
// hd_rd_i until the last half-iteration of the next frame.  dec_size is the size of the
// last completed frame (it changes only with dec_done), so reading stays
// correct while the next frame is already being decoded.
// rst_n is reported by lint as both an asynchronous and a synchronous
// signal; the synchronous use is only the `disable iff` of the assertions
// at the end of this file.  All flip-flops reset asynchronously.
module ctc_decoder
  import wimax_pkg::*;
#(
  parameter int unsigned ITER = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // input buffer write side
  input  size_idx_t     in_size,
  input  logic          in_we,
  input  logic [NW-1:0] in_addr,
  input  chan_t         in_data,
  input  logic          in_frame_done,
  output logic          in_ready,
  // decoded output
  output logic          busy,
  output logic          dec_done,
  output size_idx_t     dec_size,
  input  logic [NW-1:0] hd_rd_i,
  output logic [1:0]    hd_rd_bits
);
  localparam int unsigned P   = P_MAX;
  localparam int unsigned AW  = $clog2(SEG_MAX);
  localparam int unsigned HW  = $clog2(2 * ITER + 1);
  localparam int unsigned LDW = 1 + SEGW + 2 * P;

  typedef enum logic [1:0] {D_IDLE, D_START, D_RUN} dstate_t;
  dstate_t dstate;

  // ---------------- frame buffers ----------------
  logic      full [2];
  size_idx_t fsize [2];
  size_idx_t run_size;
  logic      wsel, rsel;

  assign in_ready = !full[wsel];

  // ---------------- half-iteration control ----------------
  logic [HW-1:0]   h;
  logic [SEGW:0]   c;
  logic [SEGW-1:0] seg;
  logic [5:0]      win;
  logic [1:0]      logp;
  logic [5:0]      fw_off;
  logic            scr, fwd, last_half;
  logic            siso_start;

  always_comb begin
    seg  = SEGW'(n_of(run_size) >> logp_of(run_size));
    win  = 6'(win_of(run_size));
    logp = 2'(logp_of(run_size));
    scr  = h[0];
    fwd  = (dstate == D_RUN) && (c < {1'b0, seg});
    last_half = (h == HW'(2 * ITER - 1));
    siso_start = (dstate == D_START);
  end

  // ---------------- address generation ----------------
  logic [NW-1:0]   i_addr, j_cnt;
  logic            i_swap;
  logic [SEGW-1:0] s_adx;
  logic [1:0]      s_idx [P];
  logic [SEGW-1:0] rd_adx;
  logic [1:0]      rd_idx [P];
  logic            rd_swap;
  logic [P-1:0]    active;

  ctc_serial_intl u_intl (
    .clk, .rst_n, .start(siso_start), .step(fwd), .size(run_size),
    .i_addr, .swap(i_swap), .j_cnt
  );
  ctc_par_addr u_par (.size(run_size), .i_addr, .adx(s_adx), .idx(s_idx));

  always_comb begin
    for (int k = 0; k < P; k++) active[k] = (k < (1 << logp));
    if (scr) begin
      rd_adx  = s_adx;
      rd_swap = i_swap;
      for (int k = 0; k < P; k++) rd_idx[k] = active[k] ? s_idx[k] : 2'(k);
    end else begin
      rd_adx  = SEGW'(c);
      rd_swap = 1'b0;
      for (int k = 0; k < P; k++) rd_idx[k] = 2'(k);
    end
  end

  // ---------------- memories and switches ----------------
  logic [AW-1:0] radx_in [P], radx_out [P];
  logic [AW-1:0] rp_addr [P];
  chan_t         cs_bank [P], cp_bank [P], cs_siso [P];
  ext_t          ei_bank [P], ei_siso [P];
  logic          ei_we [P];
  logic [AW-1:0] ei_waddr [P];
  ext_t          ei_wdata [P];

  always_comb
    for (int k = 0; k < P; k++) begin
      radx_in[k] = AW'(rd_adx);
      rp_addr[k] = AW'(c);
    end

  ctc_xbar #(.P(P), .DW(AW), .GATHER(1'b0)) u_radx (.din(radx_in), .sel(rd_idx), .dout(radx_out));

  ctc_in_buf u_inbuf (
    .clk, .wsel, .wsize(in_size), .we(in_we && in_ready), .waddr(in_addr), .wdata(in_data),
    .rsel, .rs_addr(radx_out), .rs_data(cs_bank), .rp_addr, .rp_data(cp_bank)
  );

  ei_mem u_ei (
    .clk, .rd_addr(radx_out), .rd_data(ei_bank),
    .we(ei_we), .wr_addr(ei_waddr), .wr_data(ei_wdata)
  );

  // rdata switch (channel systematic part and a-priori words)
  logic [$bits(chan_t)+$bits(ext_t)-1:0] rdsw_in [P], rdsw_out [P];
  always_comb
    for (int b = 0; b < P; b++) rdsw_in[b] = {cs_bank[b], ei_bank[b]};
  ctc_xbar #(.P(P), .DW($bits(chan_t)+$bits(ext_t)), .GATHER(1'b1)) u_rdata (.din(rdsw_in), .sel(rd_idx), .dout(rdsw_out));
  always_comb
    for (int k = 0; k < P; k++) {cs_siso[k], ei_siso[k]} = rdsw_out[k];

  // ---------------- SISOs ----------------
  llr_c_t s_la [P], s_lb [P], s_ly [P], s_lw [P];
  ext_t   s_apri [P];
  sm_t    a_ext [P][8], b_ext [P][8], a_in [P][8], b_in [P][8];
  logic   s_busy [P], s_fwd [P], s_oval [P];
  logic [SEGW-1:0] s_ot [P];
  ext_t   s_ext [P];
  logic [1:0] s_u [P];

  always_comb begin
    for (int k = 0; k < P; k++) begin
      int kp, kn;
      s_la[k] = rd_swap ? cs_siso[k].b : cs_siso[k].a;
      s_lb[k] = rd_swap ? cs_siso[k].a : cs_siso[k].b;
      s_ly[k] = scr ? cp_bank[k].y2 : cp_bank[k].y1;
      s_lw[k] = scr ? cp_bank[k].w2 : cp_bank[k].w1;
      if (h == 0)       s_apri[k] = '0;
      else if (rd_swap) s_apri[k] = '{e11: ei_siso[k].e11, e10: ei_siso[k].e01, e01: ei_siso[k].e10};
      else              s_apri[k] = ei_siso[k];
      // last_SISO ring: neighbours modulo P
      kp = (k == 0) ? (1 << logp) - 1 : k - 1;
      kn = (k == (1 << logp) - 1) ? 0 : k + 1;
      a_in[k] = a_ext[kp[1:0]];
      b_in[k] = b_ext[kn[1:0]];
    end
  end

  for (genvar k = 0; k < P; k++) begin : g_siso
    ctc_siso u_siso (
      .clk, .rst_n,
      .start(siso_start && active[k]), .seg_len(seg), .win, .half(scr), .first(h < HW'(2)),
      .la(s_la[k]), .lb(s_lb[k]), .ly(s_ly[k]), .lw(s_lw[k]), .apri(s_apri[k]),
      .alpha_in(a_in[k]), .beta_in(b_in[k]), .alpha_ext(a_ext[k]), .beta_ext(b_ext[k]),
      .busy(s_busy[k]), .fwd_act(s_fwd[k]), .out_valid(s_oval[k]), .out_t(s_ot[k]),
      .ext(s_ext[k]), .u_hat(s_u[k])
    );
  end

  // ---------------- address LIFO ----------------
  logic [LDW-1:0] lifo_din, lifo_dout;
  logic           lifo_empty, wb_swap;
  logic [SEGW-1:0] wb_adx;
  logic [1:0]     wb_idx [P];

  always_comb begin
    lifo_din = {rd_swap, rd_adx, rd_idx[3], rd_idx[2], rd_idx[1], rd_idx[0]};
    {wb_swap, wb_adx, wb_idx[3], wb_idx[2], wb_idx[1], wb_idx[0]} = lifo_dout;
  end

  addr_lifo #(.DW(LDW), .DEPTH(W_MAX)) u_lifo (
    .clk, .rst_n, .clear(siso_start), .push(fwd), .flip(fwd && fw_off == win - 6'd1),
    .din(lifo_din), .pop(s_oval[0]), .dout(lifo_dout), .empty(lifo_empty)
  );

  // wdata switch
  logic [$bits(ext_t)-1:0] wdsw_in [P], wdsw_out [P];
  always_comb
    for (int k = 0; k < P; k++)
      wdsw_in[k] = wb_swap ? {s_ext[k].e11, s_ext[k].e01, s_ext[k].e10} : s_ext[k];
  ctc_xbar #(.P(P), .DW($bits(ext_t)), .GATHER(1'b0)) u_wdata (.din(wdsw_in), .sel(wb_idx), .dout(wdsw_out));
  always_comb
    for (int b = 0; b < P; b++) begin
      ei_we[b]    = s_oval[0] && active[b];
      ei_waddr[b] = AW'(wb_adx);
      ei_wdata[b] = wdsw_out[b];
    end

  // ---------------- hard decisions ----------------
  logic [1:0] wb_bank [P];
  always_comb for (int k = 0; k < P; k++) wb_bank[k] = wb_idx[k];

  hd_packetizer u_hd (
    .clk, .size(dec_size), .we(s_oval[0] && last_half), .swap(wb_swap), .bank(wb_bank),
    .adx(AW'(wb_adx)), .u_hat(s_u), .active, .rd_i(hd_rd_i), .rd_bits(hd_rd_bits)
  );

  // ---------------- control FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate   <= D_IDLE;
      full     <= '{default: 1'b0};
      fsize    <= '{default: '0};
      wsel     <= 1'b0;
      rsel     <= 1'b0;
      h        <= '0;
      c        <= '0;
      fw_off   <= '0;
      run_size <= '0;
      dec_size <= '0;
      dec_done <= 1'b0;
      busy     <= 1'b0;
    end else begin
      dec_done <= 1'b0;
      if (in_frame_done && !full[wsel]) begin
        full[wsel]  <= 1'b1;
        fsize[wsel] <= in_size;
        wsel        <= ~wsel;
      end
      case (dstate)
        D_IDLE: if (full[rsel]) begin
          run_size <= fsize[rsel];
          h        <= '0;
          busy     <= 1'b1;
          dstate   <= D_START;
        end
        D_START: begin
          c      <= '0;
          fw_off <= '0;
          dstate <= D_RUN;
        end
        D_RUN: begin
          c <= c + 1'b1;
          if (fwd) fw_off <= (fw_off == win - 6'd1) ? 6'd0 : fw_off + 6'd1;
          if (c == {1'b0, seg} + (SEGW+1)'(win) - 1'b1) begin
            if (last_half) begin
              dstate     <= D_IDLE;
              full[rsel] <= 1'b0;
              rsel       <= ~rsel;
              busy       <= 1'b0;
              dec_done   <= 1'b1;
              dec_size   <= run_size;
            end else begin
              h      <= h + 1'b1;
              dstate <= D_START;
            end
          end
        end
        default: dstate <= D_IDLE;
      endcase
    end
  end

  a_lifo_in_step: assert property (@(posedge clk) disable iff (!rst_n) s_oval[0] |-> !lifo_empty);
endmodule
