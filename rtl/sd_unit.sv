// sd_unit: symbol deselection (HARQ depuncturing / repetition combining).
//
// The transmitter sends L_k LLRs read from a circular buffer of 6N coded
// bits starting at F_k; when L_k > 6N the buffer wraps and bits are repeated
// (up to four copies are combined here), when L_k < 6N the bits never sent are
// punctured.  This unit rebuilds the 6N-LLR circular buffer:
//   1. CALC:  sd_lf_gen computes L_k and F_k while the output buffer is
//             cleared, P_LLR LLRs per cycle (punctured bits stay zero).
//   2. LOAD:  the received words (P_LLR LLRs each) are written into four input
//             memories of 6N/P_LLR words; copy c of circular position q goes to
//             memory c, word q (an up-counter from F_k with wrap-around).
//   3. COMB:  an up-counter walks the min(L_k,6N) sent positions from F_k;
//             the four memories are read together, a copy that was not sent
//             is replaced by 0 (the multiplexers), the copies are summed with
//             an adder tree and the saturated sum is written to the output
//             buffer: 4 x P_LLR LLRs read, P_LLR written per cycle.
// Clearing plus combining takes about 12N/P_LLR cycles, the figure of the
// architecture; LOAD is paced by the source (in_valid/in_ready).
// The four-memory partition, P_LLR = 4, the zero-muxes, the adder tree and
// the F_k/L_k up-counter follow the architecture.  The placement of copies
// at input time, the dropping of a fifth or later copy and the saturation of
// the sum to 6 bits are this design's choices.
//
// The output buffer holds the subblocks in transmit order: A (N), B (N),
// the Y1/Y2 macro-subblock (2N) and the W1/W2 macro-subblock (2N).  Read port
// rd_i returns, combinationally, the six LLRs of subblock position i:
// A[i], B[i], Y[2i], Y[2i+1], W[2i], W[2i+1].
// rst_n is reported by lint as both an asynchronous and a synchronous
// signal; the synchronous use is only the `disable iff` of the assertions
// at the end of this file.  All flip-flops reset asynchronously.
module sd_unit
  import wimax_pkg::*;
#(
  parameter int unsigned P_LLR = 4,     // LLRs per memory word (p)
  parameter int unsigned NMAX  = N_MAX  // largest frame size supported
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  size_idx_t   size,
  input  logic [8:0]  nsch,
  input  logic [2:0]  mod_order,
  input  logic [1:0]  spid,
  // received LLR stream
  input  logic        in_valid,
  output logic        in_ready,
  input  llr_c_t      in_llr [P_LLR],
  // status
  output logic        busy,
  output logic        done,
  // subblock read port
  input  logic [NW-1:0] rd_i,
  output chan_t       rd_data
);
  localparam int unsigned DEPTH = 6 * NMAX / P_LLR;   // words per memory
  localparam int unsigned AW    = $clog2(DEPTH + 1);
  localparam int unsigned LW    = AW + 3;             // linear word index over 4 copies + margin

  typedef enum logic [1:0] {S_IDLE, S_CALC, S_LOAD, S_COMB} state_t;
  state_t state;

  typedef logic [P_LLR*CW-1:0] word_t;
  word_t in_mem  [4][DEPTH];   // four input memories, one per copy
  word_t out_mem [DEPTH];      // 6N-LLR output buffer, P_LLR LLRs per word
  word_t rd_w [4];
  word_t wr_word;

  logic [17:0] l_k;
  logic [13:0] f_k;
  logic        lf_busy, lf_done, lf_ready;

  sd_lf_gen u_lf (
    .clk, .rst_n, .start, .size, .nsch, .mod_order, .spid,
    .l_k, .f_k, .busy(lf_busy), .done(lf_done)
  );

  logic [11:0] n_val;
  logic [AW-1:0] s_words;            // 6N / P_LLR
  logic [LW-1:0] f_w, l_w, end_w;    // F_k, L_k, F_k+L_k in words
  logic [LW-1:0] comb_len;           // min(L_k, 6N) in words
  logic [AW-1:0] cnt;                // clear counter / generic counter
  logic [LW-1:0] in_cnt;             // received words so far
  logic [AW-1:0] wr_addr;            // word address inside a memory
  logic [2:0]    wr_bank;            // copy number
  logic [AW-1:0] q;                  // combining up-counter position
  logic [LW-1:0] lin [4];
  logic          cvalid [4];
  logic signed [CW+1:0] sum [P_LLR];
  llr_c_t        sat [P_LLR];

  always_comb begin
    n_val    = 12'(n_of(size));
    s_words  = AW'((6 * 32'(n_val)) / P_LLR);
    f_w      = LW'(f_k / 14'(P_LLR));
    l_w      = LW'(l_k / 18'(P_LLR));
    end_w    = f_w + l_w;
    comb_len = (l_w > LW'(s_words)) ? LW'(s_words) : l_w;
    in_ready = (state == S_LOAD);
    for (int c = 0; c < 4; c++) begin
      rd_w[c]   = in_mem[c][q];
      lin[c]    = LW'(c) * LW'(s_words) + LW'(q);
      cvalid[c] = (lin[c] >= f_w) && (lin[c] < end_w);
    end
    for (int j = 0; j < P_LLR; j++) begin
      logic signed [CW+1:0] t01, t23;
      t01 = (cvalid[0] ? (CW+2)'($signed(rd_w[0][j*CW +: CW])) : '0)
          + (cvalid[1] ? (CW+2)'($signed(rd_w[1][j*CW +: CW])) : '0);
      t23 = (cvalid[2] ? (CW+2)'($signed(rd_w[2][j*CW +: CW])) : '0)
          + (cvalid[3] ? (CW+2)'($signed(rd_w[3][j*CW +: CW])) : '0);
      sum[j] = t01 + t23;
      if (sum[j] > (CW+2)'(31))       sat[j] = 6'sd31;
      else if (sum[j] < -(CW+2)'(31)) sat[j] = -6'sd31;
      else                            sat[j] = sum[j][CW-1:0];
      wr_word[j*CW +: CW] = sat[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      busy     <= 1'b0;
      done     <= 1'b0;
      cnt      <= '0;
      in_cnt   <= '0;
      wr_addr  <= '0;
      wr_bank  <= '0;
      q        <= '0;
      lf_ready <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state    <= S_CALC;
          busy     <= 1'b1;
          cnt      <= '0;
          lf_ready <= 1'b0;
        end
        S_CALC: begin
          if (cnt < s_words) begin
            out_mem[cnt] <= '0;
            cnt <= cnt + 1'b1;
          end
          if (lf_done) lf_ready <= 1'b1;
          if ((lf_ready || lf_done) && cnt >= s_words) begin
            state   <= S_LOAD;
            in_cnt  <= '0;
            wr_addr <= AW'(lf_done ? LW'(f_k / 14'(P_LLR)) : f_w);
            wr_bank <= '0;
          end
        end
        S_LOAD: if (in_valid) begin
          if (wr_bank < 3'd4)
            in_mem[wr_bank[1:0]][wr_addr] <= {<<CW{in_llr}};
          if (wr_addr == s_words - 1'b1) begin
            wr_addr <= '0;
            wr_bank <= wr_bank + 1'b1;
          end else begin
            wr_addr <= wr_addr + 1'b1;
          end
          in_cnt <= in_cnt + 1'b1;
          if (in_cnt == l_w - 1'b1) begin
            state <= S_COMB;
            cnt   <= '0;
            q     <= AW'(f_w);
          end
        end
        S_COMB: begin
          out_mem[q] <= wr_word;
          q   <= (q == s_words - 1'b1) ? '0 : q + 1'b1;
          cnt <= cnt + 1'b1;
          if (LW'(cnt) == comb_len - 1'b1) begin
            state <= S_IDLE;
            busy  <= 1'b0;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // subblock read port
  // (N is a multiple of 4, so each region starts on a word boundary and
  // Y[2i], Y[2i+1] share a word)
  always_comb begin
    int unsigned i, n;
    word_t wa, wb, wy, ww;
    i  = 32'(rd_i);
    n  = 32'(n_val);
    wa = out_mem[AW'((i) / P_LLR)];
    wb = out_mem[AW'((n + i) / P_LLR)];
    wy = out_mem[AW'((2*n + 2*i) / P_LLR)];
    ww = out_mem[AW'((4*n + 2*i) / P_LLR)];
    rd_data.a  = wa[(i % P_LLR) * CW +: CW];
    rd_data.b  = wb[((n + i) % P_LLR) * CW +: CW];
    rd_data.y1 = wy[((2*i) % P_LLR) * CW +: CW];
    rd_data.y2 = wy[((2*i + 1) % P_LLR) * CW +: CW];
    rd_data.w1 = ww[((2*i) % P_LLR) * CW +: CW];
    rd_data.w2 = ww[((2*i + 1) % P_LLR) * CW +: CW];
  end

  // L_k of the supported formats is a multiple of 96 LLRs, F_k of 24
  a_l_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    lf_done |-> (l_k % 18'(P_LLR) == 0) && (f_k % 14'(P_LLR) == 0));
endmodule
