// token_selector: adaptive token pruning of one stage input (token classifier
// decision, Gumbel-Softmax threshold, token packager).
//
// The host first writes, for every token, its per-head keep/prune scores s_i
// (outputs of the classifier's softmax) and head weights a_i (outputs of the
// sigmoid branch) into the selector's score memory; the token rows X sit in
// the read bank of the input buffer. After `start` the selector walks the
// tokens in order:
//   * token 0 (class token) and the last n_pkg_in tokens (package tokens of
//     earlier stages) are always kept;
//   * every other token gets S~ from score_combiner and a keep/prune decision
//     from gumbel_decision;
//   * a kept token is copied, word by word, to the next free row of the output
//     buffer, so informative tokens form a dense matrix;
//   * a pruned token is added element-wise into the accumulator Tmp.
// At the end, if T > 0 tokens were pruned, Tmp is scaled by floor(2^16 / T)
// (the average) and appended as the new package token. n_out is the new
// token count, n_kept the number of kept tokens.
//
// The flow (concatenate informative tokens, Tmp += x_i, Average(Tmp), append)
// follows the paper's hardware token selection flow; the paper's algorithm
// section instead weights the average by the keep scores, and the hardware
// flow is followed here. Forced keeping of class and package tokens, the host
// written score memory, and skipping the package token when nothing was pruned
// are this design's choices.
// With `avg_all` set at start (average job) every row is taken as pruned,
// so the single output row is the mean of all n_tok input rows: the global
// feature Average(MLP(x_i)) of the token classifier, computed with the same
// accumulator.
// Timing: d_words + 1 cycles per kept or pruned row, plus 35 cycles per
// scored token and about 35 + d_words cycles for the package token.
module token_selector #(
  parameter int unsigned H     = 6,
  parameter int unsigned N_MAX = 256,
  parameter int unsigned D_MAX = 1536,
  parameter int unsigned TI    = 16,
  localparam int unsigned RW   = D_MAX / TI,              // words per row
  localparam int unsigned AW   = $clog2(N_MAX * RW),
  localparam int unsigned NW   = $clog2(N_MAX + 1),
  localparam int unsigned WW   = $clog2(RW + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // job
  input  logic                  start,
  input  logic                  avg_all,      // average job: treat every row as pruned
  input  logic [NW-1:0]         n_tok,
  input  logic [WW-1:0]         d_words,
  input  logic [NW-1:0]         n_pkg_in,
  input  logic [7:0]            thr,
  output logic                  busy,
  output logic                  done,
  output logic [NW-1:0]         n_out,
  output logic [NW-1:0]         n_kept,
  // score memory write port (host): {a, s_prune, s_keep}, H bytes each
  input  logic                  sc_we,
  input  logic [NW-2:0]         sc_addr,
  input  logic [3*H*8-1:0]      sc_wdata,
  // token rows from the input buffer (one cycle read latency)
  output logic [AW-1:0]         x_addr,
  input  logic [TI*8-1:0]       x_data,
  // dense rows to the output buffer
  output logic                  o_we,
  output logic [AW-1:0]         o_addr,
  output logic [TI*8-1:0]       o_wdata
);
  typedef enum logic [2:0] {T_IDLE, T_TOKEN, T_SCORE, T_COPY, T_PKG_DIV, T_PKG_WR, T_DONE} state_e;
  state_e state;

  logic [3*H*8-1:0]  score_mem [N_MAX];
  logic [TI-1:0][15:0] tmp [RW];

  logic [NW-1:0]   tok;          // current input token
  logic [NW-1:0]   n_prn;        // pruned so far (T)
  logic [WW-1:0]   w;            // word counter of a row copy
  logic            rd_pend;      // read issued last cycle
  logic [WW-1:0]   w_d;
  logic            cur_keep;
  logic            avg_r;
  logic            sc_start;
  logic [3*H*8-1:0] sc_word;

  logic            cmb_done;
  logic [15:0]     sk, sp;
  logic            keep_dec;
  logic            div_done, div_busy;
  logic [31:0]     div_q;
  logic [31:0]     inv_t;

  always_ff @(posedge clk) if (sc_we) score_mem[sc_addr] <= sc_wdata;

  assign sc_word = score_mem[tok[NW-2:0]];

  score_combiner #(.H(H)) u_comb (
    .clk, .rst_n, .start(sc_start),
    .s_keep (sc_word[0*H*8 +: H*8]),
    .s_prune(sc_word[1*H*8 +: H*8]),
    .a      (sc_word[2*H*8 +: H*8]),
    .done(cmb_done), .sk, .sp
  );

  gumbel_decision u_dec (.sk, .sp, .thr, .keep(keep_dec));

  seq_divider #(.NW(32), .DW(32)) u_div (
    .clk, .rst_n, .start(state == T_PKG_DIV && !div_busy && !div_done),
    .num(32'h0001_0000), .den(32'(n_prn)), .busy(div_busy), .done(div_done), .q(div_q)
  );

  logic forced;
  assign forced = (tok == '0) || (tok >= n_tok - n_pkg_in);

  assign busy   = (state != T_IDLE);
  assign x_addr = AW'(tok) * AW'(RW) + AW'(w);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= T_IDLE; tok <= '0; n_prn <= '0; n_out <= '0; n_kept <= '0; w <= '0;
      rd_pend <= 1'b0; w_d <= '0; cur_keep <= 1'b0; avg_r <= 1'b0; sc_start <= 1'b0; done <= 1'b0;
      o_we <= 1'b0; o_addr <= '0; o_wdata <= '0; inv_t <= '0;
    end else begin
      done     <= 1'b0;
      sc_start <= 1'b0;
      o_we     <= 1'b0;
      case (state)
        T_IDLE: if (start) begin
          tok <= '0; n_prn <= '0; n_out <= '0; n_kept <= '0; w <= '0; avg_r <= avg_all;
          state <= (n_tok == '0) ? T_DONE : T_TOKEN;
        end
        T_TOKEN: begin
          w <= '0; rd_pend <= 1'b0;
          if (avg_r) begin
            cur_keep <= 1'b0; state <= T_COPY;
          end else if (forced) begin
            cur_keep <= 1'b1; state <= T_COPY;
          end else begin
            sc_start <= 1'b1; state <= T_SCORE;
          end
        end
        T_SCORE: if (cmb_done) begin
          cur_keep <= keep_dec; state <= T_COPY;
        end
        T_COPY: begin
          // issue reads for w < d_words, consume the word read last cycle
          rd_pend <= (w < d_words);
          w_d     <= w;
          if (w < d_words) w <= w + 1'b1;
          if (rd_pend) begin
            if (cur_keep) begin
              o_we    <= 1'b1;
              o_addr  <= AW'(n_out) * AW'(RW) + AW'(w_d);
              o_wdata <= x_data;
            end else begin
              for (int k = 0; k < TI; k++)
                tmp[w_d][k] <= ((n_prn == '0) ? 16'd0 : tmp[w_d][k]) + 16'($signed(x_data[8*k +: 8]));
            end
          end
          if (!rd_pend && w == d_words && w != '0 || d_words == '0) begin
            // row finished
            if (cur_keep) begin
              n_out <= n_out + 1'b1; n_kept <= n_kept + 1'b1;
            end else begin
              n_prn <= n_prn + 1'b1;
            end
            if (tok == n_tok - 1'b1)
              state <= (cur_keep ? (n_prn != '0) : 1'b1) ? T_PKG_DIV : T_DONE;
            else begin
              tok <= tok + 1'b1; state <= T_TOKEN;
            end
          end
        end
        T_PKG_DIV: if (div_done) begin
          inv_t <= div_q; w <= '0; state <= T_PKG_WR;
        end
        T_PKG_WR: begin
          o_we   <= 1'b1;
          o_addr <= AW'(n_out) * AW'(RW) + AW'(w);
          for (int k = 0; k < TI; k++)
            o_wdata[8*k +: 8] <= 8'((48'($signed(tmp[w][k])) * 48'($signed({1'b0, inv_t[16:0]}))) >>> 16);
          w <= w + 1'b1;
          if (w == d_words - 1'b1) begin
            n_out <= n_out + 1'b1; state <= T_DONE;
          end
        end
        T_DONE: begin
          done <= 1'b1; state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
