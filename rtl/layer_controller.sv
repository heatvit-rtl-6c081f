// layer_controller: the control logic of the accelerator. It runs one layer
// job written by the host (a layer_desc_t) on the GEMM engine and the
// nonlinear units, or hands a token selection job to the token selector.
//
// GEMM job (Di = di_w*TI input channels, K = di_w/H words per head slice,
// G = H/TH head groups):
//   for each output tile ot < do_t      (waits for a weight tile, releases it)
//     for each token n < n_tok
//       for each head group g < G
//         for each word k < K: lane th reads input word (g*TH+th)*K+k of row
//                              n and weight word (g*TH+th)*K+k of the tile
//         attention layer : write TH words, lane th to row n, word
//                           (g*TH+th)*do_t + ot            (Concat)
//       other layers      : write one word, row n, word ot, from the lane
//                           sum over all groups            (Sum)
// Each written value is acc >>> shift saturated to int8 and then passed
// through GELU or Sigmoid if the descriptor asks for them. Softmax is a pass
// over the output buffer afterwards: for every row, and for every head on
// attention layers, the first sm_len elements starting at word
// head*do_t are replaced by their softmax and the rest of the last word is
// zeroed. The input bank is released at the end of the job.
// Select or average job: starts the token selector and waits for it.
//
// The loop structure follows the paper's tiling (Ti, To and the head tiling
// Th with Concat/Sum by the attention flag). The loop order, serial
// write-back, one-element-per-three-cycles softmax feed, requantisation by
// shift and the descriptor format are this design's choices.
// Timing: a GEMM job takes about do_t*n_tok*(di_w/TH + G*(2+TH)) cycles for
// attention layers and do_t*n_tok*(di_w/TH + 3) otherwise, plus the softmax
// pass (about 3*sm_len + 3*sm_len + 40 cycles per group).
module layer_controller
  import heatvit_pkg::ACC_W, heatvit_pkg::layer_desc_t, heatvit_pkg::sat8,
         heatvit_pkg::ACT_GELU, heatvit_pkg::ACT_SIGMOID, heatvit_pkg::ACT_SOFTMAX, heatvit_pkg::JOB_GEMM;
#(
  parameter int unsigned TI    = 16,
  parameter int unsigned TO    = 16,
  parameter int unsigned TH    = 6,
  parameter int unsigned HEADS = 6,
  parameter int unsigned N_MAX = 256,
  parameter int unsigned D_MAX = 1536,
  localparam int unsigned RW   = D_MAX / TI,           // input words per row
  localparam int unsigned ORW  = D_MAX / TO,           // output words per row
  localparam int unsigned IAW  = $clog2(N_MAX * RW),
  localparam int unsigned OAW  = $clog2(N_MAX * ORW),
  localparam int unsigned WAW  = $clog2(RW)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  layer_desc_t                  desc,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  // input buffer (read bank)
  input  logic                         in_valid,
  output logic [TH-1:0][IAW-1:0]       in_addr,
  output logic                         in_release,
  // weight buffer (read bank)
  input  logic                         w_valid,
  output logic [TH-1:0][WAW-1:0]       w_addr,
  output logic                         w_release,
  // GEMM engine
  output logic                         eng_en,
  output logic                         eng_clear,
  output logic                         eng_attn,
  input  logic [TH-1:0][TO-1:0][ACC_W-1:0] eng_acc,
  input  logic [TO-1:0][ACC_W-1:0]     eng_sum,
  // output buffer port A
  output logic                         ob_we,
  output logic [OAW-1:0]               ob_addr,
  output logic [TO*8-1:0]              ob_wdata,
  input  logic [TO*8-1:0]              ob_rdata,
  // token selector
  output logic                         sel_start,
  input  logic                         sel_done
);
  localparam int unsigned G = HEADS / TH;

  typedef enum logic [3:0] {
    C_IDLE, C_WWAIT, C_ISSUE, C_DRAIN, C_WB, C_NEXT,
    C_SM_RD, C_SM_WAIT, C_SM_FEED, C_SM_OUT, C_SM_NEXT, C_SEL, C_END
  } state_e;
  state_e state;

  layer_desc_t d;
  logic [7:0]  ot;
  logic [8:0]  n;
  logic [7:0]  g;
  logic [7:0]  k;
  logic [7:0]  kw;          // words per head slice, di_w / HEADS
  logic [7:0]  lane;        // write-back lane
  logic        first;       // next issue starts an accumulation
  logic        iss_d, clr_d;
  // softmax pass
  logic [7:0]  hs;          // head segment
  logic [8:0]  e;           // element index
  logic [OAW-1:0] seg_base;
  logic [TO*8-1:0] wbuf;

  // Softmax unit
  logic       sm_in_valid, sm_in_ready, sm_in_last;
  logic signed [7:0] sm_in_data;
  logic       sm_out_valid, sm_out_last;
  logic [7:0] sm_out_data;

  softmax_unit #(.LMAX(N_MAX)) u_softmax (
    .clk, .rst_n,
    .in_valid(sm_in_valid), .in_ready(sm_in_ready), .in_data(sm_in_data), .in_last(sm_in_last),
    .out_valid(sm_out_valid), .out_ready(state == C_SM_OUT), .out_data(sm_out_data), .out_last(sm_out_last)
  );

  assign sm_in_valid = (state == C_SM_FEED);
  assign sm_in_data  = ob_rdata[8*(int'(e) % TO) +: 8];
  assign sm_in_last  = (e == d.sm_len - 1'b1);

  // Requantisation and inline activations
  logic [TO-1:0][7:0] q8, gl, sg, wb_word;
  for (genvar o = 0; o < TO; o++) begin : g_act
    gelu_unit    u_gelu (.x(q8[o]), .y(gl[o]));
    sigmoid_unit u_sig  (.x(q8[o]), .y(sg[o]));
  end

  always_comb begin
    for (int o = 0; o < TO; o++) begin
      q8[o] = sat8($signed(d.attn ? eng_acc[lane[$clog2(TH+1)-1:0]][o] : eng_sum[o]) >>> d.shift);
      case (d.act)
        ACT_GELU:    wb_word[o] = gl[o];
        ACT_SIGMOID: wb_word[o] = sg[o];
        default:     wb_word[o] = q8[o];
      endcase
    end
  end

  // Buffer addresses
  always_comb begin
    for (int th = 0; th < TH; th++) begin
      in_addr[th] = IAW'(n) * IAW'(RW) + IAW'((g * TH + th) * kw + k);
      w_addr[th]  = WAW'((g * TH + th) * kw + k);
    end
  end

  assign eng_en    = iss_d;
  assign eng_clear = clr_d;
  assign eng_attn  = d.attn;
  assign busy      = (state != C_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= C_IDLE; d <= '0; ot <= '0; n <= '0; g <= '0; k <= '0; kw <= '0; lane <= '0;
      first <= 1'b0; iss_d <= 1'b0; clr_d <= 1'b0; hs <= '0; e <= '0; seg_base <= '0; wbuf <= '0;
      done <= 1'b0; in_release <= 1'b0; w_release <= 1'b0; ob_we <= 1'b0; ob_addr <= '0;
      ob_wdata <= '0; sel_start <= 1'b0;
    end else begin
      done <= 1'b0; in_release <= 1'b0; w_release <= 1'b0; ob_we <= 1'b0; sel_start <= 1'b0;
      iss_d <= 1'b0; clr_d <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          d  <= desc;
          kw <= 8'(desc.di_w / HEADS);
          ot <= '0; n <= '0; g <= '0; k <= '0;
          if (desc.job != JOB_GEMM) begin
            state <= C_SEL; sel_start <= 1'b1;
          end else state <= C_WWAIT;
        end
        C_WWAIT: if (w_valid && in_valid && !w_release) begin   // w_valid is stale in the release cycle
          n <= '0; g <= '0; k <= '0; first <= 1'b1; state <= C_ISSUE;
        end
        C_ISSUE: begin
          iss_d <= 1'b1; clr_d <= first; first <= 1'b0;
          if (k == kw - 1'b1) begin
            k <= '0;
            if (d.attn || g == 8'(G - 1)) state <= C_DRAIN;
            else g <= g + 1'b1;
          end else k <= k + 1'b1;
        end
        C_DRAIN: begin lane <= '0; state <= C_WB; end
        C_WB: begin
          ob_we    <= 1'b1;
          ob_wdata <= wb_word;
          if (d.attn) begin
            ob_addr <= OAW'(n) * OAW'(ORW) + OAW'((int'(g) * TH + int'(lane)) * int'(d.do_t) + int'(ot));
            if (lane == 8'(TH - 1)) state <= C_NEXT;
            else lane <= lane + 1'b1;
          end else begin
            ob_addr <= OAW'(n) * OAW'(ORW) + OAW'(ot);
            state   <= C_NEXT;
          end
        end
        C_NEXT: begin
          first <= 1'b1;
          if (d.attn && g != 8'(G - 1)) begin
            g <= g + 1'b1; state <= C_ISSUE;
          end else begin
            g <= '0;
            if (n != d.n_tok - 1'b1) begin
              n <= n + 1'b1; state <= C_ISSUE;
            end else begin
              n <= '0; w_release <= 1'b1;
              if (ot != d.do_t - 1'b1) begin
                ot <= ot + 1'b1; state <= C_WWAIT;
              end else if (d.act == ACT_SOFTMAX) begin
                hs <= '0; e <= '0; seg_base <= '0; wbuf <= '0; state <= C_SM_RD;
              end else state <= C_END;
            end
          end
        end
        // ---- softmax pass over the output buffer ----
        C_SM_RD: begin
          ob_addr <= seg_base + OAW'(int'(e) / TO);
          state   <= C_SM_WAIT;
        end
        C_SM_WAIT: state <= C_SM_FEED;   // output buffer read latency
        C_SM_FEED: if (sm_in_ready) begin
          if (e == d.sm_len - 1'b1) begin
            e <= '0; state <= C_SM_OUT;
          end else begin
            e <= e + 1'b1; state <= C_SM_RD;
          end
        end
        C_SM_OUT: if (sm_out_valid) begin
          logic [TO*8-1:0] nw;
          nw = wbuf;
          nw[8*(int'(e) % TO) +: 8] = sm_out_data;
          if ((int'(e) % TO) == TO - 1 || sm_out_last) begin
            ob_we    <= 1'b1;
            ob_addr  <= seg_base + OAW'(int'(e) / TO);
            ob_wdata <= nw;
            wbuf     <= '0;
          end else wbuf <= nw;
          e <= e + 1'b1;
          if (sm_out_last) state <= C_SM_NEXT;
        end
        C_SM_NEXT: begin
          e <= '0;
          if (d.attn && hs != 8'(HEADS - 1)) begin
            hs <= hs + 1'b1;
            seg_base <= OAW'(n) * OAW'(ORW) + OAW'((int'(hs) + 1) * int'(d.do_t));
            state <= C_SM_RD;
          end else if (n != d.n_tok - 1'b1) begin
            hs <= '0; n <= n + 1'b1;
            seg_base <= OAW'(n + 1'b1) * OAW'(ORW);
            state <= C_SM_RD;
          end else state <= C_END;
        end
        C_SEL: if (sel_done) state <= C_END;
        C_END: begin
          in_release <= 1'b1; done <= 1'b1; state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
