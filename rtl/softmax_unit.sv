// softmax_unit: group softmax by the paper's approximation
//   Softmax(x_i) = delta2 * exp(x_i - x_max) / sum_j exp(x_j - x_max).
//
// Elements of one group (up to LMAX, ended by in_last) stream in and are
// stored while the maximum is tracked. A second pass computes every
// exp(x_i - x_max) with exp_approx and their sum. One sequential division
// then forms the reciprocal R = delta2 * 2^24 / sum, and a third pass streams
// out exp_i * R / 2^24 for each element in input order, marking the group's
// last element. So a group of L elements takes about 3L + 34 cycles.
//
// The approximation and delta2 = 0.5 follow the paper; the three-pass
// organisation, the reciprocal, and the formats (input int8 with 4
// fractional bits, output Q0.8 saturated at 127, so 0.5 reads as 127/256)
// are this design's choices. Handshakes are valid/ready on both sides.
module softmax_unit #(
  parameter int unsigned LMAX      = 256,
  parameter logic [8:0]  DELTA2_Q8 = 9'd128,
  localparam int unsigned LW       = $clog2(LMAX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic signed [7:0] in_data,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [7:0]        out_data,
  output logic              out_last
);
  typedef enum logic [2:0] {S_IN, S_EXP, S_DIV, S_WAIT, S_OUT} state_e;
  state_e state;

  logic signed [7:0] xbuf [LMAX];
  logic [16:0]       ebuf [LMAX];
  logic [LW-1:0]     len, idx;
  logic signed [7:0] xmax;
  logic [31:0]       sum;
  logic [31:0]       recip;

  logic signed [15:0] ex_in;
  logic [16:0]        ex_out;
  logic               div_start, div_busy, div_done;
  logic [31:0]        div_q;
  logic [63:0]        prod;

  assign ex_in = 16'((16'(xbuf[idx[LW-2:0]]) - 16'(xmax)) <<< 4);  // Q.4 -> Q.8
  exp_approx u_exp (.x(ex_in), .y(ex_out));

  seq_divider #(.NW(32), .DW(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(32'(DELTA2_Q8) << 24), .den(sum),
    .busy(div_busy), .done(div_done), .q(div_q)
  );

  assign in_ready  = (state == S_IN);
  assign out_valid = (state == S_OUT);
  assign prod      = 64'(ebuf[idx[LW-2:0]]) * 64'(recip);
  assign out_data  = ((prod >> 24) > 64'd127) ? 8'd127 : 8'(prod >> 24);
  assign out_last  = (state == S_OUT) && (idx == len - 1'b1);
  assign div_start = (state == S_DIV);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IN; len <= '0; idx <= '0; xmax <= -8'sd128; sum <= '0; recip <= '0;
    end else begin
      case (state)
        S_IN: if (in_valid) begin
          xbuf[len[LW-2:0]] <= in_data;
          if (len == '0 || in_data > xmax) xmax <= in_data;
          len <= len + 1'b1;
          if (in_last || len == LW'(LMAX - 1)) begin
            state <= S_EXP; idx <= '0; sum <= '0;
          end
        end
        S_EXP: begin
          ebuf[idx[LW-2:0]] <= ex_out;
          sum <= sum + 32'(ex_out);
          idx <= idx + 1'b1;
          if (idx == len - 1'b1) state <= S_DIV;
        end
        S_DIV: state <= S_WAIT;
        S_WAIT: if (div_done) begin
          recip <= div_q; idx <= '0; state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          idx <= idx + 1'b1;
          if (idx == len - 1'b1) begin
            state <= S_IN; len <= '0;
          end
        end
        default: state <= S_IN;
      endcase
    end
  end
endmodule
