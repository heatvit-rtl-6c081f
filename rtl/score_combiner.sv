// score_combiner: the attention-based head weighting of the token classifier.
//
// For one token it forms the overall keep and prune scores as the weighted
// average of the per-head scores s_i with the head weights a_i:
//   S~[c] = sum_i s_i[c] * a_i / sum_i a_i ,   c in {keep, prune}.
// The two weighted sums are formed in one cycle; a sequential divider then
// produces R = 2^24 / sum_i a_i and both scores are scaled by R, so a token
// takes 35 cycles from `start` to `done`. Formula from the paper; formats are
// this design's: s in Q0.8, a in Q0.7 (sigmoid outputs), S~ in Q.8. If every
// a_i is zero both scores are zero.
module score_combiner #(
  parameter int unsigned H = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [H-1:0][7:0]    s_keep,
  input  logic [H-1:0][7:0]    s_prune,
  input  logic [H-1:0][7:0]    a,
  output logic                 done,
  output logic [15:0]          sk,
  output logic [15:0]          sp
);
  logic [31:0] num_k, num_p, den;
  logic [31:0] nk_r, np_r;
  logic        zero_r;
  logic        busy;
  logic [31:0] q;
  logic        div_done;
  logic [63:0] pk, pp;

  always_comb begin
    num_k = '0; num_p = '0; den = '0;
    for (int i = 0; i < H; i++) begin
      num_k += 32'(s_keep[i])  * 32'(a[i]);
      num_p += 32'(s_prune[i]) * 32'(a[i]);
      den   += 32'(a[i]);
    end
  end

  seq_divider #(.NW(32), .DW(32)) u_div (
    .clk, .rst_n, .start, .num(32'h0100_0000), .den(den),
    .busy, .done(div_done), .q
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      nk_r <= '0; np_r <= '0; zero_r <= 1'b0;
    end else if (start) begin
      nk_r <= num_k; np_r <= num_p; zero_r <= (den == '0);
    end
  end

  assign pk   = 64'(nk_r) * 64'(q);
  assign pp   = 64'(np_r) * 64'(q);
  assign done = div_done;
  assign sk   = zero_r ? 16'd0 : 16'(pk >> 24);
  assign sp   = zero_r ? 16'd0 : 16'(pp >> 24);
endmodule
