// gumbel_decision: keep/prune decision of one token (steps 1 and 2 of the
// paper's token selection flow).
//
// With the two scores of a token (keep, prune) it computes both exponents with
// exp_approx, their Sum, and keeps the token if exp(s_keep)/Sum exceeds the
// threshold (0.5 by default). At inference the Gumbel-Softmax has no noise,
// so this is a softmax over the two scores followed by the threshold. The
// division is evaluated as exp(s_keep) * 256 > thr * Sum, which gives the same
// answer without a divider, and both scores are first reduced by their
// maximum as in the softmax approximation; both are this design's choices.
// Scores are Q.8 (16 bits), thr is Q0.8. Purely combinational.
module gumbel_decision (
  input  logic [15:0] sk,
  input  logic [15:0] sp,
  input  logic [7:0]  thr,
  output logic        keep
);
  logic [15:0]        m;
  logic signed [15:0] xk, xp;
  logic [16:0]        ek, ep;
  logic [17:0]        sum;

  assign m  = (sk > sp) ? sk : sp;
  assign xk = 16'(sk - m);
  assign xp = 16'(sp - m);

  exp_approx u_ek (.x(xk), .y(ek));
  exp_approx u_ep (.x(xp), .y(ep));

  assign sum  = 18'(ek) + 18'(ep);
  assign keep = (34'(ek) << 8) > 34'(sum) * 34'(thr);
endmodule
