// exp_approx: exponential of a non-positive number by the paper's
// shift-and-polynomial method.
//
// The input x (x <= 0, positive values are treated as 0) is split as
// x = -z*ln2 + p with integer z >= 0 and p in (-ln2, 0]; then
// exp(x) = exp(p) >> z with exp(p) ~ 0.3585*(p + 1.353)^2 + 0.344.
// z is found by multiplying -x by 1/ln2 and correcting it by one step so that
// p lands in its interval. Method and constants follow the paper; the fixed
// point formats are this design's choice: x is signed Q7.8, internal p is
// Q.16, the result y is unsigned Q1.16 (exp(0) gives 65558, slightly above 1,
// as the polynomial does). Purely combinational.
module exp_approx (
  input  logic signed [15:0] x,
  output logic [16:0]        y
);
  localparam logic [31:0] INV_LN2_Q14 = 32'd23637;  // 1/ln2
  localparam logic signed [31:0] LN2_Q16 = 32'sd45426;
  localparam logic [31:0] B_Q16  = 32'd88670;       // 1.353
  localparam logic [31:0] C1_Q16 = 32'd23495;       // 0.3585
  localparam logic [31:0] C0_Q16 = 32'd22544;       // 0.344

  logic [16:0]        nx;      // -x, Q.8
  logic [7:0]         z;
  logic signed [31:0] p;       // Q.16
  logic [31:0]        t;       // p + 1.353, Q.16
  logic [63:0]        t2;
  logic [31:0]        e;       // exp(p), Q.16

  always_comb begin
    nx = (x > 0) ? 17'd0 : 17'(-32'(x));
    z  = 8'((32'(nx) * INV_LN2_Q14) >> 22);
    p  = ($signed(32'(nx)) <<< 8);
    p  = -p + $signed(32'(z)) * LN2_Q16;
    if (p > 0) begin
      z = z - 8'd1;
      p = p - LN2_Q16;
    end else if (p <= -LN2_Q16) begin
      z = z + 8'd1;
      p = p + LN2_Q16;
    end
    t  = 32'(p + $signed(B_Q16));
    t2 = 64'(t) * 64'(t);
    e  = 32'((((t2 >> 16) * 64'(C1_Q16)) >> 16) + 64'(C0_Q16));
    y  = (z >= 8'd17) ? 17'd0 : 17'(e >> z);
  end
endmodule
