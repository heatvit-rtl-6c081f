// sigmoid_unit: Sigmoid by the piecewise-linear PLAN approximation.
//
//   |x| >= 5         : 1
//   2.375 <= |x| < 5 : |x|/32 + 0.84375
//   1 <= |x| < 2.375 : |x|/8  + 0.625
//   0 <= |x| < 1     : |x|/4  + 0.5
//   x < 0            : 1 - y(|x|)
//
// The paper adopts PLAN for the head scores of the token classifier; the
// segment table above is the published PLAN table, not printed in the
// paper. All slopes are powers of two, so the unit is shifts and adds only.
// Input int8 with 4 fractional bits; output Q0.7 (1.0 saturates to 127).
// Purely combinational.
module sigmoid_unit (
  input  logic signed [7:0] x,
  output logic [7:0]        y
);
  logic [7:0] ax;   // |x|, Q.4 (|-128| = 128 fits)
  logic [8:0] yp;   // y(|x|), Q.8
  logic [8:0] ys;   // signed result, Q.8

  always_comb begin
    ax = x[7] ? 8'(-x) : 8'(x);
    if (ax >= 8'd80)      yp = 9'd256;                      // >= 5
    else if (ax >= 8'd38) yp = 9'(ax >> 1) + 9'd216;        // >= 2.375
    else if (ax >= 8'd16) yp = 9'(ax << 1) + 9'd160;        // >= 1
    else                  yp = 9'(ax << 2) + 9'd128;
    ys = x[7] ? 9'd256 - yp : yp;
    y  = (ys >= 9'd255) ? 8'd127 : 8'(ys >> 1);
  end
endmodule
