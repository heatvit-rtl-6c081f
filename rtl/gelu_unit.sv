// gelu_unit: GELU by the paper's polynomial approximation of erf, with the
// regularisation factor delta1.
//
//   GELU(x) = x/2 * (1 + L(x/sqrt2)),
//   L(u)    = sign(u) * delta1 * (a*(min(|u|, -b) + b)^2 + 1),
//   a = -0.2888, b = -1.769, delta1 = 0.5.
//
// Formula and constants follow the paper. Input and output are int8 with 4
// fractional bits (this design's choice); internal values are Q.16 and the
// result is truncated toward minus infinity. Purely combinational; the
// accelerator applies it on the write-back path after requantisation.
module gelu_unit #(
  parameter logic [8:0] DELTA1_Q8 = 9'd128
) (
  input  logic signed [7:0] x,
  output logic signed [7:0] y
);
  localparam logic [31:0] INV_SQRT2_Q16 = 32'd46341;   // 1/sqrt(2)
  localparam logic [31:0] NEG_B_Q16     = 32'd115933;  // 1.769
  localparam logic [31:0] NEG_A_Q16     = 32'd18927;   // 0.2888

  logic [31:0]        ux;     // |x|/sqrt2, Q.16
  logic [31:0]        uc;     // min(|u|, 1.769)
  logic [31:0]        d;      // 1.769 - uc  (= -(uc + b))
  logic [63:0]        d2;
  logic [31:0]        l;      // a*d^2 + 1, Q.16
  logic signed [31:0] lerf;   // L(u), Q.16
  logic signed [47:0] prod;

  always_comb begin
    ux   = 32'(((64'(x[7] ? 8'(-x) : 8'(x)) << 12) * 64'(INV_SQRT2_Q16)) >> 16);  // Q.4 -> Q.16
    uc   = (ux > NEG_B_Q16) ? NEG_B_Q16 : ux;
    d    = NEG_B_Q16 - uc;
    d2   = (64'(d) * 64'(d)) >> 16;
    l    = 32'd65536 - 32'((d2 * 64'(NEG_A_Q16)) >> 16);
    lerf = $signed(32'((64'(l) * 64'(DELTA1_Q8)) >> 8));
    if (x < 0)       lerf = -lerf;
    else if (x == 0) lerf = '0;
    // y = x * (1 + L) / 2 : x Q.4 times Q.16 then >> 17 gives Q.4
    prod = 48'(x) * 48'(32'sd65536 + lerf);
    y    = 8'(prod >>> 17);
  end
endmodule
