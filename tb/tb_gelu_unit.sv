// tb_gelu_unit: all 256 inputs against the paper's approximate GELU
//   x/2 (1 + sign(u) d1 (a (min(|u|,1.769) - 1.769)^2 + 1)), u = x/sqrt2,
// a = -0.2888, d1 = 0.5, evaluated in real arithmetic; the unit must match
// floor(ref * 16) within one LSB.
module tb_gelu_unit;
  logic signed [7:0] x, y;
  int checks = 0, failures = 0;
  gelu_unit dut (.x, .y);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real ref_gelu(real xv);
    real u, au, l;
    u  = xv / $sqrt(2.0);
    au = (u < 0) ? -u : u;
    if (au > 1.769) au = 1.769;
    l  = 0.5 * (-0.2888 * (au - 1.769) ** 2 + 1.0);
    if (u < 0) l = -l; else if (u == 0) l = 0;
    return xv / 2.0 * (1.0 + l);
  endfunction

  initial begin
    for (int i = -128; i < 128; i++) begin
      int r;
      x = 8'(i); #1;
      r = int'($floor(ref_gelu(i / 16.0) * 16.0));
      checks++;
      if (int'(y) - r > 1 || r - int'(y) > 1) begin
        failures++; if (failures < 10) $display("x=%0d y=%0d ref=%0d", i, y, r);
      end
    end
    // a few known values: large x -> 0.75x with d1 = 0.5
    x = 8'sd64; #1; checks++; if (y != 8'sd48) begin failures++; $display("x=4 -> %0d", y); end
    x = 8'sd0;  #1; checks++; if (y != 8'sd0)  begin failures++; $display("x=0 -> %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
