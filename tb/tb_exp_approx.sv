// tb_exp_approx: sweeps x from 0 to -20 and compares the unit with the
// paper's decomposition evaluated in real arithmetic
//   z = floor(-x/ln2), p = x + z*ln2, exp(x) ~ (0.3585(p+1.353)^2+0.344) / 2^z
// (tolerance 2^-13) and with the true exponential (tolerance 0.004).
module tb_exp_approx;
  logic signed [15:0] x;
  logic [16:0] y;
  int checks = 0, failures = 0;
  exp_approx dut (.x, .y);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real ref_exp(real xv);
    real z, p;
    z = $floor(-xv / $ln(2.0));
    p = xv + z * $ln(2.0);
    return (0.3585 * (p + 1.353) ** 2 + 0.344) / (2.0 ** z);
  endfunction

  initial begin
    for (int i = 0; i <= 5120; i++) begin
      real xv, hw;
      x = 16'(-i); #1;
      xv = -i / 256.0;
      hw = y / 65536.0;
      checks++;
      if ((hw - ref_exp(xv) > 1.0/8192) || (ref_exp(xv) - hw > 1.0/8192)) begin
        failures++; if (failures < 10) $display("x=%f hw=%f ref=%f", xv, hw, ref_exp(xv));
      end
      checks++;
      if ((hw - $exp(xv) > 0.004) || ($exp(xv) - hw > 0.004)) begin
        failures++; if (failures < 10) $display("x=%f hw=%f exp=%f", xv, hw, $exp(xv));
      end
    end
    x = 16'sd100; #1;    // positive input is treated as 0
    checks++; if (y < 17'd65000) begin failures++; $display("positive input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
