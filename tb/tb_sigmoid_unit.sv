// tb_sigmoid_unit: all 256 inputs against the PLAN table in real arithmetic
// (output Q0.7, within one LSB) and against the true sigmoid (within 0.025, PLAN error plus one LSB).
module tb_sigmoid_unit;
  logic signed [7:0] x;
  logic [7:0] y;
  int checks = 0, failures = 0;
  sigmoid_unit dut (.x, .y);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real plan(real xv);
    real a, r;
    a = (xv < 0) ? -xv : xv;
    if (a >= 5.0) r = 1.0;
    else if (a >= 2.375) r = 0.03125 * a + 0.84375;
    else if (a >= 1.0) r = 0.125 * a + 0.625;
    else r = 0.25 * a + 0.5;
    return (xv < 0) ? 1.0 - r : r;
  endfunction

  initial begin
    for (int i = -128; i < 128; i++) begin
      real xv, hw, pr;
      x = 8'(i); #1;
      xv = i / 16.0; hw = y / 128.0; pr = plan(xv);
      if (pr * 128.0 > 127.0) pr = 127.0 / 128.0;
      checks++;
      if (hw - pr > 1.0/128 || pr - hw > 1.0/128) begin
        failures++; if (failures < 10) $display("x=%f hw=%f plan=%f", xv, hw, pr);
      end
      checks++;
      if (hw - 1.0/(1.0+$exp(-xv)) > 0.025 || 1.0/(1.0+$exp(-xv)) - hw > 0.025) begin
        failures++; if (failures < 10) $display("x=%f hw=%f sig", xv, hw);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
