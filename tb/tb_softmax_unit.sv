// tb_softmax_unit: random groups of 1..200 int8 values (4 fractional bits).
// Outputs are compared with delta2 * e_i / sum e_j (delta2 = 0.5) where e is
// the paper's exp approximation in real arithmetic, scaled to Q0.8 and
// saturated at 127, within 2 LSB; the sum of each group's outputs must be
// near 128 (= 0.5), and the group latency must stay within 3L + 40 cycles.
module tb_softmax_unit;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 1, out_last;
  logic signed [7:0] in_data = 0;
  logic [7:0] out_data;
  int checks = 0, failures = 0;

  softmax_unit #(.LMAX(256)) dut (.*);
  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real ref_exp(real xv);
    real z, p;
    z = $floor(-xv / $ln(2.0));
    p = xv + z * $ln(2.0);
    return (0.3585 * (p + 1.353) ** 2 + 0.344) / (2.0 ** z);
  endfunction

  task automatic group(input int L, input int spread);
    int v [256];
    real e [256];
    real s;
    int mx, cyc, got, tot;
    mx = -128;
    for (int i = 0; i < L; i++) begin
      v[i] = $urandom_range(0, spread) - spread / 2;
      if (v[i] > 127) v[i] = 127;
      if (v[i] > mx) mx = v[i];
    end
    s = 0;
    for (int i = 0; i < L; i++) begin e[i] = ref_exp((v[i] - mx) / 16.0); s += e[i]; end
    cyc = 0;
    for (int i = 0; i < L; i++) begin
      in_valid = 1; in_data = 8'(v[i]); in_last = (i == L - 1);
      @(posedge clk); #1; cyc++;
    end
    in_valid = 0; in_last = 0;
    got = 0; tot = 0;
    while (got < L) begin
      if (out_valid) begin
        real r;
        int ri;
        r = 0.5 * e[got] / s * 256.0;
        ri = (r > 127.0) ? 127 : int'($floor(r));
        checks++;
        if (int'(out_data) - ri > 2 || ri - int'(out_data) > 2) begin
          failures++; if (failures < 10) $display("L=%0d i=%0d hw=%0d ref=%0d", L, got, out_data, ri);
        end
        checks++;
        if (out_last != (got == L - 1)) begin failures++; $display("out_last at %0d", got); end
        tot += out_data;
        got++;
      end
      @(posedge clk); #1; cyc++;
    end
    checks++;
    if (cyc > 3 * L + 40) begin failures++; $display("L=%0d took %0d cycles", L, cyc); end
    checks++;
    if (L > 1 && (tot > 130 || tot < 128 - 2 * L - 4)) begin failures++; $display("L=%0d sum %0d", L, tot); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; #1;
    group(1, 10);
    group(2, 40);
    group(5, 60);
    for (int r = 0; r < 20; r++) group($urandom_range(2, 200), $urandom_range(4, 255));
    group(197, 255);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
