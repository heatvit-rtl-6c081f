// tb_gumbel_decision: random keep/prune score pairs and thresholds; the
// expected decision is e^sk / (e^sk + e^sp) > thr with the true exponential,
// checked wherever that ratio is more than 0.01 away from the threshold.
// Equal scores at threshold 0.5 must be pruned.
module tb_gumbel_decision;
  logic [15:0] sk, sp;
  logic [7:0] thr;
  logic keep;
  int checks = 0, failures = 0;
  gumbel_decision dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int r = 0; r < 5000; r++) begin
      real ratio, t;
      sk = 16'($urandom_range(0, 256)); sp = 16'($urandom_range(0, 256));
      thr = (r < 2500) ? 8'd128 : 8'($urandom_range(20, 235));
      #1;
      ratio = $exp(sk / 256.0) / ($exp(sk / 256.0) + $exp(sp / 256.0));
      t = thr / 256.0;
      if (ratio > t + 0.01 || ratio < t - 0.01) begin
        checks++;
        if (keep != (ratio > t)) begin
          failures++; if (failures < 10) $display("sk=%0d sp=%0d thr=%0d keep=%0d", sk, sp, thr, keep);
        end
      end
    end
    sk = 100; sp = 100; thr = 128; #1;
    checks++; if (keep) begin failures++; $display("tie kept"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
