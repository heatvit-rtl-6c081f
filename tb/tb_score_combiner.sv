// tb_score_combiner: random per-head scores and head weights; the weighted
// averages sum(s*a)/sum(a) are computed in real arithmetic and must match the
// unit's Q.8 outputs within one LSB, 33 to 35 cycles after start.
module tb_score_combiner;
  localparam int H = 6;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [H-1:0][7:0] s_keep, s_prune, a;
  logic [15:0] sk, sp;
  int checks = 0, failures = 0;

  score_combiner #(.H(H)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    s_keep = '0; s_prune = '0; a = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int r = 0; r < 200; r++) begin
      real nk, np, den;
      int cyc;
      nk = 0; np = 0; den = 0;
      for (int i = 0; i < H; i++) begin
        s_keep[i] = 8'($urandom_range(0, 128)); s_prune[i] = 8'(128 - s_keep[i]);
        a[i] = (r == 7) ? 8'd0 : 8'($urandom_range(0, 127));
        begin int ik, ip, ia; ik = s_keep[i]; ip = s_prune[i]; ia = a[i]; nk += ik * ia; np += ip * ia; den += ia; end
      end
      start = 1; @(posedge clk); #1; start = 0;
      cyc = 1;
      while (!done && cyc < 100) begin @(posedge clk); #1; cyc++; end
      checks++;
      if (cyc < 33 || cyc > 35) begin failures++; $display("latency %0d", cyc); end
      if (den == 0) begin
        checks++; if (sk != 0 || sp != 0) begin failures++; $display("zero weights"); end
      end else begin
        real rk, rp;
        rk = nk / den; rp = np / den;   // Q.15 over Q.7 gives Q.8
        checks += 2;
        if (sk - rk > 1.0 || rk - sk > 1.0) begin failures++; $display("sk %0d ref %f", sk, rk); end
        if (sp - rp > 1.0 || rp - sp > 1.0) begin failures++; $display("sp %0d ref %f", sp, rp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
