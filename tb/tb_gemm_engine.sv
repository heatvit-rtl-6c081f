// tb_gemm_engine: checks the PE array against a reference dot product.
// Random int8 operands are accumulated over several cycles; per-lane results
// (attention mode, Concat) and lane sums (Sum) are compared with sums formed
// in the testbench, one cycle after the last operands.
module tb_gemm_engine;
  localparam int TI = 4, TO = 3, TH = 2, ACC_W = 32;
  logic clk = 0, rst_n = 0, en = 0, clear = 0, attn = 0;
  logic [TH-1:0][TI*8-1:0] in_vec;
  logic [TH-1:0][TO-1:0][TI*8-1:0] w_vec;
  logic [TH-1:0][TO-1:0][ACC_W-1:0] acc;
  logic [TO-1:0][ACC_W-1:0] sum;
  int checks = 0, failures = 0;
  longint ref_acc [TH][TO];

  gemm_engine #(.TI(TI), .TO(TO), .TH(TH), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int steps, input bit mode);
    attn = mode;
    foreach (ref_acc[a, b]) ref_acc[a][b] = 0;
    for (int s = 0; s < steps; s++) begin
      for (int th = 0; th < TH; th++) begin
        in_vec[th] = {$urandom, $urandom};
        for (int o = 0; o < TO; o++) w_vec[th][o] = {$urandom, $urandom};
        for (int o = 0; o < TO; o++)
          for (int k = 0; k < TI; k++)
            ref_acc[th][o] += $signed(in_vec[th][8*k +: 8]) * $signed(w_vec[th][o][8*k +: 8]);
      end
      clear = (s == 0); en = (s != 0);
      @(posedge clk); #1;
    end
    en = 0; clear = 0;
    for (int th = 0; th < TH; th++)
      for (int o = 0; o < TO; o++) begin
        checks++;
        if ($signed(acc[th][o]) != ref_acc[th][o]) begin
          failures++; $display("acc[%0d][%0d] %0d exp %0d", th, o, $signed(acc[th][o]), ref_acc[th][o]);
        end
      end
    for (int o = 0; o < TO; o++) begin
      longint s = 0;
      for (int th = 0; th < TH; th++) s += ref_acc[th][o];
      checks++;
      if ($signed(sum[o]) != (mode ? 0 : s)) begin
        failures++; $display("sum[%0d] %0d exp %0d", o, $signed(sum[o]), mode ? 0 : s);
      end
    end
  endtask

  initial begin
    in_vec = '0; w_vec = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int r = 0; r < 20; r++) run(1 + $urandom_range(0, 9), r[0]);
    // extreme values
    for (int th = 0; th < TH; th++) begin
      in_vec[th] = {TI{8'h80}};
      for (int o = 0; o < TO; o++) w_vec[th][o] = {TI{8'h80}};
    end
    clear = 1; @(posedge clk); #1; clear = 0;
    checks++; if ($signed(acc[0][0]) != TI * 16384) begin failures++; $display("extreme"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
