// tb_output_buffer: writes random words through port A and reads them back
// through both ports, checking the one-cycle read latency and that a read in
// the cycle of a write returns the old word.
module tb_output_buffer;
  localparam int WORD_W = 32, DEPTH = 64, AW = 6;
  logic clk = 0, a_we = 0;
  logic [AW-1:0] a_addr = 0, b_addr = 0;
  logic [WORD_W-1:0] a_wdata = 0, a_rdata, b_rdata;
  logic [WORD_W-1:0] img [DEPTH];
  int checks = 0, failures = 0;

  output_buffer #(.WORD_W(WORD_W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      img[a] = $urandom; a_we = 1; a_addr = AW'(a); a_wdata = img[a]; @(posedge clk); #1;
    end
    a_we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      a_addr = AW'(a); b_addr = AW'(DEPTH - 1 - a); @(posedge clk); #1;
      checks += 2;
      if (a_rdata != img[a]) begin failures++; $display("A %0d", a); end
      if (b_rdata != img[DEPTH-1-a]) begin failures++; $display("B %0d", a); end
    end
    // one-cycle read latency on port B: a new address shows only after the edge
    for (int a = 0; a < 16; a++) begin
      b_addr = AW'(a); @(posedge clk); #1;
      b_addr = AW'(a + 1); #1;
      checks++; if (b_rdata != img[a]) begin failures++; $display("B latency %0d", a); end
    end
    a_we = 1; a_addr = 5; a_wdata = ~img[5]; @(posedge clk); #1; a_we = 0;
    checks++; if (a_rdata != img[5]) begin failures++; $display("read-during-write"); end
    @(posedge clk); #1;
    checks++; if (a_rdata != ~img[5]) begin failures++; $display("new word"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
