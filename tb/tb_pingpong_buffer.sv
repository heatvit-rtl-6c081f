// tb_pingpong_buffer: checks bank hand-over and data integrity of the double
// buffer: fill bank A, commit, read it while bank B is being filled, the
// loader blocks when both banks are full, release moves the reader to B.
module tb_pingpong_buffer;
  localparam int WORD_W = 32, SEG_W = 8, DEPTH = 16, NRD = 2, AW = 4;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_commit = 0, wr_ready, rd_valid, rd_release = 0;
  logic [AW-1:0] wr_addr = 0;
  logic [1:0] wr_seg = 0;
  logic [SEG_W-1:0] wr_data = 0;
  logic [NRD-1:0][AW-1:0] rd_addr = '0;
  logic [NRD-1:0][WORD_W-1:0] rd_data;
  int checks = 0, failures = 0;
  logic [WORD_W-1:0] img [2][DEPTH];

  pingpong_buffer #(.WORD_W(WORD_W), .SEG_W(SEG_W), .DEPTH(DEPTH), .NRD(NRD)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic fill(input int b);
    for (int a = 0; a < DEPTH; a++) begin
      img[b][a] = $urandom;
      for (int s = 0; s < 4; s++) begin
        wr_en = 1; wr_addr = AW'(a); wr_seg = 2'(s); wr_data = img[b][a][8*s +: 8];
        @(posedge clk); #1;
      end
    end
    wr_en = 0;
    wr_commit = 1; @(posedge clk); #1; wr_commit = 0;
  endtask

  task automatic readall(input int b);
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr[0] = AW'(a); rd_addr[1] = AW'(DEPTH - 1 - a);
      @(posedge clk); #1;
      chk(rd_data[0] == img[b][a], $sformatf("bank %0d addr %0d port0", b, a));
      chk(rd_data[1] == img[b][DEPTH-1-a], $sformatf("bank %0d port1", b));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; #1;
    chk(wr_ready && !rd_valid, "empty after reset");
    fill(0);
    chk(rd_valid && wr_ready, "bank 0 readable, bank 1 free");
    fill(1);
    chk(rd_valid && !wr_ready, "both full: loader blocked");
    readall(0);
    rd_release = 1; @(posedge clk); #1; rd_release = 0;
    chk(rd_valid && wr_ready, "after release: bank 1 readable, bank 0 free");
    fill(0);   // overwrite bank 0 while bank 1 is read
    readall(1);
    rd_release = 1; @(posedge clk); #1; rd_release = 0;
    readall(0);
    rd_release = 1; @(posedge clk); #1; rd_release = 0;
    chk(!rd_valid && wr_ready, "all released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
