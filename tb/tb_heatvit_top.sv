// tb_heatvit_top: end-to-end test of the accelerator at a reduced size
// (Ti = To = 4, Th = 2 head lanes, 2 heads, up to 16 tokens of 32 channels).
// Three pruning stages run back to back, each as the host would drive them:
// a GEMM + GELU layer, the per-head keep/prune layer with a 2-way Softmax,
// the head-weight layer with Sigmoid, an average job over the first layer's
// output (the classifier's global feature), the token selection (with earlier
// stages' package tokens kept), and a Q x K^T attention layer
// with Softmax over the remaining tokens. Every output is checked against
// the host model, and every mechanism (Sum and Concat modes, each activation,
// pruning, package token, forced keep, average job, weight-bank stall, input loaded during
// a job) must occur at least once.
module tb_heatvit_top;
  localparam int TI = 4, TO = 4, TH = 2, HEADS = 2, N_MAX = 16, D_MAX = 32;
  localparam int RW = D_MAX / TI, AW = $clog2(N_MAX * RW), WAW = $clog2(RW), NW = $clog2(N_MAX + 1);
  logic clk = 0, rst_n = 0;
  heatvit_pkg::layer_desc_t desc;
  logic start = 0, busy, done;
  logic [NW-1:0] n_out, n_kept;
  logic in_wr_en = 0, in_commit = 0, in_ready;
  logic [AW-1:0] in_wr_addr = 0;
  logic [TI*8-1:0] in_wr_data = 0;
  logic w_wr_en = 0, w_commit = 0, w_ready;
  logic [WAW-1:0] w_wr_addr = 0;
  logic [$clog2(TO)-1:0] w_wr_seg = 0;
  logic [TI*8-1:0] w_wr_data = 0;
  logic sc_we = 0;
  logic [NW-2:0] sc_addr = 0;
  logic [3*HEADS*8-1:0] sc_wdata = 0;
  logic [AW-1:0] ob_raddr = 0;
  logic [TO*8-1:0] ob_rdata;
  int checks = 0, failures = 0;

  heatvit_top #(.TI(TI), .TO(TO), .TH(TH), .HEADS(HEADS), .N_MAX(N_MAX), .D_MAX(D_MAX)) dut (.*);

  always #5 clk = ~clk;
  initial begin #20ms; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  `include "heatvit_host.svh"

  initial begin
    int n1, n2;
    desc = '0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    for (int n = 0; n < N_MAX; n++) for (int c = 0; c < D_MAX; c++) xin[n][c] = byte'($urandom_range(0, 255));
    h_stage(16, 32, 0, n1);
    h_stage(n1, 32, 1, n2);
    h_stage(n2, 16, 1, n1);
    h_report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
