// tb_heatvit_top_full: the accelerator at its default size (Ti = To = 16,
// Th = 6 head lanes, 6 heads, buffers for 256 tokens of 1536 channels) taken
// through two pruning stages of DeiT-S size: 197 tokens of 384 channels,
// then the surviving tokens plus package token. Each stage runs as the host
// would drive it:
// a GEMM + GELU layer, the per-head keep/prune layer with a 2-way Softmax,
// the head-weight layer with Sigmoid, an average job over the first layer's
// output (the classifier's global feature), the token selection (with the first
// stage's package token kept by the second), and a Q x K^T attention layer
// with Softmax over the remaining tokens. Every output is checked against
// the host model, and every mechanism (Sum and Concat modes, each activation,
// pruning, package token, forced keep, average job, weight-bank stall, input loaded during
// a job) must occur at least once.
module tb_heatvit_top_full;
  localparam int TI = 16, TO = 16, TH = 6, HEADS = 6, N_MAX = 256, D_MAX = 1536;
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

  heatvit_top dut (.*);

  always #5 clk = ~clk;
  initial begin #100ms; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  `include "heatvit_host.svh"

  initial begin
    int n1, n2;
    desc = '0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    for (int n = 0; n < N_MAX; n++) for (int c = 0; c < D_MAX; c++) xin[n][c] = byte'($urandom_range(0, 255));
    h_stage(197, 384, 0, n1);
    h_stage(n1, 384, 1, n2);
    h_report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
