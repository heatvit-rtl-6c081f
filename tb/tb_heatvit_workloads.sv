// tb_heatvit_workloads: the accelerator at its default size running the
// layer shapes of the evaluated models, with every output checked against
// the host model:
//   * DeiT-S / LV-ViT-S (6 heads, 384 channels, 197 tokens): MLP FC1 to 1536
//     channels with GELU, FC2 back from 1536 to 384, the LV-ViT-S MLP width
//     1152, Q x K^T per head with Softmax over 197 keys (6 x 208 = 1248 score
//     columns), and the score x V product with Di = 1248, 64 outputs per head;
//   * DeiT-T (3 heads of 64 channels): each head is placed in an even head
//     lane with a zero slice beside it, so Q x K^T runs on the 6-lane engine;
//     the odd lanes must then produce zeros.
// Model widths other than the head count and embedding size (token count,
// MLP ratio, head size) are standard values of these models. Parameters are
// the defaults; layers that differ only in size share this bench.
module tb_heatvit_workloads;
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
  initial begin #200ms; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  `include "heatvit_host.svh"

  task automatic rand_w(input int rows, input int di, input int valid);
    wts = new[((rows + TO - 1) / TO) * TO];
    foreach (wts[o]) begin wts[o] = new[di]; foreach (wts[o][c]) wts[o][c] = (o < valid) ? byte'($urandom_range(0, 15) - 8) : 8'sd0; end
  endtask

  initial begin
    desc = '0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    for (int n = 0; n < N_MAX; n++) for (int c = 0; c < D_MAX; c++) xin[n][c] = byte'($urandom_range(0, 255));
    // DeiT-S MLP: FC1 384 -> 1536 + GELU, then FC2 1536 -> 384
    rand_w(1536, 384, 1536);
    h_gemm(197, 384, 1536, 0, 7, heatvit_pkg::ACT_GELU, 0);
    $display("DeiT-S FC1 done, failures so far %0d", failures);
    for (int n = 0; n < 197; n++) for (int c = 0; c < 1536; c++) xin[n][c] = byte'(obuf[n][c]);
    rand_w(384, 1536, 384);
    h_gemm(197, 1536, 384, 0, 7, heatvit_pkg::ACT_NONE, 0);
    $display("DeiT-S FC2 done, failures so far %0d", failures);
    // LV-ViT-S MLP width (ratio 3): 384 -> 1152
    for (int n = 0; n < N_MAX; n++) for (int c = 0; c < D_MAX; c++) xin[n][c] = byte'($urandom_range(0, 255));
    rand_w(1152, 384, 1152);
    h_gemm(197, 384, 1152, 0, 7, heatvit_pkg::ACT_GELU, 0);
    $display("LV-ViT-S FC1 done, failures so far %0d", failures);
    // attention, 6 heads: Q x K^T with K = the token rows, Softmax over 197 keys
    wts = new[208];
    foreach (wts[o]) begin wts[o] = new[384]; foreach (wts[o][c]) wts[o][c] = (o < 197) ? xin[o][c] : 8'sd0; end
    h_gemm(197, 384, 197, 1, 8 + $clog2(64), heatvit_pkg::ACT_SOFTMAX, 197);
    $display("DeiT-S Q x K^T done, failures so far %0d", failures);
    // score x V: input = 6 heads x 208 score columns, 64 outputs per head
    for (int n = 0; n < 197; n++) for (int c = 0; c < 1248; c++) xin[n][c] = byte'(obuf[n][c]);
    rand_w(64, 1248, 64);
    h_gemm(197, 1248, 64, 1, 7, heatvit_pkg::ACT_NONE, 0);
    $display("DeiT-S S x V done, failures so far %0d", failures);
    // DeiT-T: 3 heads of 64 channels in lanes 0, 2, 4; lanes 1, 3, 5 zero
    for (int n = 0; n < N_MAX; n++)
      for (int c = 0; c < D_MAX; c++) xin[n][c] = (c < 384 && (c / 64) % 2 == 0) ? byte'($urandom_range(0, 255)) : 8'sd0;
    wts = new[208];
    foreach (wts[o]) begin wts[o] = new[384]; foreach (wts[o][c]) wts[o][c] = (o < 197) ? xin[o][c] : 8'sd0; end
    h_gemm(197, 384, 197, 1, 8 + $clog2(64), heatvit_pkg::ACT_NONE, 0);
    for (int n = 0; n < 197; n++)
      for (int h = 1; h < 6; h += 2)
        for (int o = 0; o < 208; o++) begin
          checks++;
          if (obuf[n][h * 208 + o] != 0) begin failures++; if (failures < 10) $display("DeiT-T padded lane %0d not zero", h); end
        end
    $display("DeiT-T Q x K^T done, failures so far %0d", failures);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
