// tb_layer_controller: the control logic driving the real GEMM engine,
// ping-pong buffers and output buffer (the token selector is replaced by a
// stand-in that answers after a fixed delay). GEMM jobs in Sum and Concat
// mode with each activation are checked element by element against the host
// model; the cycle count of a job whose weights are already loaded must match
// the loop structure: 3 + n_tok*(di_w/TH + 3) cycles for a one-tile
// non-attention job; a select job must wait for the selector, release the
// input bank and finish.
module tb_layer_controller;
  localparam int TI = 4, TO = 4, TH = 2, HEADS = 4, N_MAX = 16, D_MAX = 32;
  localparam int RW = D_MAX / TI, AW = $clog2(N_MAX * RW), WAW = $clog2(RW), NW = $clog2(N_MAX + 1);
  localparam int ACCW = 32;
  logic clk = 0, rst_n = 0;
  heatvit_pkg::layer_desc_t desc;
  logic start = 0, busy, done;
  logic [NW-1:0] n_out = 0, n_kept = 0;
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
  // input buffer
  logic                          ib_valid, ib_release;
  logic [TH:0][AW-1:0]           ib_addr;
  logic [TH:0][TI*8-1:0]         ib_data;
  // weight buffer
  logic                          wbuf_valid, wbuf_release;
  logic [TH-1:0][WAW-1:0]        wbuf_addr;
  logic [TH-1:0][TO*TI*8-1:0]    wbuf_data;
  // engine
  logic                          eng_en, eng_clear, eng_attn;
  logic [TH-1:0][TI*8-1:0]       eng_in;
  logic [TH-1:0][TO-1:0][TI*8-1:0] eng_w;
  logic [TH-1:0][TO-1:0][ACCW-1:0] eng_acc;
  logic [TO-1:0][ACCW-1:0]       eng_sum;
  // output buffer port A
  logic                          c_we, s_we, oa_we;
  logic [AW-1:0]                 c_addr, s_addr, oa_addr;
  logic [TO*8-1:0]               c_wdata, s_wdata, oa_wdata, oa_rdata;
  // selector
  logic                          sel_start, sel_done, sel_busy;

  pingpong_buffer #(.WORD_W(TI*8), .SEG_W(TI*8), .DEPTH(N_MAX*RW), .NRD(TH+1)) u_inbuf (
    .clk, .rst_n,
    .wr_en(in_wr_en), .wr_addr(in_wr_addr), .wr_seg(1'b0), .wr_data(in_wr_data),
    .wr_commit(in_commit), .wr_ready(in_ready),
    .rd_valid(ib_valid), .rd_addr(ib_addr), .rd_data(ib_data), .rd_release(ib_release)
  );

  pingpong_buffer #(.WORD_W(TO*TI*8), .SEG_W(TI*8), .DEPTH(RW), .NRD(TH)) u_wbuf (
    .clk, .rst_n,
    .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_seg(w_wr_seg), .wr_data(w_wr_data),
    .wr_commit(w_commit), .wr_ready(w_ready),
    .rd_valid(wbuf_valid), .rd_addr(wbuf_addr), .rd_data(wbuf_data), .rd_release(wbuf_release)
  );

  always_comb begin
    for (int th = 0; th < TH; th++) begin
      eng_in[th] = ib_data[th];
      for (int o = 0; o < TO; o++) eng_w[th][o] = wbuf_data[th][o*TI*8 +: TI*8];
    end
  end

  gemm_engine #(.TI(TI), .TO(TO), .TH(TH), .ACC_W(ACCW)) u_gemm (
    .clk, .rst_n, .en(eng_en), .clear(eng_clear), .attn(eng_attn),
    .in_vec(eng_in), .w_vec(eng_w), .acc(eng_acc), .sum(eng_sum)
  );

  layer_controller #(.TI(TI), .TO(TO), .TH(TH), .HEADS(HEADS), .N_MAX(N_MAX), .D_MAX(D_MAX)) u_ctrl (
    .clk, .rst_n, .desc, .start, .busy, .done,
    .in_valid(ib_valid), .in_addr(ib_addr[TH-1:0]), .in_release(ib_release),
    .w_valid(wbuf_valid), .w_addr(wbuf_addr), .w_release(wbuf_release),
    .eng_en, .eng_clear, .eng_attn, .eng_acc, .eng_sum,
    .ob_we(c_we), .ob_addr(c_addr), .ob_wdata(c_wdata), .ob_rdata(oa_rdata),
    .sel_start, .sel_done
  );

  // token selector stand-in: answers a select job after SEL_LAT cycles
  localparam int SEL_LAT = 37;
  int sel_cnt = 0, sel_starts = 0;
  always_ff @(posedge clk) begin
    sel_done <= 1'b0;
    if (!rst_n) begin sel_busy <= 1'b0; sel_cnt <= 0; sel_starts <= 0; end
    else if (sel_start) begin sel_busy <= 1'b1; sel_cnt <= 0; sel_starts <= sel_starts + 1; end
    else if (sel_busy) begin
      sel_cnt <= sel_cnt + 1;
      if (sel_cnt == SEL_LAT - 1) begin sel_busy <= 1'b0; sel_done <= 1'b1; end
    end
  end
  assign s_we = 1'b0; assign s_addr = '0; assign s_wdata = '0; assign ib_addr[TH] = '0;

  assign oa_we    = sel_busy ? s_we    : c_we;
  assign oa_addr  = sel_busy ? s_addr  : c_addr;
  assign oa_wdata = sel_busy ? s_wdata : c_wdata;

  output_buffer #(.WORD_W(TO*8), .DEPTH(N_MAX*RW)) u_obuf (
    .clk, .a_we(oa_we), .a_addr(oa_addr), .a_wdata(oa_wdata), .a_rdata(oa_rdata),
    .b_addr(ob_raddr), .b_rdata(ob_rdata)
  );

  always #5 clk = ~clk;
  initial begin #20ms; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  `include "heatvit_host.svh"

  initial begin
    int cyc;
    desc = '0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    for (int n = 0; n < N_MAX; n++) for (int c = 0; c < D_MAX; c++) xin[n][c] = byte'($urandom_range(0, 255));
    for (int r = 0; r < 6; r++) begin
      int nt, di, dn;
      heatvit_pkg::act_e a;
      nt = $urandom_range(1, 16); di = 16 * $urandom_range(1, 2); dn = $urandom_range(1, 8);
      a = heatvit_pkg::act_e'(r % 4);
      wts = new[((dn + TO - 1) / TO) * TO];
      foreach (wts[o]) begin wts[o] = new[di]; foreach (wts[o][c]) wts[o][c] = byte'($urandom_range(0, 15) - 8); end
      h_gemm(nt, di, dn, r[0], 5, a, dn);
    end
    // timing: one output tile, weights and input loaded before start
    wts = new[TO];
    foreach (wts[o]) begin wts[o] = new[32]; foreach (wts[o][c]) wts[o][c] = byte'($urandom_range(0, 15) - 8); end
    h_load_input(10, 32);
    h_load_weights(1, 32);
    desc = '0; desc.job = heatvit_pkg::JOB_GEMM; desc.n_tok = 9'd10; desc.di_w = 8'd8; desc.do_t = 8'd1;
    desc.shift = 5'd5;
    start = 1; @(posedge clk); #1; start = 0; cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != 3 + 10 * (8 / TH + 3)) begin failures++; $display("job took %0d cycles, expected %0d", cyc, 3 + 10 * (8 / TH + 3)); end
    // select job: handed to the selector, input bank released at the end
    h_load_input(4, 32);
    desc = '0; desc.job = heatvit_pkg::JOB_SELECT; desc.n_tok = 9'd4; desc.di_w = 8'd8;
    start = 1; @(posedge clk); #1; start = 0; cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks += 2;
    if (sel_starts != 1) begin failures++; $display("selector started %0d times", sel_starts); end
    if (cyc < SEL_LAT) begin failures++; $display("select job ended after %0d cycles", cyc); end
    checks++;
    if (!in_ready) begin failures++; $display("input bank not released"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
