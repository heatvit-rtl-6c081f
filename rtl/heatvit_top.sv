// heatvit_top: ViT accelerator with adaptive token pruning.
//
// The host (the SoC's processor, which also runs LayerNorm and moves data to
// and from off-chip memory) drives four ports:
//   * the input ping-pong buffer, one 16-byte word per write, token n at word
//     n*96 + c (c = channel/16); `in_commit` hands a filled bank over;
//   * the weight ping-pong buffer, holding one output tile of TO weight rows:
//     word c, segment o carries the 16 weights of row o for channels
//     16c .. 16c+15; `w_commit` hands a tile over;
//   * the token selector's score memory (per token: s_keep, s_prune, a, one
//     byte per head);
//   * the output buffer read port.
// A job starts with `start` and a layer_desc_t and ends with a `done` pulse.
// GEMM jobs run on the TH x TO x TI GEMM engine through the layer
// controller, with requantisation and GELU / Sigmoid on the way to the output
// buffer and Softmax as a pass over it. Select jobs run the token selector,
// which reads token rows from the input buffer and writes the dense,
// packaged token matrix to the output buffer; `n_out` then gives its row
// count. Average jobs use the selector to write the mean of all token rows
// (the classifier's global feature) as output row 0. The token classifier's linear layers are ordinary GEMM jobs, so the
// pruning reuses the GEMM engine and the nonlinear units.
//
// The block structure (ping-pong buffers, GEMM engine of PEs, Softmax and
// GELU after it, token selector writing the output buffer, control logic)
// follows the paper's accelerator figure; port formats are this design's.
module heatvit_top
  import heatvit_pkg::layer_desc_t;
#(
  parameter int unsigned TI    = 16,
  parameter int unsigned TO    = 16,
  parameter int unsigned TH    = 6,
  parameter int unsigned HEADS = 6,
  parameter int unsigned N_MAX = 256,
  parameter int unsigned D_MAX = 1536,
  localparam int unsigned RW   = D_MAX / TI,
  localparam int unsigned AW   = $clog2(N_MAX * RW),
  localparam int unsigned WAW  = $clog2(RW),
  localparam int unsigned NW   = $clog2(N_MAX + 1),
  localparam int unsigned ACCW = heatvit_pkg::ACC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // job control
  input  layer_desc_t            desc,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic [NW-1:0]          n_out,
  output logic [NW-1:0]          n_kept,
  // input buffer loader
  input  logic                   in_wr_en,
  input  logic [AW-1:0]          in_wr_addr,
  input  logic [TI*8-1:0]        in_wr_data,
  input  logic                   in_commit,
  output logic                   in_ready,
  // weight buffer loader
  input  logic                   w_wr_en,
  input  logic [WAW-1:0]         w_wr_addr,
  input  logic [$clog2(TO)-1:0]  w_wr_seg,
  input  logic [TI*8-1:0]        w_wr_data,
  input  logic                   w_commit,
  output logic                   w_ready,
  // score memory of the token selector
  input  logic                   sc_we,
  input  logic [NW-2:0]          sc_addr,
  input  logic [3*HEADS*8-1:0]   sc_wdata,
  // output buffer read port
  input  logic [AW-1:0]          ob_raddr,
  output logic [TO*8-1:0]        ob_rdata
);
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

  token_selector #(.H(HEADS), .N_MAX(N_MAX), .D_MAX(D_MAX), .TI(TI)) u_sel (
    .clk, .rst_n, .start(sel_start),
    .avg_all(desc.job == heatvit_pkg::JOB_AVG), .n_tok(desc.n_tok), .d_words(7'(desc.di_w)), .n_pkg_in(desc.n_pkg_in), .thr(desc.thr),
    .busy(sel_busy), .done(sel_done), .n_out, .n_kept,
    .sc_we, .sc_addr, .sc_wdata,
    .x_addr(ib_addr[TH]), .x_data(ib_data[TH]),
    .o_we(s_we), .o_addr(s_addr), .o_wdata(s_wdata)
  );

  assign oa_we    = sel_busy ? s_we    : c_we;
  assign oa_addr  = sel_busy ? s_addr  : c_addr;
  assign oa_wdata = sel_busy ? s_wdata : c_wdata;

  output_buffer #(.WORD_W(TO*8), .DEPTH(N_MAX*RW)) u_obuf (
    .clk, .a_we(oa_we), .a_addr(oa_addr), .a_wdata(oa_wdata), .a_rdata(oa_rdata),
    .b_addr(ob_raddr), .b_rdata(ob_rdata)
  );
endmodule
