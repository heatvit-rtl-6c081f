// pingpong_buffer: two-bank (double) buffer between the host loader and the
// compute side.
//
// The loader always writes the "fill" bank and the compute side always reads
// the "read" bank, so loading the next layer's data overlaps computation on
// the current one (the paper's double buffering). A bank changes hands by two
// pulses: `wr_commit` marks the fill bank full and moves the loader to the
// other bank; `rd_release` frees the read bank and moves the reader to the
// other bank. `wr_ready` says the fill bank is free, `rd_valid` that the read
// bank holds committed data. Writes may be narrower than a word: `wr_seg`
// selects which SEG_W-bit segment of the word is written, so a weight tile
// word of TO x TI bytes can be loaded over a narrow bus.
//
// The bank protocol, segment writes and NRD independent read ports with one
// cycle read latency are this design's choices; the paper only names the
// buffers and states that double buffering is used.
module pingpong_buffer #(
  parameter int unsigned WORD_W = 128,
  parameter int unsigned SEG_W  = 128,
  parameter int unsigned DEPTH  = 24576,
  parameter int unsigned NRD    = 7,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned NSEG  = WORD_W / SEG_W,
  localparam int unsigned SGW   = (NSEG > 1) ? $clog2(NSEG) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // loader side
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  logic [SGW-1:0]           wr_seg,
  input  logic [SEG_W-1:0]         wr_data,
  input  logic                     wr_commit,
  output logic                     wr_ready,
  // compute side
  output logic                     rd_valid,
  input  logic [NRD-1:0][AW-1:0]   rd_addr,
  output logic [NRD-1:0][WORD_W-1:0] rd_data,
  input  logic                     rd_release
);
  logic [WORD_W-1:0] mem0 [DEPTH];
  logic [WORD_W-1:0] mem1 [DEPTH];
  logic       wb, rb;          // fill bank, read bank
  logic [1:0] full;

  assign wr_ready = !full[wb];
  assign rd_valid = full[rb];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wb   <= 1'b0;
      rb   <= 1'b0;
      full <= '0;
    end else begin
      if (wr_commit && !full[wb]) begin
        full[wb] <= 1'b1;
        wb       <= ~wb;
      end
      if (rd_release && full[rb]) begin
        full[rb] <= 1'b0;
        rb       <= ~rb;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !full[wb]) begin
      if (wb) mem1[wr_addr][SEG_W*wr_seg +: SEG_W] <= wr_data;
      else    mem0[wr_addr][SEG_W*wr_seg +: SEG_W] <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NRD; p++)
      rd_data[p] <= rb ? mem1[rd_addr[p]] : mem0[rd_addr[p]];
  end

  // A write to a bank that still waits for the reader is lost.
  a_no_write_full: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full[wb])
    else $error("pingpong_buffer: write while fill bank is full");
endmodule
