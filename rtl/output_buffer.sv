// output_buffer: on-chip result memory of the accelerator.
//
// Port A is the accelerator's own read/write port: the write-back path of the
// control logic and the token selector write results here, and the softmax
// pass reads rows back and rewrites them. Port B is a read-only port for the
// host, which moves results to off-chip memory. Both reads have one cycle of
// latency; a read on port A in the cycle of a write to the same address
// returns the old word. One bank, word width TO bytes, is this design's
// choice; the paper names the buffer only.
module output_buffer #(
  parameter int unsigned WORD_W = 128,
  parameter int unsigned DEPTH  = 24576,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              a_we,
  input  logic [AW-1:0]     a_addr,
  input  logic [WORD_W-1:0] a_wdata,
  output logic [WORD_W-1:0] a_rdata,
  input  logic [AW-1:0]     b_addr,
  output logic [WORD_W-1:0] b_rdata
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    a_rdata <= mem[a_addr];
  end

  always_ff @(posedge clk) b_rdata <= mem[b_addr];
endmodule
