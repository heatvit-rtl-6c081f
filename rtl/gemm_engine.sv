// gemm_engine: the PE array of the accelerator (TH x TO processing elements,
// each a TI-wide multiply-accumulate).
//
// The engine follows the paper's GEMM loop tiling with an extra head
// dimension: lane th works on the input slice of one head and multiplies TI
// input values (in_vec lane th) with the TI matching weights of TO output
// channels (w_vec lane th, row o). Every cycle with `en` (or `clear`) each PE
// accumulates one dot product. The paper's control signal "attention-related"
// selects how lane results are combined: for attention layers (Q x K^T and
// softmax(QK^T) x V, and per-head classifier layers) every lane keeps its own
// TO results (Concat, read from `acc`); for all other layers the lanes hold
// partial sums over different parts of the input channels and are added
// (Sum, read from `sum`). The engine itself does both; `attn` only gates
// `sum` to zero so that a wrong mode is visible.
//
// Timing: operands presented in cycle t are in `acc` / `sum` after the clock
// edge ending cycle t. `sum` is combinational from the accumulators.
module gemm_engine #(
  parameter int unsigned TI    = 16,
  parameter int unsigned TO    = 16,
  parameter int unsigned TH    = 6,
  parameter int unsigned ACC_W = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en,
  input  logic                           clear,
  input  logic                           attn,
  input  logic [TH-1:0][TI*8-1:0]        in_vec,
  input  logic [TH-1:0][TO-1:0][TI*8-1:0] w_vec,
  output logic [TH-1:0][TO-1:0][ACC_W-1:0] acc,
  output logic [TO-1:0][ACC_W-1:0]       sum
);
  for (genvar th = 0; th < TH; th++) begin : g_lane
    for (genvar o = 0; o < TO; o++) begin : g_out
      gemm_pe #(.TI(TI), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .en, .clear,
        .a  (in_vec[th]),
        .w  (w_vec[th][o]),
        .acc(acc[th][o])
      );
    end
  end

  always_comb begin
    for (int o = 0; o < TO; o++) begin
      sum[o] = '0;
      if (!attn)
        for (int th = 0; th < TH; th++) sum[o] += acc[th][o];
    end
  end
endmodule
