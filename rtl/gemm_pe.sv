// gemm_pe: one processing element of the GEMM engine.
//
// Computes the dot product of TI signed 8-bit inputs with TI signed 8-bit
// weights in one cycle and adds it to a private accumulator. `clear` starts a
// new accumulation (the accumulator takes this cycle's dot product), `en`
// adds to it. The accumulator is visible one cycle after the operands.
// The PE array of the paper's GEMM engine is built from these units; the
// single-cycle dot product is this design's choice.
module gemm_pe #(
  parameter int unsigned TI    = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clear,
  input  logic [TI*8-1:0]         a,      // TI inputs, element k in bits [8k+7:8k]
  input  logic [TI*8-1:0]         w,      // TI weights
  output logic signed [ACC_W-1:0] acc
);
  logic signed [ACC_W-1:0] dot;

  always_comb begin
    dot = '0;
    for (int k = 0; k < TI; k++)
      dot += ACC_W'($signed(a[8*k +: 8]) * $signed(w[8*k +: 8]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n)     acc <= '0;
    else if (clear) acc <= dot;
    else if (en)    acc <= acc + dot;
  end
endmodule
