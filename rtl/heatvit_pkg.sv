// heatvit_pkg: types and constants shared by the accelerator.
//
// All activations and weights are 8-bit two's complement fixed point, as in the
// paper. The binary point positions used by the nonlinear units are this
// design's choice: inputs to GELU, Softmax and Sigmoid carry 4 fractional bits
// (range -8 .. +7.9375), Softmax outputs carry 8 fractional bits and Sigmoid
// outputs 7. The default tiling (Ti = To = 16, Th = 6) and buffer sizes
// (256 tokens, 1536 channels) are chosen for DeiT-S (6 heads, 384 channels,
// 197 tokens); the paper does not give tile sizes.
package heatvit_pkg;

  localparam int unsigned DATA_W  = 8;
  localparam int unsigned ACC_W   = 32;
  localparam int unsigned ACT_FRAC = 4;    // fractional bits of GELU/Softmax/Sigmoid inputs

  // Default configuration
  localparam int unsigned TI    = 16;      // input-channel tile (bytes per input word)
  localparam int unsigned TO    = 16;      // output-channel tile (bytes per output word)
  localparam int unsigned TH    = 6;       // head lanes computed in parallel
  localparam int unsigned H     = 6;       // attention heads of the model
  localparam int unsigned N_MAX = 256;     // tokens per buffer bank
  localparam int unsigned D_MAX = 1536;    // channels per token row

  // Regularisation constants delta1 and delta2 of the approximations, Q0.8
  localparam logic [8:0] DELTA1_Q8 = 9'd128;  // 0.5
  localparam logic [8:0] DELTA2_Q8 = 9'd128;  // 0.5

  typedef enum logic [1:0] {
    ACT_NONE    = 2'd0,
    ACT_GELU    = 2'd1,
    ACT_SOFTMAX = 2'd2,
    ACT_SIGMOID = 2'd3
  } act_e;

  typedef enum logic [1:0] {
    JOB_GEMM   = 2'd0,   // one matrix multiply layer (+ activation)
    JOB_SELECT = 2'd1,   // token selection of a stage input
    JOB_AVG    = 2'd2    // mean over all token rows (classifier global feature)
  } job_e;

  // Layer job descriptor written by the host.
  //   n_tok   : tokens (rows) of the input matrix
  //   di_w    : input words per row  (Di / TI), a multiple of H
  //   do_t    : output tiles per head (attention) or per row (otherwise)
  //   attn    : attention-related layer, keep results per head (Concat)
  //   shift   : requantisation right shift of the accumulators
  //   act     : activation applied on the way to the output buffer
  //   sm_len  : softmax group length (valid columns per head or per row)
  //   n_pkg_in: package tokens at the end of the input (token selection)
  //   thr     : keep threshold, Q0.8 (token selection)
  typedef struct packed {
    job_e        job;
    logic [8:0]  n_tok;
    logic [7:0]  di_w;
    logic [7:0]  do_t;
    logic        attn;
    logic [4:0]  shift;
    act_e        act;
    logic [8:0]  sm_len;
    logic [8:0]  n_pkg_in;
    logic [7:0]  thr;
  } layer_desc_t;

  function automatic logic signed [7:0] sat8(input logic signed [ACC_W-1:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return v[7:0];
  endfunction

endpackage
