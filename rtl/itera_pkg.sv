// itera_pkg: types, default sizes and the requantisation function shared by the
// SVD MatMul engine modules.
//
// Default numbers: weights are 4-bit and activations 8-bit (the W4A8 point
// studied most in the evaluation), the array is Mt=104 x Nt=28 PEs with Kf=2
// multipliers per PE (the W4A8 design point at 170 Gbit/s). The on-chip
// buffers hold K up to 2048, the widest reduction of a transformer-base layer
// (the feed-forward down-projection; the 512x512x512 Q/K/V workload needs
// 512), and R up to 512 (full rank of a 512-wide layer). The accumulator width (32) and the requantisation of the intermediate
// XW1 product back to the activation width are choices of this design.
package itera_pkg;

  localparam int unsigned W_W_DEF   = 4;    // weight word length (W4)
  localparam int unsigned A_W_DEF   = 8;    // activation word length (A8)
  localparam int unsigned ACC_W_DEF = 32;   // accumulator width
  localparam int unsigned MT_DEF    = 104;  // PE rows (M tiling factor)
  localparam int unsigned NT_DEF    = 28;   // PE columns (N / R tiling factor)
  localparam int unsigned KF_DEF    = 2;    // multipliers per PE
  localparam int unsigned KMAX_DEF  = 2048;  // largest reduction length held on chip
  localparam int unsigned RMAX_DEF  = 512;  // largest rank held on chip
  localparam int unsigned DIM_W     = 16;   // width of the run-time matrix dimensions

  // Engine organisation, fixed when the accelerator is built.
  typedef enum logic {
    ENGINE_SINGLE  = 1'b0,
    ENGINE_CASCADE = 1'b1
  } engine_e;

  // Run-time description of one linear layer Y = X W  (or X W1 W2).
  typedef struct packed {
    logic [DIM_W-1:0] m;        // rows of X (batch / tokens)
    logic [DIM_W-1:0] k;        // input features
    logic [DIM_W-1:0] n;        // output features
    logic [DIM_W-1:0] r;        // decomposition rank
    logic             svd_en;   // 1: Y = (X W1) W2, 0: dense Y = X W
    logic [5:0]       rq_shift; // right shift applied to X W1 before it is reused
  } layer_cfg_t;

  // Requantise an accumulator value to a signed OUT_W-bit activation:
  // arithmetic shift right with round-half-up, then saturate.
  function automatic logic signed [31:0] requant(input logic signed [31:0] acc,
                                                 input logic [5:0] shift,
                                                 input int unsigned out_w);
    logic signed [32:0] rounded;
    logic signed [32:0] lo, hi;
    if (shift == 0) rounded = 33'(acc);
    else            rounded = (33'(acc) + (33'sd1 <<< (shift - 1))) >>> shift;
    hi = (33'sd1 <<< (out_w - 1)) - 33'sd1;
    lo = -(33'sd1 <<< (out_w - 1));
    if (rounded > hi)      return 32'(hi);
    else if (rounded < lo) return 32'(lo);
    else                   return 32'(rounded);
  endfunction

  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
