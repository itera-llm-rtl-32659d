// itera_accel: SVD MatMul accelerator for the linear layers of a sub-8-bit
// LLM whose weight matrices are stored as two low-rank quantised factors
// (W ~ W1 W2, W1: K x R, W2: R x N). It computes Y = (X W1) W2 for an M x K
// activation matrix X, keeping the M-tile of X W1 on chip, or a dense Y = X W.
//
// The engine organisation is fixed when the accelerator is built:
//   ENGINE_SINGLE  (default) one MT x NT array used first for X W1 and then for
//                  (X W1) W2 (dense layers also run on it);
//   ENGINE_CASCADE an MT x CASC_RT array for X W1 feeding an MT x CASC_NT
//                  array for (X W1) W2, working in parallel.
// The paper's design-space exploration picks one of the two per design point;
// the default sizes are its W4A8 design point at 170 Gbit/s (Mt=104, Nt=28,
// Kf=2, Single engine). The paper gives no Cascade design point, so CASC_RT and
// CASC_NT default to an even split of the same 28 PE columns.
//
// Interface: cfg is sampled with start while busy=0; done pulses at the end.
// Off-chip traffic goes through valid/ready streams where the DMA engines of
// the paper connect:
//   x  : X row by row, ceil(K/KF) beats of KF 8-bit activations per row
//   w1 : Single - per M tile, the W1 tiles then the W2 tiles (or the W tiles)
//        Cascade - per M tile, the W1 tiles (CASC_RT columns per beat)
//   w2 : Cascade only - per M tile, the W2 tiles; never ready in Single
//   y  : one row of YN 32-bit results per beat, per M tile, per N tile
// Weight beats carry KF weights for each PE column, zero-padded past K, R, N.
// stall is high in a cycle in which an array is frozen because its output
// buffer is still full.
module itera_accel
  import itera_pkg::*;
#(
  parameter engine_e     ENGINE  = ENGINE_SINGLE,
  parameter int unsigned MT      = MT_DEF,
  parameter int unsigned NT      = NT_DEF,
  parameter int unsigned KF      = KF_DEF,
  parameter int unsigned A_W     = A_W_DEF,
  parameter int unsigned W_W     = W_W_DEF,
  parameter int unsigned ACC_W   = ACC_W_DEF,
  parameter int unsigned KMAX    = KMAX_DEF,
  parameter int unsigned RMAX    = RMAX_DEF,
  parameter int unsigned CASC_RT = NT_DEF / 2,
  parameter int unsigned CASC_NT = NT_DEF / 2,
  localparam int unsigned W1N    = (ENGINE == ENGINE_SINGLE) ? NT : CASC_RT,
  localparam int unsigned YN     = (ENGINE == ENGINE_SINGLE) ? NT : CASC_NT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  layer_cfg_t              cfg,
  output logic                    busy,
  output logic                    done,
  input  logic                    x_valid,
  output logic                    x_ready,
  input  logic [KF*A_W-1:0]       x_data,
  input  logic                    w1_valid,
  output logic                    w1_ready,
  input  logic [W1N*KF*W_W-1:0]   w1_data,
  input  logic                    w2_valid,
  output logic                    w2_ready,
  input  logic [CASC_NT*KF*W_W-1:0] w2_data,
  output logic                    y_valid,
  input  logic                    y_ready,
  output logic signed [ACC_W-1:0] y_data [YN],
  output logic                    stall
);

  if (ENGINE == ENGINE_SINGLE) begin : g_single
    single_svd_engine #(
      .MT(MT), .NT(NT), .KF(KF), .A_W(A_W), .W_W(W_W), .ACC_W(ACC_W),
      .KMAX(KMAX), .RMAX(RMAX)
    ) u_engine (
      .clk, .rst_n, .start, .cfg, .busy, .done,
      .x_valid, .x_ready, .x_data,
      .w_valid(w1_valid), .w_ready(w1_ready), .w_data(w1_data),
      .y_valid, .y_ready, .y_data,
      .stall
    );
    assign w2_ready = 1'b0;
  end else begin : g_cascade
    logic stall_a, stall_b;
    cascade_svd_engine #(
      .MT(MT), .RT(CASC_RT), .NT(CASC_NT), .KF(KF), .A_W(A_W), .W_W(W_W),
      .ACC_W(ACC_W), .KMAX(KMAX), .RMAX(RMAX)
    ) u_engine (
      .clk, .rst_n, .start, .cfg, .busy, .done,
      .x_valid, .x_ready, .x_data,
      .w1_valid, .w1_ready, .w1_data,
      .w2_valid, .w2_ready, .w2_data,
      .y_valid, .y_ready, .y_data,
      .stall_a, .stall_b
    );
    assign stall = stall_a || stall_b;
  end

endmodule
