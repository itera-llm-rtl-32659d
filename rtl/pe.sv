// pe: one processing element of the spatial MatMul array.
//
// Each valid beat brings KF activations (one row segment of the LHS) and KF
// weights (one column segment of the RHS). The PE multiplies them lane by lane,
// sums the KF products in an adder tree and adds the sum into an accumulator,
// so that after ceil(K/KF) beats it holds one element of the output
// (output-stationary dot product along K). This is the PE of the paper's
// array figure: KF multipliers, a tree of adders, then an accumulator.
//
// Pipeline (all stages advance only while en=1, so the whole array can be
// frozen when its results cannot be taken):
//   stage 1  KF products registered
//   stage 2  adder-tree sum registered
//   stage 3  accumulator; on a beat flagged last, out_data = acc + sum and
//            out_valid is 1 for one enabled cycle.
// A beat flagged first restarts the accumulator. Latency from the last beat to
// out_valid is 3 enabled cycles; one beat is accepted every cycle. Signed
// two's-complement operands; the register split is this design's choice.
module pe #(
  parameter int unsigned KF    = itera_pkg::KF_DEF,
  parameter int unsigned A_W   = itera_pkg::A_W_DEF,
  parameter int unsigned W_W   = itera_pkg::W_W_DEF,
  parameter int unsigned ACC_W = itera_pkg::ACC_W_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [KF*A_W-1:0]       lhs,      // lane i at [i*A_W +: A_W]
  input  logic [KF*W_W-1:0]       rhs,      // lane i at [i*W_W +: W_W]
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_data
);
  localparam int unsigned P_W = A_W + W_W;

  logic signed [P_W-1:0]   prod_q [KF];
  logic                    v1, f1, l1;
  logic signed [ACC_W-1:0] sum_c, sum_q;
  logic                    v2, f2, l2;
  logic signed [ACC_W-1:0] acc_q;

  // stage 1: multipliers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0;
      for (int i = 0; i < KF; i++) prod_q[i] <= '0;
    end else if (en) begin
      v1 <= in_valid; f1 <= in_first; l1 <= in_last;
      for (int i = 0; i < KF; i++)
        prod_q[i] <= $signed(lhs[i*A_W +: A_W]) * $signed(rhs[i*W_W +: W_W]);
    end
  end

  // adder tree over the KF products
  always_comb begin
    sum_c = '0;
    for (int i = 0; i < KF; i++) sum_c += ACC_W'(prod_q[i]);
  end

  // stage 2: registered tree output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; f2 <= 1'b0; l2 <= 1'b0; sum_q <= '0;
    end else if (en) begin
      v2 <= v1; f2 <= f1; l2 <= l1; sum_q <= sum_c;
    end
  end

  // stage 3: accumulator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (en) begin
      out_valid <= v2 && l2;
      if (v2) begin
        acc_q <= f2 ? sum_q : acc_q + sum_q;
        if (l2) out_data <= f2 ? sum_q : acc_q + sum_q;
      end
    end
  end

endmodule
