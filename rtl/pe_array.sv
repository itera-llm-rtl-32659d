// pe_array: the spatial MatMul array, MT x NT processing elements.
//
// Row i of the array receives one LHS vector (KF activations of row i of the
// current M tile) that is shared by all NT PEs of the row; column j receives
// one RHS vector (KF weights of column j of the current N tile) shared by all
// MT PEs of the column. Every PE therefore computes one element of the MT x NT
// output tile, accumulating along K over ceil(K/KF) beats; the complete tile
// appears on out_data with out_valid three enabled cycles after the beat
// flagged last. The row/column broadcast and the MT x NT x KF parallelism are
// the paper's; valid/first/last control is shared by all PEs and en freezes
// the whole array (this design's stall scheme).
module pe_array #(
  parameter int unsigned MT    = itera_pkg::MT_DEF,
  parameter int unsigned NT    = itera_pkg::NT_DEF,
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
  input  logic [KF*A_W-1:0]       lhs [MT],
  input  logic [KF*W_W-1:0]       rhs [NT],
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_data [MT][NT]
);
  logic valid_q [MT][NT];

  for (genvar i = 0; i < MT; i++) begin : g_row
    for (genvar j = 0; j < NT; j++) begin : g_col
      pe #(.KF(KF), .A_W(A_W), .W_W(W_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .en, .in_valid, .in_first, .in_last,
        .lhs(lhs[i]), .rhs(rhs[j]),
        .out_valid(valid_q[i][j]), .out_data(out_data[i][j])
      );
    end
  end

  // all PEs see the same control, so any one of them gives the tile's valid
  assign out_valid = valid_q[0][0];

endmodule
