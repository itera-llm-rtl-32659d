// rhs_buffer: weight FIFOs between the off-chip weight stream and the array.
//
// Each beat of the weight stream carries KF weights for each of the NT PE
// columns (NT x KF words, the RHS input rate of the paper's tile model). The
// buffer holds one FIFO per PE column, DEPTH beats deep (ceil(K/KF) by
// default, the paper's buffer depth), all pushed and popped together, so it
// behaves as one wide FIFO. The paper configures these memories as FIFOs; the
// valid/ready handshake on the input is this design's choice.
//   in_*  : valid/ready stream; column j at in_data[j*KF*W_W +: KF*W_W]
//   out_* : show-ahead head of the FIFOs, popped by out_pop
module rhs_buffer #(
  parameter int unsigned NT    = itera_pkg::NT_DEF,
  parameter int unsigned KF    = itera_pkg::KF_DEF,
  parameter int unsigned W_W   = itera_pkg::W_W_DEF,
  parameter int unsigned DEPTH = itera_pkg::KMAX_DEF / itera_pkg::KF_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [NT*KF*W_W-1:0]    in_data,
  output logic                    out_valid,
  input  logic                    out_pop,
  output logic [KF*W_W-1:0]       out_data [NT]
);
  logic full_c [NT];
  logic empty_c [NT];

  for (genvar j = 0; j < NT; j++) begin : g_col
    sync_fifo #(.WIDTH(KF*W_W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .push(in_valid && in_ready),
      .wr_data(in_data[j*KF*W_W +: KF*W_W]),
      .pop(out_pop),
      .rd_data(out_data[j]),
      .full(full_c[j]),
      .empty(empty_c[j])
    );
  end

  // the column FIFOs move in lock step, column 0 speaks for all
  assign in_ready  = !full_c[0];
  assign out_valid = !empty_c[0];

  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) out_pop |-> out_valid);

endmodule
