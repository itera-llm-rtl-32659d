// intermediate_buffer: on-chip store of the MT x R tile of X*W1.
//
// Both SVD engines must keep the whole MT x R intermediate tile on chip,
// because the second product accumulates over R. The buffer holds NBANK banks
// of MT rows x COLS elements of A_W bits. Results arrive one tile row at a
// time from an output buffer: WNT elements of row wr_row starting at column
// wr_col0 (columns at or beyond COLS are dropped; they only exist as padding).
// The read side returns, for every row at once, the KF elements of beat
// rd_addr (columns rd_addr*KF .. rd_addr*KF+KF-1), i.e. the LHS vectors of the
// second product. The Single engine uses one bank; the Cascade engine uses two
// so that the first array can fill one tile while the second array reads the
// previous one (the ping-pong is this design's choice). Combinational read.
module intermediate_buffer #(
  parameter int unsigned NBANK = 1,
  parameter int unsigned MT    = itera_pkg::MT_DEF,
  parameter int unsigned WNT   = itera_pkg::NT_DEF,
  parameter int unsigned KF    = itera_pkg::KF_DEF,
  parameter int unsigned A_W   = itera_pkg::A_W_DEF,
  parameter int unsigned RMAX  = itera_pkg::RMAX_DEF,
  localparam int unsigned DEPTH = (RMAX + KF - 1) / KF,
  localparam int unsigned COLS  = DEPTH * KF,
  localparam int unsigned BW    = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [BW-1:0]               wr_bank,
  input  logic [$clog2(MT)-1:0]       wr_row,
  input  logic [itera_pkg::DIM_W-1:0] wr_col0,
  input  logic [A_W-1:0]              wr_data [WNT],
  input  logic [BW-1:0]               rd_bank,
  input  logic [$clog2(DEPTH)-1:0]    rd_addr,
  output logic [KF*A_W-1:0]           rd_data [MT]
);
  logic [A_W-1:0] mem [NBANK][MT][COLS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int n = 0; n < WNT; n++) begin
        if (32'(wr_col0) + n < COLS)
          mem[wr_bank][wr_row][32'(wr_col0) + n] <= wr_data[n];
      end
    end
  end

  always_comb begin
    for (int i = 0; i < MT; i++)
      for (int f = 0; f < KF; f++)
        rd_data[i][f*A_W +: A_W] = mem[rd_bank][i][32'(rd_addr) * KF + f];
  end

endmodule
