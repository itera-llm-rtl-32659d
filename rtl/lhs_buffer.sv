// lhs_buffer: on-chip store of the left-hand-side matrix tiles, NBANK banks of
// one M tile each.
//
// Each bank has one memory per PE row (MT memories), each DEPTH words deep and
// KF activations wide, so that a K-long row needs ceil(K/KF) words - the
// buffer depth of the paper's resource model, with one memory per row. All MT
// rows of the bank selected by rd_bank are read at the same address in the
// same cycle, giving the array one LHS vector per row per beat; the tile is
// re-read for every N tile (it is loaded from off-chip once per M tile).
// With two banks (the default) the next M tile is loaded into one bank while
// the array computes on the other, so loading overlaps computing as the
// paper's rate model assumes; the banking itself is this design's choice.
//
// Two write ports: a single-word port (bank, row, address) filled from the
// input stream, and a whole-column port that writes all MT rows of one bank
// at one address, used by the Single engine to load the intermediate XW1 tile
// back into the bank it computes from (the feedback path of the Single engine
// figure). The two ports may write different banks in the same cycle; in the
// same bank the whole-column port wins. Writes are synchronous, the read is
// combinational (this design's choice, so the read needs no extra pipeline
// stage). Each bank thus needs one write and one read port.
module lhs_buffer #(
  parameter int unsigned MT    = itera_pkg::MT_DEF,
  parameter int unsigned KF    = itera_pkg::KF_DEF,
  parameter int unsigned A_W   = itera_pkg::A_W_DEF,
  parameter int unsigned DEPTH = itera_pkg::KMAX_DEF / itera_pkg::KF_DEF,
  parameter int unsigned NBANK = 2,
  localparam int unsigned BW   = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic                     clk,
  // single-word write (from the input stream)
  input  logic                     wr_en,
  input  logic [BW-1:0]            wr_bank,
  input  logic [$clog2(MT)-1:0]    wr_row,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [KF*A_W-1:0]        wr_data,
  // all-rows write (from the intermediate buffer)
  input  logic                     col_wr_en,
  input  logic [BW-1:0]            col_wr_bank,
  input  logic [$clog2(DEPTH)-1:0] col_wr_addr,
  input  logic [KF*A_W-1:0]        col_wr_data [MT],
  // all-rows read (to the array)
  input  logic [BW-1:0]            rd_bank,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [KF*A_W-1:0]        rd_data [MT]
);
  logic [KF*A_W-1:0] mem [NBANK][MT][DEPTH];

  always_ff @(posedge clk) begin
    for (int b = 0; b < NBANK; b++) begin
      for (int i = 0; i < MT; i++) begin
        if (col_wr_en && col_wr_bank == BW'(b))
          mem[b][i][col_wr_addr] <= col_wr_data[i];
        else if (wr_en && wr_bank == BW'(b) && wr_row == $clog2(MT)'(i))
          mem[b][i][wr_addr] <= wr_data;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < MT; i++) rd_data[i] = mem[rd_bank][i][rd_addr];
  end

endmodule
