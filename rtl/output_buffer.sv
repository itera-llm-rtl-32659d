// output_buffer: holds one finished MT x NT result tile and drains it by rows.
//
// When the array presents a tile (cap_valid) and the buffer is empty, the whole
// tile is copied in one cycle (cap_ready=1) together with the number of rows
// that belong to the matrix (cap_rows, fewer than MT for the last, padded M
// tile) and a tag (the tile's index, used by the engine to place the tile).
// The buffer then offers one row of NT results per cycle on a valid/ready
// port, rows 0 .. cap_rows-1 in order, and is empty again after the last row is
// taken. While it is full, cap_ready=0 and the engine stalls the array, which
// is this design's back-pressure scheme. Draining MT rows takes MT cycles,
// less than the ceil(K/KF) cycles the array needs per tile when MT <= K/KF,
// so with a free consumer the array does not stall.
module output_buffer #(
  parameter int unsigned MT    = itera_pkg::MT_DEF,
  parameter int unsigned NT    = itera_pkg::NT_DEF,
  parameter int unsigned ACC_W = itera_pkg::ACC_W_DEF,
  parameter int unsigned TAG_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cap_valid,
  output logic                    cap_ready,
  input  logic signed [ACC_W-1:0] cap_data [MT][NT],
  input  logic [$clog2(MT+1)-1:0] cap_rows,
  input  logic [TAG_W-1:0]        cap_tag,
  output logic                    row_valid,
  input  logic                    row_ready,
  output logic signed [ACC_W-1:0] row_data [NT],
  output logic [$clog2(MT)-1:0]   row_idx,
  output logic [TAG_W-1:0]        row_tag
);
  localparam int unsigned RW = $clog2(MT+1);

  logic signed [ACC_W-1:0] tile_q [MT][NT];
  logic                    full_q;
  logic [RW-1:0]           rows_q;
  logic [RW-1:0]           rd_q;
  logic [TAG_W-1:0]        tag_q;

  assign cap_ready = !full_q;
  assign row_valid = full_q;
  assign row_idx   = rd_q[$clog2(MT)-1:0];
  assign row_tag   = tag_q;

  always_comb begin
    for (int j = 0; j < NT; j++) row_data[j] = tile_q[row_idx][j];
  end

  always_ff @(posedge clk) begin
    if (cap_valid && cap_ready) tile_q <= cap_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= 1'b0; rows_q <= '0; rd_q <= '0; tag_q <= '0;
    end else if (cap_valid && cap_ready) begin
      full_q <= (cap_rows != '0);
      rows_q <= cap_rows;
      rd_q   <= '0;
      tag_q  <= cap_tag;
    end else if (row_valid && row_ready) begin
      rd_q <= rd_q + 1'b1;
      if (rd_q + 1'b1 == rows_q) full_q <= 1'b0;
    end
  end

  a_rows_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                    (cap_valid && cap_ready) |-> cap_rows <= RW'(MT));

endmodule
