// tb_output_buffer: self-checking test of the tile output buffer (4 x 3).
//
// Offers random tiles with a random number of valid rows (1..4) and a tag,
// sometimes while the buffer is still full, and drains it with random
// back-pressure. Checks that a tile is taken only while the buffer is empty,
// that exactly the valid rows come out, in order, with the right row index,
// tag and data, and that a tile offered while full is not lost or mixed in.
module tb_output_buffer;
  localparam int MT = 4, NT = 3, ACC_W = 32, TAG_W = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cap_valid, cap_ready, row_valid, row_ready;
  logic signed [ACC_W-1:0] cap_data [MT][NT], row_data [NT];
  logic [2:0] cap_rows;
  logic [TAG_W-1:0] cap_tag, row_tag;
  logic [1:0] row_idx;

  output_buffer #(.MT(MT), .NT(NT), .ACC_W(ACC_W), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0;
  typedef struct { int row; int tag; int d [NT]; } row_t;
  row_t q [$];
  int tiles = 0, rows_out = 0, refused = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cap_valid = 0; row_ready = 0; cap_rows = 0; cap_tag = 0;
    for (int i = 0; i < MT; i++) for (int j = 0; j < NT; j++) cap_data[i][j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (tiles < 60) begin
      @(negedge clk);
      // drain side: check the row on offer
      if (row_valid) begin
        checks++;
        if (q.size() == 0) begin failures++; $display("row offered, none expected"); end
        else begin
          if (row_idx !== 2'(q[0].row) || row_tag !== TAG_W'(q[0].tag)) begin
            failures++; $display("row %0d tag %0d, expected row %0d tag %0d", row_idx, row_tag, q[0].row, q[0].tag);
          end
          for (int j = 0; j < NT; j++) if (row_data[j] !== q[0].d[j]) begin
            failures++; $display("row %0d col %0d: %0d, expected %0d", row_idx, j, row_data[j], q[0].d[j]);
          end
        end
      end else begin
        checks++;
        if (q.size() != 0) begin failures++; $display("no row offered, %0d expected", q.size()); end
      end
      // capture side
      checks++;
      if (cap_ready !== (q.size() == 0)) begin failures++; $display("cap_ready wrong"); end
      row_ready = ($urandom_range(0, 99) < 60);
      cap_valid = ($urandom_range(0, 99) < 40);
      cap_rows  = 3'($urandom_range(1, MT));
      cap_tag   = TAG_W'($urandom);
      for (int i = 0; i < MT; i++) for (int j = 0; j < NT; j++) cap_data[i][j] = $urandom;
      #1;
      if (row_valid && row_ready) begin void'(q.pop_front()); rows_out++; end
      if (cap_valid && !cap_ready) refused++;
      if (cap_valid && cap_ready) begin
        tiles++;
        for (int i = 0; i < cap_rows; i++) begin
          row_t r;
          r.row = i; r.tag = cap_tag;
          for (int j = 0; j < NT; j++) r.d[j] = cap_data[i][j];
          q.push_back(r);
        end
      end
    end
    checks++;
    if (refused == 0) begin failures++; $display("never offered a tile while full"); end
    $display("tiles %0d rows %0d refused %0d", tiles, rows_out, refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
