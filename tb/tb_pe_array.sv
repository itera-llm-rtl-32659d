// tb_pe_array: self-checking test of the spatial MatMul array (3 x 4 PEs, KF=2).
//
// Streams random MT x K by K x NT tile products (K from 1 to 15, padded with
// zeros to whole beats) through the array with random bubbles and random
// freeze cycles, and compares every element of each finished tile with a
// matrix product computed here. Row i must see only LHS vector i and column j
// only RHS vector j, which a mis-wired broadcast would break.
module tb_pe_array;
  localparam int MT = 3, NT = 4, KF = 2, A_W = 8, W_W = 4, ACC_W = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, in_valid, in_first, in_last, out_valid;
  logic [KF*A_W-1:0] lhs [MT];
  logic [KF*W_W-1:0] rhs [NT];
  logic signed [ACC_W-1:0] out_data [MT][NT];

  pe_array #(.MT(MT), .NT(NT), .KF(KF), .A_W(A_W), .W_W(W_W), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;
  int expq [$];      // MT*NT values per tile, row-major
  int tiles_out = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int e;
  always @(posedge clk) if (rst_n && en && out_valid) begin
    tiles_out++;
    for (int i = 0; i < MT; i++)
      for (int j = 0; j < NT; j++) begin
        e = expq.pop_front();
        checks++;
        if (out_data[i][j] !== e) begin
          failures++;
          $display("tile %0d [%0d][%0d] = %0d, expected %0d", tiles_out, i, j, out_data[i][j], e);
        end
      end
  end

  task automatic tile(input int k, input int bubble_pct, input int freeze_pct);
    int A [MT][16];
    int B [16][NT];
    int nb = (k + KF - 1) / KF;
    for (int i = 0; i < MT; i++) for (int q = 0; q < 16; q++) A[i][q] = (q < k) ? $urandom_range(0, 255) - 128 : 0;
    for (int q = 0; q < 16; q++) for (int j = 0; j < NT; j++) B[q][j] = (q < k) ? $urandom_range(0, 15) - 8 : 0;
    for (int i = 0; i < MT; i++)
      for (int j = 0; j < NT; j++) begin
        int s = 0;
        for (int q = 0; q < k; q++) s += A[i][q] * B[q][j];
        expq.push_back(s);
      end
    for (int b = 0; b < nb; b++) begin
      while ($urandom_range(0, 99) < bubble_pct) begin
        in_valid = 0; en = ($urandom_range(0, 99) >= freeze_pct); @(negedge clk);
      end
      for (int i = 0; i < MT; i++) for (int f = 0; f < KF; f++) lhs[i][f*A_W +: A_W] = A_W'(A[i][b*KF + f]);
      for (int j = 0; j < NT; j++) for (int f = 0; f < KF; f++) rhs[j][f*W_W +: W_W] = W_W'(B[b*KF + f][j]);
      in_valid = 1; in_first = (b == 0); in_last = (b == nb - 1);
      en = ($urandom_range(0, 99) >= freeze_pct);
      while (!en) begin @(negedge clk); en = ($urandom_range(0, 99) >= freeze_pct); end
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    en = 1; in_valid = 0; in_first = 0; in_last = 0;
    for (int i = 0; i < MT; i++) lhs[i] = '0;
    for (int j = 0; j < NT; j++) rhs[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 15; t++) tile(t + 1, 0, 0);
    for (int t = 0; t < 25; t++) tile($urandom_range(1, 15), 25, 25);
    en = 1;
    repeat (8) @(negedge clk);
    checks++;
    if (tiles_out != 40) begin failures++; $display("%0d tiles out, expected 40", tiles_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
