// tb_lhs_buffer: self-checking test of the LHS tile buffer (2 banks of
// 4 rows x 8 words).
//
// Fills both banks word by word through the single-word port, reads every
// address of both banks back on all rows at once, then applies random
// single-word and all-rows writes, often in the same cycle, to the same or to
// different banks (as loading the next tile during the intermediate-tile copy
// does), and checks after each step that exactly the expected words changed:
// both writes land when their banks differ, the all-rows port wins when they
// are the same.
module tb_lhs_buffer;
  localparam int MT = 4, KF = 2, A_W = 8, DEPTH = 8, NBANK = 2;

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, col_wr_en;
  logic [0:0] wr_bank, col_wr_bank, rd_bank;
  logic [1:0] wr_row;
  logic [2:0] wr_addr, col_wr_addr, rd_addr;
  logic [KF*A_W-1:0] wr_data, col_wr_data [MT], rd_data [MT];

  lhs_buffer #(.MT(MT), .KF(KF), .A_W(A_W), .DEPTH(DEPTH), .NBANK(NBANK)) dut (.*);

  int checks = 0, failures = 0, both_banks = 0, same_bank = 0;
  logic [KF*A_W-1:0] model [NBANK][MT][DEPTH];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int b = 0; b < NBANK; b++)
      for (int a = 0; a < DEPTH; a++) begin
        rd_bank = 1'(b); rd_addr = 3'(a);
        #1;
        for (int i = 0; i < MT; i++) begin
          checks++;
          if (rd_data[i] !== model[b][i][a]) begin
            failures++;
            $display("bank %0d row %0d addr %0d: %h, expected %h", b, i, a, rd_data[i], model[b][i][a]);
          end
        end
      end
  endtask

  initial begin
    wr_en = 0; col_wr_en = 0; wr_bank = 0; col_wr_bank = 0; rd_bank = 0;
    wr_row = 0; wr_addr = 0; col_wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int i = 0; i < MT; i++) col_wr_data[i] = '0;
    @(negedge clk);
    for (int b = 0; b < NBANK; b++)
      for (int i = 0; i < MT; i++)
        for (int a = 0; a < DEPTH; a++) begin
          wr_en = 1; wr_bank = 1'(b); wr_row = 2'(i); wr_addr = 3'(a); wr_data = 16'($urandom);
          model[b][i][a] = wr_data;
          @(negedge clk);
        end
    wr_en = 0;
    read_all();
    for (int n = 0; n < 80; n++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1); wr_bank = 1'($urandom); wr_row = 2'($urandom);
      wr_addr = 3'($urandom); wr_data = 16'($urandom);
      col_wr_en = $urandom_range(0, 1); col_wr_bank = 1'($urandom); col_wr_addr = 3'($urandom);
      for (int i = 0; i < MT; i++) col_wr_data[i] = 16'($urandom);
      if (wr_en && col_wr_en) begin
        if (wr_bank != col_wr_bank) both_banks++; else same_bank++;
      end
      if (wr_en && !(col_wr_en && col_wr_bank == wr_bank)) model[wr_bank][wr_row][wr_addr] = wr_data;
      if (col_wr_en) for (int i = 0; i < MT; i++) model[col_wr_bank][i][col_wr_addr] = col_wr_data[i];
      @(negedge clk);
      wr_en = 0; col_wr_en = 0;
      read_all();
      @(negedge clk);
    end
    checks++;
    if (both_banks == 0 || same_bank == 0) begin
      failures++;
      $display("simultaneous writes not covered: %0d different banks, %0d same bank", both_banks, same_bank);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
