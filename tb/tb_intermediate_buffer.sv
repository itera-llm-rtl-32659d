// tb_intermediate_buffer: self-checking test of the two-bank intermediate
// buffer (4 rows, RMAX=7, written 3 columns at a time, read as KF=2 beats).
//
// Writes random row segments at random column offsets in both banks,
// including segments that run past the last column (those elements must be
// dropped), and after every write reads every beat address of both banks and
// compares each row's KF elements with a model kept here.
module tb_intermediate_buffer;
  localparam int NBANK = 2, MT = 4, WNT = 3, KF = 2, A_W = 8, RMAX = 7;
  localparam int DEPTH = (RMAX + KF - 1) / KF, COLS = DEPTH * KF;

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en;
  logic [0:0] wr_bank, rd_bank;
  logic [1:0] wr_row;
  logic [15:0] wr_col0;
  logic [A_W-1:0] wr_data [WNT];
  logic [$clog2(DEPTH)-1:0] rd_addr;
  logic [KF*A_W-1:0] rd_data [MT];

  intermediate_buffer #(.NBANK(NBANK), .MT(MT), .WNT(WNT), .KF(KF), .A_W(A_W), .RMAX(RMAX)) dut (.*);

  int checks = 0, failures = 0;
  logic [A_W-1:0] model [NBANK][MT][COLS];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int b = 0; b < NBANK; b++)
      for (int a = 0; a < DEPTH; a++) begin
        rd_bank = 1'(b); rd_addr = $clog2(DEPTH)'(a);
        #1;
        for (int i = 0; i < MT; i++)
          for (int f = 0; f < KF; f++) begin
            checks++;
            if (rd_data[i][f*A_W +: A_W] !== model[b][i][a*KF + f]) begin
              failures++;
              $display("bank %0d row %0d col %0d: %h, expected %h", b, i, a*KF + f,
                       rd_data[i][f*A_W +: A_W], model[b][i][a*KF + f]);
            end
          end
      end
  endtask

  initial begin
    wr_en = 0; wr_bank = 0; rd_bank = 0; wr_row = 0; wr_col0 = 0; rd_addr = 0;
    for (int n = 0; n < WNT; n++) wr_data[n] = '0;
    // fill everything first so the model is complete
    for (int b = 0; b < NBANK; b++)
      for (int i = 0; i < MT; i++)
        for (int c = 0; c < COLS; c += WNT) begin
          @(negedge clk);
          wr_en = 1; wr_bank = 1'(b); wr_row = 2'(i); wr_col0 = 16'(c);
          for (int n = 0; n < WNT; n++) begin
            wr_data[n] = A_W'($urandom);
            if (c + n < COLS) model[b][i][c + n] = wr_data[n];
          end
        end
    @(negedge clk);
    wr_en = 0;
    check_all();
    for (int t = 0; t < 80; t++) begin
      @(negedge clk);
      wr_en = 1; wr_bank = 1'($urandom); wr_row = 2'($urandom); wr_col0 = 16'($urandom_range(0, COLS + 2));
      for (int n = 0; n < WNT; n++) begin
        wr_data[n] = A_W'($urandom);
        if (int'(wr_col0) + n < COLS) model[wr_bank][wr_row][int'(wr_col0) + n] = wr_data[n];
      end
      @(negedge clk);
      wr_en = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
