// tb_rhs_buffer: self-checking test of the weight FIFOs (3 columns, depth 4).
//
// Pushes a numbered sequence of weight beats with random gaps while popping
// with random gaps, and checks that every column delivers its slice of every
// beat in order, that in_ready falls exactly when 4 beats are held and that
// out_valid is low exactly when the buffer is empty.
module tb_rhs_buffer;
  localparam int NT = 3, KF = 2, W_W = 4, DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_pop;
  logic [NT*KF*W_W-1:0] in_data;
  logic [KF*W_W-1:0] out_data [NT];

  rhs_buffer #(.NT(NT), .KF(KF), .W_W(W_W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [NT*KF*W_W-1:0] q [$];
  int sent = 0, got = 0;
  localparam int TOTAL = 300;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // at each falling edge: check flags and head, then choose the next push/pop
  logic [NT*KF*W_W-1:0] beat;
  initial begin
    in_valid = 0; out_pop = 0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (got < TOTAL) begin
      @(negedge clk);
      // the handshakes of the last rising edge
      checks++;
      if (in_ready !== (q.size() < DEPTH)) begin failures++; $display("in_ready wrong with %0d held", q.size()); end
      checks++;
      if (out_valid !== (q.size() > 0)) begin failures++; $display("out_valid wrong with %0d held", q.size()); end
      if (q.size() > 0) begin
        for (int j = 0; j < NT; j++) begin
          checks++;
          if (out_data[j] !== q[0][j*KF*W_W +: KF*W_W]) begin
            failures++;
            $display("beat %0d col %0d: %h, expected %h", got, j, out_data[j], q[0][j*KF*W_W +: KF*W_W]);
          end
        end
      end
      // decide this cycle's actions and update the model as the edge will
      out_pop  = out_valid && ($urandom_range(0, 99) < 50);
      in_valid = (sent < TOTAL) && ($urandom_range(0, 99) < 55);
      beat     = 24'($urandom);
      in_data  = beat;
      #1;
      if (out_pop) begin void'(q.pop_front()); got++; end
      if (in_valid && in_ready) begin q.push_back(beat); sent++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
