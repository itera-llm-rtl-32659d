// tb_pe: self-checking test of one processing element (KF=4 lanes here).
//
// Feeds random dot products of random length (1..20 beats) with random
// bubbles (in_valid=0) and random freeze cycles (en=0), and compares each
// result with a sum computed here. Also checks the latency: with en held high,
// out_valid rises exactly 3 cycles after the beat flagged last, and a result
// follows one beat per cycle when products of length 1 are streamed back to
// back.
module tb_pe;
  localparam int KF = 4, A_W = 8, W_W = 4, ACC_W = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, in_valid, in_first, in_last, out_valid;
  logic [KF*A_W-1:0] lhs;
  logic [KF*W_W-1:0] rhs;
  logic signed [ACC_W-1:0] out_data;

  pe #(.KF(KF), .A_W(A_W), .W_W(W_W), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;
  int expq [$];
  int cyc = 0, last_cyc [$];
  bit check_lat = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // count enabled cycles; check results when they appear
  int e, lc;
  always @(posedge clk) if (rst_n && en) begin
    cyc++;
    if (out_valid) begin
      e  = expq.pop_front();
      lc = last_cyc.pop_front();
      checks++;
      if (out_data !== e) begin
        failures++;
        $display("result %0d, expected %0d", out_data, e);
      end
      if (check_lat) begin
        checks++;
        if (cyc - lc != 3) begin failures++; $display("latency %0d", cyc - lc); end
      end
    end
    if (in_valid && in_last) last_cyc.push_back(cyc);
  end

  task automatic dot(input int len, input int bubble_pct, input int freeze_pct);
    int s = 0;
    for (int b = 0; b < len; b++) begin
      while ($urandom_range(0, 99) < bubble_pct) begin
        in_valid = 0; en = ($urandom_range(0, 99) >= freeze_pct); @(negedge clk);
      end
      for (int f = 0; f < KF; f++) begin
        int a = $urandom_range(0, 255) - 128;
        int w = $urandom_range(0, 15) - 8;
        lhs[f*A_W +: A_W] = A_W'(a);
        rhs[f*W_W +: W_W] = W_W'(w);
        s += a * w;
      end
      in_valid = 1; in_first = (b == 0); in_last = (b == len - 1);
      en = ($urandom_range(0, 99) >= freeze_pct);
      while (!en) begin @(negedge clk); en = ($urandom_range(0, 99) >= freeze_pct); end
      @(negedge clk);
    end
    expq.push_back(s);
    in_valid = 0;
  endtask

  initial begin
    en = 1; in_valid = 0; in_first = 0; in_last = 0; lhs = '0; rhs = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_lat = 1;
    for (int i = 0; i < 20; i++) dot($urandom_range(1, 20), 0, 0);
    for (int i = 0; i < 10; i++) dot(1, 0, 0);        // back to back
    repeat (6) @(negedge clk);
    check_lat = 0;
    for (int i = 0; i < 40; i++) dot($urandom_range(1, 20), 30, 30);
    en = 1;
    repeat (8) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
