// tb_single_svd_engine: self-checking test of the Single SVD engine.
//
// Runs layers on a small engine (4 x 3 PEs, KF=2): SVD and dense layers with
// free-running streams, where the total cycle count is also checked against
// the engine's timing model (one array beat per cycle, loading of the next
// M tile overlapped with computing, both when loading and when computing is
// the longer part), and SVD layers with random gaps on the input streams and
// random back-pressure on the output, which must make the array stall. Results are compared with a
// reference computed here in plain integer arithmetic, including the
// requantisation of X*W1 (round half up, saturate to 8 bits).
module tb_single_svd_engine;
  import itera_pkg::*;

  localparam int MT = 4, NT = 3, KF = 2, A_W = 8, W_W = 4, ACC_W = 32;
  localparam int KMAX = 16, RMAX = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, stall;
  layer_cfg_t cfg;
  logic x_valid, x_ready, w_valid, w_ready, y_valid, y_ready;
  logic [KF*A_W-1:0] x_data;
  logic [NT*KF*W_W-1:0] w_data;
  logic signed [ACC_W-1:0] y_data [NT];

  single_svd_engine #(.MT(MT), .NT(NT), .KF(KF), .A_W(A_W), .W_W(W_W), .ACC_W(ACC_W),
                      .KMAX(KMAX), .RMAX(RMAX)) dut (.*);

  // handshakes seen at the last rising edge; stimulus changes on falling edges
  logic x_fire = 0, w_fire = 0, y_fire = 0;
  logic signed [ACC_W-1:0] y_got [NT];
  always @(posedge clk) begin
    x_fire <= x_valid && x_ready;
    w_fire <= w_valid && w_ready;
    y_fire <= y_valid && y_ready;
    y_got  <= y_data;
  end

  int checks = 0, failures = 0;
  int stalls = 0;
  always @(posedge clk) if (rst_n && stall) stalls++;


  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int X [][], W1 [][], W2 [][], Y [][];
  int gap_x, gap_w, gap_y;   // percent of cycles with no valid / no ready

  function automatic int rq(input longint acc, input int sh);
    longint v;
    v = (sh == 0) ? acc : ((acc + (64'sd1 << (sh - 1))) >>> sh);
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  function automatic int cdv(input int a, input int b); return (a + b - 1) / b; endfunction

  // reference output
  task automatic build_ref(input int m, k, n, r, input bit svd, input int sh);
    int T [][];
    Y = new[m];
    foreach (Y[i]) Y[i] = new[n];
    if (svd) begin
      T = new[m];
      foreach (T[i]) begin
        T[i] = new[r];
        for (int c = 0; c < r; c++) begin
          longint s = 0;
          for (int kk = 0; kk < k; kk++) s += X[i][kk] * W1[kk][c];
          T[i][c] = rq(s, sh);
        end
      end
      foreach (Y[i]) for (int c = 0; c < n; c++) begin
        int s = 0;
        for (int q = 0; q < r; q++) s += T[i][q] * W2[q][c];
        Y[i][c] = s;
      end
    end else begin
      foreach (Y[i]) for (int c = 0; c < n; c++) begin
        int s = 0;
        for (int kk = 0; kk < k; kk++) s += X[i][kk] * W1[kk][c];
        Y[i][c] = s;
      end
    end
  endtask

  task automatic gen(input int m, k, n, r, input bit svd);
    X = new[m];
    foreach (X[i]) begin X[i] = new[k]; foreach (X[i][j]) X[i][j] = $urandom_range(0, 255) - 128; end
    if (svd) begin
      W1 = new[k]; foreach (W1[i]) begin W1[i] = new[r]; foreach (W1[i][j]) W1[i][j] = $urandom_range(0, 15) - 8; end
      W2 = new[r]; foreach (W2[i]) begin W2[i] = new[n]; foreach (W2[i][j]) W2[i][j] = $urandom_range(0, 15) - 8; end
    end else begin
      W1 = new[k]; foreach (W1[i]) begin W1[i] = new[n]; foreach (W1[i][j]) W1[i][j] = $urandom_range(0, 15) - 8; end
    end
  endtask

  task automatic drive_x(input int m, k);
    for (int i = 0; i < m; i++)
      for (int b = 0; b < cdv(k, KF); b++) begin
        logic [KF*A_W-1:0] d = '0;
        for (int f = 0; f < KF; f++)
          if (b*KF + f < k) d[f*A_W +: A_W] = A_W'(X[i][b*KF + f]);
        while ($urandom_range(0, 99) < gap_x) begin x_valid = 0; @(negedge clk); end
        x_valid = 1; x_data = d;
        do @(negedge clk); while (!x_fire);
      end
    x_valid = 0;
  endtask

  // one weight tile stream: rows = reduction length, cols = output width
  task automatic drive_w_mat(ref int Wm [][], input int rows, cols);
    for (int t = 0; t < cdv(cols, NT); t++)
      for (int b = 0; b < cdv(rows, KF); b++) begin
        logic [NT*KF*W_W-1:0] d = '0;
        for (int j = 0; j < NT; j++)
          for (int f = 0; f < KF; f++)
            if (t*NT + j < cols && b*KF + f < rows)
              d[(j*KF + f)*W_W +: W_W] = W_W'(Wm[b*KF + f][t*NT + j]);
        while ($urandom_range(0, 99) < gap_w) begin w_valid = 0; @(negedge clk); end
        w_valid = 1; w_data = d;
        do @(negedge clk); while (!w_fire);
      end
    w_valid = 0;
  endtask

  task automatic drive_w(input int m, k, n, r, input bit svd);
    for (int mt = 0; mt < cdv(m, MT); mt++) begin
      if (svd) begin
        drive_w_mat(W1, k, r);
        drive_w_mat(W2, r, n);
      end else begin
        drive_w_mat(W1, k, n);
      end
    end
  endtask

  task automatic sink_y(input int m, n);
    logic signed [ACC_W-1:0] got [NT];
    for (int mt = 0; mt < cdv(m, MT); mt++) begin
      int rows = (m - mt*MT > MT) ? MT : m - mt*MT;
      for (int t = 0; t < cdv(n, NT); t++)
        for (int rr = 0; rr < rows; rr++) begin
          do begin
            y_ready = ($urandom_range(0, 99) >= gap_y);
            @(negedge clk);
          end while (!y_fire);
          got = y_got;
          for (int j = 0; j < NT; j++) if (t*NT + j < n) begin
            checks++;
            if (got[j] !== Y[mt*MT + rr][t*NT + j]) begin
              failures++;
              if (failures < 10) $display("y mismatch row %0d col %0d: got %0d want %0d",
                                          mt*MT + rr, t*NT + j, got[j], Y[mt*MT + rr][t*NT + j]);
            end
          end
        end
    end
    y_ready = 1;
  endtask

  // expected cycles from the start edge to the done pulse with free streams,
  // valid while a tile drains (rows+1 cycles) no slower than it is computed
  // (beats cycles): load, then per pass tiles*beats + rows + 4, copy rb
  // Loading and computing overlap (two LHS banks). Per M tile i: the load
  // takes rows*ceil(K/KF) cycles and may start once the previous load is over
  // and bank i%2 has been freed by tile i-2; the computation starts one cycle
  // after both its load and the previous tile's computation are over, and
  // takes the passes (first tile of a pass: its beats; later tiles:
  // max(beats, rows+1), bounded by the one-row-per-cycle drain), the copy and
  // the pipeline tails. done follows one cycle after the last computation.
  function automatic int expect_cycles(input int m, k, n, r, input bit svd);
    int kb = cdv(k, KF), rb = cdv(r, KF), tiles = cdv(m, MT);
    int le [] = new[tiles], ce [] = new[tiles];
    for (int i = 0; i < tiles; i++) begin
      int rows = (m - i*MT > MT) ? MT : m - i*MT;
      int ls, cs, c;
      if (svd) c = kb + (cdv(r, NT) - 1) * mx(kb, rows + 1) + rows + 4 + rb
                 + rb + (cdv(n, NT) - 1) * mx(rb, rows + 1) + rows + 4;
      else     c = kb + (cdv(n, NT) - 1) * mx(kb, rows + 1) + rows + 4;
      ls = 0;
      if (i > 0) ls = le[i-1];
      if (i > 1) ls = mx(ls, ce[i-2]);
      le[i] = ls + rows * kb;
      cs = le[i] + 1;
      if (i > 0) cs = mx(cs, ce[i-1] + 1);
      ce[i] = cs + c;
    end
    return ce[tiles-1] + 1;
  endfunction

  function automatic int mx(input int a, input int b); return a > b ? a : b; endfunction

  task automatic run(input int m, k, n, r, input bit svd, input int sh, input bit timed);
    int t0, t1, cyc;
    gen(m, k, n, r, svd);
    build_ref(m, k, n, r, svd, sh);
    cfg = '{m: DIM_W'(m), k: DIM_W'(k), n: DIM_W'(n), r: DIM_W'(r), svd_en: svd, rq_shift: 6'(sh)};
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    fork
      drive_x(m, k);
      drive_w(m, k, n, r, svd);
      sink_y(m, n);
      begin do begin @(negedge clk); cyc++; end while (!done); end
    join
    if (timed) begin
      checks++;
      if (cyc != expect_cycles(m, k, n, r, svd)) begin
        failures++;
        $display("cycle count %0d, expected %0d", cyc, expect_cycles(m, k, n, r, svd));
      end
    end
  endtask

  initial begin
    start = 0; x_valid = 0; w_valid = 0; y_ready = 1; x_data = '0; w_data = '0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    gap_x = 0; gap_w = 0; gap_y = 0;
    run(10, 13, 7, 9, 1'b1, 4, 1'b1);
    run(7, 9, 4, 10, 1'b1, 5, 1'b1);
    run(6, 16, 8, 0, 1'b0, 0, 1'b1);
    run(13, 4, 15, 6, 1'b1, 3, 1'b1);  // computing longer than loading
    run(14, 2, 12, 0, 1'b0, 0, 1'b1);
    gap_x = 30; gap_w = 30; gap_y = 60;
    run(9, 8, 5, 8, 1'b1, 3, 1'b0);
    run(5, 3, 10, 2, 1'b1, 0, 1'b0);   // shift 0: saturating requantisation
    checks++;
    if (stalls == 0) begin failures++; $display("array never stalled"); end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
