// tb_cascade_svd_engine: self-checking test of the Cascade SVD engine.
//
// A small engine (array A 4 x 2 PEs, array B 4 x 3 PEs, KF=2) runs SVD layers
// first with free-running streams, then with random gaps on the three input
// streams and random back-pressure on the output. Results are compared with a
// reference computed here in integer arithmetic, including the requantisation
// of X*W1. The test also counts the cycles in which both arrays accept a beat
// in the same cycle (the two products must overlap across M tiles), the
// cycles each array is frozen, and checks that with free streams the whole
// layer takes fewer cycles than the two products would one after the other.
module tb_cascade_svd_engine;
  import itera_pkg::*;

  localparam int MT = 4, RT = 2, NT = 3, KF = 2, A_W = 8, W_W = 4, ACC_W = 32;
  localparam int KMAX = 16, RMAX = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, stall_a, stall_b;
  layer_cfg_t cfg;
  logic x_valid, x_ready, w1_valid, w1_ready, w2_valid, w2_ready, y_valid, y_ready;
  logic [KF*A_W-1:0] x_data;
  logic [RT*KF*W_W-1:0] w1_data;
  logic [NT*KF*W_W-1:0] w2_data;
  logic signed [ACC_W-1:0] y_data [NT];

  cascade_svd_engine #(.MT(MT), .RT(RT), .NT(NT), .KF(KF), .A_W(A_W), .W_W(W_W), .ACC_W(ACC_W),
                      .KMAX(KMAX), .RMAX(RMAX)) dut (.*);

  // handshakes seen at the last rising edge; stimulus changes on falling edges
  logic x_fire = 0, w1_fire = 0, w2_fire = 0, y_fire = 0;
  logic signed [ACC_W-1:0] y_got [NT];
  always @(posedge clk) begin
    x_fire <= x_valid && x_ready;
    w1_fire <= w1_valid && w1_ready;
    w2_fire <= w2_valid && w2_ready;
    y_fire <= y_valid && y_ready;
    y_got  <= y_data;
  end

  int checks = 0, failures = 0;
  int stalls_a = 0, stalls_b = 0, overlap = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall_a) stalls_a++;
    if (stall_b) stalls_b++;
    if (dut.issue_a && dut.issue_b) overlap++;
  end


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

  // weight tile streams: rows = reduction length, cols = output width
  task automatic drive_w1_mat(input int rows, cols);
    for (int t = 0; t < cdv(cols, RT); t++)
      for (int b = 0; b < cdv(rows, KF); b++) begin
        logic [RT*KF*W_W-1:0] d = '0;
        for (int j = 0; j < RT; j++)
          for (int f = 0; f < KF; f++)
            if (t*RT + j < cols && b*KF + f < rows)
              d[(j*KF + f)*W_W +: W_W] = W_W'(W1[b*KF + f][t*RT + j]);
        while ($urandom_range(0, 99) < gap_w) begin w1_valid = 0; @(negedge clk); end
        w1_valid = 1; w1_data = d;
        do @(negedge clk); while (!w1_fire);
      end
    w1_valid = 0;
  endtask

  task automatic drive_w2_mat(input int rows, cols);
    for (int t = 0; t < cdv(cols, NT); t++)
      for (int b = 0; b < cdv(rows, KF); b++) begin
        logic [NT*KF*W_W-1:0] d = '0;
        for (int j = 0; j < NT; j++)
          for (int f = 0; f < KF; f++)
            if (t*NT + j < cols && b*KF + f < rows)
              d[(j*KF + f)*W_W +: W_W] = W_W'(W2[b*KF + f][t*NT + j]);
        while ($urandom_range(0, 99) < gap_w) begin w2_valid = 0; @(negedge clk); end
        w2_valid = 1; w2_data = d;
        do @(negedge clk); while (!w2_fire);
      end
    w2_valid = 0;
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

  // cycles the two products would take one after the other with free streams
  // (load, then each pass: tiles*beats plus its rows+4 cycle pipeline tail)
  function automatic int serial_cycles(input int m, k, n, r);
    int c = 0;
    for (int mt = 0; mt < cdv(m, MT); mt++) begin
      int rows = (m - mt*MT > MT) ? MT : m - mt*MT;
      c += rows * cdv(k, KF) + cdv(r, RT) * cdv(k, KF) + rows + 4 + cdv(n, NT) * cdv(r, KF) + rows + 4;
    end
    return c;
  endfunction

  task automatic run(input int m, k, n, r, input bit svd, input int sh, input bit timed);
    int t0, t1, cyc;
    gen(m, k, n, r, svd);
    build_ref(m, k, n, r, svd, sh);
    cfg = '{m: DIM_W'(m), k: DIM_W'(k), n: DIM_W'(n), r: DIM_W'(r), svd_en: svd, rq_shift: 6'(sh)};
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    fork
      drive_x(m, k);
      for (int mt = 0; mt < cdv(m, MT); mt++) drive_w1_mat(k, r);
      for (int mt = 0; mt < cdv(m, MT); mt++) drive_w2_mat(r, n);
      sink_y(m, n);
      begin do begin @(negedge clk); cyc++; end while (!done); end
    join
    if (timed) begin
      checks++;
      if (cyc >= serial_cycles(m, k, n, r)) begin
        failures++;
        $display("cycle count %0d, not below serial %0d", cyc, serial_cycles(m, k, n, r));
      end
    end
  endtask

  initial begin
    start = 0; x_valid = 0; w1_valid = 0; w2_valid = 0; y_ready = 1;
    x_data = '0; w1_data = '0; w2_data = '0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    gap_x = 0; gap_w = 0; gap_y = 0;
    run(10, 13, 7, 9, 1'b1, 4, 1'b1);
    run(13, 16, 6, 12, 1'b1, 5, 1'b1);
    gap_x = 30; gap_w = 30; gap_y = 60;
    run(9, 8, 5, 8, 1'b1, 3, 1'b0);
    run(5, 3, 10, 2, 1'b1, 0, 1'b0);   // shift 0: saturating requantisation
    run(4, 5, 3, 1, 1'b1, 2, 1'b0);
    checks++;
    if (stalls_b == 0) begin failures++; $display("array B never stalled"); end
    checks++;
    if (overlap == 0) begin failures++; $display("arrays never worked in parallel"); end
    $display("stall cycles A %0d B %0d, parallel cycles %0d", stalls_a, stalls_b, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
