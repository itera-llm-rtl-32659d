// tb_accel_harness: test harness around one itera_accel instance, shared by
// the end-to-end testbenches.
//
// It plays the part of off-chip memory and DMA: for each job (a pulse on go
// with the layer in the job_* inputs) it generates random X, W1, W2 (or W),
// streams them in the order the accelerator expects, with the given
// percentage of idle cycles on the inputs and of back-pressure on the output,
// collects Y and compares every element with a reference computed here in
// integer arithmetic (X*W1 requantised with round half up and saturation to
// 8 bits, then times W2). It counts checks, failures and how often each
// mechanism of the accelerator happened: array stalls, SVD layers, dense
// layers, partial M and N tiles, saturated intermediate values and, for the
// Cascade engine, cycles in which both arrays work at once. fin pulses when
// the job is over; cycles reports its length from start to done.
module tb_accel_harness
  import itera_pkg::*;
#(
  parameter engine_e ENGINE = ENGINE_SINGLE,
  parameter int MT = 4, NT = 3, KF = 2, KMAX = 16, RMAX = 12,
  parameter int CASC_RT = 2, CASC_NT = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  input  int   job_m, job_k, job_n, job_r, job_shift, job_gap_in, job_gap_out,
  input  bit   job_svd,
  output logic fin,
  output int   checks, failures, cycles,
  output int   n_stall, n_svd, n_dense, n_part_m, n_part_n, n_sat, n_parallel
);
  localparam int A_W = 8, W_W = 4, ACC_W = 32;
  localparam int W1N = (ENGINE == ENGINE_SINGLE) ? NT : CASC_RT;
  localparam int YN  = (ENGINE == ENGINE_SINGLE) ? NT : CASC_NT;

  logic start, busy, done, stall;
  layer_cfg_t cfg;
  logic x_valid, x_ready, w1_valid, w1_ready, w2_valid, w2_ready, y_valid, y_ready;
  logic [KF*A_W-1:0] x_data;
  logic [W1N*KF*W_W-1:0] w1_data;
  logic [CASC_NT*KF*W_W-1:0] w2_data;
  logic signed [ACC_W-1:0] y_data [YN];

  itera_accel #(.ENGINE(ENGINE), .MT(MT), .NT(NT), .KF(KF), .KMAX(KMAX), .RMAX(RMAX),
                .CASC_RT(CASC_RT), .CASC_NT(CASC_NT)) dut (.*);

  // handshakes of the last rising edge; stimulus changes on falling edges
  logic x_fire = 0, w1_fire = 0, w2_fire = 0, y_fire = 0;
  logic signed [ACC_W-1:0] y_got [YN];
  always @(posedge clk) begin
    x_fire  <= x_valid && x_ready;
    w1_fire <= w1_valid && w1_ready;
    w2_fire <= w2_valid && w2_ready;
    y_fire  <= y_valid && y_ready;
    y_got   <= y_data;
  end

  initial begin
    checks = 0; failures = 0; cycles = 0; fin = 0;
    n_stall = 0; n_svd = 0; n_dense = 0; n_part_m = 0; n_part_n = 0; n_sat = 0; n_parallel = 0;
    start = 0; cfg = '0; x_valid = 0; w1_valid = 0; w2_valid = 0; y_ready = 1;
    x_data = '0; w1_data = '0; w2_data = '0;
  end

  always @(posedge clk) if (rst_n && stall) n_stall++;
  if (ENGINE == ENGINE_CASCADE) begin : g_par
    always @(posedge clk)
      if (rst_n && dut.g_cascade.u_engine.issue_a && dut.g_cascade.u_engine.issue_b) n_parallel++;
  end

  int X [][], W1 [][], W2 [][], Y [][];

  function automatic int cdv(input int a, input int b); return (a + b - 1) / b; endfunction

  function automatic int rq(input longint acc, input int sh);
    longint v;
    v = (sh == 0) ? acc : ((acc + (64'sd1 << (sh - 1))) >>> sh);
    if (v > 127 || v < -128) n_sat++;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  task automatic gen_and_ref(input int m, k, n, r, input bit svd, input int sh);
    int T [][];
    X = new[m];
    foreach (X[i]) begin X[i] = new[k]; foreach (X[i][j]) X[i][j] = $urandom_range(0, 255) - 128; end
    W1 = new[k];
    foreach (W1[i]) begin W1[i] = new[svd ? r : n]; foreach (W1[i][j]) W1[i][j] = $urandom_range(0, 15) - 8; end
    if (svd) begin
      W2 = new[r];
      foreach (W2[i]) begin W2[i] = new[n]; foreach (W2[i][j]) W2[i][j] = $urandom_range(0, 15) - 8; end
    end
    Y = new[m];
    foreach (Y[i]) Y[i] = new[n];
    if (svd) begin
      T = new[m];
      foreach (T[i]) begin
        T[i] = new[r];
        for (int c = 0; c < r; c++) begin
          longint s = 0;
          for (int q = 0; q < k; q++) s += X[i][q] * W1[q][c];
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
        for (int q = 0; q < k; q++) s += X[i][q] * W1[q][c];
        Y[i][c] = s;
      end
    end
  endtask

  task automatic drive_x(input int m, k, gap);
    for (int i = 0; i < m; i++)
      for (int b = 0; b < cdv(k, KF); b++) begin
        logic [KF*A_W-1:0] d = '0;
        for (int f = 0; f < KF; f++) if (b*KF + f < k) d[f*A_W +: A_W] = A_W'(X[i][b*KF + f]);
        while ($urandom_range(0, 99) < gap) begin x_valid = 0; @(negedge clk); end
        x_valid = 1; x_data = d;
        do @(negedge clk); while (!x_fire);
      end
    x_valid = 0;
  endtask

  // one weight matrix on the w1 port, tiles of W1N columns
  task automatic send_w1(input bit second, input int rows, cols, gap);
    for (int t = 0; t < cdv(cols, W1N); t++)
      for (int b = 0; b < cdv(rows, KF); b++) begin
        logic [W1N*KF*W_W-1:0] d = '0;
        for (int j = 0; j < W1N; j++) for (int f = 0; f < KF; f++)
          if (t*W1N + j < cols && b*KF + f < rows)
            d[(j*KF + f)*W_W +: W_W] = W_W'(second ? W2[b*KF + f][t*W1N + j] : W1[b*KF + f][t*W1N + j]);
        while ($urandom_range(0, 99) < gap) begin w1_valid = 0; @(negedge clk); end
        w1_valid = 1; w1_data = d;
        do @(negedge clk); while (!w1_fire);
      end
    w1_valid = 0;
  endtask

  // W2 on the w2 port (Cascade), tiles of CASC_NT columns
  task automatic send_w2(input int rows, cols, gap);
    for (int t = 0; t < cdv(cols, CASC_NT); t++)
      for (int b = 0; b < cdv(rows, KF); b++) begin
        logic [CASC_NT*KF*W_W-1:0] d = '0;
        for (int j = 0; j < CASC_NT; j++) for (int f = 0; f < KF; f++)
          if (t*CASC_NT + j < cols && b*KF + f < rows)
            d[(j*KF + f)*W_W +: W_W] = W_W'(W2[b*KF + f][t*CASC_NT + j]);
        while ($urandom_range(0, 99) < gap) begin w2_valid = 0; @(negedge clk); end
        w2_valid = 1; w2_data = d;
        do @(negedge clk); while (!w2_fire);
      end
    w2_valid = 0;
  endtask

  task automatic drive_w(input int m, k, n, r, input bit svd, input int gap);
    for (int mt = 0; mt < cdv(m, MT); mt++) begin
      if (!svd) send_w1(0, k, n, gap);
      else begin
        send_w1(0, k, r, gap);
        if (ENGINE == ENGINE_SINGLE) send_w1(1, r, n, gap);
      end
    end
  endtask

  task automatic drive_w2(input int m, n, r, input bit svd, input int gap);
    if (ENGINE == ENGINE_CASCADE && svd)
      for (int mt = 0; mt < cdv(m, MT); mt++) send_w2(r, n, gap);
  endtask

  task automatic sink_y(input int m, n, gap);
    logic signed [ACC_W-1:0] got [YN];
    for (int mt = 0; mt < cdv(m, MT); mt++) begin
      int rows = (m - mt*MT > MT) ? MT : m - mt*MT;
      for (int t = 0; t < cdv(n, YN); t++)
        for (int rr = 0; rr < rows; rr++) begin
          do begin
            y_ready = ($urandom_range(0, 99) >= gap);
            @(negedge clk);
          end while (!y_fire);
          got = y_got;
          for (int j = 0; j < YN; j++) if (t*YN + j < n) begin
            checks++;
            if (got[j] !== Y[mt*MT + rr][t*YN + j]) begin
              failures++;
              if (failures < 10) $display("%m: Y[%0d][%0d] = %0d, expected %0d",
                                          mt*MT + rr, t*YN + j, got[j], Y[mt*MT + rr][t*YN + j]);
            end
          end
        end
    end
    y_ready = 1;
  endtask

  always @(posedge go) begin
    int m, k, n, r, sh, gi, go_, cyc;
    bit svd;
    m = job_m; k = job_k; n = job_n; r = job_r; sh = job_shift; svd = job_svd;
    gi = job_gap_in; go_ = job_gap_out;
    gen_and_ref(m, k, n, r, svd, sh);
    if (svd) n_svd++; else n_dense++;
    if (m % MT != 0) n_part_m++;
    if (n % YN != 0) n_part_n++;
    @(negedge clk);
    while (busy) @(negedge clk);
    cfg = '{m: DIM_W'(m), k: DIM_W'(k), n: DIM_W'(n), r: DIM_W'(r), svd_en: svd, rq_shift: 6'(sh)};
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    fork
      drive_x(m, k, gi);
      drive_w(m, k, n, r, svd, gi);
      drive_w2(m, n, r, svd, gi);
      sink_y(m, n, go_);
      begin do begin @(negedge clk); cyc++; end while (!done); end
    join
    cycles = cyc;
    fin = 1; @(negedge clk); fin = 0;
  end

endmodule
