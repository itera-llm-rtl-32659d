// tb_itera_accel_full: one complete layer through the accelerator at its
// default build (Single engine, 104 x 28 PEs, KF=2, K up to 2048, R up to 512).
//
// The layer is the size used throughout the evaluation: M = K = N = 512 with
// rank R = 128, W4A8, run in SVD mode. X, W1 and W2 are random; the reference
// Y = requant(X W1) W2 is computed here in integer arithmetic and every one of
// the 262,144 outputs is compared. The input streams are always valid and the
// output always ready, so the layer's length is known. Each M tile is loaded
// in rows x ceil(K/KF) cycles into one of two LHS banks while the previous
// tile is computed from the other; a tile's computation starts one cycle
// after its load and the previous computation have ended. A computation is
// pass 1 (ceil(R/NT) tiles), the copy of X W1 into the LHS bank (ceil(R/KF)
// cycles) and pass 2 (ceil(N/NT) tiles), each pass plus a pipeline tail of
// rows + 4 cycles; the first tile of a pass takes its beats (ceil(K/KF), then
// ceil(R/KF)) and every later one max(beats, rows + 1), because a tile cannot
// be captured before the previous one has left through the one-row-per-cycle
// output. With R = 128 the second pass is limited by the output, so the array
// stalls. The measured count must match exactly. At this size loading X
// (26,624 cycles per M tile at KF activations per cycle) is the longer part.
module tb_itera_accel_full;
  import itera_pkg::*;

  localparam int M = 512, K = 512, N = 512, R = 128, SH = 7;
  localparam int MT = MT_DEF, NT = NT_DEF, KF = KF_DEF, A_W = A_W_DEF, W_W = W_W_DEF;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_stall = 0, n_sat = 0;

  logic start = 0, busy, done, stall;
  layer_cfg_t cfg = '0;
  logic x_valid = 0, x_ready, w1_valid = 0, w1_ready, w2_valid = 0, w2_ready, y_valid, y_ready = 1;
  logic [KF*A_W-1:0] x_data = '0;
  logic [NT*KF*W_W-1:0] w1_data = '0;
  logic [NT_DEF/2*KF*W_W-1:0] w2_data = '0;
  logic signed [ACC_W_DEF-1:0] y_data [NT];

  itera_accel dut (.*);

  logic x_fire = 0, w1_fire = 0, y_fire = 0;
  logic signed [ACC_W_DEF-1:0] y_got [NT];
  always @(posedge clk) begin
    x_fire  <= x_valid && x_ready;
    w1_fire <= w1_valid && w1_ready;
    y_fire  <= y_valid && y_ready;
    y_got   <= y_data;
    if (rst_n && stall) n_stall++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int X [M][K], W1 [K][R], W2 [R][N], T [M][R], Y [M][N];

  function automatic int cdv(input int a, input int b); return (a + b - 1) / b; endfunction

  function automatic int mx(input int a, input int b); return a > b ? a : b; endfunction

  task automatic make_data();
    foreach (X[i, j])  X[i][j]  = $urandom_range(0, 255) - 128;
    foreach (W1[i, j]) W1[i][j] = $urandom_range(0, 15) - 8;
    foreach (W2[i, j]) W2[i][j] = $urandom_range(0, 15) - 8;
    for (int i = 0; i < M; i++)
      for (int c = 0; c < R; c++) begin
        longint s = 0, v;
        for (int q = 0; q < K; q++) s += X[i][q] * W1[q][c];
        v = (s + (64'sd1 << (SH - 1))) >>> SH;
        if (v > 127 || v < -128) n_sat++;
        T[i][c] = (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
      end
    for (int i = 0; i < M; i++)
      for (int c = 0; c < N; c++) begin
        int s = 0;
        for (int q = 0; q < R; q++) s += T[i][q] * W2[q][c];
        Y[i][c] = s;
      end
  endtask

  task automatic drive_x();
    for (int i = 0; i < M; i++)
      for (int b = 0; b < cdv(K, KF); b++) begin
        for (int f = 0; f < KF; f++) x_data[f*A_W +: A_W] = (b*KF + f < K) ? A_W'(X[i][b*KF + f]) : '0;
        x_valid = 1;
        do @(negedge clk); while (!x_fire);
      end
    x_valid = 0;
  endtask

  task automatic send_tiles(input bit second, input int rows, cols);
    for (int t = 0; t < cdv(cols, NT); t++)
      for (int b = 0; b < cdv(rows, KF); b++) begin
        for (int j = 0; j < NT; j++) for (int f = 0; f < KF; f++)
          w1_data[(j*KF + f)*W_W +: W_W] = (t*NT + j < cols && b*KF + f < rows)
            ? W_W'(second ? W2[b*KF + f][t*NT + j] : W1[b*KF + f][t*NT + j]) : '0;
        w1_valid = 1;
        do @(negedge clk); while (!w1_fire);
      end
    w1_valid = 0;
  endtask

  task automatic drive_w();
    for (int mt = 0; mt < cdv(M, MT); mt++) begin
      send_tiles(0, K, R);
      send_tiles(1, R, N);
    end
  endtask

  task automatic sink_y();
    for (int mt = 0; mt < cdv(M, MT); mt++) begin
      int rows = (M - mt*MT > MT) ? MT : M - mt*MT;
      for (int t = 0; t < cdv(N, NT); t++)
        for (int rr = 0; rr < rows; rr++) begin
          do @(negedge clk); while (!y_fire);
          for (int j = 0; j < NT; j++) if (t*NT + j < N) begin
            checks++;
            if (y_got[j] !== Y[mt*MT + rr][t*NT + j]) begin
              failures++;
              if (failures < 10) $display("Y[%0d][%0d] = %0d, expected %0d",
                                          mt*MT + rr, t*NT + j, y_got[j], Y[mt*MT + rr][t*NT + j]);
            end
          end
        end
    end
  endtask

  function automatic int expect_cycles();
    int kb = cdv(K, KF), rb = cdv(R, KF), tiles = cdv(M, MT);
    int le [] = new[tiles], ce [] = new[tiles];
    for (int i = 0; i < tiles; i++) begin
      int rows = (M - i*MT > MT) ? MT : M - i*MT;
      int ls, cs, c;
      c = kb + (cdv(R, NT) - 1) * mx(kb, rows + 1) + rows + 4 + rb
        + rb + (cdv(N, NT) - 1) * mx(rb, rows + 1) + rows + 4;
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

  initial begin
    int cyc, expected;
    make_data();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg = '{m: DIM_W'(M), k: DIM_W'(K), n: DIM_W'(N), r: DIM_W'(R), svd_en: 1'b1, rq_shift: 6'(SH)};
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    fork
      drive_x();
      drive_w();
      sink_y();
      begin do begin @(negedge clk); cyc++; end while (!done); end
    join
    expected = expect_cycles();
    checks++;
    if (cyc != expected) begin
      failures++;
      $display("layer took %0d cycles, expected %0d", cyc, expected);
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("the array never stalled"); end
    $display("layer %0dx%0dx%0d rank %0d: %0d cycles (expected %0d), %0d stall cycles, %0d saturated",
             M, K, N, R, cyc, expected, n_stall, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
