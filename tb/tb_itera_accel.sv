// tb_itera_accel: end-to-end test of the accelerator top, both organisations.
//
// Two small accelerators run side by side: a Single-engine build (4 x 3 PEs)
// and a Cascade-engine build (4 x 2 and 4 x 3 PEs), both with KF=2, K up to 16
// and R up to 12. Each runs a list of layers - SVD layers with full and
// partial M and N tiles, a dense layer (Single only), layers with idle input
// cycles and output back-pressure, and layers whose requantised X*W1
// saturates - and every output element is compared with an integer reference
// (see tb_accel_harness). At the end each mechanism must have occurred at
// least once: array stall, SVD and dense layers, partial tiles, saturation,
// and both Cascade arrays working in the same cycle.
module tb_itera_accel;
  import itera_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic go_s = 0, go_c = 0, fin_s, fin_c;
  int m, k, n, r, sh, gi, gout;
  bit svd;
  int s_checks, s_fail, s_cyc, s_stall, s_svd, s_dense, s_pm, s_pn, s_sat, s_par;
  int c_checks, c_fail, c_cyc, c_stall, c_svd, c_dense, c_pm, c_pn, c_sat, c_par;

  tb_accel_harness #(.ENGINE(ENGINE_SINGLE), .MT(4), .NT(3), .KF(2), .KMAX(16), .RMAX(12)) h_single (
    .clk, .rst_n, .go(go_s), .job_m(m), .job_k(k), .job_n(n), .job_r(r), .job_shift(sh),
    .job_gap_in(gi), .job_gap_out(gout), .job_svd(svd), .fin(fin_s),
    .checks(s_checks), .failures(s_fail), .cycles(s_cyc), .n_stall(s_stall), .n_svd(s_svd),
    .n_dense(s_dense), .n_part_m(s_pm), .n_part_n(s_pn), .n_sat(s_sat), .n_parallel(s_par));

  tb_accel_harness #(.ENGINE(ENGINE_CASCADE), .MT(4), .KF(2), .KMAX(16), .RMAX(12),
                     .CASC_RT(2), .CASC_NT(3)) h_cascade (
    .clk, .rst_n, .go(go_c), .job_m(m), .job_k(k), .job_n(n), .job_r(r), .job_shift(sh),
    .job_gap_in(gi), .job_gap_out(gout), .job_svd(svd), .fin(fin_c),
    .checks(c_checks), .failures(c_fail), .cycles(c_cyc), .n_stall(c_stall), .n_svd(c_svd),
    .n_dense(c_dense), .n_part_m(c_pm), .n_part_n(c_pn), .n_sat(c_sat), .n_parallel(c_par));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + s_checks + c_checks, failures + s_fail + c_fail);
    $finish;
  end

  task automatic job(input bit cascade, input int jm, jk, jn, jr, input bit jsvd, input int jsh, jgi, jgo);
    m = jm; k = jk; n = jn; r = jr; svd = jsvd; sh = jsh; gi = jgi; gout = jgo;
    if (cascade) begin go_c = 1; @(negedge clk); go_c = 0; @(posedge fin_c); end
    else         begin go_s = 1; @(negedge clk); go_s = 0; @(posedge fin_s); end
    @(negedge clk);
  endtask

  task automatic need(input string what, input int count);
    checks++;
    if (count == 0) begin failures++; $display("never happened: %s", what); end
    else $display("%-32s %0d", what, count);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int e = 0; e < 2; e++) begin
      bit c;
      c = (e == 1);
      job(c, 8, 16, 6, 12, 1, 5, 0, 0);     // whole tiles
      job(c, 11, 13, 7, 9, 1, 4, 0, 0);     // partial M and N tiles
      job(c, 9, 10, 8, 5, 1, 0, 25, 50);    // saturating, gaps, back-pressure
      job(c, 6, 7, 4, 3, 1, 3, 40, 70);
      job(c, 3, 1, 2, 1, 1, 0, 0, 0);       // single-element reduction
      if (!c) job(c, 10, 15, 9, 0, 0, 0, 20, 40);   // dense layer
      else    job(c, 20, 2, 12, 12, 1, 2, 0, 0);    // short K, long W2 pass: arrays overlap
    end
    need("single: array stall cycles", s_stall);
    need("single: SVD layers", s_svd);
    need("single: dense layers", s_dense);
    need("single: partial M tiles", s_pm);
    need("single: partial N tiles", s_pn);
    need("single: saturated X*W1 values", s_sat);
    need("cascade: array stall cycles", c_stall);
    need("cascade: SVD layers", c_svd);
    need("cascade: partial M tiles", c_pm);
    need("cascade: partial N tiles", c_pn);
    need("cascade: saturated X*W1 values", c_sat);
    need("cascade: both arrays busy cycles", c_par);
    $display("TB_RESULT checks=%0d failures=%0d", checks + s_checks + c_checks, failures + s_fail + c_fail);
    $finish;
  end
endmodule
