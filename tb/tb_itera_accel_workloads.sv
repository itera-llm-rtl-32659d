// tb_itera_accel_workloads: the evaluated layer shapes on full-size builds.
//
// A Single-engine accelerator at the default sizes (104 x 28 PEs, KF=2,
// K up to 2048, R up to 512) runs:
//   - the dense 512 x 512 x 512 baseline layer (svd_en = 0),
//   - two M tiles (208 rows) of the same layer decomposed at full rank 512,
//   - two M tiles of the feed-forward up-projection 512 -> 2048 at rank 256,
//   - one M tile (104 rows) of the feed-forward down-projection 2048 -> 512
//     at rank 256 (K = 2048, the deepest reduction the buffers hold).
// The remaining M tiles of a batch of 512 would repeat the same schedule and
// only make the simulation longer; the cycle model covers them.
// A Cascade-engine accelerator of the same MT with 14 + 14 PE columns runs
// the 512 x 512 x 512 layer at rank 128. Every output is compared with an
// integer reference (see tb_accel_harness); for the Single engine the total
// cycle count must also equal the timing model (free streams): per M tile a
// load of rows*ceil(K/KF) cycles into one LHS bank, overlapped with the
// computation of the previous tile, which starts one cycle after both its
// load and the previous computation have ended. At this size the Cascade
// engine is bound by loading X into array A, so its two arrays rarely work in
// the same cycle; their overlap is shown by the small end-to-end test.
module tb_itera_accel_workloads;
  import itera_pkg::*;

  localparam int MT = MT_DEF, NT = NT_DEF, KF = KF_DEF;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic go_s = 0, go_c = 0, fin_s, fin_c;
  int m, k, n, r, sh, gi, gout;
  bit svd;
  int s_checks, s_fail, s_cyc, s_stall, s_svd, s_dense, s_pm, s_pn, s_sat, s_par;
  int c_checks, c_fail, c_cyc, c_stall, c_svd, c_dense, c_pm, c_pn, c_sat, c_par;

  tb_accel_harness #(.ENGINE(ENGINE_SINGLE), .MT(MT), .NT(NT), .KF(KF), .KMAX(KMAX_DEF),
                     .RMAX(RMAX_DEF), .CASC_RT(NT_DEF / 2), .CASC_NT(NT_DEF / 2)) h_single (
    .clk, .rst_n, .go(go_s), .job_m(m), .job_k(k), .job_n(n), .job_r(r), .job_shift(sh),
    .job_gap_in(gi), .job_gap_out(gout), .job_svd(svd), .fin(fin_s),
    .checks(s_checks), .failures(s_fail), .cycles(s_cyc), .n_stall(s_stall), .n_svd(s_svd),
    .n_dense(s_dense), .n_part_m(s_pm), .n_part_n(s_pn), .n_sat(s_sat), .n_parallel(s_par));

  tb_accel_harness #(.ENGINE(ENGINE_CASCADE), .MT(MT), .NT(NT), .KF(KF), .KMAX(KMAX_DEF),
                     .RMAX(RMAX_DEF), .CASC_RT(NT_DEF / 2), .CASC_NT(NT_DEF / 2)) h_cascade (
    .clk, .rst_n, .go(go_c), .job_m(m), .job_k(k), .job_n(n), .job_r(r), .job_shift(sh),
    .job_gap_in(gi), .job_gap_out(gout), .job_svd(svd), .fin(fin_c),
    .checks(c_checks), .failures(c_fail), .cycles(c_cyc), .n_stall(c_stall), .n_svd(c_svd),
    .n_dense(c_dense), .n_part_m(c_pm), .n_part_n(c_pn), .n_sat(c_sat), .n_parallel(c_par));

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + s_checks + c_checks, failures + s_fail + c_fail);
    $finish;
  end

  function automatic int cdv(input int a, input int b); return (a + b - 1) / b; endfunction
  function automatic int mx(input int a, input int b); return a > b ? a : b; endfunction

  function automatic int expect_cycles(input int jm, jk, jn, jr, input bit jsvd);
    int kb = cdv(jk, KF), rb = cdv(jr, KF), tiles = cdv(jm, MT);
    int le [] = new[tiles], ce [] = new[tiles];
    for (int i = 0; i < tiles; i++) begin
      int rows = (jm - i*MT > MT) ? MT : jm - i*MT;
      int ls, cs, c;
      if (jsvd) c = kb + (cdv(jr, NT) - 1) * mx(kb, rows + 1) + rows + 4 + rb
                  + rb + (cdv(jn, NT) - 1) * mx(rb, rows + 1) + rows + 4;
      else      c = kb + (cdv(jn, NT) - 1) * mx(kb, rows + 1) + rows + 4;
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

  task automatic job(input bit cascade, input string name, input int jm, jk, jn, jr, input bit jsvd, input int jsh);
    int e;
    m = jm; k = jk; n = jn; r = jr; svd = jsvd; sh = jsh; gi = 0; gout = 0;
    if (cascade) begin go_c = 1; @(negedge clk); go_c = 0; @(posedge fin_c); end
    else         begin go_s = 1; @(negedge clk); go_s = 0; @(posedge fin_s); end
    @(negedge clk);
    if (!cascade) begin
      e = expect_cycles(jm, jk, jn, jr, jsvd);
      checks++;
      if (s_cyc != e) begin
        failures++;
        $display("%s: %0d cycles, expected %0d", name, s_cyc, e);
      end else $display("%-34s %0d cycles (%0d us at 200 MHz)", name, s_cyc, s_cyc / 200);
    end else $display("%-34s %0d cycles (%0d us at 200 MHz)", name, c_cyc, c_cyc / 200);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    job(0, "single dense 512x512x512",         512, 512,  512,   0, 0, 0);
    job(0, "single svd 512x512x512 R=512 M=208", 208, 512,  512, 512, 1, 8);
    job(0, "single svd 512->2048 R=256 M=208",   208, 512, 2048, 256, 1, 7);
    job(0, "single svd 2048->512 R=256 M=104", 104, 2048, 512, 256, 1, 8);
    job(1, "cascade svd 512x512x512 R=128",    512, 512,  512, 128, 1, 7);
    $display("cascade cycles with both arrays busy: %0d", c_par);
    $display("TB_RESULT checks=%0d failures=%0d", checks + s_checks + c_checks, failures + s_fail + c_fail);
    $finish;
  end
endmodule
