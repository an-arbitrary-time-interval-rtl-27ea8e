// tb_workload_scan: the published fine-step scan, run end to end on two
// complete generators. One uses the Cyclone 10 set-up (40 MHz reference,
// 320 MHz, 0.763 ps steps) and one the Cyclone 5 set-up (50 MHz reference,
// 250 MHz, 0.977 ps steps). Each runs its sequencer through all 16 table
// entries and back to the first. The dwell is shortened from 429 s to a
// little over two vernier frames per point, which is all one measurement
// needs. scan_checker measures every point against the interval equation
// and checks point-to-point spacing to within 10 fs.
module tb_workload_scan;
  timeunit 1ps;
  timeprecision 1fs;
  import tig_pkg::*;

  int c10_checks, c10_fail, c10_pts, c5_checks, c5_fail, c5_pts;
  int checks = 0, failures = 0;

  logic ck40 = 1'b0, ck50 = 1'b0, rst_n = 1'b0, init = 1'b0, seq_en = 1'b0;
  logic e1_10, e2_10, al_10, lk_10, c1_10, c2_10, st_10;
  logic e1_5, e2_5, al_5, lk_5, c1_5, c2_5, st_5;
  logic [3:0] ix_10, ix_5;
  cnt_t q1_10, q2_10, q1_5, q2_5;

  always #12500 ck40 = ~ck40;
  always #10000 ck50 = ~ck50;

  vernier_tig_top #(.PLL_CFG(PLL_CFG_C10), .DWELL_CYCLES(64'd2400)) u_c10 (
    .ck_ref(ck40), .rst_n(rst_n), .init(init), .seq_enable(seq_en),
    .n1_ext('0), .n2_ext('0), .n_load_ext(1'b0),
    .eqn1x(e1_10), .eqn2x(e2_10), .aligned(al_10), .pll_locked(lk_10),
    .ck1x(c1_10), .ck2x(c2_10), .seq_idx(ix_10), .seq_step(st_10),
    .cnt1x(q1_10), .cnt2x(q2_10));

  vernier_tig_top #(.PLL_CFG(PLL_CFG_C5), .DWELL_CYCLES(64'd3800)) u_c5 (
    .ck_ref(ck50), .rst_n(rst_n), .init(init), .seq_enable(seq_en),
    .n1_ext('0), .n2_ext('0), .n_load_ext(1'b0),
    .eqn1x(e1_5), .eqn2x(e2_5), .aligned(al_5), .pll_locked(lk_5),
    .ck1x(c1_5), .ck2x(c2_5), .seq_idx(ix_5), .seq_step(st_5),
    .cnt1x(q1_5), .cnt2x(q2_5));

  scan_checker #(.NAME("C10"), .P1(3125.0 * 4096.0 / 4095.0), .P2(3125.0)) chk10 (
    .ck_ctl(ck40), .eqn1x(e1_10), .eqn2x(e2_10), .seq_step(st_10), .seq_idx(ix_10),
    .checks(c10_checks), .failures(c10_fail), .points(c10_pts));

  scan_checker #(.NAME("C5"), .P1(4000.0), .P2(4000.0 * 4095.0 / 4096.0)) chk5 (
    .ck_ctl(ck50), .eqn1x(e1_5), .eqn2x(e2_5), .seq_step(st_5), .seq_idx(ix_5),
    .checks(c5_checks), .failures(c5_fail), .points(c5_pts));

  initial begin
    #100000 rst_n = 1'b1;
    wait (lk_10 && lk_5);
    init = 1'b1;
    wait (al_10 && al_5);
    seq_en = 1'b1;
    wait (c10_pts >= 17 && c5_pts >= 17);
    checks   = c10_checks + c5_checks + 2;
    failures = c10_fail + c5_fail;
    // 17 points measured: all 16 entries and the wrap back to entry 0
    if (c10_pts < 17) failures++;
    if (c5_pts < 17) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4ms;
    $display("FAIL watchdog: points C10=%0d C5=%0d", c10_pts, c5_pts);
    $display("TB_RESULT checks=%0d failures=%0d", c10_checks + c5_checks, c10_fail + c5_fail + 1);
    $finish;
  end
endmodule
