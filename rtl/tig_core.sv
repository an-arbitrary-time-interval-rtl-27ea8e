// tig_core: the vernier time interval generator proper (two channels).
//
// Channel 1 runs on the slow clock ck1x (f1), channel 2 on the fast clock
// ck2x (f2), with f1/f2 = 4095/4096. Each channel has a rotational counter,
// a constant register and a registered equality comparator. The counters are
// set to 4096 together on a pair of nearly aligned clock edges (align_init);
// channel 1 then counts 1..8190 and channel 2 0..8191, so the pair returns to
// 4096/4096 every 8190 slow periods (32.76 us at 320 MHz), and each channel
// emits one pulse per such frame: eqn1x when CNT1x = N1, eqn2x when CNT2x = N2.
//
// Leading-edge separation, with t0 the load edge pair and the comparators'
// one-cycle register delay included:
//   T2 - T1 = (N2 + 1 - 4096)/f2 - (N1 + 1 - 4096)/f1
//           = (N2 - N1)/f2 - (N1 + 1 - 4096)(1/f1 - 1/f2).
// Moving N1 and N2 together by k changes the interval by -k(1/f1 - 1/f2), the
// fine step; moving N2 alone by k changes it by k/f2, the coarse step.
//
// Interface: n1, n2 and n_load come from the slow control domain (see
// const_reg for the hold rule); init starts an alignment; aligned reports
// that the counters have been set. cnt1x/cnt2x are brought out for
// observation. rst_n is an asynchronous reset, released per domain through
// rst_sync.
module tig_core
  import tig_pkg::*;
(
  input  logic ck1x,
  input  logic ck2x,
  input  logic rst_n,
  input  logic init,
  input  cnt_t n1,
  input  cnt_t n2,
  input  logic n_load,
  output logic eqn1x,
  output logic eqn2x,
  output logic aligned,
  output cnt_t cnt1x,
  output cnt_t cnt2x
);
  timeunit 1ps;
  timeprecision 1fs;

  logic rst1_n, rst2_n;
  logic sclr1, sclr2;
  cnt_t n1_q, n2_q;

  rst_sync u_rst1 (.clk(ck1x), .rst_n_in(rst_n), .rst_n_out(rst1_n));
  rst_sync u_rst2 (.clk(ck2x), .rst_n_in(rst_n), .rst_n_out(rst2_n));

  align_init u_align (
    .ck1x(ck1x), .rst1_n(rst1_n), .ck2x(ck2x), .rst2_n(rst2_n),
    .arm(init), .sclr1(sclr1), .sclr2(sclr2), .done(aligned));

  // Channel 1: slow clock, counts 1..8190.
  rot_counter #(.W(CNT_W), .MIN(CNT1_MIN), .MAX(CNT1_MAX), .LOAD(INIT_VALUE)) u_cnt1 (
    .clk(ck1x), .rst_n(rst1_n), .sclr(sclr1), .q(cnt1x));
  const_reg #(.W(CNT_W)) u_n1 (
    .clk(ck1x), .rst_n(rst1_n), .d(n1), .en(n_load), .q(n1_q));
  eq_cmp #(.W(CNT_W)) u_eq1 (
    .clk(ck1x), .rst_n(rst1_n), .a(cnt1x), .b(n1_q), .eq(eqn1x));

  // Channel 2: fast clock, counts 0..8191.
  rot_counter #(.W(CNT_W), .MIN(CNT2_MIN), .MAX(CNT2_MAX), .LOAD(INIT_VALUE)) u_cnt2 (
    .clk(ck2x), .rst_n(rst2_n), .sclr(sclr2), .q(cnt2x));
  const_reg #(.W(CNT_W)) u_n2 (
    .clk(ck2x), .rst_n(rst2_n), .d(n2), .en(n_load), .q(n2_q));
  eq_cmp #(.W(CNT_W)) u_eq2 (
    .clk(ck2x), .rst_n(rst2_n), .a(cnt2x), .b(n2_q), .eq(eqn2x));
endmodule
