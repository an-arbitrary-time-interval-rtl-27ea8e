// cascaded_pll: BEHAVIOURAL MODEL (not synthesizable) of the two-stage PLL
// cascade that makes the two vernier clocks from one reference oscillator.
//
// A single integer PLL cannot reach a ratio as fine as 4095/4096 within its
// VCO range, so a first PLL makes one or two intermediate clocks and two
// second-stage PLLs make the slow clock ck1x (f1) and the fast clock ck2x
// (f2) from them. 4095/4096 = (63*65)/(64*64), so the factors can be spread
// over the three PLLs. Defaults are the Cyclone 10 cascade, 40 MHz in
// (tig_pkg::PLL_CFG_C10):
//   PLL601 N=4 M=105 C0=105 C1=4  -> CK10 (10 MHz), CK262 (262.5 MHz)
//   PLL605 N=1 M=128 C=4 from CK10  -> CK320 = ck2x (320 MHz)
//   PLL604 N=8 M=39  C=4 from CK262 -> CK319 = ck1x (319.921875 MHz)
// The Cyclone 5 cascade, 50 MHz in, is tig_pkg::PLL_CFG_C5: PLL402 N=3
// M=64 C=7 makes CK152, which feeds PLL414 N=13 M=64 C=3 (CK251 = ck2x) and
// PLL413 N=16 M=105 C=4 (CK250 = ck1x).
//
// locked is high once all three PLLs run. See pll_stage for what the model
// does and does not capture.
module cascaded_pll
  import tig_pkg::*;
#(
  parameter pll_cfg_t CFG = PLL_CFG_C10
) (
  input  logic refclk,
  output logic ck1x,
  output logic ck2x,
  output logic locked
);
  timeunit 1ps;
  timeprecision 1fs;

  logic mid0, mid1, lk1, lk_fast, lk_slow, unused_f, unused_s;

  pll_stage #(.N(CFG.s1_n), .M(CFG.s1_m), .C0(CFG.s1_c0), .C1(CFG.s1_c1)) u_stage1 (
    .refclk(refclk), .outclk0(mid0), .outclk1(mid1), .locked(lk1));

  pll_stage #(.N(CFG.fast_n), .M(CFG.fast_m), .C0(CFG.fast_c), .C1(0)) u_fast (
    .refclk(CFG.fast_src ? mid1 : mid0), .outclk0(ck2x), .outclk1(unused_f), .locked(lk_fast));

  pll_stage #(.N(CFG.slow_n), .M(CFG.slow_m), .C0(CFG.slow_c), .C1(0)) u_slow (
    .refclk(CFG.slow_src ? mid1 : mid0), .outclk0(ck1x), .outclk1(unused_s), .locked(lk_slow));

  assign locked = lk1 & lk_fast & lk_slow;
endmodule
