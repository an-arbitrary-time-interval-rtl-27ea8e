// vernier_tig_top: complete vernier-clock time interval generator.
//
// A reference clock (40 MHz in the default Cyclone 10 set-up) feeds the PLL
// cascade, which makes the slow clock ck1x (319.921875 MHz) and the fast
// clock ck2x (320 MHz), f1/f2 = 4095/4096. Once the PLLs are locked and
// init is high, the core sets both rotational counters to 4096 on nearly
// aligned edges and from then on emits one eqn1x and one eqn2x pulse every
// 8190 slow periods. Their leading-edge separation T2 - T1 is set by N1 and
// N2 in fine steps of 1/f1 - 1/f2 (0.763 ps) and coarse steps of 1/f2
// (3.125 ns); see tig_core for the formula.
//
// N1/N2 come either from the built-in sequencer (seq_enable = 1), which
// steps through 16 settings, or from the slow control ports n1_ext, n2_ext
// and n_load_ext. The slow control domain runs on ck_ref. The eqn1x/eqn2x
// outputs would drive differential SSTL output buffers, which are outside
// this module. PLL_CFG selects the PLL cascade (PLL_CFG_C5 for the 50 MHz
// Cyclone 5 set-up, whose slow control clock then runs at 50 MHz).
// ck1x, ck2x, pll_locked, the counters and the sequencer's
// step pulse are brought out for observation.
module vernier_tig_top
  import tig_pkg::*;
#(
  parameter pll_cfg_t        PLL_CFG      = PLL_CFG_C10,
  parameter setting_table_t  SEQ_TABLE    = DEFAULT_TABLE,
  parameter longint unsigned DWELL_CYCLES = 64'd17_160_000_000
) (
  input  logic                          ck_ref,
  input  logic                          rst_n,
  input  logic                          init,
  input  logic                          seq_enable,
  input  cnt_t                          n1_ext,
  input  cnt_t                          n2_ext,
  input  logic                          n_load_ext,
  output logic                          eqn1x,
  output logic                          eqn2x,
  output logic                          aligned,
  output logic                          pll_locked,
  output logic                          ck1x,
  output logic                          ck2x,
  output logic [$clog2(NUM_POINTS)-1:0] seq_idx,
  output logic                          seq_step,
  output cnt_t                          cnt1x,
  output cnt_t                          cnt2x
);
  timeunit 1ps;
  timeprecision 1fs;

  logic rst_ref_n;
  cnt_t seq_n1, seq_n2, n1, n2;
  logic seq_load, n_load;

  cascaded_pll #(.CFG(PLL_CFG)) u_pll (.refclk(ck_ref), .ck1x(ck1x), .ck2x(ck2x), .locked(pll_locked));

  rst_sync u_rst_ref (.clk(ck_ref), .rst_n_in(rst_n), .rst_n_out(rst_ref_n));

  tig_sequencer #(.TABLE(SEQ_TABLE), .DWELL_CYCLES(DWELL_CYCLES)) u_seq (
    .clk(ck_ref), .rst_n(rst_ref_n), .enable(seq_enable),
    .n1(seq_n1), .n2(seq_n2), .n_load(seq_load), .idx(seq_idx), .step(seq_step));

  always_comb begin
    if (seq_enable) begin
      n1 = seq_n1;  n2 = seq_n2;  n_load = seq_load;
    end else begin
      n1 = n1_ext;  n2 = n2_ext;  n_load = n_load_ext;
    end
  end

  tig_core u_core (
    .ck1x(ck1x), .ck2x(ck2x), .rst_n(rst_n & pll_locked), .init(init),
    .n1(n1), .n2(n2), .n_load(n_load),
    .eqn1x(eqn1x), .eqn2x(eqn2x), .aligned(aligned), .cnt1x(cnt1x), .cnt2x(cnt2x));
endmodule
