// tb_vernier_tig_top: end-to-end test of the whole generator at its default
// (Cyclone 10) configuration, from a 40 MHz reference through the PLL
// cascade, alignment, constant transfer and comparators.
//
// Sequence: reset, wait for PLL lock, init and alignment; then slow-control
// settings through the external ports (a base point, a fine step of 32, a
// fine step of 256, a coarse step, and the large-range coarse settings of
// N2 - N1 from 0 to 27); then the sequencer is enabled and its first entry
// measured. Every interval is checked against
//     (N2 + 1 - 4096)/f2 - (N1 + 1 - 4096)/f1 - eps,
// with eps between two and three fine steps, and differences between
// settings must be exact multiples of the fine step (1/f1 - 1/f2) or of 1/f2.
// The test counts each mechanism (PLL lock, alignment, external load, fine
// step, coarse step, sequencer load) and fails any that never happened.
module tb_vernier_tig_top;
  timeunit 1ps;
  timeprecision 1fs;
  import tig_pkg::*;

  localparam real P2 = 3125.0;
  localparam real P1 = 3125.0 * 4096.0 / 4095.0;
  localparam real DP = P1 - P2;
  localparam real F  = 8190.0 * P1;

  int checks = 0, failures = 0;
  int n_lock = 0, n_align = 0, n_ext = 0, n_fine = 0, n_coarse = 0, n_seq = 0;

  logic ck_ref = 1'b0, rst_n = 1'b0, init = 1'b0, seq_enable = 1'b0, n_load_ext = 1'b0;
  cnt_t n1_ext = '0, n2_ext = '0, cnt1x, cnt2x;
  logic eqn1x, eqn2x, aligned, pll_locked, ck1x, ck2x, seq_step;
  logic [3:0] seq_idx;

  vernier_tig_top dut (
    .ck_ref(ck_ref), .rst_n(rst_n), .init(init), .seq_enable(seq_enable),
    .n1_ext(n1_ext), .n2_ext(n2_ext), .n_load_ext(n_load_ext),
    .eqn1x(eqn1x), .eqn2x(eqn2x), .aligned(aligned), .pll_locked(pll_locked),
    .ck1x(ck1x), .ck2x(ck2x), .seq_idx(seq_idx), .seq_step(seq_step),
    .cnt1x(cnt1x), .cnt2x(cnt2x));

  always #12500 ck_ref = ~ck_ref;   // 40 MHz reference, also the slow control clock

  always @(posedge ck_ref) if (seq_step) n_seq++;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $realtime); end
  endtask

  function automatic real ideal(int a1, int a2);
    return real'(a2 + 1 - 4096) * P2 - real'(a1 + 1 - 4096) * P1;
  endfunction

  // Measure T2 - T1 of the current setting, after a whole frame has passed.
  task automatic measure(input int a1, input int a2, output real d);
    realtime t1, t2;
    real e;
    #(F);
    @(posedge eqn1x) t1 = $realtime;
    @(posedge eqn2x) t2 = $realtime;
    d = t2 - t1;
    e = ideal(a1, a2);
    if (d - e > F / 2.0) d = d - F;
    check($sformatf("T2-T1 for N1=%0d N2=%0d", a1, a2),
          d >= e - 3.0 * DP - 0.01 && d <= e - 2.0 * DP + 0.01);
    $display("N1=%0d N2=%0d  T2-T1 = %f ps (ideal %f ps)", a1, a2, d, e);
  endtask

  task automatic ext_setting(input int a1, input int a2, output real d);
    @(negedge ck_ref);
    n1_ext = cnt_t'(a1);
    n2_ext = cnt_t'(a2);
    @(negedge ck_ref) n_load_ext = 1'b1;
    repeat (4) @(negedge ck_ref);
    n_load_ext = 1'b0;
    n_ext++;
    measure(a1, a2, d);
  endtask

  real d0, d1, d2, d3, dc, dprev;
  initial begin
    #100000 rst_n = 1'b1;
    wait (pll_locked);
    n_lock++;
    @(negedge ck_ref) init = 1'b1;
    wait (aligned);
    n_align++;
    ext_setting(4096, 4097, d0);
    ext_setting(4128, 4129, d1);
    check("fine step of 32", (d1 - d0) > -32.0 * DP - 0.01 && (d1 - d0) < -32.0 * DP + 0.01);
    n_fine++;
    ext_setting(4384, 4385, d2);
    check("fine step of 256", (d2 - d1) > -256.0 * DP - 0.01 && (d2 - d1) < -256.0 * DP + 0.01);
    n_fine++;
    ext_setting(4384, 4386, d3);
    check("coarse step of 1", (d3 - d2) > P2 - 0.01 && (d3 - d2) < P2 + 0.01);
    n_coarse++;
    // Large range: N2 - N1 from 0 to 27 in coarse steps.
    for (int k = 0; k <= 27; k += 9) begin
      ext_setting(4384, 4384 + k, dc);
      if (k > 0) begin
        check("coarse range step", (dc - dprev) > 9.0 * P2 - 0.01 && (dc - dprev) < 9.0 * P2 + 0.01);
        n_coarse++;
      end
      dprev = dc;
    end
    // Hand over to the sequencer: its first entry.
    @(negedge ck_ref) seq_enable = 1'b1;
    wait (n_seq > 0);
    check("sequencer starts at entry 0", seq_idx == 0);
    measure(int'(DEFAULT_TABLE[0].n1), int'(DEFAULT_TABLE[0].n2), d0);

    check("PLL lock seen", n_lock > 0);
    check("alignment seen", n_align > 0);
    check("external load seen", n_ext > 0);
    check("fine step seen", n_fine > 0);
    check("coarse step seen", n_coarse > 0);
    check("sequencer load seen", n_seq > 0);
    $display("mechanisms: lock=%0d align=%0d ext=%0d fine=%0d coarse=%0d seq=%0d",
             n_lock, n_align, n_ext, n_fine, n_coarse, n_seq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
