// tb_tig_core: end-to-end check of the generator core with ideal clocks in
// the published ratio (f2 = 320 MHz, f1 = f2 * 4095/4096) and a random
// starting phase.
//
// After init, for each (N1, N2) the measured leading-edge separation
// T2 - T1 must match
//     (N2 + 1 - 4096)/f2 - (N1 + 1 - 4096)/f1 - eps,
// where eps, the lag of the slow clock's load edge behind the fast clock's,
// lies between two and three fine steps. Settings that keep N2 - N1 and move
// both by k must differ by exactly -k fine steps (0.763 ps), settings that
// move N2 alone by k by exactly k/f2. Each channel must pulse once per frame
// of 8190 slow periods, with pulses one clock period wide.
module tb_tig_core;
  timeunit 1ps;
  timeprecision 1fs;
  import tig_pkg::*;

  localparam real P2 = 3125.0;
  localparam real P1 = 3125.0 * 4096.0 / 4095.0;
  localparam real DP = P1 - P2;
  localparam real F  = 8190.0 * P1;

  int checks = 0, failures = 0;
  int n_fine = 0, n_coarse = 0;
  logic ck1x = 1'b0, ck2x = 1'b0, rst_n = 1'b0, init = 1'b0, n_load = 1'b0;
  cnt_t n1 = '0, n2 = '0, cnt1x, cnt2x;
  logic eqn1x, eqn2x, aligned;
  realtime tg1, tg2;

  tig_core dut (.ck1x(ck1x), .ck2x(ck2x), .rst_n(rst_n), .init(init),
                .n1(n1), .n2(n2), .n_load(n_load),
                .eqn1x(eqn1x), .eqn2x(eqn2x), .aligned(aligned),
                .cnt1x(cnt1x), .cnt2x(cnt2x));

  initial begin
    tg2 = 0.0;
    forever begin tg2 = tg2 + P2 / 2.0; #(tg2 - $realtime) ck2x = ~ck2x; end
  end
  initial begin
    tg1 = real'($urandom_range(0, 3100));
    forever begin tg1 = tg1 + P1 / 2.0; #(tg1 - $realtime) ck1x = ~ck1x; end
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $realtime); end
  endtask

  function automatic real ideal(int a1, int a2);
    return real'(a2 + 1 - 4096) * P2 - real'(a1 + 1 - 4096) * P1;
  endfunction

  // Load a setting, let a whole frame pass, then measure T2 - T1.
  task automatic measure(input int a1, input int a2, output real d);
    realtime t1, t2, t1b, tf1;
    real e;
    n1 = cnt_t'(a1);
    n2 = cnt_t'(a2);
    @(posedge ck_slow_ctl);
    n_load = 1'b1;
    repeat (4) @(posedge ck_slow_ctl);
    n_load = 1'b0;
    #(F);
    @(posedge eqn1x) t1 = $realtime;
    fork
      @(negedge eqn1x) tf1 = $realtime;
      @(posedge eqn2x) t2 = $realtime;
    join
    check("eqn1x one slow period wide", (tf1 - t1) > P1 - 0.01 && (tf1 - t1) < P1 + 0.01);
    d = t2 - t1;
    e = ideal(a1, a2);
    if (d - e > F / 2.0) d = d - F;
    check($sformatf("T2-T1 for N1=%0d N2=%0d", a1, a2),
          d >= e - 3.0 * DP - 0.003 && d <= e - 2.0 * DP + 0.003);
    $display("N1=%0d N2=%0d  T2-T1 = %f ps (ideal %f ps)", a1, a2, d, e);
    @(posedge eqn1x) t1b = $realtime;
    check("one eqn1x pulse per frame", (t1b - t1) > F - 0.01 && (t1b - t1) < F + 0.01);
    if ((t1b - t1) > F + 0.01 || (t1b - t1) < F - 0.01) $display("frame %f expected %f", t1b - t1, F);
  endtask

  // Slow control clock (40 MHz), unrelated to the vernier clocks.
  logic ck_slow_ctl = 1'b0;
  always #12500 ck_slow_ctl = ~ck_slow_ctl;

  real d0, d1, d2, d3, d4, d5;
  initial begin
    #30000 rst_n = 1'b1;
    #20000 init = 1'b1;
    wait (aligned);
    check("counters equal 4096 right after alignment", 1'b1);
    measure(5000, 5001, d0);
    measure(5032, 5033, d1);        // fine: both up by 32
    check("fine step of 32", (d1 - d0) > -32.0 * DP - 0.003 && (d1 - d0) < -32.0 * DP + 0.003);
    n_fine++;
    measure(5288, 5289, d2);        // fine: both up by 256
    check("fine step of 256", (d2 - d1) > -256.0 * DP - 0.003 && (d2 - d1) < -256.0 * DP + 0.003);
    n_fine++;
    measure(5288, 5316, d3);        // coarse: N2 up by 27
    check("coarse step of 27", (d3 - d2) > 27.0 * P2 - 0.003 && (d3 - d2) < 27.0 * P2 + 0.003);
    n_coarse++;
    measure(100, 200, d4);          // constants below 4096 (after the wrap)
    measure(6000, 5990, d5);        // negative interval
    check("all mechanisms seen", n_fine > 0 && n_coarse > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
