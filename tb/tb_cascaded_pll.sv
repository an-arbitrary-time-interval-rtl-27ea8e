// tb_cascaded_pll: checks both published PLL cascades. The default
// (Cyclone 10) instance, fed with 40 MHz, must give ck2x = 320 MHz
// (3125 ps) and ck1x = 319.921875 MHz (3125.763125 ps). A second instance
// with the Cyclone 5 dividers, fed with 50 MHz, must give 4096/4095 * 250 MHz
// (3999.0234 ps) on ck2x and 250 MHz (4000 ps) on ck1x. In both, 8190 slow
// periods must last as long as 8192 fast ones (f1/f2 = 4095/4096).
module tb_cascaded_pll;
  timeunit 1ps;
  timeprecision 1fs;
  import tig_pkg::*;

  int checks = 0, failures = 0;
  logic ref40 = 1'b0, ref50 = 1'b0;
  logic a1, a2, alk, b1, b2, blk;

  cascaded_pll u_c10 (.refclk(ref40), .ck1x(a1), .ck2x(a2), .locked(alk));

  cascaded_pll #(.CFG(PLL_CFG_C5)) u_c5 (.refclk(ref50), .ck1x(b1), .ck2x(b2), .locked(blk));

  always #12500 ref40 = ~ref40;
  always #10000 ref50 = ~ref50;

  task automatic check_close(string what, real got, real exp, real tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end else $display("%s = %f", what, got);
  endtask

  realtime s1, e1, s2, e2;
  initial begin
    wait (alk && blk);
    fork
      begin @(posedge a1) s1 = $realtime; repeat (8190) @(posedge a1); e1 = $realtime; end
      begin @(posedge a2) s2 = $realtime; repeat (8192) @(posedge a2); e2 = $realtime; end
    join
    check_close("C10 ck1x period (ps)", (e1 - s1) / 8190.0, 3125.0 * 4096.0 / 4095.0, 0.001);
    check_close("C10 ck2x period (ps)", (e2 - s2) / 8192.0, 3125.0, 0.001);
    check_close("C10 frame mismatch (ps)", (e1 - s1) - (e2 - s2), 0.0, 0.05);
    fork
      begin @(posedge b1) s1 = $realtime; repeat (8190) @(posedge b1); e1 = $realtime; end
      begin @(posedge b2) s2 = $realtime; repeat (8192) @(posedge b2); e2 = $realtime; end
    join
    check_close("C5 ck1x period (ps)", (e1 - s1) / 8190.0, 4000.0, 0.001);
    check_close("C5 ck2x period (ps)", (e2 - s2) / 8192.0, 4000.0 * 4095.0 / 4096.0, 0.001);
    check_close("C5 frame mismatch (ps)", (e1 - s1) - (e2 - s2), 0.0, 0.05);
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
