// tb_pll_stage: checks the integer PLL model against f_out = f_in*M/(N*C).
// A 40 MHz reference drives the first stage of the Cyclone 10 cascade
// (N=4, M=105, C0=105, C1=4): outclk0 must be 10 MHz (100 ns) and outclk1
// 262.5 MHz (3809.5238 ps). Periods are measured over many cycles.
module tb_pll_stage;
  timeunit 1ps;
  timeprecision 1fs;

  int checks = 0, failures = 0;
  logic refclk = 1'b0;
  logic o0, o1, lk;

  pll_stage #(.N(4), .M(105), .C0(105), .C1(4)) dut (
    .refclk(refclk), .outclk0(o0), .outclk1(o1), .locked(lk));

  always #12500 refclk = ~refclk;   // 40 MHz

  task automatic check_close(string what, realtime got, realtime exp, realtime tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      $display("FAIL %s: got %f ps expected %f ps", what, got, exp);
    end
  endtask

  realtime ta, tb;
  initial begin
    #1;
    checks++;
    if (lk !== 1'b0) begin failures++; $display("FAIL locked before reference"); end
    wait (lk);
    @(posedge o1); ta = $realtime;
    repeat (1050) @(posedge o1);
    tb = $realtime;
    check_close("outclk1 period", (tb - ta) / 1050.0, 1.0e6 / 262.5, 0.01);
    @(posedge o0); ta = $realtime;
    repeat (10) @(posedge o0);
    tb = $realtime;
    check_close("outclk0 period", (tb - ta) / 10.0, 100000.0, 0.01);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
