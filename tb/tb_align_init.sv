// tb_align_init: drives align_init with two clocks in the published ratio
// (fast 320 MHz, slow 320*4095/4096 MHz) from a random starting phase and
// arms it several times. For each alignment the set pulses must come exactly
// once per arm, on a ck2x edge and a ck1x edge with the ck1x edge later by
// more than two and at most three fine steps (1/f1 - 1/f2 = 0.763 ps), within
// one vernier frame (8190 slow periods) of arming; done must follow.
module tb_align_init;
  timeunit 1ps;
  timeprecision 1fs;

  localparam real P2 = 3125.0;
  localparam real P1 = 3125.0 * 4096.0 / 4095.0;
  localparam real DP = P1 - P2;

  int checks = 0, failures = 0;
  logic ck1x = 1'b0, ck2x = 1'b0, rst_n = 1'b0, arm = 1'b0;
  logic sclr1, sclr2, done;
  logic rst1_n, rst2_n;
  realtime t1, t2, tg1, tg2, t_arm;
  int n1 = 0, n2 = 0;

  assign rst1_n = rst_n;
  assign rst2_n = rst_n;

  align_init dut (.ck1x(ck1x), .rst1_n(rst1_n), .ck2x(ck2x), .rst2_n(rst2_n),
                  .arm(arm), .sclr1(sclr1), .sclr2(sclr2), .done(done));

  initial begin
    tg2 = 0.0;
    forever begin tg2 = tg2 + P2 / 2.0; #(tg2 - $realtime) ck2x = ~ck2x; end
  end
  initial begin
    tg1 = real'($urandom_range(0, 3000));
    forever begin tg1 = tg1 + P1 / 2.0; #(tg1 - $realtime) ck1x = ~ck1x; end
  end

  always @(posedge ck1x) if (sclr1) begin t1 = $realtime; n1++; end
  always @(posedge ck2x) if (sclr2) begin t2 = $realtime; n2++; end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $realtime); end
  endtask

  initial begin
    #20000 rst_n = 1'b1;
    for (int r = 0; r < 4; r++) begin
      repeat ($urandom_range(10, 3000)) @(posedge ck2x);
      n1 = 0; n2 = 0;
      arm = 1'b1;
      t_arm = $realtime;
      if (done) @(negedge done);
      wait (done);
      repeat (4) @(posedge ck1x);
      check("one sclr1 pulse", n1 == 1);
      check("one sclr2 pulse", n2 == 1);
      check("ck1x load edge after ck2x load edge", t1 > t2);
      check("load edges within 2..3 fine steps", (t1 - t2) > 2.0 * DP - 0.002 && (t1 - t2) <= 3.0 * DP + 0.002);
      check("aligned within one frame", (t2 - t_arm) < 8200.0 * P1);
      $display("alignment %0d: ck1x load edge - ck2x load edge = %f ps", r, t1 - t2);
      arm = 1'b0;
      repeat (10) @(posedge ck2x);
      check("done kept after arm drops", done == 1'b1);
    end
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
