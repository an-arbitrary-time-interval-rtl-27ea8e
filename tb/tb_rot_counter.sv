// tb_rot_counter: checks both published counter variants against a
// reference sequence: CNT1x counts 1..8190 and wraps to 1, CNT2x counts
// 0..8191 and wraps to 0, and a synchronous set loads 4096 on the next edge.
// Runs a little over one full rotation of each, with random set pulses
// afterwards.
module tb_rot_counter;
  timeunit 1ps;
  timeprecision 1fs;
  import tig_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, sclr = 1'b0;
  cnt_t q1, q2;
  int exp1, exp2;
  int wraps1 = 0, wraps2 = 0;

  rot_counter #(.W(CNT_W), .MIN(CNT1_MIN), .MAX(CNT1_MAX), .LOAD(INIT_VALUE)) dut1 (
    .clk(clk), .rst_n(rst_n), .sclr(sclr), .q(q1));
  rot_counter #(.W(CNT_W), .MIN(CNT2_MIN), .MAX(CNT2_MAX), .LOAD(INIT_VALUE)) dut2 (
    .clk(clk), .rst_n(rst_n), .sclr(sclr), .q(q2));

  always #1000 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d at %t", what, got, exp, $realtime);
    end
  endtask

  initial begin
    #1500 rst_n = 1'b1;
    check("reset q1", int'(q1), 4096);
    check("reset q2", int'(q2), 4096);
    exp1 = 4096; exp2 = 4096;
    for (int i = 0; i < 20000; i++) begin
      if (i > 17000) sclr = ($urandom_range(0, 99) == 0);
      @(posedge clk);
      if (sclr) begin
        exp1 = 4096; exp2 = 4096;
      end else begin
        if (exp1 == 8190) begin exp1 = 1; wraps1++; end else exp1++;
        if (exp2 == 8191) begin exp2 = 0; wraps2++; end else exp2++;
      end
      #1;
      check("CNT1x", int'(q1), exp1);
      check("CNT2x", int'(q2), exp2);
      sclr = 1'b0;
    end
    checks++;
    if (wraps1 < 2 || wraps2 < 2) begin failures++; $display("FAIL too few wraps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
