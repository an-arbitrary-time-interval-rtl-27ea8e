// tb_eq_cmp: checks that eq is the registered value of (a == b): after each
// rising edge eq must equal the comparison of the inputs applied before it.
// About half the vectors are made equal on purpose.
module tb_eq_cmp;
  timeunit 1ps;
  timeprecision 1fs;
  import tig_pkg::*;

  int checks = 0, failures = 0, hits = 0;
  logic clk = 1'b0, rst_n = 1'b0, eq;
  cnt_t a = '0, b = '0;
  logic expected;

  eq_cmp #(.W(CNT_W)) dut (.clk(clk), .rst_n(rst_n), .a(a), .b(b), .eq(eq));

  always #1000 clk = ~clk;

  initial begin
    #2500 rst_n = 1'b1;
    checks++;
    if (eq !== 1'b0) begin failures++; $display("FAIL reset"); end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      a = cnt_t'($urandom);
      b = ($urandom_range(0, 1) == 1) ? a : cnt_t'($urandom);
      if (i % 7 == 0) b = a ^ (cnt_t'(1) << $urandom_range(0, CNT_W - 1));
      expected = (a == b);
      @(posedge clk); #1;
      checks++;
      if (eq !== expected) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d b=%0d eq=%b", a, b, eq);
      end
      if (expected) hits++;
    end
    checks++;
    if (hits < 500) begin failures++; $display("FAIL too few equal vectors"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
