// tb_const_reg: checks the constant register's clock-domain transfer. With
// en low, q must keep its value whatever d does. After en rises, q must take
// d on the third rising edge of clk (two synchronizer flops, then the load)
// and not before.
module tb_const_reg;
  timeunit 1ps;
  timeprecision 1fs;
  import tig_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  cnt_t d = '0, q, held;

  const_reg #(.W(CNT_W)) dut (.clk(clk), .rst_n(rst_n), .d(d), .en(en), .q(q));

  always #1562.5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %t", what, got, exp, $realtime);
    end
  endtask

  initial begin
    #4000 rst_n = 1'b1;
    check("reset", int'(q), 0);
    for (int t = 0; t < 40; t++) begin
      held = q;
      // d changes while en is low: q must not follow
      repeat (5) begin
        @(negedge clk) d = cnt_t'($urandom);
        check("hold while en low", int'(q), int'(held));
      end
      d = cnt_t'($urandom_range(1, 8190));
      @(negedge clk) en = 1'b1;
      @(posedge clk); #1 check("no load after 1 edge", int'(q), int'(held));
      @(posedge clk); #1 check("no load after 2 edges", int'(q), int'(held));
      @(posedge clk); #1 check("load after 3 edges", int'(q), int'(d));
      @(negedge clk) en = 1'b0;
      repeat (4) @(posedge clk);
    end
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
