// tb_tig_sequencer: checks the sequencer with a short dwell (50 clocks,
// 8-clock load pulse). Each table entry must be presented in order with
// n_load high for exactly LOAD_CYCLES clocks at its start, one step pulse per
// entry, successive entries exactly DWELL_CYCLES clocks apart, a wrap from the
// last entry back to the first, and a return to entry 0 when enable drops.
module tb_tig_sequencer;
  timeunit 1ps;
  timeprecision 1fs;
  import tig_pkg::*;

  localparam int DWELL = 50;
  localparam int LOADC = 8;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0;
  cnt_t n1, n2;
  logic n_load, step;
  logic [3:0] idx;
  int cyc = 0, last_step = -1, load_len = 0, entry = 0, wraps = 0;

  tig_sequencer #(.TABLE(DEFAULT_TABLE), .DWELL_CYCLES(64'(DWELL)), .LOAD_CYCLES(LOADC)) dut (
    .clk(clk), .rst_n(rst_n), .enable(enable),
    .n1(n1), .n2(n2), .n_load(n_load), .idx(idx), .step(step));

  always #12500 clk = ~clk;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // Observe after every rising edge.
  always @(posedge clk) begin
    #1;
    cyc++;
    if (enable) begin
      if (n_load) load_len++;
      if (step) begin
        if (last_step >= 0) check("steps DWELL_CYCLES apart", cyc - last_step == DWELL);
        last_step = cyc;
      end
      if (!n_load && load_len != 0) begin
        check("n_load lasts LOAD_CYCLES", load_len == LOADC);
        load_len = 0;
      end
      if (n_load) begin
        check("entry index", int'(idx) == entry % NUM_POINTS);
        check("n1 from table", n1 == DEFAULT_TABLE[entry % NUM_POINTS].n1);
        check("n2 from table", n2 == DEFAULT_TABLE[entry % NUM_POINTS].n2);
      end
    end
  end

  initial begin
    #40000 rst_n = 1'b1;
    @(negedge clk);
    check("idle: no load", n_load == 1'b0);
    enable = 1'b1;
    for (entry = 0; entry < NUM_POINTS + 3; entry++) begin
      @(posedge n_load);
      if (entry == NUM_POINTS) begin
        wraps++;
        #1 check("wrapped to entry 0", idx == 0);
      end
      @(negedge n_load);
    end
    @(negedge clk) enable = 1'b0;
    @(posedge clk); #1;
    @(negedge clk);
    check("disable returns to entry 0", idx == 0 && !n_load);
    check("wrap seen", wraps == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
