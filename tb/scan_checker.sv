// scan_checker: testbench helper that follows one generator through a
// sequencer scan. On every sequencer step it waits one vernier frame, then
// measures the leading-edge separation T2 - T1 of the next pulse pair and
// compares it with
//     (N2 + 1 - 4096)*P2 - (N1 + 1 - 4096)*P1 - eps,
// eps being the alignment skew of 2 to 3 fine steps. The difference between
// successive points must equal the change of the ideal value to within
// 10 fs. It prints "set time" against "measured time" for each point.
module scan_checker
  import tig_pkg::*;
#(
  parameter string NAME  = "scan",
  parameter real   P1    = 3125.0 * 4096.0 / 4095.0,
  parameter real   P2    = 3125.0,
  parameter setting_table_t TABLE = DEFAULT_TABLE
) (
  input  logic       ck_ctl,
  input  logic       eqn1x,
  input  logic       eqn2x,
  input  logic       seq_step,
  input  logic [3:0] seq_idx,
  output int         checks,
  output int         failures,
  output int         points
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam real DP = P1 - P2;
  localparam real F  = 8190.0 * P1;

  real     d, e, d_prev, e_prev;
  realtime t1, t2;
  int      i;

  initial begin
    checks = 0;
    failures = 0;
    points = 0;
  end

  always @(posedge ck_ctl) begin
    if (seq_step) begin
      #1;
      i = int'(seq_idx);
      #(F);
      @(posedge eqn1x) t1 = $realtime;
      @(posedge eqn2x) t2 = $realtime;
      d = t2 - t1;
      e = real'(int'(TABLE[i].n2) + 1 - 4096) * P2 - real'(int'(TABLE[i].n1) + 1 - 4096) * P1;
      if (d - e > F / 2.0) d = d - F;
      checks++;
      if (!(d >= e - 3.0 * DP - 0.01 && d <= e - 2.0 * DP + 0.01)) begin
        failures++;
        $display("FAIL %s point %0d: T2-T1 %f ps, ideal %f ps", NAME, i, d, e);
      end
      if (points > 0) begin
        checks++;
        if ((d - d_prev) - (e - e_prev) > 0.01 || (d - d_prev) - (e - e_prev) < -0.01) begin
          failures++;
          $display("FAIL %s point %0d: step %f ps, ideal step %f ps", NAME, i, d - d_prev, e - e_prev);
        end
      end
      $display("%s point %2d  N1=%0d N2=%0d  set %9.3f ps  measured %9.3f ps", NAME, i,
               TABLE[i].n1, TABLE[i].n2, e, d);
      d_prev = d;
      e_prev = e;
      points++;
    end
  end
endmodule
