// eq_cmp: registered equality comparator (the "A=B" block of the generator).
//
// On every rising edge of clk, eq takes the value (a == b). With a running
// rotational counter on a and a constant on b, eq is a pulse one clock
// period wide whose leading edge follows, by exactly one period, the edge on
// which the counter reached the constant. Registering the output keeps the
// pulse free of decode glitches, so its leading edge is a clock edge of the
// domain. The output register follows the clocked comparator of the block
// diagram.
module eq_cmp #(
  parameter int unsigned W = tig_pkg::CNT_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         eq
);
  timeunit 1ps;
  timeprecision 1fs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) eq <= 1'b0;
    else        eq <= (a == b);
  end
endmodule
