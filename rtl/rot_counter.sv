// rot_counter: rotational counter of the vernier time interval generator
// (CNT1x on the slow clock, CNT2x on the fast clock).
//
// The counter steps by one on every rising clock edge from MIN up to MAX and
// then returns to MIN. A synchronous set (sclr, the SCLR pin of the block
// diagram) loads LOAD instead; it is used once, at initialization, when the
// two vernier clocks are nearly aligned. With the published values CNT1x
// runs 1..8190 and CNT2x 0..8191, both 13 bits wide, and both are set to
// 4096, so the two counters read 4096 together again every 8190 slow periods.
//
// Timing: q changes on the rising edge of clk; sclr is sampled on that edge.
// The asynchronous reset value (LOAD) is this design's own choice.
module rot_counter #(
  parameter int unsigned W    = tig_pkg::CNT_W,
  parameter int unsigned MIN  = tig_pkg::CNT2_MIN,
  parameter int unsigned MAX  = tig_pkg::CNT2_MAX,
  parameter int unsigned LOAD = tig_pkg::INIT_VALUE
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sclr,
  output logic [W-1:0] q
);
  timeunit 1ps;
  timeprecision 1fs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 q <= W'(LOAD);
    else if (sclr)              q <= W'(LOAD);
    else if (q >= W'(MAX))      q <= W'(MIN);
    else                        q <= q + 1'b1;
  end
endmodule
