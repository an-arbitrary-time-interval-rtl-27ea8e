// const_reg: constant register that carries a comparator constant (N1 or N2)
// from the slow control clock domain into one vernier clock domain.
//
// The slow control side sets d and then raises en; it holds d unchanged
// while en is high and for at least three clk periods after it falls. en is
// passed through a two-flop synchronizer and, while the synchronized enable
// is high, q takes d on each rising edge of clk. q therefore changes only on
// clk edges and the comparator behind it sees a clean, settled constant.
//
// Ports follow the D/EN/Q register of the block diagram. The synchronizer
// and the hold rule on d are this design's own choice; the published text
// only says what the register is for. Latency from en rising to q updated:
// three clk edges.
module const_reg #(
  parameter int unsigned W = tig_pkg::CNT_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  input  logic         en,
  output logic [W-1:0] q
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [1:0] en_sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_sync <= '0;
      q       <= '0;
    end else begin
      en_sync <= {en_sync[0], en};
      if (en_sync[1]) q <= d;
    end
  end
endmodule
