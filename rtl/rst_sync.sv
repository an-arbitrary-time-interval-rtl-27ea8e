// rst_sync: reset synchronizer for one clock domain.
// rst_n_in is asserted asynchronously; its release reaches rst_n_out after
// two rising edges of clk, so every flop of the domain leaves reset on the
// same edge. A standard helper, not part of the published design.
module rst_sync (
  input  logic clk,
  input  logic rst_n_in,
  output logic rst_n_out
);
  timeunit 1ps;
  timeprecision 1fs;

  logic meta;

  always_ff @(posedge clk or negedge rst_n_in) begin
    if (!rst_n_in) begin
      meta      <= 1'b0;
      rst_n_out <= 1'b0;
    end else begin
      meta      <= 1'b1;
      rst_n_out <= meta;
    end
  end
endmodule
