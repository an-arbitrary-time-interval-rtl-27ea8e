// tig_sequencer: test sequencer that steps the generator through a table of
// pre-determined (N1, N2) settings in the slow control clock domain.
//
// While enable is high the sequencer presents table entry idx on n1/n2,
// raises n_load for LOAD_CYCLES clocks so that both constant registers take
// the new values, and then holds the entry for the rest of DWELL_CYCLES
// clocks before moving to the next entry. After the last entry it starts
// again from the first. step pulses for one clock each time a new entry is
// presented. Dropping enable returns it to entry 0 and idle.
//
// The published test uses 16 pre-determined intervals and about 429 s per
// point; DWELL_CYCLES defaults to 429 s of a 40 MHz slow control clock. The
// table values, the load pulse and the wrap-around are this design's own
// choices.
module tig_sequencer
  import tig_pkg::*;
#(
  parameter setting_table_t TABLE        = DEFAULT_TABLE,
  parameter longint unsigned DWELL_CYCLES = 64'd17_160_000_000,
  parameter int unsigned     LOAD_CYCLES  = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          enable,
  output cnt_t                          n1,
  output cnt_t                          n2,
  output logic                          n_load,
  output logic [$clog2(NUM_POINTS)-1:0] idx,
  output logic                          step
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned DW = $clog2(DWELL_CYCLES + 1);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_DWELL} state_t;
  state_t        state;
  logic [DW-1:0] timer;

  assign n1     = TABLE[idx].n1;
  assign n2     = TABLE[idx].n2;
  assign n_load = (state == S_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
      timer <= '0;
      step  <= 1'b0;
    end else begin
      step <= 1'b0;
      if (!enable) begin
        state <= S_IDLE;
        idx   <= '0;
        timer <= '0;
      end else begin
        unique case (state)
          S_IDLE: begin
            state <= S_LOAD;
            timer <= '0;
            step  <= 1'b1;
          end
          S_LOAD: begin
            timer <= timer + 1'b1;
            if (timer == DW'(LOAD_CYCLES - 1)) state <= S_DWELL;
          end
          S_DWELL: begin
            if (timer >= DW'(DWELL_CYCLES - 1)) begin
              timer <= '0;
              idx   <= idx + 1'b1;   // wraps after NUM_POINTS entries
              state <= S_LOAD;
              step  <= 1'b1;
            end else begin
              timer <= timer + 1'b1;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  initial begin
    assert (LOAD_CYCLES >= 1 && DWELL_CYCLES > 64'(LOAD_CYCLES))
      else $error("tig_sequencer: DWELL_CYCLES must exceed LOAD_CYCLES");
  end
endmodule
