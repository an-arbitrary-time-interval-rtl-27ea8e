// pll_stage: BEHAVIOURAL MODEL (not synthesizable) of one integer-mode FPGA
// PLL, as used twice in cascade to make the two vernier clocks.
//
// An integer PLL divides its reference by N, multiplies by M in the VCO and
// divides the VCO by a post-scaler C per output:
//     f_out = f_in * M / (N * C).
// The model measures the mean period of refclk over MEAS_CYCLES reference
// periods (averaging removes the femtosecond rounding of a modelled input
// clock), then on the next rising edge asserts locked and starts outclk0 (and outclk1 when
// C1 is not zero) with a rising edge aligned to that reference edge. Edge
// times are accumulated in real time, so a period that is not a whole number
// of femtoseconds does not drift; each edge is within half a femtosecond of
// its ideal time. Jitter, loop dynamics and loss of lock are not modelled.
//
// Interface: refclk in, outclk0/outclk1/locked out. N, M, C0, C1 are the
// dividers printed for each PLL of the published cascade; the measurement and
// start-up scheme is this model's own.
module pll_stage #(
  parameter int unsigned N  = 1,
  parameter int unsigned M  = 32,
  parameter int unsigned C0 = 4,
  parameter int unsigned C1 = 0,
  parameter int unsigned MEAS_CYCLES = 1024
) (
  input  logic refclk,
  output logic outclk0,
  output logic outclk1,
  output logic locked
);
  timeunit 1ps;
  timeprecision 1fs;

  realtime t_first, t_in, t_lock;
  realtime half0, half1;
  realtime tgt0, tgt1;
  bit      run0, run1;   // output generator started

  initial begin
    outclk0 = 1'b0;
    outclk1 = 1'b0;
    locked  = 1'b0;
    run0    = 1'b0;
    run1    = 1'b0;
    @(posedge refclk);
    t_first = $realtime;
    repeat (MEAS_CYCLES) @(posedge refclk);
    t_in  = ($realtime - t_first) / real'(MEAS_CYCLES);
    half0 = t_in * real'(N) * real'(C0) / (2.0 * real'(M));
    half1 = t_in * real'(N) * real'(C1) / (2.0 * real'(M));
    @(posedge refclk);
    t_lock = $realtime;
    locked = 1'b1;
  end

  // Output edge generators. Each edge of an output schedules the next one
  // half a period later; the first edge is a rising edge at t_lock.

  always @(outclk0 or locked) begin
    if (locked) begin
      if (!run0) begin
        run0     = 1'b1;
        tgt0     = t_lock;
        outclk0 <= 1'b1;
      end else begin
        tgt0 = tgt0 + half0;
        #(tgt0 - $realtime) outclk0 <= ~outclk0;
      end
    end
  end

  always @(outclk1 or locked) begin
    if (locked && C1 != 0) begin
      if (!run1) begin
        run1     = 1'b1;
        tgt1     = t_lock;
        outclk1 <= 1'b1;
      end else begin
        tgt1 = tgt1 + half1;
        #(tgt1 - $realtime) outclk1 <= ~outclk1;
      end
    end
  end
endmodule
