// align_init: initializes the two rotational counters to 4096 on a pair of
// nearly aligned edges of the slow clock ck1x and the fast clock ck2x.
//
// How it works. ck1x is sampled as data on every rising edge of ck2x. Because
// ck1x is the slower clock, its edges slide later against ck2x by one fine
// step (1/f1 - 1/f2, about 0.76 ps at 320 MHz) per cycle. The sampled level
// therefore falls from 1 to 0 on the ck2x edge k0 just before which a rising
// edge of ck1x has moved past: the rising ck1x edge j0 then follows k0 by
// at most one fine step. Once armed, the first such 1-to-0 step raises a
// one-cycle flag in the ck2x domain on edge k0+1. The ck2x domain uses the
// flag on edge k0+2 (sclr2). The ck1x domain samples the same flag on the
// falling edge of ck1x, half a period away from any ck2x edge, and uses it
// on its rising edge j0+2 (sclr1). Both counters are thus loaded on edges
// of the same index after the aligned pair, which are still within three
// fine steps of each other.
//
// Interface: arm (any domain, level) starts one alignment on its rising
// edge, after a two-flop synchronizer into ck2x. sclr1/sclr2 are one-cycle
// set pulses for CNT1x/CNT2x. done (ck2x domain) goes high with the load and
// stays high until the next arm. Timing from the aligned pair: counters
// loaded on the second following edge of each clock.
//
// The published text only says that the counters are set to 4096 when the
// clocks are approximately aligned; this detector is this design's own
// simplest way of doing it. Sampling a clock as data is normal for this kind
// of vernier phase detector; in an FPGA the path from ck1x to the sampling
// flop has to be routed as data. Linting tools note that ck1x is then used
// both as a clock and as data; that is intended here.
module align_init (
  input  logic ck1x,
  input  logic rst1_n,
  input  logic ck2x,
  input  logic rst2_n,
  input  logic arm,
  output logic sclr1,
  output logic sclr2,
  output logic done
);
  timeunit 1ps;
  timeprecision 1fs;

  // ---------------- ck2x domain ----------------
  logic [2:0] arm_sync;   // [1:0] synchronizer, [2] previous value
  logic       pending;
  logic       smp, smp_q; // ck1x level sampled by ck2x, and one cycle older
  logic       flag2;

  always_ff @(posedge ck2x or negedge rst2_n) begin
    if (!rst2_n) begin
      arm_sync <= '0;
      pending  <= 1'b0;
      smp      <= 1'b0;
      smp_q    <= 1'b0;
      flag2    <= 1'b0;
      done     <= 1'b0;
    end else begin
      arm_sync <= {arm_sync[1:0], arm};
      smp      <= ck1x;
      smp_q    <= smp;
      flag2    <= 1'b0;
      if (arm_sync[1] && !arm_sync[2]) begin
        pending <= 1'b1;
        done    <= 1'b0;
      end else if (pending && smp_q && !smp) begin
        pending <= 1'b0;
        flag2   <= 1'b1;
      end
      if (flag2) done <= 1'b1;
    end
  end

  assign sclr2 = flag2;

  // ---------------- ck1x domain ----------------
  logic flag1n;

  always_ff @(negedge ck1x or negedge rst1_n) begin
    if (!rst1_n) flag1n <= 1'b0;
    else         flag1n <= flag2;
  end

  assign sclr1 = flag1n;
endmodule
