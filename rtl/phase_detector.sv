// phase_detector: coincidence detector between the slow and fast oscillators.
//
// Two flip-flops clocked by the fast oscillator: the first samples the slow
// oscillator (q1), the second delays q1 by one fast period (q2). While the fast
// rising edge still lags the slow rising edge, it samples the slow clock high;
// once the fast edge has overtaken the slow edge it samples it low. The output
// phase_detected = q2 & ~q1 is therefore high for exactly one fast period,
// starting at the first fast edge that precedes a slow rising edge. The two
// flip-flops, the inverter and the AND gate follow the paper's schematic.
//
// Interface: slow_clock, fast_clock, clear (asynchronous, active high, resets
// q1 and q2; this design drives it from the TDC Clear). Timing: the output
// rises one clock-to-Q after the fast edge that sees the slow clock low after
// having seen it high, and falls one fast period later.
// The first flip-flop samples an unrelated clock and may go metastable; that is
// inherent to the method and the reason the paper names it the limiting part.
`timescale 1ns / 1fs
module phase_detector (
  input  logic slow_clock,
  input  logic fast_clock,
  input  logic clear,
  output logic phase_detected
);

  logic q1, q2;

  always_ff @(posedge fast_clock or posedge clear) begin
    if (clear) begin
      q1 <= 1'b0;
      q2 <= 1'b0;
    end else begin
      q1 <= slow_clock;
      q2 <= q1;
    end
  end

  assign phase_detected = q2 & ~q1;

endmodule
