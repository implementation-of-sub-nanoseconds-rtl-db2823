// tdc_counter: the N0 / N1 counter of the vernier TDC.
//
// Counts rising edges of its oscillator (used as the counter clock) while the
// stop input is low. In the TDC, stop is the latched phase-detection flag, so
// N0 ends as the number of slow periods and N1 as the number of fast periods
// up to the coincidence. clear resets the count asynchronously (active high).
// The count-while-not-latched behaviour follows the paper's TDC schematic;
// the reset on Clear and the wrap-around at 2^WIDTH are this design's choices.
// Timing: the count changes just after each oscillator rising edge; stop is
// sampled on that same edge, so an edge that coincides with stop rising may
// or may not be counted.
`timescale 1ns / 1fs
module tdc_counter #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             osc,
  input  logic             clear,
  input  logic             stop,
  output logic [WIDTH-1:0] count
);

  always_ff @(posedge osc or posedge clear) begin
    if (clear)      count <= '0;
    else if (!stop) count <= count + 1'b1;
  end

endmodule
