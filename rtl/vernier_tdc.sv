// vernier_tdc: ring-oscillator vernier time-to-digital converter.
//
// Measures the time T from a rising edge on start to the next rising edge of
// clk_ref (the 100 MHz clock), with a resolution of Delta t = T0 - T1, the
// difference between the periods of a slow (T0) and a fast (T1) ring
// oscillator. The sequence follows the paper's TDC schematic:
//   * start_ff  (D=1, clocked by start)     -> slow_en: slow oscillator runs.
//   * stop_ff   (D=start_ff, clk_ref)       -> fast_en: fast oscillator runs
//     from the first clk_ref edge after the start.
//   * the phase detector fires when a fast edge overtakes a slow edge;
//   * latch_ff  (D=1, clocked by the phase) -> ready (Read Request), which
//     stops the N0 (slow) and N1 (fast) counters.
//   * clear resets all three flip-flops, the phase detector and the counters,
//     which stops both oscillators and arms the next measurement.
// The oscillators are outside this module; it drives their enables and takes
// their outputs, so the module itself is synthesizable.
//
// Result: with N0 slow and N1 fast periods counted,
//   T = N0*T0 - N1*T1 + T0 - e,   0 < e < Delta t,
// i.e. the paper's T = (N0 - N1)*T0 + N1*Delta t plus a constant T0 offset that
// comes from this latch arrangement and is removed by the offset calibration.
// Timing: ready rises about (T mod T0)/Delta t + 1 fast periods after the stop
// edge, at most ~T0/Delta t + 1 fast periods (about 25 ns for the typical
// T0 = 2.2 ns, Delta t = 0.2 ns); n0/n1 are stable once ready is high.
//
// fast_inhibit (this design's addition) keeps the fast oscillator off, so that
// the slow one can run alone during the T0 calibration.
//
// Lint note: a linter reports start_q and stop_q as "flopped both
// synchronously and asynchronously". That is the principle of the circuit:
// start_q is the D input of stop_ff and also gates an oscillator whose
// output clocks other flip-flops, and the phase detector samples one
// oscillator with the other. Metastability in stop_ff and the phase detector
// costs at most one Delta t step; it cannot lose the measurement.
`timescale 1ns / 1fs
module vernier_tdc #(
  parameter int unsigned CNT_W = 8
) (
  input  logic             start,
  input  logic             clk_ref,
  input  logic             clear,
  input  logic             fast_inhibit,
  // ring oscillators
  output logic             slow_en,
  output logic             fast_en,
  input  logic             slow_osc,
  input  logic             fast_osc,
  // result
  output logic             phase,
  output logic             ready,
  output logic [CNT_W-1:0] n0,
  output logic [CNT_W-1:0] n1
);

  logic start_q, stop_q, latch_q;

  // Start flip-flop: D = 1, clocked by the trigger.
  always_ff @(posedge start or posedge clear) begin
    if (clear) start_q <= 1'b0;
    else       start_q <= 1'b1;
  end

  // Stop flip-flop: passes the start flag on the next reference clock edge.
  always_ff @(posedge clk_ref or posedge clear) begin
    if (clear) stop_q <= 1'b0;
    else       stop_q <= start_q & ~fast_inhibit;
  end

  assign slow_en = start_q;
  assign fast_en = stop_q;

  phase_detector u_phase (
    .slow_clock    (slow_osc),
    .fast_clock    (fast_osc),
    .clear         (clear),
    .phase_detected(phase)
  );

  // Latch flip-flop: D = 1, clocked by the phase detection.
  always_ff @(posedge phase or posedge clear) begin
    if (clear) latch_q <= 1'b0;
    else       latch_q <= 1'b1;
  end

  assign ready = latch_q;

  tdc_counter #(.WIDTH(CNT_W)) u_n0 (
    .osc  (slow_osc),
    .clear(clear),
    .stop (latch_q),
    .count(n0)
  );

  tdc_counter #(.WIDTH(CNT_W)) u_n1 (
    .osc  (fast_osc),
    .clear(clear),
    .stop (latch_q),
    .count(n1)
  );

endmodule
