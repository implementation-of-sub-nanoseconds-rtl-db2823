// ring_oscillator: BEHAVIOURAL MODEL (not synthesizable) of the gated ring
// oscillator used as slow and fast clock of the vernier TDC.
//
// Structure: an AND gate (Enable & S3) drives S0, followed by three inverting
// cells S0->S1->S2->S3, with S3 fed back to the AND gate. With one
// non-inverting and three inverting stages the loop has an odd number of
// inversions and oscillates while enable is 1. Each stage n has its own
// high-to-low (TPHLn) and low-to-high (TPLHn) delay; the period is the sum of
// all eight, f = 1 / sum(TPHLn + TPLHn). The structure, node names and the
// period formula follow the paper's example oscillator.
//
// In the FPGA the delays come from the placed and routed cells, which is why
// this part is a delay model. The default delays are this model's own choice,
// near the paper's typical T0 ~ 2.2 ns; the testbench and the top override them
// to make a slow (T0) and a fast (T1) oscillator. Delays are transport delays.
//
// Interface: enable (in), osc_out = S3 (out). At rest (enable 0) S3 is 1; after
// enable rises, S3 falls half a period later and rises one full period later,
// so the k-th rising edge of osc_out comes k periods after the enable edge.
// When enable falls the ring stops within one period, S3 settling at 1.
// Lint notes: the delays are parameters picked by a condition, so a
// simulator cannot prove them non-zero and warns about possible zero delays
// (all the defaults are positive). S3 is used both as a clock (the counters)
// and as data (the phase detector), as the vernier principle requires.
`timescale 1ns / 1fs
module ring_oscillator #(
  parameter realtime TPLH0 = 0.2760,
  parameter realtime TPHL0 = 0.2748,
  parameter realtime TPLH1 = 0.2760,
  parameter realtime TPHL1 = 0.2748,
  parameter realtime TPLH2 = 0.2760,
  parameter realtime TPHL2 = 0.2748,
  parameter realtime TPLH3 = 0.2760,
  parameter realtime TPHL3 = 0.2748
) (
  input  logic enable,
  output logic osc_out
);

  // Settled state with enable low: S0=0, S1=1, S2=0, S3=1.
  logic s0, s1, s2, s3;

  initial begin
    s0 = 1'b0;
    s1 = 1'b1;
    s2 = 1'b0;
    s3 = 1'b1;
  end

  // The delay of each transition is chosen from the value being driven.
  always @(enable or s3) s0 <= #((enable & s3) ? TPLH0 : TPHL0) (enable & s3);
  always @(s0)           s1 <= #((!s0) ? TPLH1 : TPHL1) !s0;
  always @(s1)           s2 <= #((!s1) ? TPLH2 : TPHL2) !s1;
  always @(s2)           s3 <= #((!s2) ? TPLH3 : TPHL3) !s2;

  assign osc_out = s3;

endmodule
