// pll_x5: BEHAVIOURAL MODEL (not synthesizable) of the FPGA PLL that derives
// the local 100 MHz clock from the 20 MHz clock of the clock bus.
//
// The model measures the period of clk_in between rising edges and, from the
// second measured period on (locked), emits MULT output periods per input
// period, each output period starting high; the first output rising edge
// coincides with each input rising edge, so the output stays phase aligned.
// The multiplication factor 5 is the paper's; the lock rule is this model's.
// Interface: clk_in, clk_out, locked. clk_out is low while not locked.
// Lint note: the half-period delay is computed at run time, so a simulator
// warns that it might be zero; it is positive once the first period has been
// measured, and no delay is waited on before that.
`timescale 1ns / 1fs
module pll_x5 #(
  parameter int unsigned MULT = 5
) (
  input  logic clk_in,
  output logic clk_out,
  output logic locked
);

  realtime last_edge;
  realtime half;
  int      n_edges;

  initial begin
    clk_out   = 1'b0;
    locked    = 1'b0;
    last_edge = 0.0;
    half      = 1.0;
    n_edges   = 0;
  end

  always begin
    @(posedge clk_in);
    if (n_edges > 0) half = ($realtime - last_edge) / (2.0 * MULT);
    last_edge = $realtime;
    if (n_edges < 3) n_edges = n_edges + 1;
    locked = (n_edges >= 3);
    if (locked) begin
      // MULT output periods; the last low half ends at the next input edge.
      for (int i = 0; i < int'(MULT); i++) begin
        clk_out = 1'b1;
        #(half);
        clk_out = 1'b0;
        if (i != int'(MULT) - 1) #(half);
      end
    end
  end

endmodule
