// timestamp_counter: local 100 MHz time counter and DAQ cycle number.
//
// The counter runs at the 100 MHz clock and is reset by every PPS (the "DAQ
// cycle" signal of the clock bus), so it gives the time within the current
// cycle in 10 ns steps, 0 .. 1e8-1 for a 1 s cycle. Each PPS also increments
// the 8-bit cycle number (wrapping after 255) and raises pps_flag for one
// clock, which makes the FIFO writer insert a cycle word ahead of event data.
// The reset-by-PPS, the 10 ns step and the 255 maximum follow the paper. The
// two-flip-flop synchronizer for PPS, the saturation at 2^TS_W-1 when PPS is
// missing, and the synchronous active-low reset are this design's choices.
//
// Timing: the clock after the synchronized PPS rising edge is seen, timestamp
// is 0, cycle has its new value and pps_flag is 1 (three clocks after the PPS
// edge reaches the input).
`timescale 1ns / 1fs
module timestamp_counter #(
  parameter int unsigned TS_W    = 27,
  parameter int unsigned CYCLE_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pps,
  output logic [TS_W-1:0]    timestamp,
  output logic [CYCLE_W-1:0] cycle,
  output logic               pps_flag
);

  logic [2:0] pps_sync;   // two synchronizer stages plus edge history
  logic       pps_edge;

  always_ff @(posedge clk) begin
    if (!rst_n) pps_sync <= '0;
    else        pps_sync <= {pps_sync[1:0], pps};
  end

  assign pps_edge = pps_sync[1] & ~pps_sync[2];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      timestamp <= '0;
      cycle     <= '0;
      pps_flag  <= 1'b0;
    end else begin
      pps_flag <= pps_edge;
      if (pps_edge) begin
        timestamp <= '0;
        cycle     <= cycle + 1'b1;
      end else if (timestamp != {TS_W{1'b1}}) begin
        timestamp <= timestamp + 1'b1;
      end
    end
  end

endmodule
