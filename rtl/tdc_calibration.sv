// tdc_calibration: on-line calibration of the two TDC constants T0 and Delta t
// with the 100 MHz reference clock.
//
// T0 (mode CAL_T0): the slow oscillator is started by an internal trigger on a
// clock edge, with the fast oscillator kept off, and stopped by the TDC clear
// exactly n_ref clocks later. A CAL0_W-bit counter clocked by the slow
// oscillator counts its periods in that window, N_cal;0, so that
//   T0 = n_ref * 10 ns / N_cal;0,   with an error of about T0 / N_cal;0.
// The count is read once the oscillator has stopped; cal0_ovf reports a wrap.
//
// Delta t (mode CAL_DT): the internal trigger starts the slow oscillator and
// the fast one starts on the next clock edge; both then run freely. Each phase
// detection toggles a flip-flop in the fast-oscillator domain; the toggle is
// synchronized into the slow-oscillator domain, where the number of T0 periods
// between consecutive detections, N_cal;1, is counted. The first interval
// (from the start, not from a detection) is discarded, the next 2^AVG_LOG2 are
// summed in n_cal1_sum, and the readout software forms
//   Delta t = T0 / mean(N_cal;1) = T0 * 2^AVG_LOG2 / n_cal1_sum   (paper), or
//   Delta t = T0 / (mean(N_cal;1) + 1)                             (exact).
// The mean interval is exactly T1/Delta t = T0/Delta t - 1 periods, so the
// first form reads Delta t high by a factor T0/T1 (about 10 %).
//
// Both procedures are the paper's; the window control, the toggle-based domain
// crossing, the averaging over 2^AVG_LOG2 intervals, the timeout and the
// error flag are this design's. Interface: start is a one-clock pulse taken in
// IDLE; busy is high until done is set (sticky until the next start). While
// busy this block owns the TDC: int_trig replaces the trigger, tdc_clear is
// ORed with the readout's clear, and the readout must stay idle.
// Reset: rst_n synchronous active low in the clock domain; the oscillator
// domains are reset asynchronously by an internal clear pulsed at each start.
`timescale 1ns / 1fs
module tdc_calibration
  import tdc_pkg::*;
#(
  parameter int unsigned CAL0_W   = 8,
  parameter int unsigned AVG_LOG2 = 4,
  parameter int unsigned SUM_W    = 16,
  parameter int unsigned TIMEOUT  = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cal_mode_e         mode,
  input  logic              start,
  input  logic [7:0]        n_ref,
  // TDC
  input  logic              slow_osc,
  input  logic              fast_osc,
  input  logic              phase,
  output logic              int_trig,
  output logic              fast_inhibit,
  output logic              tdc_clear,
  // results
  output logic              busy,
  output logic              done,
  output logic              error,
  output logic [CAL0_W-1:0] n_cal0,
  output logic              cal0_ovf,
  output logic [SUM_W-1:0]  n_cal1_sum
);

  localparam int unsigned NMEAS = 1 << AVG_LOG2;
  localparam int unsigned TO_W  = $clog2(TIMEOUT + 1);

  typedef enum logic [2:0] {
    C_IDLE, C_CLEAR, C_ARM, C_RUN_T0, C_RUN_DT, C_STOP
  } cstate_e;

  cstate_e          state;
  cal_mode_e        mode_q;
  logic             osc_rst;     // clears the oscillator-domain logic
  logic [TO_W-1:0]  cnt;

  // ---------------- slow-oscillator domain: N_cal;0 ----------------
  logic [CAL0_W-1:0] cal0_cnt;
  logic              cal0_wrap;

  always_ff @(posedge slow_osc or posedge osc_rst) begin
    if (osc_rst) begin
      cal0_cnt  <= '0;
      cal0_wrap <= 1'b0;
    end else begin
      cal0_cnt <= cal0_cnt + 1'b1;
      if (cal0_cnt == {CAL0_W{1'b1}}) cal0_wrap <= 1'b1;
    end
  end

  // ---------------- fast-oscillator domain: detection toggle ----------------
  logic det_tog;

  always_ff @(posedge fast_osc or posedge osc_rst) begin
    if (osc_rst)    det_tog <= 1'b0;
    else if (phase) det_tog <= ~det_tog;
  end

  // ---------------- slow-oscillator domain: N_cal;1 ----------------
  logic [2:0]                tog_sync;
  logic                      det;
  logic                      seen_first;
  logic [SUM_W-1:0]          ival;
  logic [SUM_W-1:0]          sum;
  logic [AVG_LOG2:0]         nmeas;

  assign det = tog_sync[1] ^ tog_sync[2];

  always_ff @(posedge slow_osc or posedge osc_rst) begin
    if (osc_rst) begin
      tog_sync   <= '0;
      seen_first <= 1'b0;
      ival       <= '0;
      sum        <= '0;
      nmeas      <= '0;
    end else begin
      tog_sync <= {tog_sync[1:0], det_tog};
      if (det) begin
        ival <= '0;
        if (!seen_first) begin
          seen_first <= 1'b1;
        end else if (nmeas != (AVG_LOG2+1)'(NMEAS)) begin
          sum   <= sum + ival + 1'b1;
          nmeas <= nmeas + 1'b1;
        end
      end else begin
        ival <= ival + 1'b1;
      end
    end
  end

  // ---------------- clock domain: sequencing ----------------
  logic [1:0] dt_done_sync;

  always_ff @(posedge clk) begin
    if (!rst_n) dt_done_sync <= '0;
    else        dt_done_sync <= {dt_done_sync[0], nmeas == (AVG_LOG2+1)'(NMEAS)};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= C_IDLE;
      mode_q       <= CAL_NONE;
      osc_rst      <= 1'b0;
      cnt          <= '0;
      int_trig     <= 1'b0;
      fast_inhibit <= 1'b0;
      tdc_clear    <= 1'b0;
      done         <= 1'b0;
      error        <= 1'b0;
      n_cal0       <= '0;
      cal0_ovf     <= 1'b0;
      n_cal1_sum   <= '0;
    end else begin
      unique case (state)
        C_IDLE: begin
          if (start && mode != CAL_NONE) begin
            mode_q    <= mode;
            done      <= 1'b0;
            error     <= 1'b0;
            osc_rst   <= 1'b1;
            tdc_clear <= 1'b1;
            cnt       <= '0;
            state     <= C_CLEAR;
          end
        end
        C_CLEAR: begin      // two clocks of clear, then release it
          cnt <= cnt + 1'b1;
          if (cnt == TO_W'(1)) begin
            osc_rst      <= 1'b0;
            tdc_clear    <= 1'b0;
            fast_inhibit <= (mode_q == CAL_T0);
            cnt          <= '0;
            state        <= C_ARM;
          end
        end
        C_ARM: begin        // clear released one clock before the trigger
          int_trig <= 1'b1;
          cnt      <= '0;
          state    <= (mode_q == CAL_T0) ? C_RUN_T0 : C_RUN_DT;
        end
        C_RUN_T0: begin     // slow oscillator runs for n_ref clocks
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 >= TO_W'(n_ref)) begin
            int_trig  <= 1'b0;
            tdc_clear <= 1'b1;
            cnt       <= '0;
            state     <= C_STOP;
          end
        end
        C_RUN_DT: begin
          cnt <= cnt + 1'b1;
          if (dt_done_sync[1] || cnt == TO_W'(TIMEOUT)) begin
            error     <= !dt_done_sync[1];
            int_trig  <= 1'b0;
            tdc_clear <= 1'b1;
            cnt       <= '0;
            state     <= C_STOP;
          end
        end
        C_STOP: begin       // oscillators stop within a period; then read
          cnt <= cnt + 1'b1;
          if (cnt == TO_W'(3)) begin
            if (mode_q == CAL_T0) begin
              n_cal0   <= cal0_cnt;
              cal0_ovf <= cal0_wrap;
            end else begin
              n_cal1_sum <= sum;
            end
            tdc_clear    <= 1'b0;
            fast_inhibit <= 1'b0;
            done         <= 1'b1;
            state        <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy = (state != C_IDLE);

endmodule
