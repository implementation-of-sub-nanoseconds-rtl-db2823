// trigger_logic: trigger source selection and LED pulse generation.
//
// The trigger that starts the TDC must keep its exact edge time, so the
// selection is purely combinational:
//   TRIG_FE_OR  - either front-end chip's trigger output,
//   TRIG_FE_AND - fast coincidence: both chips' trigger outputs high together,
//   TRIG_EXT    - the external trigger input (used with an external delay unit
//                 for the linearity test, or by a master sensor's pulse).
// The LED pulse mode produces a pulse synchronous with the 100 MHz clock every
// led_period clocks, LED_WIDTH clocks wide; in the paper it drives the blue
// LED that tests the PMT, and it can be looped back as external trigger.
// The three sources and the LED mode come from the paper; the AND as the
// coincidence rule, the programmable period and the pulse width are choices
// of this design. led_period values below LED_WIDTH+1 are treated as
// LED_WIDTH+1. Reset: synchronous, active low.
`timescale 1ns / 1fs
module trigger_logic
  import tdc_pkg::*;
#(
  parameter int unsigned LED_W     = 16,
  parameter int unsigned LED_WIDTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       fe_trig,
  input  logic             ext_trig,
  input  trig_src_e        src,
  input  logic             led_en,
  input  logic [LED_W-1:0] led_period,
  output logic             trig_out,
  output logic             led_pulse
);

  always_comb begin
    unique case (src)
      TRIG_FE_OR:  trig_out = fe_trig[0] | fe_trig[1];
      TRIG_FE_AND: trig_out = fe_trig[0] & fe_trig[1];
      TRIG_EXT:    trig_out = ext_trig;
      default:     trig_out = 1'b0;
    endcase
  end

  logic [LED_W-1:0] led_cnt;
  logic [LED_W-1:0] period_eff;

  assign period_eff = (led_period > LED_W'(LED_WIDTH)) ? led_period : LED_W'(LED_WIDTH + 1);

  always_ff @(posedge clk) begin
    if (!rst_n || !led_en) begin
      led_cnt   <= '0;
      led_pulse <= 1'b0;
    end else begin
      led_cnt   <= (led_cnt == period_eff - 1'b1) ? '0 : led_cnt + 1'b1;
      led_pulse <= (led_cnt < LED_W'(LED_WIDTH));
    end
  end

endmodule
