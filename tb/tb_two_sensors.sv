// tb_two_sensors: comparison of two sensors measuring the same triggers.
// Two instances of the sensor FPGA share the 20 MHz clock bus and the PPS,
// the second one through a longer cable (1.37 ns later). They have different
// ring oscillators, as two FPGAs from different batches would:
//   sensor A: T0 = 2.2032 ns, T1 = 2.0012 ns (Delta t = 0.202 ns)
//   sensor B: T0 = 2.3100 ns, T1 = 2.0800 ns (Delta t = 0.230 ns).
// Each sensor first calibrates itself (T0 with n_ref = 56, then Delta t).
// Sensor A then runs in LED pulse mode; its pulse goes through an external
// delay, stepped by 100 ps over 12 ns, and back into the external trigger
// input of both sensors. Each sensor turns its event into a time with its
// own calibration:  t = timestamp*10 ns - (N0*T0c - N1*T1c + T0c),
// T0c = 56*10/N_cal0, Delta tc = T0c/(mean N_cal1 + 1), T1c = T0c - Delta tc.
// Checks: every trigger gives one event in each sensor; each sensor's time
// follows the delay with a slope of 1 (within 2 %); the difference t_A - t_B
// is constant, its spread staying below twice the larger Delta t plus the
// calibration error. The mean difference is the fixed offset between the
// two sensors that a system calibration would remove.
`timescale 1ns / 1fs
module tb_two_sensors;

  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int NS = 2;
  localparam int STEPS = 120;

  logic clk20 = 1'b0, pps = 1'b0, rst_n = 1'b0;
  logic clk20_b, pps_b;
  logic ext_trig = 1'b0;
  cfg_t cfg [NS];
  status_t status [NS];
  word_t fifo_wdata [NS];
  logic [NS-1:0] fifo_wen, led_pulse, hold, mux_clk, adc_conv, irq, clk100;

  always #25 clk20 = ~clk20;
  assign #1.37 clk20_b = clk20;
  assign #1.37 pps_b = pps;

  tdc_sensor_fpga u_a (
    .clk20(clk20), .pps(pps), .rst_n(rst_n), .fe_trig(2'b00), .ext_trig(ext_trig),
    .led_pulse(led_pulse[0]), .hold(hold[0]), .mux_clk(mux_clk[0]), .adc_conv(adc_conv[0]),
    .adc_data('0), .fifo_wdata(fifo_wdata[0]), .fifo_wen(fifo_wen[0]), .fifo_full(1'b0),
    .fifo_rd(1'b0), .irq(irq[0]), .irq_ack(1'b1), .cfg(cfg[0]), .status(status[0]),
    .clk100(clk100[0]));

  tdc_sensor_fpga #(
    .SLOW_TPLH(0.2890), .SLOW_TPHL(0.2885), .FAST_TPLH(0.2605), .FAST_TPHL(0.2595)
  ) u_b (
    .clk20(clk20_b), .pps(pps_b), .rst_n(rst_n), .fe_trig(2'b00), .ext_trig(ext_trig),
    .led_pulse(led_pulse[1]), .hold(hold[1]), .mux_clk(mux_clk[1]), .adc_conv(adc_conv[1]),
    .adc_data('0), .fifo_wdata(fifo_wdata[1]), .fifo_wen(fifo_wen[1]), .fifo_full(1'b0),
    .fifo_rd(1'b0), .irq(irq[1]), .irq_ack(1'b1), .cfg(cfg[1]), .status(status[1]),
    .clk100(clk100[1]));

  // calibration constants per sensor
  real t0c [NS], t1c [NS];
  // event times per sensor
  real t_ev [NS][$];
  logic [26:0] ts_q [NS];

  for (genvar s = 0; s < NS; s++) begin : g_parse
    always @(posedge clk100[s]) begin
      if (fifo_wen[s] && rst_n) begin
        if (fifo_wdata[s][35:32] == TAG_EVENT) ts_q[s] = fifo_wdata[s][26:0];
        if (fifo_wdata[s][35:32] == TAG_TDC) begin
          real tdc;
          check(fifo_wdata[s][16], $sformatf("sensor %0d TDC valid", s));
          tdc = real'(fifo_wdata[s][7:0]) * t0c[s] - real'(fifo_wdata[s][15:8]) * t1c[s] + t0c[s];
          t_ev[s].push_back(real'(ts_q[s]) * 10.0 - tdc);
        end
      end
    end
  end

  task automatic calibrate(input int s, input cal_mode_e m);
    @(negedge clk100[s]);
    cfg[s].cal_mode = m;
    cfg[s].cal_start = 1'b1;
    @(negedge clk100[s]);
    cfg[s].cal_start = 1'b0;
    @(negedge clk100[s]);
    wait (status[s].cal_done);
    @(negedge clk100[s]);
    cfg[s].cal_mode = CAL_NONE;
  endtask

  initial begin
    real d, dt_c, diff, dmin, dmax, dsum, slope [NS];
    for (int s = 0; s < NS; s++) begin
      cfg[s] = '0;
      cfg[s].trig_src = TRIG_EXT;
      cfg[s].led_period = 16'd1000;
      cfg[s].hold_delay = 8'd10;
      cfg[s].zs_threshold = 12'd0;
      cfg[s].n_ref = 8'd56;
    end
    #300;
    rst_n = 1'b1;
    #500;
    for (int s = 0; s < NS; s++) begin
      calibrate(s, CAL_T0);
      calibrate(s, CAL_DT);
      check(!status[s].cal_error, $sformatf("sensor %0d Delta t calibration", s));
      t0c[s] = 560.0 / real'(status[s].n_cal0);
      dt_c = t0c[s] / (real'(status[s].n_cal1_sum) / 16.0 + 1.0);
      t1c[s] = t0c[s] - dt_c;
      $display("INFO: sensor %0d: N_cal0 %0d, N_cal1 sum %0d -> T0 %f ns, Delta t %f ns",
               s, status[s].n_cal0, status[s].n_cal1_sum, t0c[s], dt_c);
    end
    check(t0c[0] > 2.2032 * 0.99 && t0c[0] < 2.2032 * 1.01, "sensor A T0 calibration");
    check(t0c[1] > 2.31 * 0.99 && t0c[1] < 2.31 * 1.01, "sensor B T0 calibration");
    check(t0c[0] - t1c[0] > 0.202 * 0.95 && t0c[0] - t1c[0] < 0.202 * 1.05, "sensor A Delta t calibration");
    check(t0c[1] - t1c[1] > 0.230 * 0.95 && t0c[1] - t1c[1] < 0.230 * 1.05, "sensor B Delta t calibration");

    // one PPS aligns both time bases
    #1000;
    pps = 1'b1;
    #100;
    pps = 1'b0;
    #1000;

    cfg[0].led_en = 1'b1;
    d = 0.25;
    for (int i = 0; i < STEPS; i++) begin
      @(posedge led_pulse[0]);
      #(d);
      ext_trig = 1'b1;
      #15;
      ext_trig = 1'b0;
      d = d + 0.1;
    end
    @(posedge led_pulse[0]);
    cfg[0].led_en = 1'b0;

    for (int s = 0; s < NS; s++)
      check(t_ev[s].size() == STEPS, $sformatf("sensor %0d: %0d events for %0d triggers", s, t_ev[s].size(), STEPS));

    // each sensor: consecutive triggers are 10 us (LED period) + 100 ps apart
    for (int s = 0; s < NS; s++) begin
      real sum_step;
      sum_step = 0.0;
      for (int i = 1; i < t_ev[s].size(); i++) sum_step += t_ev[s][i] - t_ev[s][i-1] - 10000.0;
      slope[s] = sum_step / real'(t_ev[s].size() - 1) / 0.1;
      check(slope[s] > 0.98 && slope[s] < 1.02, $sformatf("sensor %0d slope %f", s, slope[s]));
    end

    dmin = 1e9; dmax = -1e9; dsum = 0.0;
    for (int i = 0; i < STEPS && i < t_ev[0].size() && i < t_ev[1].size(); i++) begin
      diff = t_ev[0][i] - t_ev[1][i];
      dsum += diff;
      if (diff < dmin) dmin = diff;
      if (diff > dmax) dmax = diff;
    end
    $display("INFO: t_A - t_B: mean %f ns, min %f, max %f, spread %f ns; slopes %f / %f",
             dsum / real'(STEPS), dmin, dmax, dmax - dmin, slope[0], slope[1]);
    check(dmax - dmin < 2.0 * 0.230 + 0.15, "difference between sensors constant");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
