// tb_tdc_calibration: the calibration block driving a vernier TDC with its
// two ring oscillators (T0 = 2.2032 ns, T1 = 2.0012 ns), 100 MHz clock.
//   * T0 run with n_ref = 56 and 40: N_cal;0 must be floor(n_ref*10/T0) or one
//     more (the edge in flight when the oscillator is stopped), and the
//     resulting T0 = n_ref*10/N_cal;0 within T0/N_cal;0 of the true T0.
//   * Delta t run: the sum of 16 intervals must be 16*T1/Delta t within 2,
//     i.e. the mean number of T0 periods between phase detections.
//   * busy/done handshake and the duration of the T0 window.
`timescale 1ns / 1fs
module tb_tdc_calibration;

  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  localparam realtime S_LH = 0.2760, S_HL = 0.2748, F_LH = 0.2505, F_HL = 0.2498;
  localparam realtime T0 = 4.0 * (S_LH + S_HL);
  localparam realtime T1 = 4.0 * (F_LH + F_HL);
  localparam realtime DT = T0 - T1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cal_mode_e mode = CAL_NONE;
  logic start = 1'b0;
  logic [7:0] n_ref = 8'd56;
  logic int_trig, fast_inhibit, cal_clear, busy, done, error, cal0_ovf;
  logic [7:0] n_cal0;
  logic [15:0] n_cal1_sum;
  logic slow_en, fast_en, slow_osc, fast_osc, phase, ready;
  logic [7:0] n0, n1;

  ring_oscillator #(.TPLH0(S_LH), .TPHL0(S_HL), .TPLH1(S_LH), .TPHL1(S_HL),
                    .TPLH2(S_LH), .TPHL2(S_HL), .TPLH3(S_LH), .TPHL3(S_HL))
    u_slow (.enable(slow_en), .osc_out(slow_osc));
  ring_oscillator #(.TPLH0(F_LH), .TPHL0(F_HL), .TPLH1(F_LH), .TPHL1(F_HL),
                    .TPLH2(F_LH), .TPHL2(F_HL), .TPLH3(F_LH), .TPHL3(F_HL))
    u_fast (.enable(fast_en), .osc_out(fast_osc));

  vernier_tdc u_tdc (
    .start(int_trig), .clk_ref(clk), .clear(cal_clear), .fast_inhibit(fast_inhibit),
    .slow_en(slow_en), .fast_en(fast_en), .slow_osc(slow_osc), .fast_osc(fast_osc),
    .phase(phase), .ready(ready), .n0(n0), .n1(n1));

  tdc_calibration dut (
    .clk(clk), .rst_n(rst_n), .mode(mode), .start(start), .n_ref(n_ref),
    .slow_osc(slow_osc), .fast_osc(fast_osc), .phase(phase),
    .int_trig(int_trig), .fast_inhibit(fast_inhibit), .tdc_clear(cal_clear),
    .busy(busy), .done(done), .error(error), .n_cal0(n_cal0), .cal0_ovf(cal0_ovf),
    .n_cal1_sum(n_cal1_sum));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  realtime t_on, t_off;
  always @(posedge slow_en) t_on = $realtime;
  always @(negedge slow_en) t_off = $realtime;

  task automatic run(input cal_mode_e m);
    @(posedge clk);
    mode <= m;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    @(posedge clk);
    check(busy, "busy after start");
    fork
      begin wait (done); end
      begin repeat (10000) @(posedge clk); end
    join_any
    disable fork;
    @(posedge clk);
    check(done && !busy, "done and not busy");
  endtask

  initial begin
    int lo;
    realtime t0_est, dt_est;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int r = 0; r < 2; r++) begin
      n_ref = (r == 0) ? 8'd56 : 8'd40;
      run(CAL_T0);
      lo = int'($floor(real'(n_ref) * 10.0 / T0));
      check(n_cal0 == 8'(lo) || n_cal0 == 8'(lo + 1),
            $sformatf("N_cal0 %0d for n_ref %0d, expected %0d..%0d", n_cal0, n_ref, lo, lo + 1));
      check(t_off - t_on > real'(n_ref) * 10.0 - 0.01 && t_off - t_on < real'(n_ref) * 10.0 + 0.01,
            $sformatf("window %f ns", t_off - t_on));
      check(!cal0_ovf && !error, "no overflow");
      t0_est = real'(n_ref) * 10.0 / real'(n_cal0);
      check(t0_est - T0 < 1.1 * T0 / real'(n_cal0) && T0 - t0_est < 1.1 * T0 / real'(n_cal0),
            $sformatf("T0 estimate %f", t0_est));
      $display("INFO: n_ref %0d N_cal0 %0d T0 estimate %f ns (true %f)", n_ref, n_cal0, t0_est, T0);
    end
    run(CAL_DT);
    check(!error, "delta-t calibration completed");
    check(n_cal1_sum > 16'(int'(16.0 * T1 / DT) - 2) && n_cal1_sum < 16'(int'(16.0 * T1 / DT) + 3),
          $sformatf("N_cal1 sum %0d expected about %f", n_cal1_sum, 16.0 * T1 / DT));
    dt_est = T0 * 16.0 / real'(n_cal1_sum);
    $display("INFO: N_cal1 sum %0d, Delta t estimate %f ns (true %f)", n_cal1_sum, dt_est, DT);
    check(!slow_en && !fast_en, "oscillators stopped after calibration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
