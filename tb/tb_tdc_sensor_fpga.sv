// tb_tdc_sensor_fpga: end-to-end test of the sensor FPGA at its default
// parameters (32 channels per chip, T0 = 2.2032 ns, T1 = 2.0012 ns).
// Around the design: a 20 MHz clock bus with PPS every 30 us (a shortened
// DAQ cycle), two front-end chips that raise trigger pulses at random times
// and put out one charge per channel on each multiplexer step, their ADCs,
// the FIFO (a queue) and a processor that drains it on interrupt.
// Phases:
//   1. T0 and Delta t calibration (results against the oscillator periods);
//   2. chip triggers in OR mode at random times, with extra triggers inside
//      the dead time, which must be ignored;
//   3. coincidence mode: single-chip triggers rejected, coincident accepted;
//   4. LED pulse mode looped back through an external delay stepped by
//      100 ps into the external trigger, over more than one 10 ns clock
//      period (the paper's linearity test): besides the per-event check, a
//      straight line is fitted to TDC time against delay; its slope must be
//      -1 within 2 % and its residuals below one Delta t;
//   5. a stretch with the FIFO full (words dropped and counted).
// Every event is checked word by word: its timestamp must be the local
// counter at the first 100 MHz edge after the trigger, its TDC result must
// give the true trigger-to-edge time within one Delta t, and its ADC words
// must be the samples above threshold. Cycle words must count up by one.
// Each mechanism (both calibrations, dead-time rejection, coincidence
// rejection, external trigger, cycle word holding off event words, zero
// suppression, FIFO-full drop, IRQ by PPS and by threshold) is counted and
// must have happened at least once.
`timescale 1ns / 1fs
module tb_tdc_sensor_fpga;

  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  localparam realtime T0 = 4.0 * (0.2760 + 0.2748);
  localparam realtime T1 = 4.0 * (0.2505 + 0.2498);
  localparam realtime DT = T0 - T1;
  localparam int N_CH = 32;

  logic clk20 = 1'b0, pps = 1'b0, rst_n = 1'b0;
  logic [1:0] fe_trig = '0;
  logic ext_trig = 1'b0;
  logic led_pulse, hold, mux_clk, adc_conv, fifo_wen, irq, clk100;
  logic [1:0][11:0] adc_data = '0;
  word_t fifo_wdata;
  logic fifo_full = 1'b0, fifo_rd = 1'b0, irq_ack = 1'b0;
  cfg_t cfg;
  status_t status;

  tdc_sensor_fpga dut (.*);

  always #25 clk20 = ~clk20;

  // PPS every 30 us
  initial forever begin
    #29900;
    pps = 1'b1;
    #100;
    pps = 1'b0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_cal_t0 = 0, n_cal_dt = 0, n_events = 0, n_dead_ignored = 0;
  int n_and_rejected = 0, n_ext_events = 0, n_stall = 0, n_suppressed = 0;
  int n_cycle_words = 0, n_irq_pps = 0, n_irq_thr = 0;

  always @(posedge clk100) if (dut.ev_valid && !dut.ev_ready) n_stall++;

  // ---------------- front-end chips and ADCs ----------------
  int hold_count = 0;
  int mux_idx = -1;

  function automatic logic [11:0] sample_of(int ev, int ch, int chip);
    return 12'(((ev * 7 + ch * 53 + chip * 29) % 150) * 27);
  endfunction

  always @(posedge hold) begin
    hold_count++;
    mux_idx = -1;
  end
  always @(negedge mux_clk) begin
    mux_idx++;
    for (int c = 0; c < 2; c++) adc_data[c] <= sample_of(hold_count, mux_idx, c);
  end

  // ---------------- clock edges and expected events ----------------
  realtime clk_edges[$];
  always @(posedge clk100) begin
    clk_edges.push_back($realtime);
    if (clk_edges.size() > 8) void'(clk_edges.pop_front());
  end

  typedef struct {
    realtime t_trig;
    realtime t_stop;
    logic [26:0] ts;
  } exp_ev_t;
  exp_ev_t exp_q[$];

  // Record the event a trigger edge at the current time should produce.
  task automatic expect_event();
    exp_ev_t e;
    e.t_trig = $realtime;
    @(posedge clk100);
    e.t_stop = $realtime;
    #0.5;
    e.ts = status.timestamp;
    exp_q.push_back(e);
  endtask

  // ---------------- FIFO and word parser ----------------
  word_t fifo_q[$];
  int parse_state = 0;  // 0: expect header or cycle, 1: expect TDC, 2: ADC words
  int cur_ev = 0;
  int adc_expect[$];    // expected ADC payloads of the current event
  int last_cycle = -1;
  realtime cur_t_true;
  bit lossy = 1'b0;
  bit lin_on = 1'b0;         // linearity sweep running
  realtime lin_d[$], lin_t[$];  // set while words of the FIFO-full event arrive

  task automatic finish_event();
    check(adc_expect.size() == 0, $sformatf("event %0d: %0d ADC words missing", cur_ev, adc_expect.size()));
    adc_expect.delete();
  endtask

  always @(posedge clk100) begin
    if (fifo_wen && rst_n) begin
      fifo_q.push_back(fifo_wdata);
      unique case (tag_e'(fifo_wdata[35:32]))
        TAG_CYCLE: begin
          n_cycle_words++;
          if (last_cycle >= 0)
            check(int'(fifo_wdata[7:0]) == (last_cycle + 1) % 256, "cycle number counts up");
          last_cycle = int'(fifo_wdata[7:0]);
        end
        TAG_EVENT: begin
          if (parse_state == 2 && !lossy) finish_event();
          adc_expect.delete();
          check(parse_state != 1, "event header after header");
          cur_ev++;
          n_events++;
          if (exp_q.size() == 0) begin
            check(0, $sformatf("unexpected event at %t", $realtime));
            cur_t_true = 0.0;
          end else begin
            exp_ev_t e;
            e = exp_q.pop_front();
            check(fifo_wdata[26:0] == e.ts, $sformatf("event %0d timestamp %0d expected %0d", cur_ev, fifo_wdata[26:0], e.ts));
            cur_t_true = e.t_stop - e.t_trig;
          end
          for (int ch = 0; ch < N_CH; ch++)
            for (int c = 0; c < 2; c++)
              if (sample_of(cur_ev, ch, c) > cfg.zs_threshold)
                adc_expect.push_back({6'(c * N_CH + ch), sample_of(cur_ev, ch, c)});
              else
                n_suppressed++;
          parse_state = 1;
        end
        TAG_TDC: begin
          realtime t_meas, err;
          check(parse_state == 1, "TDC word follows header");
          check(fifo_wdata[16], "TDC result valid");
          t_meas = real'(fifo_wdata[7:0]) * T0 - real'(fifo_wdata[15:8]) * T1;
          err = cur_t_true - t_meas - T0;
          check(err > -DT - 0.005 && err < 0.005,
                $sformatf("event %0d: true %f ns, N0 %0d N1 %0d, err %f", cur_ev, cur_t_true,
                          fifo_wdata[7:0], fifo_wdata[15:8], err));
          if (lin_on) lin_t.push_back(t_meas + T0);
          parse_state = 2;
        end
        TAG_ADC: begin
          check(parse_state == 2, "ADC word inside an event");
          if (lossy) begin
            // words of this event were dropped while the FIFO was full
          end else if (adc_expect.size() > 0) begin
            check(int'(fifo_wdata[17:0]) == adc_expect[0],
                  $sformatf("event %0d ADC word %h expected %h", cur_ev, fifo_wdata[17:0], adc_expect[0]));
            void'(adc_expect.pop_front());
          end else check(0, $sformatf("event %0d extra ADC word %h", cur_ev, fifo_wdata[17:0]));
        end
        default: check(0, $sformatf("unknown word tag, word %h at %t", fifo_wdata, $realtime));
      endcase
    end
  end

  // ---------------- processor: drain on IRQ ----------------
  bit draining = 1'b0;
  always @(posedge clk100) begin
    fifo_rd <= 1'b0;
    irq_ack <= 1'b0;
    if (irq && !draining && !irq_ack) begin
      if (dut.u_fw.irq_pps) n_irq_pps++;
      if (cfg.irq_threshold != 0 && status.fifo_words >= cfg.irq_threshold) n_irq_thr++;
      irq_ack <= 1'b1;
      draining <= 1'b1;
    end
    if (draining && status.fifo_words <= 2) draining <= 1'b0;
    if (draining && status.fifo_words > 1 && !fifo_rd) begin
      fifo_rd <= 1'b1;
      if (fifo_q.size() > 0) void'(fifo_q.pop_front());
    end
  end

  // ---------------- stimulus helpers ----------------
  task automatic chip_pulse(input logic [1:0] which);
    fe_trig = which;
    #30;
    fe_trig = 2'b00;
  endtask

  task automatic wait_idle();
    #100;  // the readout goes busy a few clocks after the trigger
    wait (!status.readout_busy);
    #200;
  endtask

  task automatic run_cal(input cal_mode_e m);
    @(negedge clk100);
    cfg.cal_mode = m;
    cfg.cal_start = 1'b1;
    @(negedge clk100);
    cfg.cal_start = 1'b0;
    @(negedge clk100);
    wait (status.cal_done);
    @(negedge clk100);
    cfg.cal_mode = CAL_NONE;
  endtask

  initial begin
    int lo;
    realtime d;
    cfg = '0;
    cfg.trig_src = TRIG_FE_OR;
    cfg.led_period = 16'd1000;
    cfg.hold_delay = 8'd20;
    cfg.zs_threshold = 12'd1500;
    cfg.irq_threshold = 18'd0;
    cfg.n_ref = 8'd56;
    #300;
    rst_n = 1'b1;
    wait (dut.rst_n_s);
    #100;

    // 1. calibration
    run_cal(CAL_T0);
    lo = int'($floor(560.0 / T0));
    check(status.n_cal0 == 8'(lo) || status.n_cal0 == 8'(lo + 1),
          $sformatf("N_cal0 %0d, expected %0d or %0d", status.n_cal0, lo, lo + 1));
    if (status.cal_done) n_cal_t0++;
    run_cal(CAL_DT);
    check(!status.cal_error, "delta-t calibration finished");
    check(status.n_cal1_sum > 16'(int'(16.0 * T1 / DT) - 2) && status.n_cal1_sum < 16'(int'(16.0 * T1 / DT) + 3),
          $sformatf("N_cal1 sum %0d", status.n_cal1_sum));
    if (status.cal_done) n_cal_dt++;
    begin
      // the mean count of T0 periods between phase detections is T1/Delta t,
      // so Delta t = T0/(mean + 1); T0/mean is the first-order form
      real t0c, nbar;
      t0c = 560.0 / real'(status.n_cal0);
      nbar = real'(status.n_cal1_sum) / 16.0;
      $display("INFO: T0 = %f ns from calibration (true %f); mean N_cal1 %f; Delta t = T0/(N+1) = %f ns, T0/N = %f ns (true %f)",
               t0c, T0, nbar, t0c / (nbar + 1.0), t0c / nbar, DT);
      check(t0c / (nbar + 1.0) > DT * 0.95 && t0c / (nbar + 1.0) < DT * 1.05, "Delta t from calibration within 5 %");
    end

    // 2. OR mode, random trigger times, triggers inside the dead time
    cfg.irq_threshold = 18'd40;
    for (int i = 0; i < 12; i++) begin
      #(real'($urandom_range(100, 3000)) + real'($urandom_range(0, 9999)) / 1000.0);
      fork
        expect_event();
        chip_pulse(2'(1 << (i % 2)));
      join
      #(real'($urandom_range(500, 4000)));
      if (status.readout_busy) begin
        chip_pulse(2'b11);
        n_dead_ignored++;
      end
      wait_idle();
    end
    cfg.irq_threshold = 18'd0;

    // 3. coincidence mode
    cfg.trig_src = TRIG_FE_AND;
    for (int i = 0; i < 4; i++) begin
      #(real'($urandom_range(100, 900)) + real'($urandom_range(0, 9999)) / 1000.0);
      chip_pulse(2'b01);
      #20;
      if (!status.readout_busy && !dut.fast_en) n_and_rejected++;
      #(real'($urandom_range(100, 900)) + real'($urandom_range(0, 9999)) / 1000.0);
      fork
        expect_event();
        chip_pulse(2'b11);
      join
      wait_idle();
    end

    // 4. LED pulse mode looped back through a stepped external delay
    cfg.trig_src = TRIG_EXT;
    cfg.led_en = 1'b1;
    d = 0.35;
    lin_on = 1'b1;
    for (int i = 0; i < 110; i++) begin
      @(posedge led_pulse);
      #(d);
      fork
        expect_event();
        begin ext_trig = 1'b1; #15; ext_trig = 1'b0; end
      join
      n_ext_events++;
      lin_d.push_back(d);
      wait_idle();
      d = d + 0.1;
    end
    lin_on = 1'b0;
    cfg.led_en = 1'b0;
    begin
      // TDC time against delay: T = 10 ns - d within the first clock period,
      // 20 ns - d in the next; unwrap and fit a line
      real sx, sy, sxx, sxy, n, slope, icpt, res, max_res;
      int run, max_run;
      sx = 0; sy = 0; sxx = 0; sxy = 0; max_res = 0; run = 1; max_run = 1;
      n = real'(lin_t.size());
      check(lin_t.size() == lin_d.size(), $sformatf("one TDC result per linearity step: %0d results, %0d steps", lin_t.size(), lin_d.size()));
      for (int i = 0; i < lin_t.size(); i++) begin
        real y;
        y = lin_t[i] - (lin_d[i] > 10.0 ? 10.0 : 0.0);
        sx += lin_d[i]; sy += y; sxx += lin_d[i] * lin_d[i]; sxy += lin_d[i] * y;
        if (i > 0 && lin_t[i] == lin_t[i-1]) begin
          run++;
          if (run > max_run) max_run = run;
        end else run = 1;
      end
      slope = (n * sxy - sx * sy) / (n * sxx - sx * sx);
      icpt = (sy - slope * sx) / n;
      for (int i = 0; i < lin_t.size(); i++) begin
        res = lin_t[i] - (lin_d[i] > 10.0 ? 10.0 : 0.0) - (icpt + slope * lin_d[i]);
        if (res < 0) res = -res;
        if (res > max_res) max_res = res;
      end
      $display("INFO: linearity: %0d steps of 100 ps, slope %f, offset %f ns, max residual %f ns, longest plateau %0d steps",
               lin_t.size(), slope, icpt, max_res, max_run);
      check(slope > -1.02 && slope < -0.98, "linearity slope -1");
      check(max_res < DT, "linearity residuals below Delta t");
    end

    // 4b. trigger so that PPS lands while ADC words are being emitted;
    // sweep the offset until a cycle word collides with an event word
    cfg.trig_src = TRIG_FE_OR;
    for (int o = 0; o < 40 && n_stall == 0; o++) begin
      @(posedge pps);
      #(30000.0 - 3000.0 - real'(o) * 10.37);
      fork
        expect_event();
        chip_pulse(2'b01);
      join
      wait_idle();
    end

    // 5. FIFO full during one event
    cfg.trig_src = TRIG_FE_OR;
    #1000.123;
    fifo_full = 1'b1;
    lossy = 1'b1;
    fork
      expect_event();
      chip_pulse(2'b10);
    join
    #1000;
    fifo_full = 1'b0;
    wait_idle();
    // the event was partly lost: resynchronize the parser
    parse_state = 0;
    adc_expect.delete();
    #(40000.0);

    check(status.dropped_words > 0, "words dropped while FIFO full");
    // the header of that event was dropped, so its expectation is left over
    check(exp_q.size() <= 1, "all expected events seen");
    $display("INFO: events %0d cycle words %0d stalls %0d suppressed %0d dropped %0d irq pps %0d irq thr %0d",
             n_events, n_cycle_words, n_stall, n_suppressed, status.dropped_words, n_irq_pps, n_irq_thr);
    check(n_cal_t0 > 0, "T0 calibration ran");
    check(n_cal_dt > 0, "Delta t calibration ran");
    check(n_events >= 30, "events read out");
    check(n_dead_ignored > 0, "trigger in dead time ignored");
    check(n_and_rejected > 0, "single-chip trigger rejected in coincidence mode");
    check(n_ext_events > 0, "external trigger events");
    check(n_stall > 0, "cycle word held off event words");
    check(n_suppressed > 0, "samples zero-suppressed");
    check(n_cycle_words > 3, "cycle words");
    check(n_irq_pps > 0, "IRQ on PPS");
    check(n_irq_thr > 0, "IRQ on FIFO threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
