// tdc_sensor_fpga: the readout FPGA of one detection plane, with the
// ring-oscillator vernier TDC that refines the 10 ns event timestamps.
//
// Blocks and connections:
//   pll_x5            20 MHz clock-bus CLK -> local 100 MHz clock (clk100).
//   timestamp_counter 100 MHz counter reset by each PPS, 8-bit cycle number,
//                     cycle flag.
//   trigger_logic     OR / coincidence of the two front-end chips, or the
//                     external trigger -> asynchronous trigger; LED pulses.
//   vernier_tdc       + two ring_oscillator instances (slow T0, fast T1):
//                     measures trigger-to-next-clk100-edge time.
//   tdc_calibration   T0 and Delta t calibration; owns the TDC while busy.
//   fe_readout        timestamp latch, hold, TDC read/clear, 32-channel
//                     multiplexed readout at 5 MHz, zero suppression, words.
//   fifo_writer       cycle word in priority, event words, external FIFO
//                     write port, occupancy and IRQ.
// The front-end chips, ADCs, FIFO chip, processor and clock decoder are
// outside; their signals are ports. Configuration and status are struct ports
// standing for the processor's slow-control registers.
//
// Because the two oscillators are delay models, this top simulates the whole
// sensor but is not itself synthesizable; every other block is. The oscillator
// periods are parameters (uniform stage delays): T0 = 4*(SLOW_TPLH+SLOW_TPHL),
// T1 = 4*(FAST_TPLH+FAST_TPHL); defaults give T0 = 2.2032 ns, T1 = 2.0012 ns,
// Delta t = 0.202 ns, near the paper's typical 2.2 ns and 0.2 ns.
//
// Reset: rst_n (asynchronous input) is combined with the PLL lock and
// synchronized to clk100; the design runs once both are high. While in
// reset the TDC clear line is pulsed at 20 MHz (clr_tgl) rather than held
// high, so every asynchronously cleared TDC flip-flop sees a clear edge
// whatever state it powered up in (own choice; a held level would leave an
// edge-modelled flip-flop that powered up set, set).
// Event time within the cycle: timestamp*10 ns - (N0*T0 - N1*T1 + T0), up to
// the fixed cable and synchronizer delays that the calibration removes.
`timescale 1ns / 1fs
module tdc_sensor_fpga
  import tdc_pkg::*;
#(
  parameter realtime SLOW_TPLH = 0.2760,
  parameter realtime SLOW_TPHL = 0.2748,
  parameter realtime FAST_TPLH = 0.2505,
  parameter realtime FAST_TPHL = 0.2498,
  parameter int unsigned N_CH  = 32
) (
  input  logic                    clk20,
  input  logic                    pps,
  input  logic                    rst_n,
  // triggers
  input  logic [1:0]              fe_trig,
  input  logic                    ext_trig,
  output logic                    led_pulse,
  // front-end chips and ADCs
  output logic                    hold,
  output logic                    mux_clk,
  output logic                    adc_conv,
  input  logic [1:0][ADC_W-1:0]   adc_data,
  // external FIFO
  output word_t                   fifo_wdata,
  output logic                    fifo_wen,
  input  logic                    fifo_full,
  input  logic                    fifo_rd,
  // processor
  output logic                    irq,
  input  logic                    irq_ack,
  input  cfg_t                    cfg,
  output status_t                 status,
  output logic                    clk100
);

  // ---------------- clocking and reset ----------------
  logic pll_locked;
  logic [1:0] rst_sync;
  logic rst_n_s;

  pll_x5 #(.MULT(5)) u_pll (
    .clk_in (clk20),
    .clk_out(clk100),
    .locked (pll_locked)
  );

  always_ff @(posedge clk100 or negedge rst_n) begin
    if (!rst_n) rst_sync <= '0;
    else        rst_sync <= {rst_sync[0], pll_locked};
  end
  assign rst_n_s = rst_sync[1];

  logic clr_tgl;
  always_ff @(posedge clk20) clr_tgl <= ~clr_tgl;

  // ---------------- time base ----------------
  logic [TS_W-1:0]    timestamp;
  logic [CYCLE_W-1:0] cycle;
  logic               pps_flag;

  timestamp_counter #(.TS_W(TS_W), .CYCLE_W(CYCLE_W)) u_ts (
    .clk      (clk100),
    .rst_n    (rst_n_s),
    .pps      (pps),
    .timestamp(timestamp),
    .cycle    (cycle),
    .pps_flag (pps_flag)
  );

  // ---------------- trigger ----------------
  logic trig;

  trigger_logic u_trig (
    .clk       (clk100),
    .rst_n     (rst_n_s),
    .fe_trig   (fe_trig),
    .ext_trig  (ext_trig),
    .src       (cfg.trig_src),
    .led_en    (cfg.led_en),
    .led_period(cfg.led_period),
    .trig_out  (trig),
    .led_pulse (led_pulse)
  );

  // ---------------- TDC and oscillators ----------------
  logic             cal_busy, cal_int_trig, cal_fast_inhibit, cal_clear;
  logic             ro_clear;
  logic             tdc_start, tdc_clear;
  logic             slow_en, fast_en, slow_osc, fast_osc;
  logic             tdc_phase, tdc_ready;
  logic [CNT_W-1:0] tdc_n0, tdc_n1;

  assign tdc_start = cal_busy ? cal_int_trig : trig;
  assign tdc_clear = ro_clear | cal_clear | (~rst_n_s & clr_tgl);

  ring_oscillator #(
    .TPLH0(SLOW_TPLH), .TPHL0(SLOW_TPHL), .TPLH1(SLOW_TPLH), .TPHL1(SLOW_TPHL),
    .TPLH2(SLOW_TPLH), .TPHL2(SLOW_TPHL), .TPLH3(SLOW_TPLH), .TPHL3(SLOW_TPHL)
  ) u_slow_osc (
    .enable (slow_en),
    .osc_out(slow_osc)
  );

  ring_oscillator #(
    .TPLH0(FAST_TPLH), .TPHL0(FAST_TPHL), .TPLH1(FAST_TPLH), .TPHL1(FAST_TPHL),
    .TPLH2(FAST_TPLH), .TPHL2(FAST_TPHL), .TPLH3(FAST_TPLH), .TPHL3(FAST_TPHL)
  ) u_fast_osc (
    .enable (fast_en),
    .osc_out(fast_osc)
  );

  vernier_tdc #(.CNT_W(CNT_W)) u_tdc (
    .start       (tdc_start),
    .clk_ref     (clk100),
    .clear       (tdc_clear),
    .fast_inhibit(cal_fast_inhibit),
    .slow_en     (slow_en),
    .fast_en     (fast_en),
    .slow_osc    (slow_osc),
    .fast_osc    (fast_osc),
    .phase       (tdc_phase),
    .ready       (tdc_ready),
    .n0          (tdc_n0),
    .n1          (tdc_n1)
  );

  // ---------------- calibration ----------------
  tdc_calibration #(.CAL0_W(CNT_W)) u_cal (
    .clk         (clk100),
    .rst_n       (rst_n_s),
    .mode        (cfg.cal_mode),
    .start       (cfg.cal_start),
    .n_ref       (cfg.n_ref),
    .slow_osc    (slow_osc),
    .fast_osc    (fast_osc),
    .phase       (tdc_phase),
    .int_trig    (cal_int_trig),
    .fast_inhibit(cal_fast_inhibit),
    .tdc_clear   (cal_clear),
    .busy        (cal_busy),
    .done        (status.cal_done),
    .error       (status.cal_error),
    .n_cal0      (status.n_cal0),
    .cal0_ovf    (status.cal0_ovf),
    .n_cal1_sum  (status.n_cal1_sum)
  );

  // ---------------- readout ----------------
  word_t ev_word;
  logic  ev_valid, ev_ready;

  fe_readout #(.N_CH(N_CH), .N_CHIPS(2)) u_ro (
    .clk         (clk100),
    .rst_n       (rst_n_s),
    .enable      (!cal_busy),
    .timestamp   (timestamp),
    .hold_delay  (cfg.hold_delay),
    .zs_threshold(cfg.zs_threshold),
    .tdc_stopped (fast_en),
    .tdc_ready   (tdc_ready),
    .tdc_n0      (tdc_n0),
    .tdc_n1      (tdc_n1),
    .tdc_clear   (ro_clear),
    .hold        (hold),
    .mux_clk     (mux_clk),
    .adc_conv    (adc_conv),
    .adc_data    (adc_data),
    .word        (ev_word),
    .word_valid  (ev_valid),
    .word_ready  (ev_ready),
    .busy        (status.readout_busy)
  );

  fifo_writer u_fw (
    .clk          (clk100),
    .rst_n        (rst_n_s),
    .pps_flag     (pps_flag),
    .cycle        (cycle),
    .ev_word      (ev_word),
    .ev_valid     (ev_valid),
    .ev_ready     (ev_ready),
    .fifo_wdata   (fifo_wdata),
    .fifo_wen     (fifo_wen),
    .fifo_full    (fifo_full),
    .fifo_rd      (fifo_rd),
    .irq_threshold(cfg.irq_threshold),
    .irq_ack      (irq_ack),
    .irq          (irq),
    .occupancy    (status.fifo_words),
    .dropped      (status.dropped_words)
  );

  assign status.cycle     = cycle;
  assign status.timestamp = timestamp;
  assign status.cal_busy  = cal_busy;

endmodule
