// tdc_pkg: types and constants shared by the sensor FPGA design.
//
// The readout words written to the 36-bit intermediate FIFO carry a 4-bit tag in
// bits [35:32]; the layout of each word kind is given below. The layout is this
// design's own choice: the data path only needs to insert a cycle word at every
// PPS and, per event, a timestamp, the TDC result and the zero-suppressed charges.
`timescale 1ns / 1fs
package tdc_pkg;

  localparam int unsigned WORD_W  = 36;   // width of the IDT 72V36110 FIFO
  localparam int unsigned TS_W    = 27;   // 1 s / 10 ns = 1e8 < 2^27
  localparam int unsigned CYCLE_W = 8;    // DAQ cycle number, 0..255
  localparam int unsigned CNT_W   = 8;    // N0 / N1 / N_cal;0 counters
  localparam int unsigned ADC_W   = 12;   // ADC sample width
  localparam int unsigned OCC_W   = 18;   // FIFO occupancy, up to 131072 words

  typedef logic [WORD_W-1:0] word_t;

  // Word tags, bits [35:32].
  typedef enum logic [3:0] {
    TAG_CYCLE = 4'h1,  // [7:0] new DAQ cycle number
    TAG_EVENT = 4'h2,  // [26:0] coarse timestamp (10 ns units within the cycle)
    TAG_TDC   = 4'h3,  // [16] valid, [15:8] N1, [7:0] N0
    TAG_ADC   = 4'h4   // [17:12] channel (chip*32 + ch), [11:0] ADC value
  } tag_e;

  // Source of the trigger fed to the TDC and the readout.
  typedef enum logic [1:0] {
    TRIG_FE_OR  = 2'd0,  // either front-end chip
    TRIG_FE_AND = 2'd1,  // fast coincidence of the two chips
    TRIG_EXT    = 2'd2   // external trigger input
  } trig_src_e;

  typedef enum logic [1:0] {
    CAL_NONE = 2'd0,
    CAL_T0   = 2'd1,     // count T0 periods over N_ref clock periods
    CAL_DT   = 2'd2      // count T0 periods between phase detections
  } cal_mode_e;

  // Slow-control settings of the sensor FPGA.
  typedef struct packed {
    trig_src_e        trig_src;
    logic             led_en;
    logic [15:0]      led_period;     // clock periods between LED pulses
    logic [7:0]       hold_delay;     // trigger-to-hold delay, 10 ns units
    logic [ADC_W-1:0] zs_threshold;   // keep samples strictly above this
    logic [OCC_W-1:0] irq_threshold;  // FIFO words that raise the IRQ (0: off)
    cal_mode_e        cal_mode;
    logic             cal_start;      // one-cycle pulse
    logic [7:0]       n_ref;          // N_ref for the T0 calibration
  } cfg_t;

  typedef struct packed {
    logic [CYCLE_W-1:0] cycle;
    logic [TS_W-1:0]    timestamp;
    logic               readout_busy;
    logic               cal_busy;
    logic               cal_done;
    logic               cal_error;
    logic [CNT_W-1:0]   n_cal0;
    logic               cal0_ovf;
    logic [15:0]        n_cal1_sum;
    logic [OCC_W-1:0]   fifo_words;
    logic [15:0]        dropped_words;
  } status_t;

  function automatic word_t make_word(tag_e tag, logic [31:0] payload);
    return {tag, payload};
  endfunction

endpackage
