// fe_readout: event readout sequencer of the sensor FPGA.
//
// One event goes through these steps, all in the 100 MHz clock domain:
//   1. IDLE: the TDC is armed (tdc_clear low). The TDC's stop flip-flop
//      (tdc_stopped) rises on the first clock edge after a trigger; the
//      sequencer then latches the local timestamp, which is the counter value
//      of that stop edge. The event time is timestamp*10 ns minus the TDC time.
//   2. WAIT_HOLD: waits hold_delay clocks, then asserts the track&hold of the
//      front-end chips (the paper's "adjustable delay").
//   3. HEADER: writes the event word (tag EVENT, timestamp).
//   4. TDC: waits for the TDC READY flag (synchronized by two flip-flops) and
//      writes N0/N1 with a valid bit; if READY has not come TDC_TIMEOUT clocks
//      after the stop, writes the word with valid = 0. The TDC is then held in
//      CLEAR until the sequencer returns to IDLE, so triggers during the dead
//      time are ignored.
//   5. CONVERT: for each of N_CH channels a slot of SLOT_CYCLES clocks (200 ns,
//      5 MHz): mux_clk rests high and is low during the first half of each
//      slot (N low pulses, as in the paper's front-end timing diagram); its
//      falling edge steps the chips' analog multiplexers, adc_conv pulses at
//      mid-slot, and the ADC
//      outputs of all N_CHIPS chips are captured on the last clock of the slot.
//      Captured samples above zs_threshold are written as ADC words during the
//      next slot; if some are still waiting when the next capture is due (the
//      FIFO writer gave the slot to a cycle word), the slot timer stalls.
//   6. DONE: hold is released, then back to IDLE.
// Dead time is about hold_delay + 4 + N_CH*SLOT_CYCLES clocks (6.4 us for 32
// channels at 5 MHz, as in the paper). The step list, the 5 MHz rate and the
// zero suppression follow the paper; the word format, the ADC timing inside a
// slot, parallel readout of both chips and the timeout are this design's
// choices. The word interface is valid/ready: a word is transferred on a clock
// where both are high. Reset: synchronous, active low. Bit 35 of word (top
// bit of the 4-bit tag) is always 0 here, because the tags this block emits
// are 2, 3 and 4; the bit is kept so that all word sources share one format.
`timescale 1ns / 1fs
module fe_readout
  import tdc_pkg::*;
#(
  parameter int unsigned N_CH        = 32,
  parameter int unsigned N_CHIPS     = 2,
  parameter int unsigned SLOT_CYCLES = 20,
  parameter int unsigned TDC_TIMEOUT = 64
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           enable,       // low during calibration
  input  logic [TS_W-1:0]                timestamp,
  input  logic [7:0]                     hold_delay,
  input  logic [ADC_W-1:0]               zs_threshold,
  // TDC
  input  logic                           tdc_stopped,
  input  logic                           tdc_ready,
  input  logic [CNT_W-1:0]               tdc_n0,
  input  logic [CNT_W-1:0]               tdc_n1,
  output logic                           tdc_clear,
  // front-end chips and ADCs
  output logic                           hold,
  output logic                           mux_clk,
  output logic                           adc_conv,
  input  logic [N_CHIPS-1:0][ADC_W-1:0]  adc_data,
  // event words
  output word_t                          word,
  output logic                           word_valid,
  input  logic                           word_ready,
  output logic                           busy
);

  localparam int unsigned CH_W   = (N_CH > 1) ? $clog2(N_CH) : 1;
  localparam int unsigned SLOT_W = $clog2(SLOT_CYCLES + 1);
  localparam int unsigned CHIP_W = (N_CHIPS > 1) ? $clog2(N_CHIPS) : 1;
  localparam int unsigned TO_W   = $clog2(TDC_TIMEOUT + 1);

  typedef enum logic [2:0] {
    S_IDLE, S_WAIT_HOLD, S_HEADER, S_TDC, S_CONVERT, S_DRAIN, S_DONE
  } state_e;

  state_e                        state;
  logic [TS_W-1:0]               ts_lat;
  logic [7:0]                    hold_cnt;
  logic [TO_W-1:0]               to_cnt;
  logic [1:0]                    ready_sync;
  logic [CH_W-1:0]               ch;
  logic [SLOT_W-1:0]             slot;
  logic [N_CHIPS-1:0][ADC_W-1:0] sample;
  logic [N_CHIPS-1:0]            pending;
  logic [CH_W-1:0]               sample_ch;
  logic                          tdc_done;
  logic                          capture;
  logic [CHIP_W-1:0]             sel_chip;
  logic                          emit;

  always_ff @(posedge clk) begin
    if (!rst_n) ready_sync <= '0;
    else        ready_sync <= {ready_sync[0], tdc_ready};
  end

  assign tdc_done = ready_sync[1] || (to_cnt >= TO_W'(TDC_TIMEOUT));

  // Lowest chip with a sample waiting.
  always_comb begin
    sel_chip = '0;
    for (int i = N_CHIPS - 1; i >= 0; i--) begin
      if (pending[i]) sel_chip = CHIP_W'(i);
    end
  end

  always_comb begin
    word       = '0;
    word_valid = 1'b0;
    unique case (state)
      S_HEADER: begin
        word_valid = 1'b1;
        word       = make_word(TAG_EVENT, 32'(ts_lat));
      end
      S_TDC: begin
        word_valid = tdc_done;
        word       = make_word(TAG_TDC, {15'd0, ready_sync[1], 8'(tdc_n1), 8'(tdc_n0)});
      end
      S_CONVERT, S_DRAIN: begin
        word_valid = |pending;
        word       = make_word(TAG_ADC, {14'd0,
                                         6'(32'(sel_chip) * N_CH + 32'(sample_ch)),
                                         12'(sample[sel_chip])});
      end
      default: ;
    endcase
  end

  assign emit    = word_valid && word_ready;
  // Capture on the last clock of a slot, unless samples of the previous slot
  // still wait for the FIFO (or leave this slot now).
  assign capture = (state == S_CONVERT) && (slot == SLOT_W'(SLOT_CYCLES - 1)) &&
                   (pending == '0 || (emit && (pending & ~(N_CHIPS'(1) << sel_chip)) == '0));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ts_lat    <= '0;
      hold_cnt  <= '0;
      to_cnt    <= '0;
      ch        <= '0;
      slot      <= '0;
      sample    <= '0;
      pending   <= '0;
      sample_ch <= '0;
      hold      <= 1'b0;
      tdc_clear <= 1'b0;
    end else begin
      if (state != S_IDLE && to_cnt < TO_W'(TDC_TIMEOUT)) to_cnt <= to_cnt + 1'b1;
      if (emit && (state == S_CONVERT || state == S_DRAIN)) pending[sel_chip] <= 1'b0;

      unique case (state)
        S_IDLE: begin
          tdc_clear <= 1'b0;
          if (enable && tdc_stopped) begin
            ts_lat   <= timestamp;
            hold_cnt <= '0;
            to_cnt   <= '0;
            state    <= S_WAIT_HOLD;
          end
        end
        S_WAIT_HOLD: begin
          if (hold_cnt >= hold_delay) begin
            hold  <= 1'b1;
            state <= S_HEADER;
          end else begin
            hold_cnt <= hold_cnt + 1'b1;
          end
        end
        S_HEADER: begin
          if (word_ready) state <= S_TDC;
        end
        S_TDC: begin
          if (emit) begin
            tdc_clear <= 1'b1;
            ch        <= '0;
            slot      <= '0;
            state     <= S_CONVERT;
          end
        end
        S_CONVERT: begin
          if (slot != SLOT_W'(SLOT_CYCLES - 1)) begin
            slot <= slot + 1'b1;
          end else if (capture) begin
            for (int i = 0; i < N_CHIPS; i++) begin
              sample[i]  <= adc_data[i];
              pending[i] <= (adc_data[i] > zs_threshold);
            end
            sample_ch <= ch;
            slot      <= '0;
            if (ch == CH_W'(N_CH - 1)) state <= S_DRAIN;
            else                       ch    <= ch + 1'b1;
          end
        end
        S_DRAIN: begin
          if (pending == '0 || (emit && (pending & ~(N_CHIPS'(1) << sel_chip)) == '0)) begin
            hold  <= 1'b0;
            state <= S_DONE;
          end
        end
        S_DONE: begin
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign mux_clk  = !((state == S_CONVERT) && (slot < SLOT_W'(SLOT_CYCLES / 2)));
  assign adc_conv = (state == S_CONVERT) && (slot == SLOT_W'(SLOT_CYCLES / 2));
  assign busy     = (state != S_IDLE);

endmodule
