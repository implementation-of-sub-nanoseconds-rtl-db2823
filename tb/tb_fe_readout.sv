// tb_fe_readout: the readout sequencer with models of the TDC flags, the two
// front-end chips' multiplexers and their ADCs, and a FIFO side that accepts
// words at random. For each event it checks the word stream
//   EVENT(timestamp at the stop edge), TDC(valid, N1, N0), then one ADC word
//   per chip and channel whose sample is above the threshold, in channel
//   order, with the sample value the chip model put out for that channel;
// and the timing: hold rises hold_delay+2 clocks after the stop, 32 ADC
// conversions 20 clocks (200 ns, 5 MHz) apart when the FIFO never stalls,
// CLEAR to the TDC after its word, TDC word with valid=0 when READY never
// comes, no readout while disabled.
`timescale 1ns / 1fs
module tb_fe_readout;

  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  localparam int N_CH = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic enable = 1'b1;
  logic [26:0] timestamp = '0;
  logic [7:0] hold_delay = 8'd15;
  logic [11:0] zs_threshold = 12'd1000;
  logic tdc_stopped = 1'b0, tdc_ready = 1'b0;
  logic [7:0] tdc_n0 = '0, tdc_n1 = '0;
  logic tdc_clear, hold, mux_clk, adc_conv, word_valid, busy;
  logic [1:0][11:0] adc_data = '0;
  word_t word;
  logic word_ready = 1'b1;

  fe_readout #(.N_CH(N_CH), .N_CHIPS(2), .SLOT_CYCLES(20), .TDC_TIMEOUT(64)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [11:0] sample_of(int ev, int ch, int chip);
    return 12'(((ev * 13 + ch * 37 + chip * 101) % 200) * 20);
  endfunction

  int clk_idx = 0;
  always @(posedge clk) begin
    clk_idx++;
    timestamp <= timestamp + 1'b1;
  end

  // front-end chips: multiplexer steps on each mux_clk fall after hold
  int mux_idx = -1;
  int ev_no = 0;
  always @(posedge hold) mux_idx = -1;
  always @(negedge mux_clk) begin
    mux_idx++;
    for (int c = 0; c < 2; c++) adc_data[c] <= sample_of(ev_no, mux_idx, c);
  end

  // TDC model: cleared by tdc_clear
  always @(posedge tdc_clear) begin
    tdc_stopped <= 1'b0;
    tdc_ready <= 1'b0;
  end

  // FIFO side
  bit random_ready = 1'b0;
  always @(posedge clk) word_ready <= random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
  word_t got[$];
  always @(posedge clk) if (word_valid && word_ready) got.push_back(word);

  int conv_at[$];
  always @(posedge clk) if (adc_conv) conv_at.push_back(clk_idx);
  int hold_at;
  logic hold_q = 1'b0;
  always @(posedge clk) begin
    #1;
    if (hold && !hold_q) hold_at = clk_idx;
    hold_q = hold;
  end

  task automatic event_run(input bit ready_comes, input bit stall);
    int stop_idx;
    logic [26:0] exp_ts;
    int k;
    ev_no++;
    random_ready = stall;
    got.delete();
    conv_at.delete();
    @(posedge clk);
    tdc_stopped <= 1'b1;
    #1;
    exp_ts = timestamp;
    stop_idx = clk_idx;
    tdc_n0 <= 8'($urandom_range(1, 20));
    tdc_n1 <= 8'($urandom_range(0, 11));
    if (ready_comes) begin
      #23.7 tdc_ready <= 1'b1;
    end
    wait (busy);
    wait (!busy);
    @(posedge clk);
    check(hold_at - stop_idx == int'(hold_delay) + 2,
          $sformatf("hold %0d clocks after stop", hold_at - stop_idx));
    check(!hold, "hold released");
    check(conv_at.size() == N_CH, $sformatf("%0d conversions", conv_at.size()));
    if (!stall)
      for (int i = 1; i < conv_at.size(); i++)
        check(conv_at[i] - conv_at[i - 1] == 20, "conversion every 20 clocks (5 MHz)");
    // word stream
    check(got.size() >= 2, "header and TDC word");
    if (got.size() >= 2) begin
      check(got[0] == make_word(TAG_EVENT, 32'(exp_ts)),
            $sformatf("header %h expected ts %0d", got[0], exp_ts));
      check(got[1][35:32] == TAG_TDC && got[1][16] == ready_comes &&
            (!ready_comes || (got[1][7:0] == tdc_n0 && got[1][15:8] == tdc_n1)),
            $sformatf("TDC word %h", got[1]));
    end
    k = 2;
    for (int ch = 0; ch < N_CH; ch++)
      for (int c = 0; c < 2; c++)
        if (sample_of(ev_no, ch, c) > zs_threshold) begin
          if (k < got.size())
            check(got[k] == make_word(TAG_ADC, {14'd0, 6'(c * N_CH + ch), sample_of(ev_no, ch, c)}),
                  $sformatf("ADC word %0d = %h, chip %0d ch %0d", k, got[k], c, ch));
          else check(0, "ADC word missing");
          k++;
        end
    check(k == got.size(), $sformatf("%0d words, expected %0d", got.size(), k));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3) @(posedge clk);
    event_run(1'b1, 1'b0);
    hold_delay = 8'd3;
    event_run(1'b1, 1'b1);
    zs_threshold = 12'd3000;
    event_run(1'b0, 1'b0);
    zs_threshold = 12'd0;
    hold_delay = 8'd40;
    event_run(1'b1, 1'b1);
    // disabled: a stop does not start a readout
    enable = 1'b0;
    @(posedge clk);
    tdc_stopped <= 1'b1;
    repeat (50) @(posedge clk);
    check(!busy && !hold, "no readout while disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
