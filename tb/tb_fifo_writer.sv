// tb_fifo_writer: random event words offered with a valid/ready handshake,
// cycle flags at random moments, random read strobes and a period with the
// FIFO full. Checks: every event word is written once and in order (except
// those dropped while full, which must equal the drop counter); every cycle
// flag produces its cycle word exactly two clocks later (never delayed by
// events); event words are held off while a cycle word is written; the
// occupancy equals writes minus reads; the IRQ follows a cycle word until
// acknowledged and follows the occupancy threshold.
`timescale 1ns / 1fs
module tb_fifo_writer;

  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic pps_flag = 1'b0;
  logic [7:0] cycle = '0;
  word_t ev_word = '0;
  logic ev_valid = 1'b0;
  logic ev_ready;
  word_t fifo_wdata;
  logic fifo_wen;
  logic fifo_full = 1'b0, fifo_rd = 1'b0;
  logic [17:0] irq_threshold = '0;
  logic irq_ack = 1'b0, irq;
  logic [17:0] occupancy;
  logic [15:0] dropped;

  fifo_writer dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int next_ev = 1;       // payload of the next event word to offer
  int exp_ev = 1;        // payload of the next event word expected in the FIFO
  int n_writes = 0, n_reads = 0, n_drop_exp = 0, n_stalls = 0, n_cycle_words = 0;
  int pps_at[$];         // clock index of each cycle flag
  int cyc_no = 0;
  int clk_idx = 0;
  bit gen_pps = 1'b1;
  int sent_while_full[$];

  // Source of event words: valid random, word held until accepted.
  always @(posedge clk) begin
    clk_idx++;
    if (rst_n) begin
      if (ev_valid && ev_ready && fifo_full) sent_while_full.push_back(int'(ev_word[31:0]));
      if (ev_valid && !ev_ready) n_stalls++;
      if (!ev_valid || ev_ready) begin
        if ($urandom_range(0, 2) != 0) begin
          ev_valid <= 1'b1;
          ev_word  <= make_word(TAG_ADC, 32'(next_ev));
          next_ev++;
        end else begin
          ev_valid <= 1'b0;
        end
      end
      // cycle flags
      pps_flag <= 1'b0;
      if (gen_pps && $urandom_range(0, 40) == 0 && !pps_flag) begin
        pps_flag <= 1'b1;
        cyc_no = (cyc_no + 1) % 256;
        cycle <= 8'(cyc_no);
        pps_at.push_back(clk_idx);
      end
      fifo_rd <= ($urandom_range(0, 3) == 0) && occupancy > 2;
      if (fifo_rd && occupancy != 0) n_reads++;
    end
  end

  // Sink: check the written words.
  always @(posedge clk) begin
    if (fifo_wen && rst_n) begin
      n_writes++;
      if (fifo_wdata[35:32] == TAG_CYCLE) begin
        n_cycle_words++;
        check(pps_at.size() > 0 && clk_idx - pps_at[0] == 2,
              $sformatf("cycle word %0d clocks after its flag", pps_at.size() > 0 ? clk_idx - pps_at[0] : -1));
        if (pps_at.size() > 0) void'(pps_at.pop_front());
      end else begin
        while (sent_while_full.size() > 0 && sent_while_full[0] == exp_ev) begin
          void'(sent_while_full.pop_front());
          exp_ev++;
          n_drop_exp++;
        end
        check(int'(fifo_wdata[31:0]) == exp_ev,
              $sformatf("event word %0d expected %0d", fifo_wdata[31:0], exp_ev));
        exp_ev = int'(fifo_wdata[31:0]) + 1;
      end
    end
    if (fifo_wen === 1'b0 && pps_at.size() > 0 && clk_idx - pps_at[0] == 2 && !fifo_full) begin
      failures++;
      $display("FAIL: cycle word missing");
    end
    if (pps_at.size() > 0 && clk_idx - pps_at[0] > 2) void'(pps_at.pop_front());
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3000) @(posedge clk);
    // occupancy against writes - reads
    @(negedge clk);
    check(int'(occupancy) == n_writes - n_reads + int'(fifo_wen),
          $sformatf("occupancy %0d expected %0d", occupancy, n_writes - n_reads + int'(fifo_wen)));
    // FIFO full: words dropped and counted
    fifo_full = 1'b1;
    repeat (200) @(posedge clk);
    @(negedge clk);
    fifo_full = 1'b0;
    repeat (300) @(posedge clk);
    @(negedge clk);
    check(dropped > 0, "words dropped while full");
    check(int'(dropped) >= sent_while_full.size() + n_drop_exp - 5, "drop counter");
    check(n_stalls > 0, "event words were held off by cycle words");
    check(n_cycle_words > 50, $sformatf("%0d cycle words", n_cycle_words));
    // IRQ on cycle word, held until acknowledged
    irq_ack = 1'b1;
    @(negedge clk);
    irq_ack = 1'b0;
    wait (pps_flag);
    gen_pps = 1'b0;
    repeat (3) @(negedge clk);
    check(irq, "IRQ after cycle word");
    repeat (5) @(negedge clk);
    check(irq, "IRQ held until acknowledged");
    irq_ack = 1'b1;
    @(negedge clk);
    irq_ack = 1'b0;
    @(negedge clk);
    check(!irq, "IRQ cleared by acknowledge");
    // occupancy threshold
    irq_threshold = occupancy + 18'd1000;
    @(negedge clk);
    check(!irq, "no threshold IRQ below threshold");
    irq_threshold = (occupancy > 1) ? occupancy - 18'd1 : 18'd1;
    @(negedge clk);
    check(irq, "threshold IRQ");
    $display("INFO: writes %0d reads %0d cycle words %0d stalls %0d dropped %0d",
             n_writes, n_reads, n_cycle_words, n_stalls, dropped);
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
