// tb_timestamp_counter: 100 MHz clock, PPS pulses at irregular intervals.
// A reference model counts clocks since the last detected PPS and checks the
// timestamp each clock, the cycle number (including the wrap 255 -> 0 after
// 256 pulses), the one-clock pps_flag and the 3-clock PPS-to-reset latency.
`timescale 1ns / 1fs
module tb_timestamp_counter;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0, rst_n = 1'b0, pps = 1'b0;
  logic [26:0] timestamp;
  logic [7:0] cycle;
  logic pps_flag;

  always #5 clk = ~clk;

  timestamp_counter dut (.clk(clk), .rst_n(rst_n), .pps(pps),
                         .timestamp(timestamp), .cycle(cycle), .pps_flag(pps_flag));

  int exp_ts = 0;
  int exp_cycle = 0;
  int since_pps = -1;   // clocks since PPS was raised, -1 = none pending
  int n_flags = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: PPS raised just after a clock edge is acted upon 3 edges later
  always @(posedge clk) begin
    if (rst_n) begin
      if (since_pps >= 0) since_pps++;
      if (since_pps == 3) begin
        exp_ts = 0;
        exp_cycle = (exp_cycle + 1) % 256;
        since_pps = -1;
      end else begin
        exp_ts++;
      end
      #1;
      check(timestamp == 27'(exp_ts), $sformatf("timestamp %0d expected %0d", timestamp, exp_ts));
      check(cycle == 8'(exp_cycle), $sformatf("cycle %0d expected %0d", cycle, exp_cycle));
      check(pps_flag == (exp_ts == 0), "pps_flag with the reset");
      if (pps_flag) n_flags++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int p = 0; p < 260; p++) begin
      repeat ($urandom_range(8, 40)) @(posedge clk);
      #2 pps = 1'b1;
      since_pps = 0;
      repeat (4) @(posedge clk);
      #2 pps = 1'b0;
    end
    repeat (20) @(posedge clk);
    check(n_flags == 260, $sformatf("%0d cycle flags", n_flags));
    check(cycle == 8'(260 % 256), "cycle wrapped after 255");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
