// tb_phase_detector: drives the phase detector with two ideal clocks of
// periods T0 = 2.2 ns (slow) and T1 = 2.0 ns (fast), at several start offsets,
// and compares the output one moment after every fast edge with a reference
// computed from the clock waveforms: q1(m) = slow level at fast edge m,
// phase(m) = q1(m-1) & ~q1(m). Also checks that clear forces the output low.
`timescale 1ns / 1fs
module tb_phase_detector;

  int checks = 0;
  int failures = 0;
  int detections = 0;

  localparam realtime T0 = 2.2, T1 = 2.0;

  logic slow_clk = 1'b0, fast_clk = 1'b0, clear = 1'b1;
  logic phase;

  phase_detector dut (
    .slow_clock    (slow_clk),
    .fast_clock    (fast_clk),
    .clear         (clear),
    .phase_detected(phase)
  );

  // Level of the slow clock (started at ts, rising at ts + k*T0, high T0/2).
  function automatic bit slow_level(realtime t, realtime ts);
    realtime r;
    if (t < ts) return 1'b0;
    r = t - ts;
    r = r - T0 * $floor(r / T0);
    return (r < T0 / 2.0);
  endfunction

  task automatic run(input realtime offset);
    realtime ts, tf;
    bit q1_prev, q1_now, exp_phase;
    clear = 1'b1;
    #3;
    clear = 1'b0;
    ts = $realtime + 1.0;
    tf = ts + offset;
    q1_prev = 1'b0;
    fork
      begin
        #(ts - $realtime);
        repeat (60) begin slow_clk = 1'b1; #(T0 / 2.0); slow_clk = 1'b0; #(T0 / 2.0); end
      end
      begin
        #(tf - $realtime);
        for (int m = 0; m < 50; m++) begin
          fast_clk = 1'b1;
          q1_now = slow_level($realtime, ts);
          exp_phase = q1_prev & ~q1_now;
          #0.05;
          checks++;
          if (phase !== exp_phase) begin
            failures++;
            $display("FAIL: offset %f edge %0d phase %b expected %b", offset, m, phase, exp_phase);
          end
          if (exp_phase) detections++;
          q1_prev = q1_now;
          #(T1 / 2.0 - 0.05);
          fast_clk = 1'b0;
          #(T1 / 2.0);
        end
      end
    join
    clear = 1'b1;
    #0.1;
    checks++;
    if (phase !== 1'b0) begin failures++; $display("FAIL: clear"); end
  endtask

  initial begin
    run(0.33);
    run(1.07);
    run(1.71);
    run(5.13);
    run(9.87);
    checks++;
    if (detections < 10) begin failures++; $display("FAIL: only %0d detections", detections); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
