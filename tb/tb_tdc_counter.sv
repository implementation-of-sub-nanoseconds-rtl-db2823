// tb_tdc_counter: pulses the counter clock a random number of times with stop
// low, then more times with stop high, and checks the count against the
// number of pulses given while stop was low; checks clear and wrap-around.
`timescale 1ns / 1fs
module tb_tdc_counter;

  int checks = 0;
  int failures = 0;

  logic osc = 1'b0, clear = 1'b0, stop = 1'b0;
  logic [7:0] count;

  tdc_counter #(.WIDTH(8)) dut (.osc(osc), .clear(clear), .stop(stop), .count(count));

  task automatic pulses(input int n);
    repeat (n) begin #1 osc = 1'b1; #1 osc = 1'b0; end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int n, m;
    #0.5 clear = 1'b1;  // power-on clear: an edge, whatever the counter powered up as
    #1.5;
    check(count == 0, "reset by clear");
    clear = 1'b0;
    for (int r = 0; r < 20; r++) begin
      n = $urandom_range(0, 40);
      m = $urandom_range(0, 10);
      clear = 1'b1; #1 clear = 1'b0;
      stop = 1'b0;
      pulses(n);
      #0.5 stop = 1'b1;
      pulses(m);
      check(count == 8'(n), $sformatf("count %0d expected %0d", count, n));
    end
    clear = 1'b1; #1 clear = 1'b0;
    stop = 1'b0;
    pulses(260);
    check(count == 8'(260), "wraps at 256");
    clear = 1'b1;
    #0.5;
    check(count == 0, "asynchronous clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
