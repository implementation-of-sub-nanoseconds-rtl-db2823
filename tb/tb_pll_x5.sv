// tb_pll_x5: 20 MHz input; after lock the output must have exactly five
// rising edges per input period, 10 ns apart, the first one aligned with the
// input rising edge, and must be low before lock.
`timescale 1ns / 1fs
module tb_pll_x5;

  int checks = 0;
  int failures = 0;

  logic clk20 = 1'b0;
  logic clk100, locked;
  realtime edges[$];
  realtime in_edges[$];

  always #25 clk20 = ~clk20;

  pll_x5 #(.MULT(5)) dut (.clk_in(clk20), .clk_out(clk100), .locked(locked));

  always @(posedge clk100) edges.push_back($realtime);
  always @(posedge clk20) if (locked) in_edges.push_back($realtime);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #60;
    check(!locked && edges.size() == 0, "no output before lock");
    wait (locked);
    #2000;
    check(edges.size() >= 195, $sformatf("%0d output edges", edges.size()));
    for (int k = 1; k < edges.size(); k++)
      check(edges[k] - edges[k - 1] > 9.999 && edges[k] - edges[k - 1] < 10.001,
            $sformatf("output period %f", edges[k] - edges[k - 1]));
    foreach (in_edges[i]) begin
      bit found = 0;
      foreach (edges[k]) if (edges[k] == in_edges[i]) found = 1;
      check(found, "output edge aligned with input edge");
    end
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
