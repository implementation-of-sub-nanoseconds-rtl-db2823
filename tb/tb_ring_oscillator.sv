// tb_ring_oscillator: checks the ring oscillator model against its period
// formula. Two instances: one with uniform stage delays (the slow oscillator of
// the sensor) and one with eight different stage delays. For each, enable is
// raised, the rising edges of the output are timed, and the test checks that
// the k-th rising edge comes k periods after the enable edge, period =
// sum of the eight delays, that the output is steady at 1 while disabled and
// that it stops within one period after enable falls.
`timescale 1ns / 1fs
module tb_ring_oscillator;

  int checks = 0;
  int failures = 0;

  localparam realtime A_LH = 0.2760, A_HL = 0.2748;
  localparam realtime PA = 4.0 * (A_LH + A_HL);
  localparam realtime PB = 0.31 + 0.22 + 0.28 + 0.25 + 0.27 + 0.29 + 0.24 + 0.26;

  logic en_a = 1'b0, en_b = 1'b0;
  logic out_a, out_b;

  ring_oscillator #(.TPLH0(A_LH), .TPHL0(A_HL), .TPLH1(A_LH), .TPHL1(A_HL),
                    .TPLH2(A_LH), .TPHL2(A_HL), .TPLH3(A_LH), .TPHL3(A_HL))
    u_a (.enable(en_a), .osc_out(out_a));

  ring_oscillator #(.TPLH0(0.31), .TPHL0(0.22), .TPLH1(0.28), .TPHL1(0.25),
                    .TPLH2(0.27), .TPHL2(0.29), .TPLH3(0.24), .TPHL3(0.26))
    u_b (.enable(en_b), .osc_out(out_b));

  realtime t_en;
  realtime edges_a[$], edges_b[$];

  always @(posedge out_a) edges_a.push_back($realtime);
  always @(posedge out_b) edges_b.push_back($realtime);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic bit near(realtime a, realtime b);
    return (a - b < 0.002) && (b - a < 0.002);
  endfunction

  initial begin
    #20;
    check(out_a == 1'b1 && out_b == 1'b1, "output at rest is 1");
    check(edges_a.size() == 0 && edges_b.size() == 0, "no edge while disabled");
    t_en = $realtime;
    en_a = 1'b1;
    en_b = 1'b1;
    #100;
    check(edges_a.size() == int'(100.0 / PA), $sformatf("edge count A %0d", edges_a.size()));
    check(edges_b.size() == int'(100.0 / PB), $sformatf("edge count B %0d", edges_b.size()));
    foreach (edges_a[k])
      check(near(edges_a[k] - t_en, (k + 1) * PA), $sformatf("A edge %0d at %f", k, edges_a[k] - t_en));
    foreach (edges_b[k])
      check(near(edges_b[k] - t_en, (k + 1) * PB), $sformatf("B edge %0d at %f", k, edges_b[k] - t_en));
    en_a = 1'b0;
    en_b = 1'b0;
    #5;
    edges_a.delete();
    edges_b.delete();
    #50;
    check(edges_a.size() == 0 && edges_b.size() == 0, "stopped after disable");
    check(out_a == 1'b1 && out_b == 1'b1, "settles to 1 after disable");
    // restart: same phase relation to the new enable edge
    t_en = $realtime;
    en_a = 1'b1;
    #(3.5 * PA);
    check(edges_a.size() == 3, "restart gives 3 edges in 3.5 periods");
    if (edges_a.size() > 0) check(near(edges_a[0] - t_en, PA), "restart first edge one period after enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
