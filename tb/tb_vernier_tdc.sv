// tb_vernier_tdc: the vernier TDC with its two ring oscillators
// (T0 = 2.2032 ns, T1 = 2.0012 ns) and a 100 MHz reference clock.
// For many trigger times spread over the 10 ns clock period it clears the
// TDC, raises start, waits for READY and checks
//   * the measured time against the true time from the trigger to the next
//     reference edge:  T_true - (N0*T0 - N1*T1) - T0  in  (-Delta t, 0];
//   * that READY comes no later than (T0/Delta t + 3) fast periods after the
//     stop edge (the conversion time the vernier needs);
//   * that fast_inhibit keeps the fast oscillator off;
//   * that a second start edge while a measurement is held is ignored.
`timescale 1ns / 1fs
module tb_vernier_tdc;

  int checks = 0;
  int failures = 0;

  localparam realtime S_LH = 0.2760, S_HL = 0.2748, F_LH = 0.2505, F_HL = 0.2498;
  localparam realtime T0 = 4.0 * (S_LH + S_HL);
  localparam realtime T1 = 4.0 * (F_LH + F_HL);
  localparam realtime DT = T0 - T1;
  localparam realtime TOL = 0.003;

  logic clk = 1'b0, start = 1'b0, clear = 1'b0, fast_inhibit = 1'b0;
  logic slow_en, fast_en, slow_osc, fast_osc, phase, ready;
  logic [7:0] n0, n1;

  always #5 clk = ~clk;

  ring_oscillator #(.TPLH0(S_LH), .TPHL0(S_HL), .TPLH1(S_LH), .TPHL1(S_HL),
                    .TPLH2(S_LH), .TPHL2(S_HL), .TPLH3(S_LH), .TPHL3(S_HL))
    u_slow (.enable(slow_en), .osc_out(slow_osc));
  ring_oscillator #(.TPLH0(F_LH), .TPHL0(F_HL), .TPLH1(F_LH), .TPHL1(F_HL),
                    .TPLH2(F_LH), .TPHL2(F_HL), .TPLH3(F_LH), .TPHL3(F_HL))
    u_fast (.enable(fast_en), .osc_out(fast_osc));

  vernier_tdc #(.CNT_W(8)) dut (
    .start(start), .clk_ref(clk), .clear(clear), .fast_inhibit(fast_inhibit),
    .slow_en(slow_en), .fast_en(fast_en), .slow_osc(slow_osc), .fast_osc(fast_osc),
    .phase(phase), .ready(ready), .n0(n0), .n1(n1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  realtime t_start, t_stop, t_ready, t_true, t_meas, err;
  realtime min_err = 100.0, max_err = -100.0;

  always @(posedge ready) t_ready = $realtime;

  task automatic measure(input realtime offset);
    // offset: trigger position after a rising clock edge, 0 < offset < 10
    clear = 1'b1;
    start = 1'b0;
    @(posedge clk);
    #1 clear = 1'b0;
    @(posedge clk);
    #(offset);
    t_start = $realtime;
    start = 1'b1;
    t_stop = t_start + (10.0 - offset);
    #2 start = 1'b0;
    fork
      begin wait (ready); end
      begin #200; end
    join_any
    disable fork;
    #1;
    check(ready, $sformatf("ready for offset %f", offset));
    t_true = t_stop - t_start;
    t_meas = real'(n0) * T0 - real'(n1) * T1;
    err = t_true - t_meas - T0;
    if (err < min_err) min_err = err;
    if (err > max_err) max_err = err;
    check(err > -DT - TOL && err < TOL,
          $sformatf("offset %f: N0=%0d N1=%0d true %f meas %f err %f", offset, n0, n1, t_true, t_meas, err));
    check(t_ready - t_stop < (T0 / DT + 3.0) * T1,
          $sformatf("conversion time %f", t_ready - t_stop));
  endtask

  initial begin
    #20;
    for (int i = 0; i < 60; i++) measure(0.05 + i * 0.1651);
    for (int i = 0; i < 40; i++) measure(0.01 + real'($urandom_range(0, 9979)) / 1000.0);
    $display("INFO: error range %f .. %f ns (Delta t %f)", min_err, max_err, DT);
    // a second start edge during a held measurement changes nothing
    begin
      logic [7:0] n0_h, n1_h;
      n0_h = n0;
      n1_h = n1;
      start = 1'b1; #2 start = 1'b0; #100;
      check(n0 == n0_h && n1 == n1_h && ready, "held result not disturbed");
    end
    // fast_inhibit: only the slow oscillator runs, no detection
    clear = 1'b1;
    fast_inhibit = 1'b1;
    @(posedge clk); #1 clear = 1'b0;
    #3.3 start = 1'b1;
    #100;
    check(!fast_en && slow_en && !ready, "fast_inhibit keeps fast oscillator off");
    check(n1 == 0 && n0 > 40, "only N0 counts under fast_inhibit");
    clear = 1'b1;
    #1;
    check(!slow_en && !fast_en && !ready && n0 == 0 && n1 == 0, "clear resets everything");
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
