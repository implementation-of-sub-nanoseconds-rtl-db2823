// tb_trigger_logic: all combinations of the two chip triggers and the
// external trigger under the three source settings, checked against the
// truth table (OR, AND, external); then the LED pulse: period and width in
// clocks for several settings, and no pulse while disabled.
`timescale 1ns / 1fs
module tb_trigger_logic;

  import tdc_pkg::*;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] fe_trig = '0;
  logic ext_trig = 1'b0;
  trig_src_e src = TRIG_FE_OR;
  logic led_en = 1'b0;
  logic [15:0] led_period = 16'd10;
  logic trig_out, led_pulse;

  always #5 clk = ~clk;

  trigger_logic dut (.clk(clk), .rst_n(rst_n), .fe_trig(fe_trig), .ext_trig(ext_trig),
                     .src(src), .led_en(led_en), .led_period(led_period),
                     .trig_out(trig_out), .led_pulse(led_pulse));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    bit exp;
    int rise[$];
    int high, cyc;
    for (int s = 0; s < 3; s++) begin
      for (int v = 0; v < 8; v++) begin
        src = trig_src_e'(s);
        fe_trig = v[1:0];
        ext_trig = v[2];
        #1;
        case (s)
          0: exp = v[0] | v[1];
          1: exp = v[0] & v[1];
          default: exp = v[2];
        endcase
        check(trig_out == exp, $sformatf("src %0d inputs %b -> %b", s, v[2:0], trig_out));
      end
    end
    @(posedge clk); #1 rst_n = 1'b1;
    repeat (30) @(posedge clk);
    #1;
    check(!led_pulse, "no LED pulse while disabled");
    foreach (led_period_list[i]) begin
      led_period = led_period_list[i];
      led_en = 1'b1;
      rise.delete();
      high = 0;
      cyc = 0;
      for (int c = 0; c < 200; c++) begin
        logic prev;
        prev = led_pulse;
        @(posedge clk); #1;
        cyc++;
        if (led_pulse) high++;
        if (led_pulse && !prev) rise.push_back(cyc);
      end
      check(rise.size() >= 3, "LED pulses produced");
      for (int k = 1; k < rise.size(); k++)
        check(rise[k] - rise[k - 1] == int'(led_period_list[i]),
              $sformatf("LED period %0d expected %0d", rise[k] - rise[k - 1], led_period_list[i]));
      check(high >= 2 * (rise.size() - 1) && high <= 2 * (rise.size() + 1), "LED width 2 clocks");
      led_en = 1'b0;
      @(posedge clk); #1;
      check(!led_pulse, "LED off when disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] led_period_list[3] = '{16'd10, 16'd17, 16'd50};

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
