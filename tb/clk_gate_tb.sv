// clk_gate_tb: checks that the gated clock has exactly one full pulse per enabled
// cycle, none while disabled, and never a shortened pulse, with the enable
// changing after rising edges as it does from a register.
`timescale 1ns/1ps
module clk_gate_tb;
  logic clk = 0, en = 0;
  logic clk_o;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  clk_gate dut (.clk_i(clk), .en_i(en), .clk_o);

  int   n_pulses = 0, n_short = 0;
  realtime t_rise;
  always @(posedge clk_o) begin n_pulses++; t_rise = $realtime; end
  always @(negedge clk_o) if ($realtime - t_rise < 4.99) n_short++;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int expected = 0, p0;
    bit e;
    @(posedge clk); #1;
    for (int i = 0; i < 400; i++) begin
      e = ($urandom_range(1) == 1);
      // an enable set just after a rising edge gates the next rising edge
      p0 = n_pulses;
      en = e;
      @(posedge clk); #1;
      if (e) expected++;
      checks++;
      if ((n_pulses - p0) != (e ? 1 : 0)) begin
        failures++;
        if (failures < 5) $display("FAIL: cycle %0d en=%0b pulses %0d", i, e, n_pulses - p0);
      end
    end
    // an enable glitch while the clock is high must not reach the output
    en = 0; @(posedge clk); #1; p0 = n_pulses;
    #1 en = 1; #1 en = 0;
    @(posedge clk); #1;
    check(n_pulses == p0, "enable pulse during high phase leaked through");
    check(n_pulses == expected, $sformatf("%0d pulses, expected %0d", n_pulses, expected));
    check(n_short == 0, $sformatf("%0d shortened pulses", n_short));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
