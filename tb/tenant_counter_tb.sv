// tenant_counter_tb: up- and down-counter tenants. Checks the GSR load of INIT,
// one step per assertion of update however long it is held, wrap-around, and the
// paper's example: 0x0 and 0xF become 0x3 and 0xC after three assertions.
`timescale 1ns/1ps
module tenant_counter_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       gsr, update;
  logic [3:0] up_init, dn_init, up_q, dn_q;

  tenant_counter #(.UP(1'b1), .W(4)) dut_up (.clk, .gsr, .init(up_init), .update, .q(up_q));
  tenant_counter #(.UP(1'b0), .W(4)) dut_dn (.clk, .gsr, .init(dn_init), .update, .q(dn_q));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic press(int len);
    @(negedge clk); update = 1;
    repeat (len) @(negedge clk);
    update = 0;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    int eu, ed;
    update = 0; up_init = 4'h0; dn_init = 4'hF; gsr = 1;
    #12 gsr = 0;
    @(negedge clk);
    check(up_q == 4'h0 && dn_q == 4'hF, "GSR loads INIT 0x0 / 0xF");
    repeat (3) press(1);
    check(up_q == 4'h3 && dn_q == 4'hC, $sformatf("after 3 presses %h/%h, expected 3/C", up_q, dn_q));
    press(7);
    check(up_q == 4'h4 && dn_q == 4'hB, "a long press steps once");
    eu = 4; ed = 11;
    for (int i = 0; i < 30; i++) begin
      press($urandom_range(1, 4));
      eu = (eu + 1) % 16; ed = (ed + 15) % 16;
      check(up_q == 4'(eu) && dn_q == 4'(ed), $sformatf("press %0d: %h/%h", i, up_q, dn_q));
    end
    // GSR at any time reloads INIT (restore path), asynchronously
    up_init = 4'h7; dn_init = 4'h8;
    #2 gsr = 1; #1;
    check(up_q == 4'h7 && dn_q == 4'h8, "asynchronous GSR load");
    #3 gsr = 0;
    // clock held: nothing changes
    repeat (3) @(negedge clk);
    check(up_q == 4'h7 && dn_q == 4'h8, "no step without update");
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
