// clk_ctrl_tb: checks the write protection and the halt bit of clk_ctrl.
// From reset (locked, clock running) it tries a halt while locked (must be dropped
// and counted), a wrong unlock key, the right key 0xDF0D, a halt that must take
// effect exactly one edge after the write, the lock key 0x767B, a resume while
// locked (dropped), a resume after unlocking, and a wrong lock key.
`timescale 1ns/1ps
module clk_ctrl_tb;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge, so that the asynchronous resets fire
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        we, clk_en, locked;
  logic [1:0]  addr;
  logic [31:0] wdata;
  logic [7:0]  blocked_cnt;

  clk_ctrl dut (.clk, .rst_n, .we, .addr, .wdata, .clk_en, .locked, .blocked_cnt);

  task automatic wr(logic [1:0] a, logic [31:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    we = 0; addr = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(locked && clk_en && blocked_cnt == 0, "reset state: locked, clock running");
    wr(2'd2, 32'h1);
    check(clk_en && blocked_cnt == 1, "halt while locked must be ignored and counted");
    wr(2'd1, 32'h1234);
    check(locked, "wrong unlock key must not unlock");
    wr(2'd1, 32'h0000_DF0D);
    check(!locked, "unlock key 0xDF0D unlocks");
    // the halt takes effect on the edge that samples the write
    @(negedge clk); we = 1; addr = 2'd2; wdata = 32'h1;
    check(clk_en, "clock still running before the edge");
    @(negedge clk); we = 0;
    check(!clk_en, "halt bit stops the clock after one edge");
    wr(2'd0, 32'h0000_767B);
    check(locked, "lock key 0x767B locks");
    wr(2'd2, 32'h0);
    check(!clk_en && blocked_cnt == 2, "resume while locked must be ignored");
    wr(2'd1, 32'h0000_DF0D);
    wr(2'd2, 32'h0);
    check(clk_en, "resume after unlock");
    wr(2'd0, 32'h0000_1111);
    check(!locked, "wrong lock key must not lock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
