// tenant_lfsr_tb: 8-bit and 32-bit LFSR tenants. The 8-bit one must have the
// maximal period 255; both are compared every cycle with a reference model that
// computes the feedback from the polynomial's exponents; GSR loads the seed.
`timescale 1ns/1ps
module tenant_lfsr_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        gsr;
  logic [7:0]  i8, q8;
  logic [31:0] i32, q32;

  tenant_lfsr #(.W(8))  dut8  (.clk, .gsr, .init(i8),  .q(q8));
  tenant_lfsr #(.W(32)) dut32 (.clk, .gsr, .init(i32), .q(q32));

  // feedback = XOR of stages named by the exponents (stage n is bit n-1)
  function automatic logic [7:0] ref8(logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};        // x^8+x^6+x^5+x^4+1
  endfunction
  function automatic logic [31:0] ref32(logic [31:0] s);
    return {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]};     // x^32+x^22+x^2+x+1
  endfunction

  initial begin
    logic [7:0]  m8;
    logic [31:0] m32;
    int period;
    i8 = 8'h5A; i32 = 32'hC0FF_EE01; gsr = 1;
    #12 gsr = 0;
    m8 = i8; m32 = i32;
    checks++;
    if (q8 != 8'h5A || q32 != 32'hC0FF_EE01) begin failures++; $display("FAIL: seed"); end
    period = 0;
    for (int c = 1; c <= 600; c++) begin
      @(posedge clk); #1;
      m8 = ref8(m8); m32 = ref32(m32);
      checks++;
      if (q8 !== m8 || q32 !== m32) begin
        failures++;
        if (failures < 5) $display("FAIL: cycle %0d %h/%h expected %h/%h", c, q8, q32, m8, m32);
      end
      if (period == 0 && q8 == 8'h5A) period = c;
    end
    checks++;
    if (period != 255) begin failures++; $display("FAIL: 8-bit period %0d", period); end
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
