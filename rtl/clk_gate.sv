// clk_gate: glitch-free clock gate that stops CLK1 to the tenant slots.
//
// The paper halts the tenants' clock to freeze their state at an arbitrary cycle
// (it does so at the PS clock generator and reports having also used FPGA clock
// buffers). This is the usual integrated clock-gating cell: the enable is caught
// by a latch that is open while the clock is low, and the clock is ANDed with the
// latched enable, so the gated clock never produces a partial pulse.
// The latch is intentional: it is what makes the gate glitch-free.
//
// Interface: clk_i free-running, en_i from the clk_i domain (changes after a
// rising edge), clk_o the gated clock. A change of en_i takes effect from the
// next rising edge of clk_i.
module clk_gate (
  input  logic clk_i,
  input  logic en_i,
  output logic clk_o
);

  logic en_lat;

  always_latch begin
    if (!clk_i) en_lat = en_i;
  end

  assign clk_o = clk_i & en_lat;

endmodule
