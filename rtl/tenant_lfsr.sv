// tenant_lfsr: linear-feedback shift register tenant (8-bit or 32-bit).
//
// The paper repeats the two-slot experiment with an 8-bit and a 32-bit LFSR,
// each with its own seed, that change value at every rising clock edge; their
// value is watched by the processing system. It does not give the feedback
// polynomials, so this block uses maximal-length Fibonacci taps:
//   W=8:  x^8 + x^6 + x^5 + x^4 + 1      W=16: x^16 + x^15 + x^13 + x^4 + 1
//   W=32: x^32 + x^22 + x^2 + x + 1
// The register shifts left and the XOR of the tap bits enters at bit 0.
// Like tenant_counter, the asynchronous gsr loads the INIT value (the seed, or a
// restored state) from configuration memory through the init input.
//
// Parameters: W (8, 16 or 32). Timing: one step per rising clk edge.
module tenant_lfsr #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         gsr,
  input  logic [W-1:0] init,
  output logic [W-1:0] q
);

  // Tap masks: bit i set means stage i+1 feeds the XOR.
  localparam logic [63:0] TAP_TABLE = (W == 8)  ? 64'h0000_0000_0000_00B8 :
                                      (W == 16) ? 64'h0000_0000_0000_D008 :
                                                  64'h0000_0000_8020_0003;
  localparam logic [W-1:0] TAPS = TAP_TABLE[W-1:0];

  initial assert (W == 8 || W == 16 || W == 32) else $error("tenant_lfsr: unsupported W");

  always_ff @(posedge clk or posedge gsr) begin
    if (gsr) q <= init;
    else     q <= {q[W-2:0], ^(q & TAPS)};
  end

endmodule
