// clk_ctrl: write-protected clock-halt register for the tenant clock (CLK1).
//
// The paper freezes a tenant by stopping its clock from the processing-system
// side: the clock control register sits in a write-protected register space, so
// an unlock key is written first, then the halt (throttle) setting. This block
// models that register space with three write-only registers:
//   CC_LOCK   (0)  writing key 0x767B locks the space
//   CC_UNLOCK (1)  writing key 0xDF0D unlocks it
//   CC_HALT   (2)  bit 0 = 1 stops CLK1, 0 lets it run; ignored while locked
// The key values are those of the Zynq SLCR, not given in the paper. The space is
// locked and the clock running after reset. A write to CC_HALT while locked is
// dropped and counted in blocked_cnt.
//
// Interface: one write port (we, addr, wdata) sampled on the rising clock edge.
// clk_en is registered: it changes on the edge after the CC_HALT write.
module clk_ctrl
  import epoch_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [1:0]  addr,
  input  logic [31:0] wdata,
  output logic        clk_en,
  output logic        locked,
  output logic [7:0]  blocked_cnt
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked      <= 1'b1;
      clk_en      <= 1'b1;
      blocked_cnt <= '0;
    end else if (we) begin
      unique case (addr)
        CC_LOCK:   if (wdata[15:0] == CC_LOCK_KEY)   locked <= 1'b1;
        CC_UNLOCK: if (wdata[15:0] == CC_UNLOCK_KEY) locked <= 1'b0;
        CC_HALT: begin
          if (locked) blocked_cnt <= blocked_cnt + 8'd1;
          else        clk_en      <= ~wdata[0];
        end
        default: ;
      endcase
    end
  end

endmodule
