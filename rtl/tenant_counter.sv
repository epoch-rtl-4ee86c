// tenant_counter: 4-bit up- or down-counter tenant of the basic benchmark.
//
// The paper's two-slot demonstration puts a 4-bit up-counter in Slot-1 and a
// 4-bit down-counter in Slot-2, both driven by one 'update' signal (a push
// button): each assertion steps the counter by one. A small two-state FSM (idle /
// held) makes one assertion give one step however long update stays high.
//
// The flip-flops behave as FPGA fabric flip-flops: the asynchronous global
// set/reset (gsr) loads them with their INIT values, which live in configuration
// memory and arrive on the init input. This is how a restored context reaches
// the counter: the saved value is written into configuration memory and GSR is
// pulsed. The held-state flip-flop initialises to 'idle'.
//
// Parameters: UP (1 counts up, 0 counts down), W (width, 4 in the paper).
// Timing: q changes on the first rising clk edge at which update is seen high.
module tenant_counter #(
  parameter bit          UP = 1'b1,
  parameter int unsigned W  = 4
) (
  input  logic         clk,
  input  logic         gsr,
  input  logic [W-1:0] init,
  input  logic         update,
  output logic [W-1:0] q
);

  typedef enum logic {S_IDLE, S_HELD} state_e;
  state_e state;

  always_ff @(posedge clk or posedge gsr) begin
    if (gsr) begin
      q     <= init;
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE: if (update) begin
          q     <= UP ? q + W'(1) : q - W'(1);
          state <= S_HELD;
        end
        S_HELD: if (!update) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
