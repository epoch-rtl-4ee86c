// rb_engine: read-back capture of one configuration frame (context save).
//
// On start it sends the read-back command sequence of the paper's Table I for one
// frame address: synchronisation, fabric shutdown, CRC reset, the two writes that
// set GLUTMASK so LUT and distributed-RAM cells read back unmasked, the GCAPTURE
// command that copies the flip-flop values into configuration memory, RCFG, the
// FAR, an FDRO read of 202 words and 32 NOOPs. It then accepts the 202 read-back
// words: the first 101 are the pad frame (all zero, discarded), the next 101 are
// the frame's context. Those leave on out_* with their word index 0..100, with the
// BRAM bit-18 treatment (bram_fix) applied on the fly when the FAR is a BRAM
// frame. It ends with the START, CRC reset and DESYNC commands of Table I.
//
// Interface: start/far_addr as in cfg_seq; tx_* to and rx_* from the configuration
// port; out_* (valid/ready) toward the DRAM writer. pad_err goes high for the rest
// of the run if a pad word was not zero; fix_cnt counts bits cleared in this run.
// Timing: 83 words sent and 202 received, 285 cycles + 1 to done without stalls.
// The command words follow the paper; the streaming structure is this design's.
module rb_engine
  import epoch_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] far_addr,
  output logic        busy,
  output logic        done,
  output logic        tx_valid,
  output logic [31:0] tx_data,
  input  logic        tx_ready,
  input  logic        rx_valid,
  input  logic [31:0] rx_data,
  output logic        rx_ready,
  output logic        out_valid,
  output logic [31:0] out_data,
  output logic [6:0]  out_idx,
  input  logic        out_ready,
  output logic        pad_err,
  output logic [6:0]  fix_cnt
);

  logic        r_valid, r_ready, in_pad, fixed;
  logic [31:0] r_data;
  logic [8:0]  r_idx;
  logic [31:0] far_q;
  logic [8:0]  unused_didx;
  logic        unused_dready;

  cfg_seq #(.N_ROWS(RB_N), .ROWS(RB_ROWS)) u_seq (
    .clk, .rst_n, .start, .far_addr, .next_far_addr(far_addr), .busy, .done,
    .tx_valid, .tx_data, .tx_ready,
    .data_valid(1'b0), .data_word(32'h0), .data_ready(unused_dready), .data_idx(unused_didx),
    .rx_valid, .rx_data, .rx_ready,
    .rx_out_valid(r_valid), .rx_out_data(r_data), .rx_out_idx(r_idx), .rx_out_ready(r_ready)
  );

  assign in_pad    = r_idx < 9'(FRAME_WORDS);
  assign r_ready   = in_pad ? 1'b1 : out_ready;
  assign out_valid = r_valid && !in_pad;
  assign out_idx   = 7'(r_idx - 9'(FRAME_WORDS));

  bram_fix u_fix (
    .far_addr(far_q), .word_idx(out_idx), .word_in(r_data), .word_out(out_data), .fixed
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      far_q   <= '0;
      pad_err <= 1'b0;
      fix_cnt <= '0;
    end else if (start && !busy) begin
      far_q   <= far_addr;
      pad_err <= 1'b0;
      fix_cnt <= '0;
    end else if (r_valid && r_ready) begin
      if (in_pad && r_data != 32'h0) pad_err <= 1'b1;
      if (!in_pad && fixed)          fix_cnt <= fix_cnt + 7'd1;
    end
  end

endmodule
