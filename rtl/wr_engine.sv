// wr_engine: writes one saved frame back to configuration memory (context restore).
//
// Read-back data cannot be replayed as it is: it must be wrapped in the command
// sequence of the paper's Table II, which turns it into a small partial bitstream.
// On start this block sends: synchronisation, CRC reset, the device IDCODE, the
// FAR, the WCFG command, an FDRI write of 202 words made of the 101 frame words
// (pulled from data_*) followed by one all-zero pad frame that flushes them into
// configuration memory, a CRC reset (which stands in for a valid frame CRC), the
// next frame address, a further CRC reset and DESYNC.
//
// Interface: start latches far_addr (frame to write) and next_far_addr (sent in
// the footer). data_idx gives the index 0..100 of the frame word wanted next, so
// the caller can fetch it from DRAM. frame_words counts data words sent in this
// run; data_err is set at done if it is not 101.
// Timing: 246 words per frame, 246 + 1 cycles from start to done without stalls.
// Command words and their order follow the paper; the structure is this design's.
module wr_engine
  import epoch_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] far_addr,
  input  logic [31:0] next_far_addr,
  output logic        busy,
  output logic        done,
  output logic        tx_valid,
  output logic [31:0] tx_data,
  input  logic        tx_ready,
  input  logic        data_valid,
  input  logic [31:0] data_word,
  output logic        data_ready,
  output logic [6:0]  data_idx,
  output logic [6:0]  frame_words,
  output logic        data_err
);

  logic        unused_rx_ready, unused_rxo_valid;
  logic [31:0] unused_rxo_data;
  logic [8:0]  unused_rxo_idx, d_idx;

  cfg_seq #(.N_ROWS(WR_N), .ROWS(WR_ROWS)) u_seq (
    .clk, .rst_n, .start, .far_addr, .next_far_addr, .busy, .done,
    .tx_valid, .tx_data, .tx_ready,
    .data_valid, .data_word, .data_ready, .data_idx(d_idx),
    .rx_valid(1'b0), .rx_data(32'h0), .rx_ready(unused_rx_ready),
    .rx_out_valid(unused_rxo_valid), .rx_out_data(unused_rxo_data), .rx_out_idx(unused_rxo_idx),
    .rx_out_ready(1'b0)
  );

  assign data_idx = 7'(d_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_words <= '0;
      data_err    <= 1'b0;
    end else begin
      if (start && !busy) begin
        frame_words <= '0;
        data_err    <= 1'b0;
      end else if (data_valid && data_ready) begin
        frame_words <= frame_words + 7'd1;
      end
      if (done) data_err <= (frame_words != 7'(FRAME_WORDS));
    end
  end

endmodule
