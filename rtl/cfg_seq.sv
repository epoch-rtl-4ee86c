// cfg_seq: configuration command sequencer.
//
// Streams one command sequence (a table of rows from epoch_pkg) to the 32-bit
// configuration port. Each row repeats one kind of word 'rep' times:
//   R_FIXED     the row's constant word (sync, NOOP, register headers, ...)
//   R_FAR       the frame address latched at start
//   R_NEXT_FAR  the frame address to follow, latched at start
//   R_DATA      words taken from the data input (frame contents)
//   R_PAD       zero words (pad frame)
//   R_RX        no word is sent; read-back words are accepted from rx_* and
//               forwarded to rx_out_* together with their index in the row
// The same engine runs the read-back sequence (Table I of the paper) and the
// frame-write template (Table II); which one is chosen by the ROWS parameter.
// Engine structure and handshakes are this design's own choice.
//
// Interface: start (pulse, while idle) latches far_addr/next_far_addr. All streams use
// valid/ready; a word moves on a cycle where both are high. Once raised, tx_valid
// stays high until the word is taken, except in R_DATA rows, where it follows
// data_valid. done pulses for one
// cycle after the last word of the last row has moved.
// Timing: one word per cycle when the port never stalls, so a run takes
// (sum of all row repeats) + 1 cycles from the start edge to done.
module cfg_seq
  import epoch_pkg::*;
#(
  parameter int unsigned                 N_ROWS = RB_N,
  parameter cmd_row_t [N_ROWS-1:0]       ROWS   = RB_ROWS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] far_addr,
  input  logic [31:0] next_far_addr,
  output logic        busy,
  output logic        done,
  // to the configuration port
  output logic        tx_valid,
  output logic [31:0] tx_data,
  input  logic        tx_ready,
  // frame words for R_DATA rows
  input  logic        data_valid,
  input  logic [31:0] data_word,
  output logic        data_ready,
  output logic [8:0]  data_idx,
  // read-back words from the configuration port, for R_RX rows
  input  logic        rx_valid,
  input  logic [31:0] rx_data,
  output logic        rx_ready,
  // read-back words passed on, with their index within the R_RX row
  output logic        rx_out_valid,
  output logic [31:0] rx_out_data,
  output logic [8:0]  rx_out_idx,
  input  logic        rx_out_ready
);

  localparam int unsigned RW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1;

  logic          run_q;
  logic [RW-1:0] row_q;
  logic [8:0]    cnt_q;
  logic [31:0]   far_q, next_far_q;
  cmd_row_t      row;
  logic          fire;

  assign row  = ROWS[row_q];
  assign busy = run_q;

  always_comb begin
    tx_valid     = 1'b0;
    tx_data      = 32'h0;
    data_ready   = 1'b0;
    rx_ready     = 1'b0;
    rx_out_valid = 1'b0;
    fire         = 1'b0;
    if (run_q) begin
      unique case (row.kind)
        R_FIXED:    begin tx_valid = 1'b1; tx_data = row.word;   fire = tx_ready; end
        R_FAR:      begin tx_valid = 1'b1; tx_data = far_q;      fire = tx_ready; end
        R_NEXT_FAR: begin tx_valid = 1'b1; tx_data = next_far_q; fire = tx_ready; end
        R_PAD:      begin tx_valid = 1'b1; tx_data = 32'h0;      fire = tx_ready; end
        R_DATA: begin
          tx_valid   = data_valid;
          tx_data    = data_word;
          data_ready = tx_ready;
          fire       = tx_ready && data_valid;
        end
        R_RX: begin
          rx_ready     = rx_out_ready;
          rx_out_valid = rx_valid;
          fire         = rx_valid && rx_out_ready;
        end
        default: ;
      endcase
    end
  end

  assign data_idx    = cnt_q;
  assign rx_out_data = rx_data;
  assign rx_out_idx  = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q      <= 1'b0;
      row_q      <= '0;
      cnt_q      <= '0;
      far_q      <= '0;
      next_far_q <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run_q) begin
        if (start) begin
          run_q      <= 1'b1;
          row_q      <= '0;
          cnt_q      <= '0;
          far_q      <= far_addr;
          next_far_q <= next_far_addr;
        end
      end else if (fire) begin
        if (cnt_q == row.rep - 9'd1) begin
          cnt_q <= '0;
          if (row_q == RW'(N_ROWS - 1)) begin
            row_q <= '0;
            run_q <= 1'b0;
            done  <= 1'b1;
          end else begin
            row_q <= row_q + RW'(1);
          end
        end else begin
          cnt_q <= cnt_q + 9'd1;
        end
      end
    end
  end

  // A start while a run is in progress is ignored; flag it in simulation.
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) !(start && run_q))
    else $error("cfg_seq: start while busy");
  a_tx_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                tx_valid && !tx_ready && row.kind != R_DATA |=> tx_valid)
    else $error("cfg_seq: tx_valid dropped before ready");

endmodule
