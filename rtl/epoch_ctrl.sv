// epoch_ctrl: EPOCH context save / restore controller.
//
// Carries out the paper's preemption procedure for a set of PR slots:
//   save     1. stop the tenant clock CLK1 (unlock the clock register space,
//               write the halt bit, lock it again);
//            2. for each selected slot and each frame address in its FAR list,
//               read the frame back (rb_engine, Table I of the paper) and write
//               its 101 context words to the slot's DRAM region, BRAM frames
//               having bit 18 cleared on the way (bram_fix);
//            3. let CLK1 run again.
//   restore  1. stop CLK1;
//            2. for each selected slot and frame, read the 101 saved words from
//               DRAM and write them back wrapped in the Table II template
//               (wr_engine), the footer naming the next FAR of the list;
//            3. pulse the global set/reset (GSR) so that flip-flops load the
//               restored values from configuration memory;
//            4. let CLK1 run again.
// In the paper these steps are C code on the Zynq processing system driving the
// PCAP port; here they are a hardware state machine with the same steps and the
// same command words. Slot s saves frame k of its list at DRAM word address
// SLOT_BASE[s] + 101*k (the paper's example slot addresses 0x0000000A and
// 0x000B0000 are the defaults, taken here as word addresses).
//
// Interface:
//   cmd_save / cmd_restore  one-cycle request while idle; cmd_slots selects slots
//   far_we/far_waddr/far_wdata  fill the FAR table (the frame addresses of every
//                      logic element used, found at design time)
//   slot_first/slot_count  each slot's list within the FAR table
//   cc_*              register writes to clk_ctrl
//   pcap_tx_* / pcap_rx_*  32-bit configuration port streams (valid/ready)
//   dram_*            word-addressed memory: a request is held until dram_gnt;
//                     read data returns later with dram_rvalid, one at a time
//   gsr               global set/reset pulse, GSR_CYCLES long
//   pause_req/pause_ack  optional safe-point handshake (PAUSE_HANDSHAKE = 1): the
//                     controller raises pause_req on a command and stops CLK1 only
//                     once the tenant answers with pause_ack; pause_req falls when
//                     the operation is done. The paper proposes such a handshake
//                     for designs with several clock domains, as a design-time
//                     option; its signalling here is this design's own. Off by
//                     default, as in the paper's main experiments. pause_ack must
//                     come from logic clocked by CLK0 or CLK1 (one clock source).
// Timing: without stalls a save takes 288 cycles per frame (286 of port traffic,
// 2 of bookkeeping). A restore keeps one DRAM read in flight, so a frame costs
// about (DRAM latency + 2) cycles per data word plus the 145 command words: 549
// cycles with a 2-cycle DRAM. FRAME_GAP adds that many idle cycles after every
// frame (the paper paces back-to-back read-backs; it gives no figure).
module epoch_ctrl
  import epoch_pkg::*;
#(
  parameter int unsigned                      NUM_SLOTS  = 2,
  parameter int unsigned                      FAR_DEPTH  = 64,
  parameter logic [NUM_SLOTS-1:0][31:0]       SLOT_BASE  = {32'h000B_0000, 32'h0000_000A},
  parameter int unsigned                      FRAME_GAP  = 0,
  parameter int unsigned                      GSR_CYCLES = 4,
  parameter bit                               PAUSE_HANDSHAKE = 1'b0,
  localparam int unsigned                     FW = $clog2(FAR_DEPTH),
  localparam int unsigned                     CW = $clog2(FAR_DEPTH + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cmd_save,
  input  logic                          cmd_restore,
  input  logic [NUM_SLOTS-1:0]          cmd_slots,
  output logic                          busy,
  output logic                          done,
  input  logic                          far_we,
  input  logic [FW-1:0]                 far_waddr,
  input  logic [31:0]                   far_wdata,
  input  logic [NUM_SLOTS-1:0][FW-1:0]  slot_first,
  input  logic [NUM_SLOTS-1:0][CW-1:0]  slot_count,
  output logic                          cc_we,
  output logic [1:0]                    cc_addr,
  output logic [31:0]                   cc_wdata,
  output logic                          pcap_tx_valid,
  output logic [31:0]                   pcap_tx_data,
  input  logic                          pcap_tx_ready,
  input  logic                          pcap_rx_valid,
  input  logic [31:0]                   pcap_rx_data,
  output logic                          pcap_rx_ready,
  output logic                          dram_req,
  output logic                          dram_we,
  output logic [31:0]                   dram_addr,
  output logic [31:0]                   dram_wdata,
  input  logic                          dram_gnt,
  input  logic                          dram_rvalid,
  input  logic [31:0]                   dram_rdata,
  output logic                          gsr,
  output logic [15:0]                   frames_saved,
  output logic [15:0]                   frames_restored,
  output logic [15:0]                   bram_fixes,
  output logic                          pad_err,
  output logic                          data_err,
  output logic                          pause_req,
  input  logic                          pause_ack
);

  localparam int unsigned SW = (NUM_SLOTS > 1) ? $clog2(NUM_SLOTS) : 1;
  localparam int unsigned GW = $clog2(FRAME_GAP + GSR_CYCLES + 2);

  typedef enum logic [3:0] {
    S_IDLE, S_PAUSE, S_CK_UNLOCK, S_CK_SET, S_CK_LOCK, S_SLOT, S_FSTART, S_FRUN, S_FGAP, S_GSR, S_DONE
  } state_e;

  state_e               state;
  logic                 op_restore;   // 0 save, 1 restore
  logic                 resuming;     // clock-register sequence is the resume one
  logic [NUM_SLOTS-1:0] pend;
  logic [SW-1:0]        slot;
  logic [CW-1:0]        k;
  logic [31:0]          frame_addr;
  logic [GW-1:0]        wait_cnt;
  logic [31:0]          far_tab [FAR_DEPTH];
  logic [31:0]          cur_far, nxt_far;
  logic [FW-1:0]        idx_cur, idx_nxt;

  // ---- FAR table ----
  always_ff @(posedge clk) begin
    if (far_we) far_tab[far_waddr] <= far_wdata;
  end

  assign idx_cur = slot_first[slot] + FW'(k);
  assign idx_nxt = (k + CW'(1) < slot_count[slot]) ? idx_cur + FW'(1) : idx_cur;
  assign cur_far = far_tab[idx_cur];
  assign nxt_far = far_tab[idx_nxt];

  // ---- engines ----
  logic        rb_start, rb_busy, rb_done, rb_tx_valid, rb_out_valid, rb_out_ready, rb_pad_err;
  logic [31:0] rb_tx_data, rb_out_data;
  logic [6:0]  rb_out_idx, rb_fix_cnt;
  logic        wr_start, wr_busy, wr_done, wr_tx_valid, wr_data_ready, wr_data_err;
  logic [31:0] wr_tx_data;
  logic [6:0]  wr_data_idx, wr_frame_words;  // frame_words is also checked by wr_engine itself
  logic        buf_valid, rd_pending;
  logic [31:0] buf_data;
  logic [6:0]  rd_cnt;

  assign rb_start = (state == S_FSTART) && !op_restore;
  assign wr_start = (state == S_FSTART) &&  op_restore;

  rb_engine u_rb (
    .clk, .rst_n, .start(rb_start), .far_addr(cur_far), .busy(rb_busy), .done(rb_done),
    .tx_valid(rb_tx_valid), .tx_data(rb_tx_data), .tx_ready(pcap_tx_ready && !op_restore),
    .rx_valid(pcap_rx_valid), .rx_data(pcap_rx_data), .rx_ready(pcap_rx_ready),
    .out_valid(rb_out_valid), .out_data(rb_out_data), .out_idx(rb_out_idx), .out_ready(rb_out_ready),
    .pad_err(rb_pad_err), .fix_cnt(rb_fix_cnt)
  );

  wr_engine u_wr (
    .clk, .rst_n, .start(wr_start), .far_addr(cur_far), .next_far_addr(nxt_far),
    .busy(wr_busy), .done(wr_done),
    .tx_valid(wr_tx_valid), .tx_data(wr_tx_data), .tx_ready(pcap_tx_ready && op_restore),
    .data_valid(buf_valid), .data_word(buf_data), .data_ready(wr_data_ready),
    .data_idx(wr_data_idx), .frame_words(wr_frame_words), .data_err(wr_data_err)
  );

  assign pcap_tx_valid = op_restore ? wr_tx_valid : rb_tx_valid;
  assign pcap_tx_data  = op_restore ? wr_tx_data  : rb_tx_data;

  // ---- DRAM port ----
  logic rd_req;
  assign rd_req = (state == S_FRUN) && op_restore && !rd_pending && !buf_valid &&
                  (rd_cnt < 7'(FRAME_WORDS));

  always_comb begin
    dram_req     = 1'b0;
    dram_we      = 1'b0;
    dram_addr    = frame_addr;
    dram_wdata   = rb_out_data;
    rb_out_ready = 1'b0;
    if (state == S_FRUN && !op_restore) begin
      dram_req     = rb_out_valid;
      dram_we      = 1'b1;
      dram_addr    = frame_addr + 32'(rb_out_idx);
      rb_out_ready = dram_gnt;
    end else if (rd_req) begin
      dram_req  = 1'b1;
      dram_addr = frame_addr + 32'(rd_cnt);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_valid  <= 1'b0;
      buf_data   <= '0;
      rd_pending <= 1'b0;
      rd_cnt     <= '0;
    end else if (state == S_FSTART) begin
      buf_valid  <= 1'b0;
      rd_pending <= 1'b0;
      rd_cnt     <= '0;
    end else begin
      if (rd_req && dram_gnt) begin
        rd_pending <= 1'b1;
        rd_cnt     <= rd_cnt + 7'd1;
      end
      if (dram_rvalid && rd_pending) begin
        rd_pending <= 1'b0;
        buf_valid  <= 1'b1;
        buf_data   <= dram_rdata;
      end else if (buf_valid && wr_data_ready) begin
        buf_valid <= 1'b0;
      end
    end
  end

  // ---- clock-register writes ----
  always_comb begin
    cc_we    = 1'b0;
    cc_addr  = CC_LOCK;
    cc_wdata = 32'h0;
    unique case (state)
      S_CK_UNLOCK: begin cc_we = 1'b1; cc_addr = CC_UNLOCK; cc_wdata = 32'(CC_UNLOCK_KEY); end
      S_CK_SET:    begin cc_we = 1'b1; cc_addr = CC_HALT;   cc_wdata = {31'h0, !resuming}; end
      S_CK_LOCK:   begin cc_we = 1'b1; cc_addr = CC_LOCK;   cc_wdata = 32'(CC_LOCK_KEY); end
      default: ;
    endcase
  end

  // lowest pending slot
  logic [SW-1:0] first_pend;
  always_comb begin
    first_pend = '0;
    for (int i = NUM_SLOTS - 1; i >= 0; i--) if (pend[i]) first_pend = SW'(i);
  end

  // ---- main sequence ----
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      op_restore      <= 1'b0;
      resuming        <= 1'b0;
      pend            <= '0;
      slot            <= '0;
      k               <= '0;
      frame_addr      <= '0;
      wait_cnt        <= '0;
      gsr             <= 1'b0;
      done            <= 1'b0;
      frames_saved    <= '0;
      frames_restored <= '0;
      bram_fixes      <= '0;
      pad_err         <= 1'b0;
      data_err        <= 1'b0;
      pause_req       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_save || cmd_restore) begin
          op_restore <= cmd_restore;
          pend       <= cmd_slots;
          resuming   <= 1'b0;
          pause_req  <= PAUSE_HANDSHAKE;
          state      <= PAUSE_HANDSHAKE ? S_PAUSE : S_CK_UNLOCK;
        end
        // wait until the tenant reports a safe point to stop its clock
        S_PAUSE: if (pause_ack) state <= S_CK_UNLOCK;
        S_CK_UNLOCK: state <= S_CK_SET;
        S_CK_SET:    state <= S_CK_LOCK;
        S_CK_LOCK:   state <= resuming ? S_DONE : S_SLOT;
        S_SLOT: begin
          if (pend == '0) begin
            if (op_restore) begin
              gsr      <= 1'b1;
              wait_cnt <= '0;
              state    <= S_GSR;
            end else begin
              resuming <= 1'b1;
              state    <= S_CK_UNLOCK;
            end
          end else begin
            slot             <= first_pend;
            pend[first_pend] <= 1'b0;
            k                <= '0;
            frame_addr       <= SLOT_BASE[first_pend];
            if (slot_count[first_pend] != '0) state <= S_FSTART;
          end
        end
        S_FSTART: state <= S_FRUN;
        S_FRUN: begin
          if (rb_done) begin
            frames_saved <= frames_saved + 16'd1;
            bram_fixes   <= bram_fixes + 16'(rb_fix_cnt);
            pad_err      <= pad_err | rb_pad_err;
          end
          if (wr_done) begin
            frames_restored <= frames_restored + 16'd1;
          end
          if (rb_done || wr_done) begin
            wait_cnt <= '0;
            state    <= S_FGAP;
          end
        end
        S_FGAP: begin
          if (wait_cnt == '0 && op_restore) data_err <= data_err | wr_data_err;
          if (wait_cnt >= GW'(FRAME_GAP)) begin
            frame_addr <= frame_addr + 32'(FRAME_WORDS);
            k          <= k + CW'(1);
            state      <= (k + CW'(1) == slot_count[slot]) ? S_SLOT : S_FSTART;
          end else begin
            wait_cnt <= wait_cnt + GW'(1);
          end
        end
        S_GSR: begin
          wait_cnt <= wait_cnt + GW'(1);
          if (wait_cnt == GW'(GSR_CYCLES - 1)) begin
            gsr      <= 1'b0;
            resuming <= 1'b1;
            state    <= S_CK_UNLOCK;
          end
        end
        S_DONE: begin
          done      <= 1'b1;
          pause_req <= 1'b0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A DRAM request, once raised, holds its address until it is granted.
  a_dram_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                dram_req && !dram_gnt |=> dram_req && $stable(dram_addr))
    else $error("epoch_ctrl: DRAM request dropped before grant");
  a_word_order: assert property (@(posedge clk) disable iff (!rst_n)
                                 buf_valid && wr_data_ready |-> wr_data_idx == rd_cnt - 7'd1)
    else $error("epoch_ctrl: restore data out of order");
  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n) !(rb_busy && wr_busy))
    else $error("epoch_ctrl: both engines busy");

endmodule
