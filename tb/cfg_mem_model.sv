// cfg_mem_model: behavioural model of the FPGA configuration port and memory.
// Behavioural model, not synthesizable; used only by the testbenches.
//
// It stands for the vendor's processor configuration access port (PCAP) and the
// 7-series configuration logic behind it. Frames of 101 words are kept per frame
// address. The packet decoding (type-1/type-2 headers, register numbers CMD=4,
// FAR=1, FDRI=2, FDRO=3, CTL0=5, MASK=6, IDCODE=12) follows the vendor's public
// configuration guide; the behaviours below are the ones the paper reports:
//   - nothing is processed before the sync word, nor after DESYNC;
//   - LUT frames (CLB minor 26..29 and 32..35) read back as zero unless both
//     MASK and CTL0 got the GLUTMASK bit (0x100) since the last DESYNC;
//   - flip-flop frames (CLB minor 30, 31) hold the tenants' values only after a
//     GCAPTURE command; the model copies the live tenant values in at GCAPTURE;
//   - read-back (FDRO) returns one all-zero pad frame and then the frame (a test
//     can corrupt one pad word through pad_word to provoke a pad error);
//   - read-back of a BRAM frame sets bit 18 of the words of the paper's Eq. 1;
//     a BRAM frame written back with any of those bits still set is rejected
//     (the PL keeps its old state);
//   - an FDRI write of 202 words after WCFG stores the first 101 at the FAR; the
//     101 that follow are the pad frame and must be zero;
//   - an IDCODE other than the XC7Z020's is an error.
// The flip-flop frames of the two-slot top: Slot-1 at FF_FAR1 (word 0 = up
// counter, word 1 = 8-bit LFSR), Slot-2 at FF_FAR2 (word 0 = down counter,
// word 1 = 32-bit LFSR). Their contents drive the *_init outputs (INIT values
// loaded by GSR).
module cfg_mem_model
  import epoch_pkg::*;
#(
  parameter int unsigned TX_STALL_PCT = 0,
  parameter int unsigned RX_STALL_PCT = 0,
  parameter logic [31:0] FF_FAR1 = 32'h0042_011E,
  parameter logic [31:0] FF_FAR2 = 32'h0042_051E
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tx_valid,
  input  logic [31:0] tx_data,
  output logic        tx_ready,
  output logic        rx_valid,
  output logic [31:0] rx_data,
  input  logic        rx_ready,
  input  logic [3:0]  up_q,
  input  logic [3:0]  down_q,
  input  logic [7:0]  lfsr8_q,
  input  logic [31:0] lfsr32_q,
  output logic [3:0]  up_init,
  output logic [3:0]  down_init,
  output logic [7:0]  lfsr8_init,
  output logic [31:0] lfsr32_init
);

  logic [31:0] mem [logic [39:0]];
  logic [31:0] rxq [$];
  logic [31:0] fdri [$];

  // state of the current configuration sequence
  logic        synced, wcfg, glut_mask, glut_ctl0, shut;
  logic [4:0]  cur_reg;
  int unsigned wcount;
  logic [31:0] far_reg;
  logic [31:0] pad_word;  // word 7 of the read-back pad frame; a test may set it non-zero

  // statistics read by the testbenches
  int unsigned n_words, n_sync, n_desync, n_gcap, n_rcrc, n_rcfg, n_wcfg, n_start, n_shutdown;
  int unsigned n_frames_read, n_frames_written, n_bram_reject, n_bram_artifacts, n_errors;
  int unsigned n_idcode, n_glutmask_reads, n_masked_reads;

  function automatic logic [39:0] key(logic [31:0] f, int unsigned i);
    return {f, 8'(i)};
  endfunction

  function automatic logic [31:0] peek(logic [31:0] f, int unsigned i);
    if (mem.exists(key(f, i))) return mem[key(f, i)];
    return 32'h0;
  endfunction

  function automatic void poke(logic [31:0] f, int unsigned i, logic [31:0] v);
    mem[key(f, i)] = v;
    refresh_init();
  endfunction

  function automatic logic is_lut_frame(logic [31:0] f);
    far_t a;
    a = far_t'(f);
    return a.block_type == 3'b000 &&
           ((a.minor >= 7'd26 && a.minor <= 7'd29) || (a.minor >= 7'd32 && a.minor <= 7'd35));
  endfunction

  function automatic void refresh_init();
    up_init     = peek(FF_FAR1, 0)[3:0];
    lfsr8_init  = peek(FF_FAR1, 1)[7:0];
    down_init   = peek(FF_FAR2, 0)[3:0];
    lfsr32_init = peek(FF_FAR2, 1);
  endfunction

  function automatic void capture();
    mem[key(FF_FAR1, 0)] = {28'h0, up_q};
    mem[key(FF_FAR1, 1)] = {24'h0, lfsr8_q};
    mem[key(FF_FAR2, 0)] = {28'h0, down_q};
    mem[key(FF_FAR2, 1)] = lfsr32_q;
    refresh_init();
  endfunction

  function automatic void start_read(int unsigned n);
    logic [31:0] w;
    if (n != XFER_WORDS) begin
      $display("cfg_mem_model: read of %0d words, expected %0d", n, XFER_WORDS);
      n_errors++;
    end
    for (int i = 0; i < int'(FRAME_WORDS); i++) rxq.push_back(i == 7 ? pad_word : 32'h0);
    for (int i = 0; i < int'(FRAME_WORDS); i++) begin
      w = peek(far_reg, i);
      if (is_lut_frame(far_reg) && !(glut_mask && glut_ctl0)) w = 32'h0;
      if (is_bram_far(far_reg) && bram_fix_word(7'(i))) begin
        w[BRAM_FIX_BIT] = 1'b1;
        n_bram_artifacts++;
      end
      rxq.push_back(w);
    end
    if (is_lut_frame(far_reg)) begin
      if (glut_mask && glut_ctl0) n_glutmask_reads++;
      else                        n_masked_reads++;
    end
    n_frames_read++;
  endfunction

  function automatic void commit_fdri();
    logic bad;
    bad = 1'b0;
    for (int i = int'(FRAME_WORDS); i < int'(XFER_WORDS); i++)
      if (fdri[i] != 32'h0) bad = 1'b1;
    if (bad) begin
      $display("cfg_mem_model: non-zero pad frame in FDRI write");
      n_errors++;
    end
    if (!wcfg) begin
      $display("cfg_mem_model: FDRI write without WCFG");
      n_errors++;
    end else if (is_bram_far(far_reg) &&
                 (fdri[4][18] | fdri[14][18] | fdri[24][18] | fdri[34][18] | fdri[44][18] |
                  fdri[55][18] | fdri[65][18] | fdri[75][18] | fdri[85][18] | fdri[95][18])) begin
      n_bram_reject++;   // PL falls back to its old state
    end else begin
      for (int i = 0; i < int'(FRAME_WORDS); i++) mem[key(far_reg, i)] = fdri[i];
      n_frames_written++;
      refresh_init();
    end
    fdri.delete();
  endfunction

  function automatic void reg_write(logic [31:0] w);
    unique case (cur_reg)
      5'd4: begin   // CMD
        unique case (w)
          CMD_WCFG:     begin wcfg = 1'b1; n_wcfg++; end
          CMD_RCFG:     n_rcfg++;
          CMD_START:    begin shut = 1'b0; n_start++; end
          CMD_RCRC:     n_rcrc++;
          CMD_SHUTDOWN: begin shut = 1'b1; n_shutdown++; end
          CMD_GCAPTURE: begin capture(); n_gcap++; end
          CMD_DESYNC: begin
            synced = 1'b0; wcfg = 1'b0; glut_mask = 1'b0; glut_ctl0 = 1'b0; n_desync++;
          end
          default: begin $display("cfg_mem_model: unknown CMD %h", w); n_errors++; end
        endcase
      end
      5'd1: far_reg = w;
      5'd2: begin
        fdri.push_back(w);
        if (fdri.size() == XFER_WORDS) commit_fdri();
      end
      5'd5: glut_ctl0 = w[8];
      5'd6: glut_mask = w[8];
      5'd12: begin
        if (w != W_IDCODE) begin $display("cfg_mem_model: wrong IDCODE %h", w); n_errors++; end
        else n_idcode++;
      end
      default: ;
    endcase
  endfunction

  function automatic void process(logic [31:0] w);
    n_words++;
    if (!synced) begin
      if (w == W_SYNC) begin synced = 1'b1; n_sync++; end
      return;
    end
    if (wcount != 0) begin
      reg_write(w);
      wcount--;
      return;
    end
    unique case (w[31:29])
      3'b001: begin
        if (w[28:27] == 2'b10) begin cur_reg = w[17:13]; wcount = int'(w[10:0]); end
        else if (w[28:27] == 2'b01) begin cur_reg = w[17:13]; end
      end
      3'b010: begin
        if (w[28:27] == 2'b10) wcount = int'(w[26:0]);
        else if (w[28:27] == 2'b01 && cur_reg == 5'd3) start_read(int'(w[26:0]));
      end
      default: begin $display("cfg_mem_model: bad packet %h", w); n_errors++; end
    endcase
  endfunction

  initial begin
    synced = 0; wcfg = 0; glut_mask = 0; glut_ctl0 = 0; shut = 0; cur_reg = 0; wcount = 0;
    far_reg = 0; pad_word = 0;
    {n_words, n_sync, n_desync, n_gcap, n_rcrc, n_rcfg, n_wcfg, n_start, n_shutdown} = '0;
    {n_frames_read, n_frames_written, n_bram_reject, n_bram_artifacts, n_errors} = '0;
    {n_idcode, n_glutmask_reads, n_masked_reads} = '0;
    refresh_init();
  end

  logic tx_rdy_r, rx_stall_r;
  assign tx_ready = tx_rdy_r;
  assign rx_valid = (rxq.size() != 0) && !rx_stall_r;
  assign rx_data  = (rxq.size() != 0) ? rxq[0] : 32'h0;

  always @(posedge clk) begin
    if (!rst_n) begin
      tx_rdy_r   <= 1'b1;
      rx_stall_r <= 1'b0;
    end else begin
      if (tx_valid && tx_ready) process(tx_data);
      if (rx_valid && rx_ready) void'(rxq.pop_front());
      tx_rdy_r   <= ($urandom_range(99) >= TX_STALL_PCT);
      // a word on offer stays on offer until it is taken
      if (!(rx_valid && !rx_ready)) rx_stall_r <= ($urandom_range(99) < RX_STALL_PCT);
    end
  end

endmodule
