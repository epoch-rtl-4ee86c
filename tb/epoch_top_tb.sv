// epoch_top_tb: end-to-end run of the two-slot system at its default parameters.
// It follows the demonstration scenario of the design: the up-counter (Slot-1)
// and down-counter (Slot-2) start at 0x0 and 0xF and reach 0x3 and 0xC after three
// update presses; both slots are saved; four more presses take them to 0x7 and
// 0x8; the slots are blanked and reset; a restore brings back 0x3 and 0xC and the
// LFSRs' values at the moment of the save, and the tenants carry on from there.
// Each slot has a LUT, a flip-flop and a BRAM frame. Every mechanism of the design
// is counted and must occur at least once: clock halt, presses ignored while
// halted, GCAPTURE, unmasked LUT read-back, pad frame discarded, BRAM bit-18
// treatment, CRC reset, IDCODE check, DESYNC, GSR after restore, write-protect
// re-lock, DRAM and configuration-port stalls.
`timescale 1ns/1ps
module epoch_top_tb;
  import epoch_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             cmd_save, cmd_restore, busy, done, far_we, gsr, startup_gsr, update;
  logic [1:0]       cmd_slots;
  logic [5:0]       far_waddr;
  logic [31:0]      far_wdata;
  logic [1:0][5:0]  slot_first;
  logic [1:0][6:0]  slot_count;
  logic             txv, txr, rxv, rxr, dreq, dwe, dgnt, drv;
  logic [31:0]      txd, rxd, daddr, dwd, drd;
  logic [3:0]       up_init, down_init, up_q, down_q;
  logic [7:0]       l8_init, l8_q, cc_blocked;
  logic [31:0]      l32_init, l32_q;
  logic             clk1_running, cc_locked, pad_err, data_err;
  logic [15:0]      n_saved, n_restored, n_fixes;

  epoch_top dut (
    .clk, .rst_n, .cmd_save, .cmd_restore, .cmd_slots, .busy, .done,
    .far_we, .far_waddr, .far_wdata, .slot_first, .slot_count,
    .pcap_tx_valid(txv), .pcap_tx_data(txd), .pcap_tx_ready(txr),
    .pcap_rx_valid(rxv), .pcap_rx_data(rxd), .pcap_rx_ready(rxr),
    .dram_req(dreq), .dram_we(dwe), .dram_addr(daddr), .dram_wdata(dwd), .dram_gnt(dgnt),
    .dram_rvalid(drv), .dram_rdata(drd),
    .gsr, .startup_gsr, .up_init, .down_init, .lfsr8_init(l8_init), .lfsr32_init(l32_init),
    .update, .up_q, .down_q, .lfsr8_q(l8_q), .lfsr32_q(l32_q),
    .clk1_running, .cc_locked, .cc_blocked, .frames_saved(n_saved), .frames_restored(n_restored),
    .bram_fixes(n_fixes), .pad_err, .data_err, .pause_req(), .pause_ack(1'b0)
  );

  cfg_mem_model #(.TX_STALL_PCT(5), .RX_STALL_PCT(5)) u_cfg (
    .clk, .rst_n, .tx_valid(txv), .tx_data(txd), .tx_ready(txr),
    .rx_valid(rxv), .rx_data(rxd), .rx_ready(rxr),
    .up_q, .down_q, .lfsr8_q(l8_q), .lfsr32_q(l32_q),
    .up_init, .down_init, .lfsr8_init(l8_init), .lfsr32_init(l32_init)
  );

  dram_model #(.GNT_STALL_PCT(10), .RD_LAT(3)) u_dram (
    .clk, .rst_n, .req(dreq), .we(dwe), .addr(daddr), .wdata(dwd), .gnt(dgnt),
    .rvalid(drv), .rdata(drd)
  );

  localparam logic [31:0] FARS [6] = '{32'h0042_011A, 32'h0042_011E, 32'h00C2_0100,
                                       32'h0042_051A, 32'h0042_051E, 32'h00C2_0500};
  localparam logic [31:0] BASE [2] = '{32'h0000_000A, 32'h000B_0000};
  int fix_words [10] = '{4, 14, 24, 34, 44, 55, 65, 75, 85, 95};
  logic [31:0] img [6][101];

  // ---- mechanism counters ----
  int m_halts, m_ignored_presses, m_gsr_restore, m_txstall, m_rxstall;
  logic clk1_q, gsr_q;
  always @(posedge clk) begin
    clk1_q <= clk1_running;
    gsr_q  <= gsr;
    if (rst_n && clk1_q && !clk1_running) m_halts++;
    if (rst_n && gsr && !gsr_q) m_gsr_restore++;
    if (txv && !txr) m_txstall++;
    if (rxr && !rxv && busy) m_rxstall++;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic press();
    @(negedge clk); update = 1;
    repeat (2) @(negedge clk);
    update = 0;
    repeat (2) @(negedge clk);
  endtask

  function automatic logic [7:0] step8(logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
  endfunction
  function automatic logic [31:0] step32(logic [31:0] s);
    return {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
  endfunction

  // Run a save or restore; press update while CLK1 is halted and record the
  // LFSR values at the halt and at the resume.
  logic [7:0]  l8_halt, l8_resume;
  logic [31:0] l32_halt, l32_resume;
  task automatic operate(bit restore, output int cycles);
    logic [3:0] u0, d0;
    bit pressed;
    @(negedge clk); cmd_save = !restore; cmd_restore = restore; cmd_slots = 2'b11;
    @(negedge clk); cmd_save = 0; cmd_restore = 0; cycles = 1; pressed = 0;
    while (clk1_running) begin @(negedge clk); cycles++; end
    l8_halt = l8_q; l32_halt = l32_q;
    while (!done) begin
      if (!pressed && cycles > 50 && !restore) begin
        u0 = up_q; d0 = down_q;
        update = 1; repeat (3) @(negedge clk); update = 0; cycles += 3;
        if (up_q == u0 && down_q == d0) m_ignored_presses++;
        pressed = 1;
      end
      if (!clk1_running) begin l8_resume = l8_q; l32_resume = l32_q; end
      @(negedge clk); cycles++;
    end
  endtask

  initial begin
    int cyc, bad;
    logic [7:0] s8;
    logic [31:0] s32;
    cmd_save = 0; cmd_restore = 0; cmd_slots = 0; far_we = 0; far_waddr = 0; far_wdata = 0;
    update = 0; startup_gsr = 0;
    #1 rst_n = 0;
    slot_first = {6'd3, 6'd0}; slot_count = {7'd3, 7'd3};
    // configuration memory after configuration: LUT and BRAM contents, INIT values
    for (int f = 0; f < 6; f++)
      for (int i = 0; i < 101; i++) begin
        img[f][i] = (f == 1 || f == 4) ? 32'h0 : $urandom();
        if (f == 2 || f == 5) foreach (fix_words[j]) if (fix_words[j] == i) img[f][i][18] = 1'b0;
        u_cfg.poke(FARS[f], i, img[f][i]);
      end
    u_cfg.poke(FARS[1], 0, 32'h0);  u_cfg.poke(FARS[1], 1, 32'h5A);
    u_cfg.poke(FARS[4], 0, 32'hF);  u_cfg.poke(FARS[4], 1, 32'hC0FF_EE01);
    // end of configuration: the configuration logic pulses GSR
    startup_gsr = 1;
    repeat (3) @(negedge clk);
    startup_gsr = 0; rst_n = 1;
    @(negedge clk);
    check(up_q == 4'h0 && down_q == 4'hF, "start-up values 0x0 / 0xF");
    for (int f = 0; f < 6; f++) begin
      far_we = 1; far_waddr = 6'(f); far_wdata = FARS[f]; @(negedge clk);
    end
    far_we = 0;

    repeat (3) press();
    check(up_q == 4'h3 && down_q == 4'hC, $sformatf("after 3 presses %h/%h", up_q, down_q));

    // ---- save ----
    operate(0, cyc);
    s8 = l8_halt; s32 = l32_halt;
    check(n_saved == 6, $sformatf("%0d frames saved", n_saved));
    check(l8_resume == l8_halt && l32_resume == l32_halt, "LFSRs moved while CLK1 was halted");
    check(u_dram.peek(BASE[0] + 101) == 32'h3 && u_dram.peek(BASE[1] + 101) == 32'hC,
          "saved counter values in DRAM are not 0x3 / 0xC");
    check(u_dram.peek(BASE[0] + 102) == {24'h0, l8_halt} && u_dram.peek(BASE[1] + 102) == l32_halt,
          "saved LFSR values in DRAM differ from the values at the halt");
    bad = 0;
    foreach (fix_words[j]) if (u_dram.peek(BASE[0] + 202 + 32'(fix_words[j]))[18]) bad++;
    check(bad == 0, "BRAM frame saved without bit-18 treatment");
    check(u_dram.peek(BASE[0]) == img[0][0] && u_dram.peek(BASE[1] + 100) == img[3][100],
          "LUT frames saved wrongly");
    check(clk1_running && cc_locked, "CLK1 running and registers locked after save");

    // tenants carry on
    repeat (4) press();
    check(up_q == 4'h7 && down_q == 4'h8, $sformatf("after 4 more presses %h/%h", up_q, down_q));

    // ---- blank and reset both slots ----
    for (int f = 0; f < 6; f++) for (int i = 0; i < 101; i++) u_cfg.poke(FARS[f], i, 32'h0);
    @(negedge clk); startup_gsr = 1; @(negedge clk); startup_gsr = 0;
    check(up_q == 4'h0 && down_q == 4'h0 && l8_q == 8'h0, "slots not blank after reset");

    // ---- restore ----
    operate(1, cyc);
    @(negedge clk);
    check(n_restored == 6, $sformatf("%0d frames restored", n_restored));
    check(up_q == 4'h3 && down_q == 4'hC, $sformatf("restored counters %h/%h, expected 3/C", up_q, down_q));
    bad = 0;
    for (int f = 0; f < 6; f++) if (f != 1 && f != 4)
      for (int i = 0; i < 101; i++) if (u_cfg.peek(FARS[f], i) != img[f][i]) bad++;
    check(bad == 0, $sformatf("restored LUT/BRAM frames: %0d words differ", bad));
    begin
      // LFSRs restart from the saved state and step once per CLK1 cycle
      logic [7:0] e8; logic [31:0] e32; int n;
      e8 = s8; e32 = s32; n = 0;
      while (n < 300 && e8 != l8_q) begin e8 = step8(e8); e32 = step32(e32); n++; end
      check(e8 == l8_q && e32 == l32_q, "LFSRs do not continue from the saved state");
    end
    press();
    check(up_q == 4'h4 && down_q == 4'hB, "counters do not continue after restore");

    // ---- mechanisms ----
    check(m_halts == 2, $sformatf("clock halts: %0d", m_halts));
    check(m_ignored_presses >= 1, "no press was ignored while halted");
    check(u_cfg.n_gcap == 6, $sformatf("GCAPTURE: %0d", u_cfg.n_gcap));
    check(u_cfg.n_glutmask_reads == 2 && u_cfg.n_masked_reads == 0, "LUT frames not read unmasked");
    check(n_fixes == 20 && u_cfg.n_bram_artifacts == 20, $sformatf("BRAM treatment: %0d", n_fixes));
    check(u_cfg.n_rcrc == 6 * 2 + 6 * 3, $sformatf("CRC resets: %0d", u_cfg.n_rcrc));
    check(u_cfg.n_idcode == 6, "IDCODE not sent once per frame write");
    check(u_cfg.n_desync == 12, "DESYNC not sent once per sequence");
    check(u_cfg.n_bram_reject == 0, "a BRAM frame was refused");
    check(m_gsr_restore == 1, $sformatf("GSR pulses after restore: %0d", m_gsr_restore));
    check(cc_locked && cc_blocked == 0, "clock registers not re-locked / blocked writes");
    check(u_dram.n_stalls > 0 && m_txstall > 0 && m_rxstall > 0, "stalls did not occur");
    check(!pad_err && !data_err && u_cfg.n_errors == 0, "error flags");
    $display("mechanisms: halts=%0d ignored_presses=%0d gcap=%0d bram_fixes=%0d crc_resets=%0d gsr=%0d dram_stalls=%0d tx_stalls=%0d rx_stalls=%0d",
             m_halts, m_ignored_presses, u_cfg.n_gcap, n_fixes, u_cfg.n_rcrc, m_gsr_restore,
             u_dram.n_stalls, m_txstall, m_rxstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
