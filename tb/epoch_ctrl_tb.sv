// epoch_ctrl_tb: save and restore of two slots, three frames each (LUT, flip-flop
// and BRAM), through the configuration-memory and DRAM models with random stalls.
// Checks the DRAM image (slot bases 0x0000000A and 0x000B0000, 101 words per
// frame), the BRAM treatment, that CLK1 is halted for the whole of each operation
// and running after it, the GSR pulse (restore only, 4 cycles, clock halted),
// slot selection, the per-frame save time, and that FRAME_GAP adds exactly its
// idle cycles after every frame (a second and third controller, with and without
// the gap, run the same save side by side; the paced one also waits for the
// tenant's pause_ack before stopping CLK1).
`timescale 1ns/1ps
module epoch_ctrl_tb;
  import epoch_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge, so that the asynchronous resets fire
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             cmd_save, cmd_restore, busy, done, far_we, cc_we, gsr, pad_err, data_err;
  logic [1:0]       cmd_slots, cc_addr;
  logic [5:0]       far_waddr;
  logic [31:0]      far_wdata, cc_wdata;
  logic [1:0][5:0]  slot_first;
  logic [1:0][6:0]  slot_count;
  logic             txv, txr, rxv, rxr, dreq, dwe, dgnt, drv;
  logic [31:0]      txd, rxd, daddr, dwd, drd;
  logic [15:0]      n_saved, n_restored, n_fixes;
  logic             clk_en, locked;
  logic [7:0]       blocked;
  logic [3:0]       ui, dni;
  logic [7:0]       l8i;
  logic [31:0]      l32i;

  epoch_ctrl dut (
    .clk, .rst_n, .cmd_save, .cmd_restore, .cmd_slots, .busy, .done,
    .far_we, .far_waddr, .far_wdata, .slot_first, .slot_count,
    .cc_we, .cc_addr, .cc_wdata,
    .pcap_tx_valid(txv), .pcap_tx_data(txd), .pcap_tx_ready(txr),
    .pcap_rx_valid(rxv), .pcap_rx_data(rxd), .pcap_rx_ready(rxr),
    .dram_req(dreq), .dram_we(dwe), .dram_addr(daddr), .dram_wdata(dwd), .dram_gnt(dgnt),
    .dram_rvalid(drv), .dram_rdata(drd), .gsr,
    .frames_saved(n_saved), .frames_restored(n_restored), .bram_fixes(n_fixes),
    .pad_err, .data_err, .pause_req(), .pause_ack(1'b0)
  );

  clk_ctrl u_cc (.clk, .rst_n, .we(cc_we), .addr(cc_addr), .wdata(cc_wdata),
                 .clk_en, .locked, .blocked_cnt(blocked));

  logic [3:0]  live_up = 4'h3, live_dn = 4'hC;
  logic [7:0]  live_l8 = 8'h3C;
  logic [31:0] live_l32 = 32'hDEAD_BEEF;

  cfg_mem_model #(.TX_STALL_PCT(10), .RX_STALL_PCT(10)) u_cfg (
    .clk, .rst_n, .tx_valid(txv), .tx_data(txd), .tx_ready(txr),
    .rx_valid(rxv), .rx_data(rxd), .rx_ready(rxr),
    .up_q(live_up), .down_q(live_dn), .lfsr8_q(live_l8), .lfsr32_q(live_l32),
    .up_init(ui), .down_init(dni), .lfsr8_init(l8i), .lfsr32_init(l32i)
  );

  dram_model #(.GNT_STALL_PCT(20), .RD_LAT(2)) u_dram (
    .clk, .rst_n, .req(dreq), .we(dwe), .addr(daddr), .wdata(dwd), .gnt(dgnt),
    .rvalid(drv), .rdata(drd)
  );


  // Pacing: the same save on a controller with FRAME_GAP = 25 and on one with no
  // gap, both against stall-free models, must differ by exactly 25 cycles a frame.
  localparam int GAP = 25;
  logic             p_save [2], p_done [2], p_txv [2], p_txr [2], p_rxv [2], p_rxr [2];
  logic             p_dreq [2], p_dwe [2], p_dgnt [2], p_drv [2], p_ccwe [2], p_gsr [2];
  logic             p_pe [2], p_de [2], p_busy [2];
  logic [31:0]      p_txd [2], p_rxd [2], p_daddr [2], p_dwd [2], p_drd [2], p_ccwd [2];
  logic [1:0]       p_cca [2];
  logic [15:0]      p_ns [2], p_nr [2], p_nf [2];
  logic [3:0]       p_ui [2], p_di [2];
  logic [7:0]       p_l8 [2];
  logic [31:0]      p_l32 [2];
  logic             p_preq [2], p_pack [2];
  // the tenant of the paced controller answers pause_req ACK_DELAY cycles late;
  // the unpaced one has no handshake
  localparam int ACK_DELAY = 10;
  int ack_wait, halt_before_ack, req_pulses;
  logic preq_q;
  always @(posedge clk) begin
    p_pack[0] <= 1'b0;
    preq_q    <= p_preq[1];
    if (p_preq[1] && !preq_q) req_pulses++;
    ack_wait  <= p_preq[1] ? ack_wait + 1 : 0;
    p_pack[1] <= p_preq[1] && (ack_wait >= ACK_DELAY - 1);
    if (p_ccwe[1] && p_cca[1] == CC_HALT && p_ccwd[1][0] && !p_pack[1]) halt_before_ack++;
  end
  for (genvar g = 0; g < 2; g++) begin : g_pace
    epoch_ctrl #(.FRAME_GAP(g == 1 ? GAP : 0), .PAUSE_HANDSHAKE(g == 1)) dut_p (
      .clk, .rst_n, .cmd_save(p_save[g]), .cmd_restore(1'b0), .cmd_slots(2'b11),
      .busy(p_busy[g]), .done(p_done[g]),
      .far_we, .far_waddr, .far_wdata, .slot_first, .slot_count,
      .cc_we(p_ccwe[g]), .cc_addr(p_cca[g]), .cc_wdata(p_ccwd[g]),
      .pcap_tx_valid(p_txv[g]), .pcap_tx_data(p_txd[g]), .pcap_tx_ready(p_txr[g]),
      .pcap_rx_valid(p_rxv[g]), .pcap_rx_data(p_rxd[g]), .pcap_rx_ready(p_rxr[g]),
      .dram_req(p_dreq[g]), .dram_we(p_dwe[g]), .dram_addr(p_daddr[g]), .dram_wdata(p_dwd[g]),
      .dram_gnt(p_dgnt[g]), .dram_rvalid(p_drv[g]), .dram_rdata(p_drd[g]), .gsr(p_gsr[g]),
      .frames_saved(p_ns[g]), .frames_restored(p_nr[g]), .bram_fixes(p_nf[g]),
      .pad_err(p_pe[g]), .data_err(p_de[g]), .pause_req(p_preq[g]), .pause_ack(p_pack[g])
    );
    cfg_mem_model u_cfg_p (
      .clk, .rst_n, .tx_valid(p_txv[g]), .tx_data(p_txd[g]), .tx_ready(p_txr[g]),
      .rx_valid(p_rxv[g]), .rx_data(p_rxd[g]), .rx_ready(p_rxr[g]),
      .up_q(live_up), .down_q(live_dn), .lfsr8_q(live_l8), .lfsr32_q(live_l32),
      .up_init(p_ui[g]), .down_init(p_di[g]), .lfsr8_init(p_l8[g]), .lfsr32_init(p_l32[g])
    );
    dram_model u_dram_p (
      .clk, .rst_n, .req(p_dreq[g]), .we(p_dwe[g]), .addr(p_daddr[g]), .wdata(p_dwd[g]),
      .gnt(p_dgnt[g]), .rvalid(p_drv[g]), .rdata(p_drd[g])
    );
  end

  localparam logic [31:0] FARS [6] = '{32'h0042_011A, 32'h0042_011E, 32'h00C2_0100,
                                       32'h0042_051A, 32'h0042_051E, 32'h00C2_0500};
  localparam logic [31:0] BASE [2] = '{32'h0000_000A, 32'h000B_0000};
  int fix_words [10] = '{4, 14, 24, 34, 44, 55, 65, 75, 85, 95};
  logic [31:0] img [6][101];

  // monitors
  int gsr_cycles, gsr_while_running, gsr_pulses, busy_running;
  logic gsr_q;
  always @(posedge clk) begin
    gsr_q <= gsr;
    if (gsr) begin gsr_cycles++; if (clk_en) gsr_while_running++; end
    if (gsr && !gsr_q) gsr_pulses++;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run(bit restore, logic [1:0] slots, output int cycles);
    bit halted_seen;
    @(negedge clk); cmd_save = !restore; cmd_restore = restore; cmd_slots = slots;
    @(negedge clk); cmd_save = 0; cmd_restore = 0; cycles = 1; halted_seen = 0;
    while (!done) begin
      // from the third cycle (after the halt write) to the resume write, CLK1 is stopped
      if (u_cfg.n_words != 0 && txv && clk_en) busy_running++;
      if (!clk_en) halted_seen = 1;
      @(negedge clk); cycles++;
    end
    check(halted_seen, "CLK1 never halted");
    @(negedge clk);
    check(clk_en && locked, "CLK1 not running / registers not locked after the operation");
  endtask

  task automatic blank(int first, int last);
    for (int f = first; f <= last; f++)
      for (int i = 0; i < 101; i++) u_cfg.poke(FARS[f], i, 32'h0);
  endtask

  function automatic int differ_cfg(int f);
    int bad = 0;
    for (int i = 0; i < 101; i++) if (u_cfg.peek(FARS[f], i) != img[f][i]) bad++;
    return bad;
  endfunction

  initial begin
    int cyc, bad;
    p_save[0] = 0; p_save[1] = 0; ack_wait = 0; halt_before_ack = 0; req_pulses = 0;
    cmd_save = 0; cmd_restore = 0; cmd_slots = 0; far_we = 0; far_waddr = 0; far_wdata = 0;
    slot_first = {6'd3, 6'd0}; slot_count = {7'd3, 7'd3};
    gsr_cycles = 0; gsr_while_running = 0; gsr_pulses = 0; busy_running = 0;
    // configuration memory contents and the expected image
    for (int f = 0; f < 6; f++)
      for (int i = 0; i < 101; i++) begin
        img[f][i] = $urandom();
        if (f == 2 || f == 5) foreach (fix_words[j]) if (fix_words[j] == i) img[f][i][18] = 1'b0;
        u_cfg.poke(FARS[f], i, img[f][i]);
        g_pace[0].u_cfg_p.poke(FARS[f], i, img[f][i]);
        g_pace[1].u_cfg_p.poke(FARS[f], i, img[f][i]);
      end
    // flip-flop frames hold the values captured at GCAPTURE

    img[1][0] = 32'h3; img[1][1] = 32'h3C; img[4][0] = 32'hC; img[4][1] = 32'hDEAD_BEEF;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < 6; f++) begin
      far_we = 1; far_waddr = 6'(f); far_wdata = FARS[f]; @(negedge clk);
    end
    far_we = 0;

    // ---- save both slots ----
    run(0, 2'b11, cyc);
    check(n_saved == 6, $sformatf("%0d frames saved, expected 6", n_saved));
    check(n_fixes == 20, $sformatf("%0d BRAM bits cleared, expected 20", n_fixes));
    check(cyc >= 6 * 285 && cyc < 6 * 285 * 2, $sformatf("save took %0d cycles", cyc));
    bad = 0;
    for (int f = 0; f < 6; f++)
      for (int i = 0; i < 101; i++)
        if (u_dram.peek(BASE[f / 3] + 32'((f % 3) * 101 + i)) != img[f][i]) bad++;
    check(bad == 0, $sformatf("DRAM image: %0d words differ", bad));
    check(gsr_pulses == 0, "GSR pulsed during a save");
    check(busy_running == 0, "configuration traffic while CLK1 was running");

    // ---- clobber, then restore both slots ----
    blank(0, 5);
    run(1, 2'b11, cyc);
    check(n_restored == 6, $sformatf("%0d frames restored", n_restored));
    bad = 0;
    for (int f = 0; f < 6; f++) bad += differ_cfg(f);
    check(bad == 0, $sformatf("restored configuration memory: %0d words differ", bad));
    check(ui == 4'h3 && dni == 4'hC && l8i == 8'h3C && l32i == 32'hDEAD_BEEF,
          "INIT values after restore");
    check(gsr_pulses == 1 && gsr_cycles == 4, $sformatf("GSR: %0d pulses, %0d cycles", gsr_pulses, gsr_cycles));
    check(gsr_while_running == 0, "GSR asserted while CLK1 was running");
    check(u_cfg.n_bram_reject == 0, "a BRAM frame was refused");

    // ---- restore Slot-2 only ----
    blank(0, 5);
    run(1, 2'b10, cyc);
    check(n_restored == 9, "Slot-2 restore did not write 3 frames");
    check(differ_cfg(3) + differ_cfg(4) + differ_cfg(5) == 0, "Slot-2 not restored");
    check(u_cfg.peek(FARS[0], 5) == 32'h0, "Slot-1 written although not selected");

    // ---- paced save: FRAME_GAP idle cycles after every frame ----
    begin
      int pc [2];
      bit fin [2];
      @(negedge clk); p_save[0] = 1; p_save[1] = 1;
      @(negedge clk); p_save[0] = 0; p_save[1] = 0; pc[0] = 1; pc[1] = 1;
      fin[0] = 0; fin[1] = 0;
      while (!(fin[0] && fin[1])) begin
        for (int g = 0; g < 2; g++) if (p_done[g]) fin[g] = 1; else if (!fin[g]) pc[g]++;
        @(negedge clk);
      end
      check(p_ns[0] == 6 && p_ns[1] == 6, "paced save: frames missing");
      // the handshake adds the tenant's answer time (pause_ack is seen ACK_DELAY cycles
      // after pause_req rises) and the cycle in which the controller leaves its wait state
      check(pc[1] - pc[0] == 6 * GAP + ACK_DELAY + 1,
            $sformatf("FRAME_GAP=%0d and a %0d-cycle pause answer added %0d cycles, expected %0d",
                      GAP, ACK_DELAY, pc[1] - pc[0], 6 * GAP + ACK_DELAY + 1));
      check(req_pulses == 1 && halt_before_ack == 0 && !p_preq[1],
            "pause handshake: CLK1 halted before pause_ack, or pause_req not one pulse per operation");
      check(g_pace[1].u_dram_p.peek(BASE[1] + 32'd5) == g_pace[0].u_dram_p.peek(BASE[1] + 32'd5) &&
            g_pace[1].u_dram_p.peek(BASE[1] + 32'd5) == img[3][5], "paced save stored other data");
    end
    check(!pad_err && !data_err && u_cfg.n_errors == 0, "error flags");
    check(u_dram.n_stalls > 0, "DRAM stalls never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
