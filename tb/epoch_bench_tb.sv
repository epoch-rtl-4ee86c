// epoch_bench_tb: save and restore at the size of the complex benchmarks.
// The benchmark partitions of the design's evaluation took 3.07 to 3.18 ms to
// save at 62.2 us per frame, i.e. about 50 to 52 frames. This testbench fills
// the whole 64-entry FAR table of the default top: Slot-1 gets 52 frames (CLB
// frames with every fourth one a BRAM frame), Slot-2 the remaining 12. Both
// slots are saved, the configuration memory is overwritten with junk, and both
// are restored; every word must come back, BRAM frames included. The models run
// without stalls so that the cycle counts can be checked: a save costs 286
// cycles per frame of port traffic plus a few cycles of frame-to-frame overhead,
// and a restore one DRAM round trip per data word.
`timescale 1ns/1ps
module epoch_bench_tb;
  import epoch_pkg::*;

  localparam int N0 = 52, N1 = 12, N = N0 + N1;
  localparam logic [31:0] BASE [2] = '{32'h0000_000A, 32'h000B_0000};

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             cmd_save, cmd_restore, busy, done, far_we, gsr, update;
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
    .gsr, .startup_gsr(1'b0), .up_init, .down_init, .lfsr8_init(l8_init), .lfsr32_init(l32_init),
    .update, .up_q, .down_q, .lfsr8_q(l8_q), .lfsr32_q(l32_q),
    .clk1_running, .cc_locked, .cc_blocked, .frames_saved(n_saved), .frames_restored(n_restored),
    .bram_fixes(n_fixes), .pad_err, .data_err, .pause_req(), .pause_ack(1'b0)
  );

  cfg_mem_model u_cfg (
    .clk, .rst_n, .tx_valid(txv), .tx_data(txd), .tx_ready(txr),
    .rx_valid(rxv), .rx_data(rxd), .rx_ready(rxr),
    .up_q, .down_q, .lfsr8_q(l8_q), .lfsr32_q(l32_q),
    .up_init, .down_init, .lfsr8_init(l8_init), .lfsr32_init(l32_init)
  );

  dram_model #(.RD_LAT(2)) u_dram (
    .clk, .rst_n, .req(dreq), .we(dwe), .addr(daddr), .wdata(dwd), .gnt(dgnt),
    .rvalid(drv), .rdata(drd)
  );

  logic [31:0] far_list [N];
  logic [31:0] img [N][101];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic bit eq1(int w);
    return (w >= 4 && w <= 95) && ((w < 54 && w % 10 == 4) || (w > 54 && w % 10 == 5));
  endfunction

  task automatic run(bit restore, output int cycles);
    @(negedge clk); cmd_save = !restore; cmd_restore = restore; cmd_slots = 2'b11;
    @(negedge clk); cmd_save = 0; cmd_restore = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cs, cr, bad, nbram;
    cmd_save = 0; cmd_restore = 0; cmd_slots = 0; far_we = 0; far_waddr = 0; far_wdata = 0;
    update = 0;
    slot_first = {6'(N0), 6'd0}; slot_count = {7'(N1), 7'(N0)};
    nbram = 0;
    for (int j = 0; j < N; j++) begin
      if (j < N0 && j % 4 == 3) begin
        far_list[j] = 32'h00C2_0000 | (32'(10 + j / 26) << 7) | 32'(j % 26);
        nbram++;
      end else if (j < N0)
        far_list[j] = 32'h0042_0000 | (32'(20 + j / 26) << 7) | 32'(j % 26);
      else
        far_list[j] = 32'h0042_0000 | (32'd40 << 7) | 32'(j - N0);
      for (int i = 0; i < 101; i++) begin
        img[j][i] = $urandom();
        if (far_list[j][25:23] == 3'b001 && eq1(i)) img[j][i][18] = 1'b0;
        u_cfg.poke(far_list[j], i, img[j][i]);
      end
    end
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) begin
      @(negedge clk); far_we = 1; far_waddr = 6'(j); far_wdata = far_list[j];
    end
    @(negedge clk); far_we = 0;

    run(0, cs);
    check(n_saved == 16'(N), $sformatf("%0d frames saved, expected %0d", n_saved, N));
    bad = 0;
    for (int j = 0; j < N; j++)
      for (int i = 0; i < 101; i++)
        if (u_dram.peek((j < N0 ? BASE[0] + 32'(101 * j) : BASE[1] + 32'(101 * (j - N0))) + 32'(i)) != img[j][i]) bad++;
    check(bad == 0, $sformatf("DRAM image: %0d words differ", bad));
    check(n_fixes == 16'(10 * nbram), $sformatf("BRAM words treated: %0d, expected %0d", n_fixes, 10 * nbram));
    check(cs >= 286 * N && cs <= 290 * N, $sformatf("save took %0d cycles for %0d frames", cs, N));

    for (int j = 0; j < N; j++) for (int i = 0; i < 101; i++) u_cfg.poke(far_list[j], i, ~img[j][i]);
    run(1, cr);
    check(n_restored == 16'(N), $sformatf("%0d frames restored", n_restored));
    bad = 0;
    for (int j = 0; j < N; j++) for (int i = 0; i < 101; i++) if (u_cfg.peek(far_list[j], i) != img[j][i]) bad++;
    check(bad == 0, $sformatf("configuration memory after restore: %0d words differ", bad));
    check(cr >= 247 * N && cr <= 700 * N, $sformatf("restore took %0d cycles for %0d frames", cr, N));
    check(u_cfg.n_bram_reject == 0 && u_cfg.n_errors == 0 && !pad_err && !data_err, "errors reported");
    check(clk1_running && cc_locked, "CLK1 running, clock registers locked");
    $display("bench: %0d frames, save %0d cycles (%0d per frame), restore %0d cycles (%0d per frame)",
             N, cs, cs / N, cr, cr / N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
