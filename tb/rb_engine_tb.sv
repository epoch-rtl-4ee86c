// rb_engine_tb: read-back of LUT, flip-flop and BRAM frames from the
// configuration-memory model. Checks the 101 context words and their order, that
// the pad frame is dropped, that LUT frames come back unmasked, that the FF frame
// holds the values present at GCAPTURE, that exactly the 10 words of Eq. 1 have
// bit 18 cleared in a BRAM frame, that a non-zero pad word raises pad_err for that
// read-back only, and the 285-word / 286-cycle timing.
`timescale 1ns/1ps
module rb_engine_tb;
  import epoch_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge, so that the asynchronous resets fire
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, busy, done, txv, txr, rxv, rxr, ov, ordy, pad_err;
  logic [31:0] far_addr, txd, rxd, od;
  logic [6:0]  oi, fix_cnt;
  logic [3:0]  ui, di;
  logic [7:0]  l8i;
  logic [31:0] l32i;
  int          stall_pct;

  rb_engine dut (
    .clk, .rst_n, .start, .far_addr, .busy, .done, .tx_valid(txv), .tx_data(txd), .tx_ready(txr),
    .rx_valid(rxv), .rx_data(rxd), .rx_ready(rxr), .out_valid(ov), .out_data(od), .out_idx(oi),
    .out_ready(ordy), .pad_err, .fix_cnt
  );

  // live tenant values seen by the model at GCAPTURE
  logic [3:0]  live_up = 4'h3, live_dn = 4'hC;
  logic [7:0]  live_l8 = 8'hA5;
  logic [31:0] live_l32 = 32'h1234_5678;

  cfg_mem_model #(.TX_STALL_PCT(0), .RX_STALL_PCT(0)) u_cfg (
    .clk, .rst_n, .tx_valid(txv), .tx_data(txd), .tx_ready(txr),
    .rx_valid(rxv), .rx_data(rxd), .rx_ready(rxr),
    .up_q(live_up), .down_q(live_dn), .lfsr8_q(live_l8), .lfsr32_q(live_l32),
    .up_init(ui), .down_init(di), .lfsr8_init(l8i), .lfsr32_init(l32i)
  );

  logic [31:0] got [$];
  int          idx_err;
  always @(posedge clk) begin
    if (ov && ordy) begin
      if (oi != 7'(got.size())) idx_err++;
      got.push_back(od);
    end
    ordy <= ($urandom_range(99) >= stall_pct);
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam logic [31:0] LUT_FAR  = 32'h0042_011A;
  localparam logic [31:0] FF_FAR   = 32'h0042_011E;
  localparam logic [31:0] BRAM_FAR = 32'h00C2_0100;
  int fix_words [10] = '{4, 14, 24, 34, 44, 55, 65, 75, 85, 95};
  logic [31:0] ref_lut [101], ref_bram [101];

  task automatic readback(logic [31:0] f, output int cycles, input bit pad_bad = 0);
    got.delete(); idx_err = 0;
    @(negedge clk); far_addr = f; start = 1;
    @(negedge clk); start = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    check(got.size() == 101, $sformatf("FAR %h: %0d words, expected 101", f, got.size()));
    check(idx_err == 0, "word index out of step");
    check(pad_err == pad_bad, pad_bad ? "corrupt pad word not flagged" : "pad error");
  endtask

  initial begin
    int cyc, bad, n18;
    start = 0; far_addr = 0; stall_pct = 0; ordy = 1;
    for (int i = 0; i < 101; i++) begin
      ref_lut[i]  = $urandom();
      ref_bram[i] = $urandom();
      u_cfg.poke(LUT_FAR, i, ref_lut[i]);
    end
    foreach (fix_words[j]) ref_bram[fix_words[j]][18] = 1'b0;  // value originally written
    for (int i = 0; i < 101; i++) u_cfg.poke(BRAM_FAR, i, ref_bram[i]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // LUT frame, no stalls: exact timing
    readback(LUT_FAR, cyc);
    check(cyc == 83 + 202 + 1, $sformatf("cycles %0d, expected 286", cyc));
    bad = 0;
    for (int i = 0; i < 101 && i < got.size(); i++) if (got[i] != ref_lut[i]) bad++;
    check(bad == 0, $sformatf("LUT frame: %0d words differ (masked?)", bad));
    check(u_cfg.n_glutmask_reads == 1 && u_cfg.n_masked_reads == 0, "LUT frame read without GLUTMASK");
    check(fix_cnt == 0, "bits cleared in a CLB frame");

    // flip-flop frame: values at GCAPTURE
    readback(FF_FAR, cyc);
    check(got.size() > 1 && got[0] == 32'h3 && got[1] == 32'hA5, "FF frame does not hold captured values");
    check(u_cfg.n_gcap == 2, "GCAPTURE not sent once per read-back");

    // BRAM frame with stalls on the DRAM side
    stall_pct = 30;
    readback(BRAM_FAR, cyc);
    check(cyc > 286, "stalls did not lengthen the read-back");
    bad = 0; n18 = 0;
    for (int i = 0; i < 101 && i < got.size(); i++) if (got[i] != ref_bram[i]) bad++;
    check(bad == 0, $sformatf("BRAM frame: %0d words differ after bit-18 treatment", bad));
    check(u_cfg.n_bram_artifacts == 10, "model did not set the 10 bit-18 artifacts");
    check(fix_cnt == 10, $sformatf("fix_cnt %0d, expected 10", fix_cnt));
    check(u_cfg.n_errors == 0, "configuration model reported errors");
    // a non-zero pad word is flagged, and the data still comes through
    stall_pct = 0;
    u_cfg.pad_word = 32'h0000_0100;
    readback(LUT_FAR, cyc, 1);
    bad = 0;
    for (int i = 0; i < 101 && i < got.size(); i++) if (got[i] != ref_lut[i]) bad++;
    check(bad == 0, "data disturbed by a corrupt pad word");
    u_cfg.pad_word = 32'h0;
    readback(LUT_FAR, cyc);
    check(u_cfg.n_desync == 5 && u_cfg.n_shutdown == 5 && u_cfg.n_start == 5,
          "each read-back must shut down, restart and desync once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
