// wr_engine_tb: writes frames through the Table II template into the
// configuration-memory model and checks that the model stored them (so header,
// IDCODE, FAR, WCFG, FDRI count, pad frame, CRC resets and DESYNC were accepted),
// the 246-word / 247-cycle timing, and that a BRAM frame still carrying the bit-18
// artifact is refused by the model while a treated one is accepted.
`timescale 1ns/1ps
module wr_engine_tb;
  import epoch_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge, so that the asynchronous resets fire
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, busy, done, txv, txr, dv, dr, data_err, rxv, rxr;
  logic [31:0] far_addr, next_far, txd, dw, rxd;
  logic [6:0]  di, fw;
  logic [3:0]  ui, dni;
  logic [7:0]  l8i;
  logic [31:0] l32i;
  int          stall_pct;
  logic [31:0] frame [101];

  wr_engine dut (
    .clk, .rst_n, .start, .far_addr, .next_far_addr(next_far), .busy, .done,
    .tx_valid(txv), .tx_data(txd), .tx_ready(txr),
    .data_valid(dv), .data_word(dw), .data_ready(dr), .data_idx(di),
    .frame_words(fw), .data_err
  );

  cfg_mem_model #(.TX_STALL_PCT(0)) u_cfg (
    .clk, .rst_n, .tx_valid(txv), .tx_data(txd), .tx_ready(txr),
    .rx_valid(rxv), .rx_data(rxd), .rx_ready(1'b0),
    .up_q(4'h0), .down_q(4'h0), .lfsr8_q(8'h0), .lfsr32_q(32'h0),
    .up_init(ui), .down_init(dni), .lfsr8_init(l8i), .lfsr32_init(l32i)
  );
  assign rxr = 1'b0;

  assign dw = frame[di];
  always @(posedge clk) dv <= ($urandom_range(99) >= stall_pct);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic write_frame(logic [31:0] f, logic [31:0] nf, output int cycles);
    @(negedge clk); far_addr = f; next_far = nf; start = 1;
    @(negedge clk); start = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    @(negedge clk);
    check(!data_err && fw == 7'd101, $sformatf("%0d data words sent", fw));
  endtask

  function automatic int differ(logic [31:0] f);
    int bad = 0;
    for (int i = 0; i < 101; i++) if (u_cfg.peek(f, i) != frame[i]) bad++;
    return bad;
  endfunction

  initial begin
    int cyc, w0;
    start = 0; far_addr = 0; next_far = 0; stall_pct = 0; dv = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    for (int i = 0; i < 101; i++) frame[i] = $urandom();
    write_frame(32'h0042_011A, 32'h0042_011B, cyc);
    check(cyc == 246 + 1, $sformatf("cycles %0d, expected 247", cyc));
    check(differ(32'h0042_011A) == 0, "frame not stored by the configuration model");
    check(u_cfg.n_frames_written == 1 && u_cfg.n_idcode == 1, "write not accepted");
    check(u_cfg.far_reg == 32'h0042_011B, "footer did not leave the next FAR in the FAR register");

    stall_pct = 50;
    for (int i = 0; i < 101; i++) frame[i] = $urandom();
    write_frame(32'h0042_0120, 32'h0042_0120, cyc);
    check(differ(32'h0042_0120) == 0, "frame written with stalls not stored");

    // BRAM frame still carrying bit 18 in word 14: refused
    w0 = u_cfg.n_bram_reject;
    for (int i = 0; i < 101; i++) frame[i] = $urandom() & ~32'h0004_0000;
    frame[14][18] = 1'b1;
    write_frame(32'h00C2_0100, 32'h00C2_0101, cyc);
    check(u_cfg.n_bram_reject == w0 + 1, "untreated BRAM frame was not refused by the model");
    frame[14][18] = 1'b0;
    write_frame(32'h00C2_0100, 32'h00C2_0101, cyc);
    check(differ(32'h00C2_0100) == 0, "treated BRAM frame not stored");

    check(u_cfg.n_errors == 0, "configuration model reported errors");
    check(u_cfg.n_desync == 4 && u_cfg.n_rcrc == 12, "DESYNC / CRC resets missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
