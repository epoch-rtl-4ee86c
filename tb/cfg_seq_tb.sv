// cfg_seq_tb: self-checking testbench of the command sequencer.
// Runs the read-back table (Table I) and the frame-write table (Table II) through
// two cfg_seq instances, first without stalls (checking the one-word-per-cycle
// cycle count) and then with random stalls on every stream. The expected word
// lists are written out here from the paper's tables, independently of the
// package's row encoding.
`timescale 1ns/1ps
module cfg_seq_tb;
  import epoch_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge, so that the asynchronous resets fire
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- DUT A: read-back sequence ----
  logic        a_start, a_busy, a_done, a_txv, a_txr, a_rxv, a_rxr, a_rov, a_ror, a_dr;
  logic [31:0] a_txd, a_rxd, a_rod, a_far;
  logic [8:0]  a_roi, a_di;
  cfg_seq #(.N_ROWS(RB_N), .ROWS(RB_ROWS)) dut_a (
    .clk, .rst_n, .start(a_start), .far_addr(a_far), .next_far_addr(32'h0), .busy(a_busy),
    .done(a_done), .tx_valid(a_txv), .tx_data(a_txd), .tx_ready(a_txr),
    .data_valid(1'b0), .data_word(32'h0), .data_ready(a_dr), .data_idx(a_di),
    .rx_valid(a_rxv), .rx_data(a_rxd), .rx_ready(a_rxr),
    .rx_out_valid(a_rov), .rx_out_data(a_rod), .rx_out_idx(a_roi), .rx_out_ready(a_ror)
  );

  // ---- DUT B: frame-write sequence ----
  logic        b_start, b_busy, b_done, b_txv, b_txr, b_dv, b_dr, b_rxr, b_rov;
  logic [31:0] b_txd, b_far, b_nfar, b_dw, b_rod;
  logic [8:0]  b_di, b_roi;
  cfg_seq #(.N_ROWS(WR_N), .ROWS(WR_ROWS)) dut_b (
    .clk, .rst_n, .start(b_start), .far_addr(b_far), .next_far_addr(b_nfar), .busy(b_busy),
    .done(b_done), .tx_valid(b_txv), .tx_data(b_txd), .tx_ready(b_txr),
    .data_valid(b_dv), .data_word(b_dw), .data_ready(b_dr), .data_idx(b_di),
    .rx_valid(1'b0), .rx_data(32'h0), .rx_ready(b_rxr),
    .rx_out_valid(b_rov), .rx_out_data(b_rod), .rx_out_idx(b_roi), .rx_out_ready(1'b1)
  );

  logic [31:0] exp_q [$];
  logic [31:0] got_q [$];
  logic [31:0] rx_got [$];
  int          rx_idx_err;
  int          stall_pct;

  task automatic add(logic [31:0] w, int n = 1);
    repeat (n) exp_q.push_back(w);
  endtask

  // Table I of the paper, one frame; the 202 read words are not sent.
  task automatic build_table1(logic [31:0] f);
    exp_q.delete();
    add(32'hFFFFFFFF, 8); add(32'h000000BB); add(32'h11220044); add(32'hFFFFFFFF);
    add(32'hAA995566); add(32'h20000000, 2); add(32'h30008001); add(32'h0000000B);
    add(32'h20000000, 2); add(32'h30008001); add(32'h00000007); add(32'h20000000, 6);
    add(32'h3000C001); add(32'h00000100); add(32'h3000A001); add(32'h00000100);
    add(32'h30008001); add(32'h0000000C); add(32'h20000000); add(32'h30008001);
    add(32'h00000004); add(32'h20000000, 3); add(32'h30002001); add(f);
    add(32'h280060CA); add(32'h480000CA); add(32'h20000000, 32);
    add(32'h20000000); add(32'h30008001); add(32'h00000005); add(32'h20000000);
    add(32'h30008001); add(32'h00000007); add(32'h20000000); add(32'h30008001);
    add(32'h0000000D);
  endtask

  function automatic logic [31:0] dpat(int i);
    return 32'hD00D_0000 ^ (32'(i) * 32'h0001_0203);
  endfunction

  // Table II of the paper, one frame.
  task automatic build_table2(logic [31:0] f, logic [31:0] nf);
    exp_q.delete();
    add(32'hFFFFFFFF, 8); add(32'h000000BB); add(32'h11220044); add(32'hFFFFFFFF);
    add(32'hAA995566); add(32'h20000000, 2); add(32'h30008001); add(32'h00000007);
    add(32'h20000000, 2); add(32'h30018001); add(32'h03727093); add(32'h20000000);
    add(32'h30002001); add(f); add(32'h20000000); add(32'h30008001); add(32'h00000001);
    add(32'h20000000); add(32'h30004000); add(32'h500000CA);
    for (int i = 0; i < 101; i++) add(dpat(i));
    add(32'h00000000, 101);
    add(32'h30008001); add(32'h00000007); add(32'h20000000, 2); add(32'h30002001); add(nf);
    add(32'h30008001); add(32'h00000007); add(32'h20000000, 2); add(32'h30008001);
    add(32'h0000000D); add(32'hFFFFFFFF); add(32'h20000000, 2);
  endtask

  // stimulus/collection
  int a_rx_sent;
  assign a_rxd = 32'hA000_0000 + 32'(a_rx_sent);
  assign b_dw  = dpat(int'(b_di));
  always @(posedge clk) begin
    if (a_txv && a_txr) got_q.push_back(a_txd);
    if (b_txv && b_txr) got_q.push_back(b_txd);
    if (a_rov && a_ror) begin
      rx_got.push_back(a_rod);
      if (a_roi != 9'(rx_got.size() - 1)) rx_idx_err++;
    end
    if (a_rxv && a_rxr) a_rx_sent <= a_rx_sent + 1;
    a_txr <= ($urandom_range(99) >= stall_pct);
    b_txr <= ($urandom_range(99) >= stall_pct);
    a_rxv <= ($urandom_range(99) >= stall_pct);
    a_ror <= ($urandom_range(99) >= stall_pct);
    b_dv  <= ($urandom_range(99) >= stall_pct);
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic compare(string what);
    int bad = 0;
    check(got_q.size() == exp_q.size(),
          $sformatf("%s: %0d words sent, expected %0d", what, got_q.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++)
      if (got_q[i] !== exp_q[i]) begin
        if (bad < 5) $display("  %s word %0d: got %h expected %h", what, i, got_q[i], exp_q[i]);
        bad++;
      end
    check(bad == 0, $sformatf("%s: %0d words differ", what, bad));
  endtask

  task automatic run_a(logic [31:0] f, int stall, output int cycles);
    stall_pct = stall; got_q.delete(); rx_got.delete(); a_rx_sent = 0; rx_idx_err = 0;
    build_table1(f);
    @(negedge clk); a_far = f; a_start = 1;
    @(negedge clk); a_start = 0; cycles = 1;
    while (!a_done) begin @(negedge clk); cycles++; end
    compare("table I");
    check(rx_got.size() == 202, $sformatf("table I: %0d read words passed on", rx_got.size()));
    check(rx_idx_err == 0, "table I: read-word index out of step");
    check(rx_got.size() > 0 && rx_got[0] == 32'hA000_0000 && rx_got[$] == 32'hA000_00C9,
          "table I: read words not passed on in order");
  endtask

  task automatic run_b(logic [31:0] f, logic [31:0] nf, int stall, output int cycles);
    stall_pct = stall; got_q.delete();
    build_table2(f, nf);
    @(negedge clk); b_far = f; b_nfar = nf; b_start = 1;
    @(negedge clk); b_start = 0; cycles = 1;
    while (!b_done) begin @(negedge clk); cycles++; end
    compare("table II");
  endtask

  initial begin
    int cyc;
    a_start = 0; b_start = 0; a_far = 0; b_far = 0; b_nfar = 0; stall_pct = 0;
    a_txr = 1; b_txr = 1; a_rxv = 1; a_ror = 1; b_dv = 1; a_rx_sent = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_a(32'h0042_011E, 0, cyc);
    check(cyc == 83 + 202 + 1, $sformatf("table I cycles %0d, expected %0d", cyc, 83 + 202 + 1));
    run_a(32'h00C2_0100, 40, cyc);
    check(cyc > 286, "table I with stalls took no longer");
    run_b(32'h0042_011A, 32'h0042_011B, 0, cyc);
    check(cyc == 246 + 1, $sformatf("table II cycles %0d, expected %0d", cyc, 246 + 1));
    run_b(32'h0042_0120, 32'h0042_0120, 40, cyc);
    check(!a_busy && !b_busy, "busy after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
