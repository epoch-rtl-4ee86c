// bram_fix_tb: exhaustive check of the BRAM bit-18 treatment.
// For every word index 0..127, for BRAM and non-BRAM frame addresses, with bit 18
// set and with random other bits, the output is compared with the word list of
// the paper's Eq. 1 written out by hand: 4 14 24 34 44 55 65 75 85 95.
`timescale 1ns/1ps
module bram_fix_tb;
  int checks = 0, failures = 0;
  logic [31:0] far_addr, word_in, word_out;
  logic [6:0]  word_idx;
  logic        fixed;

  bram_fix dut (.far_addr, .word_idx, .word_in, .word_out, .fixed);

  int fix_words [10] = '{4, 14, 24, 34, 44, 55, 65, 75, 85, 95};
  logic [31:0] fars [4] = '{32'h00C2_0100, 32'h0080_0000, 32'h0042_011E, 32'h0102_0000};
  bit          is_bram [4] = '{1, 1, 0, 0};

  function automatic bit listed(int i);
    foreach (fix_words[j]) if (fix_words[j] == i) return 1;
    return 0;
  endfunction

  initial begin
    logic [31:0] exp_w;
    bit sel;
    for (int f = 0; f < 4; f++)
      for (int i = 0; i < 128; i++)
        for (int r = 0; r < 2; r++) begin
          far_addr = fars[f];
          word_idx = 7'(i);
          word_in  = $urandom();
          if (r == 0) word_in[18] = 1'b1;
          #1;
          sel   = is_bram[f] && listed(i);
          exp_w = word_in;
          if (sel) exp_w[18] = 1'b0;
          checks++;
          if (word_out !== exp_w || fixed !== (sel && word_in[18])) begin
            failures++;
            if (failures < 10)
              $display("FAIL far=%h idx=%0d in=%h out=%h fixed=%b", far_addr, i, word_in, word_out, fixed);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
