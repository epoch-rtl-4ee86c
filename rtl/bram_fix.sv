// bram_fix: block-RAM read-back treatment.
//
// When a BRAM frame is read back, bit 18 of certain words comes back as 1 whether
// or not the BRAM contents changed; written back unchanged, such a frame makes the
// PL fall back to its old state. This block clears that bit, as the paper
// prescribes, in the words w selected by its Eq. 1:
//   (w < 54 and w mod 10 = 4) or (w > 54 and w mod 10 = 5),  4 <= w <= 95
// only for frames whose FAR block-type field [25:23] is 001 (BRAM). The paper also
// identifies BRAM frames by a FAR third byte of 0xC2, which is the same field test
// for the frames it uses. Other frames pass unchanged.
//
// Purely combinational: word_out follows far_addr, word_idx and word_in in the
// same cycle. 'fixed' is high when bit 18 was set and has been cleared.
module bram_fix
  import epoch_pkg::*;
(
  input  logic [31:0] far_addr,
  input  logic [6:0]  word_idx,
  input  logic [31:0] word_in,
  output logic [31:0] word_out,
  output logic        fixed
);

  logic sel;

  always_comb begin
    sel      = is_bram_far(far_addr) && bram_fix_word(word_idx);
    word_out = word_in;
    if (sel) word_out[BRAM_FIX_BIT] = 1'b0;
    fixed    = sel && word_in[BRAM_FIX_BIT];
  end

endmodule
