// epoch_pkg: constants and tables shared by the EPOCH context save/restore engine.
//
// Holds the 7-series configuration constants the design depends on: the frame size
// (101 words of 32 bits), the FAR (frame address register) field layout, the test
// that marks a frame as block-RAM, the word predicate of the BRAM read-back fix, and
// the two command sequences that are streamed to the configuration port:
//   RB_ROWS  the read-back capture sequence (one frame per run)
//   WR_ROWS  the frame write (restore) template
// A sequence is a list of rows; each row is a word kind and a repeat count, so a
// row such as "NOOP x32" is one entry. The command words, their order and their
// repeat counts are the paper's own; the row encoding is this design's.
package epoch_pkg;

  // One 7-series frame holds 101 32-bit words; word 50 carries the frame CRC.
  localparam int unsigned FRAME_WORDS = 101;
  localparam int unsigned CRC_WORD    = 50;
  // Read-back returns one pad frame ahead of the data; a write needs one pad frame after it.
  localparam int unsigned XFER_WORDS  = 2 * FRAME_WORDS;  // 202 = 0xCA

  // Configuration command words (Tables I and II of the paper).
  localparam logic [31:0] W_DUMMY     = 32'hFFFF_FFFF;
  localparam logic [31:0] W_BUSWIDTH  = 32'h0000_00BB;
  localparam logic [31:0] W_BUSDETECT = 32'h1122_0044;
  localparam logic [31:0] W_SYNC      = 32'hAA99_5566;
  localparam logic [31:0] W_NOOP      = 32'h2000_0000;
  localparam logic [31:0] W_WR_CMD    = 32'h3000_8001;
  localparam logic [31:0] W_WR_FAR    = 32'h3000_2001;
  localparam logic [31:0] W_WR_MASK   = 32'h3000_C001;
  localparam logic [31:0] W_WR_CTL0   = 32'h3000_A001;
  localparam logic [31:0] W_GLUTMASK  = 32'h0000_0100;
  localparam logic [31:0] W_WR_IDCODE = 32'h3001_8001;
  localparam logic [31:0] W_IDCODE    = 32'h0372_7093;   // XC7Z020
  localparam logic [31:0] W_WR_FDRI   = 32'h3000_4000;
  localparam logic [31:0] W_RD_FDRO   = 32'h2800_6000 | XFER_WORDS;   // 0x280060CA
  localparam logic [31:0] W_T2_READ   = 32'h4800_0000 | XFER_WORDS;   // 0x480000CA
  localparam logic [31:0] W_T2_WRITE  = 32'h5000_0000 | XFER_WORDS;   // 0x500000CA
  // CMD register values
  localparam logic [31:0] CMD_WCFG     = 32'h0000_0001;
  localparam logic [31:0] CMD_RCFG     = 32'h0000_0004;
  localparam logic [31:0] CMD_START    = 32'h0000_0005;
  localparam logic [31:0] CMD_RCRC     = 32'h0000_0007;
  localparam logic [31:0] CMD_SHUTDOWN = 32'h0000_000B;
  localparam logic [31:0] CMD_GCAPTURE = 32'h0000_000C;
  localparam logic [31:0] CMD_DESYNC   = 32'h0000_000D;

  // Frame address register fields (Sec. III-B).
  typedef struct packed {
    logic [5:0] reserved;   // [31:26]
    logic [2:0] block_type; // [25:23] 000 CLB, 001 BRAM, 010 CFG-CLB
    logic       bottom;     // [22]
    logic [4:0] row;        // [21:17]
    logic [9:0] column;     // [16:7]
    logic [6:0] minor;      // [6:0]
  } far_t;

  localparam logic [2:0] BLK_CLB  = 3'b000;
  localparam logic [2:0] BLK_BRAM = 3'b001;
  localparam logic [2:0] BLK_CFG  = 3'b010;

  function automatic logic is_bram_far(logic [31:0] far);
    far_t f;
    f = far_t'(far);
    return f.block_type == BLK_BRAM;
  endfunction

  // Eq. 1: words of a BRAM frame whose bit 18 reads back as 1 and must be written as 0.
  localparam int unsigned BRAM_FIX_BIT = 18;
  function automatic logic bram_fix_word(logic [6:0] w);
    logic in_range, low, high;
    in_range = (w >= 7'd4) && (w <= 7'd95);
    low      = (w < 7'd54) && ((w % 7'd10) == 7'd4);
    high     = (w > 7'd54) && ((w % 7'd10) == 7'd5);
    return in_range && (low || high);
  endfunction

  // Command-sequence rows.
  typedef enum logic [2:0] {
    R_FIXED,     // send 'word'
    R_FAR,       // send the frame address of this run
    R_NEXT_FAR,  // send the frame address that follows this run
    R_DATA,      // send frame words taken from the data input
    R_PAD,       // send all-zero pad words
    R_RX         // receive read-back words from the port
  } row_kind_e;

  typedef struct packed {
    row_kind_e   kind;
    logic [31:0] word;
    logic [8:0]  rep;
  } cmd_row_t;

  function automatic cmd_row_t fx(logic [31:0] w, int unsigned n = 1);
    return '{kind: R_FIXED, word: w, rep: 9'(n)};
  endfunction
  function automatic cmd_row_t rk(row_kind_e k, int unsigned n = 1);
    return '{kind: k, word: 32'h0, rep: 9'(n)};
  endfunction

  // Table I: read-back capture of one frame. Row 0 is sent first.
  localparam int unsigned RB_N = 37;
  localparam cmd_row_t [RB_N-1:0] RB_ROWS = {
    fx(CMD_DESYNC), fx(W_WR_CMD), fx(W_NOOP),                 // de-synchronise
    fx(CMD_RCRC), fx(W_WR_CMD), fx(W_NOOP),                   // reset CRC
    fx(CMD_START), fx(W_WR_CMD), fx(W_NOOP),                  // restart fabric
    rk(R_RX, XFER_WORDS),                                     // pad frame + frame data
    fx(W_NOOP, 32), fx(W_T2_READ), fx(W_RD_FDRO),
    rk(R_FAR), fx(W_WR_FAR),
    fx(W_NOOP, 3), fx(CMD_RCFG), fx(W_WR_CMD),
    fx(W_NOOP), fx(CMD_GCAPTURE), fx(W_WR_CMD),               // capture flip-flops
    fx(W_GLUTMASK), fx(W_WR_CTL0), fx(W_GLUTMASK), fx(W_WR_MASK), // unmask LUT/RAM cells
    fx(W_NOOP, 6), fx(CMD_RCRC), fx(W_WR_CMD),
    fx(W_NOOP, 2), fx(CMD_SHUTDOWN), fx(W_WR_CMD),
    fx(W_NOOP, 2), fx(W_SYNC), fx(W_DUMMY), fx(W_BUSDETECT), fx(W_BUSWIDTH),
    fx(W_DUMMY, 8)
  };
  localparam int unsigned RB_TX_WORDS = 83;   // words sent per read-back
  localparam int unsigned RB_RX_WORDS = XFER_WORDS;

  // Table II: write one frame (context restore). Row 0 is sent first.
  localparam int unsigned WR_N = 34;
  localparam cmd_row_t [WR_N-1:0] WR_ROWS = {
    fx(W_NOOP, 2), fx(W_DUMMY), fx(CMD_DESYNC), fx(W_WR_CMD),
    fx(W_NOOP, 2), fx(CMD_RCRC), fx(W_WR_CMD),
    rk(R_NEXT_FAR), fx(W_WR_FAR),
    fx(W_NOOP, 2), fx(CMD_RCRC), fx(W_WR_CMD),               // CRC reset bypasses the CRC check
    rk(R_PAD, FRAME_WORDS), rk(R_DATA, FRAME_WORDS),
    fx(W_T2_WRITE), fx(W_WR_FDRI),
    fx(W_NOOP), fx(CMD_WCFG), fx(W_WR_CMD),
    fx(W_NOOP), rk(R_FAR), fx(W_WR_FAR),
    fx(W_NOOP), fx(W_IDCODE), fx(W_WR_IDCODE),
    fx(W_NOOP, 2), fx(CMD_RCRC), fx(W_WR_CMD),
    fx(W_NOOP, 2), fx(W_SYNC), fx(W_DUMMY), fx(W_BUSDETECT), fx(W_BUSWIDTH),
    fx(W_DUMMY, 8)
  };
  localparam int unsigned WR_TX_WORDS = 246;  // words sent per frame write

  // Clock-control register map (write-protected, unlock first).
  localparam logic [1:0]  CC_LOCK   = 2'd0;
  localparam logic [1:0]  CC_UNLOCK = 2'd1;
  localparam logic [1:0]  CC_HALT   = 2'd2;
  localparam logic [15:0] CC_LOCK_KEY   = 16'h767B;
  localparam logic [15:0] CC_UNLOCK_KEY = 16'hDF0D;

endpackage
