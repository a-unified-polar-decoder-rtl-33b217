// polar_pkg: constants, types and small functions shared by the polar decoder.
//
// The code length (N = 256), the LLR quantisation (6 bits), the list size (8), the number
// of CRC-checked paths (8) and the number of processing elements (8) are the numbers of
// the decoder this RTL follows. The path-metric width and the CRC polynomial are this
// design's own choices: the CRC is the 11-bit CRC of 5G NR (x^11+x^10+x^9+x^5+1).
package polar_pkg;

  localparam int unsigned N_DEF   = 256;  // code length
  localparam int unsigned Q_DEF   = 6;    // LLR width (two's complement)
  localparam int unsigned L_DEF   = 8;    // list size of the SCL mode
  localparam int unsigned T_DEF   = 8;    // paths that go through the CRC check
  localparam int unsigned P_DEF   = 8;    // processing elements
  localparam int unsigned FAST_DEF = 4;   // largest node stage decided in one step

  localparam int unsigned PATH_W  = 3;    // bits of a path (slot) index, L <= 2**PATH_W
  localparam int unsigned PM_W    = 12;   // path metric width, saturating

  localparam int unsigned CRC_W   = 11;
  localparam logic [CRC_W-1:0] CRC_POLY = 11'h621;  // x^11 term implied

  // Kind of a leaf of the decoding tree. GOOD is an information bit that is reliable
  // enough to be decided without path extension.
  typedef enum logic [1:0] {
    LEAF_FROZEN = 2'd0,
    LEAF_INFO   = 2'd1,
    LEAF_GOOD   = 2'd2
  } leaf_t;

  // Decoder operating mode seen at the top.
  typedef enum logic [1:0] {
    MODE_SC       = 2'd0,  // SC only
    MODE_SCL      = 2'd1,  // serial SCL only
    MODE_ADAPTIVE = 2'd2   // SC, then SCL after a CRC failure
  } dec_mode_t;

  // One extended path candidate, as the bit decision produces it and the sorter keeps it.
  typedef struct packed {
    logic              valid;
    logic [PATH_W-1:0] parent;
    logic              dbit;
    logic [PM_W-1:0]   pm;
  } cand_t;

  // One step of the CRC shift register: remainder of the message times x^CRC_W.
  function automatic logic [CRC_W-1:0] crc_step(input logic [CRC_W-1:0] c, input logic b);
    logic fb;
    fb = c[CRC_W-1] ^ b;
    return {c[CRC_W-2:0], 1'b0} ^ (fb ? CRC_POLY : '0);
  endfunction

  // Saturating path-metric addition.
  function automatic logic [PM_W-1:0] pm_add(input logic [PM_W-1:0] a, input logic [PM_W-1:0] b);
    logic [PM_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[PM_W] ? '1 : s[PM_W-1:0];
  endfunction

endpackage
