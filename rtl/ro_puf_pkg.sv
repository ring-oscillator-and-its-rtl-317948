// Shared constants and types of the ring-oscillator PUF password manager.
//
// The ring array has eight lines, each picked by a 3-bit line number. A
// password hash supplies 32 hexadecimal characters; characters 2i and 2i+1
// form pair i, and only the low three bits of each character are used as a
// line number (hex 'd' selects line 5, 'f' line 7). Each of the 16 pairs
// gives one bit of the 16-bit challenge/response word. The password table
// is 16 rows by 16 columns, addressed by the upper and lower nibble of
// (ID key XOR password key). Line count, pair count, table size and the
// character-to-line rule follow the paper; widths of counters and the cell
// depth are this design's choices.
`timescale 1ns / 1ps
package ro_puf_pkg;

  localparam int unsigned N_LINES    = 8;
  localparam int unsigned SEL_W      = $clog2(N_LINES);
  localparam int unsigned N_PAIRS    = 16;
  localparam int unsigned HASH_CHARS = 2 * N_PAIRS;
  localparam int unsigned WORD_W     = N_PAIRS;
  localparam int unsigned COUNT_W    = 16;
  localparam int unsigned TABLE_ROWS = 16;
  localparam int unsigned TABLE_COLS = 16;
  localparam int unsigned ROW_W      = $clog2(TABLE_ROWS);
  localparam int unsigned COL_W      = $clog2(TABLE_COLS);
  localparam int unsigned KEY_W      = ROW_W + COL_W;

  typedef logic [SEL_W-1:0]  line_sel_t;
  typedef logic [3:0]        hex_char_t;
  typedef logic [WORD_W-1:0] puf_word_t;
  typedef logic [COUNT_W-1:0] count_t;

  // One pair of lines to compare.
  typedef struct packed {
    line_sel_t first;
    line_sel_t second;
  } line_pair_t;

  // Operation requested by the host.
  typedef enum logic [0:0] {
    OP_REGISTER     = 1'b0,
    OP_AUTHENTICATE = 1'b1
  } pwm_op_t;

  // Result reported at the end of an operation.
  typedef enum logic [1:0] {
    ST_REGISTERED = 2'd0,
    ST_TABLE_FULL = 2'd1,
    ST_APPROVED   = 2'd2,
    ST_FAILED     = 2'd3
  } pwm_status_t;

  // Line number taken from one hash character: its low three bits.
  function automatic line_sel_t char_to_line(hex_char_t c);
    return c[SEL_W-1:0];
  endfunction

endpackage
