// mhhea_pkg: types and constants shared by the MHHEA processor.
//
// The processor hides plaintext bits inside a 16-bit hiding vector. A key is
// a table of 16 pairs of 3-bit integers (values 0..7); each pair, after being
// scrambled with the upper byte of the hiding vector, names a range of bit
// positions in the lower byte of the vector that are overwritten with
// scrambled plaintext bits. The widths below follow the paper: a 32-bit
// plaintext block handled as two 16-bit halves, 16 key pairs of 3 bits, a
// 16-bit hiding vector and a 16-bit cipher word.
package mhhea_pkg;

  localparam int unsigned BLOCK_W  = 32;  // plaintext block
  localparam int unsigned HALF_W   = 16;  // message alignment buffer
  localparam int unsigned KEY_W    = 3;   // one key integer, 0..7
  localparam int unsigned NPAIRS   = 16;  // key pairs in the key cache
  localparam int unsigned ADDR_W   = 4;   // key cache address
  localparam int unsigned VEC_W    = 16;  // hiding vector and cipher word
  localparam int unsigned HIDE_W   = 8;   // lower byte: where bits are hidden
  localparam int unsigned CNT_W    = 5;   // counts 0..16 message bits

  typedef logic [KEY_W-1:0] key_t;

  typedef struct packed {
    key_t left;
    key_t right;
  } key_pair_t;

  // States of the control unit (Fig. 1 of the paper).
  typedef enum logic [2:0] {
    S_INIT      = 3'd0,
    S_LMSG      = 3'd1,
    S_LKEY      = 3'd2,
    S_LMSGCACHE = 3'd3,
    S_CIRC      = 3'd4,
    S_ENCRYPT   = 3'd5
  } state_t;

endpackage
