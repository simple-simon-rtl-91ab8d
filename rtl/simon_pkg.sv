// simon_pkg: constants, types and helper functions shared by every SIMON64/128
// architecture in this design.
//
// SIMON64/128 works on a 64-bit block split into two 32-bit words (left word in
// bits 63:32, right word in bits 31:0) under a 128-bit key of four 32-bit words
// (k0 in bits 31:0 ... k3 in bits 127:96, the usual SIMON word order). It runs
// 44 rounds and uses the constant sequence z3 and the constant c = 2^32 - 4.
// The key schedule folds c and the z3 bit of a round into one constant
// C = c ^ z3[i]. That folding follows the paper. The bit and word order of the
// ports is this design's own choice.
package simon_pkg;

  localparam int unsigned WORD   = 32;           // word size n
  localparam int unsigned BLOCK  = 2 * WORD;     // block size 2n
  localparam int unsigned KWORDS = 4;            // key words m
  localparam int unsigned KEY    = KWORDS * WORD;
  localparam int unsigned ROUNDS = 44;           // rounds T
  localparam int unsigned IDXW   = 6;            // width of a round index (0..44)

  typedef logic [WORD-1:0]  word_t;
  typedef logic [BLOCK-1:0] block_t;
  typedef logic [KEY-1:0]   key_t;
  typedef logic [IDXW-1:0]  idx_t;

  // z3 as printed in little-endian order: (z3)_0 is the rightmost digit, so
  // Z3[i] = (z3)_i. Read this way the published SIMON64/128 test vector holds.
  localparam logic [61:0] Z3 = 62'b11110000101100111001010001001000000111101001100011010111011011;

  // c = 2^n - 4
  localparam word_t C_KS = word_t'(32'hFFFF_FFFC);

  function automatic word_t rol(input word_t x, input int unsigned s);
    return (x << s) | (x >> (WORD - s));
  endfunction

  function automatic word_t ror(input word_t x, input int unsigned s);
    return (x >> s) | (x << (WORD - s));
  endfunction

  // Swap the left and right words of a block (used around decryption).
  function automatic block_t swap_words(input block_t b);
    return {b[WORD-1:0], b[BLOCK-1:WORD]};
  endfunction

  // Control state of the iterative architectures.
  typedef enum logic [2:0] {
    ST_IDLE,     // waiting for start
    ST_INIT,     // initialisation cycle(s): load block and key
    ST_PREEXP,   // key pre-expansion into the round-key RAM
    ST_ALIGN,    // one cycle between pre-expansion and decryption
    ST_RUN,      // cipher rounds
    ST_DONE      // result held at the output
  } iter_state_e;

endpackage
