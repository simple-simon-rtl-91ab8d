// simon_unrolled: SIMON64/128 with full loop unrolling (K = 44).
//
// 44 copies of simon_round are chained, and each takes its round key from the
// unrolled key schedule (simon_round_keys). A block is encrypted or decrypted
// in one pass through the chain, with no round-key RAM and no pre-expansion.
// For decryption the input words are swapped, the keys are applied in reverse
// order (k43 first) and the output words are swapped back.
//
// The circuit is purely combinational, as in the paper's implementation, whose
// area table lists no registers for it. block_out follows decrypt, key_in and
// block_in after the delay of 44 rounds. A user who wants a one-cycle
// component registers the inputs or the outputs. Follows the paper: the full
// unrolling of both rounds and key schedule and the single-pass operation.
// This design's choice: the decrypt select and the port order.
module simon_unrolled
  import simon_pkg::*;
(
  input  logic   decrypt,
  input  key_t   key_in,
  input  block_t block_in,
  output block_t block_out
);
  word_t  [ROUNDS-1:0] rk, rk_dec;
  block_t [ROUNDS:0]   x;

  simon_round_keys u_keys (.key_in(key_in), .rk(rk), .rk_dec(rk_dec));

  assign x[0] = decrypt ? swap_words(block_in) : block_in;

  for (genvar i = 0; i < ROUNDS; i++) begin : g_round
    simon_round u_round (
      .v_in(x[i]),
      .v_k(decrypt ? rk_dec[i] : rk[i]),
      .v_out(x[i+1])
    );
  end

  assign block_out = decrypt ? swap_words(x[ROUNDS]) : x[ROUNDS];
endmodule
