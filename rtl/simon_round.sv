// simon_round: one SIMON64/128 round as a purely combinational circuit.
//
// R(l, r, k) = ((S^1(l) & S^8(l)) ^ S^2(l) ^ r ^ k, l), where S^j is a left
// rotation by j. The block is {l, r}: the left word in v_in[63:32], the right
// word in v_in[31:0]. The same circuit serves decryption, because the
// architectures swap the block's words before and after the rounds and feed the
// round keys in reverse order. Port names follow the schematic of the round
// component in the paper (v_in, v_k, v_out). There is no clock: v_out follows
// v_in and v_k after one round's logic delay.
module simon_round
  import simon_pkg::*;
(
  input  block_t v_in,   // {l, r}
  input  word_t  v_k,    // round key
  output block_t v_out   // {f(l) ^ r ^ k, l}
);
  word_t l, r;
  assign l = v_in[BLOCK-1:WORD];
  assign r = v_in[WORD-1:0];

  assign v_out = {(rol(l, 1) & rol(l, 8)) ^ rol(l, 2) ^ r ^ v_k, l};
endmodule
