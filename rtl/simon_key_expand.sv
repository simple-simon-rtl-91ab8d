// simon_key_expand: combinational SIMON64/128 key schedule for one round index.
//
// Given round index idx and the cache of the four most recent round keys
// (cache[0] = k_{idx-4} ... cache[3] = k_{idx-1}) it returns k_idx:
//   tmp   = S^-3(k_{idx-1}) ^ k_{idx-3}
//   k_idx = tmp ^ S^-1(tmp) ^ k_{idx-4} ^ C,   C = c ^ (z3)_{idx-4}
// following the 4-word key expansion of the SIMON specification, with c and
// the z3 bit folded into one constant C as the paper does.
// For idx 0..3 the round key is a word of the master key, and the cache
// then holds the master key itself (cache[j] = k_j), so the block passes
// cache[idx] through. Keeping one block for all 44 indices lets the RAM-routing
// architectures take every round key from the key schedule output, as the
// paper describes. Purely combinational.
module simon_key_expand
  import simon_pkg::*;
(
  input  idx_t              idx,     // round index 0..43
  input  word_t [KWORDS-1:0] cache,  // cache[0] oldest
  output word_t             k_out    // round key k_idx
);
  word_t tmp;
  logic  zbit;

  always_comb begin
    tmp   = ror(cache[3], 3) ^ cache[1];
    zbit  = (idx >= idx_t'(KWORDS)) ? Z3[6'(idx - idx_t'(KWORDS))] : 1'b0;
    if (idx < idx_t'(KWORDS))
      k_out = cache[idx[1:0]];
    else
      k_out = tmp ^ ror(tmp, 1) ^ cache[0] ^ (C_KS ^ word_t'(zbit));
  end
endmodule
