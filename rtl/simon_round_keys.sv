// simon_round_keys: the unrolled SIMON64/128 key schedule. It computes all 44
// round keys from the 128-bit master key in one combinational pass.
//
// Keys 0..3 are the master key words (k0 = key_in[31:0]). Each later key k_i
// comes from its own copy of simon_key_expand, fed with the four keys before
// it. This is the key-schedule half of the paper's full loop unrolling. The
// outer-round and mixed pipelines reuse it unchanged, as the paper does.
// rk_dec lists the same keys in reverse order (rk_dec[i] = k_{43-i}), which is
// what decryption consumes. No clock.
module simon_round_keys
  import simon_pkg::*;
(
  input  key_t              key_in,
  output word_t [ROUNDS-1:0] rk,      // rk[i] = k_i
  output word_t [ROUNDS-1:0] rk_dec   // rk_dec[i] = k_{43-i}
);
  for (genvar i = 0; i < ROUNDS; i++) begin : g_key
    if (i < KWORDS) begin : g_master
      assign rk[i] = key_in[i*WORD +: WORD];
    end else begin : g_exp
      simon_key_expand u_ks (
        .idx(idx_t'(i)),
        .cache(rk[i-1 -: KWORDS]),
        .k_out(rk[i])
      );
    end
    assign rk_dec[i] = rk[ROUNDS-1-i];
  end
endmodule
