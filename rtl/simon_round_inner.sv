// simon_round_inner: one SIMON64/128 round with inner-round pipeline registers.
//
// The round is split into three sub-functions:
//   gamma(r, k) = r ^ k
//   phi(l)      = (S^1(l) & S^8(l)) ^ S^2(l)
//   psi(x, y)   = x ^ y
// so that R(l, r, k) = (psi(phi(l), gamma(r, k)), l).
// INNER_K = 2 registers the outputs of both gamma and phi (the paper's K = 2,
// and the round of its mixed pipeline). INNER_K = 1 registers gamma only, and
// phi is then computed after the register (the paper's K = 1). In both cases
// the left word is registered alongside, because it becomes the right word of
// the round's output. Without it a pipeline holding several blocks would pair
// one block's psi with the next block's left word.
//
// Timing: v_out shows the round of the v_in and v_k presented one clock
// earlier. The registers have no reset and no enable; the user of the block
// decides when its output is taken.
// Follows the paper: the split into gamma, phi and psi and the two register
// positions. This design's own choice: registering the left word.
module simon_round_inner
  import simon_pkg::*;
#(
  parameter int unsigned INNER_K = 2
) (
  input  logic   clk,
  input  block_t v_in,
  input  word_t  v_k,
  output block_t v_out
);
  function automatic word_t phi(input word_t l);
    return (rol(l, 1) & rol(l, 8)) ^ rol(l, 2);
  endfunction

  word_t l, r;
  word_t gamma_q, l_q, phi_q, phi_out;

  assign l = v_in[BLOCK-1:WORD];
  assign r = v_in[WORD-1:0];

  always_ff @(posedge clk) begin
    gamma_q <= r ^ v_k;
    l_q     <= l;
  end

  if (INNER_K >= 2) begin : g_phi_reg
    always_ff @(posedge clk) phi_q <= phi(l);
    assign phi_out = phi_q;
  end else begin : g_phi_comb
    assign phi_q   = '0;
    assign phi_out = phi(l_q);
  end

  // psi
  assign v_out = {phi_out ^ gamma_q, l_q};
endmodule
