// simon_outer_pipe: SIMON64/128 with full outer-round pipelining (K = 44).
//
// The fully unrolled design (44 chained rounds, unrolled key schedule) gets a
// 64-bit register between every two rounds: 43 registers in all. The first
// round takes block_in directly, and the last round drives block_out directly.
// A new block can enter on every clock edge. A block presented with in_valid
// in one cycle appears at block_out with out_valid 43 clock edges later, in
// the 44th cycle counting its own. That is the paper's "#rounds cycles".
//
// Timing rules: the round keys come combinationally from key_in, and the
// swap/key-order select from decrypt. Like the unrolled design, whose key
// schedule and mode select are reused unchanged, the pipeline therefore holds
// no key or mode per block. key_in and decrypt must stay constant while blocks
// are in flight: after changing them, wait 43 cycles, or discard the blocks
// already inside.
// Follows the paper: 43 data registers, one block per cycle. This design's own
// addition: the in_valid/out_valid flag, 43 one-bit flops with an active-low
// synchronous reset. The data registers are not reset.
module simon_outer_pipe
  import simon_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   decrypt,
  input  key_t   key_in,
  input  logic   in_valid,
  input  block_t block_in,
  output logic   out_valid,
  output block_t block_out
);
  word_t  [ROUNDS-1:0] rk, rk_dec;
  block_t [ROUNDS-1:0] rin;     // input of round i
  block_t [ROUNDS-1:0] rout;    // output of round i
  block_t [ROUNDS-1:1] pipe_q;  // register between round i-1 and round i
  logic   [ROUNDS-1:1] vld_q;

  simon_round_keys u_keys (.key_in(key_in), .rk(rk), .rk_dec(rk_dec));

  assign rin[0] = decrypt ? swap_words(block_in) : block_in;

  for (genvar i = 0; i < ROUNDS; i++) begin : g_round
    if (i > 0) begin : g_in
      assign rin[i] = pipe_q[i];
    end
    simon_round u_round (
      .v_in(rin[i]),
      .v_k(decrypt ? rk_dec[i] : rk[i]),
      .v_out(rout[i])
    );
  end

  always_ff @(posedge clk) begin
    for (int i = 1; i < ROUNDS; i++) pipe_q[i] <= rout[i-1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[ROUNDS-2:1], in_valid};
  end

  assign block_out = decrypt ? swap_words(rout[ROUNDS-1]) : rout[ROUNDS-1];
  assign out_valid = vld_q[ROUNDS-1];
endmodule
