// simon_mixed_pipe: SIMON64/128 with mixed inner-outer-round pipelining
// (Ki = 2 inner registers per round, Ko = 43 outer registers).
//
// This is the outer-round pipeline (simon_outer_pipe) with each round replaced
// by simon_round_inner. That round registers gamma = r ^ k and
// phi = (S^1(l) & S^8(l)) ^ S^2(l), together with the left word, in the middle
// of the round. Outer 64-bit registers sit between consecutive rounds as
// before (OUTER_REGS = 1). A block passes 44 inner and 43 outer register
// stages, so it appears at block_out with out_valid 87 clock edges after it
// was presented with in_valid. A new block can enter every clock.
// The paper says the mixed design takes only one clock cycle more than the
// outer-round pipeline. Its text also says it has Ki = 2 inner registers per
// round and Ko = 43 outer registers. With both kinds of register on
// the block's path, every round adds a stage. This design follows the
// register structure by default (OUTER_REGS = 1), so its latency is 87 edges
// rather than 44. OUTER_REGS = 0 gives the other reading: the rounds keep
// their inner registers but lose the registers between them. A block then
// passes 44 stages, one more than in the outer-round pipeline, as the paper's
// latency statement says.
//
// As in simon_outer_pipe, the round keys and the decrypt select are not carried
// with the blocks. key_in and decrypt must stay constant while blocks are in
// flight. The valid flag (one flop per stage, active-low synchronous reset) is
// this design's own addition.
module simon_mixed_pipe
  import simon_pkg::*;
#(
  parameter int unsigned INNER_K    = 2,
  parameter bit          OUTER_REGS = 1'b1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   decrypt,
  input  key_t   key_in,
  input  logic   in_valid,
  input  block_t block_in,
  output logic   out_valid,
  output block_t block_out
);
  // 44 inner stages, plus 43 outer ones if present
  localparam int unsigned STAGES = OUTER_REGS ? 2 * ROUNDS - 1 : ROUNDS;

  word_t  [ROUNDS-1:0] rk, rk_dec;
  block_t [ROUNDS-1:0] rin;
  block_t [ROUNDS-1:0] rout;
  block_t [ROUNDS-1:1] pipe_q;
  logic   [STAGES-1:0] vld_q;

  simon_round_keys u_keys (.key_in(key_in), .rk(rk), .rk_dec(rk_dec));

  assign rin[0] = decrypt ? swap_words(block_in) : block_in;

  for (genvar i = 0; i < ROUNDS; i++) begin : g_round
    if (i > 0) begin : g_in
      assign rin[i] = pipe_q[i];
    end
    simon_round_inner #(.INNER_K(INNER_K)) u_round (
      .clk(clk),
      .v_in(rin[i]),
      .v_k(decrypt ? rk_dec[i] : rk[i]),
      .v_out(rout[i])
    );
  end

  if (OUTER_REGS) begin : g_outer
    always_ff @(posedge clk) begin
      for (int i = 1; i < ROUNDS; i++) pipe_q[i] <= rout[i-1];
    end
  end else begin : g_no_outer
    always_comb begin
      for (int i = 1; i < ROUNDS; i++) pipe_q[i] = rout[i-1];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[STAGES-2:0], in_valid};
  end

  assign block_out = decrypt ? swap_words(rout[ROUNDS-1]) : rout[ROUNDS-1];
  assign out_valid = vld_q[STAGES-1];
endmodule
