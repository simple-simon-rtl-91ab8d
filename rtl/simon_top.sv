// simon_top: every SIMON64/128 architecture of this design, side by side on
// one shared key and data input.
//
// The design is a family of interchangeable cipher components. All of them
// offer encryption, decryption and on-chip key expansion, and they trade area
// against throughput:
//   iterative, cache-routing, integrated pre-expansion    (simon_iter_cache)
//   iterative, RAM-routing, integrated pre-expansion      (simon_iter_ram_int)
//   iterative, RAM-routing, separate pre-expansion        (simon_iter_ram_sep)
//   iterative with inner-round pipelined round, K = 2     (simon_iter_inner)
//   full loop unrolling, combinational                    (simon_unrolled)
//   full outer-round pipelining, one block per clock      (simon_outer_pipe)
//   mixed inner/outer pipelining, one block per clock     (simon_mixed_pipe)
// The top wires all of them to the same decrypt, key_in and block_in, so one
// stimulus exercises every architecture and their results can be compared.
// The iterative units start on start and report with their own busy/done
// pulse. The pipelines take a block on every clock with in_valid. The unrolled
// unit answers combinationally. A product would instantiate just one of them.
// The paper evaluates the architectures separately. Placing them side by side
// is this design's choice.
module simon_top
  import simon_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   decrypt,
  input  key_t   key_in,
  input  block_t block_in,
  // iterative units
  input  logic   start,
  output logic   [3:0] iter_busy,   // [0] cache, [1] ram_int, [2] ram_sep, [3] inner
  output logic   [3:0] iter_done,
  output block_t [3:0] iter_out,
  // fully unrolled unit
  output block_t unrolled_out,
  // pipelined units
  input  logic   in_valid,
  output logic   outer_valid,
  output block_t outer_out,
  output logic   mixed_valid,
  output block_t mixed_out
);
  simon_iter_cache u_iter_cache (
    .clk, .rst_n, .start, .decrypt, .key_in, .block_in,
    .busy(iter_busy[0]), .done(iter_done[0]), .block_out(iter_out[0])
  );

  simon_iter_ram_int u_iter_ram_int (
    .clk, .rst_n, .start, .decrypt, .key_in, .block_in,
    .busy(iter_busy[1]), .done(iter_done[1]), .block_out(iter_out[1])
  );

  simon_iter_ram_sep u_iter_ram_sep (
    .clk, .rst_n, .start, .decrypt, .key_in, .block_in,
    .busy(iter_busy[2]), .done(iter_done[2]), .block_out(iter_out[2])
  );

  simon_iter_inner u_iter_inner (
    .clk, .rst_n, .start, .decrypt, .key_in, .block_in,
    .busy(iter_busy[3]), .done(iter_done[3]), .block_out(iter_out[3])
  );

  simon_unrolled u_unrolled (
    .decrypt, .key_in, .block_in, .block_out(unrolled_out)
  );

  simon_outer_pipe u_outer (
    .clk, .rst_n, .decrypt, .key_in, .in_valid, .block_in,
    .out_valid(outer_valid), .block_out(outer_out)
  );

  simon_mixed_pipe u_mixed (
    .clk, .rst_n, .decrypt, .key_in, .in_valid, .block_in,
    .out_valid(mixed_valid), .block_out(mixed_out)
  );
endmodule
