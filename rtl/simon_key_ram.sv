// simon_key_ram: the round-key RAM of the iterative architectures, 44 words of
// 32 bits.
//
// One synchronous write port and one synchronous read port. rdata is
// registered: it shows the word at raddr one clock after raddr is presented.
// When the same word is written and read in one cycle the new word is
// returned (write-first). The read latency of one cycle is what the
// RAM-routing architecture aligns its rounds to. The paper gives the size
// (44 x 32 bits) and the use of the RAM. The ports, the read timing and the
// write-first rule are this design's choice. The array is not reset.
module simon_key_ram
  import simon_pkg::*;
#(
  parameter int unsigned DEPTH = ROUNDS
) (
  input  logic  clk,
  input  logic  we,
  input  idx_t  waddr,
  input  word_t wdata,
  input  idx_t  raddr,
  output word_t rdata
);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH)
      mem[waddr] <= wdata;
    if (we && waddr == raddr)
      rdata <= wdata;
    else if (32'(raddr) < DEPTH)
      rdata <= mem[raddr];
    else
      rdata <= '0;
  end
endmodule
