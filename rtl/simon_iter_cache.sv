// simon_iter_cache: iterative SIMON64/128 with integrated key pre-expansion and
// cache-routing ("Iterative*" of the paper's result tables).
//
// One round per clock. A 64-bit state register feeds one combinational round
// (simon_round). A four-word round-key cache (k_i .. k_{i+3}) shifts left each
// round. The combinational key schedule (simon_key_expand) writes k_{i+4} into
// the last word, so it only ever produces round keys 4..43. The first cache
// word is the round key of the current round and is also written into the
// round-key RAM (simon_key_ram) at the round index. In decryption the first
// word is loaded from the RAM output instead of from the second word: that is
// the multiplexer of the cache-routing scheme.
//
// Encryption: start loads the block and the key (the single initialisation
// cycle), then 44 rounds run. done pulses 45 clocks after start was sampled.
// Decryption needs every round key before the first round. The controller
// therefore first runs the key schedule for 44 cycles (pre-expansion, filling
// the RAM). Then comes one alignment cycle that moves k43 from the RAM into the
// cache, then 44 rounds with keys k43 .. k0. The block's words are swapped
// before and after the rounds. done pulses 90 clocks after start.
//
// Interface: start is sampled in idle. decrypt, key_in and block_in are sampled
// with it. block_out holds the result from done until the next start. busy is
// high while an operation runs.
// Follows the paper: the datapath, the cache-routing multiplexer, the RAM size,
// and a 1-cycle initialisation plus one extra cycle when decryption follows
// pre-expansion. This design's choices: the handshake, the active-low
// synchronous reset, and that the state register holds the ciphertext during
// pre-expansion instead of encrypting a dummy block (its result was discarded
// anyway).
module simon_iter_cache
  import simon_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   decrypt,
  input  key_t   key_in,
  input  block_t block_in,
  output logic   busy,
  output logic   done,
  output block_t block_out
);
  iter_state_e        st;
  block_t             state;
  word_t [KWORDS-1:0] cache;
  idx_t               cnt;
  logic               dec;

  word_t  k_new, ram_rdata;
  block_t round_out;
  idx_t   raddr;
  logic   ram_we;

  simon_round u_round (.v_in(state), .v_k(cache[0]), .v_out(round_out));

  simon_key_expand u_ks (.idx(cnt + idx_t'(KWORDS)), .cache(cache), .k_out(k_new));

  // Cache word 0 is stored at the round index while the key is expanded:
  // during every encryption round and during the pre-expansion of a decryption.
  assign ram_we = (st == ST_PREEXP) || (st == ST_RUN && !dec);

  always_comb begin
    unique case (st)
      ST_PREEXP: raddr = idx_t'(ROUNDS - 1);
      ST_ALIGN:  raddr = idx_t'(ROUNDS - 2);
      default:   raddr = (cnt < idx_t'(ROUNDS - 2)) ? idx_t'(ROUNDS - 3) - cnt : '0;
    endcase
  end

  simon_key_ram u_ram (
    .clk(clk), .we(ram_we), .waddr(cnt), .wdata(cache[0]),
    .raddr(raddr), .rdata(ram_rdata)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st    <= ST_IDLE;
      state <= '0;
      cache <= '0;
      cnt   <= '0;
      dec   <= 1'b0;
    end else begin
      unique case (st)
        ST_IDLE, ST_DONE: begin
          st <= ST_IDLE;
          if (start) begin
            dec   <= decrypt;
            state <= decrypt ? swap_words(block_in) : block_in;
            cache <= key_in;
            cnt   <= '0;
            st    <= decrypt ? ST_PREEXP : ST_RUN;
          end
        end
        ST_PREEXP: begin
          cache <= {k_new, cache[KWORDS-1:1]};
          cnt   <= cnt + 1'b1;
          if (cnt == idx_t'(ROUNDS - 1)) st <= ST_ALIGN;
        end
        ST_ALIGN: begin
          cache[0] <= ram_rdata;
          cnt      <= '0;
          st       <= ST_RUN;
        end
        ST_RUN: begin
          state <= round_out;
          if (dec) cache[0] <= ram_rdata;
          else     cache    <= {k_new, cache[KWORDS-1:1]};
          cnt   <= cnt + 1'b1;
          if (cnt == idx_t'(ROUNDS - 1)) st <= ST_DONE;
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  assign busy      = (st != ST_IDLE) && (st != ST_DONE);
  assign done      = (st == ST_DONE);
  assign block_out = dec ? swap_words(state) : state;
endmodule
