// simon_iter_ram_int: iterative SIMON64/128 with integrated key pre-expansion
// and RAM-routing ("Iterative**" of the paper's result tables).
//
// One round per clock. The key schedule (simon_key_expand) produces every round
// key k_0 .. k_43 from the round index and a four-word cache. For indices 0..3
// it passes the master key words through. From index 4 on, each new key is
// also shifted into the last cache word. The key schedule output goes into the
// round-key RAM (simon_key_ram), and the RAM output feeds the round function.
// The RAM's one-cycle read delay puts each key one cycle behind its
// generation. Reading the word being written returns it at once (write-first).
//
// Encryption: start loads block and key (first initialisation cycle). One more
// cycle generates k0 (second initialisation cycle). Then 44 rounds run while
// the key schedule stays one index ahead. done pulses 46 clocks after start.
// Decryption: start loads the key, and the key schedule runs 44 cycles
// (pre-expansion of the integrated scheme). The last of them already reads k43
// back. Then 44 rounds read k43 .. k0. The block's words are swapped before and
// after the rounds. done pulses 89 clocks after start.
//
// Interface as simon_iter_cache: start sampled in idle with decrypt, key_in and
// block_in; done is a 1-cycle pulse; block_out holds until the next start.
// Follows the paper: the RAM-routing datapath, the 2-cycle initialisation, and
// all 44 keys coming from the key schedule. This design's choices: the
// handshake, the synchronous active-low reset, and the state register holding
// the ciphertext during pre-expansion instead of encrypting a dummy block.
module simon_iter_ram_int
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
  idx_t               kidx;    // index of the key being generated
  idx_t               cnt;     // round counter
  logic               dec;

  word_t  k_new, ram_rdata;
  block_t round_out;
  idx_t   raddr;
  logic   ram_we, gen;

  simon_round u_round (.v_in(state), .v_k(ram_rdata), .v_out(round_out));

  simon_key_expand u_ks (.idx(kidx), .cache(cache), .k_out(k_new));

  // The key schedule runs in the second initialisation cycle and the encryption
  // rounds, or in pre-expansion for decryption.
  assign gen    = (st == ST_INIT) || (st == ST_PREEXP) || (st == ST_RUN && !dec);
  assign ram_we = gen && (kidx < idx_t'(ROUNDS));

  always_comb begin
    if (st == ST_RUN && dec)
      raddr = (cnt < idx_t'(ROUNDS - 1)) ? idx_t'(ROUNDS - 2) - cnt : '0;
    else
      raddr = kidx;   // write-first: the generated key appears next cycle
  end

  simon_key_ram u_ram (
    .clk(clk), .we(ram_we), .waddr(kidx), .wdata(k_new),
    .raddr(raddr), .rdata(ram_rdata)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st    <= ST_IDLE;
      state <= '0;
      cache <= '0;
      kidx  <= '0;
      cnt   <= '0;
      dec   <= 1'b0;
    end else begin
      if (gen) begin
        kidx <= kidx + 1'b1;
        if (kidx >= idx_t'(KWORDS)) cache <= {k_new, cache[KWORDS-1:1]};
      end
      unique case (st)
        ST_IDLE, ST_DONE: begin
          st <= ST_IDLE;
          if (start) begin
            dec   <= decrypt;
            state <= decrypt ? swap_words(block_in) : block_in;
            cache <= key_in;
            kidx  <= '0;
            cnt   <= '0;
            st    <= decrypt ? ST_PREEXP : ST_INIT;
          end
        end
        ST_INIT:   st <= ST_RUN;
        ST_PREEXP: if (kidx == idx_t'(ROUNDS - 1)) st <= ST_RUN;
        ST_RUN: begin
          state <= round_out;
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
