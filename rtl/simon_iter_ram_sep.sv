// simon_iter_ram_sep: iterative SIMON64/128 with a separate key pre-expansion
// phase and RAM-routing ("Iterative***" of the paper's result tables).
//
// Same datapath as simon_iter_ram_int: the key schedule output feeds the
// round-key RAM, and the RAM output feeds the round function. Here every
// operation, encryption or decryption, starts with a pre-expansion phase of 44
// cycles that writes k_0 .. k_43 into the RAM. During the rounds the key
// schedule is idle, and the round key is read from the RAM by round index:
// ascending for encryption, descending for decryption. The last pre-expansion
// cycle already reads the first key needed (k0, or k43 by write-first), so the
// rounds follow without a gap. done pulses 89 clocks after start in both
// directions. The block's words are swapped before and after a decryption.
//
// Interface as simon_iter_cache. Follows the paper: the separate pre-expansion
// phase and RAM-routing. This design's choices: the handshake and the
// synchronous active-low reset.
module simon_iter_ram_sep
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
  idx_t               kidx;
  idx_t               cnt;
  logic               dec;

  word_t  k_new, ram_rdata;
  block_t round_out;
  idx_t   raddr;
  logic   ram_we;

  simon_round u_round (.v_in(state), .v_k(ram_rdata), .v_out(round_out));

  simon_key_expand u_ks (.idx(kidx), .cache(cache), .k_out(k_new));

  assign ram_we = (st == ST_PREEXP);

  always_comb begin
    if (st == ST_PREEXP)
      raddr = dec ? idx_t'(ROUNDS - 1) : '0;
    else if (dec)
      raddr = (cnt < idx_t'(ROUNDS - 1)) ? idx_t'(ROUNDS - 2) - cnt : '0;
    else
      raddr = (cnt < idx_t'(ROUNDS - 1)) ? cnt + 1'b1 : '0;
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
      unique case (st)
        ST_IDLE, ST_DONE: begin
          st <= ST_IDLE;
          if (start) begin
            dec   <= decrypt;
            state <= decrypt ? swap_words(block_in) : block_in;
            cache <= key_in;
            kidx  <= '0;
            cnt   <= '0;
            st    <= ST_PREEXP;
          end
        end
        ST_PREEXP: begin
          kidx <= kidx + 1'b1;
          if (kidx >= idx_t'(KWORDS)) cache <= {k_new, cache[KWORDS-1:1]};
          if (kidx == idx_t'(ROUNDS - 1)) st <= ST_RUN;
        end
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
