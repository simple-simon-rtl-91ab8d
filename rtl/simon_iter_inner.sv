// simon_iter_inner: iterative SIMON64/128 (integrated pre-expansion,
// cache-routing) with an inner-round pipelined round function.
//
// This is simon_iter_cache with its round replaced by simon_round_inner, which
// holds INNER_K registers inside the round: after gamma = r ^ k (K = 1), or
// after both gamma and phi (K = 2, the default). In a Feistel cipher the next
// round needs this round's full result, so a single block cannot overlap its
// rounds. Every round therefore takes two clocks: the first fills the inner
// registers, the second writes the state register. The round key (cache word
// 0) is held for both clocks, and the key cache, RAM write and round counter
// advance once per round.
//
// Latency from the clock that samples start to done: 89 clocks for encryption
// (1 + 2 x 44). For decryption it is 134 clocks: 1, plus 44 pre-expansion,
// plus 1 alignment, plus 2 x 44. Interface as simon_iter_cache.
// Follows the paper: the iterative cache-routing base and the two register
// positions. The paper calls its own versions experimental and untested, and
// gives no control details. The two-clock round schedule and the handshake are
// this design's own.
module simon_iter_inner
  import simon_pkg::*;
#(
  parameter int unsigned INNER_K = 2
) (
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
  logic               phase;   // 0: inner registers load, 1: state register loads

  word_t  k_new, ram_rdata;
  block_t round_out;
  idx_t   raddr;
  logic   ram_we;

  simon_round_inner #(.INNER_K(INNER_K)) u_round (
    .clk(clk), .v_in(state), .v_k(cache[0]), .v_out(round_out)
  );

  simon_key_expand u_ks (.idx(cnt + idx_t'(KWORDS)), .cache(cache), .k_out(k_new));

  assign ram_we = (st == ST_PREEXP) || (st == ST_RUN && !dec && phase);

  always_comb begin
    unique case (st)
      ST_PREEXP: raddr = idx_t'(ROUNDS - 1);
      default:   raddr = (st == ST_ALIGN || cnt >= idx_t'(ROUNDS - 1)) ? idx_t'(ROUNDS - 2)
                                                                        : idx_t'(ROUNDS - 2) - cnt;
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
      phase <= 1'b0;
    end else begin
      unique case (st)
        ST_IDLE, ST_DONE: begin
          st <= ST_IDLE;
          if (start) begin
            dec   <= decrypt;
            state <= decrypt ? swap_words(block_in) : block_in;
            cache <= key_in;
            cnt   <= '0;
            phase <= 1'b0;
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
          phase <= !phase;
          if (phase) begin
            state <= round_out;
            if (dec) cache[0] <= ram_rdata;
            else     cache    <= {k_new, cache[KWORDS-1:1]};
            cnt   <= cnt + 1'b1;
            if (cnt == idx_t'(ROUNDS - 1)) st <= ST_DONE;
          end
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  assign busy      = (st != ST_IDLE) && (st != ST_DONE);
  assign done      = (st == ST_DONE);
  assign block_out = dec ? swap_words(state) : state;
endmodule
