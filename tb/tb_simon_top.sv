// tb_simon_top: end-to-end test of the whole design at its default sizes.
//
// Each operation gives one key, block and direction to all seven
// architectures at once: the four iterative units get a start pulse, the two
// pipelines take the block with in_valid, and the unrolled unit answers at
// once. Every result is compared with the behavioural reference. The test
// ends by streaming blocks back to back through both pipelines. It counts each
// mechanism of the design and fails if any never happened:
//   encryptions and decryptions on the iterative units,
//   key pre-expansion (every decryption, and every operation of the
//   separate-pre-expansion unit),
//   the alignment cycle of the cache-routing units,
//   the two-clock inner-pipelined round,
//   full-rate streaming and direction switches in the pipelines.
module tb_simon_top;
  import simon_pkg::*;
  import simon_ref_pkg::*;

  logic   clk = 0, rst_n = 0, decrypt = 0, start = 0, in_valid = 0;
  key_t   key_in = '0;
  block_t block_in = '0;
  logic   [3:0] iter_busy, iter_done;
  block_t [3:0] iter_out;
  block_t unrolled_out, outer_out, mixed_out;
  logic   outer_valid, mixed_valid;
  int checks = 0, failures = 0;
  int n_enc = 0, n_dec = 0, n_preexp = 0, n_align = 0, n_inner_wait = 0;
  int n_full_rate = 0, n_switch = 0;

  simon_top dut (.*);

  always #5 clk = ~clk;

  // Stream checker: in the streaming phase every pipeline output is compared,
  // in order, with the expected queue of its pipeline.
  logic   streaming = 0;
  block_t oq[$], mq[$];
  int     got_outer = 0, got_mixed = 0;
  always @(negedge clk) begin
    if (streaming && outer_valid) begin
      got_outer++;
      expect_eq("outer stream", outer_out, oq.size() ? oq.pop_front() : ~outer_out);
    end
    if (streaming && mixed_valid) begin
      got_mixed++;
      expect_eq("mixed stream", mixed_out, mq.size() ? mq.pop_front() : ~mixed_out);
    end
  end

  // mechanism monitors
  always @(posedge clk) begin
    if (dut.u_iter_ram_sep.st == ST_PREEXP && dut.u_iter_ram_sep.kidx == '0) n_preexp++;
    if (dut.u_iter_cache.st == ST_ALIGN) n_align++;
    if (dut.u_iter_inner.st == ST_RUN && !dut.u_iter_inner.phase) n_inner_wait++;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  task automatic op(input logic dec, input key_t k, input block_t b);
    block_t exp;
    logic [3:0] seen;
    logic outer_seen, mixed_seen;
    int t;
    exp = dec ? ref_decrypt(k, b) : ref_encrypt(k, b);
    if (dec) n_dec++; else n_enc++;
    @(negedge clk);
    decrypt = dec; key_in = k; block_in = b; start = 1; in_valid = 1;
    #1;
    expect_eq("unrolled", unrolled_out, exp);
    @(negedge clk);
    start = 0; in_valid = 0;
    // key and direction stay put: the pipelines read them every cycle
    seen = '0; outer_seen = 0; mixed_seen = 0; t = 0;
    while ((seen != 4'hF || !outer_seen || !mixed_seen) && t < 400) begin
      for (int u = 0; u < 4; u++)
        if (iter_done[u]) begin
          seen[u] = 1;
          expect_eq($sformatf("iterative unit %0d", u), iter_out[u], exp);
        end
      if (outer_valid) begin
        outer_seen = 1;
        expect_eq("outer pipeline", outer_out, exp);
      end
      if (mixed_valid) begin
        mixed_seen = 1;
        expect_eq("mixed pipeline", mixed_out, exp);
      end
      @(negedge clk);
      t++;
    end
    checks++;
    if (t >= 400) begin
      failures++;
      $display("FAIL operation did not complete on every unit: %b %b %b", seen, outer_seen, mixed_seen);
    end
  endtask

  initial begin
    logic prev;
    repeat (3) @(negedge clk);
    rst_n = 1;
    op(1'b0, TV_KEY, TV_PT);
    op(1'b1, TV_KEY, TV_CT);
    for (int n = 0; n < 6; n++) op(1'($urandom_range(1)), rand_key(), rand_block());

    // back-to-back streaming through both pipelines, direction switching
    streaming = 1;
    prev = decrypt;
    for (int s = 0; s < 4; s++) begin
      @(negedge clk);
      key_in = rand_key();
      decrypt = 1'(s % 2);
      if (decrypt != prev) n_switch++;
      prev = decrypt;
      got_outer = 0;
      got_mixed = 0;
      for (int n = 0; n < 50; n++) begin
        block_t b;
        b = rand_block();
        block_in = b; in_valid = 1;
        oq.push_back(decrypt ? ref_decrypt(key_in, b) : ref_encrypt(key_in, b));
        mq.push_back(oq[$]);
        @(negedge clk);
      end
      in_valid = 0;
      n_full_rate++;
      repeat (100) @(negedge clk);
      expect_eq("outer stream count", 64'(got_outer), 64'd50);
      expect_eq("mixed stream count", 64'(got_mixed), 64'd50);
    end
    streaming = 0;

    $display("encryptions=%0d decryptions=%0d pre-expansions=%0d align cycles=%0d",
             n_enc, n_dec, n_preexp, n_align);
    $display("inner-round first clocks=%0d full-rate bursts=%0d direction switches=%0d",
             n_inner_wait, n_full_rate, n_switch);
    checks++;
    if (n_enc == 0 || n_dec == 0 || n_preexp == 0 || n_align == 0 || n_inner_wait == 0 ||
        n_full_rate == 0 || n_switch == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
