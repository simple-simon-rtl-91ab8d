// tb_simon_iter_cache: end-to-end test of the iterative architecture simon_iter_cache.
//
// It encrypts and decrypts the published SIMON64/128 test vector and then
// random key/block pairs, in both directions and in random order. Results are
// compared with the behavioural reference (simon_ref_pkg), and encrypting then
// decrypting must give back the plaintext. The cycle count from the clock
// that samples start to the first cycle with done high is checked against the
// architecture's latency: 45 clocks for encryption, 90 for decryption.
// done must be a one-cycle pulse, and busy must be high in between.
module tb_simon_iter_cache;
  import simon_pkg::*;
  import simon_ref_pkg::*;

  localparam int ENC_LAT = 45;
  localparam int DEC_LAT = 90;

  logic   clk = 0, rst_n = 0, start = 0, decrypt = 0;
  key_t   key_in = '0;
  block_t block_in = '0, block_out;
  logic   busy, done;
  int checks = 0, failures = 0;

  simon_iter_cache dut (.clk, .rst_n, .start, .decrypt, .key_in, .block_in, .busy, .done, .block_out);

  always #5 clk = ~clk;

  initial begin
    #2000000;
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

  task automatic run(input logic dec, input key_t k, input block_t b, output block_t res);
    int lat;
    logic busy_ok;
    @(negedge clk);
    start = 1; decrypt = dec; key_in = k; block_in = b;
    @(posedge clk);           // start sampled
    lat = 1;
    busy_ok = 1;
    @(negedge clk);
    start = 0; decrypt = $urandom; key_in = rand_key(); block_in = rand_block();
    while (!done && lat < 1000) begin
      if (!busy) busy_ok = 0;
      @(posedge clk);
      lat++;
      @(negedge clk);
    end
    res = block_out;
    expect_eq(dec ? "decrypt latency" : "encrypt latency", 64'(lat), 64'(dec ? DEC_LAT : ENC_LAT));
    expect_eq("busy while running", 64'(busy_ok), 64'd1);
    @(negedge clk);
    expect_eq("done is one cycle", 64'(done), 64'd0);
    expect_eq("result held after done", block_out, res);
  endtask

  initial begin
    block_t ct, pt, r;
    key_t   k;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1'b0, TV_KEY, TV_PT, r);
    expect_eq("test vector encrypt", r, TV_CT);
    run(1'b1, TV_KEY, TV_CT, r);
    expect_eq("test vector decrypt", r, TV_PT);
    for (int n = 0; n < 12; n++) begin
      k  = rand_key();
      pt = rand_block();
      if ($urandom_range(1)) begin
        run(1'b0, k, pt, ct);
        expect_eq("encrypt", ct, ref_encrypt(k, pt));
        run(1'b1, k, ct, r);
        expect_eq("decrypt round trip", r, pt);
      end else begin
        ct = rand_block();
        run(1'b1, k, ct, r);
        expect_eq("decrypt", r, ref_decrypt(k, ct));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
