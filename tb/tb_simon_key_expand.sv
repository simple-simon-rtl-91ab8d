// tb_simon_key_expand: checks the combinational key schedule step. For every
// round index 0..43 it loads the cache with the four keys before that index
// (or the master key, for indices 0..3). The expected key comes from the
// reference model. The master keys include the published test-vector key,
// all-zero, all-one and random keys.
module tb_simon_key_expand;
  import simon_pkg::*;
  import simon_ref_pkg::*;

  idx_t               idx;
  word_t [KWORDS-1:0] cache;
  word_t              k_out;
  int checks = 0, failures = 0;

  simon_key_expand dut (.idx(idx), .cache(cache), .k_out(k_out));

  task automatic check_key(input logic [127:0] key);
    logic [31:0] exp;
    for (int i = 0; i < 44; i++) begin
      idx = idx_t'(i);
      if (i < 4) cache = key;
      else for (int j = 0; j < 4; j++) cache[j] = round_key(key, i - 4 + j);
      #1;
      exp = round_key(key, i);
      checks++;
      if (k_out !== exp) begin
        failures++;
        $display("FAIL key idx=%0d got=%h exp=%h", i, k_out, exp);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Self-test of the reference model against the published vector.
    checks++;
    if (ref_encrypt(TV_KEY, TV_PT) !== TV_CT) begin
      failures++;
      $display("FAIL reference model does not match the test vector");
    end
    check_key(TV_KEY);
    check_key('0);
    check_key('1);
    for (int n = 0; n < 20; n++) check_key(rand_key());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
