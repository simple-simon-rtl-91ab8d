// tb_simon_unrolled: checks the fully unrolled, combinational architecture.
// It uses the published test vector in both directions, then random
// key/block pairs against the behavioural reference, then encrypt-decrypt
// round trips.
module tb_simon_unrolled;
  import simon_pkg::*;
  import simon_ref_pkg::*;

  logic   decrypt;
  key_t   key_in;
  block_t block_in, block_out;
  int checks = 0, failures = 0;

  simon_unrolled dut (.decrypt, .key_in, .block_in, .block_out);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic d, input key_t k, input block_t b, input block_t exp,
                       input string what);
    decrypt = d; key_in = k; block_in = b;
    #1;
    checks++;
    if (block_out !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, block_out, exp);
    end
  endtask

  initial begin
    key_t k;
    block_t p, c;
    apply(1'b0, TV_KEY, TV_PT, TV_CT, "test vector encrypt");
    apply(1'b1, TV_KEY, TV_CT, TV_PT, "test vector decrypt");
    for (int n = 0; n < 40; n++) begin
      k = rand_key();
      p = rand_block();
      c = ref_encrypt(k, p);
      apply(1'b0, k, p, c, "encrypt");
      apply(1'b1, k, c, p, "decrypt");
      c = rand_block();
      apply(1'b1, k, c, ref_decrypt(k, c), "decrypt random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
