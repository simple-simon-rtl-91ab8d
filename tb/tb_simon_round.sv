// tb_simon_round: checks the combinational round against the reference round
// f(l) ^ r ^ k on hand-picked and random inputs. It also checks that the
// right output word is the left input word.
module tb_simon_round;
  import simon_ref_pkg::*;

  logic [63:0] v_in, v_out;
  logic [31:0] v_k;
  int checks = 0, failures = 0;

  simon_round dut (.v_in(v_in), .v_k(v_k), .v_out(v_out));

  task automatic check(input logic [63:0] a, input logic [31:0] k);
    logic [63:0] exp;
    v_in = a;
    v_k  = k;
    #1;
    exp = {f(a[63:32]) ^ a[31:0] ^ k, a[63:32]};
    checks++;
    if (v_out !== exp) begin
      failures++;
      $display("FAIL round in=%h k=%h got=%h exp=%h", a, k, v_out, exp);
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
    check(64'h0, 32'h0);
    check(64'h8000_0000_0000_0000, 32'h0);   // single bit: S^2 only, S^1&S^8 zero
    check(64'hFFFF_FFFF_0000_0000, 32'h0);
    check(64'h0000_0001_0000_0000, 32'h0);
    check(64'h0000_0000_1234_5678, 32'h9abc_def0);
    // first round of the published test vector: k0 = 03020100
    check(TV_PT, 32'h0302_0100);
    for (int i = 0; i < 500; i++) check(rand_block(), $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
