// tb_simon_key_ram: checks the 44 x 32 round-key RAM against a shadow array.
// It checks the one-cycle registered read, write-first behaviour when the same
// word is written and read in one cycle, and that words are retained.
module tb_simon_key_ram;
  import simon_pkg::*;

  logic  clk = 0;
  logic  we;
  idx_t  waddr, raddr;
  word_t wdata, rdata;
  word_t shadow [ROUNDS];
  int checks = 0, failures = 0;

  simon_key_ram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cyc(input logic w, input int wa, input word_t wd, input int ra,
                     input logic chk, input word_t exp);
    @(negedge clk);
    we = w; waddr = idx_t'(wa); wdata = wd; raddr = idx_t'(ra);
    @(posedge clk);
    #1;
    if (chk) begin
      checks++;
      if (rdata !== exp) begin
        failures++;
        $display("FAIL ram raddr=%0d got=%h exp=%h", ra, rdata, exp);
      end
    end
  endtask

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    // fill every word
    for (int i = 0; i < ROUNDS; i++) begin
      shadow[i] = $urandom;
      cyc(1, i, shadow[i], 0, 0, '0);
    end
    // read back in ascending and descending order
    for (int i = 0; i < ROUNDS; i++) cyc(0, 0, '0, i, 1, shadow[i]);
    for (int i = ROUNDS - 1; i >= 0; i--) cyc(0, 0, '0, i, 1, shadow[i]);
    // write-first: write and read the same word in one cycle
    for (int n = 0; n < 100; n++) begin
      int a;
      word_t d;
      a = $urandom_range(ROUNDS - 1);
      d = $urandom;
      shadow[a] = d;
      cyc(1, a, d, a, 1, d);
    end
    // write one word while reading another
    for (int n = 0; n < 200; n++) begin
      int a, b;
      word_t d;
      a = $urandom_range(ROUNDS - 1);
      b = $urandom_range(ROUNDS - 1);
      d = $urandom;
      if (a == b) continue;
      cyc(1, a, d, b, 1, shadow[b]);
      shadow[a] = d;
    end
    for (int i = 0; i < ROUNDS; i++) cyc(0, 0, '0, i, 1, shadow[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
