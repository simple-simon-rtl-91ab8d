// tb_simon_mixed_pipe_inner_only: the test of tb_simon_mixed_pipe for the
// variant without registers between rounds (OUTER_REGS = 0): 44 stages.
//
// Original description: streaming test of the pipelined architecture simon_mixed_pipe.
//
// Several bursts of blocks go in, each under its own random key and direction
// (encrypt or decrypt). The first burst is the published test vector. The
// second presents a block on every clock, the full rate. Later bursts leave
// random gaps. Between bursts the pipeline drains, because key and direction
// are not carried with the blocks. Every output is compared with the
// behavioural reference in arrival order. Its latency must be exactly
// 44 clock edges from the edge that took the block in. No valid output may
// appear unexpected, and none may go missing.
module tb_simon_mixed_pipe_inner_only;
  import simon_pkg::*;
  import simon_ref_pkg::*;

  localparam int LAT = 44;

  logic   clk = 0, rst_n = 0, decrypt = 0, in_valid = 0;
  key_t   key_in = '0;
  block_t block_in = '0, block_out;
  logic   out_valid;
  int checks = 0, failures = 0;
  int cycle = 0;
  int full_rate_runs = 0, mode_switches = 0;

  block_t exp_q[$];
  int     cyc_q[$];

  simon_mixed_pipe #(.OUTER_REGS(1'b0)) dut (.clk, .rst_n, .decrypt, .key_in, .in_valid, .block_in, .out_valid, .block_out);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker, sampled in the middle of each cycle.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %h", block_out);
      end else begin
        block_t e;
        int c;
        e = exp_q.pop_front();
        c = cyc_q.pop_front();
        if (block_out !== e || cycle - c != LAT) begin
          failures++;
          $display("FAIL got=%h exp=%h latency=%0d exp=%0d", block_out, e, cycle - c, LAT);
        end
      end
    end
  end

  // Present one block (or a bubble) during the next cycle.
  task automatic put(input logic v, input block_t b);
    @(negedge clk);
    in_valid = v;
    block_in = b;
    if (v) begin
      exp_q.push_back(decrypt ? ref_decrypt(key_in, b) : ref_encrypt(key_in, b));
      cyc_q.push_back(cycle);
    end
  endtask

  task automatic drain();
    repeat (LAT + 3) put(1'b0, rand_block());
  endtask

  initial begin
    logic prev_dec;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // burst 0: published test vector, encrypt then decrypt
    key_in = TV_KEY; decrypt = 0;
    put(1'b1, TV_PT);
    drain();
    decrypt = 1; mode_switches++;
    put(1'b1, TV_CT);
    drain();
    prev_dec = 1;
    for (int burst = 0; burst < 6; burst++) begin
      @(negedge clk);
      key_in  = rand_key();
      decrypt = (burst == 0) ? 1'b0 : 1'($urandom_range(1));
      if (decrypt != prev_dec) mode_switches++;
      prev_dec = decrypt;
      for (int n = 0; n < 2 * ROUNDS; n++)
        put(burst == 0 ? 1'b1 : 1'($urandom_range(3) != 0), rand_block());
      if (burst == 0) full_rate_runs++;
      drain();
    end
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d blocks never came out", exp_q.size());
    end
    checks++;
    if (full_rate_runs == 0 || mode_switches == 0) begin
      failures++;
      $display("FAIL full-rate streaming or mode switch not exercised");
    end
    $display("full-rate bursts=%0d mode switches=%0d", full_rate_runs, mode_switches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
