// tb_simon_throughput: back-to-back encryption of a stream of blocks through
// every architecture, measuring clocks per block. This is the throughput
// comparison of the architectures, in clock cycles rather than Mbit/s.
//
// The iterative units keep start high, so that each new operation starts in
// the cycle in which the previous one reports done. The expected spacing
// between done pulses is one load clock plus 44 round clocks (45), 46 for
// RAM-routing with its two initialisation clocks, 89 for separate
// pre-expansion, and 1 + 2 x 44 = 89 for the two-clock inner-pipelined
// round. The throughput formula blocksize / (#rounds x Tclk) counts the 44
// round clocks alone. The pipelines take a block every clock, so N blocks
// leave in N consecutive clocks after the pipeline latency. The unrolled unit
// gives one result per evaluation. Every result is also checked against the
// behavioural reference.
module tb_simon_throughput;
  import simon_pkg::*;
  import simon_ref_pkg::*;

  localparam int NBLK_ITER = 8;
  localparam int NBLK_PIPE = 100;

  logic   clk = 0, rst_n = 0;
  key_t   key = TV_KEY;
  int checks = 0, failures = 0;
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #4000000;
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

  // ---------------- iterative units ----------------
  logic   [3:0] start = '0, busy, done;
  block_t [3:0] bin, bout;
  localparam int SPACING [4] = '{45, 46, 89, 89};

  simon_iter_cache   u0 (.clk, .rst_n, .start(start[0]), .decrypt(1'b0), .key_in(key),
                         .block_in(bin[0]), .busy(busy[0]), .done(done[0]), .block_out(bout[0]));
  simon_iter_ram_int u1 (.clk, .rst_n, .start(start[1]), .decrypt(1'b0), .key_in(key),
                         .block_in(bin[1]), .busy(busy[1]), .done(done[1]), .block_out(bout[1]));
  simon_iter_ram_sep u2 (.clk, .rst_n, .start(start[2]), .decrypt(1'b0), .key_in(key),
                         .block_in(bin[2]), .busy(busy[2]), .done(done[2]), .block_out(bout[2]));
  simon_iter_inner   u3 (.clk, .rst_n, .start(start[3]), .decrypt(1'b0), .key_in(key),
                         .block_in(bin[3]), .busy(busy[3]), .done(done[3]), .block_out(bout[3]));

  task automatic stream_iter(input int u);
    block_t cur, nxt;
    int last, n;
    cur = rand_block();
    @(negedge clk);
    bin[u] = cur;
    start[u] = 1;
    last = -1;
    n = 0;
    while (n < NBLK_ITER) begin
      @(negedge clk);
      if (done[u]) begin
        expect_eq($sformatf("unit %0d result", u), bout[u], ref_encrypt(key, cur));
        if (last >= 0)
          expect_eq($sformatf("unit %0d clocks per block", u), 64'(cycle - last), 64'(SPACING[u]));
        else
          $display("unit %0d: first result after %0d clocks", u, cycle);
        last = cycle;
        n++;
        nxt = rand_block();
        cur = nxt;
        bin[u] = nxt;
        if (n == NBLK_ITER) start[u] = 0;
      end
    end
    $display("unit %0d: %0d blocks back to back, %0d clocks per block", u, n, SPACING[u]);
  endtask

  // ---------------- pipelines ----------------
  logic   pin_valid = 0;
  block_t pin = '0;
  logic   ov, mv;
  block_t oout, mout;
  block_t oq[$], mq[$];
  int     o_first = -1, o_last = -1, o_n = 0, m_first = -1, m_last = -1, m_n = 0;

  simon_outer_pipe u_outer (.clk, .rst_n, .decrypt(1'b0), .key_in(key), .in_valid(pin_valid),
                            .block_in(pin), .out_valid(ov), .block_out(oout));
  simon_mixed_pipe u_mixed (.clk, .rst_n, .decrypt(1'b0), .key_in(key), .in_valid(pin_valid),
                            .block_in(pin), .out_valid(mv), .block_out(mout));

  always @(negedge clk) begin
    if (rst_n && ov) begin
      if (o_first < 0) o_first = cycle;
      o_last = cycle;
      o_n++;
      expect_eq("outer result", oout, oq.size() ? oq.pop_front() : ~oout);
    end
    if (rst_n && mv) begin
      if (m_first < 0) m_first = cycle;
      m_last = cycle;
      m_n++;
      expect_eq("mixed result", mout, mq.size() ? mq.pop_front() : ~mout);
    end
  end

  task automatic stream_pipes();
    int t0;
    @(negedge clk);
    t0 = cycle;
    for (int n = 0; n < NBLK_PIPE; n++) begin
      block_t b;
      b = rand_block();
      pin = b;
      pin_valid = 1;
      oq.push_back(ref_encrypt(key, b));
      mq.push_back(ref_encrypt(key, b));
      @(negedge clk);
    end
    pin_valid = 0;
    repeat (100) @(negedge clk);
    expect_eq("outer count", 64'(o_n), 64'(NBLK_PIPE));
    expect_eq("mixed count", 64'(m_n), 64'(NBLK_PIPE));
    expect_eq("outer: one block per clock", 64'(o_last - o_first + 1), 64'(NBLK_PIPE));
    expect_eq("mixed: one block per clock", 64'(m_last - m_first + 1), 64'(NBLK_PIPE));
    expect_eq("outer latency", 64'(o_first - t0), 64'(43));
    expect_eq("mixed latency", 64'(m_first - t0), 64'(87));
    $display("outer pipeline: %0d blocks in %0d clocks after a %0d-clock latency",
             o_n, o_last - o_first + 1, o_first - t0);
    $display("mixed pipeline: %0d blocks in %0d clocks after a %0d-clock latency",
             m_n, m_last - m_first + 1, m_first - t0);
  endtask

  // ---------------- unrolled ----------------
  block_t uin, uout;
  simon_unrolled u_unr (.decrypt(1'b0), .key_in(key), .block_in(uin), .block_out(uout));

  task automatic stream_unrolled();
    for (int n = 0; n < NBLK_PIPE; n++) begin
      @(negedge clk);
      uin = rand_block();
      #1;
      expect_eq("unrolled result", uout, ref_encrypt(key, uin));
    end
    $display("unrolled: %0d blocks, one per clock", NBLK_PIPE);
  endtask

  initial begin
    bin = '0;
    uin = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      stream_iter(0);
      stream_iter(1);
      stream_iter(2);
      stream_iter(3);
      stream_pipes();
      stream_unrolled();
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
