// tb_block_buffer: checks the 512-bit block buffer with a reader that obeys
// the issue_ok rule and a memory of one cycle latency. Phase 1: the consumer
// is always ready; blocks must leave every 16 cycles with no gap. Phase 2:
// the consumer is ready at random; the skid register must catch the word in
// flight. In both phases every block must hold 16 consecutive words in
// order, and no word may be lost or duplicated.
module tb_block_buffer;
  import pufbind_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic   in_valid = 1'b0;
  word_t  in_word = '0;
  logic   issue_ok, out_valid, out_ready = 1'b0, fire;
  block_t out_block;
  int checks = 0, failures = 0;
  int n_skid = 0;

  block_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Reader: words are the numbers 0, 1, 2, ... issued while issue_ok is high
  // and delivered one cycle later.
  int    next_issue = 0;
  logic  issue_run = 1'b0;
  logic  rnd_ready = 1'b0;
  int    expect_word = 0;
  int    last_fire = -1, cyc = 0;
  int    gaps = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (issue_run && issue_ok) begin
      in_valid   <= 1'b1;
      in_word    <= word_t'(next_issue);
      next_issue <= next_issue + 1;
    end else begin
      in_valid <= 1'b0;
    end
    out_ready <= rnd_ready ? ($urandom % 4 == 0) : 1'b1;
  end

  always @(posedge clk) if (rst_n && fire) begin
    for (int i = 0; i < 16; i++)
      check(out_block[511-32*i -: 32] == word_t'(expect_word + i),
            $sformatf("block word %0d is stream word %0d", i, expect_word + i));
    expect_word = expect_word + 16;
    if (!rnd_ready && last_fire >= 0 && cyc - last_fire != 16) gaps++;
    last_fire = cyc;
  end

  always @(posedge clk) if (rst_n && dut.skid_valid_q && !$past(dut.skid_valid_q)) n_skid++;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // phase 1: always ready, 20 blocks
    issue_run = 1'b1;
    wait (expect_word == 16 * 20);
    check(gaps == 0, $sformatf("blocks leave every 16 cycles (%0d gaps)", gaps));
    // phase 2: random readiness
    rnd_ready = 1'b1;
    wait (expect_word == 16 * 60);
    check(n_skid > 0, "skid register used when the consumer stalls");
    issue_run = 1'b0;
    repeat (4) @(negedge clk);
    $display("skid uses: %0d", n_skid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
