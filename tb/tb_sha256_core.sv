// tb_sha256_core: self-checking test of the SHA-256 engine.
//
// Checks the engine against published FIPS 180-4 vectors ("abc", the empty
// message, the 448-bit two-block message) and against the reference model on
// random multi-block messages fed back to back. It also checks the rate: a
// block must finish 16 cycles after it is started, and a new block must be
// accepted in the cycle the previous one finishes, with no idle cycle.
module tb_sha256_core;
  import pufbind_pkg::*;
  import sha256_ref_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    start = 1'b0, init = 1'b0;
  block_t  blk = '0;
  logic    ready, result_valid;
  digest_t result, digest;
  int      checks = 0, failures = 0;

  sha256_core dut (.clk, .rst_n, .start, .init, .block(blk), .ready,
                   .result_valid, .result, .digest);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [31:0]  words [];
    logic [511:0] blocks [];
    digest_t      d, r;
    int           cyc;

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // Reference model self-check against published vectors.
    blocks = new[1];
    blocks[0] = {32'h61626380, {14{32'h0}}, 32'h18};
    r = compress(IV, blocks[0]);
    check(r == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
          "reference model: SHA-256(\"abc\")");
    words = new[0];
    check(sha256_words(words, 0) == 256'he3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855,
          "reference model: SHA-256(\"\")");

    // Engine: "abc", one block, 16-cycle latency.
    @(negedge clk);
    start = 1'b1; init = 1'b1; blk = blocks[0];
    @(posedge clk); #1; start = 1'b0;
    cyc = 1;
    while (!result_valid) begin @(posedge clk); #1; cyc++; end
    check(result == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
          "engine: SHA-256(\"abc\")");
    check(cyc == 16, $sformatf("engine: one block in 16 cycles (took %0d)", cyc));
    @(posedge clk); #1;
    check(digest == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
          "engine: digest register holds the result");

    // Engine: 448-bit two-block vector, back to back.
    blocks = new[2];
    blocks[0] = {32'h61626364, 32'h62636465, 32'h63646566, 32'h64656667,
                 32'h65666768, 32'h66676869, 32'h6768696a, 32'h68696a6b,
                 32'h696a6b6c, 32'h6a6b6c6d, 32'h6b6c6d6e, 32'h6c6d6e6f,
                 32'h6d6e6f70, 32'h6e6f7071, 32'h80000000, 32'h00000000};
    blocks[1] = {{15{32'h0}}, 32'h000001c0};
    run_chain(blocks, d, cyc);
    check(d == 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1,
          "engine: SHA-256 of the 448-bit two-block vector");
    check(cyc == 32, $sformatf("engine: two blocks in 32 cycles (took %0d)", cyc));

    // Random messages of 1..40 words.
    for (int trial = 0; trial < 12; trial++) begin
      automatic int n = 1 + ($urandom % 40);
      automatic int nb = sha256_num_blocks(n);
      words = new[n];
      foreach (words[i]) words[i] = $urandom;
      blocks = new[nb];
      for (int b = 0; b < nb; b++) blocks[b] = padded_block(words, n, b);
      run_chain(blocks, d, cyc);
      check(d == sha256_words(words, n), $sformatf("engine: random message of %0d words", n));
      check(cyc == 16 * nb, $sformatf("engine: %0d blocks in %0d cycles (took %0d)", nb, 16 * nb, cyc));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Feed blocks back to back: each next block is offered in the cycle in
  // which the previous one finishes.
  task automatic run_chain(input logic [511:0] blocks [], output digest_t d, output int cycles);
    int n = blocks.size();
    int c = 0;
    @(negedge clk);
    check(ready, "engine idle before a new message");
    start = 1'b1; init = 1'b1; blk = blocks[0];
    for (int b = 0; b < n; b++) begin
      @(posedge clk); #1;
      c++;
      start = 1'b0;
      while (!result_valid) begin @(posedge clk); #1; c++; end
      if (b + 1 < n) begin
        check(ready, "ready in the last cycle of a block");
        start = 1'b1; init = 1'b0; blk = blocks[b+1];
      end else begin
        d = result;
      end
    end
    @(posedge clk); #1;
    cycles = c;
  endtask

endmodule
