// tb_auth_controller: checks the authentication FSM in two small datapaths:
// A, 40-word memory (32 hashed words, three padded blocks, so the padded
// stream is longer than the memory) with the 16-cycle engine; B, 64-word
// memory with a 64-cycle engine (ROUNDS_PER_CYCLE = 1), which makes every
// block wait for the engine and exercises the stall path.
// For random images it checks: the key digest and image digest against the
// reference model, pass for a correctly bound image, fail for a flipped
// image bit, a flipped signature bit and a wrong key, mem_enable and led_fail,
// and for A the latency 16 * blocks + 19 cycles after key_valid is sampled.
module tb_auth_controller;
  import pufbind_pkg::*;
  import sha256_ref_pkg::*;

  localparam int unsigned DA = 40, DB = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [127:0] key = '0;
  logic key_valid = 1'b0;
  auth_result_e res_a, res_b;
  logic en_a, en_b, fail_a, fail_b;
  digest_t prog_a, prog_b, bpuf_a, bpuf_b;
  int stall_a, stall_b;
  int checks = 0, failures = 0;

  auth_harness #(.DEPTH(DA), .ROUNDS_PER_CYCLE(4)) ha (.clk, .rst_n, .key, .key_valid,
    .result(res_a), .mem_enable(en_a), .led_fail(fail_a), .sha_prog_bin(prog_a), .sha_bpuf(bpuf_a),
    .stall_cycles(stall_a));
  auth_harness #(.DEPTH(DB), .ROUNDS_PER_CYCLE(1)) hb (.clk, .rst_n, .key, .key_valid,
    .result(res_b), .mem_enable(en_b), .led_fail(fail_b), .sha_prog_bin(prog_b), .sha_bpuf(bpuf_b),
    .stall_cycles(stall_b));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Build a bound image in a harness memory; returns the two reference digests.
  task automatic bind_images(input logic [127:0] k, output digest_t pa, output digest_t pb,
                             output digest_t kd);
    logic [31:0] ma [], mb [], kw [];
    digest_t ga, gb;
    ma = new[DA - 8]; mb = new[DB - 8]; kw = new[4];
    foreach (ma[i]) begin ma[i] = $urandom; ha.mem[i] = ma[i]; end
    foreach (mb[i]) begin mb[i] = $urandom; hb.mem[i] = mb[i]; end
    for (int i = 0; i < 4; i++) kw[i] = k[127-32*i -: 32];
    kd = sha256_words(kw, 4);
    pa = sha256_words(ma, DA - 8);
    pb = sha256_words(mb, DB - 8);
    ga = pa ^ kd; gb = pb ^ kd;
    for (int i = 0; i < 8; i++) begin
      ha.mem[DA-8+i] = ga[255-32*i -: 32];
      hb.mem[DB-8+i] = gb[255-32*i -: 32];
    end
  endtask

  task automatic run(input logic [127:0] k, output int lat_a);
    @(negedge clk); rst_n = 1'b0;
    @(negedge clk); rst_n = 1'b1;
    @(negedge clk);
    key = k; key_valid = 1'b1;
    @(posedge clk); #1;
    key_valid = 1'b0;
    lat_a = 0;
    while (res_a == AUTH_PENDING || res_b == AUTH_PENDING) begin
      @(posedge clk); #1;
      if (res_a == AUTH_PENDING) lat_a++;
    end
    lat_a++;
  endtask

  initial begin
    logic [127:0] k;
    digest_t pa, pb, kd;
    int lat, nblk_a;
    nblk_a = sha256_num_blocks(DA - 8);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3; t++) begin
      k = {$urandom, $urandom, $urandom, $urandom};
      bind_images(k, pa, pb, kd);
      // bound image, right key
      run(k, lat);
      check(bpuf_a == kd && bpuf_b == kd, "SHA_BPUF is SHA-256 of the padded key");
      check(prog_a == pa && prog_b == pb, "SHA_Prog_Bin is SHA-256 of the image less the signature");
      check(res_a == AUTH_PASS && en_a && !fail_a, "A: bound image passes");
      check(res_b == AUTH_PASS && en_b && !fail_b, "B: bound image passes (stalling engine)");
      check(lat == 16 * nblk_a + 19, $sformatf("A: verdict %0d cycles after key (expected %0d)",
                                               lat, 16 * nblk_a + 19));
      // wrong key
      run(k ^ (128'h1 << ($urandom % 128)), lat);
      check(res_a == AUTH_FAIL && fail_a && !en_a, "A: wrong key fails");
      check(res_b == AUTH_FAIL && fail_b && !en_b, "B: wrong key fails");
      // flipped image bit
      ha.mem[$urandom % (DA - 8)] ^= 32'h1 << ($urandom % 32);
      hb.mem[DB - 9] ^= 32'h8000_0000;
      run(k, lat);
      check(res_a == AUTH_FAIL && res_b == AUTH_FAIL, "flipped image bit fails");
      // flipped signature bit (image restored)
      bind_images(k, pa, pb, kd);
      ha.mem[DA - 8 + ($urandom % 8)] ^= 32'h1 << ($urandom % 32);
      hb.mem[DB - 1] ^= 32'h1;
      run(k, lat);
      check(res_a == AUTH_FAIL && res_b == AUTH_FAIL, "flipped signature bit fails");
    end
    check(stall_b > 0, $sformatf("slow engine made blocks wait (%0d stall cycles)", stall_b));
    check(stall_a == 0, "16-cycle engine never made a block wait");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
