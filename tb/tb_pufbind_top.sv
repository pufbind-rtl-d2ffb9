// tb_pufbind_top: end-to-end test of the PUFBind top at its default sizes
// (1024-word image memory, 128-bit PUF), covering the scenarios used to
// validate the scheme on the prototype.
//
// Enrolment: the PUF of the chip is read once; that response, through the
// fuzzy-decoder stand-in, is the enrolled key K0. Binding: the testbench
// builds a program image (200 instructions of 18 bits, zero fill), computes
// SHA-256 of its first 1016 words and of K0 with an independent model, and
// stores their XOR in the last 8 words. The image digest is also compared
// with a constant from an independent SHA-256 tool run on the same 4064 bytes.
//
// Runs, each after a reset and a fresh, noisy PUF reading:
//   authentic image on the enrolled chip      -> pass, program fetchable
//   one instruction bit flipped (case 1)      -> fail, memory stays disabled
//   one signature bit flipped (case 3)        -> fail
//   authentic image, another chip's PUF key   -> fail (case 2): the key comes
//     from a second PUF array model with another device number
// It checks the verdict latency (1043 cycles from key_valid), that a write
// to the image during authentication is ignored, that instructions are
// delivered only after a pass, and counts each mechanism it exercised.
module tb_pufbind_top;
  import pufbind_pkg::*;
  import sha256_ref_pkg::*;

  localparam int unsigned DEPTH    = 1024;
  localparam int unsigned M        = DEPTH - 8;
  localparam int unsigned PROG_LEN = 200;
  localparam int unsigned EXP_LAT  = 1043;  // cycles after the edge sampling key_valid
  localparam logic [255:0] TOOL_DIGEST =
    256'ha5032cc0854ad4dadd8befcb3e33ee659717af77eea67df5b3f882b348b1be57;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          load_we = 1'b0;
  logic [9:0]    load_addr = '0;
  word_t         load_data = '0;
  logic          puf_start = 1'b0, puf_valid;
  logic [127:0]  puf_response;
  logic [127:0]  key = '0;
  logic          key_valid = 1'b0;
  logic          proc_en = 1'b0;
  logic [9:0]    proc_addr = '0;
  logic [17:0]   proc_instr;
  logic          auth_busy, auth_pass, led_fail;
  logic          puf_id_valid;
  digest_t       puf_id;
  auth_result_e  auth_result;

  int checks = 0, failures = 0;
  int n_pass = 0, n_fail_case1 = 0, n_fail_case2 = 0, n_fail_case3 = 0;
  int id_lat = 0;
  int n_noise_fixed = 0, n_fetch = 0, n_blocked_fetch = 0, n_blocked_write = 0;

  pufbind_top dut (.*);

  // A second chip's PUF (another device number), used only for case 2.
  logic         b_excite, b_gate, b_ce, b_valid, b_busy;
  logic [127:0] b_raw, b_resp;
  logic         b_start = 1'b0;
  bpuf_array #(.N(128), .DEVICE_ID(32'h0bad_c0de)) u_other_puf (
    .excite(b_excite), .gate(b_gate), .clk_enable(b_ce), .response(b_raw));
  bpuf_ctrl #(.N(128)) u_other_ctrl (
    .clk, .rst_n, .start(b_start), .excite(b_excite), .gate(b_gate), .clk_enable(b_ce),
    .puf_in(b_raw), .busy(b_busy), .valid(b_valid), .response(b_resp));

  // Host-side fuzzy decoder stand-in.
  logic [127:0] helper = '0, fd_key;
  logic [127:0] fd_in;
  logic         fd_corrected;
  int unsigned  fd_errors;
  fuzzy_decoder_model #(.N(128), .MAX_ERR(13)) u_fd (
    .r1(fd_in), .helper, .key(fd_key), .corrected(fd_corrected), .errors(fd_errors));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
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

  function automatic logic [17:0] instr(input int i);
    return 18'(((i * 32'h2D1 + 32'h1F) ^ (i << 7)) & 32'h3FFFF);
  endfunction

  word_t image [DEPTH];

  task automatic do_reset();
    @(negedge clk);
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
  endtask

  task automatic load_image();
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      load_we = 1'b1; load_addr = 10'(i); load_data = image[i];
    end
    @(negedge clk);
    load_we = 1'b0;
  endtask

  task automatic read_puf(output logic [127:0] r);
    @(negedge clk);
    puf_start = 1'b1;
    @(negedge clk);
    puf_start = 1'b0;
    while (!puf_valid) @(negedge clk);
    r = puf_response;
  endtask

  task automatic read_other_puf(output logic [127:0] r);
    @(negedge clk);
    b_start = 1'b1;
    @(negedge clk);
    b_start = 1'b0;
    while (!b_valid) @(negedge clk);
    r = b_resp;
  endtask

  // Present key k, wait for the verdict, return it and the latency.
  task automatic authenticate(input logic [127:0] k, input bit try_write,
                              output auth_result_e res, output int lat);
    int c = 0;
    @(negedge clk);
    key = k; key_valid = 1'b1;
    id_lat = 0;
    @(posedge clk); #1;
    c = 1;
    key_valid = 1'b0;
    while (auth_result == AUTH_PENDING && c < 3000) begin
      // try to overwrite word 0 in the middle of authentication
      if (try_write && c == 300) begin
        load_we = 1'b1; load_addr = '0; load_data = 32'h0003_ffff;
      end else begin
        load_we = 1'b0;
      end
      // the processor tries to fetch before the verdict
      proc_en = 1'b1; proc_addr = 10'(c % PROG_LEN);
      @(posedge clk); #1;
      c++;
      if (puf_id_valid && id_lat == 0) id_lat = c - 1;
      if (proc_instr != '0) begin
        check(1'b0, "instruction delivered before the verdict");
      end
    end
    load_we = 1'b0;
    proc_en = 1'b0;
    res = auth_result;
    lat = c;
  endtask

  // After a verdict: fetch the program; it must be readable only after a pass.
  task automatic fetch_program(input bit expect_ok);
    int bad = 0;
    for (int i = 0; i < PROG_LEN; i++) begin
      @(negedge clk);
      proc_en = 1'b1; proc_addr = 10'(i);
      @(posedge clk); #1;
      if (expect_ok) begin
        if (proc_instr != image[i][17:0]) bad++;
        n_fetch++;
      end else begin
        if (proc_instr != '0) bad++;
        n_blocked_fetch++;
      end
    end
    proc_en = 1'b0;
    check(bad == 0, $sformatf("program fetch after %s: %0d wrong words",
                              expect_ok ? "pass" : "fail", bad));
  endtask

  initial begin
    logic [127:0] r0, r1, k0, k1;
    logic [31:0]  msg [];
    logic [31:0]  kw [];
    digest_t      sha_prog, sha_k0, golden;
    auth_result_e res;
    int           lat;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- enrolment ----
    read_puf(r0);
    helper = r0;
    fd_in  = r0;
    #1 k0 = fd_key;

    // ---- binding (off chip) ----
    for (int i = 0; i < DEPTH; i++) image[i] = (i < PROG_LEN) ? {14'b0, instr(i)} : 32'h0;
    msg = new[M];
    for (int i = 0; i < M; i++) msg[i] = image[i];
    sha_prog = sha256_words(msg, M);
    check(sha_prog == TOOL_DIGEST, "reference digest of the image equals the command-line tool's");
    kw = new[4];
    for (int i = 0; i < 4; i++) kw[i] = k0[127-32*i -: 32];
    sha_k0 = sha256_words(kw, 4);
    golden = sha_prog ^ sha_k0;
    for (int i = 0; i < 8; i++) image[M+i] = golden[255-32*i -: 32];

    // ---- run 1: authentic image, enrolled chip ----
    for (int run = 0; run < 4; run++) begin
      word_t saved;
      do_reset();
      // images per run
      if (run == 1) begin saved = image[17]; image[17] ^= 32'h0000_0400; end
      if (run == 2) begin saved = image[M+3]; image[M+3] ^= 32'h0010_0000; end
      load_image();
      if (run == 3) read_other_puf(r1);
      else          read_puf(r1);
      fd_in = r1;
      #1;
      if (run != 3 && fd_corrected) n_noise_fixed++;
      if (run != 3) check(fd_key == k0, "fuzzy decoder recovers K0 on the enrolled chip");
      k1 = fd_key;
      check(auth_result == AUTH_PENDING && !led_fail && !auth_pass, "no verdict before the key");
      authenticate(k1, run == 0, res, lat);
      check(lat - 1 == EXP_LAT, $sformatf("run %0d: verdict %0d cycles after key_valid (expected %0d)",
                                      run, lat - 1, EXP_LAT));
      case (run)
        0: begin
          check(res == AUTH_PASS && auth_pass && !led_fail, "authentic image passes");
          check(id_lat == 16, $sformatf("identifier valid 16 cycles after key_valid (took %0d)", id_lat));
          check(puf_id_valid && puf_id == sha_k0, "chip identifier output equals SHA256_K0 (platform check)");
          check(dut.sha_prog_bin == sha_prog, "hardware SHA_Prog_Bin equals the image digest");
          if (res == AUTH_PASS) begin n_pass++; n_blocked_write++; end
          fetch_program(1'b1);
        end
        1: begin
          check(res == AUTH_FAIL && led_fail && !auth_pass, "case 1: modified instruction fails");
          if (res == AUTH_FAIL) n_fail_case1++;
          fetch_program(1'b0);
          image[17] = saved;
        end
        2: begin
          check(res == AUTH_FAIL && led_fail, "case 3: modified signature fails");
          check(dut.sha_prog_bin == sha_prog, "case 3: image digest itself unchanged");
          if (res == AUTH_FAIL) n_fail_case3++;
          fetch_program(1'b0);
          image[M+3] = saved;
        end
        3: begin
          check(res == AUTH_FAIL && led_fail, "case 2: another chip's PUF key fails");
          check(k1 != k0, "case 2: other chip yields a different key");
          check(puf_id != sha_k0, "case 2: other chip's identifier differs from SHA256_K0");
          if (res == AUTH_FAIL) n_fail_case2++;
          fetch_program(1'b0);
        end
        default: ;
      endcase
    end

    // ---- every mechanism must have happened ----
    check(n_pass > 0,          "mechanism: authentication pass");
    check(n_fail_case1 > 0,    "mechanism: case-1 fail (modified binary)");
    check(n_fail_case2 > 0,    "mechanism: case-2 fail (other chip)");
    check(n_fail_case3 > 0,    "mechanism: case-3 fail (modified signature)");
    check(n_blocked_write > 0, "mechanism: image write during authentication ignored");
    check(n_fetch > 0,         "mechanism: instruction fetch enabled");
    check(n_blocked_fetch > 0, "mechanism: instruction fetch disabled");
    $display("mechanisms: pass=%0d case1=%0d case2=%0d case3=%0d noisy_readings_corrected=%0d fetched=%0d blocked=%0d",
             n_pass, n_fail_case1, n_fail_case2, n_fail_case3, n_noise_fixed, n_fetch, n_blocked_fetch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
