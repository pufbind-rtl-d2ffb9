// tb_authenticator: checks the XOR-and-compare stage. For random digests it
// sets the reference to their XOR (must match), flips one random bit of the
// reference, of the image digest or of the key digest (must not match), and
// checks sha_exor_hw bit for bit.
module tb_authenticator;
  import pufbind_pkg::*;

  digest_t prog, puf, ref_sig, hw;
  logic    match;
  int      checks = 0, failures = 0;

  authenticator dut (.sha_prog_bin(prog), .sha_bpuf(puf), .sha_exor_ref(ref_sig),
                     .sha_exor_hw(hw), .match);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic digest_t rnd();
    digest_t d;
    for (int i = 0; i < 8; i++) d[32*i +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      digest_t expect_hw;
      automatic int bitpos = $urandom % 256;
      prog = rnd(); puf = rnd();
      for (int i = 0; i < 256; i++) expect_hw[i] = prog[i] != puf[i];
      ref_sig = expect_hw;
      #1;
      check(hw == expect_hw, "SHA_EXOR_Hardware is the bitwise XOR");
      check(match, "match when the reference equals the XOR");
      ref_sig[bitpos] = ~ref_sig[bitpos];
      #1;
      check(!match, $sformatf("no match with reference bit %0d flipped", bitpos));
      ref_sig = expect_hw;
      prog[bitpos] = ~prog[bitpos];
      #1;
      check(!match, "no match with an image digest bit flipped");
      prog[bitpos] = ~prog[bitpos];
      puf[255 - bitpos] = ~puf[255 - bitpos];
      #1;
      check(!match, "no match with a key digest bit flipped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
