// authenticator: the final check of PUFBind, purely combinational.
//
// It XORs the digest of the program image (SHA_Prog_Bin) with the digest of
// the PUF-derived key (SHA_BPUF) to form SHA_EXOR_Hardware, and compares that
// with the reference signature read from the end of the image
// (SHA_EXOR_Reference). match is high only if all 256 bits agree. The
// structure (one XOR, one equality test, no registers) is the paper's; the
// controller registers the verdict in the cycle after both inputs are ready.
module authenticator
  import pufbind_pkg::*;
(
  input  digest_t sha_prog_bin,
  input  digest_t sha_bpuf,
  input  digest_t sha_exor_ref,
  output digest_t sha_exor_hw,
  output logic    match
);

  assign sha_exor_hw = sha_prog_bin ^ sha_bpuf;
  assign match       = (sha_exor_hw == sha_exor_ref);

endmodule
