// fuzzy_decoder_model: testbench stand-in for the host-side fuzzy extractor
// decoder, which in PUFBind runs in software off the FPGA.
//
// It is not a fuzzy extractor: its "helper data" is simply the enrolled
// response R0, and it returns R0 as the key whenever the fresh response R1 is
// within MAX_ERR bit errors of it (the correction capability of the real
// decoder, 13 of 128 bits), otherwise R1 unchanged. That reproduces what the
// hardware sees (the same key on the enrolled chip despite noise, a
// different key on any other chip) without the secrecy of real helper data.
module fuzzy_decoder_model #(
  parameter int unsigned N       = 128,
  parameter int unsigned MAX_ERR = 13
) (
  input  logic [N-1:0] r1,        // fresh PUF response
  input  logic [N-1:0] helper,    // enrolled response (stand-in helper data)
  output logic [N-1:0] key,
  output logic         corrected, // key differs from r1 (errors fixed)
  output int unsigned  errors     // Hamming distance of r1 to the enrolment
);

  always_comb begin
    errors    = $countones(r1 ^ helper);
    key       = (errors <= MAX_ERR) ? helper : r1;
    corrected = (key != r1);
  end

endmodule
