// tb_bpuf_array: checks the 128-cell PUF array model. Noise-free arrays give
// the same response on every evaluation; two device numbers give responses
// about half of whose bits differ (uniqueness); with the default noise the
// same device's responses differ in a few bits only, well inside the 13-bit
// correction capability assumed for the fuzzy extractor.
module tb_bpuf_array;
  logic excite = 1'b0, gate = 1'b0, ce = 1'b0;
  logic [127:0] ra, rb, rn;
  int checks = 0, failures = 0;

  bpuf_array #(.N(128), .DEVICE_ID(32'h1234_5678), .NOISE_PERMIL(0)) ua (.excite, .gate, .clk_enable(ce), .response(ra));
  bpuf_array #(.N(128), .DEVICE_ID(32'h0bad_c0de), .NOISE_PERMIL(0)) ub (.excite, .gate, .clk_enable(ce), .response(rb));
  bpuf_array #(.N(128), .DEVICE_ID(32'h1234_5678))                   un (.excite, .gate, .clk_enable(ce), .response(rn));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic evaluate();
    excite = 1'b1; #10; gate = 1'b1; #10; ce = 1'b1; #10;
    excite = 1'b0; #10; gate = 1'b0; #10; ce = 1'b0; #10;
  endtask

  initial begin
    logic [127:0] a0, b0, n0;
    int hd;
    #1;
    evaluate();
    a0 = ra; b0 = rb; n0 = rn;
    hd = $countones(a0 ^ b0);
    check(hd > 40 && hd < 88, $sformatf("two devices differ in about half the bits (%0d)", hd));
    check($countones(a0) > 40 && $countones(a0) < 88, "response is balanced");
    check($countones(n0 ^ a0) <= 13, "noisy reading close to the noise-free one");
    for (int t = 0; t < 10; t++) begin
      evaluate();
      check(ra == a0 && rb == b0, "noise-free responses repeat");
      check($countones(rn ^ a0) <= 13,
            $sformatf("noisy reading within 13 bits of the bias (%0d)", $countones(rn ^ a0)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
