// tb_bpuf_ctrl: checks the PUF evaluation sequencer against a noise-free
// array model. It checks the order of the control edges (excite first; gate
// raised while excite is high; clk_enable raised while both are high; excite
// dropped while both latches are transparent; gate dropped afterwards), the
// captured response, and the start-to-valid latency of
// EXCITE_CYCLES + SETTLE_CYCLES + 4 cycles.
module tb_bpuf_ctrl;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic excite, gate, ce, busy, valid;
  logic [127:0] raw, resp;
  int checks = 0, failures = 0;

  bpuf_array #(.N(128), .NOISE_PERMIL(0)) u_arr (.excite, .gate, .clk_enable(ce), .response(raw));
  bpuf_ctrl  #(.N(128)) dut (.clk, .rst_n, .start, .excite, .gate, .clk_enable(ce),
                             .puf_in(raw), .busy, .valid, .response(resp));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Sample the controls every cycle and check the order of their edges.
  logic p_excite = 1'b0, p_gate = 1'b0, p_ce = 1'b0;
  int   n_release = 0;
  always @(posedge clk) if (rst_n) begin
    if (gate && !p_gate)     check(excite, "gate rises while excite is high");
    if (ce && !p_ce)         check(excite && gate, "clk_enable rises while excite and gate are high");
    if (!excite && p_excite) begin
      check(gate && ce, "excite falls with both latches transparent");
      n_release++;
    end
    if (!gate && p_gate)     check(!excite, "gate falls after excite");
    p_excite <= excite; p_gate <= gate; p_ce <= ce;
  end

  initial begin
    logic [127:0] first;
    int lat;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!excite && !gate && !ce && !valid, "idle after reset");
    for (int t = 0; t < 3; t++) begin
      start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0;
      lat = 1;
      while (!valid) begin @(posedge clk); #1; lat++; end
      check(lat - 1 == 4 + 4 + 4, $sformatf("valid 12 cycles after the edge sampling start (took %0d)", lat - 1));
      check(resp == raw, "captured response equals the array output");
      if (t == 0) first = resp;
      else check(resp == first, "noise-free response repeats");
      @(negedge clk);
    end
    check(n_release == 3, "one release per evaluation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
