// tb_bpuf_cell: checks the Butterfly PUF cell model. excite forces the
// response to 0; releasing excite with gate and clk_enable high makes the
// cell settle to its bias (noise-free cells of both biases); releasing it
// with the latches closed leaves the forced value; a cell with 50 % noise
// settles both ways over many evaluations.
module tb_bpuf_cell;
  logic excite = 1'b0, gate = 1'b0, ce = 1'b0;
  logic r0, r1, rn;
  int checks = 0, failures = 0;

  bpuf_cell #(.PREFERRED(1'b0), .NOISE_PERMIL(0))   u0 (.excite, .gate, .clk_enable(ce), .response(r0));
  bpuf_cell #(.PREFERRED(1'b1), .NOISE_PERMIL(0))   u1 (.excite, .gate, .clk_enable(ce), .response(r1));
  bpuf_cell #(.PREFERRED(1'b1), .NOISE_PERMIL(500)) un (.excite, .gate, .clk_enable(ce), .response(rn));

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

  // One evaluation in the controller's order; open = latches transparent at release.
  task automatic evaluate(input bit open);
    excite = 1'b1; #10;
    check(r0 == 1'b0 && r1 == 1'b0 && rn == 1'b0, "excite forces the response to 0");
    gate = open; #10;
    ce = open; #10;
    excite = 1'b0; #10;
    gate = 1'b0; #10;
    ce = 1'b0; #10;
  endtask

  initial begin
    int ones = 0;
    #1;  // let the cell models reach their event controls
    for (int t = 0; t < 5; t++) begin
      evaluate(1'b1);
      check(r0 == 1'b0, "bias-0 cell settles to 0");
      check(r1 == 1'b1, "bias-1 cell settles to 1");
      // held after the gate closes
      #50;
      check(r1 == 1'b1, "settled value held with the gate closed");
    end
    evaluate(1'b0);
    check(r1 == 1'b0, "no settling when the latches are closed at release");
    for (int t = 0; t < 200; t++) begin
      evaluate(1'b1);
      ones += rn;
    end
    check(ones > 40 && ones < 160, $sformatf("noisy cell settles both ways (%0d of 200 ones)", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
