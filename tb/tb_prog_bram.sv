// tb_prog_bram: checks the image memory. Port A writes and reads back with
// one cycle of latency; port B reads with one cycle of latency only while its
// enable is high and otherwise keeps its output register unchanged; both
// output registers start at zero after reset. Uses the full 1024 x 32 size.
module tb_prog_bram;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic        a_en = 1'b0, a_we = 1'b0, b_en = 1'b0;
  logic [9:0]  a_addr = '0, b_addr = '0;
  logic [31:0] a_wdata = '0, a_rdata, b_rdata;
  logic [31:0] model [1024];
  int checks = 0, failures = 0;

  prog_bram #(.DEPTH(1024), .W(32)) dut (.*);

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

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(a_rdata == 0 && b_rdata == 0, "output registers zero after reset");
    for (int i = 0; i < 1024; i++) begin
      model[i] = $urandom;
      a_en = 1'b1; a_we = 1'b1; a_addr = 10'(i); a_wdata = model[i];
      @(negedge clk);
    end
    a_we = 1'b0;
    for (int t = 0; t < 300; t++) begin
      automatic int ai = $urandom % 1024;
      automatic int bi = $urandom % 1024;
      automatic logic [31:0] b_before = b_rdata;
      automatic bit en = $urandom % 2;
      a_en = 1'b1; a_addr = 10'(ai);
      b_en = en; b_addr = 10'(bi);
      @(posedge clk); #1;
      check(a_rdata == model[ai], $sformatf("port A reads word %0d one cycle later", ai));
      if (en) check(b_rdata == model[bi], $sformatf("port B reads word %0d when enabled", bi));
      else    check(b_rdata == b_before, "port B output unchanged while disabled");
      @(negedge clk);
    end
    // port B disabled during writes: nothing leaks through it
    b_en = 1'b0;
    a_we = 1'b1; a_addr = 10'd5; a_wdata = 32'hdead_beef; model[5] = 32'hdead_beef;
    @(negedge clk);
    a_we = 1'b0;
    b_en = 1'b1; b_addr = 10'd5;
    @(negedge clk);
    check(b_rdata == 32'hdead_beef, "port B sees port A's write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
