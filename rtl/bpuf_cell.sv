// bpuf_cell: behavioural model of one Butterfly PUF cell. This is a model of
// an analog effect, not synthesizable logic: on the FPGA the cell is two
// cross-coupled vendor latch primitives (an LDCE with asynchronous clear and an
// LDPE with asynchronous preset) whose final value is set by process
// variation, which no RTL can express.
//
// Structure modelled (as in the Butterfly PUF of the prototype): the upper
// latch's D is the lower latch's Q and vice versa; excite drives the clear of
// the upper latch and the preset of the lower one; both latches share the
// gate (G) and gate-enable (GE) signals; response is the upper latch's Q.
//
// Behaviour: while excite is high the upper latch is forced to 0 and the lower
// to 1. When excite falls while both latches are transparent (gate and
// clk_enable high), the pair holds opposite values, which is unstable, and
// settles to a common value: PREFERRED, the cell's process-variation bias,
// except that with probability NOISE_PERMIL/1000 it settles the other way
// (measurement noise that the off-chip fuzzy extractor corrects). Once gate
// falls the value is held. The bias and noise parameters are this model's
// own; the paper only states that the result depends on drive-strength
// mismatch.
module bpuf_cell #(
  parameter bit          PREFERRED    = 1'b0,
  parameter int unsigned NOISE_PERMIL = 30
) (
  input  logic excite,       // clear of the upper latch, preset of the lower
  input  logic gate,         // G of both latches
  input  logic clk_enable,   // GE of both latches
  output logic response      // Q of the upper latch
);

  logic q_upper;
  logic q_lower;

  always @(excite or gate or clk_enable) begin
    if (excite) begin
      q_upper = 1'b0;
      q_lower = 1'b1;
    end else if (gate && clk_enable && (q_upper != q_lower)) begin
      // Released from the forced state with both latches transparent:
      // the pair resolves to one common value after a short settling time.
      #1;
      q_upper = PREFERRED ^ (($urandom % 1000) < NOISE_PERMIL);
      q_lower = q_upper;
    end
  end

  assign response = q_upper;

endmodule
