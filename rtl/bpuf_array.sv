// bpuf_array: behavioural model of the N-cell Butterfly PUF array (N = 128 in
// the prototype), the FPGA's fingerprint source.
//
// It instantiates N bpuf_cell models that share the excite, gate and
// clk_enable nets; cell i drives response[i]. On the FPGA the cells are placed
// symmetrically in two banks of 64 with matched routing so that no bias comes
// from the layout; here each cell's bias is a pseudo-random function of
// DEVICE_ID and the cell index, so that two DEVICE_ID values stand for two
// different chips. DEVICE_ID and the mixing function are this model's own.
// Being built from cell models, this module is behavioural, not
// synthesizable.
module bpuf_array #(
  parameter int unsigned N            = 128,
  parameter int unsigned DEVICE_ID    = 32'h1234_5678,
  parameter int unsigned NOISE_PERMIL = 30
) (
  input  logic         excite,
  input  logic         gate,
  input  logic         clk_enable,
  output logic [N-1:0] response
);

  // 32-bit integer mix (xorshift-multiply) of the device number and cell index.
  function automatic bit cell_bias(input int unsigned dev, input int unsigned idx);
    logic [31:0] x;
    x = dev ^ (idx * 32'h9e37_79b9);
    x = x ^ (x >> 16);
    x = x * 32'h85eb_ca6b;
    x = x ^ (x >> 13);
    x = x * 32'hc2b2_ae35;
    x = x ^ (x >> 16);
    return x[0];
  endfunction

  for (genvar i = 0; i < N; i++) begin : g_cell
    bpuf_cell #(
      .PREFERRED   (cell_bias(DEVICE_ID, i)),
      .NOISE_PERMIL(NOISE_PERMIL)
    ) u_cell (
      .excite    (excite),
      .gate      (gate),
      .clk_enable(clk_enable),
      .response  (response[i])
    );
  end

endmodule
