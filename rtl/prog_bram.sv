// prog_bram: the program-image memory, DEPTH words of W bits (the prototype's
// 4 kB block RAM configured as 1024 x 32), with two synchronous ports.
//
// Image layout (set by the off-chip binding step): each 18-bit instruction
// right-aligned in its word with the upper bits zero, zero words after the
// program, and the 256-bit reference signature in the last 8 words, most
// significant word first.
//
// Port A (read/write) serves first the image loader and then the
// authentication controller, which reads the whole image through it. Port B
// (read only) is the processor's instruction port; its enable is the EN pin
// that the authentication verdict drives, so while it is low the port's
// output register does not change and the processor reads nothing from the
// memory. Both ports have one cycle of read latency and output registers
// that reset to zero. That two-port arrangement follows a Xilinx block RAM
// used in true dual-port mode and is this design's choice; the paper shows
// only a BRAM with two read paths and an EN input.
module prog_bram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // port A: loader / authentication controller
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [W-1:0]  a_wdata,
  output logic [W-1:0]  a_rdata,
  // port B: processor instruction fetch, gated by b_en
  input  logic          b_en,
  input  logic [AW-1:0] b_addr,
  output logic [W-1:0]  b_rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en && a_we) mem[a_addr] <= a_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_rdata <= '0;
      b_rdata <= '0;
    end else begin
      if (a_en && !a_we) a_rdata <= mem[a_addr];
      if (b_en)          b_rdata <= mem[b_addr];
    end
  end

endmodule
