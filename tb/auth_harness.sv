// auth_harness: the authentication datapath without the PUF, for the
// controller's testbench: auth_controller with block_buffer, sha256_core (of
// ROUNDS_PER_CYCLE rounds a cycle) and authenticator, reading a DEPTH-word
// memory array of one cycle latency that the testbench fills directly.
module auth_harness
  import pufbind_pkg::*;
#(
  parameter int unsigned DEPTH            = 64,
  parameter int unsigned ROUNDS_PER_CYCLE = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [127:0] key,
  input  logic         key_valid,
  output auth_result_e result,
  output logic         mem_enable,
  output logic         led_fail,
  output digest_t      sha_prog_bin,
  output digest_t      sha_bpuf,
  output int           stall_cycles
);
  localparam int unsigned AW = $clog2(DEPTH);

  word_t mem [DEPTH];
  word_t rdata = '0;
  logic          mem_rd;
  logic [AW-1:0] mem_addr;
  always_ff @(posedge clk) if (mem_rd) rdata <= mem[mem_addr];

  logic buf_clear, buf_in_valid, buf_issue_ok, buf_out_valid, buf_out_ready, buf_fire;
  word_t buf_in_word;
  block_t buf_block, core_block;
  logic core_start, core_init, core_ready, core_result_valid;
  digest_t core_result, core_digest, sha_exor_ref, sha_exor_hw;
  logic match, idle, busy;

  auth_controller #(.DEPTH(DEPTH), .KEY_BITS(128)) u_ctrl (
    .clk, .rst_n, .key, .key_valid, .mem_rd, .mem_addr, .mem_rdata(rdata),
    .buf_clear, .buf_in_valid, .buf_in_word, .buf_issue_ok, .buf_out_ready, .buf_block, .buf_fire,
    .core_start, .core_init, .core_block, .core_ready, .core_result_valid, .core_result,
    .sha_prog_bin, .sha_bpuf, .sha_exor_ref, .match,
    .bpuf_valid(), .idle, .busy, .result, .mem_enable, .led_fail);
  block_buffer u_buf (.clk, .rst_n, .clear(buf_clear), .in_valid(buf_in_valid), .in_word(buf_in_word),
    .issue_ok(buf_issue_ok), .out_valid(buf_out_valid), .out_ready(buf_out_ready),
    .out_block(buf_block), .fire(buf_fire));
  sha256_core #(.ROUNDS_PER_CYCLE(ROUNDS_PER_CYCLE)) u_sha (.clk, .rst_n, .start(core_start),
    .init(core_init), .block(core_block), .ready(core_ready), .result_valid(core_result_valid),
    .result(core_result), .digest(core_digest));
  authenticator u_auth (.sha_prog_bin, .sha_bpuf, .sha_exor_ref, .sha_exor_hw, .match);

  // cycles in which a full block waits for a busy engine
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) stall_cycles <= 0;
    else if (buf_out_valid && !buf_out_ready && busy) stall_cycles <= stall_cycles + 1;
endmodule
