// pufbind_top: the on-FPGA part of PUFBind, which lets a soft processor fetch
// its program from block RAM only after the program image has been shown to
// be both unmodified and bound to this very chip.
//
// Binding (done once, off chip): the image's SHA-256 digest is XORed with the
// SHA-256 digest of this chip's PUF key, and the result is stored in the last
// 8 words of the image. At run time this top re-derives both digests in
// hardware and lets the processor read the memory only if their XOR equals
// the stored value. A modified image changes the first digest, another chip
// changes the second, a modified signature changes the stored value: each
// leaves the memory disabled and lights led_fail.
//
// Blocks: bpuf_ctrl + bpuf_array (128-cell Butterfly PUF, a behavioural model
// of the latch cells), auth_controller (the sequencing FSM), block_buffer
// (512-bit block assembly), sha256_core (one SHA-256 engine, shared in time
// by the key digest and the image digest), authenticator (XOR and compare)
// and prog_bram (the 1024 x 32 image memory with its EN-gated processor
// port).
//
// Parts outside this module, brought out as ports: the UART that carries the
// raw PUF response to the host (puf_response / puf_valid); the software fuzzy
// decoder on the host that turns it, with the public helper data, into the
// stable key (key / key_valid); the PicoBlaze processor (proc_*), which gets
// the 18 low bits of each word as its instruction.
//
// Sequence: load the image through load_* (accepted only before
// authentication starts), pulse puf_start, wait for puf_valid, supply key
// with key_valid, then wait for auth_pass or led_fail (1043 cycles after
// key_valid at the default sizes). 16 cycles after key_valid, puf_id holds
// SHA-256 of the key: the identifier SHA256_K1 that the platform check
// (trust establishment of the FPGA) compares with the enrolled SHA256_K0,
// computed by the same engine. The load port, its lock-out and the
// start/valid handshakes are this design's own.
module pufbind_top
  import pufbind_pkg::*;
#(
  parameter int unsigned DEPTH        = 1024,
  parameter int unsigned PUF_BITS     = 128,
  parameter int unsigned KEY_BITS     = 128,
  parameter int unsigned INSTR_W      = 18,
  parameter int unsigned DEVICE_ID    = 32'h1234_5678,
  parameter int unsigned NOISE_PERMIL = 30,
  localparam int unsigned AW          = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // image loader (before authentication only)
  input  logic                load_we,
  input  logic [AW-1:0]       load_addr,
  input  word_t               load_data,
  // PUF evaluation, response to the host (via UART in the prototype)
  input  logic                puf_start,
  output logic                puf_valid,
  output logic [PUF_BITS-1:0] puf_response,
  // error-corrected key back from the host's fuzzy decoder
  input  logic [KEY_BITS-1:0] key,
  input  logic                key_valid,
  // SHA-256 of the key, the chip identifier SHA256_K1 of the platform check
  output logic                puf_id_valid,
  output digest_t             puf_id,
  // processor instruction port
  input  logic                proc_en,
  input  logic [AW-1:0]       proc_addr,
  output logic [INSTR_W-1:0]  proc_instr,
  // status
  output logic                auth_busy,
  output logic                auth_pass,
  output logic                led_fail,
  output auth_result_e        auth_result
);

  // ---- Butterfly PUF ---------------------------------------------------
  logic                excite, gate, clk_enable;
  logic [PUF_BITS-1:0] puf_raw;
  logic                puf_busy;

  bpuf_array #(.N(PUF_BITS), .DEVICE_ID(DEVICE_ID), .NOISE_PERMIL(NOISE_PERMIL)) u_bpuf (
    .excite, .gate, .clk_enable, .response(puf_raw)
  );

  bpuf_ctrl #(.N(PUF_BITS)) u_bpuf_ctrl (
    .clk, .rst_n, .start(puf_start), .excite, .gate, .clk_enable,
    .puf_in(puf_raw), .busy(puf_busy), .valid(puf_valid), .response(puf_response)
  );

  // ---- authentication datapath ----------------------------------------
  logic          mem_rd, ctrl_idle, mem_enable;
  logic [AW-1:0] mem_addr;
  word_t         a_rdata, b_rdata;

  logic          buf_clear, buf_in_valid, buf_issue_ok, buf_out_valid, buf_out_ready, buf_fire;
  word_t         buf_in_word;
  block_t        buf_block;

  logic          core_start, core_init, core_ready, core_result_valid;
  block_t        core_block;
  digest_t       core_result, core_digest;

  digest_t       sha_prog_bin, sha_bpuf, sha_exor_ref, sha_exor_hw;
  logic          match;

  auth_controller #(.DEPTH(DEPTH), .KEY_BITS(KEY_BITS)) u_ctrl (
    .clk, .rst_n, .key, .key_valid,
    .mem_rd, .mem_addr, .mem_rdata(a_rdata),
    .buf_clear, .buf_in_valid, .buf_in_word, .buf_issue_ok,
    .buf_out_ready, .buf_block, .buf_fire,
    .core_start, .core_init, .core_block, .core_ready, .core_result_valid, .core_result,
    .sha_prog_bin, .sha_bpuf, .sha_exor_ref, .match,
    .bpuf_valid(puf_id_valid), .idle(ctrl_idle), .busy(auth_busy), .result(auth_result), .mem_enable, .led_fail
  );

  block_buffer u_buf (
    .clk, .rst_n, .clear(buf_clear), .in_valid(buf_in_valid), .in_word(buf_in_word),
    .issue_ok(buf_issue_ok), .out_valid(buf_out_valid), .out_ready(buf_out_ready),
    .out_block(buf_block), .fire(buf_fire)
  );

  sha256_core u_sha (
    .clk, .rst_n, .start(core_start), .init(core_init), .block(core_block),
    .ready(core_ready), .result_valid(core_result_valid), .result(core_result),
    .digest(core_digest)
  );

  authenticator u_auth (
    .sha_prog_bin, .sha_bpuf, .sha_exor_ref, .sha_exor_hw, .match
  );

  // ---- program memory: port A to the loader while idle, then to the FSM --
  logic          a_en, a_we;
  logic [AW-1:0] a_addr;

  always_comb begin
    if (ctrl_idle) begin
      a_en   = load_we;
      a_we   = load_we;
      a_addr = load_addr;
    end else begin
      a_en   = mem_rd;
      a_we   = 1'b0;
      a_addr = mem_addr;
    end
  end

  prog_bram #(.DEPTH(DEPTH), .W(WORD_W)) u_bram (
    .clk, .rst_n,
    .a_en, .a_we, .a_addr, .a_wdata(load_data), .a_rdata,
    .b_en(proc_en && mem_enable), .b_addr(proc_addr), .b_rdata
  );

  assign proc_instr = b_rdata[INSTR_W-1:0];
  assign auth_pass  = mem_enable;
  assign puf_id     = sha_bpuf;

endmodule
