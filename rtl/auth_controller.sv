// auth_controller: the control FSM of PUFBind's program authentication. It
// sequences the SHA-256 engine over the PUF-derived key and then over the
// program image in the block RAM, collects the reference signature, and
// registers the pass/fail verdict.
//
// Flow:
//   IDLE    waits for key_valid (the error-corrected PUF key, KEY_BITS wide).
//           It then starts the engine on the key as a one-block message:
//           key, a single 1 bit, zeros, and the 64-bit length KEY_BITS, which
//           is standard SHA-256 padding of the key.
//   STREAM  reads the image words 0 .. DEPTH-1 through the memory's port A,
//           one per cycle while the block buffer allows it. Words
//           0 .. M-1 (M = DEPTH - 8) are the message; the stream of words sent
//           to the buffer continues past M with SHA-256 padding (a 1 bit,
//           zeros, the 64-bit length 32*M) up to a whole number of blocks.
//           Words M .. M+7 are the reference signature; they arrive while the
//           padding words are inserted and are stored aside. Every full
//           block is started on the engine as soon as it is ready.
//           The first engine result is the key digest (SHA_BPUF); the result
//           of the last image block is the image digest (SHA_Prog_Bin).
//           bpuf_valid rises once SHA_BPUF is held, so that the key digest
//           can also serve as the chip's identifier (platform check).
//   COMPARE registers the authenticator's match for both digests and the
//           reference (one cycle).
//   PASS / FAIL final until reset. PASS raises mem_enable, the EN of the
//           processor's memory port; FAIL leaves it low and lights the error
//           output.
//
// Timing: with the default 16-cycle engine and DEPTH = 1024 (64 message
// blocks) the verdict (result, mem_enable, led_fail) changes 1043 cycles
// after the clock edge at which IDLE samples key_valid: 16 cycles per block
// for 64 blocks (1024), the last block's own 16-cycle compression, one cycle
// of memory latency, one cycle for the buffer to hand a full block over, and
// the compare cycle. The key block is hashed while the first image block is
// being read and costs no time. The paper counts 1025 cycles (1024 + the
// compare), leaving out the last compression and the two pipeline cycles.
//
// The paper generates this FSM per program-binary size with a C program;
// here the same sequence is one parameterised FSM, since the hashed length
// depends only on the memory depth (the binary is zero-padded to fill it).
// The key padding and the word order of the reference are this design's
// reading of the paper.
module auth_controller
  import pufbind_pkg::*;
#(
  parameter int unsigned DEPTH    = 1024,
  parameter int unsigned KEY_BITS = 128,
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // error-corrected PUF key from the fuzzy decoder
  input  logic [KEY_BITS-1:0] key,
  input  logic                key_valid,
  // block RAM port A (read only here)
  output logic                mem_rd,
  output logic [AW-1:0]       mem_addr,
  input  word_t               mem_rdata,
  // block buffer
  output logic                buf_clear,
  output logic                buf_in_valid,
  output word_t               buf_in_word,
  input  logic                buf_issue_ok,
  output logic                buf_out_ready,
  input  block_t              buf_block,
  input  logic                buf_fire,
  // SHA-256 engine
  output logic                core_start,
  output logic                core_init,
  output block_t              core_block,
  input  logic                core_ready,
  input  logic                core_result_valid,
  input  digest_t             core_result,
  // authenticator
  output digest_t             sha_prog_bin,
  output digest_t             sha_bpuf,
  output digest_t             sha_exor_ref,
  input  logic                match,
  // status
  output logic                bpuf_valid,   // sha_bpuf holds the key digest
  output logic                idle,
  output logic                busy,
  output auth_result_e        result,
  output logic                mem_enable,
  output logic                led_fail
);

  localparam int unsigned M        = DEPTH - REF_WORDS;           // hashed words
  localparam int unsigned NBLK     = sha256_num_blocks(M);        // message blocks
  localparam int unsigned TOTAL    = NBLK * BLOCK_WORDS;          // padded stream length
  localparam int unsigned ISSUE_N  = (TOTAL > DEPTH) ? TOTAL : DEPTH;
  localparam int unsigned JW       = $clog2(ISSUE_N + 1);
  localparam int unsigned RW       = $clog2(NBLK + 2);
  localparam logic [63:0] MSG_BITS = 64'(M) * 64'(WORD_W);

  typedef enum logic [2:0] { S_IDLE, S_STREAM, S_COMPARE, S_PASS, S_FAIL } state_e;

  state_e         state_q;
  logic [JW-1:0]  j_q;          // next stream index to issue
  logic           rd_valid_q;   // a stream word is in flight from the memory
  logic [JW-1:0]  rd_j_q;       // its index
  logic [RW-1:0]  res_cnt_q;    // engine results seen (key first)
  logic [RW-1:0]  launched_q;   // image blocks started
  logic [3:0]     ref_cnt_q;
  logic           prog_done_q;
  word_t          ref_q [REF_WORDS];
  digest_t        bpuf_q, prog_q;

  logic issue;
  logic prog_last;   // the image digest is on core_result in this cycle
  word_t pad_word;

  // ---- key block: key || 1 || 0...0 || 64-bit length -------------------
  block_t key_block;
  always_comb begin
    key_block = '0;
    key_block[BLOCK_W-1 -: KEY_BITS]   = key;
    key_block[BLOCK_W-1-KEY_BITS]      = 1'b1;
    key_block[63:0]                    = 64'(KEY_BITS);
  end

  assign prog_last = core_result_valid && (res_cnt_q == RW'(NBLK));

  // ---- stream issue ----------------------------------------------------
  assign issue    = (state_q == S_STREAM) && (j_q < JW'(ISSUE_N)) && buf_issue_ok;
  assign mem_rd   = issue && (j_q < JW'(DEPTH));
  assign mem_addr = AW'(j_q);

  // Padding word at stream index rd_j_q (index >= M).
  always_comb begin
    if (rd_j_q == JW'(M))              pad_word = 32'h8000_0000;
    else if (rd_j_q == JW'(TOTAL - 2)) pad_word = MSG_BITS[63:32];
    else if (rd_j_q == JW'(TOTAL - 1)) pad_word = MSG_BITS[31:0];
    else                               pad_word = '0;
  end

  assign buf_in_valid = rd_valid_q && (rd_j_q < JW'(TOTAL));
  assign buf_in_word  = (rd_j_q < JW'(M)) ? mem_rdata : pad_word;
  assign buf_clear    = (state_q == S_IDLE);

  // ---- engine arbitration: key block first, then image blocks -----------
  logic key_start;
  assign key_start     = (state_q == S_IDLE) && key_valid;
  assign buf_out_ready = (state_q == S_STREAM) && core_ready;
  assign core_start    = key_start || buf_fire;
  assign core_init     = key_start || (launched_q == '0);
  assign core_block    = key_start ? key_block : buf_block;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      j_q         <= '0;
      rd_valid_q  <= 1'b0;
      rd_j_q      <= '0;
      res_cnt_q   <= '0;
      launched_q  <= '0;
      ref_cnt_q   <= '0;
      prog_done_q <= 1'b0;
      bpuf_q      <= '0;
      prog_q      <= '0;
      for (int i = 0; i < REF_WORDS; i++) ref_q[i] <= '0;
    end else begin
      rd_valid_q <= issue;
      rd_j_q     <= j_q;
      if (issue) j_q <= j_q + 1'b1;

      // reference words come back at stream indices M .. M+7
      if (rd_valid_q && rd_j_q >= JW'(M) && rd_j_q < JW'(DEPTH)) begin
        ref_q[$clog2(REF_WORDS)'(rd_j_q - JW'(M))] <= mem_rdata;
        ref_cnt_q <= ref_cnt_q + 1'b1;
      end

      if (buf_fire) launched_q <= launched_q + 1'b1;

      if (core_result_valid) begin
        res_cnt_q <= res_cnt_q + 1'b1;
        if (res_cnt_q == '0) bpuf_q <= core_result;
        if (res_cnt_q == RW'(NBLK)) begin
          prog_q      <= core_result;
          prog_done_q <= 1'b1;
        end
      end

      unique case (state_q)
        S_IDLE:    if (key_valid) state_q <= S_STREAM;
        S_STREAM:  if ((prog_done_q || prog_last) && ref_cnt_q == 4'(REF_WORDS)) state_q <= S_COMPARE;
        S_COMPARE: state_q <= match ? S_PASS : S_FAIL;
        S_PASS:    state_q <= S_PASS;
        S_FAIL:    state_q <= S_FAIL;
        default:   state_q <= S_FAIL;
      endcase
    end
  end

  always_comb begin
    for (int i = 0; i < REF_WORDS; i++) sha_exor_ref[DIGEST_W-1-32*i -: 32] = ref_q[i];
  end
  assign sha_prog_bin = prog_q;
  assign sha_bpuf     = bpuf_q;

  assign bpuf_valid = (res_cnt_q != '0);
  assign idle       = (state_q == S_IDLE);
  assign busy       = (state_q == S_STREAM) || (state_q == S_COMPARE);
  assign mem_enable = (state_q == S_PASS);
  assign led_fail   = (state_q == S_FAIL);
  always_comb begin
    unique case (state_q)
      S_PASS:  result = AUTH_PASS;
      S_FAIL:  result = AUTH_FAIL;
      default: result = AUTH_PENDING;
    endcase
  end

  // The key block must be taken at once (the engine is idle in IDLE), and a
  // launch from the buffer must never meet a busy engine.
  assert property (@(posedge clk) disable iff (!rst_n) key_start |-> core_ready)
    else $error("auth_controller: key block offered to a busy engine");
  assert property (@(posedge clk) disable iff (!rst_n) buf_fire |-> core_ready)
    else $error("auth_controller: block launched into a busy engine");

  initial begin
    assert (KEY_BITS <= BLOCK_W - 65) else $error("KEY_BITS must fit one padded block");
  end

endmodule
