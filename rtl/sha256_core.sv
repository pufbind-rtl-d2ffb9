// sha256_core: SHA-256 compression engine (FIPS 180-4) processing one 512-bit
// block per ROUNDS_PER_CYCLE-unrolled pass, 64/ROUNDS_PER_CYCLE cycles a block.
//
// The engine keeps the chaining value H and the working variables a..h, and a
// 16-word sliding window of the message schedule. Each clock it performs
// ROUNDS_PER_CYCLE rounds: round t uses window word 0, and the window shifts
// by one word while the new word W[t+16] = s1(W[t+14]) + W[t+9] + s0(W[t+1])
// + W[t] is appended at its end.
//
// Interface: the caller offers a block with start; it is taken when ready is
// high. init selects the SHA-256 initial value as chaining input (first block
// of a message) instead of the running H. ready is also high in the last
// compression cycle of a busy engine, so back-to-back blocks start with no
// idle cycle; the chaining value then comes straight from the final addition.
// In that same last cycle result_valid is high and result holds the updated
// hash value (combinational), which the caller must take then if it starts a
// new message; digest holds it from the next cycle until the next start.
//
// Timing: with the default ROUNDS_PER_CYCLE = 4 a block takes 16 cycles, the
// same 16 cycles the surrounding controller needs to read the next 16 words,
// so reading and hashing overlap. The paper gives only this rate (16 cycles
// per 512 bits, reading and hashing concurrent) and the engine's function;
// the 4-round unrolling that achieves it is this design's choice.
module sha256_core
  import pufbind_pkg::*;
#(
  parameter int unsigned ROUNDS_PER_CYCLE = 4   // must divide 64
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  logic    init,
  input  block_t  block,        // word 0 (first word of the block) in [511:480]
  output logic    ready,
  output logic    result_valid,
  output digest_t result,
  output digest_t digest
);

  localparam int unsigned CYCLES = 64 / ROUNDS_PER_CYCLE;
  localparam int unsigned CNT_W  = (CYCLES > 1) ? $clog2(CYCLES) : 1;

  word_t             h_q  [8];   // chaining value H0..H7
  word_t             s_q  [8];   // working variables a..h
  word_t             w_q  [16];  // message schedule window
  logic              busy_q;
  logic [CNT_W-1:0]  cnt_q;

  word_t s_n [8];
  word_t w_n [16];
  word_t h_fin [8];
  logic  last;

  // ROUNDS_PER_CYCLE rounds of compression.
  always_comb begin
    word_t t1, t2, wnew;
    for (int i = 0; i < 8; i++)  s_n[i] = s_q[i];
    for (int i = 0; i < 16; i++) w_n[i] = w_q[i];
    for (int r = 0; r < ROUNDS_PER_CYCLE; r++) begin
      t1 = s_n[7] + big_sigma1(s_n[4]) + ch(s_n[4], s_n[5], s_n[6])
         + sha256_k(int'(cnt_q) * ROUNDS_PER_CYCLE + r) + w_n[0];
      t2 = big_sigma0(s_n[0]) + maj(s_n[0], s_n[1], s_n[2]);
      s_n[7] = s_n[6];
      s_n[6] = s_n[5];
      s_n[5] = s_n[4];
      s_n[4] = s_n[3] + t1;
      s_n[3] = s_n[2];
      s_n[2] = s_n[1];
      s_n[1] = s_n[0];
      s_n[0] = t1 + t2;
      wnew = small_sigma1(w_n[14]) + w_n[9] + small_sigma0(w_n[1]) + w_n[0];
      for (int i = 0; i < 15; i++) w_n[i] = w_n[i+1];
      w_n[15] = wnew;
    end
    for (int i = 0; i < 8; i++) h_fin[i] = h_q[i] + s_n[i];
  end

  assign last         = busy_q && (cnt_q == CNT_W'(CYCLES - 1));
  assign ready        = !busy_q || last;
  assign result_valid = last;

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      result[DIGEST_W-1-32*i -: 32] = h_fin[i];
      digest[DIGEST_W-1-32*i -: 32] = h_q[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      cnt_q  <= '0;
      for (int i = 0; i < 8; i++) begin
        h_q[i] <= SHA256_IV[DIGEST_W-1-32*i -: 32];
        s_q[i] <= '0;
      end
      for (int i = 0; i < 16; i++) w_q[i] <= '0;
    end else if (start && ready) begin
      // Chaining input: IV for a new message, else H (already final if the
      // previous block ends in this cycle).
      for (int i = 0; i < 8; i++) begin
        word_t base;
        if (init)      base = SHA256_IV[DIGEST_W-1-32*i -: 32];
        else if (last) base = h_fin[i];
        else           base = h_q[i];
        h_q[i] <= base;
        s_q[i] <= base;
      end
      for (int i = 0; i < 16; i++) w_q[i] <= block[BLOCK_W-1-32*i -: 32];
      busy_q <= 1'b1;
      cnt_q  <= '0;
    end else if (busy_q) begin
      for (int i = 0; i < 8; i++)  s_q[i] <= s_n[i];
      for (int i = 0; i < 16; i++) w_q[i] <= w_n[i];
      cnt_q <= cnt_q + 1'b1;
      if (last) begin
        for (int i = 0; i < 8; i++) h_q[i] <= h_fin[i];
        busy_q <= 1'b0;
      end
    end
  end

  // The unrolling must tile the 64 rounds exactly.
  initial begin
    assert (64 % ROUNDS_PER_CYCLE == 0)
      else $error("ROUNDS_PER_CYCLE must divide 64");
  end

endmodule
