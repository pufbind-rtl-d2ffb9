// block_buffer: the 512-bit message buffer that gathers 16 consecutive 32-bit
// words from the program memory into one SHA-256 block.
//
// Words arrive with in_valid, first word of a block into the most significant
// position. When 16 are held, out_valid rises and the block is handed to the
// engine in the first cycle in which out_ready is high (fire). A word that
// arrives in the cycle the block is handed over becomes word 0 of the next
// block, so with an engine that accepts a block every 16 cycles the buffer
// never stalls the memory reads: reading and hashing run concurrently, as
// the paper requires. If the engine is not ready, one word that was already
// in flight from the memory is kept in a one-word skid register and issue_ok
// goes low so that the reader stops issuing reads until the block leaves.
// The skid register and the issue_ok handshake are this design's own; the
// paper gives only the buffer's size and purpose.
//
// Rule for the reader: issue a memory read only in a cycle in which issue_ok
// is high; with one cycle of memory latency, in_valid then never finds the
// buffer and the skid register both full.
module block_buffer
  import pufbind_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,       // drop any partial block (start of a new message)
  input  logic   in_valid,
  input  word_t  in_word,
  output logic   issue_ok,
  output logic   out_valid,
  input  logic   out_ready,
  output block_t out_block,
  output logic   fire
);

  word_t       buf_q [BLOCK_WORDS];
  logic [4:0]  cnt_q;             // 0..16 words held
  word_t       skid_q;
  logic        skid_valid_q;

  assign out_valid = (cnt_q == 5'd16);
  assign fire      = out_valid && out_ready;
  assign issue_ok  = !out_valid || out_ready;

  always_comb begin
    for (int i = 0; i < BLOCK_WORDS; i++) out_block[BLOCK_W-1-32*i -: 32] = buf_q[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q        <= '0;
      skid_valid_q <= 1'b0;
      skid_q       <= '0;
      for (int i = 0; i < BLOCK_WORDS; i++) buf_q[i] <= '0;
    end else if (clear) begin
      cnt_q        <= '0;
      skid_valid_q <= 1'b0;
    end else if (fire) begin
      // the block leaves; a waiting or arriving word starts the next one
      if (skid_valid_q) begin
        buf_q[0]     <= skid_q;
        skid_valid_q <= 1'b0;
        cnt_q        <= 5'd1;
      end else if (in_valid) begin
        buf_q[0] <= in_word;
        cnt_q    <= 5'd1;
      end else begin
        cnt_q <= '0;
      end
    end else if (in_valid) begin
      if (out_valid) begin
        skid_q       <= in_word;
        skid_valid_q <= 1'b1;
      end else begin
        buf_q[cnt_q[3:0]] <= in_word;
        cnt_q             <= cnt_q + 1'b1;
      end
    end
  end

  // A word may not arrive when the block and the skid register are both full.
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   !(in_valid && out_valid && skid_valid_q))
    else $error("block_buffer overflow: word arrived with block and skid full");
  // With a skid word waiting, no further word may arrive in the fire cycle.
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   !(fire && skid_valid_q && in_valid))
    else $error("block_buffer: word lost in the cycle a block left");

endmodule
