// pufbind_pkg: constants, types and SHA-256 helper functions shared by the
// PUFBind authentication datapath.
//
// The SHA-256 round constants, initial hash value and the sigma functions are
// those of FIPS 180-4; the engine that uses them is sha256_core. The sizes
// below are the prototype's: a 4 kB program memory of 1024 32-bit words, of
// which the last 8 words hold the 256-bit reference signature, 18-bit
// instructions and a 128-bit Butterfly PUF. Sizes that the prototype does not
// fix (the key width, the evaluation timing of the PUF) are this design's own
// choice and are marked as such where they are used.
package pufbind_pkg;

  localparam int unsigned WORD_W      = 32;   // BRAM word width
  localparam int unsigned DIGEST_W    = 256;  // SHA-256 digest width
  localparam int unsigned BLOCK_W     = 512;  // SHA-256 message block width
  localparam int unsigned BLOCK_WORDS = BLOCK_W / WORD_W;   // 16
  localparam int unsigned REF_WORDS   = DIGEST_W / WORD_W;  // 8

  typedef logic [WORD_W-1:0]   word_t;
  typedef logic [DIGEST_W-1:0] digest_t;
  typedef logic [BLOCK_W-1:0]  block_t;

  // Verdict of the authentication run.
  typedef enum logic [1:0] {
    AUTH_PENDING = 2'd0,
    AUTH_PASS    = 2'd1,
    AUTH_FAIL    = 2'd2
  } auth_result_e;

  // SHA-256 initial hash value H(0), H0 in the most significant word.
  localparam digest_t SHA256_IV = {
    32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
    32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19
  };

  // SHA-256 round constant K[t].
  function automatic word_t sha256_k(input int unsigned t);
    case (t)
      0: return 32'h428a2f98;  1: return 32'h71374491;  2: return 32'hb5c0fbcf;  3: return 32'he9b5dba5;
      4: return 32'h3956c25b;  5: return 32'h59f111f1;  6: return 32'h923f82a4;  7: return 32'hab1c5ed5;
      8: return 32'hd807aa98;  9: return 32'h12835b01; 10: return 32'h243185be; 11: return 32'h550c7dc3;
     12: return 32'h72be5d74; 13: return 32'h80deb1fe; 14: return 32'h9bdc06a7; 15: return 32'hc19bf174;
     16: return 32'he49b69c1; 17: return 32'hefbe4786; 18: return 32'h0fc19dc6; 19: return 32'h240ca1cc;
     20: return 32'h2de92c6f; 21: return 32'h4a7484aa; 22: return 32'h5cb0a9dc; 23: return 32'h76f988da;
     24: return 32'h983e5152; 25: return 32'ha831c66d; 26: return 32'hb00327c8; 27: return 32'hbf597fc7;
     28: return 32'hc6e00bf3; 29: return 32'hd5a79147; 30: return 32'h06ca6351; 31: return 32'h14292967;
     32: return 32'h27b70a85; 33: return 32'h2e1b2138; 34: return 32'h4d2c6dfc; 35: return 32'h53380d13;
     36: return 32'h650a7354; 37: return 32'h766a0abb; 38: return 32'h81c2c92e; 39: return 32'h92722c85;
     40: return 32'ha2bfe8a1; 41: return 32'ha81a664b; 42: return 32'hc24b8b70; 43: return 32'hc76c51a3;
     44: return 32'hd192e819; 45: return 32'hd6990624; 46: return 32'hf40e3585; 47: return 32'h106aa070;
     48: return 32'h19a4c116; 49: return 32'h1e376c08; 50: return 32'h2748774c; 51: return 32'h34b0bcb5;
     52: return 32'h391c0cb3; 53: return 32'h4ed8aa4a; 54: return 32'h5b9cca4f; 55: return 32'h682e6ff3;
     56: return 32'h748f82ee; 57: return 32'h78a5636f; 58: return 32'h84c87814; 59: return 32'h8cc70208;
     60: return 32'h90befffa; 61: return 32'ha4506ceb; 62: return 32'hbef9a3f7; 63: return 32'hc67178f2;
      default: return 32'h0;
    endcase
  endfunction

  function automatic word_t rotr(input word_t x, input int unsigned n);
    return (x >> n) | (x << (WORD_W - n));
  endfunction

  function automatic word_t big_sigma0(input word_t x);
    return rotr(x, 2) ^ rotr(x, 13) ^ rotr(x, 22);
  endfunction

  function automatic word_t big_sigma1(input word_t x);
    return rotr(x, 6) ^ rotr(x, 11) ^ rotr(x, 25);
  endfunction

  function automatic word_t small_sigma0(input word_t x);
    return rotr(x, 7) ^ rotr(x, 18) ^ (x >> 3);
  endfunction

  function automatic word_t small_sigma1(input word_t x);
    return rotr(x, 17) ^ rotr(x, 19) ^ (x >> 10);
  endfunction

  function automatic word_t ch(input word_t x, input word_t y, input word_t z);
    return (x & y) ^ (~x & z);
  endfunction

  function automatic word_t maj(input word_t x, input word_t y, input word_t z);
    return (x & y) ^ (x & z) ^ (y & z);
  endfunction

  // Number of 512-bit blocks in the padded SHA-256 message of msg_words words.
  function automatic int unsigned sha256_num_blocks(input int unsigned msg_words);
    return (msg_words * WORD_W + 65 + BLOCK_W - 1) / BLOCK_W;
  endfunction

endpackage
