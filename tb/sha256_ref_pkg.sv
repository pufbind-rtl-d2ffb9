// sha256_ref_pkg: a plain, one-round-at-a-time SHA-256 model (FIPS 180-4) used
// by the testbenches as the reference against which the hardware digests are
// checked. It computes the full 64-word schedule up front, as the standard
// describes, rather than the sliding window the hardware uses. Its own
// correctness is checked in tb_sha256_core against published test vectors.
package sha256_ref_pkg;

  localparam logic [31:0] K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2
  };

  localparam logic [255:0] IV = 256'h6a09e667bb67ae853c6ef372a54ff53a510e527f9b05688c1f83d9ab5be0cd19;

  function automatic logic [31:0] ror(input logic [31:0] x, input int n);
    return 32'({x, x} >> n);
  endfunction

  // One compression: returns H' for chaining value h and block m (word 0 in [511:480]).
  function automatic logic [255:0] compress(input logic [255:0] h, input logic [511:0] m);
    logic [31:0] w [64];
    logic [31:0] a, b, c, d, e, f, g, hh, s0, s1, t1, t2;
    for (int t = 0; t < 16; t++) w[t] = m[511-32*t -: 32];
    for (int t = 16; t < 64; t++) begin
      s0 = ror(w[t-15], 7) ^ ror(w[t-15], 18) ^ (w[t-15] >> 3);
      s1 = ror(w[t-2], 17) ^ ror(w[t-2], 19) ^ (w[t-2] >> 10);
      w[t] = w[t-16] + s0 + w[t-7] + s1;
    end
    {a, b, c, d, e, f, g, hh} = h;
    for (int t = 0; t < 64; t++) begin
      t1 = hh + (ror(e, 6) ^ ror(e, 11) ^ ror(e, 25)) + ((e & f) ^ (~e & g)) + K[t] + w[t];
      t2 = (ror(a, 2) ^ ror(a, 13) ^ ror(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
      hh = g; g = f; f = e; e = d + t1; d = c; c = b; b = a; a = t1 + t2;
    end
    return {h[255:224] + a, h[223:192] + b, h[191:160] + c, h[159:128] + d,
            h[127:96]  + e, h[95:64]   + f, h[63:32]    + g, h[31:0]     + hh};
  endfunction

  // Block b (0-based) of the padded message made of n_words 32-bit words,
  // whose word i is given by words[i]; words past n_words are padding.
  function automatic logic [511:0] padded_block(input logic [31:0] words [],
                                                input int n_words, input int b);
    logic [511:0] blk;
    int nblk = (n_words * 32 + 65 + 511) / 512;
    longint unsigned bits = longint'(n_words) * 32;
    for (int i = 0; i < 16; i++) begin
      int j = b * 16 + i;
      logic [31:0] v;
      if (j < n_words)               v = words[j];
      else if (j == n_words)         v = 32'h8000_0000;
      else if (j == nblk * 16 - 2)   v = bits[63:32];
      else if (j == nblk * 16 - 1)   v = bits[31:0];
      else                           v = 32'h0;
      blk[511-32*i -: 32] = v;
    end
    return blk;
  endfunction

  // SHA-256 of a message of n_words big-endian 32-bit words.
  function automatic logic [255:0] sha256_words(input logic [31:0] words [], input int n_words);
    logic [255:0] h = IV;
    int nblk = (n_words * 32 + 65 + 511) / 512;
    for (int b = 0; b < nblk; b++) h = compress(h, padded_block(words, n_words, b));
    return h;
  endfunction

endpackage
