// Shared constants and helpers for the simplified Lyra2 core used in the
// Lyra2REv2 chain.  The sponge is 1024 bits wide (16 x 64-bit words), of
// which the low b = 768 bits are the bitrate and the high c = 256 bits the
// capacity; the memory matrix is R x C = 4 x 4 cells of b bits.  These are
// the parameter values the Lyra2REv2 instance of Lyra2 fixes.  Word i of any
// vector sits at bits [64*i+63 : 64*i] (little-endian word order).
package lyra2_pkg;
  // BLAKE2b initialisation vector, loaded into the capacity half (words 8..15)
  localparam logic [511:0] BLAKE2B_IV = {
    64'h5be0cd19137e2179, 64'h1f83d9abfb41bd6b, 64'h9b05688c2b3e6c1f, 64'h510e527fade682d1,
    64'ha54ff53a5f1d36f1, 64'h3c6ef372fe94f82b, 64'hbb67ae8584caa73b, 64'h6a09e667f3bcc908};

  // pad(params): len(K)=32, len(pwd)=32, len(salt)=32, T=1, R=4, C=4 as
  // 64-bit little-endian words, then 0x80 right after them and 0x01 in the
  // last byte of the 64-byte block.
  localparam logic [767:0] LYRA2_PAD_PARAMS = {256'h0,
    64'h8000000000000000, 64'h0000000000000080,
    64'd4, 64'd4, 64'd1, 64'd32, 64'd32, 64'd32};

  // Word-wise (64-bit lanes) modular addition of two b-bit vectors.
  function automatic logic [767:0] add_words(input logic [767:0] x, input logic [767:0] y);
    logic [767:0] r;
    for (int i = 0; i < 12; i++) r[64*i +: 64] = x[64*i +: 64] + y[64*i +: 64];
    return r;
  endfunction

  // Rotation of a b-bit vector by omega = 64 bits towards the high end.
  function automatic logic [767:0] rot_omega(input logic [767:0] x);
    return {x[703:0], x[767:704]};
  endfunction
endpackage
