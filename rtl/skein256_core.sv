// Skein-256-256 of one 256-bit message (fifth step of the Lyra2REv2 chain).
//
// Skein hashes with UBI blocks around the Threefish-256 block cipher.  The
// configuration UBI has only constant inputs, so its result SKEIN_IV is a
// constant.  Two UBI engines remain, in series:
//   engine 1 (message UBI): key = SKEIN_IV, tweak = {type 48, first, final,
//            position 32}, plaintext = the message;
//   engine 2 (output UBI):  key = engine 1 result, tweak = {type 63, first,
//            final, position 8}, plaintext = 0.
// Each engine holds one block of eight Threefish rounds (with the two subkey
// additions that fall inside them) and applies it nine times, one pass per
// clock cycle, to cover the 72 rounds; the last pass also adds subkey 18 and
// the UBI feed-forward XOR.  Engine 1's key schedule depends on constants only
// and folds to a table.  Both engines work in parallel on consecutive
// messages, so the core delivers one hash every 9 cycles with a latency of
// 18 cycles (paper: 9 cycles per hash, 8-round block applied 9 times, two
// unrolled UBI blocks).  A message waits in engine 1 if engine 2 is still
// busy.  Words are 64-bit little endian; the handshake is this design's own.
module skein256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [255:0] in_data,
  output logic         out_valid,
  output logic [255:0] out_data
);
  localparam logic [255:0] SKEIN_IV = {64'h6A54E920FDE8DA69, 64'hB33BC3896656840F,
                                       64'h2FCA66479FA7D833, 64'hFC9DA860D048B449};
  localparam logic [63:0]  C240     = 64'h1BD11BDAA9FC1A22;
  localparam logic [127:0] TWEAK_MSG = {8'hC0 | 8'd48, 56'h0, 64'd32};
  localparam logic [127:0] TWEAK_OUT = {8'hC0 | 8'd63, 56'h0, 64'd8};
  localparam int ROT [8][2] = '{'{14, 16}, '{52, 57}, '{23, 40}, '{5, 37},
                                '{25, 33}, '{46, 12}, '{58, 22}, '{32, 32}};

  function automatic logic [63:0] rotl(input logic [63:0] x, input int n);
    return (x << n) | (x >> (64 - n));
  endfunction

  // subkey s of key k (4 words) and tweak t (2 words)
  function automatic logic [255:0] subkey(input logic [255:0] k, input logic [127:0] t,
                                          input logic [4:0] s);
    logic [63:0] kw [5], tw [3], w [4];
    for (int i = 0; i < 4; i++) kw[i] = k[64*i +: 64];
    kw[4] = C240 ^ kw[0] ^ kw[1] ^ kw[2] ^ kw[3];
    tw[0] = t[63:0]; tw[1] = t[127:64]; tw[2] = tw[0] ^ tw[1];
    w[0] = kw[s % 5];
    w[1] = kw[(s + 1) % 5] + tw[s % 3];
    w[2] = kw[(s + 2) % 5] + tw[(s + 1) % 3];
    w[3] = kw[(s + 3) % 5] + 64'(s);
    return {w[3], w[2], w[1], w[0]};
  endfunction

  function automatic logic [255:0] addw(input logic [255:0] x, input logic [255:0] y);
    logic [255:0] r;
    for (int i = 0; i < 4; i++) r[64*i +: 64] = x[64*i +: 64] + y[64*i +: 64];
    return r;
  endfunction

  // four Threefish-256 rounds with rotation set base..base+3
  function automatic logic [255:0] four_rounds(input logic [255:0] x, input int base);
    logic [63:0] v [4], t;
    for (int i = 0; i < 4; i++) v[i] = x[64*i +: 64];
    for (int d = base; d < base + 4; d++) begin
      v[0] = v[0] + v[1]; v[1] = rotl(v[1], ROT[d][0]) ^ v[0];
      v[2] = v[2] + v[3]; v[3] = rotl(v[3], ROT[d][1]) ^ v[2];
      t = v[1]; v[1] = v[3]; v[3] = t;
    end
    return {v[3], v[2], v[1], v[0]};
  endfunction

  // one pass p (0..8) of eight rounds; the last pass adds subkey 18
  function automatic logic [255:0] pass8(input logic [255:0] x, input logic [255:0] k,
                                         input logic [127:0] t, input logic [3:0] p);
    logic [255:0] v;
    v = four_rounds(addw(x, subkey(k, t, {p, 1'b0})), 0);
    v = four_rounds(addw(v, subkey(k, t, {p, 1'b1})), 4);
    if (p == 4'd8) v = addw(v, subkey(k, t, 5'd18));
    return v;
  endfunction

  // engine 1
  logic         b1_q, last1;
  logic [3:0]   p1_q;
  logic [255:0] v1_q, m1_q, v1_nxt;
  // engine 2
  logic         b2_q, last2, take2;
  logic [3:0]   p2_q;
  logic [255:0] v2_q, k2_q, v2_nxt;

  assign v1_nxt = pass8(v1_q, SKEIN_IV, TWEAK_MSG, p1_q);
  assign v2_nxt = pass8(v2_q, k2_q, TWEAK_OUT, p2_q);
  assign last2  = b2_q && p2_q == 4'd8;
  assign last1  = b1_q && p1_q == 4'd8;
  assign take2  = last1 && (!b2_q || last2);       // engine 1 hands over
  assign in_ready  = !flush && (!b1_q || take2);
  assign out_valid = last2 && !flush;
  assign out_data  = v2_nxt;                       // plaintext 0: no feed-forward term

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b1_q <= 1'b0; p1_q <= '0; v1_q <= '0; m1_q <= '0;
      b2_q <= 1'b0; p2_q <= '0; v2_q <= '0; k2_q <= '0;
    end else if (flush) begin
      b1_q <= 1'b0; b2_q <= 1'b0; p1_q <= '0; p2_q <= '0;
    end else begin
      // engine 1
      if (in_valid && in_ready) begin
        b1_q <= 1'b1; p1_q <= '0; v1_q <= in_data; m1_q <= in_data;
      end else if (take2) begin
        b1_q <= 1'b0;
      end else if (b1_q && !last1) begin
        p1_q <= p1_q + 4'd1; v1_q <= v1_nxt;
      end
      // engine 2
      if (take2) begin
        b2_q <= 1'b1; p2_q <= '0; v2_q <= '0; k2_q <= v1_nxt ^ m1_q;
      end else if (last2) begin
        b2_q <= 1'b0;
      end else if (b2_q) begin
        p2_q <= p2_q + 4'd1; v2_q <= v2_nxt;
      end
    end
  end
endmodule
