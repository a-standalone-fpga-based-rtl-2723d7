// Blue Midnight Wish BMW-256 of one 256-bit message (last step of the
// Lyra2REv2 chain), as an 18-stage pipeline that every message crosses twice.
//
// The compression function turns a 16-word message block M and a 16-word
// chaining value H into a new chaining value, through f0 (Q0..Q15 from the
// bijective transform of M ^ H), f1 (Q16..Q31, two "expand1" and fourteen
// "expand2" words, each a sum of 17 terms) and f2 (folding into H).  The
// pipeline has one stage for f0, one for each of the sixteen f1 words and one
// for f2: 18 stages.  A 256-bit message is padded into a single block and
// compressed with the BMW-256 initial value (first pass); the result is then
// compressed once more as message, with the constant 0xaaaaaaa0+i as chaining
// value (finalization pass).  The digest is words 8..15 of the second result.
// A message leaving the pipeline after its first pass re-enters at the head
// and has priority over a new message there, so the core takes one message
// and delivers one hash every 2 cycles on average, with a latency of 36
// cycles.  The pipelining into 18 stages and the two passes follow the paper;
// the split of f1 into one word per stage and the handshake are this design's.
// Words are 32-bit little endian.
module bmw256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [255:0] in_data,
  output logic         out_valid,
  output logic [255:0] out_data
);
  localparam int STAGES = 18;

  typedef logic [31:0] w32_t;

  function automatic w32_t rotl(input w32_t x, input int n);
    return (x << n) | (x >> (32 - n));
  endfunction
  function automatic w32_t s_f(input int i, input w32_t x);
    w32_t r;
    case (i)
      0: r = (x >> 1) ^ (x << 3) ^ rotl(x, 4) ^ rotl(x, 19);
      1: r = (x >> 1) ^ (x << 2) ^ rotl(x, 8) ^ rotl(x, 23);
      2: r = (x >> 2) ^ (x << 1) ^ rotl(x, 12) ^ rotl(x, 25);
      3: r = (x >> 2) ^ (x << 2) ^ rotl(x, 15) ^ rotl(x, 29);
      4: r = (x >> 1) ^ x;
      default: r = (x >> 2) ^ x;
    endcase
    return r;
  endfunction

  // f0: W_i = +-(M^H)_j sums, then Q_i = s_{i mod 5}(W_i) + H_{i+1}
  // table of the five indices and signs (1 = subtract) per W_i
  localparam int WI [16][5] = '{
    '{5, 7, 10, 13, 14}, '{6, 8, 11, 14, 15}, '{0, 7, 9, 12, 15}, '{0, 1, 8, 10, 13},
    '{1, 2, 9, 11, 14},  '{3, 2, 10, 12, 15}, '{4, 0, 3, 11, 13}, '{1, 4, 5, 12, 14},
    '{2, 5, 6, 13, 15},  '{0, 3, 6, 7, 14},   '{8, 1, 4, 7, 15},  '{8, 0, 2, 5, 9},
    '{1, 3, 6, 9, 10},   '{2, 4, 7, 10, 11},  '{3, 5, 8, 11, 12}, '{12, 4, 6, 9, 13}};
  localparam bit WS [16][5] = '{
    '{0, 1, 0, 0, 0}, '{0, 1, 0, 0, 1}, '{0, 0, 0, 1, 0}, '{0, 1, 0, 1, 0},
    '{0, 0, 0, 1, 1}, '{0, 1, 0, 1, 0}, '{0, 1, 1, 1, 0}, '{0, 1, 1, 1, 1},
    '{0, 1, 1, 0, 1}, '{0, 1, 0, 1, 0}, '{0, 1, 1, 1, 0}, '{0, 1, 1, 1, 0},
    '{0, 0, 1, 1, 0}, '{0, 0, 0, 0, 0}, '{0, 1, 0, 1, 1}, '{0, 1, 1, 1, 0}};

  function automatic logic [511:0] f0(input logic [511:0] m, input logic [511:0] h);
    w32_t x [16], w;
    logic [511:0] q;
    for (int i = 0; i < 16; i++) x[i] = m[32*i +: 32] ^ h[32*i +: 32];
    for (int i = 0; i < 16; i++) begin
      w = '0;
      for (int t = 0; t < 5; t++) w = WS[i][t] ? w - x[WI[i][t]] : w + x[WI[i][t]];
      q[32*i +: 32] = s_f(i % 5, w) + h[32*((i + 1) % 16) +: 32];
    end
    return q;
  endfunction

  localparam int ROT2 [7] = '{3, 7, 13, 16, 19, 23, 27};
  // term t of the sum for Q_j: expand1 (first two words) uses s_{(t+1) mod 4}
  // on every word; expand2 adds the words with rotations r1..r7 on the odd
  // ones and s4, s5 on the last two
  function automatic w32_t exp_term(input bit first, input int t, input w32_t x);
    w32_t r;
    if (first) r = s_f((t + 1) % 4, x);
    else if (t == 14) r = s_f(4, x);
    else if (t == 15) r = s_f(5, x);
    else if (t % 2 == 1) r = rotl(x, ROT2[t / 2]);
    else r = x;
    return r;
  endfunction

  // f1: word Q_j (16 <= j <= 31) from Q_{j-16}..Q_{j-1}, M and H
  function automatic w32_t expand(input int j, input logic [1023:0] q,
                                  input logic [511:0] m, input logic [511:0] h);
    w32_t acc, ae;
    int a, b, c;
    a = (j - 16) % 16; b = (j - 13) % 16; c = (j - 6) % 16;
    ae = (rotl(m[32*a +: 32], a + 1) + rotl(m[32*b +: 32], b + 1)
          - rotl(m[32*c +: 32], c + 1) + w32_t'(j * 32'h05555555))
         ^ h[32*((j - 9) % 16) +: 32];
    acc = '0;
    for (int t = 0; t < 16; t++) acc = acc + exp_term(j < 18, t, q[32*(j - 16 + t) +: 32]);
    return acc + ae;
  endfunction

  // f2: new chaining value
  function automatic logic [511:0] f2(input logic [1023:0] qv, input logic [511:0] m);
    w32_t q [32], mm [16], n [16], xl, xh;
    logic [511:0] r;
    for (int i = 0; i < 32; i++) q[i] = qv[32*i +: 32];
    for (int i = 0; i < 16; i++) mm[i] = m[32*i +: 32];
    xl = q[16] ^ q[17] ^ q[18] ^ q[19] ^ q[20] ^ q[21] ^ q[22] ^ q[23];
    xh = xl ^ q[24] ^ q[25] ^ q[26] ^ q[27] ^ q[28] ^ q[29] ^ q[30] ^ q[31];
    n[0] = ((xh << 5) ^ (q[16] >> 5) ^ mm[0]) + (xl ^ q[24] ^ q[0]);
    n[1] = ((xh >> 7) ^ (q[17] << 8) ^ mm[1]) + (xl ^ q[25] ^ q[1]);
    n[2] = ((xh >> 5) ^ (q[18] << 5) ^ mm[2]) + (xl ^ q[26] ^ q[2]);
    n[3] = ((xh >> 1) ^ (q[19] << 5) ^ mm[3]) + (xl ^ q[27] ^ q[3]);
    n[4] = ((xh >> 3) ^ q[20] ^ mm[4]) + (xl ^ q[28] ^ q[4]);
    n[5] = ((xh << 6) ^ (q[21] >> 6) ^ mm[5]) + (xl ^ q[29] ^ q[5]);
    n[6] = ((xh >> 4) ^ (q[22] << 6) ^ mm[6]) + (xl ^ q[30] ^ q[6]);
    n[7] = ((xh >> 11) ^ (q[23] << 2) ^ mm[7]) + (xl ^ q[31] ^ q[7]);
    n[8]  = rotl(n[4], 9)  + (xh ^ q[24] ^ mm[8])  + ((xl << 8) ^ q[23] ^ q[8]);
    n[9]  = rotl(n[5], 10) + (xh ^ q[25] ^ mm[9])  + ((xl >> 6) ^ q[16] ^ q[9]);
    n[10] = rotl(n[6], 11) + (xh ^ q[26] ^ mm[10]) + ((xl << 6) ^ q[17] ^ q[10]);
    n[11] = rotl(n[7], 12) + (xh ^ q[27] ^ mm[11]) + ((xl << 4) ^ q[18] ^ q[11]);
    n[12] = rotl(n[0], 13) + (xh ^ q[28] ^ mm[12]) + ((xl >> 3) ^ q[19] ^ q[12]);
    n[13] = rotl(n[1], 14) + (xh ^ q[29] ^ mm[13]) + ((xl >> 4) ^ q[20] ^ q[13]);
    n[14] = rotl(n[2], 15) + (xh ^ q[30] ^ mm[14]) + ((xl >> 7) ^ q[21] ^ q[14]);
    n[15] = rotl(n[3], 16) + (xh ^ q[31] ^ mm[15]) + ((xl >> 2) ^ q[22] ^ q[15]);
    for (int i = 0; i < 16; i++) r[32*i +: 32] = n[i];
    return r;
  endfunction

  typedef struct packed {
    logic          valid;
    logic          pass;   // 0: message pass, 1: finalization pass
    logic [511:0]  m;
    logic [511:0]  h;
    logic [1023:0] q;      // f2 result in q[511:0] after the last stage
  } bmw_stage_t;

  bmw_stage_t st [STAGES+1];
  bmw_stage_t head_in;
  logic       recirc;
  logic [511:0] iv, fconst;

  always_comb
    for (int i = 0; i < 16; i++) begin
      iv[32*i +: 32]     = 32'h40414243 + 32'(i) * 32'h04040404;
      fconst[32*i +: 32] = 32'haaaaaaa0 + 32'(i);
    end

  assign recirc    = st[STAGES].valid && !st[STAGES].pass;
  assign in_ready  = !recirc && !flush;
  assign out_valid = st[STAGES].valid && st[STAGES].pass && !flush;
  assign out_data  = st[STAGES].q[511:256];

  always_comb begin
    head_in = '0;
    if (recirc) begin
      head_in.valid = 1'b1;
      head_in.pass  = 1'b1;
      head_in.m     = st[STAGES].q[511:0];
      head_in.h     = fconst;
    end else if (in_valid) begin
      head_in.valid = 1'b1;
      head_in.pass  = 1'b0;
      head_in.m     = {64'd256, 160'h0, 32'h80, in_data};   // pad: 0x80, bit length
      head_in.h     = iv;
    end
  end
  assign st[0] = head_in;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    bmw_stage_t nx, r_q;
    if (s == 0) begin : g_f0
      always_comb begin
        nx = st[s];
        nx.q[511:0] = f0(st[s].m, st[s].h);
      end
    end else if (s <= 16) begin : g_f1
      always_comb begin
        nx = st[s];
        nx.q[32*(15 + s) +: 32] = expand(15 + s, st[s].q, st[s].m, st[s].h);
      end
    end else begin : g_f2
      always_comb begin
        nx = st[s];
        nx.q[511:0] = f2(st[s].q, st[s].m);
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) r_q <= '0;
      else begin
        r_q <= nx;
        if (flush) r_q.valid <= 1'b0;
      end
    end
    assign st[s+1] = r_q;
  end
endmodule
