// Keccak-256 (original Keccak padding 0x01 .. 0x80, rate 1088, capacity 512)
// of one 256-bit message, as the second step of the Lyra2REv2 chain.
//
// The message is absorbed in one go: the padded 1088-bit block is placed in
// the all-zero state, then Keccak-f[1600] runs one round per clock cycle for
// 24 cycles.  The 256-bit digest (lanes 0..3) is presented with a one-cycle
// out_valid pulse on the cycle of the 24th round, and a new message may be
// accepted in that same cycle, so the core delivers one hash every 24 cycles
// (paper: 24 cycles per hash, one round per cycle).  Byte i of a 256-bit value
// sits at bits [8i+7:8i]; lane i of the state at bits [64i+63:64i].
// Because the message is always 256 bits, there is no multi-block absorb
// logic; the padding positions are constants.  The handshake is this
// design's own.
module keccak256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [255:0] in_data,
  output logic         out_valid,
  output logic [255:0] out_data
);
  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};
  // rotation offsets r[x + 5y]
  localparam int RHO [25] = '{0, 1, 62, 28, 27, 36, 44, 6, 55, 20, 3, 10, 43, 25, 39,
                              41, 45, 15, 21, 8, 18, 2, 61, 56, 14};

  function automatic logic [63:0] rotl(input logic [63:0] x, input int n);
    return (n == 0) ? x : ((x << n) | (x >> (64 - n)));
  endfunction

  function automatic logic [1599:0] kround(input logic [1599:0] s, input logic [63:0] rc);
    logic [63:0] a [25], b [25], c [5], d [5];
    logic [1599:0] r;
    for (int i = 0; i < 25; i++) a[i] = s[64*i +: 64];
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) a[i] = a[i] ^ d[i%5];
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y], RHO[x + 5*y]);
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    a[0] = a[0] ^ rc;
    for (int i = 0; i < 25; i++) r[64*i +: 64] = a[i];
    return r;
  endfunction

  logic [1599:0] st_q, st_in, st_nxt;
  logic [4:0]    rnd_q;
  logic          busy_q, last, load;

  assign last      = busy_q && rnd_q == 5'd23;
  assign in_ready  = !busy_q || last;
  assign load      = in_valid && in_ready && !flush;
  assign st_in     = st_q;
  assign st_nxt    = kround(st_in, RC[rnd_q]);
  assign out_valid = last && !flush;
  assign out_data  = st_nxt[255:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      rnd_q  <= '0;
      st_q   <= '0;
    end else if (flush) begin
      busy_q <= 1'b0;
      rnd_q  <= '0;
    end else if (load) begin
      busy_q <= 1'b1;
      rnd_q  <= '0;
      // padded block: message, 0x01 after it, 0x80 in the last byte of the rate
      st_q   <= {512'h0, 64'h8000000000000000, 704'h0, 64'h1, in_data};
    end else if (busy_q) begin
      st_q   <= st_nxt;
      rnd_q  <= rnd_q + 5'd1;
      if (last) busy_q <= 1'b0;
    end
  end
endmodule
