// CubeHash16/32-256 of one 256-bit message (the two CubeHash steps of the
// Lyra2REv2 chain), round-serial: one CubeHash round per clock cycle.
//
// The state is 32 words of 32 bits.  On accept, the message is XORed into
// words 0..7 of the initial state; then 16 rounds absorb it, 0x80 is XORed
// into word 0 (the padding block) before 16 more rounds, and 1 is XORed into
// word 31 before the 160 finalization rounds.  That is 192 rounds, one per
// cycle, so the core delivers one hash every 192 cycles (paper: 192 cycles per
// hash, round-serial control).  The digest is words 0..7, presented with a
// one-cycle out_valid pulse during the last round; a new message may be
// accepted in the same cycle.
//
// CUBE_IV is the standard initial state for h = 256, b = 32, r = 16: the state
// {256/8, 32, 16, 0, ..., 0} after 160 rounds.  It is written out as a
// constant rather than computed during elaboration.  Bytes are little endian
// within each word.
module cubehash256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [255:0] in_data,
  output logic         out_valid,
  output logic [255:0] out_data
);
  localparam logic [31:0] CUBE_IV [32] = '{
    32'hea2bd4b4, 32'hccd6f29f, 32'h63117e71, 32'h35481eae, 32'h22512d5b, 32'he5d94e63,
    32'h7e624131, 32'hf4cc12be, 32'hc2d0b696, 32'h42af2070, 32'hd0720c35, 32'h3361da8c,
    32'h28cceca4, 32'h8ef8ad83, 32'h4680ac00, 32'h40e5fbab, 32'hd89041c3, 32'h6107fbd5,
    32'h6c859d41, 32'hf0b26679, 32'h09392549, 32'h5fa25603, 32'h65c892fd, 32'h93cb6285,
    32'h2af2b5ae, 32'h9e4b4e60, 32'h774abfdd, 32'h85254725, 32'h15815aeb, 32'h4ab6aad6,
    32'h9cdaf8af, 32'hd6032c0a};
  localparam int ROUNDS = 192;

  function automatic logic [1023:0] cround(input logic [1023:0] s);
    logic [31:0] x [32], t;
    logic [1023:0] r;
    for (int i = 0; i < 32; i++) x[i] = s[32*i +: 32];
    for (int i = 0; i < 16; i++) x[i+16] = x[i+16] + x[i];
    for (int i = 0; i < 16; i++) x[i] = {x[i][24:0], x[i][31:25]};
    for (int i = 0; i < 8; i++) begin t = x[i]; x[i] = x[i+8]; x[i+8] = t; end
    for (int i = 0; i < 16; i++) x[i] = x[i] ^ x[i+16];
    for (int i = 16; i < 32; i++) if ((i & 2) == 0) begin t = x[i]; x[i] = x[i+2]; x[i+2] = t; end
    for (int i = 0; i < 16; i++) x[i+16] = x[i+16] + x[i];
    for (int i = 0; i < 16; i++) x[i] = {x[i][20:0], x[i][31:21]};
    for (int i = 0; i < 16; i++) if ((i & 4) == 0) begin t = x[i]; x[i] = x[i+4]; x[i+4] = t; end
    for (int i = 0; i < 16; i++) x[i] = x[i] ^ x[i+16];
    for (int i = 16; i < 32; i++) if ((i & 1) == 0) begin t = x[i]; x[i] = x[i+1]; x[i+1] = t; end
    for (int i = 0; i < 32; i++) r[32*i +: 32] = x[i];
    return r;
  endfunction

  logic [1023:0] st_q, st_tw, st_nxt, iv_vec;
  logic [7:0]    rnd_q;
  logic          busy_q, last, load;

  always_comb for (int i = 0; i < 32; i++) iv_vec[32*i +: 32] = CUBE_IV[i];

  // padding block and finalization flag, applied before rounds 16 and 32
  always_comb begin
    st_tw = st_q;
    if (rnd_q == 8'd16) st_tw[31:0]      = st_q[31:0] ^ 32'h80;
    if (rnd_q == 8'd32) st_tw[1023:992]  = st_q[1023:992] ^ 32'h1;
  end

  assign st_nxt    = cround(st_tw);
  assign last      = busy_q && rnd_q == 8'(ROUNDS - 1);
  assign in_ready  = !busy_q || last;
  assign load      = in_valid && in_ready && !flush;
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
      st_q   <= iv_vec ^ {768'h0, in_data};
    end else if (busy_q) begin
      st_q   <= st_nxt;
      rnd_q  <= rnd_q + 8'd1;
      if (last) busy_q <= 1'b0;
    end
  end
endmodule
