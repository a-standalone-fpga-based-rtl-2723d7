// BLAKE-256 (14 rounds) of the 80-byte block header, head of the Lyra2REv2
// chain.
//
// The 14 rounds are fully unrolled and each round is cut into four pipeline
// stages (column G layer first and second halves, diagonal layer first and
// second halves; two of the four G adder steps per stage), giving a 56-stage
// pipeline in which the round-dependent message permutation is fixed wiring.
// The G-function is blake_g with 32-bit words, rotations 16/12/8/7 and the
// message/constant inputs CM.  The 640-bit header is two message blocks:
// block 1 (bytes 0..63, counter 512) enters from the input; when it leaves the
// pipeline its chaining value is finalised and it re-enters at the head,
// ahead of any new header, as block 2 (bytes 64..79 plus padding 0x80 ..
// 0x01 || 640 as a 64-bit big-endian length, counter 640).  So the core takes
// a header and delivers a hash every 2 cycles on average, with a latency of
// 112 cycles.  Message words are big endian as BLAKE specifies; the 256-bit
// output is given as bytes, byte i at bits [8i+7:8i], as are the header bytes.
// Unrolling, 4 stages per round and the two-block reuse follow the paper; the
// exact register placement and the handshake are this design's own.
module blake256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [639:0] in_data,
  output logic         out_valid,
  output logic [255:0] out_data
);
  localparam int STAGES = 56;
  localparam logic [31:0] CB [16] = '{
    32'h243F6A88, 32'h85A308D3, 32'h13198A2E, 32'h03707344, 32'hA4093822, 32'h299F31D0,
    32'h082EFA98, 32'hEC4E6C89, 32'h452821E6, 32'h38D01377, 32'hBE5466CF, 32'h34E90C6C,
    32'hC0AC29B7, 32'hC97C50DD, 32'h3F84D5B5, 32'hB5470917};
  localparam logic [31:0] IV [8] = '{
    32'h6A09E667, 32'hBB67AE85, 32'h3C6EF372, 32'hA54FF53A,
    32'h510E527F, 32'h9B05688C, 32'h1F83D9AB, 32'h5BE0CD19};
  // Written first row first, so row r sits at index 9-r and entry i at 15-i.
  localparam logic [9:0][15:0][3:0] SIGMA = {
    {4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd5, 4'd6, 4'd7, 4'd8, 4'd9, 4'd10, 4'd11, 4'd12, 4'd13, 4'd14, 4'd15},
    {4'd14, 4'd10, 4'd4, 4'd8, 4'd9, 4'd15, 4'd13, 4'd6, 4'd1, 4'd12, 4'd0, 4'd2, 4'd11, 4'd7, 4'd5, 4'd3},
    {4'd11, 4'd8, 4'd12, 4'd0, 4'd5, 4'd2, 4'd15, 4'd13, 4'd10, 4'd14, 4'd3, 4'd6, 4'd7, 4'd1, 4'd9, 4'd4},
    {4'd7, 4'd9, 4'd3, 4'd1, 4'd13, 4'd12, 4'd11, 4'd14, 4'd2, 4'd6, 4'd5, 4'd10, 4'd4, 4'd0, 4'd15, 4'd8},
    {4'd9, 4'd0, 4'd5, 4'd7, 4'd2, 4'd4, 4'd10, 4'd15, 4'd14, 4'd1, 4'd11, 4'd12, 4'd6, 4'd8, 4'd3, 4'd13},
    {4'd2, 4'd12, 4'd6, 4'd10, 4'd0, 4'd11, 4'd8, 4'd3, 4'd4, 4'd13, 4'd7, 4'd5, 4'd15, 4'd14, 4'd1, 4'd9},
    {4'd12, 4'd5, 4'd1, 4'd15, 4'd14, 4'd13, 4'd4, 4'd10, 4'd0, 4'd7, 4'd6, 4'd3, 4'd9, 4'd2, 4'd8, 4'd11},
    {4'd13, 4'd11, 4'd7, 4'd14, 4'd12, 4'd1, 4'd3, 4'd9, 4'd5, 4'd0, 4'd15, 4'd4, 4'd8, 4'd6, 4'd2, 4'd10},
    {4'd6, 4'd15, 4'd14, 4'd9, 4'd11, 4'd3, 4'd0, 4'd8, 4'd12, 4'd2, 4'd13, 4'd7, 4'd1, 4'd4, 4'd10, 4'd5},
    {4'd10, 4'd2, 4'd8, 4'd4, 4'd7, 4'd6, 4'd1, 4'd5, 4'd15, 4'd11, 4'd9, 4'd14, 4'd3, 4'd12, 4'd13, 4'd0}};

  typedef struct packed {
    logic         valid;
    logic         blk;    // 0: first block, 1: second block
    logic [511:0] v;      // working state v0..v15
    logic [511:0] m;      // message words m0..m15
    logic [255:0] h;      // chaining value of this block
    logic [127:0] rest;   // header bytes 64..79, used by the second block
  } blake_stage_t;

  function automatic logic [31:0] bswap(input logic [31:0] x);
    return {x[7:0], x[15:8], x[23:16], x[31:24]};
  endfunction

  function automatic logic [511:0] init_v(input logic [255:0] h, input logic [31:0] t);
    logic [511:0] v;
    v[255:0] = h;
    for (int i = 0; i < 4; i++) v[256 + 32*i +: 32] = CB[i];
    v[415:384] = t ^ CB[4];
    v[447:416] = t ^ CB[5];
    v[479:448] = CB[6];
    v[511:480] = CB[7];
    return v;
  endfunction

  function automatic logic [255:0] finalise(input logic [255:0] h, input logic [511:0] v);
    return h ^ v[255:0] ^ v[511:256];
  endfunction

  blake_stage_t st [STAGES+1];
  blake_stage_t head_in;
  logic         recirc;
  logic [255:0] iv_vec, h_tail;

  always_comb for (int i = 0; i < 8; i++) iv_vec[32*i +: 32] = IV[i];

  assign h_tail    = finalise(st[STAGES].h, st[STAGES].v);
  assign recirc    = st[STAGES].valid && !st[STAGES].blk;
  assign in_ready  = !recirc && !flush;
  assign out_valid = st[STAGES].valid && st[STAGES].blk && !flush;
  always_comb for (int i = 0; i < 8; i++) out_data[32*i +: 32] = bswap(h_tail[32*i +: 32]);

  always_comb begin
    head_in = '0;
    if (recirc) begin
      head_in.valid = 1'b1;
      head_in.blk   = 1'b1;
      head_in.h     = h_tail;
      head_in.v     = init_v(h_tail, 32'd640);
      for (int i = 0; i < 4; i++) head_in.m[32*i +: 32] = bswap(st[STAGES].rest[32*i +: 32]);
      head_in.m[159:128] = 32'h80000000;
      head_in.m[447:416] = 32'h00000001;
      head_in.m[511:480] = 32'd640;
    end else if (in_valid) begin
      head_in.valid = 1'b1;
      head_in.blk   = 1'b0;
      head_in.h     = iv_vec;
      head_in.v     = init_v(iv_vec, 32'd512);
      for (int i = 0; i < 16; i++) head_in.m[32*i +: 32] = bswap(in_data[32*i +: 32]);
      head_in.rest  = in_data[639:512];
    end
  end
  assign st[0] = head_in;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    localparam int RND   = s / 4;
    localparam int LAYER = (s % 4) / 2;     // 0: columns, 1: diagonals
    localparam int FIRST = 2 * (s % 2);     // G steps 0-1 or 2-3
    blake_stage_t nx, r_q;
    logic [511:0] vn;
    for (genvar g = 0; g < 4; g++) begin : g_g
      localparam int GI = 4 * LAYER + g;
      localparam int IA = g;
      localparam int IB = (LAYER == 0) ? 4 + g  : 4 + ((g + 1) % 4);
      localparam int IC = (LAYER == 0) ? 8 + g  : 8 + ((g + 2) % 4);
      localparam int ID = (LAYER == 0) ? 12 + g : 12 + ((g + 3) % 4);
      localparam int S0 = int'(SIGMA[9 - RND % 10][15 - 2*GI]);
      localparam int S1 = int'(SIGMA[9 - RND % 10][14 - 2*GI]);
      blake_g #(.W(32), .R1(16), .R2(12), .R3(8), .R4(7), .USE_CM(1'b1),
                .FIRST(FIRST), .NSTEPS(2)) u_g (
        .a  (st[s].v[32*IA +: 32]), .b(st[s].v[32*IB +: 32]),
        .c  (st[s].v[32*IC +: 32]), .d(st[s].v[32*ID +: 32]),
        .cm0(st[s].m[32*S0 +: 32] ^ CB[S1]),
        .cm1(st[s].m[32*S1 +: 32] ^ CB[S0]),
        .a_o(vn[32*IA +: 32]), .b_o(vn[32*IB +: 32]),
        .c_o(vn[32*IC +: 32]), .d_o(vn[32*ID +: 32]));
    end
    always_comb begin
      nx   = st[s];
      nx.v = vn;
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
