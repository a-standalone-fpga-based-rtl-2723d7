// One BLAKE2b round as used as the permutation f of the Lyra2 sponge,
// pipelined into eight stages.
//
// A round is a column layer of four G-functions on words (0,4,8,12)
// (1,5,9,13) (2,6,10,14) (3,7,11,15) followed by a diagonal layer on
// (0,5,10,15) (1,6,11,12) (2,7,8,13) (3,4,9,14).  Each G holds four
// sequential 64-bit additions, so a round holds eight; stage s (0..7) does
// addition step s%4 of layer s/4 and ends in a register.  The result of the
// state presented at in_state appears at out_state exactly STAGES = 8 clock
// cycles later, and a new state can enter every cycle.  There is no valid bit:
// the caller (the Lyra2 core) knows which hash every pipeline slot carries.
// The eight-stage split is the paper's; the register placement after each
// adder is this design's reading of "dividing these sequential adders into
// eight pipeline stages".
module lyra2_round (
  input  logic          clk,
  input  logic [1023:0] in_state,
  output logic [1023:0] out_state
);
  localparam int STAGES = 8;

  logic [1023:0] stage_q [STAGES+1];
  assign stage_q[0] = in_state;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    logic [1023:0] nxt;
    for (genvar g = 0; g < 4; g++) begin : g_g
      // word indices of this G in the column (s<4) or diagonal (s>=4) layer
      localparam int IA = g;
      localparam int IB = (s < 4) ? 4 + g  : 4 + ((g + 1) % 4);
      localparam int IC = (s < 4) ? 8 + g  : 8 + ((g + 2) % 4);
      localparam int ID = (s < 4) ? 12 + g : 12 + ((g + 3) % 4);
      blake_g #(.W(64), .R1(32), .R2(24), .R3(16), .R4(63), .USE_CM(1'b0),
                .FIRST(s % 4), .NSTEPS(1)) u_g (
        .a  (stage_q[s][64*IA +: 64]), .b(stage_q[s][64*IB +: 64]),
        .c  (stage_q[s][64*IC +: 64]), .d(stage_q[s][64*ID +: 64]),
        .cm0('0), .cm1('0),
        .a_o(nxt[64*IA +: 64]), .b_o(nxt[64*IB +: 64]),
        .c_o(nxt[64*IC +: 64]), .d_o(nxt[64*ID +: 64]));
    end
    logic [1023:0] q;
    always_ff @(posedge clk) q <= nxt;
    assign stage_q[s+1] = q;
  end

  assign out_state = stage_q[STAGES];
endmodule
