// G-function of BLAKE / BLAKE2b, split into its four adder steps so that a
// caller can place pipeline registers between them.
//
//   step 0: a = a + b (+ cm0);  d = (d ^ a) >>> R1
//   step 1: c = c + d;          b = (b ^ c) >>> R2
//   step 2: a = a + b (+ cm1);  d = (d ^ a) >>> R3
//   step 3: c = c + d;          b = (b ^ c) >>> R4
//
// The module is purely combinational and performs steps FIRST .. FIRST+NSTEPS-1.
// With W=64 and rotations 32/24/16/63 and USE_CM=0 it is the BLAKE2b G used
// in Lyra2 (the message adders are left out); with W=32, rotations 16/12/8/7
// and USE_CM=1 it is the BLAKE-256 G, where cm0/cm1 carry the round-dependent
// message-word XOR constant terms.  Word width, rotation amounts and the
// omission of the CM adders follow the paper; splitting the function into
// selectable steps is this design's way of placing the pipeline registers.
module blake_g #(
  parameter int W      = 64,
  parameter int R1     = 32,
  parameter int R2     = 24,
  parameter int R3     = 16,
  parameter int R4     = 63,
  parameter bit USE_CM = 1'b0,
  parameter int FIRST  = 0,
  parameter int NSTEPS = 4
) (
  input  logic [W-1:0] a, b, c, d,
  input  logic [W-1:0] cm0, cm1,
  output logic [W-1:0] a_o, b_o, c_o, d_o
);
  function automatic logic [W-1:0] rotr(input logic [W-1:0] x, input int n);
    return (x >> n) | (x << (W - n));
  endfunction

  always_comb begin
    logic [W-1:0] ta, tb, tc, td;
    ta = a; tb = b; tc = c; td = d;
    for (int s = FIRST; s < FIRST + NSTEPS; s++) begin
      case (s)
        0: begin ta = ta + tb + (USE_CM ? cm0 : '0); td = rotr(td ^ ta, R1); end
        1: begin tc = tc + td; tb = rotr(tb ^ tc, R2); end
        2: begin ta = ta + tb + (USE_CM ? cm1 : '0); td = rotr(td ^ ta, R3); end
        default: begin tc = tc + td; tb = rotr(tb ^ tc, R4); end
      endcase
    end
    a_o = ta; b_o = tb; c_o = tc; d_o = td;
  end
endmodule
