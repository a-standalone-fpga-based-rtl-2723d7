// Memory of the Lyra2 core: the 4 x 4 x 768-bit matrix M of every hash in
// flight, plus constant vectors, with four read ports and two write ports.
//
// Ports a and b feed the duplex input; ports c and d supply the old cell
// values that the duplex output is XORed with.  Reads are asynchronous.
// Writes take effect at the clock edge; when both write ports address the
// same word, port b wins.  Ports a and b see a write of the same cycle
// (write-first forwarding), ports c and d see the stored value (read-first).
//
// The paper builds this 4R/2W memory from true-dual-port block RAMs by
// replication (two copies, coherent writes) and multipumping at twice the
// core clock.  Here the same port behaviour is given directly by a
// register/LUT-RAM array on the core clock; that, and the forwarding rule,
// are this design's choices.
module lyra2_bram #(
  parameter int WIDTH = 768,
  parameter int DEPTH = 130,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic [AW-1:0]    addr_a, addr_b, addr_c, addr_d,
  output logic [WIDTH-1:0] q_a, q_b, q_c, q_d,
  input  logic             we_wa,
  input  logic [AW-1:0]    waddr_a,
  input  logic [WIDTH-1:0] wdata_a,
  input  logic             we_wb,
  input  logic [AW-1:0]    waddr_b,
  input  logic [WIDTH-1:0] wdata_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_wa && !(we_wb && waddr_b == waddr_a)) mem[waddr_a] <= wdata_a;
    if (we_wb) mem[waddr_b] <= wdata_b;
  end

  function automatic logic [WIDTH-1:0] fwd(input logic [AW-1:0] ad);
    if (we_wb && waddr_b == ad) return wdata_b;
    if (we_wa && waddr_a == ad) return wdata_a;
    return mem[ad];
  endfunction

  assign q_a = fwd(addr_a);
  assign q_b = fwd(addr_b);
  assign q_c = mem[addr_c];
  assign q_d = mem[addr_d];
endmodule
