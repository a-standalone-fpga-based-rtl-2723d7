// Scheduler of one hashing step of the chain: it feeds N identical hashing
// cores from the upstream FIFO and writes their results into the downstream
// FIFO.
//
// A word is taken from the upstream FIFO when it is not empty, the
// downstream FIFO has room for every result still being computed plus this
// one (credit count: in_flight < dn_free), and some core can accept it.  The
// core is chosen round-robin: the first ready core at or after the pointer,
// after which the pointer moves past it.  All cores of a step have the same
// fixed latency and at most one word is dispatched per cycle, so results come
// back one at a time and in dispatch order; the scheduler writes each into
// the downstream FIFO in the cycle it appears.  Round-robin dispatch that
// checks upstream data and downstream space follows the paper; the credit
// counter is this design's way of doing the space check.
module hash_scheduler #(
  parameter int N   = 2,
  parameter int IW  = 256,
  parameter int OW  = 256,
  parameter int FAW = 4      // downstream FIFO address width
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  // upstream FIFO (read side)
  input  logic              up_empty,
  input  logic [IW-1:0]     up_data,
  output logic              up_rd,
  // cores
  output logic [N-1:0]      core_in_valid,
  input  logic [N-1:0]      core_in_ready,
  output logic [IW-1:0]     core_in_data,
  input  logic [N-1:0]      core_out_valid,
  input  logic [N-1:0][OW-1:0] core_out_data,
  // downstream FIFO (write side)
  output logic              dn_wr,
  output logic [OW-1:0]     dn_data,
  input  logic [FAW:0]      dn_free
);
  localparam int PW = (N > 1) ? $clog2(N) : 1;

  logic [PW-1:0] ptr_q, pick;
  logic          found;
  logic [FAW+1:0] inflight_q;
  logic          room;

  assign room = (FAW+2)'(dn_free) > inflight_q;

  always_comb begin
    found = 1'b0;
    pick  = ptr_q;
    for (int i = 0; i < N; i++) begin
      if (!found && core_in_ready[(int'(ptr_q) + i) % N]) begin
        found = 1'b1;
        pick  = PW'((int'(ptr_q) + i) % N);
      end
    end
  end

  assign up_rd        = !flush && !up_empty && room && found;
  assign core_in_data = up_data;
  always_comb begin
    core_in_valid = '0;
    if (up_rd) core_in_valid[pick] = 1'b1;
  end

  always_comb begin
    dn_data = '0;
    for (int i = 0; i < N; i++) if (core_out_valid[i]) dn_data = core_out_data[i];
  end
  assign dn_wr = |core_out_valid && !flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q <= '0; inflight_q <= '0;
    end else if (flush) begin
      ptr_q <= '0; inflight_q <= '0;
    end else begin
      if (up_rd) ptr_q <= (int'(pick) == N - 1) ? '0 : pick + 1'b1;
      inflight_q <= inflight_q + (FAW+2)'(up_rd) - (FAW+2)'(dn_wr);
    end
  end

  always @(posedge clk) if (rst_n && !flush)
    assert ($onehot0(core_out_valid)) else $error("two cores finished in the same cycle");
endmodule
