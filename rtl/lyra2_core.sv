// Simplified Lyra2 core (the Lyra2 instance of Lyra2REv2: T = 1, R = C = 4,
// b = 768, c = 256, k = 256, omega = 64, pwd = salt = 256-bit input).
//
// The sponge state circulates through the eight-stage round pipeline
// (lyra2_round).  Eight hashes share the pipeline: slot s owns the cycles
// with head == s, so every slot gets one round every eight cycles.  At each
// visit ("head") of a slot its 7-bit step counter k selects what happens:
//
//   k  0..11  bootstrap absorb of pwd||pwd (input only at k = 0), 12 rounds
//   k 12..23  bootstrap absorb of pad(params) (constant row in the memory)
//   k 24..27  Setup0:   M[0][3-col] <- state, then 1 round with empty input
//   k 28..31  Setup1:   duplex M[0][col];  M[1][3-col] <- M[0][col] ^ rand
//   k 32..39  Setup2:   duplex M[row-2][col] + M[row-1][col]; write M[row][3-col]
//                       and M[row-2][col] ^= rand <<< 64, rows 2 and 3
//   k 40..55  Wander:   row1 <- state word 0 mod 4 at col 0 of each row;
//                       duplex M[row1][col] + M[row-1][col]; M[row][col] ^= rand,
//                       M[row1][col] ^= rand <<< 64 (row == row1 handled by
//                       chaining the two XORs and disabling write port a)
//   k 56..67  Wrap-up absorb of M[row1][0], 12 rounds
//   k 68      K = state[255:0] is output; a new hash may enter the slot
//
// Writes that complete a duplex happen at the next visit of the slot, when the
// permuted state comes back out of the pipeline.  So a hash takes 68 rounds
// = 544 cycles, and the core outputs one hash every 68 cycles on average.
//
// Interface: in_valid/in_ready load a 256-bit pwd into the slot at the head
// (ready when that slot is empty or finishing this cycle).  out_valid is a
// one-cycle pulse with out_hash; there is no back-pressure on the output,
// the scheduler only starts a hash when it has room for the result.  Hashes
// leave in the order they entered.  flush empties every slot.  After reset the
// core spends two cycles writing the all-zero and pad(params) vectors into
// the memory; in_ready stays low meanwhile.
//
// Phase split, step counts, memory contents (matrix + zero vector +
// pad(params)), the duplex input multiplexer (qa + qb, or 0 || pwd || pwd),
// the two output XORs and the row selection from the two low bits of state
// word 0 (paper's Fig. 6a) follow the paper.  Slot timing, the write-first
// forwarding and the handshake are this design's own.
module lyra2_core
  import lyra2_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [255:0] in_pwd,
  output logic         out_valid,
  output logic [255:0] out_hash
);
  localparam int SLOTS  = 8;
  localparam int STEPS  = 68;
  localparam int AW     = 8;
  localparam logic [AW-1:0] ADDR_ZERO = 8'd128;
  localparam logic [AW-1:0] ADDR_PAD  = 8'd129;

  logic [2:0]    head;
  logic [6:0]    step_q [SLOTS];
  logic          act_q  [SLOTS];
  logic [1:0]    row1_q [SLOTS];
  logic [1:0]    init_q;   // 0,1: writing constants, 2: running

  logic [1023:0] round_in, round_out;
  logic [AW-1:0] addr_a, addr_b, addr_c, addr_d, waddr_a, waddr_b;
  logic [767:0]  q_a, q_b, q_c, q_d, wdata_a, wdata_b;
  logic          we_a, we_b;

  lyra2_round u_round (.clk(clk), .in_state(round_in), .out_state(round_out));

  lyra2_bram #(.WIDTH(768), .DEPTH(130)) u_mem (
    .clk(clk), .addr_a(addr_a), .addr_b(addr_b), .addr_c(addr_c), .addr_d(addr_d),
    .q_a(q_a), .q_b(q_b), .q_c(q_c), .q_d(q_d),
    .we_wa(we_a), .waddr_a(waddr_a), .wdata_a(wdata_a),
    .we_wb(we_b), .waddr_b(waddr_b), .wdata_b(wdata_b));

  function automatic logic [AW-1:0] maddr(input logic [2:0] slot, input logic [1:0] row,
                                         input logic [1:0] col);
    return {1'b0, slot, row, col};
  endfunction

  logic [6:0]    k;
  logic          act, running, finishing, load;
  logic [1023:0] s_cur;
  logic [767:0]  rand_v, din;
  logic [1:0]    row1_new, row1_use;
  logic          collide;

  assign running   = (init_q == 2'd2);
  assign k         = step_q[head];
  assign act       = act_q[head];
  assign s_cur     = round_out;
  assign rand_v    = round_out[767:0];
  assign finishing = act && (k == 7'(STEPS));
  assign in_ready  = running && !flush && (!act || finishing);
  assign load      = in_valid && in_ready;
  assign out_valid = running && !flush && finishing;
  assign out_hash  = round_out[255:0];

  // ---------------- read addresses for the duplex input (ports a, b)
  always_comb begin
    logic [4:0] j;
    logic [1:0] r, c;
    addr_a   = ADDR_ZERO;
    addr_b   = ADDR_ZERO;
    row1_new = row1_q[head];
    row1_use = row1_q[head];
    j = '0; r = '0; c = '0;
    if (k == 7'd12) addr_a = ADDR_PAD;
    else if (k >= 7'd28 && k <= 7'd31) begin
      c = 2'(k - 7'd28);
      addr_a = maddr(head, 2'd0, c);
    end else if (k >= 7'd32 && k <= 7'd39) begin
      j = 5'(k - 7'd32); r = 2'd2 + 2'(j >> 2); c = j[1:0];
      addr_a = maddr(head, r - 2'd2, c);
      addr_b = maddr(head, r - 2'd1, c);
    end else if (k >= 7'd40 && k <= 7'd55) begin
      j = 5'(k - 7'd40); r = j[3:2]; c = j[1:0];
      if (c == 2'd0) row1_new = s_cur[1:0];
      addr_a = maddr(head, row1_new, c);
      addr_b = maddr(head, r - 2'd1, c);
    end else if (k == 7'd56) addr_a = maddr(head, row1_use, 2'd0);
  end

  // ---------------- completion reads and writes (ports c, d and both write ports)
  always_comb begin
    logic [4:0] j;
    logic [1:0] r, c;
    addr_c  = ADDR_ZERO;
    addr_d  = ADDR_ZERO;
    we_a    = 1'b0;
    we_b    = 1'b0;
    waddr_a = ADDR_ZERO;
    waddr_b = ADDR_PAD;
    collide = 1'b0;
    j = '0; r = '0; c = '0;
    if (!running) begin
      // constant rows: zero vector, then pad(params)
      we_a    = (init_q == 2'd0);
      we_b    = (init_q == 2'd1);
    end else if (act && !flush) begin
      if (k >= 7'd24 && k <= 7'd27) begin            // Setup0 squeeze
        c = 2'(k - 7'd24);
        we_a = 1'b1; waddr_a = maddr(head, 2'd0, 2'd3 - c);
      end else if (k >= 7'd29 && k <= 7'd32) begin   // Setup1 completion
        c = 2'(k - 7'd29);
        addr_c = maddr(head, 2'd0, c);
        we_a = 1'b1; waddr_a = maddr(head, 2'd1, 2'd3 - c);
      end else if (k >= 7'd33 && k <= 7'd40) begin   // Setup2 completion
        j = 5'(k - 7'd33); r = 2'd2 + 2'(j >> 2); c = j[1:0];
        addr_c = maddr(head, r - 2'd1, c);
        addr_d = maddr(head, r - 2'd2, c);
        we_a = 1'b1; waddr_a = maddr(head, r, 2'd3 - c);
        we_b = 1'b1; waddr_b = maddr(head, r - 2'd2, c);
      end else if (k >= 7'd41 && k <= 7'd56) begin   // Wander completion
        j = 5'(k - 7'd41); r = j[3:2]; c = j[1:0];
        addr_c = maddr(head, r, c);
        addr_d = maddr(head, row1_q[head], c);
        waddr_a = maddr(head, r, c);
        waddr_b = maddr(head, row1_q[head], c);
        we_b = 1'b1;
        collide = (r == row1_q[head]);
        we_a = !collide;
      end
    end
  end

  // Output XOR blocks; on a row collision the first XOR feeds the second.
  assign wdata_a = running ? (q_c ^ rand_v) : '0;
  assign wdata_b = !running ? LYRA2_PAD_PARAMS
                 : ((collide ? (q_c ^ rand_v) : q_d) ^ rot_omega(rand_v));

  // ---------------- duplex input
  assign din = (load || k == 7'd0) ? {256'h0, in_pwd, in_pwd} : add_words(q_a, q_b);

  always_comb begin
    if (load) round_in = {BLAKE2B_IV, 512'h0} ^ {256'h0, din};
    else      round_in = s_cur ^ {256'h0, din};
  end

  // ---------------- slot bookkeeping
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head   <= '0;
      init_q <= '0;
      for (int i = 0; i < SLOTS; i++) begin
        step_q[i] <= '0;
        act_q[i]  <= 1'b0;
        row1_q[i] <= '0;
      end
    end else begin
      head <= head + 3'd1;
      if (!running) init_q <= init_q + 2'd1;
      if (flush) begin
        for (int i = 0; i < SLOTS; i++) act_q[i] <= 1'b0;
      end else if (running) begin
        if (load) begin
          act_q[head]  <= 1'b1;
          step_q[head] <= 7'd1;
        end else if (finishing) begin
          act_q[head]  <= 1'b0;
        end else if (act) begin
          step_q[head] <= k + 7'd1;
          if (k >= 7'd40 && k <= 7'd55 && k[1:0] == 2'd0) row1_q[head] <= row1_new;
        end
      end
    end
  end
endmodule
