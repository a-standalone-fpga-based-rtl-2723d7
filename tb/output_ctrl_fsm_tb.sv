// Self-checking testbench for output_ctrl_fsm.  The testbench plays the
// chain output (a queue of hashes offered at random times), the metadata
// FIFO (a queue of {nonce, target, last}, its head shown while not empty)
// and the threshold comparator (its own hash < target).  Each search is a
// list of nonces with chosen hashes; the expected report is worked out from
// the list: the first winning nonce gives one set_win with that nonce, a
// search with no winner gives one set_not_found after its last entry, and
// nothing else is reported.  Flush between searches must re-arm the FSM.  A
// hash arriving with no metadata entry must raise set_error.  Every hash and
// entry must be consumed as a pair, in order.
module output_ctrl_fsm_tb;
  import miner_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0;
  logic hash_valid, hash_ready, meta_empty, meta_rd, success;
  logic [255:0] hash, cmp_hash, cmp_target;
  meta_t meta_data;
  logic set_win, set_not_found, set_error;
  logic [31:0] win_nonce;
  int checks = 0, failures = 0;
  int n_win = 0, n_nf = 0, n_err = 0;
  logic [31:0] last_win;
  logic [255:0] hq [$];
  meta_t mq [$];
  bit offer = 0;

  output_ctrl_fsm dut (.*);

  assign success    = cmp_hash < cmp_target;
  assign hash_valid = offer && hq.size() > 0;
  assign hash       = hq.size() > 0 ? hq[0] : '0;
  assign meta_empty = mq.size() == 0;
  assign meta_data  = mq.size() > 0 ? mq[0] : '0;

  always #2 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) offer <= ($urandom % 3) != 0;

  always @(posedge clk) if (rst_n) begin
    if (hash_ready) begin
      checks++;
      if (!hash_valid) begin failures++; $display("FAIL pop without hash"); end
      if (meta_rd != (mq.size() > 0)) begin failures++; $display("FAIL pair pop"); end
    end
    if (set_win) begin n_win++; last_win = win_nonce; end
    if (set_not_found) n_nf++;
    if (set_error) n_err++;
  end
  // pop the models half a cycle after the edge where the FSM consumed them
  bit pop_h = 0, pop_m = 0;
  always @(posedge clk) if (rst_n) begin
    pop_h <= hash_ready;
    pop_m <= meta_rd;
  end
  always @(negedge clk) begin
    if (pop_h && hq.size() > 0) void'(hq.pop_front());
    if (pop_m && mq.size() > 0) void'(mq.pop_front());
    pop_h = 0; pop_m = 0;
  end

  // one search of n nonces from n0; win_at < 0: no winner
  task automatic search(input int n, input logic [31:0] n0, input int win_at, input int win2_at);
    logic [255:0] tgt;
    int exp_win, exp_nf;
    for (int w = 0; w < 8; w++) tgt[32*w +: 32] = $urandom;
    tgt[255:224] = 32'h8000_0000;
    @(negedge clk) flush = 1;
    @(negedge clk) flush = 0;
    n_win = 0; n_nf = 0;
    for (int i = 0; i < n; i++) begin
      logic [255:0] h;
      meta_t m;
      for (int w = 0; w < 8; w++) h[32*w +: 32] = $urandom;
      h[255] = (i == win_at || i == win2_at) ? 1'b0 : 1'b1;    // below / above target
      if (i == win_at || i == win2_at) h[254:224] = '0;
      m.nonce = n0 + 32'(i); m.target = tgt; m.last = (i == n - 1);
      mq.push_back(m);
      hq.push_back(h);
    end
    wait (hq.size() == 0);
    repeat (3) @(posedge clk);
    exp_win = win_at >= 0 ? 1 : 0;
    exp_nf  = win_at >= 0 ? 0 : 1;
    checks += 3;
    if (n_win != exp_win) begin failures++; $display("FAIL %0d winning reports", n_win); end
    if (n_nf != exp_nf) begin failures++; $display("FAIL %0d not-found reports", n_nf); end
    if (win_at >= 0 && last_win !== n0 + 32'(win_at)) begin
      failures++; $display("FAIL winning nonce %h exp %h", last_win, n0 + 32'(win_at));
    end
    checks++;
    if (mq.size() != 0) begin failures++; $display("FAIL metadata left"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    search(40, 32'h100, 17, 30);     // two winners, first one kept
    search(40, 32'h200, -1, -1);     // none: nonce not found
    search(25, 32'h300, 24, -1);     // winner is the last nonce
    search(10, 32'h400, 0, 5);
    search(60, 32'h500, -1, -1);
    // pairing error: a hash with no metadata
    checks++;
    if (n_err != 0) begin failures++; $display("FAIL early error"); end
    @(negedge clk) hq.push_back('1);
    wait (hq.size() == 0);
    repeat (3) @(posedge clk);
    checks++;
    if (n_err != 1) begin failures++; $display("FAIL error reported %0d times", n_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
