// Self-checking testbench for input_ctrl_fsm at its default flush length.
// The testbench plays the register file (start bit cleared on start_clear),
// the chain (random in_ready) and the metadata FIFO (random full).  For each
// search it checks that flush is high for exactly FLUSH_CYCLES cycles, that
// the pushed headers carry the nonces start, start+1, ..., max in order with
// the rest of the header unchanged, that each metadata entry matches its
// header (same nonce, the target, last only on the final nonce), that
// nothing is pushed while the chain or the FIFO refuses, and that the FSM
// goes idle after the maximum nonce.  A second start in the middle of a
// search must flush and restart from the new header.  A search whose start
// nonce lies above the maximum sends exactly one header.
module input_ctrl_fsm_tb;
  import miner_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, start_clear, status_clear, flush;
  logic [639:0] header = '0;
  logic [255:0] target = '0;
  logic [31:0] max_nonce = '0;
  logic chain_valid, chain_ready = 0, meta_wr, meta_full = 0, busy;
  logic [639:0] chain_data;
  meta_t meta_data;
  int checks = 0, failures = 0;
  int flush_len = 0, n_push = 0, n_stall = 0;
  logic [31:0] exp_nonce, exp_max;
  logic [607:0] exp_rest;
  logic [255:0] exp_tgt;
  bit pushing_done = 0;

  input_ctrl_fsm dut (.*);

  always #2 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // register-file start bit
  always @(posedge clk) if (start_clear) start <= 1'b0;
  // chain and FIFO acceptance
  always @(negedge clk) begin
    chain_ready <= ($urandom % 4) != 0;
    meta_full   <= ($urandom % 8) == 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (flush) flush_len++;
    if (chain_valid && !(chain_ready && !meta_full)) n_stall++;
    if (meta_wr) begin
      checks += 2;
      if (!(chain_valid && chain_ready) || meta_full) begin
        failures++; $display("FAIL push without acceptance");
      end
      if (chain_data[639:608] !== exp_nonce || chain_data[607:0] !== exp_rest ||
          meta_data.nonce !== exp_nonce || meta_data.target !== exp_tgt ||
          meta_data.last !== (exp_nonce == exp_max)) begin
        failures++;
        $display("FAIL push nonce %h exp %h last %b", chain_data[639:608], exp_nonce, meta_data.last);
      end
      n_push++;
      exp_nonce++;
    end
  end

  task automatic new_search(input logic [31:0] n0, input logic [31:0] nmax);
    @(negedge clk);
    for (int w = 0; w < 19; w++) header[32*w +: 32] = $urandom;
    header[639:608] = n0;
    for (int w = 0; w < 8; w++) target[32*w +: 32] = $urandom;
    max_nonce = nmax;
    start = 1;
    flush_len = 0;
    @(posedge flush);
    @(negedge flush);
    #1;
    checks++;
    if (flush_len != 32) begin failures++; $display("FAIL flush held %0d cycles", flush_len); end
    exp_nonce = n0; exp_max = nmax; exp_rest = header[607:0]; exp_tgt = target;
    n_push = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // complete search of 100 nonces
    new_search(32'h1000_0000, 32'h1000_0063);
    wait (!busy);
    checks++;
    if (n_push != 100) begin failures++; $display("FAIL %0d headers pushed", n_push); end
    repeat (20) @(posedge clk);
    checks++;
    if (n_push != 100) begin failures++; $display("FAIL pushed while idle"); end
    // search interrupted by a new one, which wraps through 0xFFFFFFFF
    new_search(32'h0000_0005, 32'h0000_2000);
    repeat (60) @(posedge clk);
    new_search(32'hFFFF_FFF0, 32'hFFFF_FFFF);
    wait (!busy);
    checks++;
    if (n_push != 16) begin failures++; $display("FAIL %0d headers pushed after restart", n_push); end
    // start above the maximum: one header only
    new_search(32'h0000_0100, 32'h0000_0010);
    exp_max = 32'h0000_0100;
    wait (!busy);
    checks++;
    if (n_push != 1) begin failures++; $display("FAIL %0d headers pushed (start > max)", n_push); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
