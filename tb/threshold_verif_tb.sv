// Self-checking testbench for threshold_verif.  Random hash/target pairs, and
// pairs that differ only in one 32-bit word or are equal, are applied; the
// expected result comes from a word-by-word comparison from the most
// significant word down, written independently of the 256-bit comparator.
// Equal values must not succeed (the check is strict).  Combinational block:
// the result is sampled 1 ns after the inputs change.
module threshold_verif_tb;
  logic [255:0] hash, target;
  logic success;
  int checks = 0, failures = 0;

  threshold_verif dut (.*);

  function automatic logic less(input logic [255:0] a, input logic [255:0] b);
    for (int w = 7; w >= 0; w--) begin
      if (a[32*w +: 32] < b[32*w +: 32]) return 1'b1;
      if (a[32*w +: 32] > b[32*w +: 32]) return 1'b0;
    end
    return 1'b0;
  endfunction

  task automatic check(input logic [255:0] h, input logic [255:0] t);
    hash = h; target = t;
    #1;
    checks++;
    if (success !== less(h, t)) begin
      failures++;
      $display("FAIL hash=%h target=%h success=%b", h, t, success);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [255:0] h, t;
    for (int i = 0; i < 200; i++) begin
      for (int w = 0; w < 8; w++) begin
        h[32*w +: 32] = $urandom;
        t[32*w +: 32] = $urandom;
      end
      check(h, t);
      check(h, h);                        // equal: never a success
      t = h; t[32*(i%8) +: 32] = h[32*(i%8) +: 32] + 1;   // differs in one word
      check(h, t);
      check(t, h);
    end
    check('0, '0);
    check('0, 256'd1);
    check({256{1'b1}}, {256{1'b1}});
    check({1'b0, {255{1'b1}}}, {1'b1, 255'd0});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
