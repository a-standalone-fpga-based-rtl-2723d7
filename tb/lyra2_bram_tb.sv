// Self-checking testbench for lyra2_bram (4 read / 2 write ports) with
// 64-bit words and the default depth of 130.  Every cycle random addresses
// are read on all four ports and up to two random writes are made, often to
// the addresses being read and sometimes both to the same word.  A
// testbench array is the reference: ports c and d must return the stored
// value (read-first), ports a and b the value being written in the same
// cycle if any (write-first, write port b taking precedence over a), and
// after a double write the word must hold port b's data.
module lyra2_bram_tb;
  localparam int WIDTH = 64, DEPTH = 130, AW = 8;
  logic clk = 0;
  logic [AW-1:0] addr_a = '0, addr_b = '0, addr_c = '0, addr_d = '0, waddr_a = '0, waddr_b = '0;
  logic [WIDTH-1:0] q_a, q_b, q_c, q_d, wdata_a = '0, wdata_b = '0;
  logic we_wa = 0, we_wb = 0;
  int checks = 0, failures = 0, n_fwd = 0, n_both = 0;
  logic [WIDTH-1:0] model [DEPTH];

  lyra2_bram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [AW-1:0] ra(input logic [AW-1:0] near);
    return ($urandom % 2) ? near : AW'($urandom % DEPTH);
  endfunction

  function automatic logic [WIDTH-1:0] fwd(input logic [AW-1:0] ad);
    if (we_wb && waddr_b == ad) return wdata_b;
    if (we_wa && waddr_a == ad) return wdata_a;
    return model[ad];
  endfunction

  initial begin
    // initialise every word through port b
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we_wb = 1; waddr_b = AW'(i); wdata_b = {$urandom, $urandom};
      model[i] = wdata_b;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we_wa = ($urandom % 3) != 0;
      we_wb = ($urandom % 3) != 0;
      waddr_a = AW'($urandom % DEPTH);
      waddr_b = ($urandom % 4 == 0) ? waddr_a : AW'($urandom % DEPTH);
      wdata_a = {$urandom, $urandom};
      wdata_b = {$urandom, $urandom};
      addr_a = ra(waddr_a); addr_b = ra(waddr_b); addr_c = ra(waddr_a); addr_d = ra(waddr_b);
      #1;
      checks += 4;
      if (q_a !== fwd(addr_a)) begin failures++; $display("FAIL port a"); end
      if (q_b !== fwd(addr_b)) begin failures++; $display("FAIL port b"); end
      if (q_c !== model[addr_c]) begin failures++; $display("FAIL port c"); end
      if (q_d !== model[addr_d]) begin failures++; $display("FAIL port d"); end
      if (fwd(addr_a) !== model[addr_a]) n_fwd++;
      if (we_wa && we_wb && waddr_a == waddr_b) n_both++;
      @(posedge clk);
      if (we_wa) model[waddr_a] = wdata_a;
      if (we_wb) model[waddr_b] = wdata_b;
    end
    @(negedge clk) begin we_wa = 0; we_wb = 0; end
    for (int i = 0; i < DEPTH; i++) begin
      addr_c = AW'(i);
      #1;
      checks++;
      if (q_c !== model[i]) begin failures++; $display("FAIL final word %0d", i); end
    end
    checks++;
    if (n_fwd == 0 || n_both == 0) begin failures++; $display("FAIL cases not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
