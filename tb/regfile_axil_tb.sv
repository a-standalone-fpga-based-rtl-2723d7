// Self-checking testbench for regfile_axil.  An AXI4-Lite master written in
// the testbench writes all 30 writable registers with random data and reads
// everything back; the expected values are kept in a testbench array.  It
// checks that the header, target and maximum nonce outputs show the written
// words in the documented order, that byte strobes are honoured, that the
// status and winning-nonce registers ignore writes, that set/clear pulses
// from the miner side show up in the status word next to the version, and
// that start_clear clears the start bit.  Response channels are held off for
// random cycles (bready/rready low) to check that responses wait.  Every
// read must complete within 8 cycles after the address is accepted.
module regfile_axil_tb;
  import miner_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [6:0] s_axi_awaddr = '0, s_axi_araddr = '0;
  logic s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_rready = 0;
  logic s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [31:0] s_axi_wdata = '0, s_axi_rdata;
  logic [3:0] s_axi_wstrb = '0;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic start, start_clear = 0, status_clear = 0, set_win = 0, set_not_found = 0, set_error = 0;
  logic [639:0] header;
  logic [255:0] target;
  logic [31:0] max_nonce, win_nonce = '0;
  int checks = 0, failures = 0;
  logic [31:0] expv [32];

  regfile_axil #(.VERSION(16'hA5C3)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [6:0] a, input logic [31:0] d, input logic [3:0] strb);
    @(negedge clk);
    s_axi_awaddr = a; s_axi_awvalid = 1; s_axi_wdata = d; s_axi_wstrb = strb; s_axi_wvalid = 1;
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    s_axi_bready = 1;
    do @(posedge clk); while (!s_axi_bvalid);
    checks++;
    if (s_axi_bresp != 2'b00) begin failures++; $display("FAIL bresp"); end
    @(negedge clk) s_axi_bready = 0;
  endtask

  task automatic axi_read(input logic [6:0] a, output logic [31:0] d);
    int n;
    @(negedge clk);
    s_axi_araddr = a; s_axi_arvalid = 1;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk) s_axi_arvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    s_axi_rready = 1;
    n = 0;
    while (!s_axi_rvalid) begin @(posedge clk); n++; end
    @(posedge clk);
    d = s_axi_rdata;
    checks++;
    if (n > 8 || s_axi_rresp != 2'b00) begin failures++; $display("FAIL read slow or error"); end
    @(negedge clk) s_axi_rready = 0;
  endtask

  task automatic expect_reg(input logic [6:0] a, input logic [31:0] e, input string what);
    logic [31:0] d;
    axi_read(a, d);
    checks++;
    if (d !== e) begin failures++; $display("FAIL %s @%h: %h exp %h", what, a, d, e); end
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk) s = 1;
    @(negedge clk) s = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    expect_reg(ADDR_STATUS, 32'hA5C3_0000, "status after reset");
    // fill target, header, maximum nonce
    for (int i = 3; i < 32; i++) begin
      expv[i] = $urandom;
      axi_write(7'(4 * i), expv[i], 4'hF);
    end
    for (int i = 3; i < 32; i++) expect_reg(7'(4 * i), expv[i], "readback");
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (target[32*i +: 32] !== expv[3 + i]) begin failures++; $display("FAIL target word %0d", i); end
    end
    for (int i = 0; i < 20; i++) begin
      checks++;
      if (header[32*i +: 32] !== expv[11 + i]) begin failures++; $display("FAIL header word %0d", i); end
    end
    checks++;
    if (max_nonce !== expv[31]) begin failures++; $display("FAIL max nonce"); end
    // byte strobes
    axi_write(ADDR_MAXN, 32'h1122_3344, 4'b0101);
    expv[31] = {expv[31][31:24], 8'h22, expv[31][15:8], 8'h44};
    expect_reg(ADDR_MAXN, expv[31], "strobe");
    // read-only registers keep their value
    axi_write(ADDR_STATUS, 32'hFFFF_FFFF, 4'hF);
    axi_write(ADDR_WIN, 32'hFFFF_FFFF, 4'hF);
    expect_reg(ADDR_STATUS, 32'hA5C3_0000, "status write ignored");
    expect_reg(ADDR_WIN, 32'h0, "winning nonce write ignored");
    // start bit and its clearing by the miner
    axi_write(ADDR_CONTROL, 32'h1, 4'hF);
    @(negedge clk);
    checks++;
    if (!start) begin failures++; $display("FAIL start not set"); end
    expect_reg(ADDR_CONTROL, 32'h1, "control");
    pulse(start_clear);
    checks++;
    if (start) begin failures++; $display("FAIL start not cleared"); end
    expect_reg(ADDR_CONTROL, 32'h0, "control cleared");
    // status bits
    @(negedge clk) begin win_nonce = 32'hDEAD_BEEF; set_win = 1; end
    @(negedge clk) begin set_win = 0; win_nonce = 32'h0; end
    expect_reg(ADDR_STATUS, 32'hA5C3_0002, "winning nonce found");
    expect_reg(ADDR_WIN, 32'hDEAD_BEEF, "winning nonce");
    pulse(set_not_found);
    pulse(set_error);
    expect_reg(ADDR_STATUS, 32'hA5C3_0007, "all status bits");
    pulse(status_clear);
    expect_reg(ADDR_STATUS, 32'hA5C3_0000, "status cleared");
    expect_reg(ADDR_WIN, 32'hDEAD_BEEF, "winning nonce kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
