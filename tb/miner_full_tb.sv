// Full-size testbench: miner_top with every parameter at its default (the
// paper's core counts: BLAKE 1, Keccak 2, CubeHash 24 + 24, Lyra2 10,
// Skein 1, BMW 1; 1024-entry metadata FIFO) and the five clocks at the
// paper's frequencies (time unit 1 ps).  Acting as the mining software it
// runs two complete searches over AXI4-Lite:
//
//   search B: 160 nonces, target one above the smallest of their hashes;
//             the winning nonce (the 109th) must be reported.
//   search C: 40 nonces, target equal to the smallest hash: nonce not found.
//
// Expected values come from an independent software model of Lyra2REv2.
// During search B the testbench also times the chain output: once the
// pipeline is full, the hashes of the 160 nonces must leave at the chain's
// design rate of 31.25 MHash/s (the Keccak and CubeHash steps' combined
// throughput), i.e. 32 ns per hash; the measured rate over 120 hashes must lie
// within 3 % of it.
module miner_full_tb;
  logic clk_ctrl = 0, clk_bb = 0, clk_ks = 0, clk_cube = 0, clk_lyra2 = 0, rst_n = 0;
  logic [6:0] s_axi_awaddr = '0, s_axi_araddr = '0;
  logic s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_rready = 0;
  logic s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [31:0] s_axi_wdata = '0, s_axi_rdata;
  logic [3:0] s_axi_wstrb = '0;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  int checks = 0, failures = 0;

  always #2000 clk_ctrl  = ~clk_ctrl;     // 250 MHz, time unit 1 ps
  always #5000 clk_bb    = ~clk_bb;       // 100 MHz
  always #1333 clk_ks    = ~clk_ks;       // 375 MHz
  always #2000 clk_cube  = ~clk_cube;     // 250 MHz
  always #2222 clk_lyra2 = ~clk_lyra2;    // 225 MHz

  // ---------------- AXI4-Lite master (the software side)
  task automatic axi_write(input logic [6:0] a, input logic [31:0] d);
    @(negedge clk_ctrl);
    s_axi_awaddr = a; s_axi_awvalid = 1; s_axi_wdata = d; s_axi_wstrb = 4'hF; s_axi_wvalid = 1;
    s_axi_bready = 1;
    do @(posedge clk_ctrl); while (!(s_axi_awready && s_axi_wready));
    @(negedge clk_ctrl);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    while (!s_axi_bvalid) @(negedge clk_ctrl);
    @(negedge clk_ctrl) s_axi_bready = 0;
  endtask

  task automatic axi_read(input logic [6:0] a, output logic [31:0] d);
    @(negedge clk_ctrl);
    s_axi_araddr = a; s_axi_arvalid = 1; s_axi_rready = 1;
    do @(posedge clk_ctrl); while (!s_axi_arready);
    @(negedge clk_ctrl) s_axi_arvalid = 0;
    while (!s_axi_rvalid) @(negedge clk_ctrl);
    d = s_axi_rdata;
    @(negedge clk_ctrl) s_axi_rready = 0;
  endtask

  // write header, target and maximum nonce, then set the start bit
  task automatic new_block(input logic [639:0] hdr, input logic [255:0] tgt, input logic [31:0] mx);
    for (int i = 0; i < 8; i++)  axi_write(7'h0C + 7'(4 * i), tgt[32*i +: 32]);
    for (int i = 0; i < 20; i++) axi_write(7'h2C + 7'(4 * i), hdr[32*i +: 32]);
    axi_write(7'h7C, mx);
    axi_write(7'h04, 32'h1);
  endtask

  // poll the status register until one of the two result bits is set
  task automatic wait_result(output logic [31:0] st);
    do begin
      repeat (20) @(posedge clk_ctrl);
      axi_read(7'h00, st);
    end while (st[1:0] == 2'b00);
  endtask

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask
  localparam logic [639:0] B_HDR = 640'h0a000000ff93f67985fbe33b41bce5574b6c7aec951a14083e208600a7a453ec62d321a64d13c67af48b0c5be252652820c1a95cb1235d47dbadf0712271a5a4e581a2e46b36b14ac2f5ba7ff9cd81b7;
  localparam logic [255:0] B_TGT = 256'h0279c8c5160163627abf4588633fa4701da041f943fb151bbb147b95017fe30a;
  localparam logic [31:0]  B_MAX = 32'h0a00009f;
  localparam logic [31:0]  B_WIN = 32'h0a00006c;
  localparam logic [639:0] C_HDR = 640'h0b000000be7c9b547e99137ae60166530a867ce0a01c5b765a2260ea993c7e83c702af7f2400cc48969e4c2dd3dcf68aee96ddac47bdc2eccc84914d51165da5f0e66b271e9397a3d7d63652ecc33e13;
  localparam logic [255:0] C_TGT = 256'h0307e8d6fa00783ce9a7f48f04eb61bba98e9782a19d2982ee503cc230b731c7;
  localparam logic [31:0]  C_MAX = 32'h0b000027;
  localparam logic [31:0]  C_WIN = 32'h0b000012;

  miner_top dut (.*);

  initial begin
    #600_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // chain output timing
  int n_hash = 0;
  longint t_first = 0, t_last = 0;
  always @(posedge clk_ctrl) if (rst_n && dut.ch_out_valid && dut.ch_out_ready) begin
    n_hash++;
    if (n_hash == 30) t_first = $time;
    if (n_hash == 150) t_last = $time;
  end

  initial begin
    logic [31:0] st, d;
    real ns_per_hash;
    repeat (10) @(posedge clk_bb);
    rst_n = 1;
    repeat (10) @(posedge clk_bb);

    new_block(B_HDR, B_TGT, B_MAX);
    wait_result(st);
    expect_eq(st, 32'h0001_0002, "status after search B");
    axi_read(7'h08, d);
    expect_eq(d, B_WIN, "winning nonce of search B");
    wait (n_hash >= 150);
    ns_per_hash = real'(t_last - t_first) / 120.0 / 1000.0;
    $display("chain output: %0.2f ns per hash (%0.2f MHash/s)", ns_per_hash, 1000.0 / ns_per_hash);
    checks++;
    if (ns_per_hash < 32.0 * 0.97 || ns_per_hash > 32.0 * 1.03) begin
      failures++; $display("FAIL chain rate");
    end
    wait (dut.u_in.busy == 1'b0);
    repeat (3000) @(posedge clk_ctrl);

    new_block(C_HDR, C_TGT, C_MAX);
    wait_result(st);
    expect_eq(st, 32'h0001_0001, "status after search C");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
