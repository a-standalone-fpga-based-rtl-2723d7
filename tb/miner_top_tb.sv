// End-to-end testbench of miner_top at reduced core counts (Keccak 2,
// CubeHash 3 per step, Lyra2 2, others 1) and an 8-entry metadata FIFO, with
// the five clocks at the paper's frequencies.  The testbench acts as the
// mining software: it writes a block over AXI4-Lite, sets the start bit and
// polls the status register.
//
//   search A: long range, target 0 (no winner); interrupted after 14 us by
//             search B, which must flush it away.
//   search B: 12 nonces, target one above the smallest of their hashes, so
//             exactly one nonce wins; it is not the last one, so later
//             hashes are drained after the win.
//   search C: 10 nonces ending at 0xFFFFFFF9, target equal to the smallest
//             hash, so nothing is strictly below it: nonce not found.
//
// Expected winning nonces and targets come from an independent software
// model of Lyra2REv2.  The testbench counts how often each mechanism of the
// design happened and fails if one never did: pipeline flush on a new
// search, winning nonce found, nonce not found, back pressure from the chain
// input, metadata FIFO full, a Lyra2 row collision (the written row equals
// the random row), use of every core of a replicated step, hashes drained
// after a win.  The error bit must never be set.
module miner_top_tb;
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
  localparam logic [639:0] B_HDR = 640'h00001200bdbb60fbce3d46706566ef134ba10e6c84e0ef3e6dcaf68ad0c12c3d71077ee9b56abe7dc11a09dcb9eca4073ad90b7700a9292c77a7f76dd08bea05e98dfa1e568477d0013a94ca62c58563;
  localparam logic [255:0] B_TGT = 256'h1811914fa8dfaa91d3a63efc42726c9508dbd3f169a3e5c90bfdc7e599a610b2;
  localparam logic [31:0]  B_MAX = 32'h0000120b;
  localparam logic [31:0]  B_WIN = 32'h00001208;
  localparam logic [639:0] C_HDR = 640'hfffffff0029d952670405c99964df0f9f5c8ed733cadb8448ce199f1e9d616e27c5f401760eaaaf70e315c54d7db21613046b2aab8f07272980ac60824355120b3ee6785b2c9e22935f34944d7f886c9;
  localparam logic [255:0] C_TGT = 256'h02d7701f007d6f6f1c79bb4ee11e86ad65df2c70e069dd81aed99ac8d9d5fe13;
  localparam logic [31:0]  C_MAX = 32'hfffffff9;
  localparam logic [31:0]  C_WIN = 32'hfffffff3;
  localparam logic [639:0] A_HDR = {32'h0000_0100, {19{32'h1234_5678}}};

  miner_top #(.N_KECCAK(2), .N_CUBE1(3), .N_LYRA2(2), .N_CUBE2(3), .META_AW(3)) dut (.*);

  initial begin
    #400_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters
  int n_flush = 0, n_win = 0, n_nf = 0, n_err = 0, n_chain_bp = 0, n_meta_full = 0;
  int n_collide = 0, n_drained = 0;
  int n_cube_core [3];
  logic flush_d = 0;
  always @(posedge clk_ctrl) if (rst_n) begin
    flush_d <= dut.flush;
    if (dut.flush && !flush_d) n_flush++;
    if (dut.set_win) n_win++;
    if (dut.set_not_found) n_nf++;
    if (dut.set_error) n_err++;
    if (dut.ch_in_valid && !dut.ch_in_ready) n_chain_bp++;
    if (dut.u_in.state == dut.u_in.S_RUN && dut.meta_full) n_meta_full++;
    if (dut.meta_rd && dut.u_out.done) n_drained++;
  end
  always @(posedge clk_lyra2) if (rst_n) begin
    if (dut.u_chain.g_lyra2[0].u_core.collide) n_collide++;
    if (dut.u_chain.g_lyra2[1].u_core.collide) n_collide++;
  end
  always @(posedge clk_cube) if (rst_n) begin
    if (dut.u_chain.g_cube1[0].u_core.in_valid) n_cube_core[0]++;
    if (dut.u_chain.g_cube1[1].u_core.in_valid) n_cube_core[1]++;
    if (dut.u_chain.g_cube1[2].u_core.in_valid) n_cube_core[2]++;
  end

  task automatic mechanism(input int n, input string what);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL %s never happened", what); end
  endtask

  initial begin
    logic [31:0] st, d;
    repeat (10) @(posedge clk_bb);
    rst_n = 1;
    repeat (10) @(posedge clk_bb);
    axi_read(7'h00, st);
    expect_eq(st, 32'h0001_0000, "status after reset");

    // search A, interrupted
    new_block(A_HDR, '0, 32'hFFFF_FFFF);
    #14_000_000;
    axi_read(7'h00, st);
    expect_eq(st, 32'h0001_0000, "status during search A");

    // search B: one winner
    new_block(B_HDR, B_TGT, B_MAX);
    axi_read(7'h04, d);
    expect_eq(d, 32'h0, "start bit cleared by the miner");
    wait_result(st);
    expect_eq(st, 32'h0001_0002, "status after search B");
    axi_read(7'h08, d);
    expect_eq(d, B_WIN, "winning nonce of search B");
    wait (dut.u_in.busy == 1'b0);
    repeat (4000) @(posedge clk_ctrl);      // let the remaining hashes drain

    // search C: nothing strictly below the target
    new_block(C_HDR, C_TGT, C_MAX);
    wait_result(st);
    expect_eq(st, 32'h0001_0001, "status after search C");
    repeat (200) @(posedge clk_ctrl);
    axi_read(7'h00, st);
    expect_eq(st, 32'h0001_0001, "status stays after search C");

    $display("mechanisms:");
    mechanism(n_flush,        "pipeline flush (new search)");
    mechanism(n_win,          "winning nonce found");
    mechanism(n_nf,           "nonce not found");
    mechanism(n_chain_bp,     "chain input back pressure");
    mechanism(n_meta_full,    "metadata FIFO full");
    mechanism(n_collide,      "Lyra2 row collision");
    mechanism(n_drained,      "hashes drained after a win");
    mechanism(n_cube_core[0], "CubeHash core 0 used");
    mechanism(n_cube_core[1], "CubeHash core 1 used");
    mechanism(n_cube_core[2], "CubeHash core 2 used");
    checks += 3;
    if (n_flush != 3) begin failures++; $display("FAIL %0d flushes", n_flush); end
    if (n_win != 1 || n_nf != 1) begin failures++; $display("FAIL %0d wins %0d not-found", n_win, n_nf); end
    if (n_err != 0) begin failures++; $display("FAIL error bit raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
