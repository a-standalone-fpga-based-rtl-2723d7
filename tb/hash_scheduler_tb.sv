// Self-checking testbench for hash_scheduler with N = 3 cores and an
// 8-entry downstream FIFO.  The cores are testbench models with a fixed
// latency of 7 cycles that accept a new word at most every 5 cycles (like
// the iterative hash cores); a core's result is its input XOR a constant.
// The upstream FIFO is a queue filled at random, the downstream FIFO a
// queue drained slowly at random, so the scheduler is often blocked by an
// empty input, by busy cores and by a full output.  Checks: every result
// arrives once and in input order, the downstream FIFO is never written
// when full, no core is given a word while busy, all cores get work, and a
// flush in the middle empties the scheduler (no result of a word taken
// before the flush comes out after it).
module hash_scheduler_tb;
  localparam int N = 3, W = 32, FAW = 3, LAT = 7, GAP = 5;
  localparam logic [W-1:0] KEY = 32'h5A5A_0F0F;
  logic clk = 0, rst_n = 0, flush = 0;
  logic up_empty, up_rd, dn_wr;
  logic [W-1:0] up_data, core_in_data, dn_data;
  logic [N-1:0] core_in_valid, core_in_ready, core_out_valid;
  logic [N-1:0][W-1:0] core_out_data;
  logic [FAW:0] dn_free;
  int checks = 0, failures = 0;
  int n_out = 0, n_full_block = 0;
  int use_cnt [N];
  logic [W-1:0] upq [$], dnq [$], expq [$];
  bit feeding = 1;

  hash_scheduler #(.N(N), .IW(W), .OW(W), .FAW(FAW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // core models
  for (genvar c = 0; c < N; c++) begin : g_core
    logic [W-1:0] pipe [LAT];
    logic         pv [LAT];
    int           since;
    assign core_in_ready[c]  = (since >= GAP) && !flush;
    assign core_out_valid[c] = pv[LAT-1];
    assign core_out_data[c]  = pipe[LAT-1];
    initial begin since = GAP; for (int i = 0; i < LAT; i++) pv[i] = 0; end
    always @(posedge clk) begin
      if (core_in_valid[c]) begin
        checks++;
        if (!core_in_ready[c]) begin failures++; $display("FAIL word to busy core %0d", c); end
        use_cnt[c]++;
      end
      for (int i = LAT - 1; i > 0; i--) begin pipe[i] <= pipe[i-1]; pv[i] <= pv[i-1] && !flush; end
      pipe[0] <= core_in_data ^ KEY;
      pv[0]   <= core_in_valid[c] && !flush;
      since   <= (core_in_valid[c] || flush) ? 1 : since + 1;
    end
  end

  assign up_empty = upq.size() == 0;
  assign up_data  = up_empty ? '0 : upq[0];
  assign dn_free  = (FAW+1)'((1 << FAW) - dnq.size());

  always @(posedge clk) if (rst_n) begin
    if (dn_wr) begin
      checks += 2;
      if (dnq.size() >= (1 << FAW)) begin failures++; $display("FAIL write to full downstream FIFO"); end
      if (expq.size() == 0 || dn_data !== expq[0]) begin
        failures++; $display("FAIL result %h", dn_data);
      end
      if (expq.size() > 0) void'(expq.pop_front());
      n_out++;
    end
    if (!up_empty && !up_rd && dn_free == 0) n_full_block++;
  end
  // queue updates after the edge
  always @(negedge clk) if (rst_n) begin
    if (dn_wr_q) dnq.push_back(dn_data_q);
    if (up_rd_q) begin expq.push_back(upq[0] ^ KEY); void'(upq.pop_front()); end
    if (dnq.size() > 0 && ($urandom % 4 == 0)) void'(dnq.pop_front());
    if (feeding && $urandom % 2 == 0 && upq.size() < 16) upq.push_back($urandom);
  end
  logic dn_wr_q = 0, up_rd_q = 0;
  logic [W-1:0] dn_data_q;
  always @(posedge clk) begin dn_wr_q <= dn_wr; up_rd_q <= up_rd; dn_data_q <= dn_data; end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (1500) @(posedge clk);
    // flush: everything in flight is dropped
    @(negedge clk) flush = 1;
    repeat (3) @(negedge clk);
    expq.delete(); upq.delete(); dnq.delete();
    flush = 0;
    repeat (1500) @(posedge clk);
    feeding = 0;
    repeat (200) @(posedge clk);
    checks += 3;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    if (n_full_block == 0) begin failures++; $display("FAIL downstream never full"); end
    for (int c = 0; c < N; c++) if (use_cnt[c] < 50) begin failures++; $display("FAIL core %0d used %0d times", c, use_cnt[c]); end
    $display("results %0d, cycles blocked by full output %0d", n_out, n_full_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
