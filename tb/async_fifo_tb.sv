// Self-checking testbench for async_fifo (AW = 3, 8 words of 48 bits).  The
// write clock has a 6 ns period, the read clock 14 ns in the first phase and
// 4 ns in the second, so both the filling (back pressure, full) and the
// draining direction are exercised.  The writer writes whenever full is low
// (with random gaps), the reader pops at random when empty is low; a queue is
// the reference model: every word must arrive once, in order, unchanged.
// wr_free may never promise more room than is really left.  Between the
// phases traffic stops and both sides are flushed; the FIFO must come back
// empty and then carry data again.
module async_fifo_tb;
  localparam int DW = 48, AW = 3;
  logic wr_clk = 0, rd_clk = 0, rst_n = 0;
  logic wr_flush = 0, rd_flush = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [DW-1:0] wr_data = '0, rd_data;
  logic [AW:0] wr_free;
  int checks = 0, failures = 0, n_full = 0, n_rd = 0, n_wr = 0;
  int rd_half = 7;
  logic [DW-1:0] model [$];
  bit run_wr = 0, run_rd = 0;

  async_fifo #(.DW(DW), .AW(AW)) dut (
    .wr_clk, .wr_rst_n(rst_n), .wr_flush, .wr_en, .wr_data, .full, .wr_free,
    .rd_clk, .rd_rst_n(rst_n), .rd_flush, .rd_en, .rd_data, .empty);

  always #3 wr_clk = ~wr_clk;
  always begin #(rd_half) rd_clk = ~rd_clk; end

  initial begin
    #400000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  always @(negedge wr_clk) begin
    wr_en <= 1'b0;
    if (run_wr && !full && ($urandom % 4 != 0)) begin
      wr_en   <= 1'b1;
      wr_data <= {$urandom, 16'($urandom)};
    end
  end
  always @(posedge wr_clk) if (rst_n && !wr_flush) begin
    checks++;
    if (int'(wr_free) > 2**AW - model.size()) begin
      failures++; $display("FAIL wr_free %0d with %0d stored", wr_free, model.size());
    end
    if (full) n_full++;
    if (wr_en) begin model.push_back(wr_data); n_wr++; end
  end

  // reader
  always @(negedge rd_clk) rd_en <= run_rd && !empty && ($urandom % 3 != 0);
  always @(posedge rd_clk) if (rd_en) begin
    checks++;
    n_rd++;
    if (model.size() == 0) begin failures++; $display("FAIL read with model empty"); end
    else begin
      if (rd_data !== model[0]) begin failures++; $display("FAIL data %h exp %h", rd_data, model[0]); end
      void'(model.pop_front());
    end
  end

  initial begin
    #50 rst_n = 1;
    for (int ph = 0; ph < 2; ph++) begin
      run_wr = 1; run_rd = 1;
      #20000;
      run_rd = 0;
      #1000;                            // words are left in the FIFO
      run_wr = 0;
      #200;
      // flush both sides for a while, then start again from empty
      wr_flush = 1; rd_flush = 1;
      model.delete();
      #200;
      wr_flush = 0; rd_flush = 0;
      #200;
      checks++;
      if (!empty || full) begin failures++; $display("FAIL not empty after flush"); end
      rd_half = 2;
    end
    checks += 2;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    if (n_rd < 500) begin failures++; $display("FAIL only %0d words", n_rd); end
    $display("words %0d, full cycles %0d", n_rd, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
