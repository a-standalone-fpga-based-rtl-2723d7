// Self-checking testbench for sync_fifo (the metadata FIFO), at a small depth
// (AW = 3, 8 entries) and 40-bit words.  Random writes and reads, a queue in
// the testbench as reference model: every word read must be the oldest one
// written, full/empty/count must match the model's fill level, and writes
// while full are never attempted.  A flush in the middle must empty it.  The
// fill-level and full-flag checks make the FIFO overflow path visible.
module sync_fifo_tb;
  localparam int DW = 40, AW = 3;
  logic clk = 0, rst_n = 0, flush = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [DW-1:0] wr_data = '0, rd_data;
  logic [AW:0] count;
  int checks = 0, failures = 0, n_full = 0;
  logic [DW-1:0] model [$];

  sync_fifo #(.DW(DW), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit do_wr, input bit do_rd, input bit do_flush);
    @(negedge clk);
    // compare state with the model
    checks += 3;
    if (count != (AW+1)'(model.size())) begin failures++; $display("FAIL count %0d model %0d", count, model.size()); end
    if (empty != (model.size() == 0))   begin failures++; $display("FAIL empty"); end
    if (full != (model.size() == 2**AW)) begin failures++; $display("FAIL full"); end
    if (full) n_full++;
    if (!empty && model.size() > 0) begin
      checks++;
      if (rd_data !== model[0]) begin failures++; $display("FAIL data %h exp %h", rd_data, model[0]); end
    end
    flush   = do_flush;
    wr_en   = do_wr && !full;
    rd_en   = do_rd && !empty;
    wr_data = {$urandom, 8'($urandom)};
    @(posedge clk);
    #1;
    if (do_flush) model.delete();
    else begin
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    wr_en = 0; rd_en = 0; flush = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      int bias;
      bias = (i / 100) % 2 == 0 ? 75 : 25;     // phases of filling and draining
      step(($urandom % 100) < bias, ($urandom % 100) >= bias, i == 333);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
