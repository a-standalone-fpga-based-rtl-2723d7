// Dual-clock FIFO placed between the hashing steps of the chain (and at its
// two ends), carrying data between clock domains with forward pressure
// (empty) and back pressure (full, plus a free-slot count for schedulers).
//
// Classic design: binary and Gray-coded read and write pointers, each Gray
// pointer brought into the other domain through two flip-flops.  The read
// side is first-word-fall-through: rd_data shows the oldest word whenever
// empty is low, and rd_en pops it.  wr_free is the number of slots the write
// side may still fill; it is conservative because the read pointer it uses is
// two cycles old.  Each side has a synchronous flush (wr_flush, rd_flush) that
// empties the FIFO from that side; the chain raises both long enough for
// both sides to settle.  Depth is 2**AW words.  The paper says only that
// asynchronous FIFOs with forward and back pressure are used; the structure
// is the standard one, chosen here.
module async_fifo #(
  parameter int DW = 256,
  parameter int AW = 4
) (
  input  logic          wr_clk,
  input  logic          wr_rst_n,
  input  logic          wr_flush,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  output logic          full,
  output logic [AW:0]   wr_free,
  input  logic          rd_clk,
  input  logic          rd_rst_n,
  input  logic          rd_flush,
  input  logic          rd_en,
  output logic [DW-1:0] rd_data,
  output logic          empty
);
  localparam int DEPTH = 1 << AW;

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wbin, wgray, rbin, rgray;
  logic [AW:0]   rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] g2b(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write side
  logic [AW:0] wbin_nxt, rbin_w;
  assign rbin_w   = g2b(rgray_w2);
  assign wr_free  = (AW+1)'(DEPTH) - (wbin - rbin_w);
  assign full     = (wbin - rbin_w) == (AW+1)'(DEPTH);
  assign wbin_nxt = wbin + (AW+1)'(wr_en && !full);

  always_ff @(posedge wr_clk) if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else if (wr_flush) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nxt;
      wgray    <= wbin_nxt ^ (wbin_nxt >> 1);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // read side
  logic [AW:0] rbin_nxt, wbin_r;
  assign wbin_r   = g2b(wgray_r2);
  assign empty    = (wbin_r == rbin);
  assign rbin_nxt = rbin + (AW+1)'(rd_en && !empty);
  assign rd_data  = mem[rbin[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else if (rd_flush) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nxt;
      rgray    <= rbin_nxt ^ (rbin_nxt >> 1);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  // handshake rules: never write when full, never read when empty
  always @(posedge wr_clk) if (wr_rst_n && !wr_flush) assert (!(wr_en && full)) else $error("write to full FIFO");
  always @(posedge rd_clk) if (rd_rst_n && !rd_flush) assert (!(rd_en && empty)) else $error("read from empty FIFO");
endmodule
