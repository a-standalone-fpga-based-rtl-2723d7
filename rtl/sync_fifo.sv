// Single-clock FIFO, used as the metadata FIFO of the miner: for every block
// header sent into the chain it holds the nonce, the target threshold and a
// flag marking the last nonce of the search, in the order the hashes will
// come out of the chain.  First-word-fall-through read (rd_data valid while
// empty is low), synchronous flush, depth 2**AW.  count gives the fill level.
// The paper names the FIFO and its contents; depth and structure are chosen
// here (the depth must cover every hash in flight in the chain).
module sync_fifo #(
  parameter int DW = 289,
  parameter int AW = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  output logic          full,
  input  logic          rd_en,
  output logic [DW-1:0] rd_data,
  output logic          empty,
  output logic [AW:0]   count
);
  logic [DW-1:0] mem [1 << AW];
  logic [AW:0]   wp, rp;

  assign count   = wp - rp;
  assign full    = count == (AW+1)'(1 << AW);
  assign empty   = count == '0;
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else if (flush) begin
      wp <= '0; rp <= '0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  always @(posedge clk) if (rst_n && !flush) begin
    assert (!(wr_en && full)) else $error("write to full FIFO");
    assert (!(rd_en && empty)) else $error("read from empty FIFO");
  end
endmodule
