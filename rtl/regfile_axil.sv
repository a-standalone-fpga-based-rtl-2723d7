// Register file between the processing system and the miner logic, with its
// memory-mapped AXI4-Lite adapter (32-bit data, 7-bit byte address).
//
//   0x00 Status   RO  [31:16] version, [2] error, [1] winning nonce found,
//                     [0] nonce not found
//   0x04 Control  RW  [0] start new block (cleared by the miner when taken)
//   0x08 Winning nonce RO
//   0x0C..0x28 Target threshold, 8 words, 0x0C = least significant
//   0x2C..0x78 Block header, 20 words (bytes 4i..4i+3 of the header at
//              0x2C + 4i, little endian; the nonce is the word at 0x78)
//   0x7C Maximum nonce
//
// The map and the status/control bits are the paper's.  Write and read
// channels are independent; a write needs address and data, both are taken
// in the same cycle and answered with OKAY; byte strobes are honoured.  The
// version number, the strobe handling and the way the miner sets and clears
// bits (one-cycle pulses below) are this design's.  The two low address
// bits are ignored (word accesses).  Status bits are set by
// the output control FSM and cleared when a new search starts.
module regfile_axil
  import miner_pkg::*;
#(
  parameter logic [15:0] VERSION = 16'h0001
) (
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Lite slave
  input  logic [6:0]   s_axi_awaddr,
  input  logic         s_axi_awvalid,
  output logic         s_axi_awready,
  input  logic [31:0]  s_axi_wdata,
  input  logic [3:0]   s_axi_wstrb,
  input  logic         s_axi_wvalid,
  output logic         s_axi_wready,
  output logic [1:0]   s_axi_bresp,
  output logic         s_axi_bvalid,
  input  logic         s_axi_bready,
  input  logic [6:0]   s_axi_araddr,
  input  logic         s_axi_arvalid,
  output logic         s_axi_arready,
  output logic [31:0]  s_axi_rdata,
  output logic [1:0]   s_axi_rresp,
  output logic         s_axi_rvalid,
  input  logic         s_axi_rready,
  // miner side
  output logic         start,
  input  logic         start_clear,
  output logic [639:0] header,
  output logic [255:0] target,
  output logic [31:0]  max_nonce,
  input  logic         status_clear,
  input  logic         set_win,
  input  logic [31:0]  win_nonce,
  input  logic         set_not_found,
  input  logic         set_error
);
  logic [31:0] regs [32];
  logic        st_n, st_w, st_e;
  logic [31:0] win_q;

  // ---------------- write channel
  logic do_wr;
  logic [4:0] widx;
  assign do_wr         = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = do_wr;
  assign s_axi_wready  = do_wr;
  assign s_axi_bresp   = 2'b00;
  assign widx          = s_axi_awaddr[6:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
      s_axi_bvalid <= 1'b0;
    end else begin
      if (do_wr) begin
        s_axi_bvalid <= 1'b1;
        if (widx != ADDR_STATUS[6:2] && widx != ADDR_WIN[6:2])
          for (int b = 0; b < 4; b++)
            if (s_axi_wstrb[b]) regs[widx][8*b +: 8] <= s_axi_wdata[8*b +: 8];
      end else if (s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
      if (start_clear && !(do_wr && widx == ADDR_CONTROL[6:2]))
        regs[ADDR_CONTROL[6:2]][CT_START] <= 1'b0;
    end
  end

  // ---------------- status and winning nonce
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_n <= 1'b0; st_w <= 1'b0; st_e <= 1'b0; win_q <= '0;
    end else if (status_clear) begin
      st_n <= 1'b0; st_w <= 1'b0; st_e <= 1'b0;
    end else begin
      if (set_win) begin st_w <= 1'b1; win_q <= win_nonce; end
      if (set_not_found) st_n <= 1'b1;
      if (set_error) st_e <= 1'b1;
    end
  end

  // ---------------- read channel
  logic [31:0] rd_val;
  always_comb begin
    case (s_axi_araddr[6:2])
      ADDR_STATUS[6:2]: begin
        rd_val = {VERSION, 16'h0};
        rd_val[ST_ERROR]     = st_e;
        rd_val[ST_WIN_FOUND] = st_w;
        rd_val[ST_NOT_FOUND] = st_n;
      end
      ADDR_WIN[6:2]:    rd_val = win_q;
      default:          rd_val = regs[s_axi_araddr[6:2]];
    endcase
  end
  assign s_axi_arready = !s_axi_rvalid;
  assign s_axi_rresp   = 2'b00;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0; s_axi_rdata <= '0;
    end else if (s_axi_arvalid && s_axi_arready) begin
      s_axi_rvalid <= 1'b1; s_axi_rdata <= rd_val;
    end else if (s_axi_rready) begin
      s_axi_rvalid <= 1'b0;
    end
  end

  // ---------------- miner side views
  assign start = regs[ADDR_CONTROL[6:2]][CT_START];
  always_comb begin
    for (int i = 0; i < 8; i++)  target[32*i +: 32] = regs[ADDR_TARGET[6:2] + 5'(i)];
    for (int i = 0; i < 20; i++) header[32*i +: 32] = regs[ADDR_HEADER[6:2] + 5'(i)];
  end
  assign max_nonce = regs[ADDR_MAXN[6:2]];

  // AXI rule: a response stays valid until taken
  always @(posedge clk) if (rst_n) begin
    assert (!($past(rst_n) && $past(s_axi_bvalid) && !$past(s_axi_bready)) || s_axi_bvalid)
      else $error("bvalid dropped before bready");
    assert (!($past(rst_n) && $past(s_axi_rvalid) && !$past(s_axi_rready)) || s_axi_rvalid)
      else $error("rvalid dropped before rready");
  end
endmodule
