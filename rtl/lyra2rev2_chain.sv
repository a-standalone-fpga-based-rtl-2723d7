// The Lyra2REv2 chained hash in hardware: BLAKE-256 -> Keccak-256 ->
// CubeHash-256 -> Lyra2 -> Skein-256 -> CubeHash-256 -> BMW-256.
//
// Every step is a hash_scheduler with N_x replicated cores of one kind, and
// the steps are joined by async_fifo instances, one before the first step,
// one between each pair of steps and one after the last.  The FIFOs cross the
// clock domains: the control domain (clk_ctrl) writes 640-bit block headers
// into the first FIFO and reads 256-bit hashes from the last; BLAKE and BMW run
// on clk_bb, Keccak and Skein on clk_ks, both CubeHash steps on clk_cube and
// Lyra2 on clk_lyra2.  Hashes leave the chain in the order their headers went
// in (each step keeps order, see hash_scheduler).  flush (control domain,
// level) is synchronised into every domain and empties every FIFO, scheduler
// and core; the caller holds it long enough for the slowest domain to see
// it for several of its own cycles (input_ctrl_fsm holds it 32 cycles).
//
// Default core counts per step are the paper's (1, 2, 24, 10, 1, 24, 1; see
// its throughput table).  Each FIFO is deep enough to take every result its
// step can have in flight (a scheduler only starts a hash when the result
// will fit), so a step never idles for lack of FIFO space.  The domain
// grouping follows the paper's clock plan; FIFO depths are this design's.
module lyra2rev2_chain #(
  parameter int N_BLAKE  = 1,
  parameter int N_KECCAK = 2,
  parameter int N_CUBE1  = 24,
  parameter int N_LYRA2  = 10,
  parameter int N_SKEIN  = 1,
  parameter int N_CUBE2  = 24,
  parameter int N_BMW    = 1
) (
  input  logic         clk_ctrl,
  input  logic         clk_bb,
  input  logic         clk_ks,
  input  logic         clk_cube,
  input  logic         clk_lyra2,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [639:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [255:0] out_data
);
  function automatic int clog2p(input int n);   // address width for >= n words
    int a;
    a = 2;
    while ((1 << a) < n) a++;
    return a;
  endfunction

  // results each step can have in flight, and the depth of its output FIFO
  localparam int AW0 = 2;                          // header FIFO
  localparam int AW1 = clog2p(56 * N_BLAKE + 4);   // after BLAKE (56-stage pipeline)
  localparam int AW2 = clog2p(N_KECCAK + 4);       // after Keccak
  localparam int AW3 = clog2p(N_CUBE1 + 4);        // after CubeHash 1
  localparam int AW4 = clog2p(8 * N_LYRA2 + 4);    // after Lyra2 (8 hashes per core)
  localparam int AW5 = clog2p(2 * N_SKEIN + 4);    // after Skein (two UBI engines)
  localparam int AW6 = clog2p(N_CUBE2 + 4);        // after CubeHash 2
  localparam int AW7 = clog2p(18 * N_BMW + 4);     // after BMW (18-stage pipeline)

  // flush in every domain
  logic fl_bb, fl_ks, fl_cube, fl_ly;
  sync2 u_fl_bb   (.clk(clk_bb),    .rst_n(rst_n), .d(flush), .q(fl_bb));
  sync2 u_fl_ks   (.clk(clk_ks),    .rst_n(rst_n), .d(flush), .q(fl_ks));
  sync2 u_fl_cube (.clk(clk_cube),  .rst_n(rst_n), .d(flush), .q(fl_cube));
  sync2 u_fl_ly   (.clk(clk_lyra2), .rst_n(rst_n), .d(flush), .q(fl_ly));

  // ---------------- FIFO 0: control -> BLAKE
  logic         f0_full, f0_empty, f0_rd;
  logic [639:0] f0_rdata;
  logic [AW0:0] f0_free;
  async_fifo #(.DW(640), .AW(AW0)) u_f0 (
    .wr_clk(clk_ctrl), .wr_rst_n(rst_n), .wr_flush(flush), .wr_en(in_valid && !f0_full),
    .wr_data(in_data), .full(f0_full), .wr_free(f0_free),
    .rd_clk(clk_bb), .rd_rst_n(rst_n), .rd_flush(fl_bb), .rd_en(f0_rd),
    .rd_data(f0_rdata), .empty(f0_empty));
  assign in_ready = !f0_full && !flush;

  // ---------------- step 1: BLAKE (clk_bb) -> FIFO 1 -> Keccak
  logic         f1_wr, f1_full, f1_empty, f1_rd;
  logic [255:0] f1_wdata, f1_rdata;
  logic [AW1:0] f1_free;
  logic [N_BLAKE-1:0] bl_iv, bl_ir, bl_ov;
  logic [639:0]       bl_id;
  logic [N_BLAKE-1:0][255:0] bl_od;
  hash_scheduler #(.N(N_BLAKE), .IW(640), .OW(256), .FAW(AW1)) u_s_blake (
    .clk(clk_bb), .rst_n(rst_n), .flush(fl_bb),
    .up_empty(f0_empty), .up_data(f0_rdata), .up_rd(f0_rd),
    .core_in_valid(bl_iv), .core_in_ready(bl_ir), .core_in_data(bl_id),
    .core_out_valid(bl_ov), .core_out_data(bl_od),
    .dn_wr(f1_wr), .dn_data(f1_wdata), .dn_free(f1_free));
  for (genvar i = 0; i < N_BLAKE; i++) begin : g_blake
    blake256_core u_core (.clk(clk_bb), .rst_n(rst_n), .flush(fl_bb),
      .in_valid(bl_iv[i]), .in_ready(bl_ir[i]), .in_data(bl_id),
      .out_valid(bl_ov[i]), .out_data(bl_od[i]));
  end
  async_fifo #(.DW(256), .AW(AW1)) u_f1 (
    .wr_clk(clk_bb), .wr_rst_n(rst_n), .wr_flush(fl_bb), .wr_en(f1_wr),
    .wr_data(f1_wdata), .full(f1_full), .wr_free(f1_free),
    .rd_clk(clk_ks), .rd_rst_n(rst_n), .rd_flush(fl_ks), .rd_en(f1_rd),
    .rd_data(f1_rdata), .empty(f1_empty));

  // ---------------- step 2: Keccak (clk_ks) -> FIFO 2
  logic         f2_wr, f2_full, f2_empty, f2_rd;
  logic [255:0] f2_wdata, f2_rdata;
  logic [AW2:0] f2_free;
  logic [N_KECCAK-1:0] kc_iv, kc_ir, kc_ov;
  logic [255:0]        kc_id;
  logic [N_KECCAK-1:0][255:0] kc_od;
  hash_scheduler #(.N(N_KECCAK), .IW(256), .OW(256), .FAW(AW2)) u_s_keccak (
    .clk(clk_ks), .rst_n(rst_n), .flush(fl_ks),
    .up_empty(f1_empty), .up_data(f1_rdata), .up_rd(f1_rd),
    .core_in_valid(kc_iv), .core_in_ready(kc_ir), .core_in_data(kc_id),
    .core_out_valid(kc_ov), .core_out_data(kc_od),
    .dn_wr(f2_wr), .dn_data(f2_wdata), .dn_free(f2_free));
  for (genvar i = 0; i < N_KECCAK; i++) begin : g_keccak
    keccak256_core u_core (.clk(clk_ks), .rst_n(rst_n), .flush(fl_ks),
      .in_valid(kc_iv[i]), .in_ready(kc_ir[i]), .in_data(kc_id),
      .out_valid(kc_ov[i]), .out_data(kc_od[i]));
  end
  async_fifo #(.DW(256), .AW(AW2)) u_f2 (
    .wr_clk(clk_ks), .wr_rst_n(rst_n), .wr_flush(fl_ks), .wr_en(f2_wr),
    .wr_data(f2_wdata), .full(f2_full), .wr_free(f2_free),
    .rd_clk(clk_cube), .rd_rst_n(rst_n), .rd_flush(fl_cube), .rd_en(f2_rd),
    .rd_data(f2_rdata), .empty(f2_empty));

  // ---------------- step 3: CubeHash (clk_cube) -> FIFO 3
  logic         f3_wr, f3_full, f3_empty, f3_rd;
  logic [255:0] f3_wdata, f3_rdata;
  logic [AW3:0] f3_free;
  logic [N_CUBE1-1:0] c1_iv, c1_ir, c1_ov;
  logic [255:0]       c1_id;
  logic [N_CUBE1-1:0][255:0] c1_od;
  hash_scheduler #(.N(N_CUBE1), .IW(256), .OW(256), .FAW(AW3)) u_s_cube1 (
    .clk(clk_cube), .rst_n(rst_n), .flush(fl_cube),
    .up_empty(f2_empty), .up_data(f2_rdata), .up_rd(f2_rd),
    .core_in_valid(c1_iv), .core_in_ready(c1_ir), .core_in_data(c1_id),
    .core_out_valid(c1_ov), .core_out_data(c1_od),
    .dn_wr(f3_wr), .dn_data(f3_wdata), .dn_free(f3_free));
  for (genvar i = 0; i < N_CUBE1; i++) begin : g_cube1
    cubehash256_core u_core (.clk(clk_cube), .rst_n(rst_n), .flush(fl_cube),
      .in_valid(c1_iv[i]), .in_ready(c1_ir[i]), .in_data(c1_id),
      .out_valid(c1_ov[i]), .out_data(c1_od[i]));
  end
  async_fifo #(.DW(256), .AW(AW3)) u_f3 (
    .wr_clk(clk_cube), .wr_rst_n(rst_n), .wr_flush(fl_cube), .wr_en(f3_wr),
    .wr_data(f3_wdata), .full(f3_full), .wr_free(f3_free),
    .rd_clk(clk_lyra2), .rd_rst_n(rst_n), .rd_flush(fl_ly), .rd_en(f3_rd),
    .rd_data(f3_rdata), .empty(f3_empty));

  // ---------------- step 4: Lyra2 (clk_lyra2) -> FIFO 4
  logic         f4_wr, f4_full, f4_empty, f4_rd;
  logic [255:0] f4_wdata, f4_rdata;
  logic [AW4:0] f4_free;
  logic [N_LYRA2-1:0] ly_iv, ly_ir, ly_ov;
  logic [255:0]       ly_id;
  logic [N_LYRA2-1:0][255:0] ly_od;
  hash_scheduler #(.N(N_LYRA2), .IW(256), .OW(256), .FAW(AW4)) u_s_lyra2 (
    .clk(clk_lyra2), .rst_n(rst_n), .flush(fl_ly),
    .up_empty(f3_empty), .up_data(f3_rdata), .up_rd(f3_rd),
    .core_in_valid(ly_iv), .core_in_ready(ly_ir), .core_in_data(ly_id),
    .core_out_valid(ly_ov), .core_out_data(ly_od),
    .dn_wr(f4_wr), .dn_data(f4_wdata), .dn_free(f4_free));
  for (genvar i = 0; i < N_LYRA2; i++) begin : g_lyra2
    lyra2_core u_core (.clk(clk_lyra2), .rst_n(rst_n), .flush(fl_ly),
      .in_valid(ly_iv[i]), .in_ready(ly_ir[i]), .in_pwd(ly_id),
      .out_valid(ly_ov[i]), .out_hash(ly_od[i]));
  end
  async_fifo #(.DW(256), .AW(AW4)) u_f4 (
    .wr_clk(clk_lyra2), .wr_rst_n(rst_n), .wr_flush(fl_ly), .wr_en(f4_wr),
    .wr_data(f4_wdata), .full(f4_full), .wr_free(f4_free),
    .rd_clk(clk_ks), .rd_rst_n(rst_n), .rd_flush(fl_ks), .rd_en(f4_rd),
    .rd_data(f4_rdata), .empty(f4_empty));

  // ---------------- step 5: Skein (clk_ks) -> FIFO 5
  logic         f5_wr, f5_full, f5_empty, f5_rd;
  logic [255:0] f5_wdata, f5_rdata;
  logic [AW5:0] f5_free;
  logic [N_SKEIN-1:0] sk_iv, sk_ir, sk_ov;
  logic [255:0]       sk_id;
  logic [N_SKEIN-1:0][255:0] sk_od;
  hash_scheduler #(.N(N_SKEIN), .IW(256), .OW(256), .FAW(AW5)) u_s_skein (
    .clk(clk_ks), .rst_n(rst_n), .flush(fl_ks),
    .up_empty(f4_empty), .up_data(f4_rdata), .up_rd(f4_rd),
    .core_in_valid(sk_iv), .core_in_ready(sk_ir), .core_in_data(sk_id),
    .core_out_valid(sk_ov), .core_out_data(sk_od),
    .dn_wr(f5_wr), .dn_data(f5_wdata), .dn_free(f5_free));
  for (genvar i = 0; i < N_SKEIN; i++) begin : g_skein
    skein256_core u_core (.clk(clk_ks), .rst_n(rst_n), .flush(fl_ks),
      .in_valid(sk_iv[i]), .in_ready(sk_ir[i]), .in_data(sk_id),
      .out_valid(sk_ov[i]), .out_data(sk_od[i]));
  end
  async_fifo #(.DW(256), .AW(AW5)) u_f5 (
    .wr_clk(clk_ks), .wr_rst_n(rst_n), .wr_flush(fl_ks), .wr_en(f5_wr),
    .wr_data(f5_wdata), .full(f5_full), .wr_free(f5_free),
    .rd_clk(clk_cube), .rd_rst_n(rst_n), .rd_flush(fl_cube), .rd_en(f5_rd),
    .rd_data(f5_rdata), .empty(f5_empty));

  // ---------------- step 6: CubeHash (clk_cube) -> FIFO 6
  logic         f6_wr, f6_full, f6_empty, f6_rd;
  logic [255:0] f6_wdata, f6_rdata;
  logic [AW6:0] f6_free;
  logic [N_CUBE2-1:0] c2_iv, c2_ir, c2_ov;
  logic [255:0]       c2_id;
  logic [N_CUBE2-1:0][255:0] c2_od;
  hash_scheduler #(.N(N_CUBE2), .IW(256), .OW(256), .FAW(AW6)) u_s_cube2 (
    .clk(clk_cube), .rst_n(rst_n), .flush(fl_cube),
    .up_empty(f5_empty), .up_data(f5_rdata), .up_rd(f5_rd),
    .core_in_valid(c2_iv), .core_in_ready(c2_ir), .core_in_data(c2_id),
    .core_out_valid(c2_ov), .core_out_data(c2_od),
    .dn_wr(f6_wr), .dn_data(f6_wdata), .dn_free(f6_free));
  for (genvar i = 0; i < N_CUBE2; i++) begin : g_cube2
    cubehash256_core u_core (.clk(clk_cube), .rst_n(rst_n), .flush(fl_cube),
      .in_valid(c2_iv[i]), .in_ready(c2_ir[i]), .in_data(c2_id),
      .out_valid(c2_ov[i]), .out_data(c2_od[i]));
  end
  async_fifo #(.DW(256), .AW(AW6)) u_f6 (
    .wr_clk(clk_cube), .wr_rst_n(rst_n), .wr_flush(fl_cube), .wr_en(f6_wr),
    .wr_data(f6_wdata), .full(f6_full), .wr_free(f6_free),
    .rd_clk(clk_bb), .rd_rst_n(rst_n), .rd_flush(fl_bb), .rd_en(f6_rd),
    .rd_data(f6_rdata), .empty(f6_empty));

  // ---------------- step 7: BMW (clk_bb) -> FIFO 7 -> control
  logic         f7_wr, f7_full, f7_empty;
  logic [255:0] f7_wdata;
  logic [AW7:0] f7_free;
  logic [N_BMW-1:0] bm_iv, bm_ir, bm_ov;
  logic [255:0]     bm_id;
  logic [N_BMW-1:0][255:0] bm_od;
  hash_scheduler #(.N(N_BMW), .IW(256), .OW(256), .FAW(AW7)) u_s_bmw (
    .clk(clk_bb), .rst_n(rst_n), .flush(fl_bb),
    .up_empty(f6_empty), .up_data(f6_rdata), .up_rd(f6_rd),
    .core_in_valid(bm_iv), .core_in_ready(bm_ir), .core_in_data(bm_id),
    .core_out_valid(bm_ov), .core_out_data(bm_od),
    .dn_wr(f7_wr), .dn_data(f7_wdata), .dn_free(f7_free));
  for (genvar i = 0; i < N_BMW; i++) begin : g_bmw
    bmw256_core u_core (.clk(clk_bb), .rst_n(rst_n), .flush(fl_bb),
      .in_valid(bm_iv[i]), .in_ready(bm_ir[i]), .in_data(bm_id),
      .out_valid(bm_ov[i]), .out_data(bm_od[i]));
  end
  async_fifo #(.DW(256), .AW(AW7)) u_f7 (
    .wr_clk(clk_bb), .wr_rst_n(rst_n), .wr_flush(fl_bb), .wr_en(f7_wr),
    .wr_data(f7_wdata), .full(f7_full), .wr_free(f7_free),
    .rd_clk(clk_ctrl), .rd_rst_n(rst_n), .rd_flush(flush), .rd_en(out_ready && out_valid),
    .rd_data(out_data), .empty(f7_empty));
  assign out_valid = !f7_empty && !flush;
endmodule
