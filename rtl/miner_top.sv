// Standalone Lyra2REv2 miner, programmable-logic side.
//
// The processing system (software) writes a block header, a target threshold
// and a maximum nonce into the register file over AXI4-Lite and sets the
// start bit.  The input control FSM flushes the pipeline, copies the values,
// then sends one header per nonce into the Lyra2REv2 hash chain while writing
// {nonce, target, last} into the metadata FIFO.  The output control FSM pairs
// each hash leaving the chain with the head of the metadata FIFO, compares it
// with the target (threshold_verif) and sets winning-nonce-found (with the
// nonce) or nonce-not-found in the status register, which software polls.
//
// Clocks: clk_ctrl runs the AXI4-Lite bus, register file, FSMs, metadata
// FIFO and the chain's input and output ports (250 MHz in the paper);
// clk_bb drives BLAKE and BMW (100 MHz), clk_ks Keccak and Skein (375 MHz),
// clk_cube both CubeHash steps (250 MHz) and clk_lyra2 Lyra2 (225 MHz).
// The clocks come from outside (the clock generator is not part of this
// RTL); rst_n is an asynchronous active-low reset released synchronously to
// every clock by the caller.
//
// Block structure, register map, clock plan and core counts follow the
// paper.  META_AW sets the metadata FIFO depth (2**META_AW entries), chosen
// here to exceed every hash the chain can hold at the default core counts,
// so the FIFO never throttles the input; a smaller value only slows the
// input down (the FSM waits for room).
module miner_top
  import miner_pkg::*;
#(
  parameter int N_BLAKE      = 1,
  parameter int N_KECCAK     = 2,
  parameter int N_CUBE1      = 24,
  parameter int N_LYRA2      = 10,
  parameter int N_SKEIN      = 1,
  parameter int N_CUBE2      = 24,
  parameter int N_BMW        = 1,
  parameter int META_AW      = 10,
  parameter int FLUSH_CYCLES = 32
) (
  input  logic        clk_ctrl,
  input  logic        clk_bb,
  input  logic        clk_ks,
  input  logic        clk_cube,
  input  logic        clk_lyra2,
  input  logic        rst_n,
  // AXI4-Lite slave (clk_ctrl)
  input  logic [6:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [6:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready
);
  logic         start, start_clear, status_clear;
  logic [639:0] header;
  logic [255:0] target;
  logic [31:0]  max_nonce;
  logic         set_win, set_not_found, set_error;
  logic [31:0]  win_nonce;
  logic         flush, busy;
  logic         ch_in_valid, ch_in_ready, ch_out_valid, ch_out_ready;
  logic [639:0] ch_in_data;
  logic [255:0] ch_out_data;
  logic         meta_wr, meta_rd, meta_full, meta_empty;
  meta_t        meta_in, meta_out;
  logic [META_AW:0] meta_count;
  logic [255:0] cmp_hash, cmp_target;
  logic         success;

  regfile_axil u_regs (
    .clk(clk_ctrl), .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .start, .start_clear, .header, .target, .max_nonce,
    .status_clear, .set_win, .win_nonce, .set_not_found, .set_error);

  input_ctrl_fsm #(.FLUSH_CYCLES(FLUSH_CYCLES)) u_in (
    .clk(clk_ctrl), .rst_n,
    .start, .start_clear, .status_clear, .header, .target, .max_nonce,
    .flush,
    .chain_valid(ch_in_valid), .chain_ready(ch_in_ready), .chain_data(ch_in_data),
    .meta_wr, .meta_data(meta_in), .meta_full, .busy);

  lyra2rev2_chain #(
    .N_BLAKE(N_BLAKE), .N_KECCAK(N_KECCAK), .N_CUBE1(N_CUBE1), .N_LYRA2(N_LYRA2),
    .N_SKEIN(N_SKEIN), .N_CUBE2(N_CUBE2), .N_BMW(N_BMW)
  ) u_chain (
    .clk_ctrl, .clk_bb, .clk_ks, .clk_cube, .clk_lyra2, .rst_n, .flush,
    .in_valid(ch_in_valid), .in_ready(ch_in_ready), .in_data(ch_in_data),
    .out_valid(ch_out_valid), .out_ready(ch_out_ready), .out_data(ch_out_data));

  sync_fifo #(.DW($bits(meta_t)), .AW(META_AW)) u_meta (
    .clk(clk_ctrl), .rst_n, .flush,
    .wr_en(meta_wr), .wr_data(meta_in), .full(meta_full),
    .rd_en(meta_rd), .rd_data(meta_out), .empty(meta_empty), .count(meta_count));

  threshold_verif u_thr (.hash(cmp_hash), .target(cmp_target), .success);

  output_ctrl_fsm u_out (
    .clk(clk_ctrl), .rst_n, .flush,
    .hash_valid(ch_out_valid), .hash_ready(ch_out_ready), .hash(ch_out_data),
    .meta_empty, .meta_rd, .meta_data(meta_out),
    .cmp_hash, .cmp_target, .success,
    .set_win, .win_nonce, .set_not_found, .set_error);
endmodule
