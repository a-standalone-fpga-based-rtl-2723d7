// Input control FSM: watches the start bit of the register file and feeds
// the hash chain with one block header per nonce.
//
// IDLE waits for start.  Taking it (start_clear, status_clear pulses) begins
// FLUSH, which holds flush high for FLUSH_CYCLES cycles so that the chain, the
// metadata FIFO and the output FSM drop the previous search.  LOAD copies
// header, target and maximum nonce from the register file into local
// registers; the starting nonce is header bytes 76..79.  RUN pushes the header
// with the current nonce into the chain and, in the same cycle, the metadata
// entry {nonce, target, last} into the metadata FIFO; a push happens only when
// the chain accepts a header and the FIFO has room, so both queues always
// hold the same nonces in the same order.  The nonce increases by one per
// push until the pushed nonce equals the maximum (last = 1), then the FSM
// returns to IDLE.  A start seen in RUN begins a new search at once.  When
// the starting nonce is above the maximum the search covers only the
// starting nonce (it is pushed with last = 1).
//
// Following the paper: flushing on a new search, loading the four values into
// internal registers, the monotonically increasing nonce, stopping at the
// maximum or a new search, and the nonce/target metadata.  The state
// encoding, the flush length and the "last" flag are this design's.
// One header per cycle at most; the chain's in_ready throttles it.
module input_ctrl_fsm
  import miner_pkg::*;
#(
  parameter int FLUSH_CYCLES = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  // register file
  input  logic         start,
  output logic         start_clear,
  output logic         status_clear,
  input  logic [639:0] header,
  input  logic [255:0] target,
  input  logic [31:0]  max_nonce,
  // pipeline flush
  output logic         flush,
  // chain input
  output logic         chain_valid,
  input  logic         chain_ready,
  output logic [639:0] chain_data,
  // metadata FIFO write side
  output logic         meta_wr,
  output meta_t        meta_data,
  input  logic         meta_full,
  // status (for the top's test counters)
  output logic         busy
);
  typedef enum logic [1:0] {S_IDLE, S_FLUSH, S_LOAD, S_RUN} state_t;
  state_t state;
  logic [$clog2(FLUSH_CYCLES+1)-1:0] fcnt;
  logic [607:0] hdr_q;        // header without its nonce
  logic [255:0] tgt_q;
  logic [31:0]  max_q, nonce_q;
  logic         push, last;

  assign last  = (nonce_q == max_q) || (nonce_q > max_q);
  assign push  = (state == S_RUN) && !start && chain_ready && !meta_full;

  assign chain_valid = (state == S_RUN) && !start && !meta_full;
  assign chain_data  = {nonce_q, hdr_q};
  assign meta_wr     = push;
  assign meta_data   = '{nonce: nonce_q, target: tgt_q, last: last};
  assign flush       = (state == S_FLUSH);
  assign busy        = (state != S_IDLE);
  assign start_clear  = start && (state == S_IDLE || state == S_RUN);
  assign status_clear = start_clear;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      fcnt <= '0;
      hdr_q <= '0; tgt_q <= '0; max_q <= '0; nonce_q <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_FLUSH;
          fcnt  <= '0;
        end
        S_FLUSH: begin
          fcnt <= fcnt + 1'b1;
          if (fcnt == ($bits(fcnt))'(FLUSH_CYCLES - 1)) state <= S_LOAD;
        end
        S_LOAD: begin
          hdr_q   <= header[607:0];
          nonce_q <= header[639:608];
          tgt_q   <= target;
          max_q   <= max_nonce;
          state   <= S_RUN;
        end
        S_RUN: begin
          if (start) begin
            state <= S_FLUSH;
            fcnt  <= '0;
          end else if (push) begin
            nonce_q <= nonce_q + 1'b1;
            if (last) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the chain and the metadata FIFO are written together or not at all
  always @(posedge clk) if (rst_n) begin
    assert (!(chain_valid && chain_ready) || meta_wr)
      else $error("header pushed without metadata");
  end
endmodule
