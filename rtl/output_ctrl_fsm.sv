// Output control FSM: pairs every hash leaving the chain with the metadata
// entry of its nonce, asks threshold_verif whether it wins, and reports to
// the register file.
//
// Hashes and metadata entries come out in the order the input FSM pushed
// them, so the head of each queue belongs to the same nonce.  In a cycle
// where both are present, both are popped; a winning hash raises set_win with
// that nonce (the register file stores it and sets the winning-nonce-found
// bit); a losing hash whose entry is marked last raises set_not_found.  After
// the first winner of a search the remaining hashes are drained without
// report, so the first winning nonce is the one kept and nonce-not-found is
// not raised for that search.  A hash with no metadata entry to go with it is
// a pairing error: it is dropped and set_error raised.  flush (from the input
// FSM) starts a new search.  The decision is made in the cycle the hash is
// popped; set_win/set_not_found/set_error are registered one-cycle pulses.
//
// Following the paper: the check against the target read from the metadata
// FIFO, the winning-nonce write and the two status bits.  Keeping the first
// winner, and what raises the error bit, are this design's choices.
module output_ctrl_fsm
  import miner_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  // chain output
  input  logic         hash_valid,
  output logic         hash_ready,
  input  logic [255:0] hash,
  // metadata FIFO read side
  input  logic         meta_empty,
  output logic         meta_rd,
  input  meta_t        meta_data,
  // threshold verification
  output logic [255:0] cmp_hash,
  output logic [255:0] cmp_target,
  input  logic         success,
  // register file
  output logic         set_win,
  output logic [31:0]  win_nonce,
  output logic         set_not_found,
  output logic         set_error
);
  logic done;      // this search has already been reported
  logic pair, orphan;

  assign pair       = hash_valid && !meta_empty && !flush;
  assign orphan     = hash_valid && meta_empty && !flush;
  assign hash_ready = pair || orphan;
  assign meta_rd    = pair;
  assign cmp_hash   = hash;
  assign cmp_target = meta_data.target;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      set_win <= 1'b0; set_not_found <= 1'b0; set_error <= 1'b0;
      win_nonce <= '0;
    end else begin
      set_win <= 1'b0; set_not_found <= 1'b0; set_error <= 1'b0;
      if (flush) begin
        done <= 1'b0;
      end else begin
        if (pair && !done) begin
          if (success) begin
            set_win   <= 1'b1;
            win_nonce <= meta_data.nonce;
            done      <= 1'b1;
          end else if (meta_data.last) begin
            set_not_found <= 1'b1;
            done          <= 1'b1;
          end
        end
        if (orphan) set_error <= 1'b1;
      end
    end
  end
endmodule
