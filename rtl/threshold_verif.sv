// Threshold verification: a hash meets the target when, read as a 256-bit
// little-endian number, it is strictly smaller than the target threshold.
// A single 256-bit comparator, purely combinational; the caller registers
// its result.  Strict "less than" and the 256-bit comparator are the paper's.
module threshold_verif (
  input  logic [255:0] hash,
  input  logic [255:0] target,
  output logic         success
);
  assign success = hash < target;
endmodule
