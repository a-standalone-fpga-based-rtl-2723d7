// Two-flip-flop synchroniser for a single level signal crossing into the
// clock domain of clk.  Used for the chain flush, which the input control
// FSM holds long enough for the slowest domain to see it.
module sync2 (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin s1 <= 1'b0; q <= 1'b0; end
    else        begin s1 <= d;    q <= s1;   end
  end
endmodule
