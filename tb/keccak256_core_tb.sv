// Self-checking testbench for keccak256_core.  6 inputs with digests computed by an
// independent software model of Keccak-256 are presented back to back.  The
// testbench checks every digest, the output order, the latency of each hash
// (24 cycles from acceptance to output), and one hash every 24 cycles under continuous input.
module keccak256_core_tb;
  logic clk = 0, rst_n = 0, flush = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [255:0] in_data = '0;
  logic [255:0] out_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  keccak256_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int N = 6;
  logic [255:0] vin [N] = '{
    256'h7a8b1115e37e710068b1d1e1123d1e7a422481f826b63a7aabf6a7f674cf614c,
    256'hdc191a0cb04507737af1ed925a454229f019732c664d907a4b85d97608dfc855,
    256'h13acf714bddabca8be7e52c8ef0e47ba8292fa8ce268b013042b285b3ac51dc4,
    256'hb409f77bb7f99880ad24500dcf11204584399784a00d08ba239b7aed02fb95c2,
    256'h7aa7a0c4bb99d197d9a904460c2c5c59f9503ce8a84baa68cfe2c5f054f6e3e3,
    256'hf166bfe7db0f2d781100adf17bbc5716f4f3a4aed5ad16f2ad3e1f348bfad392};
  logic [255:0] vout [N] = '{
    256'h40af1099b35f4fddc4111a42fae46e058f00d8d3bd16466501de424890bd2481,
    256'h0d59b2be82f439a4b70f63b8c007abf43da7fc11ce97a5c0a6ced8f11bac1df5,
    256'hf7be8aae7af0eaf6397935a49bf83fd3726fa051aee4ed8afd390a8737a86eab,
    256'hf8ce1f13502473aebbaebe81619e4f2b2355152c92c77abfee922daf704ffc21,
    256'hae0205918be785ce06602bdcf437fd6056bfefb015673cae0a193dd878b938bb,
    256'h7b4234828ca0eb1e04f8bba69ee5b3b3c61ed404e69a310168f43fd09b0772b5};

  longint t_in [N], t_out [N];
  int n_in = 0, n_out = 0;

  always @(posedge clk) begin
    if (in_valid && in_ready) begin t_in[n_in] = cyc; n_in++; end
    if (out_valid) begin
      checks += 2;
      if (n_out >= n_in || out_data !== vout[n_out]) begin
        failures++; $display("FAIL digest %0d: got %h", n_out, out_data);
      end
      if (cyc - t_in[n_out] != 24) begin
        failures++; $display("FAIL latency %0d: %0d", n_out, cyc - t_in[n_out]);
      end
      t_out[n_out] = cyc;
      if (n_out > 0) begin
        checks++;
        if (cyc - t_out[n_out-1] != 24) begin failures++; $display("FAIL interval %0d", cyc - t_out[n_out-1]); end
      end
      n_out++;
    end
  end

  always @(negedge clk) begin
    in_valid <= rst_n && n_in < N;
    in_data  <= vin[n_in < N ? n_in : 0];
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (n_out == N);
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog, %0d of %0d outputs", n_out, N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
