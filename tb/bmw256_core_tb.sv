// Self-checking testbench for bmw256_core.  6 inputs with digests computed by an
// independent software model of BMW-256 are presented back to back.  The
// testbench checks every digest, the output order, the latency of each hash
// (36 cycles from acceptance to output), and one hash every 1 cycles under continuous input.
module bmw256_core_tb;
  logic clk = 0, rst_n = 0, flush = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [255:0] in_data = '0;
  logic [255:0] out_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  bmw256_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int N = 6;
  logic [255:0] vin [N] = '{
    256'h491c1ff788e9abb8661c851e68ad7f609245da4018770567197f539adf1f3eab,
    256'hcc49d3e3e0cc9dbf6a3d452dfec6cc6e67d6d32c6cb15eba8df3cdf65d1ce8f3,
    256'h4b7adce370e491c848cca241cb01992777316c8f4585e55e8b7fad47adae5e61,
    256'hb96a6fff27cfbe251822f2d6106b87534d575c840e660b576a932de77df7cbbc,
    256'hab29c340894a833c7aa58ecf6cf64d6cc1c1883b5541819a1c70a25b732f3d68,
    256'h5442a9b02d8bba48a6d17ebadc24da27db247e9487f4e1deebb2e28cc1e769aa};
  logic [255:0] vout [N] = '{
    256'hd91f4d5c214d2144f4b3dd2d119508aab09dc38a48e69cc0c098adbe213af999,
    256'h8765f459ea9dc4c6ff846b6b845f76b7bc67967bb633119b9dd13dacc245a3bf,
    256'h702321c5ab5f4474707b1a3557332efbe03f551779b28763ba6c49106fcb6afb,
    256'hf85d4014ec3d122ed0135dbfd6178e0356bb3299cf0b1cba7b03bffef7a44678,
    256'hfaad839d4c280da1c8bd776813aead4e605626d486a9b52035264e119850b7c9,
    256'h080452b10b07f5a465acef145aa73787f931e948e8c641f7844fe14910cc2a3e};

  longint t_in [N], t_out [N];
  int n_in = 0, n_out = 0;

  always @(posedge clk) begin
    if (in_valid && in_ready) begin t_in[n_in] = cyc; n_in++; end
    if (out_valid) begin
      checks += 2;
      if (n_out >= n_in || out_data !== vout[n_out]) begin
        failures++; $display("FAIL digest %0d: got %h", n_out, out_data);
      end
      if (cyc - t_in[n_out] != 36) begin
        failures++; $display("FAIL latency %0d: %0d", n_out, cyc - t_in[n_out]);
      end
      t_out[n_out] = cyc;
      if (n_out > 0) begin
        checks++;
        if (cyc - t_out[n_out-1] != 1) begin failures++; $display("FAIL interval %0d", cyc - t_out[n_out-1]); end
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
