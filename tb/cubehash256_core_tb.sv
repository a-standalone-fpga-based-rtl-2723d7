// Self-checking testbench for cubehash256_core.  6 inputs with digests computed by an
// independent software model of CubeHash16/32-256 are presented back to back.  The
// testbench checks every digest, the output order, the latency of each hash
// (192 cycles from acceptance to output), and one hash every 192 cycles under continuous input.
module cubehash256_core_tb;
  logic clk = 0, rst_n = 0, flush = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [255:0] in_data = '0;
  logic [255:0] out_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  cubehash256_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int N = 6;
  logic [255:0] vin [N] = '{
    256'h9ae7ecbeb1e4edfd5be542983f77d0b0a5bcd0d43f9cd607807468c57ee17f3a,
    256'hb4c5cecdd7a43be39f5f287e2133322014d3641f8e675104139d0dc13367afc3,
    256'h372e632f68f6ba420eb443429524cabce13fbad66c4c008bc8dc2ff9467a0267,
    256'h94c16ba8bafafad9d00280bde0f4898e0981fe178e946a3a73994a3574770e39,
    256'h81fad8089794a5ee8c0be36bb1eb8c16202f5bdce28445eedfb11211d37882bd,
    256'h892095baea6827515881ea1782d7b1f03be3c5a49e5caaea99733631cf070ab2};
  logic [255:0] vout [N] = '{
    256'hcdda224c3ce8ad4a3731ebf48d10aa2aba9a146bd6dd3c2ae0d22904ee71cdf5,
    256'hbb5c0c3999606cf1c96e05377592378b509eb1a7d70609447547e056bf3d1bb7,
    256'hb6a3955d19ab4912447813ab5a9a1fac77678465903fed17c9b6baa268cadb3b,
    256'h54f1a03e17364d373942a7c68cd439c2b01200d049d3255409f9e246edbe2b84,
    256'h763b785f6dce9acef41882f68143130fbc7aa760bfe98e326f6c425a562ba48a,
    256'h583a50bb291fe877757490921034717bf4fed624801aefd598bd0fc353a97751};

  longint t_in [N], t_out [N];
  int n_in = 0, n_out = 0;

  always @(posedge clk) begin
    if (in_valid && in_ready) begin t_in[n_in] = cyc; n_in++; end
    if (out_valid) begin
      checks += 2;
      if (n_out >= n_in || out_data !== vout[n_out]) begin
        failures++; $display("FAIL digest %0d: got %h", n_out, out_data);
      end
      if (cyc - t_in[n_out] != 192) begin
        failures++; $display("FAIL latency %0d: %0d", n_out, cyc - t_in[n_out]);
      end
      t_out[n_out] = cyc;
      if (n_out > 0) begin
        checks++;
        if (cyc - t_out[n_out-1] != 192) begin failures++; $display("FAIL interval %0d", cyc - t_out[n_out-1]); end
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
