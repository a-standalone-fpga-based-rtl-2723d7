// Self-checking testbench for skein256_core.  6 inputs with digests computed by an
// independent software model of Skein-256-256 are presented back to back.  The
// testbench checks every digest, the output order, the latency of each hash
// (18 cycles from acceptance to output), and one hash every 9 cycles under continuous input.
module skein256_core_tb;
  logic clk = 0, rst_n = 0, flush = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [255:0] in_data = '0;
  logic [255:0] out_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  skein256_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int N = 6;
  logic [255:0] vin [N] = '{
    256'hf18789deae1426a8dbbf0b84a55e78687fd66cf964c4e64d2a7c6411aea99a3a,
    256'h3ad33b4dd2d28fb4da24628d5694a44f7637315a98218858e420cb47b456b467,
    256'h913c1e7132476833cba1f5980f565544dea9b6c02438ed1356599004aac23b27,
    256'hb6a1f0020fee63bb6af00e30ebe57da0d9990bb0fc39b210066b107d7862c7d5,
    256'ha31f1b011a96dcd0de2ff2cd766888ef74ba732c8ead308fb3dc5472afda8376,
    256'hc42884a533c0d56b46d930c0b3219f44c22e8bd09cc69b3adf4c748822deec73};
  logic [255:0] vout [N] = '{
    256'h46ba497458e77af8ad956b9240505fe6cf3bb537b785798c4f5e539081422818,
    256'h671bc513fc8c7770eb60493800a306eb6468efdd86af3e6e2f125ddfb5743661,
    256'h2ef4ab47667ba8ea46128e2d50a0edb71b8face46201d724244656622224b145,
    256'h5699479c307710c3d6f49cfaf3056f9392b69638231b121c1e751dfffe2b32c4,
    256'h741a1aa4cc40358a3bd87d53e436485919aa92eb9dd6d6a5279e549c49086865,
    256'h638ee31004e4f6856c13c2d5156984494597850dccf564c194cefaa4b2f0a864};

  longint t_in [N], t_out [N];
  int n_in = 0, n_out = 0;

  always @(posedge clk) begin
    if (in_valid && in_ready) begin t_in[n_in] = cyc; n_in++; end
    if (out_valid) begin
      checks += 2;
      if (n_out >= n_in || out_data !== vout[n_out]) begin
        failures++; $display("FAIL digest %0d: got %h", n_out, out_data);
      end
      if (cyc - t_in[n_out] != 18) begin
        failures++; $display("FAIL latency %0d: %0d", n_out, cyc - t_in[n_out]);
      end
      t_out[n_out] = cyc;
      if (n_out > 0) begin
        checks++;
        if (cyc - t_out[n_out-1] != 9) begin failures++; $display("FAIL interval %0d", cyc - t_out[n_out-1]); end
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
