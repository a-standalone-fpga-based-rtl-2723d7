// Self-checking testbench for blake256_core.  6 inputs with digests computed by an
// independent software model of BLAKE-256 are presented back to back.  The
// testbench checks every digest, the output order, the latency of each hash
// (112 cycles from acceptance to output), and one hash every 1 cycles under continuous input.
module blake256_core_tb;
  logic clk = 0, rst_n = 0, flush = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [639:0] in_data = '0;
  logic [255:0] out_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  blake256_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int N = 6;
  logic [639:0] vin [N] = '{
    640'hd22a6c637b569cace9e21d1ee643887aa40001f62135749696a64f70897066c288ce7277bbb865de3da605b7d55b524d416c950c78702366bf04654d2aa3a45ff47a2419c3786935078579b3666c6f6a,
    640'h4c1e7f80bfdc5fc3d58b9063c1845ba20989b54605538336d2e00b19dc51ba8ddb03c60124d8db0bd297fdc2c939953985b3baee3c97572f05c5b0d4ec401a0ce9bca10f7e4cf529db82a1f31e96e207,
    640'h3f7f75d51e14021642282612738a6cedc2352e631ebaa8feb64f600635829f91bf4fb21133f449377c34f1a8b09b672637a35c8eeadd27bfaa3d2aa898fa687c69a358db8d19c1d345f74866408149ae,
    640'he02ba8f8c4d75e0bf2d627ea68b364ce61f0620fe00c7f235324ac0757a830a18c9b6c95ddfae9139cf83a08086ab5eebd5b912e90b03eafea4a1350279eeca75ab301b60577dd43ae3347b906b28b68,
    640'hc2bd5177c998bf9e93e43b806a50e3e7eaf5399872a405283e517c32da19806cc660c6385a7e7fc19eef285610278fa33708fcaaedd734ce7e40d983503d6d99da9d89342004674ff146c7115ccef7f8,
    640'h8c897406df6c77d4eaacd9ef1089424401e1c4e9e25a99d0e6326c4c06a666e8b590edaad4d38fc7ccb437ff0c0fcfbc302f41efc9b3a642aa24a9a0de58de0f3dee3538dc560422a0e325e25465060d};
  logic [255:0] vout [N] = '{
    256'h026ec6dcebb9d8c44a1b20d734fbb444f1beea69c7e7c872081eb7713a07c8b1,
    256'h8f29b5f6b036e024dad0aa4cca586316dbd1b02990103fafeb57ef51fafc32ee,
    256'h3e8118e4cc0a1cbcc71dff32f6061b3cf16cd8f06147b4df6bfd978fb4737fe2,
    256'hc559754426c8ce830f74c890e8db1e673e5710ffeb367d5fa1f18a20126bcd92,
    256'he6d51b31b3cedd48436d9a30b8b6396ea56420c09d35bd4408194aaac77cbacb,
    256'h834c807354e327501bcb4ce9f1db26c292f20230cd337dda53267e6b390ba47c};

  longint t_in [N], t_out [N];
  int n_in = 0, n_out = 0;

  always @(posedge clk) begin
    if (in_valid && in_ready) begin t_in[n_in] = cyc; n_in++; end
    if (out_valid) begin
      checks += 2;
      if (n_out >= n_in || out_data !== vout[n_out]) begin
        failures++; $display("FAIL digest %0d: got %h", n_out, out_data);
      end
      if (cyc - t_in[n_out] != 112) begin
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
