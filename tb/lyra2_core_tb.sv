// Self-checking testbench for lyra2_core.  Ten 256-bit inputs with known
// Lyra2 (Lyra2REv2 instance) outputs, computed by an independent software
// model, are pushed into the core: eight back to back to fill every pipeline
// slot, the rest later.  The testbench checks each result value, the output
// order, and that every hash takes exactly 544 cycles (68 rounds x 8 stages).
module lyra2_core_tb;
  logic clk = 0, rst_n = 0, flush = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [255:0] in_pwd = '0, out_hash;
  int checks = 0, failures = 0;
  longint cyc = 0;

  lyra2_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int N = 10;
  logic [255:0] vec [N][2] = '{
    '{256'hcdb84472b200c4c39b6e63d5e4077c1835c961a67873c27e1e4110c3cdd89122, 256'h6808e89ec836ff9acf1702f0786d4ae600eabc2ca86111ca2ebe3775cc4e3ab8},
    '{256'had3b583b8d7ef070c3388707b96cf837af61e1f0028aa606050751e61af1973a, 256'h0efdbdabe83763ecf1e877ccb8821e29b58c4dec77449cbe017a069bd1fd43b4},
    '{256'h816cf7ef80b6f9b8e555be1e4bdcb9fea12f19a4ec8eead66a05ed4af375c238, 256'h6689aed6f42085c1f2120d747b937dd2cd1ee2b084b8f46d2d9a6079893b3be0},
    '{256'hbcacc6b3e18c5d2caa6a67ccbe3e7a08da966481f0d87fe1f996484d30abe9d4, 256'hd8d417f92ea223259b7c2fb30d76ffd16a9e597fdb154790bf5384bb6317bc9b},
    '{256'h03fb3a802b2ba56494979dfbd9b44e0b7807bb7d5e64d78529c71b82a970165f, 256'h5679409301d12e2b286909eef3537b53ba35de7ea12e9025adabc47e28485f94},
    '{256'h83bdf0e2f4d2dbc86201baf59b8ca844e8755a93d8f35883673b8cdceb8a33c5, 256'hdf0f28d08bb222560d723e7e88bcd3aab1d9042106774310e227e88f55d23552},
    '{256'h9975549cc99f8a8900586a5bd07c6981f0338d915dde7b0ef36d348fc78421cf, 256'h6bd9cc80f611c2701736496bf0e7c57ef81220a08c5e53038cf358b073f102c5},
    '{256'h443f47c1c1037304de1512acf1d70841eed1d9cc8dcc17dc2e958c2da23acd07, 256'h1cc72937fac260782031c69293671ab722e8eac25da088937c4b4aef8cb233b0},
    '{256'h4230cb6b57624f061d797f52b3744bb6a545a82bf38741282a114a582f9fcc1c, 256'hfcb380e4cdb58deb9603222872c435aead127d3bbcb1495e9852e12ba51d1c55},
    '{256'ha1f9fa38d58b6dad81b47229f5b8092565043905f9d16e9bf735fa82bae6401b, 256'hb1ec12e777610cf6cad33705deec78511a4d561f4e3f0ad17831ed97ce650754}};

  longint t_in [N];
  int n_in = 0, n_out = 0;

  // outputs
  always @(posedge clk) begin
    if (out_valid) begin
      checks += 2;
      if (n_out >= n_in || out_hash !== vec[n_out][1]) begin
        failures++;
        $display("FAIL hash %0d: got %h", n_out, out_hash);
      end
      if (cyc - t_in[n_out] != 544) begin
        failures++;
        $display("FAIL latency %0d: %0d cycles", n_out, cyc - t_in[n_out]);
      end
      n_out++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_in < N) begin
      @(negedge clk);
      if (n_in == 8) repeat (100) @(negedge clk);
      in_valid = 1; in_pwd = vec[n_in][0];
      @(posedge clk);
      if (in_ready) begin t_in[n_in] = cyc; n_in++; end
      #1 in_valid = 0;
    end
    wait (n_out == N);
    repeat (10) @(posedge clk);
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
