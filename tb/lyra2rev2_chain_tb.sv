// Self-checking testbench for lyra2rev2_chain at reduced core counts
// (Keccak 2, CubeHash 3 per step, Lyra2 2, the others 1) with the five
// clocks at the paper's frequencies: control and CubeHash 250 MHz, BLAKE/BMW
// 100 MHz, Keccak/Skein 375 MHz, Lyra2 225 MHz (time unit 1 ps).
// Four headers are sent and flushed while still inside the chain; then 12
// headers are sent back to back and the hashes are read with random
// back pressure on out_ready.  Each hash must equal the Lyra2REv2 digest of
// its header from an independent software model, in input order, and none
// of the flushed headers may come out.  The BLAKE step takes a header every
// other 100 MHz cycle, so the chain input must push back (in_ready low).
module lyra2rev2_chain_tb;
  logic clk_ctrl = 0, clk_bb = 0, clk_ks = 0, clk_cube = 0, clk_lyra2 = 0, rst_n = 0;
  logic flush = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [639:0] in_data = '0;
  logic [255:0] out_data;
  int checks = 0, failures = 0, n_out = 0, n_bp = 0;
  localparam int NV = 12;
  logic [639:0] vin [NV] = '{640'hb4489ad12e669c4b6f9b77a8a55264ea100ca9d30b1ef72ff30d68714a288f1b1b907bb134db45565f5f08a752aad812756bbcde3d9d694aa499d7c0a3f7f6cbc0ee51fda4d53fa63e297ff03ec927d5,
    640'h89e94bdc3d5d816f202fbc3acb5b5c69094bd7487d414170754e506daf863db980612ef9bd5c76b2d2b62ca0c1646eea81b1f615e3ae231250d42a0056f494bf354b3e055630804e941aacc448be36c2,
    640'hb815df7b31b33134ace4543a55dce15a0e78944514764c9fb9e7421a09a170fcfb6ecf41bccbbaeeac15ff2f71668d1fb326133b5e58a3843f3421875712fcb4fca6ea8fb5cb6d0d0b4d4be0a3bc5180,
    640'hdb5c1e724a4bd9bf993c6beacd52ba6919c17135e8a183a20ed3cf92c0023540553d8da273db9b893811a6a740f29902c53b6c5cf99c8cda3d4ede80c53c8bd11615dffaa3416154981f102c036dd2e5,
    640'hfbbbbacc1e5b594be884cd6f2d010e12ab987687d33576b956c6d05d48edfea2199f4df75c956fc68dfd5695fe9cf5098b4894886ba9de7cde7aa91ae96e0bbbadc2ac9bede42210df2d1949f80610d1,
    640'h9425fd71df76419fb1aebde63508bfda1582603250f1dfb34c8b9732a9fff9824aa64547c7647d3da71b506f3a82797b3ebb048a1202cced4e605bc463654a24c74a01b6f4862a00675f1ad09a14266f,
    640'h4da732c271e452f92e90ff03d3e927d4d0a6999133e37c05a6aab8d939a59ec74e2865b1afed6b557fde2519878b215407059f4377103b3320c303c8a565dc57427d206a921626a95c77789014988cfd,
    640'h74a3cde4237c53fdbda6a574dc42f04c774d33ae69364da62be0820c403aa90c50ae6ce9d8b8536c2354136e0ae0ac91d88b35203f0d1b62733016f7829fc5280a62238d95d88d1076bb48c40d72bb96,
    640'h6e9013808541057b9b963fe7409655585620080ed2951aaecb1f6f6b09eb6e994bad45f038c760b43359c23827b567f2430f592a07c9c7f670c2c97c2d01ca3a09731c1e85da83190701520e6f502836,
    640'h1d8a6a633019ae3b7e0e05eb13ff54af07466a8ab9df870624c96b06629548111521a4060dfecb0b601b1375c4ceee83943790f67ed79a964f4053352f0e5db699898f1f25ee9dc945b6538e157a88fd,
    640'h69364ed9c753e04cf11b9501ef9897ebfd65684081cf6e2303153cd635f222b71c01243662d0f0e2d29a18e8d8dc644f1622e43f2377fbabf69f2a1376ef2c910464b9a086995431a36d5350eb8bcbc6,
    640'h5e3d9c2922e997f37a7b53f19abfe3cb779a275e6dfda39c0bbb6ecbf699a1822bb2c97d2528fa74c067f3b013bccb01a05afea49cc3edf44093bfdea3cf1bea8b19b1f89ec3df3bab1a71651f596beb};
  logic [255:0] vout [NV] = '{256'h9ec22901a9b0db5a3139afc13245b43a5262e8068e171404dabd84386c005aae,
    256'hc33b6101973f39ffa5e9c9c69afdb077b03466f0f12fc3bc67dba2ff99b1ef95,
    256'h940da443bd1470c8181bddd319b7a8b59e56391991c12333d9676b4f569564c9,
    256'h4ca15b2b547d353ead40e953cdea9c569723b02edcb6db37dd4427efeb5fe56c,
    256'hcac498f2573916b84e92cb52659357ea1d49d89917580a92646072f9c8e44f1a,
    256'h2b65230ff9712bd8a2b2323d7f1c856191f75c34138e750276807214df8aabc9,
    256'ha1dfd0f91a660a838b112d2fe687ae2dda367ea4a0b423ccc5cb90c4f496620a,
    256'h93b06d011b0260e3720a25424091e3adac42ba5afce34cee34fadeef4f987b8a,
    256'h8af4eea750e369e3d47cad1de71ae8844f36b5fe7be0cc3cc9a8819466ba3d81,
    256'h5a96fcefeff9472f736d636ca1b95bc4def2a5f3082c00e4a0a55d97f79bc748,
    256'h91bd0c17f6612000277bee033f9e42204824ebba30ba4190b4e0533d38af1beb,
    256'h545d815d1058dea16b7f9d183d967e3e901bbf9f828109606581a5777efbb67e};

  lyra2rev2_chain #(.N_BLAKE(1), .N_KECCAK(2), .N_CUBE1(3), .N_LYRA2(2), .N_SKEIN(1),
                    .N_CUBE2(3), .N_BMW(1)) dut (.*);

  always #2000 clk_ctrl  = ~clk_ctrl;
  always #5000 clk_bb    = ~clk_bb;
  always #1333 clk_ks    = ~clk_ks;
  always #2000 clk_cube  = ~clk_cube;
  always #2222 clk_lyra2 = ~clk_lyra2;

  initial begin
    #60_000_000;
    failures++;
    $display("FAIL watchdog after %0d hashes", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk_ctrl) out_ready <= ($urandom % 4) != 0;
  always @(posedge clk_ctrl) if (rst_n) begin
    if (in_valid && !in_ready) n_bp++;
    if (out_valid && out_ready) begin
      checks++;
      if (n_out >= NV || out_data !== vout[n_out]) begin
        failures++; $display("FAIL hash %0d: %h", n_out, out_data);
      end
      n_out++;
    end
  end

  task automatic send(input logic [639:0] d);
    @(negedge clk_ctrl);
    in_valid = 1; in_data = d;
    do @(posedge clk_ctrl); while (!in_ready);
    @(negedge clk_ctrl) in_valid = 0;
  endtask

  initial begin
    repeat (10) @(posedge clk_bb);
    rst_n = 1;
    repeat (10) @(posedge clk_bb);
    // headers that are flushed away
    for (int i = 0; i < 4; i++) send(~vin[i]);
    repeat (40) @(posedge clk_ctrl);
    @(negedge clk_ctrl) flush = 1;
    repeat (32) @(negedge clk_ctrl);
    flush = 0;
    for (int i = 0; i < NV; i++) send(vin[i]);
    wait (n_out == NV);
    repeat (3000) @(posedge clk_ctrl);
    checks += 2;
    if (n_out != NV) begin failures++; $display("FAIL %0d hashes out", n_out); end
    if (n_bp == 0) begin failures++; $display("FAIL input never pushed back"); end
    $display("hashes %0d, input push-back cycles %0d", n_out, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
