// Self-checking testbench for blake_g in both of its configurations: the
// BLAKE2b G of Lyra2 (64-bit words, rotations 32/24/16/63, no message terms)
// and the BLAKE-256 G (32-bit words, rotations 16/12/8/7, message terms cm0
// and cm1).  The expected outputs come from an independent software model.
// It also checks that splitting the function into steps 0-1 and 2-3 (as the
// pipelined callers do) gives the same result as all four steps at once.
// Purely combinational: outputs are sampled 1 ns after the inputs change.
module blake_g_tb;
  int checks = 0, failures = 0;
  localparam int N = 8;
  logic [255:0] in64 [N] = '{256'hd23f0824128b2f330c5c7fd0a6a3a4506513270e269e0d37f2a74de452e6b438,
    256'h3d9c172411e20b8f6b0d549b6f03675a1600a35a099950d836f675cc81e74ef5,
    256'h0fd630f1f29d0da9953f48f1a09f76b5a170b33839263059f28c105d1fb17c23,
    256'h8a6a63ec24ede6a46b4cb2424a23d5962217beaddbc496cb8e81973e0becd7b0,
    256'h18f135d25f557203301850c5a38fd547923a736994e3bf911a61dbe22e44158b,
    256'h7731af10506bf2efc6f877186d76b07e881ed162ae2eb1547f15052434b9b5df,
    256'h4cdd2055930d6eaf14f4733f3e7d1bfbc7a2ea20b2f14c942e05319acb5c7427,
    256'h2a3af4d46b0a18e8830e07bc1e398f1012bd4acefaecbd389be4bcfc49b64a08};
  logic [255:0] out64 [N] = '{256'h98af65e968587d48101bd41694819e6e4e6f8a09d7917ac90ee68604f8cde479,
    256'h29b4de7e097b8ba72f24c75be9ea0103b00286910d430dd5441c9d39facc27b6,
    256'h58e52a1da5e1ce1b986f14e4e2ac3834e86aa8f437eb8e62805704345231ab81,
    256'hccde476a23279cc5fb87828ba83ea8625035a90e2d7648788436abf8a636fad9,
    256'h1b4657fe67b5c7c1e7d14fe3bfb317a1f2427d7a1e6f36c5cb8cc0aa73ac61df,
    256'h8430ec4c82a435c7fdacf941601d5fdb546f7360058193515ecf177845c5fda6,
    256'h0fee15833795af6c122336d72f880755227096257086e820f8c3998116193400,
    256'h4287c34800c3cb88f53eeaaca3964db79603fa1953f7cfdfece11f6b4f10b198};
  logic [191:0] in32 [N] = '{192'he8e25d940ed904759531985d5d9dc9f81818e811892f902b,
    192'h90c192cfd3ac94af0f21ddb66cad4a268d116ece1738f7d9,
    192'h3898d190f9ebdacc0cb1e29c658cda1495e60af593bd04cf,
    192'hae97ba94d0eda82f8f6d05584ef8aa38922766581e27a1c0,
    192'h9e7769b10f4205b4907a70c31012f037b64ce4228c38fb29,
    192'h3f98e2774cbd87ad5c90a9587403e430ec66a78795e761d1,
    192'h72e6cc3ababced2057ee05cde00902c77ebff20686734721,
    192'h6bf46c697d2caf82eeeacbe226e875555790f82ec1d3fcff};
  logic [127:0] out32 [N] = '{128'h45ee75a6887864ae7df3db9b0a998355,
    128'h38ed0a0fcc7acd0c8c1e9649cbea77ef,
    128'h2f9e9b6b9d37a4be9d4eb04696974410,
    128'hb9a9f2c3bdc1ab4c82a1b1901cedcde8,
    128'h58d99caffd294ea32d4090dd4da06ee5,
    128'h622b35e00e8cadabac14915b136873f9,
    128'h5ce2842d60766f12a7dc837bc10ec542,
    128'h120d3f53a8432d23e5ef5e6e62722b69};
  logic [63:0] a, b, c, d, ao, bo, co, do_, ha, hb, hc, hd, sa, sb, sc, sd;
  logic [31:0] a3, b3, c3, d3, m0, m1, ao3, bo3, co3, do3;

  blake_g #(.W(64), .R1(32), .R2(24), .R3(16), .R4(63), .USE_CM(1'b0))
    u64 (.a, .b, .c, .d, .cm0('0), .cm1('0), .a_o(ao), .b_o(bo), .c_o(co), .d_o(do_));
  blake_g #(.W(64), .R1(32), .R2(24), .R3(16), .R4(63), .USE_CM(1'b0), .FIRST(0), .NSTEPS(2))
    u64h0 (.a, .b, .c, .d, .cm0('0), .cm1('0), .a_o(ha), .b_o(hb), .c_o(hc), .d_o(hd));
  blake_g #(.W(64), .R1(32), .R2(24), .R3(16), .R4(63), .USE_CM(1'b0), .FIRST(2), .NSTEPS(2))
    u64h1 (.a(ha), .b(hb), .c(hc), .d(hd), .cm0('0), .cm1('0), .a_o(sa), .b_o(sb), .c_o(sc), .d_o(sd));
  blake_g #(.W(32), .R1(16), .R2(12), .R3(8), .R4(7), .USE_CM(1'b1))
    u32 (.a(a3), .b(b3), .c(c3), .d(d3), .cm0(m0), .cm1(m1), .a_o(ao3), .b_o(bo3), .c_o(co3), .d_o(do3));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      {d, c, b, a} = in64[i];
      {m1, m0, d3, c3, b3, a3} = in32[i];
      #1;
      checks += 3;
      if ({do_, co, bo, ao} !== out64[i]) begin failures++; $display("FAIL G64 %0d", i); end
      if ({sd, sc, sb, sa} !== out64[i]) begin failures++; $display("FAIL G64 split %0d", i); end
      if ({do3, co3, bo3, ao3} !== out32[i]) begin failures++; $display("FAIL G32 %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
