// Self-checking testbench for lyra2_round (one BLAKE2b round in eight
// pipeline stages).  Eight random 1024-bit states go in on consecutive
// cycles; each output must equal the round applied by an independent
// software model, and must appear exactly 8 cycles after its input (one
// state per cycle, latency 8, as the eight-stage pipeline requires).
module lyra2_round_tb;
  logic clk = 0;
  logic [1023:0] in_state = '0, out_state;
  int checks = 0, failures = 0;
  int cyc = 0;
  localparam int N = 8;
  logic [1023:0] vin [N] = '{1024'h4f426dcbb394fb36bb2d420f0f88080b10a3d6b2aa05e11ab2715945795e8229451abd81f1d69ed617f5e837d70820fe119a72d174c9df6acc011cdd9474031b7f26144b98289fcd59a54a7bb1fee08f571242425051c1ccd17f9acae01f5057ca02135e92b1d3f28ede0d7ac3baea9e13deef86ab1031d0f646e1f40a097c97,
    1024'h7f1b103cdf1582b0eab477d26415479c65dc9f503f63af83bd0561e6211c70cf49952399c4aaeac137dc76fb0f17a3007e62aa0a1df9fd789c6539382b0537e65affb2297631a992f0ce583505c6af0758d5563dab2cd31ee315128862c33a4fb774eb5248db40af72158370d269a9a5ae658f33fe3b890b93f448b3a5aa3c81,
    1024'hd4c28c2e7c26847f0316909e3bbbe9eaa8948c893b61867626bb7dbd2d1c9af0153e7c2a26a2c0bd3b1287fff52ddf5d616499c9e25a7605aec6f0245bd86d40fc891b4a6a50df4db4d66a3a47469a4d8cdb305fdd2e16096e36aab0d1bc52d9230d977ee22571594720771f8ca8181166d2287672fdf2022a96fb1a14a0f9e7,
    1024'h8f2c6ec8cc4169a3ae3a2b7fdfe01893f3aed0b6c7ac1491def88334e647cb8f74e69a5d0dd27a65bd628881ad1b72dba7abe1c29e1a8ef4f341e07a83f73f16dbf4a8b2b0c4312d20203626f3fe39c0519088f590fbbd119c1caaf75e8766ed88daf4016b4013ef254b0c4e010c4759482c9cbc43435cc52eae05cf96d0cc5f,
    1024'h353c631cdfd43f371200339d068739fa9d1de2a05d158a2ff2ee4e4519f9919c895fd7b326b94c7f9118bb16000f49c81a358ca00d75985d99c94309570dc1951c2442f9298cb3a570ccec313571810afc132d0d113db17d30cbc97d0fef792866836886a260cd0b7b45145c1a81682c64e50cad66237a0465e7e4236472f1a3,
    1024'h842e7fc229540a6eb12aa1f6d42fddbb7a86f7a243c71b9abd87a86557b6fb7ebfeaa1551a28f7b324e4e25a15fc899e4fd58dbe7bdc968b7afb2c68774b15d7fa529ba3fe3bfada7cf20724d953ee261d87cec31f7296ab7961fd925d39d0a89a2ef80f58ee8571f4998d7c4093f6dea268aa872607679d6050914a9d33a01c,
    1024'h80b0c08bc77024208aa4248c8857f9a43908f227c59db9165b0ee76f2ac34446e883a1d45de0099784b5a81842d87208d86f40f6b239f3c7174c77a2dd02de92a49636a2fa7f0eab4c4f9b0687322e25c215a82a06ec41adea0575438b0d590bb0a844e52587be6b5c9bcf35873be078f3b7a50df373ca533488f87605e999f3,
    1024'h9aea6429b1491e243192b7044259405278e4b98d4787f93bca44eb860726e25cfd56a926076b3e36bb2313f55b06258e7e26f36a8483f8b8332dd3313a0b9965cda6c6fdbd68516766934036d17e44973d4882a5ce5b2a9231f51707da45e18ac2216b02fc241d0bc9d488b1cfbf33609cfc865239194242a2eddbbd5464ecc2};
  logic [1023:0] vout [N] = '{1024'h903f6a1998bbf1143f18e20a7150b7aeca99d446724fe6b69b3769ae383cc0850ac7f6a109763f553d150bbea34a4040dd94ec445a3d2372dd7a5aaddf63b59ad9f90ba8399a525e946c8d6309cdadf92f87ce5470d8cdcc7cfef487c203b6fdaf51ef1519f92d7d4e03d93794ebd5b8f807262aeeb382645f6532653ae4fd3e,
    1024'h41dadfe4300e344881cdec33d90f9497e8e9ca4cfa38ae5e08213016f1dfde34f451c43142218e4e55ab66c6623aa11936ba9b6c1db9fdcfeb9c8ba06d3990bfcfa077473a31e0d77645742049b708b20c567a5678eb90c6b70844328e6cf39ded3b12a0b02268071a53dbe23f2c86e370a958f013bcb2cf9b610fdb726aac6b,
    1024'h6d15a98060c69971d164b4e0927b7a651c6c3d19ac28c058348488f378baec44b1d20b87c03b7ee70bdf3ce5871748bdb0ed7a96d9986a0f37334443b4c30d9c39be8d82bd3507d90b8105869494a47bd630e51a770b748a101342caeb180fe8aac14a51bb7913ad88dbac18e80370bd1be44313e169cdefe32163dfbf8d8d85,
    1024'hac9886702b0cd2f9c8cdfb9278434f7c8c7d86a861af17a447ad19da0562cd4bb397c73257a069251dbfcf351345dd0e72ca05c7a7a114319f238526149101bfcedfdcb906d69799dd25425386d3917fff27694232007dedbe5e7d35e9d4dfd2f9c1e5ff462f90cbb8cbd8efbbb29c673c7fdbb1dfd159c4403a1f1c8ded0878,
    1024'ha4c4f7fc6d6230c2f72c8ba25ba2050c3a49adaa4a038eeb311ac0c5c7876a93114e44ed46525a420cb0a8764b277f379a7cec3513631201d2f3753c9d8369b96010408782e939895ba87afb9ce727787bf63054f97498f5812718f4099e0d2823861fd6c38b3cd18800591e1d6fd419751063f2397cad6f08b7dd7eeb6ac191,
    1024'h662feb092221698e5d14ed2be46acb3212a1aeb833638ec1fb889409011b9a83f56ed7b8bb6031aed672c3a151a1a75613e46ebd78ae69e421e7e20b0c99b9494167e457b27ba6c2aae5af9c313dbdc932d1bff764f9fd6ae27ffa33f967169d6cc7c28f559a81ea70c40f893fe00ad391060f4ced9acb1b8d59e94b61dfa301,
    1024'hfa4a4dafe9bc3926b1af293f39cf2f8499d251ce5d977cb507109974fa210f47dea8d9b30a65719c14cb951c15f70483b1accfc4fe15a6249146c85641a4cf6a1ef84d721f4f194ba9f94450655f50ce36543ad0b33a924bc0ca91050bf933ff725883f427c575e1f54f6c36278912a9a0b5ce9598574361ab6d868aef718422,
    1024'h2fd4dd44f014eda455703b8d260433feb21a4b9430d2357c8d7084493f73d90910fb5a13d40b50f45c2e2960fa1673eaa1f4038c959f0a23a9122347575f5822a9b12e450fa9e83f24c38ed08489cbe87a3a4110cecc949a870133f87f47b1ec942c006ad92165a7c73bc765a1c5b8d3537d007584660f33ef2d5b40c66403c4};

  lyra2_round dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input i is applied before edge 10+i; its result must show after edge 18+i
  initial begin
    @(posedge clk);
    while (cyc < 9) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      @(negedge clk) in_state = vin[i];
    end
    @(negedge clk) in_state = '0;
  end
  always @(negedge clk) begin
    if (cyc >= 18 && cyc < 18 + N) begin
      checks++;
      if (out_state !== vout[cyc - 18]) begin failures++; $display("FAIL state %0d at cycle %0d", cyc - 18, cyc); end
    end
    if (cyc == 17 || cyc == 18 + N) begin       // one cycle early / late must not match
      checks++;
      for (int i = 0; i < N; i++)
        if (out_state === vout[i]) begin failures++; $display("FAIL output at wrong cycle %0d", cyc); end
    end
    if (cyc == 30) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
