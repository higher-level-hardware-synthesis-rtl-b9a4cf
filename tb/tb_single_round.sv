// tb_single_round: sixteen random blocks, each with the first pack of a random
// key's schedule; checks one full round against an independent model.
module tb_single_round;
  import kasumi_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Expected values computed by an independent software model of KASUMI.
  localparam logic [63:0] D [16] = '{
    64'h8e752fdf1ece615d,
    64'h8e31704187ddaeb7,
    64'hc6c80e2bc8c614b2,
    64'h8f6f915fe21b37ca,
    64'h30f970583f9d52f9,
    64'hc5b2e75a0acd8be1,
    64'h1038f0b5e998d0ee,
    64'hb156d1ad330c16a3,
    64'hed84e91ef132bf2d,
    64'h231b3e14729135bd,
    64'h6471fde41f229dd0,
    64'h6da79a873d9a8079,
    64'hab6286cd3672d6ae,
    64'h249a45845dbe3023,
    64'h18189af4f3d74f82,
    64'h7cbd1f5ae28af604
  };
  localparam logic [255:0] PK [16] = '{
    256'h8e8d948960ed26a970dd0c262fb3038a2fb3d70dc7c66b07e4c0cb67038a13be,
    256'hb1db344c0bab9b25113ff515f5efea42f5eff113b8e0585d0e071b05ea429f03,
    256'hdfde68a2ef0add55027a1b663b42cc873b42a027c52e5778ceaa3572cc87ef45,
    256'h616a4e53a00f39c5373222248aac84628aac237382067d00183da60a84627fa1,
    256'hf3cbc72d3801a19837c70682977ecdda977e737c469209c04c0fe2b5cdda2239,
    256'h2b6daa3eade29fc71f3b84bd43aa34d843aab1f3b6d5156f58d4543c34d87d07,
    256'h7115719359a05ae42f50f7f145de0ceb45de02f538bc02cd17dfb9ea0ceb5ec2,
    256'h37e7e4c32ed24e493da9827f9109981d910993daf60d9176c997f342981df3d6,
    256'ha22efc79973151ca91f355d291f0d67691f0391f4cf88cb970a5ff1fd67670c9,
    256'h1e94cf49a0e1fccf612c4319b469d86db469c6122e210d07e7f2e687d86d7564,
    256'h05df18b98b366fe02bee7c8231f1d93531f1e2be49d2b4598e918d7fd9355af7,
    256'h7525be55a47489226f31dd984d5c91d24d5c16f31df1a52391dfde0991d29811,
    256'hbfad0e54da6f0d5c1a53db0513132164131331a5bd227ed3c0c606092164e695,
    256'hcbce16b512c402097dd68d1d76deada876de67ddb7e120964ca88a79ada8b39a,
    256'ha74b37958e15921b96e734bce5723815e572796e80d5ac70dc059ae93815a10a,
    256'haff2583c58d5466f43fd4f45b948324ab948d43fafaaaac6cb242d3d324ad5de
  };
  localparam logic [127:0] KE [16] = '{
    128'h2fb3d70dc7c66b07e4c0cb67038a13be,
    128'hf5eff113b8e0585d0e071b05ea429f03,
    128'h3b42a027c52e5778ceaa3572cc87ef45,
    128'h8aac237382067d00183da60a84627fa1,
    128'h977e737c469209c04c0fe2b5cdda2239,
    128'h43aab1f3b6d5156f58d4543c34d87d07,
    128'h45de02f538bc02cd17dfb9ea0ceb5ec2,
    128'h910993daf60d9176c997f342981df3d6,
    128'h91f0391f4cf88cb970a5ff1fd67670c9,
    128'hb469c6122e210d07e7f2e687d86d7564,
    128'h31f1e2be49d2b4598e918d7fd9355af7,
    128'h4d5c16f31df1a52391dfde0991d29811,
    128'h131331a5bd227ed3c0c606092164e695,
    128'h76de67ddb7e120964ca88a79ada8b39a,
    128'he572796e80d5ac70dc059ae93815a10a,
    128'hb948d43fafaaaac6cb242d3d324ad5de
  };
  localparam logic [63:0] F1 [16] = '{
    64'h262623ec8e752fdf,
    64'h5b0579d88e317041,
    64'h1017aa75c6c80e2b,
    64'h977094638f6f915f,
    64'hb58dd98730f97058,
    64'hbe8f4487c5b2e75a,
    64'h1ae6c2711038f0b5,
    64'hc7e2a5d3b156d1ad,
    64'h77d315bded84e91e,
    64'h5c147b3f231b3e14,
    64'h62f0fcb36471fde4,
    64'he7554f5f6da79a87,
    64'hbf582935ab6286cd,
    64'h550293f3249a4584,
    64'h6148569e18189af4,
    64'hcea0f7917cbd1f5a
  };
  localparam logic [63:0] S2 [16] = '{
    64'h725892fb8e752fdf,
    64'h25892fc98e317041,
    64'hbef378c9c6c80e2b,
    64'h5f67355d8f6f915f,
    64'h9dba572930f97058,
    64'hb0d7f811c5b2e75a,
    64'h600cea711038f0b5,
    64'h986a0605b156d1ad,
    64'h15560698ed84e91e,
    64'h5e369ab7231b3e14,
    64'hbd5965c26471fde4,
    64'hbd680a9b6da79a87,
    64'hbc2b7697ab6286cd,
    64'h67b1ad32249a4584,
    64'h2914c43418189af4,
    64'he189509b7cbd1f5a
  };
  localparam logic [63:0] R1 [16] = '{
    64'h33645993262623ec,
    64'hfc470fe35b0579d8,
    64'haf145f341017aa75,
    64'h4b1a80e197709463,
    64'hbd6f62e6b58dd987,
    64'h0b963debbe8f4487,
    64'h0cf8c6fb1ae6c271,
    64'h27e7aa4ec7e2a5d3,
    64'hcbb0d99877d315bd,
    64'h8abf55245c147b3f,
    64'h2f26b55262f0fcb3,
    64'hdde01f07e7554f5f,
    64'hed140986bf582935,
    64'h2468d470550293f3,
    64'hf312a8c66148569e,
    64'h6e138d24cea0f791
  };

  task automatic check(input string what, input logic [1023:0] got, input logic [1023:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] in64, out64;
  pack_t pack;
  single_round dut (.in64(in64), .pack(pack), .out64(out64));

  initial begin
    for (int i = 0; i < 16; i++) begin
      in64 = D[i]; pack = PK[i]; #1;
      check($sformatf("block %0d", i), 1024'(out64), 1024'(R1[i]));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
