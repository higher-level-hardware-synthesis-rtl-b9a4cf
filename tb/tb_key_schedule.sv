// tb_key_schedule: derives the four subkey packs of eight keys (the first is the
// key of the 3GPP KASUMI test set 1) and compares all 64 subkeys of each with an
// independent model. Also spot-checks the pack layout for the first key.
module tb_key_schedule;
  import kasumi_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Expected values computed by an independent software model of KASUMI.
  localparam logic [127:0] KEY [8] = '{
    128'h2bd6459f82c5b300952c49104881ff48,
    128'hca44eb860726e25cfd56a926076b3e36,
    128'h1a26f88938703800149e259b5d58c705,
    128'h3451d0135675f6ad325b55dd78572976,
    128'ha72991b9e8c147437abec539007d1034,
    128'he39639be7a605a91330698a1c0093492,
    128'h551fd8f9a2c68e45ca04c79f6f15b6ad,
    128'hb8c9817af8be8831f237e45acd02c5e1
  };
  localparam logic [1023:0] PACKS [8] = '{
    1024'h2af5910292a500b3e91ff38800f80b6e00f8fe9109222c957ac53ed50b6e7eef3ed52a59b0589f4522097eefcd582af5cd5892201660c58210296bf02af500f86bf0058bc57a48ff601600f8f3883ed5f3886601e8b3d62ba5920b6e3ed5cd580b6e57ac29101049b3e8cd587eef6bf07eef8b3e1fe9814858b02af56bf0f388,
    1024'hcb670ed6dfaa5ce2c6c713beaee18e8daee17c6cd52456fd4899713f8e8d2fb3713ffaadc0e486eb24d52fb30c26cb670c26524d9c4b2607ed60038acb67aee1038a0e4c9948363e4b9caee113be713f13bec4b9dd7044caaadf8e8d713f0c268e8d948960ed26a970dd0c262fb3038a2fb3d70dc7c66b07e4c0cb67038a13be,
    1024'h1b05bab0c2930038e0b89f03bdeeb1dbbdee8e0b64b39e1444c32b0cb1dbf5ef2b0c293c070e89f8b364f5eff5151b05f5154b3607007038ab0bea421b05bdeeea4270e0c34405c70007bdee9f032b0c9f0370003f11261a93c2b1db2b0cf515b1db344c0bab9b25113ff515f5efea42f5eff113b8e0585d0e071b05ea429f03,
    1024'h3572f0ae664badf62ec5ef459574dfde957452ecaabb5b328a260e03dfde3b420e0364b6aace13d0bbaa3b421b6635721b66abbabed575560aefcc8735729574cc87acea268a7629d5be9574ef450e03ef45ed5b7a0251344b66dfde0e031b66dfde68a2ef0add55027a1b663b42cc873b42a027c52e5778ceaa3572cc87ef45,
    1024'ha60a00facf57434706827fa1d4de616ad4de206838a7be7ae5347629616a8aac7629f57c3d18b991a7388aac2224a60a22248a7368e8c1e80fa08462a60ad4de8462d18334e53410e868d4de7fa176297fa18e86323729a757cf616a76292224616a4e53a00f39c5373222248aac84628aac237382067d00183da60a84627fa1,
    1024'he2b58013c660915a924622397cd9f3cb7cd969243314063372dcb65df3cb977eb65d660c0f4cbe391433977e0682e2b5068231432b52607a0138cddae2b57cd9cddaf4c0dc729234522b7cd92239b65d2239b522c73796e360c6f3cbb65d0682f3cbc72d3801a19837c70682977ecdda977e737c469209c04c0fe2b5cdda2239,
    1024'h543cde2a9940458ed5b67d079d9e2b6d9d9e6d5bf8f304caa3ea19412b6d43aa19419409d458f9d8f3f843aa84bd543c84bd8f3fb1c8c6a2e2ad34d8543c9d9e34d8458deaa3adb6c8b19d9e7d0719417d071c8b3b1f1f5540992b6d194184bd2b6daa3eade29fc71f3b84bd43aa34d843aab1f3b6d5156f58d4543c34d87d07,
    1024'hb9ea9a05fe463188bc385ec2c41d7115c41d8bc35c8b37f21937bb56711545debb56e46fdf177a818b5c45def7f1b9eaf7f1c8b53106bef8a0590cebb9eac41d0cebf17d3719e1c50631c41d5ec2bb565ec21063502fc9b846fe7115bb56f7f17115719359a05ae42f50f7f145de0ceb45de02f538bc02cd17dfb9ea0ceb5ec2
  };
  localparam logic [63:0] PT [8] = '{
    64'h8e752fdf1ece615d,
    64'h8e31704187ddaeb7,
    64'hc6c80e2bc8c614b2,
    64'h8f6f915fe21b37ca,
    64'h30f970583f9d52f9,
    64'hc5b2e75a0acd8be1,
    64'h1038f0b5e998d0ee,
    64'hb156d1ad330c16a3
  };
  localparam logic [63:0] CT [8] = '{
    64'hba8992532023046c,
    64'h254cb15ed9aeb5d4,
    64'hac314d708a4f741a,
    64'he0b69cff5ca37af7,
    64'ha71871a82ce14be6,
    64'hf5359af6a87ad018,
    64'h3f9d6d2bc18056c1,
    64'h729030fdd1ce7a88
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

  logic [127:0] key;
  pack_t [NUM_PACKS-1:0] packs;
  key_schedule dut (.key(key), .packs(packs));

  initial begin
    for (int i = 0; i < 8; i++) begin
      key = KEY[i]; #1;
      for (int p = 0; p < NUM_PACKS; p++)
        check($sformatf("key %0d pack %0d", i, p + 1), 1024'(packs[p]), 1024'(PACKS[i][256*p +: 256]));
    end
    // Layout: KL_11 = K1 <<< 1 and KI_81 = K'4 = K4 ^ 52719 for the first key.
    key = KEY[0]; #1;
    check("KL_11", 1024'(packs[0].odd.kl[0]), 1024'(rol16(KEY[0][127:112], 1)));
    check("KI_81", 1024'(packs[3].even.ki[0]), 1024'(KEY[0][79:64] ^ 16'd52719));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
