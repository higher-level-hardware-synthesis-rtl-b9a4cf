// tb_kasumi_fo: applies sixteen random (x, KO, KI) sets to FO and compares the
// result with an independent model. KO/KI vectors hold subkey 1 in bits 15:0.
module tb_kasumi_fo;
  import kasumi_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Expected values computed by an independent software model of KASUMI.
  localparam logic [31:0] X [16] = '{
    32'hd17f9aca,
    32'hcc011cdd,
    32'h451abd81,
    32'h10a3d6b2,
    32'h72158370,
    32'hb774eb52,
    32'h58d5563d,
    32'hf0ce5835,
    32'h5affb229,
    32'h9c653938,
    32'h7e62aa0a,
    32'h49952399,
    32'hbd0561e6,
    32'h65dc9f50,
    32'h7f1b103c,
    32'h2a96fb1a
  };
  localparam logic [47:0] KO [16] = '{
    48'h8e8d8cdb305f,
    48'hd4a1b4d66a3a,
    48'hb7b0fc891b4a,
    48'h4d453b1287ff,
    48'h5a39153e7c2a,
    48'h76c326bb7dbd,
    48'h7777a8948c89,
    48'hf84d0316909e,
    48'h86862eae05cf,
    48'h0218482c9cbc,
    48'hd680254b0c4e,
    48'hbd0e88daf401,
    48'h1ba4bd628881,
    48'hc8e58f2c6ec8,
    48'hcc4665e7e423,
    48'h350264e50cad
  };
  localparam logic [47:0] KI [16] = '{
    48'h1fde66836886,
    48'h227b30cbc97d,
    48'h6ae3fc132d0d,
    48'h531970ccec31,
    48'hae1b1c2442f9,
    48'h1aeb99c94309,
    48'h001e1a358ca0,
    48'h4d729118bb16,
    48'h33f3895fd7b3,
    48'hba2bf2ee4e45,
    48'h0d0e9d1de2a0,
    48'h4c0e6050914a,
    48'h8127a268aa87,
    48'hb1ddf4998d7c,
    48'hba739a2ef80f,
    48'h3ee57961fd92
  };
  localparam logic [31:0] Y [16] = '{
    32'h155b6a8d,
    32'hdfe87cf8,
    32'h3a7155df,
    32'h72911657,
    32'hd3adca35,
    32'he4bb8a79,
    32'hcfc43dca,
    32'h770b9ed3,
    32'h2c315df1,
    32'hd495bc12,
    32'h393858a9,
    32'h48d7c35d,
    32'h78edf98b,
    32'hc9fe0eb9,
    32'hb7b68587,
    32'h3499aeaa
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

  logic [31:0] x, y;
  subkey_t [2:0] ko, ki;
  kasumi_fo dut (.x(x), .ko(ko), .ki(ki), .y(y));

  initial begin
    for (int i = 0; i < 16; i++) begin
      x = X[i]; ko = KO[i]; ki = KI[i]; #1;
      check($sformatf("FO vector %0d", i), 1024'(y), 1024'(Y[i]));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
