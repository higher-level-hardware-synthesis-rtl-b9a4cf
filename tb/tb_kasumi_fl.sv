// tb_kasumi_fl: applies sixteen random (x, KL) sets to FL and compares the
// result with an independent model. KL vectors hold KL_i1 in bits 15:0.
module tb_kasumi_fl;
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
  localparam logic [31:0] KL [16] = '{
    32'hfa529ba3,
    32'h7afb2c68,
    32'h4fd58dbe,
    32'h24e4e25a,
    32'hbfeaa155,
    32'hbd87a865,
    32'hb12aa1f6,
    32'h842e7fc2,
    32'h5c9bcf35,
    32'hea057543,
    32'hd86f40f6,
    32'h84b5a818,
    32'he883a1d4,
    32'h80b0c08b,
    32'ha2eddbbd,
    32'hcda6c6fd
  };
  localparam logic [31:0] Y [16] = '{
    32'h24c0b88d,
    32'h31ff04dd,
    32'hbaf1b7b5,
    32'hfd4ed6b6,
    32'h8de0c35a,
    32'hc84bab9b,
    32'hb7aa5795,
    32'h8bb1b9b1,
    32'ha7492643,
    32'h6b1a11ba,
    32'h8bbd2ace,
    32'h26ee33b9,
    32'h6ada23ef,
    32'h583d1e40,
    32'h32c4a60e,
    32'hd5fbfe32
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
  subkey_t [1:0] kl;
  kasumi_fl dut (.x(x), .kl(kl), .y(y));

  initial begin
    for (int i = 0; i < 16; i++) begin
      x = X[i]; kl = KL[i]; #1;
      check($sformatf("FL vector %0d", i), 1024'(y), 1024'(Y[i]));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
