// tb_kasumi_s7: checks the S7 table against values of an independent model at
// sixteen points and checks that it is a bijection on all 128 inputs.
module tb_kasumi_s7;
  import kasumi_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Expected values computed by an independent software model of KASUMI.
  localparam logic [6:0] X [16] = '{
    7'h52,
    7'h26,
    7'h65,
    7'h0c,
    7'h12,
    7'h18,
    7'h5d,
    7'h0e,
    7'h36,
    7'h09,
    7'h16,
    7'h6f,
    7'h6b,
    7'h11,
    7'h3d,
    7'h17
  };
  localparam logic [6:0] Y [16] = '{
    7'h11,
    7'h3a,
    7'h04,
    7'h02,
    7'h27,
    7'h2f,
    7'h61,
    7'h7b,
    7'h0d,
    7'h06,
    7'h41,
    7'h2c,
    7'h31,
    7'h71,
    7'h0a,
    7'h0c
  };

  task automatic check(input string what, input logic [1023:0] got, input logic [1023:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [6:0] x, y;
  kasumi_s7 dut (.x(x), .y(y));

  initial begin
    bit seen [128];
    for (int i = 0; i < 16; i++) begin
      x = X[i]; #1;
      check($sformatf("S7[%0d]", X[i]), 1024'(y), 1024'(Y[i]));
    end
    for (int i = 0; i < 128; i++) seen[i] = 1'b0;
    for (int i = 0; i < 128; i++) begin
      x = 7'(i); #1;
      checks++;
      if (seen[y]) begin failures++; $display("FAIL S7 value %0d repeats", y); end
      seen[y] = 1'b1;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
