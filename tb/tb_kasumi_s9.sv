// tb_kasumi_s9: checks the S9 table against values of an independent model at
// sixteen points and checks that it is a bijection on all 512 inputs.
module tb_kasumi_s9;
  import kasumi_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Expected values computed by an independent software model of KASUMI.
  localparam logic [8:0] X [16] = '{
    9'h1b2,
    9'h03c,
    9'h07e,
    9'h0e4,
    9'h03f,
    9'h196,
    9'h032,
    9'h0e2,
    9'h02f,
    9'h088,
    9'h128,
    9'h1ad,
    9'h093,
    9'h078,
    9'h13b,
    9'h0b9
  };
  localparam logic [8:0] Y [16] = '{
    9'h007,
    9'h173,
    9'h1f0,
    9'h17e,
    9'h04c,
    9'h07b,
    9'h13b,
    9'h175,
    9'h190,
    9'h146,
    9'h19b,
    9'h168,
    9'h035,
    9'h00b,
    9'h00c,
    9'h0d1
  };

  task automatic check(input string what, input logic [1023:0] got, input logic [1023:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (4000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [8:0] x, y;
  kasumi_s9 dut (.x(x), .y(y));

  initial begin
    bit seen [512];
    for (int i = 0; i < 16; i++) begin
      x = X[i]; #1;
      check($sformatf("S9[%0d]", X[i]), 1024'(y), 1024'(Y[i]));
    end
    for (int i = 0; i < 512; i++) seen[i] = 1'b0;
    for (int i = 0; i < 512; i++) begin
      x = 9'(i); #1;
      checks++;
      if (seen[y]) begin failures++; $display("FAIL S9 value %0d repeats", y); end
      seen[y] = 1'b1;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
