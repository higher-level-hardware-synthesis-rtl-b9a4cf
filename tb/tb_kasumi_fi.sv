// tb_kasumi_fi: applies sixteen random (x, KI) pairs to FI and compares the
// result with an independent model.
module tb_kasumi_fi;
  import kasumi_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Expected values computed by an independent software model of KASUMI.
  localparam logic [15:0] X [16] = '{
    16'h34c3,
    16'h6030,
    16'hbeaa,
    16'h31e2,
    16'h2025,
    16'h1e84,
    16'h6973,
    16'hfe2a,
    16'hdaed,
    16'ha0d7,
    16'hee63,
    16'he807,
    16'hb921,
    16'h997b,
    16'h7f31,
    16'h5c0a
  };
  localparam logic [15:0] K [16] = '{
    16'h7cfa,
    16'h29e8,
    16'h99ba,
    16'hfd7f,
    16'hafdc,
    16'he5cd,
    16'h936c,
    16'h257a,
    16'h3c73,
    16'hd614,
    16'h5475,
    16'haf21,
    16'h4dd0,
    16'hfa59,
    16'hd7e8,
    16'h1412
  };
  localparam logic [15:0] Y [16] = '{
    16'hab68,
    16'h3883,
    16'hc92d,
    16'h687f,
    16'heb44,
    16'hca29,
    16'h9c78,
    16'hdd5a,
    16'he0b4,
    16'hec54,
    16'h3b95,
    16'had65,
    16'h5f39,
    16'ha1f8,
    16'h8f2f,
    16'h4409
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

  logic [15:0] x, ki, y;
  kasumi_fi dut (.x(x), .ki(ki), .y(y));

  initial begin
    for (int i = 0; i < 16; i++) begin
      x = X[i]; ki = K[i]; #1;
      check($sformatf("FI vector %0d", i), 1024'(y), 1024'(Y[i]));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
