// tb_vector_to_stream: streams vectors of four 16-bit values through
// vector_to_stream into a sink whose ready is sometimes random and sometimes
// always high. Checks the order and values of the elements, that exactly one
// EOT closes each stream, that busy and load behave, and that a stream into an
// always-ready sink takes N+1 cycles.
module tb_vector_to_stream;

  localparam int unsigned N = 4;
  typedef logic [15:0] elem_t;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  logic load, busy;
  elem_t vec [N];
  always #5 clk = ~clk;

  stream_if #(.T(elem_t)) s (.clk(clk), .rst_n(rst_n));

  vector_to_stream #(.T(elem_t), .N(N)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .vec(vec), .busy(busy), .out(s)
  );

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Receive one stream; returns the cycles from load to the EOT transfer.
  task automatic run_stream(input bit random_ready, output int cycles);
    int got = 0;
    bit done = 0;
    for (int i = 0; i < N; i++) vec[i] = elem_t'($urandom);
    @(negedge clk);
    expect_eq("idle before load", int'(busy), 0);
    load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    cycles = 1;
    while (!done) begin
      s.ready = random_ready ? 1'($urandom_range(0, 1)) : 1'b1;
      #1;
      expect_eq("valid while busy", int'(s.valid), int'(busy));
      @(posedge clk);
      if (s.valid && s.ready) begin
        if (s.eot) begin
          expect_eq("elements before EOT", got, N);
          done = 1;
        end else begin
          expect_eq($sformatf("element %0d", got), int'(s.data), int'(vec[got]));
          got++;
        end
      end
      @(negedge clk);
      cycles++;
    end
    expect_eq("idle after EOT", int'(busy), 0);
    s.ready = 1'b0;
  endtask

  initial begin
    int cyc;
    rst_n = 1'b0; load = 1'b0; s.ready = 1'b0;
    for (int i = 0; i < N; i++) vec[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_stream(1'b0, cyc);
    expect_eq("cycles, always-ready sink", cyc, N + 1 + 1);
    for (int k = 0; k < 20; k++) run_stream(1'b1, cyc);
    run_stream(1'b0, cyc);
    expect_eq("cycles, always-ready sink again", cyc, N + 1 + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
