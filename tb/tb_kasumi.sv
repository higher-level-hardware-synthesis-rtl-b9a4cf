// tb_kasumi: end-to-end test of the KASUMI cipher at its default configuration.
//
// Enciphers 24 blocks, the first being 3GPP KASUMI test set 1 (key
// 2BD6459F82C5B300952C49104881FF48, plaintext EA024714AD5C4D84, ciphertext
// DF1F9B251C0BF45F); the others use random keys and plaintexts, with blocks 3..7
// sharing one key. Ciphertexts are compared with an independent software model.
// The output is taken sometimes at once and sometimes after random delays,
// inputs are offered sometimes back to back and sometimes after gaps, and the
// cipher is reset once in the middle of a block. The test counts how often each
// mechanism of the design happened and fails if one never did:
//   - the pack stream (4 packs per block) and its EOT message,
//   - an output stall (out_valid held while out_ready is low),
//   - an input wait (in_valid held while the cipher is busy),
//   - a key change and a key reuse between consecutive blocks,
//   - an abort by reset during a fold.
// It also checks the timing: with out_ready high, out_valid rises 6 cycles
// after the cycle in which the block was accepted, and blocks offered back to
// back are accepted every 7 cycles.
module tb_kasumi;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  // Expected values computed by an independent software model of KASUMI.
  localparam logic [127:0] KEY [24] = '{
    128'h2bd6459f82c5b300952c49104881ff48,
    128'h3945336bd51b1815aaf719f3fd68373b,
    128'h83feb17bfe7b8ae46e7836a4b4d19ec1,
    128'h5b4b1b75321c52966bd8c67656d050cd,
    128'h5b4b1b75321c52966bd8c67656d050cd,
    128'h5b4b1b75321c52966bd8c67656d050cd,
    128'h5b4b1b75321c52966bd8c67656d050cd,
    128'h5b4b1b75321c52966bd8c67656d050cd,
    128'h42343354f22d2882d1a89b37ad0c9bb6,
    128'h16e6fec353b97377b34e8ece7e9ee51d,
    128'h2eefa279b02e3d8dccb1c51d0eba0ea8,
    128'hf037afc644d82a531289bafae5316960,
    128'h42b38755cd37880e16ac4191a26aa0ae,
    128'h110e2cb638efbaebdb31ccd29bb183e1,
    128'h02f4b342742a80631f2642aadcded204,
    128'h2e5f950c0ce5af69430b91ed2954ba5c,
    128'h09758340401d68fbfe977c5604a65651,
    128'h81b62bb5f86664ae64a149f5e3838b9e,
    128'h3ac4da9afb81392137161c16b00fd7bb,
    128'hfd4bd030679a44dd23c49caea2cf62ba,
    128'h213bca7fd644de2f0dec6823fb5c9d56,
    128'he13e213ebdaaea00a01d616f121ae3e6,
    128'h2f733b05759eb5590b94af3a4b05e1ae,
    128'h4363e5d900ed6b0272218fdc44df96ff
  };
  localparam logic [63:0] PT [24] = '{
    64'hea024714ad5c4d84,
    64'h8c0d0033fc2325a9,
    64'h4f3e885ee1e437b7,
    64'h2ed654115b491561,
    64'h61b2480c55d85e8d,
    64'h33736dcca7f0c99e,
    64'hc6b789ef81365acc,
    64'h24d4589c16fa1421,
    64'h0aaaaf81963892a7,
    64'h4cb59aa705c22d3f,
    64'h3b996870a1320b9d,
    64'hc0236e49da6e6d8e,
    64'hc3a9e88963b759f5,
    64'hfc173498b87e4e2b,
    64'ha4aa07b49e6397d4,
    64'ha4946d15b17dd255,
    64'h07fa22f715c891ff,
    64'ha31a49dd22126540,
    64'h1adbce5df5a2d879,
    64'ha0b558640cfff054,
    64'h7d42646f3e9b768f,
    64'hd89c36b2130f27b2,
    64'hf9c9c679a661f62c,
    64'hd874bc797e736d5f
  };
  localparam logic [63:0] CT [24] = '{
    64'hdf1f9b251c0bf45f,
    64'h53282c12d00655a8,
    64'h276fdde161c8e177,
    64'h799f9fbcabce425f,
    64'h11e9d47e3b543ae8,
    64'h22389b040f76590d,
    64'h2f38a55c90956807,
    64'he345c0fdb764d511,
    64'h71c80057e0cf6db3,
    64'h543024c00312ab31,
    64'h0e733ed5d91ade08,
    64'h6d8afbe3ffced7b1,
    64'h0ee2f53342504b9e,
    64'h2e3863498a06f615,
    64'h8e74133789fd5002,
    64'ha767dcf549c41c60,
    64'hf7680da91f6eb6a9,
    64'ha096e6ad4d31d548,
    64'h1a89e3b363dece38,
    64'h4b76e559cdc8f558,
    64'h6bb53918a5e66933,
    64'h1f6fa9b070eca950,
    64'he792e42d5bbebcf1,
    64'hfd605a0642d1ba2d
  };

  localparam int NUM = 24;

  logic         in_valid, in_ready, out_valid, out_ready;
  logic [63:0]  in_data, out_data;
  logic [127:0] in_key;

  kasumi dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data), .in_key(in_key),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data)
  );

  // Mechanism counters.
  int n_packs = 0, n_eot = 0, n_out_stall = 0, n_in_wait = 0;
  int n_key_change = 0, n_key_reuse = 0, n_reset_abort = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.pack_stream.valid && dut.pack_stream.ready) begin
      if (dut.pack_stream.eot) n_eot++;
      else                     n_packs++;
    end
    if (out_valid && !out_ready) n_out_stall++;
    if (in_valid && !in_ready)   n_in_wait++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // Expected ciphertexts are consumed in order by the output process.
  int next_out = 0;
  int accepted_at [NUM];
  int cycle = 0;
  bit random_out = 1'b0;
  bit drive_done = 1'b0;

  always @(posedge clk) cycle++;

  // Output side: take each ciphertext, check value and, for prompt reads, timing.
  initial begin
    out_ready = 1'b0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      out_ready = random_out ? 1'($urandom_range(0, 3) == 0) : 1'b1;
      #1;
      if (out_valid && out_ready && rst_n) begin
        check($sformatf("ciphertext %0d", next_out), out_data, CT[next_out]);
        if (!random_out) check($sformatf("latency %0d", next_out), cycle - accepted_at[next_out], 6);
        next_out++;
      end
    end
  end

  task automatic send(input int i, input bit gap);
    if (gap) repeat ($urandom_range(0, 4)) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b1; in_data = PT[i]; in_key = KEY[i];
    #1;
    while (!in_ready) begin
      @(negedge clk);
      #1;
    end
    accepted_at[i] = cycle;
    if (i > 0) begin
      if (KEY[i] != KEY[i-1]) n_key_change++;
      else                    n_key_reuse++;
    end
    @(negedge clk);
    in_valid = 1'b0; in_data = '0; in_key = '0;
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_data = '0; in_key = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // Blocks 0..11 back to back with a prompt reader (timing checked).
    for (int i = 0; i < 12; i++) send(i, 1'b0);
    wait (next_out == 12);
    // Back-to-back blocks with a prompt reader: one block every 7 cycles.
    for (int i = 1; i < 12; i++)
      check($sformatf("block interval %0d", i), accepted_at[i] - accepted_at[i-1], 7);

    // Abort a block by reset in the middle of its fold, then check idle state.
    @(negedge clk);
    in_valid = 1'b1; in_data = PT[12]; in_key = KEY[12];
    @(negedge clk);
    in_valid = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b0;
    n_reset_abort++;
    @(negedge clk);
    check("out_valid low in reset", longint'(out_valid), 0);
    rst_n = 1'b1;
    #1;
    check("in_ready after reset", longint'(in_ready), 1);

    // Blocks 12..23 with gaps and a slow, random reader.
    random_out = 1'b1;
    for (int i = 12; i < NUM; i++) send(i, 1'b1);
    wait (next_out == NUM);
    repeat (10) @(negedge clk);
    check("no extra output", longint'(out_valid), 0);

    check("packs streamed", n_packs >= 4 * NUM, 1);
    check("EOT messages", n_eot >= NUM, 1);
    check("output stalls seen", n_out_stall > 0, 1);
    check("input waits seen", n_in_wait > 0, 1);
    check("key changes seen", n_key_change > 0, 1);
    check("key reuse seen", n_key_reuse > 0, 1);
    check("reset abort seen", n_reset_abort > 0, 1);
    $display("mechanisms: packs=%0d eot=%0d out_stall=%0d in_wait=%0d key_change=%0d key_reuse=%0d reset_abort=%0d",
             n_packs, n_eot, n_out_stall, n_in_wait, n_key_change, n_key_reuse, n_reset_abort);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
