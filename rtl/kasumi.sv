// kasumi: the KASUMI block cipher, stream-based design
// (KASUMI = KEYSCHEDULE || SVFOLDL(SINGLEROUND)).
//
// A plaintext block and a 128-bit key are taken together on one valid/ready
// handshake. The key is registered and the key schedule derives its four
// subkey packs combinationally; vector_to_stream sends the packs one by one,
// closed by an EOT message, to svfoldl, which applies its single KASUMI round
// once per pack to the plaintext. After the EOT the ciphertext is offered on
// the output handshake and stays there until out_ready.
//
// Timing: with out_ready high, a block accepted at cycle 0 has out_valid at
// cycle 6 (four round cycles, one EOT cycle, one output cycle); in_ready
// returns one cycle after the output transfer, so a new block can start every
// 7 cycles. The one-round-per-clock timing and the handshakes are this design's
// choices; the division into KEYSCHEDULE, a stream of packs and a fold of one
// reused round is the paper's.
module kasumi
  import kasumi_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [63:0]  in_data,
  input  logic [127:0] in_key,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [63:0]  out_data
);

  logic [127:0]              key_q;
  pack_t [NUM_PACKS-1:0]     packs;
  pack_t                     pack_vec [NUM_PACKS];
  logic                      seed_ready, prod_busy, start;

  stream_if #(.T(pack_t)) pack_stream (.clk(clk), .rst_n(rst_n));

  assign in_ready = seed_ready && !prod_busy;
  assign start    = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     key_q <= '0;
    else if (start) key_q <= in_key;
  end

  key_schedule u_keys (.key(key_q), .packs(packs));

  for (genvar p = 0; p < NUM_PACKS; p++) begin : g_vec
    assign pack_vec[p] = packs[p];
  end

  vector_to_stream #(.T(pack_t), .N(NUM_PACKS)) u_prd (
    .clk  (clk),
    .rst_n(rst_n),
    .load (start),
    .vec  (pack_vec),
    .busy (prod_busy),
    .out  (pack_stream)
  );

  svfoldl u_fold (
    .clk       (clk),
    .rst_n     (rst_n),
    .seed_valid(start),
    .seed_ready(seed_ready),
    .seed      (in_data),
    .packs     (pack_stream),
    .res_valid (out_valid),
    .res_ready (out_ready),
    .res       (out_data)
  );

endmodule
