// first_subround: the odd KASUMI subround (FIRSTSUBROUND).
//
// The 64-bit input splits into r1 = in64[63:32] (left) and r0 = in64[31:0]
// (right). The left half goes through FL and then FO, the result is XORed with
// the right half to give l1, and the output block is l1 ++ r1: the new left
// half followed by the old left half. The odd-subround subkeys of the pack are
// used here; the even-subround subkeys are handed on unchanged to the
// following second_subround, as in the paper's process network.
// Combinational; one FL and one FO deep.
module first_subround
  import kasumi_pkg::*;
(
  input  logic [63:0] in64,
  input  pack_t       keys,
  output logic [63:0] out64,
  output round_keys_t keys_even
);

  logic [31:0] r1, r0, t1, t2, l1;

  assign r1 = in64[63:32];
  assign r0 = in64[31:0];

  kasumi_fl u_fl (.x(r1), .kl(keys.odd.kl), .y(t1));
  kasumi_fo u_fo (.x(t1), .ko(keys.odd.ko), .ki(keys.odd.ki), .y(t2));

  assign l1        = r0 ^ t2;
  assign out64     = {l1, r1};
  assign keys_even = keys.even;

endmodule
