// second_subround: the even KASUMI subround (SECONDSUBROUND).
//
// The 64-bit input splits into r2 = in64[63:32] (left) and r1 = in64[31:0]
// (right). The left half goes through FO first and FL second, the result is
// XORed with the right half to give l2, and the output block is l2 ++ r2.
// Combinational; one FO and one FL deep.
module second_subround
  import kasumi_pkg::*;
(
  input  logic [63:0] in64,
  input  round_keys_t keys,
  output logic [63:0] out64
);

  logic [31:0] r2, r1, t1, t2, l2;

  assign r2 = in64[63:32];
  assign r1 = in64[31:0];

  kasumi_fo u_fo (.x(r2), .ko(keys.ko), .ki(keys.ki), .y(t1));
  kasumi_fl u_fl (.x(t1), .kl(keys.kl), .y(t2));

  assign l2    = r1 ^ t2;
  assign out64 = {l2, r2};

endmodule
