// single_round: one KASUMI round (SINGLEROUND) = first_subround followed by
// second_subround, consuming one pack of subkeys.
//
// The pack's odd-subround keys drive the first subround, which forwards the
// even-subround keys to the second. Four applications with packs 1..4 make the
// whole cipher. This design keeps the round combinational (two FL and two FO
// deep), so a caller that registers the result advances one round per clock.
module single_round
  import kasumi_pkg::*;
(
  input  logic [63:0] in64,
  input  pack_t       pack,
  output logic [63:0] out64
);

  logic [63:0] mid64;
  round_keys_t mid_keys;

  first_subround  u_first  (.in64(in64),  .keys(pack),     .out64(mid64), .keys_even(mid_keys));
  second_subround u_second (.in64(mid64), .keys(mid_keys), .out64(out64));

endmodule
