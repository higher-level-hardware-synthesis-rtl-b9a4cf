// kasumi_fi: the 16-bit non-linear mixing function FI.
//
// FI is an unbalanced four-round Feistel structure over a 9-bit and a 7-bit
// half. The input splits into L0 = x[15:7] and R0 = x[6:0]; rounds 1 and 3
// pass the 9-bit half through S9, rounds 2 and 4 the 7-bit half through S7.
// 7-bit values meet 9-bit ones by zero extension (ZE) and 9-bit values meet
// 7-bit ones by dropping their two top bits (TR). The subkey is used in round
// 2: its low 9 bits are XORed into the 9-bit half and its high 7 bits into the
// 7-bit half. The output is L4 (7 bits) followed by R4 (9 bits).
// Purely combinational.
//
// The four-round structure built on S7 and S9 is what the paper states; the
// exact wiring inside each round is that of the KASUMI specification, which
// the paper cites rather than repeats.
module kasumi_fi (
  input  logic [15:0] x,
  input  logic [15:0] ki,
  output logic [15:0] y
);

  logic [8:0] l0, r1, l2, r3;
  logic [6:0] r0, l1, r2, l3, l4;
  logic [8:0] s9_a, s9_b;
  logic [6:0] s7_a, s7_b;

  assign l0 = x[15:7];
  assign r0 = x[6:0];

  // Round 1: L1 = R0, R1 = S9(L0) ^ ZE(R0)
  kasumi_s9 u_s9_a (.x(l0), .y(s9_a));
  assign l1 = r0;
  assign r1 = s9_a ^ {2'b00, r0};

  // Round 2: L2 = R1 ^ KI[8:0], R2 = S7(L1) ^ TR(R1) ^ KI[15:9]
  kasumi_s7 u_s7_a (.x(l1), .y(s7_a));
  assign l2 = r1 ^ ki[8:0];
  assign r2 = s7_a ^ r1[6:0] ^ ki[15:9];

  // Round 3: L3 = R2, R3 = S9(L2) ^ ZE(R2)
  kasumi_s9 u_s9_b (.x(l2), .y(s9_b));
  assign l3 = r2;
  assign r3 = s9_b ^ {2'b00, r2};

  // Round 4: L4 = S7(L3) ^ TR(R3), R4 = R3
  kasumi_s7 u_s7_b (.x(l3), .y(s7_b));
  assign l4 = s7_b ^ r3[6:0];

  assign y = {l4, r3};

endmodule
