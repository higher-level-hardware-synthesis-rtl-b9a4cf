// kasumi_fl: the 32-bit linear mixing function FL.
//
// With L = x[31:16], R = x[15:0]:
//   R' = R ^ ROL1(L & KL_i1)
//   L' = L ^ ROL1(R' | KL_i2)
// and the output is L' || R'. kl[0] is KL_i1, kl[1] is KL_i2. Combinational.
//
// The paper names FL as KASUMI's keyed linear block; these two equations are
// those of the KASUMI specification.
module kasumi_fl
  import kasumi_pkg::*;
(
  input  logic [31:0]   x,
  input  subkey_t [1:0] kl,
  output logic [31:0]   y
);

  subkey_t l, r, r_new, l_new;

  assign l     = x[31:16];
  assign r     = x[15:0];
  assign r_new = r ^ rol16(l & kl[0], 1);
  assign l_new = l ^ rol16(r_new | kl[1], 1);
  assign y     = {l_new, r_new};

endmodule
