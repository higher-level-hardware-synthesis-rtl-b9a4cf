// kasumi_fo: the 32-bit non-linear mixing function FO.
//
// FO is a three-step Feistel "ladder" of FI over two 16-bit halves:
// for j = 1..3, R_j = FI(L_{j-1} ^ KO_ij, KI_ij) ^ R_{j-1} and L_j = R_{j-1}.
// The output is L3 || R3. ko[j-1] and ki[j-1] carry KO_ij and KI_ij.
// Purely combinational: three FI instances in series.
//
// That FO is three rounds of FI keyed by KO and KI is stated in the paper; the
// placement of the XORs is that of the KASUMI specification.
module kasumi_fo
  import kasumi_pkg::*;
(
  input  logic [31:0]   x,
  input  subkey_t [2:0] ko,
  input  subkey_t [2:0] ki,
  output logic [31:0]   y
);

  logic [15:0] l [4];
  logic [15:0] r [4];
  logic [15:0] f [3];

  assign l[0] = x[31:16];
  assign r[0] = x[15:0];

  for (genvar j = 0; j < 3; j++) begin : g_step
    kasumi_fi u_fi (.x(l[j] ^ ko[j]), .ki(ki[j]), .y(f[j]));
    assign r[j+1] = f[j] ^ r[j];
    assign l[j+1] = r[j];
  end

  assign y = {l[3], r[3]};

endmodule
