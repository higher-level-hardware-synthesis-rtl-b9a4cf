// key_schedule: derives the four packs of KASUMI subkeys from the 128-bit key
// (KEYSCHEDULE).
//
// The structure follows the paper's process network step by step:
//   SEGS        cut the key into eight 16-bit words K1..K8 (ks).
//   left path   MAPWITH of list rotations by [0, 1, 5, 6] over four copies of
//               ks, then MAPWITH of word rotations [1, 5, 8, 13] gives the
//               lists kLi1, kOi1, kOi2, kOi3.
//   right path  VZIPWITH(EXOR) of ks with the constants 291, 17767, 35243,
//               52719, 65244, 47768, 30292, 12816 gives ks'; MAPWITH of list
//               rotations by [2, 4, 3, 7] over four copies gives kLi2, kIi1,
//               kIi2, kIi3.
//   TRANSPOSE / GROUP / MERGE
//               collect the eight subkeys of subround i into
//               [kL], [kO], [kI] groups and put subrounds 2p+1 and 2p+2 into
//               pack p+1.
// A list rotation by s makes element i of the list element (i+s) mod 8 of the
// source list; a word rotation is a 16-bit rotate left. The paper's process
// network gives the left-path list rotations as [1, 1, 5, 6] and the word
// rotation of kLi1 as ID, whereas its functional specification and its figure
// give [0, 1, 5, 6] and 1; this design follows the latter, which agrees with
// the KASUMI standard.
// The whole block is combinational: the packs follow the key in the same cycle.
module key_schedule
  import kasumi_pkg::*;
(
  input  logic [127:0]             key,
  output pack_t [NUM_PACKS-1:0]    packs
);

  localparam int unsigned LIST_ROT_L [4] = '{0, 1, 5, 6};   // kLi1, kOi1, kOi2, kOi3
  localparam int unsigned WORD_ROT_L [4] = '{1, 5, 8, 13};
  localparam int unsigned LIST_ROT_R [4] = '{2, 4, 3, 7};   // kLi2, kIi1, kIi2, kIi3

  subkey_t ks       [NUM_KEYWORDS];
  subkey_t ks_x     [NUM_KEYWORDS];
  subkey_t left_l   [4][NUM_KEYWORDS];   // after the first left MAPWITH
  subkey_t left_k   [4][NUM_KEYWORDS];   // kLi1, kOi1, kOi2, kOi3
  subkey_t right_k  [4][NUM_KEYWORDS];   // kLi2, kIi1, kIi2, kIi3
  round_keys_t rk   [NUM_KEYWORDS];      // subkeys of subround i+1

  for (genvar i = 0; i < NUM_KEYWORDS; i++) begin : g_word
    // SEGS and VZIPWITH(EXOR)
    assign ks[i]   = key[127 - 16*i -: 16];
    assign ks_x[i] = ks[i] ^ KEY_CONST[i];

    for (genvar j = 0; j < 4; j++) begin : g_list
      assign left_l[j][i]  = ks[(i + LIST_ROT_L[j]) % NUM_KEYWORDS];
      assign left_k[j][i]  = rol16(left_l[j][i], WORD_ROT_L[j]);
      assign right_k[j][i] = ks_x[(i + LIST_ROT_R[j]) % NUM_KEYWORDS];
    end

    // TRANSPOSE and GROUP
    assign rk[i].kl = {right_k[0][i], left_k[0][i]};
    assign rk[i].ko = {left_k[3][i],  left_k[2][i],  left_k[1][i]};
    assign rk[i].ki = {right_k[3][i], right_k[2][i], right_k[1][i]};
  end

  // MERGE
  for (genvar p = 0; p < NUM_PACKS; p++) begin : g_pack
    assign packs[p].odd  = rk[2*p];
    assign packs[p].even = rk[2*p + 1];
  end

endmodule
