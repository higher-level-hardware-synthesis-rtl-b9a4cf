// kasumi_pkg: types and constants shared by the KASUMI datapath.
//
// KASUMI enciphers a 64-bit block under a 128-bit key in eight Feistel
// subrounds. The key schedule cuts the key into eight 16-bit words and derives
// eight subkeys per subround: two for FL (KL), three for FO (KO) and three for
// the FI calls inside FO (KI). Subkeys are delivered in "packs": one pack holds
// the subkeys of an odd subround followed by those of the next even subround,
// so the cipher is four rounds of two subrounds each, fed by four packs.
//
// Conventions (this design's own choice; the grouping itself follows the
// specification): element 0 of every subkey array is the first subkey of that
// kind, e.g. kl[0] = KL_i1, ko[2] = KO_i3. Bit 127 of the key is the most
// significant bit of the first key word K1, and bit 63 of a data block is the
// most significant bit of its left half.
package kasumi_pkg;

  localparam int unsigned NUM_PACKS    = 4;   // rounds of two subrounds
  localparam int unsigned NUM_KEYWORDS = 8;   // 16-bit words of the private key

  typedef logic [15:0] subkey_t;

  // Subkeys of one subround: the groups [kL], [kO], [kI].
  typedef struct packed {
    subkey_t [1:0] kl;
    subkey_t [2:0] ko;
    subkey_t [2:0] ki;
  } round_keys_t;

  // One pack: [kLo, kOo, kIo, kLe, kOe, kIe], odd subround first.
  typedef struct packed {
    round_keys_t odd;
    round_keys_t even;
  } pack_t;

  // Constants XORed into the key words to form K'_j (291, 17767, ... 12816),
  // index 0 applies to K1.
  localparam subkey_t [NUM_KEYWORDS-1:0] KEY_CONST = {
    16'd12816, 16'd30292, 16'd47768, 16'd65244,
    16'd52719, 16'd35243, 16'd17767, 16'd291
  };

  // Rotate a 16-bit subkey left by n places (n < 16).
  function automatic subkey_t rol16(subkey_t x, int unsigned n);
    return subkey_t'((x << n) | (x >> (16 - n)));
  endfunction

endpackage
