// kasumi_s7: the 7-bit KASUMI substitution box S7.
//
// A 128-entry, 7-bit read-only table read combinationally: y = S7[x]. The
// entries are those of the KASUMI specification (3GPP TS 35.202), listed in
// decimal in index order, 16 per line. S7 is a bijection on 0..127. FI uses two
// S7 lookups; synthesis turns the constant table into LUTs or a ROM.
// The paper names S7 as one of FI's look-up tables but does not list it.
module kasumi_s7 (
  input  logic [6:0] x,
  output logic [6:0] y
);

  localparam logic [6:0] S7_TABLE [128] = '{
     54,  50,  62,  56,  22,  34,  94,  96,  38,   6,  63,  93,   2,  18, 123,  33,
     55, 113,  39, 114,  21,  67,  65,  12,  47,  73,  46,  27,  25, 111, 124,  81,
     53,   9, 121,  79,  52,  60,  58,  48, 101, 127,  40, 120, 104,  70,  71,  43,
     20, 122,  72,  61,  23, 109,  13, 100,  77,   1,  16,   7,  82,  10, 105,  98,
    117, 116,  76,  11,  89, 106,   0, 125, 118,  99,  86,  69,  30,  57, 126,  87,
    112,  51,  17,   5,  95,  14,  90,  84,  91,   8,  35, 103,  32,  97,  28,  66,
    102,  31,  26,  45,  75,   4,  85,  92,  37,  74,  80,  49,  68,  29, 115,  44,
     64, 107, 108,  24, 110,  83,  36,  78,  42,  19,  15,  41,  88, 119,  59,   3
  };

  assign y = S7_TABLE[x];

endmodule
