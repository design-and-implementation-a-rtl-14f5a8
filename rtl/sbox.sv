// sbox: the AES byte substitution, forward or inverse.
//
// dout = SBox[din] when inv = 0 and InvSBox[din] when inv = 1. Both tables
// are constants built in aes_pkg from the field inverse and the affine map,
// so each instance is a 256-entry ROM (or its logic equivalent). Holding the
// two tables in one block with a select follows the combined
// SBOX/invSBOX unit of the design; the select polarity is this design's
// choice. Purely combinational, no clock.
module sbox
  import aes_pkg::*;
(
  input  byte_t din,
  input  logic  inv,
  output byte_t dout
);

  always_comb dout = inv ? INV_SBOX[din] : SBOX[din];

endmodule
