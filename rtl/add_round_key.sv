// add_round_key: AddRoundKey, the State XORed bit by bit with a round key
// (addition in GF(2^8) for each byte S(r,c) ^ K(r,c)). It is its own
// inverse, so the same block serves both directions. Combinational.
module add_round_key
  import aes_pkg::*;
(
  input  block_t din,
  input  block_t rk,
  output block_t dout
);

  always_comb dout = din ^ rk;

endmodule
