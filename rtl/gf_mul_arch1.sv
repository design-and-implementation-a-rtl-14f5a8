// gf_mul_arch1: constant GF(2^8) products by bit-level equations
// (MixColumns architecture 1).
//
// Each output bit of m*{02}, {03}, {09}, {0B}, {0D} and {0E} is written out
// as the XOR of the input bits it depends on, reduced modulo
// m(x) = x^8+x^4+x^3+x+1 beforehand. The equations are the ones published
// for this architecture, copied bit for bit; every product is a flat XOR
// tree of depth at most three. Producing all six products from one module
// is this design's own grouping. Combinational.
module gf_mul_arch1
  import aes_pkg::*;
(
  input  byte_t    m,
  output gf_prod_t p
);

  always_comb begin
    // {02}
    p.x02 = {m[6], m[5], m[4], m[3]^m[7], m[2]^m[7], m[1], m[0]^m[7], m[7]};
    // {03}
    p.x03 = {m[6]^m[7], m[5]^m[6], m[4]^m[5], m[3]^m[4]^m[7],
             m[2]^m[3]^m[7], m[1]^m[2], m[0]^m[1]^m[7], m[0]^m[7]};
    // {09}
    p.x09 = {m[4]^m[7], m[3]^m[6]^m[7], m[2]^m[5]^m[6]^m[7], m[1]^m[4]^m[5]^m[6],
             m[0]^m[3]^m[5]^m[7], m[2]^m[6]^m[7], m[1]^m[5]^m[6], m[0]^m[5]};
    // {0B}
    p.x0b = {m[4]^m[6]^m[7], m[3]^m[5]^m[6]^m[7], m[2]^m[4]^m[5]^m[6]^m[7],
             m[1]^m[3]^m[4]^m[5]^m[6]^m[7], m[0]^m[2]^m[3]^m[5], m[1]^m[2]^m[6]^m[7],
             m[0]^m[1]^m[5]^m[6]^m[7], m[0]^m[5]^m[7]};
    // {0D}
    p.x0d = {m[4]^m[5]^m[7], m[3]^m[4]^m[6]^m[7], m[2]^m[3]^m[5]^m[6],
             m[1]^m[2]^m[4]^m[5]^m[7], m[0]^m[1]^m[3]^m[5]^m[6]^m[7], m[0]^m[2]^m[6],
             m[1]^m[5]^m[7], m[0]^m[5]^m[6]};
    // {0E}
    p.x0e = {m[4]^m[5]^m[6], m[3]^m[4]^m[5]^m[7], m[2]^m[3]^m[4]^m[6],
             m[1]^m[2]^m[3]^m[5], m[0]^m[1]^m[2]^m[5]^m[6], m[0]^m[1]^m[6],
             m[0]^m[5], m[5]^m[6]^m[7]};
  end

endmodule
