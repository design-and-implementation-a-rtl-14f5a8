// gf_mul_arch3: constant GF(2^8) products from shifts and masked XORs
// (MixColumns architecture 3, the one the core uses by default).
//
// temp1 = 2m, temp2 = 4m and temp3 = 8m are formed by three doublings. One
// doubling shifts left by one, drops the MSB and, when that MSB was 1, XORs
// in 8'h1B; the condition is applied as an AND with a mask made of eight
// copies of the dropped bit, so there is no branch and every input takes the
// same path. The products then follow from the binary digits of the
// constant:
//   03 = temp1 ^ m            09 = temp3 ^ m
//   0B = temp1 ^ temp3 ^ m    0D = temp2 ^ temp3 ^ m
//   0E = temp1 ^ temp2 ^ temp3                 and 02 = temp1.
// All of this follows the published architecture. Combinational.
module gf_mul_arch3
  import aes_pkg::*;
(
  input  byte_t    m,
  output gf_prod_t p
);

  byte_t and_mask1, and_mask2, and_mask3;
  byte_t temp1, temp2, temp3;

  always_comb begin
    and_mask1 = {8{m[7]}};
    temp1     = {m[6:0], 1'b0} ^ (POLY_LOW & and_mask1);
    and_mask2 = {8{temp1[7]}};
    temp2     = {temp1[6:0], 1'b0} ^ (POLY_LOW & and_mask2);
    and_mask3 = {8{temp2[7]}};
    temp3     = {temp2[6:0], 1'b0} ^ (POLY_LOW & and_mask3);

    p.x02 = temp1;
    p.x03 = temp1 ^ m;
    p.x09 = temp3 ^ m;
    p.x0b = temp1 ^ temp3 ^ m;
    p.x0d = temp2 ^ temp3 ^ m;
    p.x0e = temp1 ^ temp2 ^ temp3;
  end

endmodule
