// mix_column: one State column times the MixColumns matrix (INV = 0) or the
// InvMixColumns matrix (INV = 1).
//
// The column a0..a3 (a0 = row 0, in the most significant byte) is treated
// as a polynomial over GF(2^8) and multiplied modulo x^4 + 1 by the fixed
// polynomial, which is the circulant matrix product
//   INV = 0:  [02 03 01 01]    INV = 1:  [0E 0B 0D 09]
//             [01 02 03 01]              [09 0E 0B 0D]
//             [01 01 02 03]              [0D 09 0E 0B]
//             [03 01 01 02]              [0B 0D 09 0E]
// Each input byte feeds one gf_mul of the chosen architecture, and each
// output byte is an XOR of four products. Combinational.
module mix_column
  import aes_pkg::*;
#(
  parameter int unsigned ARCH = 3,
  parameter bit          INV  = 1'b0
) (
  input  logic [31:0] din,
  output logic [31:0] dout
);

  byte_t    a [4];
  gf_prod_t p [4];

  for (genvar r = 0; r < 4; r++) begin : g_mul
    assign a[r] = din[31-8*r -: 8];
    gf_mul #(.ARCH(ARCH)) u_mul (.m(a[r]), .p(p[r]));
  end

  always_comb begin
    for (int r = 0; r < 4; r++) begin
      if (!INV)
        dout[31-8*r -: 8] = p[r].x02 ^ p[(r+1)%4].x03 ^ a[(r+2)%4] ^ a[(r+3)%4];
      else
        dout[31-8*r -: 8] = p[r].x0e ^ p[(r+1)%4].x0b ^ p[(r+2)%4].x0d ^ p[(r+3)%4].x09;
    end
  end

endmodule
