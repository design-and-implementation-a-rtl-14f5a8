// gf_mul_arch2: constant GF(2^8) products by look-up tables
// (MixColumns architecture 2).
//
// Six 256 x 8 tables, one per constant {02}, {03}, {09}, {0B}, {0D}, {0E},
// are indexed by the multiplicand. Only the {02} table is published with the
// architecture; all six are computed here at elaboration as
// T_c[i] = i * c modulo x^8+x^4+x^3+x+1 (aes_pkg::make_mul_table), which
// reproduces the published {02} table exactly. Combinational ROM read.
module gf_mul_arch2
  import aes_pkg::*;
(
  input  byte_t    m,
  output gf_prod_t p
);

  localparam table_t T02 = make_mul_table(8'h02);
  localparam table_t T03 = make_mul_table(8'h03);
  localparam table_t T09 = make_mul_table(8'h09);
  localparam table_t T0B = make_mul_table(8'h0B);
  localparam table_t T0D = make_mul_table(8'h0D);
  localparam table_t T0E = make_mul_table(8'h0E);

  always_comb begin
    p.x02 = T02[m];
    p.x03 = T03[m];
    p.x09 = T09[m];
    p.x0b = T0B[m];
    p.x0d = T0D[m];
    p.x0e = T0E[m];
  end

endmodule
