// gf_mul: selects one of the three constant-multiplier architectures.
//
// ARCH = 1: bit-level XOR equations (gf_mul_arch1)
// ARCH = 2: look-up tables           (gf_mul_arch2)
// ARCH = 3: shifts and masked XORs   (gf_mul_arch3, default)
// All three give the same six products of m by 02, 03, 09, 0B, 0D and 0E;
// they differ only in the logic they map to. Combinational.
module gf_mul
  import aes_pkg::*;
#(
  parameter int unsigned ARCH = 3
) (
  input  byte_t    m,
  output gf_prod_t p
);

  if (ARCH == 1) begin : g_arch1
    gf_mul_arch1 u_mul (.m(m), .p(p));
  end else if (ARCH == 2) begin : g_arch2
    gf_mul_arch2 u_mul (.m(m), .p(p));
  end else begin : g_arch3
    gf_mul_arch3 u_mul (.m(m), .p(p));
  end

  initial assert (ARCH inside {1, 2, 3})
    else $error("gf_mul: ARCH must be 1, 2 or 3, got %0d", ARCH);

endmodule
