// key_expansion: all round keys of AES-128 from the cipher key.
//
// rk[0] is the cipher key; rk[i] = key_step(rk[i-1], Rcon_i) for
// i = 1..ROUNDS, with Rcon_1 = 01 and Rcon_(i+1) = xtime(Rcon_i)
// (01 02 04 08 10 20 40 80 1B 36). The ROUNDS steps are chained without
// registers, so all round keys are valid combinationally as soon as the key
// is. This is the standard FIPS-197 schedule.
module key_expansion
  import aes_pkg::*;
#(
  parameter int unsigned ROUNDS = aes_pkg::NR
) (
  input  block_t key,
  output block_t rk [ROUNDS+1]
);

  function automatic byte_t rcon(int unsigned i);
    byte_t r = 8'h01;
    for (int unsigned j = 1; j < i; j++) r = xtime(r);
    return r;
  endfunction

  assign rk[0] = key;

  for (genvar i = 1; i <= ROUNDS; i++) begin : g_step
    key_step u_step (.kin(rk[i-1]), .rcon(rcon(i)), .kout(rk[i]));
  end

endmodule
