// sub_bytes: SubBytes (e_d = 1) or InvSubBytes (e_d = 0) on a whole State.
//
// Each of the 16 bytes goes through its own sbox instance, independently of
// the others, so the block is 16 parallel table look-ups and has no clock.
// e_d uses the polarity of the core's mode input: 1 enciphers.
module sub_bytes
  import aes_pkg::*;
(
  input  block_t din,
  input  logic   e_d,
  output block_t dout
);

  for (genvar i = 0; i < 16; i++) begin : g_byte
    sbox u_sbox (
      .din (din[127-8*i -: 8]),
      .inv (!e_d),
      .dout(dout[127-8*i -: 8])
    );
  end

endmodule
