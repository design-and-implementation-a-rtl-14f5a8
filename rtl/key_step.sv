// key_step: one step of the AES-128 key schedule, round key i-1 to round
// key i.
//
// With the previous key as words w0..w3 (w0 in the most significant bits):
//   t  = SubWord(RotWord(w3)) ^ {rcon, 24'h0}
//   w0' = w0 ^ t, w1' = w1 ^ w0', w2' = w2 ^ w1', w3' = w3 ^ w2'.
// SubWord uses four forward sbox instances. Combinational.
module key_step
  import aes_pkg::*;
(
  input  block_t      kin,
  input  byte_t       rcon,
  output block_t      kout
);

  logic [31:0] w [4];
  logic [31:0] rot, sub, t;

  always_comb begin
    for (int i = 0; i < 4; i++) w[i] = kin[127-32*i -: 32];
    rot = {w[3][23:0], w[3][31:24]};
  end

  for (genvar b = 0; b < 4; b++) begin : g_sub
    sbox u_sbox (.din(rot[31-8*b -: 8]), .inv(1'b0), .dout(sub[31-8*b -: 8]));
  end

  always_comb begin
    t = sub ^ {rcon, 24'h000000};
    kout[127:96] = w[0] ^ t;
    kout[95:64]  = w[1] ^ kout[127:96];
    kout[63:32]  = w[2] ^ kout[95:64];
    kout[31:0]   = w[3] ^ kout[63:32];
  end

endmodule
