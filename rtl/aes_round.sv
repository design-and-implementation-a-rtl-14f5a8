// aes_round: one AES round for either direction.
//
//   e_d = 1 (cipher):   SubBytes, ShiftRows, MixColumns, AddRoundKey
//   e_d = 0 (decipher): InvSubBytes, InvShiftRows, InvMixColumns, AddRoundKey
// With FINAL = 1 the (Inv)MixColumns step is left out, as in the last round.
// The decipher order is that of the equivalent inverse cipher: AddRoundKey
// comes after InvMixColumns, so the key applied in rounds 1..NR-1 must be
// InvMixColumns of the cipher's round key (the caller supplies it). Both
// mix_columns and inv_mix_columns are present and e_d selects one; SubBytes
// and ShiftRows are shared blocks with a direction input. Combinational.
module aes_round
  import aes_pkg::*;
#(
  parameter int unsigned ARCH  = 3,
  parameter bit          FINAL = 1'b0
) (
  input  block_t din,
  input  logic   e_d,
  input  block_t rk,
  output block_t dout
);

  block_t sb, sr, mixed;

  sub_bytes  u_sub   (.din(din), .e_d(e_d), .dout(sb));
  shift_rows u_shift (.din(sb),  .e_d(e_d), .dout(sr));

  if (FINAL) begin : g_final
    assign mixed = sr;
  end else begin : g_mix
    block_t mc, imc;
    mix_columns     #(.ARCH(ARCH)) u_mc  (.din(sr), .dout(mc));
    inv_mix_columns #(.ARCH(ARCH)) u_imc (.din(sr), .dout(imc));
    assign mixed = e_d ? mc : imc;
  end

  add_round_key u_ark (.din(mixed), .rk(rk), .dout(dout));

endmodule
