// inv_mix_columns: InvMixColumns on a whole State.
//
// Four mix_column units in parallel, each multiplying its column by the
// inverse matrix [0E 0B 0D 09; 09 0E 0B 0D; 0D 09 0E 0B; 0B 0D 09 0E].
// ARCH picks the constant-multiplier architecture as in mix_columns.
// Combinational.
module inv_mix_columns
  import aes_pkg::*;
#(
  parameter int unsigned ARCH = 3
) (
  input  block_t din,
  output block_t dout
);

  for (genvar c = 0; c < 4; c++) begin : g_col
    mix_column #(.ARCH(ARCH), .INV(1'b1)) u_col (
      .din (din[127-32*c -: 32]),
      .dout(dout[127-32*c -: 32])
    );
  end

endmodule
