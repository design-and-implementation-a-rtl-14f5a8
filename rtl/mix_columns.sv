// mix_columns: MixColumns on a whole State.
//
// The four columns (bits [127:96] hold column 0) are processed in parallel
// by four mix_column units, each multiplying its column by
// [02 03 01 01; 01 02 03 01; 01 01 02 03; 03 01 01 02]. ARCH picks the
// constant-multiplier architecture (1 equations, 2 tables, 3 shifts and
// masked XORs); 3 is the default. Combinational.
module mix_columns
  import aes_pkg::*;
#(
  parameter int unsigned ARCH = 3
) (
  input  block_t din,
  output block_t dout
);

  for (genvar c = 0; c < 4; c++) begin : g_col
    mix_column #(.ARCH(ARCH), .INV(1'b0)) u_col (
      .din (din[127-32*c -: 32]),
      .dout(dout[127-32*c -: 32])
    );
  end

endmodule
