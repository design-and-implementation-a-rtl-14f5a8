// shift_rows: ShiftRows (e_d = 1) or InvShiftRows (e_d = 0).
//
// Row r of the State is rotated cyclically by r byte positions: to the left
// for ShiftRows, to the right for the inverse. Row 0 stays. With the State
// filled column by column, output byte S'(r,c) takes S(r,(c+r) mod 4) going
// forward and S(r,(c-r) mod 4) going back. Pure wiring plus a 2:1 mux per
// byte; combinational.
module shift_rows
  import aes_pkg::*;
(
  input  block_t din,
  input  logic   e_d,
  output block_t dout
);

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      for (int r = 0; r < 4; r++) begin
        dout[127-8*(4*c+r) -: 8] = e_d ? get_byte(din, 4*((c+r)%4)     + r)
                                       : get_byte(din, 4*((c+4-r)%4)   + r);
      end
    end
  end

endmodule
