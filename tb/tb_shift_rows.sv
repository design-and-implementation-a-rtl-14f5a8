// tb_shift_rows: ShiftRows and InvShiftRows.
// A block whose byte i holds the value i shows the permutation directly:
// after ShiftRows, column c must read S(0,c) S(1,c+1) S(2,c+2) S(3,c+3).
// Random blocks are compared with the reference in both directions.
module tb_shift_rows;
  import aes_ref_pkg::*;
  logic [127:0] din, dout;
  logic         e_d;
  shift_rows dut (.din(din), .e_d(e_d), .dout(dout));
  int checks = 0, failures = 0;

  task automatic cmp(string what, logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %032h exp %032h", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] x;
    init();
    din = 128'h000102030405060708090a0b0c0d0e0f; e_d = 1; #1;
    cmp("shift index", dout, 128'h00050a0f04090e03080d02070c01060b);
    e_d = 0; #1;
    cmp("invshift index", dout, 128'h000d0a0704010e0b0805020f0c090603);
    for (int n = 0; n < 200; n++) begin
      x = rand128();
      din = x; e_d = 1; #1;
      cmp("shift", dout, from_st(ref_shift(to_st(x), 0)));
      din = x; e_d = 0; #1;
      cmp("invshift", dout, from_st(ref_shift(to_st(x), 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
