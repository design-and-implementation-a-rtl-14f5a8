// tb_sbox: exhaustive test of the forward and inverse S-box.
// All 256 inputs in both modes are compared with the reference model, and a
// few entries are compared with published FIPS-197 values
// (S[00]=63, S[01]=7C, S[53]=ED, S[FF]=16, InvS[63]=00, InvS[ED]=53).
module tb_sbox;
  import aes_ref_pkg::*;

  logic [7:0] din, dout;
  logic       inv;
  int checks = 0, failures = 0;

  sbox dut (.din(din), .inv(inv), .dout(dout));

  task automatic check(logic [7:0] a, logic i, logic [7:0] exp);
    din = a; inv = i; #1;
    checks++;
    if (dout !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL sbox in=%02h inv=%0d got %02h exp %02h", a, i, dout, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init();
    for (int a = 0; a < 256; a++) begin
      check(8'(a), 1'b0, S[a]);
      check(8'(a), 1'b1, SI[a]);
    end
    check(8'h00, 0, 8'h63); check(8'h01, 0, 8'h7C); check(8'h53, 0, 8'hED);
    check(8'hFF, 0, 8'h16); check(8'h63, 1, 8'h00); check(8'hED, 1, 8'h53);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
