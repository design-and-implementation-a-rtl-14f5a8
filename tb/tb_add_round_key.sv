// tb_add_round_key: AddRoundKey.
// FIPS-197 Appendix B initial round (input 3243f6a8... with key 2b7e1516...)
// and random State/key pairs against a bitwise XOR.
module tb_add_round_key;
  import aes_ref_pkg::*;
  logic [127:0] din, rk, dout;
  add_round_key dut (.din(din), .rk(rk), .dout(dout));
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
    din = 128'h3243f6a8885a308d313198a2e0370734;
    rk  = 128'h2b7e151628aed2a6abf7158809cf4f3c; #1;
    cmp("fips", dout, 128'h193de3bea0f4e22b9ac68d2ae9f84808);
    for (int n = 0; n < 200; n++) begin
      din = rand128(); rk = rand128(); #1;
      cmp("xor", dout, din ^ rk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
