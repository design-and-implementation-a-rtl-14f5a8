// tb_sub_bytes: SubBytes and InvSubBytes on whole blocks.
// Checks the FIPS-197 Appendix B round-1 value (193de3be... -> d42711ae...),
// random blocks in both directions against the reference, and that the
// inverse undoes the forward substitution.
module tb_sub_bytes;
  import aes_ref_pkg::*;
  logic [127:0] din, dout;
  logic         e_d;
  sub_bytes dut (.din(din), .e_d(e_d), .dout(dout));
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
    logic [127:0] x, y;
    init();
    din = 128'h193de3bea0f4e22b9ac68d2ae9f84808; e_d = 1; #1;
    cmp("fips sub", dout, 128'hd42711aee0bf98f1b8b45de51e415230);
    for (int n = 0; n < 200; n++) begin
      x = rand128();
      din = x; e_d = 1; #1;
      cmp("sub", dout, from_st(ref_sub(to_st(x), 0)));
      y = dout;
      din = x; e_d = 0; #1;
      cmp("invsub", dout, from_st(ref_sub(to_st(x), 1)));
      din = y; e_d = 0; #1;
      cmp("invsub(sub)", dout, x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
