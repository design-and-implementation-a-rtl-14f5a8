// tb_gf_mul_arch1: exhaustive test of the architecture-1 constant multiplier.
// For all 256 multiplicands the six products by 02, 03, 09, 0B, 0D and 0E are
// compared with the reference carry-less multiply-and-reduce.
module tb_gf_mul_arch1;
  import aes_ref_pkg::*;
  import aes_pkg::gf_prod_t;

  logic [7:0] m;
  gf_prod_t   p;
  int checks = 0, failures = 0;

  gf_mul_arch1 dut (.m(m), .p(p));


  task automatic cmp(string what, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s m=%02h got %02h exp %02h", what, m, got, exp);
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
    for (int v = 0; v < 256; v++) begin
      m = 8'(v); #1;
      cmp("x02", p.x02, ref_mul(m, 8'h02));
      cmp("x03", p.x03, ref_mul(m, 8'h03));
      cmp("x09", p.x09, ref_mul(m, 8'h09));
      cmp("x0b", p.x0b, ref_mul(m, 8'h0B));
      cmp("x0d", p.x0d, ref_mul(m, 8'h0D));
      cmp("x0e", p.x0e, ref_mul(m, 8'h0E));

    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
