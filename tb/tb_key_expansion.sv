// tb_key_expansion: the AES-128 key schedule.
// FIPS-197 Appendix A.1 (key 2b7e1516...): round keys 1 and 10 as published;
// then all 11 round keys of random keys against the reference schedule.
module tb_key_expansion;
  import aes_ref_pkg::*;
  logic [127:0] key;
  logic [127:0] rk [11];
  key_expansion dut (.key(key), .rk(rk));
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
    keys_t k;
    init();
    key = 128'h2b7e151628aed2a6abf7158809cf4f3c; #1;
    cmp("rk0",  rk[0],  key);
    cmp("rk1",  rk[1],  128'ha0fafe1788542cb123a339392a6c7605);
    cmp("rk10", rk[10], 128'hd014f9a8c9ee2589e13f0cc8b6630ca6);
    for (int n = 0; n < 100; n++) begin
      key = rand128(); #1;
      k = ref_keys(key);
      for (int r = 0; r < 11; r++) cmp($sformatf("rk%0d", r), rk[r], k[r]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
