// tb_mix_columns: MixColumns with each of the three multiplier architectures.
// The default instance (architecture 3) is checked on the published example
// column and on random blocks against the reference; instances with
// architectures 1 and 2 are checked on the same random blocks.
module tb_mix_columns;
  import aes_ref_pkg::*;
  logic [127:0] din, dout, dout1, dout2;
  mix_columns              dut  (.din(din), .dout(dout));
  mix_columns #(.ARCH(1)) dut1 (.din(din), .dout(dout1));
  mix_columns #(.ARCH(2)) dut2 (.din(din), .dout(dout2));
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
    logic [127:0] x, e;
    init();
    // The published example column D4 BF 5D 30 (result 04 66 81 E5, from
    // FIPS-197) and the other three columns of the same State.
    din = {32'hd4bf5d30, 32'he0b452ae, 32'hb84111f1, 32'h1e2798e5}; #1;
    cmp("example", dout, 128'h046681e5e0cb199a48f8d37a2806264c);
    for (int k = 0; k < 300; k++) begin
      x = rand128();
      din = x; #1;
      e = ref_mix_block(x, 0);
      cmp("arch3", dout, e);
      cmp("arch1", dout1, e);
      cmp("arch2", dout2, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
