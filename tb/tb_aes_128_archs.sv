// tb_aes_128_archs: the three core configurations side by side.
//
// Three aes_128 instances, built with MixColumns architecture 1 (bit-level
// equations), 2 (look-up tables) and 3 (shifts and masked XORs, the
// default), receive the same stream of random blocks, keys and directions,
// one block per clock. Each result is compared with the reference model, so
// the test shows that the choice of multiplier changes nothing in the
// function of the core. Reset is applied first and checked on all three.
module tb_aes_128_archs;
  import aes_ref_pkg::*;

  logic         clk = 1'b0;
  logic         rst;
  logic         e_d;
  logic [127:0] donner, clef;
  logic [127:0] sortie [3];

  aes_128 #(.MC_ARCH(1)) dut1 (.clk(clk), .rst(rst), .e_d(e_d), .donner(donner), .clef(clef), .sortie(sortie[0]));
  aes_128 #(.MC_ARCH(2)) dut2 (.clk(clk), .rst(rst), .e_d(e_d), .donner(donner), .clef(clef), .sortie(sortie[1]));
  aes_128 #(.MC_ARCH(3)) dut3 (.clk(clk), .rst(rst), .e_d(e_d), .donner(donner), .clef(clef), .sortie(sortie[2]));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_enc = 0, n_dec = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] p, k, exp;
    logic         m;
    init();
    rst = 1'b1; e_d = 1'b1; donner = '0; clef = '0;
    repeat (2) @(posedge clk);
    #1;
    for (int a = 0; a < 3; a++) begin
      checks++;
      if (sortie[a] !== '0) begin failures++; $display("FAIL reset arch%0d", a + 1); end
    end
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < 300; n++) begin
      m = 1'($urandom()); p = rand128(); k = rand128();
      @(negedge clk);
      e_d = m; donner = p; clef = k;
      exp = m ? ref_encrypt(p, k) : ref_decrypt(p, k);
      @(posedge clk); #1;
      if (m) n_enc++; else n_dec++;
      for (int a = 0; a < 3; a++) begin
        checks++;
        if (sortie[a] !== exp) begin
          failures++;
          if (failures < 10)
            $display("FAIL arch%0d e_d=%0d got %032h exp %032h", a + 1, m, sortie[a], exp);
        end
      end
    end
    $display("blocks: encrypt=%0d decrypt=%0d", n_enc, n_dec);
    checks++; if (n_enc == 0 || n_dec == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
