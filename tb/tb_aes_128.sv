// tb_aes_128: end-to-end test of the AES-128 core at its default parameters.
//
// The core has a one-clock latency: inputs are changed after a falling edge
// and sortie is sampled after the next rising edge. The test covers
//   - reset: rst = 1 clears sortie (also asynchronously, between edges);
//   - FIPS-197 Appendix B and C.1 vectors, both directions;
//   - the published example: plaintext "hamdoun_&_tragha" with key
//     "arragsliman_miti", enciphered and deciphered back;
//   - a stream of random blocks, one per clock, with e_d switching between
//     ciphering and deciphering from one clock to the next, compared with
//     the reference model (one result per clock is the throughput).
// Each mechanism is counted; one that never happened is a failure.
module tb_aes_128;
  import aes_ref_pkg::*;

  logic         clk = 1'b0;
  logic         rst;
  logic         e_d;
  logic [127:0] donner, clef, sortie;

  aes_128 dut (
    .clk   (clk),
    .rst   (rst),
    .e_d   (e_d),
    .donner(donner),
    .clef  (clef),
    .sortie(sortie)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_enc = 0, n_dec = 0, n_switch = 0, n_reset = 0, n_async_reset = 0;

  task automatic cmp(string what, logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %032h exp %032h", what, got, exp);
    end
  endtask

  // Apply one block and return the result one rising edge later.
  task automatic run(input logic mode, input logic [127:0] d, input logic [127:0] k,
                     output logic [127:0] r);
    @(negedge clk);
    if (mode != e_d) n_switch++;
    e_d = mode; donner = d; clef = k;
    @(posedge clk); #1;
    r = sortie;
    if (mode) n_enc++; else n_dec++;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [127:0] EXAMPLE_PT  = "hamdoun_&_tragha";
  localparam logic [127:0] EXAMPLE_KEY = "arragsliman_miti";

  initial begin
    logic [127:0] r, c, p, k;
    init();
    rst = 1'b1; e_d = 1'b1; donner = '1; clef = '1;
    repeat (2) @(posedge clk);
    #1 cmp("reset", sortie, '0); n_reset++;
    @(negedge clk) rst = 1'b0;

    // FIPS-197 Appendix B.
    run(1, 128'h3243f6a8885a308d313198a2e0370734, 128'h2b7e151628aed2a6abf7158809cf4f3c, r);
    cmp("B enc", r, 128'h3925841d02dc09fbdc118597196a0b32);
    run(0, 128'h3925841d02dc09fbdc118597196a0b32, 128'h2b7e151628aed2a6abf7158809cf4f3c, r);
    cmp("B dec", r, 128'h3243f6a8885a308d313198a2e0370734);
    // FIPS-197 Appendix C.1.
    run(1, 128'h00112233445566778899aabbccddeeff, 128'h000102030405060708090a0b0c0d0e0f, r);
    cmp("C.1 enc", r, 128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    run(0, 128'h69c4e0d86a7b0430d8cdb78070b4c55a, 128'h000102030405060708090a0b0c0d0e0f, r);
    cmp("C.1 dec", r, 128'h00112233445566778899aabbccddeeff);

    // The published example, ASCII, first character in the top byte.
    run(1, EXAMPLE_PT, EXAMPLE_KEY, c);
    cmp("example enc", c, ref_encrypt(EXAMPLE_PT, EXAMPLE_KEY));
    $display("example ciphertext %032h", c);
    run(0, c, EXAMPLE_KEY, r);
    cmp("example dec", r, EXAMPLE_PT);

    // Asynchronous reset between clock edges.
    @(negedge clk);
    #2 rst = 1'b1;
    #1 cmp("async reset", sortie, '0); n_async_reset++; n_reset++;
    @(negedge clk) rst = 1'b0;

    // Back-to-back stream, one block per clock, random direction each time.
    for (int n = 0; n < 400; n++) begin
      logic m;
      m = 1'($urandom());
      k = rand128(); p = rand128();
      @(negedge clk);
      if (m != e_d) n_switch++;
      e_d = m; donner = p; clef = k;
      @(posedge clk); #1;
      cmp(m ? "stream enc" : "stream dec", sortie, m ? ref_encrypt(p, k) : ref_decrypt(p, k));
      if (m) n_enc++; else n_dec++;
    end

    // Round trips of random blocks through the core itself.
    for (int n = 0; n < 50; n++) begin
      k = rand128(); p = rand128();
      run(1, p, k, c);
      run(0, c, k, r);
      cmp("round trip", r, p);
    end

    $display("mechanisms: encrypt=%0d decrypt=%0d mode_switch=%0d reset=%0d async_reset=%0d",
             n_enc, n_dec, n_switch, n_reset, n_async_reset);
    checks++; if (n_enc == 0)         begin failures++; $display("FAIL no encryption"); end
    checks++; if (n_dec == 0)         begin failures++; $display("FAIL no decryption"); end
    checks++; if (n_switch == 0)      begin failures++; $display("FAIL no mode switch"); end
    checks++; if (n_reset == 0)       begin failures++; $display("FAIL no reset"); end
    checks++; if (n_async_reset == 0) begin failures++; $display("FAIL no async reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
