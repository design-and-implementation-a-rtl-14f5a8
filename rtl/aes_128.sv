// aes_128: AES-128 cipher and inverse cipher in one unrolled datapath.
//
// e_d = 1 enciphers donner with key clef, e_d = 0 deciphers it. The key
// schedule, the initial AddRoundKey, the nine full rounds and the final
// round (no MixColumns) are all combinational, one after the other; the
// only storage is the 128-bit result register sortie. An unrolled datapath
// with a single 128-bit register is what the published resource figures
// for this core (128 registers, no memory bits, nearly the whole FPGA)
// describe.
//
// Deciphering runs the rounds in the same order as ciphering, with the
// inverse blocks: round keys are taken in reverse order, and keys 1..9 are
// passed through InvMixColumns (equivalent inverse cipher), so that
// AddRoundKey can follow InvMixColumns as in the round structure used here.
//
// Interface (names as published): clk, rst (active high, asynchronous, clears
// sortie to zero), e_d, donner[127:0] (data in, byte S(0,0) in bits
// [127:120], State filled column by column), clef[127:0] (key),
// sortie[127:0] (result).
// Timing: sortie takes the result of the inputs present at a rising clk
// edge, so the latency is one clock; a new block can be given every clock.
// The clock period must cover the whole key schedule plus ten rounds.
// MC_ARCH selects the MixColumns multiplier architecture (1, 2 or 3);
// 3, shifts and masked XORs, is the default.
// An assertion checks that sortie reads zero while rst is held; it samples
// rst on the clock, which is why lint notes rst as both an asynchronous
// reset and a synchronous signal.
module aes_128
  import aes_pkg::*;
#(
  parameter int unsigned MC_ARCH = 3
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   e_d,
  input  block_t donner,
  input  block_t clef,
  output block_t sortie
);

  block_t rk    [NR+1];   // cipher round keys 0..NR
  block_t dk    [NR+1];   // round keys as used, in round order
  block_t state [NR+1];   // state after round r (0 = initial AddRoundKey)

  key_expansion #(.ROUNDS(NR)) u_keys (.key(clef), .rk(rk));

  // Keys for the decipher rounds 1..NR-1: InvMixColumns of rk[NR-r].
  for (genvar r = 1; r < NR; r++) begin : g_dkey
    block_t imk;
    inv_mix_columns #(.ARCH(MC_ARCH)) u_imk (.din(rk[NR-r]), .dout(imk));
    assign dk[r] = e_d ? rk[r] : imk;
  end
  assign dk[0]  = e_d ? rk[0]  : rk[NR];
  assign dk[NR] = e_d ? rk[NR] : rk[0];

  add_round_key u_ark0 (.din(donner), .rk(dk[0]), .dout(state[0]));

  for (genvar r = 1; r <= NR; r++) begin : g_round
    aes_round #(.ARCH(MC_ARCH), .FINAL(r == NR)) u_round (
      .din (state[r-1]),
      .e_d (e_d),
      .rk  (dk[r]),
      .dout(state[r])
    );
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) sortie <= '0;
    else     sortie <= state[NR];
  end

  // While reset is held the result register reads zero.
  a_reset_clears: assert property (@(posedge clk) rst |-> sortie == '0)
    else $error("aes_128: sortie not cleared during reset");

endmodule
