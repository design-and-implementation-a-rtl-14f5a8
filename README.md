# AES-128 cipher/decipher core with three MixColumns multipliers

This is a single-block AES-128 engine (FIPS-197) that enciphers or deciphers
a 128-bit block with a 128-bit key. Its point of interest is MixColumns, the
only AES step that needs arithmetic in GF(2^8). The core can build its
constant multipliers (by 02, 03, 09, 0B, 0D and 0E) in three ways:

1. **Bit equations.** Each output bit is written out as an XOR of input bits.
2. **Look-up tables.** There is one 256-entry table per constant.
3. **Shifts and masked XORs.** The multiplicand is doubled three times. Each
   doubling shifts left and XORs in `1B` when the dropped bit was 1. The
   constants are then sums of these doublings.

All three compute the same function. Architecture 3 is the default because
it uses the least logic. The paper this design follows gives its area as
about 12 % below the other two.

The RTL is SystemVerilog 2017 and synthesizable. It has no vendor primitives.

## Interface and timing

`aes_128` has these ports. The names are the published ones.

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst` | in | 1 | active high and asynchronous; clears `sortie` to 0 |
| `e_d` | in | 1 | 1 = encipher, 0 = decipher |
| `donner` | in | 128 | data in: plaintext or ciphertext |
| `clef` | in | 128 | cipher key |
| `sortie` | out | 128 | result, registered |

The data layout follows FIPS-197. `donner[127:120]` is State byte S(0,0).
The 16 bytes fill the 4x4 State one column at a time. An ASCII string such
as `"hamdoun_&_tragha"` therefore puts its first character in the top byte.

Timing is one clock. The core samples the inputs at a rising edge, and
`sortie` shows the result after that edge. It can take a new block, key and
direction on every clock, and switching `e_d` between clocks costs nothing.
No `valid` or `busy` signal exists, because none is needed. The price is the
clock period. One period must cover the whole key schedule plus ten rounds of
logic. This is a large, slow core with high throughput, not a compact one.

Parameter: `MC_ARCH` (1, 2 or 3, default 3) selects the multiplier
architecture.

## How a block flows through the core

```
clef ──► key_expansion ──► rk[0..10] ──┬────────────── e_d=1: rk[r]
                                       └► inv_mix_columns (rk[10-r], r=1..9)
                                                     e_d=0: equivalent keys
donner ─► AddRoundKey(rk0 | rk10)
        ─► 9 x aes_round  [(Inv)SubBytes, (Inv)ShiftRows,
                           MixColumns | InvMixColumns, AddRoundKey]
        ─► final aes_round [(Inv)SubBytes, (Inv)ShiftRows, AddRoundKey]
        ─► sortie register
```

Both directions share one datapath. `e_d` goes to every stage:

- `sub_bytes` and `shift_rows` each take `e_d` and apply either the forward
  or the inverse operation.
- Each full round holds both `mix_columns` and `inv_mix_columns`, and `e_d`
  picks one of their outputs.
- The round keys are used in forward order to encipher and in reverse order
  to decipher.

### Why deciphering needs modified keys

This is the least obvious part of the design. The textbook inverse cipher
runs InvShiftRows, InvSubBytes, AddRoundKey, InvMixColumns. This core keeps
the cipher's order instead, with AddRoundKey after the mixing step. That
order is the *equivalent inverse cipher* of FIPS-197. It works because
InvMixColumns is linear:

`InvMixColumns(s ^ k) = InvMixColumns(s) ^ InvMixColumns(k)`

So the key added after InvMixColumns in decipher round r must be
`InvMixColumns(rk[10-r])`. The top computes this with nine extra
`inv_mix_columns` instances on the key path. The first and last keys
(`rk[10]` and `rk[0]`) are used unchanged. SubBytes and ShiftRows commute
(one changes byte values, the other moves bytes), so their order inside a
round does not matter.

### The three multipliers

Each `mix_column` (one State column) has one `gf_mul` per input byte. That
multiplier returns all six products as a struct, `gf_prod_t`. Output row r
of a column is built as follows:

- forward: `02*a[r] ^ 03*a[r+1] ^ a[r+2] ^ a[r+3]`
- inverse: `0E*a[r] ^ 0B*a[r+1] ^ 0D*a[r+2] ^ 09*a[r+3]`

The indices are taken mod 4.

- `gf_mul_arch1` holds the published bit equations for every constant,
  copied unchanged. All six were checked against true GF(2^8)
  multiplication over all 256 inputs.
- `gf_mul_arch2` holds six 256-byte tables. The source gives only the `x02`
  table; this design fills all six at elaboration as `T_c[i] = i*c mod
  x^8+x^4+x^3+x+1`. The testbench compares the `x02` table with the 256
  published values.
- `gf_mul_arch3` forms `temp1 = 2m`, `temp2 = 4m` and `temp3 = 8m`. Each
  doubling is `{t[6:0],0} ^ (1B & {8{t[7]}})`, a mask rather than a branch.
  The products are then:

  | constant | formula |
  |---|---|
  | 03 | `temp1^m` |
  | 09 | `temp3^m` |
  | 0B | `temp1^temp3^m` |
  | 0D | `temp2^temp3^m` |
  | 0E | `temp1^temp2^temp3` |

  Every input takes the same path, so the delay does not depend on the
  data.

### S-box and key schedule

`aes_pkg` builds the S-box at elaboration from its definition:

1. Take the inverse in GF(2^8) (computed as `a^254`; `00` maps to `00`).
2. Apply the affine map `b'_i = b_i ^ b_(i+4) ^ b_(i+5) ^ b_(i+6) ^ b_(i+7) ^ c_i`,
   where `c = 63` and the indices are taken mod 8.

The inverse S-box is the inverse permutation of that table. The design holds
no data files. `sbox` serves both directions through its `inv` select.

`key_expansion` is the standard AES-128 schedule, written as ten chained
`key_step`s: RotWord, SubWord, then XOR with `Rcon` = 01, 02, 04 ... 1B, 36.
It has no registers.

## Files

RTL (`rtl/`), leaf first:

| file | content |
|---|---|
| `aes_pkg.sv` | types, `gf_prod_t`, GF(2^8) helper functions, S-box tables |
| `sbox.sv` | S-box or inverse S-box for one byte |
| `sub_bytes.sv` | 16 S-boxes |
| `shift_rows.sv` | ShiftRows or InvShiftRows |
| `add_round_key.sv` | XOR of State and round key |
| `gf_mul_arch1.sv`, `gf_mul_arch2.sv`, `gf_mul_arch3.sv` | the three multipliers |
| `gf_mul.sv` | selects one multiplier by `ARCH` |
| `mix_column.sv` | one column, forward or inverse matrix |
| `mix_columns.sv`, `inv_mix_columns.sv` | a whole State |
| `key_step.sv`, `key_expansion.sv` | key schedule |
| `aes_round.sv` | one round in either direction, with a `FINAL` variant |
| `aes_128.sv` | the top level |

Testbenches (`tb/`) are self-checking and print
`TB_RESULT checks=N failures=M`. `aes_ref_pkg.sv` is an independent
reference model. It uses different algorithms from the RTL:

- carry-less multiplication followed by reduction;
- inverses found by exhaustive search;
- the textbook inverse cipher with unmodified keys.

Each block has its own testbench (`tb_<module>.sv`). Two testbenches cover the
whole core:

- `tb_aes_128` runs the top at its default parameters. It checks reset
  (synchronous and between clock edges) and the FIPS-197 Appendix B and C.1
  vectors in both directions. It enciphers and deciphers the published
  example, then runs 400 random blocks back to back with `e_d` changing at
  random, and 50 round trips. It fails if encrypt, decrypt, a mode switch or
  either kind of reset never occurred.
- `tb_aes_128_archs` runs the three multiplier architectures side by side on
  the same random stream.

`published_mul2_table.hex` is the published `x02` table, which
`tb_gf_mul_arch2` reads.

To simulate with Verilator, run this from the folder that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_aes_128 \
  -y rtl -y tb +libext+.sv rtl/aes_pkg.sv tb/aes_ref_pkg.sv tb/tb_aes_128.sv
./obj_dir/Vtb_aes_128
```

For another test, change the top module and the last file. Every testbench
runs in well under a minute.

## Where this design departs from its source, and why

- **Unrolled rather than iterative.** The source calls its design iterative,
  but the resources it reports for the full core point to an unrolled
  datapath with one 128-bit register: 128 registers, no memory bits, and
  75 147 of 81 264 logic cells on a Cyclone III EP3C80. This design follows
  the resource figures.
- **Equivalent decipher keys.** The published round diagram puts
  InvMixColumns before AddRoundKey in each decipher round. That order gives
  the right result only with keys passed through InvMixColumns, which the
  source does not mention. This design adds that key path.
- **The published ciphertext.** The source prints a ciphertext for
  `"hamdoun_&_tragha"` with key `"arragsliman_miti"`. It could not be
  reproduced by standard AES-128, with either byte order tried for the
  inputs and the output, or with the State filled by rows. This core follows
  FIPS-197, and the source itself says it was checked against NIST vectors.
  The core gives `2600c3d883377ec67aefd8ba9eb86ade` for that example and
  deciphers it back.
- **Combinational sub-blocks.** In the source's stand-alone results,
  ShiftRows and MixColumns are registered blocks (128 registers each). Here
  they are combinational, because the full core has only the output
  register.
- **Key schedule.** The source only names the key generator. The standard
  schedule is used, producing all eleven keys at once.
- **Same latency both ways.** The source reports that deciphering takes
  longer than ciphering. In this core both directions take one clock, and
  the decipher path is only a little deeper (the key-side InvMixColumns).
- **Choices made here, not in the source:**
  - the reset is asynchronous and clears the output to zero;
  - the `inv` polarity of `sbox`;
  - the byte order of the State;
  - the six multiplier products grouped into one struct.
- **Not built:** AES-192 and AES-256. The source mentions them only as
  background.

## Resources

Synthesis with a generic flow reports 387 port bits, matching the 387 pins
published for the core. It reports one 128-bit register and 200 S-box
instances: 160 in the rounds and 40 in the key schedule. The logic-cell count
on a real FPGA depends on the vendor tool. It has not been measured here.
