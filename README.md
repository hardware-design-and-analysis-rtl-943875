# ACE and WAGE cipher cores

This is synthesizable SystemVerilog for two lightweight authenticated ciphers, ACE and WAGE. Both
use the same 64-bit valid/ready interface, and each can be unrolled to compute P rounds per clock
cycle. The top module, `ace_wage_top`, places the two cores side by side on one clock. Each core
keeps its own set of interface ports. At the default parameters, each core computes one round per
clock.

| Core | State | Permutation | Cycles per 64-bit block | Supported P |
|------|-------|-------------|-------------------------|-------------|
| ACE  | 320 bits, registers A–E | 16 steps × 8 Simeck rounds = 128 rounds | 128/P | 1, 2, 4, 8 |
| WAGE | 259 bits, 37 stages of 7 bits | 111 rounds plus 1 input slot = 112 slots | ⌈112/P⌉ | 1, 2, 3, 4, 6, 8 |

These cycle counts give 64/128·P bits per cycle for ACE and 64/⌈112/P⌉ for WAGE: 0.57, 1.14,
1.68, 2.29 and 4.57 for P = 1, 2, 3, 4 and 8.

## Important limitation: the WAGE S-box is a stand-in

The 7-bit WAGE S-box (`wage_sb`) is not the published one. This module uses a placeholder with the
same structure: five steps of a small nonlinear shift register, then an XOR with 0x2e. The
placeholder is a permutation, so the core still works as a cipher. Its ciphertexts and tags do not
match the WAGE test vectors, however. To fix this, replace the body of `rtl/wage_sb.sv` with the
real table or function. Nothing else depends on how SB works inside.

The WAGE load and tag word formats are also this design's own (see *WAGE datapath* below). The
same goes for which `i_data` bits feed which rate stage. Only the structure of these formats
follows the published hardware design: five loading regions, data fed straight into the region's
input stage, and shift-out of the tag through the region outputs. As a result, interoperability
with the reference WAGE software has not been checked. WGP, the feedback polynomial, the ω
multiplier and the round constants follow the WAGE definition. The first WGP table entries match
the known values.

## Files

| File | What it is |
|------|------------|
| `rtl/ace_pkg.sv` | ACE constants, mode and domain codes, and the `ace_ctrl_t` control word |
| `rtl/ace_sb64.sv` | One Simeck round (SB-64 box) with its round-constant bit |
| `rtl/ace_lfsr_c.sv` | ACE constant LFSR: 3·P round-constant bits and three 8-bit step constants per cycle |
| `rtl/ace_datapath.sv` | Registers A–E, P unrolled rounds, step function, and input/output/load muxes |
| `rtl/ace_fsm.sv` | ACE controller: `pcount`, phases and valid-bit protocol |
| `rtl/ace_top.sv` | ACE core |
| `rtl/wage_pkg.sv` | WAGE types and constants, GF(2^7) helpers, and WGP table generation |
| `rtl/wage_wgp.sv` | WGP look-up table, 128 × 7, built at elaboration |
| `rtl/wage_sb.sv` | 7-bit S-box (stand-in, see above) |
| `rtl/wage_round.sv` | One WAGE round |
| `rtl/wage_lfsr_c.sv` | WAGE constant LFSR: two 7-bit constants per round, 2·P-way |
| `rtl/wage_lfsr.sv` | 37-stage state, input slot, P round slots, and load/tag shifting |
| `rtl/wage_fsm.sv` | WAGE controller |
| `rtl/wage_top.sv` | WAGE core |
| `rtl/ace_wage_top.sv` | Both cores, one clock, `ace_*` and `wage_*` port sets |
| `tb/ace_ref_pkg.sv`, `tb/wage_ref_pkg.sv` | Untimed reference models used by the testbenches |
| `tb/tb_*.sv` | One self-checking testbench per module |

## Interface (per core)

| Signal | Dir | Width | Meaning |
|--------|-----|-------|---------|
| `clk` | in | 1 | clock (shared by both cores in the top) |
| `reset` | in | 1 | synchronous reset of the controller |
| `i_mode` | in | 2 | ACE: 00 encrypt, 01 decrypt, 10 hash absorb, 11 hash squeeze. WAGE: bit 0 = decrypt |
| `i_dom_sep` | in | 2 | 00 key / initialisation / finalisation, 01 associated data, 10 message |
| `i_padding` | in | 1 | this (last) block carries a 10* pad |
| `i_data` | in | 64 | input word |
| `i_valid` | in | 1 | `i_data` is valid |
| `o_ready` | out | 1 | the core accepts a word this cycle |
| `o_data` | out | 64 | output word, zero when not valid |
| `o_valid` | out | 1 | `o_data` is valid |

A word is accepted in a cycle where `i_valid` and `o_ready` are both high. The environment may
wait any number of cycles before presenting a word; the core then simply stalls. The core does not
count blocks.

### Operation sequence

**ACE AEAD**

1. Four load words: key word 0 goes to A (D is cleared), key word 1 to C, nonce word 0 to B,
   nonce word 1 to E.
2. The first permutation then runs (128/P cycles, `o_ready` low).
3. Each block is accepted in one cycle, which is also the first round cycle. Blocks come in this
   order:
   - 2 key blocks with separator 00.
   - Associated-data blocks with separator 01.
   - Message or ciphertext blocks with separator 10. For these, `o_data` = input XOR rate is
     returned in the accept cycle with `o_valid` high.
   - 2 finalisation key blocks with separator 00.
4. When the permutation after the second finalisation block ends, the core outputs two tag words
   on two cycles: {A[63:32], C[63:32]}, then {A[31:0], C[31:0]}.
5. The core then waits for the next load.

Because initialisation and finalisation share separator 00, the controller keeps two flags: one
records that a message block has been seen, the other that the first finalisation block has been
taken.

**ACE hash**

1. One `i_valid` word with `i_mode` = 1x loads the fixed IV (B[63:40] = 80 40 40, everything else
   zero). Its data is ignored, and the first permutation follows.
2. Absorb blocks use `i_mode` = 10.
3. Squeeze blocks use `i_mode` = 11. Each returns the rate in `o_data` and starts another
   permutation.
4. A hash computation ends with `reset`.

**WAGE AEAD**

1. Nine load words, then the first permutation (⌈112/P⌉ cycles).
2. Blocks as for ACE: the key in 2 blocks, then associated data, then message, then 2
   finalisation blocks.
3. After the final permutation, nine tag cycles with `o_valid` high.

**Decryption with padding.** With `i_mode[0]` = 1, the ciphertext replaces the rate and the
plaintext is `o_data` = rate XOR ciphertext. If `i_padding` is high, the environment gives the last
ciphertext block already padded with 10*. The core then finds the lowest set bit, which is the pad
bit. Bits above it are replaced as usual. The pad bit and the bits below it are XORed into the
rate, which matches what the encryptor absorbed. The pad bits of the returned plaintext are
meaningless.

## ACE datapath

The rate is A[63:32] and C[63:32]. In the accept cycle, the input mux XORs or replaces the rate
and XORs the domain separator into E[1:0]. The round logic is three chains of P `ace_sb64` boxes,
on A, C and E. On the last round cycle of each step (every 8/P cycles), the step function is
applied: B ^= C′ ^ const, D ^= E′ ^ const, E′ ^= A′ ^ const. Each const is 56 ones above an 8-bit step constant in the low
byte. The words are then permuted (A, B, C, D, E) ← (D′, C′, A′, E″, B′).

`ace_lfsr_c` produces the constants. It is a 7-bit LFSR for q(n+7) = q(n) ⊕ q(n+1), seeded with all
ones. Each cycle it advances by 3·P bits through 3·P + 7 unrolled XORs. The step constants are the
21 sequence bits that follow the last round's bits in a step. The generator is reseeded on the last
cycle of each permutation and whenever no permutation runs. This way, a block accepted directly
after a permutation starts at the seed.

The controller (`ace_fsm`) has the states LOAD, IDLE, RUN and TAG. `pcount` counts the cycles of a
permutation. The accept cycle is cycle 0, and the core returns to IDLE when `pcount` wraps.
Assertions check the `pcount` range.

## WAGE datapath

`wage_lfsr` holds 37 stages of 7 bits. A round (`wage_round`) does the following:

- Shifts every stage down by one.
- Sets S36 = f ⊕ WGP(S36) ⊕ rc1, where f = S31 ⊕ S30 ⊕ S26 ⊕ S24 ⊕ S19 ⊕ S13 ⊕ S12 ⊕ S8 ⊕ S6 ⊕ ω·S0.
- Sets S18 = S19 ⊕ WGP(S18) ⊕ rc0.
- Sets S29, S23, S10 and S4 to the next stage XOR SB of S34, S27, S15 and S8.

Field elements are 7-bit vectors whose bit 6 is the coefficient of ω^0. The field polynomial is
x^7 + x^3 + x^2 + x + 1. `wage_wgp` is a 128-entry table computed by a constant function from
WGP(x) = q(x^13). Its first entries are 00 12 0a 4b 66 0c 48 73 …

**Unrolled schedule.** A permutation is 112 slots. Slot 0 takes the input: absorb or replace, plus
the domain separator XORed into S0[1:0]. Slots 1 to 111 are the rounds. With P slots per cycle,
one block takes ⌈112/P⌉ cycles. For P = 3, the last cycle has one idle slot, masked by `round_en`.
The constant generator (x^7 + x + 1, two constants per round) is seeded one round before the all-ones
state, because the accept cycle performs no round.

**Rate, load and tag.** `i_data[7k+6:7k]` (k = 0..8) are the rate stages S8, S9, S15, S16, S18,
S27, S28, S34 and S35. `i_data[63]` is S36 bit 0.

- Loading shifts the whole state down by one per word. Five region inputs overwrite their stages:
  S8 ← bits 6:0, S16 ← bits 27:21, S18 ← bits 34:28, S27 ← bits 41:35 and S36 ← bits 63:57.
- The tag is nine cycles of shifting with SB and WGP off. Each tag word shows S9 in bits 13:7, S16
  in bits 27:21 and S28 in bits 48:42.

## Departures from the published design and open points

- The WAGE S-box is a stand-in (see above).
- The WAGE load and tag word formats and the `i_data` bit ↔ stage map are this design's own.
- Several details are not fixed by the published description: the ACE key/nonce word order, the
  order of the ACE tag words, the end of a hash run by `reset`, and the way the controller
  recognises finalisation. This design's choices are described above.
- Clock gating is not modelled; registers use enables instead.
- The two cores are separate designs in the original work. `ace_wage_top` only places them
  together.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M`
and has a watchdog. The reference models in `tb/*_ref_pkg.sv` are written independently of the
RTL structure. For example, field multiplication there is bit-serial, WGP uses square-and-multiply,
and the constants come from an explicit bit array.

- `tb_ace_top` runs full encryption, padded decryption, tag comparison and hashing with random
  stalls at P = 1, 2, 4 and 8. It checks the 128/P latency of every block.
- `tb_wage_top` runs the same flow at P = 1, 2, 3, 4, 6 and 8.
- `tb_ace_wage_top` drives both cores of the top at the default parameters at the same time. It
  counts every mechanism (stalls, loads, encryption, decryption, padded decryption, tags, hash
  absorb and squeeze, both cores busy) and fails if one never happens.

The ACE reference model reproduces the published round and step constants. The ACE core has not
been compared with official ACE test vectors, because none were available here.

To simulate a testbench with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/ace_pkg.sv rtl/wage_pkg.sv tb/ace_ref_pkg.sv tb/wage_ref_pkg.sv \
    tb/tb_ace_wage_top.sv --top-module tb_ace_wage_top -o sim
./obj_dir/sim
```
