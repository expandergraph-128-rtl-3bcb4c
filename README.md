# ExpanderGraph-128: an iterative encryption/decryption core

ExpanderGraph-128 (EGC128) is a 128-bit block cipher with a 128-bit key. Its diffusion does not
come from S-boxes or an MDS matrix. It comes from a sparse graph. The 64 bits of one Feistel half
are the vertices of a 3-regular graph. In every round, each vertex computes one fixed 4-input
Boolean function ("Rule-A") of its own bit and its three neighbours' bits. Because each output
bit depends on exactly four input bits, the whole nonlinear layer is 64 four-input functions plus
wiring: one LUT4 per bit on an FPGA. Twenty such rounds in a balanced Feistel network make the
cipher, and a 64-bit LFSR generates the round keys on the fly.

This repository holds synthesizable SystemVerilog for a compact, iterative implementation of the
cipher. One 128-bit state register, one round datapath and one key-schedule LFSR serve both
encryption and decryption, chosen by a mode bit. The core computes one round per clock, and one
block takes 49 clock cycles. The RTL reproduces the cipher's published reference vectors. The
differences from the published description are listed in the last section.

## The cipher

**Block and key split.** The plaintext is `P = L0 || R0`, with `L0` in bits 127:64. The key is
`K = K_high || K_low`, with `K_high` in bits 127:64. Bit 0 of every word is its least
significant bit.

**Round.** Rounds `r = 0 .. 19` compute

    L[r+1] = R[r]
    R[r+1] = L[r] ^ F_core(R[r]) ^ RK[r]

and the ciphertext is `L20 || R20`. No output swap is undone after the last round.

**F_core, the graph layer.** For an input `x` of 64 bits, output bit `i` is

    y[i] = RuleA(x[i], x[(i-1) mod 64], x[(i+1) mod 64], x[(i+16) mod 64])

The graph is a circulant with offsets -1, +1 and +16. The two local edges form a ring. The +16
chord lets a single changed bit reach every position within a few rounds.

**Rule-A** has truth table `0x036F`, indexed as `{x3,x2,x1,x0}`. Its algebraic normal form is

    RuleA = 1 ^ x2 ^ x0·x2 ^ x1·x2 ^ x1·x3 ^ x0·x2·x3

It is balanced, has nonlinearity 4 (the maximum for four variables) and algebraic degree 3. The
index order `{x3,x2,x1,x0}` is the one under which the truth table and the ANF agree.

**Key schedule.** A 64-bit LFSR is seeded with `S0 = K_high`. If `K_high` is zero, the seed is
`S0 = 1`, because the all-zero state would never leave zero. Each step shifts right by one and
inserts the feedback bit at bit 63:

    S[r+1] = (S[r] >> 1) | ((s0 ^ s1 ^ s3 ^ s4) << 63)      // x^64 + x^4 + x^3 + x + 1

The round key is `RK[r] = K_low ^ S[r] ^ RC[r]`. No round key is ever stored.

## Round constants and the reference vectors

`RC[r]` is the r-th 64-bit word of the hexadecimal expansion of pi's fractional part. In other
words, `RC[r]` is hex digits `16r .. 16r+15` after the point:

    RC0 = 243F6A8885A308D3   RC1 = 13198A2E03707344   RC2 = A4093822299F31D0   RC3 = 082EFA98EC4E6C89
    ...                                                                        RC19 = 7B54A41DC25A59B5

The published description of the cipher prints `RC0`, `RC1` and `RC2` with exactly these values.
It leaves out `RC3 .. RC18`. It prints `RC19` as `0x3707344A40938220`, which is not a pi word.
That printed value also fails to reproduce any of the published ciphertexts. With the 20 pi words
above, the core matches nine of the ten published reference vectors bit for bit.

The tenth vector has key = plaintext = 1. It is printed as
`AEDAFEA5219FFEBF B979BE5F1D6D7D8D`. Both the core and an independent model give
`AEDAFAA5219FFEBF B979BE5F1D6D7D8D`, which differs in a single bit. The testbench checks the
computed value and notes the difference.

The table is in `egc_pkg::ROUND_CONST`. The testbench does not copy it. Instead it recomputes
every digit from pi with the Bailey-Borwein-Plouffe digit-extraction formula.

## One datapath for both directions

The engine has one round datapath, `egc_feistel_round`: `(L, R, RK) -> (R, L ^ F(R) ^ RK)`.
Decryption reuses it without inverting `F_core` in two ways.

1. **Halves swapped in and out.** For decryption, the ciphertext is loaded as `(R20, L20)`
   instead of `(L20, R20)`. Applying the encryption round with key `RK19` gives
   `(L20, R20 ^ F(L20) ^ RK19)`, which is `(R19, L19)`. After 20 rounds with the keys in
   reverse order, the register holds `(R0, L0)`, and the output swap gives `P = L0 || R0`. This
   is the same computation as the textbook Feistel inverse (`R[r] = L[r+1]`,
   `L[r] = R[r+1] ^ F(R[r]) ^ RK[r]`), written with the encryption round.
2. **LFSR run backwards.** Decryption needs `S19` first, then `S18`, down to `S0`. The LFSR
   step is invertible. Bits 1..63 of the previous state are bits 0..62 of the current state
   `t`. The lost bit 0 follows from the feedback equation:

       S[r] = { t[62:0], t63 ^ t0 ^ t2 ^ t3 }          where t = S[r+1]

   So a decryption first steps the LFSR forward 19 times from `S0` to reach `S19`. Each round
   then steps it back once. The round-constant table is read with index `19 - round`.

## The 49-cycle schedule

The published FPGA cores take 49 cycles per block ("20 rounds plus key-schedule and control
overhead"). The source does not break that figure down. `egc_controller` gives these phases:

| cycle (1 = accepting edge) | phase | work |
|---|---|---|
| 1 | IDLE, or FINAL of the previous block | `start` accepted: state, `K_low`, LFSR seed and mode latched |
| 2 .. 29 | SETUP (28 cycles) | decryption: LFSR forward 19 times (`S0 -> S19`); the remaining cycles wait |
| 30 .. 49 | ROUND (20 cycles) | one Feistel round per cycle; LFSR forward (encrypt) or back (decrypt) |
| edge 49 → | FINAL | output register written; `done` high for one cycle |

`done` rises on the 49th rising edge after the one that accepted `start`. A `start` that is held
high during the FINAL cycle is accepted in that same cycle, so back-to-back blocks finish every
49 cycles. That gives 128 bits / 49 cycles, or 261 Mbit/s at 100 MHz.

Both directions take the same number of cycles, and no cycle count depends on the data or the
key. Nine of the 28 setup cycles do no work. They only bring the total to the published 49. Set
the `SETUP_CYCLES` parameter to 19 for the minimum 40-cycle block. Decryption needs at least 19
setup cycles, and elaboration fails below that.

## Interface of `egc128_engine`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, rising edge |
| `rst_n` | in | 1 | asynchronous reset, active low; clears state, output and FSM |
| `start` | in | 1 | start a block; sampled when the engine is not busy |
| `mode` | in | 1 | 0 = encrypt, 1 = decrypt; sampled with `start` |
| `key` | in | 128 | `K_high || K_low`; sampled with `start` |
| `din` | in | 128 | plaintext (encrypt) or ciphertext (decrypt); sampled with `start` |
| `busy` | out | 1 | block in progress (SETUP and ROUND); `start` is ignored while high |
| `done` | out | 1 | one-cycle pulse: `dout` has just been updated |
| `dout` | out | 128 | result; holds until the next block ends |

`key`, `din` and `mode` are captured on the accepting edge and need not be held afterwards. The
key register, the LFSR and the state register are loaded together, so every block can use a
different key.

## Modules

| file | role |
|---|---|
| `rtl/egc_pkg.sv` | widths, round count, Rule-A truth table, +16 offset, mode enum, the 20 round constants |
| `rtl/egc_rule_a.sv` | Rule-A, a 16-entry truth-table lookup |
| `rtl/egc_fcore.sv` | F_core: 64 Rule-A instances wired by the -1/+1/+16 graph (width and offset are parameters) |
| `rtl/egc_feistel_round.sv` | one combinational Feistel round around F_core |
| `rtl/egc_round_const.sv` | round-constant ROM, indexed by round number |
| `rtl/egc_lfsr64.sv` | key-schedule LFSR with load (zero seed becomes 1), forward step and inverse step |
| `rtl/egc_key_schedule.sv` | `K_low` register + LFSR + ROM → `RK = K_low ^ S ^ RC` |
| `rtl/egc_controller.sv` | IDLE/SETUP/ROUND/FINAL FSM, round index, LFSR direction, handshake |
| `rtl/egc128_engine.sv` | top: state register, input/output half swap, instances of the above |

The design has 396 flip-flops: 128 for the state, 128 for the output register, 64 for the LFSR,
64 for `K_low` and 12 for control. Apart from the round-constant ROM and the 64 Rule-A
functions, the combinational logic is XORs and 2:1 multiplexers.

Assertions check that the LFSR never holds zero, that `done` lasts one cycle, and that the LFSR
is never asked to step both ways at once.

## Verification

Each module has a self-checking testbench in `tb/`. The testbenches compare against the
behavioural model in `tb/egc_ref_pkg.sv`. That model is written from the equations: Rule-A from
its ANF, constants from the BBP formula, and decryption as the literal Feistel inverse with
precomputed keys.

| testbench | checks |
|---|---|
| `tb_egc_rule_a` | all 16 inputs against the ANF; the truth table equals `0x036F` |
| `tb_egc_fcore` | zero, ones, all 128 single-bit patterns, 500 random words |
| `tb_egc_round_const` | all 20 constants against BBP-computed pi; the three printed constants; out-of-range reads 0 |
| `tb_egc_lfsr64` | zero seed, 200 forward steps, 200 backward steps retracing them, hold |
| `tb_egc_key_schedule` | 20 keys (including `K_high = 0`), all round keys in both orders |
| `tb_egc_feistel_round` | 503 random and corner-case rounds |
| `tb_egc_controller` | 49-cycle latency, round-index order, 19 pre-advance steps for decryption only, step directions, start ignored while busy |
| `tb_egc128_engine` | the 10 reference vectors (encrypt and decrypt), 100 random encrypt/decrypt pairs against the model, 49-cycle latency of every block, back-to-back blocks at a 49-cycle period, a start while busy, `K_high = 0`, reset in mid-block |

`tb_egc128_engine` runs the top at its default parameters, and the whole run takes well under a
second. Each testbench prints `TB_RESULT checks=N failures=M`. To run one with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/egc_pkg.sv tb/egc_ref_pkg.sv tb/tb_egc128_engine.sv --top-module tb_egc128_engine
    ./obj_dir/Vtb_egc128_engine

Replace the last file and the top name to run another testbench. To lint the RTL:

    verilator --lint-only -Wall -Irtl rtl/egc_pkg.sv rtl/egc128_engine.sv --top-module egc128_engine

Verilator reports two kinds of warning, both harmless:

- `SYNCASYNCNET`, because the assertions use the reset as their `disable iff` condition.
- Unused package constants, because each module uses only part of `egc_pkg`.

## Where this differs from the published design, and what is not here

- **Round constants.** The 20 pi words are used throughout, and the printed `RC19` is not (see
  above). This is the only reading that reproduces the reference vectors.
- **Cycle breakdown.** The 49-cycle total is the published one. The split into 1 + 28 + 20
  cycles, and the 9 idle setup cycles, are this design's choice. So are the start/busy/done
  handshake, the reset values and the output register.
- **Decryption mechanics.** The source says the unified engine shares one `F_core` and uses an
  inverse LFSR step. The half-swap scheme and the inverse-step equation are this
  implementation's own.
- **Standalone cores.** The published work also measured an encryption-only core and a
  decryption-only core. Both have the same 49-cycle latency. They are not provided separately:
  tie `mode` to a constant and synthesis removes the unused direction.
- **Implementation numbers not reproduced.** The published figures are 380/368/485 LUTs on
  Artix-7, 164–172 MHz Fmax and 5.52 kGE in 45 nm. They belong to the authors' own RTL and tool
  runs. This design's 396 flip-flops compare with the 457 and 399 DFFs reported for the
  encryption and decryption cores. No FPGA or ASIC implementation of this RTL was run, so its
  timing is unverified.
- **Side-channel protection.** None, as in the source: the core is constant-time but unmasked.
