# SIMON-128 iterative encryption core

SIMON is a lightweight block cipher built as a Feistel network. Each round
changes only one half of the block, with rotations, one AND and XORs, and
then swaps the halves. Because a round is mostly wiring, a compact hardware
cipher needs just one round circuit, one register pair for the block, and a
key schedule that makes each round key on the fly. This RTL is such a core
for SIMON-128, the variant with a 128-bit block. It runs one round per clock
cycle. It encrypts one block in 68, 69 or 72 cycles, for a 128-, 192- or
256-bit key.

The structure follows the paper "FPGA Implementation of SIMON-128
Cryptographic Algorithm Using Artix-7" (Ghayoula et al., 2022). That paper
splits the core into a datapath, a key schedule and a controller. It also
names the top-level signals (`plaintext`, `Key`, `start`, `clk`, `nrst`,
`ciphertext`, `done`) and the two internal nets (`rKey`, `compute`). It
gives the round and key-schedule equations and the SIMON-128 parameter
table. It does not give the insides of the controller or the datapath
registers, the cycle timing, or the board-level wrapper. Those parts are
this design's own choices, listed under "Where this design departs or
chooses" below.

## Block diagram

```
              +--------------------------------------------------+
 plaintext ==>|  simon_dp  (l, r registers + simon_round)         |==> ciphertext
   [127:0]    |        ^ rkey [63:0]            ^ compute         |     [127:0]
              |        |                        |                 |
 key ========>|  simon_ks  (m-word window,      |                 |
  [64m-1:0]   |            z-constant register) |<-- compute      |
              |        ^ load                   |                 |
 start ------>+--------+------------------------+                 |
              |  simon_ctrl (IDLE/RUN/DONE, round counter) -------|--> done
 clk, nrst -->|                                                   |
              +--------------------------------------------------+
```

`start` loads the plaintext into the datapath and the key into the key
schedule, and starts the controller. While the controller holds `compute`
high, the datapath and the key schedule advance one round per clock.

## The round (simon_round)

A block is two 64-bit words. The left word `l` is bits 127:64 and the right
word `r` is bits 63:0. With `S^j` a left rotation by `j` bits, one round with
round key `k` is:

```
l' = (S^1 l & S^8 l) ^ S^2 l ^ r ^ k
r' = l
```

This is combinational: 64 AND gates, 192 two-input XOR gates and wiring. The inverse
round, `(l, r) = (r', (S^1 r' & S^8 r') ^ S^2 r' ^ l' ^ k)`, is not built into
the core. The testbench uses it to check that each round can be undone.

## The key schedule (simon_ks)

This is the least obvious part of the design.

A key of `m` 64-bit words (`m` = `KEY_WORDS` = 2, 3 or 4) gives round keys
`k_0 .. k_{T-1}`:

- The first `m` round keys are the key words themselves. `k_0` is bits
  63:0 of `key`.
- Each later key is computed from earlier ones:

```
tmp      = S^-3 k_{i+m-1}              (right rotation by 3)
tmp      = tmp ^ k_{i+1}               (only when m = 4)
k_{i+m}  = c ^ z_j[i] ^ k_i ^ tmp ^ S^-1 tmp
```

- `c = 2^64 - 4` (0xFFFF_FFFF_FFFF_FFFC).
- `z_j[i]` is bit `i mod 62` of a fixed 62-bit sequence. Each key size has its
  own sequence.

The hardware holds a sliding window of `m` registers,
`win[0..m-1] = k_i .. k_{i+m-1}`. `win[0]` is the current round key and drives
`rkey`. On each `compute` cycle the window shifts down one word, and the newly
computed `k_{i+m}` enters at the top. No round-key memory is needed.
In the last round one extra key word is computed. Nothing uses it.

The constant bit goes into bit 0 of the new word. It comes from a 62-bit
register that is loaded with the sequence on `start` and rotates right one
place per round. Its bit 0 is therefore always `z_j[i]`. In `simon_pkg` each
sequence is stored with bit `i` = `z_j[i]`, so the leftmost element of the
usual printed form is the least significant bit:

| m | key bits | sequence | rounds T | `z_j` as stored (bit i = z_j[i]) |
|---|----------|----------|----------|----------------------------------|
| 2 | 128      | z2       | 68       | `62'h3369f885192c0ef5`           |
| 3 | 192      | z3       | 69       | `62'h3c2ce51207a635db`           |
| 4 | 256      | z4       | 72       | `62'h3dc94c3a046d678b`           |

The paper's table pairs each key size with its sequence and round count. The
paper does not print the bits of `z2`, `z3`, `z4` or the value of `c`. They come
from the SIMON specification (Beaulieu et al., 2013). The published test
vectors below confirm them.

## Control and timing (simon_ctrl)

The controller is a three-state machine (IDLE, RUN, DONE) with a 7-bit round
counter. The timing is counted from the rising edge that samples
`start = 1` (edge 0):

| edge        | controller           | datapath / key schedule            |
|-------------|----------------------|------------------------------------|
| 0           | -> RUN, count = 0    | load plaintext, key words, z_j     |
| 1 .. T      | RUN, compute = 1     | round i with `rkey = k_i`, i = 0..T-1 |
| T           | -> DONE              | block register now holds ciphertext |
| after T     | DONE, done = 1       | ciphertext held                    |

- `done` rises T clock cycles after the start edge: 68 cycles for the
  default 128-bit key. It stays high, with the ciphertext steady, until the
  next `start`.
- `plaintext` and `key` only need to be valid in the `start` cycle.
- A `start` in any state begins a new operation, including in the middle of
  a run. This matches the diagram, where `start` drives the key schedule
  directly.
- `nrst` is an asynchronous active-low reset. It clears the block and key
  registers and returns the controller to IDLE.
- Assertions in `simon_ctrl` check that `compute` and `done` are never high
  together, and that the counter stays in range.

## Interface of simon_top

| port         | dir | width       | meaning                                           |
|--------------|-----|-------------|---------------------------------------------------|
| `clk`        | in  | 1           | clock                                             |
| `nrst`       | in  | 1           | asynchronous reset, active low                    |
| `start`      | in  | 1           | one-cycle pulse: load inputs and begin            |
| `plaintext`  | in  | 128         | `{l, r}`, left word in bits 127:64                |
| `key`        | in  | 64*KEY_WORDS| key words, `k_0` in bits 63:0                     |
| `ciphertext` | out | 128         | `{l, r}` after T rounds, valid while `done` = 1   |
| `done`       | out | 1           | encryption finished                               |

`KEY_WORDS` (default 2) is the only parameter. The round count is derived
from it.

The published SIMON-128 test vectors map onto the ports as follows. Key
words are listed most significant first, so the rightmost printed word is
`k_0`.

| key size | key                                                  | plaintext                          | ciphertext                         |
|----------|------------------------------------------------------|------------------------------------|------------------------------------|
| 128      | `0f0e0d0c0b0a0908_0706050403020100`                  | `6373656420737265_6c6c657661727420` | `49681b1e1e54fe3f_65aa832af84e0bbc` |
| 192      | `1716151413121110_0f0e0d0c0b0a0908_0706050403020100` | `206572656874206e_6568772065626972` | `c4ac61effcdc0d4f_6c9c8d6e2597b85b` |
| 256      | `1f1e1d1c1b1a1918_..._0706050403020100`              | `74206e69206d6f6f_6d69732061207369` | `8d2b5579afc8a3a0_3bf72a87efe7b868` |

## Where this design departs or chooses

- **One round per cycle.** The paper calls its core a "parallel cipher" but
  gives no round count per cycle. One round per cycle is the simplest
  structure that fits its compute/done interface.
- **Plaintext load.** The paper's diagram shows only `rKey` and `compute` going
  into the datapath. Here the `start` pulse also loads the datapath. This lets
  the ciphertext stay valid after `done`.
- **done and restart.** The paper does not say how long `done` stays high or
  what a `start` during a run does. Both are this design's choices (see
  above).
- **Reset.** The paper names only `nrst`. Asynchronous, active-low reset of
  all registers is a choice.
- **Encryption only.** The paper gives the inverse round and remarks that
  decryption only needs the key schedule run backwards. Its core, however,
  has no decryption input, and its datapath is described as encrypting only.
  No decryption mode is built.
- **Key size as a parameter.** The paper lists the 128-, 192- and 256-bit key
  configurations but does not say which one its prototype uses. The default
  here is the 128-bit key. The key-size row of the paper's table reads "124",
  which is taken to be a misprint for 128.
- **Board wrapper not included.** The prototype's pin constraints connect a
  100 MHz clock, three switches (`data_in`, `input[1:0]`) and one LED
  (`cipher_out[7]`). How those few pins feed a 128-bit block and key is not
  described, so no wrapper is provided. The core has 388 port bits and needs
  a wrapper of your own (for example a shift register or a bus interface)
  before it goes on a board.
- **Resource figures.** The paper reports 45 LUTs and 27 flip-flops for its
  implementation. This core holds about 330 flip-flops at the default: 128 block bits, 64·m
  key bits, 62 constant bits, and the controller's state and 7-bit counter. Those bits are the minimum
  state of an iterative SIMON-128 core that does not stream its inputs bit by
  bit, so the paper's figures cannot describe a core like this one. They were
  not used as a target.

## Files

| file                     | content                                                    |
|--------------------------|------------------------------------------------------------|
| `rtl/simon_pkg.sv`       | widths, constant `c`, z sequences, round count, rotations   |
| `rtl/simon_round.sv`     | combinational round                                         |
| `rtl/simon_dp.sv`        | block registers and round                                   |
| `rtl/simon_ks.sv`        | on-the-fly key schedule                                     |
| `rtl/simon_ctrl.sv`      | controller                                                  |
| `rtl/simon_top.sv`       | the core                                                    |
| `tb/simon_ref_pkg.sv`    | reference model and test vectors, written separately from the RTL |
| `tb/tb_*.sv`             | self-checking testbenches                                   |

## Verification

Every testbench compares against `simon_ref_pkg`. That package does not share
code with the RTL. It keeps the z sequences as the specification's bit
strings, expands the whole key schedule into an array, and then encrypts.
Each testbench prints `TB_RESULT checks=N failures=M`, and a watchdog ends
the run if it hangs.

- `tb_simon_round` checks single-bit and random words, and that the inverse
  round recovers the inputs.
- `tb_simon_dp` drives the datapath with reference round keys. It inserts
  random idle cycles and checks that the register holds, that load wins over
  compute, and the test vectors.
- `tb_simon_ks` runs three instances (m = 2, 3, 4). It checks every round key
  for the test-vector key and random keys, with idle cycles.
- `tb_simon_ctrl` checks the compute count, the `done` latency and hold,
  back-to-back operations, restart in mid-run, and reset.
- `tb_simon_top` runs three cores, one per key size. It checks the test
  vectors, 45 random blocks and keys, the 68/69/72-cycle latency, `done`
  hold, back-to-back starts, restart in mid-run, and asynchronous reset
  during a run. Each of these mechanisms is counted, and the test fails if
  any of them never happened.
- `tb_simon_top_full` runs the core at its default parameters: the 128/128
  test vector plus random blocks.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/simon_pkg.sv tb/simon_ref_pkg.sv tb/tb_simon_top.sv \
    --top-module tb_simon_top -o sim
./obj_dir/sim
```

Every testbench finishes in well under a second.
