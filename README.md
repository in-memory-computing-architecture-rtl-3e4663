# AES-128 on two 64-bit units: an RTL rendering of the AES-IMC pipeline

AES-IMC is a proposal to encrypt data inside a memristive memory instead of
moving it to a separate cipher engine. The 128-bit AES state and the round
key sit in crossbar arrays; XOR is formed by summing amplifiers on the bit
lines, SubBytes and the MixColumns doubling are look-up tables addressed by
the stored bytes, and ShiftRows happens for free by writing each S-box result
back at an offset column address. The state is split into two 64-bit halves,
each held and processed by its own unit, so the two halves advance in
lock-step.

The authors evaluated the idea as an FPGA design whose first round they show
at the register-transfer level: five blocks per round (a key generator and the
four AES steps), each with its own clock, reset, start and done pins, and one
round instance per AES round. This repository gives synthesizable
SystemVerilog for that digital design: a complete, standard-conforming AES-128
encryption pipeline built from the same five blocks with the same port names.
The analog parts of the memristive version (cells, crossbar, sense/summing
amplifiers, line drivers) are not modelled; their logic functions are what
the blocks below compute.

## The state as two halves

The 16-byte AES state is the usual 4x4 byte matrix, filled column by column
(FIPS-197 order: byte k is row k%4, column k/4). The design cuts it between
columns 1 and 2:

| signal          | block bytes | state columns | bits of the 128-bit block |
|-----------------|-------------|---------------|---------------------------|
| half 1 (`*1`)   | 0..7        | 0, 1          | [127:64]                  |
| half 2 (`*2`)   | 8..15       | 2, 3          | [63:0]                    |

Inside a half, byte i occupies bits `[63-8*i -: 8]`. A block or key written as
a 32-digit hex string therefore splits as `{half1, half2}` with no reordering,
and the FIPS-197 test vectors can be applied directly.

Because SubBytes, MixColumns and AddRoundKey work byte-wise or column-wise,
the two halves never need each other in those steps: each half gets its own
eight S-boxes, its own eight M-2/M-3 tables and its own 64 XOR gates. Only
ShiftRows crosses the cut (rows 1 to 3 rotate bytes between columns 0-1 and
2-3), which is why `shiftrows` is the one step block that takes both halves
as one operand. The key schedule also needs both halves, since each new key
word depends on the previous one.

## Blocks

| module          | role | paper's name |
|-----------------|------|--------------|
| `aes_pkg`       | shared types (`half_t`, `byte_t`, `round_t`), round count, latency, Rcon function | — |
| `sbox`          | 256-entry S-box ROM | S-box LUT |
| `m2_lut`        | multiply-by-2 and multiply-by-3 in GF(2^8) | M-2 / M-3 LUT |
| `subbytes`      | SubBytes on both halves, registered | `subbytes` (w2) |
| `shiftrows`     | ShiftRows across the halves, registered | `shiftrows` (w3) |
| `mix3`          | MixColumns on both halves, registered | `mix3` (w4) |
| `addroundkey`   | state XOR round key, registered | `addroundkey` (w5) |
| `key_generator` | one AES-128 key-expansion step, registered | `KeyGenerator` (w1) |
| `aes_round`     | one round: the four steps plus its key generator | `rounds` instance |
| `aes_imc`       | top: initial AddRoundKey + ten rounds | `AES` |

The step blocks keep the port names of the authors' schematic
(`p_in1/p_in2 -> s_out_sub1/s_out_sub2` for SubBytes, `a/b -> c/d` for
ShiftRows, `In_DI1/In_DI2 -> mixout1/mixout2` for MixColumns,
`m_in*/k_in* -> add_out*` for AddRoundKey, `a1/a2 -> b1/b2` for the key
generator), so the RTL can be read against that figure.

## The step handshake and the pipeline

Every step block has the same behaviour, a two-state Moore machine
(`IDLE`, `DONE`):

```
cycle        n        n+1
start    ___/‾‾‾\___________
in       ===X D X===========
out      =======X f(D) X====     (held until the next start)
done     _______/‾‾‾‾‾‾‾\___
```

A start pulse captures `f(in)` at the next edge and raises done for exactly
one cycle. Nothing stops a start in the following cycle, so a step accepts a
new operand every cycle and each block is really one pipeline stage whose
`done` is the valid bit that travels with the data.

`aes_round` wires the steps as `subbytes -> shiftrows -> mix3 ->
addroundkey`, each step's done driving the next step's start and each step's
output register feeding the next step's input. The last round (`LAST = 1`)
leaves `mix3` out and passes ShiftRows' output and done straight to
AddRoundKey. The top puts one `addroundkey` (AddRoundKey with the cipher key)
in front of ten `aes_round` instances, rounds 1 to 9 full and round 10 last.

Latency from the top's start to its done:

```
1 (initial AddRoundKey) + 9 x 4 (full rounds) + 3 (last round) = 40 cycles
```

`aes_pkg::LATENCY` holds this number. With start pulsed every cycle, 40
blocks are in flight and one ciphertext leaves per cycle, in order. There is
no back-pressure: a result is valid only in its done cycle (and stays on
`ct1/ct2` until the next one overwrites it).

### Latency against the paper

The paper reports 26 cycles per block (and derives its throughput figures
from that), but does not say how the cycles are spent. No whole number of
cycles per step fits 26 for the 11 AddRoundKey, 10 SubBytes, 10 ShiftRows and
9 MixColumns operations without extra cycles the paper does not account for.
This design gives each of the schematic's step blocks one register, which is
the simplest reading of their clock/start/done pins, and arrives at 40. A
lone block is thus slower than the paper's number (348 Mbps against 536 Mbps
at the reported 108.9 MHz), while a stream of blocks is far faster (one block
per cycle). To shorten the latency, merge steps into one register stage, for
example ShiftRows into the SubBytes register (it is only wiring) and
AddRoundKey into the MixColumns register; `LATENCY` in the package and
`LAT` in `tb/tb_aes_imc.sv` must then be updated.

## Round keys

Each round owns a `key_generator`, and the generators form a chain:
round r reads round r-1's key and produces its own on every clock edge
(`t = SubWord(RotWord(w3)) ^ Rcon`, `w4 = w0 ^ t`, `w5 = w1 ^ w4`, ...). The
4-bit `rcon` input carries the round index, fixed per instance, and is
mapped to the Rcon byte (01, 02, 04, ..., 80, 1b, 36) by
`aes_pkg::rcon_byte`. The authors' schematic shows two 4-bit round-constant
pins with the second tied to 0001 in round 1; what the other carries is not
stated, so a single index input is used here.

Round r's key is valid r cycles after the cipher key settles, and round r's
AddRoundKey happens 4r cycles after the block starts, so a key applied in the
start cycle is always ready in time. The price of recomputing keys
continuously instead of storing them (as the memristive version does in its
key arrays) is a usage rule: **`key1/key2` must not change while `busy` is
high**, because a change would reach the rounds of blocks already in flight.
`busy` comes from a counter of blocks in flight (start adds one, done removes
one), and an assertion in `aes_imc` reports a key change while busy. To
change keys, wait for `busy` to fall, then apply the new key together with or
before the next start.

## Look-up tables

`sbox` holds the FIPS-197 S-box as a constant array, S(x) = A·x⁻¹ ⊕ 63h over
GF(2⁸) with the polynomial x⁸+x⁴+x³+x+1 and 0⁻¹ taken as 0. Each round uses
20 copies: 16 in `subbytes`, 4 in `key_generator`.

`m2_lut` is the MixColumns "M-2" table: 2·x = `{x[6:0],0} ^ (x[7] ? 1b : 00)`,
written as that formula rather than 256 stored bytes, and 3·x = 2·x ⊕ x. Each
output byte of MixColumns is `2·s[r] ^ 3·s[r+1] ^ s[r+2] ^ s[r+3]` (indices
mod 4 within a column). The memristive version feeds bytes one at a time
through a multiplexer, a demultiplexer choosing the ×1, ×2 or ×3 path, and a
summing amplifier, and speeds this up with several M-2 tables in parallel;
how many it uses is not given. Here every byte has its own table, so
MixColumns of the whole state takes one cycle.

## Reset

All step blocks and the in-flight counter reset synchronously on `rst`
(active high): done bits and output registers clear, and every block in
flight is dropped without producing a done. The key generators have no
reset; their registers simply follow their inputs and are valid one cycle per
round after the key is stable. Reset behaviour is this design's choice.

## What follows the paper and what does not

From the paper: the 128-bit block handled as two 64-bit halves by two
parallel units; ten rounds with MixColumns omitted in the last; the five
per-round blocks, their names and port names, and their clock/reset/start/done
pins; the round instances chained in a top; S-box and M-2/M-3 tables with
XOR as the means of computing SubBytes and MixColumns; a pipelined design.

This design's own choices: one register per step and hence 40 cycles instead
of the reported 26; the byte order inside the halves (standard AES); the
standard AES-128 key expansion (the paper does not describe its key schedule);
one round-index input on the key generator instead of the two printed ones;
the key held at the input rather than stored, with the `busy` signal and the
key-stability rule; fully parallel MixColumns tables; synchronous active-high
reset.

Not modelled: the memristor cells, the crossbar arrays for the two state
halves and two key halves, the summing amplifiers, the word-line and
bit-line controllers, the row buffer and write drivers. The paper gives no
electrical model, array organisation or access timing for them. In this RTL
the registers of the step blocks stand where the row buffer and the memory
rows hold intermediate results. Decryption is not part of the design (the
paper describes encryption only).

## Verification

Each module in `rtl/` has a self-checking testbench in `tb/` named
`tb_<module>.sv`. They compare against `tb/aes_ref_pkg.sv`, a separate AES
model that computes the S-box from the field inverse and affine map and
MixColumns from a general field multiply, so a table error in the RTL cannot
be mirrored in the reference. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

- `tb_sbox`, `tb_m2_lut`: all 256 inputs, plus FIPS-197 spot values.
- `tb_subbytes`, `tb_shiftrows`, `tb_mix3`, `tb_addroundkey`: random states,
  one-cycle done timing, single-cycle done pulse, one result per cycle when
  started every cycle, reset.
- `tb_key_generator`: the FIPS-197 A.1 key expanded through all ten rounds
  (round 1 `a0fafe17...`, round 10 `d014f9a8...`), then random steps.
- `tb_aes_round`: a full round (round 3) and the last round (round 10),
  values and latencies 4 and 3, singly and back to back.
- `tb_aes_imc`: the top at its default configuration: FIPS-197 Appendix B
  (`3243f6a8... -> 3925841d...`) and C.1 (`00112233... -> 69c4e0d8...`),
  random blocks with latency exactly 40, a burst of 100 back-to-back blocks
  (the pipeline reaches 40 in flight and delivers a result every cycle), key
  changes between bursts, and a reset with 15 blocks in flight (none may
  come out). It counts each of these events and fails if one never occurred.
  It runs in well under a second.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/aes_pkg.sv tb/aes_ref_pkg.sv tb/tb_aes_imc.sv \
    --top-module tb_aes_imc -o sim
./obj_dir/sim
```

Replace `tb_aes_imc` with any other testbench name to run that one. For lint:
`verilator --lint-only -Wall -Irtl rtl/aes_pkg.sv rtl/aes_imc.sv`. The
package's unused-parameter warnings for modules that do not use every
constant are expected.

To encrypt with the top: hold `key1/key2`, drive `pt1/pt2` and pulse `start`
for one cycle per block; 40 cycles later `done` is high for one cycle with
the ciphertext on `ct1/ct2`.
