# Self-mutating secret unknown ciphers for non-volatile SoC FPGAs

A *secret unknown cipher* (SUC) is a block cipher that nobody knows, not even
its designer or the device's manufacturer. It works as a digital replacement for
an analog physically unclonable function (PUF). Each device picks its own cipher
once, at random, from a very large class of ciphers. The choice is made by a
one-time program (the *GENIE*) and driven by the device's true random number
generator (TRNG). After that the GENIE is removed and the configuration is locked.
What remains is a device that can encrypt and decrypt with a cipher nobody else
has. A trusted party records a few challenge/response pairs (X, Y) at enrolment.
Later it identifies the device by sending a recorded Y and checking that the
device's inverse cipher gives back X. Unlike a PUF, a SUC is digital, so it
answers the same way every time and needs no error correction.

This RTL implements the scheme for a non-volatile FPGA in which the ciphers are
*templates*. The compiler places and routes a fixed cipher structure made of
4-input LUTs into free parts of the fabric. Every device receives the same
bitstream. While the bitstream loads, a bitstream manipulator overwrites the
LUT truth tables of the templates with random content. Two cipher classes are
provided, both with 64-bit blocks:

| cipher | structure | S-boxes | rounds / keys | key schedule | class size |
|---|---|---|---|---|---|
| NI-SUC | SPN, bit permutation | 16 drawn from the 1 396 032 optimal 4-bit S-boxes | 31 / 32 | 64 random LUTs, 1024 bits | about 2^1350 |
| I-SUC | involutive SPN | 16 drawn from the 145 920 optimal involutive S-boxes | 32 / 31 | 60 random LUTs + XOR tree, 960 bits | about 2^1234 |

A 4-bit S-box is *optimal* if it is a bijection, its linearity is 8 (the
largest absolute Walsh coefficient) and its differential uniformity is 4.

## Blocks

```
                 template location table
                        |
 BS' (clear    +--------v---------+  BS'_u (personalised bitstream)
 bitstream) -->| genie_manipulator|------------------------------------>
               |  stream switch   |
   TRNG bits ->|  index draw      |  cfg (template LUT writes)
   CDB port <->|  one-way lock    |--------+-------------------+
               +------------------+        |                   |
                                    +------v------+     +------v------+
   op_start/op_cipher/op_dec/din -->|   ni_suc    |     |    i_suc    |
                                    | rksa_ni     |     | rksa_i      |
                                    | 2x16 sbox4  |     | 16 sbox4    |
                                    +-------------+     | i_diffusion |
                                           |            +-------------+
                                           +--- op_dout / op_done ---+
```

`suc_top` wires these together. The parts that the device vendor supplies are
outside: the TRNG, the cipher data base (CDB), the bitstream decryption engine,
and the configuration memory / eNVM that stores BS'_u. Their signals are ports
of `suc_top`.

## The template map and the bitstream manipulator

This is the part of the design that has the least precedent. Here is how it
works.

**Template words.** A bitstream word is 16 bits, the truth table of one LUT.
The templates use 316 LUTs. The *template index* gives both the order in which
the words appear in the bitstream and their configuration address in the cipher
cores (`suc_pkg`):

| index | content | filled with |
|---|---|---|
| 0..63 | NI-SUC forward S-box LUTs, slot = idx/4, output bit = idx%4 | column b of a TRNG-chosen optimal S-box |
| 64..127 | NI-SUC inverse S-box LUTs (decryption layer) | column b of the inverse of the same slot's S-box |
| 128..191 | NI-SUC key LUTs F_k^j, j = idx-128 | 16 TRNG bits |
| 192..255 | I-SUC S-box LUTs | column b of a TRNG-chosen optimal involution |
| 256..315 | I-SUC key LUTs, bit b of symbol k_s at 4(s-1)+b | 16 TRNG bits |

LUT_b of an S-box computes output bit y_b. Its truth-table bit x is bit b of
S(x). The CDB returns an S-box as a *value table*, where nibble x holds S(x);
`sbox_lut_column` transposes it.

**Location table.** Before loading, the word addresses of the 316 template words
are written into the GENIE, in ascending order. This list is the only thing the
GENIE needs to know about the bitstream format. The templates can sit anywhere
in the bitstream, as long as they keep the index order.

**Streaming.** The GENIE counts the words of the incoming stream (valid/ready,
`in_last` on the last word). A word whose address is not the next template
address is passed through unchanged. At a template word the GENIE stalls the
input until it has the content:

* At the first LUT of an S-box slot, it draws an index bit by bit from the
  TRNG: 21 bits for the optimal class, 18 for the involutive class. The first
  bit drawn is the most significant. If the index is at or above the class size
  (1 396 032 or 145 920), it is thrown away and drawn again (`reject_cnt`
  counts these). A valid index is sent to the CDB. The S-box that comes back is
  kept for the next three LUTs. An NI-SUC S-box is also stored in a 16 × 64-bit
  buffer so that its inverse can be emitted later.
* A key LUT takes 16 fresh TRNG bits.

The new word goes out on BS'_u. It is also written into the template through
`cfg`, which stands for the fabric taking that LUT's contents from the
configuration.

**Lock.** When the last word has passed and all 316 templates were filled,
`locked` is set. From then on the GENIE accepts no bitstream, no table writes
and writes no template. `rst_n` does not clear the lock; only `nv_erase_n` does,
and it stands for a blank device that was never personalised. If the bitstream
ends before all templates were seen, `tmpl_error` is raised and the walk starts
again for the next load.

**TRNG demand.** NI-SUC takes 16 × 21 + 64 × 16 = 1360 bits (170 bytes). I-SUC
takes 16 × 18 + 60 × 16 = 1248 bits (156 bytes). Redrawn indices add to this.
These are the same byte counts the analysis of the scheme gives for an ideal
uniform choice.

## NI-SUC

Encryption is a 31-round SPN:

    s_0 = X,   s_{i+1} = P(S(s_i ^ K_i))  for i = 0..30,   Y = s_31 ^ K_31

S is 16 template S-boxes. S_i works on bits 4i+3..4i, with S_15 at the top.
P is a fixed bit permutation that costs only wiring: bit i moves to
p(i) = 4·(i mod 16) + ⌊i/16⌋. Each S-box therefore feeds four different S-boxes
in the next round.

**Key schedule (`rksa_ni`).** A 5-bit round counter addresses 64 random LUTs,
one per key bit. Key bits 0..31 see the counter's low four bits, `cnt[3:0]`.
Key bits 32..63 see its high four bits, `cnt[4:1]`. The 32 round keys therefore
come from 1024 random bits.

**Datapath (`ni_suc`).** One round per clock around one 64-bit register. A mux
loads the new block (input 1) or feeds the round result back (input 0). The
round key is XORed after the register, and the result is tapped there. Then
come the S-layer and the permutation.

**Decryption** uses the same register, counter and key LUTs, with the counter
running down from 31:

    d_0 = Y,   d_{j+1} = S^-1(P^-1(d_j ^ K_{31-j})),   X = d_31 ^ K_0

It needs a second S-layer that holds the inverse S-boxes (template indices
64..127). The prototype the scheme was measured on had encryption only; this
RTL adds decryption so that the identification protocol can run on NI-SUC.

## I-SUC

The whole cipher is an involution, so the same circuit decrypts when the keys
are applied in reverse order:

    Y = SL(K^30 ^ P(SL( ... K^0 ^ P(SL(X)) ... )))

* SL is one layer of 16 involutive S-boxes, the same layer in all 32 rounds.
* P (`i_diffusion`) first forms Sum, the XOR of the 16 nibbles, then replaces
  each nibble by nibble ^ Sum. With an even number of nibbles, P(P(x)) = x.
* P commutes with the key addition, P(x ^ K) = P(x) ^ K, only if the XOR of
  the key's 16 nibbles is zero. `rksa_i` guarantees this: symbols k1..k15 come
  from 60 random LUTs (k1..k7 read `cnt[3:0]`, k8..k15 read `cnt[4:1]`), and
  k0 is the XOR of the others. That XOR is a two-level tree: {k1..k3},
  {k4..k7}, {k8..k11} and {k12..k15}, then one XOR of the four results.

**Datapath (`i_suc`).** On each clock the register takes P(SL(reg)) ^ K^cnt.
After 31 clocks the last S-layer is applied combinationally at the output, since
the last round has no diffusion. `dec` only makes the counter start at 30 and
count down.

## Interface and timing

Every block's opening comment gives its ports. At the top level:

* **Personalisation.** Write the location table (`tbl_we/idx/addr`), then stream
  BS' in on `bs_in_*` and take BS'_u from `bs_out_*`. Both are valid/ready
  streams. The TRNG port moves one bit per `trng_valid && trng_ready`. The CDB
  port holds `cdb_req` with `cdb_sel`/`cdb_idx` until `cdb_ack` returns a
  value table on `cdb_sbox`.
* **Cipher requests.** Pulse `op_start` with `op_cipher` (0 = NI-SUC,
  1 = I-SUC), `op_dec` and `op_din`. A request is refused (`op_refused`) before
  personalisation or while a cipher is busy. `op_done` rises 32 clock edges
  after an accepted start (1 load + 31 iterations). It stays high, with
  `op_dout`, until the next request.
* **Reset and state.** `rst_n` is an asynchronous reset of the datapaths and of
  the GENIE's walk. Template LUT contents are never reset: they model
  non-volatile configuration cells.

Each core has 72 flip-flops of datapath state: the 64-bit state, the 5-bit
counter, the direction bit and 2 state bits. The template contents (2048 + 1024
bits for NI-SUC, 1024 + 960 bits for I-SUC) are registers here; in the FPGA they
are configuration cells.

## Where this follows the scheme and where it is its own

Taken from the scheme:
* both cipher structures, the bit-permutation table, round counts and key
  counts;
* the LUT key schedules with the 5-bit up/down counter and the LSB/MSB nibble
  addressing;
* the involutive diffusion and its zero-sum key condition;
* the LUT-per-output-bit S-box template;
* the area-optimised one-register datapath;
* the template-filling GENIE, driven by the TRNG and a data base, with an
  irreversible lock.

Choices of this design, where the scheme is silent:
* the bitstream word format, the template order and the location table;
* which key half reads which counter nibble;
* the truth-table bit order;
* rejection sampling for data-base indices;
* the TRNG and CDB handshakes;
* the request/refusal interface;
* the NI-SUC decryption layer and how the GENIE fills it;
* running both cipher classes side by side behind one GENIE.

Not built:
* the TRNG;
* the data base contents (the lists of optimal S-boxes, 8.9 Mbit for the
  involutive set alone);
* the bitstream decryption engine, the configuration memory and the eNVM;
* the software SUC on the processor;
* the optional extra trusted-party key K_TA;
* the general I-SUC variant with different S-layers per round pair;
* randomly choosing which templates a device uses at all.

## Verification

All testbenches check themselves and end with a `TB_RESULT` line. The reference
model in `tb/suc_tb_pkg.sv` is independent of the RTL. It takes the permutation
as the printed table rather than the formula and computes linearity and
differential uniformity directly. The data base model (`tb/cdb_model.sv`) holds
a small library: affine variants of the PRESENT S-box, which are optimal, and
optimal involutions found by random search.

| testbench | what it shows |
|---|---|
| `tb_lut4`, `tb_sbox4_lut` | LUT and S-box templates realise their truth tables |
| `tb_rksa_ni`, `tb_rksa_i` | all round keys match; the I-SUC key nibbles XOR to zero |
| `tb_i_diffusion` | P matches, is an involution, and commutes with zero-sum keys |
| `tb_ni_suc`, `tb_i_suc` | encryption matches the reference; decryption inverts it; 32-clock latency |
| `tb_genie_manipulator` | every output word and template write, replayed from the TRNG bits actually taken; stalls, back-pressure, redraws; truncated load raises the error; lock holds against further loads and `rst_n` |
| `tb_suc_top` | at default parameters: two devices get the same bitstream. It checks the read-back S-boxes (optimal, involutive, NI inverse layer), enrolment and identification on the genuine device, and rejection of the other device as a clone |
| `tb_avalanche` | 1000 devices × 100 single-bit-flip message pairs per cipher |

Avalanche results from `tb_avalanche` (mean output Hamming distance, 64-bit
block):

| rounds | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | full |
|---|---|---|---|---|---|---|---|---|---|
| NI-SUC | 2.1 | 4.5 | 9.6 | 16.5 | 23.2 | 27.8 | 30.2 | 31.3 | 32.0 |
| I-SUC | 31.6 | 32.0 | 32.0 | 32.0 | 32.0 | 32.0 | 32.0 | 32.0 | 32.0 |

Across devices, the full-round mean lies between 30.6 and 33.3 bits for both
ciphers. The evaluation of the scheme reports NI-SUC reaching full avalanche
after 7 rounds, which matches. It reports I-SUC doing so after 3 rounds. This
model gets there after the first round, because the distance is measured on the
register after diffusion and key addition. One changed nibble then already
alters every nibble through Sum. The scheme's per-device ranges (28–35 bits for
I-SUC, 22–31 for NI-SUC) are wider than the 30.6–33.3 found here. One likely
reason is that the devices here draw from a 128-entry library rather than the
full S-box classes.

**Simulating.** With Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/suc_pkg.sv tb/suc_tb_pkg.sv tb/tb_suc_top.sv --top-module tb_suc_top
    ./obj_dir/Vtb_suc_top

Replace `tb_suc_top` with any other testbench name. `tb_avalanche` runs for
about 15 s; the others finish in well under a second. For lint, use
`verilator --lint-only -Wall -Wno-fatal -Irtl -y rtl rtl/suc_pkg.sv rtl/suc_top.sv`.
It reports three warnings, all expected: the reset is used both as an
asynchronous reset and in the assertions' `disable iff`; the top bit of the
GENIE's TRNG shift register is shifted out unused; and the top three bits of the
I-SUC key-LUT index are unused.
