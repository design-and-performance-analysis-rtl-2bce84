# Unified MD5 / SHA-192 data integrity unit

A software-defined radio has to check the integrity of the code it downloads
before it reconfigures itself, and a handset has little area and power to
spare for that. This design computes two hash functions, MD5 and SHA-192, on a
single iterative datapath. A one-bit select line decides, per message, which
algorithm every block of the datapath performs, so the adders, rotator,
boolean-function unit, message store and registers are shared instead of
being built twice.

The RTL follows the architecture of L. Thulasimani and M. Madheswaran,
"Design and Performance Analysis of Unified Reconfigurable Data Integrity Unit
for Mobile Terminals". Where that description is silent or contradicts itself,
the choice made here is stated below and in the opening comment of each file.

## The two algorithms on one set of registers

Both algorithms take a message that has been padded to a multiple of 512 bits
and process it block by block. Each block is sixteen 32-bit words. A chaining
value (CV) is updated after every block, and the last CV is the digest.

The unit holds six 32-bit working variables A, B, C, D, E, F.

* **MD5** uses A..D and keeps E and F at zero. It has four rounds of 16 steps,
  64 steps in all. Step i adds the sine-table constant T[i+1], where T[j] is
  the integer part of 2^32·|sin j|. It also adds one message word X[k]; the
  index k runs through the words in a different order in each round:
  i, (1+5i), (5+3i), 7i (all mod 16). The digest is 128 bits.
* **SHA-192** is a six-word extension of SHA-1. It has 80 steps, using SHA-1's
  boolean functions and round constants. The message schedule is also SHA-1's:
  W16..W79 are expanded from the 16 block words by
  `W[t] = rotl1(W[t-3] ^ W[t-8] ^ W[t-14] ^ W[t-16])`. One step is:

  ```
  TEMP1 = rotl(A,5) + f_t(B,C,D) + E + W[t] + K[t]
  A <- TEMP1 + F      B <- rotl(A,15)    C <- rotl(B,30)
  D <- C              E <- D             F <- TEMP1
  ```

  The initial value is SHA-1's H0..H4 plus H5 = f9b2d834. The digest is
  192 bits, H0..H5.

The initial values are:

| | A / H0 | B / H1 | C / H2 | D / H3 | E / H4 | F / H5 |
|---|---|---|---|---|---|---|
| MD5 | 67452301 | efcdab89 | 98badcfe | 10325476 | 0 | 0 |
| SHA-192 | 67452301 | efcdab89 | 98badcfe | 10325476 | c3d2e1f0 | f9b2d834 |

## How one step is shared (dt_round)

This is the heart of the design. Each clock, one combinational pass computes
one step of either algorithm. The two step equations have the same shape: a
sum of a state word, a boolean function of B, C, D, a message word and a
constant, followed by a rotation and one more addition. `dt_round` builds that
shape once and uses multiplexers to choose the operands:

| signal | MD5 | SHA-192 |
|---|---|---|
| `nl` (nonlinear_fn) | F, G, H, I by round | Ch, Parity, Maj, Parity by round |
| `ma1` = X + nl + w + k | X = A, w = X[k], k = T[i] | X = E, w = W[t], k = K[t] |
| `rot` (one rotator) | rotl(ma1, s) | rotl(A, 5) |
| `ma2` = rot + Y | Y = B → new B | Y = ma1 → TEMP1 → new F |
| extra adder | – | TEMP1 + F → new A |
| fixed rotations | – | rotl(A,15) → B, rotl(B,30) → C |
| moves | A←D, C←B, D←C | D←C, E←D |

MD5's F and SHA's Ch are the same function, and so are MD5's H and SHA's
Parity. The boolean unit therefore needs only five distinct functions, chosen
by mode and round.

## Block structure

```
            start_new / cont          mode (select line)
                   │                        │
              ┌────▼─────┐  step, phase     │
              │hash_ctrl │──────────────────┼──────────────┐
              └──┬───┬───┘                  │              │
   data_in ──► msg_sched ── w ──┐     const_rom ── k, s, round
                                 ▼                          │
  cv_reg ── CV ──► hash_core (A..F register + dt_round) ◄───┘
    ▲   └──────────────┐            │ st
    │                  ▼            ▼
    └──── hash ◄──── hash_alu (CV + st, HASH OUT register) ──► hash_out
```

| module | role |
|---|---|
| `hash_pkg` | types (`mode_e`, `state_t`), sine table, rotation amounts, constants, initial values, `rotl()` |
| `nonlinear_fn` | the per-round boolean function of B, C, D |
| `dt_round` | one MD5 or SHA-192 step (table above) |
| `const_rom` | per step: round number, T[i] or K[t], MD5 rotation amount, MD5 word index |
| `msg_sched` | 16-word message register. It reads X[k] for MD5; for SHA-192 it expands W[t] in place in a circular 16-word window. |
| `hash_ctrl` | step counter and sequencer (idle, load, run, final) |
| `hash_core` | working-variable register, loaded from the CV and then stepped |
| `cv_reg` | chaining-value register: the initial value for a new message, or the last hash for the next block |
| `hash_alu` | word-wise final addition CV + A..F, and the hash output register |
| `integrity_unit` | top level |

## Using the unit

Ports of `integrity_unit`:

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `mode` | in | 1 | 0 = MD5, 1 = SHA-192, sampled when a block starts |
| `start_new` | in | 1 | start the first block of a message (CV := initial value) |
| `cont` | in | 1 | start a further block of the same message (CV := last hash) |
| `data_in`, `data_valid` | in | 32, 1 | message words |
| `data_ready` | out | 1 | the unit is accepting words |
| `busy` | out | 1 | a block is in progress; `start_new` and `cont` are ignored |
| `hash_valid` | out | 1 | one-clock pulse: `hash_out` has been updated |
| `hash_out` | out | 192 | {H0,H1,H2,H3,H4,H5}; MD5 gives {A,B,C,D,0,0} |

A block is processed in this order:

1. While `busy` is low, pulse `start_new` (or `cont`) for one clock, with
   `mode` valid at the same time.
2. Give 16 words on `data_in`, each in a clock where `data_valid` is high.
   Gaps are allowed. The first word given is word 0.
3. After the 16th word, the unit takes 64 (MD5) or 80 (SHA-192) clocks, one
   step per clock, and then one clock for the final addition. `hash_valid`
   rises 65 (MD5) or 81 (SHA-192) clocks after the edge that accepted the
   16th word. `hash_out` keeps its value until the next block finishes.

One block therefore takes at least 16 + 64 + 1 = 81 clocks for MD5 and
16 + 80 + 1 = 97 clocks for SHA-192. At 100 MHz that is 632 Mbit/s and
528 Mbit/s.

The host pads the message; the hardware does not. It appends a 1 bit, zeros,
and the 64-bit bit length so that the length is a multiple of 512. The host
also packs the words in each algorithm's byte order:

* MD5 words and its length field are little-endian. The printed MD5 digest is
  the bytes of A, B, C, D, each taken least significant byte first.
* SHA-192 words are big-endian.

`tb/hash_ref_pkg.sv` contains a `pad()` function that does both.

## Where this design departs from, or chooses within, its source

* **SHA-192 new A.** The source's equation is
  `TEMP2 = S5(A) + A + f + E + W + K + F`, which includes an extra A. Its
  SHA-192 step diagram and data-transformation diagram add only F to TEMP1.
  Its simulation values after the first step agree with the diagrams:
  A − F equals H5 exactly. The default, `TEMP2_ADDS_A = 0`, follows the
  diagrams. Setting the parameter to 1 on `integrity_unit`, `hash_core` or
  `dt_round` adds A and gives the equation's variant.
* **Rotations, not shifts.** The text calls the shifters left rotations, and
  uses SHA-1's circular-shift notation S^n. All rotations are built as
  rotations. The source's simulation printout, however, shows B = H0<<15 and
  C = H1<<30 as plain shifts after the first step. Register traces of this
  RTL therefore do not match those printouts. The printouts cannot be re-run
  in any case, because the message behind them is not given.
* **MD5 register mapping.** One passage says MD5 uses the inputs B, C, D, E,
  but the simulation printout shows MD5 running in A..D with E and F at zero.
  The printout is followed.
* **Printing errors corrected to standard MD5.** The text's MD5 function F
  reduces to Y; the standard (X∧Y)∨(¬X∧Z) is used. The third-round word
  permutation, printed as "(5+39)", is taken as (5+3i) mod 16. The text does
  not list the per-step rotation amounts, so the standard values are used.
* **One step per clock.** The source claims a "pipelined" structure but
  gives no stages. This unit is iterative, with one step per clock and no
  pipeline registers inside a step.
* **Interface.** The handshake, the word loading order, reset behaviour and
  ignoring requests while busy are this design's own choices. The source's
  block diagram shows only Start New, Continue, the select line and Data In.
* **Padding** is left to the host, as in the source's block diagram.

## Size

After coarse synthesis, the top level has about 1100 flip-flop bits:

* 16 × 32 bits of message register,
* 3 × 192 bits of working, chaining and hash registers,
* control.

The 64-word sine table is constant, so it becomes logic or a ROM. The source
reports 1033 flip-flops and 195 I/Os for its unified design on a Virtex-II.
This top level has 233 port bits, because the whole 192-bit hash is a port.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. Expected values come from
`tb/hash_ref_pkg.sv`, which is coded separately from the RTL and computes the
MD5 sine table from `$sin` at run time.

* `integrity_unit_tb` runs messages end to end. MD5 is checked against the
  published digests of "", "abc" and the 80-digit string "1234…7890". Every
  block of every message, in both modes, is checked against the reference.
  The test also covers multi-block messages (Continue), mode switches, gaps
  in `data_valid`, requests while busy, and the 65/81-clock latency.
* The other testbenches cover their modules: `nonlinear_fn_tb`,
  `dt_round_tb` (every step, both `TEMP2_ADDS_A` settings), `const_rom_tb`,
  `msg_sched_tb`, `hash_ctrl_tb`, `hash_core_tb`, `cv_reg_tb` and
  `hash_alu_tb`.

There are no published SHA-192 test vectors, so the SHA-192 results are only
as good as the agreement between the RTL and the reference model, which were
both written from the same step equations. For reference, this RTL gives:

```
SHA-192("abc")   = 5dce7e06450eed22fde4c5bd13afcf36bfd674ddb326ec1e
```

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/hash_pkg.sv tb/hash_ref_pkg.sv tb/integrity_unit_tb.sv \
    --top-module integrity_unit_tb -Mdir obj
./obj/Vintegrity_unit_tb
```

For another module, replace both occurrences of `integrity_unit_tb`. The
full end-to-end test finishes in well under a second.
