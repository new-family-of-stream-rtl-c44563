# A keystream generator from randomly chosen NLFSRs, as a secret unknown cipher

A *secret unknown cipher* (SUC) is a cipher that a chip creates for itself once, after manufacture,
from random choices nobody records. Afterwards the chip's responses identify it the way a physically
unclonable function would, but it is all digital: no noise, no error correction, no drift. The cipher
here is a keystream generator whose structure is fixed and public. Only its sixteen nonlinear
feedback shift registers (NLFSRs) vary: each one's feedback function is drawn from a set of functions
that all give the register its maximum period. Every draw gives a cipher with the same security
level, and there are about 2^100 possible draws. On top of that comes the 223-bit initial state.

This RTL implements the generator (sixteen NLFSRs plus the combining function F) and the on-chip
half of the identification protocols. The protocol half generates responses, checks a challenge, and
rolls the generator back when a forged challenge is detected. It is written in SystemVerilog-2017
and is synthesizable.

## Structure

```
          +-------------+ x1
          | NLFSR A1 (6)|----+
          +-------------+    |     +----------------------------+
          | NLFSR A2 (7)|----+---->| LUT1(x1..x4)   LUT2(x5..x8)|     P_t
               ...           |     | LUT3(x9..x12)  LUT4(x13..x16)     |
          |NLFSR A16(23)|----+---->|        LUT5 (xor of four)  |--Z_t--(+)--> C_t
          +-------------+ x16      +----------------------------+
        random part (per chip)         fixed part: combining function F
```

| file | what it is |
|---|---|
| `rtl/ksg_pkg.sv` | feedback-function descriptor type, NLFSR lengths, state packing, default functions |
| `rtl/nlfsr.sv` | one NLFSR A_i, any length, any feedback function of the table |
| `rtl/combining_function.sv` | F as five 4-input LUTs |
| `rtl/ksg.sv` | the generator: A_1..A_16, F, and the xor with plaintext |
| `rtl/suc_response_unit.sv` | k-bit responses, challenge check, state rollback |
| `rtl/suc_top.sv` | the complete unit: generator and response unit, stream and response modes |

## The NLFSRs

Register A_i has N_i cells, numbered N_i−1 down to 0. On each step every cell takes the value of the
cell above it. Cell 0 is the output x_i. The top cell receives

    x_0 xor RFF(x_1, ..., x_{N_i-1})

where RFF, the *random feedback function*, does not depend on x_0. The lengths are 6, 7, …, 17, 19,
21, 22 and 23: 223 flip-flops in all. Two security arguments fix them. F's only degree-4 term joins
the four registers of lengths 19, 21, 22 and 23, which are pairwise coprime. That puts the
keystream's linear complexity above roughly 2^81. F is correlation immune of order 8, so an attacker
who knows the feedback functions must guess nine registers together, and the nine shortest hold
6+…+14 = 90 bits.

Every RFF has one of three shapes, all of algebraic degree 2:

| kind | notation | function |
|---|---|---|
| `RFF_F1` | `a,b,(c,d)` | x_a + x_b + x_c·x_d |
| `RFF_F2` | `a,(b,c),(d,e)` | x_a + x_b·x_c + x_d·x_e |
| `RFF_F3` | `a,b,c,d,(e,h)` | x_a + x_b + x_c + x_d + x_e·x_h |

Indices run from 1 to N−1. For example, `1,2,(2,4)` is x_1 + x_2 + x_2·x_4. The published list
gives, for each length, a set of such *basic* functions that produce a period of 2^N − 1. The
all-zero state is the one state outside the cycle. Each basic function yields three more:

* **reverse**: variable x_j is read from cell N−j. The register produces the time-reversed
  sequence.
* **complement**: g is applied to the inverted cells, x_0 xor g(¬x_1, …, ¬x_{N−1}). The register
  produces the bit-inverted sequence. Its excluded state is all ones.
* **reverse complement**: both at once.

The set S_N for length N is the listed basic functions together with these variants. The number of
members runs from 12 (N = 23) to 200 (N = 11). Picking one member per register is the
personalisation step.

In RTL a feedback function is a `ksg_pkg::rff_t` value: a kind, a form, and the indices in the order
the notation lists them. `mk_rff` builds one:

```systemverilog
// 2,(1,3),(2,4) for N = 6, reverse-complement form
ksg_pkg::mk_rff(ksg_pkg::RFF_F2, ksg_pkg::FORM_REV_COMPL, 2, 1, 3, 2, 4)
```

`ksg` and `suc_top` take a packed array `RFF_SEL` of sixteen such values. Element [i] belongs to
A_{i+1}. The default, `ksg_pkg::DEFAULT_RFF`, is the first listed function of each length in basic
form. Each value is a parameter, so a chip's cipher is fixed when the design is elaborated. This
matches an FPGA flow where the personalisation software writes the chosen functions into the
fabric. An index outside 1..N−1 stops elaboration with an error. The design does not check that a
function really belongs to S_N: any function outside the set will generally give a short period.

`nlfsr` also has a parallel load port and an asynchronous reset to `INIT` (default 1). Its `stuck`
output is high when the register holds its excluded state, from which it would never move.

## The combining function F

    F = x1+x2+x3+x4+x5+x6+x7+x8
      + x9x11 + x10x11 + x10x12 + x13x15 + x14x15 + x14x16
      + x9x10x11 + x10x11x12 + x13x14x15x16

F is balanced, has algebraic degree 4, correlation immunity 8, nonlinearity 26624 and algebraic
immunity 4. The module maps it onto five 4-input LUTs, each written as a 16-bit truth table in which
bit k is the output for inputs k, first input as the LSB:

| LUT | inputs | contents | truth table |
|---|---|---|---|
| LUT1 | x1..x4 | a^b^c^d | `6996` |
| LUT2 | x5..x8 | a^b^c^d | `6996` |
| LUT3 | x9..x12 | ac^bc^bd^abc^bcd | `ECE0` |
| LUT4 | x13..x16 | ac^bc^bd^abcd | `2C60` |
| LUT5 | LUT1..LUT4 | a^b^c^d | `6996` |

The generator has no register after F. Z_t is combinational from the current NLFSR outputs, and the
ciphertext is C_t = P_t xor Z_t.

## Responses, checks and rollback

A response Y_i is simply the next k keystream bits (`K`, default 128). The authority keeps a table
of a unit's responses and uses each one once, in order, as the key of an ordinary block cipher.

* **Enrolment**: the authority issues `cmd_gen` t times and records Y_0 … Y_{t−1}.
* **Identification**: the authority sends E_{Y_i}(R_T) ‖ R_T. The unit issues `cmd_gen` to produce
  Y_i. The external block cipher decrypts the first part with Y_i, and the result R'_T is presented
  on `r_t_dec` next to R_T on `r_t` with `cmd_check`. On a match the unit raises `accept`; it then
  answers with its own E_{Y_i}(R_A) ‖ R_A, which is outside this RTL. On a mismatch it raises
  `reject` and **restores the generator to the state it had before Y_i**. Without that, anyone able
  to send one bogus message would move the unit one response ahead of the authority's table for
  good.
* **Update**: after mutual authentication with Y_{t−1}, the unit produces t fresh responses. These
  go out encrypted under Y_{t−1}, and the authority replaces its table.

`suc_response_unit` implements this. When `cmd_gen` is taken it copies the 223-bit generator state
into a snapshot register. It then enables the generator for exactly K cycles, shifting Z_t into `y`:
the first keystream bit ends up in the MSB.

```
clk edge     0        1 ... K          K+1
cmd_gen    __/‾\______________________________
busy       _____/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\__________   high for K cycles
y_valid    ‾‾\_____________________/‾‾‾‾‾‾‾‾‾   rises K+1 edges after cmd_gen
```

`cmd_check` is taken only while idle with a finished response. `accept` and `reject` are one-cycle
pulses in the following cycle. On `reject`, the snapshot is loaded at the same edge and `resp_idx`
(the index of the next response) steps back by one. Commands arriving while `busy` are ignored.
Assertions flag `cmd_gen` and `cmd_check` in the same cycle, and a restore during generation.

The snapshot doubles the state flip-flops. Because each f has the form x_0 xor g(x_1, …), every
NLFSR can also be stepped backwards. A smaller implementation could undo the K steps instead of
storing the state, at the cost of K cycles.

## The top level, `suc_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `seed_load`, `seed` | in | 1, 223 | load an initial state (from the chip's TRNG); A_1 in bits 5:0, A_2 in 12:6, … A_16 in 222:200 |
| `seed_invalid` | out | 1 | some NLFSR holds its excluded state |
| `stream_en`, `p` | in | 1 | stream mode: step every cycle, plaintext bit |
| `z`, `c` | out | 1 | keystream bit, c = p xor z |
| `cmd_gen`, `cmd_check` | in | 1 | protocol commands |
| `r_t`, `r_t_dec` | in | 128 | R_T and the externally decrypted R'_T |
| `y`, `y_valid`, `busy` | out | K, 1, 1 | response and status |
| `accept`, `reject` | out | 1 | result of a check |
| `resp_idx` | out | 32 | index of the next response |

A response has priority over stream mode. `stream_en` is ignored while `busy` is high and in the
cycle in which `cmd_gen` is taken. `seed_load` has priority over a rollback. After synthesis the top
holds 618 flip-flop bits: 223 in the generator, 223 in the snapshot, 128 in `y`, and the rest in
counters and flags.

## What lies outside the RTL

The seed comes from the chip's true random number generator. The feedback functions come from the
one-time personalisation software. The block cipher used with Y_i is any standard cipher. All three
reach the design as ports or parameters. The serial number SN_A that opens an identification, the
unit's own random challenge R_A and the message framing are the system's job as well. No key-loading algorithm (key + IV → state) is included;
the state is loaded directly. The seed source must avoid a zero field, and `seed_invalid` reports one
that slips through.

## Where this RTL departs from, or adds to, the published description

* **Complement forms.** The description writes the complement form as x_0 xor 1 xor g(x_1, …),
  but it also says the form generates the complemented sequence. Taken literally, the formula
  generally loses the maximum period: for A_1's first function it gives period 46 instead of 63.
  This design builds the complemented-sequence version, x_0 xor g(¬x_1, …). The testbench
  confirms that version reaches period 2^N − 1 for all tested functions.
* **Lengths.** One passage lists the lengths as ending "19, 21, 23, 24". The table, the total of
  223 bits and the security analysis all use 19, 21, 22, 23, which is what is built.
* **Own choices**, not given by the description: K = 128 and 128-bit R_T; the command handshake,
  the bit order of `y`, and the width of `resp_idx`; the snapshot register; the seed packing and
  the reset value; the `stuck`/`seed_invalid` flags; the priority of responses over stream mode.
  After enrolment, how the unit gets back to S_0 is not described. The testbench reloads the seed.
* The feedback-function table itself is not built into the RTL. The defaults are one member per
  length; any other member is passed as a parameter in the notation above.
* The published resource figure (37 LUTs and 223 flip-flops on a SmartFusion2) covers the
  generator alone. The generator here has the same 223 flip-flops. The 5-LUT F is written so that
  it maps directly; the published count for the sixteen feedback functions is 32 LUTs.

## Verification

Each testbench is self-checking and ends with a `TB_RESULT checks=… failures=…` line.

* `tb/nlfsr_tb.sv`: 80 registers. For every length, the first listed function in all four
  forms, plus the last listed function in basic form. Each must return to its random seed after
  exactly 2^N − 1 steps (up to 8.4 million for N = 23). Each is also compared for 3000 steps with a
  model that parses the table's own text notation. Finally the excluded state must raise `stuck` and
  stay put. Runs about 2½ minutes.
* `tb/nlfsr_table_tb.sv`: the whole published table for lengths 6 to 17 and 19, 400 basic
  functions in all four forms, 1600 registers. The table is held in its own text notation and
  parsed by a constant function at elaboration, so each entry becomes one `nlfsr` parameter set.
  Every register must come back to its reset state after exactly 2^N − 1 steps, and the number of
  entries per length times four must equal the published set size. All 1600 pass, which confirms
  the reading of the reverse and complement forms throughout. (One entry for N = 16 is printed
  as `3,(1,5),(5,7;`, with a bracket missing; it is read as `3,(1,5),(5,7)`.) Compiling takes
  about a minute, running about 30 seconds.
* `tb/combining_function_tb.sv`: all 65536 inputs against the ANF. The testbench then runs its
  own Möbius and Walsh–Hadamard transforms to confirm balance, degree 4, exactly the 17 listed
  monomials, nonlinearity 26624 and correlation immunity 8.
* `tb/ksg_tb.sv`: 20000 cycles with random enable and plaintext against the reference model
  `tb/ksg_ref_pkg.sv`, comparing the state, x, Z_t and C_t every cycle. It includes a reload in
  the middle of the run and an invalid seed.
* `tb/suc_response_unit_tb.sv`: response latency (K+1 edges) and busy time (K cycles), the
  response value, accept, reject with rollback, the repeated response after rollback, and ignored
  commands.
* `tb/suc_top_tb.sv`: the whole unit at default parameters. It covers an invalid seed,
  enrolment of four responses, two identification rounds (each a forged challenge, which is
  rejected and rolled back, then a genuine one, which is accepted), an update of four responses,
  300 stream-mode bits, and a response with `stream_en` held high. Every response and keystream
  bit is checked against the model, and each mechanism is counted.

To run one with Verilator, for example the top:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ksg_pkg.sv tb/ksg_ref_pkg.sv \
  rtl/nlfsr.sv rtl/combining_function.sv rtl/ksg.sv rtl/suc_response_unit.sv rtl/suc_top.sv \
  tb/suc_top_tb.sv --top-module suc_top_tb -o sim && ./obj_dir/sim
```

Not verified: the claims that cannot be simulated, namely the keystream's period above 2^161, its
linear complexity above 2^81, and the algebraic immunity of F. Also unverified are the periods of
the entries for N = 21, 22 and 23 other than the first and last (a 2^23-step run of every form
is too long to keep in the suite), and timing or area on any FPGA.
