# An iterative DES core in SystemVerilog

The Data Encryption Standard (DES) turns a 64-bit block into another 64-bit
block under a 64-bit key, of which 56 bits count. It is a Feistel cipher. The
block is split into two 32-bit halves. Sixteen times, one half is scrambled by a
keyed function `f` and XORed into the other half, and the halves change places.
Decryption uses the same circuit with the sixteen round keys in reverse order.

This core builds a single Feistel round in hardware and uses it once per clock.
A block takes one load cycle and sixteen round cycles. Only the running state is
stored: a 64-bit L/R register for the data and a 56-bit C/D register for the key.
The round keys are not stored. Each one is made in the cycle that needs it, by
rotating C/D and passing it through a fixed bit selection. This layout follows
the published description of the design: "An RTL Implementation of the Data
Encryption Standard (DES)" by R. Kumari, J. G. Pandey and A. Karmakar. That
paper reports a Virtex-7 result of 139 flip-flops, which only a one-round,
iterative core can reach. This core uses 127.

## Data path

```
              din (64)                               key (64)
                 |                                       |
               [ IP ]                                 [ PC-1 ]   drops parity bits
                 | load                                  | load
        +--> [ L | R ] (2 x 32 flip-flops)       +--> [ C | D ] (2 x 28 flip-flops)
        |        |                               |       |
        |   +----+-----------------+             |  rotate C and D by 0, 1 or 2
        |   |  des_round           |             |  (left: encrypt, right: decrypt)
        |   |  L' = R              |             |       |
        |   |  R' = L xor f(R, K) <-------- K ---|-- [ PC-2 ] 56 -> 48
        |   +----+-----------------+             |       |
        +--------+  advance                      +-------+  advance
                 |
          swap: {R, L}
                 |
             [ IP^-1 ]
                 |
              dout (64)
```

The round function is `f(R, K) = P(S(E(R) xor K))`:

| stage | module | width | what it does |
|---|---|---|---|
| expansion E | `des_expansion` | 32 -> 48 | each 4-bit group gets the last bit of the group before it and the first bit of the group after it (cyclic) |
| whitener | in `des_f` | 48 | XOR with the round key |
| S-boxes | `des_sbox_array`, `des_sbox` | 48 -> 32 | eight 6-to-4-bit lookups |
| P | `des_pperm` | 32 -> 32 | fixed bit shuffle |

Every permutation (IP, IP^-1, E, P, PC-1, PC-2) is wiring only. The logic is in
the eight S-boxes, the two XORs, the rotation multiplexers and the register
enables.

## Bit numbering

DES numbers the bits of a block from 1 at the left (most significant) end. All
tables use that numbering. A table entry `n` at output position `i` means
"output bit i is input bit n". In the RTL, DES bit `n` of a `W`-bit vector is
`v[W-n]`. So bit 1 of `din` is `din[63]`, `L` is `din`-after-IP `[63:32]`, and
`C` is `cd[55:28]`. Each permutation module is a `for`/`generate` loop of the
form `assign dout[W_OUT-1-i] = din[W_IN-TABLE[i]]`. The tables are in
`rtl/des_pkg.sv`.

An S-box takes its six input bits `b1..b6`. The outer pair `b1 b6` picks one of
four rows. The inner four bits `b2..b5` pick one of sixteen columns.

## The key schedule, forwards and backwards

PC-1 turns the key into two 28-bit halves, C0 and D0. Before round `i`, both
halves are rotated left by `s(i)` places. PC-2 then picks 48 of the 56 bits as
the round key `Ki`. The amounts are:

```
round i : 1 2 3 4 5 6 7 8 9 10 11 12 13 14 15 16
s(i)    : 1 1 2 2 2 2 2 2 1  2  2  2  2  2  2  1      (sum 28)
```

`des_key_schedule` keeps the rotated halves in `cd_q`. In each round cycle, the
round key is PC-2 of `cd_q` rotated by that round's amount, and that same
rotated value is written back at the clock edge. No round keys are stored and
no cycles are added.

The amounts add up to 28, a full turn, so C16D16 equals C0D0. Decryption needs
K16 first, and K16 = PC-2(C16D16) = PC-2(C0D0): no rotation at all. After that,
each earlier key is reached by undoing one rotation, i.e. a right rotation by
`s(17-i)`. So in decrypt mode the same register, loaded the same way, is rotated
right by `0,1,2,2,2,2,2,2,1,2,2,2,2,2,2,1`. This gives the keys in the order
K16, K15, ..., K1 at the rate of one per clock. The source description only says
that the keys are applied in reverse. Walking the schedule backwards like this
is a choice of this design.

## Control and timing

`des_control` is a two-state machine (IDLE, RUN) with a 4-bit round counter.

- `start` is accepted at a rising edge when `busy` is low. In that cycle `load`
  is high. `IP(din)` goes into L/R, `PC1(key)` goes into C/D, and `decrypt` is
  captured.
- The next 16 cycles are round cycles. `busy` is high, and `round` counts from 0
  to 15.
- `done` is high for one cycle: the 17th cycle after the cycle in which `start`
  was accepted.
- `dout` is `IP^-1({R, L})`, computed combinationally from the registers. It is
  valid while `done` is high and stays valid until the next block is loaded.
- `start` is ignored while `busy` is high.
- A new block may be started in the cycle in which `done` is high. Back to back,
  the core finishes one block every 17 cycles.
- `key`, `din` and `decrypt` only need to be valid in the accepting cycle.

```
cycle   |  0  |  1  |  2  | ... | 16  | 17  | 18  |
start   |  1  |  -  |  -  | ... |  -  |  1  |  -  |   (- : ignored)
load    |  1  |  0  |  0  | ... |  0  |  1  |  0  |
busy    |  0  |  1  |  1  | ... |  1  |  0  |  1  |
round   |     |  0  |  1  | ... | 15  |     |  0  |
done    |  0  |  0  |  0  | ... |  0  |  1  |  0  |
dout    |     |     |     |     |     | result of the first block
```

The example starts a second block in cycle 17, back to back. Without that
second start, `dout` would keep the first result from cycle 17 onwards.

Reset (`rst_n`) is active-low and asynchronous. It clears the state machine,
the counter, `done` and both data registers.

Assertions in `des_control` check three rules:

- the counter stays in 0..15;
- `done` is never high during a run;
- `done` lasts exactly one cycle.

## Where this departs from, or adds to, the published description

Several tables in the published text are garbled. Each one was repaired in the
way that agrees with the text around it, and with the worked example, which the
core reproduces at every printed step:

- the round-1 subkey K1;
- C0..C16 and D0..D16;
- K1..K16;
- the IP output;
- E(R0);
- the S-box output;
- f;
- R1;
- the ciphertext 85E813540F0AB405.

The repairs:

- **Final permutation.** One printed entry (row 6, column 3) reads 53, which
  appears twice in the table. It is taken as 43. That makes the table the exact
  inverse of IP, as the text says it is.
- **Expansion.** The printed table has two extra columns that cannot index a
  32-bit word. The core follows the rule stated in words. That rule matches the
  first six columns.
- **P.** Only the first four rows of the printed 8-row table form a 32-bit
  permutation, and only those are used.
- **PC-1 and PC-2.** The printed tables have an extra column or two with
  repeated entries. The core uses the first seven and the first six columns.
- **S-box contents** are not printed. They are the tables of the DES standard
  (FIPS 46-3). The worked example confirms them.
- **Rotation amounts** are not printed as a table. They are read off the
  published C/D sequence.
- **D rotation direction.** One of the source figures labels the D rotation
  "Right Shift(s)". The text, the other figure and the published D values all
  show a left rotation, and the core rotates left when encrypting.

Design choices that the source does not settle:

- the iterative organisation;
- the start/busy/done handshake and its 17-cycle latency;
- the reset;
- holding `dout` until the next start;
- the backwards key schedule.

The key port is 64 bits wide. Parity bits 8, 16, ..., 64 are ignored and not
checked.

The core is the bare block cipher. Modes of operation such as CBC or CTR are
left to the surrounding logic, so one `start` is one ECB block. The published
text also discusses Simplified DES (8-bit blocks, 10-bit key) as a teaching aid.
It does not give that cipher's tables, and it is not part of this design.

## Size and speed

Yosys coarse synthesis of `des_core` gives:

- 127 flip-flops: 64 L/R, 56 C/D, 1 mode, 6 control;
- the eight S-boxes as 64 x 4-bit constant tables.

The published FPGA result is 139 flip-flops, 244 LUTs, 69 slices, a 246 MHz
maximum clock and 8 mW at 100 MHz on Virtex-7. No FPGA implementation of this
RTL is reported here.

The longest path starts at the C/D register. It runs through the rotation
multiplexer, PC-2 (wiring), the key XOR, an S-box, P (wiring) and the L XOR,
and ends at the R register. At 100 MHz with 17 cycles per block, throughput
would be 376 Mbit/s.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The expected values come
from outside the design:

- the published worked example;
- closed forms written into the testbench. IP in closed form: output row `r`,
  column `c` takes input bit `58+2r-8c` (rows 0-3) or `57+2(r-4)-8c`
  (rows 4-7). E follows its cyclic-neighbour rule;
- tables typed out again in the testbench (P, PC-1, PC-2);
- vector files produced by an independent software model of the DES standard:
  - `tb/des_vectors.hex`: 100 key/plaintext/ciphertext triples, including the
    classic `0E329232EA6D0D73 / 8787878787878787 -> 0000000000000000`;
  - `tb/des_f_vectors.hex`: 64 random `f` evaluations;
  - `tb/des_sbox_vectors.hex`: all 512 S-box entries.

| testbench | what it checks |
|---|---|
| `tb_des_ip`, `tb_des_fp` | worked example; all 64 one-hot inputs; 200 random blocks |
| `tb_des_expansion`, `tb_des_pperm` | worked example; all one-hot inputs; random words |
| `tb_des_sbox_array` | round-1 example; all 512 entries |
| `tb_des_f`, `tb_des_round` | round-1 example; 64 random vectors |
| `tb_des_pc1`, `tb_des_pc2` | published C0D0 and K1..K16 from C1D1..C16D16; one-hot walks (PC-1 parity bits must vanish) |
| `tb_des_key_schedule` | K1..K16 forwards and K16..K1 backwards, one per clock, with and without idle cycles after loading |
| `tb_des_control` | cycle-exact load/advance/round/busy/done; start held high during a run; back-to-back start |
| `tb_des_core` | the whole core at default parameters: example in both directions and 100 vectors, each run as encryption or decryption at random |

Every block of every test in `tb_des_core` is checked for:

- its result;
- the 17-cycle latency;
- `busy` staying high until `done`.

The test also counts how often each mechanism happens, and fails if any count is
zero:

- encryption;
- decryption;
- a switch between them;
- a `start` ignored while busy;
- a back-to-back start;
- `dout` holding after `done`.

A typical run counts about 55 encryptions, 45 decryptions, 44 mode switches, 30
ignored starts and 32 back-to-back starts.

To run a testbench with Verilator 5, run this from the directory that holds
`rtl/` and `tb/`. The vector files are read by the relative paths `tb/*.hex`.

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_des_core \
    rtl/des_pkg.sv tb/tb_des_core.sv
./obj_dir/Vtb_des_core
```

Swap the top module and file name to run another testbench. The testbenches for
PC-1, PC-2 and the key schedule also need `tb/des_paper_example_pkg.sv` on the
command line. That file holds the published C/D and round-key values.

## Files

| file | contents |
|---|---|
| `rtl/des_pkg.sv` | types, permutation tables, S-box tables, rotation amounts, rotate functions |
| `rtl/des_core.sv` | top level: registers, swap, wiring of everything below |
| `rtl/des_control.sv` | IDLE/RUN sequencer, round counter, handshake, assertions |
| `rtl/des_key_schedule.sv` | C/D register, per-round rotation, PC-1 and PC-2 instances |
| `rtl/des_round.sv` | one Feistel round |
| `rtl/des_f.sv` | round function f |
| `rtl/des_expansion.sv`, `des_sbox_array.sv`, `des_sbox.sv`, `des_pperm.sv` | the stages of f |
| `rtl/des_ip.sv`, `des_fp.sv`, `des_pc1.sv`, `des_pc2.sv` | the fixed permutations |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_des_core` is the end-to-end test |
| `tb/des_paper_example_pkg.sv`, `tb/*.hex` | expected values |

To change the core, keep in mind:

- The round count `ROUNDS` of `des_control` is fixed at DES's 16 by the package
  constant `NUM_ROUNDS`.
- The round counter is 4 bits wide.
- The rotation tables have 16 entries.
- A pipelined, unrolled variant would instantiate `des_round` and the PC-2/rotation
  logic sixteen times, with registers in between. Nothing in the round modules
  assumes the iterative form.
