# RC4 with concurrent fault detection

A hardware RC4 keystream generator can be attacked by injecting faults: a
glitch, a laser pulse or a particle strike that flips a bit in the wrong place
can leak the key, and a fault that goes unnoticed corrupts the keystream
without anyone knowing. This design puts three small checkers next to an RC4
core. They watch the core's three fault-prone operations while it runs, and
they never add a clock cycle. When one of them sees something wrong, the core
stops and reports it.

| What can go wrong | Checker | How it detects it |
|---|---|---|
| An S-box element is corrupted | CRC checker | Every S-box element carries a 4-bit CRC of its data byte. S[i] and S[j] are checked each time they are swapped. |
| The `j` (or `t`) adder gives a wrong sum | Addition checker (two instances) | Each nibble's parity is predicted from the operands and carries, then compared with the sum. |
| The `i` counter skips or takes a wrong value | Counter checker | Eight consecutive counts must show fixed parity patterns. |

The core runs KSA (key scheduling) and then PRGA (keystream generation). Every
round takes one clock, split over the two edges, so the design produces one
keystream byte per clock whether or not the checkers are present.

Error detection only: nothing is corrected.

## The round and its two clock edges

This is the part that needs the most care. Each RC4 round is split across one
clock period:

```
            rising edge                         falling edge
            -----------                         ------------
 KSA        j <- j + S[i] + K[i]                swap S[i], S[j];  i <- i + 1
 PRGA       j <- j + S[i]                       swap S[i], S[j];  i <- i + 1
            t <- S[i] + S[j_new]                Z <- S[t]  (value after the swap)
 checkers   addition checkers register          CRC checker registers (S[i], S[j])
                                                counter checker takes i
```

- **`t` on the rising edge.** The core computes `t` from S[i] and S[j_new]
  before they are swapped. A swap does not change the sum, so this `t` is the
  one RC4 defines. Doing it here lets the addition checker see both additions
  on the edge it uses.
- **Reading `Z` after the swap.** `Z = S[t]` is read on the falling edge, on
  which the swap is also written. The core forwards the value: if `t == i` it
  takes the old S[j], if `t == j` it takes the old S[i], and otherwise it
  reads S[t].

A key schedule runs as follows, counting the rising edge that takes `start` as
edge 0:

| Round (rising edge k to k+1) | Rising edge | Falling edge |
|---|---|---|
| 0, `ST_INIT` | j = 0, key index = 0 | S-box loaded with {n, crc4(n)}, i = 0 |
| 1 … 256, `ST_KSA` | j update | swap, i = 1 … 255, then 0 |
| 257, `ST_PRGA_INIT` | j = 0 | i = 1 |
| 258 …, `ST_PRGA` | j, t update | swap, Z, i++ |

- The first keystream byte is on `z` with `z_valid` from falling edge 258.
  After that one byte arrives per clock. Each byte stays valid from one
  falling edge to the next.
- The round-257 clock, which produces no byte, is the one clock lost before
  the first byte.
- The `i` register counts 0, 1, …, 255, 0, 1, 2, … without a break from the
  first KSA round on. The counter checker depends on this (see below).

### What a fault does to the round

`no_fault` is the AND of all checker outputs. The core samples it on both
edges:

- **Low on a rising edge:** the core does not start the round and enters
  `ST_HALT`.
- **Low on a falling edge:** the core cancels that edge's swap, `i`
  increment and keystream byte. `ST_HALT` follows on the next rising edge.

The core stays halted until the next `start`. How far a fault gets before the
core halts depends on the checker that catches it:

| Fault | Flagged | Effect before the halt |
|---|---|---|
| Adder A or B gives a wrong sum | on the same rising edge that stores the sum | The wrong `j` or `t` is stored, but the swap, `i` increment and byte of that round are cancelled. No wrong byte leaves. |
| Corrupted S-box element read as S[i] or S[j] | on the falling edge of the swap | That round has already used the element, so at most one wrong byte leaves. The core halts on the next rising edge. |
| Wrong `i` value | on the falling edge that takes the eighth value of its window | Up to eight rounds can run with the wrong `i`. |

## The CRC-encoded S-box and the CRC checker

Each S-box element is 12 bits wide: the data byte in `[11:4]` and its CRC in
`[3:0]`. The CRC is the remainder of `d(x)·x⁴` divided by `g(x) = x⁴ + x³ + 1`.
The code computes it in `rc4_pkg::crc4` as a zero-initialised LFSR, shifting
MSB first with feedback taps `4'b1001`. Because a swap moves whole 12-bit
words, each CRC stays with its byte. The S-box (`rc4_sbox`) holds 256 × 12
flip-flops. It has four combinational read ports and writes on the falling
edge.

`rc4_crc_checker` holds a 256 × 4 CRC array, `CRC_ARRAY[n] = crc4(n)`, which
is computed from the divisor when the design is elaborated. It works like
this:

- Two 256:1 multiplexers, addressed by S[i][11:4] and S[j][11:4], select the
  expected CRCs from the array.
- Two comparators, registered on the falling edge, check them against
  S[i][3:0] and S[j][3:0].
- Their AND is the checker's `no_fault`.

**Coverage.** This is a linear code, so an error pattern `e` in the data byte
goes undetected exactly when `g(x)` divides `e(x)`. For 8-bit patterns that
happens for 15 of the 255 nonzero patterns. All single-bit errors are caught
(see the coverage section).

Only S[i] and S[j] are checked. S[t], which gives the keystream byte, is read
without a check.

## Nibble parity prediction for the adders

The parity of a sum is the XOR of:

- the parities of the two operands, and
- the carries that enter the bit positions of the sum.

`rc4_add_checker` applies this to each nibble of an 8-bit modulo-256 sum.
Here c[k] is the carry into bit k, and c[0] = 0:

```
p_lo = ^aug[3:0] ^ ^add[3:0] ^ c[0]^c[1]^c[2]^c[3]
p_hi = ^aug[7:4] ^ ^add[7:4] ^ c[4]^c[5]^c[6]^c[7]
```

Only the operands and the sum reach the checker, so it builds its own carry
chain. It flags a fault when `p_lo` or `p_hi` differs from the parity of the
matching nibble of `sum`. So it catches every error that flips an odd number
of bits in at least one nibble, which is 192 of the 255 error patterns.

The core has two adders, and each gets its own checker instance:

- **A:** `j + S[i]`, used in both phases.
- **B:** `+ K[i]` in KSA, `S[i] + S[j]` in PRGA.

KSA's three-operand sum `j + S[i] + K[i]` is therefore checked as two
two-operand additions.

## Checking a counter from eight of its values

Take a window of eight counts aligned to a multiple of 8 (8k … 8k+7). For
v = 8k … 8k+3, the value v+4 differs from v only in bit 2. So a correct count
obeys three rules:

1. The parity of the even bit positions (0, 2, 4, 6) of v+4 is the
   complement of that of v.
2. The parity of the odd bit positions (1, 3, 5, 7) of v+4 equals that of v.
3. `bit7 ^ bit3` is the same for all eight values, because bits 3 and 7 do
   not change within the window.

`rc4_counter_checker` works as follows:

- It stores seven values and tests the three rules when the eighth arrives.
- Its own 3-bit slot pointer decides where a window starts. The core's
  initialisation round clears the pointer, so windows line up with the
  aligned counts.
- A single wrong value is caught unless its error pattern has even parity on
  both the even and the odd positions and leaves `bit7 ^ bit3` unchanged.
  That leaves 31 undetected patterns of 255.
- A skipped or repeated count also breaks the rules (the testbench checks
  both).

**Alignment.** The rules hold only for aligned windows. That is why the core
keeps its `i` register counting through the PRGA initialisation round instead
of restarting the count.

## Measured detection coverage

Every nonzero 8-bit error pattern was applied to the value each checker
guards, and the detected patterns were counted. This was done twice:

- in each checker's own testbench, on the checker alone;
- in `tb_rc4_fault_campaign`, on the whole design while it generates
  keystream. Each pattern is injected once on a fresh key schedule, and a
  detection counts only if the core halts because of the expected checker.

Both give the same counts. Here they are by number of flipped bits, next to
the figures published for this scheme:

| flipped bits | patterns | CRC (this RTL / published) | adder (this RTL / published) | counter (this RTL / published) |
|---|---|---|---|---|
| 1 | 8  | 8 / 8   | 8 / 8   | 8 / 8   |
| 2 | 28 | 28 / 21 | 16 / 16 | 20 / 20 |
| 3 | 56 | 52 / 56 | 56 / 56 | 56 / 56 |
| 4 | 70 | 65 / 70 | 32 / 32 | 56 / 55 |
| 5 | 56 | 52 / 56 | 56 / 56 | 56 / 56 |
| 6 | 28 | 26 / 0  | 16 / 16 | 20 / 20 |
| 7 | 8  | 8 / 8   | 8 / 8   | 8 / 8   |
| 8 | 1  | 1 / 0   | 0 / 0   | 0 / 1   |
| total | 255 | 240 / 219 | 192 / 192 | 224 / 224 |

- **Adder:** the counts match exactly.
- **Counter:** the totals match. The per-row split differs in two rows.
- **CRC:** the published figures cannot come from the divisor
  `x⁴ + x³ + 1`. That divisor misses exactly 15 patterns, not 36. The
  published figures also claim the divisor is a multiple of `x + 1`, and it
  is not: g(1) = 1. So it does not catch all odd-weight errors. Three- and
  five-bit errors in the table above are indeed sometimes missed.

## Where this RTL departs from the original description, and why

- **Odd-position counter rule.** The original text says the odd-position
  parities of the second four counts are the complement of the first four.
  For real binary counting they are equal, for example 0, 0, 1, 1 | 0, 0, 1, 1
  for the counts 0–7. The RTL checks equality. A complement rule would flag
  every correct window.
- **Parity-prediction formula.** The published formula lists the carry-in and
  the carries *out of* bits 0–3 for the low nibble, and repeats the carry-in
  for the high nibble. Taken literally, that counts the carry leaving the
  nibble and does not give the sum's parity. The RTL uses the carries *into*
  each bit of the nibble.
- **CRC check edge.** The CRC check runs on the falling edge, as in the
  published timing diagram, where the swap happens. One sentence of the
  original places it on the rising edge.
- **`t` on the rising edge.** `t = S[i] + S[j]` is computed on the rising
  edge, not the falling edge (see the first section).
- **Fault reaction.** After a fault the core halts and raises `halted`. It
  does not restart by itself. A new `start` begins a new key schedule.
- **This design's own choices.** The original does not describe these parts,
  so this RTL chooses them:
  - a flip-flop S-box that loads its identity permutation in one edge;
  - the key port: up to 16 bytes, `key_len` 1…16, and `K[i] = key[i mod key_len]`
    from a wrapping index;
  - the state encoding;
  - asynchronous active-low reset;
  - the fault-injection port;
  - one addition-checker instance per adder.

## Interface of `rc4_fault_top`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | Clock (both edges used) and asynchronous active-low reset. |
| `start` | in | 1 | Sampled on a rising edge. Begins a key schedule, also from `ST_HALT`. |
| `key` | in | 16×8 | Key bytes. `key[0]` is the first byte. |
| `key_len` | in | 5 | Number of key bytes, 1 … 16. An assertion checks it at `start`. |
| `fi` | in | `fault_inject_t` | XOR masks for the `i` output, adder A, adder B and one S-box element. Tie to zero in normal use. |
| `z`, `z_valid` | out | 8, 1 | Keystream byte, one per clock in PRGA. |
| `state`, `halted` | out | 3, 1 | Round type (`core_state_t`), and halted after a fault. |
| `no_fault` | out | 1 | AND of all checker outputs. It is also what the core sees. |
| `crc_ok`, `add_a_ok`, `add_b_ok`, `cnt_ok` | out | 1 | Individual checker outputs. |

`KEY_BYTES_MAX` (default 16) sets the widths of the key port.

## Files

| File | Content |
|---|---|
| `rtl/rc4_pkg.sv` | Widths, `selem_t` (12-bit element), `add_tap_t`, `fault_inject_t`, `core_state_t`, `crc4`, parity helpers |
| `rtl/rc4_sbox.sv` | 256 × 12-bit S-box with four read ports and a swap write |
| `rtl/rc4_core.sv` | KSA/PRGA with the two-edge round, halting, and the checker taps |
| `rtl/rc4_crc_checker.sv` | CRC array, two multiplexers, two registered comparators, AND |
| `rtl/rc4_add_checker.sv` | Nibble parity prediction |
| `rtl/rc4_counter_checker.sv` | Eight-value window and the three counting rules |
| `rtl/rc4_fault_top.sv` | Core plus the four checker instances and the AND feedback |
| `tb/tb_*.sv` | One self-checking testbench per module |
| `tb/tb_rc4_fault_campaign.sv` | Whole-design fault campaign: the three coverage counts on the running core |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_rc4_fault_top rtl/rc4_pkg.sv tb/tb_rc4_fault_top.sv
./obj_dir/Vtb_rc4_fault_top
```

Substitute another testbench name to run a different one:

- `tb_rc4_fault_top` runs the complete design at its default parameters:
  - 3000 keystream bytes checked against a reference model, one byte per
    clock, with no false alarm;
  - fault campaigns for each checker, in both KSA and PRGA;
  - a restart after every halt;
  - a two-bit same-nibble adder fault that must go unreported.

  It counts each of these mechanisms, and a mechanism that never happens
  counts as a failure.
- `tb_rc4_core` checks the core with `no_fault` driven by the bench:
  - RFC 6229 (key 0x0102030405) and the usual "Key", "Wiki" and "Secret"
    vectors;
  - random keys of every length from 1 to 16;
  - the 258-clock latency and the continuous `i` count;
  - halting on either edge.
- `tb_rc4_crc_checker`, `tb_rc4_add_checker` and `tb_rc4_counter_checker`
  run the exhaustive error-pattern campaigns and print the coverage table
  above. The adder bench requires the exact published counts. The counter
  bench requires the published total.
- `tb_rc4_fault_campaign` repeats the three campaigns on the running
  design. It injects 765 faults, each on a fresh key schedule. For each one
  it checks halt against no halt, and which checker raised the fault, against
  an independent prediction.
- `tb_rc4_sbox` checks initialisation, swaps and bit flips against a model
  array.

All the benches are short: each runs in well under a second.

Two Verilator lint warnings remain, and both are expected:

- `SYNCASYNCNET` comes from the `key_len` assertion's `disable iff`.
- `UNUSEDSIGNAL` flags the CRC bits of the S[j_new] and S[t] reads. The core
  uses only their data bytes.
