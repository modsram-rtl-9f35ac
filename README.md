# ModSRAM: 256-bit modular multiplication inside an 8T SRAM array

This is synthesizable SystemVerilog for ModSRAM, a small SRAM macro that computes
`C = A * B mod p` for 256-bit numbers, the core operation of elliptic-curve
cryptography. It does almost all of the work inside the memory array. The
multiplication is written so that each addition is a bitwise function of three stored
rows: XOR3 gives the sum and MAJ (majority) gives the carry. An 8T SRAM can
compute both in one read cycle: open three read wordlines together and sense each
read bitline against three reference levels. A few registers, shifters and one
final adder sit next to the array.

The algorithm is called R4CSA-LUT. It combines three ideas:

* **Radix 4 (Booth).** Each iteration consumes two multiplier bits, so there are
  about n/2 iterations instead of n.
* **Carry save.** The running value is never resolved. It is kept as two words,
  `sum` and `carry`, so no carry ripples through 257 bits during the loop.
* **Look-up tables in memory rows.** Everything that would need a modular
  reduction inside the loop is read from precomputed rows instead:
  * the multiples of B that the Booth digits call for;
  * the residues of the bits that overflow the top of the words.

The design follows the published description of ModSRAM, an SRAM
processing-in-memory architecture. Where that description is silent or
inconsistent, this implementation makes its own choices. They are listed in
[Departures and own choices](#departures-and-own-choices).

## The arithmetic

Let n = 256 and W = n + 1 = 257 bits. Fix the multiplicand B and the modulus p
(p < 2^n). The host precomputes 14 rows:

| rows  | table        | contents                                                                 |
|-------|--------------|--------------------------------------------------------------------------|
| 50–54 | LUT-radix4   | one row per Booth digit 0, +1, +2, -2, -1: `0, B, 2B mod p, -2B mod p, -B mod p` (negatives as `p - x`) |
| 55–63 | LUT-overflow | row k, k = 0..8: `k * 2^(n+1) mod p`                                      |

The Booth digits come from the multiplier A. Take A with a zero appended below
it (`a_-1 = 0`) and zeros above it. Scan the overlapping triples
`(a_2i+1, a_2i, a_2i-1)`, most significant first. Each triple gives a digit:

```
000 -> 0   001 -> +1  010 -> +1  011 -> +2
100 -> -2  101 -> -1  110 -> -1  111 -> 0
```

There are `ITER = floor(n/2) + 1` digits, which is 129 for n = 256. For odd n
this is the usual count (three digits for a 5-bit multiplier). For even n it is
one more than n/2, because the top digit has to see a zero above bit n − 1.

The loop keeps `sum` and `carry`, each W bits wide. Their value, plus a small
overflow count, is congruent to the partial product mod p. Each iteration runs two
carry-save steps. Every arrow below is one memory cycle.

```
radix-4 section
  read   rows {sum, carry, LUT-radix4[digit]}      -> XOR3 -> sum FF,  MAJ -> carry FF
         ovf = ovf_sum + ovf_carry + MAJ[W-1]         (index into LUT-overflow)
  write  sum row   <- sum FF
  write  carry row <- carry FF << 1                   (MAJ[W-1] drops out, counted in ovf)
overflow section
  read   rows {sum, carry, LUT-overflow[ovf]}      -> XOR3 -> sum FF,  MAJ -> carry FF
  write  sum row   <- sum FF   << 2                   top 2 bits drop out -> ovf_sum
  write  carry row <- carry FF << 3                   top 3 bits drop out -> ovf_carry
```

The shifts on the second pair of writes do two jobs:

* They pre-multiply the value by 4 for the next digit.
* The carry word moves one more place, because a carry is worth twice its bit
  position.

Each bit pushed out of the top is worth a multiple of 2^(n+1). The overflow index
counts them: `ovf_sum` (0..3), `ovf_carry` (0..7) and the MSB lost by the radix-4
carry (0..1). The next overflow section then adds `ovf * 2^(n+1) mod p` back in
from LUT-overflow, so nothing is ever lost.

After the last digit, the sum and carry registers hold the product in redundant
form. `final_adder` adds them with one full adder (`sum + 2*carry`, below
3·2^(n+1)). It then subtracts p once per cycle until the value is below p. For a
modulus with its top bit set, that takes at most 12 subtractions.

**Why nine overflow entries.** The published table has eight entries (0..7). That
is enough only if the carry word's top bit can be dropped after the second
carry-save step. It cannot: if that bit is dropped, about one random 256-bit
product in a hundred comes out wrong. This design keeps the bit. In simulation,
the overflow index then reaches 8 but never more. This was checked:

* exhaustively for n ≤ 7;
* over 10^6 random products of 8 to 256 bits, using a bit-accurate model of this
  datapath.

`ov_err` flags an index above 8, in case one ever occurs.

**Why one more Booth digit.** A loop of n/2 digits reads the multiplier as a
signed number. It therefore fails whenever `a_n-1 = 1`, which happens for half of
all 256-bit operands. One more digit, with zeros above A, fixes this. The cost is
6 cycles.

## How the array computes XOR3 and MAJ

`sram_array_8t` has two ports:

* a write port: WWL, with the BL/BLB pair driven by the write data;
* a decoupled read port: RWL and RBL.

An 8T cell's read stack discharges its RBL only when the RWL is high and the cell
holds 1. Because the read port never touches the storage node, three RWLs can be
opened together without read disturb. A 6T cell would suffer read disturb, which
is why the design uses 8T cells. The RBL then settles at one of four levels, set
by how many of the three cells hold 1.

The model represents this level as a count from 0 to 3 (`rbl_cnt`). It is the
only place where an analog quantity is turned into a number.

`logic_sa` places three `latch_sa` sense amplifiers on every RBL. Their
references sit between the levels, so the three SAs fire for at least one, at
least two, and all three ones:

```
SA1 = (cnt >= 1)   SA2 = (cnt >= 2) = MAJ
XOR3 = SA2 ? SA3 : SA1          (SA2 steers a pMOS/nMOS pass pair)
```

With one row open, SA1 is simply the stored bit, which is how ordinary reads work.
`latch_sa` is a behavioural model of the latch-type SA: both outputs sit high
while `sa_en` is low, and they resolve to complementary values when it rises.

## Row map and the controller's schedule

The array has 64 rows of 257 bits:

| rows  | use                                        |
|-------|--------------------------------------------|
| 0–47  | operands (A, p, results, anything)         |
| 48    | sum                                        |
| 49    | carry                                      |
| 50–54 | LUT-radix4                                 |
| 55–63 | LUT-overflow                               |

`modsram_ctrl` runs one product as:

| state  | cycles          | action |
|--------|-----------------|--------|
| LOAD_A | 1               | read the A row into the multiplier register |
| R4_RD  | 1 per iteration | open sum, carry and the LUT-radix4 row; in the first iteration only the LUT row (sum = carry = 0, so no clearing writes are needed) |
| R4_WS, R4_WC | 2         | write back sum, then carry<<1 |
| OV_RD  | 1               | open sum, carry and the LUT-overflow row |
| OV_WS, OV_WC | 2         | write back sum<<2, then carry<<3; skipped in the last iteration, whose words stay in the registers |
| LOAD_P | 1               | read p into the now idle multiplier register; start the final adder |
| REDUCE | k + 2           | k subtractions of p |
| WB_RES | 1               | write the result to the result row; `done` pulses |

The loop (LOAD_A through the last OV_RD) takes `6*ITER - 1` cycles, which is 773
for n = 256. With the paper's 128 iterations, the same schedule gives exactly its
767 cycles (= 3n − 1). From the cycle after `start` to the `done` pulse, a product
takes `6*ITER + 3 + k` cycles.

## Modules

| file | block |
|------|-------|
| `rtl/modsram.sv` | top: wires everything, host read/write mux |
| `rtl/modsram_pkg.sv` | Booth digit type, near-memory op codes, write-source type, row map |
| `rtl/sram_array_8t.sv` | 64 × 257 array, 1 write port, 3-row read with per-column count |
| `rtl/latch_sa.sv` | behavioural latch-type sense amplifier |
| `rtl/logic_sa.sv` | three SAs per bitline → XOR3, MAJ, data |
| `rtl/rwl_decoder.sv`, `rtl/wwl_decoder.sv` | wordline decoders (three read addresses OR-ed; one write address) |
| `rtl/radix4_encoder.sv` | Booth triple → digit |
| `rtl/lut_mux.sv` | picks the LUT-radix4 or LUT-overflow row for the third read port |
| `rtl/overflow_logic.sv` | overflow index = bits pushed out of sum and carry + radix-4 MSB |
| `rtl/nmc_regs.sv` | multiplier/sum/carry/overflow registers and write-back shifters |
| `rtl/final_adder.sv` | sum + 2·carry, then subtract p until below p |
| `rtl/modsram_ctrl.sv` | FSM above; host access while idle; bitline precharge enable |

## Using the macro

All host actions are legal only while `busy` is low.

1. **Load the rows.** Write a row by holding `wr_en`, `wr_row` and `wr_data`
   (N+1 bits) for one clock. Load A and p into operand rows. Load rows 50–63 with
   the 14 table values for the chosen B and p.
2. **Start the product.** Pulse `start` with `a_row`, `p_row` and `c_row`. The
   result row `c_row` must not be 48 or 49.
3. **Collect the result.** When `done` pulses, `result` holds `A*B mod p`. The
   same value has also been written to `c_row`.
4. **Read a row.** Assert `rd_en` with `rd_row`; `rd_data` arrives with `rd_valid`
   on the next cycle.

Reuse between products:

* If B and p stay the same, the tables stay valid; only A needs to change.
* If B changes, rewrite the five LUT-radix4 rows.
* If p changes, rewrite all 14 table rows.

The testbench helper `tb/mm_ref_pkg.sv` has the formulas: `lut_r4`, `lut_ov`,
`mod_mul`.

Reset (`rst_n`) is asynchronous and active low. It clears the controller and the
registers but not the array.

The output `pre_en` is meant for the analog bitline precharge devices, which are
not part of this RTL. It is high in every cycle that opens no read wordline, and
low while a row is being read or sensed.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends itself. The
package must come first. For example, the end-to-end test at n = 16:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/modsram_pkg.sv $(ls rtl/*.sv | grep -v _pkg) tb/mm_ref_pkg.sv \
  tb/tb_modsram.sv --top-module tb_modsram
./obj_dir/Vtb_modsram
```

Swap in `tb/tb_modsram_full.sv` (top module `tb_modsram_full`) to run the default
n = 256 configuration. It computes three products: mod the secp256k1 prime, mod
the BN254 prime, and mod a random odd 256-bit modulus. It takes seconds.

The block testbenches need only their own module and the package. Each one is
named `tb/tb_<module>.sv`.

What the tests cover:

* Unit tests:
  * exhaustive: the encoder, overflow adder, LUT mux, sense amplifier and write
    decoder;
  * random: the array (against a shadow copy), the logic-SA and the read decoder;
  * the near-memory registers, checked shift by shift;
  * the final adder, including its cycle count;
  * the controller, checked cycle by cycle against the schedule.
* End-to-end at n = 16: 65 products, covering:
  * random moduli, with and without the top bit set;
  * A and B equal to 0, p − 1 and p;
  * two products that reach overflow index 8.

  The test counts each mechanism and requires every one to occur: every Booth
  digit, non-zero and ninth overflow entries, skipped first reads, reduction
  subtractions and host reads.
* Full size: the three 256-bit products above.
* Data reuse at full size (`tb/tb_modsram_chain.sv`). The tables for one B and the
  secp256k1 prime are loaded once. Then eight products are chained, each taking
  the previous result row as its multiplier, so no operand passes through the
  host. Finally B is changed by rewriting only the five LUT-radix4 rows.

## Departures and own choices

* **257 columns, not 256.** The paper quotes a 64 × 256 array, yet keeps sum and
  carry at n + 1 bits. At n = 256 those words need 257 columns.
* **Nine overflow entries, not eight**, and the carry's top bit is kept (see above).
  As a result the table takes 14 rows instead of 13, and 48 rows remain for
  operands instead of 49.
* **129 Booth digits, not 128**, so multipliers with their top bit set are handled.
  The loop therefore takes 773 cycles instead of 767.
* **Shift placement.** The ×4 shift for the next iteration is applied on the
  write-back (sum<<2, carry<<3), as in the paper's worked example.
* **Multiplier, not multiplicand, in the register.** One passage of the paper
  lists the three registers as sum, carry and multiplicand. Another, together with
  its worked example, says multiplier. This design follows the second: B exists
  only inside the LUT-radix4 rows.
* **p in the multiplier register.** After the loop, the multiplier register is
  reused to hold p for the final reduction. The paper lists no register for p.
* **Final reduction** is one subtraction per cycle. The paper only asks for "a
  reduction step". With a small modulus it takes many cycles (about 2^(n+3)/p).
* **Host-loaded tables.** The paper stores the precomputed tables in rows but does
  not say what computes them. Here the host writes them.
* **Host interface.** The row read/write ports and start/busy/done are this
  design's own.
* **Own encodings.** The row map, the digit codes and the three-decoder read side
  are this design's choices.
* **Analog parts are digital models.** The analog behaviour (RBL levels, SA
  references, precharge) is modelled only at the level of "how many cells
  discharged the bitline". The precharge devices, timing margins, the 420 MHz clock and the
  area figures are outside what RTL can show.
