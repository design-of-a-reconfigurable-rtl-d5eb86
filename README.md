# A reconfigurable residue-number-system processor

In a residue number system (RNS), an integer X is not stored as one binary word. It is stored as its
remainders modulo a few pairwise co-prime moduli m_0 ... m_{t-1}. Addition, subtraction and
multiplication then work lane by lane: lane i computes (x_i op y_i) mod m_i. No carry passes
between lanes, so each lane is only as wide as its own modulus. The Chinese Remainder Theorem (CRT)
turns the residues back into the unique X in [0, M), where M is the product of the moduli.

This design does two things:

* It **chooses the moduli for you.** Given a word width N and a number of moduli, a search
  picks a set {2n, 2n+1, 2n-1, k1, k2, ...} whose product covers 2^N-1. The search keeps the
  total residue width small; that is the "bit efficiency" of the set.
* It **wraps the arithmetic in a reconfigurable datapath.** The processor has two
  binary-to-RNS converters, one RNS adder, one RNS subtractor and one RNS multiplier. Each unit
  input sits behind a multiplexer that can take either converter or any unit's result. A function
  such as (X+Y)*Z is therefore not wired in. It is a short program of multiplexer select codes,
  kept in a small function memory and replayed one step per clock.

The default build is N = 32 bits with three moduli, {1626, 1627, 1625}. That gives three 11-bit
lanes and M = 4 298 940 750, just above 2^32.

## 1. The moduli set

`rns_pkg::find_modulus(N, NMOD, i)` runs the search while the design is elaborated. No hardware is
built for it. Every lane width, modulus and CRT constant in the RTL is derived from its result.

1. x = ceil((2^N - 1)^(1/NMOD)). Call the even number x (or x+1 when x is odd) "2n".
2. The first three moduli are 2n, 2n+1 and 2n-1. They are always pairwise co-prime. With
   exactly three moduli, 2n is raised by 2 until (2n)(2n+1)(2n-1) >= 2^N-1.
3. Each further modulus j = 3 ... NMOD-1 is found this way:
   * k = ceil((2^N-1) / product so far);
   * take the (NMOD-j)-th root of k, rounded up;
   * pick the smallest number at or above that root that is co-prime to every modulus chosen so
     far.

Results (checked by `tb_find_moduli`):

| N  | 3 moduli         | 4 moduli          | 5 moduli              | 6 moduli                |
|----|------------------|-------------------|-----------------------|-------------------------|
| 16 | 42,43,41         | 16,17,15,19       | 10,11,9,13,7          | 8,9,7,11,5,13           |
| 20 | 102,103,101      | 32,33,31,35       | 16,17,15,19,23        | 12,13,11,17,7,19        |
| 24 | **258,259,257**  | 64,65,63,67       | 28,29,27,31,25        | 16,17,15,19,23,11       |
| 32 | 1626,1627,1625   | 256,257,255,259   | **86,87,85,83,89**    | 42,43,41,47,37,53       |

Two entries (bold) differ from the published tables, and both follow from the search steps:

* For N = 24 with three moduli, the published (256,257,255) has a product of 16 776 960. That is
  below 2^24-1, so step 2 moves on to (258,259,257).
* For N = 32 with five moduli, 83 is already co-prime to 86, 87 and 85. The search therefore takes
  k1 = 83, not the published 89, and then k2 = 89 instead of 77. The total residue width is 35 bits
  either way.

`set_bits()` counts the bits of a set as the sum of ceil(log2 m_i). That is the width that holds
residues 0 ... m_i-1. Some published bit counts use floor(log2 m_i)+1 instead (19 rather than 18
for 16,17,15,19).

## 2. The datapath (`rns_datapath`)

```
 opd X,Y,Z ─┬─► BtoR conv 1 ─┐          ┌────────────────────────────────────┐
 (latched)  │                ├─► SM1 ─► │ ADDER      (TEMP1) ──┐             │
 immediate ─┴─► BtoR conv 2 ─┤   SM2 ─► │                      │             │
                             ├─► SM3 ─► │ SUBTRACTOR (reg)   ──┼─► SM7 ─► RtoB ─► result
                             │   SM4 ─► │                      │             │
                             ├─► SM5 ─► │ MULTIPLIER (TEMP2) ──┘             │
                             └─► SM6 ─► │                                    │
                                        └── every unit result feeds back to SM1..SM6
```

* **Converters** (`rns_fwd_conv`) reduce an N-bit operand by each constant modulus. They are
  combinational. Converter 1 and converter 2 each take X, Y, Z or the step's immediate value.
* **Input multiplexers** (`rns_in_mux`, six of them) choose from five sources with a 3-bit code:

  | code | source | origin |
  |------|--------|--------|
  | 000  | converter 1 | paper's example |
  | 001  | converter 2 | paper's example |
  | 101  | adder result (TEMP1) | paper's example |
  | 110  | subtractor result | chosen here |
  | 111  | multiplier result (TEMP2) | chosen here |
  | 010, 011, 100 | zero vector | unused |

  The paper uses code 101 for the adder even though a 5-input multiplexer needs only codes 0 to 4.
  The code is kept as published, and the remaining sources were placed in the free codes.
* **Units** (`rns_adder`, `rns_subtractor`, `rns_multiplier`). Each has NMOD independent lanes and
  a result register with a write enable.
  * Adder: binary add, then one conditional subtraction of m_i.
  * Subtractor: adds m_i back when the difference is negative, so X-Y below zero wraps to M-(Y-X).
  * Multiplier: 11x11-bit product, then reduction by m_i. The paper draws a look-up table here; the
    arithmetic form gives the same values.
* **Output multiplexer** (`rns_out_mux`, SM7). 000 = multiplier (paper), 001 = adder,
  010 = subtractor. Its enable decides whether the step produces a result.
* **RtoB converter** (`rns_rev_conv`) applies the CRT:
  X = | sum_i M_i * |r_i * M_i^-1|_{m_i} |_M, with M_i = M/m_i. Each lane forms
  t_i = (r_i * inv_i) mod m_i and multiplies it by the constant M_i, so every term is below M.
  The NMOD terms are added, and NMOD-1 conditional subtractions bring the sum into [0, M). The
  33-bit result is registered, and `result_valid` is high for one cycle.

All arithmetic is unsigned and modulo M. Results are exact as long as the true value stays below M.

## 3. Programs and the step model

One step is one 33-bit control word (`rns_pkg::ctrl_t`) plus an N-bit immediate. When CS is high at
a rising edge:

1. the step's operands reach the converters;
2. the multiplexers and units settle;
3. every unit whose write enable is set loads its register;
4. if `out_en` is set, the unit chosen by SM7 is converted and loaded into `result`.

A unit input that selects a unit's own register reads the value from before this edge. This lets
the multiplier accumulate (TEMP2 = TEMP2 * x).

| bits  | field | meaning |
|-------|-------|---------|
| 32    | last      | final step of the block |
| 31    | rep       | run this step `rep_src` times; skip it if the count is 0 |
| 30:29 | rep_src   | 0 X, 1 Y, 2 Z, 3 immediate |
| 28:27 | conv1_src | binary input of converter 1 (same coding) |
| 26:25 | conv2_src | binary input of converter 2 |
| 24:22 | sm1 | adder A |
| 21:19 | sm2 | adder B |
| 18:16 | sm3 | subtractor A (minuend) |
| 15:13 | sm4 | subtractor B |
| 12:10 | sm5 | multiplier A |
| 9:7   | sm6 | multiplier B |
| 6:4   | sm7 | output multiplexer |
| 3     | out_en | produce a binary result |
| 2,1,0 | we_add, we_sub, we_mul | result-register write enables |

The function memory loads two programs at reset.

**Function 1, (X+Y)*Z** (block 0). This is the paper's worked example.

| step | conv1 | conv2 | selects | effect |
|------|-------|-------|---------|--------|
| 0 | X | Y | SM1=000, SM2=001 | TEMP1 = x + y |
| 1 | – | Z | SM5=101, SM6=001 | TEMP2 = TEMP1 * z |
| 2 | – | – | SM7=000, enabled, last | result = RtoB(TEMP2) |

**Function 2, X^Y** (block 1). This is the "POWER" function built on the multiplier.

| step | conv1 | conv2 | selects | effect |
|------|-------|-------|---------|--------|
| 0 | X | imm 1 | SM5=001, SM6=001 | TEMP2 = 1 |
| 1 (repeated Y times) | X | – | SM5=111, SM6=000 | TEMP2 = TEMP2 * x |
| 2 | – | – | SM7=000, enabled, last | result = RtoB(TEMP2) |

The paper describes POWER as multiplying each residue x_i by itself y_i times. Here the repeat count
is the binary Y. Both give the same result when Y is below every modulus. For larger Y, only the
binary count gives X^Y mod M.

Block 2 holds a single ending no-op. The paper draws a third function block but does not define it.
The host can load any program there.

## 4. Controller and function memory

* `rns_prog_mem` holds NFUNC = 3 blocks of STEPS = 8 words. Block f, step s is at address
  f*8 + s. Writes are synchronous. Reads are combinational while `rd` is high; a no-op word is
  returned otherwise.
* `rns_controller` serves the host in three ways:
  * **run**: `start` with `func_sel` latches X, Y, Z and reads the block's steps one per clock
    (ADDR, RD), raising CS for each. It stops at the word marked `last` or at the end of the block.
    A repeated step keeps its address and counts down `rep_count`. The datapath supplies that count
    from the operand named in the word.
  * **program**: while idle, `prog_we` writes a word into the memory (WR).
  * **direct**: `dir_valid` with a word executes that word in the next cycle, without using the
    memory.

  Requests that arrive while busy, and a start with a block number of 3 or more, are ignored.

Timing at the top (`rrns_top`): a start accepted at clock edge t runs step s at edge t+1+s.
`done` and `result_valid` rise together one cycle after the final step. That makes the latency
4 cycles for (X+Y)*Z and 3 + max(Y,1) cycles for X^Y. A direct step takes 2 cycles.

The general-purpose host CPU is not part of the RTL. Its side is the port list of `rrns_top`.

## 5. What comes from the paper, and what was chosen here

From the paper:

* the moduli-set search;
* the three-moduli, 32-bit working example;
* the set of units: two converters, seven multiplexers, adder, subtractor, multiplier, RtoB converter;
* fully cross-connected 5:1 input multiplexers with 3 select lines;
* select codes 000/001/101 at the inputs and 000 at the output;
* the TEMP1/TEMP2 result registers;
* the two example functions;
* a block-wise function memory;
* a controller that either programs the processor directly or runs it from memory, with the
  CS/ADDR/RD/WR links.

Chosen here, because the paper gives only the function or nothing:

* the insides of the converters and units (arithmetic rather than PLA tables);
* the CRT converter's structure;
* the other select codes;
* the control-word layout, the immediate field and the repeat mechanism;
* the operand registers, unit write enables and one-step-per-clock timing;
* the block depth (8);
* the host handshake;
* an active-low asynchronous reset that also reloads the default programs.

## 6. Using and changing it

Every module starts with a comment on its interface and timing. Parameters:

* `N` (word width) and `NMOD` (number of moduli) on `rrns_top`, `rns_datapath` and the
  arithmetic modules. The moduli, lane width `RW` and output width `BW` follow from them. The
  search supports up to 16 moduli and N up to about 60.
* `NFUNC` and `STEPS` size the function memory.

Simulate a testbench with plain Verilator from the directory holding `rtl/` and `tb/`, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rns_pkg.sv tb/tb_rrns_top.sv --top-module tb_rrns_top
./obj_dir/Vtb_rrns_top
```

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. The expected values are computed
independently in the testbench, using the moduli and M written out as numbers.

| testbench | what it checks |
|-----------|----------------|
| tb_find_moduli | moduli sets for N = 6...32 and 3...6 moduli, co-primality, range, CRT inverses |
| tb_rns_fwd_conv, tb_rns_rev_conv | conversions on edge and random values |
| tb_rns_adder / _subtractor / _multiplier | lane arithmetic, including a_i + b_i = m_i; 1-cycle register latency and hold |
| tb_rns_in_mux, tb_rns_out_mux | every select code |
| tb_rns_datapath | hand-built sequences: (X+Y)*Z, X-Y, X*Y-Z, immediate, direct word, CS low |
| tb_rns_prog_mem | reset programs bit by bit, write/read-back, no-op outputs |
| tb_rns_controller | step traces: plain block, repeat counts 0/1/5, block without `last`, direct step, ignored requests |
| tb_rrns_top | whole processor at default size: both stored functions, a host-written third function, direct steps, latencies, and a count of each mechanism |
| tb_rrns_configs | nine other moduli sets (12...32 bits, 3...6 moduli) running both stored functions |

## 7. Limits

* There are no signed numbers, no overflow detection and no scaling or comparison. Every result is
  modulo M.
* Operands are N-bit binary. The default M covers all of them. With other N/NMOD, the search only
  guarantees M >= 2^N-1. If M equals 2^N-1 exactly, the all-ones operand reads as 0.
* The general form of the architecture allows x adders, y subtractors, z multipliers and k external
  inputs, with ceil(log2(x+y+z+k)) select lines per multiplexer. Only the worked case
  x = y = z = 1, k = 2 is built. Its published select codes do not extend to a general numbering.
* The published area figures and the FPGA implementation give no numbers that could be compared
  with this RTL.
