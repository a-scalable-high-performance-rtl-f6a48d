# A scalable priority encoder for words of up to 4096 bits

A priority encoder takes a wide word and returns the position of its
highest-priority set bit. Content-addressable memories and packet classifiers
use one to pick a single entry when several entries match. The difficulty is
size. A priority encoder of a few bits is a small piece of two-level logic.
At a few thousand bits, every output bit depends on every input bit, and a
chain of small encoders gets slower with each link.

This RTL implements the encoder organisation published by X.-T. Nguyen,
H.-T. Nguyen and C.-K. Pham ("A Scalable High-Performance Priority Encoder
Using 1D-Array to 2D-Array Conversion", IEEE TCAS-II, 2017). The main idea is
to fold the word into a matrix:

* An L-bit word is read as **N rows of M = 4 bits**. Bit k sits in row
  i = k / 4, column j = k mod 4.
* An OR of each row gives an N-bit **row status**. A row's status bit is 1 when
  the row holds a set bit.
* An N-bit priority encoder over the row status gives the **row index** i of
  the highest non-empty row.
* A 4-bit priority encoder over that row gives the **column index** j.
* The answer is k = 4i + j. Because M is a power of two this is just the
  concatenation `{i, j}`, so no adder or multiplier is needed.

The N-bit row encoder is itself built the same way, one level down. The
folding repeats until only 16 or 8 row-status bits are left. A flat 16-bit or
8-bit encoder, written straight from its truth table, then finishes the job.
A 4096-bit encoder therefore needs only four levels:
4096 → 1024 → 256 → 64 → 16.

The second idea is **look-ahead**. Before the column encoder can run, the
selected row has to be brought to it. A plain multiplexer would have to wait
for the row index. Here the multiplexer's select lines come from the row
status itself, so it runs in parallel with the row encoder (section 3).

## 1. Conventions

* **Priority**: the highest-numbered set bit wins. In a 4-bit word,
  `d[3]` beats `d[2]`, and so on down. Every module uses this order.
* **No set bit**: `q` is 0 and `match` is 0. A word with only bit 0 set also
  gives `q = 0`, but with `match = 1`. Only `match` tells the two cases apart.
  That is also why the flat encoders never look at `d[0]`, which lint reports
  as an unused bit.
* Every encoder module is purely combinational. Only `pe_top` has a clock.

## 2. Flat encoders: `pe4`, `pe8`, `pe16`

These encoders are written directly from their truth tables. The published
factored equations are kept term for term, because they set the gate
structure:

```
PE4:  Q0 = ~D2 D1 + D3
      Q1 =  D2 + D3
PE8:  Q0 = ~D6 (~D4 ~D2 D1 + ~D4 D3 + D5) + D7
      Q1 = ~D5 ~D4 (D2 + D3) + D6 + D7
      Q2 =  D4 + D5 + D6 + D7
PE16: four equations of the same kind (see rtl/pe16.sv). Q3 is the OR of D15..D8.
```

The PE16 equations carry some redundant factors. They are harmless and are
kept as published. The exhaustive testbenches confirm that all three sets of
equations are correct priority encoders. The published design stops at 16
bits for flat encoders, because the equations grow too fast beyond that.

## 3. The look-ahead row multiplexer: `la_mux`

This block is the least obvious part of the design.

The multiplexer must pass on the highest non-empty row. Instead of decoding
the row index, it is a binary tree of 2:1 multiplexers. Each node joins a
lower half and an upper half of the rows below it. A node **passes its upper
half whenever any row in that upper half is non-empty.** So the node's select
is the OR of the row status over its upper half. For 8 rows this is exactly
the published MUX8:

```
level 1:  (D7,D6) sel DOR7     (D5,D4) sel DOR5     (D3,D2) sel DOR3     (D1,D0) sel DOR1
level 2:  (76,54) sel DOR7|DOR6                     (32,10) sel DOR3|DOR2
root:     (7654,3210) sel DOR7|DOR6|DOR5|DOR4
```

The same rule is applied to trees of 16, 32, ... 1024 rows. The select ORs are
shared: a node's OR is the OR of its two children's ORs. The tree is stored as
a heap, with node n having children 2n+1 (lower rows) and 2n+2 (upper rows).
The rows are the leaves, at nodes N-1 to 2N-2. If no row is non-empty, row 0
comes out. It is all zeros then, and `match` is 0 anyway.

Why this helps: with a multiplexer driven by the row index, the longest path
is OR → row encoder → multiplexer → column encoder, four delays in series.
With look-ahead it is OR → max(row encoder, multiplexer → column encoder).
The published gate-level estimates (180 nm, per block) for a 64-bit encoder
illustrate the difference:

| 64-bit organisation | path | estimate |
|---|---|---|
| 8 × 8, index-driven mux | OR8 + PE8 + MUX8N + PE8 | 2970 ps |
| 8 × 8, look-ahead mux | OR8 + max(PE8, MUX8 + PE8) | 2203 ps |
| 16 rows × 4, look-ahead (used here) | OR4 + max(PE16, MUX16 + PE4) | 2086 ps |
| 4 rows × 16, look-ahead | OR16 + max(PE4, MUX4 + PE16) | 2444 ps |

The 4-column version is the fastest, and every level of this RTL uses it.
The price is extra OR gates in the multiplexer's select tree.

## 4. One level of folding: `pe32_4` … `pe4k_4`

Each size has its own module. All eight are built the same way and contain
four parts:

```
d[L-1:0] ──► row_or (N × OR4) ──► dor[N-1:0] ──► PE_N ──────────────► row[log2 N-1:0] ─┐
    │                               │                                                    ├─► q = {row, col}
    └──────────────► la_mux (N rows of 4, select = dor) ──► dmux[3:0] ──► pe4 ──► col ─┘
                                    dor ──► OR ──► match
```

| module | L | rows N | PE_N (row encoder) | published FREQ, 180 nm |
|---|---|---|---|---|
| `pe32_4` | 32 | 8 | `pe8` | 757 MHz |
| `pe64_4` | 64 | 16 | `pe16` | 649 MHz |
| `pe128_4` | 128 | 32 | `pe32_4` | 595 MHz |
| `pe256_4` | 256 | 64 | `pe64_4` | 520 MHz |
| `pe512_4` | 512 | 128 | `pe128_4` | 462 MHz |
| `pe1k_4` | 1024 | 256 | `pe256_4` | 434 MHz |
| `pe2k_4` | 2048 | 512 | `pe512_4` | 416 MHz |
| `pe4k_4` | 4096 | 1024 | `pe1k_4` | 370 MHz |

The frequencies are the authors' post-layout results. They describe their
180-nm implementation and are not a property of this RTL. They show the
intended trend: each doubling of L costs about 11 %.

The inner encoder's `match` output is not used. It equals the OR of `dor`,
which each level computes for itself. Each level contains its own copies of
`row_or` and `la_mux`: the level-1 multiplexer of a 4096-bit encoder has 1024
rows, the level-2 one 256, and so on. The sizes are separate modules, not one
module that instantiates itself. The structure is the same, but some tools
elaborate self-instantiating modules badly. To add a size, copy a module and
change N and the PE_N instance.

## 5. The top: `pe_top`

`pe_top #(L)` puts registers around the encoder:

* `d_in` → L-bit input register → encoder → output register → `q`, `match`.
* A new word can be applied every clock cycle. The word sampled at rising
  edge t has its result on `q`/`match` after edge t+1.
* `rst_n` is an asynchronous, active-low reset that clears both registers.
* `L` may be 4, 8 or 16, which selects the flat `pe4`/`pe8`/`pe16`. It may
  also be 32 … 4096, which selects the matching `peX_4`. The default is 4096.
* An assertion checks that `match = 0` always comes with `q = 0`.

The full-size encoder also gives correct results for shorter words. A word of
any smaller size placed in the low bits, with zeros above, returns the same
index.

## 6. What is published and what is chosen here

Taken from the publication:

* the PE4/PE8/PE16 equations;
* the 4-column folding at every level, and the rule that recursion stops at a
  flat PE16 or PE8;
* the order of the levels for each size;
* `q = {row, column}`;
* the `match` flag as the OR of the row status;
* the look-ahead select rule, as drawn for the 8-row MUX8.

Chosen in this RTL:

* **Look-ahead multiplexers with more than 8 rows.** The 8-row select rule is
  extended to any power-of-two tree. Larger multiplexers are named in the
  publication, but no drawing of them was available. The input-to-output
  polarity of each 2:1 stage is also not drawn. The upper half is passed,
  which is the only choice that picks the highest non-empty row.
* **Results when no bit is set.** The behaviour for an all-zero word (`q = 0`)
  and the row-0 default of the multiplexer are not specified in the
  publication.
* **The `pe_top` framing.** The publication shows an L-bit register holding
  the input word. The output register, the reset and the lack of any enable
  or handshake are additions. They give a register-to-register path, as a
  frequency measurement needs.
* **Port names.** The flag is `match`, where the publication writes `M`; `M`
  here is the column count.
* **Not built.** The publication also evaluates alternative organisations
  that are slower: PE64 as 8 × 8 with and without look-ahead, 4 × 16, PE16
  built as 4 × 4, and 128-bit versions with 8 or 16 columns. They are
  compared with the chosen design but are not part of it.
* **Hierarchy.** The RTL keeps one module per block. The authors'
  implementation flattened each encoder during synthesis, which they report
  as the reason the measured gain from look-ahead (about 5 % at 64 bits) is
  smaller than the estimate. A synthesis tool may flatten this RTL the same
  way.
* **Not checked.** Transistor counts, power and frequency are
  process-specific and are not checked here.

## 7. Verification

Every testbench checks itself against a reference: a plain top-down loop
over the bits (`tb/pe_ref_pkg.sv`). Each one ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb_pe4`, `tb_pe8`, `tb_pe16` | all 16 / 256 / 65,536 input words |
| `tb_row_or` | 1024 × 4 and 8 × 8 OR banks with random, all-zero and all-ones words |
| `tb_la_mux` | 8 × 8, 16 × 4 and 1024 × 4 trees, with a true row status and with a random select |
| `tb_pe32_4` … `tb_pe4k_4` | zero, all ones, every one-hot word, two bits in one row, two bits in different rows where the winner has the lower column, and random words |
| `tb_pe_top` | the 4096-bit top streaming 3000 words, one per cycle; checks latency and a reset in mid-stream, and counts every situation above, failing if one never occurs |
| `tb_pe_sizes` | all eleven sizes, 4 to 4096 bits, side by side; also smaller words zero-extended into the 4096-bit top |

To simulate one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    tb/pe_ref_pkg.sv rtl/pe_pkg.sv tb/tb_pe_top.sv --top-module tb_pe_top
./obj_dir/Vtb_pe_top
```

The 4096-bit top takes about 20 s to build and well under a second to run.
To lint a module, use `verilator --lint-only -Wall -y rtl rtl/pe_pkg.sv rtl/<module>.sv`.
Lint reports the unused `d[0]` of the flat encoders and the unused inner
`match` outputs. Both are expected, as explained above.
