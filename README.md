# A Hamming-distance-preserving ALU

Triple modular redundancy protects a computation by running it three times and
voting bit by bit. That triples the logic and leaves one unprotected voter per
result bit. This design protects the computation with an error-correcting code
instead. Operands enter the ALU already encoded in a (7,4) Hamming code. Every
operation is built so that its result is again a codeword. One wrong operand
bit, or one faulty gate anywhere in the operation, leaves the result at most
one bit away from the right codeword. A single Hamming corrector at the output
then recovers the right value. That corrector is the only unprotected stage.

The scheme follows S. Dolev, S. Frenkel and D. E. Tamir, "Computer Arithmetic
Preserving Hamming Distance of Operands in Operation Result". This RTL is an
independent implementation of the blocks that article describes. It adds its
own choices wherever the article leaves a detail open. They are marked below
and in each file's header.

## The code and its bit layout

By default a codeword holds 4 data bits d1..d4 and 3 parity bits h1..h3.
The bits are stored in classic Hamming order: code position p (1..7) sits in
bit p-1 of the 7-bit vector.

| codeword bit | 0  | 1  | 2  | 3  | 4  | 5  | 6  |
|--------------|----|----|----|----|----|----|----|
| position     | 1  | 2  | 3  | 4  | 5  | 6  | 7  |
| content      | h1 | h2 | d1 | h3 | d2 | d3 | d4 |

    h1 = d1 ^ d2 ^ d4      h2 = d1 ^ d3 ^ d4      h3 = d2 ^ d3 ^ d4

The syndrome of a word is its position-weighted parity check. A non-zero
syndrome is the position of the single flipped bit. d1 is the least
significant bit of the value. The article does not fix bit weights; this is a
choice of this design.

Every Hamming block has a data-width parameter `DW`, which defaults to 4. For
other widths the rule is the same:

* PW parity bits, with PW the smallest number such that 2^PW >= DW + PW + 1;
* the parity bits at the power-of-two positions;
* the data bits at the remaining positions, in increasing order.

For widths that do not fill a full Hamming code, this is the code shortened
to DW + PW bits. For example, 32 data bits give a 38-bit codeword. `hdp_pkg`
computes the positions and the coverage sets with constant functions
(`hp_par_w`, `hp_data_pos`, `hp_covers`, ...), so no table is stored.

## Why the result stays correctable: the one-fault, one-bit rule

The code corrects one error. A block is safe if any single fault, whether in an
operand bit or in any gate, can change at most one bit of the result. The
blocks get there by computing every result bit in its own cone of logic, with
no gate shared between two result bits. How that is done depends on the
operation.

### XOR and NOT (`hdp_xor`)

Parity bits are XORs of data bits, so the XOR of two codewords is already the
codeword of the XOR of the data. The block is one XOR gate per code bit,
seven for the (7,4) code, parity bits included. A wrong operand bit, or a faulty gate,
flips exactly one result bit in the same position. NOT is the same block with
the second operand tied to the codeword of all-ones data. For the (7,4)
code that is `1111111`, the all-ones word. For a shortened code it is not all
ones.

### AND, OR, NAND, NOR (`hdp_logic`)

A bitwise AND does not commute with the parity equations. The parity bits of
the result must therefore be recomputed from the result data. Doing that from
one shared copy of the data would let one faulty data gate spoil a data bit and
the parity bits that cover it together. The block therefore has two parts that
share nothing:

* **Data part.** One 2-input gate per data bit takes the *raw* operand data bits. A wrong
  operand data bit spoils at most the one result bit in its column.
* **Parity part.** There is one branch per parity bit hj. Each branch corrects
  both operands with its own pair of correctors. It then applies its own
  bitwise gate to the corrected data and XORs the bits that hj covers. An operand
  error is removed before it reaches any branch. A faulty gate inside a branch
  reaches only that branch's hj.

The NAND block is the one the article draws. The parameter `OP` selects AND,
OR or NOR, which follow the same principle. The article's figure labels the
gate inside each parity branch "BW-AND", but its text says the branches use the
same NAND building block. This design follows the text. An AND there would
produce the complement of the NAND result's parity, so the result would not be
a codeword.

### Add and subtract (`hdp_adder`, `add_sub`)

In an adder a carry spreads one wrong operand bit into several sum bits. So
here no result bit may come from raw operand bits. Each result bit has a
full branch of its own: two correctors, then a DW-bit adder/subtractor
(`add_sub`). A data branch keeps sum bit i. A parity branch XORs the sum bits
it covers. Every branch works on corrected operands. An operand error
therefore leaves the result exactly right. A fault inside one branch reaches
only that branch's result bit.

The article draws a 4-bit full adder as the branch building block. It names a
two's-complement adder/subtractor as an alternative. This design uses the
latter, with a `sub_i` input, so that one block performs both addition and
subtraction. Arithmetic is modulo 2^DW, with no carry-in or carry-out, as in the
article's figure. Each branch keeps its full adder, exactly as drawn.
The article notes that a branch really needs only the logic behind its own
bits. Synthesis removes the unused logic anyway.

### The ALU (`hdp_alu`)

The top instantiates one block per operation: XOR, NOT, AND, OR, NAND, NOR and
ADD/SUB. A multiplexer selects the result by `op_i` (see `hdp_pkg::alu_op_e`).
The multiplexer is bit-sliced: result bit i depends only on bit i of each
block. A fault in it therefore also reaches only one result bit.

| output       | meaning                                                         |
|--------------|-----------------------------------------------------------------|
| `z_o`        | protected result codeword, at most one bit off the right one   |
| `zc_o`       | result after the final corrector                                |
| `q_o`        | its DW data bits                                                |
| `syndrome_o` | position of the bit the final corrector fixed, 0 if none        |

Everything is combinational; there is no clock. The top also carries a
multi-error lane on BCH codewords (below), with its own operand and result
ports.

## Multi-error lane: BCH(15,7) (`bch_logic`, `bch_adder`, `bch_corrector`, `bch_encoder`, `bch_pkg`)

The same separation works with any linear systematic code. With a code that
corrects t errors, the result tolerates up to t faults in total. The article
shows this for a BCH-coded bitwise NAND but does not name a code. This design
uses the binary BCH(15,7) code, which corrects two errors. Its generator is
g(x) = x^8 + x^7 + x^6 + x^4 + 1. A codeword is data first, `[14:8]`, then
parity, `[7:0]`, with p(x) = d(x)·x^8 mod g(x).

* `bch_logic` (NAND by default, also AND/OR/NOR) works like `hdp_logic`. Its
  data part is seven gates on raw operand bits. Each of the eight parity bits
  has its own branch: two BCH correctors, a 7-bit bitwise gate, and a BCH
  encoder, of which the branch keeps one output bit.
* `bch_adder` works like `hdp_adder`. All 15 result bits have their own
  branch: two BCH correctors and a 7-bit adder/subtractor. A parity branch
  adds a BCH encoder.
* XOR and NOT reuse `hdp_xor` at width 15. The XOR of two codewords of any
  linear code is a codeword. NOT XORs with the codeword of all-ones data.

In `hdp_alu` these blocks form a second lane. It has the same operations,
selected by the same `op_i`, and its own final BCH corrector. Its outputs are
`bz_o`, `bzc_o`, `bq_o` and `bsyndrome_o`. The article draws only the NAND
block of this variant. It states that every operation carries BCH correctors
in the same way, and the adder and the lane are built on that statement.

The encoder and the syndrome are XOR networks over the constants x^i mod g(x).
The package computes these constants with a function, so no table is stored.
The corrector compares the syndrome with the syndrome of every error pattern
of weight 1 or 2. For n = 15 that is 120 comparisons, with no algebraic
decoder.

The article states that 2t = n − k parity bits correct t errors. That relation
holds for Reed–Solomon codes, not for binary BCH codes: BCH(15,7) spends 8
parity bits on t = 2. This design follows the binary BCH code that the article
names and draws.

## What is and is not protected

Within the fault model (one error per operation for the Hamming blocks, two
for the BCH lane):

* protected: operand bits, every gate of the operation blocks, and the
  correctors inside the blocks, since each one feeds a single result bit;
* not protected: the final corrector, as in the article, which notes the same
  holds for the voter of TMR;
* not protected: `op_i` and the `sub_i` control derived from it. The article
  sketches a way to encode a 2-bit op-code with two parity bits, but it leaves
  out the parity equations and the decoding. Also, no binary code with 2 data
  bits and 2 parity bits can correct a single error. The op-code protection is
  therefore not built, and `op_i` is a plain input.

## Where this RTL departs from the article, and what it leaves out

* The order of the bits inside the codeword follows the operand labels in
  the article's figures. The bit weights, the operation encoding, the result
  multiplexer and the output set are choices of this design.
* The gate inside the parity branches is the block's own operation (NAND for
  the NAND block), following the article's text rather than the "BW-AND"
  label of its figures. The reason is given above.
* The adder uses a ripple-carry two's-complement adder/subtractor as its
  building block. The article draws a plain full adder and mentions a
  carry-look-ahead adder/subtractor. The function is the same.
* There is no carry-in or carry-out. The article only says that the scheme
  could be extended to carries.
* The branches are not simplified by hand. This includes the two-level,
  8-input form the article suggests for the NAND core.
* The op-code protection is not built (see above).
* Of the multi-error variant the article draws only the NAND block. The other
  BCH blocks and the way the lane joins the ALU are choices of this design.
* The general idea of using the NAND block with a corrector as a universal
  building block for any two-level logic is not turned into RTL.
* The article defines everything for 4 data bits. Widths other than 4 use a
  shortened Hamming code, which is a choice of this design.

## Cost

After yosys coarse synthesis (word-level cells, so only a rough guide):
Hamming corrector 23 cells, NAND block 53, adder 55; BCH corrector 423, BCH
NAND block 949, BCH adder 961. The whole top, BCH lane included, is about
1900. A Hamming block contains 6 to 14 correctors, a BCH block 16 to 30. That is the price of keeping every result bit in its own cone.
The article's argument is about how this grows. Parity bits grow with the
logarithm of the word width, while TMR grows linearly with it. At 4 bits,
however, the blocks are larger than three copies of the plain operation would
be.

## Simulating

All files are plain SystemVerilog-2017. The packages must come first. For
example, to run the end-to-end test with Verilator 5:

    verilator --binary --timing -y rtl -y tb \
      rtl/hdp_pkg.sv rtl/bch_pkg.sv tb/tb_ref_pkg.sv \
      tb/hdp_alu_tb.sv --top-module hdp_alu_tb
    ./obj_dir/Vhdp_alu_tb

`-y` lets Verilator find every other module in the file of its own name.

Each testbench ends with one line `TB_RESULT checks=N failures=M`.

| testbench               | what it covers                                                                 |
|-------------------------|--------------------------------------------------------------------------------|
| `hamming_corrector_tb`  | all 16 codewords × no error / each single flip; corrected word and syndrome    |
| `hamming_parity_xor_tb` | all 8 inputs                                                                   |
| `hdp_xor_tb`            | all operand pairs × 15 error cases, XOR and NOT                                |
| `hdp_logic_tb`          | NAND/AND/OR/NOR, all pairs × 15 error cases; forced faults inside parity branches |
| `hdp_adder_tb`          | add and subtract, all pairs × 15 error cases; forced faults in each of the 7 branches |
| `bch_logic_tb`          | NAND/AND/OR/NOR, 3000 random pairs with 0/1/2 operand errors; operand error plus a forced branch fault |
| `bch_adder_tb`          | add and subtract, 3000 random pairs with 0/1/2 operand errors; operand error plus a forced fault in any of the 15 branches |
| `hdp_alu_tb`            | every operation × all pairs × 15 error cases through the final corrector; BCH lane, every operation with two operand errors |
| `hdp_alu_wide_tb`       | ALU with 32 and 11 data bits, 20000 random operations, half of them with one operand error |

The expected values come from `tb_ref_pkg`. It builds the Hamming code from its
definition, decodes by nearest codeword, and encodes BCH by polynomial
division. It does not reuse the design's equations. Gate faults are modelled by
`force` on the internal signals of one branch, which stands for any fault
within that branch. The end-to-end test also counts how often an operand error
was absorbed inside a block, how often the final corrector fired, and how many
two-error cases the BCH lane saw and how often its final corrector fired. It
fails if any of these never occurs. It takes about a minute in Verilator,
mostly for the BCH correctors.

## Changing the design

* Data width: set `DW` on `hdp_alu`, or on any single block. `hdp_alu_wide_tb`
  runs the ALU at 32 and 11 data bits.
* Another bitwise operation: add it to `logic_op_e` and `logic_gate` in
  `hdp_pkg` and instantiate `hdp_logic` with it.
* Another BCH code: change `BCH_N`, `BCH_K` and `BCH_G` in `bch_pkg`. The
  corrector handles patterns of weight 1 and 2 only, so a code with t > 2 needs
  a further loop level.
