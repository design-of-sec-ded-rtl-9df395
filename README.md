# SEC-DED and SEC-DED-DAEC codecs for short memory words

Radiation-induced soft errors in memories increasingly flip two *neighbouring*
bits at once rather than one. This design is a family of small linear block
codes, and the combinational codecs that use them, for words of 3 to 16
data bits. Every code corrects any single-bit error and detects any
double-bit error (SEC-DED). The same codes can also be decoded to correct a
double error in two adjacent codeword bits (SEC-DED-DAEC). Both decoders use
the same check bits, so a memory can choose its decoder without changing
what it stores.

The codes were designed for short critical paths and low power. Every data
column of the parity-check matrix has weight 3, and the matrices keep the
number of ones per row small. Each check bit is then a narrow XOR tree.

The RTL follows a published description of these codes. That description
gives the parity-check matrices, the encoder equations and the structure of
the correction logic. Where this RTL adds to it or departs from it, the text
below says so; the list is collected in
[Where this RTL departs from the published description](#where-this-rtl-departs-from-the-published-description).

## The codes

| code (n, k) | check bits r | H columns (data / check) | widest encoder XOR (data inputs) | lane in the suite |
|-------------|--------------|--------------------------|----------------------------------|-------------------|
| (8, 3)      | 5            | 3 / 5                    | 2                                | 0                 |
| (9, 4)      | 5            | 4 / 5                    | 3                                | 1                 |
| (11, 5)     | 6            | 5 / 6                    | 3                                | 2                 |
| (13, 7)     | 6            | 7 / 6                    | 5                                | 3                 |
| (14, 8)     | 6            | 8 / 6                    | 5                                | 4                 |
| (24, 16)    | 8            | 16 / 8                   | 8                                | 5                 |

All the matrices are in `rtl/ecc_pkg.sv`, one binary literal per row, written
in the published order. The leftmost bit of a literal is column 1, and an
underscore separates the data columns from the identity part. For example,
the (8,3) matrix is

```
        d1 d2 d3 | c1 c2 c3 c4 c5
row 1:   1  1  0 |  1  0  0  0  0      c1 = d1 ^ d2
row 2:   0  1  0 |  0  1  0  0  0      c2 = d2
row 3:   0  1  1 |  0  0  1  0  0      c3 = d2 ^ d3
row 4:   1  0  1 |  0  0  0  1  0      c4 = d1 ^ d3
row 5:   1  0  1 |  0  0  0  0  1      c5 = d1 ^ d3
```

The number of check bits follows the estimate r = round(sqrt(1 + 2.5k) + 1.9).
It holds for all codes here up to k = 8, and happens to give 8 for k = 16
as well. The estimate also gives r = 6 for k = 6, but no (12,6) matrix is
defined, so that size is not built.

### Why the matrices work

* **Single errors.** A single error in bit j gives the syndrome H·e = column
  j. All n columns are distinct and non-zero, so the syndrome names the bit.
* **Double errors.** Every column has odd weight: 3 for data columns, 1 for
  check columns. The XOR of two columns therefore has even weight, and it is
  never zero because the columns are distinct. So it can never equal a
  column, and a double error is always detected.
* **Adjacent double errors.** A double error in bits j and j+1 gives column j
  xor column j+1. The matrices were chosen so that all n-1 such "adjacent
  syndromes" are distinct from one another. Being even, they are also
  distinct from every column. Each adjacent pair can therefore be located
  exactly.

All six matrices have all three properties. The testbenches confirm this
by applying every single, every double and every adjacent error to each
code.

### How the matrices were constructed

The columns are picked from the last data column backwards. Each new data
column must have weight 3. It must also give, when XORed with the column to
its right, an adjacent syndrome not used before. For the last data column,
the column to its right is c1. The published list of these adjacent
syndromes for (14,8) is called the Q matrix. Each column of Q gives the row
numbers of the four ones of d_j xor d_(j+1), with d9 taken as c1:

```
Q = d1d2 d2d3 d3d4 d4d5 d5d6 d6d7 d7d8 d8c1
     1    1    1    3    1    2    1    1
     2    3    4    4    2    3    2    3
     4    5    5    5    3    4    4    4
     5    6    6    6    4    6    6    6
```

`tb_daec_correct` applies exactly these syndromes to the (14,8) decoder.
Each one must correct the pair it names.

## Bit numbering

Every module uses the column order of H as the bit order of the codeword:

* `codeword[j]` is column j+1 of H.
* `codeword[k-1:0]` holds the data, with `data[0]` = d1.
* `codeword[n-1:k]` holds the check bits, with `check[0]` = c1.
* `syndrome[i]` is row i+1 of H.

"Adjacent" means adjacent in this order. A memory that needs protection
against adjacent upsets must store the bits physically in this order. That
order includes the pair (d_k, c1) at the boundary between data and check
bits.

## Datapath

Everything is combinational. There is no clock, no reset and no state. A
memory, which is not part of this design, sits between the encoder output
and the decoder input.

```
          write side                              read side
data_i ──► ecc_encoder ──► codeword_o ··memory··► codeword_i ──► ecc_syndrome ──► syndrome
                                                        │                           │
                                                        └─ data bits ──► secded_correct / daec_correct ──► data_o, status_o
```

### Encoder (`ecc_encoder`)

Check bit c_i is the XOR of the data bits with a one in row i of H. The
identity part of H means c_i is the only check bit in its row. The
codeword is `{check, data}`.

### Syndrome (`ecc_syndrome`)

Syndrome bit s_i is the XOR of all received bits with a one in row i. This
equals the check bit recomputed from the received data, xor the received
check bit. Each XOR tree is one input wider than the encoder's.

### SEC-DED correction (`secded_correct`)

Each data bit j has an r-bit comparator: "syndrome == column j". Its output
is XORed into the received bit. Check-bit columns are compared as well, but
only to set the status; the data needs no change for them.

### DAEC error pattern block (`daec_correct`)

This is the part that makes adjacent correction work. Data bit j is wrong in
three situations:

1. the syndrome equals column j (single error in bit j);
2. the syndrome equals column j-1 xor column j (pair to the left);
3. the syndrome equals column j xor column j+1 (pair to the right).

The three matches are ORed and the result is XORed into the received bit.
That takes two OR2 gates for each data bit except d1, which has no left
neighbour: 2k-1 OR2 in all. For d_k the right neighbour is c1, so an
adjacent error that straddles the data and check bits is corrected. Pairs
that lie wholly inside the check bits are recognised for the status but
change no data.

Matching a pattern means comparing all r syndrome bits with a constant. The
constant patterns are computed during elaboration from the matrix, by the
functions `h_col` and `h_adj` in `ecc_pkg`. No table is typed twice.

Both correction modules also carry a deferred assertion: at most one of
their comparators may fire for any syndrome.

### Status

Both decoders report a 2-bit `ecc_status_e`:

| value | name                     | meaning |
|-------|--------------------------|---------|
| 0     | `ECC_NO_ERROR`           | zero syndrome |
| 1     | `ECC_CORRECTED_SINGLE`   | syndrome equals a column; the data bit, if a data bit, was flipped |
| 2     | `ECC_CORRECTED_ADJACENT` | DAEC only: syndrome equals an adjacent-pair pattern |
| 3     | `ECC_UNCORRECTABLE`      | any other non-zero syndrome; data is passed through as received |

## What the DAEC decoder cannot do

DAEC decoding gives up part of the double-error detection. Some double
errors in two bits that are *not* neighbours have the same syndrome as
some adjacent pair. The decoder cannot tell them apart, so it "corrects"
the wrong pair and reports `ECC_CORRECTED_ADJACENT`. The remaining
non-adjacent doubles are reported as uncorrectable. The counts follow from
the matrices:

| code     | non-adjacent double errors | of which miscorrected by DAEC |
|----------|----------------------------|-------------------------------|
| (8, 3)   | 21                         | 8  |
| (9, 4)   | 28                         | 11 |
| (11, 5)  | 45                         | 11 |
| (13, 7)  | 66                         | 21 |
| (14, 8)  | 78                         | 24 |
| (24, 16) | 253                        | 45 |

The SEC-DED decoder has no such blind spot. It detects every double error.
Triple and wider errors are outside what either code guarantees. They may
be miscorrected by either decoder.

## The suite top (`ecc_codec_suite`)

The top holds twelve codecs: one `secded_codec` and one `daec_codec` for
each of the six codes. Each codec has its own ports, so they can be used
independently.

* Ports are arrays of `NUM_CODES` = 6 lanes. Lane c belongs to code
  `ecc_pkg::code_e'(c)`, in the order of the table above.
* `sd_*` ports belong to the SEC-DED bank and `da_*` ports to the
  SEC-DED-DAEC bank.
* Lanes are padded to the widest code, LSB-aligned: 16 data bits, 24
  codeword bits and 8 syndrome bits. Input bits above a code's width are
  ignored. Output bits above it are always zero, so a synthesis report shows
  them as constant outputs.

For a single code, instantiate `secded_codec` or `daec_codec` directly with
`.CODE(ecc_pkg::CODE_24_16)` or any other code. The smaller blocks
(`ecc_encoder`, `ecc_syndrome`, `secded_correct`, `daec_correct`) take the
same parameter. Its default in every module is `CODE_14_8`.

## Where this RTL departs from the published description

* **Full comparison of the syndrome.** The published gate counts suggest
  that each single-error match ANDs only the three syndrome bits where the
  column has a one. For example, (8,3) SEC-DED is counted at 6 AND2, which is
  three data bits times two AND2. That shortcut also fires on some double
  errors whose syndrome covers the column's ones. With the published
  matrices, 8 of the 28 double errors of (8,3) would be miscorrected, and 162
  of the 276 double errors of (24,16). This RTL compares all r bits, so
  SEC-DED holds without exception. The logic is larger than the published
  gate counts.
* **Status output.** The published description names the error detection
  but defines no output for it. The 2-bit status described above is this
  design's own, as are the syndrome outputs of the codecs.
* **Check-bit errors** are recognised (single and adjacent), but only the
  data word is output corrected. The corrected check bits are not output.
  This matches the published correction logic, which corrects data
  positions only.
* **(12,6).** The parity-bit estimate lists a (12,6) code, but no matrix is
  given for it, so it is not built.
* **Packaging.** The original codecs were synthesised one by one. The
  lane-padded suite top is this design's own way of putting them in one
  design.
* **Timing and area.** Gate counts, critical-path delays and 180 nm synthesis
  figures are published for these codecs. This RTL was checked for function
  only. Its area and delay have not been compared with those figures.

## Testbenches

Every testbench in `tb/` is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. The expected values come from
`tb/ecc_ref_pkg.sv`, which is independent of the RTL:

* It holds a second copy of the six matrices, typed as text.
* It encodes from those matrices.
* It decodes by brute-force search over all single columns and adjacent
  column pairs.

| testbench              | what it covers |
|------------------------|----------------|
| `tb_ecc_encoder`       | every data word of the five short codes and 4000 random (24,16) words; the (8,3) equations above |
| `tb_ecc_syndrome`      | valid codewords, every single and double error, random triples and random vectors |
| `tb_secded_correct`    | every single and double error (singles corrected, doubles flagged and untouched), random triples |
| `tb_daec_correct`      | every single, adjacent and non-adjacent double error; the (14,8) Q matrix |
| `tb_secded_codec`, `tb_daec_codec` | encoder output, error injection and decode end to end, per code |
| `tb_ecc_codec_suite`   | the top at its only size, 3000 rounds on all 12 codecs |

`tb_ecc_codec_suite` also counts the mechanisms it exercised and fails if
any count is zero:

* SEC-DED correction of a data bit;
* SEC-DED correction of a check bit;
* SEC-DED double detection;
* DAEC correction of an adjacent pair inside the data;
* DAEC correction of the pair across d_k/c1;
* DAEC correction of an adjacent pair inside the check bits;
* DAEC detection of a non-adjacent double;
* DAEC miscorrection of an aliased non-adjacent double, as predicted by the
  reference.

It also checks the parity-bit estimate for k ≤ 8.

To simulate with Verilator 5, run from the directory that holds `rtl/` and
`tb/`, for example for the top:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/ecc_pkg.sv tb/ecc_ref_pkg.sv rtl/*.sv tb/tb_ecc_codec_suite.sv \
    --top-module tb_ecc_codec_suite -o sim
./obj_dir/sim
```

Every testbench finishes in about a second.

## Adding a code

To add a code:

1. Add an enumerator to `code_e` and raise `NUM_CODES`.
2. Add a row-literal array `H_<n>_<k>` and extend the `case` statements in
   `code_n`, `code_k` and `h_row`.
3. If the new code is wider than the current maximum, raise `MAX_N`,
   `MAX_K` and `MAX_R`.

The modules need no change. A new matrix must have the three properties
under [Why the matrices work](#why-the-matrices-work). `secded_correct` and
`daec_correct` check them during elaboration and report an `$error` when
one fails. The properties are:

* all columns distinct;
* all columns of odd weight;
* all adjacent pair syndromes distinct.

To cover the new code in the testbenches, add its text rows to
`ecc_ref_pkg`.
