# (23,16) SEC-DAEC-TAEC memory codec

Radiation-induced soft errors in SRAM increasingly come as *multiple cell
upsets*: one particle flips two or three physically neighbouring cells at once.
A plain Hamming (SEC) code treats such a burst as a multi-bit error it cannot
fix. This design protects a 16-bit word with 7 check bits (a 23-bit codeword)
and corrects

* any single-bit error (SEC),
* any error on two adjacent codeword bits (DAEC),
* any error on three adjacent codeword bits (TAEC),

with no miscorrection inside those classes. The same code without the
triple-error decoder is the SEC-DAEC codec; one parameter selects between them.

Everything is combinational: an encoder on the memory write path and a decoder
(syndrome generator + error correction logic) on the read path. There is no
clock, no reset and no state.

## The parity-check matrix

The whole code is defined by its 7x23 parity-check matrix H. Codeword bit
`c_j` is checked by the rows that have a 1 in column `j`. Check bits `p` and
information bits `i` are interleaved in the codeword:

| c  | 1  | 2  | 3  | 4  | 5  | 6  | 7  | 8  | 9  | 10 | 11 | 12 | 13  | 14 | 15  | 16  | 17  | 18 | 19 | 20 | 21  | 22  | 23  |
|----|----|----|----|----|----|----|----|----|----|----|----|----|-----|----|-----|-----|-----|----|----|----|-----|-----|-----|
|bit |p1  |i1  |p2  |i2  |i3  |i4  |i5  |i6  |p3  |i7  |i8  |i9  |i10  |p4  |i11  |i12  |i13  |p5  |p6  |p7  |i14  |i15  |i16  |
| s1 | 0  | 0  | 0  | 0  | 0  | 1  | 0  | 1  | 1  | 0  | 1  | 0  | 1   | 0  | 1   | 0   | 0   | 0  | 0  | 0  | 1   | 1   | 1   |
| s2 | 0  | 1  | 0  | 1  | 1  | 0  | 1  | 0  | 0  | 0  | 0  | 0  | 0   | 1  | 0   | 1   | 0   | 0  | 0  | 0  | 1   | 1   | 1   |
| s3 | 0  | 1  | 0  | 1  | 0  | 0  | 0  | 0  | 0  | 1  | 0  | 1  | 1   | 0  | 1   | 0   | 1   | 0  | 1  | 0  | 0   | 0   | 0   |
| s4 | 1  | 0  | 0  | 0  | 1  | 0  | 0  | 0  | 1  | 0  | 0  | 0  | 1   | 0  | 0   | 0   | 1   | 0  | 0  | 0  | 1   | 0   | 0   |
| s5 | 0  | 1  | 0  | 0  | 0  | 1  | 0  | 0  | 0  | 1  | 0  | 0  | 0   | 1  | 0   | 0   | 0   | 1  | 0  | 0  | 0   | 1   | 0   |
| s6 | 0  | 0  | 1  | 0  | 0  | 0  | 1  | 0  | 0  | 0  | 1  | 0  | 0   | 0  | 1   | 0   | 0   | 0  | 1  | 0  | 0   | 0   | 1   |
| s7 | 0  | 0  | 0  | 1  | 0  | 0  | 0  | 1  | 0  | 0  | 0  | 1  | 0   | 0  | 0   | 1   | 0   | 0  | 0  | 1  | 0   | 0   | 0   |

The matrix was built to meet three conditions:

1. every column is non-zero and unique, so each single error is distinct;
2. the XOR of any two adjacent columns is non-zero, unique, and different from
   every single column, so each adjacent double is distinct;
3. the XOR of any three adjacent columns is non-zero and different from every
   single column, which is what triple correction needs.

For this matrix the 23 single, 22 double-adjacent and 21 triple-adjacent
syndromes are 66 distinct non-zero 7-bit values. The 61 remaining non-zero
values belong to no correctable pattern.

Rows s4–s7 have a simple stride-4 structure: s4 has a 1 at positions 1, 5, 9,
…, s5 at 2, 6, 10, …, s6 at 3, 7, 11, … and s7 at 4, 8, 12, …. Any burst of up
to four adjacent bits therefore touches each of these rows at most once. Rows
s1–s3 then tell the bursts apart.

In the RTL, `ecc_pkg` holds H (`H_ROW`), the positions of information and
check bits (`INFO_POS`, `PAR_POS`), and elaboration-time functions that derive
burst syndromes from H. To change the code you change these constants. The
encoder equations must then be rewritten to match (see below).

### Bit numbering

All vectors use ascending ranges, so that index `k` is the bit with subscript
`k`: `data_t[k]` is `i_k`, `codeword_t[k]` is `c_k`, `syndrome_t[k]` is `s_k`.
`%b` prints bit 1 first, the order in which codewords are written above.

## Encoder (`ecc_encoder`)

The check bits are

```
p3 = i4 ^ i6 ^ i8 ^ i10 ^ i11 ^ i14 ^ i15 ^ i16
p4 = i1 ^ i2 ^ i3 ^ i5  ^ i12 ^ i14 ^ i15 ^ i16
p6 = i1 ^ i2 ^ i7 ^ i9  ^ i10 ^ i11 ^ i13
p7 = i2 ^ i6 ^ i9 ^ i12
p1 = i3 ^ i10 ^ i13 ^ i14 ^ p3
p2 = i5 ^ i8  ^ i11 ^ i16 ^ p6
p5 = i1 ^ i4  ^ i7  ^ i15 ^ p4
```

Each equation is one row of H solved for its check bit. Three check bits appear
in a row other than their own: p3 in s4, p6 in s6 and p4 in s5. So p1, p2 and
p5 reuse an already computed check bit as a shared sub-expression instead of
expanding it. This sharing, together with the sharing among the correction
terms, is what makes this implementation smaller and faster than a direct
row-by-row one.

## Decoder

### Syndrome generator (`ecc_syndrome_gen`)

`s = H · rᵀ` over GF(2): each `s_k` is the XOR of the received bits selected by
row `k`, a parity tree of 5 to 9 inputs. A stored codeword that is still intact
gives `s = 0`.

Syndrome bit `k` is row `k` of the table above (top to bottom). In that order
the upset of `i2, i3, i4` in the worked example below gives `s = 1011101`.
Other sources number the syndrome bits after the check bit of each row
(`s1` = the `p1` row, the fourth above). That only relabels the syndrome and
changes no correction result.

### Error correction logic (`ecc_corrector`)

For information bit `i_k` at codeword position `j`:

```
i_e[k] = r[j] XOR OR{ s == S(b) : b a correctable burst that covers position j }
```

where `S(b)` is the XOR of the H columns of burst `b`. The bursts covering `j`
are the single at `j`, the doubles `(j-1,j)` and `(j,j+1)` and, with `TAEC=1`,
the triples `(j-2..j)`, `(j-1..j+1)` and `(j..j+2)`, clipped at the ends of
the codeword. In gates each `s == S(b)` is a 7-input AND with some inputs
inverted, the ANDs of one bit are ORed, and an XOR flips the received bit.
`i1`, at `c2`, has five such terms: `c2`; `c1-c2`; `c2-c3`; `c1-c3`; `c2-c4`.
Interior bits have six.

The constants `S(b)` are computed from H when the design is elaborated
(`burst_syndrome` in `ecc_pkg`), so the corrector follows H automatically.
There are 56 distinct comparators in total, one for each correctable burst
that touches an information bit. Bursts that hit only check bits (`c1`,
`c18-c19`, `c19-c20`, `c18-c20`, …) need no comparator, since no
information bit has to be flipped.

Only the 16 information bits are corrected; the check bits are dropped after
decoding.

### SEC-DAEC vs SEC-DAEC-TAEC (`TAEC` parameter)

`TAEC=1` (default) decodes all 66 patterns. `TAEC=0` drops the 21 triple
patterns and gives the smaller SEC-DAEC decoder on the same code and the same
encoder. Triple syndromes never coincide with a single or double one, so a
triple burst seen by the SEC-DAEC decoder matches nothing and is passed through
uncorrected, not miscorrected. It is still visible as a non-zero syndrome.

### Errors outside the correctable classes

A non-zero syndrome that matches no pattern leaves the data as read. The
syndrome output (`rd_syndrome_o`) is the only indication. Other multi-bit
errors (two non-adjacent bits, four or more adjacent bits) may alias onto a
correctable syndrome and be miscorrected; the code makes no promise for them.

## Worked example

| step | value |
|------|-------|
| information word `i1..i16` | `1111111111111111` |
| check bits `p1..p7` | `0100010` |
| stored codeword `c1..c23` | `01111111011110111010111` |
| after upsets on `i2, i3, i4` (`c4..c6`) | `01100011011110111010111` |
| syndrome `s1..s7` | `1011101` = `col4 ^ col5 ^ col6` |
| corrected information word | `1111111111111111` |

`tb_sec_daec_taec_codec` reproduces every line of this table.

## Top level (`sec_daec_taec_codec`)

```
          wr_data_i[1:16] ──► ecc_encoder ──► wr_codeword_o[1:23] ──► (memory array)
                                                                           │
 rd_data_o[1:16] ◄── ecc_corrector ◄── ecc_syndrome_gen ◄── rd_codeword_i[1:23]
 rd_syndrome_o[1:7] ◄────────┘  (ecc_decoder)
```

| port | dir | width | meaning |
|------|-----|-------|---------|
| `wr_data_i` | in | 16 | word to store |
| `wr_codeword_o` | out | 23 | codeword to write into the memory |
| `rd_codeword_i` | in | 23 | codeword read from the memory |
| `rd_data_o` | out | 16 | corrected word |
| `rd_syndrome_o` | out | 7 | syndrome of the read codeword (0 = clean) |
| parameter `TAEC` | | 1 bit | 1: SEC-DAEC-TAEC (default), 0: SEC-DAEC |

The memory array is not part of the design. Any array, width 23, can be placed
between `wr_codeword_o` and `rd_codeword_i`. Both paths are pure combinational
logic, so they can be registered wherever the surrounding pipeline needs.

Coarse synthesis of the default top gives 7 syndrome parity trees, 56 7-bit
comparators, 16 small OR trees and about 50 XOR gates in the encoder and
correction. No flip-flops.

## Files

| file | content |
|------|---------|
| `rtl/ecc_pkg.sv` | types, H-matrix, bit placement, burst-syndrome functions |
| `rtl/ecc_encoder.sv` | check-bit equations and codeword assembly |
| `rtl/ecc_syndrome_gen.sv` | `s = H · rᵀ` |
| `rtl/ecc_corrector.sv` | pattern decoders and bit flipping, `TAEC` parameter |
| `rtl/ecc_decoder.sv` | syndrome generator + corrector |
| `rtl/sec_daec_taec_codec.sv` | top: encoder + decoder |
| `tb/tb_ecc_ref_pkg.sv` | independent reference: H, brute-force encoder, syndrome |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_sec_daec_codec` for `TAEC=0` |

## Verification

The testbenches do not reuse the RTL's tables. The reference package holds its
own copy of H and encodes by trying all 128 check-bit values until `H·cᵀ = 0`.

* `tb_ecc_encoder`: all 65 536 information words give a valid codeword that
  carries the word unchanged. 2 000 random words match the reference bit for
  bit. The worked example is checked.
* `tb_ecc_syndrome_gen`: every H column, 5 000 random words, and the worked
  example.
* `tb_ecc_corrector`, `tb_ecc_decoder`: for 60 words each, all 66 bursts
  are injected, with `TAEC=1` and `TAEC=0` side by side.
* `tb_sec_daec_taec_codec` (default parameters): a 64-word memory model is
  written through the encoder. Upsets are injected (none, single, double or
  triple, at random positions and then at every position), and every word is
  read back. It counts clean reads, each upset class, upsets on check bits only
  and upsets spanning check and data bits; any class never exercised is a
  failure.
* `tb_sec_daec_codec`: the same flow with `TAEC=0`. Singles and doubles are
  corrected; triples come out unchanged with a non-zero syndrome.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator (ascending ranges trigger a style warning, hence `-Wno-ASCRANGE`):

```
verilator --binary --timing --assert -Wno-ASCRANGE -y rtl -y tb \
    rtl/ecc_pkg.sv tb/tb_ecc_ref_pkg.sv tb/tb_sec_daec_taec_codec.sv \
    --top-module tb_sec_daec_taec_codec -o sim
./obj_dir/sim
```

## What is not here

* **Larger codecs.** (40,32) and (74,64) versions of both codecs exist in the
  same family, with 8 and 10 check bits. Their H-matrices are not reproduced
  here, so they are not implemented. The structure carries over unchanged: a
  new `H_ROW`/`INFO_POS`/`PAR_POS` in the package, wider types, and encoder
  equations read off the new rows. The corrector and syndrome generator need
  no change.
* **The memory.** Only modelled in the testbenches.
* **Gate-level sharing.** The encoder equations are written with their shared
  terms, but the correction logic is written as equality comparators. The
  sharing of partial AND terms between bits is left to synthesis rather than
  hand-built gate by gate.
* **Timing figures.** Published results for this kind of codec are
  combinational delays (about 3.2 ns for the (23,16) TAEC codec on an
  UltraScale+ FPGA). No timing was measured for this RTL.
