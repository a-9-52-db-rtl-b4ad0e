# A (195,178)² extended-BCH product decoder, 193 cycles per codeword

This RTL decodes a product code made of two layers of the same short
algebraic code. The code is meant for forward error correction in optical
links. A 195 × 195 bit block is received. Each of its 195 rows and 195 columns
is a codeword of an extended BCH (eBCH) code with length n = 195, k = 178
information bits and t = 2 correctable errors. The decoder:

- keeps the whole block in registers;
- decodes rows and columns alternately with a bank of 13 hard-decision
  component decoders;
- adds a cheap post-processing step to break the error patterns that
  iterative row/column decoding cannot resolve (stall patterns).

The bit-flip vectors coming out of the component decoders toggle bits in
place. Each component decoder handles one row or column per clock and has a
six-stage pipeline. All tables are computed when the design is elaborated.

For one codeword the decoder needs:

- 175 cycles without the post-processing iteration;
- 193 cycles in the worst case.

That gives 178² / 193 ≈ 164 information bits per cycle in the worst case.

## The component code and its decoder

### Field and bit layout

The arithmetic is in GF(2⁸) with the primitive polynomial x⁸+x⁴+x³+x²+1
(0x11D). The decoder works for any primitive polynomial; this one is a choice
of this design.

A row or column is a vector `cw[194:0]`, and index j is position j+1:

- Indices 0..193 are the shortened BCH codeword. Bit j has the field weight
  α^(193−j), so that the error location (n−1) − log S₁ is directly the
  1-based position.
- Index 194 is the extension parity bit. It makes the total weight of the
  word even.

The test encoder (`tb_ref_pkg::encode`) puts the 178 information bits at
indices 0..177, the 16 BCH parity bits at 178..193, and the extension bit at
194. The generator polynomial is m₁(x)·m₃(x).

### Decoding rule

The decoder is the closed-form Peterson solution for t = 2, worked in the log
domain. Let

- S₁ = r(α) and S₃ = r(α³), over the 194 BCH bits only;
- P = XOR of all 195 bits.

The cases are:

| Case | Condition | Output |
|---|---|---|
| no error | S₁ = S₃ = 0 | no error |
| single error | S₁ ≠ 0 and S₁³ = S₃ | the location is (n−1) − log S₁ |
| double error | S₁ ≠ 0 and S₁³ ≠ S₃ | see below |

For a double error:

1. Compute c = (S₁³+S₃)/S₁³, that is log c = log(S₁³+S₃) − log S₁³ mod 255.
2. Look up the roots of y²+y+c = 0 in a 256-entry table indexed by log c. An
   entry is valid only if the quadratic has roots.
3. The locations are (n−1) − log S₁ − log ρᵢ.

A decoding is declared a **failure** in any of these cases:

- S₁ = 0 but S₃ ≠ 0;
- two errors are found but the word parity is odd (three errors);
- a location falls outside 1..194;
- the quadratic has no roots.

The extension bit is flipped in two cases:

- no error is found and the parity is odd;
- one error is found and the parity is even. The second error of the pair
  is then taken to be the extension bit itself.

### Pipeline

`ebch_decoder` is built from the modules below, with 6 register stages. The
flip vector for a word entering in cycle c is ready in cycle c+6.

| Stages | Module | Work |
|---|---|---|
| 1–2 | `ebch_syndrome`, `ebch_parity` | constant-mask XOR trees. Each tree is split into two halves that are XORed and registered (stage 1), then combined (stage 2). |
| 3–4 | `ebch_sel_log` | cube table S₁³, one log table read for S₁³+S₃ and for S₁³, the table (n−1)−log S₁, and the zero detectors (stage 3). Then the mod-255 difference (stage 4). |
| 5–6 | `ebch_err_loc` | root table, the two locations, validity checks and the status flags. |
| after 6 | `ebch_bitflip_pp` | turns the two locations into one-hot masks. The mask is gated by the status. Under post processing it is replaced by the row-failure vector. |

The last stage is combinational, so the flip vector is XORed into the matrix
register on the same clock edge that ends stage 6.

## Matrix, decoders and wiring

### Scratch memory and decoder slots

`scratch_memory` is the 195 × 195 register matrix. An XOR sits in front of
every bit. Each bit receives:

- the row-flip vector of its row;
- the column-flip vector of its column.

Only one of the two is ever non-zero in a given cycle. Loading a row
overwrites it; the row's old content appears on the output lane in the same
cycle.

`decoder_array` holds the 13 decoders. Decoder d owns rows 15d … 15d+14 and
columns 15d … 15d+14. Its input multiplexer selects:

- a loading lane, during the first half iteration. Decoders 0–5 and 12 use
  lane 1; decoders 6–11 use lane 2.
- otherwise, row or column `in_idx[d]` of its own slot.

At the output, the flip vector is ANDed with `out_vld[d]` and sent to the
row or column `out_idx[d]`. These two signals are the input-valid flag and the
index, both delayed by the 6 pipeline stages. The decoder's failure flag goes
to bit 15d + `out_idx[d]` of the row- or column-failure register.

### Failure registers

`failure_regs` holds two 195-bit registers:

- R: rows whose last decoding failed;
- C: columns whose last decoding failed.

It also provides:

- |R| and |C| (population counts);
- the value |C| will have after the current cycle's updates;
- the first three set indices of each register (priority encoders).

A register is cleared at the start of a half iteration that writes it. In a
post-processing half iteration the clear waits until cycle 2. The three
failed indices are read from the register in cycles 0–2, and the first
update arrives in cycle 6.

## Schedule of one codeword

`pd_control` sequences one codeword. With L = 2 iterations (parameter `ITER`):

| Phase | Cycles | What happens |
|---|---|---|
| LOAD + row half 1 | 105 + 6 | Cycles 0–89: lane 1 loads rows 0–89 and lane 2 loads rows 90–179. Cycles 90–104: lane 1 loads rows 180–194. Each loaded row also goes straight into its decoder, so the first row decoding overlaps the load. Six drain cycles follow. |
| column half | 15 + 6 | all 195 columns, 15 per decoder |
| row half | 15 + 6 | all rows |
| column half (last) | 15 + 6 | post processing is enabled here if 1 ≤ \|R\| ≤ 3 |
| PP row | 3 + 6 | only if 1 ≤ \|R\| ≤ 3 and 1 ≤ \|C\| ≤ 3 after the last column half: the failed rows are decoded again, one per cycle |
| PP column | 3 + 6 | the failed columns likewise |
| DONE | 1 | `dec_done`; `dec_success` = (C is empty) |

The totals are:

- 111 + 3·21 + 1 = 175 cycles without the post-processing iteration;
- 175 + 18 = 193 cycles with it.

In general the count is 111 + (2L−1)·21 + 1 (+18).

The decision to run the post-processing iteration is made in the last cycle of
the last column half. It uses the look-ahead count of C, so that no extra
cycle is spent.

### Post processing

Post processing targets stall patterns: a few rows and a few columns that all
fail and that share their errors at the crossings. While post processing is
enabled, a column decoding that **fails** does not flip anything from its own
locator. Instead it flips the bits of the column that lie in a failed row,
that is, it XORs in the row-failure vector R. When |R| ≤ 3 and each failed
column holds its errors at those crossings, this removes them in one half
iteration. The post-processing iteration then re-decodes the at most three
rows and columns still marked as failed, to clean up what is left.

## Interface and timing (`product_decoder`)

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of the control and the failure registers |
| `start` | in | begin loading a codeword when idle or in DONE. Keeping it high decodes codewords back to back. |
| `ld_en1/2`, `ld_row1/2` | out | row numbers requested on the two lanes in this cycle |
| `in_cw1/2` | in | the requested rows, sampled in the same cycle. The buffer must answer combinationally. |
| `out_valid1/2`, `out_row1/2`, `out_cw1/2` | out | rows of the previous codeword leaving while the next one loads |
| `dec_done` | out | one-cycle pulse at the end of a codeword |
| `dec_success`, `dec_pp_iter` | out | no failed column left / the post-processing iteration ran. Valid from the cycle after `dec_done` until the next `dec_done`. |
| `busy` | out | not idle |

A decoded codeword is only read out while the next one loads. To drain the
last codeword, start one more (for example an all-zero word).

## Departures from the source description and own choices

- **Modulo-255 subtraction.** The log-domain differences are taken mod 255
  (`pd_pkg::sub_mod_q`). An 8-bit subtraction that wraps mod 256 gives a
  wrong table address whenever the difference is negative.
- **Location 0 is rejected.** Along with locations above 194, a location of 0
  is treated as a failure. It points to a bit removed by the shortening.
- **Threshold for post processing.** Post processing is used for
  1 ≤ |R| ≤ 3, and its iteration runs only if also 1 ≤ |C| ≤ 3. One
  formulation of the original description reads |R| < t+1; the inclusive
  bound, which appears elsewhere in it, is followed.
- **Failure-register width.** The registers are 195 bits wide, one per row
  or column.
- **Failed-index capture.** The first three failed indices are taken from
  the failure registers by priority encoders. They are not collected by each
  component decoder. The set of indices is the same.
- **The `start` input.** It replaces "begin loading after reset".
- **Decision timing.** The post-processing decision uses a look-ahead count,
  to reach the 193-cycle total.
- **Reset.** The matrix has no reset; loading overwrites it.
- **The input buffer is outside the design.** Only its handshake (row
  number out, row data in, same cycle) is defined here.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog. The reference model in
`tb/tb_ref_pkg.sv` uses its own GF arithmetic (bitwise multiply and power)
and an LFSR encoder, separate from the RTL tables.

```
verilator --binary --timing -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/pd_pkg.sv tb/tb_ref_pkg.sv tb/tb_product_decoder.sv --top-module tb_product_decoder
./obj_dir/Vtb_product_decoder
```

Replace `tb_product_decoder` with any other testbench name.

`tb_product_decoder` runs the top at its default size (195, 13 decoders,
L = 2). It decodes seven codewords back to back:

| Codeword | Content | Expected result |
|---|---|---|
| clean | no errors | decoded |
| rows2 | many rows with ≤ 2 errors | fixed during loading |
| rows3 | 3 errors in some rows | fixed by the columns |
| stall3x3 | a 3 × 3 stall pattern | post processing, 193 cycles |
| rows3x2 | two rows with 3 shared errors | fixed by the columns |
| latin4 | 12 errors in 4 rows and 4 columns | reported as a failure |
| flush | – | drains the last codeword |

The testbench checks:

- every output row against the encoded data;
- the cycle counts (175 / 193);
- the number of decoder outputs validated per codeword: 4 × 195, plus 6 when
  the post-processing iteration re-decodes three rows and three columns;
- that each mechanism occurred. The mechanisms are lane-bypass corrections,
  column corrections, post-processing flips, the post-processing iteration,
  a declared failure and output streaming.

It compiles in about half a minute and runs in seconds.

`tb_ebch_decoder` checks the component decoder on 2000 random words. Each
word carries 0–3 errors, with the extension bit included.

## Scope

- The RTL covers the configuration (195,178)², t = 2, with 13 decoders and 2
  loading lanes.
- `ITER` changes the number of iterations.
- The code length, field size and t are fixed by the tables and the decoding
  equations. A different code needs a different decoder.
- Error-rate performance was not measured here. The testbenches check
  correctness for chosen error patterns only.
