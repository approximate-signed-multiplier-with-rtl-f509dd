# Approximate signed multiplier with sign-focused compressors, and a Laplacian edge detector built on it

An 8 × 8 two's-complement multiplier spends most of its area and power adding up
the partial-product matrix. This design makes that addition cheaper in three
ways, and then uses the result inside a streaming 3 × 3 edge-detection filter:

1. **Truncation with a constant correction.** The seven least significant
   columns of the matrix are not built at all. Their expected value is replaced
   by two constant ones.
2. **Sign-focused compressors.** The Baugh-Wooley form of a signed product
   contains constant ones and "negative" (NAND) partial products that are 1
   three times out of four. Small compressors that take a constant 1 as an
   implicit input absorb these bits cheaply. The approximate versions put their
   error on input patterns that are rare for these bit statistics.
3. **Exact upper half.** Everything from weight 2^9 up is added exactly, so the
   error stays in the low part of the product.

The RTL is SystemVerilog (IEEE 1800-2017). It is synthesizable except for the
testbenches. It follows the publication *"Approximate Signed Multiplier with
Sign-Focused Compressor for Edge Detection Applications"* (Krishna, Bodapati,
Veeramachaneni, Jammu, Sk). That paper gives the multiplier in enough detail
to rebuild it, except for one approximate 4:2 cell it takes from earlier work.
It describes the edge-detection hardware only as a block diagram, so most of
that part is this implementation's own.

---

## 1. The partial-product matrix

For 8-bit operands `a`, `b` the bit products `a[i]·b[j]` have weight 2^(i+j)
(`bw_pp_gen`, `pp[i][j]`):

| bits | sign | generated as |
|---|---|---|
| i < 7 and j < 7 | + | AND |
| exactly one of i, j = 7 | − | NAND (Baugh-Wooley takes the complement) |
| i = j = 7 | + | AND |
| constant | + | 1 at 2^8 and 1 at 2^15 |

The sum of all of these, taken modulo 2^16, is the exact product. The
testbench of `bw_pp_gen` checks this for all 65,536 operand pairs.

The columns are split into three regions:

| region | columns | treatment |
|---|---|---|
| LSP (least significant part) | 2^0 … 2^6 | dropped; a constant 1 is placed at 2^6 and at 2^7 |
| CSP (centre significant part) | 2^7, 2^8 | sign-focused compressors, partly approximate |
| MSP (most significant part) | 2^9 … 2^15 | exact adders and 4:2 compressors |

**Why 2^6 + 2^7.** Each dropped bit is an AND of two independent, uniform bits,
so it is 1 with probability 1/4. Column q holds q + 1 such bits, so the
expected value of the dropped part is

    T = Σ_{q=0..6} (1/4)(q+1)·2^q = 192.25

The two constants add 64 + 128 = 192. As a result the product's bits 5..0 are
always 0 and bit 6 is always 1: the product has a granularity of 64.

**The replaced NAND bit.** Column 2^7 holds six AND bits, two NAND bits and the
compensation constant. One of the NAND bits, `~(a7·b0)`, is not computed. It is
replaced by a constant 1, its most likely value. That constant becomes the
"+1" of a second sign-focused compressor in the same column.

## 2. Sign-focused compressors

Each compressor adds a few partial products of one weight plus an implicit
constant 1. Input A is the negative (NAND) partial product; the other inputs are
positive (AND) ones. The outputs are `sum` (same weight) and `carry`/`cout`
(next weight).

**Exact A+B+C+D+1** (`sfc_abcd1_exact`, used at 2^8). It takes five bits in
and gives three out, `sum + 2·carry + 2·cout`. The 16-row truth table is coded
exactly as published: `sum` is the parity, `carry = B|C`, and `cout` is the
rest.

**Approximate A+B+C+D+1** (`sfc_abcd1_approx`, used at 2^7). It has only two
outputs, `sum + 2·carry ≤ 3`, and `carry = A|B|C|D`. It reads 1 low for
ABCD = 0011, 0111, 1011, 1101 and 1110, and 2 low for 1111. With P(A)=3/4 and
P(B,C,D)=1/4, the mean shortfall is 37/256.

**Approximate A+B+C+1** (`sfc_abc1_approx`, used at 2^7):

| A B C | carry sum | approx | exact |
|---|---|---|---|
| 000 | 0 1 | 1 | 1 |
| 001 | 1 1 | 3 | 2 |
| 010 | 1 1 | 3 | 2 |
| 011 | 1 1 | 3 | 3 |
| 100 | 1 0 | 2 | 2 |
| 101 | 1 1 | 3 | 3 |
| 110 | 1 1 | 3 | 3 |
| 111 | 1 1 | 3 | 4 |

This gives `carry = A|B|C` and `sum = ~A|B|C`. With A a NAND bit, the error
probability is 9/64 and the mean error (exact − approx) is −3/64. In this
multiplier, though, all three inputs are AND bits (see §1), so the cell errs
more often, and upwards.

**Exact A+B+C+1** (`sfc_abc1_exact`). This is the exact member of the family:
`sum + 2·carry + 2·cout = A+B+C+1`, with `carry = B|C`. The 8-bit multiplier
does not use it. It is kept as a tested cell for variants that need it.

**Exact 4:2** (`comp42_exact`). This is `x1+x2+x3+x4+cin = sum + 2(carry+cout)`,
built from two full adders. `cout` does not depend on `cin`, so a row of these
cells can pass `cout` to the next column without a long ripple.

**Approximate 4:2** (`comp42_approx`). It has two outputs and gives
`sum + 2·carry = min(x1+x2+x3+x4, 3)`. The publication names a specific
probability-based approximate 4:2 compressor from earlier work, without its
logic. This cell is a stand-in that is wrong only for input 1111.

## 3. The reduction tree, column by column

`approx_sfc_mult` is purely combinational. It has two reduction stages and a
final addition. In the list below, `pp[i][j]` is written aᵢbⱼ, and `~` marks a
NAND bit.

**Stage 1**

* 2^7: approximate A+B+C+D+1 on {~a0b7, a1b6, a2b5, a3b4}, absorbing the
  compensation 1. Approximate A+B+C+1 on {a4b3, a5b2, a6b1}, absorbing the
  constant that replaces ~a7b0.
* 2^8: exact A+B+C+D+1 on {~a1b7, a2b6, a3b5, a4b4}, absorbing the
  Baugh-Wooley 1. A full adder on {a5b3, a6b2, ~a7b1}.
* 2^9: exact 4:2 on {~a2b7, a3b6, a4b5, a5b4, a6b3}. ~a7b2 passes through.
* 2^10: exact 4:2 on {~a3b7, a4b6, a5b5, a6b4, ~a7b3}.
* 2^11: full adder on {~a4b7, a5b6, a6b5}. ~a7b4 passes through.
* 2^12: half adder on {~a5b7, a6b6}. ~a7b5 passes through.
* 2^13 and up: ~a6b7, ~a7b6, a7b7 and the constant at 2^15 pass through.

**Stage 2**

* 2^7: a half adder on the two compressor sums. Its sum is product bit 7.
* 2^8: the approximate 4:2 on the two stage-1 sums of 2^8 and the two carries
  from 2^7.
* 2^9 … 2^13: a chain of exact 4:2 compressors, each passing `cout` to the next
  column's `cin`. At 2^9, the free `cin` takes ~a7b2, because the cell to its
  right has no `cout`.
* 2^14: a half adder on a7b7 and the `cout` of 2^13.

**Stage 3.** Two rows remain over 2^8 … 2^15. Row A holds the stage-2 sums and
the constant at 2^15. Row B holds the stage-2 carries and the carry of the 2^7
half adder. `final_adder` adds them modulo 2^8.

Counting cells: seven exact 4:2 compressors, one approximate 4:2, three
sign-focused compressors, two full adders and three half adders, plus the
8-bit final adder. This matches the cell inventory the publication gives.

## 4. How accurate the product is

All 65,536 operand pairs were run through the RTL and compared with the exact
product:

| metric | this RTL | published for the original |
|---|---|---|
| error rate | 99.78 % | 98.04 % |
| NMED (mean \|error\| / 16384) | 0.888 % | 0.682 % |
| MRED (mean relative error, non-zero products) | 32.91 % | 26.29 % |
| mean error | +15.94 | – |

The gap has two likely causes. This RTL uses a stand-in for the approximate 4:2
cell. It also has to guess which partial product feeds which compressor input,
because the published diagram does not label them. Neither cause explains the whole gap:

* With an exact 4:2 cell in that position, the error rate, NMED and MRED would
  be 99.80 %, 0.810 % and 30.16 %.
* Trying every assignment of the six AND bits of column 2^7 to the two
  approximate compressors, with several two-output 4:2 cells, gets NMED no
  lower than 0.86 %.

The published figures probably rest on some detail the description leaves
out. A structural limit points the same way: every product of this design
ends in binary 1000000. So it can be exact only for products that end that
way too, which is about 2.7 % of operand pairs.

Because of the truncation, small products are coarse. For example, 0 × −1 gives
192, 20 × −1 gives −64, and 20 × 8 gives 320. Every product lands on a
multiple of 64, offset by 64.

## 5. The edge detector

`edge_detect_top` filters an `IMG_W × IMG_H` image (default 640 × 480) with the
Laplacian kernel

    -1 -1 -1
    -1  8 -1
    -1 -1 -1

It pads the image with zeros at the borders. Every multiplication goes through
the approximate multiplier, with the pixel as operand A and the coefficient as
operand B.

**Dataflow.** The input goes through two row buffers (`line_buffer`, circular
memories of `IMG_W+1` words) into a 3 × 3 window (`window_3x3`). From there it
goes to a MAC (`laplacian_mac`: one multiplier and an accumulating adder, one
tap per cycle). Results go to a frame memory (`frame_store`) and out as a
stream.

**The padded raster.** The controller steps through (IMG_H+1) × (IMG_W+1)
positions:

* Positions inside the image take one pixel through the `pix_valid`/`pix_ready`
  handshake.
* Positions in the extra column or the extra row inject a zero without a
  handshake.
* Every position shifts one column into the window. That column holds the new
  sample and the samples one and two padded rows above it.

After the shift at position (y, x), the window is centred on pixel (y−1, x−1).
The extra column serves as the right border of one row and the left border of
the next. The extra row is the bottom border. Taps that fall outside the image
are also forced to zero before the multiplier. That forcing covers the top
border and the rows of the first frame, for which the row buffers hold nothing
yet.

**Timing.**

* A position with no output takes 1 cycle.
* A position with an output takes 1 cycle (shift), 9 cycles (MAC) and 1 cycle
  (write-back and `out_valid`). `pix_ready` stays low for those 11 cycles.
* With `pix_valid` held high, a frame takes (IMG_H+1)(IMG_W+1) + 10·IMG_H·IMG_W
  cycles. At the default size that is 3,380,321 cycles.
* `frame_done` pulses once per frame, and the next frame can follow at once.

**Interface** (all plain signals):

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `pix_valid`, `pix_ready`, `pix_data` | in/out/in | 1/1/8 | raster-order input samples, signed |
| `out_valid`, `out_row`, `out_col`, `out_data` | out | 1/9/10/20 | one-cycle result strobe with position and signed 20-bit sum |
| `frame_done` | out | 1 | pulse after the last result of a frame |
| `rd_addr`, `rd_data` | in/out | 19/20 | frame memory read port, address row·IMG_W+col, 1-cycle latency |

**Pixel format.** The multiplier is signed, so samples are signed 8-bit. An
8-bit grey image has to be mapped into −128…127 first, for example as 7-bit
grey levels (the testbenches do this) or as grey − 128. The output is the raw
signed sum. Clip or scale it for display.

**Edge-map quality.** The full-size testbench filters a synthetic 640 × 480
picture (a ramp, a rectangle, a disc and light texture). It clips both this
design's output and an exact-multiplier filter to 0…255. The PSNR between the
two is about 10.7 dB. The publication reports 20.13 dB on its own image, whose
size and pixel mapping it does not state. Most of the gap comes from the
64-grain product (§4). The small products a Laplacian makes with a −1
coefficient are rounded hardest.

## 6. What follows the publication and what is this design's own

Taken from the publication:

* The Baugh-Wooley matrix.
* The LSP/CSP/MSP split.
* Truncation of columns 2^0 … 2^6 and compensation at 2^7 and 2^6.
* The constant that replaces one NAND bit at 2^7.
* The truth tables of the sign-focused compressors.
* The placement of every cell in the dot diagram of the reduction tree.
* The exactness of the MSP.
* The 8-bit final addition.
* The Laplacian kernel, the zero padding, and the row buffer → 3 × 3 matrix →
  MAC → output image structure of the filter.

Filled in or resolved here:

* **Approximate 4:2 cell**: the stand-in described in §2.
* **Input order of the compressors**: read from the order of the dots (top row
  is a0). This matters for the asymmetric A+B+C+1 cell.
* **Which column loses a NAND bit.** The text says the replaced NAND bit goes
  into the compressor "at the 2^N column", but the diagram shows it at 2^7.
  The diagram is followed.
* **Final adder.** The text calls the final adder a carry-save adder. Because
  it must produce one row, a ripple-carry adder is used.
* **Exact A+B+C+1 outputs.** The split between `carry` and `cout` in the exact
  A+B+C+1 cell is a free choice.
* **Published A+B+C+1 statistics.** The published table for the approximate
  A+B+C+1 prints an error probability of 0.0140, but its own rows give
  9/64 = 0.1406. Its error column also has the opposite sign convention from
  its formula. The RTL follows the rows.
* **Everything about the filter's hardware**: the padded-raster controller,
  valid/ready handshake, 11-cycle schedule, row-buffer organisation,
  accumulator width (20 bits, cannot overflow), output memory, sample format
  and default image size. The publication ran its edge-detection experiment in
  software and gives the hardware only as a diagram.

## 7. Files

`rtl/`:

| file | content |
|---|---|
| `sfc_pkg.sv` | widths, types, Laplacian coefficients |
| `bw_pp_gen.sv` | Baugh-Wooley partial products |
| `sfc_abc1_exact.sv`, `sfc_abc1_approx.sv` | A+B+C+1 compressors |
| `sfc_abcd1_exact.sv`, `sfc_abcd1_approx.sv` | A+B+C+D+1 compressors |
| `comp42_exact.sv`, `comp42_approx.sv` | 4:2 compressors |
| `full_adder.sv`, `half_adder.sv` | adder cells |
| `final_adder.sv` | W-bit final adder |
| `approx_sfc_mult.sv` | the 8 × 8 approximate multiplier |
| `line_buffer.sv`, `window_3x3.sv` | row buffer, 3 × 3 window |
| `laplacian_mac.sv` | MAC with the fixed kernel |
| `frame_store.sv` | output image memory |
| `edge_detect_top.sv` | top level |

`tb/`:

* One self-checking testbench per module, named `tb_<module>.sv`.
* `tb_edge_detect_full.sv`: one whole 640 × 480 frame at default parameters.
* `sfc_ref_pkg.sv`: the reference models.

The reference multiplier in `sfc_ref_pkg` adds up weighted bits column by
column, using the published compressor values. It does not copy the RTL's
structure.

## 8. Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/sfc_pkg.sv tb/sfc_ref_pkg.sv tb/tb_approx_sfc_mult.sv \
        --top-module tb_approx_sfc_mult -o sim
    ./obj_dir/sim

To run another testbench, replace `tb_approx_sfc_mult` with its name.
Verilator finds the other modules through `-Irtl`. Each testbench ends with a
line `TB_RESULT checks=N failures=M`.

What the testbenches cover:

* The compressor, adder and multiplier testbenches are exhaustive.
* `tb_approx_sfc_mult` also prints the error statistics of §4.
* `tb_edge_detect_top` (9 × 6 image, two frames) checks the following:
  * every output against the reference filter;
  * the frame's cycle count;
  * a read-back of the frame memory;
  * that padding on all four borders, injected pad samples, back-pressure,
    source gaps and `frame_done` each occur at least once.
* `tb_edge_detect_full` runs in a few seconds. It checks all 307,200 outputs
  and prints the PSNR of §5.

Everything compiles cleanly with `verilator --lint-only -Wall`, apart from two
warnings: an unused parameter and the reset used both in flops and in the
assertions' `disable iff`. It also compiles with the slang front end of yosys.
