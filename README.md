# A shift-and-add processing array for ELP_BSD-quantized CNN weights

A CNN's weights cluster near zero and have a long tail. If each weight is
rounded to a sum of one, two or three signed powers of two, the quantization
levels fall densely where the weights are dense. The weight can also be stored
in a few bits, and multiplying an activation by it needs no multiplier: each
power of two is a shift, and the shifted copies are added. The Encoded
Low-Precision Binary Signed Digit (ELP_BSD) format of the CoNLoCNN work
(Hanif et al.) does this. Each digit of a weight may choose from a short, chosen
list of shift counts, and the weight stores only each digit's sign and an
index into its list.

This RTL implements the hardware side of that scheme:

* a MAC unit that multiplies a two's-complement activation by an ELP_BSD
  weight with XOR gates, barrel shifters and a carry-save adder tree;
* a weight-stationary processing element (PE) built around it;
* a 32 x 32 systolic processing array of those PEs, in the style of a TPU;
* a top level (`conlocnn_npu`) that adds the input and output skew a systolic
  array needs, so that it takes one activation vector per cycle and returns
  `bias + W^T a` per cycle.

The software half of the scheme is not hardware and is not here. It picks
the format, finds a per-layer scaling factor, quantizes each weight to the
nearest level and then, per filter channel, moves some weights to their other
neighbouring level so that the channel's mean quantization error shrinks.

## 1. The ELP_BSD weight word

A format is written `ELP_BSD{SF, [S_1, c_1,0, ..., c_1,n1-1], ..., [S_m, c_m,0, ...]}`.
`SF` is the per-layer scaling factor. Digit *i* is signed if `S_i = 1`, and
`c_i,k` are the shift counts it may take. The value is

    w = SF * sum_i (-1)^{sign_i} * 2^{c_i,idx_i}

Digit *i* takes `S_i` sign bits plus `ceil(log2(n_i))` index bits. Digit 1 is in
the most significant bits, and within a digit the sign bit is above the index.
A set sign bit means the digit is negative. Two examples:

| format | word | value |
|---|---|---|
| `{2^-2, [1,0,1,2,3], [1,0,1]}` | `1 10 0 0` | 2^-2 * (-2^2 + 2^0) = -0.75 |
| `{2^-2, [0,0,1,2,3], [1,0,1]}` (first digit unsigned) | `10 0 0` | 2^-2 * (2^2 + 2^0) = 1.25 |

The hardware never sees `SF`. The array computes with the integer sum of
signed powers of two, and the layer's `SF` (together with the activation
scale) is applied to the results by whatever consumes them. This RTL does not
contain that step.

The package `elp_bsd_pkg` holds a format as a packed struct (`elp_bsd_fmt_t`).
It provides up to 3 digits, up to 8 shift counts per digit and shift counts
0..7. It also has functions for field widths and positions and a `decode()`
for testbenches. It defines the four formats whose PEs were characterised for
the scheme:

| name | format | weight bits |
|---|---|---|
| `FMT_A` | `{x, [1,0,1,2,3,4,5,6,7]}` | 4 |
| `FMT_B` (default) | `{x, [1,0,1,2,3,4,5,6,7], [1,1,2,4,5]}` | 7 |
| `FMT_C` | `{x, [1,0,1,2,3,4,5,6,7], [1,1,5]}` | 6 |
| `FMT_D` | `{x, [1,0,2,5,7], [1,1,2,4,5]}` | 6 |

The format is an elaboration-time parameter. The shift-count lists are wired
into the shifters' select logic, so a chip supports exactly one format.
`FMT_A` has no zero level: its smallest magnitudes are +1 and -1. This is
deliberate, because the quantization step compensates for it, and it keeps
the PE simple.

## 2. Multiplying by one digit (`digit_mul`)

A digit multiplies the activation `a` by `+2^s` or `-2^s`. The unit is an
inverter, then a shifter, then (downstream) an adder:

1. **Inverter.** The activation is sign-extended to the accumulator width and
   XORed with the digit's sign bit. A negative digit therefore gives `~a`.
2. **Shifter.** A lookup turns the index into the shift count. The lookup is
   fixed by the format, so it is constant logic. A logarithmic barrel shifter
   (one 2:1 multiplexer stage per bit of the shift count) then shifts left.
3. **The missing +1.** Negation is `~x + 1`. The unit outputs `prod` and a
   correction bit `corr = sign`, and the adder that consumes `prod` adds `corr`.

One detail is easy to get wrong. Because inversion comes *before* the shift,
`(~a) << s` is not `~(a << s)`: the `s` vacated low bits would be zeros where
`~(a << s)` has ones. The shifter therefore fills vacated bits with the sign
bit. Then `prod = ~(a << s)` exactly, and `prod + 1 = -(a << s)`. With zero
fill, the +1 would have to enter at bit `s` instead of bit 0.

## 3. Adding the digits (`compressor_tree`, `elp_mac`)

`elp_mac` instantiates one `digit_mul` per digit of the format. Each takes its
sign and index bits straight from the weight word. The digit products and the
incoming partial sum go into a carry-save tree of 3:2 compressors, followed by
one carry-propagate adder.

Each negative digit still owes a +1, which is up to one per digit. An adder
tree has free slots for exactly that many single bits. With `m` digits there
are `m + 1` operands, hence `m - 1` compressors, and each compressor's carry
row is shifted left by one and so has an empty bit 0. The final adder adds its
own carry-in, which makes `m` free slots for `m` correction bits. Negation
therefore costs nothing beyond the XOR gates.

With a one-digit format this degenerates to the single-digit MAC:
XOR, shifter, one adder with the sign as carry-in. With two digits it is the
"1-digit MAC + 1-digit MUL" pair.

`psum_out = psum_in + w * act` modulo `2^ACC_W`, combinationally.

## 4. The processing element (`pe`)

Each PE holds four registers:

| register | input | feeds |
|---|---|---|
| pass-through weight | `w_in` (from above), every cycle | `w_out` (to the PE below) and the stationary weight |
| stationary weight | pass-through weight, when `load` = 1 | the MAC |
| activation | `act_in` (from the left), every cycle | the MAC and `act_out` (to the right) |
| partial sum | MAC output, every cycle | `psum_out` (to the PE below) |

The partial sum from above enters the MAC without a register, and the result
is registered. Per cycle:

    act_out(t+1)  = act_in(t)
    w_out(t+1)    = w_in(t)
    psum_out(t+1) = psum_in(t) + W_stationary * act_out(t)

The two weight registers give double buffering. The next weight tile shifts
down the columns through the pass-through registers while the stationary
registers keep computing with the current one.

## 5. The array and its timing (`processing_array`, `conlocnn_npu`)

`processing_array` is a `ROWS x COLS` grid (32 x 32 by default).
Activations move right along the rows, weights and partial sums move down the
columns, and column `c` delivers its dot product at the bottom. The array
itself does not skew anything. It computes

    psum_out[c] = psum_in[c] + sum_r W[r][c] * a[r]

only if row `r`'s activation is presented `r` cycles after row 0's, and column
`c`'s initial partial sum `c + 1` cycles after it. The result then appears
`ROWS + c + 1` cycles after row 0's activation.

`conlocnn_npu` provides this skew with delay lines:

* row `r` of the activation vector is delayed `r` cycles;
* column `c`'s bias is delayed `c + 1` cycles into the top of the array;
* column `c`'s result is delayed `COLS - 1 - c` cycles, so all columns of a
  result vector leave together.

A vector accepted with `act_valid` at cycle `T` comes out with `out_valid` at
cycle `T + ROWS + COLS` (64 cycles at the default size). A new vector can
enter every cycle, and gaps in the stream are allowed. `bias_in` is the
starting value of each column's sum. It carries a layer's bias, or the
partial sums of earlier row tiles when a dot product is longer than `ROWS`.

**Loading weights.** Present row `ROWS-1`'s weights on `w_in` first and row 0's
last, on `ROWS` consecutive cycles. Then raise `w_load` for one cycle, in the
cycle right after the last row. The pass-through registers shift every cycle,
so the load must come exactly then. The new weights apply to vectors that
enter in the `w_load` cycle or later. An earlier vector is still in use until
`ROWS + COLS - 2` cycles after it entered; `busy` reports this, and `w_load`
is allowed only when `busy` is low (an assertion checks it). To hide the
loading, the host starts shifting the next tile `ROWS` cycles before the
cycle in which `busy` will drop, which it can compute from its last issued
vector.

**Numeric range.** With 8-bit activations and `FMT_B` (largest weight
magnitude 2^7 + 2^5 = 160), a 32-row column sum plus a moderate bias needs 21
bits. The default `ACC_W = 24` has headroom for that but not for very long
dot products accumulated across many tiles. Sums wrap silently; widen
`ACC_W` if the host accumulates through `bias_in`.

## 6. Parameters

| parameter | default | meaning |
|---|---|---|
| `FMT` | `FMT_B` | ELP_BSD format (struct from `elp_bsd_pkg`) |
| `ROWS`, `COLS` | 32, 32 | array size |
| `ACT_W` | 8 | activation bits, two's complement (4..8 were studied for this scheme) |
| `ACC_W` | 24 | partial-sum bits |

The weight width follows from `FMT` (`weight_width(FMT)`): 7 bits by default.

## 7. Relation to the published design

Taken from the published description: the ELP_BSD format, its bit layout and
the four formats; the single-digit MAC of inverter (XOR), barrel shifter and
adder, with the sign bit completing the two's complement; one unit per digit
with a compressor tree and a multi-bit adder; the PE's register set (two
weight registers, one of them loaded, an activation register passed right, a
partial-sum register passed down); the weight-stationary 32 x 32 array with
activations moving right and partial sums down.

Choices of this implementation, where the description is silent:

* sign-bit fill in the shifter and the placement of the +1 corrections in
  free carry slots;
* the compressor-tree structure (level-by-level 3:2 compressors);
* `ACC_W = 24`; asynchronous active-low reset of every register to zero;
* a single broadcast `w_load` strobe and the `busy` rule;
* the skew, bias and de-skew delay lines, the valid pipeline and the use of
  the top-row partial-sum input for biases;
* `FMT_B` as the default format (the description characterises four formats
  and ranks none first; `FMT_B` matches its two-digit PE drawing);
* index codes beyond a digit's list (possible only for list lengths that
  are not powers of two) select shift 0.

Not included: weight and activation memories, the off-chip interface and the
sequencer that would drive the top level; activation functions, pooling and
application of the scaling factor; and the offline quantization and error
compensation software.

## 8. Verification

Each module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_elp_bsd_pkg` | the two worked examples above, the widths 4/7/6/6 of the four formats, field positions, and `decode()` of every code of five formats against a reference written independently in `tb_elp_ref_pkg` |
| `tb_digit_mul` | every activation x sign x index for an 8-entry and a 4-entry digit: `prod + corr = +/- a * 2^s` |
| `tb_compressor_tree` | random operands and increments for 2 to 6 operands |
| `tb_elp_mac` | every weight code of `FMT_A`..`FMT_D` and of a format with an unsigned digit, with random and extreme activations and partial sums |
| `tb_pe` | 3000 random cycles against a register-level model: weight pass-through, load, activation pass-through, MAC result timing |
| `tb_processing_array` | 4 x 3 array: shift-and-load protocol, skewed streaming, value and cycle of every column result, second weight tile |
| `tb_conlocnn_npu` | the default 32 x 32 top level end to end: two weight tiles, 160 vectors with gaps, the second tile shifted in while the first computes, a load that waits for `busy`, a load in the same cycle as a new vector; checks every result value and its 64-cycle latency, and counts that each of these events occurred |

| `tb_npu_formats` | the top level built in each of `FMT_A`..`FMT_D`, with 8-bit and with 5-bit activations (8 x 8 arrays, one `npu_format_check` driver each): every result value and its latency, including the most negative and most positive activations |

`tb_elp_ref_pkg` is the testbenches' reference for weight values. It spells
out each format's fields and shift lists by hand instead of using
`elp_bsd_pkg`.

To simulate with Verilator (5.x), for example the top level:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/elp_bsd_pkg.sv tb/tb_elp_ref_pkg.sv tb/tb_conlocnn_npu.sv \
        --top-module tb_conlocnn_npu -o sim
    ./obj_dir/sim

The other testbenches build the same way with their own file and top
module. At the default size, the C++ compile of the 1024-PE top level takes
about six minutes; the simulation itself takes well under a second. To
experiment at a smaller size, put a parameter list such as
`#(.ROWS(4), .COLS(3))` on the `conlocnn_npu` instance in the testbench and
change its `ROWS`/`COLS` localparams to match.

How far to trust it: every arithmetic path is checked exhaustively or
against independent references, and the array timing is checked cycle by
cycle, so the RTL does what this document says. What it cannot show is
fidelity to the original silicon. Its widths, reset, load protocol and
skewing are reconstructions, and no area, power or timing figures were
taken from this RTL.

## 9. Files

| file | contents |
|---|---|
| `rtl/elp_bsd_pkg.sv` | format types, the four formats, width/position/decode functions |
| `rtl/digit_mul.sv` | one-digit multiplier: XOR inverter, index lookup, barrel shifter |
| `rtl/compressor_tree.sv` | 3:2 carry-save tree with single-bit increment slots, final adder |
| `rtl/elp_mac.sv` | ELP_BSD MAC: digit multipliers + compressor tree |
| `rtl/pe.sv` | weight-stationary PE |
| `rtl/processing_array.sv` | ROWS x COLS grid of PEs |
| `rtl/delay_line.sv` | register pipeline used for skewing |
| `rtl/conlocnn_npu.sv` | top level: array, skew/de-skew, valid and busy |
| `tb/*.sv` | the testbenches above and the reference package |
