# Low-power data streaming in a Bfloat16 systolic array

In an output-stationary systolic array every operand crosses the array one
register at a time: activations move East along each row, weights move South
along each column. Every bit that changes between two successive words toggles
a whole chain of pipeline flip-flops and wires. This design lowers that
switching with two cheap techniques. Each one is applied only to the operand
that benefits from it:

* **Weights get bus-invert coding, and only on their fraction.** CNN weights
  are small numbers in [-1, 1]. In Bfloat16 their exponents therefore cluster
  near the bias and rarely change, while their 7 fraction bits are close to
  uniformly random. An encoder at the top of each column sends the
  complemented fraction whenever more than half of the fraction wires would
  otherwise toggle, and flags this with one extra `inv` wire. Sign and
  exponent are sent unchanged.
* **Activations get zero-value clock gating.** ReLU makes many activations
  exactly zero. A zero detector at the start of each row tags every input with
  an `is_zero` bit. In every PE a zero input neither reloads the register that
  passes the activation on (the pipeline is "frozen") nor reaches the
  multiplier, and the accumulator simply keeps its value.

The array is 16 x 16 processing elements (PEs). It multiplies Bfloat16
matrices tile by tile and accumulates in Bfloat16.

## Block structure

```
                 Weight Buffer (16 banks, one per column)
                   |         |               |
                  ENC       ENC     ...     ENC      bus-invert encoder, 1 register
                   | w,inv   |               |
 Input   --> ==0 --> PE ----> PE --> ... --> PE
 Buffer  --> ==0 --> PE ----> PE --> ... --> PE      a,is_zero flow East
 (16     ...          |        |              |      w,inv flow South
 banks)  --> ==0 --> PE ----> PE --> ... --> PE      accumulators unload South
                      |        |              |
                  Output Buffer (16 x 16 results)
         sa_controller: skewed bank reads, unload, start/done
```

| File | Block |
|---|---|
| `rtl/lpsa_pkg.sv` | Bfloat16 struct (`bf16_t`) and the two stream bundles: `act_t` (value + `is_zero`) and `wgt_t` (coded value + `inv`) |
| `rtl/bic_encoder.sv` | ENC: fraction-only bus-invert encoder, one per column |
| `rtl/zero_detector.sv` | `==0`: flags +0 and -0, one per row |
| `rtl/lp_pe.sv` | low-power output-stationary PE |
| `rtl/bf16_mul.sv`, `rtl/bf16_add.sv` | Bfloat16 multiplier and adder used in the PE |
| `rtl/pe_array.sv` | ROWS x COLS grid of PEs |
| `rtl/edge_buffer.sv` | banked Input Buffer and Weight Buffer (one module, used twice) |
| `rtl/output_buffer.sv` | Output Buffer |
| `rtl/sa_controller.sv` | tile sequencer |
| `rtl/lp_systolic_array.sv` | top level |

## The weight path: segmented bus-invert coding

The encoder (`bic_encoder`) keeps the fraction it last sent in its output
register. For each new weight it XORs the new fraction with that registered
value and counts the ones. If the count is above 3 (more than half of 7 bits),
it registers the complemented fraction and sets `inv`. For a 7-bit field this
test equals the most significant bit of the 3-bit count. So from one cycle to
the next at most 3 of the 7 fraction wires toggle, plus possibly `inv`.
Sign and exponent are not coded. Coding them would cost an encoder and an
extra wire and save almost nothing, because CNN weight exponents barely move.

The coded word and `inv` travel down the column exactly as they left the
encoder. Each PE's vertical register stores the coded form, so the low toggle
rate holds for the whole column. Only the multiplier's copy is decoded: the PE
XORs the 7 fraction bits with `inv` just before the multiplier. There is no
decoder at the bottom of a column, because weights leave through the PEs
only.

The guarantee is per transition: the coded fraction never toggles more wires
than the uncoded one would. `inv` can toggle on top of that. The end-to-end
testbench counts both. With uniformly random fractions, the 7 coded wires plus
`inv` toggled about 17 % less than the 7 uncoded wires (358 312 against
430 904 toggles in the full-size run).

## The input path: zero detection and clock gating

`zero_detector` is combinational: `is_zero = (exp == 0 && fraction == 0)`,
so both +0 and -0 are flagged. Each PE then does four things with the flag:

1. **Clock gate:** the register that passes the activation East is not loaded.
   It keeps the last non-zero value, so its 16 bits do not toggle. In silicon
   this is a clock-gating cell. Here it is a register enable, which synthesis
   maps onto such a cell.
2. **Flag forwarding:** the `is_zero` register itself is always loaded, so the
   flag goes East with the (frozen) value.
3. **Data gating:** both multiplier operands are forced to zero, so the
   multiplier's inputs do not switch.
4. **Bypass:** the accumulator keeps its value instead of adding a product
   that is known to be zero.

A consequence worth knowing: after a zero, the activation value a PE sees on
its West input is stale (the last non-zero value). It is correct only
together with `is_zero = 1`. Any logic added to a PE must respect the flag.

The same mechanism also silences the padding. Outside a stream (the skew
before and after each row's data, and the unload phase) the input buffer
returns zeros, which are flagged and cost no switching in the array.

Zero weights are not gated. They are multiplied normally, as the design gates
only on the activation side.

## The processing element

Per clock edge, `lp_pe` does:

```
w_true   = {w_in.sign, w_in.exp, w_in.man ^ {7{w_in.inv}}}
product  = is_zero ? 0 : a_in * w_true               (bf16_mul, operands gated)
acc     <= unload   ? acc_in                          (shift from North neighbour)
         : is_zero  ? acc                             (bypass)
         :            acc + product                   (bf16_add)
a_out.data    <= a_in.data   only when !is_zero       (clock-gated)
a_out.is_zero <= a_in.is_zero
w_out         <= w_in                                 (coded weight and inv)
```

All outputs are registers: one cycle per hop in each direction. The
multiply-add is a single combinational path inside a cycle. Reset clears every
register and sets `is_zero` to 1.

## A tile, cycle by cycle

`sa_controller` computes C = A x B for one 16 x 16 output tile. A is 16 x K
(row r in input bank r) and B is K x 16 (column c in weight bank c), with
1 <= K <= DEPTH. Let t count cycles from the clock edge that samples `start`
(t = 0).

* **Compute, t = 0 .. K+ROWS+COLS-1.** Weight bank c reads word `t - c`.
  Input bank r reads word `t - r - 1`. A bank whose address is outside 0..K-1
  returns zero. The input side lags by one cycle because a weight passes two
  registers before row 0 (the buffer's read register and the encoder
  register). An activation passes only one before column 0 (the read
  register; the zero detector is combinational). So B[k][c] and A[r][k] meet
  in PE (r,c) at cycle k + r + c + 2. The last product lands in the
  bottom-right PE at the end of cycle K + ROWS + COLS - 1.
* **Unload, ROWS cycles.** `unload` is high and every column's accumulators
  shift one row South per cycle. The bottom row shows original row ROWS-1
  first, then ROWS-2, and so on. The controller writes each into that row of
  the output buffer. Zero is shifted in at the top, so at the end of unload
  the array is cleared and ready for the next tile without a separate clear.
* **Done.** `done` is high for one cycle, K + 2*ROWS + COLS edges after the
  start edge (K + 48 at 16 x 16). `busy` covers the whole tile. `start` is
  ignored while busy.

Compute and unload do not overlap, and the next tile cannot start until
`done`.

Each result is accumulated strictly in order k = 0, 1, ..., K-1, with
Bfloat16 rounding after every addition, and terms with a zero activation are
skipped. The testbenches' reference model follows exactly this order, so
results must match bit for bit.

## Bfloat16 arithmetic

The multiplier and adder are ordinary IEEE-style operators with these
conventions:

* round to nearest, ties to even;
* subnormal inputs read as zero, and a result below the normal range after
  rounding is flushed to a signed zero;
* overflow gives a signed infinity;
* NaN inputs, inf x 0 and inf - inf give the quiet NaN 0x7FC0;
* x + (-x) is +0.

The adder aligns the smaller operand into an 18-bit field (8 significand bits
plus 10 extra bits). Shifted-out bits are ORed into a sticky bit. The result
is then normalised and rounded.

## Host interface (`lp_systolic_array`)

| Port | Dir | Width | Use |
|---|---|---|---|
| `in_wr_en/row/addr/data` | in | 1/4/13/16 | write A[row][addr] into the input buffer |
| `wt_wr_en/col/addr/data` | in | 1/4/13/16 | write B[addr][col] into the weight buffer |
| `start`, `k_len` | in | 1, 13 | start a tile with K = `k_len` |
| `busy`, `done` | out | 1, 1 | tile in progress / one-cycle end pulse |
| `out_rd_row/col` | in | 4/4 | result address |
| `out_rd_data` | out | 16 | C[row][col], one cycle after the address |

Reset is asynchronous and active low (`rst_n`). The buffers may be written at
any time. Writing a bank while a tile is reading it changes that tile's
operands.

Parameters: `ROWS = 16`, `COLS = 16` (the evaluated array size) and
`DEPTH = 4608` words per bank. 4608 = 3 x 3 x 512 is the longest reduction in
any ResNet-50 layer, so one tile of any ResNet-50 or MobileNet (v1) layer fits
the buffers. Splitting a layer into tiles and refilling the buffers is left to
the host.

## What follows the source design and what is this design's own

Taken from the published architecture:

* the 16 x 16 output-stationary array;
* fraction-only bus-invert coding with XOR / popcount / MSB-select in the
  column encoders and 1/8/7 field widths;
* XOR recovery of the fraction inside each PE;
* the zero detector per row;
* clock gating of the PE's activation register by `is_zero`;
* data gating of the multiplier and bypass of the zero product;
* the accumulator unload mux that takes the North neighbour's value;
* buffers on the North, West and South edges;
* Bfloat16 multiply and add.

Chosen here, because the source leaves them open:

* the internals and rounding, subnormal and NaN rules of the Bfloat16
  operators (the original used a vendor library);
* the clock gate written as a register enable;
* treating -0 as zero;
* reset values;
* zero shifted in at the top during unload;
* the buffer organisation, depth and host ports;
* the controller's schedule and handshake, including the one-cycle input lag
  and no overlap between unload and the next tile.

Not reproduced: the reported power figures (per-layer savings of 1-19 %,
6.2 % and 9.4 % overall for MobileNet and ResNet-50). Those came from
gate-level power analysis of a 45-nm synthesis, which no RTL simulation can
stand in for. The testbenches only count toggles on the weight fraction wires
and check that gating happens.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_bf16_mul`, `tb_bf16_add` | 40k / 60k operand pairs (directed, full random, mid-range, near-cancellation) against a double-precision reference (`bf16_ref_pkg`) |
| `tb_bic_encoder` | coded word, `inv`, decode, at most 3 fraction toggles per cycle, 5000 cycles |
| `tb_zero_detector` | all 65536 encodings |
| `tb_lp_pe` | accumulator, gated register, forwarding, unload, over 10000 cycles |
| `tb_pe_array` | 3 x 4 grid, testbench-generated skew, three back-to-back tiles |
| `tb_edge_buffer`, `tb_output_buffer` | read latency, zero padding, bank independence |
| `tb_sa_controller` | every output on every cycle against the schedule above |
| `tb_lp_systolic_array` | whole design at 4 x 5 (non-square on purpose), 6 tiles with 0-90 % zeros, latency, bit-exact results, and that zero gating, inversion and unload all occur |
| `tb_lp_systolic_array_full` | whole design at default size 16 x 16 x 4608, tiles with K = 4608 and two random K; about two minutes |

`bf16_ref_pkg` computes through IEEE double. A product of two Bfloat16 values
is exact in double. A sum rounded first to double and then to Bfloat16 gives
the same result as rounding it directly to Bfloat16, because 53 >= 2*8+2.

To run one testbench with Verilator (it finds the other modules by file name
in `rtl/` and `tb/`; the two packages are named first):

```
verilator --binary --timing --assert -y rtl -y tb \
  rtl/lpsa_pkg.sv tb/bf16_ref_pkg.sv tb/tb_lp_systolic_array.sv \
  --top-module tb_lp_systolic_array -Mdir obj && ./obj/Vtb_lp_systolic_array
```

To change the array size, override `ROWS`, `COLS` and `DEPTH` on
`lp_systolic_array`. The reduced end-to-end testbench shows how, and
`tb_sa_env` adapts to any size.
