# Digit-slicing radix-2 FFT butterfly

A radix-2 decimation-in-time butterfly computes, for complex operands A and
B and a twiddle factor W = W_N^r,

    X = A + B*W        Y = A - B*W

The costly part is the complex product B*W: four 16x16-bit real
multiplications. The twiddle factors of an FFT are constants known in
advance, and this design uses that. It never multiplies whole words. Each
16-bit operand is cut into four 4-bit *digits*. Each digit is multiplied by
the twiddle with a few shifted additions, and no multiplier is used. The
butterfly additions are also done digit by digit. Only at the end are the four
partial results weighted by 16^k and summed into the output words. Every
stage then works on short operands, which is what allows a high clock rate.

This RTL implements the digit-slicing butterfly described in "The Effect of
the Digit Slicing Architecture on the FFT Butterfly" (Y. Samir,
R. Teymourzadeh). That paper gives the slicing equations, the word and digit
sizes and the overall structure. It does not give the pipeline, the widths
of the intermediate results, the rounding, the transform size or the
insides of the digit multiplier. Those are choices made here, listed in
[Departures and choices](#departures-and-choices).

## Number formats

| Quantity | Format | Bits |
|---|---|---|
| Ar, Ai, Br, Bi | two's complement Q1.15, range [-1, 1) | 16 |
| Wr, Wi (W = Wr - jWi) | Q1.15, magnitude below 1 | 16 |
| Xr, Xi, Yr, Yi | Q3.15, range [-4, 4) | 18 |

The twiddle is written **W = Wr - jWi**, so Wr = cos(2πr/N) and
Wi = sin(2πr/N). With this sign the real part of the product is a sum and
the imaginary part a difference:

    Re(B*W) = Br*Wr + Bi*Wi        Im(B*W) = Bi*Wr - Br*Wi

Each output component is below 1 + √2 in magnitude, so Q3.15 never
overflows. No saturation logic is needed. The outputs keep 15 fraction
bits and are truncated toward minus infinity (floor).

## Slicing a word into digits

A 16-bit two's-complement word x is the sum of its four 4-bit fields, each
weighted by 16^k:

    x * 2^15 = D0 + 16*D1 + 256*D2 + 4096*D3

D0, D1 and D2 are read as unsigned values (0..15). D3 holds the sign bit,
whose weight is negative, so D3 is read as a two's-complement value (-8..7).
The top module (function `slice_word` in `ds_butterfly`) gives each digit as
a signed 5-bit value. The low digits are zero-extended and the top digit is
sign-extended. Every later stage can then treat all digits alike as signed
numbers. The slicing is only a regrouping of wires, so it has no module of
its own. This is the first of the two slicing schemes in the source. The
second would add a separate digit that holds only the sign bit.

## Multiplying a digit by the twiddle

`ds_digit_mult` forms d*w for a 5-bit signed digit d and a 16-bit twiddle
component w. It adds w<<j for every set bit j of d. For the sign bit it
subtracts w<<4. The result is exact in 20 bits. `ds_slice_cmult` arranges
four of these like a conventional complex multiplier, but on one digit
slice:

    Pr_k = Brk*Wr + Bik*Wi        Pi_k = Bik*Wr - Brk*Wi         (21 bits)

The butterfly has four slices, so it uses 16 digit multipliers.

## Per-slice butterflies and recombination

This is the step that is least obvious. The butterfly is linear in A and
B, so it can be applied to each slice separately. In integer units of
2^-30, the butterfly of slice k is:

    Xr_k = Ark*2^15 + Pr_k      Yr_k = Ark*2^15 - Pr_k
    Xi_k = Aik*2^15 + Pi_k      Yi_k = Aik*2^15 - Pi_k

The output word is then:

    X * 2^30 = X_0 + 16*X_1 + 256*X_2 + 4096*X_3

The digit of A is shifted by 15 so that it has the same scale as a digit
times a Q1.15 twiddle. The per-slice results (`ds_slice_bfly`) are exact,
22-bit signed numbers. A slice result is much wider than 4 bits, so
neighbouring slices overlap, and the carries between slices are resolved
only in the recombination. Until then no information is dropped.
`ds_slice_combine` sums the shifted slices in 35 bits. It then shifts right
by 15 (floor) and keeps 18 bits. The only rounding in the whole butterfly
happens here, once per output. The result is therefore bit-exact with

    Xr = floor((Ar*2^15 + Br*Wr + Bi*Wi) / 2^15)

and likewise for the other three outputs.

## Pipeline and interface (`ds_butterfly`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, rising edge |
| `rst_n` | in | 1 | synchronous reset, active low |
| `in_valid` | in | 1 | operands present this cycle |
| `ar ai br bi` | in | 16 each | A and B, Q1.15 |
| `tw_idx` | in | log2(N/2) | twiddle index r, 0 ≤ r < N/2 |
| `out_valid` | out | 1 | results present |
| `xr xi yr yi` | out | 18 each | X and Y, Q3.15 |

The butterfly has four register stages:

| Stage | Work |
|---|---|
| S1 | capture operands; read the twiddle ROM; slice A and B into digits |
| S2 | 4 slice complex multipliers (16 digit multipliers); A passes through the delay unit |
| S3 | 4 per-slice complex adders and subtractors |
| S4 | recombine the slices of Xr, Xi, Yr and Yi |

The butterfly accepts one operand set per clock and has no back-pressure.
Operands captured at clock edge n appear on the outputs after edge n+3,
with `out_valid` high. Idle cycles (`in_valid` low) travel through as
bubbles. Reset clears the valid bits, which discards whatever is in flight.

## Twiddle ROM (`ds_twiddle_rom`)

The ROM holds the N/2 twiddles of a radix-2 FFT. Entry r holds
(round(2^15 cos 2πr/N), round(2^15 sin 2πr/N)), saturated to 32767, so
cos 0 = 1 is stored as 32767/32768. The table is computed at elaboration
with `$cos`/`$sin` from the parameters, so there is no data file, and any
`FFT_N` works. The read is registered and takes one cycle. N defaults to 64.

## Files

| File | Contents |
|---|---|
| `rtl/ds_pkg.sv` | default sizes |
| `rtl/ds_digit_mult.sv` | digit times twiddle, shift-and-add |
| `rtl/ds_slice_cmult.sv` | per-slice complex product |
| `rtl/ds_delay_unit.sv` | register chain on the A path |
| `rtl/ds_slice_bfly.sv` | per-slice complex add and subtract |
| `rtl/ds_slice_combine.sv` | weighted sum of slices, floor to Q3.15 |
| `rtl/ds_twiddle_rom.sv` | twiddle table |
| `rtl/ds_butterfly.sv` | top: the pipelined butterfly |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

Parameters of the top are `FFT_N` (64), `DATA_W` (16), `SLICE_W` (4) and
`TW_W` (16). `DATA_W` must be a multiple of `SLICE_W`. The number of slices
and all internal widths follow from these four.

## Verification

Each testbench compares its module with results computed independently
by plain integer multiplication or `$cos`/`$sin`. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

- `tb_ds_digit_mult`: every digit value from -8 to 15 against edge and
  random twiddles.
- `tb_ds_slice_cmult` and `tb_ds_slice_bfly`: random and extreme inputs
  against the slice equations.
- `tb_ds_slice_combine`: slices built the way the butterfly builds them,
  against a floor division done with 64-bit integers.
- `tb_ds_delay_unit`: depths 1 and 3, and the value after reset.
- `tb_ds_twiddle_rom`: all 32 entries are within half an LSB of the ideal
  value. The exact values at 0, π/4 and π/2 and the one-cycle read latency
  are also checked.
- `tb_ds_butterfly` runs the whole butterfly at its default sizes. It
  applies about 3,200 operand sets: corners, every twiddle index, and a
  random stream with random gaps. A scoreboard checks every result
  bit-exactly and checks that it arrives exactly 4 cycles after its
  operands. The test also resets in the middle of a burst and checks that
  the in-flight results are dropped. Finally it runs a complete 64-point
  FFT: six stages of 32 butterflies, the outputs halved between stages. It
  compares the result with a directly computed DFT/64. The error is at most
  a few LSB; the test fails above 12 LSB. The test counts the events it must
  cause, and fails if any never happened: back-to-back issue, idle cycles,
  negative top digits, the input -1.0 and a flush by reset.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/ds_pkg.sv tb/tb_ds_butterfly.sv \
              --top-module tb_ds_butterfly
    ./obj_dir/Vtb_ds_butterfly

Swap in any other `tb_ds_*` name. Each run takes well under a second.

## Departures and choices

These follow the source:

- the slicing scheme, with 16-bit words cut into four 4-bit digits, the top
  digit signed;
- the 16-bit twiddle below one in magnitude, stored in a ROM;
- a multiplier-less digit multiplier;
- the per-slice butterfly equations X_k = A_k + B_k W and
  Y_k = A_k - B_k W, followed by recombination with weights 16^k;
- a delay unit on the A path.

These are this design's own choices:

- **Sign of the twiddle.** The source is inconsistent. Its conventional
  complex-multiplier equation and drawing use W = Wr + jWi. Its statement
  of the twiddle and its slice equations use W = Wr - jWi. The slice
  equations are followed.
- **Digit multiplier.** Only its function is given. Its shift-and-add insides
  are the simplest form that does the job.
- **Carries.** The slice equations write each slice result as a 4-bit
  digit, which cannot hold the carries. Here the slice results are kept
  wide and the carries are resolved in the recombination.
- **Output.** The Q3.15 output format and the floor rounding are not given
  in the source.
- **Transform size.** The source never gives one. N = 64 is a choice.
- **Timing and control.** The pipeline depth, the valid bit, the
  synchronous reset and the registered ROM read are not given in the
  source.
- **Clock rates.** The source reports FPGA clock rates: 535.90 MHz for the
  butterfly and 609.60 MHz for a 16-bit digit-slicing multiplier, on a
  Virtex-II. This RTL has not been synthesised for any FPGA, so those
  figures are not reproduced. The pipeline cut here is not necessarily the
  one behind them.
- **Standalone multiplier.** The 16-bit digit-slicing multiplier that the
  source measures on its own is not built as a separate unit. Inside the
  butterfly the digit products are added to A before any recombination, so
  no whole-word product is ever formed.
- **Baselines.** The conventional butterfly and multiplier that the source
  compares against are not part of this design.
