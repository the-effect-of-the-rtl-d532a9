// ds_slice_combine: recombination of the slice results into one word.
//
// Computes sum_k 2^(SLICE_W*k) * slices[k] exactly, which is the butterfly
// output in units of 2^-(2*FRAC_SHIFT) (the product of two Q1.15 numbers),
// then shifts it right by FRAC_SHIFT with floor rounding (two's-complement
// truncation) and keeps the low OUT_W bits. With 16-bit Q1.15 inputs and a
// twiddle below one in magnitude, every butterfly output component lies
// below 1 + sqrt(2) in magnitude, so the Q3.15 result (18 bits) never
// overflows. The weighted sum follows the source's slice equation; the
// adder tree, the truncation and the output width are this design's choices.
//
// Interface: slices in (packed, slice 0 in the low bits), y out.
// Timing: purely combinational.
module ds_slice_combine #(
  parameter int NSLICE     = ds_pkg::NSLICE,
  parameter int SLICE_W    = ds_pkg::SLICE_W,
  parameter int IN_W       = ds_pkg::sbf_w(ds_pkg::SLICE_W, ds_pkg::TW_W),
  parameter int FRAC_SHIFT = ds_pkg::TW_W - 1,
  parameter int OUT_W      = ds_pkg::OUT_W,
  localparam int SUM_W     = IN_W + SLICE_W * (NSLICE - 1) + 1
) (
  input  logic [NSLICE-1:0][IN_W-1:0] slices,
  output logic signed [OUT_W-1:0]     y
);

  logic signed [SUM_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int k = 0; k < NSLICE; k++)
      sum = sum + (SUM_W'($signed(slices[k])) <<< (SLICE_W * k));
  end

  logic signed [SUM_W-1:0] scaled;
  assign scaled = sum >>> FRAC_SHIFT;
  assign y      = OUT_W'(scaled);

endmodule
