// ds_digit_mult: multiplier-less product of one digit and a twiddle constant.
//
// prod = digit * w, where digit is a signed digit value of SLICE_W+1 bits
// (as produced by the digit slicing in ds_butterfly: 0..15 for a low digit,
// -8..7 for the top one) and w is a signed TW_W-bit twiddle component. The product is a sum of
// shifted copies of w, one per set digit bit; the copy for the digit's sign
// bit is subtracted. No hardware multiplier is used. The source asks for a
// multiplier-less digit multiplier but does not describe its insides; this
// shift-and-add form is this design's choice.
//
// Interface: digit, w in; prod out (TW_W+SLICE_W bits, signed, exact, since
// |digit| <= 2^SLICE_W - 1). Timing: purely combinational.
module ds_digit_mult #(
  parameter int SLICE_W = ds_pkg::SLICE_W,
  parameter int TW_W    = ds_pkg::TW_W,
  localparam int DV_W   = SLICE_W + 1,
  localparam int PW     = TW_W + SLICE_W
) (
  input  logic signed [DV_W-1:0] digit,
  input  logic signed [TW_W-1:0] w,
  output logic signed [PW-1:0]   prod
);

  logic signed [PW-1:0] w_ext;
  assign w_ext = PW'(w);

  always_comb begin
    prod = '0;
    for (int j = 0; j < DV_W; j++) begin
      if (digit[j]) begin
        if (j == DV_W - 1) prod = prod - (w_ext <<< j);
        else               prod = prod + (w_ext <<< j);
      end
    end
  end

endmodule
