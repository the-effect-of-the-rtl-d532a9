// ds_slice_cmult: complex multiplier for one digit slice of B.
//
// With the twiddle written W = Wr - jWi, the product of slice k of B with W is
//   pr = Brk*Wr + Bik*Wi      (real part)
//   pi = Bik*Wr - Brk*Wi      (imaginary part)
// as the source's slice equations require. It uses four multiplier-less digit
// multipliers, one adder and one subtractor: the arrangement of a
// conventional complex multiplier, but on 4-bit digits instead of 16-bit
// words. The digits are signed digit values as sliced in ds_butterfly.
//
// Interface: br, bi (digits), wr, wi (twiddle) in; pr, pi out, signed,
// TW_W+SLICE_W+1 bits, exact. Timing: purely combinational.
module ds_slice_cmult #(
  parameter int SLICE_W = ds_pkg::SLICE_W,
  parameter int TW_W    = ds_pkg::TW_W,
  localparam int DV_W   = SLICE_W + 1,
  localparam int PW     = TW_W + SLICE_W,
  localparam int CW     = TW_W + SLICE_W + 1
) (
  input  logic signed [DV_W-1:0] br,
  input  logic signed [DV_W-1:0] bi,
  input  logic signed [TW_W-1:0] wr,
  input  logic signed [TW_W-1:0] wi,
  output logic signed [CW-1:0]   pr,
  output logic signed [CW-1:0]   pi
);

  logic signed [PW-1:0] br_wr, bi_wi, bi_wr, br_wi;

  ds_digit_mult #(.SLICE_W(SLICE_W), .TW_W(TW_W))
    u_br_wr (.digit(br), .w(wr), .prod(br_wr));
  ds_digit_mult #(.SLICE_W(SLICE_W), .TW_W(TW_W))
    u_bi_wi (.digit(bi), .w(wi), .prod(bi_wi));
  ds_digit_mult #(.SLICE_W(SLICE_W), .TW_W(TW_W))
    u_bi_wr (.digit(bi), .w(wr), .prod(bi_wr));
  ds_digit_mult #(.SLICE_W(SLICE_W), .TW_W(TW_W))
    u_br_wi (.digit(br), .w(wi), .prod(br_wi));

  assign pr = CW'(br_wr) + CW'(bi_wi);
  assign pi = CW'(bi_wr) - CW'(br_wi);

endmodule
