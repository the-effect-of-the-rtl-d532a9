// ds_slice_bfly: complex adder and subtractor of one digit slice.
//
// Forms the slice butterfly X_k = A_k + B_k W and Y_k = A_k - B_k W:
//   xr = Ark*2^(TW_W-1) + pr      yr = Ark*2^(TW_W-1) - pr
//   xi = Aik*2^(TW_W-1) + pi      yi = Aik*2^(TW_W-1) - pi
// where pr, pi are the slice products from ds_slice_cmult and Ark, Aik are
// signed digit values as sliced in ds_butterfly. The digit of A is shifted by
// TW_W-1 so it has the scale of a digit times a Q1.15 twiddle. Results are
// exact, TW_W+SLICE_W+2 bits signed: the carries out of each slice are kept
// here and resolved when the slices are recombined. The slice equations
// follow the source; keeping the carries at full precision is this design's
// choice.
//
// Interface: ar, ai (digits of A), pr, pi in; xr, xi, yr, yi out.
// Timing: purely combinational.
module ds_slice_bfly #(
  parameter int SLICE_W = ds_pkg::SLICE_W,
  parameter int TW_W    = ds_pkg::TW_W,
  localparam int DV_W   = SLICE_W + 1,
  localparam int CW     = TW_W + SLICE_W + 1,
  localparam int SW     = TW_W + SLICE_W + 2
) (
  input  logic signed [DV_W-1:0] ar,
  input  logic signed [DV_W-1:0] ai,
  input  logic signed [CW-1:0]   pr,
  input  logic signed [CW-1:0]   pi,
  output logic signed [SW-1:0]   xr,
  output logic signed [SW-1:0]   xi,
  output logic signed [SW-1:0]   yr,
  output logic signed [SW-1:0]   yi
);

  logic signed [SW-1:0] ar_al, ai_al;
  assign ar_al = SW'(ar) <<< (TW_W - 1);
  assign ai_al = SW'(ai) <<< (TW_W - 1);

  assign xr = ar_al + SW'(pr);
  assign xi = ai_al + SW'(pi);
  assign yr = ar_al - SW'(pr);
  assign yi = ai_al - SW'(pi);

endmodule
