// ds_twiddle_rom: look-up table ROM of the radix-2 twiddle factors.
//
// Entry r (0 <= r < FFT_N/2) holds W_N^r = exp(-j 2 pi r / N) = Wr - jWi, so
// wr = cos(2 pi r/N) and wi = sin(2 pi r/N), each a TW_W-bit Q1.15 number
// rounded to nearest. The twiddle must stay below one in magnitude, so
// cos(0) = 1 saturates to 32767/32768. The table is computed at elaboration
// with $cos/$sin, so no data file is needed.
//
// That the twiddles sit in a ROM, their 16-bit size and the sign convention
// W = Wr - jWi follow the source; the transform size (64 by default), the
// rounding and the one-cycle registered read are this design's choices.
//
// Interface: addr in, wr/wi out. Timing: wr/wi show the entry addressed on
// the previous rising clock edge.
module ds_twiddle_rom #(
  parameter int FFT_N = ds_pkg::FFT_N,
  parameter int TW_W  = ds_pkg::TW_W,
  localparam int DEPTH = FFT_N / 2,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                   clk,
  input  logic [AW-1:0]          addr,
  output logic signed [TW_W-1:0] wr,
  output logic signed [TW_W-1:0] wi
);

  typedef logic signed [TW_W-1:0] tab_t [DEPTH];

  // Rounds v * 2^(TW_W-1) to nearest and saturates into TW_W signed bits.
  function automatic logic signed [TW_W-1:0] to_fixed(real v);
    longint q;
    longint qmax;
    qmax = (longint'(1) <<< (TW_W - 1)) - 1;
    q    = longint'(v * (2.0 ** (TW_W - 1)));  // cast rounds to nearest
    if (q > qmax)      q = qmax;
    if (q < -qmax - 1) q = -qmax - 1;
    return TW_W'(q);
  endfunction

  function automatic tab_t make_table(bit want_sin);
    tab_t t;
    real  ang;
    for (int r = 0; r < DEPTH; r++) begin
      ang  = 2.0 * 3.14159265358979323846 * r / FFT_N;
      t[r] = to_fixed(want_sin ? $sin(ang) : $cos(ang));
    end
    return t;
  endfunction

  localparam tab_t COS_TAB = make_table(1'b0);
  localparam tab_t SIN_TAB = make_table(1'b1);

  always_ff @(posedge clk) begin
    wr <= COS_TAB[addr];
    wi <= SIN_TAB[addr];
  end

endmodule
