// ds_butterfly: pipelined digit-slicing radix-2 DIT butterfly.
//
// Computes X = A + B*W and Y = A - B*W for complex A, B (16-bit Q1.15 parts)
// and the twiddle W = W_N^r = Wr - jWi read from a ROM by its index r.
// Instead of multiplying whole 16-bit words, B is cut into four 4-bit digits
// and each digit is multiplied by the twiddle with shift-and-add logic; the
// butterfly additions are done per digit as well (slice k gives
// X_k = A_k + B_k*W, Y_k = A_k - B_k*W), and the four slice results are
// recombined with weights 2^(4k) at the end. Outputs are Q3.15 in 18 bits,
// truncated toward minus infinity, and always in range.
//
// Pipeline (one butterfly accepted every cycle, latency 4 cycles):
//   S1  operand registers; twiddle ROM read; A and B sliced into digits
//   S2  per-slice complex digit products B_k*W; A through the delay unit
//   S3  per-slice complex adder and subtractor
//   S4  recombination of the slices into X and Y
// out_valid follows in_valid 4 cycles later. There is no back-pressure.
//
// The digit-slicing equations, the 16-bit word, the 4x4-bit slicing, the
// 16-bit twiddle, the twiddle ROM and the delay unit on A follow the source.
// The pipeline cut, the valid bit, the synchronous active-low reset, the
// transform size of 64 and the output format are this design's choices.
module ds_butterfly #(
  parameter int FFT_N   = ds_pkg::FFT_N,
  parameter int DATA_W  = ds_pkg::DATA_W,
  parameter int SLICE_W = ds_pkg::SLICE_W,
  parameter int TW_W    = ds_pkg::TW_W,
  localparam int NSLICE = DATA_W / SLICE_W,
  localparam int AW     = (FFT_N > 2) ? $clog2(FFT_N / 2) : 1,
  localparam int DV_W   = SLICE_W + 1,
  localparam int CW     = TW_W + SLICE_W + 1,
  localparam int SW     = TW_W + SLICE_W + 2,
  localparam int OUT_W  = DATA_W + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] ar,
  input  logic signed [DATA_W-1:0] ai,
  input  logic signed [DATA_W-1:0] br,
  input  logic signed [DATA_W-1:0] bi,
  input  logic [AW-1:0]            tw_idx,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  xr,
  output logic signed [OUT_W-1:0]  xi,
  output logic signed [OUT_W-1:0]  yr,
  output logic signed [OUT_W-1:0]  yi
);

  typedef logic [NSLICE-1:0][DV_W-1:0]    digits_t;
  typedef logic [NSLICE-1:0][SW-1:0]      slice_res_t;

  // ---------------- S1: operand registers, twiddle ROM ----------------
  logic                     v1;
  logic [DATA_W-1:0]        ar1, ai1, br1, bi1;
  logic signed [TW_W-1:0]   wr1, wi1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1  <= 1'b0;
      ar1 <= '0;
      ai1 <= '0;
      br1 <= '0;
      bi1 <= '0;
    end else begin
      v1  <= in_valid;
      ar1 <= ar;
      ai1 <= ai;
      br1 <= br;
      bi1 <= bi;
    end
  end

  ds_twiddle_rom #(.FFT_N(FFT_N), .TW_W(TW_W)) u_rom (
    .clk (clk),
    .addr(tw_idx),
    .wr  (wr1),
    .wi  (wi1)
  );

  // Digit slicing: word = sum_k 16^k * D_k, with D_0..D_2 unsigned (0..15)
  // and the top digit, which holds the sign bit, two's complement (-8..7).
  // Each digit is handed on as a signed SLICE_W+1-bit value, so the later
  // stages treat all slices alike. Slicing is only a regrouping of wires.
  function automatic digits_t slice_word(logic [DATA_W-1:0] x);
    digits_t d;
    for (int k = 0; k < NSLICE; k++) begin
      if (k == NSLICE - 1) d[k] = {x[SLICE_W*k + SLICE_W-1], x[SLICE_W*k +: SLICE_W]};
      else                 d[k] = {1'b0, x[SLICE_W*k +: SLICE_W]};
    end
    return d;
  endfunction

  digits_t ar_d1, ai_d1, br_d1, bi_d1;
  assign ar_d1 = slice_word(ar1);
  assign ai_d1 = slice_word(ai1);
  assign br_d1 = slice_word(br1);
  assign bi_d1 = slice_word(bi1);

  // ---------------- S2: digit products, delayed A ----------------
  logic                             v2;
  logic [NSLICE-1:0][CW-1:0]        pr2, pi2;
  logic [NSLICE-1:0][CW-1:0]        pr1, pi1;
  digits_t                          ar_d2, ai_d2;

  for (genvar k = 0; k < NSLICE; k++) begin : g_cmult
    ds_slice_cmult #(.SLICE_W(SLICE_W), .TW_W(TW_W)) u_cmult (
      .br(br_d1[k]), .bi(bi_d1[k]), .wr(wr1), .wi(wi1),
      .pr(pr1[k]),   .pi(pi1[k])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v2  <= 1'b0;
      pr2 <= '0;
      pi2 <= '0;
    end else begin
      v2  <= v1;
      pr2 <= pr1;
      pi2 <= pi1;
    end
  end

  ds_delay_unit #(.WIDTH(NSLICE * DV_W), .DEPTH(1)) u_delay_ar
    (.clk(clk), .rst_n(rst_n), .d(ar_d1), .q(ar_d2));
  ds_delay_unit #(.WIDTH(NSLICE * DV_W), .DEPTH(1)) u_delay_ai
    (.clk(clk), .rst_n(rst_n), .d(ai_d1), .q(ai_d2));

  // ---------------- S3: per-slice complex adder / subtractor ----------------
  logic       v3;
  slice_res_t xr2, xi2, yr2, yi2;
  slice_res_t xr3, xi3, yr3, yi3;

  for (genvar k = 0; k < NSLICE; k++) begin : g_sbfly
    ds_slice_bfly #(.SLICE_W(SLICE_W), .TW_W(TW_W)) u_sbfly (
      .ar(ar_d2[k]), .ai(ai_d2[k]), .pr(pr2[k]), .pi(pi2[k]),
      .xr(xr2[k]),   .xi(xi2[k]),   .yr(yr2[k]), .yi(yi2[k])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v3  <= 1'b0;
      xr3 <= '0;
      xi3 <= '0;
      yr3 <= '0;
      yi3 <= '0;
    end else begin
      v3  <= v2;
      xr3 <= xr2;
      xi3 <= xi2;
      yr3 <= yr2;
      yi3 <= yi2;
    end
  end

  // ---------------- S4: recombination ----------------
  logic signed [OUT_W-1:0] xr4, xi4, yr4, yi4;

  ds_slice_combine #(.NSLICE(NSLICE), .SLICE_W(SLICE_W), .IN_W(SW),
                     .FRAC_SHIFT(TW_W - 1), .OUT_W(OUT_W))
    u_comb_xr (.slices(xr3), .y(xr4));
  ds_slice_combine #(.NSLICE(NSLICE), .SLICE_W(SLICE_W), .IN_W(SW),
                     .FRAC_SHIFT(TW_W - 1), .OUT_W(OUT_W))
    u_comb_xi (.slices(xi3), .y(xi4));
  ds_slice_combine #(.NSLICE(NSLICE), .SLICE_W(SLICE_W), .IN_W(SW),
                     .FRAC_SHIFT(TW_W - 1), .OUT_W(OUT_W))
    u_comb_yr (.slices(yr3), .y(yr4));
  ds_slice_combine #(.NSLICE(NSLICE), .SLICE_W(SLICE_W), .IN_W(SW),
                     .FRAC_SHIFT(TW_W - 1), .OUT_W(OUT_W))
    u_comb_yi (.slices(yi3), .y(yi4));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      xr        <= '0;
      xi        <= '0;
      yr        <= '0;
      yi        <= '0;
    end else begin
      out_valid <= v3;
      xr        <= xr4;
      xi        <= xi4;
      yr        <= yr4;
      yi        <= yi4;
    end
  end

endmodule
