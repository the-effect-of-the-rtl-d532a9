// tb_ds_slice_bfly: self-checking test of the per-slice complex adder and
// subtractor. With the digit of A scaled by 2^15, checks
// xr = ar*2^15 + pr, xi = ai*2^15 + pi, yr = ar*2^15 - pr, yi = ai*2^15 - pi
// for random and extreme inputs.
module tb_ds_slice_bfly;
  localparam int SLICE_W = 4;
  localparam int TW_W    = 16;
  localparam int DV_W    = SLICE_W + 1;
  localparam int CW      = TW_W + SLICE_W + 1;
  localparam int SW      = TW_W + SLICE_W + 2;

  logic signed [DV_W-1:0] ar, ai;
  logic signed [CW-1:0]   pr, pi;
  logic signed [SW-1:0]   xr, xi, yr, yi;
  int checks = 0, failures = 0;

  ds_slice_bfly #(.SLICE_W(SLICE_W), .TW_W(TW_W))
    dut (.ar(ar), .ai(ai), .pr(pr), .pi(pi), .xr(xr), .xi(xi), .yr(yr), .yi(yi));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s = %0d, expected %0d (ar=%0d ai=%0d pr=%0d pi=%0d)", what, got, exp, ar, ai, pr, pi);
    end
  endtask

  task automatic check(int dar, int dai, int vpr, int vpi);
    ar = DV_W'(dar); ai = DV_W'(dai); pr = CW'(vpr); pi = CW'(vpi);
    #1;
    expect_eq("xr", int'(xr), dar * 32768 + vpr);
    expect_eq("xi", int'(xi), dai * 32768 + vpi);
    expect_eq("yr", int'(yr), dar * 32768 - vpr);
    expect_eq("yi", int'(yi), dai * 32768 - vpi);
  endtask

  localparam int PMAX = (1 << (CW - 1)) - 1;

  initial begin
    check(15, 15, PMAX, -PMAX - 1);
    check(-8, -8, -PMAX - 1, PMAX);
    check(15, -8, -PMAX - 1, -PMAX - 1);
    check(0, 0, 0, 0);
    for (int i = 0; i < 5000; i++)
      check(int'($urandom_range(0, 23)) - 8, int'($urandom_range(0, 23)) - 8,
            int'($urandom_range(0, 2 * PMAX + 1)) - PMAX - 1,
            int'($urandom_range(0, 2 * PMAX + 1)) - PMAX - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
