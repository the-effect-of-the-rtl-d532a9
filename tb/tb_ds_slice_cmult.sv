// tb_ds_slice_cmult: self-checking test of the per-slice complex multiplier.
// Checks pr = br*wr + bi*wi and pi = bi*wr - br*wi (twiddle W = wr - j wi)
// against integer arithmetic for random and extreme digit and twiddle values.
module tb_ds_slice_cmult;
  localparam int SLICE_W = 4;
  localparam int TW_W    = 16;
  localparam int DV_W    = SLICE_W + 1;
  localparam int CW      = TW_W + SLICE_W + 1;

  logic signed [DV_W-1:0] br, bi;
  logic signed [TW_W-1:0] wr, wi;
  logic signed [CW-1:0]   pr, pi;
  int checks = 0, failures = 0;

  ds_slice_cmult #(.SLICE_W(SLICE_W), .TW_W(TW_W))
    dut (.br(br), .bi(bi), .wr(wr), .wi(wi), .pr(pr), .pi(pi));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int dbr, int dbi, int vwr, int vwi);
    int epr, epi;
    br = DV_W'(dbr); bi = DV_W'(dbi); wr = TW_W'(vwr); wi = TW_W'(vwi);
    #1;
    epr = dbr * vwr + dbi * vwi;
    epi = dbi * vwr - dbr * vwi;
    checks += 2;
    if (int'(pr) != epr) begin
      failures++;
      $display("FAIL br=%0d bi=%0d wr=%0d wi=%0d pr=%0d expected %0d", dbr, dbi, vwr, vwi, pr, epr);
    end
    if (int'(pi) != epi) begin
      failures++;
      $display("FAIL br=%0d bi=%0d wr=%0d wi=%0d pi=%0d expected %0d", dbr, dbi, vwr, vwi, pi, epi);
    end
  endtask

  function automatic int rand_digit();
    int v = int'($urandom_range(0, 23));
    return v - 8;  // -8..15, every value a slicer can produce
  endfunction

  initial begin
    check(15, 15, -32768, -32768);
    check(-8, -8, -32768, -32768);
    check(15, -8, 32767, -32768);
    check(-8, 15, -32768, 32767);
    check(0, 0, 12345, -321);
    for (int i = 0; i < 5000; i++)
      check(rand_digit(), rand_digit(), int'($signed(TW_W'($urandom))), int'($signed(TW_W'($urandom))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
