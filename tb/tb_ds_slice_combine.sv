// tb_ds_slice_combine: self-checking test of the slice recombiner.
//
// Builds slice values the way the butterfly does (a random Q1.15 word A cut
// into digits, each digit times 2^15 plus a random per-slice product term),
// and checks that the output equals floor(sum_k 16^k * slice_k / 2^15),
// computed with 64-bit integers, kept to 18 bits.
module tb_ds_slice_combine;
  localparam int NSLICE  = 4;
  localparam int SLICE_W = 4;
  localparam int IN_W    = 22;
  localparam int OUT_W   = 18;

  logic [NSLICE-1:0][IN_W-1:0] slices;
  logic signed [OUT_W-1:0]     y;
  int checks = 0, failures = 0;

  ds_slice_combine #(.NSLICE(NSLICE), .SLICE_W(SLICE_W), .IN_W(IN_W),
                     .FRAC_SHIFT(15), .OUT_W(OUT_W)) dut (.slices(slices), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint s0, longint s1, longint s2, longint s3);
    longint total, expect_full;
    logic signed [OUT_W-1:0] expect_y;
    slices[0] = IN_W'(s0); slices[1] = IN_W'(s1);
    slices[2] = IN_W'(s2); slices[3] = IN_W'(s3);
    #1;
    total = s0 + s1 * 16 + s2 * 256 + s3 * 4096;
    // floor division by 2^15, written without shifts
    expect_full = (total >= 0) ? total / 32768 : -((-total + 32767) / 32768);
    expect_y = OUT_W'(expect_full);
    checks++;
    if (y !== expect_y) begin
      failures++;
      $display("FAIL slices %0d %0d %0d %0d: y=%0d expected %0d", s0, s1, s2, s3, y, expect_y);
    end
  endtask

  initial begin
    check(0, 0, 0, 0);
    check(1, 0, 0, 0);
    check(-1, 0, 0, 0);
    check(32768, 0, 0, 0);
    check(0, 0, 0, -8 * 32768);
    for (int i = 0; i < 5000; i++) begin
      longint a, d;
      longint sl[4];
      a = longint'($signed(16'($urandom)));
      for (int k = 0; k < 4; k++) begin
        d = (a >>> (4 * k)) & 15;
        if (k == 3 && d >= 8) d -= 16;
        // per-slice product term: digit (-8..15) times a Q1.15 value, summed twice
        sl[k] = d * 32768 + longint'(int'($urandom_range(0, 983040))) - 491520;
      end
      check(sl[0], sl[1], sl[2], sl[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
