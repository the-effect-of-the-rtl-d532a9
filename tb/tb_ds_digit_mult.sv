// tb_ds_digit_mult: self-checking test of the multiplier-less digit
// multiplier. Every digit value a slicer can produce (-8..15) is multiplied
// by edge twiddles (0, +-1, most positive, most negative) and by random
// ones; the product is compared with ordinary integer multiplication.
module tb_ds_digit_mult;
  localparam int SLICE_W = 4;
  localparam int TW_W    = 16;
  localparam int DV_W    = SLICE_W + 1;
  localparam int PW      = TW_W + SLICE_W;

  logic signed [DV_W-1:0] digit;
  logic signed [TW_W-1:0] w;
  logic signed [PW-1:0]   prod;
  int checks = 0, failures = 0;

  ds_digit_mult #(.SLICE_W(SLICE_W), .TW_W(TW_W)) dut (.digit(digit), .w(w), .prod(prod));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int d, int wv);
    int expected;
    digit = DV_W'(d);
    w     = TW_W'(wv);
    #1;
    expected = d * wv;
    checks++;
    if (int'(prod) != expected) begin
      failures++;
      $display("FAIL digit=%0d w=%0d prod=%0d expected %0d", d, wv, prod, expected);
    end
  endtask

  int edges[5] = '{0, 1, -1, 32767, -32768};

  initial begin
    for (int d = -8; d <= 15; d++) begin
      foreach (edges[e]) check(d, edges[e]);
      for (int i = 0; i < 200; i++) check(d, int'($signed(TW_W'($urandom))));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
