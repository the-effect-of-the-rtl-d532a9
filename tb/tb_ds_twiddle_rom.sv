// tb_ds_twiddle_rom: self-checking test of the twiddle ROM (64-point, 32
// entries). Each entry is read through the one-cycle registered port and
// compared with cos/sin of 2*pi*r/64 scaled by 2^15: within half an LSB, and
// exactly at the points the fixed-point format pins down (r=0: 32767 and 0;
// r=8: 23170 twice; r=16: 0 and 32767 after saturation). A change of
// address must show after exactly one clock edge.
module tb_ds_twiddle_rom;
  localparam int FFT_N = 64;
  localparam int TW_W  = 16;
  localparam int AW    = $clog2(FFT_N / 2);

  logic                   clk = 0;
  logic [AW-1:0]          addr;
  logic signed [TW_W-1:0] wr, wi;
  int checks = 0, failures = 0;

  ds_twiddle_rom #(.FFT_N(FFT_N), .TW_W(TW_W)) dut (.clk(clk), .addr(addr), .wr(wr), .wi(wi));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_close(string what, int r, int got, real ideal);
    real lim;
    lim = (ideal >= 32767.0) ? 32767.0 : ideal;
    checks++;
    if ((real'(got) - lim) > 0.5 || (lim - real'(got)) > 0.5) begin
      failures++;
      $display("FAIL %s[%0d] = %0d, ideal %f", what, r, got, ideal);
    end
  endtask

  task automatic expect_exact(string what, int r, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s[%0d] = %0d, expected %0d", what, r, got, exp);
    end
  endtask

  initial begin
    real pi_c = 3.14159265358979323846;
    addr = '0;
    @(posedge clk);
    for (int r = 0; r < FFT_N / 2; r++) begin
      @(negedge clk);
      addr = AW'(r);
      @(posedge clk);
      #1;
      expect_close("wr", r, int'(wr), $cos(2.0 * pi_c * r / FFT_N) * 32768.0);
      expect_close("wi", r, int'(wi), $sin(2.0 * pi_c * r / FFT_N) * 32768.0);
      if (r == 0)  begin expect_exact("wr", r, int'(wr), 32767); expect_exact("wi", r, int'(wi), 0);     end
      if (r == 8)  begin expect_exact("wr", r, int'(wr), 23170); expect_exact("wi", r, int'(wi), 23170); end
      if (r == 16) begin expect_exact("wr", r, int'(wr), 0);     expect_exact("wi", r, int'(wi), 32767); end
    end
    // latency: address 16 is read; switching to 0 must not show before the edge
    @(negedge clk);
    addr = AW'(16);
    @(posedge clk);
    @(negedge clk);
    addr = '0;
    #1;
    expect_exact("wi before edge", 16, int'(wi), 32767);
    @(posedge clk);
    #1;
    expect_exact("wi after edge", 0, int'(wi), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
