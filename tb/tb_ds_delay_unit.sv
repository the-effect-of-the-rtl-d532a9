// tb_ds_delay_unit: self-checking test of the delay unit. Two instances,
// depth 1 (as used in the butterfly) and depth 3, get random data every
// cycle; each output is compared with the input recorded DEPTH cycles
// earlier, and both are checked to read zero right after reset.
module tb_ds_delay_unit;
  localparam int WIDTH = 20;

  logic             clk = 0;
  logic             rst_n = 0;
  logic [WIDTH-1:0] d, q1, q3;
  logic [WIDTH-1:0] hist[$];
  int checks = 0, failures = 0;
  int cycle = 0;

  ds_delay_unit #(.WIDTH(WIDTH), .DEPTH(1)) dut1 (.clk(clk), .rst_n(rst_n), .d(d), .q(q1));
  ds_delay_unit #(.WIDTH(WIDTH), .DEPTH(3)) dut3 (.clk(clk), .rst_n(rst_n), .d(d), .q(q3));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '1;
    repeat (2) @(posedge clk);
    #1;
    checks += 2;
    if (q1 != '0 || q3 != '0) begin
      failures++;
      $display("FAIL after reset q1=%h q3=%h", q1, q3);
    end
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      d = WIDTH'($urandom);
      hist.push_front(d);
      @(posedge clk);
      #1;
      if (hist.size() >= 1) begin
        checks++;
        if (q1 != hist[0]) begin
          failures++;
          $display("FAIL depth 1 at %0d: q=%h expected %h", i, q1, hist[0]);
        end
      end
      if (hist.size() >= 3) begin
        checks++;
        if (q3 != hist[2]) begin
          failures++;
          $display("FAIL depth 3 at %0d: q=%h expected %h", i, q3, hist[2]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
