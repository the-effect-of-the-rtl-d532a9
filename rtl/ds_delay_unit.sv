// ds_delay_unit: the delay unit on the A operand of the butterfly.
//
// A chain of DEPTH registers that holds A back while B is being multiplied by
// the twiddle, so that both reach the adders in the same cycle. The source
// draws the delay unit but gives neither its depth nor its reset; the top
// sets DEPTH to the length of the multiplier stage (one cycle), and the
// registers clear to zero on a synchronous active-low reset.
//
// Interface: d in, q out, WIDTH bits. Timing: q(t) = d(t - DEPTH cycles);
// DEPTH = 0 makes it a wire.
module ds_delay_unit #(
  parameter int WIDTH = ds_pkg::DATA_W,
  parameter int DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [DEPTH-1:0][WIDTH-1:0] pipe;
    always_ff @(posedge clk) begin
      if (!rst_n) pipe <= '0;
      else begin
        pipe[0] <= d;
        for (int i = 1; i < DEPTH; i++) pipe[i] <= pipe[i-1];
      end
    end
    assign q = pipe[DEPTH-1];
  end

endmodule
