// delay_line: a W-bit shift register of DEPTH stages (DEPTH = 0 is a wire).
//
// Used for the input skew and output deskew registers of the systolic array
// and for the parallel tag queue. No reset: callers that need a defined value
// after reset (the tag queue's valid bits) use their own reset.
module delay_line #(
  parameter int W     = 8,
  parameter int DEPTH = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d_i,
  output logic [W-1:0] q_o
);

  if (DEPTH == 0) begin : g_wire
    assign q_o = d_i;
  end else begin : g_regs
    logic [W-1:0] stage [DEPTH];
    always_ff @(posedge clk) begin
      stage[0] <= d_i;
      for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
    assign q_o = stage[DEPTH-1];
  end

endmodule
