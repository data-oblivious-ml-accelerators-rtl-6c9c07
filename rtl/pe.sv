// pe: one weight-stationary processing element.
//
// The PE holds one weight b. An input element a passes through unchanged to the
// right neighbour and the partial sum arriving from above leaves downwards as
// d + a*b (signed). During preload (b_load_i) the held weight is replaced by
// b_i, which comes from the PE above, so weights shift down a column one row
// per cycle. The PE is combinational apart from its weight register; the
// registers between PEs belong to the mesh. The multiply-accumulate is the
// paper's; widths and the shift-chain preload are this design's choice.
module pe
  import dolma_pkg::*;
#(
  parameter int A_W = IN_W,
  parameter int D_W = ACC_W
) (
  input  logic                  clk,
  input  logic signed [A_W-1:0] a_i,
  input  logic signed [D_W-1:0] d_i,
  input  logic signed [A_W-1:0] b_i,
  input  logic                  b_load_i,
  output logic signed [A_W-1:0] a_o,
  output logic signed [D_W-1:0] d_o,
  output logic signed [A_W-1:0] b_o
);

  logic signed [A_W-1:0] weight;

  always_ff @(posedge clk)
    if (b_load_i) weight <= b_i;

  assign a_o = a_i;
  assign b_o = weight;
  assign d_o = d_i + D_W'(a_i * weight);

endmodule
