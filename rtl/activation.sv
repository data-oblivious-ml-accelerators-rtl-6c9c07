// activation: the activation and output-narrowing stage of the move-out path.
//
// For each of the DIM 32-bit elements of a row it first scales the value down
// by 2^shift_i (arithmetic right shift, rounded half up, computed on 33 bits
// so the rounding cannot overflow), applies either the identity or ReLU
// (relu_i), then saturates the result to a signed 8-bit value. All steps are
// purely combinational and take the same time for every value, so
// no timing depends on the (possibly blinded) data, and the row's tag is
// passed through unchanged. ReLU as combinational logic with plain tag
// propagation follows the paper; the power-of-two scale and the saturation
// to 8 bits are this design's (a simple form of the output scaling that an
// 8-bit network needs between layers).
module activation
  import dolma_pkg::*;
#(
  parameter int DIM = 32
) (
  input  logic                    relu_i,
  input  logic [4:0]              shift_i,
  input  logic signed [ACC_W-1:0] row_i [DIM],
  input  tag_t                    tag_i,
  output logic signed [IN_W-1:0]  row_o [DIM],
  output tag_t                    tag_o
);

  localparam logic signed [ACC_W:0] MAXV = (ACC_W+1)'((1 << (IN_W - 1)) - 1);
  localparam logic signed [ACC_W:0] MINV = -(ACC_W+1)'(1 << (IN_W - 1));

  always_comb
    for (int i = 0; i < DIM; i++) begin
      logic signed [ACC_W:0] v, half;
      half = '0;
      if (shift_i != '0) half[shift_i - 1'b1] = 1'b1;
      v = ((ACC_W+1)'(row_i[i]) + half) >>> shift_i;
      if (relu_i && v < 0) v = '0;
      if (v > MAXV)      row_o[i] = IN_W'(MAXV);
      else if (v < MINV) row_o[i] = IN_W'(MINV);
      else               row_o[i] = IN_W'(v);
    end

  assign tag_o = tag_i;

endmodule
