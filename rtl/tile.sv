// tile: a combinational TILE_ROWS x TILE_COLS block of processing elements.
//
// Elements of a enter on the left edge (one per PE row) and travel right through
// all columns in the same cycle; partial sums enter on the top edge (one per PE
// column) and leave at the bottom after every row has added its a*b. Weights
// shift down the columns when b_load_i is high, entering at the top as b_i.
// There is no register on the data path inside a tile; the mesh registers the
// tile outputs. Default 1x1, the tile size implied by the paper's 2x2 example.
module tile
  import dolma_pkg::*;
#(
  parameter int TILE_ROWS = 1,
  parameter int TILE_COLS = 1
) (
  input  logic                     clk,
  input  logic signed [IN_W-1:0]   a_i [TILE_ROWS],
  input  logic signed [ACC_W-1:0]  d_i [TILE_COLS],
  input  logic signed [IN_W-1:0]   b_i [TILE_COLS],
  input  logic                     b_load_i,
  output logic signed [IN_W-1:0]   a_o [TILE_ROWS],
  output logic signed [ACC_W-1:0]  d_o [TILE_COLS],
  output logic signed [IN_W-1:0]   b_o [TILE_COLS]
);

  // Each PE's outputs are declared in its own generate scope so that the
  // combinational chains through the tile are separate nets.
  for (genvar r = 0; r < TILE_ROWS; r++) begin : g_r
    for (genvar c = 0; c < TILE_COLS; c++) begin : g_c
      logic signed [IN_W-1:0]  a_in, a_out, b_in, b_out;
      logic signed [ACC_W-1:0] d_in, d_out;
      if (c == 0) begin : g_al
        assign a_in = a_i[r];
      end else begin : g_an
        assign a_in = g_r[r].g_c[c-1].a_out;
      end
      if (r == 0) begin : g_dt
        assign d_in = d_i[c];
        assign b_in = b_i[c];
      end else begin : g_dn
        assign d_in = g_r[r-1].g_c[c].d_out;
        assign b_in = g_r[r-1].g_c[c].b_out;
      end
      pe u_pe (
        .clk      (clk),
        .a_i      (a_in),
        .d_i      (d_in),
        .b_i      (b_in),
        .b_load_i (b_load_i),
        .a_o      (a_out),
        .d_o      (d_out),
        .b_o      (b_out)
      );
    end
  end

  for (genvar r = 0; r < TILE_ROWS; r++) begin : g_ao
    assign a_o[r] = g_r[r].g_c[TILE_COLS-1].a_out;
  end
  for (genvar c = 0; c < TILE_COLS; c++) begin : g_do
    assign d_o[c] = g_r[TILE_ROWS-1].g_c[c].d_out;
    assign b_o[c] = g_r[TILE_ROWS-1].g_c[c].b_out;
  end

endmodule
