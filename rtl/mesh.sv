// mesh: the weight-stationary systolic array, MESH_ROWS x MESH_COLS tiles.
//
// Computes one output row c = a*B + d per input row, with B held in the PEs.
// A row is presented unskewed on a_i/d_i; element k of a enters array row k
// and element j of d enters array column j. Skew registers delay tile row r by
// r cycles (a) and tile column c by c cycles (d); between tiles the a values
// and partial sums are registered, so a value crosses one tile per cycle; the
// bottom outputs are registered and then deskewed (column c by MESH_COLS-1-c
// cycles) so that a whole output row appears at once on c_o exactly
// LATENCY = MESH_ROWS + MESH_COLS - 1 cycles after its inputs (3 cycles for a
// 2x2 array: in cycle 1, out in cycle 4). The array runs every cycle and
// carries no valid or tag; those travel in the parallel tag queue.
// Weights: while b_load_i is high, B rows presented on b_i shift down every
// column, one row per cycle; after DIM cycles with rows DIM-1 .. 0 PE row k
// holds row k of B.
// The tile/mesh structure and the skew/deskew follow the paper's description
// of Gemmini; register placement and the preload chain are this design's.
module mesh
  import dolma_pkg::*;
#(
  parameter int MESH_ROWS = 32,
  parameter int MESH_COLS = 32,
  parameter int TILE_ROWS = 1,
  parameter int TILE_COLS = 1,
  localparam int ROWS = MESH_ROWS * TILE_ROWS,  // inner (k) dimension
  localparam int COLS = MESH_COLS * TILE_COLS   // output columns
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  a_i [ROWS],
  input  logic signed [ACC_W-1:0] d_i [COLS],
  input  logic signed [IN_W-1:0]  b_i [COLS],
  input  logic                    b_load_i,
  output logic signed [ACC_W-1:0] c_o [COLS]
);

  // Each tile's inputs and outputs are declared in its own generate scope so
  // that the per-column weight chains are separate nets.
  for (genvar r = 0; r < MESH_ROWS; r++) begin : g_r
    for (genvar c = 0; c < MESH_COLS; c++) begin : g_c
      logic signed [IN_W-1:0]  a_in  [TILE_ROWS];
      logic signed [IN_W-1:0]  a_out [TILE_ROWS];
      logic signed [ACC_W-1:0] d_in  [TILE_COLS];
      logic signed [ACC_W-1:0] d_out [TILE_COLS];
      logic signed [IN_W-1:0]  b_in  [TILE_COLS];
      logic signed [IN_W-1:0]  b_out [TILE_COLS];

      if (c == 0) begin : g_askew
        // input skew: tile row r is delayed r cycles
        for (genvar t = 0; t < TILE_ROWS; t++) begin : g_t
          delay_line #(.W(IN_W), .DEPTH(r)) u_dl (
            .clk (clk), .d_i (a_i[r*TILE_ROWS+t]), .q_o (a_in[t]));
        end
      end else begin : g_ah
        // register from the left neighbour
        always_ff @(posedge clk) a_in <= g_r[r].g_c[c-1].a_out;
      end

      if (r == 0) begin : g_dskew
        // input skew: tile column c is delayed c cycles
        for (genvar t = 0; t < TILE_COLS; t++) begin : g_t
          delay_line #(.W(ACC_W), .DEPTH(c)) u_dl (
            .clk (clk), .d_i (d_i[c*TILE_COLS+t]), .q_o (d_in[t]));
          assign b_in[t] = b_i[c*TILE_COLS+t];
        end
      end else begin : g_dv
        // register from the tile above; weights chain through unregistered
        always_ff @(posedge clk) d_in <= g_r[r-1].g_c[c].d_out;
        assign b_in = g_r[r-1].g_c[c].b_out;
      end

      tile #(.TILE_ROWS(TILE_ROWS), .TILE_COLS(TILE_COLS)) u_tile (
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

  // bottom output register and deskew: column c waits MESH_COLS-1-c cycles
  for (genvar c = 0; c < MESH_COLS; c++) begin : g_out
    logic signed [ACC_W-1:0] bot [TILE_COLS];
    always_ff @(posedge clk) bot <= g_r[MESH_ROWS-1].g_c[c].d_out;
    for (genvar t = 0; t < TILE_COLS; t++) begin : g_t
      delay_line #(.W(ACC_W), .DEPTH(MESH_COLS - 1 - c)) u_dl (
        .clk (clk), .d_i (bot[t]), .q_o (c_o[c*TILE_COLS+t]));
    end
  end

endmodule
