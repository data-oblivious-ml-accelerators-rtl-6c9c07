// dift_mesh: the systolic array with row-granular information-flow tracking.
//
// Instead of tracking taint in every PE, the tag of each output row is worked
// out before the row's inputs enter the array and is carried beside the array
// in a parallel queue of equal latency:
//   * weight tag: while B is preloaded (b_load_i), the tags of all B rows are
//     combined into w_tag; b_start_i clears it at the start of a preload. Two
//     different non-zero B tags raise weight_violation_o and poison the
//     weights until the next preload, so no row computed with them is emitted.
//   * row tag: for each input row the tags of the a row, the d row and w_tag
//     go through tag_check. The OR becomes the output tag; if two differ, the
//     row is dropped (its valid never reaches the output) and
//     row_violation_o pulses.
// Interface: present a row with row_valid_i; LATENCY = MESH_ROWS+MESH_COLS-1
// cycles later out_valid_o, c_row_o and c_tag_o show the result
// c = a*B + d. Rows may be presented back to back, one per cycle, each with its
// own tag, so rows of different domains share the array without mixing.
// Preloading must only be done when no row is in flight (the caller waits
// LATENCY cycles). Policy and structure follow the paper; the weight poison
// and the valid bit in the queue are this design's choices.
module dift_mesh
  import dolma_pkg::*;
#(
  parameter int DIM       = 32,
  parameter int TILE_ROWS = 1,
  parameter int TILE_COLS = 1,
  localparam int MESH_ROWS = DIM / TILE_ROWS,
  localparam int MESH_COLS = DIM / TILE_COLS,
  localparam int LATENCY   = MESH_ROWS + MESH_COLS - 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight preload
  input  logic                    b_start_i,
  input  logic                    b_load_i,
  input  logic signed [IN_W-1:0]  b_row_i [DIM],
  input  tag_t                    b_tag_i,
  // input rows
  input  logic                    row_valid_i,
  input  logic signed [IN_W-1:0]  a_row_i [DIM],
  input  tag_t                    a_tag_i,
  input  logic signed [ACC_W-1:0] d_row_i [DIM],
  input  tag_t                    d_tag_i,
  // output rows
  output logic                    out_valid_o,
  output logic signed [ACC_W-1:0] c_row_o [DIM],
  output tag_t                    c_tag_o,
  // policy violations (one-cycle pulses)
  output logic                    row_violation_o,
  output logic                    weight_violation_o
);

  tag_t w_tag;
  logic w_bad;
  tag_t w_next;
  logic w_conflict;

  tag_check #(.N(2)) u_wchk (
    .tags_i      ({b_tag_i, (b_start_i ? tag_t'('0) : w_tag)}),
    .tag_o       (w_next),
    .violation_o (w_conflict)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      w_tag <= '0;
      w_bad <= 1'b0;
    end else if (b_load_i) begin
      w_tag <= w_next;
      w_bad <= (b_start_i ? 1'b0 : w_bad) | w_conflict;
    end else if (b_start_i) begin
      w_tag <= '0;
      w_bad <= 1'b0;
    end

  assign weight_violation_o = b_load_i && w_conflict;

  // row tag, computed before the row enters the array
  tag_t row_tag;
  logic row_conflict;
  tag_check #(.N(3)) u_rchk (
    .tags_i      ({a_tag_i, d_tag_i, w_tag}),
    .tag_o       (row_tag),
    .violation_o (row_conflict)
  );

  assign row_violation_o = row_valid_i && row_conflict;

  tag_queue #(.LATENCY(LATENCY)) u_tq (
    .clk     (clk),
    .rst_n   (rst_n),
    .valid_i (row_valid_i && !row_conflict && !w_bad),
    .tag_i   (row_tag),
    .valid_o (out_valid_o),
    .tag_o   (c_tag_o)
  );

  mesh #(
    .MESH_ROWS (MESH_ROWS), .MESH_COLS (MESH_COLS),
    .TILE_ROWS (TILE_ROWS), .TILE_COLS (TILE_COLS)
  ) u_mesh (
    .clk      (clk),
    .a_i      (a_row_i),
    .d_i      (d_row_i),
    .b_i      (b_row_i),
    .b_load_i (b_load_i),
    .c_o      (c_row_o)
  );

endmodule
