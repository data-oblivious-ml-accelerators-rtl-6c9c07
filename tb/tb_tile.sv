// tb_tile: a 2x3 tile. Weights are shifted in over two cycles (bottom row
// first); then random a and d vectors are applied and every column's
// d_o = d + sum_r a[r]*B[r][c] is compared with a reference, in the same
// cycle (the tile has no registers on the data path).
module tb_tile;
  import dolma_pkg::*;
  localparam int R = 2, C = 3;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [IN_W-1:0]  a [R], a_o [R], b [C], b_o [C];
  logic signed [ACC_W-1:0] d [C], d_o [C];
  logic load;
  logic signed [IN_W-1:0]  w [R][C];

  tile #(.TILE_ROWS(R), .TILE_COLS(C)) dut (
    .clk(clk), .a_i(a), .d_i(d), .b_i(b), .b_load_i(load),
    .a_o(a_o), .d_o(d_o), .b_o(b_o));

  initial begin
    load = 0;
    for (int i = 0; i < R; i++) a[i] = 0;
    for (int j = 0; j < C; j++) begin d[j] = 0; b[j] = 0; end
    repeat (50) begin
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) w[i][j] = IN_W'($urandom);
      for (int i = R - 1; i >= 0; i--) begin
        @(negedge clk); load = 1;
        for (int j = 0; j < C; j++) b[j] = w[i][j];
      end
      @(negedge clk); load = 0;
      repeat (10) begin
        for (int i = 0; i < R; i++) a[i] = IN_W'($urandom);
        for (int j = 0; j < C; j++) d[j] = ACC_W'($urandom);
        #1;
        for (int j = 0; j < C; j++) begin
          logic signed [ACC_W-1:0] exp;
          exp = d[j];
          for (int i = 0; i < R; i++) exp += ACC_W'(a[i] * w[i][j]);
          checks++;
          if (d_o[j] !== exp || b_o[j] !== w[R-1][j]) begin
            failures++;
            $display("FAIL col %0d: %0d expected %0d", j, d_o[j], exp);
          end
        end
        for (int i = 0; i < R; i++) begin
          checks++;
          if (a_o[i] !== a[i]) failures++;
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
