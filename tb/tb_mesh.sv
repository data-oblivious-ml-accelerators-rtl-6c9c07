// tb_mesh: a 3x2 mesh of 2x1 tiles (6 inner rows, 2 output columns). B is
// shifted in (last row first), then random rows of a and d are presented
// back to back; each output row must equal a*B + d exactly
// LATENCY = MESH_ROWS + MESH_COLS - 1 = 4 cycles after its inputs.
// A second mesh of 2x2 single-PE tiles, the paper's worked example, must show
// its output row 3 cycles after the inputs (in cycle 4 for inputs in cycle 1).
module tb_mesh;
  import dolma_pkg::*;
  localparam int MR = 3, MC = 2, TR = 2, TC = 1;
  localparam int R = MR * TR, C = MC * TC, LAT = MR + MC - 1;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [IN_W-1:0]  a [R], b [C];
  logic signed [ACC_W-1:0] d [C], c_out [C];
  logic load;
  logic signed [IN_W-1:0]  w [R][C];
  logic signed [ACC_W-1:0] expm [48][C];

  mesh #(.MESH_ROWS(MR), .MESH_COLS(MC), .TILE_ROWS(TR), .TILE_COLS(TC)) dut (
    .clk(clk), .a_i(a), .d_i(d), .b_i(b), .b_load_i(load), .c_o(c_out));

  // 2x2 example
  logic signed [IN_W-1:0]  a2 [2], b2 [2];
  logic signed [ACC_W-1:0] d2 [2], c2 [2];
  logic load2;
  mesh #(.MESH_ROWS(2), .MESH_COLS(2)) dut2 (
    .clk(clk), .a_i(a2), .d_i(d2), .b_i(b2), .b_load_i(load2), .c_o(c2));

  initial begin
    load = 0; load2 = 0;
    foreach (a[i]) a[i] = 0;
    foreach (d[j]) begin d[j] = 0; b[j] = 0; end
    foreach (a2[i]) begin a2[i] = 0; b2[i] = 0; d2[i] = 0; end
    // weights
    foreach (w[i, j]) w[i][j] = IN_W'($urandom);
    for (int i = R - 1; i >= 0; i--) begin
      @(negedge clk); load = 1;
      foreach (b[j]) b[j] = w[i][j];
    end
    @(negedge clk); load = 0;
    // stream 40 rows back to back, then idle until all are out
    for (int t = 0; t < 40 + LAT - 1; t++) begin
      if (t < 40) begin
        foreach (a[i]) a[i] = IN_W'($urandom);
        foreach (d[j]) d[j] = ACC_W'($urandom_range(0, 2000)) - 1000;
        for (int j = 0; j < C; j++) begin
          expm[t][j] = d[j];
          for (int i = 0; i < R; i++) expm[t][j] += ACC_W'(a[i] * w[i][j]);
        end
      end
      @(posedge clk); #1;
      if (t >= LAT - 1) begin
        for (int j = 0; j < C; j++) begin
          checks++;
          if (c_out[j] !== expm[t - LAT + 1][j]) begin
            failures++;
            $display("FAIL row %0d col %0d: %0d expected %0d", t - LAT + 1, j, c_out[j], expm[t - LAT + 1][j]);
          end
        end
      end
      @(negedge clk);
    end

    // 2x2: weights [[1,2],[3,4]], a = [5,6], d = [7,8] -> c = [30, 42]
    @(negedge clk); load2 = 1; b2[0] = 3; b2[1] = 4;
    @(negedge clk); b2[0] = 1; b2[1] = 2;
    @(negedge clk); load2 = 0;
    a2[0] = 5; a2[1] = 6; d2[0] = 7; d2[1] = 8;          // cycle 1
    @(negedge clk); a2[0] = 0; a2[1] = 0; d2[0] = 0; d2[1] = 0;  // cycle 2
    @(negedge clk);                                       // cycle 3
    checks++;
    if (c2[0] == 30 && c2[1] == 42) begin
      failures++;
      $display("FAIL 2x2 row appeared before cycle 4");
    end
    @(negedge clk);                                       // cycle 4
    checks++;
    if (c2[0] !== 30 || c2[1] !== 42) begin
      failures++;
      $display("FAIL 2x2 cycle 4: %0d %0d", c2[0], c2[1]);
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
