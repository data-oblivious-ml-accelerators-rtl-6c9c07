// tb_dift_mesh: the systolic array with row tags, DIM = 4 (latency 7).
//  1. B preloaded with tags {0, 0, 0, 0}: rows of different domains (A tagged
//     5 then 7, D tagged, public) stream back to back; each output row must
//     have the right value and the OR of its tags, LATENCY cycles later.
//  2. A row whose A and D tags differ (5 vs 7) must be dropped and flagged.
//  3. B preloaded with tag 5 on one row: every output row is tagged 5, and a
//     row tagged 7 is a violation.
//  4. B rows tagged 5 and 7: weight violation, and no output row at all.
module tb_dift_mesh;
  import dolma_pkg::*;
  localparam int D = 4, LAT = 2 * D - 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bs, bl, rv, ov, rviol, wviol;
  logic signed [IN_W-1:0]  b [D], a [D];
  logic signed [ACC_W-1:0] d [D], c [D];
  tag_t bt, at, dt, ct;
  logic signed [IN_W-1:0]  w [D][D];

  dift_mesh #(.DIM(D)) dut (
    .clk(clk), .rst_n(rst_n), .b_start_i(bs), .b_load_i(bl), .b_row_i(b), .b_tag_i(bt),
    .row_valid_i(rv), .a_row_i(a), .a_tag_i(at), .d_row_i(d), .d_tag_i(dt),
    .out_valid_o(ov), .c_row_o(c), .c_tag_o(ct),
    .row_violation_o(rviol), .weight_violation_o(wviol));

  // expected outputs, indexed by the cycle they must appear in
  typedef struct { logic v; tag_t t; logic signed [ACC_W-1:0] c [D]; } exp_t;
  exp_t exp_at [int];
  int cyc = 0;
  int n_rviol = 0, n_wviol = 0, n_out = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rviol) n_rviol++;
    if (wviol) n_wviol++;
  end

  // checker: compare outputs every cycle with the expectation (or no output)
  always @(negedge clk) if (rst_n) begin
    if (exp_at.exists(cyc)) begin
      checks++;
      if (!ov || ct !== exp_at[cyc].t) begin
        failures++;
        $display("FAIL cycle %0d: valid %0b tag %0d expected tag %0d", cyc, ov, ct, exp_at[cyc].t);
      end
      for (int j = 0; j < D; j++) begin
        checks++;
        if (c[j] !== exp_at[cyc].c[j]) begin
          failures++;
          $display("FAIL cycle %0d col %0d: %0d expected %0d", cyc, j, c[j], exp_at[cyc].c[j]);
        end
      end
      n_out++;
    end else if (ov) begin
      failures++; checks++;
      $display("FAIL cycle %0d: unexpected output row", cyc);
    end
  end

  task automatic preload(tag_t tags [D]);
    foreach (w[i, j]) w[i][j] = IN_W'($urandom);
    for (int i = D - 1; i >= 0; i--) begin
      bs = (i == D - 1); bl = 1;
      foreach (b[j]) b[j] = w[i][j];
      bt = tags[i];
      @(negedge clk);
    end
    bs = 0; bl = 0;
  endtask

  // present one row; expect it (or not) LAT cycles later
  task automatic row(tag_t ta, tag_t td, logic expect_out, tag_t et, logic expect_viol = 0);
    exp_t e;
    rv = 1; at = ta; dt = td;
    foreach (a[i]) a[i] = IN_W'($urandom);
    foreach (d[j]) d[j] = ACC_W'($urandom_range(0, 200)) - 100;
    e.v = 1; e.t = et;
    foreach (e.c[j]) begin
      e.c[j] = d[j];
      for (int i = 0; i < D; i++) e.c[j] += ACC_W'(a[i] * w[i][j]);
    end
    if (expect_out) exp_at[cyc + LAT] = e;
    #1;
    checks++;
    if (rviol !== expect_viol) begin
      failures++;
      $display("FAIL row violation flag %0b", rviol);
    end
    @(negedge clk);
    rv = 0;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    tag_t z [D], t5 [D], mix [D];
    bs = 0; bl = 0; rv = 0; bt = 0; at = 0; dt = 0;
    foreach (a[i]) begin a[i] = 0; b[i] = 0; d[i] = 0; end
    foreach (z[i]) begin z[i] = 0; t5[i] = (i == 2) ? 5 : 0; mix[i] = (i == 0) ? 7 : (i == 3) ? 5 : 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. public weights, domains back to back
    preload(z);
    row(5, 0, 1, 5);
    row(7, 7, 1, 7);
    row(0, 0, 1, 0);
    row(0, 9, 1, 9);
    // 2. mixing A and D
    row(5, 7, 0, 0, 1);
    row(5, 5, 1, 5);
    idle(LAT + 2);
    // 3. blinded weights
    preload(t5);
    row(0, 0, 1, 5);
    row(5, 0, 1, 5);
    row(7, 0, 0, 0, 1);
    idle(LAT + 2);
    checks++;
    if (n_rviol != 2 + 0) begin failures++; $display("FAIL row violations %0d", n_rviol); end
    // 4. weights of two domains
    preload(mix);
    checks++;
    if (n_wviol != 1) begin failures++; $display("FAIL weight violations %0d", n_wviol); end
    row(0, 0, 0, 0);
    row(5, 5, 0, 0, 1);  // also conflicts with the combined weight tag
    idle(LAT + 2);
    // recovers with a clean preload
    preload(z);
    row(3, 0, 1, 3);
    idle(LAT + 2);
    checks++;
    if (n_out != 8) begin failures++; $display("FAIL %0d output rows", n_out); end
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
