// tb_exec_ctrl: execute controller with a 4x4 array, two scratchpad banks
// (modelled here, one-cycle read latency) and one accumulator bank.
//  * PRELOAD of B (public) with output pointer 2;
//  * COMPUTE of 6 rows with A and D in different banks, rows of domains 5, 7
//    and public: outputs must be back to back (one row per cycle);
//  * COMPUTE of 4 rows with A and D in the same bank: one row per two cycles;
//  * COMPUTE with D = 0;
//  * COMPUTE where one row's A and D tags conflict: that row is dropped and
//    row_violation_o pulses.
// Each accumulator write must hold A*B + D for its row, with the row's tag,
// at consecutive accumulator rows.
module tb_exec_ctrl;
  import dolma_pkg::*;
  localparam int DIM = 4, NB = 2, NR = 16, RW = DIM * 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cv, cr, cpre, cdz, busy, av, ar, dv, dr, wv, rviol, wviol;
  logic [15:0] ca1, ca2, crows;
  logic [0:0] ab, db;
  logic [3:0] arow, drow, wrow;
  logic [RW-1:0] rdata [NB];
  tag_t rtag [NB], wtag;
  logic [0:0] wbank;
  logic [DIM*32-1:0] wdata;

  exec_ctrl #(.DIM(DIM), .SP_BANKS(NB), .SP_ROWS(NR), .ACC_BANKS(1), .ACC_ROWS(NR)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid_i(cv), .cmd_ready_o(cr), .cmd_preload_i(cpre),
    .cmd_addr1_i(ca1), .cmd_addr2_i(ca2), .cmd_rows_i(crows), .cmd_d_zero_i(cdz), .cmd_accum_i(1'b0), .busy_o(busy),
    .rda_valid_o(av), .rda_ready_i(ar), .rda_bank_o(ab), .rda_row_o(arow),
    .rdd_valid_o(dv), .rdd_ready_i(dr), .rdd_bank_o(db), .rdd_row_o(drow),
    .sp_resp_data_i(rdata), .sp_resp_tag_i(rtag),
    .acc_wr_valid_o(wv), .acc_wr_bank_o(wbank), .acc_wr_row_o(wrow), .acc_wr_data_o(wdata),
    .acc_wr_tag_o(wtag), .acc_wr_accum_o(), .row_violation_o(rviol), .weight_violation_o(wviol));

  // scratchpad model
  logic signed [7:0] sp [NB][NR][DIM];
  tag_t sp_t [NB][NR];
  assign ar = 1'b1;
  assign dr = !(av && ab == db);
  always @(posedge clk)
    for (int b = 0; b < NB; b++) begin
      if (av && ab == 1'(b)) begin
        for (int e = 0; e < DIM; e++) rdata[b][e*8 +: 8] <= sp[b][arow][e];
        rtag[b] <= sp_t[b][arow];
      end else if (dv && dr && db == 1'(b)) begin
        for (int e = 0; e < DIM; e++) rdata[b][e*8 +: 8] <= sp[b][drow][e];
        rtag[b] <= sp_t[b][drow];
      end
    end

  // expected accumulator writes, in order
  logic signed [31:0] exp_c [64][DIM];
  tag_t exp_tag [64];
  int   exp_row [64];
  int   n_exp = 0, n_got = 0, n_viol = 0;
  int   cyc = 0, first_cyc, last_cyc;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rviol) n_viol++;

  always @(posedge clk) if (rst_n && wv) begin
    checks++;
    if (n_got >= n_exp) begin
      failures++; $display("FAIL unexpected write");
    end else begin
      logic bad;
      bad = int'(wrow) != exp_row[n_got] || wtag !== exp_tag[n_got];
      for (int e = 0; e < DIM; e++) if ($signed(wdata[e*32 +: 32]) != exp_c[n_got][e]) bad = 1;
      if (bad) begin
        failures++;
        $display("FAIL write %0d: row %0d tag %0d, expected row %0d tag %0d", n_got, wrow, wtag, exp_row[n_got], exp_tag[n_got]);
      end
    end
    if (n_got == 0) first_cyc = cyc;
    last_cyc = cyc;
    n_got++;
  end

  int outp;
  task automatic expect_rows(int ab_, int a0, int db_, int d0, int n, logic dz, int skip);
    for (int i = 0; i < n; i++) begin
      tag_t ta, td;
      if (i == skip) continue;
      ta = sp_t[ab_][a0 + i];
      td = dz ? 0 : sp_t[db_][d0 + i];
      for (int j = 0; j < DIM; j++) begin
        exp_c[n_exp][j] = dz ? 0 : 32'(sp[db_][d0 + i][j]);
        for (int k = 0; k < DIM; k++) exp_c[n_exp][j] += 32'(sp[ab_][a0 + i][k] * sp[0][k][j]);
      end
      exp_tag[n_exp] = ta | td;
      exp_row[n_exp] = outp++ % NR;
      n_exp++;
    end
  endtask

  task automatic command(logic pre, int a1, int a2, int n, logic dz);
    @(negedge clk);
    cv = 1; cpre = pre; ca1 = 16'(a1); ca2 = 16'(a2); crows = 16'(n); cdz = dz;
    @(posedge clk);
    while (!cr) @(posedge clk);
    @(negedge clk);
    cv = 0;
  endtask

  task automatic finish_and_check_spacing(int n, int spacing);
    while (busy) @(negedge clk);
    checks++;
    if (n_got != n_exp) begin failures++; $display("FAIL %0d writes, expected %0d", n_got, n_exp); end
    checks++;
    if (last_cyc - first_cyc != spacing * (n - 1)) begin
      failures++; $display("FAIL %0d rows took %0d cycles", n, last_cyc - first_cyc);
    end
    n_got = 0; n_exp = 0;
  endtask

  initial begin
    cv = 0; cpre = 0; ca1 = 0; ca2 = 0; crows = 0; cdz = 0;
    foreach (sp[b, r, e]) sp[b][r][e] = 8'($urandom);
    foreach (sp_t[b, r]) sp_t[b][r] = 0;
    sp_t[0][4] = 5; sp_t[0][5] = 5; sp_t[0][6] = 7; sp_t[0][7] = 7;
    sp_t[1][0] = 5; sp_t[1][3] = 7;
    sp_t[0][12] = 7;   // D row that conflicts with A row 4 (tag 5)
    repeat (2) @(negedge clk);
    rst_n = 1;
    // preload B from bank 0 rows 0..3, outputs from accumulator row 2
    command(1, 0, 2, 0, 0);
    outp = 2;
    // A = bank 0 rows 4..9, D = bank 1 rows 0..5
    expect_rows(0, 4, 1, 0, 6, 0, -1);
    command(0, 4, NR + 0, 6, 0);
    finish_and_check_spacing(6, 1);
    // same bank: A rows 4..7, D rows 8..11 of bank 0 (tags 0)
    expect_rows(0, 4, 0, 8, 4, 0, -1);
    command(0, 4, 8, 4, 0);
    finish_and_check_spacing(4, 2);
    // D = 0
    expect_rows(0, 6, 0, 0, 3, 1, -1);
    command(0, 6, 0, 3, 1);
    finish_and_check_spacing(3, 1);
    // A rows 2..5 of bank 0, D rows 10..13 of bank 0: row 2 (A tag 5 row 4, D tag 7 row 12) dropped
    expect_rows(0, 2, 0, 10, 4, 0, 2);
    command(0, 2, 10, 4, 0);
    while (busy) @(negedge clk);
    checks++;
    if (n_got != n_exp || n_viol != 1) begin
      failures++; $display("FAIL violation case: %0d writes, %0d violations", n_got, n_viol);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
