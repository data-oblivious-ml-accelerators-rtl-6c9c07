// tb_dolma_top: end-to-end run of the accelerator (DIM 16, 16 KiB scratchpad,
// 8 KiB accumulator) against a tagged memory model.
// Part 1, a clean job: A (20 rows: rows of client 5, of client 9, and rows
// where only D is blinded, tag 3), B (public weights) and D are moved in,
// B is preloaded, all 20 rows are computed back to back, and the result is
// moved out with ReLU. Then a compute with A and D in the same bank, one
// with D = 0, a move-out without ReLU and scaled by 1/2, and a second pass over four rows
// that adds its outputs to the accumulator rows (partial sums over K). Every result byte and every
// result tag in memory is compared with a reference computed here.
// Part 2, one fault per reset: blinded command operand (and no memory
// write afterwards), a row whose two beats come from different domains, A
// and D rows of different domains, weights of two domains, accumulating rows
// of one domain onto accumulator rows of another, and a blinded page-table
// entry. Each must set the matching fault cause.
// Every mechanism is counted and must have happened at least once.
module tb_dolma_top;
  import dolma_pkg::*;
  localparam int DIM = 16, SP_KB = 16, ACC_KB = 8;
  localparam int SP_ROWS = SP_KB * 1024 / (4 * DIM);      // 256 rows per bank
  localparam int ROWB = DIM;                              // bytes per input row
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cv, cr, busy, fault;
  fault_e cause;
  logic [6:0] cf;
  logic [XLEN-1:0] c1, c2;
  tag_t t1, t2;
  logic qv, qr, pv, pr, wv, wr;
  logic [XLEN-1:0] qa, wa;
  logic [63:0] pd, wd;
  tag_t pt, wt;
  logic ptwv, tlbv;
  logic [XLEN-1:0] pte, tlbpte;
  tag_t ptet;

  dolma_top #(.DIM(DIM), .SP_KB(SP_KB), .ACC_KB(ACC_KB)) u_dut (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid_i(cv), .cmd_ready_o(cr), .cmd_funct_i(cf), .cmd_rs1_i(c1), .cmd_rs1_tag_i(t1),
    .cmd_rs2_i(c2), .cmd_rs2_tag_i(t2), .busy_o(busy), .fault_o(fault), .fault_cause_o(cause),
    .mem_rd_req_valid_o(qv), .mem_rd_req_ready_i(qr), .mem_rd_req_addr_o(qa),
    .mem_rd_resp_valid_i(pv), .mem_rd_resp_ready_o(pr), .mem_rd_resp_data_i(pd), .mem_rd_resp_tag_i(pt),
    .mem_wr_req_valid_o(wv), .mem_wr_req_ready_i(wr), .mem_wr_req_addr_o(wa),
    .mem_wr_req_data_o(wd), .mem_wr_req_tag_o(wt),
    .ptw_valid_i(ptwv), .ptw_pte_i(pte), .ptw_tag_i(ptet),
    .tlb_refill_valid_o(tlbv), .tlb_refill_pte_o(tlbpte));

  tagged_mem_model u_mem (
    .clk(clk), .rd_req_valid_i(qv), .rd_req_ready_o(qr), .rd_req_addr_i(qa),
    .rd_resp_valid_o(pv), .rd_resp_ready_i(pr), .rd_resp_data_o(pd), .rd_resp_tag_o(pt),
    .wr_req_valid_i(wv), .wr_req_ready_o(wr), .wr_req_addr_i(wa), .wr_req_data_i(wd),
    .wr_req_tag_i(wt));

  // ------------------------------------------------------------ matrices
  localparam int MA = 0, MB = 1, MD = 2;
  logic signed [7:0] mat [3][32][DIM];
  tag_t              mtag [3][32];

  task automatic put_matrix(int m, longint base, int n);
    for (int r = 0; r < n; r++)
      for (int b = 0; b < ROWB / 8; b++) begin
        logic [63:0] d;
        for (int k = 0; k < 8; k++) d[k*8 +: 8] = mat[m][r][b*8 + k];
        u_mem.poke(base + r * ROWB + b * 8, d, mtag[m][r]);
      end
  endtask

  // ------------------------------------------------------------ mechanisms
  int n_partial = 0, n_fwd = 0, n_slow_rows = 0, n_switch = 0, n_relu = 0, n_sat = 0;
  int n_dtag = 0, n_accum = 0, n_overlap = 0, n_faults [8];
  tag_t last_out_tag = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.g_sp[0].u_bank.s2_wr && !u_dut.g_sp[0].u_bank.full_row) n_partial++;
    if (u_dut.g_sp[0].u_bank.fwd_hit || u_dut.g_sp[1].u_bank.fwd_hit ||
        u_dut.g_sp[2].u_bank.fwd_hit || u_dut.g_sp[3].u_bank.fwd_hit) n_fwd++;
    if (u_dut.u_exec.push && !u_dut.u_exec.a_q) n_slow_rows++;
    if (u_dut.exw_valid && u_dut.exw_accum) n_accum++;
    if (u_dut.ex_busy && (u_dut.ld_busy || u_dut.st_busy)) n_overlap++;
    if (u_dut.exw_valid) begin
      if (u_dut.exw_tag != last_out_tag && u_dut.exw_tag != 0 && last_out_tag != 0) n_switch++;
      last_out_tag = u_dut.exw_tag;
    end
  end
  always @(posedge clk) if (rst_n && fault && !$past(fault)) n_faults[int'(cause)]++;

  // ------------------------------------------------------------ commands
  task automatic cmd(logic [6:0] f, logic [XLEN-1:0] r1, logic [XLEN-1:0] r2,
                     tag_t g1 = 0, tag_t g2 = 0);
    @(negedge clk);
    cv = 1; cf = f; c1 = r1; c2 = r2; t1 = g1; t2 = g2;
    @(posedge clk);
    while (!cr) @(posedge clk);
    @(negedge clk);
    cv = 0; t1 = 0; t2 = 0;
  endtask

  task automatic wait_idle();
    int quiet = 0;
    while (quiet < 4) begin
      @(negedge clk);
      quiet = busy ? 0 : quiet + 1;
    end
  endtask

  task automatic do_reset();
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    last_out_tag = 0;
    while (!u_dut.sys_ready) @(negedge clk);
  endtask

  function automatic logic [XLEN-1:0] rows_field(int addr, int n);
    return XLEN'(addr) | (XLEN'(n) << 16);
  endfunction

  // expected output of row i of a compute (A row a0+i, D row d0+i or zero)
  task automatic check_out(longint base, int a0, int d0, int n, logic dz, logic relu, int sh = 0);
    for (int i = 0; i < n; i++) begin
      tag_t et;
      et = mtag[MA][a0 + i] | (dz ? tag_t'(0) : mtag[MD][d0 + i]);
      if (mtag[MA][a0 + i] == 0 && !dz && mtag[MD][d0 + i] != 0) n_dtag++;
      for (int b = 0; b < ROWB / 8; b++) begin
        logic [63:0] e;
        for (int k = 0; k < 8; k++) begin
          int j, v;
          j = b * 8 + k;
          v = dz ? 0 : int'(mat[MD][d0 + i][j]);
          for (int q = 0; q < DIM; q++) v += int'(mat[MA][a0 + i][q]) * int'(mat[MB][q][j]);
          if (sh != 0) v = (v + (1 << (sh - 1))) >>> sh;
          if (relu && v < 0) begin v = 0; n_relu++; end
          if (v > 127) begin v = 127; n_sat++; end
          if (v < -128) begin v = -128; n_sat++; end
          e[k*8 +: 8] = 8'(v);
        end
        checks++;
        if (u_mem.peek(base + i * ROWB + b * 8) !== e || u_mem.peek_tag(base + i * ROWB + b * 8) !== et) begin
          failures++;
          $display("FAIL out row %0d beat %0d: %h tag %0d, expected %h tag %0d", i, b,
                   u_mem.peek(base + i * ROWB + b * 8), u_mem.peek_tag(base + i * ROWB + b * 8), e, et);
        end
      end
    end
  endtask

  task automatic expect_fault(fault_e c, string what);
    wait_idle();
    checks++;
    if (!fault || cause != c) begin
      failures++; $display("FAIL %s: fault %0b cause %0d", what, fault, cause);
    end
  endtask

  localparam longint A_AT = 64'h1_0000, B_AT = 64'h2_0000, D_AT = 64'h3_0000;
  localparam longint O1 = 64'h4_0000, O2 = 64'h5_0000, O3 = 64'h6_0000, O4 = 64'h7_0000;

  initial begin
    int w0;
    cv = 0; cf = 0; c1 = 0; c2 = 0; t1 = 0; t2 = 0; ptwv = 0; pte = 0; ptet = 0;
    foreach (n_faults[i]) n_faults[i] = 0;
    foreach (mat[m, r, j]) mat[m][r][j] = 8'($urandom_range(0, 30)) - 15;
    foreach (mtag[m, r]) mtag[m][r] = 0;
    for (int r = 0; r < 10; r++)  begin mtag[MA][r] = 5; mtag[MD][r] = 5; end
    for (int r = 10; r < 18; r++) mtag[MA][r] = 9;
    for (int r = 15; r < 18; r++) mtag[MD][r] = 9;
    for (int r = 18; r < 20; r++) mtag[MD][r] = 3;
    put_matrix(MA, A_AT, 20);
    put_matrix(MB, B_AT, DIM);
    put_matrix(MD, D_AT, 20);
    do_reset();

    // ---------------- part 1: a clean job
    cmd(FN_MVIN, A_AT, rows_field(0, 20));                    // A -> bank 0
    cmd(FN_MVIN, B_AT, rows_field(SP_ROWS, DIM));             // B -> bank 1
    cmd(FN_MVIN, D_AT, rows_field(2 * SP_ROWS, 20));          // D -> bank 2
    cmd(FN_PRELOAD, SP_ROWS, 0);                              // outputs from acc row 0
    cmd(FN_COMPUTE, rows_field(0, 20), 2 * SP_ROWS);
    cmd(FN_CONFIG, 1, 0);                                     // ReLU on
    cmd(FN_MVOUT, O1, rows_field(0, 20));
    wait_idle();
    check_out(O1, 0, 0, 20, 0, 1);
    // same bank: D is A's rows 14..17 (tag 9), A rows 10..13 (tag 9)
    for (int r = 0; r < 4; r++) begin
      mat[MD][20 + r] = mat[MA][14 + r]; mtag[MD][20 + r] = mtag[MA][14 + r];
    end
    cmd(FN_COMPUTE, rows_field(10, 4), 14);                   // acc rows 20..23
    cmd(FN_COMPUTE, rows_field(0, 3), 64'h8000_0000_0000_0000); // D = 0, acc 24..26
    cmd(FN_CONFIG, 64'h100, 0);                               // ReLU off, scale 1/2
    cmd(FN_MVOUT, O2, rows_field(20, 7));
    wait_idle();
    check_out(O2, 10, 20, 4, 0, 0, 1);
    check_out(O2 + 4 * ROWB, 0, 0, 3, 1, 0, 1);
    // accumulate: acc rows 30..33 = A0..3 * B + D0..3, then + A0..3 * B again
    cmd(FN_PRELOAD, SP_ROWS, 30);
    cmd(FN_COMPUTE, rows_field(0, 4), 2 * SP_ROWS);
    cmd(FN_PRELOAD, SP_ROWS, 64'h4000_0000_0000_0000 | 30);
    cmd(FN_COMPUTE, rows_field(0, 4), 64'h8000_0000_0000_0000);
    cmd(FN_MVOUT, O4, rows_field(30, 4));
    wait_idle();
    for (int i = 0; i < 4; i++)
      for (int b = 0; b < ROWB / 8; b++) begin
        logic [63:0] e;
        for (int k = 0; k < 8; k++) begin
          int v, j;
          j = b * 8 + k;
          v = int'(mat[MD][i][j]);
          for (int q = 0; q < DIM; q++) v += 2 * int'(mat[MA][i][q]) * int'(mat[MB][q][j]);
          v = (v + 1) >>> 1;
          v = (v > 127) ? 127 : (v < -128) ? -128 : v;
          e[k*8 +: 8] = 8'(v);
        end
        checks++;
        if (u_mem.peek(O4 + i * ROWB + b * 8) !== e || u_mem.peek_tag(O4 + i * ROWB + b * 8) !== mtag[MA][i]) begin
          failures++;
          $display("FAIL accumulated row %0d beat %0d: %h tag %0d, expected %h tag %0d", i, b,
                   u_mem.peek(O4 + i * ROWB + b * 8), u_mem.peek_tag(O4 + i * ROWB + b * 8), e, mtag[MA][i]);
        end
      end
    checks++;
    if (fault) begin failures++; $display("FAIL fault in the clean job, cause %0d", cause); end

    // ---------------- part 2: faults
    // blinded operand; afterwards nothing is written to memory
    cmd(FN_MVOUT, O3, rows_field(0, 2), 0, 8'd5);
    expect_fault(FAULT_BLINDED_CMD, "blinded rs2");
    w0 = u_mem.n_writes;
    cmd(FN_MVOUT, O3, rows_field(0, 2));
    wait_idle();
    checks++;
    if (u_mem.n_writes != w0) begin failures++; $display("FAIL memory written after a fault"); end

    // a row whose beats belong to two domains
    do_reset();
    u_mem.poke(A_AT + 8, u_mem.peek(A_AT + 8), 8'd7);         // row 0: beat 0 tag 5, beat 1 tag 7
    cmd(FN_MVIN, A_AT, rows_field(0, 1));
    expect_fault(FAULT_MIX_SPAD, "mixed beats");
    u_mem.poke(A_AT + 8, u_mem.peek(A_AT + 8), 8'd5);

    // A row of domain 5 with a D row of domain 9
    do_reset();
    cmd(FN_MVIN, A_AT, rows_field(0, 2));
    cmd(FN_MVIN, B_AT, rows_field(SP_ROWS, DIM));
    cmd(FN_MVIN, D_AT + 15 * ROWB, rows_field(2 * SP_ROWS, 2));
    cmd(FN_PRELOAD, SP_ROWS, 0);
    cmd(FN_COMPUTE, rows_field(0, 2), 2 * SP_ROWS);
    expect_fault(FAULT_MIX_ARRAY, "A/D mixing");

    // weights of two domains: B rows 0..1 from A (tag 5), rest from A rows 10.. (tag 9)
    do_reset();
    cmd(FN_MVIN, A_AT, rows_field(SP_ROWS, 2));
    cmd(FN_MVIN, A_AT + 10 * ROWB, rows_field(SP_ROWS + 2, DIM - 2));
    cmd(FN_PRELOAD, SP_ROWS, 0);
    expect_fault(FAULT_MIX_WEIGHTS, "weight mixing");

    // accumulating domain 9 rows onto domain 5 rows of the accumulator
    do_reset();
    cmd(FN_MVIN, A_AT, rows_field(0, 2));                     // tag 5
    cmd(FN_MVIN, A_AT + 10 * ROWB, rows_field(8, 2));         // tag 9
    cmd(FN_MVIN, B_AT, rows_field(SP_ROWS, DIM));
    cmd(FN_PRELOAD, SP_ROWS, 0);
    cmd(FN_COMPUTE, rows_field(0, 2), 64'h8000_0000_0000_0000);
    cmd(FN_PRELOAD, SP_ROWS, 64'h4000_0000_0000_0000);
    cmd(FN_COMPUTE, rows_field(8, 2), 64'h8000_0000_0000_0000);
    expect_fault(FAULT_MIX_SPAD, "accumulator mixing");

    // page-table entries
    do_reset();
    @(negedge clk);
    ptwv = 1; pte = 64'h1234_5678_9abc_def1; ptet = 0;
    #1;
    checks++;
    if (!tlbv || tlbpte !== pte || fault) begin failures++; $display("FAIL clean PTE"); end
    @(negedge clk);
    ptet = 8'd5;
    #1;
    checks++;
    if (tlbpte !== '0) begin failures++; $display("FAIL blinded PTE not zeroed"); end
    @(negedge clk);
    ptwv = 0; ptet = 0;
    expect_fault(FAULT_BLINDED_PTE, "blinded PTE");

    // ---------------- every mechanism happened
    $display("partial-write checks %0d, forwards %0d, shared-bank rows %0d, domain switches %0d, D-only tags %0d, relu %0d, saturations %0d, accumulated rows %0d, overlapped DMA/execute cycles %0d",
             n_partial, n_fwd, n_slow_rows, n_switch, n_dtag, n_relu, n_sat, n_accum, n_overlap);
    $display("faults: cmd %0d array %0d weights %0d spad %0d pte %0d", n_faults[1], n_faults[2],
             n_faults[3], n_faults[4], n_faults[5]);
    checks++;
    if (n_partial == 0 || n_fwd == 0 || n_slow_rows == 0 || n_switch == 0 || n_dtag == 0 ||
        n_relu == 0 || n_sat == 0 || n_accum == 0 || n_overlap == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    for (int c = 1; c <= 5; c++) begin
      checks++;
      if (n_faults[c] == 0) begin failures++; $display("FAIL fault cause %0d never raised", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
