// tb_dolma_full: one complete operation of the accelerator at its default
// size (32x32 array, 256 KiB scratchpad in 4 banks, 64 KiB accumulator in
// 2 banks). Two clients share the job: A rows 0..15 and their D rows belong
// to domain 4, A rows 16..31 to domain 6, the weights B are public. The
// testbench moves A, B and D in, preloads B, computes 32 rows, moves the
// result out with ReLU, and compares every byte and every tag in memory with
// a reference computed here. No fault may be raised.
module tb_dolma_full;
  import dolma_pkg::*;
  localparam int DIM = 32, SP_ROWS = 2048, ROWB = DIM;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cv, cr, busy, fault;
  fault_e cause;
  logic [6:0] cf;
  logic [XLEN-1:0] c1, c2;
  logic qv, qr, pv, pr, wv, wr;
  logic [XLEN-1:0] qa, wa;
  logic [63:0] pd, wd;
  tag_t pt, wt;
  logic tlbv;
  logic [XLEN-1:0] tlbpte;

  dolma_top u_dut (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid_i(cv), .cmd_ready_o(cr), .cmd_funct_i(cf), .cmd_rs1_i(c1), .cmd_rs1_tag_i('0),
    .cmd_rs2_i(c2), .cmd_rs2_tag_i('0), .busy_o(busy), .fault_o(fault), .fault_cause_o(cause),
    .mem_rd_req_valid_o(qv), .mem_rd_req_ready_i(qr), .mem_rd_req_addr_o(qa),
    .mem_rd_resp_valid_i(pv), .mem_rd_resp_ready_o(pr), .mem_rd_resp_data_i(pd), .mem_rd_resp_tag_i(pt),
    .mem_wr_req_valid_o(wv), .mem_wr_req_ready_i(wr), .mem_wr_req_addr_o(wa),
    .mem_wr_req_data_o(wd), .mem_wr_req_tag_o(wt),
    .ptw_valid_i(1'b0), .ptw_pte_i('0), .ptw_tag_i('0),
    .tlb_refill_valid_o(tlbv), .tlb_refill_pte_o(tlbpte));

  tagged_mem_model u_mem (
    .clk(clk), .rd_req_valid_i(qv), .rd_req_ready_o(qr), .rd_req_addr_i(qa),
    .rd_resp_valid_o(pv), .rd_resp_ready_i(pr), .rd_resp_data_o(pd), .rd_resp_tag_o(pt),
    .wr_req_valid_i(wv), .wr_req_ready_o(wr), .wr_req_addr_i(wa), .wr_req_data_i(wd),
    .wr_req_tag_i(wt));

  localparam int MA = 0, MB = 1, MD = 2;
  logic signed [7:0] mat [3][DIM][DIM];
  tag_t              mtag [3][DIM];

  task automatic put_matrix(int m, longint base);
    for (int r = 0; r < DIM; r++)
      for (int b = 0; b < ROWB / 8; b++) begin
        logic [63:0] d;
        for (int k = 0; k < 8; k++) d[k*8 +: 8] = mat[m][r][b*8 + k];
        u_mem.poke(base + r * ROWB + b * 8, d, mtag[m][r]);
      end
  endtask

  task automatic cmd(logic [6:0] f, logic [XLEN-1:0] r1, logic [XLEN-1:0] r2);
    @(negedge clk);
    cv = 1; cf = f; c1 = r1; c2 = r2;
    @(posedge clk);
    while (!cr) @(posedge clk);
    @(negedge clk);
    cv = 0;
  endtask

  function automatic logic [XLEN-1:0] rows_field(int addr, int n);
    return XLEN'(addr) | (XLEN'(n) << 16);
  endfunction

  localparam longint A_AT = 64'h1_0000, B_AT = 64'h2_0000, D_AT = 64'h3_0000, O_AT = 64'h4_0000;

  initial begin
    int quiet, cyc;
    cv = 0; cf = 0; c1 = 0; c2 = 0;
    foreach (mat[m, r, j]) mat[m][r][j] = 8'($urandom_range(0, 16)) - 8;
    foreach (mtag[m, r]) mtag[m][r] = 0;
    for (int r = 0; r < DIM; r++) begin
      mtag[MA][r] = (r < 16) ? 8'd4 : 8'd6;
      mtag[MD][r] = mtag[MA][r];
    end
    put_matrix(MA, A_AT);
    put_matrix(MB, B_AT);
    put_matrix(MD, D_AT);
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!u_dut.sys_ready) @(negedge clk);
    cyc = 0;
    fork
      forever @(posedge clk) cyc++;
    join_none
    cmd(FN_MVIN, A_AT, rows_field(0, DIM));
    cmd(FN_MVIN, B_AT, rows_field(SP_ROWS, DIM));
    cmd(FN_MVIN, D_AT, rows_field(2 * SP_ROWS, DIM));
    cmd(FN_PRELOAD, SP_ROWS, 0);
    cmd(FN_COMPUTE, rows_field(0, DIM), 2 * SP_ROWS);
    cmd(FN_CONFIG, 1, 0);
    cmd(FN_MVOUT, O_AT, rows_field(0, DIM));
    quiet = 0;
    while (quiet < 4) begin
      @(negedge clk);
      quiet = busy ? 0 : quiet + 1;
    end
    $display("job done in %0d cycles", cyc);
    for (int i = 0; i < DIM; i++)
      for (int b = 0; b < ROWB / 8; b++) begin
        logic [63:0] e;
        for (int k = 0; k < 8; k++) begin
          int j, v;
          j = b * 8 + k;
          v = int'(mat[MD][i][j]);
          for (int q = 0; q < DIM; q++) v += int'(mat[MA][i][q]) * int'(mat[MB][q][j]);
          if (v < 0) v = 0;
          if (v > 127) v = 127;
          e[k*8 +: 8] = 8'(v);
        end
        checks++;
        if (u_mem.peek(O_AT + i * ROWB + b * 8) !== e ||
            u_mem.peek_tag(O_AT + i * ROWB + b * 8) !== mtag[MA][i]) begin
          failures++;
          $display("FAIL row %0d beat %0d: %h tag %0d, expected %h tag %0d", i, b,
                   u_mem.peek(O_AT + i * ROWB + b * 8), u_mem.peek_tag(O_AT + i * ROWB + b * 8),
                   e, mtag[MA][i]);
        end
      end
    checks++;
    if (fault) begin failures++; $display("FAIL fault raised, cause %0d", cause); end
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
