// tb_store_ctrl: move-out of 3 accumulator rows (DIM 16, two banks of 4
// rows, crossing the bank boundary) with ReLU on and then off, then 4 rows
// scaled down by 2^3. An
// accumulator model answers reads one cycle later with values spanning the
// 8-bit saturation limits and a per-row tag; memory accepts writes at
// random. Every beat must go to consecutive addresses, hold the activated
// and saturated bytes, and carry the row's tag.
module tb_store_ctrl;
  import dolma_pkg::*;
  localparam int DIM = 16, BANKS = 2, ROWS = 4, AW = DIM * 32, BEATS = DIM * 8 / 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cv, cr, busy, relu, av, ar, rv, wv, wr;
  logic [XLEN-1:0] caddr, waddr;
  logic [15:0] cacc, crows;
  logic [0:0] abank;
  logic [1:0] arow;
  logic [AW-1:0] rd;
  tag_t rt, wt;
  logic [63:0] wd;

  store_ctrl #(.DIM(DIM), .ACC_BANKS(BANKS), .ACC_ROWS(ROWS)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid_i(cv), .cmd_ready_o(cr), .cmd_mem_addr_i(caddr),
    .cmd_acc_addr_i(cacc), .cmd_rows_i(crows), .cmd_relu_i(relu), .cmd_shift_i(sh), .busy_o(busy),
    .acc_rd_valid_o(av), .acc_rd_ready_i(ar), .acc_rd_bank_o(abank), .acc_rd_row_o(arow),
    .acc_rd_resp_valid_i(rv), .acc_rd_resp_data_i(rd), .acc_rd_resp_tag_i(rt),
    .wr_req_valid_o(wv), .wr_req_ready_i(wr), .wr_req_addr_o(waddr), .wr_req_data_o(wd),
    .wr_req_tag_o(wt));

  // accumulator contents: element e of global row r
  function automatic int accv(int r, int e);
    return (r * 37 + e * 29) % 400 - 200;
  endfunction
  function automatic tag_t acct(int r);
    return tag_t'(r % 3 == 0 ? 0 : r + 4);
  endfunction

  always @(posedge clk) begin
    rv <= av && ar;
    if (av && ar)
      for (int e = 0; e < DIM; e++) begin
        rd[e*32 +: 32] <= 32'(accv(int'(abank) * ROWS + int'(arow), e));
        rt <= acct(int'(abank) * ROWS + int'(arow));
      end
  end
  always @(negedge clk) begin
    ar = $urandom_range(0, 3) != 0;
    wr = $urandom_range(0, 2) != 0;
  end

  int nbeat = 0;
  logic [XLEN-1:0] base;
  int acc0;
  logic use_relu;
  logic [4:0] sh = 0, use_sh;
  always @(posedge clk) if (rst_n && wv && wr) begin
    int row, beat;
    logic [63:0] e;
    row  = acc0 + nbeat / BEATS;
    beat = nbeat % BEATS;
    for (int b = 0; b < 8; b++) begin
      int v;
      v = accv(row, beat * 8 + b);
      if (use_sh != 0) v = (v + (1 << (use_sh - 1))) >>> use_sh;
      if (use_relu && v < 0) v = 0;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      e[b*8 +: 8] = 8'(v);
    end
    checks++;
    if (waddr !== base + 64'(nbeat * 8) || wd !== e || wt !== acct(row)) begin
      failures++;
      $display("FAIL beat %0d: addr %h data %h tag %0d expected %h tag %0d", nbeat, waddr, wd, wt, e, acct(row));
    end
    nbeat++;
  end

  task automatic mvout(logic [XLEN-1:0] a, int acc, int n, logic r, int s = 0);
    base = a; acc0 = acc; use_relu = r; use_sh = 5'(s); nbeat = 0;
    @(negedge clk);
    cv = 1; caddr = a; cacc = 16'(acc); crows = 16'(n); relu = r; sh = 5'(s);
    @(negedge clk);
    cv = 0;
    while (busy) @(negedge clk);
    checks++;
    if (nbeat != n * BEATS) begin failures++; $display("FAIL %0d beats", nbeat); end
  endtask

  initial begin
    cv = 0; relu = 0; caddr = 0; cacc = 0; crows = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    mvout(64'h2000, 2, 3, 1);
    mvout(64'h3000, 1, 3, 0);
    mvout(64'h4000, 0, 4, 0, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
