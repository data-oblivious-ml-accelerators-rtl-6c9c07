// tb_load_ctrl: move-in of rows of 16 bytes (two 64-bit beats) into a
// 2-bank scratchpad with 8 rows per bank, crossing a bank boundary. A memory
// model answers requests in order after random delays, with data and tag
// derived from the address; the scratchpad accepts writes at random. Each
// write must target the right bank and row, carry the beat in the right half
// of the row with the matching byte mask, and carry that beat's tag.
module tb_load_ctrl;
  import dolma_pkg::*;
  localparam int DIM = 16, BANKS = 2, ROWS = 8, RW = DIM * 8, BEATS = RW / 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cv, cr, busy, qv, qr, sv, sr, pv, pr;
  logic [XLEN-1:0] caddr, qaddr;
  logic [15:0] csp, crows;
  logic [63:0] pd;
  tag_t pt, st;
  logic [0:0] sbank;
  logic [2:0] srow;
  logic [RW-1:0] sdata;
  logic [RW/8-1:0] smask;

  load_ctrl #(.DIM(DIM), .SP_BANKS(BANKS), .SP_ROWS(ROWS)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid_i(cv), .cmd_ready_o(cr), .cmd_mem_addr_i(caddr),
    .cmd_sp_addr_i(csp), .cmd_rows_i(crows), .busy_o(busy),
    .rd_req_valid_o(qv), .rd_req_ready_i(qr), .rd_req_addr_o(qaddr),
    .rd_resp_valid_i(pv), .rd_resp_ready_o(pr), .rd_resp_data_i(pd), .rd_resp_tag_i(pt),
    .sp_wr_valid_o(sv), .sp_wr_ready_i(sr), .sp_wr_bank_o(sbank), .sp_wr_row_o(srow),
    .sp_wr_data_o(sdata), .sp_wr_mask_o(smask), .sp_wr_tag_o(st));

  function automatic logic [63:0] mdata(logic [XLEN-1:0] a);
    return {a[31:0] ^ 32'h5a5a_0000, ~a[31:0]};
  endfunction
  function automatic tag_t mtag(logic [XLEN-1:0] a);
    return tag_t'((a >> 3) % 3);
  endfunction

  // memory model: in-order responses
  logic [XLEN-1:0] pending [$];
  always @(posedge clk) begin
    if (qv && qr) pending.push_back(qaddr);
    if (pv && pr) void'(pending.pop_front());
  end
  always @(negedge clk) begin
    qr = $urandom_range(0, 3) != 0;
    sr = $urandom_range(0, 3) != 0;
    if (!pv || pr) begin
      pv = pending.size() > 0 && $urandom_range(0, 2) != 0;
      if (pv) begin pd = mdata(pending[0]); pt = mtag(pending[0]); end
    end
  end

  int beat_no = 0;
  logic [XLEN-1:0] base = 64'h1000;
  int sp_base = 5, nrows = 4;

  always @(posedge clk) if (rst_n && sv && sr) begin
    int row, beat, spa;
    logic [XLEN-1:0] a;
    row  = beat_no / BEATS;
    beat = beat_no % BEATS;
    spa  = sp_base + row;
    a    = base + 64'(beat_no * 8);
    checks++;
    if (sbank !== 1'(spa / ROWS) || srow !== 3'(spa % ROWS) ||
        sdata[beat*64 +: 64] !== mdata(a) || smask !== (RW/8)'(8'hFF) << (beat * 8) ||
        st !== mtag(a)) begin
      failures++;
      $display("FAIL beat %0d: bank %0d row %0d mask %h tag %0d", beat_no, sbank, srow, smask, st);
    end
    beat_no++;
  end

  initial begin
    cv = 0; caddr = 0; csp = 0; crows = 0; pv = 0; pd = 0; pt = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cv = 1; caddr = base; csp = 16'(sp_base); crows = 16'(nrows);
    checks++;
    if (!cr) failures++;
    @(negedge clk);
    cv = 0;
    while (busy) @(negedge clk);
    checks++;
    if (beat_no != nrows * BEATS) begin failures++; $display("FAIL %0d beats written", beat_no); end
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
