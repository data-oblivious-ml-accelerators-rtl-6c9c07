// load_ctrl: the move-in DMA controller (memory -> scratchpad).
//
// A command names a memory address, a scratchpad row address (bank in the
// upper bits, row in the lower ones) and a number of rows. Rows lie one after
// another in memory, ROW_BYTES apart. Memory delivers 64-bit beats, each with
// the 8-bit tag of that word, in request order; a row of DIM 8-bit elements
// is BEATS beats. Each beat is written into its slice of the scratchpad row as
// a partial (byte-masked) write carrying the beat's own tag, so the bank's
// read-check-write rejects a row whose beats come from different domains.
// Beat requests are issued back to back while responses stream in; a beat
// response is only accepted when the scratchpad can take the write
// (rd_resp_ready_o). busy_o is high from command accept until the last write
// has been handed to the bank. The split into tagged 64-bit beats follows
// the paper; the command fields and channel handshakes are this design's.
module load_ctrl
  import dolma_pkg::*;
#(
  parameter int DIM      = 32,
  parameter int SP_BANKS = 4,
  parameter int SP_ROWS  = 2048,
  localparam int ROW_W   = DIM * IN_W,
  localparam int BEATS   = ROW_W / BEAT_W,
  localparam int ROW_AW  = $clog2(SP_ROWS),
  localparam int BANK_AW = (SP_BANKS > 1) ? $clog2(SP_BANKS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               cmd_valid_i,
  output logic               cmd_ready_o,
  input  logic [XLEN-1:0]    cmd_mem_addr_i,
  input  logic [15:0]        cmd_sp_addr_i,
  input  logic [15:0]        cmd_rows_i,
  output logic               busy_o,
  // memory read channel
  output logic               rd_req_valid_o,
  input  logic               rd_req_ready_i,
  output logic [XLEN-1:0]    rd_req_addr_o,
  input  logic               rd_resp_valid_i,
  output logic               rd_resp_ready_o,
  input  logic [BEAT_W-1:0]  rd_resp_data_i,
  input  tag_t               rd_resp_tag_i,
  // scratchpad write
  output logic               sp_wr_valid_o,
  input  logic               sp_wr_ready_i,
  output logic [BANK_AW-1:0] sp_wr_bank_o,
  output logic [ROW_AW-1:0]  sp_wr_row_o,
  output logic [ROW_W-1:0]   sp_wr_data_o,
  output logic [ROW_W/8-1:0] sp_wr_mask_o,
  output tag_t               sp_wr_tag_o
);

  localparam int TOTAL_W = 32;
  localparam int BEAT_BYTES = BEAT_W / 8;

  logic               active;
  logic [XLEN-1:0]    base;
  logic [15:0]        sp_base;
  logic [TOTAL_W-1:0] total;    // beats in this command
  logic [TOTAL_W-1:0] issued;   // beat requests sent
  logic [TOTAL_W-1:0] written;  // beats handed to the scratchpad

  assign cmd_ready_o = !active;
  assign busy_o      = active;

  // request side
  assign rd_req_valid_o = active && (issued != total);
  assign rd_req_addr_o  = base + XLEN'(issued) * BEAT_BYTES;

  // response side: beat number `written` of the command
  logic [TOTAL_W-1:0] row_idx;
  logic [TOTAL_W-1:0] beat_idx;
  logic [15:0]        sp_addr;
  assign row_idx  = written / BEATS;
  assign beat_idx = written % BEATS;
  assign sp_addr  = sp_base + row_idx[15:0];

  assign rd_resp_ready_o = active && sp_wr_ready_i;
  assign sp_wr_valid_o   = active && rd_resp_valid_i;
  assign sp_wr_row_o     = sp_addr[ROW_AW-1:0];
  if (SP_BANKS > 1) begin : g_bank
    assign sp_wr_bank_o = sp_addr[ROW_AW +: BANK_AW];
  end else begin : g_nobank
    assign sp_wr_bank_o = '0;
  end
  assign sp_wr_tag_o = rd_resp_tag_i;

  always_comb begin
    sp_wr_data_o = '0;
    sp_wr_mask_o = '0;
    for (int b = 0; b < BEATS; b++)
      if (beat_idx == TOTAL_W'(b)) begin
        sp_wr_data_o[b*BEAT_W +: BEAT_W]         = rd_resp_data_i;
        sp_wr_mask_o[b*BEAT_BYTES +: BEAT_BYTES] = '1;
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      active  <= 1'b0;
      base    <= '0;
      sp_base <= '0;
      total   <= '0;
      issued  <= '0;
      written <= '0;
    end else if (!active) begin
      if (cmd_valid_i && cmd_rows_i != '0) begin
        active  <= 1'b1;
        base    <= cmd_mem_addr_i;
        sp_base <= cmd_sp_addr_i;
        total   <= TOTAL_W'(cmd_rows_i) * BEATS;
        issued  <= '0;
        written <= '0;
      end
    end else begin
      if (rd_req_valid_o && rd_req_ready_i) issued <= issued + 1'b1;
      if (rd_resp_valid_i && rd_resp_ready_o) begin
        written <= written + 1'b1;
        if (written + 1'b1 == total) active <= 1'b0;
      end
    end

endmodule
