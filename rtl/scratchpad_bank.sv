// scratchpad_bank: one scratchpad (or accumulator) bank with a tag per row and
// read-check-write of that tag.
//
// Every row of DATA_W bits carries one tag in a separate tag memory. Both
// memories are synchronous (one-cycle read), so a write cannot read the row's
// current tag, check it and write in one cycle. Writes are therefore
// pipelined over two stages:
//   stage 1  a write request enters the write queue register and reads the
//            row's current tag; a read request reads data and tag memory.
//            One request per cycle; a write wins over a read (rd_ready_o low).
//   stage 2  the checking logic compares current and incoming tag. A full-row
//            write (all mask bits set) replaces data and tag. A partial write
//            is allowed only when the two tags do not differ while both are
//            non-zero; the new tag is their OR. A violating write is dropped
//            (the row keeps its old contents) and violation_o pulses.
//            A read returns data and tag (rd_resp_*).
// Read-over-write: a request in stage 1 to the row being written in stage 2
// reads the memories in the same cycle as the write; the write is then
// forwarded to it (data merged byte-wise by the write mask, and the new tag),
// but only if the write passed its check. The same forwarding gives
// back-to-back partial writes to one row the up-to-date tag.
// Accumulating write (wr_accum_i, used by the accumulator banks): the row is
// read in stage 1 as for any write, and in stage 2 the incoming row is added
// lane by lane (LANE_W-bit lanes, wrapping) to the current row, forwarded
// value included. It is checked like a partial write, because the result
// depends on both the old and the new contents: the tags may not be two
// different non-zero values, and the new tag is their OR.
// Reset: after rst_n the bank sweeps all rows, writing zero data and tag zero,
// and accepts no request until done (init_busy_o), so no stale blinded data
// survives a reset untagged.
// Latency: read response one cycle after the accepted request; one request per
// cycle throughput. The two-stage structure, write priority, check and
// forwarding follow the paper's scratchpad figure; the byte mask, full-row tag
// replacement and reset sweep are this design's choices.
module scratchpad_bank
  import dolma_pkg::*;
#(
  parameter int ROWS   = 2048,
  parameter int DATA_W = 256,
  parameter int LANE_W = 32,
  localparam int MASK_W = DATA_W / 8,
  localparam int ADDR_W = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_busy_o,
  // read request (stage 1)
  input  logic              rd_valid_i,
  output logic              rd_ready_o,
  input  logic [ADDR_W-1:0] rd_addr_i,
  // write request (stage 1)
  input  logic              wr_valid_i,
  output logic              wr_ready_o,
  input  logic [ADDR_W-1:0] wr_addr_i,
  input  logic [DATA_W-1:0] wr_data_i,
  input  logic [MASK_W-1:0] wr_mask_i,
  input  tag_t              wr_tag_i,
  input  logic              wr_accum_i,   // add the data to the row instead of writing it
  // read response (stage 2)
  output logic              rd_resp_valid_o,
  output logic [DATA_W-1:0] rd_resp_data_o,
  output tag_t              rd_resp_tag_o,
  // tag mixing on a write
  output logic              violation_o
);

  // ---------------------------------------------------------------- memories
  logic [DATA_W-1:0] data_mem [ROWS];
  tag_t              tag_mem  [ROWS];

  logic              mem_re;
  logic [ADDR_W-1:0] mem_raddr;
  logic              mem_we;
  logic [ADDR_W-1:0] mem_waddr;
  logic [DATA_W-1:0] mem_wdata;
  logic [MASK_W-1:0] mem_wmask;
  tag_t              mem_wtag;
  logic [DATA_W-1:0] data_rdata;
  tag_t              tag_rdata;

  always_ff @(posedge clk) begin
    if (mem_re) begin
      data_rdata <= data_mem[mem_raddr];
      tag_rdata  <= tag_mem[mem_raddr];
    end
    if (mem_we) begin
      tag_mem[mem_waddr] <= mem_wtag;
      for (int i = 0; i < MASK_W; i++)
        if (mem_wmask[i]) data_mem[mem_waddr][i*8 +: 8] <= mem_wdata[i*8 +: 8];
    end
  end

  // ------------------------------------------------------------ reset sweep
  logic              init_busy;
  logic [ADDR_W-1:0] init_addr;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_addr <= '0;
    end else if (init_busy) begin
      init_addr <= init_addr + 1'b1;
      if (init_addr == ADDR_W'(ROWS - 1)) init_busy <= 1'b0;
    end

  assign init_busy_o = init_busy;

  // ---------------------------------------------------------------- stage 1
  logic s1_wr, s1_rd;
  assign wr_ready_o = !init_busy;
  assign rd_ready_o = !init_busy && !wr_valid_i;
  assign s1_wr      = wr_valid_i && wr_ready_o;
  assign s1_rd      = rd_valid_i && rd_ready_o;

  // tag memory read address: the write's row when a write is accepted
  assign mem_re    = s1_wr || s1_rd;
  assign mem_raddr = s1_wr ? wr_addr_i : rd_addr_i;

  // write queue and stage-2 request registers
  logic              s2_wr, s2_rd;
  logic [ADDR_W-1:0] s2_addr;
  logic [DATA_W-1:0] s2_data;
  logic [MASK_W-1:0] s2_mask;
  logic              s2_accum;
  logic [DATA_W-1:0] sum_data;
  tag_t              s2_tag;

  // forwarding registers (write in stage 2 seen by the stage-1 request)
  logic              fwd_hit;
  logic [DATA_W-1:0] fwd_data;
  logic [MASK_W-1:0] fwd_mask;
  tag_t              fwd_tag;

  // ---------------------------------------------------------------- stage 2
  tag_t cur_tag, new_tag;
  logic full_row, conflict, check_ok;

  assign cur_tag  = fwd_hit ? fwd_tag : tag_rdata;
  assign full_row = &s2_mask;
  assign conflict = (!full_row || s2_accum) && tags_conflict(cur_tag, s2_tag);
  assign check_ok = s2_wr && !conflict;
  assign new_tag  = (full_row && !s2_accum) ? s2_tag : (cur_tag | s2_tag);

  assign violation_o = s2_wr && conflict;

  always_comb begin
    if (init_busy) begin
      mem_we    = 1'b1;
      mem_waddr = init_addr;
      mem_wdata = '0;
      mem_wmask = '1;
      mem_wtag  = '0;
    end else begin
      mem_we    = check_ok;
      mem_waddr = s2_addr;
      mem_wdata = s2_accum ? sum_data : s2_data;
      mem_wmask = s2_mask;
      mem_wtag  = new_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s2_wr   <= 1'b0;
      s2_rd   <= 1'b0;
      fwd_hit <= 1'b0;
    end else begin
      s2_wr   <= s1_wr;
      s2_rd   <= s1_rd;
      fwd_hit <= mem_re && check_ok && (mem_raddr == s2_addr);
    end

  always_ff @(posedge clk) begin
    if (s1_wr) begin
      s2_data <= wr_data_i;
      s2_mask <= wr_accum_i ? '1 : wr_mask_i;
      s2_accum <= wr_accum_i;
      s2_tag  <= wr_tag_i;
    end
    if (mem_re) s2_addr <= mem_raddr;
    fwd_data <= s2_accum ? sum_data : s2_data;
    fwd_mask <= s2_mask;
    fwd_tag  <= new_tag;
  end

  // read response with forward-write muxes
  always_comb begin
    rd_resp_data_o = data_rdata;
    if (fwd_hit)
      for (int i = 0; i < MASK_W; i++)
        if (fwd_mask[i]) rd_resp_data_o[i*8 +: 8] = fwd_data[i*8 +: 8];
  end
  assign rd_resp_tag_o   = cur_tag;
  assign rd_resp_valid_o = s2_rd;

  // a read and a write are never accepted in the same cycle
  a_one_req: assert property (@(posedge clk) disable iff (!rst_n) !(s1_wr && s1_rd));

  // lane-wise sum of the current row (after forwarding) and the incoming row
  always_comb
    for (int i = 0; i < DATA_W / LANE_W; i++)
      sum_data[i*LANE_W +: LANE_W] = rd_resp_data_o[i*LANE_W +: LANE_W] + s2_data[i*LANE_W +: LANE_W];

endmodule
