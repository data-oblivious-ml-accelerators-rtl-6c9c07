// tagged_mem_model: behavioural model of the host's tagged main memory, for
// simulation only. Every 64-bit word has an 8-bit tag. Read requests are
// accepted at random and answered in order after a random delay; writes
// are accepted at random and store data and tag together. poke/peek give
// the testbench direct access. Unwritten words read as zero with tag zero.
module tagged_mem_model
  import dolma_pkg::*;
(
  input  logic              clk,
  input  logic              rd_req_valid_i,
  output logic              rd_req_ready_o,
  input  logic [XLEN-1:0]   rd_req_addr_i,
  output logic              rd_resp_valid_o,
  input  logic              rd_resp_ready_i,
  output logic [BEAT_W-1:0] rd_resp_data_o,
  output tag_t              rd_resp_tag_o,
  input  logic              wr_req_valid_i,
  output logic              wr_req_ready_o,
  input  logic [XLEN-1:0]   wr_req_addr_i,
  input  logic [BEAT_W-1:0] wr_req_data_i,
  input  tag_t              wr_req_tag_i
);

  logic [BEAT_W-1:0] data [longint];
  tag_t              tags [longint];
  longint            pending [$];
  int                n_writes = 0;
  logic              consumed = 0;

  function automatic void poke(longint a, logic [BEAT_W-1:0] d, tag_t t);
    data[a >> 3] = d;
    tags[a >> 3] = t;
  endfunction
  function automatic logic [BEAT_W-1:0] peek(longint a);
    return data.exists(a >> 3) ? data[a >> 3] : '0;
  endfunction
  function automatic tag_t peek_tag(longint a);
    return tags.exists(a >> 3) ? tags[a >> 3] : '0;
  endfunction

  initial begin
    rd_req_ready_o  = 0;
    wr_req_ready_o  = 0;
    rd_resp_valid_o = 0;
    rd_resp_data_o  = '0;
    rd_resp_tag_o   = '0;
  end

  always @(posedge clk) begin
    if (rd_req_valid_i && rd_req_ready_o) pending.push_back(longint'(rd_req_addr_i));
    consumed = 0;
    if (rd_resp_valid_o && rd_resp_ready_i) begin
      void'(pending.pop_front());
      consumed = 1;
    end
    if (wr_req_valid_i && wr_req_ready_o) begin
      poke(longint'(wr_req_addr_i), wr_req_data_i, wr_req_tag_i);
      n_writes++;
    end
  end

  always @(negedge clk) begin
    rd_req_ready_o = $urandom_range(0, 3) != 0;
    wr_req_ready_o = $urandom_range(0, 3) != 0;
    if (!rd_resp_valid_o || consumed) begin
      rd_resp_valid_o = pending.size() > 0 && $urandom_range(0, 3) != 0;
      if (rd_resp_valid_o) begin
        rd_resp_data_o = peek(pending[0]);
        rd_resp_tag_o  = peek_tag(pending[0]);
      end
    end
  end

endmodule
