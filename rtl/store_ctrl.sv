// store_ctrl: the move-out DMA controller (accumulator -> activation ->
// memory).
//
// A command names a memory address, an accumulator row address (bank in the
// upper bits) and a number of rows, plus the ReLU setting from the last
// CONFIG. For each row the controller reads the accumulator row (one cycle),
// passes it through the activation unit, and writes the resulting DIM bytes
// to memory as BEATS 64-bit beats, every beat carrying the row's tag, so
// blinded results stay blinded in the host's tagged memory. Rows are handled
// one at a time: read, wait for the response, then the beats. busy_o is high
// from command accept until the last beat is accepted. Tagged writes and the
// combinational activation follow the paper; the sequencing is this design's.
module store_ctrl
  import dolma_pkg::*;
#(
  parameter int DIM       = 32,
  parameter int ACC_BANKS = 2,
  parameter int ACC_ROWS  = 256,
  localparam int ACC_ROW_W = DIM * ACC_W,
  localparam int OUT_W     = DIM * IN_W,
  localparam int BEATS     = OUT_W / BEAT_W,
  localparam int ROW_AW    = $clog2(ACC_ROWS),
  localparam int BANK_AW   = (ACC_BANKS > 1) ? $clog2(ACC_BANKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 cmd_valid_i,
  output logic                 cmd_ready_o,
  input  logic [XLEN-1:0]      cmd_mem_addr_i,
  input  logic [15:0]          cmd_acc_addr_i,
  input  logic [15:0]          cmd_rows_i,
  input  logic                 cmd_relu_i,
  input  logic [4:0]           cmd_shift_i,
  output logic                 busy_o,
  // accumulator read
  output logic                 acc_rd_valid_o,
  input  logic                 acc_rd_ready_i,
  output logic [BANK_AW-1:0]   acc_rd_bank_o,
  output logic [ROW_AW-1:0]    acc_rd_row_o,
  input  logic                 acc_rd_resp_valid_i,
  input  logic [ACC_ROW_W-1:0] acc_rd_resp_data_i,
  input  tag_t                 acc_rd_resp_tag_i,
  // memory write channel
  output logic                 wr_req_valid_o,
  input  logic                 wr_req_ready_i,
  output logic [XLEN-1:0]      wr_req_addr_o,
  output logic [BEAT_W-1:0]    wr_req_data_o,
  output tag_t                 wr_req_tag_o
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_WAIT, S_WRITE} state_e;
  state_e state;

  logic [XLEN-1:0] mem_ptr;
  logic [15:0]     acc_ptr;
  logic [15:0]     rows_left;
  logic            relu;
  logic [4:0]      shift;
  logic [$clog2(BEATS+1)-1:0] beat;

  logic signed [ACC_W-1:0] acc_row [DIM];
  tag_t                    acc_tag;
  logic signed [IN_W-1:0]  out_row [DIM];
  tag_t                    out_tag;
  logic [OUT_W-1:0]        out_flat;

  activation #(.DIM(DIM)) u_act (
    .relu_i (relu),
    .shift_i(shift),
    .row_i  (acc_row),
    .tag_i  (acc_tag),
    .row_o  (out_row),
    .tag_o  (out_tag)
  );

  always_comb
    for (int i = 0; i < DIM; i++) out_flat[i*IN_W +: IN_W] = out_row[i];

  assign cmd_ready_o    = (state == S_IDLE);
  assign busy_o         = (state != S_IDLE);
  assign acc_rd_valid_o = (state == S_READ);
  assign acc_rd_row_o   = acc_ptr[ROW_AW-1:0];
  if (ACC_BANKS > 1) begin : g_bank
    assign acc_rd_bank_o = acc_ptr[ROW_AW +: BANK_AW];
  end else begin : g_nobank
    assign acc_rd_bank_o = '0;
  end

  assign wr_req_valid_o = (state == S_WRITE);
  assign wr_req_addr_o  = mem_ptr;
  assign wr_req_tag_o   = out_tag;
  always_comb begin
    wr_req_data_o = '0;
    for (int b = 0; b < BEATS; b++)
      if (beat == b) wr_req_data_o = out_flat[b*BEAT_W +: BEAT_W];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state     <= S_IDLE;
      mem_ptr   <= '0;
      acc_ptr   <= '0;
      rows_left <= '0;
      relu      <= 1'b0;
      shift     <= '0;
      beat      <= '0;
      acc_tag   <= '0;
    end else begin
      unique case (state)
        S_IDLE:
          if (cmd_valid_i && cmd_rows_i != '0) begin
            mem_ptr   <= cmd_mem_addr_i;
            acc_ptr   <= cmd_acc_addr_i;
            rows_left <= cmd_rows_i;
            relu      <= cmd_relu_i;
            shift     <= cmd_shift_i;
            state     <= S_READ;
          end
        S_READ:
          if (acc_rd_ready_i) state <= S_WAIT;
        S_WAIT:
          if (acc_rd_resp_valid_i) begin
            acc_tag <= acc_rd_resp_tag_i;
            beat    <= '0;
            state   <= S_WRITE;
          end
        S_WRITE:
          if (wr_req_ready_i) begin
            mem_ptr <= mem_ptr + BEAT_W / 8;
            if (beat == BEATS - 1) begin
              rows_left <= rows_left - 1'b1;
              acc_ptr   <= acc_ptr + 1'b1;
              state     <= (rows_left == 16'd1) ? S_IDLE : S_READ;
            end else begin
              beat <= beat + 1'b1;
            end
          end
        default: state <= S_IDLE;
      endcase
    end

  always_ff @(posedge clk)
    if (state == S_WAIT && acc_rd_resp_valid_i)
      for (int i = 0; i < DIM; i++) acc_row[i] <= acc_rd_resp_data_i[i*ACC_W +: ACC_W];

endmodule
