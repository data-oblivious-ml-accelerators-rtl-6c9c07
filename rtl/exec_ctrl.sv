// exec_ctrl: the execute controller and the DIFT systolic array it drives.
//
// Two commands:
//   PRELOAD b_addr, c_addr, accum  waits until no row is in the array, then reads the
//       DIM rows of B from the scratchpad (last row first, so the shift chain
//       leaves row k in array row k) and shifts them into the array while the
//       array combines their tags into the weight tag. c_addr is the
//       accumulator row where the next output row will be written; with
//       accum set, the output rows that follow are added to the accumulator
//       rows (acc_wr_accum_o) instead of overwriting them, which is how the
//       partial sums of a K dimension larger than DIM are summed up.
//   COMPUTE a_addr, d_addr, rows, d_zero  streams `rows` rows of A (and of D,
//       or zeros when d_zero) through the array, one row per cycle when A and D
//       lie in different banks, one row per two cycles when they share a bank.
//       Output rows, each with its own tag, are written to consecutive
//       accumulator rows from the current output pointer; a later COMPUTE
//       continues where the previous one stopped (B stays in place, so
//       independent input rows can follow each other without stalls).
// Scratchpad reads go out on two request ports (A, D); the responses of all
// banks come back one cycle later and are picked by the bank that was asked.
// Rows whose tags conflict are dropped by the array and row_violation_o
// pulses. busy_o stays high until the last row has left the array.
// Weight-stationary streaming and the row tags follow the paper; the command
// fields, preload order and drain rule are this design's choices.
module exec_ctrl
  import dolma_pkg::*;
#(
  parameter int DIM       = 32,
  parameter int SP_BANKS  = 4,
  parameter int SP_ROWS   = 2048,
  parameter int ACC_BANKS = 2,
  parameter int ACC_ROWS  = 256,
  localparam int ROW_W      = DIM * IN_W,
  localparam int ACC_ROW_W  = DIM * ACC_W,
  localparam int SP_AW      = $clog2(SP_ROWS),
  localparam int SP_BW      = (SP_BANKS > 1) ? $clog2(SP_BANKS) : 1,
  localparam int ACC_AW     = $clog2(ACC_ROWS),
  localparam int ACC_BW     = (ACC_BANKS > 1) ? $clog2(ACC_BANKS) : 1,
  localparam int LATENCY    = 2 * DIM - 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 cmd_valid_i,
  output logic                 cmd_ready_o,
  input  logic                 cmd_preload_i,   // 1: PRELOAD, 0: COMPUTE
  input  logic [15:0]          cmd_addr1_i,     // B (preload) or A (compute)
  input  logic [15:0]          cmd_addr2_i,     // C (preload) or D (compute)
  input  logic [15:0]          cmd_rows_i,      // compute rows
  input  logic                 cmd_d_zero_i,    // compute with D = 0
  input  logic                 cmd_accum_i,     // preload: accumulate the outputs
  output logic                 busy_o,
  // scratchpad read request ports
  output logic                 rda_valid_o,
  input  logic                 rda_ready_i,
  output logic [SP_BW-1:0]     rda_bank_o,
  output logic [SP_AW-1:0]     rda_row_o,
  output logic                 rdd_valid_o,
  input  logic                 rdd_ready_i,
  output logic [SP_BW-1:0]     rdd_bank_o,
  output logic [SP_AW-1:0]     rdd_row_o,
  // scratchpad read responses of every bank
  input  logic [ROW_W-1:0]     sp_resp_data_i [SP_BANKS],
  input  tag_t                 sp_resp_tag_i  [SP_BANKS],
  // accumulator write (full rows)
  output logic                 acc_wr_valid_o,
  output logic [ACC_BW-1:0]    acc_wr_bank_o,
  output logic [ACC_AW-1:0]    acc_wr_row_o,
  output logic [ACC_ROW_W-1:0] acc_wr_data_o,
  output tag_t                 acc_wr_tag_o,
  output logic                 acc_wr_accum_o,
  // policy violations
  output logic                 row_violation_o,
  output logic                 weight_violation_o
);

  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_PRELOAD, S_COMPUTE} state_e;
  state_e state;

  logic [15:0] a_ptr, d_ptr, c_ptr, left;     // read pointers, rows left to issue
  logic        d_zero;
  logic        a_done, d_done;                // reads of the current row issued
  logic [$clog2(LATENCY+2)-1:0] drain;        // cycles since the last row entered
  logic [15:0] b_left;                        // preload rows to receive

  logic        pend_dzero;                    // d_zero of the row being assembled
  logic        preload_rsp;                   // a_q carries a B row
  logic        b_first;                       // next B row is the first

  // response bookkeeping: which port was served last cycle and by which bank
  logic             a_q, d_q;
  logic [SP_BW-1:0] a_bank_q, d_bank_q;

  function automatic logic [SP_BW-1:0] bank_of(logic [15:0] a);
    return (SP_BANKS > 1) ? SP_BW'(a >> SP_AW) : '0;
  endfunction

  // -------------------------------------------------------- read issue
  logic same_bank;
  assign same_bank   = bank_of(a_ptr) == bank_of(d_ptr);

  always_comb begin
    rda_valid_o = 1'b0;
    rdd_valid_o = 1'b0;
    // the first B row waits until every earlier row has left the array
    if (state == S_PRELOAD && left != '0)
      rda_valid_o = (left != 16'(DIM)) || (drain >= LATENCY);
    if (state == S_COMPUTE && left != '0) begin
      rda_valid_o = !a_done;
      rdd_valid_o = !d_zero && !d_done && !(same_bank && !a_done);
    end
  end
  assign rda_bank_o = bank_of(a_ptr);
  assign rda_row_o  = a_ptr[SP_AW-1:0];
  assign rdd_bank_o = bank_of(d_ptr);
  assign rdd_row_o  = d_ptr[SP_AW-1:0];

  logic a_fire, d_fire;
  assign a_fire = rda_valid_o && rda_ready_i;
  assign d_fire = rdd_valid_o && rdd_ready_i;

  // -------------------------------------------------------- row assembly
  logic [ROW_W-1:0] a_hold;
  tag_t             a_hold_tag;
  logic             a_have;
  logic [ROW_W-1:0] a_cur;
  tag_t             a_cur_tag;
  logic             a_avail, d_avail, push;

  assign a_cur     = a_q ? sp_resp_data_i[a_bank_q] : a_hold;
  assign a_cur_tag = a_q ? sp_resp_tag_i[a_bank_q]  : a_hold_tag;
  assign a_avail   = a_q || a_have;
  assign d_avail   = d_q;
  assign push = (state == S_COMPUTE || state == S_DRAIN) && a_avail && !preload_rsp
             && (pend_dzero || d_avail);


  // -------------------------------------------------------- array
  logic signed [IN_W-1:0]  a_row [DIM];
  logic signed [ACC_W-1:0] d_row [DIM];
  logic signed [IN_W-1:0]  b_row [DIM];
  logic signed [ACC_W-1:0] c_row [DIM];
  logic                    out_valid;
  tag_t                    out_tag;
  logic [ROW_W-1:0]        d_raw;

  assign d_raw = sp_resp_data_i[d_bank_q];
  always_comb
    for (int i = 0; i < DIM; i++) begin
      a_row[i] = a_cur[i*IN_W +: IN_W];
      b_row[i] = sp_resp_data_i[a_bank_q][i*IN_W +: IN_W];
      d_row[i] = pend_dzero ? '0 : ACC_W'(signed'(d_raw[i*IN_W +: IN_W]));
    end

  dift_mesh #(.DIM(DIM)) u_array (
    .clk                (clk),
    .rst_n              (rst_n),
    .b_start_i          (preload_rsp && b_first),
    .b_load_i           (preload_rsp),
    .b_row_i            (b_row),
    .b_tag_i            (sp_resp_tag_i[a_bank_q]),
    .row_valid_i        (push),
    .a_row_i            (a_row),
    .a_tag_i            (a_cur_tag),
    .d_row_i            (d_row),
    .d_tag_i            (pend_dzero ? tag_t'('0) : sp_resp_tag_i[d_bank_q]),
    .out_valid_o        (out_valid),
    .c_row_o            (c_row),
    .c_tag_o            (out_tag),
    .row_violation_o    (row_violation_o),
    .weight_violation_o (weight_violation_o)
  );

  // -------------------------------------------------------- output rows
  logic [15:0] out_ptr;
  logic        c_accum, out_accum;
  assign acc_wr_valid_o = out_valid;
  assign acc_wr_row_o   = out_ptr[ACC_AW-1:0];
  assign acc_wr_bank_o  = (ACC_BANKS > 1) ? ACC_BW'(out_ptr >> ACC_AW) : '0;
  assign acc_wr_tag_o   = out_tag;
  assign acc_wr_accum_o = out_accum;
  always_comb
    for (int i = 0; i < DIM; i++) acc_wr_data_o[i*ACC_W +: ACC_W] = c_row[i];

  // -------------------------------------------------------- control
  assign cmd_ready_o = (state == S_IDLE) ||
                       (state == S_DRAIN && !cmd_preload_i && !a_avail && !a_q);
  assign busy_o      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state       <= S_IDLE;
      a_ptr       <= '0;
      d_ptr       <= '0;
      c_ptr       <= '0;
      out_ptr     <= '0;
      c_accum     <= 1'b0;
      out_accum   <= 1'b0;
      left        <= '0;
      b_left      <= '0;
      d_zero      <= 1'b0;
      pend_dzero  <= 1'b0;
      a_done      <= 1'b0;
      d_done      <= 1'b0;
      a_q         <= 1'b0;
      d_q         <= 1'b0;
      a_bank_q    <= '0;
      d_bank_q    <= '0;
      a_have      <= 1'b0;
      preload_rsp <= 1'b0;
      b_first     <= 1'b0;
      drain       <= '0;
    end else begin
      a_q         <= a_fire;
      d_q         <= d_fire;
      a_bank_q    <= rda_bank_o;
      d_bank_q    <= rdd_bank_o;
      preload_rsp <= a_fire && (state == S_PRELOAD);
      if (preload_rsp) b_first <= 1'b0;

      // hold an A row whose D row comes later (shared bank)
      if (push)              a_have <= 1'b0;
      else if (a_q && !preload_rsp) begin
        a_have     <= 1'b1;
        a_hold     <= sp_resp_data_i[a_bank_q];
        a_hold_tag <= sp_resp_tag_i[a_bank_q];
      end

      if (out_valid) out_ptr <= out_ptr + 1'b1;

      // drain counter: cycles since the last row or weight entered the array
      if (push || preload_rsp) drain <= '0;
      else if (drain != '1)    drain <= drain + 1'b1;

      unique case (state)
        S_IDLE, S_DRAIN: begin
          if (state == S_DRAIN && drain >= LATENCY && !a_avail && !a_q)
            state <= S_IDLE;
          if (cmd_valid_i && cmd_ready_o) begin
            if (cmd_preload_i) begin
              // preload only once the array is empty
              a_ptr  <= cmd_addr1_i + 16'(DIM - 1);
              c_ptr  <= cmd_addr2_i;
              c_accum <= cmd_accum_i;
              left   <= 16'(DIM);
              b_left <= 16'(DIM);
              state  <= S_PRELOAD;
            end else if (cmd_rows_i != '0) begin
              a_ptr      <= cmd_addr1_i;
              d_ptr      <= cmd_addr2_i;
              left       <= cmd_rows_i;
              d_zero     <= cmd_d_zero_i;
              pend_dzero <= cmd_d_zero_i;
              a_done     <= 1'b0;
              d_done     <= 1'b0;
              state      <= S_COMPUTE;
            end
          end
        end
        S_PRELOAD: begin
          if (a_fire) begin
            a_ptr <= a_ptr - 1'b1;
            left  <= left - 1'b1;
            if (left == 16'(DIM)) b_first <= 1'b1;
          end
          if (preload_rsp) begin
            b_left <= b_left - 1'b1;
            if (b_left == 16'd1) begin
              out_ptr   <= c_ptr;
              out_accum <= c_accum;
              state   <= S_DRAIN;
            end
          end
        end
        S_COMPUTE: begin
          if (a_fire) a_done <= 1'b1;
          if (d_fire) d_done <= 1'b1;
          if ((a_done || a_fire) && (d_zero || d_done || d_fire)) begin
            a_ptr  <= a_ptr + 1'b1;
            d_ptr  <= d_ptr + 1'b1;
            left   <= left - 1'b1;
            a_done <= 1'b0;
            d_done <= 1'b0;
            if (left == 16'd1) state <= S_DRAIN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end

endmodule
