// dolma_top: a weight-stationary matrix accelerator that keeps blinded
// (secret, tagged) client data from leaking, attached to a host over a RoCC
// style command port.
//
// Every 64-bit word in host memory carries an 8-bit tag (0 = public, any
// other value = one client's secret domain). The accelerator keeps one tag per
// scratchpad row and per accumulator row, and one tag per row moving through
// the systolic array, so it never needs tag logic in the PEs:
//   rocc_cmd_check  drops commands whose rs1/rs2 are blinded
//   cmd_router      decodes and dispatches to the three controllers
//   load_ctrl       memory -> scratchpad, one tagged 64-bit beat at a time
//   exec_ctrl       scratchpad -> DIFT systolic array -> accumulator
//   store_ctrl      accumulator -> activation -> memory, tags preserved
//   scratchpad_bank SP_BANKS scratchpad banks (DIM x 8-bit rows) and
//                   ACC_BANKS accumulator banks (DIM x 32-bit rows), each with
//                   read-check-write of the row tag; the accumulator
//                   banks can also add an output row to the stored row
//   tlb_fill_check  zeroes blinded page-table entries on the TLB refill path
// The TLB and page-table walker are outside this design (their refill port is
// brought out); the DMA uses the addresses it is given.
// Fault: the first policy violation (blinded command operand, tag mixing in
// the array, among the weights or in a scratchpad row, blinded PTE) sets a
// sticky fault_o with its cause. From then on commands are consumed and
// ignored and no row is written to the accumulator or to memory, until reset.
// After reset the banks clear themselves (SP_ROWS cycles) before the first
// command is accepted. The structure follows the paper; command format,
// hazard rule, sizes and fault handling are this design's choices.
module dolma_top
  import dolma_pkg::*;
#(
  parameter int DIM       = 32,
  parameter int SP_KB     = 256,
  parameter int ACC_KB    = 64,
  parameter int SP_BANKS  = 4,
  parameter int ACC_BANKS = 2,
  localparam int SP_ROWS   = SP_KB * 1024 / (SP_BANKS * DIM * IN_W / 8),
  localparam int ACC_ROWS  = ACC_KB * 1024 / (ACC_BANKS * DIM * ACC_W / 8),
  localparam int ROW_W     = DIM * IN_W,
  localparam int ACC_ROW_W = DIM * ACC_W,
  localparam int SP_AW     = $clog2(SP_ROWS),
  localparam int SP_BW     = (SP_BANKS > 1) ? $clog2(SP_BANKS) : 1,
  localparam int ACC_AW    = $clog2(ACC_ROWS),
  localparam int ACC_BW    = (ACC_BANKS > 1) ? $clog2(ACC_BANKS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // RoCC command from the host, operands with their tags
  input  logic              cmd_valid_i,
  output logic              cmd_ready_o,
  input  logic [6:0]        cmd_funct_i,
  input  logic [XLEN-1:0]   cmd_rs1_i,
  input  tag_t              cmd_rs1_tag_i,
  input  logic [XLEN-1:0]   cmd_rs2_i,
  input  tag_t              cmd_rs2_tag_i,
  output logic              busy_o,
  output logic              fault_o,
  output fault_e            fault_cause_o,
  // tagged memory, read channel
  output logic              mem_rd_req_valid_o,
  input  logic              mem_rd_req_ready_i,
  output logic [XLEN-1:0]   mem_rd_req_addr_o,
  input  logic              mem_rd_resp_valid_i,
  output logic              mem_rd_resp_ready_o,
  input  logic [BEAT_W-1:0] mem_rd_resp_data_i,
  input  tag_t              mem_rd_resp_tag_i,
  // tagged memory, write channel
  output logic              mem_wr_req_valid_o,
  input  logic              mem_wr_req_ready_i,
  output logic [XLEN-1:0]   mem_wr_req_addr_o,
  output logic [BEAT_W-1:0] mem_wr_req_data_o,
  output tag_t              mem_wr_req_tag_o,
  // TLB refill path (page-table walker in, TLB out)
  input  logic              ptw_valid_i,
  input  logic [XLEN-1:0]   ptw_pte_i,
  input  tag_t              ptw_tag_i,
  output logic              tlb_refill_valid_o,
  output logic [XLEN-1:0]   tlb_refill_pte_o
);

  // ------------------------------------------------------------ fault state
  logic   fault;
  fault_e cause;
  logic   v_cmd, v_row, v_wgt, v_pte;
  logic [SP_BANKS-1:0]  v_sp;
  logic [ACC_BANKS-1:0] v_acc;
  fault_e new_cause;

  always_comb begin
    new_cause = FAULT_NONE;
    if (v_pte)               new_cause = FAULT_BLINDED_PTE;
    if (|v_sp || |v_acc)     new_cause = FAULT_MIX_SPAD;
    if (v_wgt)               new_cause = FAULT_MIX_WEIGHTS;
    if (v_row)               new_cause = FAULT_MIX_ARRAY;
    if (v_cmd)               new_cause = FAULT_BLINDED_CMD;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      fault <= 1'b0;
      cause <= FAULT_NONE;
    end else if (!fault && new_cause != FAULT_NONE) begin
      fault <= 1'b1;
      cause <= new_cause;
    end

  assign fault_o       = fault;
  assign fault_cause_o = cause;

  // ------------------------------------------------------------ commands
  logic            chk_valid, chk_ready;
  logic [6:0]      chk_funct;
  logic [XLEN-1:0] chk_rs1, chk_rs2;
  logic            rt_ready;

  rocc_cmd_check u_cmd_check (
    .in_valid_i   (cmd_valid_i),
    .in_ready_o   (cmd_ready_o),
    .in_funct_i   (cmd_funct_i),
    .in_rs1_i     (cmd_rs1_i),
    .in_rs1_tag_i (cmd_rs1_tag_i),
    .in_rs2_i     (cmd_rs2_i),
    .in_rs2_tag_i (cmd_rs2_tag_i),
    .out_valid_o  (chk_valid),
    .out_ready_i  (chk_ready),
    .out_funct_o  (chk_funct),
    .out_rs1_o    (chk_rs1),
    .out_rs2_o    (chk_rs2),
    .blinded_o    (v_cmd)
  );

  // after a fault, commands are swallowed
  assign chk_ready = fault ? 1'b1 : rt_ready;

  logic            sys_ready;
  logic            ld_valid, ld_ready, ld_busy;
  logic [XLEN-1:0] ld_mem_addr;
  logic [15:0]     ld_sp_addr, ld_rows;
  logic            st_valid, st_ready, st_busy, st_relu;
  logic [4:0]      st_shift;
  logic [XLEN-1:0] st_mem_addr;
  logic [15:0]     st_acc_addr, st_rows;
  logic            ex_valid, ex_ready, ex_busy, ex_preload, ex_d_zero, ex_accum;
  logic [15:0]     ex_addr1, ex_addr2, ex_rows;

  cmd_router #(.DIM(DIM)) u_router (
    .clk           (clk),
    .rst_n         (rst_n),
    .sys_ready_i   (sys_ready),
    .cmd_valid_i   (chk_valid && !fault),
    .cmd_ready_o   (rt_ready),
    .cmd_funct_i   (chk_funct),
    .cmd_rs1_i     (chk_rs1),
    .cmd_rs2_i     (chk_rs2),
    .ld_valid_o    (ld_valid),
    .ld_ready_i    (ld_ready),
    .ld_busy_i     (ld_busy),
    .ld_mem_addr_o (ld_mem_addr),
    .ld_sp_addr_o  (ld_sp_addr),
    .ld_rows_o     (ld_rows),
    .st_valid_o    (st_valid),
    .st_ready_i    (st_ready),
    .st_busy_i     (st_busy),
    .st_mem_addr_o (st_mem_addr),
    .st_acc_addr_o (st_acc_addr),
    .st_rows_o     (st_rows),
    .st_relu_o     (st_relu),
    .st_shift_o    (st_shift),
    .ex_valid_o    (ex_valid),
    .ex_ready_i    (ex_ready),
    .ex_busy_i     (ex_busy),
    .ex_preload_o  (ex_preload),
    .ex_addr1_o    (ex_addr1),
    .ex_addr2_o    (ex_addr2),
    .ex_rows_o     (ex_rows),
    .ex_d_zero_o   (ex_d_zero),
    .ex_accum_o    (ex_accum)
  );

  assign busy_o = ld_busy || st_busy || ex_busy;

  // ------------------------------------------------------------ scratchpad
  logic                sp_init   [SP_BANKS];
  logic                sp_rd_v   [SP_BANKS];
  logic                sp_rd_r   [SP_BANKS];
  logic [SP_AW-1:0]    sp_rd_a   [SP_BANKS];
  logic                sp_wr_v   [SP_BANKS];
  logic                sp_wr_r   [SP_BANKS];
  logic                sp_rsp_v  [SP_BANKS];
  logic [ROW_W-1:0]    sp_rsp_d  [SP_BANKS];
  tag_t                sp_rsp_t  [SP_BANKS];

  logic                ldw_valid, ldw_ready;
  logic [SP_BW-1:0]    ldw_bank;
  logic [SP_AW-1:0]    ldw_row;
  logic [ROW_W-1:0]    ldw_data;
  logic [ROW_W/8-1:0]  ldw_mask;
  tag_t                ldw_tag;

  logic                rda_v, rda_r, rdd_v, rdd_r;
  logic [SP_BW-1:0]    rda_b, rdd_b;
  logic [SP_AW-1:0]    rda_a, rdd_a;

  for (genvar b = 0; b < SP_BANKS; b++) begin : g_sp
    logic sel_a, sel_d;
    assign sel_a      = rda_v && rda_b == SP_BW'(b);
    assign sel_d      = rdd_v && rdd_b == SP_BW'(b) && !sel_a;
    assign sp_rd_v[b] = sel_a || sel_d;
    assign sp_rd_a[b] = sel_a ? rda_a : rdd_a;
    assign sp_wr_v[b] = ldw_valid && ldw_bank == SP_BW'(b) && !fault;

    scratchpad_bank #(.ROWS(SP_ROWS), .DATA_W(ROW_W), .LANE_W(IN_W)) u_bank (
      .clk             (clk),
      .rst_n           (rst_n),
      .init_busy_o     (sp_init[b]),
      .rd_valid_i      (sp_rd_v[b]),
      .rd_ready_o      (sp_rd_r[b]),
      .rd_addr_i       (sp_rd_a[b]),
      .wr_valid_i      (sp_wr_v[b]),
      .wr_ready_o      (sp_wr_r[b]),
      .wr_addr_i       (ldw_row),
      .wr_data_i       (ldw_data),
      .wr_mask_i       (ldw_mask),
      .wr_tag_i        (ldw_tag),
      .wr_accum_i      (1'b0),
      .rd_resp_valid_o (sp_rsp_v[b]),
      .rd_resp_data_o  (sp_rsp_d[b]),
      .rd_resp_tag_o   (sp_rsp_t[b]),
      .violation_o     (v_sp[b])
    );
  end

  assign rda_r     = sp_rd_r[rda_b];
  assign rdd_r     = sp_rd_r[rdd_b] && !(rda_v && rda_b == rdd_b);
  assign ldw_ready = sp_wr_r[ldw_bank];

  // ------------------------------------------------------------ accumulator
  logic                acc_init  [ACC_BANKS];
  logic                acc_rd_v  [ACC_BANKS];
  logic                acc_rd_r  [ACC_BANKS];
  logic                acc_wr_r  [ACC_BANKS];
  logic                acc_rsp_v [ACC_BANKS];
  logic [ACC_ROW_W-1:0] acc_rsp_d [ACC_BANKS];
  tag_t                acc_rsp_t [ACC_BANKS];

  logic                 exw_valid;
  logic [ACC_BW-1:0]    exw_bank;
  logic [ACC_AW-1:0]    exw_row;
  logic [ACC_ROW_W-1:0] exw_data;
  tag_t                 exw_tag;
  logic                 exw_accum;

  logic                 str_valid, str_ready;
  logic [ACC_BW-1:0]    str_bank;
  logic [ACC_AW-1:0]    str_row;

  for (genvar b = 0; b < ACC_BANKS; b++) begin : g_acc
    assign acc_rd_v[b] = str_valid && str_bank == ACC_BW'(b);
    scratchpad_bank #(.ROWS(ACC_ROWS), .DATA_W(ACC_ROW_W), .LANE_W(ACC_W)) u_bank (
      .clk             (clk),
      .rst_n           (rst_n),
      .init_busy_o     (acc_init[b]),
      .rd_valid_i      (acc_rd_v[b]),
      .rd_ready_o      (acc_rd_r[b]),
      .rd_addr_i       (str_row),
      .wr_valid_i      (exw_valid && exw_bank == ACC_BW'(b) && !fault),
      .wr_ready_o      (acc_wr_r[b]),
      .wr_addr_i       (exw_row),
      .wr_data_i       (exw_data),
      .wr_mask_i       ('1),
      .wr_tag_i        (exw_tag),
      .wr_accum_i      (exw_accum),
      .rd_resp_valid_o (acc_rsp_v[b]),
      .rd_resp_data_o  (acc_rsp_d[b]),
      .rd_resp_tag_o   (acc_rsp_t[b]),
      .violation_o     (v_acc[b])
    );
  end

  assign str_ready = acc_rd_r[str_bank];

  // the store controller waits for one response at a time, from its bank
  logic              st_rsp_v;
  logic [ACC_BW-1:0] str_bank_q;
  always_ff @(posedge clk) str_bank_q <= str_bank;
  assign st_rsp_v = acc_rsp_v[str_bank_q];

  always_comb begin
    sys_ready = 1'b1;
    for (int b = 0; b < SP_BANKS; b++)  if (sp_init[b])  sys_ready = 1'b0;
    for (int b = 0; b < ACC_BANKS; b++) if (acc_init[b]) sys_ready = 1'b0;
  end

  // ------------------------------------------------------------ controllers
  load_ctrl #(.DIM(DIM), .SP_BANKS(SP_BANKS), .SP_ROWS(SP_ROWS)) u_load (
    .clk             (clk),
    .rst_n           (rst_n),
    .cmd_valid_i     (ld_valid),
    .cmd_ready_o     (ld_ready),
    .cmd_mem_addr_i  (ld_mem_addr),
    .cmd_sp_addr_i   (ld_sp_addr),
    .cmd_rows_i      (ld_rows),
    .busy_o          (ld_busy),
    .rd_req_valid_o  (mem_rd_req_valid_o),
    .rd_req_ready_i  (mem_rd_req_ready_i),
    .rd_req_addr_o   (mem_rd_req_addr_o),
    .rd_resp_valid_i (mem_rd_resp_valid_i),
    .rd_resp_ready_o (mem_rd_resp_ready_o),
    .rd_resp_data_i  (mem_rd_resp_data_i),
    .rd_resp_tag_i   (mem_rd_resp_tag_i),
    .sp_wr_valid_o   (ldw_valid),
    .sp_wr_ready_i   (ldw_ready),
    .sp_wr_bank_o    (ldw_bank),
    .sp_wr_row_o     (ldw_row),
    .sp_wr_data_o    (ldw_data),
    .sp_wr_mask_o    (ldw_mask),
    .sp_wr_tag_o     (ldw_tag)
  );

  exec_ctrl #(
    .DIM (DIM), .SP_BANKS (SP_BANKS), .SP_ROWS (SP_ROWS),
    .ACC_BANKS (ACC_BANKS), .ACC_ROWS (ACC_ROWS)
  ) u_exec (
    .clk                (clk),
    .rst_n              (rst_n),
    .cmd_valid_i        (ex_valid),
    .cmd_ready_o        (ex_ready),
    .cmd_preload_i      (ex_preload),
    .cmd_addr1_i        (ex_addr1),
    .cmd_addr2_i        (ex_addr2),
    .cmd_rows_i         (ex_rows),
    .cmd_d_zero_i       (ex_d_zero),
    .cmd_accum_i        (ex_accum),
    .busy_o             (ex_busy),
    .rda_valid_o        (rda_v),
    .rda_ready_i        (rda_r),
    .rda_bank_o         (rda_b),
    .rda_row_o          (rda_a),
    .rdd_valid_o        (rdd_v),
    .rdd_ready_i        (rdd_r),
    .rdd_bank_o         (rdd_b),
    .rdd_row_o          (rdd_a),
    .sp_resp_data_i     (sp_rsp_d),
    .sp_resp_tag_i      (sp_rsp_t),
    .acc_wr_valid_o     (exw_valid),
    .acc_wr_bank_o      (exw_bank),
    .acc_wr_row_o       (exw_row),
    .acc_wr_data_o      (exw_data),
    .acc_wr_tag_o       (exw_tag),
    .acc_wr_accum_o     (exw_accum),
    .row_violation_o    (v_row),
    .weight_violation_o (v_wgt)
  );

  logic st_wr_valid;
  store_ctrl #(.DIM(DIM), .ACC_BANKS(ACC_BANKS), .ACC_ROWS(ACC_ROWS)) u_store (
    .clk                 (clk),
    .rst_n               (rst_n),
    .cmd_valid_i         (st_valid),
    .cmd_ready_o         (st_ready),
    .cmd_mem_addr_i      (st_mem_addr),
    .cmd_acc_addr_i      (st_acc_addr),
    .cmd_rows_i          (st_rows),
    .cmd_relu_i          (st_relu),
    .cmd_shift_i         (st_shift),
    .busy_o              (st_busy),
    .acc_rd_valid_o      (str_valid),
    .acc_rd_ready_i      (str_ready),
    .acc_rd_bank_o       (str_bank),
    .acc_rd_row_o        (str_row),
    .acc_rd_resp_valid_i (st_rsp_v),
    .acc_rd_resp_data_i  (acc_rsp_d[str_bank_q]),
    .acc_rd_resp_tag_i   (acc_rsp_t[str_bank_q]),
    .wr_req_valid_o      (st_wr_valid),
    .wr_req_ready_i      (fault ? 1'b1 : mem_wr_req_ready_i),
    .wr_req_addr_o       (mem_wr_req_addr_o),
    .wr_req_data_o       (mem_wr_req_data_o),
    .wr_req_tag_o        (mem_wr_req_tag_o)
  );

  // nothing leaves the accelerator after a fault
  assign mem_wr_req_valid_o = st_wr_valid && !fault;

  // ------------------------------------------------------------ TLB refill
  tlb_fill_check u_tlb_check (
    .ptw_valid_i (ptw_valid_i),
    .ptw_pte_i   (ptw_pte_i),
    .ptw_tag_i   (ptw_tag_i),
    .tlb_valid_o (tlb_refill_valid_o),
    .tlb_pte_o   (tlb_refill_pte_o),
    .blinded_o   (v_pte)
  );

endmodule
