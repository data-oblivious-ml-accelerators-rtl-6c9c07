// cmd_router: decodes accelerator commands and hands them to the three
// controllers (move-in DMA, move-out DMA, execute).
//
// Command fields (funct7 / rs1 / rs2):
//   CONFIG  (0)  rs1[0] = apply ReLU on move-out, rs1[12:8] = move-out
//                scale shift (outputs divided by 2^shift, rounded)
//   MVIN    (2)  rs1 = memory address, rs2[15:0] = scratchpad row,
//                rs2[31:16] = rows
//   MVOUT   (3)  rs1 = memory address, rs2[15:0] = accumulator row,
//                rs2[31:16] = rows
//   COMPUTE (4)  rs1[15:0] = A row, rs1[31:16] = rows, rs2[15:0] = D row,
//                rs2[63] = D is zero
//   PRELOAD (6)  rs1[15:0] = B row (DIM rows), rs2[15:0] = first output
//                accumulator row, rs2[62] = add the outputs to the
//                accumulator rows instead of overwriting them
// Other funct values are consumed and ignored. The router keeps no queue: a
// command is handed over in the cycle it is accepted, in program order.
// Decoupled access/execute: the execute controller may run at the same time
// as either DMA controller, as long as they work on different rows. The
// router remembers the row ranges of the commands in flight:
//   ld_*   scratchpad rows the running MVIN writes
//   st_*   accumulator rows the running MVOUT reads
//   exr*   scratchpad rows the latest PRELOAD/COMPUTE reads (B; or A and D)
//   win_*  accumulator rows written since the execute controller was last
//          idle, nxt_out being where the next output row goes
// and accepts a command only when it does not overlap the ranges of a busy
// controller (read-after-write and write-after-read in both directions).
// MVIN and MVOUT still exclude each other, because both touch host memory
// and the router does not compare memory addresses. Ranges are compared as
// plain 17-bit intervals (a command's rows must not wrap the address
// space). Nothing is accepted while the memories are still clearing after
// reset (sys_ready_i low). The hazard rules only order the work correctly:
// the tag checks do not depend on them, since every row carries its tag.
// The funct numbering follows Gemmini; the operand fields and the hazard
// tracking are this design's own.
module cmd_router
  import dolma_pkg::*;
#(
  parameter int DIM = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sys_ready_i,
  // checked command
  input  logic            cmd_valid_i,
  output logic            cmd_ready_o,
  input  logic [6:0]      cmd_funct_i,
  input  logic [XLEN-1:0] cmd_rs1_i,
  input  logic [XLEN-1:0] cmd_rs2_i,
  // move-in
  output logic            ld_valid_o,
  input  logic            ld_ready_i,
  input  logic            ld_busy_i,
  output logic [XLEN-1:0] ld_mem_addr_o,
  output logic [15:0]     ld_sp_addr_o,
  output logic [15:0]     ld_rows_o,
  // move-out
  output logic            st_valid_o,
  input  logic            st_ready_i,
  input  logic            st_busy_i,
  output logic [XLEN-1:0] st_mem_addr_o,
  output logic [15:0]     st_acc_addr_o,
  output logic [15:0]     st_rows_o,
  output logic            st_relu_o,
  output logic [4:0]      st_shift_o,
  // execute
  output logic            ex_valid_o,
  input  logic            ex_ready_i,
  input  logic            ex_busy_i,
  output logic            ex_preload_o,
  output logic [15:0]     ex_addr1_o,
  output logic [15:0]     ex_addr2_o,
  output logic [15:0]     ex_rows_o,
  output logic            ex_d_zero_o,
  output logic            ex_accum_o
);

  logic relu;
  logic [4:0] shift;
  logic is_cfg, is_ld, is_st, is_ex;

  assign is_cfg = cmd_funct_i == FN_CONFIG;
  assign is_ld  = cmd_funct_i == FN_MVIN;
  assign is_st  = cmd_funct_i == FN_MVOUT;
  assign is_ex  = (cmd_funct_i == FN_COMPUTE) || (cmd_funct_i == FN_PRELOAD);

  logic go;
  assign go = cmd_valid_i && sys_ready_i;

  // -------------------------------------------------------- hazards
  typedef logic [16:0] row_t;
  function automatic logic overlap(row_t lo1, row_t hi1, row_t lo2, row_t hi2);
    return (lo1 < hi1) && (lo2 < hi2) && (lo1 < hi2) && (lo2 < hi1);   // both non-empty
  endfunction

  row_t ld_lo, ld_hi, st_lo, st_hi, exr0_lo, exr0_hi, exr1_lo, exr1_hi, win_lo, nxt_out;
  row_t n_lo, n_hi, d_lo, d_hi, o_lo, o_hi;
  logic is_pre, d_zero, ld_ok, st_ok, ex_ok;

  assign is_pre = cmd_funct_i == FN_PRELOAD;
  assign d_zero = cmd_rs2_i[63];
  // rows of the new command: MVIN/MVOUT range, A or B range, D range,
  // accumulator rows a COMPUTE will write
  always_comb begin
    n_lo = row_t'(is_ex ? cmd_rs1_i[15:0] : cmd_rs2_i[15:0]);
    if (is_ex) n_hi = n_lo + (is_pre ? row_t'(DIM) : row_t'(cmd_rs1_i[31:16]));
    else       n_hi = n_lo + row_t'(cmd_rs2_i[31:16]);
    d_lo = row_t'(cmd_rs2_i[15:0]);
    d_hi = (is_pre || d_zero) ? d_lo : d_lo + row_t'(cmd_rs1_i[31:16]);
    o_lo = nxt_out;
    o_hi = is_pre ? nxt_out : nxt_out + row_t'(cmd_rs1_i[31:16]);
  end

  assign ld_ok = !st_busy_i &&
                 (!ex_busy_i || (!overlap(n_lo, n_hi, exr0_lo, exr0_hi) &&
                                 !overlap(n_lo, n_hi, exr1_lo, exr1_hi)));
  assign st_ok = !ld_busy_i && (!ex_busy_i || !overlap(n_lo, n_hi, win_lo, nxt_out));
  assign ex_ok = (!ld_busy_i || (!overlap(n_lo, n_hi, ld_lo, ld_hi) &&
                                 !overlap(d_lo, d_hi, ld_lo, ld_hi))) &&
                 (!st_busy_i || !overlap(o_lo, o_hi, st_lo, st_hi));

  assign ld_valid_o = go && is_ld && ld_ok;
  assign st_valid_o = go && is_st && st_ok;
  assign ex_valid_o = go && is_ex && ex_ok;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ld_lo <= '0; ld_hi <= '0; st_lo <= '0; st_hi <= '0;
      exr0_lo <= '0; exr0_hi <= '0; exr1_lo <= '0; exr1_hi <= '0;
      win_lo <= '0; nxt_out <= '0;
    end else begin
      if (ld_valid_o && ld_ready_i) begin ld_lo <= n_lo; ld_hi <= n_hi; end
      if (st_valid_o && st_ready_i) begin st_lo <= n_lo; st_hi <= n_hi; end
      if (ex_valid_o && ex_ready_i) begin
        exr0_lo <= n_lo; exr0_hi <= n_hi;
        exr1_lo <= d_lo; exr1_hi <= d_hi;
        if (is_pre) begin
          win_lo  <= row_t'(cmd_rs2_i[15:0]);
          nxt_out <= row_t'(cmd_rs2_i[15:0]);
        end else begin
          if (!ex_busy_i) win_lo <= nxt_out;
          nxt_out <= o_hi;
        end
      end
    end

  always_comb begin
    if (!sys_ready_i)  cmd_ready_o = 1'b0;
    else if (is_ld)    cmd_ready_o = ld_ready_i && ld_ok;
    else if (is_st)    cmd_ready_o = st_ready_i && st_ok;
    else if (is_ex)    cmd_ready_o = ex_ready_i && ex_ok;
    else               cmd_ready_o = 1'b1;   // CONFIG and unknown functs
  end

  assign ld_mem_addr_o = cmd_rs1_i;
  assign ld_sp_addr_o  = cmd_rs2_i[15:0];
  assign ld_rows_o     = cmd_rs2_i[31:16];

  assign st_mem_addr_o = cmd_rs1_i;
  assign st_acc_addr_o = cmd_rs2_i[15:0];
  assign st_rows_o     = cmd_rs2_i[31:16];
  assign st_relu_o     = relu;
  assign st_shift_o    = shift;

  assign ex_preload_o  = cmd_funct_i == FN_PRELOAD;
  assign ex_addr1_o    = cmd_rs1_i[15:0];
  assign ex_addr2_o    = cmd_rs2_i[15:0];
  assign ex_rows_o     = cmd_rs1_i[31:16];
  assign ex_d_zero_o   = cmd_rs2_i[63];
  assign ex_accum_o    = cmd_rs2_i[62];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      relu  <= 1'b0;
      shift <= '0;
    end else if (go && is_cfg && cmd_ready_o) begin
      relu  <= cmd_rs1_i[0];
      shift <= cmd_rs1_i[12:8];
    end

endmodule
