// tb_cmd_router: random commands against random controller ready/busy
// states, with row addresses and counts drawn from a small range so that
// commands often overlap and often do not. Checks the decoded operand
// fields, that each command goes only to its own controller, and that it is
// held back exactly when it would overlap the rows of a busy controller
// (model below: interval lists kept per controller, updated when a command
// is handed over), when MVIN and MVOUT would run together, or while the
// memories are clearing; that CONFIG sets the ReLU flag and scale passed
// with MVOUT, and that unknown functs are consumed. Counts commands held
// back and commands accepted while another controller was busy.
module tb_cmd_router;
  import dolma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sys, cv, cr, lv, lr, lb, sv, sr, sb, ev, er, eb, relu, epre, edz, eacc;
  logic [6:0] f;
  logic [XLEN-1:0] r1, r2, lma, sma;
  logic [15:0] lsp, lrows, sacc, srows, ea1, ea2, erows;

  localparam int DIM = 4;
  cmd_router #(.DIM(DIM)) dut (
    .clk(clk), .rst_n(rst_n), .sys_ready_i(sys), .cmd_valid_i(cv), .cmd_ready_o(cr),
    .cmd_funct_i(f), .cmd_rs1_i(r1), .cmd_rs2_i(r2),
    .ld_valid_o(lv), .ld_ready_i(lr), .ld_busy_i(lb), .ld_mem_addr_o(lma), .ld_sp_addr_o(lsp), .ld_rows_o(lrows),
    .st_valid_o(sv), .st_ready_i(sr), .st_busy_i(sb), .st_mem_addr_o(sma), .st_acc_addr_o(sacc),
    .st_rows_o(srows), .st_relu_o(relu), .st_shift_o(sshift),
    .ex_valid_o(ev), .ex_ready_i(er), .ex_busy_i(eb), .ex_preload_o(epre), .ex_addr1_o(ea1),
    .ex_addr2_o(ea2), .ex_rows_o(erows), .ex_d_zero_o(edz), .ex_accum_o(eacc));

  logic exp_relu = 0;
  logic [4:0] exp_shift = 0, sshift;
  int n_cfg = 0, n_blocked = 0, n_parallel = 0;
  // model: rows in use by each controller's latest command, [lo, hi)
  int m_ld [2], m_st [2], m_ra [2], m_rd [2], m_win_lo = 0, m_next = 0;

  function automatic logic ov(int lo1, int hi1, int lo2, int hi2);
    int lo, hi;
    lo = (lo1 > lo2) ? lo1 : lo2;
    hi = (hi1 < hi2) ? hi1 : hi2;
    return lo < hi;
  endfunction

  initial begin
    sys = 0; cv = 0; f = 0; r1 = 0; r2 = 0; lr = 0; lb = 0; sr = 0; sb = 0; er = 0; eb = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3000) begin
      logic el, es, ee, eready;
      int pick;
      sys = $urandom_range(0, 7) != 0;
      cv  = $urandom_range(0, 3) != 0;
      pick = $urandom_range(0, 6);
      f = (pick == 0) ? FN_CONFIG : (pick == 1) ? FN_MVIN : (pick == 2) ? FN_MVOUT :
          (pick == 3) ? FN_COMPUTE : (pick == 4) ? FN_PRELOAD : (pick == 5) ? 7'd9 : FN_MVIN;
      r1 = {$urandom, $urandom}; r2 = {$urandom, $urandom};
      r1[15:0] = 16'($urandom_range(0, 40)); r1[31:16] = 16'($urandom_range(0, 12));
      r2[15:0] = 16'($urandom_range(0, 40)); r2[31:16] = 16'($urandom_range(0, 12));
      lb = $urandom_range(0, 3) == 0; sb = $urandom_range(0, 3) == 0; eb = $urandom_range(0, 3) == 0;
      lr = !lb || $urandom_range(0, 1); sr = !sb; er = $urandom_range(0, 1);
      #1;
      begin
        int lo, hi, dlo, dhi, olo, ohi;
        logic okl, oks, oke;
        lo = int'(r2[15:0]); hi = lo + int'(r2[31:16]);                 // MVIN / MVOUT rows
        okl = !sb && (!eb || (!ov(lo, hi, m_ra[0], m_ra[1]) && !ov(lo, hi, m_rd[0], m_rd[1])));
        oks = !lb && (!eb || !ov(lo, hi, m_win_lo, m_next));
        if (f == FN_PRELOAD) begin
          lo = int'(r1[15:0]); hi = lo + DIM; dlo = 0; dhi = 0; olo = 0; ohi = 0;
        end else begin
          lo = int'(r1[15:0]); hi = lo + int'(r1[31:16]);
          dlo = int'(r2[15:0]); dhi = r2[63] ? dlo : dlo + int'(r1[31:16]);
          olo = m_next; ohi = m_next + int'(r1[31:16]);
        end
        oke = (!lb || (!ov(lo, hi, m_ld[0], m_ld[1]) && !ov(dlo, dhi, m_ld[0], m_ld[1]))) &&
              (!sb || !ov(olo, ohi, m_st[0], m_st[1]));
        el = cv && sys && f == FN_MVIN && okl;
        es = cv && sys && f == FN_MVOUT && oks;
        ee = cv && sys && (f == FN_COMPUTE || f == FN_PRELOAD) && oke;
        if (!sys) eready = 0;
        else if (f == FN_MVIN) eready = lr && okl;
        else if (f == FN_MVOUT) eready = sr && oks;
        else if (f == FN_COMPUTE || f == FN_PRELOAD) eready = er && oke;
        else eready = 1;
        if (cv && eready && ((f == FN_MVIN && eb) || (f == FN_MVOUT && eb) ||
                             ((f == FN_COMPUTE || f == FN_PRELOAD) && (lb || sb)))) n_parallel++;
        // model update when handed over
        if (cv && eready && sys) begin
          if (f == FN_MVIN)  m_ld = '{int'(r2[15:0]), int'(r2[15:0]) + int'(r2[31:16])};
          if (f == FN_MVOUT) m_st = '{int'(r2[15:0]), int'(r2[15:0]) + int'(r2[31:16])};
          if (f == FN_PRELOAD) begin
            m_ra = '{lo, hi}; m_rd = '{0, 0};
            m_win_lo = int'(r2[15:0]); m_next = int'(r2[15:0]);
          end
          if (f == FN_COMPUTE) begin
            m_ra = '{lo, hi}; m_rd = '{dlo, dhi};
            if (!eb) m_win_lo = m_next;
            m_next = ohi;
          end
        end
      end
      if (cv && !eready) n_blocked++;
      checks++;
      if (lv !== el || sv !== es || ev !== ee || cr !== eready) begin
        failures++; $display("FAIL funct %0d: valid %0b%0b%0b ready %0b", f, lv, sv, ev, cr);
      end
      checks++;
      if (lma !== r1 || lsp !== r2[15:0] || lrows !== r2[31:16] || sma !== r1 || sacc !== r2[15:0] ||
          srows !== r2[31:16] || ea1 !== r1[15:0] || ea2 !== r2[15:0] || erows !== r1[31:16] ||
          edz !== r2[63] || eacc !== r2[62] || epre !== (f == FN_PRELOAD) || relu !== exp_relu || sshift !== exp_shift) begin
        failures++; $display("FAIL fields for funct %0d", f);
      end
      @(posedge clk);
      if (cv && sys && f == FN_CONFIG) begin exp_relu = r1[0]; exp_shift = r1[12:8]; n_cfg++; end
      @(negedge clk);
    end
    checks++;
    if (n_cfg == 0 || n_blocked == 0 || n_parallel == 0) failures++;
    $display("held back %0d, accepted beside a busy controller %0d", n_blocked, n_parallel);
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
