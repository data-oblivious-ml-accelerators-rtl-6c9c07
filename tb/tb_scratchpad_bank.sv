// tb_scratchpad_bank: random reads and full/partial writes, with tags 0, 5
// and 7, to a few rows of a 16-row bank, so that back-to-back accesses to
// one row (read-over-write and write-after-write) happen often. A reference
// model applies each write when it is accepted (a partial write that mixes
// two different non-zero tags is refused); every read response, one cycle
// after its request, must equal the model at the time of the request, and
// violation_o must pulse exactly for the refused writes. Also checked: the
// reset sweep (rows read as zero with tag 0), reads held off while a write
// is presented, and that forwarding, refusals and write priority each
// happened. Some writes are accumulating writes (two 32-bit lanes added to
// the row, checked like partial writes), also back to back to one row.
module tb_scratchpad_bank;
  import dolma_pkg::*;
  localparam int ROWS = 16, W = 64, M = W / 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init, rv, rr, wv, wr, wacc, rsv, viol;
  logic [3:0] ra, wa;
  logic [W-1:0] wd, rsd;
  logic [M-1:0] wm;
  tag_t wt, rst_tag;

  scratchpad_bank #(.ROWS(ROWS), .DATA_W(W), .LANE_W(32)) dut (
    .clk(clk), .rst_n(rst_n), .init_busy_o(init),
    .rd_valid_i(rv), .rd_ready_o(rr), .rd_addr_i(ra),
    .wr_valid_i(wv), .wr_ready_o(wr), .wr_addr_i(wa), .wr_data_i(wd), .wr_mask_i(wm), .wr_tag_i(wt), .wr_accum_i(wacc),
    .rd_resp_valid_o(rsv), .rd_resp_data_o(rsd), .rd_resp_tag_o(rst_tag), .violation_o(viol));

  logic [W-1:0] ref_d [ROWS];
  tag_t         ref_t [ROWS];
  logic         exp_rsv, exp_viol;
  logic [W-1:0] exp_d;
  tag_t         exp_t;
  int n_fwd = 0, n_viol = 0, n_prio = 0, n_partial_ok = 0, n_accum = 0;

  function automatic tag_t pick_tag();
    case ($urandom_range(0, 3))
      0, 1: return 0;
      2: return 5;
      default: return 7;
    endcase
  endfunction

  initial begin
    rv = 0; wv = 0; wacc = 0; ra = 0; wa = 0; wd = 0; wm = 0; wt = 0;
    exp_rsv = 0; exp_viol = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (init) @(negedge clk);
    foreach (ref_d[i]) begin ref_d[i] = '0; ref_t[i] = '0; end
    // reset sweep left every row zero
    for (int i = 0; i < ROWS; i++) begin
      rv = 1; ra = 4'(i);
      @(negedge clk);
      rv = 0;
      checks++;
      if (!rsv || rsd !== '0 || rst_tag !== '0) begin
        failures++; $display("FAIL row %0d not cleared", i);
      end
    end
    @(negedge clk);
    // random traffic; expectations for the response/violation in the next cycle
    repeat (4000) begin
      logic acc_w, acc_r;
      rv = $urandom_range(0, 2) != 0;
      wv = $urandom_range(0, 1);
      ra = 4'($urandom_range(0, 3));
      wa = 4'($urandom_range(0, 3));
      wd = {$urandom, $urandom};
      wm = $urandom_range(0, 2) == 0 ? '1 : M'(8'hF << (4 * $urandom_range(0, 1)));
      wt = pick_tag();
      wacc = $urandom_range(0, 4) == 0;
      #1;
      // write priority
      checks++;
      if (rr !== !wv) begin failures++; $display("FAIL rd_ready %0b with wr_valid %0b", rr, wv); end
      if (rv && wv) n_prio++;
      acc_w = wv && wr;
      acc_r = rv && rr;
      @(posedge clk);
      // model: reads see all earlier accepted writes
      exp_rsv  = acc_r;
      exp_d    = ref_d[ra];
      exp_t    = ref_t[ra];
      exp_viol = 0;
      if (acc_w) begin
        if (wacc) begin
          if (tags_conflict(ref_t[wa], wt)) exp_viol = 1;
          else begin
            ref_d[wa][31:0]  = ref_d[wa][31:0] + wd[31:0];
            ref_d[wa][63:32] = ref_d[wa][63:32] + wd[63:32];
            ref_t[wa] = ref_t[wa] | wt;
            n_accum++;
          end
        end else if (&wm) begin
          ref_d[wa] = wd; ref_t[wa] = wt;
        end else if (tags_conflict(ref_t[wa], wt)) begin
          exp_viol = 1;
        end else begin
          for (int b = 0; b < M; b++) if (wm[b]) ref_d[wa][b*8 +: 8] = wd[b*8 +: 8];
          ref_t[wa] = ref_t[wa] | wt;
          n_partial_ok++;
        end
      end
      #1;
      if (dut.fwd_hit) n_fwd++;
      checks++;
      if (rsv !== exp_rsv || (exp_rsv && (rsd !== exp_d || rst_tag !== exp_t))) begin
        failures++;
        $display("FAIL read: valid %0b data %h tag %0d expected %0b %h %0d", rsv, rsd, rst_tag, exp_rsv, exp_d, exp_t);
      end
      checks++;
      if (viol !== exp_viol) begin failures++; $display("FAIL violation %0b expected %0b", viol, exp_viol); end
      if (viol) n_viol++;
      @(negedge clk);
    end
    rv = 0; wv = 0;
    checks++;
    if (n_fwd == 0 || n_viol == 0 || n_prio == 0 || n_partial_ok == 0 || n_accum == 0) begin
      failures++;
      $display("FAIL mechanisms: fwd %0d viol %0d prio %0d partial %0d", n_fwd, n_viol, n_prio, n_partial_ok);
    end
    $display("forwarded %0d, refused %0d, write-priority %0d, partial writes %0d, accumulations %0d", n_fwd, n_viol, n_prio, n_partial_ok, n_accum);
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
