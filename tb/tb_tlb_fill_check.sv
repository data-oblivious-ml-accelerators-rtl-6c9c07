// tb_tlb_fill_check: page-table entries with zero and non-zero tags. A
// blinded entry must reach the TLB as zero with blinded_o raised; a public
// one must pass unchanged.
module tb_tlb_fill_check;
  import dolma_pkg::*;
  int checks = 0, failures = 0;
  logic v, vo, bl;
  logic [XLEN-1:0] pte, pte_o;
  tag_t t;

  tlb_fill_check dut (.ptw_valid_i(v), .ptw_pte_i(pte), .ptw_tag_i(t),
                      .tlb_valid_o(vo), .tlb_pte_o(pte_o), .blinded_o(bl));

  initial begin
    repeat (1000) begin
      v = $urandom_range(0, 1); pte = {$urandom, $urandom | 1};
      t = $urandom_range(0, 1) ? tag_t'($urandom_range(1, 255)) : '0;
      #1;
      checks++;
      if (vo !== v) failures++;
      if (t != 0) begin
        if (pte_o !== '0 || bl !== v) failures++;
      end else if (pte_o !== pte || bl !== 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
