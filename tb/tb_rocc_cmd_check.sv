// tb_rocc_cmd_check: commands with and without blinded operands. Clean
// commands must pass with their operands and honour the router's ready;
// blinded ones must be consumed, never reach the router, and raise
// blinded_o.
module tb_rocc_cmd_check;
  import dolma_pkg::*;
  int checks = 0, failures = 0;
  logic iv, ir, ov, orr, bl;
  logic [6:0] f, fo;
  logic [XLEN-1:0] r1, r2, o1, o2;
  tag_t t1, t2;

  rocc_cmd_check dut (
    .in_valid_i(iv), .in_ready_o(ir), .in_funct_i(f), .in_rs1_i(r1), .in_rs1_tag_i(t1),
    .in_rs2_i(r2), .in_rs2_tag_i(t2), .out_valid_o(ov), .out_ready_i(orr),
    .out_funct_o(fo), .out_rs1_o(o1), .out_rs2_o(o2), .blinded_o(bl));

  initial begin
    repeat (1000) begin
      logic blind;
      iv = $urandom_range(0, 1); orr = $urandom_range(0, 1);
      f = 7'($urandom); r1 = {$urandom, $urandom}; r2 = {$urandom, $urandom};
      t1 = $urandom_range(0, 2) == 0 ? tag_t'($urandom_range(1, 255)) : '0;
      t2 = $urandom_range(0, 2) == 0 ? tag_t'($urandom_range(1, 255)) : '0;
      #1;
      blind = (t1 != 0) || (t2 != 0);
      checks++;
      if (blind) begin
        if (ov !== 0 || ir !== 1 || bl !== iv) failures++;
      end else begin
        if (ov !== iv || ir !== orr || bl !== 0 || o1 !== r1 || o2 !== r2 || fo !== f)
          failures++;
      end
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
