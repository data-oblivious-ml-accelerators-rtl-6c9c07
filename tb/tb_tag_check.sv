// tb_tag_check: checks the tag combination rule on random and corner-case
// tag triples. The reference counts distinct non-zero tags: more than one
// is a violation; otherwise the output is that tag (or zero).
module tb_tag_check;
  import dolma_pkg::*;
  int checks = 0, failures = 0;
  tag_t [2:0] tags;
  tag_t tag;
  logic viol;

  tag_check #(.N(3)) dut (.tags_i(tags), .tag_o(tag), .violation_o(viol));

  task automatic check_one(tag_t t0, tag_t t1, tag_t t2);
    tag_t nz;
    int   distinct;
    logic exp_v;
    tags = {t2, t1, t0};
    #1;
    nz = '0; distinct = 0;
    foreach (tags[i])
      if (tags[i] != 0) begin
        if (distinct == 0) begin nz = tags[i]; distinct = 1; end
        else if (tags[i] != nz && distinct == 1) distinct = 2;
      end
    exp_v = distinct > 1;
    checks++;
    if (viol !== exp_v || (!exp_v && tag !== nz)) begin
      failures++;
      $display("FAIL tags %0d %0d %0d -> tag %0d viol %0b", t0, t1, t2, tag, viol);
    end
  endtask

  initial begin
    check_one(0, 0, 0);
    check_one(5, 0, 0);
    check_one(0, 5, 5);
    check_one(5, 5, 5);
    check_one(5, 7, 0);
    check_one(0, 3, 1);
    check_one(1, 2, 3);
    repeat (2000) begin
      tag_t p, q;
      p = tag_t'($urandom_range(0, 3));
      q = tag_t'($urandom);
      check_one($urandom_range(0, 1) ? p : q, $urandom_range(0, 1) ? p : 0,
                $urandom_range(0, 1) ? p : tag_t'($urandom_range(0, 3)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
