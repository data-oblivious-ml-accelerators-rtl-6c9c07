// tag_check: combines the tags of N rows that are about to be mixed.
//
// The output tag is the bitwise OR of the inputs. Because mixing two different
// non-zero tags is forbidden, the OR is only meaningful when all non-zero inputs
// are equal; violation_o flags every case where two non-zero tags differ, and
// the caller must then discard the result. Purely combinational.
// The rule (OR, fault on two different non-zero tags) is the paper's; the
// pairwise-compare structure is this design's.
module tag_check
  import dolma_pkg::*;
#(
  parameter int N = 3
) (
  input  tag_t [N-1:0] tags_i,
  output tag_t         tag_o,
  output logic         violation_o
);

  always_comb begin
    tag_o       = '0;
    violation_o = 1'b0;
    for (int i = 0; i < N; i++) begin
      tag_o = tag_o | tags_i[i];
      for (int j = i + 1; j < N; j++)
        if (tags_conflict(tags_i[i], tags_i[j])) violation_o = 1'b1;
    end
  end

endmodule
