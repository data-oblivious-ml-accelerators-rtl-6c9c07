// tb_tag_queue: random valid/tag pairs go in every cycle; each must come out
// exactly LATENCY cycles later, and nothing valid may come out right after
// reset.
module tb_tag_queue;
  import dolma_pkg::*;
  localparam int L = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic vi, vo;
  tag_t ti, to;
  logic hv [$];
  tag_t ht [$];

  tag_queue #(.LATENCY(L)) dut (.clk(clk), .rst_n(rst_n), .valid_i(vi), .tag_i(ti),
                                .valid_o(vo), .tag_o(to));

  initial begin
    vi = 0; ti = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < L; i++) begin hv.push_back(1'b0); ht.push_back('0); end
    repeat (500) begin
      logic ev; tag_t et;
      vi = $urandom_range(0, 1); ti = tag_t'($urandom);
      hv.push_back(vi); ht.push_back(ti);
      #1;
      ev = hv.pop_front(); et = ht.pop_front();
      checks++;
      if (vo !== ev || (ev && to !== et)) begin
        failures++;
        $display("FAIL got %0b/%0d expected %0b/%0d", vo, to, ev, et);
      end
      @(negedge clk);
    end
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
