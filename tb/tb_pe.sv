// tb_pe: loads random weights into one PE and checks d_o = d_i + a_i*b,
// a_o = a_i and that the weight holds while b_load_i is low.
module tb_pe;
  import dolma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [IN_W-1:0]  a, b_in, a_o, b_o;
  logic signed [ACC_W-1:0] d, d_o;
  logic                    load;

  pe dut (.clk(clk), .a_i(a), .d_i(d), .b_i(b_in), .b_load_i(load),
          .a_o(a_o), .d_o(d_o), .b_o(b_o));

  initial begin
    load = 0; a = 0; d = 0; b_in = 0;
    repeat (200) begin
      logic signed [IN_W-1:0] w;
      w = IN_W'($urandom);
      @(negedge clk); b_in = w; load = 1;
      @(negedge clk); load = 0; b_in = IN_W'($urandom);
      repeat (5) begin
        longint exp;
        a = IN_W'($urandom); d = ACC_W'($urandom);
        #1;
        exp = longint'(d) + longint'(a) * longint'(w);
        checks++;
        if (d_o !== ACC_W'(exp) || a_o !== a || b_o !== w) begin
          failures++;
          $display("FAIL a=%0d b=%0d d=%0d -> %0d", a, w, d, d_o);
        end
        @(negedge clk);
      end
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
