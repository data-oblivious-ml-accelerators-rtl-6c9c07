// tb_activation: random and boundary 32-bit values through identity and
// ReLU with random scale shifts (0..31); each output must be the value
// divided by 2^shift and rounded half up (computed here with 64-bit
// integers), zeroed if negative under ReLU, saturated to [-128, 127]; the
// tag must pass unchanged.
module tb_activation;
  import dolma_pkg::*;
  localparam int D = 8;
  int checks = 0, failures = 0;
  logic relu;
  logic [4:0] sh;
  logic signed [ACC_W-1:0] x [D];
  logic signed [IN_W-1:0]  y [D];
  tag_t ti, to;

  activation #(.DIM(D)) dut (.relu_i(relu), .shift_i(sh), .row_i(x), .tag_i(ti), .row_o(y), .tag_o(to));

  initial begin
    repeat (500) begin
      relu = $urandom_range(0, 1);
      sh = ($urandom_range(0, 1) == 0) ? 5'd0 : 5'($urandom_range(0, 31));
      ti = tag_t'($urandom);
      for (int i = 0; i < D; i++)
        case ($urandom_range(0, 3))
          0: x[i] = ACC_W'($urandom);
          1: x[i] = ACC_W'($urandom_range(0, 300)) - 150;
          2: x[i] = (i % 2) ? 127 : -128;
          default: x[i] = (i % 2) ? 128 : -129;
        endcase
      #1;
      for (int i = 0; i < D; i++) begin
        longint e;
        e = longint'(x[i]);
        if (sh != 0) e = (e + (longint'(1) << (sh - 1))) >>> sh;
        if (relu && e < 0) e = 0;
        if (e > 127) e = 127;
        if (e < -128) e = -128;
        checks++;
        if (int'(y[i]) != e) begin
          failures++;
          $display("FAIL x=%0d relu=%0b -> %0d expected %0d", x[i], relu, y[i], e);
        end
      end
      checks++;
      if (to !== ti) failures++;
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
